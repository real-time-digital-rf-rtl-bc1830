// passive_node_tb: passive object node at reduced memory size (8
// sub-banks of 64 samples, 32-entry RTR/PB), 2 inputs, 3 outputs, 8
// scenarios of 2048 cycles, programmed on the configuration bus. Random
// samples drive both inputs every cycle. From scenario 1 on, the
// intermediate signal and every output are compared on every cycle with
//   v(t)     = sum_m alpha_m sum_k cin_mk in_m(t - 6 + 1 - k)
//   out_i(t) = A_i(t-2) beta_i sum_k cout_ik v(t - D_i + 6 + 1 - k),
// D_i being the programmed physical delay (node latency 17 cycles) and A_i
// the applied Doppler coefficient. In the last scenario output 2 is
// disabled and must be zero. Requires collisions and prefetches.
module passive_node_tb;
  import rfe_pkg::*;
  import rfe_tb_pkg::*;
  localparam int P = 8, S = 64, RD = 32, K = 2048, NS = 8, HN = 4096, SKIP = 16, SKIPV = 8;
  localparam int LAT = FDC_LAT + GAIN_LAT + 1 + FIFO_LAT + FDC_LAT + GAIN_LAT + DOPP_LAT;
  logic clk = 0, rst_n = 0, run = 0, commit = 0;
  logic su;
  logic [31:0] to_su;
  logic [15:0] scen_cnt;
  cfg_bus_t cfg = '0;
  cplx_t in [2], out [3], v;
  logic [3:0] status;
  int checks = 0, failures = 0, t = -1, cur_s = -1, t_su = 0, n_coll = 0, n_pf = 0;

  coef10_t ci [2][4], co [3][4];
  logic [31:0] fd [3];
  int      d [NS][3];
  bit      en [NS][3];
  fp16_t   a [NS][2], b [NS][3];
  real     hi_r [2][HN], hi_i [2][HN], hv_r [HN], hv_i [HN], ha_r [3][HN], ha_i [3][HN];

  scen_timer u_t (.clk, .rst_n, .run, .k_len(32'(K)), .su, .to_su, .scen_cnt);
  passive_node #(.NODE_ID(NODE_OBJ1), .M_IN(2), .M_OUT(3), .P(P), .S(S), .RTR_D(RD)) dut (
    .clk, .rst_n, .run, .su, .to_su, .commit, .cfg, .in, .out, .v, .status);
  always #5 clk = ~clk;

  task automatic wr(logic [11:0] ra, logic [31:0] val);
    @(negedge clk);
    cfg.we = 1; cfg.addr = {NODE_OBJ1, ra}; cfg.data = val;
    @(negedge clk);
    cfg.we = 0;
  endtask

  task automatic write_scen(int s);
    for (int i = 0; i < 3; i++) begin
      wr(REG_DELAY + 12'(i), {en[s][i], 31'(d[s][i])});
      wr(REG_OUT_GAIN + 12'(i), 32'(b[s][i]));
    end
    for (int m = 0; m < 2; m++) wr(REG_IN_GAIN + 12'(m), 32'(a[s][m]));
  endtask

  function automatic int rtau(int cl);
    return S + cl * (S + RD) + int'($urandom_range(RD - 4));
  endfunction

  function automatic real ab(real x);
    return x < 0 ? -x : x;
  endfunction

  initial begin
    for (int i = 0; i < 3; i++) begin
      for (int k = 0; k < 4; k++) co[i][k] = {1'($urandom), 5'($urandom_range(10, 13)), 4'($urandom)};
      co[i][1] = 10'h0E8;
      fd[i] = $urandom_range(2000000);
    end
    for (int m = 0; m < 2; m++) begin
      for (int k = 0; k < 4; k++) ci[m][k] = {1'($urandom), 5'($urandom_range(10, 13)), 4'($urandom)};
      ci[m][1] = 10'h0E0;   // 0.5
    end
    for (int s = 0; s < NS; s++) begin
      int cl;
      cl = int'($urandom_range(3));
      d[s][0] = rtau(cl) + LAT;
      d[s][1] = rtau(($urandom_range(1) == 1) ? cl : int'($urandom_range(3))) + LAT;
      d[s][2] = rtau(int'($urandom_range(3))) + LAT;
      for (int i = 0; i < 3; i++) begin b[s][i] = rnd_fp(13, 14); en[s][i] = 1; end
      for (int m = 0; m < 2; m++) a[s][m] = rnd_fp(13, 14);
    end
    en[NS-1][2] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3; i++) begin
      for (int k = 0; k < 4; k++) wr(REG_OUT_FDC + 12'(i * 4 + k), 32'(co[i][k]));
      wr(REG_DOPP + 12'(i), fd[i]);
    end
    for (int m = 0; m < 2; m++)
      for (int k = 0; k < 4; k++) wr(REG_IN_FDC + 12'(m * 4 + k), 32'(ci[m][k]));
    write_scen(0);
    @(negedge clk);
    commit = 1;
    @(negedge clk);
    commit = 0;
    write_scen(1);
    run = 1;
    for (int s = 2; s < NS; s++) begin
      wait (cur_s == s - 2);
      write_scen(s);
    end
    wait (cur_s == NS);
    if (n_coll == 0) begin failures++; $display("FAIL no collision group"); end
    if (n_pf == 0) begin failures++; $display("FAIL no prefetch"); end
    checks++;
    if (status[2:0] != 3'b000) begin failures++; $display("FAIL error flags %b", status); end
    $display("collision scenarios %0d, prefetch writes %0d", n_coll, n_pf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // new random input samples every cycle
  always @(negedge clk) begin
    for (int m = 0; m < 2; m++)
      in[m] <= (rst_n && run) ? '{re: rnd_fp(13, 15), im: rnd_fp(13, 15)} : '0;
  end

  task automatic cmp(string what, cplx_t d_, real er, real ei, real mag);
    checks++;
    if (ab(fp2r(d_.re) - er) > 0.02 * mag + 1e-4 || ab(fp2r(d_.im) - ei) > 0.02 * mag + 1e-4) begin
      failures++;
      if (failures < 15) $display("FAIL %s t=%0d scen %0d: (%f, %f) expected (%f, %f)",
                                  what, t, cur_s, fp2r(d_.re), fp2r(d_.im), er, ei);
    end
  endtask

  always @(negedge clk) begin
    if (rst_n && run) begin
      t++;
      if (su) begin cur_s++; t_su = t; end
      if (to_su == 32'd1 && status[3]) n_coll++;
      for (int i = 0; i < 3; i++) n_pf += int'(dut.u_fifo.pf_we[i]);
      // in[] changes by a non-blocking update at this edge: the value read
      // here is the one applied during the previous cycle.
      if (t > 0) for (int m = 0; m < 2; m++) begin
        hi_r[m][(t - 1) % HN] = fp2r(in[m].re); hi_i[m][(t - 1) % HN] = fp2r(in[m].im);
      end
      hv_r[t % HN] = fp2r(v.re); hv_i[t % HN] = fp2r(v.im);
      for (int i = 0; i < 3; i++) begin
        ha_r[i][t % HN] = fp2r(dut.u_dopp.coef[i].re);
        ha_i[i][t % HN] = fp2r(dut.u_dopp.coef[i].im);
      end
      if (cur_s >= 1 && cur_s < NS && t - t_su >= SKIPV && t >= 10) begin
        real sr, si, mag, cr, xr, xi;
        sr = 0; si = 0; mag = 0;
        for (int m = 0; m < 2; m++)
          for (int k = 0; k < 4; k++) begin
            cr = c10r(ci[m][k]) * fp2r(a[cur_s][m]);
            xr = hi_r[m][(t - 6 + 1 - k + HN) % HN]; xi = hi_i[m][(t - 6 + 1 - k + HN) % HN];
            sr += cr * xr; si += cr * xi; mag += ab(cr) * (ab(xr) + ab(xi));
          end
        cmp("v", v, sr, si, mag);
      end
      if (cur_s >= 1 && cur_s < NS && t - t_su >= SKIP)
        for (int i = 0; i < 3; i++) begin
          real sr, si, mag, cr, xr, xi, gr, ar, ai;
          if (!en[cur_s][i]) begin
            checks++;
            if (out[i] !== '0) begin failures++; $display("FAIL disabled out[%0d] not zero", i); end
            continue;
          end
          sr = 0; si = 0; mag = 0;
          for (int k = 0; k < 4; k++) begin
            cr = c10r(co[i][k]);
            xr = hv_r[(t - d[cur_s][i] + 6 + 1 - k + HN) % HN];
            xi = hv_i[(t - d[cur_s][i] + 6 + 1 - k + HN) % HN];
            sr += cr * xr; si += cr * xi; mag += ab(cr) * (ab(xr) + ab(xi));
          end
          gr = fp2r(b[cur_s][i]);
          ar = ha_r[i][(t - 2) % HN]; ai = ha_i[i][(t - 2) % HN];
          cmp($sformatf("out[%0d]", i), out[i], gr * (sr * ar - si * ai), gr * (sr * ai + si * ar), ab(gr) * mag);
        end
    end
  end

  initial begin
    #5_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
