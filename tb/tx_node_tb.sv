// tx_node_tb: transmit node at reduced memory size (8 sub-banks of 64
// samples, 32-entry RTR/PB) over 8 scenarios of 2048 cycles, programmed
// directly on the configuration bus. Each scenario has new delays (often
// two outputs in one collision group) and gains. Every output sample from
// scenario 1 on is compared with
//   out_i(t) = A_i(t-2) G_i sum_k c_ik src(t - D_i + 1 - k),
// D_i being the programmed physical delay (so the node latency of 11 cycles
// and the buffer delay are checked to the cycle) and A_i the applied
// Doppler coefficient; the generator output itself is checked against its
// table, period and pulse length. Requires collisions and prefetches.
module tx_node_tb;
  import rfe_pkg::*;
  import rfe_tb_pkg::*;
  localparam int P = 8, S = 64, RD = 32, K = 2048, NS = 8, HN = 4096, SKIP = 16;
  localparam int LAT = FIFO_LAT + FDC_LAT + GAIN_LAT + DOPP_LAT;
  localparam int DPER = 90, DON = 70;
  logic clk = 0, rst_n = 0, run = 0, commit = 0;
  logic su;
  logic [31:0] to_su;
  logic [15:0] scen_cnt;
  cfg_bus_t cfg = '0;
  cplx_t out [3], src;
  logic [3:0] status;
  int checks = 0, failures = 0, t = -1, cur_s = -1, t_su = 0, n_coll = 0, n_pf = 0;

  cplx_t   tab [64];
  coef10_t c [3][4];
  logic [31:0] fd [3];
  int      d [NS][3];
  fp16_t   g [NS][3];
  real     hs_r [HN], hs_i [HN], ha_r [3][HN], ha_i [3][HN];

  scen_timer u_t (.clk, .rst_n, .run, .k_len(32'(K)), .su, .to_su, .scen_cnt);
  tx_node #(.NODE_ID(NODE_TX), .M_OUT(3), .P(P), .S(S), .RTR_D(RD)) dut (
    .clk, .rst_n, .run, .su, .to_su, .commit, .cfg, .out, .src, .status);
  always #5 clk = ~clk;

  task automatic wr(logic [11:0] ra, logic [31:0] v);
    @(negedge clk);
    cfg.we = 1; cfg.addr = {NODE_TX, ra}; cfg.data = v;
    @(negedge clk);
    cfg.we = 0;
  endtask

  task automatic write_scen(int s);
    for (int i = 0; i < 3; i++) begin
      wr(REG_DELAY + 12'(i), {1'b1, 31'(d[s][i])});
      wr(REG_OUT_GAIN + 12'(i), 32'(g[s][i]));
    end
  endtask

  function automatic int rtau(int cl);
    return S + cl * (S + RD) + int'($urandom_range(RD - 4));
  endfunction

  initial begin
    for (int k = 0; k < 64; k++) tab[k] = '{re: rnd_fp(13, 14), im: rnd_fp(13, 14)};
    for (int i = 0; i < 3; i++) begin
      c[i] = '{10'h0, 10'h0, 10'h0, 10'h0};
      for (int k = 0; k < 4; k++) c[i][k] = {1'($urandom), 5'($urandom_range(10, 13)), 4'($urandom)};
      c[i][1] = 10'h0E8;   // 0.75 main tap
      fd[i] = $urandom_range(2000000);
    end
    for (int s = 0; s < NS; s++) begin
      int cl;
      cl = int'($urandom_range(3));
      d[s][0] = rtau(cl) + LAT;
      d[s][1] = rtau(($urandom_range(1) == 1) ? cl : int'($urandom_range(3))) + LAT;
      d[s][2] = rtau(int'($urandom_range(3))) + LAT;
      for (int i = 0; i < 3; i++) g[s][i] = rnd_fp(13, 14);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 64; k++) wr(REG_DRFG_TAB + 12'(k), tab[k]);
    wr(REG_DRFG_PER, DPER);
    wr(REG_DRFG_ON, DON);
    wr(REG_DRFG_EN, 1);
    for (int i = 0; i < 3; i++) begin
      for (int k = 0; k < 4; k++) wr(REG_OUT_FDC + 12'(i * 4 + k), 32'(c[i][k]));
      wr(REG_DOPP + 12'(i), fd[i]);
    end
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

  always @(negedge clk) begin
    if (rst_n && run) begin
      t++;
      if (su) begin cur_s++; t_su = t; end
      if (to_su == 32'd1 && status[3]) n_coll++;
      for (int i = 0; i < 3; i++) n_pf += int'(dut.u_fifo.pf_we[i]);
      hs_r[t % HN] = fp2r(src.re); hs_i[t % HN] = fp2r(src.im);
      for (int i = 0; i < 3; i++) begin
        ha_r[i][t % HN] = fp2r(dut.u_dopp.coef[i].re);
        ha_i[i][t % HN] = fp2r(dut.u_dopp.coef[i].im);
      end
      begin
        int k;
        cplx_t e;
        k = t - 1;
        e = (k >= 0 && (k % DPER) < DON) ? tab[(k % DPER) % 64] : '0;
        checks++;
        if (src !== e) begin
          failures++;
          if (failures < 15) $display("FAIL generator t=%0d %h expected %h", t, src, e);
        end
      end
      if (cur_s >= 1 && cur_s < NS && t - t_su >= SKIP)
        for (int i = 0; i < 3; i++) begin
          real sr, si, mag, cr, xr, xi, gr, ar, ai, er, ei;
          sr = 0; si = 0; mag = 0;
          for (int k = 0; k < 4; k++) begin
            cr = c10r(c[i][k]);
            xr = hs_r[(t - d[cur_s][i] + 1 - k + HN) % HN];
            xi = hs_i[(t - d[cur_s][i] + 1 - k + HN) % HN];
            sr += cr * xr; si += cr * xi;
            mag += (cr < 0 ? -cr : cr) * ((xr < 0 ? -xr : xr) + (xi < 0 ? -xi : xi));
          end
          gr = fp2r(g[cur_s][i]);
          ar = ha_r[i][(t - 2) % HN]; ai = ha_i[i][(t - 2) % HN];
          er = gr * (sr * ar - si * ai); ei = gr * (sr * ai + si * ar);
          checks++;
          if ((fp2r(out[i].re) - er) ** 2 > (0.02 * gr * mag + 1e-4) ** 2 ||
              (fp2r(out[i].im) - ei) ** 2 > (0.02 * gr * mag + 1e-4) ** 2) begin
            failures++;
            if (failures < 15) $display("FAIL out[%0d] t=%0d scen %0d: (%f, %f) expected (%f, %f)",
                                        i, t, cur_s, fp2r(out[i].re), fp2r(out[i].im), er, ei);
          end
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
