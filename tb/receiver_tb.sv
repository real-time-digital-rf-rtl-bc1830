// receiver_tb: receive node with 3 inputs and a 64-entry capture memory.
// Random input samples every cycle and new gains every 300-cycle scenario;
// the output must be sum_m G_m in_m(t - 3) (latency 3) on every cycle away
// from the gain switch. The capture window (start 500, step 3) is then read
// back through the register read port (data one cycle after the strobe)
// and compared word for word with the output logged at those cycles; the
// memory must stop after 64 samples (capture done) and not overwrite.
module receiver_tb;
  import rfe_pkg::*;
  import rfe_tb_pkg::*;
  localparam int RXD = 64, K = 300, START = 500, STEP = 3, NCYC = 1500;
  logic clk = 0, rst_n = 0, run = 0, commit = 0, su, rd_stb = 0;
  int cnt = 0;
  cfg_bus_t cfg = '0;
  logic [31:0] rdata;
  cplx_t in [3], rx_out;
  logic cap_done;
  int checks = 0, failures = 0, t = -1, s = -1, n_cap = 0;
  fp16_t g [8][3];
  cplx_t log_c [RXD];
  real hr [3][8], hi [3][8];

  receiver #(.NODE_ID(NODE_RX), .M_IN(3), .RX_D(RXD)) dut (
    .clk, .rst_n, .run, .su, .commit, .cfg, .rd_stb, .rdata, .in, .rx_out, .cap_done);
  always #5 clk = ~clk;
  // scenario updates every K running cycles, the first on the first cycle
  always @(posedge clk) if (run) cnt <= (cnt == K - 1) ? 0 : cnt + 1;
  assign su = run && cnt == 0;

  task automatic wr(logic [11:0] ra, logic [31:0] val);
    @(negedge clk);
    cfg.we = 1; cfg.addr = {NODE_RX, ra}; cfg.data = val;
    @(negedge clk);
    cfg.we = 0;
  endtask

  function automatic real ab(real x);
    return x < 0 ? -x : x;
  endfunction

  initial begin
    for (int k = 0; k < 8; k++) for (int m = 0; m < 3; m++) g[k][m] = rnd_fp(13, 15);
    for (int m = 0; m < 3; m++) in[m] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wr(REG_RX_START, START);
    wr(REG_RX_STEP, STEP);
    for (int m = 0; m < 3; m++) wr(REG_IN_GAIN + 12'(m), 32'(g[0][m]));
    @(negedge clk);
    commit = 1;
    @(negedge clk);
    commit = 0;
    for (int m = 0; m < 3; m++) wr(REG_IN_GAIN + 12'(m), 32'(g[1][m]));
    run = 1;
    // during scenario k write the gains of scenario k + 2
    for (int k = 0; k + 2 < 5; k++) begin
      wait (s == k);
      for (int m = 0; m < 3; m++) wr(REG_IN_GAIN + 12'(m), 32'(g[k + 2][m]));
    end
    wait (t >= NCYC);
    run = 0;
    checks++;
    if (!cap_done) begin failures++; $display("FAIL capture not done"); end
    for (int k = 0; k < RXD; k++) begin
      @(negedge clk);
      rd_stb = 1; cfg.addr = {NODE_RX, REG_RX_MEM + 12'(k)};
      @(negedge clk);
      rd_stb = 0;
      checks++;
      if (rdata !== log_c[k]) begin
        failures++;
        if (failures < 15) $display("FAIL capture[%0d] = %h expected %h", k, rdata, log_c[k]);
      end
    end
    $display("captured %0d samples", n_cap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n && run) begin
      t++;
      if (su) s++;
      // the value read here was applied during the previous cycle
      if (t > 0) for (int m = 0; m < 3; m++) begin
        hr[m][(t - 1) % 8] = fp2r(in[m].re); hi[m][(t - 1) % 8] = fp2r(in[m].im);
      end
      if (t >= START && (t - START) % STEP == 0 && n_cap < RXD) begin
        log_c[n_cap] = rx_out;
        n_cap++;
      end
      if (s >= 0 && t >= 3 && (t % K) >= 4) begin
        real er, ei, mag, gr;
        er = 0; ei = 0; mag = 0;
        for (int m = 0; m < 3; m++) begin
          gr = fp2r(g[s][m]);
          er += gr * hr[m][(t - 3) % 8]; ei += gr * hi[m][(t - 3) % 8];
          mag += ab(gr) * (ab(hr[m][(t - 3) % 8]) + ab(hi[m][(t - 3) % 8]));
        end
        checks++;
        if (ab(fp2r(rx_out.re) - er) > 0.01 * mag + 1e-4 || ab(fp2r(rx_out.im) - ei) > 0.01 * mag + 1e-4) begin
          failures++;
          if (failures < 15) $display("FAIL t=%0d: (%f, %f) expected (%f, %f) mag %f", t,
                                      fp2r(rx_out.re), fp2r(rx_out.im), er, ei, mag);
        end
      end
      for (int m = 0; m < 3; m++) in[m] <= '{re: rnd_fp(13, 15), im: rnd_fp(13, 15)};
    end
  end

  initial begin
    #2_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
