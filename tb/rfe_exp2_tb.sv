// rfe_exp2_tb: the four-node dynamic experiment of the test chip, run on the
// full-size design (default parameters).
//
// Scene: the transmitter sends a single-sample pulse of 1.0 every 2048
// cycles. Object 1 and the receiver are 3000 and 3100 samples from the
// transmitter, so they fall into one collision group of the transmitter's
// SIMO-FIFO (buffer delays 100 samples apart, one sub-bank is 1024).
// Object 2 is 5000 samples away, 4000 from object 1 and 4000 from the
// receiver; object 1 is 2500 from the receiver. The direct path, the single
// reflections and the object-to-object bounces (Tx-Obj1-Obj2-Rx = 11000
// samples, and longer ones back and forth) all reach the receiver. In the
// third scenario object 2's reflectivity halves (its gain toward object 1
// from 0.5 to 0.25, toward the receiver from 0.75 to 0.375). Filters
// have only the zero-lag tap set and Doppler is off, as in the chip's own
// measurement.
//
// Scenario 0 runs with all filter taps at zero so that every memory fills
// with clean data; taps of 1.0 take effect from scenario 1 on.
// Expected receiver output: the sum over every propagation path (up to
// MAXH object hops) of the product of its gains, at the transmit pulse time
// plus the sum of the path's delays plus 3 cycles of receiver latency. A
// path contributes only if every hop happened after the taps were switched
// on, and object 2's gain is taken at the time the sample left object 2.
// Cycles where a hop falls within F cycles of a scenario update (pipelines
// hold old and new settings) are not compared.
// Counted and required: scenario updates, pulses seen on the direct path,
// on single reflections and on multi-bounce paths, arrivals through object
// 2 with its updated reflectivity, and the transmitter collision flag; the
// error flags must stay clear.
module rfe_exp2_tb;
  import rfe_pkg::*;
  import rfe_tb_pkg::*;

  localparam int K = 16384, NSC = 4, HALF = 6, PER = 2048, MAXH = 12, F = 16;
  localparam int D_T1 = 3000, D_T2 = 5000, D_TR = 3100;   // from Tx
  localparam int D_12 = 4000, D_1R = 2500;                // from Obj1
  localparam int D_21 = 4000, D_2R = 4000;                // from Obj2
  localparam int RX_LAT = 3;
  // object 2 reflects toward the receiver more strongly than toward object 1
  localparam real B1 = 0.5, B21_OLD = 0.5, B21_NEW = 0.25, B2R_OLD = 0.75, B2R_NEW = 0.375;
  localparam logic [3:0] NT = NODE_TX, N1 = NODE_OBJ1, N2 = NODE_OBJ2, NR = NODE_RX, NG = NODE_GLOBAL;
  localparam coef10_t ONE10 = 10'h0F0;                    // 1.0 in the 10-bit tap format

  logic  clk = 0, rst_n = 0, sclk = 0, cs_n = 1, mosi = 0;
  logic  miso, su;
  cplx_t rx_out;
  logic [11:0] status;

  rfe_top dut (
    .clk, .rst_n, .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi), .spi_miso(miso),
    .rx_out, .su, .status);

  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  int n_su = 0, n_direct = 0, n_single = 0, n_multi = 0, n_rcs = 0, n_coll = 0, n_src = 0;

  // ---------------------------------------------------------------- serial port
  task automatic spi_frame(logic rw, logic [15:0] addr, logic [31:0] wd);
    logic [48:0] fr;
    fr = {rw, addr, wd};
    @(negedge clk);
    cs_n = 0;
    repeat (HALF) @(negedge clk);
    for (int b = 48; b >= 0; b--) begin
      mosi = fr[b];
      repeat (HALF) @(negedge clk);
      sclk = 1;
      repeat (HALF) @(negedge clk);
      sclk = 0;
    end
    repeat (HALF) @(negedge clk);
    cs_n = 1;
    repeat (2 * HALF) @(negedge clk);
  endtask

  task automatic wr(logic [3:0] node, logic [11:0] ra, logic [31:0] d);
    spi_frame(1'b0, {node, ra}, d);
  endtask

  // ---------------------------------------------------------------- timing
  longint cyc = 0, t_first = -1;
  longint su_t [NSC + 2];

  // Path enumeration: a path is Tx, then h >= 0 object hops alternating
  // between the objects, then Rx. first = 1 or 2 is the first object.
  // Returns 0 if the path does not contribute at receiver cycle t, 1 if it
  // does (gain in g), -1 if the cycle must be skipped.
  function automatic int path_at(longint t, int h, int first, output real g);
    longint e [MAXH + 2];
    int     node [MAXH + 2];
    longint ts, tot;
    int     cur;
    g = 1.0;
    // delays along the path
    tot = RX_LAT;
    if (h == 0) begin
      tot += D_TR;
    end else begin
      cur = first;
      tot += (first == 1) ? D_T1 : D_T2;
      for (int j = 1; j < h; j++) begin
        tot += (cur == 1) ? D_12 : D_21;
        cur = 3 - cur;
      end
      tot += (cur == 1) ? D_1R : D_2R;
    end
    ts = t - tot;
    if (t_first < 0 || ts < t_first || ((ts - t_first) % PER) != 0) return 0;
    // emission times: e[0] leaves Tx, e[j] leaves the j-th object
    e[0] = ts + ((h == 0) ? D_TR : ((first == 1) ? D_T1 : D_T2));
    node[0] = 0;
    cur = first;
    for (int j = 1; j <= h; j++) begin
      node[j] = cur;
      e[j] = e[j - 1] + ((j == h) ? ((cur == 1) ? D_1R : D_2R) : ((cur == 1) ? D_12 : D_21));
      cur = 3 - cur;
    end
    for (int j = 0; j <= h; j++) begin
      if (e[j] > su_t[1] - F && e[j] < su_t[1] + F) return -1;
      if (e[j] <= su_t[1] - F) return 0;
      if (node[j] == 2 && e[j] > su_t[2] - F && e[j] < su_t[2] + F) return -1;
      if (node[j] == 1) g *= B1;
      if (node[j] == 2)
        g *= (e[j] >= su_t[2] + F) ? ((j == h) ? B2R_NEW : B21_NEW) : ((j == h) ? B2R_OLD : B21_OLD);
    end
    return 1;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    // nothing is looked at before reset has settled
    if (cyc > 20 && su) begin
      su_t[n_su] <= cyc;
      n_su <= n_su + 1;
    end
    // generator: single pulse of 1.0 every PER cycles
    if (cyc > 20 && dut.run) begin
      if (dut.tx_src != 32'd0) begin
        if (t_first < 0) t_first <= cyc;
        else begin
          checks++;
          if (((cyc - t_first) % PER) != 0 || dut.tx_src != {16'h3C00, 16'h0000}) begin
            failures++;
            $display("FAIL generator pulse at %0d", cyc);
          end
        end
        n_src++;
      end
    end
    // receiver output, from scenario 1 on
    if (n_su >= 2) begin
      automatic real exp_re = 0.0, g;
      automatic bit skip = 0;
      automatic int r, cls_d = 0, cls_s = 0, cls_m = 0, cls_rcs = 0;
      for (int h = 0; h <= MAXH; h++) begin
        for (int first = 1; first <= 2; first++) begin
          if (h == 0 && first == 2) continue;
          r = path_at(cyc, h, first, g);
          if (r < 0) skip = 1;
          if (r > 0) begin
            exp_re += g;
            if (h == 0) cls_d = 1;
            else if (h == 1) cls_s = 1;
            else cls_m = 1;
            if (h >= 1 && n_su >= 3 && (((first == 2) && (h % 2 == 1)) || ((first == 1) && (h % 2 == 0))))
              cls_rcs = 1;   // last hop leaves object 2
          end
        end
      end
      if (!skip) begin
        checks++;
        // values below the smallest normal fp16 (2^-14) flush to zero
        if (!(close(fp2r(rx_out.re), exp_re, 1.0 / 256.0) ||
              (fp2r(rx_out.re) == 0.0 && exp_re < 1.0 / 16384.0)) || fp2r(rx_out.im) != 0.0) begin
          failures++;
          if (failures < 10)
            $display("FAIL rx at %0d: got %f,%fj exp %f", cyc, fp2r(rx_out.re), fp2r(rx_out.im), exp_re);
        end else begin
          n_direct += cls_d;
          n_single += cls_s;
          n_multi  += cls_m;
          n_rcs    += cls_rcs;
        end
      end
      // flags: only the Tx collision bit may be set
      checks++;
      if ((status & 12'h777) != 12'd0) begin
        failures++;
        if (failures < 10) $display("FAIL status %h at %0d", status, cyc);
      end
      if (status[3]) n_coll++;
    end
  end

  // ---------------------------------------------------------------- stimulus
  initial begin
    for (int i = 0; i < NSC + 2; i++) su_t[i] = 64'h3FFF_FFFF_FFFF_FFFF;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    wr(NG, REG_RUN, 0);
    wr(NG, REG_SCEN_LEN, K);
    wr(NT, REG_DRFG_TAB, {16'h3C00, 16'h0000});
    wr(NT, REG_DRFG_PER, PER);
    wr(NT, REG_DRFG_ON, 1);
    wr(NT, REG_DRFG_EN, 1);
    // scenario 0: geometry and gains, filter taps left at zero
    wr(NT, REG_DELAY + 0, {1'b1, 31'(D_T1)});
    wr(NT, REG_DELAY + 1, {1'b1, 31'(D_T2)});
    wr(NT, REG_DELAY + 2, {1'b1, 31'(D_TR)});
    wr(N1, REG_DELAY + 0, {1'b1, 31'(D_12)});
    wr(N1, REG_DELAY + 1, {1'b1, 31'(D_1R)});
    wr(N2, REG_DELAY + 0, {1'b1, 31'(D_21)});
    wr(N2, REG_DELAY + 1, {1'b1, 31'(D_2R)});
    for (int i = 0; i < 2; i++) wr(N1, REG_OUT_GAIN + 12'(i), 32'(r2fp(B1)));
    wr(N2, REG_OUT_GAIN + 0, 32'(r2fp(B21_OLD)));
    wr(N2, REG_OUT_GAIN + 1, 32'(r2fp(B2R_OLD)));
    wr(NG, REG_COMMIT, 1);
    // scenario 1: zero-lag taps of 1.0 everywhere
    for (int i = 0; i < 3; i++) wr(NT, REG_OUT_FDC + 12'(i * 4 + 1), 32'(ONE10));
    for (int n = 0; n < 2; n++)
      for (int i = 0; i < 2; i++) begin
        wr(n ? N2 : N1, REG_OUT_FDC + 12'(i * 4 + 1), 32'(ONE10));
        wr(n ? N2 : N1, REG_IN_FDC + 12'(i * 4 + 1), 32'(ONE10));
      end
    wr(NG, REG_RUN, 1);
    // during scenario 0: object 2's reflectivity for scenario 2
    wait (n_su >= 1);
    repeat (10) @(negedge clk);
    wr(N2, REG_OUT_GAIN + 0, 32'(r2fp(B21_NEW)));
    wr(N2, REG_OUT_GAIN + 1, 32'(r2fp(B2R_NEW)));
    wait (n_su >= NSC);
    repeat (K - 10) @(negedge clk);
    $display("mechanisms: su=%0d src_pulses=%0d direct=%0d single=%0d multi_bounce=%0d rcs_updated=%0d tx_collision_cycles=%0d",
             n_su, n_src, n_direct, n_single, n_multi, n_rcs, n_coll);
    checks++; if (n_su < NSC)   begin failures++; $display("FAIL too few scenario updates"); end
    checks++; if (n_direct == 0) begin failures++; $display("FAIL no direct-path pulse"); end
    checks++; if (n_single == 0) begin failures++; $display("FAIL no single-reflection pulse"); end
    checks++; if (n_multi == 0)  begin failures++; $display("FAIL no multi-bounce pulse"); end
    checks++; if (n_rcs == 0)    begin failures++; $display("FAIL no pulse with the updated reflectivity"); end
    checks++; if (n_coll == 0)   begin failures++; $display("FAIL transmitter collision never flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd2 * (64'd30000 + 64'(NSC + 1) * 64'(K)));
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
