// rfe_top_tb_body.svh: body shared by the end-to-end testbenches of the
// four-node emulator (rfe_top_tb at reduced memory size, rfe_top_full_tb at
// the chip's size). The including module declares P, S, RD, RXD, K, NS,
// HALF, WD_NS, the pins and the dut instance.
//
// Everything is programmed through the serial port, exactly as a host
// would: the constant set (filters, Doppler frequencies, generator, capture
// window, scenario length), scenario 0, commit, scenario 1, run; then during
// each scenario s the values for scenario s+2. Each scenario draws new
// delays (grouped into clusters so that collision groups form), new gains
// and, in the last scenario, an illegal delay on object 2.
//
// Checking: a real-valued model of each node is driven by that node's own
// input links as seen in the running design, and every output of every node
// is compared on every cycle from scenario 1 on (scenario 0 has no
// prefetch), except in a short window after each scenario update where
// pipelines hold a mix of old and new settings:
//   generator  src(k) = tab[(k mod per) mod 64] if (k mod per) < on_len, k = cycle - 1
//   transmit   out_i(t) = A_i(t-2) b_i sum_k c_ik src(t - D_i + 1 - k)
//   passive    v(t)     = sum_m a_m sum_k c_mk in_m(t - 6 + 1 - k)
//              out_i(t) = A_i(t-2) b_i sum_k c_ik v(t - D_i + 6 + 1 - k)
//   receiver   r(t)     = sum_m G_m in_m(t - 3)
// where D_i is the programmed physical delay, so the delays are checked to
// the exact cycle. A_i is the Doppler coefficient the node applies; its
// value is checked separately against exp(-j 2 pi f n / 2^32) at each
// update, n being 256 x (update number). The capture memory is read back
// over the serial port and compared with the receiver output logged at the
// programmed capture cycles, and the status word is read back.
// Mechanisms counted (each must occur): scenario updates, collision
// scenarios, prefetch writes, multicast reads, Doppler updates with a
// non-zero phase, generator pulses, object-to-object (multi-bounce)
// traffic, serial writes and reads, captures compared, range error report.

  localparam int HN = 32768;                 // history ring length
  localparam int SKIP_OUT = 16, SKIP_V = 8, SKIP_RX = 4;
  localparam int DPER = 200, DON = 150;      // generator period / pulse length
  localparam int CAP_STEP = 7;
  localparam logic [3:0] NT = NODE_TX, N1 = NODE_OBJ1, N2 = NODE_OBJ2, NR = NODE_RX, NG = NODE_GLOBAL;
  localparam int LAT_TX = FIFO_LAT + FDC_LAT + GAIN_LAT + DOPP_LAT;
  localparam int LAT_OB = FDC_LAT + GAIN_LAT + 1 + FIFO_LAT + FDC_LAT + GAIN_LAT + DOPP_LAT;

  int checks = 0, failures = 0;

  // ------------------------------------------------------------------ settings
  cplx_t   tab [64];
  coef10_t fdc_tx [3][4];
  coef10_t fdc_oi [2][2][4];
  coef10_t fdc_oo [2][3][4];
  logic [31:0] fd_tx [3], fd_o [2][3];
  int      d_tx [NS][3];                     // physical delays
  int      d_o  [2][NS][3];
  bit      en_o [2][3] = '{'{1, 1, 0}, '{1, 1, 0}};
  fp16_t   g_tx [NS][3], b_o [2][NS][3], a_o [2][NS][2], g_rx [NS][3];
  int      cap_start;

  function automatic coef10_t mk10(real r);
    fp16_t h;
    h = r2fp(r);
    return h[15:6];
  endfunction

  function automatic fp16_t rgain(real lo, real hi);
    return r2fp(lo + (hi - lo) * real'($urandom_range(1000)) / 1000.0);
  endfunction

  function automatic real rsig();
    real m;
    m = 0.25 + 0.75 * real'($urandom_range(1000)) / 1000.0;
    return ($urandom_range(1) == 1) ? -m : m;
  endfunction

  // Buffer delays: clusters S + c (S + RD) apart, offsets within RD - 4, so
  // delays in one cluster collide legally and different clusters never do.
  function automatic int rtau(int cl);
    return S + cl * (S + RD) + int'($urandom_range(RD - 4));
  endfunction
  localparam int NCL = ((P - 1) * S - (RD - 4) - S) / (S + RD) + 1;

  task automatic draw_settings();
    int cl0;
    for (int k = 0; k < 64; k++) tab[k] = '{re: r2fp(rsig()), im: r2fp(rsig())};
    for (int i = 0; i < 3; i++) begin
      fdc_tx[i] = '{mk10(0.0625), mk10(0.75), mk10(-0.125), mk10(0.03125)};
      fd_tx[i]  = 32'($urandom_range(400000)) + 32'd100000;
      for (int n = 0; n < 2; n++) begin
        fdc_oo[n][i] = '{mk10(-0.0625), mk10(0.875), mk10(0.125), mk10(-0.03125)};
        fd_o[n][i]   = (i == 0) ? 32'd0 : 32'($urandom_range(400000));
      end
    end
    for (int n = 0; n < 2; n++)
      for (int m = 0; m < 2; m++)
        fdc_oi[n][m] = '{mk10(0.125), mk10(0.625), mk10(0.0625), mk10(-0.125)};
    for (int s = 0; s < NS; s++) begin
      // Transmitter: with probability 1/2 outputs 0 and 1 share a cluster.
      cl0 = int'($urandom_range(NCL - 1));
      d_tx[s][0] = rtau(cl0) + LAT_TX;
      d_tx[s][1] = rtau(($urandom_range(1) == 1 || s == 1) ? cl0 : int'($urandom_range(NCL - 1))) + LAT_TX;
      d_tx[s][2] = rtau(int'($urandom_range(NCL - 1))) + LAT_TX;
      for (int n = 0; n < 2; n++) begin
        cl0 = int'($urandom_range(NCL - 1));
        d_o[n][s][0] = rtau(cl0) + LAT_OB;
        d_o[n][s][1] = rtau(($urandom_range(1) == 1 || s == 2) ? cl0 : int'($urandom_range(NCL - 1))) + LAT_OB;
        d_o[n][s][2] = rtau(0) + LAT_OB;
        for (int i = 0; i < 3; i++) b_o[n][s][i] = rgain(0.25, 0.5);
        for (int m = 0; m < 2; m++) a_o[n][s][m] = rgain(0.25, 0.5);
      end
      for (int i = 0; i < 3; i++) begin
        g_tx[s][i] = rgain(0.25, 0.5);
        g_rx[s][i] = rgain(0.5, 1.0);
      end
    end
    // Last scenario: object 2 output 0 below the legal buffer range.
    d_o[1][NS-1][0] = S / 2 + LAT_OB;
    cap_start = 2 * K + 100;
  endtask

  // ------------------------------------------------------------------ serial port
  int n_spi_wr = 0, n_spi_rd = 0;

  task automatic spi_frame(logic rw, logic [15:0] addr, logic [31:0] wd, output logic [31:0] rd);
    logic [48:0] fr;
    fr = {rw, addr, wd};
    rd = '0;
    @(negedge clk);
    cs_n = 0;
    repeat (HALF) @(negedge clk);
    for (int b = 48; b >= 0; b--) begin
      mosi = fr[b];
      repeat (HALF) @(negedge clk);
      if (b <= 31) rd[b] = miso;
      sclk = 1;
      repeat (HALF) @(negedge clk);
      sclk = 0;
    end
    repeat (HALF) @(negedge clk);
    cs_n = 1;
    repeat (2 * HALF) @(negedge clk);
  endtask

  task automatic wr(logic [3:0] node, logic [11:0] ra, logic [31:0] d);
    logic [31:0] dummy;
    spi_frame(1'b0, {node, ra}, d, dummy);
    n_spi_wr++;
  endtask

  task automatic rd(logic [3:0] node, logic [11:0] ra, output logic [31:0] d);
    spi_frame(1'b1, {node, ra}, 32'd0, d);
    n_spi_rd++;
  endtask

  task automatic write_constant();
    wr(NG, REG_RUN, 0);
    wr(NG, REG_SCEN_LEN, 32'(K));
    for (int k = 0; k < 64; k++) wr(NT, REG_DRFG_TAB + 12'(k), tab[k]);
    wr(NT, REG_DRFG_PER, DPER);
    wr(NT, REG_DRFG_ON, DON);
    wr(NT, REG_DRFG_EN, 1);
    for (int i = 0; i < 3; i++) begin
      for (int k = 0; k < 4; k++) wr(NT, REG_OUT_FDC + 12'(i * 4 + k), 32'(fdc_tx[i][k]));
      wr(NT, REG_DOPP + 12'(i), fd_tx[i]);
    end
    for (int n = 0; n < 2; n++) begin
      for (int i = 0; i < 3; i++) begin
        for (int k = 0; k < 4; k++) wr(n ? N2 : N1, REG_OUT_FDC + 12'(i * 4 + k), 32'(fdc_oo[n][i][k]));
        wr(n ? N2 : N1, REG_DOPP + 12'(i), fd_o[n][i]);
      end
      for (int m = 0; m < 2; m++)
        for (int k = 0; k < 4; k++) wr(n ? N2 : N1, REG_IN_FDC + 12'(m * 4 + k), 32'(fdc_oi[n][m][k]));
    end
    wr(NR, REG_RX_START, 32'(cap_start));
    wr(NR, REG_RX_STEP, CAP_STEP);
  endtask

  task automatic write_scen(int s);
    for (int i = 0; i < 3; i++) begin
      wr(NT, REG_DELAY + 12'(i), {1'b1, 31'(d_tx[s][i])});
      wr(NT, REG_OUT_GAIN + 12'(i), 32'(g_tx[s][i]));
      wr(NR, REG_IN_GAIN + 12'(i), 32'(g_rx[s][i]));
    end
    for (int n = 0; n < 2; n++) begin
      for (int i = 0; i < 3; i++) begin
        wr(n ? N2 : N1, REG_DELAY + 12'(i), {en_o[n][i], 31'(d_o[n][s][i])});
        if (i < 2) wr(n ? N2 : N1, REG_OUT_GAIN + 12'(i), 32'(b_o[n][s][i]));
      end
      for (int m = 0; m < 2; m++) wr(n ? N2 : N1, REG_IN_GAIN + 12'(m), 32'(a_o[n][s][m]));
    end
  endtask

  // ------------------------------------------------------------------ histories
  real h_src_r [HN], h_src_i [HN];
  real h_tx_r [3][HN], h_tx_i [3][HN];
  real h_o_r [2][3][HN], h_o_i [2][3][HN];
  real h_v_r [2][HN], h_v_i [2][HN];
  real h_a_r [3][3][HN], h_a_i [3][3][HN];  // Doppler coefficient per node/output
  int  t = -1, cur_s = -1, t_su = 0;
  bit  checking = 0, done_run = 0;

  function automatic int hx(int i);
    return i & (HN - 1);
  endfunction

  // Compare one complex output with a model value (mr, mi) and magnitude m.
  int n_bad_print = 0;
  task automatic cmp(string what, cplx_t d, real mr, real mi, real mag);
    real tol;
    tol = 0.02 * mag + 1.0e-3;
    checks++;
    if ((fp2r(d.re) - mr > tol) || (mr - fp2r(d.re) > tol) ||
        (fp2r(d.im) - mi > tol) || (mi - fp2r(d.im) > tol)) begin
      failures++;
      if (n_bad_print < 20) begin
        n_bad_print++;
        $display("FAIL %s t=%0d scen=%0d: got (%f, %f) expected (%f, %f)",
                 what, t, cur_s, fp2r(d.re), fp2r(d.im), mr, mi);
      end
    end
  endtask

  // Stored sample of stream id (0 generator, 1 object 1 v, 2 object 2 v).
  function automatic real xs(int id, bit im, int i);
    case (id)
      0:       return im ? h_src_i[hx(i)]  : h_src_r[hx(i)];
      1:       return im ? h_v_i[0][hx(i)] : h_v_r[0][hx(i)];
      default: return im ? h_v_i[1][hx(i)] : h_v_r[1][hx(i)];
    endcase
  endfunction

  // Output of a FIFO-based path: A * b * sum_k c_k x(t0 + 1 - k).
  task automatic path(string what, cplx_t d, int node, int i, real b, coef10_t c [4],
                      int id, int t0);
    real sr, si, mag, ar, ai, cr, xr, xi;
    sr = 0; si = 0; mag = 0;
    for (int k = 0; k < 4; k++) begin
      cr = c10r(c[k]);
      xr = xs(id, 0, t0 + 1 - k);
      xi = xs(id, 1, t0 + 1 - k);
      sr += cr * xr;
      si += cr * xi;
      mag += (cr < 0 ? -cr : cr) * ((xr < 0 ? -xr : xr) + (xi < 0 ? -xi : xi));
    end
    ar = h_a_r[node][i][hx(t - 2)];
    ai = h_a_i[node][i][hx(t - 2)];
    cmp(what, d, b * (sr * ar - si * ai), b * (sr * ai + si * ar), b * mag);
  endtask

  // ------------------------------------------------------------------ mechanism counters
  int n_su = 0, n_coll = 0, n_pf = 0, n_mcast = 0, n_dupd = 0, n_dphase = 0;
  int n_pulse = 0, n_bounce = 0, n_cap_cmp = 0, n_range = 0, n_src = 0;
  cplx_t cap_log [RXD];
  int    n_cap = 0;

  always @(negedge clk) begin
    if (rst_n && dut.run) begin
      t++;
      if (su) begin
        // Scenario updates come exactly every K cycles.
        if (cur_s >= 0) begin
          checks++;
          if (t - t_su != K) begin
            failures++;
            $display("FAIL scenario length %0d cycles, expected %0d", t - t_su, K);
          end
        end
        cur_s++;
        t_su = t;
        n_su++;
        if (cur_s == 1) checking = 1;
        if (cur_s == NS) checking = 0;
      end
      // -------- record
      h_src_r[hx(t)] = fp2r(dut.tx_src.re);  h_src_i[hx(t)] = fp2r(dut.tx_src.im);
      h_v_r[0][hx(t)] = fp2r(dut.o1_v.re);   h_v_i[0][hx(t)] = fp2r(dut.o1_v.im);
      h_v_r[1][hx(t)] = fp2r(dut.o2_v.re);   h_v_i[1][hx(t)] = fp2r(dut.o2_v.im);
      for (int i = 0; i < 3; i++) begin
        h_tx_r[i][hx(t)] = fp2r(dut.tx_out[i].re);   h_tx_i[i][hx(t)] = fp2r(dut.tx_out[i].im);
        h_o_r[0][i][hx(t)] = fp2r(dut.o1_out[i].re); h_o_i[0][i][hx(t)] = fp2r(dut.o1_out[i].im);
        h_o_r[1][i][hx(t)] = fp2r(dut.o2_out[i].re); h_o_i[1][i][hx(t)] = fp2r(dut.o2_out[i].im);
        h_a_r[0][i][hx(t)] = fp2r(dut.u_tx.u_dopp.coef[i].re);   h_a_i[0][i][hx(t)] = fp2r(dut.u_tx.u_dopp.coef[i].im);
        h_a_r[1][i][hx(t)] = fp2r(dut.u_obj1.u_dopp.coef[i].re); h_a_i[1][i][hx(t)] = fp2r(dut.u_obj1.u_dopp.coef[i].im);
        h_a_r[2][i][hx(t)] = fp2r(dut.u_obj2.u_dopp.coef[i].re); h_a_i[2][i][hx(t)] = fp2r(dut.u_obj2.u_dopp.coef[i].im);
      end
      // -------- generator (checked from the start)
      begin
        int k;
        cplx_t e;
        k = t - 1;
        e = (k >= 0 && (k % DPER) < DON) ? tab[(k % DPER) % 64] : '0;
        checks++;
        if (dut.tx_src !== e) begin
          failures++;
          if (n_bad_print < 20) begin
            n_bad_print++;
            $display("FAIL generator t=%0d: got %h expected %h", t, dut.tx_src, e);
          end
        end
        if (k >= 0 && k % DPER == 0) n_pulse++;
        n_src++;
      end
      // -------- capture log (receiver counts running cycles from 0)
      if (t >= cap_start && (t - cap_start) % CAP_STEP == 0 && n_cap < RXD) begin
        cap_log[n_cap] = rx_out;
        n_cap++;
      end
      // -------- node models
      if (checking && cur_s >= 1 && cur_s < NS) begin
        int s;
        s = cur_s;
        if (t - t_su >= SKIP_OUT) begin
          for (int i = 0; i < 3; i++)
            path($sformatf("tx.out[%0d]", i), dut.tx_out[i], 0, i, fp2r(g_tx[s][i]), fdc_tx[i],
                 0, t - d_tx[s][i]);
          for (int n = 0; n < 2; n++) begin
            if (n == 1 && s == NS - 1) continue;
            for (int i = 0; i < 2; i++)
              path($sformatf("obj%0d.out[%0d]", n + 1, i), n ? dut.o2_out[i] : dut.o1_out[i], n + 1, i,
                   fp2r(b_o[n][s][i]), fdc_oo[n][i], n + 1, t - d_o[n][s][i] + 6);
            checks++;
            if ((n ? dut.o2_out[2] : dut.o1_out[2]) != '0) begin
              failures++;
              $display("FAIL obj%0d idle output not zero at t=%0d", n + 1, t);
            end
          end
        end
        if (t - t_su >= SKIP_V) begin
          for (int n = 0; n < 2; n++) begin
            real sr, si, mag, cr, xr, xi;
            sr = 0; si = 0; mag = 0;
            for (int m = 0; m < 2; m++)
              for (int k = 0; k < 4; k++) begin
                cr = c10r(fdc_oi[n][m][k]) * fp2r(a_o[n][s][m]);
                // input m of object n: m=0 from Tx, m=1 from the other object
                if (m == 0) begin
                  xr = h_tx_r[n][hx(t - 6 + 1 - k)]; xi = h_tx_i[n][hx(t - 6 + 1 - k)];
                end else begin
                  xr = h_o_r[1 - n][0][hx(t - 6 + 1 - k)]; xi = h_o_i[1 - n][0][hx(t - 6 + 1 - k)];
                end
                sr += cr * xr;  si += cr * xi;
                mag += (cr < 0 ? -cr : cr) * ((xr < 0 ? -xr : xr) + (xi < 0 ? -xi : xi));
              end
            cmp($sformatf("obj%0d.v", n + 1), n ? dut.o2_v : dut.o1_v, sr, si, mag);
          end
        end
        if (t - t_su >= SKIP_RX) begin
          real sr, si, mag, g, xr[3], xi[3];
          xr[0] = h_tx_r[2][hx(t - 3)];   xi[0] = h_tx_i[2][hx(t - 3)];
          xr[1] = h_o_r[0][1][hx(t - 3)]; xi[1] = h_o_i[0][1][hx(t - 3)];
          xr[2] = h_o_r[1][1][hx(t - 3)]; xi[2] = h_o_i[1][1][hx(t - 3)];
          sr = 0; si = 0; mag = 0;
          for (int m = 0; m < 3; m++) begin
            g = fp2r(g_rx[s][m]);
            sr += g * xr[m];  si += g * xi[m];
            mag += g * ((xr[m] < 0 ? -xr[m] : xr[m]) + (xi[m] < 0 ? -xi[m] : xi[m]));
          end
          cmp("rx", rx_out, sr, si, mag);
        end
        if (dut.o1_out[0] != '0 && dut.o2_out[0] != '0) n_bounce++;
      end
    end
  end

  // Doppler coefficients at each update: exp(-j 2 pi f n / 2^32), n = 256 u.
  int n_upd [3] = '{0, 0, 0};
  int last_upd = -1;
  task automatic chk_dopp(int node, logic [31:0] f, cplx_t c, int u);
    logic [31:0] ph;
    real phi, er, ei;
    ph  = 32'(256 * u) * f;
    phi = 6.283185307179586 * real'(ph) / 4294967296.0;
    er  = $cos(phi);
    ei  = -$sin(phi);
    checks++;
    if (fp2r(c.re) - er > 4e-3 || er - fp2r(c.re) > 4e-3 || fp2r(c.im) - ei > 4e-3 || ei - fp2r(c.im) > 4e-3) begin
      failures++;
      if (n_bad_print < 20) begin
        n_bad_print++;
        $display("FAIL doppler node %0d update %0d: got (%f, %f) expected (%f, %f)",
                 node, u, fp2r(c.re), fp2r(c.im), er, ei);
      end
    end
    if (c.im != 16'h0000) n_dphase++;
  endtask

  always @(negedge clk) begin
    if (rst_n && dut.u_tx.u_dopp.upd) begin
      // Doppler coefficients are refreshed every 256 cycles.
      if (last_upd >= 0) begin
        checks++;
        if (t - last_upd != 256) begin
          failures++;
          $display("FAIL Doppler update period %0d cycles", t - last_upd);
        end
      end
      last_upd = t;
      n_upd[0]++; n_dupd++;
      for (int i = 0; i < 3; i++) chk_dopp(0, fd_tx[i], dut.u_tx.u_dopp.coef[i], n_upd[0]);
    end
    if (rst_n && dut.u_obj1.u_dopp.upd) begin
      n_upd[1]++; n_dupd++;
      for (int i = 0; i < 3; i++) chk_dopp(1, fd_o[0][i], dut.u_obj1.u_dopp.coef[i], n_upd[1]);
    end
    if (rst_n && dut.u_obj2.u_dopp.upd) begin
      n_upd[2]++; n_dupd++;
      for (int i = 0; i < 3; i++) chk_dopp(2, fd_o[1][i], dut.u_obj2.u_dopp.coef[i], n_upd[2]);
    end
  end

  // Collision scenarios, prefetch writes, multicast reads in the SIMO-FIFOs.
  always @(negedge clk) begin
    if (rst_n && dut.run) begin
      if (dut.to_su == 32'd1) n_coll += int'(dut.st_tx[3]) + int'(dut.st_o1[3]) + int'(dut.st_o2[3]);
      for (int m = 0; m < 3; m++)
        n_pf += int'(dut.u_tx.u_fifo.pf_we[m]) + int'(dut.u_obj1.u_fifo.pf_we[m]) + int'(dut.u_obj2.u_fifo.pf_we[m]);
      for (int p = 0; p < P; p++) begin
        if (dut.u_tx.u_fifo.rd_v[p] && $countones(dut.u_tx.u_fifo.rd_m[p]) > 1) n_mcast++;
        if (dut.u_obj1.u_fifo.rd_v[p] && $countones(dut.u_obj1.u_fifo.rd_m[p]) > 1) n_mcast++;
        if (dut.u_obj2.u_fifo.rd_v[p] && $countones(dut.u_obj2.u_fifo.rd_m[p]) > 1) n_mcast++;
      end
    end
  end

  // ------------------------------------------------------------------ stimulus
  always #5 clk = ~clk;

  initial begin
    logic [31:0] d;
    int idx;
    draw_settings();
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);
    write_constant();
    write_scen(0);
    wr(NG, REG_COMMIT, 1);
    write_scen(1);
    wr(NG, REG_RUN, 1);
    // During scenario s write scenario s + 2.
    for (int s = 2; s < NS; s++) begin
      wait (cur_s == s - 2);
      write_scen(s);
    end
    @(negedge clk iff (cur_s == NS));
    repeat (SKIP_OUT) @(negedge clk);
    // ---------------- status read-back
    rd(NG, REG_STATUS, d);
    checks++;
    if (d[8] !== 1'b1 || d[0] !== 1'b0 || d[4] !== 1'b0 || d[12] !== 1'b1 || d[31:16] < 16'(NS)) begin
      failures++;
      $display("FAIL status word %h (want obj2 range error, no other range error, capture done)", d);
    end else n_range++;
    if (d[1] || d[5] || d[9] || d[2] || d[6] || d[10]) begin
      failures++;
      $display("FAIL status word %h reports a collision offset or prefetch error", d);
    end
    // ---------------- capture memory read-back
    for (int j = 0; j < 24; j++) begin
      idx = (j == 0) ? 0 : (j == 1) ? RXD - 1 : int'($urandom_range(RXD - 1));
      rd(NR, REG_RX_MEM + 12'(idx), d);
      checks++;
      if (d !== cap_log[idx]) begin
        failures++;
        $display("FAIL capture[%0d] = %h expected %h", idx, d, cap_log[idx]);
      end else n_cap_cmp++;
    end
    // ---------------- mechanisms
    $display("scenario updates %0d, collision scenarios %0d, prefetch writes %0d, multicast reads %0d",
             n_su, n_coll, n_pf, n_mcast);
    $display("doppler updates %0d (rotated %0d), generator pulses %0d, multi-bounce cycles %0d",
             n_dupd, n_dphase, n_pulse, n_bounce);
    $display("serial writes %0d, reads %0d, captures compared %0d, range errors reported %0d",
             n_spi_wr, n_spi_rd, n_cap_cmp, n_range);
    if (n_su < NS)       begin failures++; $display("FAIL too few scenario updates"); end
    if (n_coll == 0)     begin failures++; $display("FAIL no collision group formed"); end
    if (n_pf == 0)       begin failures++; $display("FAIL no prefetch happened"); end
    if (n_mcast == 0)    begin failures++; $display("FAIL no multicast read happened"); end
    if (n_dupd == 0)     begin failures++; $display("FAIL no Doppler update happened"); end
    if (n_dphase == 0)   begin failures++; $display("FAIL Doppler phase never moved"); end
    if (n_pulse < 2)     begin failures++; $display("FAIL generator pulses missing"); end
    if (n_bounce == 0)   begin failures++; $display("FAIL no object-to-object traffic"); end
    if (n_cap_cmp == 0)  begin failures++; $display("FAIL no capture compared"); end
    if (n_range == 0)    begin failures++; $display("FAIL range error not reported"); end
    if (n_spi_rd == 0 || n_spi_wr == 0) begin failures++; $display("FAIL serial port unused"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(WD_NS);
    $display("FAIL watchdog expired at t=%0d, scenario %0d", t, cur_s);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
