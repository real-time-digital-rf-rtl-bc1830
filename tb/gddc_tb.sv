// gddc_tb: global delay distribution controller at reduced size (8
// sub-banks of 16 samples, 3 outputs, 16-entry RTR/PB, compute latency 5,
// scenarios of 64 cycles). Random scenario packets, including collision
// groups, disabled outputs and illegal delays, are written one scenario
// ahead. A reference grouping (nearest ungrouped delay is the header,
// members lie within one sub-bank of it) checks at every scenario update the
// sub-bank/row/mask sent to the LDDCs (start address wp - tau_header), the
// PEC offsets and enables, and the error flags (including the prefetch
// error for a member whose delay exceeds the scenario length); on every cycle it checks the
// write pointer and the prefetch writes (member m is fed while tau_header <
// cycles-to-update <= tau_m, at RTR position wp + tau_header + 2).
module gddc_tb;
  import rfe_pkg::*;
  localparam int P = 8, S = 16, M = 3, RD = 16, CL = 5, K = 64, NS = 60;
  localparam int AW = $clog2(P * S), DW = $clog2(RD);
  logic clk = 0, rst_n = 0, run = 0, scp_we = 0, commit = 0;
  logic su;
  logic [31:0] to_su;
  logic [15:0] scen_cnt;
  logic [1:0] scp_idx = 0;
  logic [31:0] scp_data = 0;
  logic cfg_valid [P];
  logic [3:0] cfg_row [P];
  logic [M-1:0] cfg_mask [P];
  logic [DW-1:0] pec_off [M], pf_pos [M];
  logic pec_en [M], pf_we [M];
  logic [AW-1:0] wp;
  logic range_err, coll_err, pf_err, collision;
  int checks = 0, failures = 0, n_coll = 0, n_pf = 0, n_rerr = 0, n_cerr = 0;

  // scenario table: tau (buffer delay, 0 = disabled)
  int tau [NS][M];
  // reference state
  int n1 [M], n2 [M];
  int wp_m = 0;
  bit r_err = 0, c_err = 0, p_err = 0;
  int hdr [M];
  bit en [M];

  scen_timer u_t (.clk, .rst_n, .run, .k_len(32'(K)), .su, .to_su, .scen_cnt);
  gddc #(.P(P), .S(S), .M(M), .RTR_D(RD), .COMPUTE_LAT(CL)) dut (
    .clk, .rst_n, .run, .su, .to_su, .scp_we, .scp_idx, .scp_data, .commit, .wp,
    .cfg_valid, .cfg_row, .cfg_mask, .pec_off, .pec_en, .pf_we, .pf_pos,
    .range_err, .coll_err, .pf_err, .collision);
  always #5 clk = ~clk;

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 15) $display("FAIL t=%0t %s", $time, msg);
    end
  endtask

  // Reference grouping of a delay set; returns range/collision errors.
  task automatic group(input int tv [M], output bit rerr, output bit cerr);
    bit done [M];
    rerr = 0; cerr = 0;
    for (int m = 0; m < M; m++) begin
      en[m] = tv[m] != 0;
      if (en[m] && (tv[m] < S || tv[m] > (P - 1) * S)) begin rerr = 1; en[m] = 0; end
      done[m] = !en[m];
      hdr[m] = m;
    end
    for (int pass = 0; pass < M; pass++) begin
      int b;
      b = -1;
      for (int m = 0; m < M; m++) if (!done[m] && (b < 0 || tv[m] < tv[b])) b = m;
      if (b >= 0)
        for (int m = 0; m < M; m++)
          if (!done[m] && tv[m] - tv[b] < S) begin
            hdr[m] = b; done[m] = 1;
            if (tv[m] - tv[b] > RD - 4) cerr = 1;
          end
    end
  endtask

  task automatic write_scp(int s);
    for (int m = 0; m < M; m++) begin
      @(negedge clk);
      scp_we = 1; scp_idx = 2'(m);
      scp_data = {tau[s][m] != 0, 31'(tau[s][m] + CL)};
      n2[m] = tau[s][m];
    end
    @(negedge clk);
    scp_we = 0;
  endtask

  function automatic int base_tau();
    return S + int'($urandom_range((P - 2) * S - RD));
  endfunction

  initial begin
    for (int s = 0; s < NS; s++) begin
      int b;
      b = base_tau();
      tau[s][0] = b;
      tau[s][1] = ($urandom_range(1) == 1) ? b + int'($urandom_range(RD - 4)) : base_tau();
      tau[s][2] = ($urandom_range(3) == 0) ? 0 :
                  ($urandom_range(2) == 0) ? tau[s][1] + int'($urandom_range(RD - 4)) : base_tau();
      if (s == NS - 5) tau[s][2] = S - 3;                 // range error
      if (s == NS - 3) tau[s] = '{100, 100 + RD, 0};      // offset too large
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    write_scp(0);
    commit = 1;
    @(negedge clk);
    commit = 0;
    n1 = n2;
    write_scp(1);
    run = 1;
    for (int s = 2; s < NS; s++) begin
      wait (scen_cnt == 16'(s - 1));
      write_scp(s);
    end
    wait (scen_cnt == 16'(NS));
    repeat (K / 2) @(negedge clk);
    chk(n_rerr > 0 && range_err, "range error never flagged");
    chk(n_cerr > 0 && coll_err, "collision offset error never flagged");
    chk(pf_err && p_err, "prefetch error (member delay beyond the scenario) never flagged");
    if (n_coll == 0) begin failures++; $display("FAIL no collision group"); end
    if (n_pf == 0) begin failures++; $display("FAIL no prefetch write"); end
    $display("collision groups %0d, prefetch writes %0d", n_coll, n_pf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Cycle checks. Reference "next scenario" grouping: n1.
  always @(negedge clk) begin
    if (rst_n && run) begin
      bit rerr, cerr;
      group(n1, rerr, cerr);
      chk(32'(wp) == 32'(wp_m % (P * S)), $sformatf("wp %0d expected %0d", wp, wp_m % (P * S)));
      if (su) begin
        logic [P-1:0] want_v;
        want_v = '0;
        for (int m = 0; m < M; m++)
          if (en[m] && hdr[m] == m) begin
            int a, bank;
            logic [M-1:0] mk;
            a = (wp_m - n1[m] + 4 * P * S) % (P * S);
            bank = a / S;
            mk = '0;
            for (int j = 0; j < M; j++) if (en[j] && hdr[j] == m) mk[j] = 1'b1;
            want_v[bank] = 1'b1;
            chk(cfg_valid[bank] && cfg_row[bank] == 4'(a % S) && cfg_mask[bank] == mk,
                $sformatf("header %0d: bank %0d valid %b row %0d mask %b, expected row %0d mask %b",
                          m, bank, cfg_valid[bank], cfg_row[bank], cfg_mask[bank], a % S, mk));
            if ($countones(mk) > 1) n_coll++;
          end
        for (int p = 0; p < P; p++)
          chk(cfg_valid[p] == want_v[p], $sformatf("cfg_valid[%0d] = %b", p, cfg_valid[p]));
        for (int m = 0; m < M; m++) begin
          chk(pec_en[m] == en[m], $sformatf("pec_en[%0d]", m));
          if (en[m]) chk(32'(pec_off[m]) == 32'(n1[m] - n1[hdr[m]]), $sformatf("pec_off[%0d]", m));
        end
        if (rerr) n_rerr++;
        if (cerr) n_cerr++;
        for (int m = 0; m < M; m++) if (en[m] && hdr[m] != m && n1[m] + 3 > K) p_err = 1;
        r_err |= rerr;
        c_err |= cerr;
      end else if (to_su <= K - 2) begin
        for (int m = 0; m < M; m++) begin
          bit want;
          want = en[m] && hdr[m] != m && n1[hdr[m]] < int'(to_su) && int'(to_su) <= n1[m];
          chk(pf_we[m] == want, $sformatf("pf_we[%0d] = %b at to_su %0d", m, pf_we[m], to_su));
          if (want) begin
            n_pf++;
            chk(32'(pf_pos[m]) == 32'((wp_m + n1[hdr[m]] + 2) % RD),
                $sformatf("pf_pos[%0d] = %0d expected %0d", m, pf_pos[m], (wp_m + n1[hdr[m]] + 2) % RD));
          end
        end
      end
      // flags are raised by the update and then stay
      if (!su) begin
        chk(range_err == r_err, "range_err");
        chk(coll_err == c_err, "coll_err");
        chk(pf_err == p_err, "pf_err");
      end
    end
  end
  always @(posedge clk) begin
    if (rst_n && run) begin
      wp_m <= wp_m + 1;
      if (su) n1 <= n2;
    end
  end

  initial begin
    #10_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
