// simo_fifo_tb: end-to-end check of the SIMO-FIFO at a reduced size
// (8 sub-banks of 16 samples, 3 outputs, 16-entry RTR/PB, scenarios of
// 64 cycles). A numbered sample is written every cycle. A sequence of
// scenarios changes the three delays: no collision, a two-object collision
// group, a three-object group, groups in changed order, a disabled output
// and finally an illegal (too short) delay. From the second scenario on
// (the first has no prefetch), every output sample is compared with the
// input written tau + FIFO_LAT cycles earlier, tau being the buffer delay of
// the scenario in which the read started. Also checks the enable, the error
// flags, and that collision groups and multicast really occurred.
module simo_fifo_tb;
  import rfe_pkg::*;
  localparam int P = 8, S = 16, M = 3, RD = 16, CL = 5, K = 64, NS = 8;
  logic clk = 0, rst_n = 0, run = 0;
  logic su;
  logic [31:0] to_su;
  logic [15:0] scen_cnt;
  logic scp_we = 0, commit = 0;
  logic [1:0] scp_idx = 0;
  logic [31:0] scp_data = 0;
  cplx_t wr_data;
  cplx_t out_data [M];
  logic out_valid [M];
  logic range_err, coll_err, pf_err, collision;
  int checks = 0, failures = 0, cyc = -1;
  int n_coll_scen = 0, n_member_samples = 0;

  // Buffer delays per scenario; 0 = disabled.
  int tau [NS][M] = '{'{20, 50, 90}, '{20, 27, 60}, '{40, 45, 52}, '{30, 100, 35},
                      '{50, 18, 58}, '{25, 0, 112}, '{33, 70, 21}, '{10, 40, 80}};

  scen_timer u_t (.clk, .rst_n, .run, .k_len(32'(K)), .su, .to_su, .scen_cnt);
  simo_fifo #(.P(P), .S(S), .M(M), .RTR_D(RD), .COMPUTE_LAT(CL)) dut (
    .clk, .rst_n, .run, .su, .to_su, .scp_we, .scp_idx, .scp_data, .commit, .wr_data,
    .out_data, .out_valid, .range_err, .coll_err, .pf_err, .collision);

  always #5 clk = ~clk;

  function automatic cplx_t tag(int t);
    return '{re: 16'(t), im: ~16'(t)};
  endfunction

  task automatic write_scen(int s);
    for (int m = 0; m < M; m++) begin
      @(negedge clk);
      scp_we   = 1;
      scp_idx  = 2'(m);
      scp_data = {tau[s][m] != 0, 31'(tau[s][m] + CL)};
    end
    @(negedge clk);
    scp_we = 0;
  endtask

  always @(posedge clk) if (run) cyc <= cyc + 1;
  assign wr_data = tag(cyc + 1);   // sample written in running cycle cyc+1

  // Scenario programming, one scenario ahead of the one being parsed.
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    write_scen(0);
    @(negedge clk) commit = 1;
    @(negedge clk) commit = 0;
    write_scen(1);
    @(negedge clk);
    run = 1;
    for (int s = 0; s < NS; s++) begin
      @(posedge clk iff su);
      if (s + 2 < NS) write_scen(s + 2);
    end
  end

  // Checker.
  initial begin
    int tp, sc, t_in, members;
    wait (run);
    forever begin
      @(negedge clk);
      tp = cyc + 1 - FIFO_LAT;             // write-pointer value when the read was issued
      sc = (tp >= 0) ? tp / K : -1;
      if (sc >= 1 && sc < NS - 1) begin
        members = 0;
        for (int m = 0; m < M; m++) begin
          checks++;
          if (out_valid[m] !== (tau[sc][m] != 0)) begin
            failures++;
            $display("FAIL cyc=%0d out%0d valid=%0d", cyc, m, out_valid[m]);
          end else if (tau[sc][m] != 0) begin
            t_in = tp - tau[sc][m];
            checks++;
            if (out_data[m] !== tag(t_in)) begin
              failures++;
              if (failures < 20) $display("FAIL cyc=%0d scen=%0d out%0d got %h exp %h (t_in %0d)",
                                          cyc, sc, m, out_data[m], tag(t_in), t_in);
            end
          end
          for (int j = 0; j < M; j++)
            if (j != m && tau[sc][j] != 0 && tau[sc][m] > tau[sc][j] && tau[sc][m] - tau[sc][j] < S)
              members++;
        end
        if (members > 0) n_member_samples++;
      end
      if (sc >= NS - 1 && (tp % K) == 4) begin
        checks++;
        if (!range_err) begin
          failures++;
          $display("FAIL range_err not raised for a delay below one sub-bank");
        end
        break;
      end
    end
    checks++;
    if (coll_err || pf_err) begin
      failures++;
      $display("FAIL unexpected error flags coll=%0d pf=%0d", coll_err, pf_err);
    end
    checks++;
    if (n_coll_scen < 4 || n_member_samples < 4 * K) begin
      failures++;
      $display("FAIL collision handling exercised too little: %0d scenarios, %0d cycles",
               n_coll_scen, n_member_samples);
    end
    $display("collision scenarios %0d, cycles with multicast %0d", n_coll_scen, n_member_samples);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Count scenarios announced as having a collision group (flag valid before su).
  always @(posedge clk) if (run && to_su == 32'd1 && collision) n_coll_scen++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
