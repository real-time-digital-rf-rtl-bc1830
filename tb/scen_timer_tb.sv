// scen_timer_tb: runs the SU timer with two scenario lengths and checks that
// su comes exactly every K cycles, that to_su counts down from K to 1, that
// a new K applies from the next scenario, and that stopping resets it.
module scen_timer_tb;
  logic clk = 0, rst_n = 0, run = 0, su;
  logic [31:0] k_len, to_su;
  logic [15:0] scen_cnt;
  int checks = 0, failures = 0, last = -1, cyc = 0, exp_k;

  scen_timer dut (.clk, .rst_n, .run, .k_len, .su, .to_su, .scen_cnt);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL cyc=%0d %s", cyc, what);
    end
  endtask

  initial begin
    k_len = 10;
    exp_k = 10;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run = 1;
    for (cyc = 0; cyc < 200; cyc++) begin
      #1;
      if (cyc == 0) chk(su == 1, "su on first running cycle");
      if (su) begin
        if (last >= 0) chk(cyc - last == exp_k, $sformatf("su interval %0d", cyc - last));
        exp_k = k_len;
        last = cyc;
        chk(to_su == k_len, "to_su at su");
      end else begin
        chk(to_su == 32'(exp_k - (cyc - last)), $sformatf("to_su %0d", to_su));
      end
      if (cyc == 55) k_len = 7;
      @(negedge clk);
    end
    chk(scen_cnt == 16'(6 + 1 + (199 - 60) / 7), $sformatf("scenario count %0d", scen_cnt));
    run = 0;
    @(negedge clk);
    chk(su == 0, "no su while stopped");
    run = 1;
    #1;
    chk(su == 1, "su on restart");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
