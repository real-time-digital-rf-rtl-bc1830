// cdc_tb: scenario buffering of the coefficient bank. Random coefficient
// writes happen during each scenario; the active set must change only at a
// scenario update and must then equal what was written two scenarios
// earlier (writes accumulate in the pending copy). Also checks the commit
// preload used before the first scenario and the reset value.
module cdc_tb;
  localparam int N = 6, W = 16, K = 40;
  localparam logic [W-1:0] INIT = 16'h3C00;
  logic clk = 0, rst_n = 0, we = 0, su = 0, commit = 0;
  logic [2:0] idx = 0;
  logic [W-1:0] wdata = 0;
  logic [W-1:0] active [N];
  logic [W-1:0] n2 [N], n1 [N], act_m [N];
  int checks = 0, failures = 0, n_su = 0, n_change = 0;

  cdc #(.N(N), .W(W), .INIT(INIT)) dut (.clk, .rst_n, .we, .idx, .wdata, .su, .commit, .active);
  always #5 clk = ~clk;

  task automatic compare(string when);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (active[i] !== act_m[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s: active[%0d] = %h expected %h", when, i, active[i], act_m[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin n2[i] = INIT; n1[i] = INIT; act_m[i] = INIT; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    compare("reset");
    // preload scenario 0 and commit
    for (int i = 0; i < N; i++) begin
      we = 1; idx = 3'(i); wdata = $urandom; n2[i] = wdata;
      @(negedge clk);
    end
    we = 0; commit = 1;
    @(negedge clk);
    commit = 0;
    n1 = n2; act_m = n2;
    compare("commit");
    for (int s = 0; s < 30; s++) begin
      for (int c = 0; c < K; c++) begin
        su = (c == 0);
        we = ($urandom_range(3) == 0);
        idx = 3'($urandom_range(N));       // N is out of range and must be ignored
        wdata = $urandom;
        @(posedge clk);
        if (su) begin
          for (int i = 0; i < N; i++) if (act_m[i] != n1[i]) n_change++;
          act_m = n1; n1 = n2; n_su++;
        end
        if (we && idx < N) n2[idx] = wdata;
        @(negedge clk);
        compare($sformatf("scenario %0d cycle %0d", s, c));
      end
    end
    su = 0; we = 0;
    if (n_change == 0) begin failures++; $display("FAIL coefficients never changed"); end
    $display("scenario updates %0d, coefficient changes %0d", n_su, n_change);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
