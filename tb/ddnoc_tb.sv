// ddnoc_tb: random sub-bank reads with destination masks (including
// multicast to several outputs) through the data distribution network.
// Every output must carry, one cycle later, the sample of the single
// sub-bank addressing it, or zero and valid low if none does.
module ddnoc_tb;
  import rfe_pkg::*;
  localparam int P = 8, M = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid [P];
  logic [M-1:0] in_mask [P];
  cplx_t in_data [P];
  logic out_valid [M];
  cplx_t out_data [M];
  cplx_t exp_d [M];
  logic exp_v [M];
  int checks = 0, failures = 0, mcast = 0;

  ddnoc #(.P(P), .M(M)) dut (.clk, .rst_n, .in_valid, .in_mask, .in_data, .out_valid, .out_data);
  always #5 clk = ~clk;

  initial begin
    for (int p = 0; p < P; p++) begin in_valid[p] = 0; in_mask[p] = 0; in_data[p] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int owner [M];
      @(negedge clk);
      for (int p = 0; p < P; p++) begin in_valid[p] = 0; in_mask[p] = 0; in_data[p] = $urandom; end
      // give every output at most one source; sources may serve several outputs
      for (int m = 0; m < M; m++) begin
        owner[m] = ($urandom_range(4) == 0) ? -1 : int'($urandom_range(P - 1));
        if (owner[m] >= 0) begin
          in_valid[owner[m]] = 1;
          in_mask[owner[m]][m] = 1'b1;
        end
      end
      for (int p = 0; p < P; p++) if ($countones(in_mask[p]) > 1) mcast++;
      for (int m = 0; m < M; m++) begin
        exp_v[m] = owner[m] >= 0;
        exp_d[m] = (owner[m] >= 0) ? in_data[owner[m]] : '0;
      end
      @(negedge clk);
      for (int m = 0; m < M; m++) begin
        checks++;
        if (out_valid[m] !== exp_v[m] || (exp_v[m] && out_data[m] !== exp_d[m])) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d out %0d: %b %h expected %b %h", n, m,
                                      out_valid[m], out_data[m], exp_v[m], exp_d[m]);
        end
      end
    end
    if (mcast == 0) begin failures++; $display("FAIL no multicast"); end
    $display("multicast reads %0d", mcast);
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
