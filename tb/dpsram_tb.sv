// dpsram_tb: random simultaneous write/read traffic on the two-port buffer
// against a reference array. Checks the one-cycle read latency and that a
// read of the address being written in the same cycle returns the old word.
module dpsram_tb;
  localparam int DEPTH = 32, W = 32;
  logic clk = 0, we = 0;
  logic [4:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] ref_mem [DEPTH];
  logic [W-1:0] exp_rd;
  int checks = 0, failures = 0, same = 0;

  dpsram #(.DEPTH(DEPTH), .W(W)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 5'(i); wdata = $urandom; ref_mem[i] = wdata;
    end
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      we = ($urandom_range(1) == 1);
      waddr = 5'($urandom);
      raddr = ($urandom_range(7) == 0) ? waddr : 5'($urandom);
      wdata = $urandom;
      exp_rd = ref_mem[raddr];
      if (we && waddr == raddr) same++;
      @(posedge clk);
      if (we) ref_mem[waddr] = wdata;
      @(negedge clk);
      checks++;
      if (rdata !== exp_rd) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d rdata %h expected %h", n, rdata, exp_rd);
      end
    end
    if (same == 0) begin failures++; $display("FAIL no same-address read/write"); end
    $display("same-address read/write cycles %0d", same);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
