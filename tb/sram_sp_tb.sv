// sram_sp_tb: random single-port SRAM traffic against a reference array.
// Checks the one-cycle read latency, that rdata holds when the memory is not
// read, and that a write in a cycle suppresses the read.
module sram_sp_tb;
  localparam int DEPTH = 64, W = 32;
  logic clk = 0, ce = 0, we = 0;
  logic [5:0] addr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] ref_mem [DEPTH];
  logic [W-1:0] exp_rd;
  int checks = 0, failures = 0;

  sram_sp #(.DEPTH(DEPTH), .W(W)) dut (.clk, .ce, .we, .addr, .wdata, .rdata);
  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; ce = 1; addr = 6'(i); wdata = $urandom; ref_mem[i] = wdata;
    end
    @(negedge clk);
    we = 0; ce = 1; addr = 0;
    @(negedge clk);
    exp_rd = ref_mem[0];
    for (int n = 0; n < 4000; n++) begin
      we = ($urandom_range(3) == 0);
      ce = ($urandom_range(3) != 0);
      addr = 6'($urandom);
      wdata = $urandom;
      @(posedge clk);
      if (we) ref_mem[addr] = wdata;
      else if (ce) exp_rd = ref_mem[addr];
      @(negedge clk);
      checks++;
      if (rdata !== exp_rd) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d rdata %h expected %h", n, rdata, exp_rd);
      end
    end
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
