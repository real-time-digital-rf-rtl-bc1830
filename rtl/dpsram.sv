// dpsram: simple dual-port synchronous SRAM (one write port, one read port).
//
// Stands for the 256 x 32-bit (1 kB) dual-port SRAM macro that the test chip
// uses for each real-time register (RTR) and prefetch buffer (PB), where a
// read and a write are needed in the same cycle. Read data are registered
// (one clock after raddr). A read of the address being written in the same
// cycle returns the old contents.
module dpsram #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned W     = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
