// sram_sp: single-port synchronous SRAM, one sample-storage sub-bank.
//
// Stands for the foundry single-port SRAM macro of the test chip (1024
// samples x 32 bits, 4 kB). One access per cycle: a write when we is high,
// otherwise a read when ce is high. Read data appear one clock after the
// address (registered output) and hold until the next read. Written as an
// array so that it simulates and synthesizes to a memory.
module sram_sp #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned W     = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          ce,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  wdata,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    else if (ce) rdata <= mem[addr];
  end
endmodule
