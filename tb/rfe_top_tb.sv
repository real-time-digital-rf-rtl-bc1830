// rfe_top_tb: end-to-end test of the four-node emulator at reduced memory size
// (8 sub-banks of 64 samples, 32-entry RTR/PB, 256-entry capture memory) so
// that many scenarios run quickly.
// Programs everything over the serial port, runs NS scenarios, checks every
// node output against a per-node model on every cycle, checks the Doppler
// coefficients, reads back the status word and the capture memory, and
// counts that collisions, prefetches, multicast, scenario updates, Doppler
// updates and multi-bounce traffic all occurred (see rfe_top_tb_body.svh).
module rfe_top_tb;
  import rfe_pkg::*;
  import rfe_tb_pkg::*;
  localparam int P = 8, S = 64, RD = 32, RXD = 256, K = 16384, NS = 7, HALF = 6;
  localparam longint WD_NS = 64'd20_000_000;

  logic  clk = 0, rst_n = 0, sclk = 0, cs_n = 1, mosi = 0;
  logic  miso, su;
  cplx_t rx_out;
  logic [11:0] status;

  rfe_top #(.P(P), .S(S), .RTR_D(RD), .RX_D(RXD)) dut (
    .clk, .rst_n, .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi), .spi_miso(miso),
    .rx_out, .su, .status);

`include "rfe_top_tb_body.svh"
endmodule
