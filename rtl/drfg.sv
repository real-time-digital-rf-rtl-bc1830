// drfg: digital RF generator of a transmit node.
//
// Produces the periodic digital I/Q stream that a transmitter emits: a
// pulse of on_len programmable samples followed by zeros, repeated every
// per samples. The period can be up to MAX_PER = 2048 samples and the pulse
// takes sample values from a table of TAB = 64 independently programmable
// 32-bit I/Q words (16-bit I, 16-bit Q), cycling through the table if the
// pulse is longer than 64 samples. With 64 non-zero samples in a 2048-sample
// period the duty cycle is 3.125 %, the minimum the paper quotes; on_len =
// per gives 100 %. The period, table size and duty-cycle range follow the
// paper's FPGA description of the generator; the paper describes the chip's
// generator only as a configurable FSM with programmable period, duty cycle
// and I/Q values. Output is registered; sample k of the run (k = 0, 1, ...)
// appears k+1 cycles after run rises, and the phase restarts when run falls.
module drfg
  import rfe_pkg::*;
#(
  parameter int unsigned MAX_PER = 2048,
  parameter int unsigned TAB     = 64,
  localparam int unsigned PW = $clog2(MAX_PER + 1),
  localparam int unsigned TW = $clog2(TAB)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          run,
  input  logic          en,
  input  logic [PW-1:0] per,
  input  logic [PW-1:0] on_len,
  input  logic          tab_we,
  input  logic [TW-1:0] tab_idx,
  input  cplx_t         tab_data,
  output cplx_t         y
);
  cplx_t         tab [TAB];
  logic [PW-1:0] k;

  always_ff @(posedge clk) begin
    if (tab_we) tab[tab_idx] <= tab_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      k <= '0;
      y <= '0;
    end else if (!run) begin
      k <= '0;
      y <= '0;
    end else begin
      k <= (k >= per - 1'b1) ? '0 : k + 1'b1;
      y <= (en && k < on_len) ? tab[k[TW-1:0]] : '0;
    end
  end
endmodule
