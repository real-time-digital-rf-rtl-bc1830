// lddc: local delay distribution controller with its SRAM sub-bank.
//
// The SIMO-FIFO is split into P sub-banks; each has one LDDC, an
// autonomous FSM that owns the read pointer of whatever output stream is
// currently being fetched from its sub-bank. The state is a token
// {active, destination mask, row}. Each cycle an active LDDC reads row `row`
// and increments it; after the last row (S-1) it hands the token to the next
// LDDC in the ring within one cycle ("local configuration transfer"), which
// continues at row 0 of its own SRAM. The write pointer advances at the same
// rate, so the delay between write and read stays constant.
// At a scenario update (su) every LDDC drops its token and takes a new one
// only if the GDDC addressed it on the configuration transfer NoC (cfg_*).
// The read data leave towards the DDNoC one cycle later with the token's
// destination mask, which lists every output that shares this read
// (multicast to a collision group).
// The sub-bank SRAM is single-port: the incoming sample write (from the
// write H-tree) and a read cannot happen in the same cycle. The GDDC keeps
// every delay at least one sub-bank long so this never occurs; an assertion
// checks it, and the write wins if it does.
// The token format and the one-token-per-bank rule are this design's
// rendering of the paper's description.
module lddc
  import rfe_pkg::*;
#(
  parameter int unsigned S = 1024,   // samples per sub-bank
  parameter int unsigned M = 3,      // outputs
  localparam int unsigned RW = $clog2(S)
) (
  input  logic          clk,
  input  logic          rst_n,
  // write H-tree
  input  logic          wr_en,
  input  logic [RW-1:0] wr_row,
  input  cplx_t         wr_data,
  // configuration transfer NoC
  input  logic          su,
  input  logic          cfg_valid,
  input  logic [RW-1:0] cfg_row,
  input  logic [M-1:0]  cfg_mask,
  // ring of local transfers
  input  logic          tok_in_valid,
  input  logic [M-1:0]  tok_in_mask,
  output logic          tok_out_valid,
  output logic [M-1:0]  tok_out_mask,
  // to the DDNoC
  output logic          rd_valid,
  output logic [M-1:0]  rd_mask,
  output cplx_t         rd_data
);
  logic          act_q;
  logic [M-1:0]  mask_q;
  logic [RW-1:0] row_q;
  logic          act;
  logic [M-1:0]  mask;
  logic [RW-1:0] row;

  always_comb begin
    if (su) begin
      act  = cfg_valid;
      mask = cfg_mask;
      row  = cfg_row;
    end else if (tok_in_valid) begin
      act  = 1'b1;
      mask = tok_in_mask;
      row  = '0;
    end else begin
      act  = act_q;
      mask = mask_q;
      row  = row_q;
    end
  end


  always_ff @(posedge clk) begin
    if (!rst_n) begin
      act_q    <= 1'b0;
      mask_q   <= '0;
      row_q    <= '0;
      rd_valid <= 1'b0;
      rd_mask  <= '0;
      tok_out_valid <= 1'b0;
      tok_out_mask  <= '0;
    end else begin
      // Hand-off: after reading the last row the token moves to the next
      // LDDC, which reads its row 0 in the following cycle.
      tok_out_valid <= act && (row == RW'(S - 1));
      tok_out_mask  <= mask;
      act_q    <= act && (row != RW'(S - 1));
      mask_q   <= mask;
      row_q    <= row + 1'b1;
      rd_valid <= act && !wr_en;
      rd_mask  <= mask;
    end
  end

  sram_sp #(.DEPTH(S), .W(32)) u_sram (
    .clk, .ce(act), .we(wr_en), .addr(wr_en ? wr_row : row),
    .wdata(wr_data), .rdata(rd_data)
  );

  // Only one token may live in a sub-bank, and a sub-bank being written
  // must not be read.
  assert property (@(posedge clk) disable iff (!rst_n) !(su == 1'b0 && tok_in_valid && act_q && !tok_out_valid))
    else $error("lddc: token arrived at a busy sub-bank");
  assert property (@(posedge clk) disable iff (!rst_n) !(act && wr_en))
    else $error("lddc: read and write collide in a single-port sub-bank");
endmodule
