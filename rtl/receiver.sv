// receiver: receive node with on-chip capture memory.
//
// Forms the signal seen by a receiving antenna,
//   r(t) = sum_m G_R(theta_m) * s_m(t),
// with one real 16-bit gain multiplier per incoming stream followed by an
// adder tree (latency RX_LAT = GAIN_LAT + tree latency = 3 for 3 inputs).
// The test chip has no high-bandwidth output port, so the receiver output
// is written into a local SRAM at the emulation rate and read out later
// through the slow serial interface. Capture is programmable: after `start`
// running cycles one sample is stored, then one every `step` cycles, until
// the RX_D-entry memory is full; repeating a run with different start
// offsets collects every sample of a longer output, as the paper does.
// The capture depth (1024) and the start/step scheme are this design's
// choices; the paper gives neither.
// Registers (addr[15:12] = NODE_ID): G_R gains (applied at scenario
// updates), capture start, capture step; capture memory read at
// REG_RX_MEM + k (rdata one cycle after rd_stb).
module receiver
  import rfe_pkg::*;
#(
  parameter logic [3:0]  NODE_ID = NODE_RX,
  parameter int unsigned M_IN    = 3,
  parameter int unsigned RX_D    = 1024,
  localparam int unsigned RA = $clog2(RX_D)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  input  logic        su,
  input  logic        commit,
  input  cfg_bus_t    cfg,
  input  logic        rd_stb,
  output logic [31:0] rdata,
  input  cplx_t       in [M_IN],
  output cplx_t       rx_out,
  output logic        cap_done
);
  wire        sel = cfg.we && cfg.addr[15:12] == NODE_ID;
  wire [11:0] ra  = cfg.addr[11:0];

  fp16_t gr [M_IN];
  cdc #(.N(M_IN), .W(16), .INIT(16'h3C00)) u_cdc_gain (
    .clk, .rst_n, .su, .commit,
    .we(sel && ra[11:4] == REG_IN_GAIN[11:4] && 32'(ra[3:0]) < M_IN),
    .idx(($clog2(M_IN))'(ra[3:0])), .wdata(cfg.data[15:0]), .active(gr));

  cplx_t weighted [M_IN];
  for (genvar m = 0; m < M_IN; m++) begin : g_in
    gain_mul u_gain (.clk, .x(in[m]), .g(gr[m]), .y(weighted[m]));
  end
  adder_tree #(.N(M_IN)) u_tree (.clk, .x(weighted), .y(rx_out));

  // ---------------------------------------------------------------- capture
  logic [31:0]   start, step, cyc, gap;
  logic [RA:0]   wa;
  logic          cap_we;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      start <= '0;
      step  <= 32'd1;
    end else if (sel) begin
      if (ra == REG_RX_START) start <= cfg.data;
      if (ra == REG_RX_STEP)  step  <= (cfg.data == 0) ? 32'd1 : cfg.data;
    end
  end

  assign cap_we   = run && !wa[RA] && cyc >= start && gap == 32'd0;
  assign cap_done = wa[RA];

  always_ff @(posedge clk) begin
    if (!rst_n || !run) begin
      cyc <= '0;
      gap <= '0;
      if (!rst_n || (sel && ra == REG_RX_START)) wa <= '0;
    end else begin
      cyc <= cyc + 1'b1;
      if (cyc >= start) gap <= (gap == step - 1'b1) ? '0 : gap + 1'b1;
      if (cap_we) wa <= wa + 1'b1;
    end
  end

  dpsram #(.DEPTH(RX_D), .W(32)) u_mem (
    .clk, .we(cap_we), .waddr(wa[RA-1:0]), .wdata(rx_out),
    .raddr(cfg.addr[RA-1:0]), .rdata(rdata));

  // Reads are only meaningful for this node's memory window.
  wire unused_ok = rd_stb;
endmodule
