// tx_node: transmit node of the emulator.
//
// A transmitting object has no incoming signal to reflect: the first half
// of the passive node's datapath is replaced by the digital RF generator
// (drfg). Its samples go into a SIMO-FIFO that delays them separately for
// each of the M_OUT receiving objects; each delayed stream then passes a
// 4-tap fractional delay filter, the transmit gain G_T(theta_out) (which is
// taken to include the path loss rho(tau) of that link, as the passive
// node's lumped beta x rho) and the Doppler correction:
//   out_i(t) = Doppler_i( G_T,i * FDC_i( drfg(t - tau_i - NODE_LAT) ) )
// Physical delays written in the SCP are measured from the generator's
// output; the node subtracts its own fixed latency NODE_LAT = FIFO_LAT +
// FDC_LAT + GAIN_LAT + DOPP_LAT = 11 cycles, so a physical delay of D
// samples makes a generator sample reappear at the output exactly D cycles
// later (for a pure zero-lag filter).
// Registers (addr[15:12] = NODE_ID): output FDC coefficients, output gains,
// Doppler frequencies and SCP delays (rfe_pkg register map), all applied at
// scenario updates; DRFG period, pulse length, enable and sample table,
// applied immediately.
module tx_node
  import rfe_pkg::*;
#(
  parameter logic [3:0]  NODE_ID = NODE_TX,
  parameter int unsigned M_OUT   = 3,
  parameter int unsigned P       = 16,
  parameter int unsigned S       = 1024,
  parameter int unsigned RTR_D   = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  input  logic        su,
  input  logic [31:0] to_su,
  input  logic        commit,
  input  cfg_bus_t    cfg,
  output cplx_t       out [M_OUT],
  output cplx_t       src,             // generator output (for observation)
  output logic [3:0]  status           // {collision, pf_err, coll_err, range_err}
);
  localparam int unsigned NODE_LAT = FIFO_LAT + FDC_LAT + GAIN_LAT + DOPP_LAT;

  wire        sel = cfg.we && cfg.addr[15:12] == NODE_ID;
  wire [11:0] ra  = cfg.addr[11:0];

  // ---------------------------------------------------------------- registers
  logic [11:0] drfg_per, drfg_on;
  logic        drfg_en;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      drfg_per <= 12'd2048;
      drfg_on  <= 12'd64;
      drfg_en  <= 1'b0;
    end else if (sel) begin
      if (ra == REG_DRFG_PER) drfg_per <= cfg.data[11:0];
      if (ra == REG_DRFG_ON)  drfg_on  <= cfg.data[11:0];
      if (ra == REG_DRFG_EN)  drfg_en  <= cfg.data[0];
    end
  end

  coef10_t     ofdc  [M_OUT*4];
  fp16_t       ogain [M_OUT];
  logic [31:0] fdopp [M_OUT];

  cdc #(.N(M_OUT*4), .W(10), .INIT(10'h000)) u_cdc_fdc (
    .clk, .rst_n, .su, .commit,
    .we(sel && ra[11:5] == REG_OUT_FDC[11:5] && 32'(ra[4:0]) < M_OUT*4),
    .idx(($clog2(M_OUT*4))'(ra[4:0])), .wdata(cfg.data[9:0]), .active(ofdc));
  cdc #(.N(M_OUT), .W(16), .INIT(16'h3C00)) u_cdc_gain (
    .clk, .rst_n, .su, .commit,
    .we(sel && ra[11:4] == REG_OUT_GAIN[11:4] && 32'(ra[3:0]) < M_OUT),
    .idx(($clog2(M_OUT))'(ra[3:0])), .wdata(cfg.data[15:0]), .active(ogain));
  cdc #(.N(M_OUT), .W(32), .INIT(32'd0)) u_cdc_dopp (
    .clk, .rst_n, .su, .commit,
    .we(sel && ra[11:4] == REG_DOPP[11:4] && 32'(ra[3:0]) < M_OUT),
    .idx(($clog2(M_OUT))'(ra[3:0])), .wdata(cfg.data), .active(fdopp));

  // ---------------------------------------------------------------- datapath
  drfg u_drfg (
    .clk, .rst_n, .run, .en(drfg_en), .per(drfg_per), .on_len(drfg_on),
    .tab_we(sel && ra[11:6] == REG_DRFG_TAB[11:6]), .tab_idx(ra[5:0]), .tab_data(cfg.data),
    .y(src));

  cplx_t fifo_out [M_OUT];
  logic  fifo_v   [M_OUT];
  simo_fifo #(.P(P), .S(S), .M(M_OUT), .RTR_D(RTR_D), .COMPUTE_LAT(NODE_LAT)) u_fifo (
    .clk, .rst_n, .run, .su, .to_su,
    .scp_we(sel && ra[11:4] == REG_DELAY[11:4] && 32'(ra[3:0]) < M_OUT),
    .scp_idx(($clog2(M_OUT))'(ra[3:0])), .scp_data(cfg.data), .commit,
    .wr_data(src), .out_data(fifo_out), .out_valid(fifo_v),
    .range_err(status[0]), .coll_err(status[1]), .pf_err(status[2]), .collision(status[3]));

  cplx_t gained [M_OUT];
  for (genvar i = 0; i < M_OUT; i++) begin : g_out
    cplx_t   filt;
    coef10_t c [4];
    for (genvar k = 0; k < 4; k++) begin : g_c
      assign c[k] = ofdc[i*4 + k];
    end
    fdc_fir  u_fdc  (.clk, .x(fifo_out[i]), .c, .y(filt));
    gain_mul u_gain (.clk, .x(filt), .g(ogain[i]), .y(gained[i]));
  end

  doppler #(.N_OUT(M_OUT)) u_dopp (
    .clk, .rst_n, .run, .fdopp, .x(gained), .y(out), .coef(), .upd());
endmodule
