// passive_node: passive reflector node of the emulator.
//
// Implements the direct path compute model for one scattering object:
//   v(t)   = sum_m alpha(theta_m) * FDC_m(s_m(t))           (inputs m)
//   out_i  = Doppler_i( beta(theta_i) rho(tau_i) * FDC_i( v(t - tau_i) ) )
// Each of the M_IN incoming streams passes its fractional delay filter and
// is weighted by the input-angle dependent RCS factor alpha; an adder tree
// forms the intermediate signal v(t), which is written into the SIMO-FIFO.
// For each of the M_OUT destinations the FIFO returns v delayed by that
// link's buffer delay; an output fractional delay filter, the lumped output
// RCS and path loss gain beta x rho (one multiplier) and the Doppler
// correction follow. The scattering is separable (alpha x beta), which is
// what makes one shared buffer of v(t) sufficient.
// Physical delays in the SCP are measured from the node's inputs; the node
// subtracts its fixed latency NODE_LAT = FDC_LAT + GAIN_LAT + tree latency
// + FIFO_LAT + FDC_LAT + GAIN_LAT + DOPP_LAT (17 cycles for two inputs).
// Registers (addr[15:12] = NODE_ID): input FDC coefficients, alpha gains,
// output FDC coefficients, beta x rho gains, Doppler frequencies and SCP
// delays, all applied at scenario updates.
// On the test chip the passive nodes use the transmitter's three-output
// SIMO-FIFO with one output idle; M_OUT = 3 keeps that.
module passive_node
  import rfe_pkg::*;
#(
  parameter logic [3:0]  NODE_ID = NODE_OBJ1,
  parameter int unsigned M_IN    = 2,
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
  input  cplx_t       in  [M_IN],
  output cplx_t       out [M_OUT],
  output cplx_t       v,               // intermediate signal (for observation)
  output logic [3:0]  status           // {collision, pf_err, coll_err, range_err}
);
  localparam int unsigned NODE_LAT = FDC_LAT + GAIN_LAT + tree_lat(M_IN)
                                   + FIFO_LAT + FDC_LAT + GAIN_LAT + DOPP_LAT;

  wire        sel = cfg.we && cfg.addr[15:12] == NODE_ID;
  wire [11:0] ra  = cfg.addr[11:0];

  coef10_t     ifdc  [M_IN*4];
  fp16_t       igain [M_IN];
  coef10_t     ofdc  [M_OUT*4];
  fp16_t       ogain [M_OUT];
  logic [31:0] fdopp [M_OUT];

  cdc #(.N(M_IN*4), .W(10), .INIT(10'h000)) u_cdc_ifdc (
    .clk, .rst_n, .su, .commit,
    .we(sel && ra[11:5] == REG_IN_FDC[11:5] && 32'(ra[4:0]) < M_IN*4),
    .idx(($clog2(M_IN*4))'(ra[4:0])), .wdata(cfg.data[9:0]), .active(ifdc));
  cdc #(.N(M_IN), .W(16), .INIT(16'h3C00)) u_cdc_igain (
    .clk, .rst_n, .su, .commit,
    .we(sel && ra[11:4] == REG_IN_GAIN[11:4] && 32'(ra[3:0]) < M_IN),
    .idx(($clog2(M_IN))'(ra[3:0])), .wdata(cfg.data[15:0]), .active(igain));
  cdc #(.N(M_OUT*4), .W(10), .INIT(10'h000)) u_cdc_ofdc (
    .clk, .rst_n, .su, .commit,
    .we(sel && ra[11:5] == REG_OUT_FDC[11:5] && 32'(ra[4:0]) < M_OUT*4),
    .idx(($clog2(M_OUT*4))'(ra[4:0])), .wdata(cfg.data[9:0]), .active(ofdc));
  cdc #(.N(M_OUT), .W(16), .INIT(16'h3C00)) u_cdc_ogain (
    .clk, .rst_n, .su, .commit,
    .we(sel && ra[11:4] == REG_OUT_GAIN[11:4] && 32'(ra[3:0]) < M_OUT),
    .idx(($clog2(M_OUT))'(ra[3:0])), .wdata(cfg.data[15:0]), .active(ogain));
  cdc #(.N(M_OUT), .W(32), .INIT(32'd0)) u_cdc_dopp (
    .clk, .rst_n, .su, .commit,
    .we(sel && ra[11:4] == REG_DOPP[11:4] && 32'(ra[3:0]) < M_OUT),
    .idx(($clog2(M_OUT))'(ra[3:0])), .wdata(cfg.data), .active(fdopp));

  // ---------------------------------------------------------------- input side
  cplx_t weighted [M_IN];
  for (genvar m = 0; m < M_IN; m++) begin : g_in
    cplx_t   filt;
    coef10_t c [4];
    for (genvar k = 0; k < 4; k++) begin : g_c
      assign c[k] = ifdc[m*4 + k];
    end
    fdc_fir  u_fdc  (.clk, .x(in[m]), .c, .y(filt));
    gain_mul u_gain (.clk, .x(filt), .g(igain[m]), .y(weighted[m]));
  end

  adder_tree #(.N(M_IN)) u_tree (.clk, .x(weighted), .y(v));

  // ---------------------------------------------------------------- delay
  cplx_t fifo_out [M_OUT];
  logic  fifo_v   [M_OUT];
  simo_fifo #(.P(P), .S(S), .M(M_OUT), .RTR_D(RTR_D), .COMPUTE_LAT(NODE_LAT)) u_fifo (
    .clk, .rst_n, .run, .su, .to_su,
    .scp_we(sel && ra[11:4] == REG_DELAY[11:4] && 32'(ra[3:0]) < M_OUT),
    .scp_idx(($clog2(M_OUT))'(ra[3:0])), .scp_data(cfg.data), .commit,
    .wr_data(v), .out_data(fifo_out), .out_valid(fifo_v),
    .range_err(status[0]), .coll_err(status[1]), .pf_err(status[2]), .collision(status[3]));

  // ---------------------------------------------------------------- output side
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
