// rfe_pkg: types, latencies and the register map shared by the RF emulator.
//
// Samples are complex: a 16-bit floating point real part (I) and a 16-bit
// floating point imaginary part (Q), 32 bits in all, as on the test chip.
// The 16-bit format is taken to be IEEE binary16 (1 sign, 5 exponent, 10
// mantissa bits); the fractional delay filter coefficients use the reduced
// 10-bit format of the paper (1 sign, 5 exponent, 4 mantissa bits), which is
// binary16 with the low 6 mantissa bits dropped.
//
// Configuration travels on one parallel bus (cfg_bus_t) that the bit-serial
// programming interface drives. Addresses are 16 bits: [15:12] select the
// node, [11:0] the register inside it. The register map is this design's own
// choice; the paper does not publish one.
package rfe_pkg;

  typedef logic [15:0] fp16_t;
  typedef logic [9:0]  coef10_t;

  typedef struct packed {
    fp16_t re;
    fp16_t im;
  } cplx_t;

  // Configuration write/read bus.
  typedef struct packed {
    logic        we;
    logic [15:0] addr;
    logic [31:0] data;
  } cfg_bus_t;

  // Node selectors, addr[15:12].
  localparam logic [3:0] NODE_TX     = 4'd0;
  localparam logic [3:0] NODE_OBJ1   = 4'd1;
  localparam logic [3:0] NODE_OBJ2   = 4'd2;
  localparam logic [3:0] NODE_RX     = 4'd3;
  localparam logic [3:0] NODE_GLOBAL = 4'd15;

  // Register offsets inside a node, addr[11:0].
  localparam logic [11:0] REG_IN_FDC   = 12'h000; // + in*4 + tap : input FDC coefficient (10 bit)
  localparam logic [11:0] REG_IN_GAIN  = 12'h020; // + in         : alpha(theta_in) or G_R (fp16)
  localparam logic [11:0] REG_OUT_FDC  = 12'h040; // + out*4 + tap: output FDC coefficient (10 bit)
  localparam logic [11:0] REG_OUT_GAIN = 12'h060; // + out        : beta x rho or G_T x rho (fp16)
  localparam logic [11:0] REG_DOPP     = 12'h070; // + out        : Doppler frequency word (32 bit)
  localparam logic [11:0] REG_DELAY    = 12'h080; // + out        : SCP physical delay, [31] enable
  localparam logic [11:0] REG_DRFG_PER = 12'h100; // DRFG period in samples (1..2048)
  localparam logic [11:0] REG_DRFG_ON  = 12'h101; // DRFG on-length in samples
  localparam logic [11:0] REG_DRFG_EN  = 12'h102; // DRFG enable
  localparam logic [11:0] REG_DRFG_TAB = 12'h140; // + k : DRFG non-zero sample k (32 bit I/Q)
  localparam logic [11:0] REG_RX_START = 12'h200; // receiver capture start (cycles after run)
  localparam logic [11:0] REG_RX_STEP  = 12'h201; // receiver capture stride (cycles between stored samples)
  localparam logic [11:0] REG_RX_MEM   = 12'h400; // + k : receiver capture memory (read only)
  localparam logic [11:0] REG_SCEN_LEN = 12'h000; // global: scenario length K in cycles
  localparam logic [11:0] REG_RUN      = 12'h001; // global: run (1) / stop (0)
  localparam logic [11:0] REG_COMMIT   = 12'h002; // global: write while stopped preloads the first scenario
  localparam logic [11:0] REG_STATUS   = 12'h003; // global: status (read only)

  // Pipeline depths of the datapath units (cycles from input to output).
  localparam int unsigned FDC_PIPE    = 3;  // multiply, add, add
  localparam int unsigned FDC_ZERO_TAP = 1; // tap index holding the zero time lag
  localparam int unsigned FDC_LAT     = FDC_PIPE + FDC_ZERO_TAP;
  localparam int unsigned GAIN_LAT    = 1;
  localparam int unsigned DOPP_LAT    = 2;  // complex multiply: multiply, add
  localparam int unsigned FIFO_LAT    = 4;  // SRAM read, DDNoC, RTR write, RTR read

  function automatic int unsigned tree_lat(int unsigned n);
    return (n <= 1) ? 1 : $clog2(n);
  endfunction

  // 10-bit FDC coefficient to binary16: append six zero mantissa bits.
  function automatic fp16_t coef10_to_fp16(coef10_t c);
    return {c, 6'b0};
  endfunction

endpackage
