// simo_fifo: single-input multiple-output FIFO that emulates propagation
// delay to several objects at once.
//
// One stream of samples goes in, one sample per cycle; M streams come out,
// stream m being the input delayed by its own buffer delay tau_m. Samples
// are never moved: they are written once into P single-port SRAM sub-banks
// of S samples (P*S samples in all) at the write pointer, and each output
// is read at an address that trails the write pointer by tau_m ("virtual
// shifting" by dynamic pointers).
//   write H-tree     the sample and its row go to all sub-banks, the one
//                    selected by the write pointer's upper bits stores it
//                    (drawn as a broadcast here, without pipeline stages);
//   gddc             write pointer, SCP buffers, collision grouping,
//                    configuration transfer NoC and prefetch forwarding;
//   lddc x P         per-sub-bank read-pointer FSMs with their SRAMs, in a
//                    ring that hands each stream on to the next sub-bank;
//   ddnoc            routes the P sub-bank reads to the M outputs, with
//                    multicast to collision groups;
//   pec x M          RTR/PB pair per output, adds the in-group offset.
// Latency: a sample written at cycle t appears on output m at cycle
// t + tau_m + FIFO_LAT (FIFO_LAT = 4: SRAM read, DDNoC, RTR write, RTR read).
// The buffer delay tau_m is the SCP's physical delay minus COMPUTE_LAT, the
// fixed processing latency of the node around this FIFO. Delays must lie in
// [S, (P-1)S] samples so that the sub-bank being written is never read.
// Outputs that are not enabled read as zero.
module simo_fifo
  import rfe_pkg::*;
#(
  parameter int unsigned P           = 16,
  parameter int unsigned S           = 1024,
  parameter int unsigned M           = 3,
  parameter int unsigned RTR_D       = 256,
  parameter int unsigned COMPUTE_LAT = 11
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  input  logic        su,
  input  logic [31:0] to_su,
  input  logic        scp_we,
  input  logic [$clog2(M)-1:0] scp_idx,
  input  logic [31:0] scp_data,
  input  logic        commit,
  input  cplx_t       wr_data,
  output cplx_t       out_data  [M],
  output logic        out_valid [M],
  output logic        range_err,
  output logic        coll_err,
  output logic        pf_err,
  output logic        collision
);
  localparam int unsigned RW = $clog2(S);
  localparam int unsigned AW = $clog2(P * S);
  localparam int unsigned DW = $clog2(RTR_D);

  logic [AW-1:0] wp;
  logic          cfg_valid [P];
  logic [RW-1:0] cfg_row   [P];
  logic [M-1:0]  cfg_mask  [P];
  logic [DW-1:0] pec_off   [M];
  logic          pec_en    [M];
  logic          pf_we     [M];
  logic [DW-1:0] pf_pos    [M];

  gddc #(.P(P), .S(S), .M(M), .RTR_D(RTR_D), .COMPUTE_LAT(COMPUTE_LAT)) u_gddc (
    .clk, .rst_n, .run, .su, .to_su, .scp_we, .scp_idx, .scp_data, .commit,
    .wp, .cfg_valid, .cfg_row, .cfg_mask, .pec_off, .pec_en, .pf_we, .pf_pos,
    .range_err, .coll_err, .pf_err, .collision
  );

  logic         tok_v [P];
  logic [M-1:0] tok_m [P];
  logic         rd_v  [P];
  logic [M-1:0] rd_m  [P];
  cplx_t        rd_d  [P];

  for (genvar p = 0; p < P; p++) begin : g_bank
    lddc #(.S(S), .M(M)) u_lddc (
      .clk, .rst_n,
      .wr_en(run && wp[AW-1:RW] == ($clog2(P))'(p)), .wr_row(wp[RW-1:0]), .wr_data,
      .su, .cfg_valid(cfg_valid[p]), .cfg_row(cfg_row[p]), .cfg_mask(cfg_mask[p]),
      .tok_in_valid(tok_v[(p + P - 1) % P]), .tok_in_mask(tok_m[(p + P - 1) % P]),
      .tok_out_valid(tok_v[p]), .tok_out_mask(tok_m[p]),
      .rd_valid(rd_v[p]), .rd_mask(rd_m[p]), .rd_data(rd_d[p])
    );
  end

  logic  noc_v [M];
  cplx_t noc_d [M];
  ddnoc #(.P(P), .M(M)) u_noc (
    .clk, .rst_n, .in_valid(rd_v), .in_mask(rd_m), .in_data(rd_d),
    .out_valid(noc_v), .out_data(noc_d)
  );

  for (genvar m = 0; m < M; m++) begin : g_pec
    pec #(.RTR_D(RTR_D)) u_pec (
      .clk, .rst_n, .run, .su, .new_off(pec_off[m]), .new_en(pec_en[m]),
      .in_valid(noc_v[m]), .in_data(noc_d[m]),
      .pf_we(pf_we[m]), .pf_pos(pf_pos[m]), .pf_data(wr_data),
      .out_valid(out_valid[m]), .out_data(out_data[m])
    );
  end
endmodule
