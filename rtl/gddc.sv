// gddc: global delay distribution controller of the SIMO-FIFO.
//
// Holds the single write pointer and turns the scenario configuration
// packets (SCPs) into work for the distributed LDDCs and PECs.
//  * Write pointer control: wp advances every running cycle; its upper bits
//    select the sub-bank written (through the write H-tree), its lower bits
//    the row.
//  * SCP double buffer: for each output the SCP gives the physical delay
//    d x f / c in samples and an enable. Writes land in the "N+2" buffer; at
//    each scenario update the N+2 contents move to the "N+1" buffer, which is
//    parsed one scenario ahead. So an SCP written during scenario N takes
//    effect in scenario N+2. Before starting, the first scenario is written
//    and moved to the N+1 buffer with a commit pulse, then the second is
//    written.
//  * Buffer delay: tau = physical delay - COMPUTE_LAT (the node's known,
//    fixed processing latency), so that the emulated delay matches the
//    physical one.
//  * Collision grouping: outputs whose buffer delays differ by less than one
//    sub-bank (S samples) would need two reads from one single-port SRAM in
//    the same cycle. Starting from the nearest output, each group takes the
//    nearest ungrouped output as its "group header" and adds every ungrouped
//    output less than S samples farther away. Only headers are fetched from
//    the SRAM; members get the header's samples by multicast and read them
//    back from their RTR with the offset tau_i - tau_header.
//  * Configuration transfer NoC: at the scenario update, for every header
//    the start address wp - tau is decoded to a sub-bank and row and sent
//    to that sub-bank's LDDC with the group's destination mask. The PECs get
//    their new offsets and enables at the same time.
//  * Prefetch: a member's first tau_i - tau_header samples of the next
//    scenario precede the header's first sample. When tau_i is smaller than
//    the remaining scenario length (prefetch of streaming data), these
//    samples stream in during the current scenario; the GDDC forwards each
//    one, as it is written to the SIMO-FIFO, into the member's prefetch
//    buffer at the position where the RTR will expect it.
// Error flags: range_err (a delay below one sub-bank or beyond P-1
// sub-banks; that output is switched off for the scenario), coll_err (a group offset larger than the RTR can hold) and
// pf_err (a member whose prefetch cannot be completed by streaming because
// its delay exceeds the scenario length; the other prefetch case of the
// paper, fetching from the SRAM when an LDDC is idle, is not built here).
module gddc
  import rfe_pkg::*;
#(
  parameter int unsigned P           = 16,
  parameter int unsigned S           = 1024,
  parameter int unsigned M           = 3,
  parameter int unsigned RTR_D       = 256,
  parameter int unsigned COMPUTE_LAT = 11,
  localparam int unsigned RW = $clog2(S),
  localparam int unsigned AW = $clog2(P * S),
  localparam int unsigned DW = $clog2(RTR_D)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          run,
  input  logic          su,          // first cycle of a scenario
  input  logic [31:0]   to_su,       // cycles left until the next su (K at su)
  // SCP writes
  input  logic          scp_we,
  input  logic [$clog2(M)-1:0] scp_idx,
  input  logic [31:0]   scp_data,    // [31] enable, [AW:0] physical delay
  input  logic          commit,      // while stopped: move N+2 buffer to N+1
  // write H-tree
  output logic [AW-1:0] wp,
  // configuration transfer NoC, valid while su
  output logic          cfg_valid [P],
  output logic [RW-1:0] cfg_row   [P],
  output logic [M-1:0]  cfg_mask  [P],
  // to the PECs, valid while su
  output logic [DW-1:0] pec_off [M],
  output logic          pec_en  [M],
  // prefetch forwarding
  output logic          pf_we  [M],
  output logic [DW-1:0] pf_pos [M],
  // status
  output logic          range_err,
  output logic          coll_err,
  output logic          pf_err,
  output logic          collision     // the next scenario has a collision group
);
  localparam int unsigned LD = 2;   // cycles from SRAM read to RTR write

  logic [AW:0]  phys_n2 [M], phys_n1 [M];
  logic         en_n2   [M], en_n1   [M];

  // ------------------------------------------------------------ write pointer
  always_ff @(posedge clk) begin
    if (!rst_n) wp <= '0;
    else if (run) wp <= wp + 1'b1;
  end

  // ------------------------------------------------------------ SCP buffers
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int m = 0; m < M; m++) begin
        phys_n2[m] <= '0; phys_n1[m] <= '0; en_n2[m] <= 1'b0; en_n1[m] <= 1'b0;
      end
    end else begin
      if (su || commit) begin
        phys_n1 <= phys_n2;
        en_n1   <= en_n2;
      end
      if (scp_we) begin
        phys_n2[scp_idx] <= scp_data[AW:0];
        en_n2[scp_idx]   <= scp_data[31];
      end
    end
  end

  // ------------------------------------------------------------ grouping of N+1
  logic [AW:0]          tau   [M];
  logic [$clog2(M)-1:0] hdr   [M];
  logic                 done  [M];
  logic                 en_ok [M];   // enabled and inside the legal range
  logic [AW:0]          best;
  int                   bi;
  logic                 rerr, cerr;

  always_comb begin
    rerr = 1'b0;
    cerr = 1'b0;
    for (int m = 0; m < M; m++) begin
      tau[m]  = phys_n1[m] - (AW+1)'(COMPUTE_LAT);
      hdr[m]  = ($clog2(M))'(m);
      en_ok[m] = en_n1[m];
      if (en_n1[m] && (phys_n1[m] < (AW+1)'(COMPUTE_LAT + S) || tau[m] > (AW+1)'((P - 1) * S))) begin
        rerr     = 1'b1;
        en_ok[m] = 1'b0;             // an illegal output is switched off
      end
      done[m] = !en_ok[m];
    end
    for (int pass = 0; pass < M; pass++) begin
      best = '1;
      bi   = -1;
      for (int m = 0; m < M; m++)
        if (!done[m] && (bi < 0 || tau[m] < best)) begin
          best = tau[m];
          bi   = m;
        end
      if (bi >= 0) begin
        for (int m = 0; m < M; m++)
          if (!done[m] && (tau[m] - best) < (AW+1)'(S)) begin
            hdr[m]  = ($clog2(M))'(bi);
            done[m] = 1'b1;
            if ((tau[m] - best) > (AW+1)'(RTR_D - 4)) cerr = 1'b1;
          end
      end
    end
  end

  logic [AW:0]          tau_q [M];
  logic [$clog2(M)-1:0] hdr_q [M];
  logic                 en_q  [M];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      range_err <= 1'b0;
      coll_err  <= 1'b0;
      for (int m = 0; m < M; m++) begin
        tau_q[m] <= '0; hdr_q[m] <= '0; en_q[m] <= 1'b0;
      end
    end else begin
      tau_q <= tau;
      hdr_q <= hdr;
      en_q  <= en_ok;
      // Sticky flags, raised when an erroneous scenario is started.
      if (su && rerr) range_err <= 1'b1;
      if (su && cerr) coll_err  <= 1'b1;
    end
  end

  // ------------------------------------------------------------ configuration NoC
  logic [AW-1:0] start [M];
  always_comb begin
    for (int p = 0; p < P; p++) begin
      cfg_valid[p] = 1'b0;
      cfg_row[p]   = '0;
      cfg_mask[p]  = '0;
    end
    for (int m = 0; m < M; m++) begin
      start[m]   = wp - tau_q[m][AW-1:0];
      pec_en[m]  = en_q[m];
      pec_off[m] = DW'(tau_q[m] - tau_q[hdr_q[m]]);
    end
    for (int m = 0; m < M; m++) begin
      if (su && en_q[m] && hdr_q[m] == ($clog2(M))'(m)) begin
        cfg_valid[start[m][AW-1:RW]] = 1'b1;
        cfg_row[start[m][AW-1:RW]]   = start[m][RW-1:0];
        for (int j = 0; j < M; j++)
          if (en_q[j] && hdr_q[j] == ($clog2(M))'(m)) cfg_mask[start[m][AW-1:RW]][j] = 1'b1;
      end
    end
  end

  // ------------------------------------------------------------ prefetch of streaming data
  logic any_member;
  always_comb begin
    any_member = 1'b0;
    for (int m = 0; m < M; m++) begin
      pf_we[m]  = 1'b0;
      // RTR position of the sample being written now, as the header's
      // multicast will place it: wp + tau_header + LD (modulo RTR_D).
      pf_pos[m] = DW'(wp + tau_q[hdr_q[m]][AW-1:0] + AW'(LD));
      if (en_q[m] && hdr_q[m] != ($clog2(M))'(m)) begin
        any_member = 1'b1;
        if (run && !su && 32'(tau_q[hdr_q[m]]) < to_su && to_su <= 32'(tau_q[m]))
          pf_we[m] = 1'b1;
      end
    end
  end
  assign collision = any_member;

  always_ff @(posedge clk) begin
    if (!rst_n) pf_err <= 1'b0;
    else if (su)
      for (int m = 0; m < M; m++)
        if (en_q[m] && hdr_q[m] != ($clog2(M))'(m) && 32'(tau_q[m]) + 32'd3 > to_su) pf_err <= 1'b1;
  end
endmodule
