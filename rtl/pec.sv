// pec: processing engine controller with its real-time register (RTR) and
// prefetch buffer (PB), one per output of the SIMO-FIFO.
//
// Memory collisions are handled by multicasting a group header's samples
// to every member of its collision group; each member then needs its own
// delay on top of the header's. The PEC provides it: an autonomous FSM whose
// pointer ptr advances every running cycle (in step with the SIMO-FIFO write
// pointer). The sample arriving from the DDNoC is written at ptr, and the
// output is read at ptr - 1 - off, where off = tau_i - tau_header (0 for the
// header itself, which reads the most recent sample).
// Two dual-port buffers of RTR_D samples alternate as RTR and PB, as on the
// test chip: during a scenario the inactive one (the PB) collects the
// prefetched samples that the member needs at the start of the next
// scenario, and at the scenario boundary the two swap roles, which loads the
// prefetched data in zero time. The write side swaps two cycles after the
// scenario update (when the first sample of the new scenario reaches the
// RTR) and the read side, with the new offset and enable, one cycle later.
// Latency: sample in at cycle t, readable at t+1, out registered, so an
// output with offset 0 shows the input two cycles later.
module pec
  import rfe_pkg::*;
#(
  parameter int unsigned RTR_D = 256,
  localparam int unsigned DW = $clog2(RTR_D)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          run,
  input  logic          su,
  input  logic [DW-1:0] new_off,     // valid while su
  input  logic          new_en,      // valid while su
  input  logic          in_valid,
  input  cplx_t         in_data,
  input  logic          pf_we,
  input  logic [DW-1:0] pf_pos,
  input  cplx_t         pf_data,
  output logic          out_valid,
  output cplx_t         out_data
);
  logic [DW-1:0] ptr;
  logic [1:0]    su_d;
  logic          act_w, act_r;
  logic [DW-1:0] off, off_pend;
  logic          en, en_pend;
  logic          sel_q;
  cplx_t         rd [2];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ptr      <= '0;
      su_d     <= '0;
      act_w    <= 1'b0;
      act_r    <= 1'b0;
      off      <= '0;
      off_pend <= '0;
      en       <= 1'b0;
      en_pend  <= 1'b0;
      sel_q    <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      if (run) ptr <= ptr + 1'b1;
      su_d <= {su_d[0], su};
      if (su) begin
        off_pend <= new_off;
        en_pend  <= new_en;
      end
      if (su_d[0]) act_w <= ~act_w;
      if (su_d[1]) begin
        act_r <= ~act_r;
        off   <= off_pend;
        en    <= en_pend;
      end
      // Read issued this cycle with act_r/en; data appear next cycle.
      sel_q     <= act_r;
      out_valid <= en;
    end
  end

  for (genvar b = 0; b < 2; b++) begin : g_buf
    logic          we;
    logic [DW-1:0] wa;
    cplx_t         wd;
    always_comb begin
      if (act_w == 1'(b)) begin          // this buffer is the RTR
        we = run;
        wa = ptr;
        wd = in_valid ? in_data : '0;
      end else begin                      // this buffer is the PB
        we = pf_we;
        wa = pf_pos;
        wd = pf_data;
      end
    end
    dpsram #(.DEPTH(RTR_D), .W(32)) u_mem (
      .clk, .we, .waddr(wa), .wdata(wd), .raddr(ptr - DW'(1) - off), .rdata(rd[b])
    );
  end

  assign out_data = !out_valid ? '0 : (sel_q ? rd[1] : rd[0]);
endmodule
