// ddnoc: data distribution network-on-chip of the SIMO-FIFO.
//
// P sub-bank read ports in, M output streams out. Every sub-bank read
// carries a destination mask; output m takes the sample of the sub-bank
// whose mask has bit m set. A mask with several bits set multicasts one read
// to a whole collision group, so the network can deliver up to M samples
// per cycle from up to P sources. The paper describes a multiplexer-based
// network; here each output is a one-hot AND-OR multiplexer followed by a
// register (one cycle of latency). An assertion checks that no output is
// addressed by two sub-banks in the same cycle, which the GDDC's grouping
// guarantees.
module ddnoc
  import rfe_pkg::*;
#(
  parameter int unsigned P = 16,
  parameter int unsigned M = 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid [P],
  input  logic [M-1:0] in_mask  [P],
  input  cplx_t        in_data  [P],
  output logic         out_valid [M],
  output cplx_t        out_data  [M]
);
  logic         sel_v [M];
  cplx_t        sel_d [M];
  int unsigned  hits  [M];

  always_comb begin
    for (int m = 0; m < M; m++) begin
      sel_v[m] = 1'b0;
      sel_d[m] = '0;
      hits[m]  = 0;
      for (int p = 0; p < P; p++) begin
        if (in_valid[p] && in_mask[p][m]) begin
          sel_v[m] = 1'b1;
          sel_d[m] = sel_d[m] | in_data[p];
          hits[m]  = hits[m] + 1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int m = 0; m < M; m++) begin
        out_valid[m] <= 1'b0;
        out_data[m]  <= '0;
      end
    end else begin
      out_valid <= sel_v;
      out_data  <= sel_d;
    end
  end

  for (genvar m = 0; m < M; m++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) hits[m] <= 1)
      else $error("ddnoc: output %0d addressed by several sub-banks", m);
  end
endmodule
