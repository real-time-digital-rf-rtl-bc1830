// cdc: coefficient distribution control, a double-buffered coefficient bank.
//
// Gains, filter coefficients and Doppler frequencies change at scenario
// boundaries without stalling the sample stream. Each coefficient has three
// copies, matching the delay controller's SCP buffers so that one complete
// scenario configuration takes effect together:
//   n2      written by the programming interface during scenario N;
//   n1      the coefficients of the next scenario (n1 <= n2 at each SU);
//   active  used by the datapath (active <= n1 at each SU).
// A write during scenario N is therefore applied from scenario N+2. While
// the emulator is stopped, commit copies n2 into n1 and active, so that the
// first scenario is preloaded and its values (e.g. Doppler frequencies) are
// already in place on the first running cycle. The three-copy scheme is this design's reading of the
// paper's "double buffered and loaded with an internally generated scenario
// update (SU) pulse"; the paper does not give the buffer structure.
module cdc #(
  parameter int unsigned N = 4,     // number of coefficients
  parameter int unsigned W = 16,    // bits per coefficient
  parameter logic [W-1:0] INIT = '0,
  localparam int unsigned IW = (N <= 1) ? 1 : $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [IW-1:0] idx,
  input  logic [W-1:0]  wdata,
  input  logic          su,
  input  logic          commit,
  output logic [W-1:0]  active [N]
);
  logic [W-1:0] n2 [N];
  logic [W-1:0] n1 [N];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        n2[i]     <= INIT;
        n1[i]     <= INIT;
        active[i] <= INIT;
      end
    end else begin
      if (su) begin
        active <= n1;
        n1     <= n2;
      end else if (commit) begin
        n1     <= n2;
        active <= n2;
      end
      if (we && 32'(idx) < N) n2[idx] <= wdata;
    end
  end
endmodule
