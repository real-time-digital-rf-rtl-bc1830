// scen_timer: internal scenario-update (SU) pulse generator.
//
// The emulator is reconfigured scenario by scenario without stopping the
// sample stream: new delays and double-buffered gains take effect together
// on an internally generated SU pulse. This timer counts a programmable
// scenario length of K cycles (1 ms of emulated time at the full design;
// the test chip used much shorter scenarios) and raises su on the first
// cycle of every scenario, starting with the first running cycle. It also
// gives the number of cycles left until the next SU (to_su, equal to K on
// the SU cycle), which the GDDC uses to time its prefetches, and counts
// scenarios.
// The paper aligns the SU pulse to the falling clock edge; this design is
// single-edge and uses su as a synchronous enable sampled on the rising edge.
// K is sampled at each SU, so a new length applies from the next scenario.
module scen_timer (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  input  logic [31:0] k_len,      // scenario length in cycles, >= 2
  output logic        su,
  output logic [31:0] to_su,
  output logic [15:0] scen_cnt    // number of scenarios started
);
  logic [31:0] cnt, k_q;

  assign su    = run && (cnt == 32'd0);
  assign to_su = (su ? k_len : k_q) - cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt      <= '0;
      k_q      <= 32'd2;
      scen_cnt <= '0;
    end else if (!run) begin
      cnt <= '0;
    end else begin
      if (su) begin
        k_q      <= k_len;
        scen_cnt <= scen_cnt + 1'b1;
      end
      cnt <= (cnt == (su ? k_len : k_q) - 32'd1) ? 32'd0 : cnt + 32'd1;
    end
  end
endmodule
