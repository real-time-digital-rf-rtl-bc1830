// doppler: shared Doppler coefficient generator and per-output correction.
//
// Each output of a node is multiplied by its own narrowband Doppler term
//   A_i(t) = exp(-j 2 pi f_dopp,i n Ts).
// The term changes slowly, so it is recomputed only once every UPD_CYC = 256
// cycles (about 2 MHz at the test chip's clock) and a single generator is
// shared by all outputs, as in the paper's Doppler module:
//   * a modulo-32 counter splits the 256-cycle period into 8 slots of
//     GEN_CYC = 32 cycles; in slot i < N_OUT the coefficient of output i is
//     generated (32-cycle generation latency);
//   * the f_dopp shift register rotates once per slot so that its head is
//     the frequency being worked on; it is reloaded in parallel from the
//     programmed frequencies once per period (the "synchronizer");
//   * the Ts incrementor holds n, the sample index at which the next set of
//     coefficients takes effect; n x f_dopp gives the phase, whose top
//     ROM_AW bits address an 8K x 32 ROM of {cos, sin} in binary16;
//   * each new coefficient is shifted into the A shift register, and at the
//     end of the period (modulo-256 counter) all coefficients are loaded in
//     parallel into the output multipliers in a single cycle, and n advances
//     by 256.
// f_dopp is a 32-bit phase increment per sample (fraction of a turn), i.e.
// f_dopp / f_clk x 2^32; this encoding is this design's choice.
// The correction itself is a complex multiply of x_i by A_i: four fp16
// multipliers then two fp16 adders, DOPP_LAT = 2 cycles.
// What follows the paper: ROM size 8Kx32, 32-cycle generation, 256-cycle
// parallel update, shift registers, counters. Own choices: phase encoding,
// ROM contents format ({cos, sin} binary16, sign flipped for the -j), the
// pipeline inside a slot, and reset of all coefficients to 1 + j0.
module doppler
  import rfe_pkg::*;
#(
  parameter int unsigned N_OUT   = 3,
  parameter int unsigned ROM_AW  = 13,   // 8K entries
  parameter int unsigned UPD_CYC = 256,
  parameter int unsigned GEN_CYC = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  input  logic [31:0] fdopp [N_OUT],
  input  cplx_t       x [N_OUT],
  output cplx_t       y [N_OUT],
  output cplx_t       coef [N_OUT],   // currently applied A_i (for observation)
  output logic        upd             // pulses when new coefficients are applied
);
  localparam int unsigned ROM_D = 1 << ROM_AW;
  localparam int unsigned SLOTS = UPD_CYC / GEN_CYC;
  localparam int unsigned CW    = $clog2(UPD_CYC);
  localparam int unsigned GW    = $clog2(GEN_CYC);

  initial begin
    assert (N_OUT < SLOTS) else $error("doppler: too many outputs for one generator");
  end

  // ---------------------------------------------------------------- ROM
  function automatic fp16_t r2h(real r);
    logic [63:0] b;
    int          e;
    b = $realtobits(r);
    e = int'(b[62:52]) - 1023 + 15;
    if (r == 0.0 || e <= 0) return 16'h0000;
    return {b[63], 5'(e), b[51:42]};
  endfunction

  logic [31:0] rom [ROM_D];
  initial begin
    for (int unsigned k = 0; k < ROM_D; k++)
      rom[k] = {r2h($cos(6.283185307179586 * real'(k) / real'(ROM_D))),
                r2h($sin(6.283185307179586 * real'(k) / real'(ROM_D)))};
  end

  // ---------------------------------------------------------------- counters
  logic [GW-1:0] cnt32;     // modulo-32 counter
  logic [CW-1:0] cnt256;    // modulo-256 counter
  logic [31:0]   n_ts;      // Ts incrementor: sample index of next update
  logic [31:0]   f_sr [N_OUT];
  cplx_t         a_sr [N_OUT];
  logic [31:0]   phase_q;
  logic [31:0]   rom_q;
  logic [CW-GW-1:0] slot;

  assign slot = cnt256[CW-1:GW];

  wire end_slot   = run && (cnt32 == GW'(GEN_CYC - 1));
  wire end_period = run && (cnt256 == CW'(UPD_CYC - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt32  <= '0;
      cnt256 <= '0;
      n_ts   <= 32'(UPD_CYC);
      phase_q <= '0;
      rom_q  <= '0;
      upd    <= 1'b0;
      for (int i = 0; i < N_OUT; i++) begin
        f_sr[i] <= '0;
        a_sr[i] <= '0;
        coef[i] <= '{re: 16'h3C00, im: 16'h0000};
      end
    end else begin
      upd <= 1'b0;
      if (run) begin
        cnt32  <= cnt32 + 1'b1;
        cnt256 <= cnt256 + 1'b1;
        // Slot pipeline: cycle 0 multiply n x f, cycle 1 ROM read,
        // last cycle of the slot shift into the A register.
        if (cnt32 == GW'(0)) phase_q <= n_ts * f_sr[0];
        if (cnt32 == GW'(1)) rom_q   <= rom[phase_q[31 -: ROM_AW]];
        if (end_slot && slot < (CW-GW)'(N_OUT)) begin
          for (int i = 0; i < N_OUT - 1; i++) a_sr[i] <= a_sr[i+1];
          a_sr[N_OUT-1] <= '{re: rom_q[31:16],
                             im: (rom_q[14:0] == 15'd0) ? 16'h0000 : {~rom_q[15], rom_q[14:0]}};
          for (int i = 0; i < N_OUT - 1; i++) f_sr[i] <= f_sr[i+1];
          f_sr[N_OUT-1] <= f_sr[0];
        end
        if (end_period) begin
          for (int i = 0; i < N_OUT; i++) coef[i] <= a_sr[i];
          n_ts <= n_ts + 32'(UPD_CYC);
          upd  <= 1'b1;
          // Synchronizer: reload the frequency shift register.
          for (int i = 0; i < N_OUT; i++) f_sr[i] <= fdopp[i];
        end
      end else begin
        // While stopped keep the frequency register in step with the
        // programmed values so the first period uses them.
        for (int i = 0; i < N_OUT; i++) f_sr[i] <= fdopp[i];
      end
    end
  end

  // ---------------------------------------------------------------- apply
  for (genvar i = 0; i < N_OUT; i++) begin : g_out
    fp16_t p_rr, p_ii, p_ri, p_ir;
    fp16_t q_rr, q_ii, q_ri, q_ir;
    fp16_t s_re, s_im;
    fp16_mul u_rr (.a(x[i].re), .b(coef[i].re), .y(p_rr));
    fp16_mul u_ii (.a(x[i].im), .b(coef[i].im), .y(p_ii));
    fp16_mul u_ri (.a(x[i].re), .b(coef[i].im), .y(p_ri));
    fp16_mul u_ir (.a(x[i].im), .b(coef[i].re), .y(p_ir));
    always_ff @(posedge clk) begin
      q_rr <= p_rr;
      q_ii <= (p_ii[14:0] == 15'd0) ? 16'h0000 : {~p_ii[15], p_ii[14:0]};
      q_ri <= p_ri;
      q_ir <= p_ir;
    end
    fp16_add u_re (.a(q_rr), .b(q_ii), .y(s_re));
    fp16_add u_im (.a(q_ri), .b(q_ir), .y(s_im));
    always_ff @(posedge clk) y[i] <= '{re: s_re, im: s_im};
  end
endmodule
