// pec_tb: processing engine controller with RTR and prefetch buffer
// (16-entry buffers, scenarios of 48 cycles). Sample tag(t) enters in every
// running cycle; every scenario brings a new random offset (and sometimes a
// disabled output). The output, sampled in the cycle after the one where tag(t) was
// applied, must be tag(t - 1 - off) (two-cycle latency), off being the
// offset of the current scenario, and zero while disabled. In scenarios
// that follow a prefetch, the testbench fills the PB at the positions the
// RTR uses during the last cycles before the update, so the check also
// covers the cycles right after the RTR/PB swap; without prefetch those
// first off cycles are not checked. Offsets of 0 (group header) occur too.
module pec_tb;
  import rfe_pkg::*;
  localparam int RD = 16, K = 48, NS = 80, DW = $clog2(RD);
  logic clk = 0, rst_n = 0, run = 0, su = 0, new_en = 0, in_valid = 0, pf_we = 0;
  logic [DW-1:0] new_off = 0, pf_pos = 0;
  cplx_t in_data = 0, pf_data = 0, out_data;
  logic out_valid;
  int checks = 0, failures = 0, t = 0, n_pf_checked = 0;
  int off [NS];
  bit en [NS], pf [NS];

  pec #(.RTR_D(RD)) dut (.clk, .rst_n, .run, .su, .new_off, .new_en, .in_valid, .in_data,
    .pf_we, .pf_pos, .pf_data, .out_valid, .out_data);
  always #5 clk = ~clk;

  function automatic cplx_t tag(int v);
    return '{re: 16'(v), im: ~16'(v)};
  endfunction

  initial begin
    for (int s = 0; s < NS; s++) begin
      off[s] = ($urandom_range(3) == 0) ? 0 : int'($urandom_range(RD - 4));
      en[s]  = ($urandom_range(7) != 0);
      pf[s]  = ($urandom_range(2) != 0);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run = 1;
    for (int s = 0; s < NS; s++) begin
      for (int c = 0; c < K; c++) begin
        su = (c == 0);
        new_off = DW'(off[s]);
        new_en = en[s];
        in_valid = 1;
        in_data = tag(t);
        // prefetch for scenario s+1: the last cycles before the next update
        // (and the update cycle plus one, still written to the old RTR)
        pf_we = 0;
        if (s + 1 < NS && pf[s + 1] && c >= K - RD + 2) begin
          pf_we = 1; pf_pos = DW'(t); pf_data = tag(t);
        end
        if (s > 0 && pf[s] && c <= 1) begin
          pf_we = 1; pf_pos = DW'(t); pf_data = tag(t);
        end
        @(negedge clk);
        // out at cycle t: reads issued in cycle t-1
        if (c >= 4 || (s > 0 && c >= 4)) begin
          int o;
          o = off[s];
          if (pf[s] || c >= 4 + o + 2) begin
            checks++;
            if (en[s] ? (out_valid !== 1'b1 || out_data !== tag(t - 1 - o))
                      : (out_valid !== 1'b0 || out_data !== '0)) begin
              failures++;
              if (failures < 15)
                $display("FAIL s=%0d c=%0d off=%0d en=%0d pf=%0d: out %b %h expected %h",
                         s, c, o, en[s], pf[s], out_valid, out_data, tag(t - 1 - o));
            end
            if (pf[s] && en[s] && c < 4 + o + 2 && o > 0) n_pf_checked++;
          end
        end
        t++;
      end
    end
    if (n_pf_checked == 0) begin failures++; $display("FAIL prefetched samples never used"); end
    $display("outputs served from the prefetch buffer %0d", n_pf_checked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
