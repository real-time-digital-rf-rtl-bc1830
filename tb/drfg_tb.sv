// drfg_tb: digital RF generator. Programs random sample tables, periods and
// pulse lengths, including the extreme duty cycles 64/2048 = 3.125 % and
// 100 %, and checks every output sample: sample k of a run (k >= 0, one
// cycle after run rises) is tab[(k mod per) mod 64] while (k mod per) <
// on_len, else zero. Also checks the measured duty cycle and that the
// output is zero when disabled or stopped.
module drfg_tb;
  import rfe_pkg::*;
  logic clk = 0, rst_n = 0, run = 0, en = 0, tab_we = 0;
  logic [11:0] per = 12'd2048, on_len = 12'd64;
  logic [5:0] tab_idx = 0;
  logic [31:0] tab_data = 0;
  cplx_t y;
  logic [31:0] tab [64];
  int checks = 0, failures = 0;

  drfg dut (.clk, .rst_n, .run, .en, .per, .on_len, .tab_we, .tab_idx, .tab_data, .y);
  always #5 clk = ~clk;

  task automatic load_tab();
    for (int k = 0; k < 64; k++) begin
      @(negedge clk);
      tab_we = 1; tab_idx = 6'(k);
      tab_data = {1'b0, 5'($urandom_range(13, 16)), 10'($urandom), 1'b1, 5'($urandom_range(13, 16)), 10'($urandom)};
      tab[k] = tab_data;
    end
    @(negedge clk);
    tab_we = 0;
  endtask

  task automatic run_case(int p, int on, int cycles, bit enable);
    int nz;
    en = enable; per = 12'(p); on_len = 12'(on);
    @(negedge clk);
    run = 1;
    nz = 0;
    for (int c = 0; c < cycles; c++) begin
      int k;
      logic [31:0] e;
      @(negedge clk);
      k = c;   // sample index k at the c-th negedge after run rose
      e = (enable && (k % p) < on) ? tab[(k % p) % 64] : 32'd0;
      if (y != '0) nz++;
      checks++;
      if (y !== e) begin
        failures++;
        if (failures < 10) $display("FAIL per=%0d on=%0d k=%0d: %h expected %h", p, on, k, y, e);
      end
    end
    if (enable && cycles % p == 0) begin
      checks++;
      if (nz != (cycles / p) * on) begin
        failures++;
        $display("FAIL duty cycle: %0d non-zero of %0d, expected %0d", nz, cycles, (cycles / p) * on);
      end
      $display("per %0d on %0d: duty cycle %f %%", p, on, 100.0 * nz / cycles);
    end
    run = 0;
    @(negedge clk);
    @(negedge clk);
    checks++;
    if (y !== '0) begin failures++; $display("FAIL output not zero after stop"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_tab();
    run_case(2048, 64, 4096, 1);     // 3.125 %
    run_case(100, 100, 400, 1);      // 100 %
    run_case(200, 150, 800, 1);      // pulse longer than the table
    run_case(2048, 2048, 2048, 1);
    load_tab();
    for (int r = 0; r < 6; r++) begin
      int p;
      p = int'($urandom_range(2, 300));
      run_case(p, int'($urandom_range(1, p)), 3 * p, 1);
    end
    run_case(50, 20, 200, 0);        // disabled
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
