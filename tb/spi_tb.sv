// spi_tb: serial programming interface. Sends random write frames and
// read frames with several serial clock speeds (half periods of 4 to 9
// core cycles). Every write must produce exactly one configuration bus
// write with the frame's address and data within 4 core cycles of the 49th
// rising serial clock edge; every read must strobe the frame's address and
// shift the returned word out on miso, MSB first, readable before each of
// rising edges 18..49. A chip-select abort in mid-frame must not write.
module spi_tb;
  import rfe_pkg::*;
  logic clk = 0, rst_n = 0, sclk = 0, cs_n = 1, mosi = 0;
  logic miso, rd_stb;
  cfg_bus_t cfg;
  logic [31:0] rdata;
  int checks = 0, failures = 0, n_wr = 0, n_rd = 0, n_we = 0;
  int half = 4, last_rise = 0, cyc = 0;
  logic [15:0] last_rd_addr;
  logic [15:0] exp_addr;
  logic [31:0] exp_data;

  spi dut (.clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .cfg, .rd_stb, .rdata);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // Read data: a fixed function of the address latched at the strobe.
  always @(posedge clk) if (rd_stb) last_rd_addr <= cfg.addr;
  assign rdata = {last_rd_addr ^ 16'hA5C3, ~last_rd_addr};

  always @(posedge clk) begin
    if (cfg.we) begin
      n_we++;
      checks++;
      if (cfg.addr !== exp_addr || cfg.data !== exp_data || cyc - last_rise > 4) begin
        failures++;
        $display("FAIL write %h %h expected %h %h, %0d cycles after the last edge",
                 cfg.addr, cfg.data, exp_addr, exp_data, cyc - last_rise);
      end
    end
  end

  task automatic frame(logic rw, logic [15:0] addr, logic [31:0] wd, int nbits, output logic [31:0] rd);
    logic [48:0] fr;
    fr = {rw, addr, wd};
    rd = '0;
    @(negedge clk);
    cs_n = 0;
    repeat (half) @(negedge clk);
    for (int b = 48; b >= 49 - nbits; b--) begin
      mosi = fr[b];
      repeat (half) @(negedge clk);
      if (b <= 31) rd[b] = miso;
      sclk = 1;
      last_rise = cyc;
      repeat (half) @(negedge clk);
      sclk = 0;
    end
    repeat (half) @(negedge clk);
    cs_n = 1;
    repeat (2 * half) @(negedge clk);
  endtask

  initial begin
    logic [31:0] d;
    logic [15:0] a;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 120; n++) begin
      half = int'($urandom_range(4, 9));
      a = 16'($urandom);
      if ($urandom_range(2) == 0) begin
        frame(1'b1, a, 32'd0, 49, d);
        n_rd++;
        checks++;
        if (d !== {a ^ 16'hA5C3, ~a}) begin
          failures++;
          $display("FAIL read %h returned %h expected %h", a, d, {a ^ 16'hA5C3, ~a});
        end
      end else if ($urandom_range(9) == 0) begin
        frame(1'b0, a, $urandom, int'($urandom_range(20, 48)), d);   // aborted
      end else begin
        exp_addr = a;
        exp_data = $urandom;
        frame(1'b0, a, exp_data, 49, d);
        n_wr++;
      end
    end
    checks++;
    if (n_we != n_wr) begin
      failures++;
      $display("FAIL %0d bus writes for %0d write frames", n_we, n_wr);
    end
    $display("write frames %0d, read frames %0d", n_wr, n_rd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
