// lddc_tb: one local delay distribution controller with its sub-bank.
// Fills the sub-bank through the write port, starts a read stream at a
// random row with a scenario update, and checks that one row is read per
// cycle (data and destination mask one cycle later), that the token leaves
// in the cycle the last row's data appear, that a token arriving on the ring
// restarts reading at row 0, and that an update without a configuration
// for this sub-bank stops reading.
module lddc_tb;
  import rfe_pkg::*;
  localparam int S = 16, M = 3;
  logic clk = 0, rst_n = 0, wr_en = 0, su = 0, cfg_valid = 0, tok_in_valid = 0;
  logic [3:0] wr_row = 0, cfg_row = 0;
  cplx_t wr_data = 0;
  logic [M-1:0] cfg_mask = 0, tok_in_mask = 0;
  logic tok_out_valid, rd_valid;
  logic [M-1:0] tok_out_mask, rd_mask;
  cplx_t rd_data;
  cplx_t mem [S];
  int checks = 0, failures = 0, n_hand = 0;

  lddc #(.S(S), .M(M)) dut (.clk, .rst_n, .wr_en, .wr_row, .wr_data, .su, .cfg_valid, .cfg_row,
    .cfg_mask, .tok_in_valid, .tok_in_mask, .tok_out_valid, .tok_out_mask, .rd_valid, .rd_mask, .rd_data);
  always #5 clk = ~clk;

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 15) $display("FAIL %s", msg);
    end
  endtask

  task automatic fill();
    for (int r = 0; r < S; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = 4'(r); wr_data = $urandom; mem[r] = wr_data;
    end
    @(negedge clk);
    wr_en = 0;
  endtask

  // Expect rows first..S-1 read on consecutive cycles, then the hand-off.
  task automatic expect_stream(int first, logic [M-1:0] mask);
    for (int r = first; r < S; r++) begin
      @(negedge clk);
      su = 0; cfg_valid = 0; tok_in_valid = 0;
      chk(rd_valid && rd_mask == mask && rd_data == mem[r],
          $sformatf("row %0d: valid %b mask %b data %h expected %h", r, rd_valid, rd_mask, rd_data, mem[r]));
      // the token leaves together with the data of the last row
      chk(tok_out_valid == (r == S - 1) && (r != S - 1 || tok_out_mask == mask),
          $sformatf("hand-off flag %b at row %0d", tok_out_valid, r));
    end
    @(negedge clk);
    chk(!tok_out_valid, "token handed on twice");
    chk(!rd_valid, "still reading after the hand-off");
    n_hand++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      int first;
      logic [M-1:0] mask;
      fill();
      first = int'($urandom_range(S - 1));
      mask  = M'($urandom_range(1, 7));
      su = 1; cfg_valid = 1; cfg_row = 4'(first); cfg_mask = mask;
      expect_stream(first, mask);
      // token arrives from the previous sub-bank
      repeat (int'($urandom_range(3))) @(negedge clk);
      mask = M'($urandom_range(1, 7));
      tok_in_valid = 1; tok_in_mask = mask;
      expect_stream(0, mask);
      // update without configuration: idle
      su = 1; cfg_valid = 0;
      @(negedge clk);
      su = 0;
      repeat (3) begin
        @(negedge clk);
        chk(!rd_valid, "reading without a token");
      end
      // update in the middle of a stream stops it
      su = 1; cfg_valid = 1; cfg_row = 4'd2; cfg_mask = 3'b001;
      @(negedge clk);
      su = 1; cfg_valid = 0;
      chk(rd_valid && rd_data == mem[2], "stream did not start at row 2");
      @(negedge clk);
      su = 0;
      @(negedge clk);
      chk(!rd_valid, "stream not stopped by an update");
    end
    $display("hand-offs %0d", n_hand);
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
