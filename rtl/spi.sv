// spi: bit-serial scenario programming interface.
//
// All configuration enters the chip, and the captured receiver samples
// leave it, through one slow bit-serial port (0.5 kbit/s on the test chip).
// The serial pins are sampled in the core clock domain through two-stage
// synchronizers; the serial clock must be much slower than the core clock.
// Frame, MSB first, on rising sclk edges while cs_n is low:
//   1 bit rw (0 write, 1 read), 16 bits address, 32 bits data.
// A write frame issues one write on the configuration bus after its 49th
// bit. A read frame issues a read strobe after the 17th bit; the bus
// returns rdata two core cycles later and the 32 data bits are then shifted
// out on miso, MSB first, changing after each falling sclk edge (the first
// bit is on miso before the 18th rising edge). The frame format is this
// design's own; the paper gives only the interface's role and speed.
module spi
  import rfe_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sclk,
  input  logic        cs_n,
  input  logic        mosi,
  output logic        miso,
  output cfg_bus_t    cfg,
  output logic        rd_stb,
  input  logic [31:0] rdata
);
  logic [2:0]  sclk_s, cs_s, mosi_s;
  logic [5:0]  nbits;
  logic [48:0] sh;
  logic [31:0] out_sh;
  logic [1:0]  rd_pend;

  wire rise = sclk_s[1] && !sclk_s[2];
  wire fall = !sclk_s[1] && sclk_s[2];
  wire sel  = !cs_s[1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sclk_s  <= '0;
      cs_s    <= '1;
      mosi_s  <= '0;
      nbits   <= '0;
      sh      <= '0;
      out_sh  <= '0;
      rd_pend <= '0;
      cfg     <= '0;
      rd_stb  <= 1'b0;
      miso    <= 1'b0;
    end else begin
      sclk_s <= {sclk_s[1:0], sclk};
      cs_s   <= {cs_s[1:0], cs_n};
      mosi_s <= {mosi_s[1:0], mosi};
      cfg.we <= 1'b0;
      rd_stb <= 1'b0;
      rd_pend <= {rd_pend[0], rd_stb};
      if (rd_pend[1]) begin
        out_sh <= rdata;
        miso   <= rdata[31];
      end
      if (!sel) begin
        nbits <= '0;
      end else if (rise) begin
        sh    <= {sh[47:0], mosi_s[1]};
        nbits <= nbits + 1'b1;
        if (nbits == 6'd16 && sh[15]) begin
          // 17th bit: rw, addr complete
          cfg.addr <= {sh[14:0], mosi_s[1]};
          rd_stb   <= 1'b1;
        end
        if (nbits == 6'd48 && !sh[47]) begin
          cfg.we   <= 1'b1;
          cfg.addr <= sh[46:31];
          cfg.data <= {sh[30:0], mosi_s[1]};
        end
      end else if (fall && nbits > 6'd17) begin
        out_sh <= {out_sh[30:0], 1'b0};
        miso   <= out_sh[30];
      end
    end
  end
endmodule
