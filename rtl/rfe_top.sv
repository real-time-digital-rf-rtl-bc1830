// rfe_top: four-node real-time RF emulator (one transmitter, two passive
// objects, one receiver), as on the 28 nm test chip.
//
// Every node models one object of the emulated RF environment; every
// directed link between nodes carries one complex 32-bit sample per clock.
// The node graph is fully connected except that the transmitter has no
// inputs and the receiver has no outputs:
//   Tx.out[0] -> Obj1.in[0]    Tx.out[1] -> Obj2.in[0]    Tx.out[2] -> Rx.in[0]
//   Obj1.out[0] -> Obj2.in[1]  Obj1.out[1] -> Rx.in[1]    (Obj1.out[2] idle)
//   Obj2.out[0] -> Obj1.in[1]  Obj2.out[1] -> Rx.in[2]    (Obj2.out[2] idle)
// so transmitter-object-receiver paths and object-object multi-bounce paths
// are all emulated. All nodes share one scenario timer: the emulated
// geometry is piecewise constant, and every K cycles a scenario update
// (SU) switches all nodes to the next set of delays, gains, filter
// coefficients and Doppler frequencies at the same clock edge. New values
// are written in the background through the serial port (SPI) while the
// current scenario runs.
// Interface: clk/rst_n (synchronous, active low); SPI pins (see spi);
// rx_out is the receiver output (latency 3 from its inputs), also captured
// into the receiver memory for read-out over SPI; su marks scenario
// updates; status collects the error/collision flags of the three SIMO-FIFOs.
// Global registers (node 15): REG_SCEN_LEN (K), REG_RUN (1 = run),
// REG_COMMIT (pulse; while stopped copies the written set into the first
// scenario), REG_STATUS (read only: {scen_cnt, 3'b0, cap_done, status}).
// Start-up: stop, write scenario 0, commit, write scenario 1, run; after
// that values written during scenario N take effect at the start of N+2.
// The four-node graph, the SIMO-FIFO size (16 x 1024 samples), the 256
// sample RTR/PB buffers and three outputs per node follow the paper; the
// register map, SPI frame and start-up protocol are this design's own.
module rfe_top
  import rfe_pkg::*;
#(
  parameter int unsigned P     = 16,
  parameter int unsigned S     = 1024,
  parameter int unsigned RTR_D = 256,
  parameter int unsigned RX_D  = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        spi_sclk,
  input  logic        spi_cs_n,
  input  logic        spi_mosi,
  output logic        spi_miso,
  output cplx_t       rx_out,
  output logic        su,
  output logic [11:0] status        // {obj2, obj1, tx}, each {collision, pf_err, coll_err, range_err}
);
  cfg_bus_t    cfg;
  logic        rd_stb;
  logic [31:0] rdata;

  spi u_spi (.clk, .rst_n, .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi),
             .miso(spi_miso), .cfg, .rd_stb, .rdata);

  // ---------------------------------------------------------------- global registers
  logic [31:0] k_len;
  logic        run, commit;
  wire         gsel = cfg.we && cfg.addr[15:12] == NODE_GLOBAL;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      k_len  <= 32'd4096;
      run    <= 1'b0;
      commit <= 1'b0;
    end else begin
      commit <= gsel && cfg.addr[11:0] == REG_COMMIT && !run;
      if (gsel && cfg.addr[11:0] == REG_SCEN_LEN) k_len <= (cfg.data < 32'd2) ? 32'd2 : cfg.data;
      if (gsel && cfg.addr[11:0] == REG_RUN)      run   <= cfg.data[0];
    end
  end

  logic [31:0] to_su;
  logic [15:0] scen_cnt;
  scen_timer u_timer (.clk, .rst_n, .run, .k_len, .su, .to_su, .scen_cnt);

  // ---------------------------------------------------------------- nodes
  cplx_t tx_out [3], o1_out [3], o2_out [3];
  cplx_t o1_in [2], o2_in [2], rx_in [3];
  cplx_t tx_src, o1_v, o2_v;
  logic [3:0] st_tx, st_o1, st_o2;
  logic       cap_done;
  logic [31:0] rx_rdata;

  assign o1_in = '{tx_out[0], o2_out[0]};
  assign o2_in = '{tx_out[1], o1_out[0]};
  assign rx_in = '{tx_out[2], o1_out[1], o2_out[1]};

  tx_node #(.NODE_ID(NODE_TX), .M_OUT(3), .P(P), .S(S), .RTR_D(RTR_D)) u_tx (
    .clk, .rst_n, .run, .su, .to_su, .commit, .cfg, .out(tx_out), .src(tx_src), .status(st_tx));
  passive_node #(.NODE_ID(NODE_OBJ1), .M_IN(2), .M_OUT(3), .P(P), .S(S), .RTR_D(RTR_D)) u_obj1 (
    .clk, .rst_n, .run, .su, .to_su, .commit, .cfg, .in(o1_in), .out(o1_out), .v(o1_v), .status(st_o1));
  passive_node #(.NODE_ID(NODE_OBJ2), .M_IN(2), .M_OUT(3), .P(P), .S(S), .RTR_D(RTR_D)) u_obj2 (
    .clk, .rst_n, .run, .su, .to_su, .commit, .cfg, .in(o2_in), .out(o2_out), .v(o2_v), .status(st_o2));
  receiver #(.NODE_ID(NODE_RX), .M_IN(3), .RX_D(RX_D)) u_rx (
    .clk, .rst_n, .run, .su, .commit, .cfg, .rd_stb, .rdata(rx_rdata),
    .in(rx_in), .rx_out, .cap_done);

  assign status = {st_o2, st_o1, st_tx};

  // ---------------------------------------------------------------- read-back
  // rdata is valid two cycles after rd_stb (memory read + this register).
  logic rd_is_mem, rd_is_stat;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_is_mem  <= 1'b0;
      rd_is_stat <= 1'b0;
      rdata      <= '0;
    end else begin
      if (rd_stb) begin
        rd_is_mem  <= cfg.addr[15:12] == NODE_RX && cfg.addr[11:10] == REG_RX_MEM[11:10];
        rd_is_stat <= cfg.addr[15:12] == NODE_GLOBAL && cfg.addr[11:0] == REG_STATUS;
      end
      rdata <= rd_is_mem  ? rx_rdata :
               rd_is_stat ? {scen_cnt, 3'b0, cap_done, status} : 32'd0;
    end
  end

  wire unused_ok = &{1'b0, tx_src, o1_v, o2_v, o1_out[2], o2_out[2]};
endmodule
