// FPGA firmware of the FEB configuration test board.
//
// The host talks to the board through a byte stream (the Ethernet side,
// 125 MHz network clock); the command decoder, on the 40 MHz system clock,
// reads and writes Data control. SCA frames queued there are wrapped in HDLC
// by the packet generator (hdlc_tx) and sent over the E-port chosen by
// Communication control (master or AUX), 80 Mb/s on a 40 MHz DDR line. Frames
// coming back from the GBT-SCA are unwrapped (hdlc_rx) into the receive
// buffer. The SCA's I2C, SPI and GPIO outputs can be wired back into the FPGA:
// 16 I2C targets (one per SCA I2C master, TDS2-style addressing), one SPI
// target with 8 chip selects (VMM3-style configuration words) and the
// parallel I/O block, whose captured data the host reads back to verify what
// the SCA did.
//
// Not inside: the Ethernet MAC/PHY (the host stream is a port), the PLL that
// makes clk_net and clk_sys from the 200 MHz board clock, and the I/O pads:
// the I2C pins are split into scl/sda_in/sda_oe and GPIO into in/out/oe.
// Both clocks share one asynchronous reset; the byte streams cross between
// them through two small dual-clock FIFOs. Block structure follows the
// firmware diagram of the paper; everything at bit level is this design's.
module feb_cfg_top
  import feb_cfg_pkg::*;
#(
  parameter logic [2:0] I2C_DEV_ID = 3'd0   // device number the I2C targets answer to
) (
  input  logic                clk_net,     // 125 MHz network clock
  input  logic                clk_sys,     // 40 MHz system / E-link clock
  input  logic                rst_n,
  // host command stream (clk_net)
  input  logic                h_rx_valid,
  input  logic [7:0]          h_rx_data,
  output logic                h_rx_ready,
  output logic                h_tx_valid,
  output logic [7:0]          h_tx_data,
  input  logic                h_tx_ready,
  // E-links to the GBT-SCA (clk_sys DDR)
  output logic                elink_master_dout,
  input  logic                elink_master_din,
  output logic                elink_aux_dout,
  input  logic                elink_aux_din,
  // loopback of the SCA I2C masters
  input  logic [N_I2C-1:0]    i2c_scl,
  input  logic [N_I2C-1:0]    i2c_sda_in,
  output logic [N_I2C-1:0]    i2c_sda_oe,
  // loopback of the SCA SPI master
  input  logic                spi_ena,
  input  logic                spi_sck,
  input  logic                spi_sdi,
  input  logic [N_SPI_SS-1:0] spi_cs_n,
  // loopback of the SCA GPIO
  input  logic [N_GPIO-1:0]   gpio_in,
  output logic [N_GPIO-1:0]   gpio_out,
  output logic [N_GPIO-1:0]   gpio_oe,
  // status
  output logic                active_aux,
  output logic                sca_frame_sent,
  output logic                sca_frame_rcvd,
  output logic                vmm_cfg_done,
  output logic                sca_rx_abort,
  output logic                port_switched
);

  // ---------------- clock crossing of the host streams ----------------
  logic       rxq_empty, rxq_full, txq_empty, txq_full;
  logic [7:0] cmd_in_data, cmd_out_data, txq_data;
  logic       cmd_in_ready, cmd_out_valid;

  async_fifo #(.WIDTH(8), .AW(4)) u_host_rx (
    .wclk(clk_net), .wrst_n(rst_n), .wr_en(h_rx_valid), .wr_data(h_rx_data), .full(rxq_full),
    .rclk(clk_sys), .rrst_n(rst_n), .rd_en(cmd_in_ready), .rd_data(cmd_in_data), .empty(rxq_empty)
  );
  assign h_rx_ready = !rxq_full;

  async_fifo #(.WIDTH(8), .AW(4)) u_host_tx (
    .wclk(clk_sys), .wrst_n(rst_n), .wr_en(cmd_out_valid), .wr_data(cmd_out_data), .full(txq_full),
    .rclk(clk_net), .rrst_n(rst_n), .rd_en(h_tx_ready), .rd_data(txq_data), .empty(txq_empty)
  );
  assign h_tx_valid = !txq_empty;
  assign h_tx_data  = txq_data;

  // ---------------- command decoder ----------------
  logic       hb_we, hb_re, hb_last, tx_full, rx_avail;
  space_e     hb_space;
  logic [3:0] hb_chan;
  logic [7:0] hb_addr, hb_wdata, hb_rdata;

  cmd_decoder u_cmd (
    .clk(clk_sys), .rst_n,
    .in_valid(!rxq_empty), .in_data(cmd_in_data), .in_ready(cmd_in_ready),
    .out_valid(cmd_out_valid), .out_data(cmd_out_data), .out_ready(!txq_full),
    .hb_we, .hb_re, .hb_space, .hb_chan, .hb_addr, .hb_wdata, .hb_last, .hb_rdata,
    .tx_full, .rx_avail
  );

  // ---------------- data control ----------------
  logic        tx_valid, tx_last, tx_ready;
  logic [7:0]  tx_data;
  logic        rx_valid, rx_last, rx_ok;
  logic [7:0]  rx_data;
  logic [N_I2C-1:0] i2c_we;
  logic [7:0]  i2c_addr [N_I2C];
  logic [7:0]  i2c_wdata [N_I2C];
  logic [7:0]  i2c_rdata [N_I2C];
  logic        spi_we;
  logic [$clog2(N_SPI_SS)-1:0]   spi_ss;
  logic [$clog2(SPI_NWORDS)-1:0] spi_word;
  logic [SPI_WORD-1:0]           spi_wdata;
  logic        gpio_we, gpio_re;
  logic [3:0]  gpio_addr;
  logic [7:0]  gpio_wdata, gpio_rdata;
  logic        cfg_aux, tx_underrun;

  data_control u_data (
    .clk(clk_sys), .rst_n,
    .hb_we, .hb_re, .hb_space, .hb_chan, .hb_addr, .hb_wdata, .hb_last, .hb_rdata,
    .tx_full, .rx_avail,
    .tx_valid, .tx_data, .tx_last, .tx_ready,
    .rx_valid, .rx_data, .rx_last, .rx_ok,
    .i2c_we, .i2c_addr, .i2c_wdata, .i2c_rdata,
    .spi_we, .spi_ss, .spi_word, .spi_wdata,
    .gpio_we, .gpio_re, .gpio_addr, .gpio_wdata, .gpio_rdata,
    .cfg_aux, .active_aux, .tx_underrun
  );

  // ---------------- SCA packet generator (HDLC) ----------------
  logic [1:0] hdlc_tx_bits, hdlc_rx_bits;
  logic       tx_in_frame;

  hdlc_tx u_hdlc_tx (
    .clk(clk_sys), .rst_n,
    .s_valid(tx_valid), .s_data(tx_data), .s_last(tx_last), .s_ready(tx_ready),
    .tx_bits(hdlc_tx_bits), .frame_done(sca_frame_sent), .underrun(tx_underrun),
    .in_frame(tx_in_frame)
  );

  hdlc_rx u_hdlc_rx (
    .clk(clk_sys), .rst_n,
    .rx_bits(hdlc_rx_bits),
    .m_valid(rx_valid), .m_data(rx_data), .m_last(rx_last), .m_ok(rx_ok),
    .aborted(sca_rx_abort)
  );
  assign sca_frame_rcvd = rx_valid && rx_last;

  // ---------------- communication control and E-ports ----------------
  logic [1:0] tx_m, tx_a, rx_m, rx_a;

  comm_ctrl u_comm (
    .clk(clk_sys), .rst_n,
    .sel_aux(cfg_aux), .tx_in_frame,
    .tx_bits(hdlc_tx_bits), .tx_master(tx_m), .tx_aux(tx_a),
    .rx_master(rx_m), .rx_aux(rx_a), .rx_bits(hdlc_rx_bits),
    .active_aux, .switched(port_switched)
  );

  eport u_eport_master (
    .clk(clk_sys), .rst_n, .tx_bits(tx_m), .elink_dout(elink_master_dout),
    .elink_din(elink_master_din), .rx_bits(rx_m)
  );

  eport u_eport_aux (
    .clk(clk_sys), .rst_n, .tx_bits(tx_a), .elink_dout(elink_aux_dout),
    .elink_din(elink_aux_din), .rx_bits(rx_a)
  );

  // ---------------- GBT-SCA interface: loopback targets ----------------
  for (genvar c = 0; c < N_I2C; c++) begin : g_i2c
    i2c_slave #(.DEV_ID(I2C_DEV_ID)) u_i2c (
      .clk(clk_sys), .rst_n,
      .scl(i2c_scl[c]), .sda_in(i2c_sda_in[c]), .sda_oe(i2c_sda_oe[c]),
      .mem_we(i2c_we[c]), .mem_addr(i2c_addr[c]), .mem_wdata(i2c_wdata[c]),
      .mem_rdata(i2c_rdata[c]), .wr_done()
    );
  end

  spi_slave u_spi (
    .clk(clk_sys), .rst_n,
    .ena(spi_ena), .sck(spi_sck), .sdi(spi_sdi), .cs_n(spi_cs_n),
    .mem_we(spi_we), .mem_ss(spi_ss), .mem_word(spi_word), .mem_wdata(spi_wdata),
    .word_bits(), .cfg_done(vmm_cfg_done)
  );

  gpio_ctrl u_gpio (
    .clk(clk_sys), .rst_n,
    .gpio_in, .gpio_out, .gpio_oe,
    .we(gpio_we), .re(gpio_re), .addr(gpio_addr), .wdata(gpio_wdata), .rdata(gpio_rdata)
  );

endmodule
