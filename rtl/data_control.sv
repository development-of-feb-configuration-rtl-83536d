// Data control: the firmware's store of everything that passes between the
// host and the GBT-SCA, sorted by kind as the paper describes ("GBT-SCA
// transceiver data, I2C, SPI, GPIO and GBT-SCA configuration data").
//
// It holds
//  - the SCA send packet buffer: a byte FIFO with an end-of-frame bit. A
//    frame is offered to the HDLC transmitter only once its last byte is in,
//    so the transmitter never runs dry inside a frame;
//  - the SCA receive packet buffer: a byte FIFO plus a small FIFO of
//    {FCS ok, length} per frame. A frame that does not fit is dropped whole
//    and sets the overflow flag;
//  - I2C0..I2C15 data: 16 x 256 bytes, one region per SCA I2C channel, laid
//    out as 16 registers x 16 bytes for the loopback I2C targets;
//  - SPI data: 8 chip selects x 18 words x 96 bits from the loopback SPI
//    target (a full 1728-bit VMM3 image per chip select);
//  - GPIO data, routed to the parallel I/O block;
//  - the test-system configuration: reg 0 control (bit 0 selects the AUX
//    E-port), reg 1 status {overflow, underrun, active AUX} (a write clears
//    the flags), reg 2 frames received, reg 3 frames received with bad FCS.
//
// The host side is a byte bus (space, channel, address) with combinational
// read data; hb_re on a FIFO space pops it. Buffer depths, the layout of each
// region and the register map are this design's choices; the paper gives only
// the list of regions (Fig. 3).
module data_control
  import feb_cfg_pkg::*;
#(
  parameter int unsigned TX_AW = 8,   // send buffer: 2**TX_AW bytes
  parameter int unsigned RX_AW = 8,   // receive buffer: 2**RX_AW bytes
  parameter int unsigned RI_AW = 4    // receive frame-info FIFO depth 2**RI_AW
) (
  input  logic        clk,
  input  logic        rst_n,
  // host bus
  input  logic        hb_we,
  input  logic        hb_re,
  input  space_e      hb_space,
  input  logic [3:0]  hb_chan,
  input  logic [7:0]  hb_addr,
  input  logic [7:0]  hb_wdata,
  input  logic        hb_last,
  output logic [7:0]  hb_rdata,
  output logic        tx_full,
  output logic        rx_avail,
  // SCA send packets to the HDLC transmitter
  output logic        tx_valid,
  output logic [7:0]  tx_data,
  output logic        tx_last,
  input  logic        tx_ready,
  // SCA received packets from the HDLC receiver
  input  logic        rx_valid,
  input  logic [7:0]  rx_data,
  input  logic        rx_last,
  input  logic        rx_ok,
  // I2C loopback targets
  input  logic [N_I2C-1:0] i2c_we,
  input  logic [7:0]  i2c_addr  [N_I2C],
  input  logic [7:0]  i2c_wdata [N_I2C],
  output logic [7:0]  i2c_rdata [N_I2C],
  // SPI loopback target
  input  logic        spi_we,
  input  logic [$clog2(N_SPI_SS)-1:0]   spi_ss,
  input  logic [$clog2(SPI_NWORDS)-1:0] spi_word,
  input  logic [SPI_WORD-1:0]           spi_wdata,
  // parallel I/O block
  output logic        gpio_we,
  output logic        gpio_re,
  output logic [3:0]  gpio_addr,
  output logic [7:0]  gpio_wdata,
  input  logic [7:0]  gpio_rdata,
  // configuration and status
  output logic        cfg_aux,
  input  logic        active_aux,
  input  logic        tx_underrun
);

  localparam int unsigned SPI_BYTES = SPI_WORD / 8;

  // ---------------- SCA send packet buffer ----------------
  logic [8:0]      txf_rd;
  logic            txf_empty;
  logic [TX_AW:0]  txf_count;
  logic [TX_AW:0]  tx_frames;
  wire             tx_push = hb_we && hb_space == SP_SCA_TX;
  wire             tx_pop  = tx_valid && tx_ready;

  sync_fifo #(.WIDTH(9), .AW(TX_AW)) u_txf (
    .clk, .rst_n,
    .wr_en(tx_push), .wr_data({hb_last, hb_wdata}),
    .rd_en(tx_pop), .rd_data(txf_rd),
    .empty(txf_empty), .full(tx_full), .count(txf_count)
  );

  assign tx_valid = !txf_empty && tx_frames != '0;
  assign tx_data  = txf_rd[7:0];
  assign tx_last  = txf_rd[8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tx_frames <= '0;
    else tx_frames <= tx_frames + (TX_AW+1)'(tx_push && hb_last && !tx_full)
                                - (TX_AW+1)'(tx_pop && tx_last);
  end

  // ---------------- SCA receive packet buffer ----------------
  logic [7:0]     rxf_rd;
  logic           rxf_empty, rxf_full;
  logic [RX_AW:0] rxf_count;
  logic [8:0]     rif_rd;
  logic           rif_empty, rif_full;
  logic [RI_AW:0] rif_count;
  logic           rx_infr, rx_drop, rx_ovf, tx_unf;
  logic [7:0]     rx_len, rx_nframes, rx_nbad;

  wire rx_first = rx_valid && !rx_infr;
  // a new frame is dropped whole if the info FIFO is full or no byte fits
  wire rx_drop_now = rx_first ? (rif_full || rxf_full) : rx_drop;
  wire rx_store    = rx_valid && !rx_drop_now && !rxf_full && rx_len != 8'hFF;
  wire rx_info_wr  = rx_valid && rx_last && !rx_drop_now;
  wire rx_pop      = hb_re && hb_space == SP_SCA_RX;
  wire ri_pop      = hb_re && hb_space == SP_RXINFO && hb_addr[0];
  wire [7:0] rx_len_n = (rx_first ? 8'd0 : rx_len) + 8'(rx_store);
  // bytes lost inside an accepted frame mark it bad
  wire rx_lost     = rx_valid && !rx_drop_now && !rx_store;
  logic rx_bad;

  sync_fifo #(.WIDTH(8), .AW(RX_AW)) u_rxf (
    .clk, .rst_n,
    .wr_en(rx_store), .wr_data(rx_data),
    .rd_en(rx_pop), .rd_data(rxf_rd),
    .empty(rxf_empty), .full(rxf_full), .count(rxf_count)
  );

  sync_fifo #(.WIDTH(9), .AW(RI_AW)) u_rif (
    .clk, .rst_n,
    .wr_en(rx_info_wr), .wr_data({rx_ok && !rx_bad && !rx_lost, rx_len_n}),
    .rd_en(ri_pop), .rd_data(rif_rd),
    .empty(rif_empty), .full(rif_full), .count(rif_count)
  );

  assign rx_avail = !rif_empty;

  logic [7:0] cfg0;
  wire cfg_we = hb_we && hb_space == SP_CFG;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_infr    <= 1'b0;
      rx_drop    <= 1'b0;
      rx_bad     <= 1'b0;
      rx_len     <= '0;
      rx_ovf     <= 1'b0;
      tx_unf     <= 1'b0;
      rx_nframes <= '0;
      rx_nbad    <= '0;
      cfg0       <= '0;
    end else begin
      if (rx_valid) begin
        rx_infr <= !rx_last;
        rx_drop <= rx_drop_now && !rx_last;
        rx_len  <= rx_len_n;
        rx_bad  <= !rx_last && ((rx_first ? 1'b0 : rx_bad) || rx_lost);
        if ((rx_first && rx_drop_now) || rx_lost) rx_ovf <= 1'b1;
        if (rx_last) begin
          rx_nframes <= rx_nframes + 8'd1;
          if (!rx_ok) rx_nbad <= rx_nbad + 8'd1;
        end
      end
      if (tx_underrun) tx_unf <= 1'b1;
      if (cfg_we && hb_chan == 4'd0) cfg0 <= hb_wdata;
      if (cfg_we && hb_chan == 4'd1) begin
        rx_ovf <= 1'b0;
        tx_unf <= 1'b0;
      end
    end
  end

  assign cfg_aux = cfg0[CFG_EPORT_AUX];

  // ---------------- I2C0..I2C15 data ----------------
  logic [7:0] i2c_host [N_I2C];
  for (genvar c = 0; c < N_I2C; c++) begin : g_i2c
    logic [7:0] mem [TDS_NREG * TDS_REG_BYTES];
    always_ff @(posedge clk) if (i2c_we[c]) mem[i2c_addr[c]] <= i2c_wdata[c];
    assign i2c_rdata[c] = mem[i2c_addr[c]];
    assign i2c_host[c]  = mem[hb_addr];
  end

  // ---------------- SPI data ----------------
  logic [SPI_WORD-1:0] spi_mem [N_SPI_SS * SPI_NWORDS];
  always_ff @(posedge clk)
    if (spi_we) spi_mem[int'(spi_ss) * SPI_NWORDS + int'(spi_word)] <= spi_wdata;

  logic [7:0] spi_host;
  always_comb begin
    int unsigned w, b;
    logic [SPI_WORD-1:0] word;
    w = int'(hb_addr) / SPI_BYTES;
    b = int'(hb_addr) % SPI_BYTES;
    if (w >= SPI_NWORDS) w = SPI_NWORDS - 1;
    word = spi_mem[hb_chan[2:0] * SPI_NWORDS + w];
    spi_host = word[SPI_WORD - 8 - 8*b +: 8];
  end

  // ---------------- GPIO routing ----------------
  assign gpio_we    = hb_we && hb_space == SP_GPIO;
  assign gpio_re    = hb_re && hb_space == SP_GPIO;
  assign gpio_addr  = hb_addr[3:0];
  assign gpio_wdata = hb_wdata;

  // ---------------- host read mux ----------------
  always_comb begin
    unique case (hb_space)
      SP_SCA_RX: hb_rdata = rxf_rd;
      SP_RXINFO: hb_rdata = hb_addr[0] ? rif_rd[7:0] : {7'd0, rif_rd[8]};
      SP_I2C:    hb_rdata = i2c_host[hb_chan];
      SP_SPI:    hb_rdata = spi_host;
      SP_GPIO:   hb_rdata = gpio_rdata;
      SP_CFG: begin
        unique case (hb_chan)
          4'd0:    hb_rdata = cfg0;
          4'd1:    hb_rdata = {5'd0, rx_ovf, tx_unf, active_aux};
          4'd2:    hb_rdata = rx_nframes;
          4'd3:    hb_rdata = rx_nbad;
          default: hb_rdata = 8'd0;
        endcase
      end
      default:   hb_rdata = 8'd0;
    endcase
  end

endmodule
