// Self-checking testbench of data_control with small buffers (8-byte
// receive buffer, 4-entry frame-info FIFO): send-buffer framing (nothing is
// offered before a frame's last byte), receive frames with good and bad FCS,
// overflow of the receive buffer, I2C and SPI regions, GPIO routing and the
// configuration/status registers.
module tb_data_control;
  import feb_cfg_pkg::*;
  logic clk = 0, rst_n = 0;
  logic hb_we = 0, hb_re = 0, hb_last = 0, tx_full, rx_avail;
  space_e hb_space = SP_CFG;
  logic [3:0] hb_chan = 0;
  logic [7:0] hb_addr = 0, hb_wdata = 0, hb_rdata;
  logic tx_valid, tx_last, tx_ready = 0;
  logic [7:0] tx_data;
  logic rx_valid = 0, rx_last = 0, rx_ok = 0;
  logic [7:0] rx_data = 0;
  logic [N_I2C-1:0] i2c_we = '0;
  logic [7:0] i2c_addr [N_I2C];
  logic [7:0] i2c_wdata [N_I2C];
  logic [7:0] i2c_rdata [N_I2C];
  logic spi_we = 0;
  logic [2:0] spi_ss = 0;
  logic [4:0] spi_word = 0;
  logic [95:0] spi_wdata = 0;
  logic gpio_we, gpio_re;
  logic [3:0] gpio_addr;
  logic [7:0] gpio_wdata, gpio_rdata;
  logic cfg_aux, active_aux = 0, tx_underrun = 0;
  int checks = 0, failures = 0;

  data_control #(.RX_AW(3), .RI_AW(2)) dut (.*);

  assign gpio_rdata = {4'hA, gpio_addr};
  always #12.5 clk = ~clk;

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  task automatic hwr(space_e sp, logic [3:0] ch, logic [7:0] a, logic [7:0] d, bit last = 0);
    @(negedge clk); hb_we = 1; hb_space = sp; hb_chan = ch; hb_addr = a; hb_wdata = d; hb_last = last;
    @(negedge clk); hb_we = 0; hb_last = 0;
  endtask
  task automatic hrd(space_e sp, logic [3:0] ch, logic [7:0] a, output logic [7:0] d, input bit pop = 0);
    @(negedge clk); hb_space = sp; hb_chan = ch; hb_addr = a; hb_re = pop; #1; d = hb_rdata;
    @(negedge clk); hb_re = 0;
  endtask
  task automatic rx_frame(byte unsigned f[], bit ok);
    foreach (f[i]) begin
      @(negedge clk); rx_valid = 1; rx_data = f[i]; rx_last = (i == f.size()-1); rx_ok = ok;
      @(negedge clk); rx_valid = 0; rx_last = 0;
      repeat (3) @(negedge clk);
    end
  endtask

  initial begin
    #1ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] d;
    byte unsigned f[];
    foreach (i2c_addr[c]) begin i2c_addr[c] = 0; i2c_wdata[c] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    // ---- send buffer ----
    hwr(SP_SCA_TX, 0, 0, 8'h11);
    hwr(SP_SCA_TX, 0, 0, 8'h22);
    repeat (3) @(negedge clk);
    chk(!tx_valid, "frame offered before its last byte");
    hwr(SP_SCA_TX, 0, 0, 8'h33, 1);
    #1;
    chk(tx_valid && tx_data == 8'h11 && !tx_last, "first byte");
    tx_ready = 1;
    @(negedge clk); chk(tx_valid && tx_data == 8'h22, "second byte");
    @(negedge clk); chk(tx_valid && tx_data == 8'h33 && tx_last, "last byte");
    @(negedge clk); chk(!tx_valid, "empty after frame");
    tx_ready = 0;
    // ---- receive buffer ----
    chk(!rx_avail, "rx empty");
    f = '{8'hA1, 8'hA2, 8'hA3}; rx_frame(f, 1);
    f = '{8'hB1};               rx_frame(f, 0);
    chk(rx_avail, "rx frame available");
    hrd(SP_RXINFO, 0, 0, d);    chk(d == 8'd1, "frame 1 ok");
    hrd(SP_RXINFO, 0, 1, d, 1); chk(d == 8'd3, "frame 1 length");
    for (int i = 0; i < 3; i++) begin
      hrd(SP_SCA_RX, 0, 0, d, 1); chk(d == 8'hA1 + i, "frame 1 data");
    end
    hrd(SP_RXINFO, 0, 0, d);    chk(d == 8'd0, "frame 2 bad FCS");
    hrd(SP_RXINFO, 0, 1, d, 1); chk(d == 8'd1, "frame 2 length");
    hrd(SP_SCA_RX, 0, 0, d, 1); chk(d == 8'hB1, "frame 2 data");
    chk(!rx_avail, "rx empty again");
    // overflow: 6 + 6 bytes into an 8-byte buffer
    f = '{1, 2, 3, 4, 5, 6}; rx_frame(f, 1);
    f = '{7, 8, 9, 10, 11, 12}; rx_frame(f, 1);
    hrd(SP_CFG, 1, 0, d);       chk(d[2], "overflow flag");
    hrd(SP_RXINFO, 0, 0, d);    chk(d == 8'd1, "frame 3 ok");
    hrd(SP_RXINFO, 0, 1, d, 1); chk(d == 8'd6, "frame 3 length");
    for (int i = 0; i < 6; i++) hrd(SP_SCA_RX, 0, 0, d, 1);
    hrd(SP_RXINFO, 0, 0, d);    chk(d == 8'd0, "truncated frame marked bad");
    hrd(SP_RXINFO, 0, 1, d, 1); chk(d == 8'd2, "truncated length");
    hrd(SP_SCA_RX, 0, 0, d, 1); chk(d == 8'd7, "truncated data");
    hrd(SP_SCA_RX, 0, 0, d, 1);
    hrd(SP_CFG, 2, 0, d);       chk(d == 8'd4, "frames received");
    hrd(SP_CFG, 3, 0, d);       chk(d == 8'd1, "bad frames");
    hwr(SP_CFG, 1, 0, 0);
    hrd(SP_CFG, 1, 0, d);       chk(d[2] == 0, "flags cleared");
    // ---- I2C regions ----
    for (int c = 0; c < N_I2C; c++) begin
      @(negedge clk); i2c_we[c] = 1; i2c_addr[c] = 8'h35; i2c_wdata[c] = 8'(c * 7 + 1);
      @(negedge clk); i2c_we[c] = 0;
      #1; chk(i2c_rdata[c] == 8'(c * 7 + 1), "i2c target read port");
    end
    for (int c = 0; c < N_I2C; c++) begin
      hrd(SP_I2C, 4'(c), 8'h35, d); chk(d == 8'(c * 7 + 1), "i2c host read");
    end
    // ---- SPI region ----
    @(negedge clk); spi_we = 1; spi_ss = 3; spi_word = 17;
    spi_wdata = 96'h0102030405060708090A0B0C;
    @(negedge clk); spi_we = 0;
    for (int b = 0; b < 12; b++) begin
      hrd(SP_SPI, 3, 8'(17 * 12 + b), d); chk(d == 8'(b + 1), "spi host read");
    end
    // ---- GPIO routing and config ----
    hrd(SP_GPIO, 0, 8'd6, d); chk(d == 8'hA6, "gpio read routed");
    @(negedge clk); hb_we = 1; hb_space = SP_GPIO; hb_addr = 8'd5; hb_wdata = 8'h5A;
    #1; chk(gpio_we && gpio_addr == 4'd5 && gpio_wdata == 8'h5A, "gpio write routed");
    @(negedge clk); hb_we = 0;
    hwr(SP_CFG, 0, 0, 8'h01);
    chk(cfg_aux, "aux select");
    hrd(SP_CFG, 0, 0, d); chk(d == 8'h01, "cfg read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
