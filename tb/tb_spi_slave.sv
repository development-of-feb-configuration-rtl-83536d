// Self-checking testbench of spi_slave: the full VMM3 sequence of the
// paper's timing diagram for 8 chips - ENA low, then for each chip 18
// transfers of 96 bits under its CS, ENA high - with SCK at 5 MHz against a
// 40 MHz clk. Every latched word, its slot, chip select and bit count are
// compared with what was sent; a transfer with ENA high must be ignored.
module tb_spi_slave;
  import feb_cfg_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ena = 1, sck = 0, sdi = 0, mem_we, cfg_done;
  logic [7:0] cs_n = '1;
  logic [2:0] mem_ss;
  logic [4:0] mem_word;
  logic [95:0] mem_wdata;
  logic [6:0] word_bits;
  int checks = 0, failures = 0, nwrites = 0, ndone = 0;
  localparam time TH = 100ns;

  spi_slave dut (.*);

  always #12.5 clk = ~clk;

  logic [95:0] img [8][18];
  logic [95:0] got [8][18];
  always @(posedge clk) if (rst_n) begin
    if (mem_we) begin
      got[mem_ss][mem_word] <= mem_wdata;
      nwrites++;
      checks++;
      if (word_bits != 7'd96) begin failures++; $display("word_bits %0d", word_bits); end
    end
    if (cfg_done) ndone++;
  end

  task automatic xfer(input int ss, input logic [95:0] w);
    cs_n[ss] = 0; #(2*TH);
    for (int i = 95; i >= 0; i--) begin
      sck = 1; sdi = w[i]; #TH; sck = 0; #TH;
    end
    #(2*TH); cs_n[ss] = 1; #(4*TH);
  endtask

  initial begin
    #20ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (img[s, w]) img[s][w] = {$urandom, $urandom, $urandom};
    foreach (got[s, w]) got[s][w] = '0;
    #100ns; rst_n = 1; #1us;
    xfer(0, {3{32'hDEADBEEF}});   // ENA high: ignored
    #1us;
    checks++; if (nwrites != 0) begin failures++; $display("write with ENA high"); end
    ena = 0; #1us;
    for (int s = 0; s < 8; s++)
      for (int w = 0; w < 18; w++) xfer(s, img[s][w]);
    ena = 1; #1us;
    checks++; if (nwrites != 8 * 18) begin failures++; $display("writes %0d", nwrites); end
    checks++; if (ndone != 1) begin failures++; $display("cfg_done %0d", ndone); end
    foreach (img[s, w]) begin
      checks++;
      if (got[s][w] != img[s][w]) begin failures++; $display("chip %0d word %0d", s, w); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
