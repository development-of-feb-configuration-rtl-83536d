// Self-checking testbench of i2c_slave: a bit-banged I2C master (1 MHz SCL
// against a 40 MHz clk) writes two registers of a TDS2-style target, tries
// another device number (must not be ACKed), reads both registers back and
// checks the ACKs, the stored bytes and the read data.
module tb_i2c_slave;
  logic clk = 0, rst_n = 0;
  logic scl = 1, sda_m = 1, sda_oe, mem_we, wr_done;
  logic [7:0] mem_addr, mem_wdata, mem_rdata;
  wire  sda = sda_m & ~sda_oe;
  int checks = 0, failures = 0, nwr_done = 0;
  localparam time T = 500ns;   // SCL half period

  i2c_slave #(.DEV_ID(3'd5)) dut (.clk, .rst_n, .scl, .sda_in(sda), .sda_oe, .mem_we,
                                  .mem_addr, .mem_wdata, .mem_rdata, .wr_done);

  always #12.5 clk = ~clk;

  // register file standing in for Data control
  logic [7:0] mem [256];
  assign mem_rdata = mem[mem_addr];
  always @(posedge clk) if (rst_n) begin
    if (mem_we) mem[mem_addr] <= mem_wdata;
    if (wr_done) nwr_done++;
  end

  task automatic i2c_start();
    sda_m = 1; scl = 1; #T; sda_m = 0; #T; scl = 0; #(T/2);
  endtask
  task automatic i2c_stop();
    sda_m = 0; #(T/2); scl = 1; #T; sda_m = 1; #T;
  endtask
  task automatic i2c_wr(input logic [7:0] b, output logic ack);
    for (int i = 7; i >= 0; i--) begin
      sda_m = b[i]; #(T/2); scl = 1; #T; scl = 0; #(T/2);
    end
    sda_m = 1; #(T/2); scl = 1; #(T/2); ack = ~sda; #(T/2); scl = 0; #(T/2);
  endtask
  task automatic i2c_rd(input logic ack, output logic [7:0] b);
    sda_m = 1;
    for (int i = 7; i >= 0; i--) begin
      #(T/2); scl = 1; #(T/2); b[i] = sda; #(T/2); scl = 0;
    end
    #(T/4); sda_m = ~ack; #(T/4); scl = 1; #T; scl = 0; #(T/2); sda_m = 1;
  endtask

  initial begin
    #5ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic ack;
    logic [7:0] v;
    logic [7:0] r3 [16];
    logic [7:0] r7 [2];
    foreach (mem[i]) mem[i] = 8'h00;
    foreach (r3[i]) r3[i] = 8'($urandom);
    r7[0] = 8'hA5; r7[1] = 8'h3C;
    #100ns; rst_n = 1; #1us;
    // write register 3: address {101, 0011}, W
    i2c_start(); i2c_wr({3'd5, 4'd3, 1'b0}, ack);
    checks++; if (!ack) begin failures++; $display("no addr ack"); end
    foreach (r3[i]) begin
      i2c_wr(r3[i], ack);
      checks++; if (!ack) begin failures++; $display("no data ack %0d", i); end
    end
    i2c_stop();
    // write register 7, 2 bytes
    i2c_start(); i2c_wr({3'd5, 4'd7, 1'b0}, ack);
    foreach (r7[i]) i2c_wr(r7[i], ack);
    i2c_stop();
    // other device: no ACK, nothing written
    i2c_start(); i2c_wr({3'd2, 4'd3, 1'b0}, ack);
    checks++; if (ack) begin failures++; $display("foreign address acked"); end
    i2c_wr(8'hEE, ack);
    i2c_stop();
    #1us;
    checks++; if (nwr_done != 2) begin failures++; $display("wr_done %0d", nwr_done); end
    foreach (r3[i]) begin
      checks++;
      if (mem[{4'd3, 4'(i)}] != r3[i]) begin failures++; $display("mem r3[%0d]", i); end
    end
    // read register 3 back
    i2c_start(); i2c_wr({3'd5, 4'd3, 1'b1}, ack);
    checks++; if (!ack) begin failures++; $display("no read addr ack"); end
    for (int i = 0; i < 16; i++) begin
      i2c_rd(i != 15, v);
      checks++; if (v != r3[i]) begin failures++; $display("read r3[%0d] %h exp %h", i, v, r3[i]); end
    end
    i2c_stop();
    // read register 7: both bytes, NACK after the second
    i2c_start(); i2c_wr({3'd5, 4'd7, 1'b1}, ack);
    for (int i = 0; i < 2; i++) begin
      i2c_rd(i == 0, v);
      checks++; if (v != r7[i]) begin failures++; $display("read r7[%0d] %h", i, v); end
    end
    i2c_stop();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
