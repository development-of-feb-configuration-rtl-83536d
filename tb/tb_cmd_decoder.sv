// Self-checking testbench of cmd_decoder against a behavioural host-bus
// target: every read returns a byte computed from (space, channel, address),
// every write and pop is logged. Each opcode is sent with random gaps and
// random back-pressure on the reply stream; the bus accesses and the reply
// frames are compared with what the command format defines. The send-buffer
// stall (tx_full) is exercised too.
module tb_cmd_decoder;
  import feb_cfg_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [7:0] in_data = 0, out_data;
  logic hb_we, hb_re, hb_last, tx_full = 0, rx_avail = 0;
  space_e hb_space;
  logic [3:0] hb_chan;
  logic [7:0] hb_addr, hb_wdata, hb_rdata;
  int checks = 0, failures = 0, nstall = 0;

  cmd_decoder dut (.*);

  always #12.5 clk = ~clk;

  function automatic logic [7:0] model(space_e sp, logic [3:0] ch, logic [7:0] a);
    if (sp == SP_RXINFO) return a[0] ? 8'd3 : 8'd1;
    return 8'(sp * 37 + ch * 11 + a * 3);
  endfunction
  assign hb_rdata = model(hb_space, hb_chan, hb_addr);

  typedef struct { bit we; space_e sp; logic [3:0] ch; logic [7:0] a, d; bit last; } acc_t;
  acc_t log_q[$];
  byte unsigned reply[$];
  always @(posedge clk) if (rst_n) begin
    if (hb_we || hb_re) log_q.push_back('{hb_we, hb_space, hb_chan, hb_addr, hb_wdata, hb_last});
    if (out_valid && out_ready) reply.push_back(out_data);
    if (in_valid && !in_ready) nstall++;
    out_ready <= ($urandom_range(0, 3) != 0);
  end

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic put(byte unsigned b);
    bit r;
    @(negedge clk); in_valid = 1; in_data = b;
    forever begin r = in_ready; @(posedge clk); if (r) break; @(negedge clk); end
    @(negedge clk); in_valid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask

  task automatic cmd(byte unsigned op, byte unsigned ch, byte unsigned pay[], int nreply);
    log_q.delete(); reply.delete();
    put(op); put(ch); put(pay.size());
    foreach (pay[i]) put(pay[i]);
    for (int t = 0; t < 400 && reply.size() < nreply; t++) @(negedge clk);
    repeat (20) @(negedge clk);
    chk(reply.size() == nreply, $sformatf("op %h reply size %0d exp %0d", op, reply.size(), nreply));
    if (reply.size() >= 1) chk(reply[0] == (op | 8'h80) || (reply[0] == 8'hFF), "reply opcode");
  endtask

  initial begin
    #2ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned p[];
    repeat (3) @(negedge clk); rst_n = 1;
    // SCA_SEND with a stall in the middle
    p = '{8'h00, 8'h10, 8'h5A, 8'h02, 8'h04};
    fork
      cmd(OP_SCA_SEND, 8'h00, p, 3);
      begin repeat (12) @(posedge clk); #2 tx_full = 1; repeat (15) @(posedge clk); #2 tx_full = 0; end
    join
    chk(log_q.size() == 5, "send writes");
    foreach (log_q[i]) chk(log_q[i].we && log_q[i].sp == SP_SCA_TX && log_q[i].d == p[i] &&
                           log_q[i].last == (i == 4), "send byte");
    chk(reply[1] == 0 && reply[2] == 0, "send reply");
    chk(nstall > 0, "stall seen");
    // I2C_READ channel 9 register 6
    p = '{8'h06};
    cmd(OP_I2C_READ, 8'h09, p, 19);
    chk(reply[1] == 9 && reply[2] == 16, "i2c reply header");
    for (int i = 0; i < 16; i++) chk(reply[3+i] == model(SP_I2C, 9, 8'(8'h60 + i)), "i2c byte");
    // SPI_READ chip 5 word 17
    p = '{8'd17};
    cmd(OP_SPI_READ, 8'h05, p, 15);
    for (int i = 0; i < 12; i++) chk(reply[3+i] == model(SP_SPI, 5, 8'(17*12 + i)), "spi byte");
    // SCA_RECV with nothing waiting
    p = new[0];
    cmd(OP_SCA_RECV, 0, p, 3);
    chk(reply[1] == 8'hFF && reply[2] == 0, "recv none");
    // SCA_RECV with a 3-byte frame
    rx_avail = 1;
    cmd(OP_SCA_RECV, 0, p, 6);
    rx_avail = 0;
    chk(reply[1] == 1 && reply[2] == 3, "recv header");
    for (int i = 0; i < 3; i++) chk(reply[3+i] == model(SP_SCA_RX, 0, 8'(i)), "recv byte");
    begin
      int npop = 0;
      foreach (log_q[i]) if (!log_q[i].we && log_q[i].sp == SP_SCA_RX) npop++;
      chk(npop == 3, "recv pops");
    end
    // GPIO_WRITE 8 bytes
    p = '{1, 2, 3, 4, 5, 6, 7, 8};
    cmd(OP_GPIO_WRITE, 0, p, 3);
    chk(log_q.size() == 8, "gpio writes");
    foreach (log_q[i]) chk(log_q[i].we && log_q[i].sp == SP_GPIO && log_q[i].a == 4 + i && log_q[i].d == i + 1, "gpio write");
    // GPIO_READ
    p = new[0];
    cmd(OP_GPIO_READ, 0, p, 19);
    for (int i = 0; i < 16; i++) chk(reply[3+i] == model(SP_GPIO, 0, 8'(i)), "gpio read");
    // CFG_WRITE / CFG_READ
    p = '{8'h01};
    cmd(OP_CFG_WRITE, 8'h00, p, 3);
    chk(log_q.size() == 1 && log_q[0].we && log_q[0].sp == SP_CFG && log_q[0].d == 1, "cfg write");
    p = new[0];
    cmd(OP_CFG_READ, 8'h02, p, 4);
    chk(reply[3] == model(SP_CFG, 2, 0), "cfg read");
    // unknown opcode with payload
    p = '{9, 9};
    cmd(8'h33, 0, p, 3);
    chk(reply[0] == 8'hFF && reply[1] == 8'h33, "unknown opcode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
