// End-to-end testbench of feb_cfg_top at its default parameters. The
// testbench plays both the host computer (command bytes on the 125 MHz
// stream, random back-pressure on replies) and the GBT-SCA (it decodes the
// HDLC frames on the E-link outputs, sends HDLC replies into the E-link
// inputs, and acts as the SCA's SPI, I2C and GPIO masters). It walks the two
// configuration flows of the board:
//  - VMM3 (SPI): connect and reset frames, GPIO writes, ENA low, 18 words of
//    96 bits to each of 8 chip selects, ENA high; then every word is read
//    back through the host and compared;
//  - TDS2 (I2C): 16 registers of 2..16 bytes written on one SCA I2C channel,
//    read back over I2C and through the host.
// Along the way it makes each mechanism happen and counts it: SCA frames sent
// and received, a bad-FCS frame, an aborted frame, a switch to the AUX
// E-port, a send-buffer stall, a receive-buffer overflow, GPIO in and out,
// and back-pressure on the host reply stream. A mechanism that never happens
// is a failure.
module tb_feb_cfg_top;
  import feb_cfg_pkg::*;
  import hdlc_model_pkg::*;

  logic clk_net = 0, clk_sys = 0, rst_n = 0;
  logic h_rx_valid = 0, h_rx_ready, h_tx_valid, h_tx_ready = 0;
  logic [7:0] h_rx_data = 0, h_tx_data;
  logic elink_master_dout, elink_aux_dout;
  logic elink_master_din = 1, elink_aux_din = 1;
  logic [N_I2C-1:0] i2c_scl = '1, i2c_sda_m = '1, i2c_sda_oe;
  wire  [N_I2C-1:0] i2c_sda = i2c_sda_m & ~i2c_sda_oe;
  logic spi_ena = 1, spi_sck = 0, spi_sdi = 0;
  logic [N_SPI_SS-1:0] spi_cs_n = '1;
  logic [N_GPIO-1:0] gpio_in = '0, gpio_out, gpio_oe;
  logic active_aux, sca_frame_sent, sca_frame_rcvd, vmm_cfg_done, sca_rx_abort, port_switched;

  feb_cfg_top dut (
    .clk_net, .clk_sys, .rst_n,
    .h_rx_valid, .h_rx_data, .h_rx_ready, .h_tx_valid, .h_tx_data, .h_tx_ready,
    .elink_master_dout, .elink_master_din, .elink_aux_dout, .elink_aux_din,
    .i2c_scl, .i2c_sda_in(i2c_sda), .i2c_sda_oe,
    .spi_ena, .spi_sck, .spi_sdi, .spi_cs_n,
    .gpio_in, .gpio_out, .gpio_oe,
    .active_aux, .sca_frame_sent, .sca_frame_rcvd, .vmm_cfg_done, .sca_rx_abort, .port_switched
  );

  always #4    clk_net = ~clk_net;   // 125 MHz
  always #12.5 clk_sys = ~clk_sys;   // 40 MHz

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_sent = 0, n_rcvd = 0, n_abort = 0, n_switch = 0, n_vmm_done = 0;
  int n_tx_stall = 0, n_reply_bp = 0, n_host_stall = 0;
  always @(posedge clk_sys) if (rst_n) begin
    if (sca_frame_sent) n_sent++;
    if (sca_frame_rcvd) n_rcvd++;
    if (sca_rx_abort)   n_abort++;
    if (port_switched)  n_switch++;
    if (dut.tx_underrun) begin failures++; $display("%0t send underrun", $time); end
    if (vmm_cfg_done)   n_vmm_done++;
    if (dut.u_cmd.in_valid && dut.tx_full) n_tx_stall++;
  end

  // ---------------- host side ----------------
  byte unsigned host_rx[$];
  bit bp_on = 1;
  always @(posedge clk_net) if (rst_n) begin
    if (h_tx_valid && h_tx_ready) host_rx.push_back(h_tx_data);
    if (h_tx_valid && !h_tx_ready) n_reply_bp++;
    if (h_rx_valid && !h_rx_ready) n_host_stall++;
    h_tx_ready <= bp_on ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  task automatic host_put(byte unsigned b);
    bit r;
    @(negedge clk_net); h_rx_valid = 1; h_rx_data = b;
    forever begin r = h_rx_ready; @(posedge clk_net); if (r) break; @(negedge clk_net); end
    @(negedge clk_net); h_rx_valid = 0;
  endtask

  // send a command and wait for its reply; returns the reply payload
  task automatic host_cmd(input byte unsigned op, input byte unsigned ch,
                          input byte unsigned pay[], output byte unsigned rep[$],
                          output byte unsigned rch);
    int t;
    put_cmd(op, ch, pay);
    t = 0;
    while (host_rx.size() < 3 && t < 200000) begin @(negedge clk_net); t++; end
    while (host_rx.size() < 3 + host_rx[2] && t < 200000) begin @(negedge clk_net); t++; end
    chk(host_rx.size() >= 3, "reply header");
    chk(host_rx[0] == (op | 8'h80), $sformatf("reply opcode %h for %h", host_rx[0], op));
    rch = host_rx[1];
    rep.delete();
    for (int i = 0; i < host_rx[2]; i++) rep.push_back(host_rx[3 + i]);
    host_rx.delete();
  endtask

  task automatic put_cmd(input byte unsigned op, input byte unsigned ch, input byte unsigned pay[]);
    host_put(op); host_put(ch); host_put(8'(pay.size()));
    foreach (pay[i]) host_put(pay[i]);
  endtask

  // ---------------- GBT-SCA side: E-links ----------------
  bitq_t line_m, line_a;       // what the FPGA sent
  bitq_t src_m, src_a;         // what the SCA sends
  always @(posedge clk_sys) begin
    #3;
    if (src_m.size() == 0) push_flag(src_m);
    if (src_a.size() == 0) push_flag(src_a);
    elink_master_din = src_m.pop_front();
    elink_aux_din    = src_a.pop_front();
    #3;
    if (rst_n) begin line_m.push_back(elink_master_dout); line_a.push_back(elink_aux_dout); end
  end
  always @(negedge clk_sys) begin
    #3;
    elink_master_din = src_m.pop_front();
    elink_aux_din    = src_a.pop_front();
    #3;
    if (rst_n) begin line_m.push_back(elink_master_dout); line_a.push_back(elink_aux_dout); end
  end

  // frames the FPGA sent, decoded from the recorded line
  function automatic int frames_on(bit aux, ref byteq_t fr[$]);
    bit ok[$];
    fr.delete();
    if (aux) decode(line_a, fr, ok); else decode(line_m, fr, ok);
    foreach (ok[i]) if (!ok[i]) return -1;
    return fr.size();
  endfunction

  task automatic sca_reply(bit aux, byteq_t f, bit bad = 0);
    bitq_t q;
    push_flag(q);
    encode_frame(q, f, bad);
    push_flag(q);
    wait (aux ? src_a.size() <= 8 : src_m.size() <= 8);
    if (aux) foreach (q[i]) src_a.push_back(q[i]); else foreach (q[i]) src_m.push_back(q[i]);
  endtask

  // send one SCA frame from the host and check it on the line
  byteq_t sent_m[$], sent_a[$];
  task automatic host_send_frame(byteq_t f, bit aux);
    byte unsigned rep[$], rch;
    byte unsigned p[] = new[f.size()];
    byteq_t fr[$];
    int n0 = n_sent;
    foreach (f[i]) p[i] = f[i];
    host_cmd(OP_SCA_SEND, 0, p, rep, rch);
    wait (n_sent > n0);
    repeat (60) @(posedge clk_sys);
    if (aux) sent_a.push_back(f); else sent_m.push_back(f);
    chk(frames_on(aux, fr) == (aux ? sent_a.size() : sent_m.size()), "frame count on line");
    chk(fr.size() > 0 && fr[fr.size()-1] == f, "frame on the E-link");
  endtask

  // ---------------- GBT-SCA side: SPI master ----------------
  localparam time SPI_TH = 100ns;   // 5 MHz SCK
  task automatic spi_xfer(int ss, logic [95:0] w);
    spi_cs_n[ss] = 0; #(2*SPI_TH);
    for (int i = 95; i >= 0; i--) begin spi_sck = 1; spi_sdi = w[i]; #SPI_TH; spi_sck = 0; #SPI_TH; end
    #(2*SPI_TH); spi_cs_n[ss] = 1; #(4*SPI_TH);
  endtask

  // ---------------- GBT-SCA side: I2C master ----------------
  localparam time T = 500ns;        // 1 MHz SCL
  task automatic i2c_start(int c);
    i2c_sda_m[c] = 1; i2c_scl[c] = 1; #T; i2c_sda_m[c] = 0; #T; i2c_scl[c] = 0; #(T/2);
  endtask
  task automatic i2c_stop(int c);
    i2c_sda_m[c] = 0; #(T/2); i2c_scl[c] = 1; #T; i2c_sda_m[c] = 1; #T;
  endtask
  task automatic i2c_wr(int c, input logic [7:0] b, output logic ack);
    for (int i = 7; i >= 0; i--) begin
      i2c_sda_m[c] = b[i]; #(T/2); i2c_scl[c] = 1; #T; i2c_scl[c] = 0; #(T/2);
    end
    i2c_sda_m[c] = 1; #(T/2); i2c_scl[c] = 1; #(T/2); ack = ~i2c_sda[c]; #(T/2); i2c_scl[c] = 0; #(T/2);
  endtask
  task automatic i2c_rd(int c, input logic ack, output logic [7:0] b);
    i2c_sda_m[c] = 1;
    for (int i = 7; i >= 0; i--) begin
      #(T/2); i2c_scl[c] = 1; #(T/2); b[i] = i2c_sda[c]; #(T/2); i2c_scl[c] = 0;
    end
    #(T/4); i2c_sda_m[c] = ~ack; #(T/4); i2c_scl[c] = 1; #T; i2c_scl[c] = 0; #(T/2); i2c_sda_m[c] = 1;
  endtask

  initial begin
    #60ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned rep[$], rch, p[];
    byteq_t f;
    logic ack;
    logic [7:0] v;
    logic [95:0] vmm [8][18];
    logic [7:0] tds [16][16];
    int tds_len [16];
    int n_bad = 0, ovf_seen = 0, nf;

    repeat (4) @(negedge clk_sys); rst_n = 1;
    repeat (20) @(negedge clk_sys);

    // ===== VMM3 configuration flow =====
    // connect, reset, control-register and GPIO/SPI set-up frames (contents
    // are opaque to the FPGA and chosen by the host)
    host_send_frame('{8'h00, 8'h2F}, 0);                               // connect
    host_send_frame('{8'h00, 8'h8F}, 0);                               // reset
    host_send_frame('{8'h00, 8'h00, 8'h01, 8'h00, 8'h04, 8'h02, 8'h1F, 8'hFF, 8'hFF, 8'h00}, 0);
    // the SCA answers the last one
    sca_reply(0, '{8'h00, 8'h00, 8'h01, 8'h00, 8'h04, 8'h00});
    repeat (200) @(posedge clk_sys);
    p = new[0];
    host_cmd(OP_SCA_RECV, 0, p, rep, rch);
    chk(rch == 1 && rep.size() == 6 && rep[2] == 8'h01, "SCA reply received");
    // a corrupted reply: delivered with status 0
    sca_reply(0, '{8'h00, 8'h22, 8'h02, 8'h00, 8'h04, 8'h00}, 1);
    repeat (200) @(posedge clk_sys);
    host_cmd(OP_SCA_RECV, 0, p, rep, rch);
    chk(rch == 0 && rep.size() == 6, "bad FCS flagged");
    if (rch == 0) n_bad++;
    // an aborted frame: nothing delivered
    begin
      bitq_t q;
      push_flag(q);
      encode_frame(q, '{8'h11, 8'h22, 8'h33, 8'h44, 8'h55});
      q = q[0:40];
      repeat (8) q.push_back(1'b1);
      push_flag(q);
      wait (src_m.size() <= 8);
      foreach (q[i]) src_m.push_back(q[i]);
    end
    repeat (200) @(posedge clk_sys);
    host_cmd(OP_SCA_RECV, 0, p, rep, rch);
    // the receiver had already passed on bytes, so the frame closes as bad
    chk(rch == 8'h00, "aborted frame closed as bad");
    host_cmd(OP_SCA_RECV, 0, p, rep, rch);
    chk(rch == 8'hFF, "nothing more after the abort");
    // GPIO: the SCA drives ENA through GPIO; here the host drives GPIO lines
    // towards the SCA and reads lines the SCA drives
    p = '{8'h78, 8'h56, 8'h34, 8'h12, 8'hFF, 8'h00, 8'hFF, 8'h00};
    host_cmd(OP_GPIO_WRITE, 0, p, rep, rch);
    chk(gpio_out == 32'h12345678 && gpio_oe == 32'h00FF00FF, "GPIO outputs");
    gpio_in = 32'hCAFE0001;
    #1us;
    p = new[0];
    host_cmd(OP_GPIO_READ, 0, p, rep, rch);
    chk(rep.size() == 16 && {rep[3], rep[2], rep[1], rep[0]} == 32'hCAFE0001, "GPIO input");
    chk({rep[15], rep[14], rep[13], rep[12]} == 32'hCAFE0001, "GPIO change mask");
    // ENA low, 8 chips x 18 words x 96 bits, ENA high
    foreach (vmm[s, w]) vmm[s][w] = {$urandom, $urandom, $urandom};
    spi_ena = 0; #1us;
    for (int s = 0; s < 8; s++) for (int w = 0; w < 18; w++) spi_xfer(s, vmm[s][w]);
    spi_ena = 1; #1us;
    for (int s = 0; s < 8; s++) for (int w = 0; w < 18; w++) begin
      bit okw = 1;
      p = '{8'(w)};
      host_cmd(OP_SPI_READ, 8'(s), p, rep, rch);
      for (int b = 0; b < 12; b++) if (rep.size() != 12 || rep[b] != vmm[s][w][95 - 8*b -: 8]) okw = 0;
      chk(okw, $sformatf("VMM3 %0d word %0d", s, w));
    end

    // ===== TDS2 configuration flow on SCA I2C channel 5 =====
    // 16 registers of 2..16 bytes, 1296 bits in total as in the paper
    begin
      int total = 0;
      for (int r = 0; r < 16; r++) begin
        tds_len[r] = (r < 8) ? 16 : 2 + (r % 3) * 2;
        total += tds_len[r];
      end
      // pad to 162 bytes = 1296 bits on the last register
      tds_len[15] += 162 - total;
      foreach (tds[r, b]) tds[r][b] = 8'($urandom);
    end
    for (int r = 0; r < 16; r++) begin
      i2c_start(5); i2c_wr(5, {3'd0, 4'(r), 1'b0}, ack);
      chk(ack, "I2C address ack");
      for (int b = 0; b < tds_len[r]; b++) i2c_wr(5, tds[r][b], ack);
      i2c_stop(5);
    end
    for (int r = 0; r < 16; r++) begin
      bit okr = 1;
      i2c_start(5); i2c_wr(5, {3'd0, 4'(r), 1'b1}, ack);
      for (int b = 0; b < tds_len[r]; b++) begin
        i2c_rd(5, b != tds_len[r] - 1, v);
        if (v != tds[r][b]) okr = 0;
      end
      i2c_stop(5);
      chk(okr, $sformatf("TDS2 register %0d read over I2C", r));
      p = '{8'(r)};
      host_cmd(OP_I2C_READ, 8'd5, p, rep, rch);
      okr = (rep.size() == 16);
      for (int b = 0; b < tds_len[r] && b < rep.size(); b++) if (rep[b] != tds[r][b]) okr = 0;
      chk(okr, $sformatf("TDS2 register %0d read by host", r));
    end

    // ===== switch to the AUX E-port =====
    p = '{8'h01};
    host_cmd(OP_CFG_WRITE, 8'd0, p, rep, rch);
    repeat (50) @(posedge clk_sys);
    chk(active_aux, "AUX port active");
    host_send_frame('{8'h00, 8'h2F}, 1);
    sca_reply(1, '{8'h00, 8'h63, 8'h7E, 8'hFF});
    repeat (200) @(posedge clk_sys);
    p = new[0];
    host_cmd(OP_SCA_RECV, 0, p, rep, rch);
    chk(rch == 1 && rep.size() == 4 && rep[2] == 8'h7E, "reply over AUX");

    // ===== send-buffer stall: two long frames back to back =====
    bp_on = 0;
    begin
      byte unsigned big[];
      int n0;
      big = new[200];
      n0 = n_sent;
      foreach (big[i]) big[i] = 8'($urandom);
      put_cmd(OP_SCA_SEND, 0, big);
      put_cmd(OP_SCA_SEND, 0, big);
      wait (n_sent >= n0 + 2);
      repeat (100) @(posedge clk_sys);
      chk(host_rx.size() == 6, "two send replies");
      host_rx.delete();
      begin
        byteq_t fr[$];
        byteq_t bq;
        foreach (big[i]) bq.push_back(big[i]);
        sent_a.push_back(bq); sent_a.push_back(bq);
        nf = frames_on(1, fr);
        chk(nf == sent_a.size(), $sformatf("long frames on AUX: %0d of %0d", nf, sent_a.size()));
        chk(fr[fr.size()-1] == bq && fr[fr.size()-2] == bq, "long frame contents");
      end
    end
    bp_on = 1;

    // ===== receive-buffer overflow: 18 replies, none read =====
    for (int k = 0; k < 18; k++) sca_reply(1, '{8'h00, 8'(k), 8'hAB, 8'hCD});
    repeat (400) @(posedge clk_sys);
    p = new[0];
    host_cmd(OP_CFG_READ, 8'd1, p, rep, rch);
    chk(rep.size() == 1 && rep[0][2], "receive overflow flagged");
    if (rep.size() == 1 && rep[0][2]) ovf_seen = 1;
    for (int k = 0; k < 16; k++) begin
      host_cmd(OP_SCA_RECV, 0, p, rep, rch);
      chk(rch == 1 && rep.size() == 4 && rep[1] == 8'(k), "buffered reply");
    end
    host_cmd(OP_SCA_RECV, 0, p, rep, rch);
    chk(rch == 8'hFF, "overflowed replies dropped");

    // ===== mechanism coverage =====
    $display("sent=%0d rcvd=%0d bad=%0d abort=%0d switch=%0d vmm_done=%0d tx_stall=%0d ovf=%0d reply_bp=%0d",
             n_sent, n_rcvd, n_bad, n_abort, n_switch, n_vmm_done, n_tx_stall, ovf_seen, n_reply_bp);
    chk(n_sent > 0, "frames sent");
    chk(n_rcvd > 0, "frames received");
    chk(n_bad > 0, "bad FCS");
    chk(n_abort > 0, "abort");
    chk(n_switch > 0, "port switch");
    chk(n_vmm_done > 0, "VMM3 configuration end");
    chk(n_tx_stall > 0, "send-buffer stall");
    chk(ovf_seen > 0, "receive overflow");
    chk(n_reply_bp > 0, "reply back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
