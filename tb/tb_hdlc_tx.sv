// Self-checking testbench of hdlc_tx: offers random frames through the
// valid/ready port, records every line bit and decodes the record with the
// reference model; frames, FCS, idle flags and the 80 Mb/s rate are checked.
module tb_hdlc_tx;
  import hdlc_model_pkg::*;

  logic clk = 0, rst_n = 0;
  logic s_valid, s_last, s_ready, frame_done, underrun, in_frame;
  logic [7:0] s_data;
  logic [1:0] tx_bits;
  int checks = 0, failures = 0;

  hdlc_tx dut (.*);

  always #12.5 clk = ~clk;

  bitq_t line;
  bit recording = 0;
  int ndone = 0;
  always @(posedge clk) if (recording) begin
    line.push_back(tx_bits[0]);
    line.push_back(tx_bits[1]);
    if (frame_done) ndone++;
    if (underrun) begin failures++; $display("underrun"); end
  end

  byteq_t sent[$];

  // Inputs change at the negedge; s_ready is stable there and is what the
  // DUT sees at the following posedge.
  task automatic send(byteq_t fr);
    bit r;
    foreach (fr[i]) begin
      @(negedge clk);
      s_valid = 1; s_data = fr[i]; s_last = (i == fr.size()-1);
      forever begin
        r = s_ready;
        @(posedge clk);
        if (r) break;
        @(negedge clk);
      end
    end
    @(negedge clk);
    s_valid = 0;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byteq_t got[$];
    bit ok[$];
    int nflags;
    bit [7:0] w;
    s_valid = 0; s_data = 0; s_last = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    recording = 1;
    repeat (40) @(posedge clk);
    // idle: 80 bits, back-to-back flags
    nflags = 0; w = 0;
    foreach (line[i]) begin
      w = {line[i], w[7:1]};
      if (w == 8'h7E) nflags++;
    end
    checks++;
    if (nflags < 8) begin failures++; $display("idle flags %0d", nflags); end
    // frames: patterns that force stuffing, then random ones
    begin
      byteq_t f;
      f = '{8'hFF, 8'hFF, 8'h7E, 8'h1F}; sent.push_back(f);
      f = '{8'h00, 8'h2F};               sent.push_back(f);
      f = '{8'hAA};                      sent.push_back(f);
      for (int n = 0; n < 12; n++) begin
        f.delete();
        repeat (1 + $urandom_range(0, 15)) f.push_back(8'($urandom));
        sent.push_back(f);
      end
    end
    foreach (sent[i]) begin
      send(sent[i]);
      repeat ($urandom_range(0, 20)) @(posedge clk);
    end
    repeat (200) @(posedge clk);
    recording = 0;
    decode(line, got, ok);
    checks++;
    if (got.size() != sent.size()) begin
      failures++; $display("frame count %0d expected %0d", got.size(), sent.size());
    end
    foreach (sent[i]) if (i < got.size()) begin
      checks++;
      if (got[i] != sent[i] || !ok[i]) begin failures++; $display("frame %0d mismatch ok=%0d got=%p sent=%p", i, ok[i], got[i], sent[i]); end
    end
    checks++;
    if (ndone != sent.size()) begin failures++; $display("frame_done %0d", ndone); end
    // rate: 16 zero bytes (no stuffing) = 144 bits with the FCS, 2 bits/clock
    begin
      byteq_t z;
      longint t0, t1, n;
      repeat (16) z.push_back(8'h00);
      @(posedge clk);
      t0 = $time;
      fork send(z); join_none
      @(posedge clk iff frame_done);
      t1 = $time;
      n = (t1 - t0) / 25;
      checks++;
      if (n < 72 || n > 72 + 8 + 4) begin failures++; $display("frame took %0d clocks", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
