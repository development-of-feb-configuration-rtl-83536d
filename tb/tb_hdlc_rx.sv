// Self-checking testbench of hdlc_rx: the reference encoder builds a line
// stream of idle flags, good frames (random and stuffing-heavy), a frame with
// a corrupted FCS, an aborted frame and a too-short frame; the bytes, m_last
// and m_ok the receiver delivers are compared with what was encoded.
module tb_hdlc_rx;
  import hdlc_model_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [1:0] rx_bits = 2'b11;
  logic m_valid, m_last, m_ok, aborted;
  logic [7:0] m_data;
  int checks = 0, failures = 0;

  hdlc_rx dut (.*);

  always #12.5 clk = ~clk;

  byteq_t exp_fr[$];
  bit     exp_ok[$];
  byteq_t got_fr[$];
  bit     got_ok[$];
  byteq_t cur;
  int naborts = 0;

  always @(posedge clk) if (rst_n) begin
    if (m_valid) begin
      cur.push_back(m_data);
      if (m_last) begin got_fr.push_back(cur); got_ok.push_back(m_ok); cur.delete(); end
    end
    if (aborted) naborts++;
  end

  initial begin
    #3000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bitq_t line;
    byteq_t f;
    repeat (5) push_flag(line);
    f = '{8'hFF, 8'hFF, 8'h7E, 8'h1F, 8'h3E}; encode_frame(line, f); push_flag(line);
    exp_fr.push_back(f); exp_ok.push_back(1);
    f = '{8'h00};  encode_frame(line, f); push_flag(line); push_flag(line);
    exp_fr.push_back(f); exp_ok.push_back(1);
    for (int n = 0; n < 10; n++) begin
      f.delete();
      repeat (1 + $urandom_range(0, 20)) f.push_back(8'($urandom));
      encode_frame(line, f, n == 4); push_flag(line);
      exp_fr.push_back(f); exp_ok.push_back(n != 4);
      if (n == 6) begin
        // aborted frame: some bytes then seven ones, then idle
        byteq_t a = '{8'h12, 8'h34, 8'h56, 8'h78};
        bitq_t tmp;
        encode_frame(tmp, a);
        repeat (20) begin line.push_back(tmp.pop_front()); end
        repeat (9) line.push_back(1'b1);
        push_flag(line);
        exp_fr.push_back(a[0:0]); exp_ok.push_back(0);  // placeholder, see below
        void'(exp_fr.pop_back()); void'(exp_ok.pop_back());
      end
      if (n == 8) begin
        // a single byte with no FCS: dropped
        for (int k = 0; k < 8; k++) line.push_back(k[0]);
        push_flag(line);
      end
    end
    repeat (4) push_flag(line);
    if (line.size() % 2) line.push_back(1'b1);
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (line.size() > 0) begin
      @(negedge clk);
      rx_bits[0] = line.pop_front();
      rx_bits[1] = line.pop_front();
    end
    repeat (20) @(negedge clk);
    // frames delivered: the good ones and the bad-FCS one; an abort that had
    // delivered bytes closes with m_ok = 0
    checks++;
    if (got_fr.size() < exp_fr.size()) begin
      failures++; $display("got %0d frames, expected %0d", got_fr.size(), exp_fr.size());
    end
    begin
      int j = 0;
      foreach (exp_fr[i]) begin
        // skip a closed-by-abort entry (not ok, not in the expected list)
        while (j < got_fr.size() && !got_ok[j] && got_fr[j] != exp_fr[i]) j++;
        checks++;
        if (j >= got_fr.size() || got_fr[j] != exp_fr[i] || got_ok[j] != exp_ok[i]) begin
          failures++; $display("frame %0d mismatch exp=%p ok=%0d got=%p ok=%0d", i, exp_fr[i], exp_ok[i], (j < got_fr.size()) ? got_fr[j] : exp_fr[0], (j < got_fr.size()) ? got_ok[j] : 0);
        end
        j++;
      end
      checks++;
      if (j != got_fr.size()) begin failures++; $display("extra frames"); end
    end
    checks++;
    if (naborts != 1) begin failures++; $display("aborts %0d", naborts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
