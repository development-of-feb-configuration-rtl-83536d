// Self-checking testbench of eport: random bit pairs are sent, the line is
// sampled in the middle of each clock phase and checked against the pair,
// and the line is looped back (3 ns wire delay) so that rx_bits must return
// the pair one clock after the line carried it.
module tb_eport;
  logic clk = 0, rst_n = 0;
  logic [1:0] tx_bits = 2'b11, rx_bits;
  logic elink_dout, elink_din;
  int checks = 0, failures = 0;

  eport dut (.*);

  assign #3 elink_din = elink_dout;
  always #12.5 clk = ~clk;

  logic [1:0] hist[$];

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic hi, lo;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      // rx_bits now hold what was accepted two rising edges ago
      if (hist.size() >= 2) begin
        checks++;
        if (rx_bits != hist[hist.size()-2]) begin
          failures++; $display("rx %b expected %b", rx_bits, hist[hist.size()-2]);
        end
      end
      tx_bits = 2'($urandom);
      hist.push_back(tx_bits);
      // the line during the cycle after this pair is accepted
      @(posedge clk); #6; hi = elink_dout;
      @(negedge clk); #6; lo = elink_dout;
      checks++;
      if ({lo, hi} != hist[hist.size()-1]) begin
        failures++; $display("line %b%b expected %b", lo, hi, hist[hist.size()-1]);
      end
      tx_bits = 2'($urandom);
      hist.push_back(tx_bits);
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
