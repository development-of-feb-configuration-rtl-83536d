// Self-checking testbench of comm_ctrl: random port requests and frame
// activity; checks that the port only changes between frames, that the
// active port carries the transmit bits while the other one idles with ones,
// and that the receive bits come from the active port.
module tb_comm_ctrl;
  logic clk = 0, rst_n = 0;
  logic sel_aux = 0, tx_in_frame = 0, active_aux, switched;
  logic [1:0] tx_bits = 0, tx_master, tx_aux, rx_master = 0, rx_aux = 0, rx_bits;
  int checks = 0, failures = 0, nswitch = 0;

  comm_ctrl dut (.*);

  always #12.5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_aux = 0, prev_sel, prev_frame;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 500; k++) begin
      @(negedge clk);
      prev_sel = sel_aux; prev_frame = tx_in_frame;
      if ($urandom_range(0, 9) == 0) sel_aux = ~sel_aux;
      tx_in_frame = ($urandom_range(0, 3) != 0);
      tx_bits = 2'($urandom); rx_master = 2'($urandom); rx_aux = 2'($urandom);
      @(posedge clk);
      if (!tx_in_frame && sel_aux != exp_aux) begin exp_aux = sel_aux; nswitch++; end
      #1;
      checks++;
      if (active_aux != exp_aux) begin failures++; $display("active %b exp %b", active_aux, exp_aux); end
      #1;
      checks++;
      if ((exp_aux ? tx_aux : tx_master) != tx_bits || (exp_aux ? tx_master : tx_aux) != 2'b11 ||
          rx_bits != (exp_aux ? rx_aux : rx_master)) begin
        failures++; $display("routing wrong");
      end
    end
    checks++;
    if (nswitch < 5) begin failures++; $display("too few switches"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
