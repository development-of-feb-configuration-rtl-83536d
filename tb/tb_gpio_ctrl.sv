// Self-checking testbench of gpio_ctrl: random output and enable writes are
// read back and seen on the pins; random input patterns are read after the
// two-flop synchroniser; the change mask must collect toggles, including a
// pulse that is gone again, and clear on read.
module tb_gpio_ctrl;
  logic clk = 0, rst_n = 0;
  logic [31:0] gpio_in = 0, gpio_out, gpio_oe;
  logic we = 0, re = 0;
  logic [3:0] addr = 0;
  logic [7:0] wdata = 0, rdata;
  int checks = 0, failures = 0;

  gpio_ctrl dut (.*);

  always #12.5 clk = ~clk;

  task automatic wr(input logic [3:0] a, input logic [7:0] d);
    @(negedge clk); we = 1; addr = a; wdata = d; @(negedge clk); we = 0;
  endtask
  task automatic rd(input logic [3:0] a, output logic [7:0] d, input bit pop = 0);
    @(negedge clk); addr = a; re = pop; #1; d = rdata; @(negedge clk); re = 0;
  endtask

  initial begin
    #1ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] o, e, v;
    logic [7:0] b;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      o = $urandom; e = $urandom;
      for (int i = 0; i < 4; i++) begin wr(4 + i, o[8*i +: 8]); wr(8 + i, e[8*i +: 8]); end
      checks++; if (gpio_out != o || gpio_oe != e) begin failures++; $display("pins"); end
      for (int i = 0; i < 4; i++) begin
        rd(4 + i, b); checks++; if (b != o[8*i +: 8]) failures++;
        rd(8 + i, b); checks++; if (b != e[8*i +: 8]) failures++;
      end
      // clear change mask, then apply input
      for (int i = 0; i < 4; i++) rd(12 + i, b, 1);
      v = $urandom;
      @(negedge clk); gpio_in = v;
      repeat (4) @(negedge clk);
      for (int i = 0; i < 4; i++) begin
        rd(i, b); checks++; if (b != v[8*i +: 8]) begin failures++; $display("in byte %0d", i); end
      end
    end
    // pulse on line 9: sticky in the change mask, cleared by reading
    for (int i = 0; i < 4; i++) rd(12 + i, b, 1);
    @(negedge clk); gpio_in[9] = ~gpio_in[9];
    repeat (3) @(negedge clk); gpio_in[9] = ~gpio_in[9];
    repeat (4) @(negedge clk);
    rd(13, b, 1); checks++; if (b != 8'h02) begin failures++; $display("change %h", b); end
    rd(13, b);    checks++; if (b != 8'h00) begin failures++; $display("not cleared %h", b); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
