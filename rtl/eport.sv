// E-port: one E-link lane pair between the FPGA and a GBT-SCA E-link port.
//
// The paper runs the E-link at 40 MHz in double-data-rate mode, giving
// 80 Mb/s each way. This module is the DDR boundary: per system clock it
// puts two bits on elink_dout, tx_bits[0] while clk is high and tx_bits[1]
// while clk is low, and samples two bits from elink_din, one at the falling
// edge (the high-phase bit, first in time) and one at the rising edge.
//
// It is written the way an FPGA output/input DDR register behaves: a rising-
// and a falling-edge flop and a clock-selected output. The output selection
// uses clk as data on purpose; on the FPGA this maps onto the I/O DDR
// primitive. The bit order within a clock and the one-clock register stage
// on each side are this design's choices.
//
// Timing: tx_bits presented before rising edge k appear on the line during
// cycle k+1; rx_bits show the two bits received during cycle k after rising
// edge k+1.
module eport (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] tx_bits,
  output logic       elink_dout,
  input  logic       elink_din,
  output logic [1:0] rx_bits
);

  logic rise_q, fall_src, fall_q, hi_bit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rise_q   <= 1'b1;
      fall_src <= 1'b1;
      rx_bits  <= 2'b11;
    end else begin
      rise_q   <= tx_bits[0];
      fall_src <= tx_bits[1];
      rx_bits  <= {elink_din, hi_bit};
    end
  end

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fall_q <= 1'b1;
      hi_bit <= 1'b1;
    end else begin
      fall_q <= fall_src;
      hi_bit <= elink_din;
    end
  end

  assign elink_dout = clk ? rise_q : fall_q;

endmodule
