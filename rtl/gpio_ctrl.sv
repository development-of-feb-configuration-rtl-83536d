// Parallel I/O control: the FPGA end of the 32 GBT-SCA GPIO lines.
//
// Lines the SCA drives are synchronised to clk (two flops) and sampled; a
// sticky mask records every line that changed since the host last read it, so
// a host can see a GPIO write made through the SCA even if the level has
// changed back. Lines the FPGA drives towards the SCA come from an output
// and an output-enable register. All is reached through a byte-wide register
// port: bytes 0-3 sampled input, 4-7 output, 8-11 output enable, 12-15 change
// mask (reading a change byte clears it). Writes go to bytes 4-11.
// The paper names the block and its 32 lines; the register map and the change
// mask are this design's choices. Reads are combinational.
module gpio_ctrl
  import feb_cfg_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_GPIO-1:0] gpio_in,
  output logic [N_GPIO-1:0] gpio_out,
  output logic [N_GPIO-1:0] gpio_oe,
  input  logic              we,
  input  logic              re,
  input  logic [3:0]        addr,
  input  logic [7:0]        wdata,
  output logic [7:0]        rdata
);

  logic [N_GPIO-1:0] s1, s2, chg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1       <= '0;
      s2       <= '0;
      chg      <= '0;
      gpio_out <= '0;
      gpio_oe  <= '0;
    end else begin
      s1 <= gpio_in;
      s2 <= s1;
      chg <= chg | (s1 ^ s2);
      if (re && addr[3:2] == 2'd3) chg[addr[1:0]*8 +: 8] <= s1[addr[1:0]*8 +: 8] ^ s2[addr[1:0]*8 +: 8];
      if (we && addr[3:2] == 2'd1) gpio_out[addr[1:0]*8 +: 8] <= wdata;
      if (we && addr[3:2] == 2'd2) gpio_oe[addr[1:0]*8 +: 8]  <= wdata;
    end
  end

  always_comb begin
    unique case (addr[3:2])
      2'd0:    rdata = s2[addr[1:0]*8 +: 8];
      2'd1:    rdata = gpio_out[addr[1:0]*8 +: 8];
      2'd2:    rdata = gpio_oe[addr[1:0]*8 +: 8];
      default: rdata = chg[addr[1:0]*8 +: 8];
    endcase
  end

endmodule
