// SPI target on the FPGA side of the GBT-SCA SPI master, standing in for the
// VMM3 configuration port so the SCA's SPI output can be looped back.
//
// The port has the four VMM3 signals the paper lists: ENA, SCK, SDI and one
// CS per chip (8 chip selects, as in the 8-VMM3 timing diagram). While ENA
// and a chip's CS are low, SDI is shifted in on the falling edge of SCK; when
// that CS returns high the last WORD_BITS bits are latched as one word. A
// VMM3 needs 1728 bits, written as 18 words of 96 bits, so the words of each
// chip go to word slots 0..17 in order; ENA high ends the configuration and
// sets every chip back to slot 0. The first bit shifted ends up as bit 95 of
// the word. Words are written to Data control ("SPI data") through the mem_*
// port; word_bits tells how many bits the latched word had.
//
// The inputs are synchronised with two flops and their edges detected, so SCK
// must stay below about clk/8. Oversampling, bit order, the slot counter and
// the ENA reset are this design's choices; ENA/CS polarity, the falling-edge
// shift, the latch on CS high and the 18 x 96 split follow the paper.
module spi_slave
  import feb_cfg_pkg::*;
#(
  parameter int unsigned N_SS      = N_SPI_SS,
  parameter int unsigned WORD_BITS = SPI_WORD,
  parameter int unsigned N_WORDS   = SPI_NWORDS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         ena,
  input  logic                         sck,
  input  logic                         sdi,
  input  logic [N_SS-1:0]              cs_n,
  output logic                         mem_we,
  output logic [$clog2(N_SS)-1:0]      mem_ss,
  output logic [$clog2(N_WORDS)-1:0]   mem_word,
  output logic [WORD_BITS-1:0]         mem_wdata,
  output logic [$clog2(WORD_BITS+1)-1:0] word_bits,
  output logic                         cfg_done   // pulses when ENA rises
);

  localparam int unsigned SSW = $clog2(N_SS);
  localparam int unsigned WW  = $clog2(N_WORDS);
  localparam int unsigned BW  = $clog2(WORD_BITS + 1);

  logic [2:0]      sck_s, ena_s;
  logic [1:0]      sdi_s;
  logic [N_SS-1:0] cs_s1, cs_s2, cs_s3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sck_s <= '0;
      ena_s <= '1;
      sdi_s <= '0;
      cs_s1 <= '1;
      cs_s2 <= '1;
      cs_s3 <= '1;
    end else begin
      sck_s <= {sck_s[1:0], sck};
      ena_s <= {ena_s[1:0], ena};
      sdi_s <= {sdi_s[0], sdi};
      cs_s1 <= cs_n;
      cs_s2 <= cs_s1;
      cs_s3 <= cs_s2;
    end
  end

  wire             sck_fall = ~sck_s[1] & sck_s[2];
  wire             ena_low  = ~ena_s[1];
  wire [N_SS-1:0]  cs_rise  = cs_s2 & ~cs_s3;
  wire             any_sel  = ~&cs_s2;

  logic [WORD_BITS-1:0] sh;
  logic [BW-1:0]        nbits;
  logic [WW-1:0]        slot [N_SS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh        <= '0;
      nbits     <= '0;
      mem_we    <= 1'b0;
      mem_ss    <= '0;
      mem_word  <= '0;
      mem_wdata <= '0;
      word_bits <= '0;
      cfg_done  <= 1'b0;
      for (int i = 0; i < N_SS; i++) slot[i] <= '0;
    end else begin
      mem_we   <= 1'b0;
      cfg_done <= ena_s[1] & ~ena_s[2];
      if (!ena_low) begin
        for (int i = 0; i < N_SS; i++) slot[i] <= '0;
        nbits <= '0;
      end else begin
        if (sck_fall && any_sel) begin
          sh <= {sh[WORD_BITS-2:0], sdi_s[1]};
          if (nbits != BW'(WORD_BITS)) nbits <= nbits + 1'b1;
        end
        for (int i = 0; i < N_SS; i++) begin
          if (cs_rise[i]) begin
            mem_we    <= 1'b1;
            mem_ss    <= SSW'(i);
            mem_word  <= slot[i];
            mem_wdata <= sh;
            word_bits <= nbits;
            nbits     <= '0;
            slot[i]   <= (slot[i] == WW'(N_WORDS - 1)) ? '0 : slot[i] + 1'b1;
          end
        end
      end
    end
  end

endmodule
