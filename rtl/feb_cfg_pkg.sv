// Shared constants and types of the FEB configuration test-board firmware.
//
// The firmware moves slow-control traffic between a host computer and a
// GBT-SCA chip: host commands arrive as a byte stream, SCA packets leave as
// HDLC frames on a 40 MHz DDR E-link (80 Mb/s), and the SCA's I2C, SPI and
// GPIO outputs can be looped back into the FPGA. This package holds the HDLC
// framing constants, the FCS-16 update function, the host opcodes and the
// sizes taken from the paper (16 I2C channels, 8 SPI chip selects, 18 x 96-bit
// VMM3 words, 16 TDS2 registers of up to 16 bytes, 32 GPIO lines).
// The host opcode values and the FCS variant (ISO HDLC FCS-16) are this
// design's own choices; the paper only says "HDLC".
package feb_cfg_pkg;

  // HDLC framing
  localparam logic [7:0]  HDLC_FLAG    = 8'h7E;
  localparam logic [15:0] FCS_INIT     = 16'hFFFF;
  localparam logic [15:0] FCS_GOOD     = 16'hF0B8;  // residue over data+FCS

  // Sizes from the paper
  localparam int unsigned N_I2C        = 16;  // GBT-SCA I2C masters
  localparam int unsigned N_SPI_SS     = 8;   // GBT-SCA SPI slave selects / VMM3s
  localparam int unsigned SPI_WORD     = 96;  // bits per SPI transfer
  localparam int unsigned SPI_NWORDS   = 18;  // transfers per VMM3 (1728 bits)
  localparam int unsigned TDS_NREG     = 16;  // TDS2 registers
  localparam int unsigned TDS_REG_BYTES= 16;  // largest TDS2 register (128 bits)
  localparam int unsigned N_GPIO       = 32;  // GBT-SCA GPIO lines

  // Host command opcodes (own choice). Reply opcode = opcode | 8'h80.
  typedef enum logic [7:0] {
    OP_SCA_SEND   = 8'h01,  // payload = SCA frame (address, control, info)
    OP_SCA_RECV   = 8'h02,  // reply = oldest received SCA frame
    OP_I2C_READ   = 8'h03,  // chan = I2C channel, payload[0] = register
    OP_SPI_READ   = 8'h04,  // chan = chip select, payload[0] = word index
    OP_GPIO_WRITE = 8'h05,  // payload = 4 bytes data out, 4 bytes enable
    OP_GPIO_READ  = 8'h06,  // reply = 4 bytes sampled GPIO
    OP_CFG_WRITE  = 8'h07,  // chan = config register, payload[0] = value
    OP_CFG_READ   = 8'h08   // reply = 1 byte
  } opcode_e;

  // Spaces of the byte-wide host bus between the decoder and Data control
  typedef enum logic [2:0] {
    SP_SCA_TX = 3'd0,   // write: push byte into SCA send packet buffer
    SP_SCA_RX = 3'd1,   // read: pop byte from SCA receive packet buffer
    SP_RXINFO = 3'd2,   // read: pop {status, length} of oldest received frame
    SP_I2C    = 3'd3,   // read: I2C data, addr = {reg[3:0], byte[3:0]}
    SP_SPI    = 3'd4,   // read: SPI data, addr = word*12 + byte
    SP_GPIO   = 3'd5,   // read/write: GPIO bytes
    SP_CFG    = 3'd6    // read/write: test-system configuration
  } space_e;

  // Configuration register 0 bits
  localparam int unsigned CFG_EPORT_AUX = 0;  // 1: use E-port AUX

  // FCS-16 (x^16 + x^12 + x^5 + 1, bit-reflected, LSB first) over one byte
  function automatic logic [15:0] fcs16_byte(input logic [15:0] crc, input logic [7:0] d);
    logic [15:0] c;
    c = crc;
    for (int i = 0; i < 8; i++) begin
      if (c[0] ^ d[i]) c = (c >> 1) ^ 16'h8408;
      else             c = c >> 1;
    end
    return c;
  endfunction

endpackage
