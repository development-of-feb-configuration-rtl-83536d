// Command decoder: turns the host's command frames into accesses of Data
// control and sends a reply frame for each command.
//
// The paper says the host computer builds the GBT-SCA instructions and
// configuration data and that the FPGA sorts them by kind; it does not give
// the command format. This design uses a byte format of its own, both ways:
//     opcode, channel, length N, N payload bytes
// The reply has opcode | 0x80. Commands (opcodes in feb_cfg_pkg):
//   SCA_SEND   payload = one SCA frame (address, control, information
//              field); queued for HDLC transmission. Reply: chan, 0 bytes.
//   SCA_RECV   reply: status (1 FCS ok, 0 bad, 0xFF none), the frame bytes.
//   I2C_READ   chan = I2C channel, payload[0] = register; reply 16 bytes.
//   SPI_READ   chan = chip select, payload[0] = word 0..17; reply 12 bytes,
//              bits 95..88 first.
//   GPIO_WRITE payload bytes 0-3 output, 4-7 output enable; reply 0 bytes.
//   GPIO_READ  reply 16 bytes: input, output, enable, change mask.
//   CFG_WRITE  chan = register, payload[0] = value; reply 0 bytes.
//   CFG_READ   chan = register; reply 1 byte.
//   other      reply opcode 0xFF, chan = the unknown opcode.
// Extra payload bytes are read and ignored. A SCA_SEND payload byte waits
// while the send buffer is full. Both streams are valid/ready, one byte per
// clock at most.
module cmd_decoder
  import feb_cfg_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [7:0]  in_data,
  output logic        in_ready,
  output logic        out_valid,
  output logic [7:0]  out_data,
  input  logic        out_ready,
  // host bus to Data control
  output logic        hb_we,
  output logic        hb_re,
  output space_e      hb_space,
  output logic [3:0]  hb_chan,
  output logic [7:0]  hb_addr,
  output logic [7:0]  hb_wdata,
  output logic        hb_last,
  input  logic [7:0]  hb_rdata,
  input  logic        tx_full,
  input  logic        rx_avail
);

  typedef enum logic [3:0] {
    S_OP, S_CHAN, S_LEN, S_PAY, S_SETUP, S_INFO0, S_INFO1,
    S_ROP, S_RCHAN, S_RLEN, S_RDATA
  } st_e;

  st_e        st;
  logic [7:0] op, chan, len, pcnt, p0;
  logic [7:0] rop, rchan, rlen, rcnt, rbase;
  space_e     rspace;
  logic       rpop;

  wire in_fire  = in_valid && in_ready;
  wire out_fire = out_valid && out_ready;

  // ---- combinational outputs ----
  always_comb begin
    in_ready  = 1'b0;
    out_valid = 1'b0;
    out_data  = 8'd0;
    hb_we     = 1'b0;
    hb_re     = 1'b0;
    hb_space  = SP_CFG;
    hb_chan   = chan[3:0];
    hb_addr   = 8'd0;
    hb_wdata  = in_data;
    hb_last   = 1'b0;
    unique case (st)
      S_OP, S_CHAN, S_LEN: in_ready = 1'b1;
      S_PAY: begin
        in_ready = !(op == OP_SCA_SEND && tx_full);
        unique case (op)
          OP_SCA_SEND: begin
            hb_space = SP_SCA_TX;
            hb_we    = in_fire;
            hb_last  = (pcnt == len - 8'd1);
          end
          OP_GPIO_WRITE: begin
            hb_space = SP_GPIO;
            hb_addr  = 8'd4 + pcnt;
            hb_we    = in_fire && pcnt < 8'd8;
          end
          OP_CFG_WRITE: begin
            hb_space = SP_CFG;
            hb_we    = in_fire && pcnt == 8'd0;
          end
          default: ;
        endcase
      end
      S_INFO0: begin
        hb_space = SP_RXINFO;
        hb_addr  = 8'd0;
      end
      S_INFO1: begin
        hb_space = SP_RXINFO;
        hb_addr  = 8'd1;
        hb_re    = 1'b1;
      end
      S_ROP:   begin out_valid = 1'b1; out_data = rop;   end
      S_RCHAN: begin out_valid = 1'b1; out_data = rchan; end
      S_RLEN:  begin out_valid = 1'b1; out_data = rlen;  end
      S_RDATA: begin
        hb_space  = rspace;
        hb_addr   = rbase + rcnt;
        out_valid = 1'b1;
        out_data  = hb_rdata;
        hb_re     = rpop && out_fire;
      end
      default: ;
    endcase
  end

  // ---- state machine ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_OP;
      op     <= '0;
      chan   <= '0;
      len    <= '0;
      pcnt   <= '0;
      p0     <= '0;
      rop    <= '0;
      rchan  <= '0;
      rlen   <= '0;
      rcnt   <= '0;
      rbase  <= '0;
      rspace <= SP_CFG;
      rpop   <= 1'b0;
    end else begin
      unique case (st)
        S_OP:   if (in_fire) begin op <= in_data; st <= S_CHAN; end
        S_CHAN: if (in_fire) begin chan <= in_data; st <= S_LEN; end
        S_LEN:  if (in_fire) begin
          len  <= in_data;
          pcnt <= '0;
          p0   <= '0;
          st   <= (in_data == 8'd0) ? S_SETUP : S_PAY;
        end
        S_PAY: if (in_fire) begin
          if (pcnt == 8'd0) p0 <= in_data;
          pcnt <= pcnt + 8'd1;
          if (pcnt == len - 8'd1) st <= S_SETUP;
        end
        S_SETUP: begin
          rop    <= op | 8'h80;
          rchan  <= chan;
          rlen   <= 8'd0;
          rcnt   <= '0;
          rbase  <= '0;
          rpop   <= 1'b0;
          rspace <= SP_CFG;
          st     <= S_ROP;
          unique case (op)
            OP_SCA_SEND, OP_GPIO_WRITE, OP_CFG_WRITE: ;
            OP_SCA_RECV: begin
              rspace <= SP_SCA_RX;
              rpop   <= 1'b1;
              if (rx_avail) st <= S_INFO0;
              else rchan <= 8'hFF;
            end
            OP_I2C_READ: begin
              rspace <= SP_I2C;
              rbase  <= {p0[3:0], 4'd0};
              rlen   <= 8'(TDS_REG_BYTES);
            end
            OP_SPI_READ: begin
              rspace <= SP_SPI;
              rbase  <= (p0 < 8'(SPI_NWORDS)) ? p0 * 8'(SPI_WORD / 8) : 8'((SPI_NWORDS - 1) * (SPI_WORD / 8));
              rlen   <= 8'(SPI_WORD / 8);
            end
            OP_GPIO_READ: begin
              rspace <= SP_GPIO;
              rlen   <= 8'd16;
              rpop   <= 1'b1;
            end
            OP_CFG_READ: begin
              rspace <= SP_CFG;
              rlen   <= 8'd1;
            end
            default: begin
              rop   <= 8'hFF;
              rchan <= op;
            end
          endcase
        end
        S_INFO0: begin rchan <= hb_rdata; st <= S_INFO1; end
        S_INFO1: begin rlen <= hb_rdata; st <= S_ROP; end
        S_ROP:   if (out_fire) st <= S_RCHAN;
        S_RCHAN: if (out_fire) st <= S_RLEN;
        S_RLEN:  if (out_fire) st <= (rlen == 8'd0) ? S_OP : S_RDATA;
        S_RDATA: if (out_fire) begin
          rcnt <= rcnt + 8'd1;
          if (rcnt == rlen - 8'd1) st <= S_OP;
        end
        default: st <= S_OP;
      endcase
    end
  end

endmodule
