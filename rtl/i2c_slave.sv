// I2C target on the FPGA side of one GBT-SCA I2C master, used to loop the
// SCA's I2C traffic back into the FPGA. It answers the way the paper says a
// TDS2 does: the 7-bit address carries the device number in its upper 3 bits
// (DEV_ID) and the register number in its lower 4 bits; a register holds up
// to 16 bytes (128 bits, the most the SCA moves in one transfer).
//
// A write transaction stores its data bytes at byte 0, 1, ... of the
// addressed register; a read returns them in the same order until the master
// answers NACK. Every address byte and data byte it accepts is ACKed; an
// address with another device number is ignored until the next START.
// The register bytes live in Data control ("I2Cn data"); this module reaches
// them through mem_addr = {register, byte}, reading combinationally.
//
// SCL and SDA are synchronised to clk with two flops and their edges are
// detected, so SCL must stay below about clk/8 (the SCA runs I2C at up to
// 1 MHz against a 40 MHz clk). sda_oe = 1 pulls SDA low; SDA changes only
// after SCL has fallen. The oversampling scheme and byte ordering are this
// design's choices; the address split and the register sizes follow the paper.
module i2c_slave #(
  parameter logic [2:0] DEV_ID = 3'd0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       scl,
  input  logic       sda_in,
  output logic       sda_oe,
  output logic       mem_we,
  output logic [7:0] mem_addr,   // {register[3:0], byte[3:0]}
  output logic [7:0] mem_wdata,
  input  logic [7:0] mem_rdata,
  output logic       wr_done     // pulses at STOP after a write with data
);

  typedef enum logic [2:0] {S_IDLE, S_ADDR, S_ADDR_ACK, S_WR, S_WR_ACK, S_RD, S_RD_ACK} st_e;

  logic [2:0] scl_s, sda_s;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scl_s <= '1;
      sda_s <= '1;
    end else begin
      scl_s <= {scl_s[1:0], scl};
      sda_s <= {sda_s[1:0], sda_in};
    end
  end

  wire scl_rise = scl_s[1] & ~scl_s[2];
  wire scl_fall = ~scl_s[1] & scl_s[2];
  wire start    = scl_s[1] & scl_s[2] & ~sda_s[1] & sda_s[2];
  wire stop     = scl_s[1] & scl_s[2] & sda_s[1] & ~sda_s[2];
  wire sda      = sda_s[1];

  st_e        st;
  logic [7:0] sh;
  logic [3:0] cnt;
  logic [3:0] reg_q, idx;
  logic       rw, ack_ok, wrote;
  logic [7:0] rd_sh;

  assign mem_addr  = {reg_q, idx};
  assign mem_wdata = sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      sh      <= '0;
      cnt     <= '0;
      reg_q   <= '0;
      idx     <= '0;
      rw      <= 1'b0;
      ack_ok  <= 1'b0;
      wrote   <= 1'b0;
      rd_sh   <= '0;
      sda_oe  <= 1'b0;
      mem_we  <= 1'b0;
      wr_done <= 1'b0;
    end else begin
      mem_we  <= 1'b0;
      wr_done <= 1'b0;
      if (start) begin
        st     <= S_ADDR;
        cnt    <= '0;
        sda_oe <= 1'b0;
      end else if (stop) begin
        st      <= S_IDLE;
        sda_oe  <= 1'b0;
        wr_done <= wrote;
        wrote   <= 1'b0;
      end else begin
        unique case (st)
          S_IDLE: ;
          S_ADDR: begin
            if (scl_rise) begin
              sh  <= {sh[6:0], sda};
              cnt <= cnt + 4'd1;
            end else if (scl_fall && cnt == 4'd8) begin
              if (sh[7:5] == DEV_ID) begin
                sda_oe <= 1'b1;
                reg_q  <= sh[4:1];
                idx    <= '0;
                rw     <= sh[0];
                st     <= S_ADDR_ACK;
              end else begin
                st <= S_IDLE;
              end
            end
          end
          S_ADDR_ACK: begin
            if (scl_fall) begin
              cnt <= '0;
              if (rw) begin
                rd_sh  <= mem_rdata;
                sda_oe <= ~mem_rdata[7];
                st     <= S_RD;
              end else begin
                sda_oe <= 1'b0;
                st     <= S_WR;
              end
            end
          end
          S_WR: begin
            if (scl_rise) begin
              sh  <= {sh[6:0], sda};
              cnt <= cnt + 4'd1;
            end else if (scl_fall && cnt == 4'd8) begin
              mem_we <= 1'b1;
              wrote  <= 1'b1;
              sda_oe <= 1'b1;
              st     <= S_WR_ACK;
            end
          end
          S_WR_ACK: begin
            if (scl_fall) begin
              idx    <= idx + 4'd1;
              sda_oe <= 1'b0;
              cnt    <= '0;
              st     <= S_WR;
            end
          end
          S_RD: begin
            if (scl_rise) begin
              cnt <= cnt + 4'd1;
            end else if (scl_fall) begin
              if (cnt == 4'd8) begin
                sda_oe <= 1'b0;
                st     <= S_RD_ACK;
              end else begin
                sda_oe <= ~rd_sh[3'd7 - cnt[2:0]];
              end
            end
          end
          default: begin  // S_RD_ACK
            if (scl_rise) begin
              ack_ok <= ~sda;
              if (!sda) idx <= idx + 4'd1;
            end else if (scl_fall) begin
              if (ack_ok) begin
                rd_sh  <= mem_rdata;
                sda_oe <= ~mem_rdata[7];
                cnt    <= '0;
                st     <= S_RD;
              end else begin
                st <= S_IDLE;
              end
            end
          end
        endcase
      end
    end
  end

endmodule
