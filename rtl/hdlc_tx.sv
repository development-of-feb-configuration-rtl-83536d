// HDLC transmitter of the SCA packet generator.
//
// Takes one frame at a time as a byte stream (valid/ready, last marks the
// final byte) and sends it as an HDLC frame: opening flag 0x7E, the bytes LSB
// first with a zero stuffed after every five consecutive ones, the FCS-16 of
// the bytes (complemented, LSB first, also stuffed) and a closing flag. When
// no frame is waiting it sends flags back to back, which is the idle pattern
// of an HDLC link. The paper says the FPGA packs the SCA data "in the HDLC
// format" and that the E-link runs at 40 MHz DDR (80 Mb/s); the bit-level
// details (LSB first, ISO FCS-16, flag idle) are standard HDLC and are this
// design's reading of that sentence.
//
// Timing: two line bits per clock, tx_bits[0] first. A byte takes four or
// more clocks, so one byte of look-ahead (nxt) is enough as long as the source
// holds the whole frame before offering its first byte; Data control does
// this. If the source still runs dry mid-frame the frame is cut short, the
// receiver then sees a bad FCS, and underrun pulses.
module hdlc_tx
  import feb_cfg_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       s_valid,
  input  logic [7:0] s_data,
  input  logic       s_last,
  output logic       s_ready,
  output logic [1:0] tx_bits,     // [0] goes on the line first
  output logic       frame_done,  // pulses when a closing flag starts
  output logic       underrun,
  output logic       in_frame     // 1 from the first payload bit to the closing flag
);

  typedef enum logic [1:0] {ST_FLAG, ST_DATA, ST_FCS} state_e;

  typedef struct packed {
    state_e      st;
    logic [4:0]  idx;
    logic [2:0]  ones;
    logic [7:0]  cur;
    logic        cur_last;
    logic [15:0] crc;
    logic [15:0] fcs;
    logic [7:0]  nxt;
    logic        nxt_last;
    logic        nxt_valid;
  } tx_state_t;

  tx_state_t q, d;
  logic [1:0] bits_d;
  logic       done_d, under_d;

  assign s_ready  = !q.nxt_valid;
  assign in_frame = (q.st != ST_FLAG);

  always_comb begin
    d       = q;
    bits_d  = '0;
    done_d  = 1'b0;
    under_d = 1'b0;
    for (int b = 0; b < 2; b++) begin
      unique case (d.st)
        ST_FLAG: begin
          bits_d[b] = HDLC_FLAG[d.idx[2:0]];
          if (d.idx == 5'd7) begin
            d.idx = '0;
            if (d.nxt_valid) begin
              d.st        = ST_DATA;
              d.cur       = d.nxt;
              d.cur_last  = d.nxt_last;
              d.nxt_valid = 1'b0;
              d.crc       = fcs16_byte(FCS_INIT, d.nxt);
              d.ones      = '0;
            end
          end else begin
            d.idx = d.idx + 5'd1;
          end
        end
        ST_DATA: begin
          if (d.ones == 3'd5) begin
            bits_d[b] = 1'b0;
            d.ones    = '0;
          end else begin
            bits_d[b] = d.cur[d.idx[2:0]];
            d.ones    = bits_d[b] ? d.ones + 3'd1 : 3'd0;
            if (d.idx == 5'd7) begin
              d.idx = '0;
              if (d.cur_last) begin
                d.st  = ST_FCS;
                d.fcs = ~d.crc;
              end else if (d.nxt_valid) begin
                d.cur       = d.nxt;
                d.cur_last  = d.nxt_last;
                d.nxt_valid = 1'b0;
                d.crc       = fcs16_byte(d.crc, d.nxt);
              end else begin
                d.st    = ST_FLAG;  // source ran dry: cut the frame
                under_d = 1'b1;
              end
            end else begin
              d.idx = d.idx + 5'd1;
            end
          end
        end
        default: begin  // ST_FCS; idx == 16 means all FCS bits are out
          if (d.ones == 3'd5) begin
            bits_d[b] = 1'b0;
            d.ones    = '0;
            if (d.idx == 5'd16) begin
              d.st   = ST_FLAG;
              d.idx  = '0;
              done_d = 1'b1;
            end
          end else begin
            bits_d[b] = d.fcs[d.idx[3:0]];
            d.ones    = bits_d[b] ? d.ones + 3'd1 : 3'd0;
            d.idx     = d.idx + 5'd1;
            if (d.idx == 5'd16 && d.ones != 3'd5) begin
              d.st   = ST_FLAG;
              d.idx  = '0;
              done_d = 1'b1;
            end
          end
        end
      endcase
    end
    if (!q.nxt_valid && s_valid) begin
      d.nxt       = s_data;
      d.nxt_last  = s_last;
      d.nxt_valid = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q          <= '{st: ST_FLAG, default: '0};
      tx_bits    <= 2'b11;
      frame_done <= 1'b0;
      underrun   <= 1'b0;
    end else begin
      q          <= d;
      tx_bits    <= bits_d;
      frame_done <= done_d;
      underrun   <= under_d;
    end
  end

endmodule
