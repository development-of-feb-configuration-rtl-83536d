// HDLC receiver of the SCA packet path (SCA recv packet in the firmware).
//
// Takes two line bits per clock (rx_bits[0] arrived first), finds the 0x7E
// flags, drops the zero that follows five ones, assembles bytes LSB first,
// checks the FCS-16 and delivers each frame's bytes without the two FCS
// bytes. Seven or more ones in a row abort the frame and send the receiver
// back to hunting for a flag.
//
// How it works: the raw bits pass through an 8-bit window, each tagged as
// data or as a stuffed zero. When the window holds a flag, its bits are
// re-tagged as non-data, so only payload bits leave the window towards the
// byte assembler. The last three bytes are held back: on the closing flag the
// youngest two are the FCS and the oldest is delivered with m_last.
//
// Timing: a byte leaves two clocks after its last bit entered the window plus
// the wait for two younger bytes; the last byte leaves two clocks after the
// closing flag. m_ok is valid with m_last and is 1 when the FCS residue is
// 0xF0B8 and the frame ended on a byte boundary. Frames shorter than three
// bytes (one byte plus FCS) are dropped silently. There is no back-pressure:
// the sink must take one byte every four clocks.
// The paper only says the link uses HDLC; the details above are standard
// HDLC practice chosen by this design.
module hdlc_rx
  import feb_cfg_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] rx_bits,
  output logic       m_valid,
  output logic [7:0] m_data,
  output logic       m_last,
  output logic       m_ok,
  output logic       aborted   // pulses when an abort ends a frame
);

  typedef struct packed {
    logic [7:0]  win_b;
    logic [7:0]  win_d;
    logic [2:0]  ones;
    logic        in_frame;
    logic        got_data;
    logic [7:0]  shreg;
    logic [2:0]  nbits;
    logic [15:0] crc;
  } rx_state_t;

  rx_state_t q, d;
  logic       byte_ev, end_ev, end_ok, abort_ev;
  logic [7:0] byte_val;

  always_comb begin
    logic out_b, out_d, tag, b;
    d        = q;
    byte_ev  = 1'b0;
    byte_val = '0;
    end_ev   = 1'b0;
    end_ok   = 1'b0;
    abort_ev = 1'b0;
    for (int i = 0; i < 2; i++) begin
      b       = rx_bits[i];
      out_b   = d.win_b[0];
      out_d   = d.win_d[0];
      tag     = !(b == 1'b0 && d.ones == 3'd5);
      d.win_b = {b, d.win_b[7:1]};
      d.win_d = {tag, d.win_d[7:1]};
      d.ones  = b ? ((d.ones == 3'd7) ? 3'd7 : d.ones + 3'd1) : 3'd0;
      if (out_d && d.in_frame) begin
        d.shreg       = {out_b, d.shreg[7:1]};
        d.got_data = 1'b1;
        if (d.nbits == 3'd7) begin
          byte_ev  = 1'b1;
          byte_val = d.shreg;
          d.crc    = fcs16_byte(d.crc, d.shreg);
        end
        d.nbits = d.nbits + 3'd1;
      end
      if (d.win_b == HDLC_FLAG) begin
        if (d.in_frame && d.got_data) begin
          end_ev = 1'b1;
          end_ok = (d.crc == FCS_GOOD) && (d.nbits == 3'd0);
        end
        d.win_d    = '0;
        d.in_frame = 1'b1;
        d.got_data = 1'b0;
        d.nbits    = '0;
        d.crc      = FCS_INIT;
      end else if (d.ones == 3'd7) begin
        if (d.in_frame && d.got_data) begin
          end_ev   = 1'b1;
          abort_ev = 1'b1;
        end
        d.win_d    = '0;
        d.in_frame = 1'b0;
        d.got_data = 1'b0;
      end
    end
  end

  // Byte pipeline that strips the FCS: p[0] oldest, p[2] youngest
  logic [7:0] p [3];
  logic [1:0] cnt;
  logic       end_pend, end_pend_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q           <= '0;
      cnt         <= '0;
      end_pend    <= 1'b0;
      end_pend_ok <= 1'b0;
      m_valid     <= 1'b0;
      m_data      <= '0;
      m_last      <= 1'b0;
      m_ok        <= 1'b0;
      aborted     <= 1'b0;
      p           <= '{default: '0};
    end else begin
      q        <= d;
      m_valid  <= 1'b0;
      m_last   <= 1'b0;
      m_ok     <= 1'b0;
      aborted  <= abort_ev;
      if (byte_ev) begin
        if (cnt == 2'd3) begin
          m_valid <= 1'b1;
          m_data  <= p[0];
        end else begin
          cnt <= cnt + 2'd1;
        end
        p[0] <= p[1];
        p[1] <= p[2];
        p[2] <= byte_val;
      end
      end_pend    <= end_ev;
      end_pend_ok <= end_ok;
      if (end_pend) begin
        if (cnt == 2'd3) begin
          m_valid <= 1'b1;
          m_data  <= p[0];
          m_last  <= 1'b1;
          m_ok    <= end_pend_ok;
        end
        cnt <= '0;
      end
    end
  end

endmodule
