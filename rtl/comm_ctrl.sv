// Communication control: chooses which of the two E-ports carries the link to
// the GBT-SCA.
//
// The GBT-SCA has a master and a standby (AUX) E-link port, and the paper's
// communication control module "is used to select the GBT-SCA channel (E-port
// Master/E-port AUX)". Here the requested port (sel_aux) takes effect only
// while the HDLC transmitter is between frames, so a frame is never split
// across ports. The transmit bits go to the active port and the idle port
// sends ones; the receive bits are taken from the active port. A switch
// pulses switched for one clock. Switching only between frames and driving
// ones on the idle port are this design's choices.
module comm_ctrl (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sel_aux,      // requested port: 0 master, 1 AUX
  input  logic       tx_in_frame,  // HDLC transmitter is inside a frame
  input  logic [1:0] tx_bits,
  output logic [1:0] tx_master,
  output logic [1:0] tx_aux,
  input  logic [1:0] rx_master,
  input  logic [1:0] rx_aux,
  output logic [1:0] rx_bits,
  output logic       active_aux,   // port now in use
  output logic       switched
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_aux <= 1'b0;
      switched   <= 1'b0;
    end else begin
      switched <= 1'b0;
      if (!tx_in_frame && sel_aux != active_aux) begin
        active_aux <= sel_aux;
        switched   <= 1'b1;
      end
    end
  end

  always_comb begin
    tx_master = active_aux ? 2'b11 : tx_bits;
    tx_aux    = active_aux ? tx_bits : 2'b11;
    rx_bits   = active_aux ? rx_aux : rx_master;
  end

endmodule
