// linkbo_driver - Manchester encoder and bus output stage.
//
// The transmitter supplies the NRZ data bit (tx_out) and its PSC mask
// (tx_msk, high in the first half of each slot); their XOR is the IEEE 802.3
// Manchester waveform: a 1 is low then high, a 0 high then low. The driver
// multiplexes:
//   data   = rx_ack ? 0 : tx_out         (acknowledge carries no data)
//   mask   = tx_busy ? tx_msk : rx_msk   (whose slot timing is used)
//   code   = m_sel ? 0 : data ^ mask     (m_sel forces the long HP SYNC low)
//   bus    = (rx_ack | s_sel) ? code : 1 (1 releases the open-drain wire)
// and registers the result, which removes glitches from the output.
// The receiver's rx_msk is low in the first and high in the second half of
// the ACK slot, so an acknowledge is a Manchester 1.
//
// The XOR encoder, the multiplexers with constant 0 and 1 inputs, the
// select names and the output register are taken from the architecture
// figure; which value each select picks, and the polarity of rx_msk, are
// this design's reading. Timing: bus_out follows the inputs by one cycle.
module linkbo_driver (
  input  logic clk,
  input  logic rst_n,
  input  logic rx_ack,
  input  logic tx_out,
  input  logic tx_msk,
  input  logic rx_msk,
  input  logic tx_busy,
  input  logic m_sel,
  input  logic s_sel,
  output logic bus_out
);

  logic data, msk, code, bus_d;

  always_comb begin
    data  = rx_ack ? 1'b0 : tx_out;
    msk   = tx_busy ? tx_msk : rx_msk;
    code  = m_sel ? 1'b0 : (data ^ msk);
    bus_d = (rx_ack || s_sel) ? code : 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bus_out <= 1'b1;
    else        bus_out <= bus_d;
  end

endmodule
