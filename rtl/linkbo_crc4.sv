// linkbo_crc4 - bit-serial CRC-4 generator and checker.
//
// Four flip-flops in a linear-feedback shift register compute the remainder
// of the bit stream modulo x^4 + x + 1, MSB first. The transmitter feeds the
// payload bits and sends the remainder; the receiver feeds payload and CRC
// bits, and the stream is intact when the remainder is zero (`zero`).
// `crc_next` is the value the register takes if `en` is high this cycle,
// which the transmitter loads into its CRC shift register on the last
// payload bit. Polynomial and LFSR form follow the paper; the zero initial
// value and the MSB-first order are this design's choice.
//
// Timing: `clear` has priority over `en`; both act on the next clock edge.
module linkbo_crc4
  import linkbo_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             en,
  input  logic             din,
  output logic [CRC_W-1:0] crc,
  output logic [CRC_W-1:0] crc_next,
  output logic             zero
);

  assign crc_next = crc4_step(crc, din);
  assign zero     = crc == '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     crc <= '0;
    else if (clear) crc <= '0;
    else if (en)    crc <= crc_next;
  end

endmodule
