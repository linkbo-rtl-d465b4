// linkbo_piso - parallel-in serial-out shift register (PISO8/PISO3/PISO4).
//
// `load` captures W bits; every `shift` moves them one place towards the
// MSB, and `dout` is always the current MSB, so the word leaves MSB first.
// The transmitter uses W = 8 for payload bytes, 3 for the size field and 4
// for the CRC. The block is in the architecture; MSB-first order is this
// design's choice. Timing: `load` has priority; both act on the next edge.
module linkbo_piso #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [W-1:0] din,
  input  logic         shift,
  output logic         dout
);

  logic [W-1:0] sr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     sr <= '0;
    else if (load)  sr <= din;
    else if (shift) sr <= {sr[W-2:0], 1'b0};
  end

  assign dout = sr[W-1];

endmodule
