// linkbo_sipo - serial-in parallel-out shift register.
//
// Each `shift` moves `din` in at the LSB, so after W shifts of an MSB-first
// stream `q` holds the word. The receiver uses it to rebuild payload bytes.
// The block is in the architecture; the order matches the transmitter.
module linkbo_sipo #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         shift,
  input  logic         din,
  output logic [W-1:0] q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     q <= '0;
    else if (shift) q <= {q[W-2:0], din};
  end

endmodule
