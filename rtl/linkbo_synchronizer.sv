// linkbo_synchronizer - multi-flop synchronizer for the bus level.
//
// The wire is driven by another chip with its own clock, so its level is
// passed through STAGES flip-flops before any logic looks at it. The output
// lags the input by STAGES clock cycles. Flops reset to RESET_VAL; the idle
// bus is high because of its pull-up, so 1 is the default. The block is in
// the architecture; the depth of two flops is this design's choice.
module linkbo_synchronizer #(
  parameter int unsigned STAGES    = 2,
  parameter bit          RESET_VAL = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);

  logic [STAGES-1:0] sr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sr <= {STAGES{RESET_VAL}};
    else        sr <= {sr[STAGES-2:0], d};
  end

  assign q = sr[STAGES-1];

  initial begin
    assert (STAGES >= 2) else $error("linkbo_synchronizer needs at least two stages");
  end

endmodule
