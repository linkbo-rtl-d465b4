// linkbo_lbdet - low-bus detector (LBDET).
//
// Counts how long the synchronized bus has been low since its last falling
// edge (`low_cnt` = cycles elapsed since the falling edge, 0 while high) and
// pulses `lb_int` once when the low level has lasted `thresh` cycles. Valid
// Manchester data is never low for more than one slot, so such a long low is
// either the first SYNC slot of a high-priority message or a high-priority
// sender interrupting other traffic. The receiver uses the pulse to abandon
// what it is doing and re-synchronise to the HP message, taking `low_cnt` as
// the time already spent in the SYNC low.
//
// The block and its purpose are the paper's; the threshold of 1.25 slots
// (set by the caller) and the counter form are this design's choice.
module linkbo_lbdet #(
  parameter int unsigned CW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          bus,       // synchronized bus level
  input  logic [CW-1:0] thresh,
  output logic [CW-1:0] low_cnt,
  output logic          lb_int
);

  logic bus_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bus_q   <= 1'b1;
      low_cnt <= '0;
    end else begin
      bus_q <= bus;
      if (bus)                 low_cnt <= '0;
      else if (bus_q)          low_cnt <= CW'(1);      // cycle after the fall
      else if (low_cnt != '1)  low_cnt <= low_cnt + 1'b1;
    end
  end

  assign lb_int = !bus && !bus_q && (low_cnt == thresh);

endmodule
