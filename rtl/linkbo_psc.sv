// linkbo_psc - prescaler counter (PSC).
//
// A wrapping cycle counter that divides the clock into Manchester slots.
// The transmitter uses one copy with period = cycles per slot: `mask` is high
// in the first half of the slot and low in the second, the periodic mask that
// the driver XORs with the NRZ data bit, and `slot_tick`/`half_tick` mark the
// last cycle of the slot and of its first half. The receiver uses a second
// copy as a stopwatch: it loads 1 on the cycle of a bus edge, so `count`
// then equals the number of cycles elapsed since that edge, and it gives a
// large period so that it never wraps within a message.
//
// Timing: `load` has priority and takes effect on the next clock edge.
// Using one counter for both roles follows the architecture; the load port
// and the elapsed-time convention are this design's choice.
module linkbo_psc #(
  parameter int unsigned CW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [CW-1:0] load_val,
  input  logic [CW-1:0] period,     // count runs 0 .. period-1, period >= 2
  output logic [CW-1:0] count,
  output logic          mask,       // 1 in the first half of the period
  output logic          half_tick,  // last cycle of the first half
  output logic          slot_tick   // last cycle of the period
);

  logic [CW-1:0] half;

  assign half      = period >> 1;
  assign mask      = count < half;
  assign half_tick = count == half - 1'b1;
  assign slot_tick = count == period - 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         count <= '0;
    else if (load)      count <= load_val;
    else if (slot_tick) count <= '0;
    else                count <= count + 1'b1;
  end

endmodule
