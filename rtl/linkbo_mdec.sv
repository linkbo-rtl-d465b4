// linkbo_mdec - Manchester decoder with re-synchronization (MDEC, ReSYNC).
//
// Every Manchester bit has a transition in the middle of its slot; between
// two equal bits there is a second transition at the slot boundary. The
// decoder times every bus edge against the last mid-slot edge, using the
// receiver's PSC value `c` (cycles since that edge) and the measured slot
// length `slot` (S), with Q = S/4, M = round(3S/4) and L = S + S/2 - 1:
//
//   Q  <= c <  M     boundary edge, ignored
//   M  <= c <= L     mid-slot edge: the bit is 1 on a rising, 0 on a falling
//                    edge; the PSC is reloaded (re-synchronization), so an
//                    early or late edge moves the timing of the next bit
//   otherwise        coding error, as is no edge by c = L
//
// The late side reaches almost to the next slot boundary because late edges
// are the common case on this wire: rising edges are slowed by the pull-up,
// and while two nodes drive the same bits during arbitration on slightly
// different clocks, each rising edge follows the later and each falling
// edge the earlier of them. The early side is the point halfway between
// where a boundary edge (S/2) and a mid-slot edge (S) belong.
//
// The block is combinational: `bit_valid`, `bit_val`, `err` and `psc_load`
// are valid in the cycle of the edge; `en` gates all outputs except
// `bit_val`, which is simply the edge direction and only means something
// while `bit_valid` is high.
// Decoding on the mid-slot edge and re-aligning on it follow the paper; the
// tolerance windows are this design's choice.
module linkbo_mdec #(
  parameter int unsigned CW = 8
) (
  input  logic          en,
  input  logic          bus_rise,
  input  logic          bus_fall,
  input  logic [CW-1:0] c,
  input  logic [CW-1:0] slot,
  output logic          bit_valid,
  output logic          bit_val,
  output logic          psc_load,
  output logic          err
);

  logic [CW-1:0] q, mid_lo;
  logic [CW:0]   mid_hi;
  logic          edge_seen, in_mid, in_bnd;

  assign q         = slot >> 2;
  // round(3S/4): halfway between a boundary edge (S/2) and a mid-slot edge (S)
  assign mid_lo    = CW'(({2'b0, slot} + {1'b0, slot, 1'b0} + (CW+2)'(2)) >> 2);
  assign mid_hi    = {1'b0, slot} + {2'b0, slot[CW-1:1]} - 1'b1;
  assign edge_seen = bus_rise || bus_fall;
  assign in_mid    = (c >= mid_lo) && ({1'b0, c} <= mid_hi);
  assign in_bnd    = (c >= q) && (c < mid_lo);

  always_comb begin
    bit_valid = 1'b0;
    bit_val   = bus_rise;
    psc_load  = 1'b0;
    err       = 1'b0;
    if (en) begin
      if (edge_seen) begin
        if (in_mid) begin
          bit_valid = 1'b1;
          psc_load  = 1'b1;
        end else if (!in_bnd) begin
          err = 1'b1;
        end
      end else if ({1'b0, c} > mid_hi) begin
        err = 1'b1;
      end
    end
  end

endmodule
