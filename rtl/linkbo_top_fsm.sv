// linkbo_top_fsm - TOP FSM: decides when the transmitter may start.
//
// A `send` pulse from the host is remembered until it is served. The
// transmitter is started (`tx_start`) when the bus is free: the receiver is
// idle and the synchronized bus is high. A high-priority request that
// arrives while a low-priority message is being received is not made to
// wait: the FSM waits only for the next falling edge on the bus and starts
// the HP message on it, so its long SYNC low begins together with that edge.
// The LP sender then loses arbitration (it releases the bus but reads low)
// and stops, and every receiver sees the long low as an interrupt.
//
// While this node transmits, `own_tx` tells the receiver that the message on
// the bus is its own, and `tx_busy` makes the driver use the transmitter's
// mask. When the transmitter ends normally (with or without ACK) own_tx
// stays high until the receiver has finished the message too. When it ends
// by lost arbitration both drop at once, and the receiver goes on with the
// winner's message as an ordinary receiver. The request is cleared when the transmitter starts; after an
// error the host decides whether to send again.
//
// The role of the TOP FSM (starting and stopping TX/RX around interrupts)
// is the paper's; the start rule and the wait-for-edge interrupt scheme are
// this design's choice. Timing: tx_start is a one-cycle pulse.
module linkbo_top_fsm (
  input  logic clk,
  input  logic rst_n,
  input  logic send,
  input  logic hp,
  input  logic bus,            // synchronized bus level
  input  logic rx_busy,
  input  logic rx_lp_active,
  input  logic tx_end,
  input  logic tx_lost,
  output logic tx_start,
  output logic own_tx,
  output logic tx_busy,
  output logic irq_start       // tx_start that interrupts an LP message
);

  typedef enum logic [1:0] {F_IDLE, F_WAIT_EDGE, F_TX, F_HOLD} state_e;

  state_e state;
  logic   pend, req, bus_q, bus_fall, bus_free;

  assign req      = pend || send;
  assign bus_fall = bus_q && !bus;
  assign bus_free = !rx_busy && bus && bus_q;

  always_comb begin
    tx_start  = 1'b0;
    irq_start = 1'b0;
    unique case (state)
      F_IDLE:      tx_start = req && bus_free;
      F_WAIT_EDGE: begin
        tx_start  = bus_fall || bus_free;
        irq_start = bus_fall;
      end
      default: ;
    endcase
  end

  assign own_tx  = state inside {F_TX, F_HOLD};
  assign tx_busy = state == F_TX;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= F_IDLE;
      pend  <= 1'b0;
      bus_q <= 1'b1;
    end else begin
      bus_q <= bus;
      if (tx_start)  pend <= 1'b0;
      else if (send) pend <= 1'b1;
      unique case (state)
        F_IDLE:
          if (tx_start)                       state <= F_TX;
          else if (req && hp && rx_lp_active) state <= F_WAIT_EDGE;
        F_WAIT_EDGE:
          if (tx_start) state <= F_TX;
        F_TX:
          if (tx_end) state <= tx_lost ? F_IDLE : F_HOLD;
        F_HOLD:
          if (!rx_busy) state <= F_IDLE;
        default: state <= F_IDLE;
      endcase
    end
  end

endmodule
