// linkbo_rx_sync - message start detection and slot measurement (SYNC).
//
// Every message starts with two SYNC slots. A high-priority (HP) message
// holds the bus low for the whole first slot and sends a Manchester 1 in the
// second, so the bus is low for 1.5 slots and then rises. A low-priority (LP)
// message sends two Manchester 1s: low half, high half, low half, rise. In
// both cases the final rising edge lies 1.5 slots after the first falling
// edge, so that distance, measured in local clock cycles, times 2/3 (rounded
// to the nearest integer) is the
// sender's slot length in this receiver's clock domain.
//
// Operation: when `arm` is high a falling edge starts the measurement and
// asks the receiver's PSC to load 1 (`psc_load`), after which `c` is the
// number of cycles since that edge. At the first rising edge, a low period
// longer than `hp_thresh` means HP and ends the measurement; otherwise the
// block waits for the second falling and rising edges (LP). `done` pulses
// with `is_hp` and `slot` valid in the same cycle; `err` pulses if the bus
// stays in one state past `max_cnt` cycles. `force_hp` (from the low-bus
// detector) jumps into the long-low state of an HP SYNC for an interrupt.
//
// The classification rule and the 1.5-slot measurement follow the paper;
// the timeout and the state encoding are this design's choice.
module linkbo_rx_sync #(
  parameter int unsigned CW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          arm,
  input  logic          bus_fall,
  input  logic          bus_rise,
  input  logic [CW-1:0] c,
  input  logic [CW-1:0] hp_thresh,
  input  logic [CW-1:0] max_cnt,
  input  logic          force_hp,
  output logic          psc_load,
  output logic          busy,
  output logic          done,
  output logic          is_hp,
  output logic [CW-1:0] slot,
  output logic          err
);

  typedef enum logic [1:0] {S_IDLE, S_LOW1, S_HIGH1, S_LOW2} state_e;
  state_e state, state_d;

  logic [CW+1:0] twice;

  assign twice = {1'b0, c, 1'b1};     // 2c + 1: rounds 2c/3 to nearest
  assign slot  = CW'(twice / 3);
  assign busy  = state != S_IDLE;

  always_comb begin
    state_d  = state;
    psc_load = 1'b0;
    done     = 1'b0;
    is_hp    = 1'b0;
    err      = 1'b0;
    if (force_hp) begin
      state_d = S_LOW1;
    end else begin
      unique case (state)
        S_IDLE:
          if (arm && bus_fall) begin
            state_d  = S_LOW1;
            psc_load = 1'b1;
          end
        S_LOW1:
          if (bus_rise) begin
            if (c > hp_thresh) begin
              done    = 1'b1;
              is_hp   = 1'b1;
              state_d = S_IDLE;
            end else begin
              state_d = S_HIGH1;
            end
          end else if (c > max_cnt) begin
            err     = 1'b1;
            state_d = S_IDLE;
          end
        S_HIGH1:
          if (bus_fall) begin
            state_d = S_LOW2;
          end else if (c > max_cnt) begin
            err     = 1'b1;
            state_d = S_IDLE;
          end
        S_LOW2:
          if (bus_rise) begin
            done    = 1'b1;
            state_d = S_IDLE;
          end else if (c > max_cnt) begin
            err     = 1'b1;
            state_d = S_IDLE;
          end
        default: state_d = S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else        state <= state_d;
  end

endmodule
