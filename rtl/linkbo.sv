// linkbo - one LinkBo single-wire interface node.
//
// LinkBo links chips over a single open-drain wire that a pull-up holds high
// and any node can pull low (wired-AND). Every node is both sender and
// receiver (peer to peer). A message is Manchester coded and consists of a
// 2-slot SYNC, a 3-bit SIZE (low-priority messages only), 1 byte (high
// priority, HP) or 1..7 bytes (low priority, LP) of payload, a 4-bit CRC and
// a 1-slot acknowledge returned by the receiver. HP messages start with a
// full slot of low level, which lets them win arbitration against LP traffic
// and interrupt an LP message already on the wire.
//
// Structure: an input synchronizer, the TOP FSM, the transmitter with its
// prescaler (TX PSC), the receiver with its prescaler (RX PSC) and the
// driver, whose output register drives the pad. The pad itself (a
// tri-state or open-drain buffer) is outside: drive the wire low when
// `bus_out` is 0 and release it when 1, and feed the wire level to `bus_in`.
//
// Timing: one Manchester slot is MB_CYCLES clock cycles (10 by default, so
// a 3 MHz clock gives 300 kbit/s); the bit rate is chosen by the clock
// frequency. An HP message takes 15 slots and an LP message 10 + 8*size
// slots, ACK included. `bus_out` lags internal decisions by one cycle and
// `bus_in` reaches the logic two cycles after it changes.
//
// Host interface: pulse `send` with `hp`, `size` and the first byte on
// `tx_in`; change `tx_in` to the next byte after each `upd` pulse; `tx_end`
// ends the message with `tx_error` (no ACK or lost) and `tx_lost` (lost
// arbitration). Received bytes arrive with `rx_recv` on `rx_byte`, the end
// of a message with `rx_end`, `rx_error` and `rx_hp`.
//
// The block structure follows the paper's architecture; the host signal
// set beyond SEND/UPD/END/ERROR/RECV/BYTE is this design's choice.
// Some sub-block outputs are not needed at this level and stay unread: the
// TOP FSM's irq_start flag (an observation point for interrupts), the TX PSC
// count and the RX PSC mask and ticks (the RX PSC is used as a stopwatch).
module linkbo
  import linkbo_pkg::*;
#(
  parameter int unsigned MB_CYCLES = MB_CYCLES_DEF,
  parameter int unsigned CW        = CW_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  // transmit side of the host interface
  input  logic              send,
  input  logic              hp,
  input  logic [SIZE_W-1:0] size,
  input  logic [BYTE_W-1:0] tx_in,
  output logic              upd,
  output logic              tx_end,
  output logic              tx_error,
  output logic              tx_lost,
  // receive side of the host interface
  output logic              rx_recv,
  output logic [BYTE_W-1:0] rx_byte,
  output logic              rx_end,
  output logic              rx_error,
  output logic              rx_hp,
  // pad
  input  logic              bus_in,
  output logic              bus_out
);

  logic          bus_s;
  logic          tx_start, own_tx, tx_busy_sel, irq_start;
  logic          rx_busy, rx_lp_active, rx_ack, rx_msk;
  logic          tx_out, tx_msk, s_sel, m_sel, tx_busy;
  logic          txp_load, txp_mask, txp_half, txp_slot;
  logic [CW-1:0] txp_cnt;
  logic          rxp_load;
  logic [CW-1:0] rxp_load_val, rxp_cnt;
  logic          rxp_mask_nc, rxp_half_nc, rxp_slot_nc;

  linkbo_synchronizer #(.STAGES(2), .RESET_VAL(1'b1)) u_sync_in (
    .clk, .rst_n, .d(bus_in), .q(bus_s));

  linkbo_top_fsm u_top_fsm (
    .clk, .rst_n, .send, .hp, .bus(bus_s), .rx_busy, .rx_lp_active, .tx_end, .tx_lost,
    .tx_start, .own_tx, .tx_busy(tx_busy_sel), .irq_start);

  linkbo_psc #(.CW(CW)) u_tx_psc (
    .clk, .rst_n, .load(txp_load), .load_val('0), .period(CW'(MB_CYCLES)),
    .count(txp_cnt), .mask(txp_mask), .half_tick(txp_half), .slot_tick(txp_slot));

  linkbo_tx #(.MB_CYCLES(MB_CYCLES), .CW(CW)) u_tx (
    .clk, .rst_n, .start(tx_start), .hp, .size, .tx_in,
    .upd, .tx_end, .tx_error, .arb_lost(tx_lost),
    .psc_load(txp_load), .psc_mask(txp_mask), .psc_half_tick(txp_half),
    .psc_slot_tick(txp_slot), .bus(bus_s),
    .tx_out, .tx_msk, .s_sel, .m_sel, .tx_busy);

  linkbo_psc #(.CW(CW)) u_rx_psc (
    .clk, .rst_n, .load(rxp_load), .load_val(rxp_load_val), .period('1),
    .count(rxp_cnt), .mask(rxp_mask_nc), .half_tick(rxp_half_nc), .slot_tick(rxp_slot_nc));

  linkbo_rx #(.MB_CYCLES(MB_CYCLES), .CW(CW)) u_rx (
    .clk, .rst_n, .bus(bus_s), .own_tx,
    .psc_load(rxp_load), .psc_load_val(rxp_load_val), .psc_cnt(rxp_cnt),
    .recv(rx_recv), .byte_out(rx_byte), .rx_end, .rx_error, .rx_hp,
    .rx_busy, .rx_lp_active, .rx_ack, .rx_msk);

  linkbo_driver u_driver (
    .clk, .rst_n, .rx_ack, .tx_out, .tx_msk, .rx_msk,
    .tx_busy(tx_busy_sel || tx_busy), .m_sel, .s_sel, .bus_out);

endmodule
