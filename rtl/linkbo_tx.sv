// linkbo_tx - LinkBo transmitter.
//
// Sends one message per `start` pulse, slot by slot on the ticks of its own
// prescaler (TX PSC, loaded with 0 by `psc_load` on start):
//   HP: SYNC(low slot, 1) PAYLOAD(8 bits) CRC(4) ACK(1)        = 15 slots
//   LP: SYNC(1, 1) SIZE(3) PAYLOAD(8 x size bits) CRC(4) ACK(1) = 18..66 slots
// Inside are the TX FSM, PISO8 for payload bytes, PISO3 for the size field,
// the CRC-4 LFSR whose result is loaded into PISO4, a byte counter (BYTC), a
// field multiplexer that selects the NRZ bit `tx_out`, and the acknowledge
// checker (ACK_CHK). All fields go out MSB first; the CRC covers the payload.
//
// Host interface: `hp`, `size` (1..7 bytes, LP only) and the first byte on
// `tx_in` are sampled on `start`. `upd` pulses each time a byte is taken from
// `tx_in`; for LP messages the host then has 8 slots to present the next
// byte. `tx_end` pulses once at the end of the message, with `tx_error` set
// if no acknowledge arrived or arbitration was lost (`arb_lost` also set).
//
// Arbitration (wired-AND bus): at the last cycle of every half slot in which
// the transmitter released the bus (drove 1), the synchronized bus must be 1;
// if it reads 0 another node is driving and this transmitter stops at once.
// The check needs the loop delay (output register + 2-flop synchronizer = 3
// cycles) to fit in half a slot, hence MB_CYCLES >= 8.
//
// ACK_CHK: during the ACK slot the bus is released. From half a slot into it
// the checker waits for the bus to go low and then high again (a Manchester
// 1 from the receiver); it gives up two slots after the ACK slot started.
// The extra time absorbs the receiver's synchronizer delay.
//
// From the paper: the message format, the sub-blocks and their names, CRC
// over the payload, UPD/SEND/END/ERROR signals. This design's choice: bit
// order, the half-slot arbitration check, the ACK window and the UPD timing.
// `tx_msk` is the TX PSC mask passed on unchanged; it is an output so that
// the driver takes its mask from the transmitter, as in the block diagram.
// The size assertion at the end samples rst_n on the clock; a lint note
// that rst_n is used both asynchronously and synchronously refers only to
// that assertion, not to any flip-flop.
module linkbo_tx
  import linkbo_pkg::*;
#(
  parameter int unsigned MB_CYCLES = MB_CYCLES_DEF,
  parameter int unsigned CW        = CW_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  // host side
  input  logic              start,
  input  logic              hp,
  input  logic [SIZE_W-1:0] size,
  input  logic [BYTE_W-1:0] tx_in,
  output logic              upd,
  output logic              tx_end,
  output logic              tx_error,
  output logic              arb_lost,
  // TX PSC
  output logic              psc_load,
  input  logic              psc_mask,
  input  logic              psc_half_tick,
  input  logic              psc_slot_tick,
  // synchronized bus level
  input  logic              bus,
  // to the driver
  output logic              tx_out,
  output logic              tx_msk,
  output logic              s_sel,
  output logic              m_sel,
  output logic              tx_busy
);

  typedef enum logic [2:0] {T_IDLE, T_SYNC1, T_SYNC2, T_SIZE, T_DATA, T_CRC, T_ACK} state_e;

  state_e            state;
  field_e            fld;
  logic              hp_q;
  logic [SIZE_W-1:0] nbytes;      // bytes to send
  logic [SIZE_W-1:0] bytc;        // bytes already sent
  logic [2:0]        btc;         // bit within the current field
  logic [CW-1:0]     ack_t;       // cycles into the ACK slot
  logic              ack_low;     // ACK_CHK saw the low half

  logic              p8_out, p3_out, p4_out;
  logic              p8_load, p3_load, p4_load;
  logic              p8_shift, p3_shift, p4_shift;
  logic              crc_clear, crc_en;
  logic [CRC_W-1:0]  crc, crc_next;  // crc unused: PISO4 loads crc_next with the last bit
  logic              crc_zero;  // unused: the TX only sends the remainder

  logic              driving, drove_high, arb_fail;
  logic              last_bit_of_byte, last_byte;

  // ---------------------------------------------------------------- datapath
  linkbo_piso #(.W(BYTE_W)) u_piso8 (
    .clk, .rst_n, .load(p8_load), .din(tx_in), .shift(p8_shift), .dout(p8_out));
  linkbo_piso #(.W(SIZE_W)) u_piso3 (
    .clk, .rst_n, .load(p3_load), .din(size), .shift(p3_shift), .dout(p3_out));
  linkbo_piso #(.W(CRC_W)) u_piso4 (
    .clk, .rst_n, .load(p4_load), .din(crc_next), .shift(p4_shift), .dout(p4_out));
  linkbo_crc4 u_crc (
    .clk, .rst_n, .clear(crc_clear), .en(crc_en), .din(p8_out),
    .crc, .crc_next, .zero(crc_zero));

  // field multiplexer
  always_comb begin
    unique case (state)
      T_SIZE:  fld = FLD_SIZE;
      T_DATA:  fld = FLD_DATA;
      T_CRC:   fld = FLD_CRC;
      default: fld = FLD_SYNC;
    endcase
    unique case (fld)
      FLD_SIZE: tx_out = p3_out;
      FLD_DATA: tx_out = p8_out;
      FLD_CRC:  tx_out = p4_out;
      default:  tx_out = 1'b1;           // both SYNC slots carry a 1
    endcase
  end

  assign tx_msk  = psc_mask;
  assign tx_busy = state != T_IDLE;
  assign driving = state inside {T_SYNC1, T_SYNC2, T_SIZE, T_DATA, T_CRC};
  assign s_sel   = driving;
  assign m_sel   = (state == T_SYNC1) && hp_q;

  // value this node is driving in the current half slot
  assign drove_high = !m_sel && (tx_out ^ psc_mask);
  assign arb_fail   = driving && (psc_half_tick || psc_slot_tick) && drove_high && !bus;

  assign last_bit_of_byte = btc == 3'd7;
  assign last_byte        = bytc == nbytes - 1'b1;

  // ------------------------------------------------------------ control path
  always_comb begin
    psc_load  = start && (state == T_IDLE);
    p8_load   = 1'b0;
    p3_load   = 1'b0;
    p4_load   = 1'b0;
    p8_shift  = 1'b0;
    p3_shift  = 1'b0;
    p4_shift  = 1'b0;
    crc_clear = 1'b0;
    crc_en    = 1'b0;
    if (state == T_IDLE && start) begin
      p8_load   = 1'b1;
      p3_load   = 1'b1;
      crc_clear = 1'b1;
    end else if (psc_slot_tick && !arb_fail) begin
      unique case (state)
        T_SIZE: p3_shift = 1'b1;
        T_DATA: begin
          crc_en = 1'b1;
          if (last_bit_of_byte) begin
            if (last_byte) p4_load = 1'b1;
            else           p8_load = 1'b1;
          end else begin
            p8_shift = 1'b1;
          end
        end
        T_CRC:   p4_shift = 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= T_IDLE;
      hp_q     <= 1'b0;
      nbytes   <= '0;
      bytc     <= '0;
      btc      <= '0;
      ack_t    <= '0;
      ack_low  <= 1'b0;
      upd      <= 1'b0;
      tx_end   <= 1'b0;
      tx_error <= 1'b0;
      arb_lost <= 1'b0;
    end else begin
      upd    <= p8_load;
      tx_end <= 1'b0;
      if (state == T_IDLE) begin
        if (start) begin
          state    <= T_SYNC1;
          hp_q     <= hp;
          nbytes   <= hp ? SIZE_W'(1) : size;
          bytc     <= '0;
          btc      <= '0;
          tx_error <= 1'b0;
          arb_lost <= 1'b0;
        end
      end else if (arb_fail) begin
        state    <= T_IDLE;
        tx_end   <= 1'b1;
        tx_error <= 1'b1;
        arb_lost <= 1'b1;
      end else if (state == T_ACK) begin
        ack_t <= ack_t + 1'b1;
        if (ack_t >= CW'(MB_CYCLES / 2)) begin
          if (!bus) ack_low <= 1'b1;
          if (ack_low && bus) begin
            state    <= T_IDLE;
            tx_end   <= 1'b1;
            tx_error <= 1'b0;
          end else if (ack_t == CW'(2 * MB_CYCLES - 1)) begin
            state    <= T_IDLE;
            tx_end   <= 1'b1;
            tx_error <= 1'b1;
          end
        end
      end else if (psc_slot_tick) begin
        unique case (state)
          T_SYNC1: state <= T_SYNC2;
          T_SYNC2: state <= hp_q ? T_DATA : T_SIZE;
          T_SIZE: begin
            btc <= btc + 1'b1;
            if (btc == 3'd2) begin
              btc   <= '0;
              state <= T_DATA;
            end
          end
          T_DATA: begin
            btc <= btc + 1'b1;
            if (last_bit_of_byte) begin
              btc  <= '0;
              bytc <= bytc + 1'b1;
              if (last_byte) state <= T_CRC;
            end
          end
          T_CRC: begin
            btc <= btc + 1'b1;
            if (btc == 3'd3) begin
              btc     <= '0;
              ack_t   <= '0;
              ack_low <= 1'b0;
              state   <= T_ACK;
            end
          end
          default: ;
        endcase
      end
    end
  end

  initial begin
    assert (MB_CYCLES >= 8 && MB_CYCLES % 2 == 0)
      else $error("linkbo_tx: MB_CYCLES must be even and at least 8");
  end

  // A message needs 1..7 bytes; the size value 0 is reserved.
  property p_size_valid;
    @(posedge clk) disable iff (!rst_n) (start && state == T_IDLE && !hp) |-> size != '0;
  endproperty
  a_size_valid: assert property (p_size_valid);

endmodule
