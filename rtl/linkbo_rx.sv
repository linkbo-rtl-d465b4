// linkbo_rx - LinkBo receiver.
//
// Watches the synchronized bus, recovers the sender's slot timing, decodes
// the message, checks its CRC and acknowledges it. Sub-blocks:
//   SYNC  (linkbo_rx_sync) finds the start, tells HP from LP and measures the
//         slot length S in local cycles;
//   MDEC/ReSYNC (linkbo_mdec) turns mid-slot edges into bits and re-aligns
//         the timing on each of them;
//   SIPO  rebuilds bytes; SiDEC (here) turns the 3-bit size into a byte count
//         and rejects the reserved value 0;
//   CRC-4 divides payload plus CRC; a zero remainder means no error;
//   LBDET (linkbo_lbdet) flags a low bus longer than 1.25 measured slots;
//   BTC/BYTC count bits and bytes; the RX FSM sequences the fields; the ACK
//         logic drives the acknowledge slot through the driver.
// The RX PSC is outside this block: the receiver loads it (`psc_load`,
// `psc_load_val`) and reads the cycles elapsed since the last timing edge
// (`psc_cnt`).
//
// Outputs to the host: `recv` pulses with each payload byte on `byte_out`;
// `rx_end` pulses at the end of a message, with `rx_error` set for a CRC
// error, a coding error or a message cut off by an interrupt; `rx_hp` tells
// the priority of the last message. `own_tx` (from the TOP FSM) says the
// message on the bus is this node's own: it is then decoded but not
// reported and not acknowledged. If own_tx drops in the middle (lost
// arbitration), the message of the winner is reported and acknowledged;
// errors and aborts of a message that began as this node's own are not
// reported (the transmitter reports them).
//
// Acknowledge: the ACK slot starts half a slot after the last CRC mid-slot
// edge. If the CRC is correct the receiver drives a Manchester 1 in that slot
// (`rx_ack` high for the slot, `rx_msk` low in its first half), otherwise it
// leaves the bus high. Interrupt: when LBDET fires while a message is being
// decoded, the receiver drops it and continues as in the long-low slot of an
// HP SYNC, loading the PSC with the low time already elapsed minus the
// interrupting node's reaction time (4 cycles: the interrupter starts its
// forced low on the LP falling edge it sees through its own synchronizer),
// so that the slot measured from the HP SYNC is not stretched.
//
// The sub-blocks, the ACK rule and the HP interrupt are the paper's. The
// tolerance windows, the error recovery (wait for two idle slots), bit
// order and the handling of size 0 are this design's choices.
module linkbo_rx
  import linkbo_pkg::*;
#(
  parameter int unsigned MB_CYCLES = MB_CYCLES_DEF,
  parameter int unsigned CW        = CW_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bus,           // synchronized bus level
  input  logic              own_tx,
  // RX PSC
  output logic              psc_load,
  output logic [CW-1:0]     psc_load_val,
  input  logic [CW-1:0]     psc_cnt,
  // host side
  output logic              recv,
  output logic [BYTE_W-1:0] byte_out,
  output logic              rx_end,
  output logic              rx_error,
  output logic              rx_hp,
  // status for the TOP FSM
  output logic              rx_busy,
  output logic              rx_lp_active,
  // to the driver
  output logic              rx_ack,
  output logic              rx_msk
);

  localparam logic [CW-1:0] HP_THRESH = CW'(hp_threshold(MB_CYCLES));
  localparam logic [CW-1:0] SYNC_MAX  = CW'(3 * MB_CYCLES);
  localparam logic [CW-1:0] IDLE_GAP  = CW'(2 * MB_CYCLES);
  // An interrupting node pulls the wire low this many cycles after the LP
  // falling edge it reacts to (2 synchronizer flops, 1 TOP FSM cycle, 1
  // driver register); that part of the long low is not its SYNC slot.
  localparam logic [CW-1:0] IRQ_LAT   = CW'(4);

  typedef enum logic [2:0] {R_IDLE, R_SYNC, R_SIZE, R_DATA, R_CRC, R_ACK, R_ERR} state_e;

  state_e            state;
  logic              bus_q, bus_rise, bus_fall;
  logic [CW-1:0]     slot;            // measured slot length S
  logic [CW-1:0]     lb_thresh;       // interrupt threshold, S + S/4 + 1
  logic [CW-1:0]     half;
  logic              hp_q;
  logic [SIZE_W-1:0] nbytes, bytc;
  logic [2:0]        btc;
  logic [SIZE_W-1:0] size_sr;  // MSB unused: the next bit completes the field
  logic [SIZE_W-1:0] size_dec;
  logic              ack_ok;
  logic              mine;            // the message began as this node's own

  // sub-block signals
  logic              sy_arm, sy_force, sy_load, sy_busy, sy_done, sy_hp, sy_err;
  logic [CW-1:0]     sy_slot;
  logic              md_en, md_valid, md_bit, md_load, md_err;
  logic              sipo_shift;
  logic              crc_clear, crc_en, crc_zero;  // crc_zero unused: the check looks one bit ahead (crc_nxt)
  logic [CRC_W-1:0]  crc_val, crc_nxt;  // crc_val unused for the same reason
  logic [CW-1:0]     lb_cnt;
  logic              lb_int, lb_take;
  logic              decoding;

  assign bus_rise = bus && !bus_q;
  assign bus_fall = !bus && bus_q;
  assign half     = slot >> 1;
  assign decoding = state inside {R_SIZE, R_DATA, R_CRC};
  assign lb_take  = lb_int && (decoding || state == R_ERR);

  // ------------------------------------------------------------ sub-blocks
  assign sy_arm   = state == R_IDLE;
  assign sy_force = lb_take;

  linkbo_rx_sync #(.CW(CW)) u_sync (
    .clk, .rst_n, .arm(sy_arm), .bus_fall, .bus_rise, .c(psc_cnt),
    .hp_thresh(HP_THRESH), .max_cnt(SYNC_MAX), .force_hp(sy_force),
    .psc_load(sy_load), .busy(sy_busy), .done(sy_done), .is_hp(sy_hp),
    .slot(sy_slot), .err(sy_err));

  assign md_en = decoding && !lb_take;

  linkbo_mdec #(.CW(CW)) u_mdec (
    .en(md_en), .bus_rise, .bus_fall, .c(psc_cnt), .slot,
    .bit_valid(md_valid), .bit_val(md_bit), .psc_load(md_load), .err(md_err));

  assign sipo_shift = (state == R_DATA) && md_valid;

  linkbo_sipo #(.W(BYTE_W)) u_sipo (
    .clk, .rst_n, .shift(sipo_shift), .din(md_bit), .q(byte_out));

  assign crc_clear = sy_done;
  assign crc_en    = (state inside {R_DATA, R_CRC}) && md_valid;

  linkbo_crc4 u_crc (
    .clk, .rst_n, .clear(crc_clear), .en(crc_en), .din(md_bit),
    .crc(crc_val), .crc_next(crc_nxt), .zero(crc_zero));

  linkbo_lbdet #(.CW(CW)) u_lbdet (
    .clk, .rst_n, .bus, .thresh(lb_thresh), .low_cnt(lb_cnt), .lb_int);

  // The longest low in valid Manchester code is one slot (second half of a
  // 0, first half of a 1); an interrupt holds the wire low for about 1.5
  // slots plus the interrupter's reaction time. The threshold sits between
  // them and follows the measured slot, so a slow sender is not mistaken
  // for an interrupt.
  assign lb_thresh = slot + (slot >> 2) + 1'b1;

  // SiDEC: size field to byte count; 0 is reserved
  assign size_dec = {size_sr[SIZE_W-2:0], md_bit};

  // RX PSC loads: interrupt, start of SYNC, end of SYNC, mid-slot edges,
  // and restarting the idle timer while the bus is low after an error.
  always_comb begin
    psc_load     = 1'b0;
    psc_load_val = CW'(1);
    if (lb_take) begin
      psc_load     = 1'b1;
      psc_load_val = lb_cnt + 1'b1 - IRQ_LAT;
    end else if (sy_load || sy_done || md_load || md_err || sy_err) begin
      psc_load = 1'b1;
    end else if (state == R_ERR && !bus) begin
      psc_load = 1'b1;
    end
  end

  // ACK slot: from S/2 to 3S/2 after the last CRC mid-slot edge
  assign rx_ack = (state == R_ACK) && ack_ok && !own_tx &&
                  (psc_cnt > half) && (psc_cnt <= slot + half);
  assign rx_msk = psc_cnt > slot;

  assign rx_busy      = state != R_IDLE;
  assign rx_lp_active = decoding && !hp_q;
  assign rx_hp        = hp_q;

  // ------------------------------------------------------------------ RX FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= R_IDLE;
      bus_q    <= 1'b1;
      slot     <= CW'(MB_CYCLES);
      hp_q     <= 1'b0;
      nbytes   <= '0;
      bytc     <= '0;
      btc      <= '0;
      size_sr  <= '0;
      ack_ok   <= 1'b0;
      mine     <= 1'b0;
      recv     <= 1'b0;
      rx_end   <= 1'b0;
      rx_error <= 1'b0;
    end else begin
      bus_q  <= bus;
      recv   <= 1'b0;
      rx_end <= 1'b0;
      if (lb_take) begin
        // HP interrupt: drop the current message and take the HP SYNC
        if (decoding && !own_tx && !mine) begin
          rx_end   <= 1'b1;
          rx_error <= 1'b1;
        end
        mine  <= own_tx;
        state <= R_SYNC;
      end else begin
        unique case (state)
          R_IDLE:
            if (bus_fall) begin
              mine  <= own_tx;
              state <= R_SYNC;
            end
          R_SYNC:
            if (sy_done) begin
              slot   <= sy_slot;
              hp_q   <= sy_hp;
              nbytes <= SIZE_W'(1);
              bytc   <= '0;
              btc    <= '0;
              state  <= sy_hp ? R_DATA : R_SIZE;
            end else if (sy_err || !sy_busy) begin
              state <= R_ERR;
            end
          R_SIZE:
            if (md_err) begin
              state <= R_ERR;
              if (!own_tx && !mine) begin
                rx_end   <= 1'b1;
                rx_error <= 1'b1;
              end
            end else if (md_valid) begin
              size_sr <= size_dec;
              btc     <= btc + 1'b1;
              if (btc == 3'd2) begin
                btc    <= '0;
                nbytes <= size_dec;
                if (size_dec == '0) begin
                  state <= R_ERR;
                  if (!own_tx && !mine) begin
                    rx_end   <= 1'b1;
                    rx_error <= 1'b1;
                  end
                end else begin
                  state <= R_DATA;
                end
              end
            end
          R_DATA:
            if (md_err) begin
              state <= R_ERR;
              if (!own_tx && !mine) begin
                rx_end   <= 1'b1;
                rx_error <= 1'b1;
              end
            end else if (md_valid) begin
              btc <= btc + 1'b1;
              if (btc == 3'd7) begin
                btc  <= '0;
                bytc <= bytc + 1'b1;
                recv <= !own_tx;
                if (bytc == nbytes - 1'b1) state <= R_CRC;
              end
            end
          R_CRC:
            if (md_err) begin
              state <= R_ERR;
              if (!own_tx && !mine) begin
                rx_end   <= 1'b1;
                rx_error <= 1'b1;
              end
            end else if (md_valid) begin
              btc <= btc + 1'b1;
              if (btc == 3'd3) begin
                btc    <= '0;
                ack_ok <= crc_nxt == '0;
                state  <= R_ACK;
              end
            end
          R_ACK:
            if (psc_cnt >= slot + half) begin
              state <= R_IDLE;
              if (!own_tx) begin
                rx_end   <= 1'b1;
                rx_error <= !ack_ok;
              end
            end
          R_ERR:
            if (bus && psc_cnt >= IDLE_GAP) state <= R_IDLE;
          default: state <= R_IDLE;
        endcase
      end
    end
  end

  initial begin
    assert (MB_CYCLES >= 8 && 4 * MB_CYCLES < (1 << CW))
      else $error("linkbo_rx: MB_CYCLES must be >= 8 and fit 4 slots in CW bits");
  end

endmodule
