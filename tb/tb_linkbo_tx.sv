// tb_linkbo_tx - runs the transmitter with a model of its prescaler, driver,
// wire and input synchronizer around it, decodes the wire slot by slot and
// compares it with the message the protocol prescribes: SYNC (HP: a low
// slot then a 1; LP: two 1s), SIZE (LP), payload MSB first, CRC-4 of the
// payload (reference by long division), then the released ACK slot.
// A model receiver answers the ACK slot with a Manchester 1 or stays quiet.
// Checked: every field, the UPD pulse count, tx_end timing (15 or
// 10 + 8*size slots), the error flag with and without ACK, and arbitration
// loss when the wire is held low while the transmitter releases it.
`timescale 1ns/1ps
module tb_linkbo_tx;
  import linkbo_pkg::*;
  localparam int MB = 10;

  logic       clk = 0, rst_n = 0;
  logic       start = 0, hp = 0;
  logic [2:0] size = 1;
  logic [7:0] tx_in = 0;
  logic       upd, tx_end, tx_error, arb_lost, psc_load;
  logic       tx_out, tx_msk, s_sel, m_sel, tx_busy;
  logic [7:0] pcnt = 0;
  logic       drv = 1, pull = 1, wire_l, s1 = 1, s2 = 1;
  int checks = 0, failures = 0;

  wire psc_mask  = pcnt < MB / 2;
  wire psc_half  = pcnt == MB / 2 - 1;
  wire psc_slot  = pcnt == MB - 1;

  linkbo_tx #(.MB_CYCLES(MB), .CW(8)) dut (
    .clk, .rst_n, .start, .hp, .size, .tx_in, .upd, .tx_end, .tx_error, .arb_lost,
    .psc_load, .psc_mask, .psc_half_tick(psc_half), .psc_slot_tick(psc_slot),
    .bus(s2), .tx_out, .tx_msk, .s_sel, .m_sel, .tx_busy);

  assign wire_l = drv & pull;

  always #5 clk = ~clk;

  // prescaler, driver register and 2-flop synchronizer models
  always @(posedge clk) begin
    pcnt <= psc_load ? 8'd0 : (psc_slot ? 8'd0 : pcnt + 1'b1);
    drv  <= s_sel ? (m_sel ? 1'b0 : (tx_out ^ tx_msk)) : 1'b1;
    s1   <= wire_l;
    s2   <= s1;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  function automatic logic [3:0] ref_crc(input logic [7:0] d [], input int n);
    logic [3:0] r = 0;
    for (int i = 0; i < n; i++)
      for (int b = 7; b >= 0; b--) begin
        logic fb = r[3] ^ d[i][b];
        r = {r[2:0], 1'b0};
        if (fb) r = r ^ 4'b0011;
      end
    return r;
  endfunction

  // Expected (first half, second half) levels of each slot before ACK.
  function automatic void expected_slots(input bit is_hp, input logic [7:0] d [], input int n,
                                         ref logic [1:0] e [$]);
    logic [3:0] c = ref_crc(d, n);
    e.delete();
    if (is_hp) e.push_back(2'b00); else e.push_back(2'b01);
    e.push_back(2'b01);
    if (!is_hp) for (int b = 2; b >= 0; b--) e.push_back(n[b] ? 2'b01 : 2'b10);
    for (int i = 0; i < n; i++)
      for (int b = 7; b >= 0; b--) e.push_back(d[i][b] ? 2'b01 : 2'b10);
    for (int b = 3; b >= 0; b--) e.push_back(c[b] ? 2'b01 : 2'b10);
  endfunction

  // Send one message; give_ack: model receiver answers; block_at: slot index
  // in whose second half the wire is held low (-1: never).
  task automatic run(input bit is_hp, input int n, input bit give_ack, input int block_at,
                     input string tag);
    logic [7:0]  d [];
    logic [1:0]  e [$];
    logic [1:0]  got [$];
    int          upds = 0, cyc = 0, slot_i = 0;
    logic        h1;
    d = new[n];
    foreach (d[i]) d[i] = 8'($urandom);
    expected_slots(is_hp, d, n, e);
    @(negedge clk);
    start = 1; hp = is_hp; size = 3'(n); tx_in = d[0];
    @(negedge clk);
    start = 0;
    // slot k is on the wire during cycles 2+10k .. 11+10k after start
    while (!tx_end && cyc < 800) begin
      int ph;
      ph = cyc - 2 - MB * slot_i;
      if (upd) begin
        upds++;
        if (upds < n) tx_in = d[upds];
      end
      if (ph == 2) h1 = wire_l;
      if (ph == 7) begin
        got.push_back({h1, wire_l});
        slot_i++;
      end
      // model receiver: ACK slot = index e.size(); low in its 5..9th cycle
      if (give_ack && slot_i == e.size() && ph >= 5 && ph < 10) pull = 0;
      else if (block_at >= 0 && slot_i == block_at && ph >= 5 && ph < 10) pull = 0;
      else pull = 1;
      @(negedge clk);
      cyc++;
    end
    pull = 1;
    if (block_at < 0) begin
      bit ok = got.size() >= e.size();
      for (int i = 0; i < e.size() && ok; i++) if (got[i] != e[i]) ok = 0;
      check(ok, $sformatf("%s: wire carries the expected %0d slots", tag, e.size()));
      check(upds == n, $sformatf("%s: %0d UPD pulses for %0d bytes", tag, upds, n));
      check(tx_error == !give_ack && !arb_lost, $sformatf("%s: error flag %0b", tag, tx_error));
      if (give_ack)
        check(cyc >= MB * (e.size() + 1) && cyc <= MB * (e.size() + 1) + 4,
              $sformatf("%s: ended after %0d cycles", tag, cyc));
      else
        check(cyc >= MB * (e.size() + 2) && cyc <= MB * (e.size() + 2) + 4,
              $sformatf("%s: gave up after %0d cycles", tag, cyc));
    end else begin
      check(tx_error && arb_lost, $sformatf("%s: arbitration lost", tag));
      check(cyc <= MB * (block_at + 1) + 4, $sformatf("%s: stopped after %0d cycles", tag, cyc));
    end
    repeat (2 * MB) @(negedge clk);
    check(wire_l == 1'b1 && !tx_busy, $sformatf("%s: wire released", tag));
  endtask

  initial begin
    #12 rst_n = 1;
    repeat (3) @(negedge clk);
    run(1, 1, 1, -1, "hp ack");
    for (int n = 1; n <= 7; n++) run(0, n, 1, -1, $sformatf("lp%0d ack", n));
    run(1, 1, 0, -1, "hp no ack");
    run(0, 3, 0, -1, "lp3 no ack");
    run(0, 2, 1, 0, "lp loses in sync");
    run(1, 1, 1, 1, "hp loses in sync2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
