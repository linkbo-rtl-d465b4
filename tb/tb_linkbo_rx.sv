// tb_linkbo_rx - generates Manchester messages on the wire with sender slot
// lengths of 9, 10 and 11 receiver cycles (jitter of one cycle added on some
// edges) and checks the receiver: bytes and RECV pulses, END and its error
// flag, the reported priority, and the acknowledge the receiver drives
// (modelled driver register: low in the first half of the ACK slot when the
// CRC is right, nothing otherwise). Also: a corrupted CRC, the reserved
// size 0, a coding error, an own message (decoded but neither reported nor
// acknowledged), and an HP message that interrupts an LP message.
// The receiver PSC is modelled here as a loadable counter.
`timescale 1ns/1ps
module tb_linkbo_rx;
  import linkbo_pkg::*;
  localparam int MB = 10;

  logic       clk = 0, rst_n = 0;
  logic       gen = 1, own_tx = 0, drv = 1, wire_l;
  logic       psc_load;
  logic [7:0] psc_load_val, psc_cnt = 0;
  logic       recv, rx_end, rx_error, rx_hp, rx_busy, rx_lp_active, rx_ack, rx_msk;
  logic [7:0] byte_out;
  int checks = 0, failures = 0;
  logic [7:0] rxq [$];
  int ends = 0, errs = 0, acks_low = 0;
  bit last_hp;

  linkbo_rx #(.MB_CYCLES(MB), .CW(8)) dut (
    .clk, .rst_n, .bus(wire_l), .own_tx, .psc_load, .psc_load_val, .psc_cnt,
    .recv, .byte_out, .rx_end, .rx_error, .rx_hp, .rx_busy, .rx_lp_active, .rx_ack, .rx_msk);

  assign wire_l = gen & drv;

  always #5 clk = ~clk;

  always @(posedge clk) begin
    psc_cnt <= psc_load ? psc_load_val : psc_cnt + 1'b1;
    drv     <= rx_ack ? rx_msk : 1'b1;
    if (recv) rxq.push_back(byte_out);
    if (rx_end) begin ends++; if (rx_error) errs++; last_hp <= rx_hp; end
    if (!drv) acks_low++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  task automatic level(input logic v, input int n);
    gen = v;
    repeat (n) @(negedge clk);
  endtask

  // one Manchester bit with slot length s; jit moves the mid edge by a cycle
  task automatic mbit(input logic b, input int s, input int jit);
    level(~b, s / 2 + jit);
    level(b, s - s / 2 - jit);
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

  // Send a message of n bytes; size_field overrides SIZE; crc_flip inverts
  // the CRC; stop_after: number of payload bits sent before returning (-1 all)
  task automatic send_msg(input bit is_hp, input logic [7:0] d [], input int n, input int s,
                          input int size_field, input bit crc_flip, input int stop_after);
    logic [3:0] c = ref_crc(d, n) ^ (crc_flip ? 4'b0100 : 4'b0000);
    int k = 0;
    if (is_hp) level(0, s); else mbit(1, s, 0);
    mbit(1, s, 0);
    if (!is_hp) for (int b = 2; b >= 0; b--) mbit(size_field[b], s, 0);
    for (int i = 0; i < n; i++)
      for (int b = 7; b >= 0; b--) begin
        if (stop_after >= 0 && k == stop_after) return;
        mbit(d[i][b], s, (k % 5 == 2) ? 1 : ((k % 7 == 3) ? -1 : 0));
        k++;
      end
    for (int b = 3; b >= 0; b--) mbit(c[b], s, 0);
    level(1, 3 * s);                    // ACK slot and gap, wire released
  endtask

  task automatic good(input bit is_hp, input int n, input int s, input string tag);
    logic [7:0] d [];
    int a0 = acks_low;
    bit ok;
    d = new[n];
    foreach (d[i]) d[i] = 8'($urandom);
    rxq.delete(); ends = 0; errs = 0;
    send_msg(is_hp, d, n, s, n, 0, -1);
    ok = rxq.size() == n;
    for (int i = 0; i < n && ok; i++) if (rxq[i] != d[i]) ok = 0;
    check(ok, $sformatf("%s: %0d bytes received", tag, n));
    check(ends == 1 && errs == 0 && last_hp == is_hp, $sformatf("%s: clean end, priority", tag));
    check(acks_low - a0 >= s / 2 - 1 && acks_low - a0 <= s / 2 + 1,
          $sformatf("%s: ACK low for %0d cycles", tag, acks_low - a0));
    check(!rx_busy, $sformatf("%s: idle again", tag));
  endtask

  initial begin
    logic [7:0] d [];
    int a0;
    #12 rst_n = 1;
    repeat (5) @(negedge clk);
    for (int s = 9; s <= 11; s++) begin
      good(1, 1, s, $sformatf("hp s=%0d", s));
      for (int n = 1; n <= 7; n += 3) good(0, n, s, $sformatf("lp%0d s=%0d", n, s));
    end
    // CRC error: no ACK, error reported
    d = new[2]; d[0] = 8'h12; d[1] = 8'h34;
    rxq.delete(); ends = 0; errs = 0; a0 = acks_low;
    send_msg(0, d, 2, 10, 2, 1, -1);
    check(ends == 1 && errs == 1 && acks_low == a0, "crc error: error, no ACK");
    // reserved size 0
    rxq.delete(); ends = 0; errs = 0; a0 = acks_low;
    send_msg(0, d, 1, 10, 0, 0, -1);
    level(1, 30);
    check(errs >= 1 && acks_low == a0 && rxq.size() == 0, "size 0 rejected");
    check(!rx_busy, "idle after size error");
    // coding error: bus stuck high in the middle of a byte
    rxq.delete(); ends = 0; errs = 0; a0 = acks_low;
    send_msg(0, d, 2, 10, 2, 0, 5);
    level(1, 40);
    check(ends == 1 && errs == 1 && acks_low == a0, "coding error reported");
    check(!rx_busy, "idle after coding error");
    // own message: decoded silently
    own_tx = 1;
    rxq.delete(); ends = 0; errs = 0; a0 = acks_low;
    send_msg(0, d, 2, 10, 2, 0, -1);
    check(ends == 0 && rxq.size() == 0 && acks_low == a0, "own message not reported or acked");
    own_tx = 0;
    // interrupt: LP stops after 11 payload bits (wire high); the HP sender pulls
    // the wire low at the next slot boundary
    begin
      logic [7:0] h [];
      h = new[1]; h[0] = 8'hB7;
      d = new[3]; d[0] = 8'h55; d[1] = 8'hAA; d[2] = 8'h0F;
      rxq.delete(); ends = 0; errs = 0;
      send_msg(0, d, 3, 10, 3, 0, 11);
      // the LP sender starts its next bit (a 1: falling edge at the
      // boundary); the HP node reacts to that edge and holds the wire low
      // from 4 cycles later, so the long low is 4 cycles plus its SYNC
      level(1'b0, 4);
      send_msg(1, h, 1, 10, 1, 0, -1);
      check(rxq.size() == 2 && rxq[0] == 8'h55 && rxq[1] == 8'hB7, "interrupt: LP byte then HP byte");
      check(ends == 2 && errs == 1 && last_hp, "interrupt: LP aborted, HP clean");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
