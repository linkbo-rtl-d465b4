// tb_linkbo_system - end-to-end test of two LinkBo nodes on one wire.
//
// Two nodes (A = index 0, B = index 1) share a wire modelled as the AND of
// both outputs (open drain with pull-up). The testbench can corrupt the wire
// by inverting it (noise that flips a bit) or by pulling it low (a glitch),
// and can give node B a clock 5 % slower or faster than node A's. Each node
// has a host model that sends messages and collects what its receiver
// reports; results are compared with the messages sent.
//
// Scenarios, each counted, and each must occur at least once:
//   hp        HP message, payload and 15-slot latency checked
//   lp        LP messages of 1..7 bytes, latency 10 + 8*size slots
//   crc_nack  one slot inverted: receiver reports a CRC error, no ACK
//   coding    one slot pulled low: Manchester coding error, no ACK
//   arb_lphp  LP and HP sent in the same cycle: HP wins, LP node receives it
//   arb_hphp  two HP messages at once: the first differing bit decides
//   interrupt HP message cuts into a running 7-byte LP message
//   skew      traffic with node B's clock 5 % slow and 5 % fast
//   resync    a mid-slot edge arrives off its nominal position and is used
// The parameters of the nodes are left at their defaults.
`timescale 1ns/1ps
module tb_linkbo_system;
  import linkbo_pkg::*;

  localparam int MB = MB_CYCLES_DEF;

  logic       clk_a, clk_b;
  logic       rst_n;
  logic       send [2], hp [2];
  logic [2:0] size [2];
  logic [7:0] tx_in [2];
  logic       upd [2], tx_end [2], tx_error [2], tx_lost [2];
  logic       rx_recv [2], rx_end [2], rx_error [2], rx_hp [2];
  logic [7:0] rx_byte [2];
  logic       bus_out [2];
  logic       bus, inj_inv, inj_low;
  realtime    half_b;

  int checks = 0, failures = 0;
  int n_hp = 0, n_lp = 0, n_crc = 0, n_coding = 0, n_arb_lphp = 0, n_arb_hphp = 0;
  int n_irq = 0, n_skew = 0, n_resync = 0;

  // ------------------------------------------------------------------ nodes
  linkbo u_a (
    .clk(clk_a), .rst_n, .send(send[0]), .hp(hp[0]), .size(size[0]), .tx_in(tx_in[0]),
    .upd(upd[0]), .tx_end(tx_end[0]), .tx_error(tx_error[0]), .tx_lost(tx_lost[0]),
    .rx_recv(rx_recv[0]), .rx_byte(rx_byte[0]), .rx_end(rx_end[0]), .rx_error(rx_error[0]),
    .rx_hp(rx_hp[0]), .bus_in(bus), .bus_out(bus_out[0]));
  linkbo u_b (
    .clk(clk_b), .rst_n, .send(send[1]), .hp(hp[1]), .size(size[1]), .tx_in(tx_in[1]),
    .upd(upd[1]), .tx_end(tx_end[1]), .tx_error(tx_error[1]), .tx_lost(tx_lost[1]),
    .rx_recv(rx_recv[1]), .rx_byte(rx_byte[1]), .rx_end(rx_end[1]), .rx_error(rx_error[1]),
    .rx_hp(rx_hp[1]), .bus_in(bus_b), .bus_out(bus_out[1]));

  // wired-AND wire; faults are injected at node B's input comparator only,
  // so that the sender itself still sees a clean wire
  logic bus_b;
  assign bus   = bus_out[0] & bus_out[1];
  assign bus_b = (bus ^ inj_inv) & ~inj_low;

  // clocks: A 10 ns, B 10 ns +- 5 %
  initial begin clk_a = 1'b0; forever #5 clk_a = ~clk_a; end
  initial begin clk_b = 1'b0; forever #(half_b) clk_b = ~clk_b; end

  task automatic tick(input int n);
    if (n == 0) @(posedge clk_a); else @(posedge clk_b);
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // ------------------------------------------------------ receiver monitors
  logic [7:0] rxq_a [$], rxq_b [$];
  int         rx_ends [2], rx_errs [2];
  bit         last_rx_hp [2];

  always @(posedge clk_a) begin
    if (rx_recv[0]) rxq_a.push_back(rx_byte[0]);
    if (rx_end[0]) begin rx_ends[0]++; if (rx_error[0]) rx_errs[0]++; last_rx_hp[0] = rx_hp[0]; end
  end
  always @(posedge clk_b) begin
    if (rx_recv[1]) rxq_b.push_back(rx_byte[1]);
    if (rx_end[1]) begin rx_ends[1]++; if (rx_error[1]) rx_errs[1]++; last_rx_hp[1] = rx_hp[1]; end
  end

  // resync: B's decoder accepts a mid-slot edge away from the measured slot
  always @(posedge clk_b)
    if (u_b.u_rx.u_mdec.bit_valid && u_b.u_rx.psc_cnt != u_b.u_rx.slot) n_resync++;

  // -------------------------------------------------------------- host model
  typedef struct {
    bit error;
    bit lost;
    int cycles;
  } tx_result_t;

  // Send one message from node n; returns outcome and cycles from send to end.
  task automatic do_send(input int n, input bit is_hp, input logic [7:0] data [],
                         output tx_result_t res);
    int idx = 0, cyc = 0;
    tick(n);
    send[n]  <= 1'b1;
    hp[n]    <= is_hp;
    size[n]  <= is_hp ? 3'd1 : 3'(data.size());
    tx_in[n] <= data[0];
    tick(n);
    send[n] <= 1'b0;
    cyc = 1;
    while (!tx_end[n]) begin
      if (upd[n]) begin
        idx++;
        if (idx < data.size()) tx_in[n] <= data[idx];
      end
      tick(n);
      cyc++;
      if (cyc > 2000) break;
    end
    res.error  = tx_error[n];
    res.lost   = tx_lost[n];
    res.cycles = cyc;
  endtask

  task automatic wait_idle(input int cycles);
    repeat (cycles) tick(0);
  endtask

  task automatic clear_rx();
    rxq_a.delete();
    rxq_b.delete();
    for (int i = 0; i < 2; i++) begin
      rx_ends[i] = 0;
      rx_errs[i] = 0;
    end
  endtask

  function automatic int rxq_size(input int n);
    return (n == 0) ? rxq_a.size() : rxq_b.size();
  endfunction

  function automatic logic [7:0] rxq_at(input int n, input int i);
    return (n == 0) ? rxq_a[i] : rxq_b[i];
  endfunction

  // did node n receive exactly the bytes d
  function automatic bit same(input int n, input logic [7:0] d []);
    if (rxq_size(n) != d.size()) return 0;
    foreach (d[i]) if (rxq_at(n, i) !== d[i]) return 0;
    return 1;
  endfunction

  // A good transfer from node s to node r with latency check.
  task automatic good_transfer(input int s, input bit is_hp, input int nbytes, input string tag);
    logic [7:0] d [];
    tx_result_t res;
    int r = 1 - s;
    int slots = is_hp ? 15 : 10 + 8 * nbytes;
    d = new[nbytes];
    foreach (d[i]) d[i] = 8'($urandom);
    clear_rx();
    do_send(s, is_hp, d, res);
    wait_idle(3 * MB);
    check(!res.error && !res.lost, $sformatf("%s: sender got ACK", tag));
    check(same(r, d), $sformatf("%s: payload %0d bytes received", tag, nbytes));
    check(rx_ends[r] == 1 && rx_errs[r] == 0, $sformatf("%s: one clean end at receiver", tag));
    check(last_rx_hp[r] == is_hp, $sformatf("%s: priority reported", tag));
    check(rx_ends[s] == 0, $sformatf("%s: sender does not report its own message", tag));
    if (s == 0)
      check(res.cycles >= MB * slots && res.cycles <= MB * slots + MB,
            $sformatf("%s: latency %0d cycles, expected %0d..%0d", tag, res.cycles,
                      MB * slots, MB * slots + MB));
    if (!res.error && same(r, d)) begin
      if (is_hp) n_hp++; else n_lp++;
    end
  endtask

  // --------------------------------------------------------------- scenarios
  initial begin
    logic [7:0] d1 [], d2 [];
    tx_result_t ra, rb;
    int fails_before;
    half_b = 5.0;
    rst_n = 1'b0; inj_inv = 1'b0; inj_low = 1'b0;
    for (int i = 0; i < 2; i++) begin
      send[i] = 1'b0; hp[i] = 1'b0; size[i] = 3'd1; tx_in[i] = 8'h00;
    end
    #23 rst_n = 1'b1;
    wait_idle(20);

    // HP and LP, both directions, equal clocks
    good_transfer(0, 1'b1, 1, "hp A->B");
    good_transfer(1, 1'b1, 1, "hp B->A");
    for (int n = 1; n <= 7; n++) good_transfer(0, 1'b0, n, $sformatf("lp%0d A->B", n));
    good_transfer(1, 1'b0, 4, "lp4 B->A");

    // CRC error: invert one payload slot of an LP message
    begin
      d1 = new[2]; d1[0] = 8'hA5; d1[1] = 8'h3C;
      clear_rx();
      fork
        do_send(0, 1'b0, d1, ra);
        begin
          // slot k of the message is on the wire from cycle 3 + 10k after send
          repeat (3 + MB * 9) tick(0);
          inj_inv = 1'b1;
          repeat (MB) tick(0);
          inj_inv = 1'b0;
        end
      join
      wait_idle(3 * MB);
      check(ra.error && !ra.lost, "crc: sender sees no ACK");
      check(rx_ends[1] == 1 && rx_errs[1] == 1, "crc: receiver reports error");
      check(rxq_b.size() == 2 && rxq_b[0] != 8'hA5, "crc: corrupted byte delivered then flagged");
      if (ra.error && rx_errs[1] == 1) n_crc++;
    end

    // coding error: hold the wire low for one payload slot
    begin
      d1 = new[1]; d1[0] = 8'hF0;
      clear_rx();
      fork
        do_send(0, 1'b1, d1, ra);
        begin
          // first half of payload bit 4 (a 0 after a 1): high becomes low,
          // so the mid-slot edge of that bit never comes
          repeat (3 + MB * 6) tick(0);
          inj_low = 1'b1;
          repeat (MB / 2) tick(0);
          inj_low = 1'b0;
        end
      join
      wait_idle(4 * MB);
      check(ra.error && !ra.lost, "coding: sender sees no ACK");
      check(rx_ends[1] == 1 && rx_errs[1] == 1, "coding: receiver reports error");
      check(!u_b.u_rx.rx_busy, "coding: receiver back to idle");
      if (ra.error && rx_errs[1] == 1) n_coding++;
    end
    good_transfer(0, 1'b0, 2, "after errors");

    // arbitration: LP from A and HP from B in the same cycle
    begin
      d1 = new[3]; d1[0] = 8'h11; d1[1] = 8'h22; d1[2] = 8'h33;
      d2 = new[1]; d2[0] = 8'hC3;
      clear_rx();
      fork
        do_send(0, 1'b0, d1, ra);
        do_send(1, 1'b1, d2, rb);
      join
      wait_idle(3 * MB);
      check(ra.error && ra.lost, "arb_lphp: LP sender loses");
      check(!rb.error && !rb.lost, "arb_lphp: HP sender wins and gets ACK");
      check(same(0, d2) && rx_errs[0] == 0 && last_rx_hp[0], "arb_lphp: loser receives HP byte");
      if (ra.lost && !rb.error) n_arb_lphp++;
    end

    // arbitration: two HP messages; 0x5A beats 0x3C at bit 6 (a 1 drives low first)
    begin
      d1 = new[1]; d1[0] = 8'h5A;
      d2 = new[1]; d2[0] = 8'h3C;
      clear_rx();
      fork
        do_send(0, 1'b1, d1, ra);
        do_send(1, 1'b1, d2, rb);
      join
      wait_idle(3 * MB);
      check(!ra.error && !ra.lost, "arb_hphp: A wins");
      check(rb.error && rb.lost, "arb_hphp: B loses");
      check(same(1, d1) && rx_errs[1] == 0, "arb_hphp: B receives A's byte");
      if (!ra.error && rb.lost) n_arb_hphp++;
    end

    // interrupt: B sends HP while A's 7-byte LP message is on the wire
    begin
      d1 = new[7]; foreach (d1[i]) d1[i] = 8'(8'h40 + i);
      d2 = new[1]; d2[0] = 8'h96;
      clear_rx();
      fork
        do_send(0, 1'b0, d1, ra);
        begin
          repeat (MB * 30) tick(1);
          do_send(1, 1'b1, d2, rb);
        end
      join
      wait_idle(4 * MB);
      check(ra.error && ra.lost, "interrupt: LP sender stops");
      check(!rb.error && !rb.lost, "interrupt: HP sender gets ACK");
      check(rxq_a.size() == 1 && rxq_a[0] == 8'h96 && last_rx_hp[0] && rx_errs[0] == 0,
            "interrupt: HP byte received by the LP sender");
      check(rxq_b.size() >= 1 && rxq_b.size() < 7, "interrupt: LP message cut short at B");
      if (ra.lost && !rb.error && rxq_a.size() == 1) n_irq++;
      good_transfer(0, 1'b0, 7, "lp7 resend after interrupt");
    end

    // clock skew: B 5 % slower, then 5 % faster
    fails_before = failures;
    half_b = 5.25;
    wait_idle(10);
    good_transfer(0, 1'b0, 3, "skew slow lp3 A->B");
    good_transfer(1, 1'b1, 1, "skew slow hp B->A");
    good_transfer(1, 1'b0, 7, "skew slow lp7 B->A");
    half_b = 4.75;
    wait_idle(10);
    good_transfer(0, 1'b0, 7, "skew fast lp7 A->B");
    good_transfer(1, 1'b1, 1, "skew fast hp B->A");
    good_transfer(1, 1'b0, 3, "skew fast lp3 B->A");
    if (failures == fails_before) n_skew++;

    // every mechanism must have happened
    check(n_hp >= 2, $sformatf("hp count %0d", n_hp));
    check(n_lp >= 8, $sformatf("lp count %0d", n_lp));
    check(n_crc >= 1, "crc_nack happened");
    check(n_coding >= 1, "coding error happened");
    check(n_arb_lphp >= 1, "LP/HP arbitration happened");
    check(n_arb_hphp >= 1, "HP/HP arbitration happened");
    check(n_irq >= 1, "HP interrupt happened");
    check(n_skew >= 1, "skewed clocks passed");
    check(n_resync >= 1, "re-synchronization happened");
    $display("mechanisms: hp=%0d lp=%0d crc_nack=%0d coding=%0d arb_lphp=%0d arb_hphp=%0d interrupt=%0d skew=%0d resync=%0d",
             n_hp, n_lp, n_crc, n_coding, n_arb_lphp, n_arb_hphp, n_irq, n_skew, n_resync);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat (60000) @(posedge clk_a);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
