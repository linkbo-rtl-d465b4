// tb_linkbo_rx_sync - drives HP and LP SYNC waveforms with slot lengths of
// 8 to 14 cycles (HP from 10, as an HP low must exceed 1.25 nominal
// slots) and checks the priority, the measured slot (2/3 of the
// 1.5-slot distance), the timing of `done` (on the final rising edge), the
// timeout on a stuck-low bus, and the forced HP entry used for interrupts.
// The receiver PSC is modelled here as a plain counter.
`timescale 1ns/1ps
module tb_linkbo_rx_sync;
  logic       clk = 0, rst_n = 0;
  logic       arm = 1, bus = 1, bus_q = 1, force_hp = 0;
  logic       bus_fall, bus_rise;
  logic [7:0] c = 0;
  logic       psc_load, busy, done, is_hp, err;
  logic [7:0] slot;
  int checks = 0, failures = 0;
  int n_done = 0, n_err = 0;
  bit last_hp;
  logic [7:0] last_slot;

  assign bus_fall = bus_q && !bus;
  assign bus_rise = !bus_q && bus;

  linkbo_rx_sync #(.CW(8)) dut (.clk, .rst_n, .arm, .bus_fall, .bus_rise, .c,
    .hp_thresh(8'd12), .max_cnt(8'd30), .force_hp, .psc_load, .busy, .done,
    .is_hp, .slot, .err);

  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    bus_q <= bus;
    c     <= psc_load ? 8'd1 : (force_hp ? 8'd13 : c + 1'b1);
    if (done) begin n_done++; last_hp <= is_hp; last_slot <= slot; end
    if (err) n_err++;
  end

  task automatic level(input logic v, input int n);
    bus = v;
    repeat (n) @(negedge clk);
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : main
    #12 rst_n = 1;
    repeat (3) @(negedge clk);
    for (int s = 8; s <= 14; s += 2) begin
      int d0;
      d0 = n_done;
      if (s >= 10) begin
      // HP: low 1.5 slots, then high
      level(0, s + s / 2);
      check(n_done == d0, "no done before the rising edge");
      level(1, 2);
      check(n_done == d0 + 1 && last_hp == 1, $sformatf("HP detected at slot %0d", s));
      check(last_slot == 8'(s), $sformatf("HP slot %0d measured %0d", s, last_slot));
      level(1, 3 * s);
      end
      // LP: low half, high half, low half, high
      d0 = n_done;
      level(0, s / 2); level(1, s / 2); level(0, s / 2);
      check(n_done == d0, "LP not done before second rise");
      level(1, 2);
      check(n_done == d0 + 1 && last_hp == 0, $sformatf("LP detected at slot %0d", s));
      check(last_slot == 8'(s), $sformatf("LP slot %0d measured %0d", s, last_slot));
      level(1, 3 * s);
    end
    // stuck low: timeout error
    begin
      int e0;
      e0 = n_err;
      level(0, 40);
      check(n_err == e0 + 1 && !busy, "timeout on stuck bus");
      level(1, 20);
    end
    // forced HP entry (interrupt): bus already low 13 cycles, rises 2 later
    begin
      int d0;
      d0 = n_done;
      bus = 0;
      @(negedge clk); force_hp = 1; @(negedge clk); force_hp = 0;
      level(0, 1);
      level(1, 2);
      check(n_done == d0 + 1 && last_hp == 1, "forced HP completes");
    end
    // not armed: ignores a message start
    arm = 0;
    level(0, 5); level(1, 5);
    check(!busy, "ignores edges when not armed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
