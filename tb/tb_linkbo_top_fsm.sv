// tb_linkbo_top_fsm - checks when the TOP FSM starts the transmitter: at
// once on a free bus, after the receiver goes idle otherwise, on the next
// falling edge for an HP request during LP reception (interrupt), never
// early for an LP request; and how own_tx and tx_busy follow a normal end
// (own_tx held until the receiver is idle) and a lost arbitration.
`timescale 1ns/1ps
module tb_linkbo_top_fsm;
  logic clk = 0, rst_n = 0;
  logic send = 0, hp = 0, bus = 1, rx_busy = 0, rx_lp_active = 0, tx_end = 0, tx_lost = 0;
  logic tx_start, own_tx, tx_busy, irq_start;
  int checks = 0, failures = 0;
  int starts = 0, irqs = 0;

  linkbo_top_fsm dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (tx_start) starts++;
    if (irq_start) irqs++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  task automatic pulse_send(input bit is_hp);
    @(negedge clk); send = 1; hp = is_hp;
    @(negedge clk); send = 0;
  endtask

  task automatic finish_tx(input bit lost);
    @(negedge clk); tx_end = 1; tx_lost = lost;
    @(negedge clk); tx_end = 0; tx_lost = 0;
  endtask

  initial begin
    int s0;
    #12 rst_n = 1;
    repeat (3) @(negedge clk);
    // free bus: immediate start
    s0 = starts;
    pulse_send(0);
    check(starts == s0 + 1 && own_tx && tx_busy, "start on free bus");
    rx_busy = 1;                              // own message being received
    repeat (20) @(negedge clk);
    check(starts == s0 + 1, "single start");
    finish_tx(0);
    check(own_tx && !tx_busy, "own_tx held after normal end");
    repeat (3) @(negedge clk);
    rx_busy = 0;
    @(negedge clk);
    check(!own_tx, "own_tx released when receiver idle");
    // lost arbitration: released at once
    pulse_send(1);
    rx_busy = 1;
    repeat (5) @(negedge clk);
    finish_tx(1);
    check(!own_tx && !tx_busy, "own_tx dropped on lost arbitration");
    // bus busy with another LP message: LP request waits
    rx_lp_active = 1;
    s0 = starts;
    pulse_send(0);
    repeat (4) @(negedge clk);
    bus = 0; @(negedge clk); bus = 1;
    repeat (4) @(negedge clk);
    check(starts == s0, "LP request waits for a free bus");
    rx_lp_active = 0; rx_busy = 0;
    repeat (3) @(negedge clk);
    check(starts == s0 + 1 && own_tx, "LP request served when free");
    finish_tx(0);
    @(negedge clk);
    check(!own_tx, "back to idle");
    // HP request during LP reception: interrupt on the next falling edge
    rx_busy = 1; rx_lp_active = 1;
    s0 = starts;
    pulse_send(1);
    repeat (6) @(negedge clk);
    check(starts == s0 && !own_tx, "HP request waits for a falling edge");
    bus = 0;
    #1;
    check(tx_start && irq_start, "HP starts on the falling edge");
    @(negedge clk);
    check(own_tx && irqs == 1, "interrupt counted");
    bus = 1;
    finish_tx(0);
    rx_busy = 0; rx_lp_active = 0;
    repeat (2) @(negedge clk);
    check(!own_tx, "idle after interrupt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
