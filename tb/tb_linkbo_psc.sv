// tb_linkbo_psc - checks the prescaler counter against a reference count:
// wrap at the period, the mask in the first half, the half and slot ticks,
// and loads taking priority, for periods 10 and 7 and the RX stopwatch use.
`timescale 1ns/1ps
module tb_linkbo_psc;
  logic       clk = 0, rst_n = 0, load = 0;
  logic [7:0] load_val = 0, period = 8'd10;
  logic [7:0] count;
  logic       mask, half_tick, slot_tick;
  int checks = 0, failures = 0;
  int ref_cnt = 0;

  linkbo_psc #(.CW(8)) dut (.*);

  always #5 clk = ~clk;

  task automatic step_check();
    @(posedge clk);
    if (load) ref_cnt = load_val;
    else if (ref_cnt == period - 1) ref_cnt = 0;
    else ref_cnt++;
    #1;
    checks++;
    if (count != 8'(ref_cnt) || mask != (ref_cnt < period / 2) ||
        half_tick != (ref_cnt == period / 2 - 1) || slot_tick != (ref_cnt == period - 1)) begin
      failures++;
      $display("FAIL: count=%0d ref=%0d mask=%0b half=%0b slot=%0b", count, ref_cnt, mask, half_tick, slot_tick);
    end
  endtask

  initial begin
    int ticks;
    ticks = 0;
    #12 rst_n = 1;
    @(negedge clk);
    load = 1; load_val = 0;
    step_check();
    load = 0;
    for (int i = 0; i < 40; i++) begin
      step_check();
      if (slot_tick) ticks++;
    end
    checks++;
    if (ticks != 4) begin failures++; $display("FAIL: %0d slot ticks in 40 cycles", ticks); end
    period = 8'd7;
    for (int i = 0; i < 30; i++) step_check();
    // stopwatch use: load 1 on an event, then count = cycles since the event
    period = 8'hFF;
    load = 1; load_val = 8'd1;
    step_check();
    load = 0;
    for (int i = 0; i < 20; i++) step_check();
    checks++;
    if (count != 8'd21) begin failures++; $display("FAIL: elapsed %0d", count); end
    // random loads
    period = 8'd10;
    for (int i = 0; i < 200; i++) begin
      load = ($urandom % 8) == 0;
      load_val = 8'($urandom % 10);
      step_check();
    end
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
