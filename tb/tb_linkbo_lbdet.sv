// tb_linkbo_lbdet - drives low pulses of various lengths and checks the
// elapsed-low count and that lb_int pulses exactly once, thresh cycles after
// the falling edge, only for lows longer than the threshold.
`timescale 1ns/1ps
module tb_linkbo_lbdet;
  logic       clk = 0, rst_n = 0, bus = 1;
  logic [7:0] thresh = 8'd12, low_cnt;
  logic       lb_int;
  int checks = 0, failures = 0;

  linkbo_lbdet #(.CW(8)) dut (.*);

  always #5 clk = ~clk;

  task automatic low_pulse(input int len);
    int ints = 0, at = -1;
    @(negedge clk); bus = 0;
    for (int i = 0; i < len; i++) begin
      if (lb_int) begin ints++; at = i; end
      checks++;
      if (low_cnt != 8'(i)) begin failures++; $display("FAIL: len %0d cycle %0d cnt %0d", len, i, low_cnt); end
      @(negedge clk);
    end
    bus = 1;
    @(negedge clk);
    checks++;
    if (len > 12) begin
      if (ints != 1 || at != 12) begin failures++; $display("FAIL: len %0d ints %0d at %0d", len, ints, at); end
    end else if (ints != 0) begin
      failures++; $display("FAIL: len %0d spurious interrupt", len);
    end
    checks++;
    if (low_cnt != 0) begin failures++; $display("FAIL: count not cleared"); end
  endtask

  initial begin
    #12 rst_n = 1;
    repeat (3) @(negedge clk);
    for (int len = 1; len <= 30; len++) begin
      low_pulse(len);
      repeat (1 + $urandom % 4) @(negedge clk);
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
