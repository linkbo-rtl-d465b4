// tb_linkbo_synchronizer - checks reset to the idle (high) level and that
// the output is the input delayed by exactly two clock cycles.
`timescale 1ns/1ps
module tb_linkbo_synchronizer;
  logic clk = 0, rst_n = 0, d = 0, q;
  logic hist [$];
  int checks = 0, failures = 0;

  linkbo_synchronizer dut (.*);

  always #5 clk = ~clk;

  initial begin
    @(posedge clk); #1;
    checks++;
    if (q !== 1'b1) begin failures++; $display("FAIL: reset value %0b", q); end
    #3 rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      d = 1'($urandom);
      hist.push_back(d);
      @(posedge clk); #1;
      if (hist.size() >= 2) begin
        checks++;
        if (q !== hist[hist.size() - 2]) begin
          failures++;
          $display("FAIL: cycle %0d q=%0b expected %0b", i, q, hist[hist.size() - 2]);
        end
      end
    end
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
