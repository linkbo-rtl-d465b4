// tb_linkbo_sipo - shifts random bytes in MSB first, with idle cycles in
// between, and checks the assembled byte.
`timescale 1ns/1ps
module tb_linkbo_sipo;
  logic       clk = 0, rst_n = 0, shift = 0, din = 0;
  logic [7:0] q;
  int checks = 0, failures = 0;

  linkbo_sipo #(.W(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #12 rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      logic [7:0] w;
      w = 8'($urandom);
      for (int i = 7; i >= 0; i--) begin
        @(negedge clk); shift = 1; din = w[i];
        @(negedge clk); shift = 0; din = ~w[i];
      end
      @(negedge clk);
      checks++;
      if (q !== w) begin failures++; $display("FAIL: q=%h expected %h", q, w); end
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
