// tb_linkbo_piso - loads random words into 8-, 3- and 4-bit PISOs and checks
// that they come out MSB first, one bit per shift, with idle cycles between.
`timescale 1ns/1ps
module tb_linkbo_piso;
  logic       clk = 0, rst_n = 0;
  logic       load8 = 0, shift8 = 0, out8;
  logic       load3 = 0, shift3 = 0, out3;
  logic [7:0] din8 = 0;
  logic [2:0] din3 = 0;
  int checks = 0, failures = 0;

  linkbo_piso #(.W(8)) dut8 (.clk, .rst_n, .load(load8), .din(din8), .shift(shift8), .dout(out8));
  linkbo_piso #(.W(3)) dut3 (.clk, .rst_n, .load(load3), .din(din3), .shift(shift3), .dout(out3));

  always #5 clk = ~clk;

  initial begin
    #12 rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      logic [7:0] w8;
      logic [2:0] w3;
      w8 = 8'($urandom);
      w3 = 3'($urandom);
      @(negedge clk); load8 = 1; din8 = w8; load3 = 1; din3 = w3;
      @(negedge clk); load8 = 0; load3 = 0; din8 = ~w8;
      for (int i = 7; i >= 0; i--) begin
        checks++;
        if (out8 !== w8[i]) begin failures++; $display("FAIL: piso8 bit %0d", i); end
        if (i >= 5) begin
          checks++;
          if (out3 !== w3[i - 5]) begin failures++; $display("FAIL: piso3 bit %0d", i - 5); end
        end
        repeat ($urandom % 3) @(negedge clk);   // holds without shift
        shift8 = 1; shift3 = 1;
        @(negedge clk); shift8 = 0; shift3 = 0;
      end
    end
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
