// tb_linkbo_crc4 - feeds random bit strings MSB first and compares the
// register with the remainder of (message * x^4) mod (x^4 + x + 1) found by
// polynomial long division; then feeds the remainder too and expects zero,
// and checks that every single-bit error gives a non-zero remainder.
`timescale 1ns/1ps
module tb_linkbo_crc4;
  logic       clk = 0, rst_n = 0, clear = 0, en = 0, din = 0;
  logic [3:0] crc, crc_next;
  logic       zero;
  int checks = 0, failures = 0;

  linkbo_crc4 dut (.*);

  always #5 clk = ~clk;

  // long division over GF(2); bits[0] is the first bit sent
  function automatic logic [3:0] ref_rem(input logic bits [], input int n);
    logic [63:0] r;
    r = '0;
    for (int i = 0; i < n; i++) r = {r[62:0], bits[i]};
    r = r << 4;
    for (int i = n + 3; i >= 4; i--)
      if (r[i]) r[i -: 5] = r[i -: 5] ^ 5'b10011;
    return r[3:0];
  endfunction

  task automatic feed(input logic bits [], input int n);
    @(negedge clk); clear = 1; en = 0;
    @(negedge clk); clear = 0;
    for (int i = 0; i < n; i++) begin
      en = 1; din = bits[i];
      @(negedge clk);
    end
    en = 0;
  endtask

  initial begin
    logic bits [];
    logic [3:0] r;
    #12 rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int n;
      n = 8 * (1 + $urandom % 7);
      bits = new[n + 4];
      for (int i = 0; i < n; i++) bits[i] = 1'($urandom);
      feed(bits, n);
      r = ref_rem(bits, n);
      checks++;
      if (crc !== r) begin failures++; $display("FAIL: n=%0d crc=%h ref=%h", n, crc, r); end
      for (int i = 0; i < 4; i++) bits[n + i] = r[3 - i];
      feed(bits, n + 4);
      checks++;
      if (!zero) begin failures++; $display("FAIL: message+crc leaves %h", crc); end
      // single-bit error anywhere
      begin
        int k;
        k = $urandom % (n + 4);
        bits[k] = ~bits[k];
        feed(bits, n + 4);
        checks++;
        if (zero) begin failures++; $display("FAIL: bit %0d error undetected", k); end
      end
    end
    // known value: one byte 0x01 -> x^4 mod (x^4+x+1) = x+1 = 0011
    bits = new[8];
    foreach (bits[i]) bits[i] = (i == 7);
    feed(bits, 8);
    checks++;
    if (crc !== 4'b0011) begin failures++; $display("FAIL: crc(0x01)=%b", crc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
