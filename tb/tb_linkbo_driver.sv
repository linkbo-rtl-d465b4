// tb_linkbo_driver - applies every combination of the driver's seven inputs
// and compares the registered output, one cycle later, with the intended
// behaviour: released (1) unless transmitting or acknowledging; forced low
// by m_sel; otherwise data XOR mask, where acknowledging sends data 0 and
// tx_busy picks the transmitter's mask. Also checks IEEE 802.3 coding of
// a 1 and a 0 over a mask period.
`timescale 1ns/1ps
module tb_linkbo_driver;
  logic clk = 0, rst_n = 0;
  logic rx_ack, tx_out, tx_msk, rx_msk, tx_busy, m_sel, s_sel, bus_out;
  int checks = 0, failures = 0;

  linkbo_driver dut (.*);

  always #5 clk = ~clk;

  function automatic logic expected(input logic [6:0] v);
    logic a, to, tm, rm, tb_, ms, ss, d, m;
    {a, to, tm, rm, tb_, ms, ss} = v;
    if (!(a || ss)) return 1'b1;
    if (ms) return 1'b0;
    d = a ? 1'b0 : to;
    m = tb_ ? tm : rm;
    return d ^ m;
  endfunction

  initial begin
    logic [6:0] v;
    {rx_ack, tx_out, tx_msk, rx_msk, tx_busy, m_sel, s_sel} = '0;
    #12 rst_n = 1;
    @(negedge clk);
    checks++;
    if (bus_out !== 1'b1) begin failures++; $display("FAIL: idle output"); end
    for (int i = 0; i < 128; i++) begin
      v = 7'(i);
      {rx_ack, tx_out, tx_msk, rx_msk, tx_busy, m_sel, s_sel} = v;
      @(negedge clk);
      checks++;
      if (bus_out !== expected(v)) begin failures++; $display("FAIL: inputs %b out %b", v, bus_out); end
    end
    // Manchester 1 = low then high, 0 = high then low (mask high first)
    {rx_ack, rx_msk, m_sel} = '0; tx_busy = 1; s_sel = 1;
    for (int b = 0; b < 2; b++) begin
      tx_out = 1'(b);
      tx_msk = 1; @(negedge clk);
      checks++; if (bus_out !== ~1'(b)) begin failures++; $display("FAIL: first half of %0d", b); end
      tx_msk = 0; @(negedge clk);
      checks++; if (bus_out !== 1'(b)) begin failures++; $display("FAIL: second half of %0d", b); end
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
