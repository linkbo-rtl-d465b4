// tb_linkbo_mdec - sweeps the time of a bus edge since the last mid-slot
// edge for slot lengths 10 and 12 and checks the classification against
// hand-derived windows (slot 10: boundary 2..7, mid-slot 8..14; slot 12:
// boundary 3..8, mid-slot 9..17), the decoded bit value, the PSC reload on
// mid-slot edges, the missing-edge error and the enable.
`timescale 1ns/1ps
module tb_linkbo_mdec;
  logic       en, bus_rise, bus_fall;
  logic [7:0] c, slot;
  logic       bit_valid, bit_val, psc_load, err;
  int checks = 0, failures = 0;

  linkbo_mdec #(.CW(8)) dut (.*);

  task automatic expect_out(input string what, input bit v, input bit b, input bit l, input bit e);
    #1;
    checks++;
    if (bit_valid !== v || (v && bit_val !== b) || psc_load !== l || err !== e) begin
      failures++;
      $display("FAIL: %s c=%0d slot=%0d got v%0b b%0b l%0b e%0b", what, c, slot, bit_valid, bit_val, psc_load, err);
    end
  endtask

  initial begin
    int b_lo, m_lo, m_hi;
    #1 en = 1;
    for (int s = 0; s < 2; s++) begin
      slot = (s == 0) ? 8'd10 : 8'd12;
      b_lo = (s == 0) ? 2 : 3;
      m_lo = (s == 0) ? 8 : 9;
      m_hi = (s == 0) ? 14 : 17;
      for (int t = 0; t <= 20; t++) begin
        c = 8'(t);
        // no edge
        bus_rise = 0; bus_fall = 0;
        expect_out("quiet", 0, 0, 0, t > m_hi);
        // rising edge
        bus_rise = 1;
        if (t >= m_lo && t <= m_hi)      expect_out("rise mid", 1, 1, 1, 0);
        else if (t >= b_lo && t < m_lo)  expect_out("rise boundary", 0, 0, 0, 0);
        else                             expect_out("rise misplaced", 0, 0, 0, 1);
        bus_rise = 0; bus_fall = 1;
        if (t >= m_lo && t <= m_hi)      expect_out("fall mid", 1, 0, 1, 0);
        else if (t >= b_lo && t < m_lo)  expect_out("fall boundary", 0, 0, 0, 0);
        else                             expect_out("fall misplaced", 0, 0, 0, 1);
      end
    end
    en = 0; bus_fall = 1; c = 8'd10; slot = 8'd10;
    expect_out("disabled", 0, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
