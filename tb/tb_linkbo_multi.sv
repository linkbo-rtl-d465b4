// tb_linkbo_multi - three LinkBo nodes arbitrating on one wire.
//
// Node 0 sends a low-priority message while nodes 1 and 2 send high-priority
// messages, all requested in the same instant. The wire is the AND of the
// three outputs (open drain with pull-up) and the nodes run on clocks 1 %
// apart, so their starts are not cycle aligned. Expected outcome, worked out
// here from the coding rules rather than read from the design: the LP node
// drops out in its first SYNC slot (an HP message holds the wire low there);
// of the two HP nodes, the one whose payload has a 1 at the first differing
// bit keeps the wire (a Manchester 1 starts low), i.e. the larger byte wins.
// The two losers receive the winner's byte and both acknowledge it, and the
// winner sees the ACK. The losers then send again: the remaining HP node
// wins over the LP node, and finally the LP message goes through alone.
//
// A second part has node 2 interrupt a 7-byte LP message from node 0 with an
// HP message at a random point of the payload: node 1, a pure bystander,
// must drop the LP message with an error and then receive the HP byte; node
// 0 loses and also receives it.
//
// Counted mechanisms, each must occur: three-way arbitration, a repeated
// arbitration among the two losers, the final LP delivery to two receivers,
// and the interrupt. Every node keeps its default parameters.
//
// The three-node scenario is the one used to explain arbitration for the
// protocol; the clock offsets and payloads are this testbench's choice.
`timescale 1ns/1ps
module tb_linkbo_multi;
  import linkbo_pkg::*;

  localparam int MB = MB_CYCLES_DEF;
  localparam int N  = 3;

  logic       clk [N];
  logic       rst_n;
  logic       send [N], hp [N];
  logic [2:0] size [N];
  logic [7:0] tx_in [N];
  logic       upd [N], tx_end [N], tx_error [N], tx_lost [N];
  logic       rx_recv [N], rx_end [N], rx_error [N], rx_hp [N];
  logic [7:0] rx_byte [N];
  logic       bus_out [N];
  logic       bus;

  int checks = 0, failures = 0;
  int n_arb3 = 0, n_rearb = 0, n_lp_multi = 0, n_irq = 0;

  for (genvar i = 0; i < N; i++) begin : g_node
    linkbo u_node (
      .clk(clk[i]), .rst_n, .send(send[i]), .hp(hp[i]), .size(size[i]), .tx_in(tx_in[i]),
      .upd(upd[i]), .tx_end(tx_end[i]), .tx_error(tx_error[i]), .tx_lost(tx_lost[i]),
      .rx_recv(rx_recv[i]), .rx_byte(rx_byte[i]), .rx_end(rx_end[i]), .rx_error(rx_error[i]),
      .rx_hp(rx_hp[i]), .bus_in(bus), .bus_out(bus_out[i]));
  end

  assign bus = bus_out[0] & bus_out[1] & bus_out[2];

  // clocks: 10 ns, 10.1 ns and 9.9 ns periods
  initial begin clk[0] = 1'b0; forever #5.00 clk[0] = ~clk[0]; end
  initial begin clk[1] = 1'b0; forever #5.05 clk[1] = ~clk[1]; end
  initial begin clk[2] = 1'b0; forever #4.95 clk[2] = ~clk[2]; end

  task automatic tick(input int n);
    case (n)
      0:       @(posedge clk[0]);
      1:       @(posedge clk[1]);
      default: @(posedge clk[2]);
    endcase
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // ------------------------------------------------------ receiver monitors
  // per node: number of bytes, last byte, ends, errors, last priority
  int         nbytes [N], ends [N], errs [N];
  logic [7:0] last_byte [N];
  bit         last_hp [N];

  for (genvar i = 0; i < N; i++) begin : g_mon
    always @(posedge clk[i]) begin
      if (rx_recv[i]) begin nbytes[i]++; last_byte[i] = rx_byte[i]; end
      if (rx_end[i]) begin ends[i]++; if (rx_error[i]) errs[i]++; last_hp[i] = rx_hp[i]; end
    end
  end

  task automatic clear_rx();
    for (int i = 0; i < N; i++) begin
      nbytes[i] = 0;
      ends[i]   = 0;
      errs[i]   = 0;
    end
  endtask

  // ------------------------------------------------------------- host model
  bit res_error [N], res_lost [N];

  // Send from node n: the LP message repeats byte b for nbyte bytes.
  task automatic do_send(input int n, input bit is_hp, input logic [7:0] b, input int nbyte);
    int cyc = 0;
    tick(n);
    send[n]  <= 1'b1;
    hp[n]    <= is_hp;
    size[n]  <= 3'(nbyte);
    tx_in[n] <= b;
    tick(n);
    send[n] <= 1'b0;
    while (!tx_end[n] && cyc < 2000) begin
      tick(n);
      cyc++;
    end
    res_error[n] = tx_error[n];
    res_lost[n]  = tx_lost[n];
  endtask

  // One contest: node i sends if act[i]; returns after every sender ended.
  task automatic contest(input bit act [N], input bit is_hp [N], input logic [7:0] b [N],
                         input int lp_bytes);
    clear_rx();
    fork
      if (act[0]) do_send(0, is_hp[0], b[0], is_hp[0] ? 1 : lp_bytes);
      if (act[1]) do_send(1, is_hp[1], b[1], is_hp[1] ? 1 : lp_bytes);
      if (act[2]) do_send(2, is_hp[2], b[2], is_hp[2] ? 1 : lp_bytes);
    join
    repeat (3 * MB) tick(0);
  endtask

  // expected winner among the active nodes: HP before LP, then the larger byte
  function automatic int winner(input bit act [N], input bit is_hp [N], input logic [7:0] b [N]);
    int w = -1;
    for (int i = 0; i < N; i++)
      if (act[i]) begin
        if (w < 0) w = i;
        else if (is_hp[i] && !is_hp[w]) w = i;
        else if (is_hp[i] == is_hp[w] && b[i] > b[w]) w = i;
      end
    return w;
  endfunction

  task automatic judge(input bit act [N], input bit is_hp [N], input logic [7:0] b [N],
                       input int lp_bytes, input string tag);
    int w = winner(act, is_hp, b);
    int nb = is_hp[w] ? 1 : lp_bytes;
    bit ok = 1'b1;
    for (int i = 0; i < N; i++) begin
      if (i == w) begin
        check(!res_error[i] && !res_lost[i], $sformatf("%s: node %0d wins and gets the ACK", tag, i));
        check(ends[i] == 0, $sformatf("%s: winner %0d does not report its own message", tag, i));
        ok &= !res_error[i] && ends[i] == 0;
      end else begin
        if (act[i]) begin
          check(res_error[i] && res_lost[i], $sformatf("%s: node %0d loses arbitration", tag, i));
          ok &= res_lost[i];
        end
        check(nbytes[i] == nb && last_byte[i] == b[w] && ends[i] == 1 && errs[i] == 0 &&
              last_hp[i] == is_hp[w],
              $sformatf("%s: node %0d receives %0d x %02h from node %0d (got %0d x %02h, ends %0d errs %0d)",
                        tag, i, nb, b[w], w, nbytes[i], last_byte[i], ends[i], errs[i]));
        ok &= nbytes[i] == nb && last_byte[i] == b[w];
      end
    end
    if (!ok) $display("  %s failed", tag);
  endtask

  // --------------------------------------------------------------- scenario
  initial begin
    bit         act [N], is_hp [N];
    logic [7:0] b [N];
    int         w, f0;
    rst_n = 1'b0;
    for (int i = 0; i < N; i++) begin
      send[i] = 1'b0; hp[i] = 1'b0; size[i] = 3'd1; tx_in[i] = 8'h00;
      nbytes[i] = 0; ends[i] = 0; errs[i] = 0; last_byte[i] = 8'h00; last_hp[i] = 1'b0;
    end
    #23 rst_n = 1'b1;
    repeat (20) tick(0);

    for (int round = 0; round < 4; round++) begin
      // node 0 LP, nodes 1 and 2 HP with different random bytes
      is_hp[0] = 1'b0; is_hp[1] = 1'b1; is_hp[2] = 1'b1;
      b[0] = 8'($urandom);
      b[1] = 8'($urandom);
      do b[2] = 8'($urandom); while (b[2] == b[1]);
      act[0] = 1'b1; act[1] = 1'b1; act[2] = 1'b1;

      f0 = failures;
      contest(act, is_hp, b, 2);
      judge(act, is_hp, b, 2, $sformatf("round %0d three-way", round));
      if (failures == f0) n_arb3++;

      // the two losers try again
      w = winner(act, is_hp, b);
      act[w] = 1'b0;
      f0 = failures;
      contest(act, is_hp, b, 2);
      judge(act, is_hp, b, 2, $sformatf("round %0d retry", round));
      if (failures == f0) n_rearb++;

      // the LP node alone
      act[0] = 1'b1; act[1] = 1'b0; act[2] = 1'b0;
      f0 = failures;
      contest(act, is_hp, b, 2);
      judge(act, is_hp, b, 2, $sformatf("round %0d lp alone", round));
      if (failures == f0) n_lp_multi++;
    end

    // HP interrupt seen by a bystander: node 0 sends 7 LP bytes, node 2
    // requests an HP message somewhere inside the LP payload
    for (int round = 0; round < 4; round++) begin
      int delay;
      b[0]  = 8'($urandom);
      b[2]  = 8'($urandom);
      delay = MB * (8 + int'($urandom_range(40)));
      clear_rx();
      f0 = failures;
      fork
        do_send(0, 1'b0, b[0], 7);
        begin
          repeat (delay) tick(2);
          do_send(2, 1'b1, b[2], 1);
        end
      join
      repeat (3 * MB) tick(0);
      check(res_lost[0], $sformatf("irq %0d: LP sender interrupted", round));
      check(!res_error[2], $sformatf("irq %0d: HP sender gets the ACK", round));
      check(nbytes[1] >= 1 && last_byte[1] == b[2] && ends[1] == 2 && errs[1] == 1 && last_hp[1],
            $sformatf("irq %0d: bystander drops the LP message and receives HP %02h (got %02h, ends %0d errs %0d)",
                      round, b[2], last_byte[1], ends[1], errs[1]));
      check(nbytes[0] == 1 && last_byte[0] == b[2] && ends[0] == 1 && errs[0] == 0 && last_hp[0],
            $sformatf("irq %0d: interrupted sender receives HP %02h", round, b[2]));
      check(ends[2] == 0, $sformatf("irq %0d: HP sender reports nothing", round));
      if (failures == f0) n_irq++;
    end

    $display("mechanisms: arb3=%0d rearb=%0d lp_multi=%0d irq=%0d", n_arb3, n_rearb, n_lp_multi, n_irq);
    check(n_irq > 0, "HP interrupt with a bystander happened");
    check(n_arb3 > 0, "three-way arbitration happened");
    check(n_rearb > 0, "repeated arbitration happened");
    check(n_lp_multi > 0, "LP delivery to two receivers happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat (80000) @(posedge clk[0]);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
