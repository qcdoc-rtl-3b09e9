// tb_scu_link: two scu_link ends joined back to back (A's bytes go to B and
// B's to A, one register stage each way, one byte per cycle).
//
// Phases:
//   1. clean stream A->B, receiver always ready: data and order checked, and
//      the rate checked against 12 bytes per word (6 symbols);
//   2. receiver stalled: A may put at most 3 data words into B's buffers;
//   3. supervisor word A->B and B->A: interrupt, data and release;
//   4. both directions at once with bit errors injected on both wires (at
//      most one flipped bit per 12 bytes): every word must still arrive
//      intact and in order, and retries, NACKs and corrected headers must all
//      have happened.
// Expected data come from a queue in the testbench, not from the block.
module tb_scu_link;
  import qcdoc_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ends
  logic [7:0] a_tx, b_tx, a_rx, b_rx;
  logic       a_rxv, b_rxv, take;
  logic       a_snd_v, a_snd_r, a_rcv_v, a_rcv_r, b_snd_v, b_snd_r, b_rcv_v, b_rcv_r;
  word_t      a_snd_d, a_rcv_d, b_snd_d, b_rcv_d;
  logic       a_sup_v, a_sup_r, a_sup_f, a_sup_rel, b_sup_v, b_sup_r, b_sup_f, b_sup_rel;
  word_t      a_sup_d, a_sup_rx, b_sup_d, b_sup_rx;
  logic       a_busy, b_busy, a_retry, b_retry, a_nack, b_nack, a_fix, b_fix;

  scu_link u_a (
    .clk, .rst_n, .tx_byte(a_tx), .tx_take(take), .rx_byte(a_rx), .rx_valid(a_rxv),
    .snd_valid(a_snd_v), .snd_data(a_snd_d), .snd_ready(a_snd_r),
    .rcv_valid(a_rcv_v), .rcv_data(a_rcv_d), .rcv_ready(a_rcv_r),
    .sup_tx_valid(a_sup_v), .sup_tx_data(a_sup_d), .sup_tx_ready(a_sup_r),
    .sup_rx_full(a_sup_f), .sup_rx_data(a_sup_rx), .sup_rx_release(a_sup_rel),
    .tx_busy(a_busy), .ev_retry(a_retry), .ev_nack(a_nack), .hdr_fixed(a_fix));

  scu_link u_b (
    .clk, .rst_n, .tx_byte(b_tx), .tx_take(take), .rx_byte(b_rx), .rx_valid(b_rxv),
    .snd_valid(b_snd_v), .snd_data(b_snd_d), .snd_ready(b_snd_r),
    .rcv_valid(b_rcv_v), .rcv_data(b_rcv_d), .rcv_ready(b_rcv_r),
    .sup_tx_valid(b_sup_v), .sup_tx_data(b_sup_d), .sup_tx_ready(b_sup_r),
    .sup_rx_full(b_sup_f), .sup_rx_data(b_sup_rx), .sup_rx_release(b_sup_rel),
    .tx_busy(b_busy), .ev_retry(b_retry), .ev_nack(b_nack), .hdr_fixed(b_fix));

  // wires with error injection
  bit inject = 0;
  int cool_ab = 0, cool_ba = 0;
  always_ff @(posedge clk) begin
    logic [7:0] fa, fb;
    fa = '0; fb = '0;
    if (inject && cool_ab == 0 && $urandom_range(0, 29) == 0) begin
      fa[$urandom_range(0, 7)] = 1'b1; cool_ab <= 12;
    end else if (cool_ab > 0) cool_ab <= cool_ab - 1;
    if (inject && cool_ba == 0 && $urandom_range(0, 29) == 0) begin
      fb[$urandom_range(0, 7)] = 1'b1; cool_ba <= 12;
    end else if (cool_ba > 0) cool_ba <= cool_ba - 1;
    b_rx  <= a_tx ^ fa;
    a_rx  <= b_tx ^ fb;
    b_rxv <= take && rst_n;
    a_rxv <= take && rst_n;
  end

  // counters
  int n_retry = 0, n_nack = 0, n_fix = 0;
  always_ff @(posedge clk) begin
    n_retry <= n_retry + int'(a_retry) + int'(b_retry);
    n_nack  <= n_nack + int'(a_nack) + int'(b_nack);
    n_fix   <= n_fix + int'(a_fix) + int'(b_fix);
  end

  // sources and sinks
  word_t q_ab[$], q_ba[$];
  int    to_send_a = 0, to_send_b = 0, got_a = 0, got_b = 0;
  int    rdy_pct = 100;
  int    a_sent = 0;

  always_ff @(posedge clk) begin
    if (a_snd_v && a_snd_r) begin
      q_ab.push_back(a_snd_d);
      to_send_a <= to_send_a - 1;
      a_sent++;
      a_snd_d <= {$urandom, $urandom};
    end
    if (b_snd_v && b_snd_r) begin
      q_ba.push_back(b_snd_d);
      to_send_b <= to_send_b - 1;
      b_snd_d <= {$urandom, $urandom};
    end
    if (rst_n && b_rcv_v && b_rcv_r) begin
      word_t e;
      e = (q_ab.size() > 0) ? q_ab.pop_front() : ~b_rcv_d;
      check(b_rcv_d == e, $sformatf("A->B word %0d: got %h expected %h", got_b, b_rcv_d, e));
      got_b <= got_b + 1;
    end
    if (rst_n && a_rcv_v && a_rcv_r) begin
      word_t e;
      e = (q_ba.size() > 0) ? q_ba.pop_front() : ~a_rcv_d;
      check(a_rcv_d == e, $sformatf("B->A word %0d: got %h expected %h", got_a, a_rcv_d, e));
      got_a <= got_a + 1;
    end
    b_rcv_r <= ($urandom_range(1, 100) <= rdy_pct);
    a_rcv_r <= ($urandom_range(1, 100) <= rdy_pct);
  end
  assign a_snd_v = (to_send_a > 0);
  assign b_snd_v = (to_send_b > 0);

  initial begin
    int t0, t1, n;
    take = 1'b1;
    a_snd_d = 64'h0123_4567_89ab_cdef; b_snd_d = 64'hfedc_ba98_7654_3210;
    a_sup_v = 0; b_sup_v = 0; a_sup_rel = 0; b_sup_rel = 0;
    a_sup_d = '0; b_sup_d = '0;
    b_rcv_r = 1; a_rcv_r = 1;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;

    // 1. clean stream, rate
    n = 100;
    @(posedge clk);
    t0 = $time / 10;
    to_send_a = n;
    wait (got_b == n);
    t1 = $time / 10;
    $display("phase 1: %0d words in %0d cycles", n, t1 - t0);
    check(t1 - t0 <= 12 * n + 40, $sformatf("rate: %0d cycles for %0d words", t1 - t0, n));
    check(t1 - t0 >= 12 * n - 12, "faster than the frame length allows");

    // 2. stalled receiver: at most 3 data buffers
    rdy_pct = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    a_sent = 0;
    to_send_a = 10;
    repeat (300) @(posedge clk);
    check(a_sent == NDATABUF, $sformatf("words sent into a stalled receiver: %0d", a_sent));
    check(b_rcv_v, "receiver holds data while stalled");
    rdy_pct = 100;
    wait (got_b == n + 10);
    $display("phase 2 done");

    // 3. supervisor words
    @(negedge clk);
    a_sup_v = 1; a_sup_d = 64'h5a5a_0000_1111_a5a5;
    b_sup_v = 1; b_sup_d = 64'h0000_ffff_2222_3333;
    fork
      begin @(posedge clk iff a_sup_r); @(negedge clk); a_sup_v = 0; end
      begin @(posedge clk iff b_sup_r); @(negedge clk); b_sup_v = 0; end
    join
    $display("phase 3 sent");
    wait (b_sup_f && a_sup_f);
    check(b_sup_rx == 64'h5a5a_0000_1111_a5a5, "supervisor word A->B");
    check(a_sup_rx == 64'h0000_ffff_2222_3333, "supervisor word B->A");
    repeat (50) @(posedge clk);
    check(u_a.slot_busy[SUP_BUF], "supervisor word stays unacknowledged until released");
    @(negedge clk); b_sup_rel = 1; a_sup_rel = 1;
    @(negedge clk); b_sup_rel = 0; a_sup_rel = 0;
    check(!b_sup_f && !a_sup_f, "release clears the supervisor interrupt");
    repeat (30) @(posedge clk);
    check(!u_a.slot_busy[SUP_BUF] && !u_b.slot_busy[SUP_BUF], "release acknowledges the supervisor word");

    // 4. both ways with bit errors
    $display("phase 3 done");
    inject = 1;
    rdy_pct = 70;
    to_send_a = 300; to_send_b = 300;
    wait (got_b == n + 10 + 300 && got_a == 300);
    inject = 0;
    repeat (100) @(posedge clk);
    check(!a_busy && !b_busy, "all words acknowledged at the end");
    $display("retries=%0d nacks=%0d corrected headers=%0d", n_retry, n_nack, n_fix);
    check(n_retry > 0, "retries happened");
    check(n_nack > 0, "NACKs were sent");
    check(n_fix > 0, "header errors were corrected");
    check(n_nack == n_retry, "one retry per NACK");
    check(q_ab.size() == 0 && q_ba.size() == 0, "no word lost");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
