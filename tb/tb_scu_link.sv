// tb_scu_link: self-checking test of one SCU link pair.
//
// Two scu_link instances are wired back to back (A.ser_out -> B.ser_in,
// B.ser_out -> A.ser_in) through a fault injector that can flip one bit per
// frame. The injector follows the frame structure on its own (start bit,
// majority class, frame length) and only flips bits after the class code.
// Phases:
//   1. A sends N1 words, no errors: words arrive in order, and the time taken
//      is one bit per cycle, N1*71 cycles plus a small latency.
//   2. Both send N2 words with bit flips: every flip must show up as exactly
//      one parity error at the receiving end, resends must happen, and all
//      words still arrive once and in order.
//   3. B's receiver is held full for a while: frames are dropped, the
//      sender's timeout resends them, nothing is lost.
module tb_scu_link;
  timeunit 1ns; timeprecision 100ps;
  import qcdoc_pkg::*;

  localparam int unsigned TO = 300;
  localparam int unsigned N1 = 40;
  localparam int unsigned N2 = 150;
  localparam int unsigned N3 = 30;

  logic clk = 1'b0;
  logic rst_n;
  always #1 clk = ~clk;

  logic a_out, b_out, a_in, b_in;
  logic a_txv, a_txr, a_rxv, a_rxr, b_txv, b_txr, b_rxv, b_rxr;
  word_t a_txd, a_rxd, b_txd, b_rxd;
  logic [15:0] a_perr, a_res, b_perr, b_res;

  scu_link #(.TIMEOUT(TO)) u_a (.clk, .rst_n, .ser_out(a_out), .ser_in(a_in),
    .tx_valid(a_txv), .tx_data(a_txd), .tx_ready(a_txr),
    .rx_valid(a_rxv), .rx_data(a_rxd), .rx_ready(a_rxr),
    .perr_count(a_perr), .resend_count(a_res));
  scu_link #(.TIMEOUT(TO)) u_b (.clk, .rst_n, .ser_out(b_out), .ser_in(b_in),
    .tx_valid(b_txv), .tx_data(b_txd), .tx_ready(b_txr),
    .rx_valid(b_rxv), .rx_data(b_rxd), .rx_ready(b_rxr),
    .perr_count(b_perr), .resend_count(b_res));

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at cycle %0d", what, cycle);
    end
  endtask

  // ---------------- fault injector, one per wire ----------------
  bit inject_en = 0;
  int flips_ab = 0, flips_ba = 0;

  typedef struct {
    bit in_frame;
    int pos;
    int len;
    int ones;        // class bits seen as 1
    bit flipped;
  } trk_t;
  trk_t t_ab, t_ba;

  function automatic bit step(ref trk_t t, input logic bitv, input bit en, ref int flips);
    bit f = 0;
    if (!t.in_frame) begin
      if (bitv) begin
        t.in_frame = 1; t.pos = 0; t.len = 0; t.ones = 0; t.flipped = 0;
      end
      return 0;
    end
    t.pos++;
    if (t.pos <= 3) begin
      t.ones += bitv;
      if (t.pos == 3) t.len = (t.ones >= 2) ? DATA_FRAME_LEN : CTRL_FRAME_LEN;
    end else if (en && !t.flipped && ($urandom % 90) == 0) begin
      f = 1; t.flipped = 1; flips++;
    end
    if (t.len != 0 && t.pos == t.len - 1) t.in_frame = 0;
    return f;
  endfunction

  bit fl_ab, fl_ba;
  always @(posedge clk) begin
    if (!rst_n) begin
      t_ab.in_frame = 0; t_ba.in_frame = 0; fl_ab <= 0; fl_ba <= 0;
    end else begin
      // decide, for the bit now on the wire, whether it is flipped; the
      // flip is applied combinationally below during this same bit time
      fl_ab <= step(t_ab, a_out, inject_en, flips_ab);
      fl_ba <= step(t_ba, b_out, inject_en, flips_ba);
    end
  end
  // The injector looks at a_out after the edge; the registered flag lines
  // up with the next bit, so the tracker works one bit behind. Keep a one
  // cycle delay line so that the flip hits the bit the tracker examined.
  logic a_d, b_d;
  always @(posedge clk) begin a_d <= a_out; b_d <= b_out; end
  assign b_in = a_d ^ fl_ab;
  assign a_in = b_d ^ fl_ba;

  // ---------------- traffic and scoreboards ----------------
  word_t q_ab[$], q_ba[$];
  int got_ab = 0, got_ba = 0;
  int to_send_a = 0, to_send_b = 0;
  bit hold_b = 0;

  always @(posedge clk) begin
    if (!rst_n) begin
      a_txv <= 0; b_txv <= 0;
    end else begin
      if (a_txv && a_txr) begin q_ab.push_back(a_txd); to_send_a--; end
      if (b_txv && b_txr) begin q_ba.push_back(b_txd); to_send_b--; end
      a_txv <= ((a_txv && a_txr) ? to_send_a > 1 : to_send_a > 0);
      b_txv <= ((b_txv && b_txr) ? to_send_b > 1 : to_send_b > 0);
      if (!(a_txv && !a_txr)) a_txd <= {$urandom, $urandom};
      if (!(b_txv && !b_txr)) b_txd <= {$urandom, $urandom};
    end
  end
  assign a_rxr = 1'b1;
  assign b_rxr = !hold_b;

  int last_rx_b = 0;
  always @(posedge clk) begin
    if (rst_n && b_rxv && b_rxr) begin
      check(q_ab.size() != 0 && b_rxd == q_ab[0], "A->B word order/value");
      if (q_ab.size() != 0) void'(q_ab.pop_front());
      got_ab++;
      last_rx_b = cycle;
    end
    if (rst_n && a_rxv && a_rxr) begin
      check(q_ba.size() != 0 && a_rxd == q_ba[0], "B->A word order/value");
      if (q_ba.size() != 0) void'(q_ba.pop_front());
      got_ba++;
    end
  end

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    rst_n = 0;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    repeat (4) @(posedge clk);

    // phase 1: rate
    to_send_a = N1;
    @(posedge clk);
    t0 = cycle;
    wait (got_ab == N1);
    t1 = last_rx_b;
    $display("phase 1: %0d words in %0d cycles", N1, t1 - t0);
    check(t1 - t0 >= N1 * DATA_FRAME_LEN, "not faster than 1 bit per cycle");
    check(t1 - t0 <= N1 * DATA_FRAME_LEN + 20, "one bit per cycle, no window stalls");
    check(a_res == 0 && b_perr == 0, "no errors without injection");

    // phase 2: errors both ways
    repeat (20) @(posedge clk);
    inject_en = 1;
    to_send_a = N2; to_send_b = N2;
    wait (got_ab == N1 + N2 && got_ba == N2);
    inject_en = 0;
    repeat (200) @(posedge clk);
    $display("phase 2: flips A->B %0d B->A %0d, perr B %0d A %0d, resends A %0d B %0d",
             flips_ab, flips_ba, b_perr, a_perr, a_res, b_res);
    check(flips_ab > 0 && flips_ba > 0, "errors were injected");
    check(b_perr == 16'(flips_ab), "every flip A->B detected once");
    check(a_perr == 16'(flips_ba), "every flip B->A detected once");
    check(a_res > 0 && b_res > 0, "automatic resend happened");

    // phase 3: receiver full -> drop -> timeout resend
    hold_b = 1;
    to_send_a = N3;
    repeat (3 * TO) @(posedge clk);
    check(got_ab == N1 + N2, "nothing delivered while held");
    hold_b = 0;
    wait (got_ab == N1 + N2 + N3);
    repeat (50) @(posedge clk);
    check(q_ab.size() == 0 && q_ba.size() == 0, "all words delivered");
    check(got_ab == N1 + N2 + N3 && got_ba == N2, "word counts");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
