// tb_scu: self-checking test of the SCU with all 12 links in loop-back.
//
// Every dimension is closed on the node itself, as on a single-node test
// jig: forward link 2d sends to backward link 2d+1 and vice versa. The
// testbench holds a line memory with random contents, grants the SCU's
// requests with random stalls and returns read data one cycle later.
//   1. All 12 send engines run at once; each receive engine stores what its
//      partner link sent. The stored words must equal the sent ones, all
//      STATUS done bits must be set and irq must have fired.
//   2. One transfer alone must take about 71 cycles per word (one bit per
//      cycle on the wire).
//   3. Pass-through: words sent on link 0 arrive on link 1, are forwarded to
//      link 2 and kept locally; link 3 receives the forwarded copy.
//   3b. The same with a limit of 3 words: only 3 are forwarded, all 8 kept.
//   4. One bit of a frame on link 4's wire is flipped: link 5's PERR and link
//      4's RESEND registers must count it and the data must still be right.
module tb_scu;
  timeunit 1ns; timeprecision 100ps;
  import qcdoc_pkg::*;

  localparam int unsigned NL = NLINK;
  localparam int unsigned MEM_LINES = 4096;

  logic clk = 1'b0;
  logic rst_n;
  always #1 clk = ~clk;

  logic [NL-1:0] ser_out, ser_in;
  logic reg_sel, reg_we;
  logic [6:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  mem_req_t m_req;
  logic m_gnt, m_rvalid, irq;
  line_t m_rdata;
  logic [31:0] pt_count;

  scu #(.TIMEOUT(400)) dut (.*);

  // loop-back with an optional flip on link 4's output
  logic flip4;
  always_comb begin
    for (int d = 0; d < NL / 2; d++) begin
      ser_in[2*d+1] = ser_out[2*d] ^ (2*d == 4 ? flip4 : 1'b0);
      ser_in[2*d]   = ser_out[2*d+1];
    end
  end

  // memory model
  line_t mem [MEM_LINES];
  always @(posedge clk) begin
    m_rvalid <= 1'b0;
    if (m_req.req && m_gnt) begin
      if (m_req.we) begin
        for (int b = 0; b < 16; b++)
          if (m_req.be[b]) mem[m_req.addr[11:0]][8*b +: 8] <= m_req.wdata[8*b +: 8];
      end else begin
        m_rdata  <= mem[m_req.addr[11:0]];
        m_rvalid <= 1'b1;
      end
    end
    m_gnt <= ($urandom % 4) != 0;
  end

  function automatic word_t rdw(input int unsigned waddr);
    return waddr[0] ? mem[waddr >> 1][127:64] : mem[waddr >> 1][63:0];
  endfunction

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int irqs = 0;
  always @(posedge clk) if (rst_n && irq) irqs++;

  task automatic wr(input int l, input int r, input int unsigned v);
    @(negedge clk);
    reg_sel = 1; reg_we = 1; reg_addr = 7'(8*l + r); reg_wdata = v;
    @(negedge clk);
    reg_sel = 0; reg_we = 0;
  endtask
  task automatic rd(input int l, input int r, output int unsigned v);
    @(negedge clk);
    reg_sel = 1; reg_we = 0; reg_addr = 7'(8*l + r);
    #0.1 v = reg_rdata;
    @(negedge clk);
    reg_sel = 0;
  endtask
  task automatic wait_idle(input int l);
    int unsigned st;
    do rd(l, SCU_R_STATUS, st); while (st[1:0] != 0);
  endtask

  function automatic int partner(input int l);
    return l ^ 1;
  endfunction

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned v;
    int t0, t1;
    automatic int C = 12;
    reg_sel = 0; reg_we = 0; reg_addr = 0; reg_wdata = 0; flip4 = 0;
    for (int i = 0; i < MEM_LINES; i++) mem[i] = {$urandom, $urandom, $urandom, $urandom};
    rst_n = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;

    // ---- 1: all links at once ----
    for (int l = 0; l < NL; l++) begin
      wr(l, SCU_R_SADDR, 64 * l);          // source words 64l..
      wr(l, SCU_R_SCOUNT, C);
      wr(l, SCU_R_RADDR, 2048 + 64 * l);   // destination words
      wr(l, SCU_R_RCOUNT, C);
    end
    for (int l = 0; l < NL; l++) wr(l, SCU_R_CTRL, 3);
    for (int l = 0; l < NL; l++) wait_idle(l);
    for (int l = 0; l < NL; l++) begin
      automatic bit ok = 1;
      for (int k = 0; k < C; k++)
        if (rdw(2048 + 64 * l + k) != rdw(64 * partner(l) + k)) ok = 0;
      check(ok, $sformatf("link %0d received its partner's words", l));
      rd(l, SCU_R_STATUS, v);
      check(v[3:2] == 2'b11, "send and receive done");
      rd(l, SCU_R_PERR, v);
      check(v == 0, "no parity errors");
    end
    check(irqs > 0, "irq fired");

    // ---- 2: rate ----
    wr(1, SCU_R_RADDR, 3000); wr(1, SCU_R_RCOUNT, 20); wr(1, SCU_R_CTRL, 2);
    wr(0, SCU_R_SADDR, 100);  wr(0, SCU_R_SCOUNT, 20);
    t0 = $time;
    wr(0, SCU_R_CTRL, 1);
    wait_idle(1);
    t1 = $time;
    $display("20 words over one link: %0d cycles", (t1 - t0) / 2);
    check((t1 - t0) / 2 >= 20 * DATA_FRAME_LEN, "no faster than the line rate");
    check((t1 - t0) / 2 <= 20 * DATA_FRAME_LEN + 60, "one bit per cycle");
    begin
      automatic bit ok = 1;
      for (int k = 0; k < 20; k++) if (rdw(3000 + k) != rdw(100 + k)) ok = 0;
      check(ok, "rate transfer data");
    end

    // ---- 3: pass-through 0 -> 1 -> 2 -> 3 ----
    wr(1, SCU_R_RADDR, 3200); wr(1, SCU_R_RCOUNT, 8);
    wr(1, SCU_R_CTRL, 2 | (2 << 4) | (1 << 8) | (1 << 9));
    wr(3, SCU_R_RADDR, 3300); wr(3, SCU_R_RCOUNT, 8); wr(3, SCU_R_CTRL, 2);
    wr(0, SCU_R_SADDR, 500);  wr(0, SCU_R_SCOUNT, 8); wr(0, SCU_R_CTRL, 1);
    wait_idle(1); wait_idle(3);
    begin
      automatic bit ok1 = 1, ok3 = 1;
      for (int k = 0; k < 8; k++) begin
        if (rdw(3200 + k) != rdw(500 + k)) ok1 = 0;
        if (rdw(3300 + k) != rdw(500 + k)) ok3 = 0;
      end
      check(ok1, "pass-through local copy");
      check(ok3, "pass-through forwarded copy");
    end
    check(pt_count == 8, "8 words passed through");
    wr(1, SCU_R_CTRL, 0);

    // ---- 3b: pass-through limited to 3 words ----
    wr(1, SCU_R_RADDR, 3500); wr(1, SCU_R_RCOUNT, 8);
    wr(1, SCU_R_CTRL, 2 | (2 << 4) | (1 << 8) | (1 << 9) | (3 << 16));
    wr(3, SCU_R_RADDR, 3600); wr(3, SCU_R_RCOUNT, 3); wr(3, SCU_R_CTRL, 2);
    wr(0, SCU_R_SADDR, 600);  wr(0, SCU_R_SCOUNT, 8); wr(0, SCU_R_CTRL, 1);
    wait_idle(1); wait_idle(3);
    begin
      automatic bit ok1 = 1, ok3 = 1;
      for (int k = 0; k < 8; k++) if (rdw(3500 + k) != rdw(600 + k)) ok1 = 0;
      for (int k = 0; k < 3; k++) if (rdw(3600 + k) != rdw(600 + k)) ok3 = 0;
      check(ok1, "limited pass-through: all 8 words kept locally");
      check(ok3, "limited pass-through: first 3 words forwarded");
    end
    check(pt_count == 8 + 3, "only 3 more words passed through");
    rd(1, SCU_R_CTRL, v);
    check(v[8] == 1'b0 && v[31:16] == 0, "pass-through switched itself off");
    wr(1, SCU_R_CTRL, 0);

    // ---- 4: one bit error on link 4 ----
    wr(5, SCU_R_RADDR, 3400); wr(5, SCU_R_RCOUNT, 6); wr(5, SCU_R_CTRL, 2);
    wr(4, SCU_R_SADDR, 700);  wr(4, SCU_R_SCOUNT, 6);
    @(negedge clk);
    reg_sel = 1; reg_we = 1; reg_addr = 7'(8*4 + SCU_R_CTRL); reg_wdata = 1;
    @(negedge clk);
    reg_sel = 0; reg_we = 0;
    wait (ser_out[4] == 1'b1);           // start bit of the first data frame
    repeat (30) @(negedge clk);
    flip4 = 1;
    @(negedge clk);
    flip4 = 0;
    wait_idle(5);
    begin
      automatic bit ok = 1;
      for (int k = 0; k < 6; k++) if (rdw(3400 + k) != rdw(700 + k)) ok = 0;
      check(ok, "data right after a bit error");
    end
    rd(5, SCU_R_PERR, v);   check(v == 1, "PERR counted the flipped bit");
    rd(4, SCU_R_RESEND, v); check(v >= 1, "RESEND counted the resend");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
