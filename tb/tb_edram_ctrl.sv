// tb_edram_ctrl: self-checking test of the EDRAM controller with three
// masters. Each master issues random reads and byte-masked writes to a small
// address range and holds a request until it is granted. The testbench keeps
// its own memory image, updated in grant order, and checks every read return
// one cycle after its grant. It also checks that some port is granted in
// every cycle in which any asks (one line per cycle, 8 GByte/s at 500 MHz),
// that three continuously requesting ports are served in turn, and that the
// stall counter equals the waiting it computes itself.
module tb_edram_ctrl;
  timeunit 1ns; timeprecision 100ps;
  import qcdoc_pkg::*;

  localparam int unsigned NP = 3;
  localparam int unsigned LINES = 4096;
  localparam int unsigned AW = $clog2(LINES);

  logic clk = 1'b0;
  logic rst_n;
  always #1 clk = ~clk;

  mem_req_t req [NP];
  logic [NP-1:0] gnt, rvalid;
  line_t rdata;
  logic m_en, m_we;
  logic [AW-1:0] m_addr;
  logic [BE_W-1:0] m_be;
  line_t m_wdata, m_rdata;
  logic [31:0] stall_count;

  edram_ctrl #(.NPORT(NP), .LINES(LINES)) dut (.*);
  edram_macro #(.LINES(LINES)) u_mem (.clk, .en(m_en), .we(m_we), .addr(m_addr),
                                      .be(m_be), .wdata(m_wdata), .rdata(m_rdata));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  line_t img [64];
  line_t expect_q [NP];
  bit    expect_v [NP];
  int    exp_stalls = 0;
  int    grants [NP];
  bit    all_busy = 0;
  int    turn_errs = 0;
  int    last_port = -1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // masters
  always @(posedge clk) begin
    if (!rst_n) begin
      for (int p = 0; p < NP; p++) req[p] <= '0;
    end else begin
      int n;
      n = 0;
      for (int p = 0; p < NP; p++) n += req[p].req;
      if (n > 1) exp_stalls += n - 1;
      check(n == 0 || gnt != 0, "a request is served every cycle");
      if (all_busy && gnt != 0) begin
        int g;
        g = 0;
        for (int p = 0; p < NP; p++) if (gnt[p]) g = p;
        if (last_port >= 0 && g != (last_port + 1) % NP) turn_errs++;
        last_port = g;
      end
      for (int p = 0; p < NP; p++) begin
        // read return of last cycle's grant
        if (expect_v[p]) begin
          check(rvalid[p] && rdata == expect_q[p], $sformatf("port %0d read data", p));
          expect_v[p] = 0;
        end else begin
          check(!rvalid[p], "no spurious rvalid");
        end
        if (gnt[p]) begin
          grants[p]++;
          if (req[p].we) begin
            for (int b = 0; b < BE_W; b++)
              if (req[p].be[b]) img[req[p].addr[5:0]][8*b +: 8] = req[p].wdata[8*b +: 8];
          end else begin
            expect_q[p] = img[req[p].addr[5:0]];
            expect_v[p] = 1;
          end
        end
        if (!req[p].req || gnt[p]) begin
          mem_req_t r;
          r = '0;
          r.req   = all_busy ? 1'b1 : (($urandom % 3) != 0);
          r.we    = ($urandom % 2) != 0;
          r.addr  = DDR_ADDR_W'($urandom % 64);
          r.be    = BE_W'($urandom);
          r.wdata = {$urandom, $urandom, $urandom, $urandom};
          req[p] <= r;
        end
      end
    end
  end

  initial begin
    for (int i = 0; i < 64; i++) img[i] = '0;
    for (int p = 0; p < NP; p++) begin expect_v[p] = 0; grants[p] = 0; end
    rst_n = 0;
    repeat (3) @(posedge clk);
    // the model's lines start at zero, as does the image
    rst_n = 1;
    repeat (3000) @(posedge clk);
    all_busy = 1;
    repeat (10) @(posedge clk);
    last_port = -1; turn_errs = 0;
    for (int p = 0; p < NP; p++) grants[p] = 0;
    repeat (300) @(posedge clk);
    check(turn_errs == 0, "round-robin order under full load");
    check(grants[0] >= 99 && grants[1] >= 99 && grants[2] >= 99, "each port gets a third");
    all_busy = 0;
    repeat (50) @(posedge clk);
    check(stall_count == 32'(exp_stalls), $sformatf("stall count %0d vs %0d", stall_count, exp_stalls));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
