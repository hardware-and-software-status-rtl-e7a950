// tb_edram_macro: self-checking test of the EDRAM model at its full 4 MByte
// size. Random byte-masked writes to lines spread over the whole address
// range, compared with a reference kept in an associative array; reads must
// return the line one clock after the request and leave rdata alone when no
// read is made.
module tb_edram_macro;
  timeunit 1ns; timeprecision 100ps;
  import qcdoc_pkg::*;

  localparam int unsigned AW = LADDR_W;

  logic clk = 1'b0;
  always #1 clk = ~clk;
  logic en, we;
  logic [AW-1:0] addr;
  logic [BE_W-1:0] be;
  line_t wdata, rdata;

  edram_macro dut (.*);

  line_t ref_mem [logic [AW-1:0]];
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [AW-1:0] used [$];

  initial begin
    en = 0; we = 0; addr = 0; be = 0; wdata = 0;
    @(negedge clk);
    for (int i = 0; i < 400; i++) begin
      logic [AW-1:0] a;
      line_t w, old;
      logic [BE_W-1:0] m;
      a = (i < 4) ? AW'(i == 0 ? 0 : i == 1 ? EDRAM_LINES - 1 : i * 65521) : AW'($urandom);
      w = {$urandom, $urandom, $urandom, $urandom};
      m = (i % 3 == 0) ? '1 : BE_W'($urandom);
      old = ref_mem.exists(a) ? ref_mem[a] : '0;
      for (int b = 0; b < BE_W; b++) if (m[b]) old[8*b +: 8] = w[8*b +: 8];
      ref_mem[a] = old;
      used.push_back(a);
      en = 1; we = 1; addr = a; be = m; wdata = w;
      @(negedge clk);
    end
    en = 0; we = 0;
    foreach (used[i]) begin
      en = 1; addr = used[i];
      @(posedge clk);
      #0.5;
      check(rdata == ref_mem[used[i]], $sformatf("read line %0h one clock after request", used[i]));
      @(negedge clk);
      en = 0;
      @(negedge clk);
      check(rdata == ref_mem[used[i]], "rdata held without a read");
    end
    // an unwritten line reads as zero
    en = 1; addr = AW'(12345);
    if (!ref_mem.exists(addr)) begin
      @(posedge clk); #0.5;
      check(rdata == '0, "unwritten line is zero");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
