// tb_dma_ctrl: self-checking test of the EDRAM/SDRAM DMA controller.
//
// The EDRAM side is a line memory that grants at random and answers reads
// one cycle after the grant. The DDR side stands for the external DDR
// controller: it accepts one request every 3 cycles (16 bytes per 3 cycles,
// about 2.67 GByte/s at 500 MHz, just above the paper's 2.6 GByte/s) and
// answers reads 6 cycles later, in order. The test copies blocks in both
// directions through the register port, checks every copied line and the
// lines around the block, the done/busy bits and the interrupt, and checks
// that a 128-line copy DDR->EDRAM runs at the DDR side's rate, i.e. that the
// controller itself sustains 2.6 GByte/s.
module tb_dma_ctrl;
  timeunit 1ns; timeprecision 100ps;
  import qcdoc_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #1 clk = ~clk;

  logic reg_sel, reg_we;
  logic [2:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  mem_req_t e_req, d_req;
  logic e_gnt, e_rvalid, d_gnt, d_rvalid, irq;
  line_t e_rdata, d_rdata;

  dma_ctrl dut (.*);

  line_t emem [1024];
  line_t dmem [1024];

  // EDRAM side
  bit e_stall = 1;
  always @(posedge clk) begin
    e_rvalid <= 1'b0;
    if (e_req.req && e_gnt) begin
      if (e_req.we) emem[e_req.addr[9:0]] <= e_req.wdata;
      else begin e_rdata <= emem[e_req.addr[9:0]]; e_rvalid <= 1'b1; end
    end
    e_gnt <= e_stall ? (($urandom % 3) != 0) : 1'b1;
  end

  // DDR side: one request per 3 cycles, reads return after 6 cycles
  int ddr_ph = 0;
  line_t pipe_d [6];
  bit    pipe_v [6];
  assign d_gnt = (ddr_ph == 0);
  always @(posedge clk) begin
    ddr_ph <= (ddr_ph + 1) % 3;
    for (int i = 5; i > 0; i--) begin pipe_d[i] <= pipe_d[i-1]; pipe_v[i] <= pipe_v[i-1]; end
    pipe_v[0] <= 1'b0;
    if (d_req.req && d_gnt) begin
      if (d_req.we) dmem[d_req.addr[9:0]] <= d_req.wdata;
      else begin pipe_d[0] <= dmem[d_req.addr[9:0]]; pipe_v[0] <= 1'b1; end
    end
  end
  assign d_rvalid = pipe_v[5];
  assign d_rdata  = pipe_d[5];

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  int irqs = 0;
  always @(posedge clk) if (rst_n && irq) irqs++;

  task automatic wr(input int r, input int unsigned v);
    @(negedge clk);
    reg_sel = 1; reg_we = 1; reg_addr = 3'(r); reg_wdata = v;
    @(negedge clk);
    reg_sel = 0; reg_we = 0;
  endtask
  task automatic rd(input int r, output int unsigned v);
    @(negedge clk);
    reg_sel = 1; reg_we = 0; reg_addr = 3'(r);
    #0.5 v = reg_rdata;
    @(negedge clk);
    reg_sel = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned v;
    int t0, t1;
    line_t e0 [1024], d0 [1024];
    reg_sel = 0; reg_we = 0; reg_addr = 0; reg_wdata = 0;
    for (int i = 0; i < 1024; i++) begin
      emem[i] = {$urandom, $urandom, $urandom, $urandom};
      dmem[i] = {$urandom, $urandom, $urandom, $urandom};
    end
    for (int i = 0; i < 1024; i++) begin pipe_v[i % 6] = 0; end
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    e0 = emem; d0 = dmem;

    // EDRAM -> DDR, 37 lines, EDRAM grants at random
    wr(DMA_R_EADDR, 100); wr(DMA_R_DADDR, 300); wr(DMA_R_LEN, 37);
    wr(DMA_R_CTRL, 1);
    do rd(DMA_R_STATUS, v); while (v[0]);
    check(v[1], "done after EDRAM->DDR");
    begin
      automatic bit ok = 1;
      for (int i = 0; i < 37; i++) if (dmem[300 + i] != e0[100 + i]) ok = 0;
      check(ok, "EDRAM->DDR lines copied");
      check(dmem[299] == d0[299] && dmem[337] == d0[337], "lines around the block untouched");
    end
    check(irqs == 1, "one interrupt");

    // DDR -> EDRAM, 128 lines, EDRAM always ready: rate
    e_stall = 0;
    wr(DMA_R_EADDR, 500); wr(DMA_R_DADDR, 600); wr(DMA_R_LEN, 128);
    @(negedge clk);
    reg_sel = 1; reg_we = 1; reg_addr = 3'(DMA_R_CTRL); reg_wdata = 3;
    t0 = $time;
    @(negedge clk);
    reg_sel = 0; reg_we = 0;
    wait (irq);
    t1 = $time;
    $display("128 lines DDR->EDRAM in %0d cycles (%0d MByte/s at 500 MHz)",
             (t1 - t0) / 2, 128 * 16 * 500 / ((t1 - t0) / 2));
    check((t1 - t0) / 2 <= 128 * 3 + 12, "copy runs at the DDR side's rate");
    check(128 * 16 * 500 / ((t1 - t0) / 2) >= 2600, "2.6 GByte/s sustained");
    repeat (2) @(posedge clk);
    begin
      automatic bit ok = 1;
      for (int i = 0; i < 128; i++) if (emem[500 + i] != d0[600 + i]) ok = 0;
      check(ok, "DDR->EDRAM lines copied");
      check(emem[499] == e0[499] && emem[628] == e0[628], "EDRAM around the block untouched");
    end
    rd(DMA_R_STATUS, v);
    check(v[1:0] == 2'b10, "status done, not busy");
    check(irqs == 2, "second interrupt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
