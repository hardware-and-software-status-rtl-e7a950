// tb_qcdoc_node: end-to-end test of two QCDOC nodes on one daughterboard,
// at the design's full default size (4 MByte EDRAM per node).
//
// As on the two-node test jig, dimension 0 is a two-node ring between the
// nodes (A's forward link to B's backward link and the other way round) and
// every other dimension of each node is closed on itself (loop-back). Each
// node has a DDR model; the testbench plays the core (core_* port) and the
// software that programs the DCR registers.
//
// One complete operation: a block goes A.DDR -> (DMA) -> A.EDRAM -> (SCU,
// link +x, with one bit flipped on the wire) -> B.EDRAM -> (DMA) -> B.DDR and
// must arrive unchanged; at the same time B sends a block to A over its +x
// link, A's core hammers the EDRAM while A's DMA runs, and on A a block sent
// on link 2 (+y) comes back on link 3, is passed through to link 4 and lands
// on link 5, while link 3 also keeps a copy. Each mechanism is counted and
// must have happened: EDRAM arbitration stall, DMA in both directions,
// parity error detection, automatic resend, pass-through, both interrupts.
module tb_qcdoc_node;
  timeunit 1ns; timeprecision 100ps;
  import qcdoc_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #1 clk = ~clk;

  mem_req_t core_req [2], ddr_req [2];
  logic     core_gnt [2], core_rvalid [2], ddr_gnt [2], ddr_rvalid [2];
  line_t    core_rdata [2], ddr_rdata [2];
  logic     dcr_sel [2], dcr_we [2];
  logic [DCR_ADDR_W-1:0] dcr_addr [2];
  logic [DCR_DATA_W-1:0] dcr_wdata [2], dcr_rdata [2];
  logic [NLINK-1:0] ser_out [2], ser_in [2];
  logic     scu_irq [2], dma_irq [2];
  logic [31:0] edram_stalls [2], pt_words [2];

  for (genvar n = 0; n < 2; n++) begin : g_node
    qcdoc_node u_node (
      .clk, .rst_n,
      .core_req(core_req[n]), .core_gnt(core_gnt[n]), .core_rvalid(core_rvalid[n]),
      .core_rdata(core_rdata[n]),
      .ddr_req(ddr_req[n]), .ddr_gnt(ddr_gnt[n]), .ddr_rvalid(ddr_rvalid[n]),
      .ddr_rdata(ddr_rdata[n]),
      .dcr_sel(dcr_sel[n]), .dcr_we(dcr_we[n]), .dcr_addr(dcr_addr[n]),
      .dcr_wdata(dcr_wdata[n]), .dcr_rdata(dcr_rdata[n]),
      .ser_out(ser_out[n]), .ser_in(ser_in[n]),
      .scu_irq(scu_irq[n]), .dma_irq(dma_irq[n]),
      .edram_stalls(edram_stalls[n]), .pt_words(pt_words[n]));
    ddr_model u_ddr (.clk, .req(ddr_req[n]), .gnt(ddr_gnt[n]),
                     .rvalid(ddr_rvalid[n]), .rdata(ddr_rdata[n]));
  end

  // wiring: dimension 0 between the nodes, the rest loop-back
  logic flip_ab;
  always_comb begin
    ser_in[1][1] = ser_out[0][0] ^ flip_ab;  // A +x -> B -x
    ser_in[0][0] = ser_out[1][1];            // B -x -> A +x
    ser_in[0][1] = ser_out[1][0];            // B +x -> A -x
    ser_in[1][0] = ser_out[0][1];            // A -x -> B +x
    for (int n = 0; n < 2; n++)
      for (int d = 1; d < NDIM; d++) begin
        ser_in[n][2*d+1] = ser_out[n][2*d];
        ser_in[n][2*d]   = ser_out[n][2*d+1];
      end
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int irq_scu [2] = '{0, 0};
  int irq_dma [2] = '{0, 0};
  always @(posedge clk) if (rst_n) for (int n = 0; n < 2; n++) begin
    if (scu_irq[n]) irq_scu[n]++;
    if (dma_irq[n]) irq_dma[n]++;
  end

  // ---- register and core-port tasks ----
  task automatic dcr_wr(input int n, input int unsigned a, input int unsigned v);
    @(negedge clk);
    dcr_sel[n] = 1; dcr_we[n] = 1; dcr_addr[n] = DCR_ADDR_W'(a); dcr_wdata[n] = v;
    @(negedge clk);
    dcr_sel[n] = 0; dcr_we[n] = 0;
  endtask
  task automatic dcr_rd(input int n, input int unsigned a, output int unsigned v);
    @(negedge clk);
    dcr_sel[n] = 1; dcr_we[n] = 0; dcr_addr[n] = DCR_ADDR_W'(a);
    #0.5 v = dcr_rdata[n];
    @(negedge clk);
    dcr_sel[n] = 0;
  endtask
  task automatic scu_wr(input int n, input int l, input int r, input int unsigned v);
    dcr_wr(n, 8 * l + r, v);
  endtask
  task automatic scu_rd(input int n, input int l, input int r, output int unsigned v);
    dcr_rd(n, 8 * l + r, v);
  endtask
  task automatic scu_wait(input int n, input int l);
    int unsigned st;
    do scu_rd(n, l, SCU_R_STATUS, st); while (st[1:0] != 0);
  endtask
  task automatic core_wr(input int n, input int unsigned line, input line_t w);
    @(negedge clk);
    core_req[n] = '0;
    core_req[n].req = 1; core_req[n].we = 1; core_req[n].addr = DDR_ADDR_W'(line);
    core_req[n].be = '1; core_req[n].wdata = w;
    #0.5;
    while (!core_gnt[n]) @(negedge clk) #0.5;
    @(negedge clk);
    core_req[n].req = 0;
  endtask
  task automatic core_rd(input int n, input int unsigned line, output line_t w);
    @(negedge clk);
    core_req[n] = '0;
    core_req[n].req = 1; core_req[n].addr = DDR_ADDR_W'(line);
    #0.5;
    while (!core_gnt[n]) @(negedge clk) #0.5;
    @(posedge clk);                 // the grant is taken here
    #0.5 w = core_rdata[n];
    check(core_rvalid[n], "core read returns one cycle after the grant");
    @(negedge clk);
    core_req[n].req = 0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int unsigned NW = 32;           // words per SCU block
  line_t a_ddr [16], b_blk [16], pt_blk [4];

  initial begin
    int unsigned v;
    line_t w;
    flip_ab = 0;
    for (int n = 0; n < 2; n++) begin
      core_req[n] = '0; dcr_sel[n] = 0; dcr_we[n] = 0; dcr_addr[n] = 0; dcr_wdata[n] = 0;
    end
    for (int i = 0; i < 16; i++) begin
      a_ddr[i] = {$urandom, $urandom, $urandom, $urandom};
      g_node[0].u_ddr.mem[i] = a_ddr[i];
      b_blk[i] = {$urandom, $urandom, $urandom, $urandom};
    end
    for (int i = 0; i < 4; i++) pt_blk[i] = {$urandom, $urandom, $urandom, $urandom};
    rst_n = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;

    // B's core writes the block B will send; A's core writes the block for
    // the pass-through chain
    for (int i = 0; i < 16; i++) core_wr(1, 'h3000 + i, b_blk[i]);
    for (int i = 0; i < 4; i++)  core_wr(0, 'h5000 + i, pt_blk[i]);

    // A: DDR -> EDRAM DMA while the core keeps writing the EDRAM
    dcr_wr(0, DMA_DCR_BASE + DMA_R_EADDR, 'h1000);
    dcr_wr(0, DMA_DCR_BASE + DMA_R_DADDR, 0);
    dcr_wr(0, DMA_DCR_BASE + DMA_R_LEN, 16);
    dcr_wr(0, DMA_DCR_BASE + DMA_R_CTRL, 3);
    for (int i = 0; i < 40; i++) core_wr(0, 'h7000 + i, line_t'(i));
    do dcr_rd(0, DMA_DCR_BASE + DMA_R_STATUS, v); while (v[0]);
    check(v[1], "A: DMA DDR->EDRAM done");

    // SCU transfers
    scu_wr(1, 1, SCU_R_RADDR, 'h4000); scu_wr(1, 1, SCU_R_RCOUNT, NW); scu_wr(1, 1, SCU_R_CTRL, 2);
    scu_wr(0, 1, SCU_R_RADDR, 'h6000); scu_wr(0, 1, SCU_R_RCOUNT, NW); scu_wr(0, 1, SCU_R_CTRL, 2);
    scu_wr(0, 3, SCU_R_RADDR, 'h8000); scu_wr(0, 3, SCU_R_RCOUNT, 8);
    scu_wr(0, 3, SCU_R_CTRL, 2 | (4 << 4) | (1 << 8) | (1 << 9));
    scu_wr(0, 5, SCU_R_RADDR, 'h8100); scu_wr(0, 5, SCU_R_RCOUNT, 8); scu_wr(0, 5, SCU_R_CTRL, 2);
    scu_wr(1, 0, SCU_R_SADDR, 'h6000); scu_wr(1, 0, SCU_R_SCOUNT, NW); scu_wr(1, 0, SCU_R_CTRL, 1);
    scu_wr(0, 2, SCU_R_SADDR, 'hA000); scu_wr(0, 2, SCU_R_SCOUNT, 8); scu_wr(0, 2, SCU_R_CTRL, 1);
    scu_wr(0, 0, SCU_R_SADDR, 'h2000); scu_wr(0, 0, SCU_R_SCOUNT, NW); scu_wr(0, 0, SCU_R_CTRL, 1);
    // one bit error in A's first data frame towards B
    wait (ser_out[0][0] == 1'b1);
    repeat (40) @(negedge clk);
    flip_ab = 1;
    @(negedge clk);
    flip_ab = 0;
    scu_wait(1, 1); scu_wait(0, 1); scu_wait(0, 3); scu_wait(0, 5);

    // B: EDRAM -> DDR
    dcr_wr(1, DMA_DCR_BASE + DMA_R_EADDR, 'h2000);
    dcr_wr(1, DMA_DCR_BASE + DMA_R_DADDR, 'h100);
    dcr_wr(1, DMA_DCR_BASE + DMA_R_LEN, 16);
    dcr_wr(1, DMA_DCR_BASE + DMA_R_CTRL, 1);
    do dcr_rd(1, DMA_DCR_BASE + DMA_R_STATUS, v); while (v[0]);
    check(v[1], "B: DMA EDRAM->DDR done");
    repeat (4) @(posedge clk);

    // end-to-end data
    begin
      automatic bit ok = 1;
      for (int i = 0; i < 16; i++) if (g_node[1].u_ddr.mem['h100 + i] != a_ddr[i]) ok = 0;
      check(ok, "A.DDR -> A.EDRAM -> link -> B.EDRAM -> B.DDR unchanged");
      ok = 1;
      for (int i = 0; i < 16; i++) begin
        core_rd(0, 'h3000 + i, w);
        if (w != b_blk[i]) ok = 0;
      end
      check(ok, "B's block arrived in A's EDRAM");
      ok = 1;
      for (int i = 0; i < 4; i++) begin
        core_rd(0, 'h4000 + i, w);
        if (w != pt_blk[i]) ok = 0;
        core_rd(0, 'h4080 + i, w);
        if (w != pt_blk[i]) ok = 0;
      end
      check(ok, "pass-through: local copy and forwarded copy");
      ok = 1;
      for (int i = 0; i < 40; i++) begin
        core_rd(0, 'h7000 + i, w);
        if (w != line_t'(i)) ok = 0;
      end
      check(ok, "core writes during the DMA kept");
    end

    // mechanisms
    scu_rd(1, 1, SCU_R_PERR, v);
    $display("B link1 parity errors %0d", v);
    check(v == 1, "B detected the flipped bit");
    scu_rd(0, 0, SCU_R_RESEND, v);
    $display("A link0 resends %0d", v);
    check(v >= 1, "A resent after the error");
    $display("edram stalls A %0d B %0d, pass-through words A %0d, irqs scu %0d/%0d dma %0d/%0d",
             edram_stalls[0], edram_stalls[1], pt_words[0], irq_scu[0], irq_scu[1],
             irq_dma[0], irq_dma[1]);
    check(edram_stalls[0] > 0, "EDRAM arbitration stall happened");
    check(pt_words[0] == 8, "8 words passed through");
    check(irq_dma[0] == 1 && irq_dma[1] == 1, "one DMA interrupt per node");
    check(irq_scu[0] > 0 && irq_scu[1] > 0, "SCU interrupts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
