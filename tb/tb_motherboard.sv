// tb_motherboard: a 64-node QCDOC motherboard, a 2^6 torus, every node
// exchanging data with all 12 neighbours at once, at full node size. The
// three dimensions that leave a real board by cable are closed here on the
// board, as in a machine of one motherboard.
//
// With two nodes per dimension, node n's forward and backward neighbour in
// dimension d are both node n ^ (1 << d): n's forward link 2d feeds the
// neighbour's backward link 2d+1, and n's backward link 2d+1 feeds the
// neighbour's forward link 2d. Every node sends K words of its own on each
// of its 12 links and receives K words on each; all 64 x 24 DMA engines
// run together. Checked: every received block is the block the neighbour
// sent on the matching link, and the exchange takes K word times of a link
// busy in both directions (79 cycles per word), since all links run in
// parallel.
module tb_motherboard;
  timeunit 1ns; timeprecision 100ps;
  import qcdoc_pkg::*;

  localparam int N = 64;
  localparam int K = 8;
  localparam int unsigned SRC = 'h1000, DST = 'h3000, STRIDE = 'h20;  // word addresses

  logic clk = 1'b0;
  logic rst_n;
  always #1 clk = ~clk;

  mem_req_t core_req [N], ddr_req [N];
  logic     core_gnt [N], core_rvalid [N], ddr_gnt [N], ddr_rvalid [N];
  line_t    core_rdata [N], ddr_rdata [N];
  logic     dcr_sel [N], dcr_we [N];
  logic [DCR_ADDR_W-1:0] dcr_addr [N];
  logic [DCR_DATA_W-1:0] dcr_wdata [N], dcr_rdata [N];
  logic [NLINK-1:0] ser_out [N], ser_in [N];
  logic     scu_irq [N], dma_irq [N];
  logic [31:0] edram_stalls [N], pt_words [N];

  // data each node sends: word k on link l of node n
  function automatic word_t pattern(input int n, input int l, input int k);
    return {8'(n), 8'(l), 16'(k), 32'(n * 7919 + l * 104729 + k * 1299709)};
  endfunction

  logic [N-1:0] busy;
  bit load_go = 0, read_go = 0;
  int bad [N];

  for (genvar n = 0; n < N; n++) begin : g_node
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
    assign ddr_gnt[n]    = 1'b1;
    assign ddr_rvalid[n] = 1'b0;
    assign ddr_rdata[n]  = '0;
    assign busy[n] = |{u_node.u_scu.s_busy, u_node.u_scu.r_busy};

    for (genvar d = 0; d < NDIM; d++) begin : g_dim
      assign ser_in[n ^ (1 << d)][2*d+1] = ser_out[n][2*d];
      assign ser_in[n ^ (1 << d)][2*d]   = ser_out[n][2*d+1];
    end

    always @(posedge load_go)
      for (int l = 0; l < NLINK; l++)
        for (int k = 0; k < K; k += 2)
          u_node.u_edram.mem[(SRC + l * STRIDE + k) >> 1] = {pattern(n, l, k + 1), pattern(n, l, k)};
    // link l receives what the neighbour in dimension l/2 sent on link l^1
    always @(posedge read_go) begin
      bad[n] = 0;
      for (int l = 0; l < NLINK; l++)
        for (int k = 0; k < K; k++) begin
          line_t w;
          word_t x;
          w = u_node.u_edram.mem[(DST + l * STRIDE + k) >> 1];
          x = ((DST + l * STRIDE + k) % 2) ? w[127:64] : w[63:0];
          if (x != pattern(n ^ (1 << (l / 2)), l ^ 1, k)) bad[n]++;
        end
    end
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // program every node the same way, all at once
  task automatic dcr_all(input int unsigned a, input int unsigned v);
    @(negedge clk);
    for (int n = 0; n < N; n++) begin
      dcr_sel[n] = 1; dcr_we[n] = 1; dcr_addr[n] = DCR_ADDR_W'(a); dcr_wdata[n] = v;
    end
    @(negedge clk);
    for (int n = 0; n < N; n++) begin dcr_sel[n] = 0; dcr_we[n] = 0; end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    for (int n = 0; n < N; n++) begin
      core_req[n] = '0; dcr_sel[n] = 0; dcr_we[n] = 0; dcr_addr[n] = 0; dcr_wdata[n] = 0;
    end
    rst_n = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    load_go = 1;
    for (int l = 0; l < NLINK; l++) begin
      dcr_all(8 * l + SCU_R_SADDR, SRC + l * STRIDE);
      dcr_all(8 * l + SCU_R_SCOUNT, K);
      dcr_all(8 * l + SCU_R_RADDR, DST + l * STRIDE);
      dcr_all(8 * l + SCU_R_RCOUNT, K);
      dcr_all(8 * l + SCU_R_CTRL, 2);
    end
    @(negedge clk);
    for (int n = 0; n < N; n++) dcr_sel[n] = 1;
    t0 = $time;
    for (int l = 0; l < NLINK; l++) begin
      for (int n = 0; n < N; n++) begin
        dcr_we[n] = 1; dcr_addr[n] = DCR_ADDR_W'(8 * l + SCU_R_CTRL); dcr_wdata[n] = 1;
      end
      @(negedge clk);
    end
    for (int n = 0; n < N; n++) begin dcr_sel[n] = 0; dcr_we[n] = 0; end
    @(negedge clk);
    wait (busy == '0);
    t1 = $time;
    read_go = 1;
    @(negedge clk);
    $display("64 nodes x 12 links x %0d words: %0d cycles", K, (t1 - t0) / 2);
    for (int n = 0; n < N; n++)
      check(bad[n] == 0, $sformatf("node %0d: all 12 received blocks right (%0d bad words)", n, bad[n]));
    check((t1 - t0) / 2 <= K * (DATA_FRAME_LEN + CTRL_FRAME_LEN) + 60,
          "all links in parallel, 79 cycles per word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
