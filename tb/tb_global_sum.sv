// tb_global_sum: a global sum along one torus dimension by pass-through.
//
// N full-size nodes form a ring in dimension 0; the other dimensions of each
// node are closed on themselves. Every node puts its own 64-bit value on its
// forward link (link 0). Its backward link (link 1) receives N-1 words, keeps
// each in memory and passes the first N-2 on to link 0, so that every value
// travels once round the ring and stops one node short of its origin. Each
// node then holds all N values and sums them itself, as the system software
// would. Checked: each node received exactly the values of its N-1
// upstream nodes in order of distance, all nodes arrive at the same sum, and
// the whole operation takes (N-1) word times of a busy link, i.e. the values
// are forwarded without a trip through memory and software.
module tb_global_sum;
  timeunit 1ns; timeprecision 100ps;
  import qcdoc_pkg::*;

  localparam int N = 8;

  logic clk = 1'b0;
  logic rst_n;
  always #1 clk = ~clk;

  localparam int unsigned OWN = 'h100, RCV = 'h200;   // word addresses
  longint unsigned val [N];
  longint unsigned got [N][N-1];
  logic [N-1:0] busy;
  bit load_go = 0, read_go = 0;

  mem_req_t core_req [N], ddr_req [N];
  logic     core_gnt [N], core_rvalid [N], ddr_gnt [N], ddr_rvalid [N];
  line_t    core_rdata [N], ddr_rdata [N];
  logic     dcr_sel [N], dcr_we [N];
  logic [DCR_ADDR_W-1:0] dcr_addr [N];
  logic [DCR_DATA_W-1:0] dcr_wdata [N], dcr_rdata [N];
  logic [NLINK-1:0] ser_out [N], ser_in [N];
  logic     scu_irq [N], dma_irq [N];
  logic [31:0] edram_stalls [N], pt_words [N];

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
    assign ddr_gnt[n] = 1'b1;
    assign ddr_rvalid[n] = 1'b0;
    assign ddr_rdata[n] = '0;
    // per-node access to the EDRAM model: load the value, read results back
    assign busy[n] = u_node.u_scu.s_busy[0] | u_node.u_scu.r_busy[1];
    always @(posedge load_go) u_node.u_edram.mem[OWN >> 1] = {64'b0, val[n]};
    always @(posedge read_go)
      for (int k = 0; k < N - 1; k++) begin
        line_t l;
        l = u_node.u_edram.mem[(RCV + k) >> 1];
        got[n][k] = ((RCV + k) % 2) ? l[127:64] : l[63:0];
      end
  end

  always_comb
    for (int n = 0; n < N; n++) begin
      ser_in[(n + 1) % N][1] = ser_out[n][0];      // n +x -> n+1 -x
      ser_in[n][0]           = ser_out[(n + 1) % N][1];
      ser_in[(n + 1) % N][0] = ser_out[n][1] ;     // unused direction, wired as a ring too
      ser_in[n][1]           = ser_out[(n + N - 1) % N][0];
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

  task automatic dcr_wr(input int n, input int unsigned a, input int unsigned v);
    @(negedge clk);
    dcr_sel[n] = 1; dcr_we[n] = 1; dcr_addr[n] = DCR_ADDR_W'(a); dcr_wdata[n] = v;
    @(negedge clk);
    dcr_sel[n] = 0; dcr_we[n] = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  initial begin
    int t0, t1;
    longint unsigned total;
    for (int n = 0; n < N; n++) begin
      core_req[n] = '0; dcr_sel[n] = 0; dcr_we[n] = 0; dcr_addr[n] = 0; dcr_wdata[n] = 0;
    end
    rst_n = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    total = 0;
    for (int n = 0; n < N; n++) begin
      val[n] = {$urandom, $urandom} >> 4;   // keep the sum from wrapping
      total += val[n];
    end
    load_go = 1;
    @(negedge clk);
    for (int n = 0; n < N; n++) begin
      dcr_wr(n, 8 * 1 + SCU_R_RADDR, RCV);
      dcr_wr(n, 8 * 1 + SCU_R_RCOUNT, N - 1);
      dcr_wr(n, 8 * 1 + SCU_R_CTRL, 2 | (0 << 4) | (1 << 8) | (1 << 9) | ((N - 2) << 16));
      dcr_wr(n, 8 * 0 + SCU_R_SADDR, OWN);
      dcr_wr(n, 8 * 0 + SCU_R_SCOUNT, 1);
    end
    @(negedge clk);
    for (int n = 0; n < N; n++) begin
      dcr_sel[n] = 1; dcr_we[n] = 1; dcr_addr[n] = DCR_ADDR_W'(8 * 0 + SCU_R_CTRL); dcr_wdata[n] = 1;
    end
    t0 = $time;
    @(negedge clk);
    for (int n = 0; n < N; n++) begin dcr_sel[n] = 0; dcr_we[n] = 0; end
    @(negedge clk);
    wait (busy == '0);
    t1 = $time;
    read_go = 1;
    @(negedge clk);
    $display("global sum over %0d nodes: %0d cycles (%0.2f us at 500 MHz)",
             N, (t1 - t0) / 2, (t1 - t0) / 2 / 500.0);
    for (int n = 0; n < N; n++) begin
      longint unsigned sum;
      automatic bit ok = 1;
      sum = val[n];
      for (int k = 0; k < N - 1; k++) begin
        longint unsigned w;
        w = got[n][k];
        if (w != val[(n - 1 - k + 2 * N) % N]) ok = 0;
        sum += w;
      end
      check(ok, $sformatf("node %0d received the upstream values in order", n));
      check(sum == total, $sformatf("node %0d sum", n));
      check(pt_words[n] == 32'(N - 2), $sformatf("node %0d forwarded N-2 words", n));
    end
    check((t1 - t0) / 2 <= (N - 1) * (DATA_FRAME_LEN + CTRL_FRAME_LEN) + 40,
          "N-1 word times of one busy link");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
