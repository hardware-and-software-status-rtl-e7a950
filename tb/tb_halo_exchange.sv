// tb_halo_exchange: the communication step of the lattice QCD kernels, run
// on one node at the design's full size.
//
// A Dirac operator on a local volume L^4 needs, in each of the 4 physics
// dimensions and both directions, the fields on the boundary face of the
// neighbouring node. Here the node is its own neighbour in every dimension
// (loop-back), all 8 physics links run at once, and the face sizes are those
// of the kernels in the performance table this design is meant for:
//   Wilson / clover  : L^3 sites x half spinor (12 doubles)
//   staggered        : L^3 sites x colour vector (6 doubles)
//   asqtad / its force term: 4 layers (1 for the fat links, 3 for the Naik
//                      term) x L^3 sites x colour vector; L = 4 only
// For each case every received face must equal the sent face, and the time
// must be that of one link at one bit per cycle, all links in parallel:
// every wire carries a 71-bit data frame per word and, since both directions
// are busy, an 8-bit acknowledgement for the other direction's word, so
// words x 79 cycles plus a small start-up. The face sizes are standard
// lattice QCD bookkeeping, not numbers from the design itself.
module tb_halo_exchange;
  timeunit 1ns; timeprecision 100ps;
  import qcdoc_pkg::*;

  logic clk = 1'b0;
  logic rst_n;
  always #1 clk = ~clk;

  mem_req_t core_req, ddr_req;
  logic core_gnt, core_rvalid, ddr_gnt, ddr_rvalid;
  line_t core_rdata, ddr_rdata;
  logic dcr_sel, dcr_we;
  logic [DCR_ADDR_W-1:0] dcr_addr;
  logic [DCR_DATA_W-1:0] dcr_wdata, dcr_rdata;
  logic [NLINK-1:0] ser_out, ser_in;
  logic scu_irq, dma_irq;
  logic [31:0] edram_stalls, pt_words;

  qcdoc_node u_node (.*);
  ddr_model u_ddr (.clk, .req(ddr_req), .gnt(ddr_gnt), .rvalid(ddr_rvalid), .rdata(ddr_rdata));

  always_comb
    for (int d = 0; d < NDIM; d++) begin
      ser_in[2*d+1] = ser_out[2*d];
      ser_in[2*d]   = ser_out[2*d+1];
    end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic dcr_wr(input int unsigned a, input int unsigned v);
    @(negedge clk);
    dcr_sel = 1; dcr_we = 1; dcr_addr = DCR_ADDR_W'(a); dcr_wdata = v;
    @(negedge clk);
    dcr_sel = 0; dcr_we = 0;
  endtask

  function automatic word_t rdw(input int unsigned waddr);
    line_t l;
    l = u_node.u_edram.mem[waddr >> 1];
    return waddr[0] ? l[127:64] : l[63:0];
  endfunction

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { string name; int words; } case_t;
  case_t cases [6] = '{
    '{"Wilson/clover 2^4",   8 * 12},
    '{"Wilson/clover 4^4",  64 * 12},
    '{"staggered 2^4",       8 * 6},
    '{"staggered 4^4",      64 * 6},
    '{"asqtad 4^4",     4 * 64 * 6},
    '{"asqtad force 4^4", 4 * 64 * 6}};

  localparam int unsigned SRC = 'h10000, DST = 'h40000, STRIDE = 'h2000;  // word addresses

  initial begin
    core_req = '0; dcr_sel = 0; dcr_we = 0; dcr_addr = 0; dcr_wdata = 0;
    rst_n = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    foreach (cases[c]) begin
      int w, t0, t1;
      bit ok;
      w = cases[c].words;
      // fill the 8 faces with fresh data
      for (int l = 0; l < 8; l++)
        for (int k = 0; k < w; k += 2)
          u_node.u_edram.mem[(SRC + l * STRIDE + k) >> 1] = {$urandom, $urandom, $urandom, $urandom};
      for (int l = 0; l < 8; l++) begin
        dcr_wr(8 * l + SCU_R_RADDR, DST + l * STRIDE);
        dcr_wr(8 * l + SCU_R_RCOUNT, w);
        dcr_wr(8 * l + SCU_R_CTRL, 2);
        dcr_wr(8 * l + SCU_R_SADDR, SRC + l * STRIDE);
        dcr_wr(8 * l + SCU_R_SCOUNT, w);
      end
      t0 = $time;
      for (int l = 0; l < 8; l++) dcr_wr(8 * l + SCU_R_CTRL, 1);
      for (int l = 0; l < 8; l++) begin
        int unsigned st;
        do begin
          @(negedge clk);
          dcr_sel = 1; dcr_we = 0; dcr_addr = DCR_ADDR_W'(8 * l + SCU_R_STATUS);
          #0.5 st = dcr_rdata;
        end while (st[1:0] != 0);
        dcr_sel = 0;
      end
      t1 = $time;
      ok = 1;
      for (int l = 0; l < 8; l++)
        for (int k = 0; k < w; k++)
          if (rdw(DST + l * STRIDE + k) != rdw(SRC + (l ^ 1) * STRIDE + k)) ok = 0;
      $display("%-20s %4d words per link, %6d cycles (%0.1f us at 500 MHz)",
               cases[c].name, w, (t1 - t0) / 2, (t1 - t0) / 2 / 500.0);
      check(ok, {cases[c].name, ": faces received intact"});
      check((t1 - t0) / 2 >= w * DATA_FRAME_LEN &&
            (t1 - t0) / 2 <= w * (DATA_FRAME_LEN + CTRL_FRAME_LEN) + 100, {cases[c].name, ": links run in parallel at line rate"});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
