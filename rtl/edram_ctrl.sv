// edram_ctrl: EDRAM controller, arbitration of the embedded DRAM.
//
// The node's EDRAM is shared by NPORT masters; in the node these are the
// 440 core side (port 0), the EDRAM/SDRAM DMA controller (port 1) and the
// SCU (port 2). Each cycle one request is granted, round-robin starting
// after the last granted port, and passed to the macro; one 128-bit line per
// 500 MHz cycle is the 8 GByte/s memory/processor bandwidth the paper
// quotes. A master holds its request (mem_req_t, req=1) until it sees gnt in
// the same cycle; read data comes back on rdata with rvalid for that port one
// cycle after the grant. A master that loses arbitration simply waits: that
// is the controller's stall.
//
// The paper gives the block's name, its bandwidth and what it is connected to
// (Fig. 1); the round-robin policy, the port timing and the absence of
// prefetch or refresh handling are this design's choices.
module edram_ctrl
  import qcdoc_pkg::*;
#(
  parameter int unsigned NPORT = 3,
  parameter int unsigned LINES = EDRAM_LINES,
  parameter int unsigned AW    = $clog2(LINES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  mem_req_t           req   [NPORT],
  output logic [NPORT-1:0]   gnt,
  output logic [NPORT-1:0]   rvalid,
  output line_t              rdata,
  // macro side
  output logic               m_en,
  output logic               m_we,
  output logic [AW-1:0]      m_addr,
  output logic [BE_W-1:0]    m_be,
  output line_t              m_wdata,
  input  line_t              m_rdata,
  // number of cycles in which a request waited because another port won
  output logic [31:0]        stall_count
);

  localparam int unsigned PW = (NPORT > 1) ? $clog2(NPORT) : 1;

  logic [PW-1:0] last_q;       // last granted port
  logic [PW-1:0] sel;
  logic          any;

  always_comb begin
    any = 1'b0;
    sel = '0;
    // first requesting port after last_q, wrapping round
    for (int unsigned k = 1; k <= NPORT; k++) begin
      int unsigned p;
      p = (int'(last_q) + k) % NPORT;
      if (!any && req[p].req) begin
        any = 1'b1;
        sel = PW'(p);
      end
    end
  end

  always_comb begin
    gnt = '0;
    if (any) gnt[sel] = 1'b1;
  end

  assign m_en    = any;
  assign m_we    = req[sel].we;
  assign m_addr  = req[sel].addr[AW-1:0];
  assign m_be    = req[sel].be;
  assign m_wdata = req[sel].wdata;
  assign rdata   = m_rdata;

  logic [NPORT-1:0] rd_q;
  logic [NPORT:0]   nreq;  // number of requesting ports, for the stall count

  always_comb begin
    nreq = '0;
    for (int unsigned p = 0; p < NPORT; p++) nreq += (NPORT+1)'(req[p].req);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q      <= PW'(NPORT - 1);
      rd_q        <= '0;
      stall_count <= '0;
    end else begin
      if (any) last_q <= sel;
      rd_q <= gnt & {NPORT{any && !req[sel].we}};
      if (nreq > 1) stall_count <= stall_count + 32'(nreq - 1);
    end
  end

  assign rvalid = rd_q;

  // a granted port must be one that asked
  a_gnt_req : assert property (@(posedge clk) disable iff (!rst_n)
                               any |-> req[sel].req);
  a_onehot  : assert property (@(posedge clk) disable iff (!rst_n)
                               $onehot0(gnt));

endmodule
