// scu: serial communications unit of a QCDOC node.
//
// The SCU moves data between the node's EDRAM and its 12 nearest neighbours
// in the 6-dimensional torus without the processor: each of the 12 links
// (l = 2*dim + dir, dir 0 forward, 1 backward) has a send DMA engine, which
// reads 64-bit words from memory and hands them to the link, and a receive
// DMA engine, which writes the words that arrive on the link into memory.
// These are the "24 link DMA" engines; the links themselves (scu_link) add
// the parity check and automatic resend.
//
// Pass-through: for global sums a receive link can forward every word it
// receives straight to a send link, without a trip through memory, and
// optionally also store it locally. A word that arrives on receive link i
// with pass-through enabled goes to send link PT_TARGET(i) and, if PT_LOCAL
// is set, to receive engine i as well; it leaves link i only when every
// destination takes it in the same cycle. A forwarded word takes precedence
// over the target's own send DMA.
//
// Registers (reg_addr = 8*l + r, 32-bit): SADDR/SCOUNT and RADDR/RCOUNT give
// start word address and length of the send and receive transfers; CTRL
// bit0 starts the send engine, bit1 the receive engine, bits 7:4 the
// pass-through target, bit8 enables pass-through, bit9 keeps a local copy;
// bits 31:16 a pass-through word count (0: forward without limit; n: forward
// the next n words, then turn pass-through off so that later words only go
// to memory, which is how a ring global sum stops after N-2 hops);
// STATUS bit0/1 send/receive busy, bit2/3 send/receive done; PERR and
// RESEND are the link's error counters that system software reads to
// monitor the links. irq pulses when any engine finishes.
//
// Memory: one mem_req_t master port; the 24 engines share it round-robin.
// Words are written as one half of a 128-bit line with byte enables. Read
// data is expected exactly one cycle after the grant, which is what
// edram_ctrl provides.
//
// The paper gives the SCU's functions (DMA, error detection with resend,
// pass-through for global sums, link status registers, 24 links at
// 500 Mbit/s); the register map, the engine structure and the arbitration
// are this design's choices.
module scu
  import qcdoc_pkg::*;
#(
  parameter int unsigned NL      = NLINK,
  parameter int unsigned TIMEOUT = 1024
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // serial links
  output logic [NL-1:0]         ser_out,
  input  logic [NL-1:0]         ser_in,
  // register port
  input  logic                  reg_sel,
  input  logic                  reg_we,
  input  logic [6:0]            reg_addr,
  input  logic [DCR_DATA_W-1:0] reg_wdata,
  output logic [DCR_DATA_W-1:0] reg_rdata,
  // memory master port
  output mem_req_t              m_req,
  input  logic                  m_gnt,
  input  logic                  m_rvalid,
  input  line_t                 m_rdata,
  output logic                  irq,
  // event counts for monitoring
  output logic [31:0]           pt_count
);

  localparam int unsigned NE = 2 * NL;           // DMA engines
  localparam int unsigned EW = $clog2(NE);
  localparam int unsigned LW = $clog2(NL);

  // ------------------------------------------------------------ links
  logic [NL-1:0]  l_txv, l_txr, l_rxv, l_rxr;
  word_t          l_txd [NL];
  word_t          l_rxd [NL];
  logic [15:0]    l_perr [NL];
  logic [15:0]    l_res  [NL];

  for (genvar l = 0; l < NL; l++) begin : g_link
    scu_link #(.TIMEOUT(TIMEOUT)) u_link (
      .clk, .rst_n,
      .ser_out(ser_out[l]), .ser_in(ser_in[l]),
      .tx_valid(l_txv[l]), .tx_data(l_txd[l]), .tx_ready(l_txr[l]),
      .rx_valid(l_rxv[l]), .rx_data(l_rxd[l]), .rx_ready(l_rxr[l]),
      .perr_count(l_perr[l]), .resend_count(l_res[l]));
  end

  // ------------------------------------------------------------ state
  logic [WADDR_W-1:0] s_addr [NL], r_addr [NL];
  logic [23:0]        s_left [NL], r_left [NL];
  logic [NL-1:0]      s_busy, r_busy, s_done, r_done;
  logic [NL-1:0]      s_bufv, s_rdp, s_half;
  word_t              s_buf [NL];
  logic [NL-1:0]      r_wbv;
  word_t              r_wbuf [NL];
  logic [WADDR_W-1:0] r_waddr [NL];
  logic [LW-1:0]      pt_tgt [NL];
  logic [NL-1:0]      pt_en, pt_loc, pt_lim;
  logic [15:0]        pt_left [NL];

  // ------------------------------------------------------------ routing
  // pass-through source feeding each send link (lowest link wins)
  logic [NL-1:0] pt_want;        // send link j has a forwarded word waiting
  logic [LW-1:0] pt_src [NL];
  logic [NL-1:0] r_take;         // receive engine i can take a word
  logic [NL-1:0] rx_fire;        // word leaves receive link i

  always_comb begin
    for (int unsigned i = 0; i < NL; i++)
      r_take[i] = r_busy[i] && r_left[i] != 0 && !r_wbv[i];
    pt_want = '0;
    for (int unsigned j = 0; j < NL; j++) begin
      pt_src[j] = '0;
      for (int unsigned i = NL; i-- > 0;)
        if (l_rxv[i] && pt_en[i] && pt_tgt[i] == LW'(j)) begin
          pt_want[j] = 1'b1;
          pt_src[j]  = LW'(i);
        end
    end
    for (int unsigned i = 0; i < NL; i++) begin
      logic to_tx_ok, to_mem_ok, tx_mine;
      tx_mine   = pt_src[pt_tgt[i]] == LW'(i);
      to_tx_ok  = !pt_en[i] || (tx_mine && l_txr[pt_tgt[i]]);
      to_mem_ok = (pt_en[i] && !pt_loc[i]) || r_take[i];
      rx_fire[i] = l_rxv[i] && to_tx_ok && to_mem_ok;
      l_rxr[i]   = rx_fire[i];
    end
    for (int unsigned j = 0; j < NL; j++) begin
      if (pt_want[j]) begin
        l_txv[j] = rx_fire[pt_src[j]];
        l_txd[j] = l_rxd[pt_src[j]];
      end else begin
        l_txv[j] = s_bufv[j];
        l_txd[j] = s_buf[j];
      end
    end
  end

  // ------------------------------------------------------------ memory arbiter
  logic [NE-1:0] e_req;
  logic [EW-1:0] rr_q, sel;
  logic          any;

  always_comb begin
    for (int unsigned l = 0; l < NL; l++) begin
      e_req[l]      = s_busy[l] && s_left[l] != 0 && !s_bufv[l] && !s_rdp[l];
      e_req[NL + l] = r_wbv[l];
    end
    any = 1'b0;
    sel = '0;
    for (int unsigned k = 1; k <= NE; k++) begin
      int unsigned e;
      e = (int'(rr_q) + k) % NE;
      if (!any && e_req[e]) begin
        any = 1'b1;
        sel = EW'(e);
      end
    end
    m_req = '0;
    m_req.req = any;
    if (32'(sel) < NL) begin
      m_req.we   = 1'b0;
      m_req.addr = DDR_ADDR_W'(s_addr[LW'(sel)] >> 1);
    end else begin
      m_req.we    = 1'b1;
      m_req.addr  = DDR_ADDR_W'(r_waddr[LW'(32'(sel) - NL)] >> 1);
      m_req.be    = r_waddr[LW'(32'(sel) - NL)][0] ? 16'hFF00 : 16'h00FF;
      m_req.wdata = {r_wbuf[LW'(32'(sel) - NL)], r_wbuf[LW'(32'(sel) - NL)]};
    end
  end

  logic          fire;
  logic          rd_q;           // read granted last cycle
  logic [LW-1:0] rd_id_q;
  assign fire = any && m_gnt;

  // ------------------------------------------------------------ registers
  logic [LW-1:0] ra_l;
  logic [2:0]    ra_r;
  logic          ra_ok;
  assign ra_l  = reg_addr[3 +: LW];
  assign ra_r  = reg_addr[2:0];
  assign ra_ok = 32'(reg_addr[6:3]) < NL;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned l = 0; l < NL; l++) begin
        s_addr[l] <= '0; r_addr[l] <= '0; s_left[l] <= '0; r_left[l] <= '0;
        s_buf[l] <= '0; r_wbuf[l] <= '0; r_waddr[l] <= '0; pt_tgt[l] <= '0;
        pt_left[l] <= '0;
      end
      s_busy <= '0; r_busy <= '0; s_done <= '0; r_done <= '0;
      s_bufv <= '0; s_rdp <= '0; s_half <= '0; r_wbv <= '0;
      pt_en <= '0; pt_loc <= '0; pt_lim <= '0;
      rr_q <= '0; rd_q <= 1'b0; rd_id_q <= '0;
      irq <= 1'b0; pt_count <= '0;
    end else begin
      irq <= 1'b0;
      // memory grants and read returns
      rd_q <= 1'b0;
      if (fire) begin
        rr_q <= sel;
        if (32'(sel) < NL) begin
          s_rdp[LW'(sel)]  <= 1'b1;
          s_half[LW'(sel)] <= s_addr[LW'(sel)][0];
          s_addr[LW'(sel)] <= s_addr[LW'(sel)] + 1'b1;
          s_left[LW'(sel)] <= s_left[LW'(sel)] - 1'b1;
          rd_q    <= 1'b1;
          rd_id_q <= LW'(sel);
        end else begin
          r_wbv[LW'(32'(sel) - NL)] <= 1'b0;
        end
      end
      if (rd_q && m_rvalid) begin
        s_rdp[rd_id_q]  <= 1'b0;
        s_bufv[rd_id_q] <= 1'b1;
        s_buf[rd_id_q]  <= s_half[rd_id_q] ? m_rdata[127:64] : m_rdata[63:0];
      end
      for (int unsigned j = 0; j < NL; j++) begin
        // send engine hands its word to the link
        if (!pt_want[j] && s_bufv[j] && l_txr[j]) s_bufv[j] <= 1'b0;
        // send engine finished
        if (s_busy[j] && s_left[j] == 0 && !s_bufv[j] && !s_rdp[j]) begin
          s_busy[j] <= 1'b0;
          s_done[j] <= 1'b1;
          irq       <= 1'b1;
        end
        // receive engine takes a word
        if (rx_fire[j] && (!pt_en[j] || pt_loc[j])) begin
          r_wbv[j]   <= 1'b1;
          r_wbuf[j]  <= l_rxd[j];
          r_waddr[j] <= r_addr[j];
          r_addr[j]  <= r_addr[j] + 1'b1;
          r_left[j]  <= r_left[j] - 1'b1;
        end
        if (r_busy[j] && r_left[j] == 0 && !r_wbv[j]) begin
          r_busy[j] <= 1'b0;
          r_done[j] <= 1'b1;
          irq       <= 1'b1;
        end
        if (rx_fire[j] && pt_en[j]) begin
          pt_count <= pt_count + 32'd1;
          if (pt_lim[j]) begin
            pt_left[j] <= pt_left[j] - 16'd1;
            if (pt_left[j] == 16'd1) pt_en[j] <= 1'b0;
          end
        end
      end
      // register writes
      if (reg_sel && reg_we && ra_ok) begin
        unique case (ra_r)
          3'(SCU_R_SADDR):  if (!s_busy[ra_l]) s_addr[ra_l] <= reg_wdata[WADDR_W-1:0];
          3'(SCU_R_SCOUNT): if (!s_busy[ra_l]) s_left[ra_l] <= reg_wdata[23:0];
          3'(SCU_R_RADDR):  if (!r_busy[ra_l]) r_addr[ra_l] <= reg_wdata[WADDR_W-1:0];
          3'(SCU_R_RCOUNT): if (!r_busy[ra_l]) r_left[ra_l] <= reg_wdata[23:0];
          3'(SCU_R_CTRL): begin
            if (reg_wdata[0] && !s_busy[ra_l]) begin
              s_busy[ra_l] <= 1'b1;
              s_done[ra_l] <= 1'b0;
            end
            if (reg_wdata[1] && !r_busy[ra_l]) begin
              r_busy[ra_l] <= 1'b1;
              r_done[ra_l] <= 1'b0;
            end
            pt_tgt[ra_l] <= reg_wdata[4 +: LW];
            pt_en[ra_l]   <= reg_wdata[8];
            pt_loc[ra_l]  <= reg_wdata[9];
            pt_lim[ra_l]  <= reg_wdata[31:16] != 0;
            pt_left[ra_l] <= reg_wdata[31:16];
          end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    reg_rdata = '0;
    if (ra_ok) begin
      unique case (ra_r)
        3'(SCU_R_SADDR):  reg_rdata = DCR_DATA_W'(s_addr[ra_l]);
        3'(SCU_R_SCOUNT): reg_rdata = DCR_DATA_W'(s_left[ra_l]);
        3'(SCU_R_RADDR):  reg_rdata = DCR_DATA_W'(r_addr[ra_l]);
        3'(SCU_R_RCOUNT): reg_rdata = DCR_DATA_W'(r_left[ra_l]);
        3'(SCU_R_CTRL):   reg_rdata = {pt_left[ra_l], 6'b0, pt_loc[ra_l], pt_en[ra_l], 4'(pt_tgt[ra_l]), 4'b0};
        3'(SCU_R_STATUS): reg_rdata = {28'b0, r_done[ra_l], s_done[ra_l], r_busy[ra_l], s_busy[ra_l]};
        3'(SCU_R_PERR):   reg_rdata = DCR_DATA_W'(l_perr[ra_l]);
        3'(SCU_R_RESEND): reg_rdata = DCR_DATA_W'(l_res[ra_l]);
        default: ;
      endcase
    end
  end

  // read data arrives exactly one cycle after a read grant
  a_rd_latency : assert property (@(posedge clk) disable iff (!rst_n)
                                  m_rvalid |-> rd_q);

endmodule
