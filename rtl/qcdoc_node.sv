// qcdoc_node: the custom-designed part of one QCDOC processing node.
//
// A QCDOC node is one ASIC: a PowerPC 440 core with a 1 GFlops double
// precision FPU, 4 MBytes of embedded DRAM, a DDR SDRAM controller, Ethernet,
// and the serial communications unit (SCU) that joins the node to its 12
// neighbours in a 6-dimensional torus. This module holds the blocks the
// machine's designers drew up themselves, wired as on the chip:
//
//   edram_macro  4 MByte embedded DRAM (behavioural model of the macro)
//   edram_ctrl   arbitration of the EDRAM among port 0 = core/PLB side,
//                port 1 = EDRAM/SDRAM DMA, port 2 = SCU; 8 GByte/s
//   dma_ctrl     block copies EDRAM <-> external DDR SDRAM
//   scu          24 link DMA engines, 12 serial links with error detection
//                and resend, pass-through for global sums
//
// The library blocks around them are outside: the core (and the PLB that
// connects it) reaches the EDRAM through the core_* port; the DDR SDRAM
// controller is reached through ddr_*; the DCR ring, by which software
// programs the SCU and the DMA controller, is the dcr_* port (addresses
// 0x000-0x05F SCU, 0x100-0x104 DMA controller); the high-speed serial link
// macros carry ser_out/ser_in, one bit per cycle per wire; the PLL supplies
// clk (500 MHz in the paper). All memory ports use mem_req_t (request held
// until grant, read data one cycle after the grant on the EDRAM side).
//
// Which blocks exist and how they connect follows the paper's block diagram;
// the port protocols and register addresses are this design's choices.
module qcdoc_node
  import qcdoc_pkg::*;
#(
  parameter int unsigned LINES   = EDRAM_LINES,
  parameter int unsigned TIMEOUT = 1024
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // core / PLB side of the EDRAM
  input  mem_req_t              core_req,
  output logic                  core_gnt,
  output logic                  core_rvalid,
  output line_t                 core_rdata,
  // DDR SDRAM controller
  output mem_req_t              ddr_req,
  input  logic                  ddr_gnt,
  input  logic                  ddr_rvalid,
  input  line_t                 ddr_rdata,
  // DCR register port
  input  logic                  dcr_sel,
  input  logic                  dcr_we,
  input  logic [DCR_ADDR_W-1:0] dcr_addr,
  input  logic [DCR_DATA_W-1:0] dcr_wdata,
  output logic [DCR_DATA_W-1:0] dcr_rdata,
  // off-node links, link l = 2*dim + dir
  output logic [NLINK-1:0]      ser_out,
  input  logic [NLINK-1:0]      ser_in,
  // interrupts and monitoring
  output logic                  scu_irq,
  output logic                  dma_irq,
  output logic [31:0]           edram_stalls,
  output logic [31:0]           pt_words
);

  localparam int unsigned AW = $clog2(LINES);

  // ---- EDRAM ----
  mem_req_t      e_req [3];
  logic [2:0]    e_gnt, e_rvalid;
  line_t         e_rdata;
  logic          m_en, m_we;
  logic [AW-1:0] m_addr;
  logic [BE_W-1:0] m_be;
  line_t         m_wdata, m_rdata;

  edram_ctrl #(.NPORT(3), .LINES(LINES)) u_edram_ctrl (
    .clk, .rst_n, .req(e_req), .gnt(e_gnt), .rvalid(e_rvalid), .rdata(e_rdata),
    .m_en, .m_we, .m_addr, .m_be, .m_wdata, .m_rdata, .stall_count(edram_stalls));

  edram_macro #(.LINES(LINES)) u_edram (
    .clk, .en(m_en), .we(m_we), .addr(m_addr), .be(m_be), .wdata(m_wdata), .rdata(m_rdata));

  assign e_req[0]    = core_req;
  assign core_gnt    = e_gnt[0];
  assign core_rvalid = e_rvalid[0];
  assign core_rdata  = e_rdata;

  // ---- register decode ----
  logic scu_sel, dma_sel;
  logic [DCR_DATA_W-1:0] scu_rdata, dma_rdata;
  assign scu_sel = dcr_sel && dcr_addr[9:7] == 3'b000;
  assign dma_sel = dcr_sel && dcr_addr[9:3] == 7'(DMA_DCR_BASE >> 3);
  assign dcr_rdata = dma_sel ? dma_rdata : scu_sel ? scu_rdata : '0;

  // ---- EDRAM/SDRAM DMA ----
  dma_ctrl u_dma (
    .clk, .rst_n,
    .reg_sel(dma_sel), .reg_we(dcr_we), .reg_addr(dcr_addr[2:0]),
    .reg_wdata(dcr_wdata), .reg_rdata(dma_rdata),
    .e_req(e_req[1]), .e_gnt(e_gnt[1]), .e_rvalid(e_rvalid[1]), .e_rdata(e_rdata),
    .d_req(ddr_req), .d_gnt(ddr_gnt), .d_rvalid(ddr_rvalid), .d_rdata(ddr_rdata),
    .irq(dma_irq));

  // ---- SCU ----
  scu #(.NL(NLINK), .TIMEOUT(TIMEOUT)) u_scu (
    .clk, .rst_n, .ser_out, .ser_in,
    .reg_sel(scu_sel), .reg_we(dcr_we), .reg_addr(dcr_addr[6:0]),
    .reg_wdata(dcr_wdata), .reg_rdata(scu_rdata),
    .m_req(e_req[2]), .m_gnt(e_gnt[2]), .m_rvalid(e_rvalid[2]), .m_rdata(e_rdata),
    .irq(scu_irq), .pt_count(pt_words));

endmodule
