// qcdoc_pkg: types and constants shared by the QCDOC node RTL.
//
// Memory side: the embedded DRAM is organised as 128-bit lines (16 bytes), so
// one access per 500 MHz cycle gives the 8 GByte/s memory/processor bandwidth
// of the node; 4 MBytes are 2^18 lines. Every EDRAM master (core, EDRAM/SDRAM
// DMA, SCU) speaks the same request struct with a same-cycle grant and read
// data one cycle after the grant.
//
// Link side: the node sits in a 6-dimensional torus and has a send and a
// receive wire to the forward and backward neighbour of every dimension, 12
// neighbour links and 24 wires. Link l = 2*dim + dir, dir 0 forward, 1
// backward. The frame layout below is this design's own choice; the paper
// gives only the line rate (500 Mbit/s, one bit per core cycle) and the
// error handling (single-bit error detection with automatic resend).
package qcdoc_pkg;

  localparam int unsigned NDIM        = 6;
  localparam int unsigned NLINK       = 2 * NDIM;      // neighbour links
  localparam int unsigned LINE_W      = 128;           // EDRAM line, bits
  localparam int unsigned BE_W        = LINE_W / 8;    // byte enables
  localparam int unsigned WORD_W      = 64;            // SCU payload word
  localparam int unsigned EDRAM_BYTES = 4 * 1024 * 1024;
  localparam int unsigned EDRAM_LINES = EDRAM_BYTES / BE_W;  // 262144
  localparam int unsigned LADDR_W     = 18;            // EDRAM line address
  localparam int unsigned WADDR_W     = LADDR_W + 1;   // 64-bit word address
  localparam int unsigned DDR_ADDR_W  = 27;            // 2 GByte DIMM / 16 B
  localparam int unsigned DCR_ADDR_W  = 10;
  localparam int unsigned DCR_DATA_W  = 32;

  typedef logic [LINE_W-1:0] line_t;
  typedef logic [WORD_W-1:0] word_t;

  // One request to a line-organised memory. addr is a line address; the
  // EDRAM uses the low LADDR_W bits.
  typedef struct packed {
    logic                  req;
    logic                  we;
    logic [DDR_ADDR_W-1:0] addr;
    logic [BE_W-1:0]       be;
    line_t                 wdata;
  } mem_req_t;

  // ---- serial frame format (design choice) ----
  // Line idles at 0. A frame is: start bit 1, a 3-bit class code, then
  //   data frame   : seq[1:0], payload[63:0], parity         (71 bits)
  //   control frame: kind (0 ACK, 1 NACK), seq[1:0], parity    (8 bits)
  // The class code is 111 for data and 000 for control, so the receiver
  // takes the majority of the three bits and a single flipped bit can never
  // change the frame length. parity makes the XOR of every bit after the
  // start bit zero.
  localparam logic [2:0] CLS_DATA = 3'b111;
  localparam logic [2:0] CLS_CTRL = 3'b000;
  localparam int unsigned DATA_FRAME_LEN = 1 + 3 + 2 + WORD_W + 1;  // 71
  localparam int unsigned CTRL_FRAME_LEN = 1 + 3 + 1 + 2 + 1;       // 8

  typedef enum logic {CTRL_ACK = 1'b0, CTRL_NACK = 1'b1} ctrl_kind_e;

  // ---- SCU register map (per link l, word index l*8 + r) ----
  localparam int unsigned SCU_R_SADDR  = 0;  // send DMA start, word address
  localparam int unsigned SCU_R_SCOUNT = 1;  // send DMA length, words
  localparam int unsigned SCU_R_RADDR  = 2;  // receive DMA start, word address
  localparam int unsigned SCU_R_RCOUNT = 3;  // receive DMA length, words
  localparam int unsigned SCU_R_CTRL   = 4;  // see scu.sv
  localparam int unsigned SCU_R_STATUS = 5;  // busy / done bits
  localparam int unsigned SCU_R_PERR   = 6;  // receive parity errors seen
  localparam int unsigned SCU_R_RESEND = 7;  // send rewinds (resends)

  // ---- DMA controller registers, DCR addresses DMA_DCR_BASE + r ----
  localparam int unsigned DMA_DCR_BASE = 32'h100;
  localparam int unsigned DMA_R_EADDR  = 0;  // EDRAM line address
  localparam int unsigned DMA_R_DADDR  = 1;  // DDR line address
  localparam int unsigned DMA_R_LEN    = 2;  // lines
  localparam int unsigned DMA_R_CTRL   = 3;  // bit0 go, bit1 dir (1: DDR->EDRAM)
  localparam int unsigned DMA_R_STATUS = 4;  // bit0 busy, bit1 done

endpackage
