// dma_ctrl: EDRAM/SDRAM DMA controller.
//
// Copies a block of 128-bit lines between the on-chip EDRAM and the external
// DDR SDRAM, in either direction, without the processor. Software writes the
// EDRAM line address, the DDR line address and the length through the
// register port, then writes CTRL with bit0 (go) and bit1 (direction: 0
// EDRAM->DDR, 1 DDR->EDRAM). STATUS reads bit0 busy, bit1 done; irq pulses
// for one cycle when a copy ends.
//
// Inside, the reading side issues line reads on the source port while the
// FIFO of FIFO_DEPTH lines has room for every read in flight, and the writing
// side writes the FIFO head to the destination port whenever the FIFO is not
// empty, so reads and writes overlap and the copy runs at the rate of the
// slower memory. Both memory ports use mem_req_t: request held until gnt,
// read data with rvalid some cycles later, in order.
//
// The paper gives the block's purpose and its rate, 2.6 GByte/s, which is the
// DDR interface's (about one 16-byte line every 3 cycles at 500 MHz); the
// register layout, the FIFO and the port protocol are this design's choices.
module dma_ctrl
  import qcdoc_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // register port
  input  logic                  reg_sel,
  input  logic                  reg_we,
  input  logic [2:0]            reg_addr,
  input  logic [DCR_DATA_W-1:0] reg_wdata,
  output logic [DCR_DATA_W-1:0] reg_rdata,
  // EDRAM master port
  output mem_req_t              e_req,
  input  logic                  e_gnt,
  input  logic                  e_rvalid,
  input  line_t                 e_rdata,
  // DDR master port
  output mem_req_t              d_req,
  input  logic                  d_gnt,
  input  logic                  d_rvalid,
  input  line_t                 d_rdata,
  output logic                  irq
);

  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);
  localparam int unsigned IW = $clog2(FIFO_DEPTH);

  logic [DDR_ADDR_W-1:0] eaddr_q, daddr_q;
  logic [DDR_ADDR_W-1:0] rd_addr_q, wr_addr_q;
  logic [23:0]           len_q, rd_left_q, wr_left_q;
  logic                  dir_q, busy_q, done_q;

  line_t                 fifo [FIFO_DEPTH];
  logic [IW-1:0]         head_q, tail_q;
  logic [CW-1:0]         count_q, inflight_q;

  // source / destination views of the two ports
  logic  src_gnt, src_rvalid, dst_gnt;
  line_t src_rdata;
  logic  rd_req, wr_req;

  assign src_gnt    = dir_q ? d_gnt    : e_gnt;
  assign src_rvalid = dir_q ? d_rvalid : e_rvalid;
  assign src_rdata  = dir_q ? d_rdata  : e_rdata;
  assign dst_gnt    = dir_q ? e_gnt    : d_gnt;

  assign rd_req = busy_q && (rd_left_q != 0) &&
                  ((32'(count_q) + 32'(inflight_q)) < FIFO_DEPTH);
  assign wr_req = busy_q && (count_q != 0);

  mem_req_t rd_r, wr_r;
  always_comb begin
    rd_r       = '0;
    rd_r.req   = rd_req;
    rd_r.addr  = rd_addr_q;
    wr_r       = '0;
    wr_r.req   = wr_req;
    wr_r.we    = 1'b1;
    wr_r.addr  = wr_addr_q;
    wr_r.be    = '1;
    wr_r.wdata = fifo[head_q];
    e_req = dir_q ? wr_r : rd_r;
    d_req = dir_q ? rd_r : wr_r;
  end

  logic rd_fire, wr_fire, push;
  assign rd_fire = rd_req && src_gnt;
  assign wr_fire = wr_req && dst_gnt;
  assign push    = busy_q && src_rvalid;

  logic go;
  assign go = reg_sel && reg_we && reg_addr == 3'(DMA_R_CTRL) && reg_wdata[0] && !busy_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eaddr_q <= '0; daddr_q <= '0; len_q <= '0; dir_q <= 1'b0;
      busy_q <= 1'b0; done_q <= 1'b0; irq <= 1'b0;
      rd_addr_q <= '0; wr_addr_q <= '0; rd_left_q <= '0; wr_left_q <= '0;
      head_q <= '0; tail_q <= '0; count_q <= '0; inflight_q <= '0;
    end else begin
      irq <= 1'b0;
      if (reg_sel && reg_we && !busy_q) begin
        unique case (reg_addr)
          3'(DMA_R_EADDR): eaddr_q <= reg_wdata[DDR_ADDR_W-1:0];
          3'(DMA_R_DADDR): daddr_q <= reg_wdata[DDR_ADDR_W-1:0];
          3'(DMA_R_LEN):   len_q   <= reg_wdata[23:0];
          3'(DMA_R_CTRL):  dir_q   <= reg_wdata[1];
          default: ;
        endcase
      end
      if (go) begin
        busy_q    <= len_q != 0;
        done_q    <= len_q == 0;
        irq       <= len_q == 0;
        rd_addr_q <= reg_wdata[1] ? daddr_q : eaddr_q;
        wr_addr_q <= reg_wdata[1] ? eaddr_q : daddr_q;
        rd_left_q <= len_q;
        wr_left_q <= len_q;
      end else if (busy_q) begin
        if (rd_fire) begin
          rd_addr_q <= rd_addr_q + 1'b1;
          rd_left_q <= rd_left_q - 1'b1;
        end
        if (push) begin
          fifo[tail_q] <= src_rdata;
          tail_q       <= (32'(tail_q) == FIFO_DEPTH - 1) ? '0 : tail_q + 1'b1;
        end
        if (wr_fire) begin
          head_q    <= (32'(head_q) == FIFO_DEPTH - 1) ? '0 : head_q + 1'b1;
          wr_addr_q <= wr_addr_q + 1'b1;
          wr_left_q <= wr_left_q - 1'b1;
          if (wr_left_q == 1) begin
            busy_q <= 1'b0;
            done_q <= 1'b1;
            irq    <= 1'b1;
          end
        end
        count_q    <= count_q + CW'(push) - CW'(wr_fire);
        inflight_q <= inflight_q + CW'(rd_fire) - CW'(push);
      end
    end
  end

  always_comb begin
    reg_rdata = '0;
    unique case (reg_addr)
      3'(DMA_R_EADDR):  reg_rdata = DCR_DATA_W'(eaddr_q);
      3'(DMA_R_DADDR):  reg_rdata = DCR_DATA_W'(daddr_q);
      3'(DMA_R_LEN):    reg_rdata = DCR_DATA_W'(len_q);
      3'(DMA_R_CTRL):   reg_rdata = DCR_DATA_W'(dir_q) << 1;
      3'(DMA_R_STATUS): reg_rdata = {30'b0, done_q, busy_q};
      default: ;
    endcase
  end

  a_fifo_bound : assert property (@(posedge clk) disable iff (!rst_n)
                                  32'(count_q) + 32'(inflight_q) <= FIFO_DEPTH);

endmodule
