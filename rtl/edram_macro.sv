// edram_macro: behavioural model of the node's 4 MByte embedded DRAM.
//
// The real part is an embedded-DRAM macro of the ASIC vendor's library; this
// model has no refresh, no bank timing and no power-up contents, only the
// storage and a synchronous 128-bit port: a request in cycle t (en=1) reads
// or writes line addr, and for a read the line appears on rdata in cycle t+1.
// Writes honour per-byte enables. The size, 4 MBytes, is the paper's; the
// line width (128 bits, 16 bytes per 500 MHz cycle = 8 GByte/s) follows from
// the paper's memory/processor bandwidth; the port timing is this model's own
// choice. Contents are cleared at time zero so that a read of an unwritten
// line is deterministic.
module edram_macro
  import qcdoc_pkg::*;
#(
  parameter int unsigned LINES = EDRAM_LINES,
  parameter int unsigned AW    = $clog2(LINES)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [BE_W-1:0] be,
  input  line_t         wdata,
  output line_t         rdata
);

  line_t mem [LINES];

  initial begin
    for (int unsigned i = 0; i < LINES; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int b = 0; b < BE_W; b++)
          if (be[b]) mem[addr][8*b +: 8] <= wdata[8*b +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end

endmodule
