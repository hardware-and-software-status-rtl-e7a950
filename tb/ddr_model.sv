// ddr_model: behavioural stand-in for the DDR SDRAM controller and its
// DIMM, for testbenches only. It takes one request every PERIOD cycles (3 by
// default: 16 bytes per 3 cycles is about 2.67 GByte/s at 500 MHz, the
// paper's external-memory rate is 2.6 GByte/s) and returns read data LAT
// cycles after the grant, in order. It stores LINES 128-bit lines; the
// address wraps. Contents start at zero.
module ddr_model
  import qcdoc_pkg::*;
#(
  parameter int unsigned LINES  = 4096,
  parameter int unsigned PERIOD = 3,
  parameter int unsigned LAT    = 6
) (
  input  logic     clk,
  input  mem_req_t req,
  output logic     gnt,
  output logic     rvalid,
  output line_t    rdata
);
  line_t mem [LINES];
  line_t pd [LAT];
  logic  pv [LAT];
  int    ph = 0;

  initial begin
    for (int i = 0; i < LINES; i++) mem[i] = '0;
    for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pd[i] = '0; end
  end

  assign gnt    = (ph == 0);
  assign rvalid = pv[LAT-1];
  assign rdata  = pd[LAT-1];

  always @(posedge clk) begin
    ph <= (ph + 1) % PERIOD;
    for (int i = LAT - 1; i > 0; i--) begin pd[i] <= pd[i-1]; pv[i] <= pv[i-1]; end
    pv[0] <= 1'b0;
    if (req.req && gnt) begin
      if (req.we) begin
        for (int b = 0; b < BE_W; b++)
          if (req.be[b]) mem[req.addr % LINES][8*b +: 8] <= req.wdata[8*b +: 8];
      end else begin
        pd[0] <= mem[req.addr % LINES];
        pv[0] <= 1'b1;
      end
    end
  end
endmodule
