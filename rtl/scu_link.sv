// scu_link: one SCU neighbour link, its send half and its receive half.
//
// A QCDOC node has a send wire and a receive wire to each of its 12
// neighbours in the 6-dimensional torus, each carrying 500 Mbit/s, i.e. one
// bit per 500 MHz core cycle. This module owns one such pair. ser_out carries
// this node's data frames to the neighbour and, interleaved with them, the
// acknowledgements for data frames that arrived on ser_in; ser_in carries the
// neighbour's data and the neighbour's acknowledgements for our data.
//
// Error handling follows the paper's "single-bit error detection with
// automatic resend": every frame carries a parity bit. The receiver answers a
// good data frame with ACK(seq) and a data frame with a parity error with
// NACK(expected seq); the sender keeps up to three unacknowledged words in a
// four-entry buffer (2-bit sequence numbers, go-back-N), frees them on ACK,
// rewinds to the NACKed word on NACK and rewinds to the oldest unacknowledged
// word if no acknowledgement arrives for TIMEOUT cycles (a lost ACK, or a
// receiver whose output was full and dropped the frame). A receiver discards
// duplicates and words out of order, so words come out of rx_* exactly once
// and in order. The frame layout is in qcdoc_pkg; frames follow each other
// without gaps, the line idles at 0. A single flipped bit in the start bit or
// on an idle line is outside what this scheme detects.
//
// Interface: tx_valid/tx_data/tx_ready takes one 64-bit word per handshake;
// rx_valid/rx_data/rx_ready delivers them. perr_count counts frames received
// with a parity error, resend_count the sender's rewinds.
// Timing: a data frame is 71 bits, an acknowledgement 8; with traffic in
// one direction a word takes 71 cycles on the wire, acknowledgements travel
// back on the other wire; with both directions busy each wire also carries
// the other direction's 8-bit acknowledgements, 79 cycles per word. The window, the frame layout, the ACK/NACK scheme
// and TIMEOUT are this design's choices; the paper gives the line rate and
// the behaviour (detect single-bit errors, resend).
module scu_link
  import qcdoc_pkg::*;
#(
  parameter int unsigned TIMEOUT = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        ser_out,
  input  logic        ser_in,
  input  logic        tx_valid,
  input  word_t       tx_data,
  output logic        tx_ready,
  output logic        rx_valid,
  output word_t       rx_data,
  input  logic        rx_ready,
  output logic [15:0] perr_count,
  output logic [15:0] resend_count
);

  localparam int unsigned FL = DATA_FRAME_LEN;   // 71
  localparam int unsigned RW = FL - 1;           // bits after the start bit

  // ------------------------------------------------------------ receiver
  logic          r_busy_q;
  logic [6:0]    r_cnt_q;          // bits after the start bit received
  logic [RW-2:0] r_sh_q;
  logic          r_is_data_q;      // class decided by majority of 3 bits
  logic [1:0]    r_exp_q;          // next expected sequence number
  logic          r_nack_q;         // NACK issued, waiting for the resend

  logic [RW-1:0] r_sh_n;
  logic [6:0]    r_cnt_n;
  logic          r_is_data_n;
  logic          r_done;           // last bit of a frame arrives this cycle

  always_comb begin
    r_sh_n      = {r_sh_q[RW-2:0], ser_in};
    r_cnt_n     = r_cnt_q + 7'd1;
    r_is_data_n = (r_cnt_n == 7'd3) ?
                  ((r_sh_n[2] & r_sh_n[1]) | (r_sh_n[2] & r_sh_n[0]) | (r_sh_n[1] & r_sh_n[0]))
                  : r_is_data_q;
    r_done      = r_busy_q && r_cnt_n >= 7'd3 &&
                  (r_is_data_n ? (r_cnt_n == 7'(RW)) : (r_cnt_n == 7'(CTRL_FRAME_LEN - 1)));
  end

  // decoded frame (valid when r_done)
  logic       f_par_ok;
  logic [1:0] f_seq;
  word_t      f_payload;
  logic       f_ctrl_ok;          // good control frame
  ctrl_kind_e f_kind;

  always_comb begin
    f_payload = r_sh_n[WORD_W:1];
    if (r_is_data_n) begin
      f_par_ok  = ~^r_sh_n[RW-1:0] && r_sh_n[RW-1 -: 3] == CLS_DATA;
      f_seq     = r_sh_n[RW-4 -: 2];
      f_kind    = CTRL_ACK;
    end else begin
      f_par_ok  = ~^r_sh_n[6:0] && r_sh_n[6:4] == CLS_CTRL;
      f_seq     = r_sh_n[2:1];
      f_kind    = ctrl_kind_e'(r_sh_n[3]);
    end
    f_ctrl_ok = r_done && !r_is_data_n && f_par_ok;
  end

  // acknowledgement to be sent on ser_out
  logic       ack_pend_q;
  ctrl_kind_e ack_kind_q;
  logic [1:0] ack_seq_q;
  logic       ack_take;           // serializer picks the pending ack up

  logic rx_free;
  assign rx_free = !rx_valid || rx_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_busy_q    <= 1'b0;
      r_cnt_q     <= '0;
      r_sh_q      <= '0;
      r_is_data_q <= 1'b0;
      r_exp_q     <= '0;
      r_nack_q    <= 1'b0;
      rx_valid    <= 1'b0;
      rx_data     <= '0;
      perr_count  <= '0;
      ack_pend_q  <= 1'b0;
      ack_kind_q  <= CTRL_ACK;
      ack_seq_q   <= '0;
    end else begin
      if (rx_valid && rx_ready) rx_valid <= 1'b0;
      if (ack_take) ack_pend_q <= 1'b0;

      if (!r_busy_q) begin
        if (ser_in) begin
          r_busy_q <= 1'b1;
          r_cnt_q  <= '0;
        end
      end else begin
        r_sh_q      <= r_sh_n[RW-2:0];
        r_cnt_q     <= r_cnt_n;
        r_is_data_q <= r_is_data_n;
        if (r_done) r_busy_q <= 1'b0;
      end

      if (r_done && !f_par_ok) perr_count <= perr_count + 16'd1;

      if (r_done && r_is_data_n) begin
        if (!f_par_ok) begin
          ack_pend_q <= 1'b1;
          ack_kind_q <= CTRL_NACK;
          ack_seq_q  <= r_exp_q;
          r_nack_q   <= 1'b1;
        end else if (f_seq == r_exp_q) begin
          if (rx_free) begin
            rx_valid   <= 1'b1;
            rx_data    <= f_payload;
            r_exp_q    <= r_exp_q + 2'd1;
            r_nack_q   <= 1'b0;
            ack_pend_q <= 1'b1;
            ack_kind_q <= CTRL_ACK;
            ack_seq_q  <= f_seq;
          end
          // output full: drop without an answer, the sender times out
        end else if (!r_nack_q) begin
          // duplicate: confirm what was accepted last
          ack_pend_q <= 1'b1;
          ack_kind_q <= CTRL_ACK;
          ack_seq_q  <= r_exp_q - 2'd1;
        end
      end
    end
  end

  // -------------------------------------------------------------- sender
  word_t       sbuf [4];
  logic [1:0]  base_q, next_q;     // oldest unacknowledged, next to send
  logic [1:0]  cnt_q;              // words held (0..3)
  logic [$clog2(TIMEOUT+1)-1:0] timer_q;

  logic [FL-1:0] sh_q;             // serializer, MSB goes out first
  logic [6:0]    left_q;           // bits still to send from sh_q

  assign tx_ready = cnt_q != 2'd3;

  // serializer chooses a frame when it becomes free
  logic          ser_free;
  assign ser_free = left_q == 0;
  assign ack_take = ser_free && ack_pend_q;

  function automatic logic [FL-1:0] data_frame(input logic [1:0] seq, input word_t w);
    logic par;
    par = ^{CLS_DATA, seq, w};
    return {1'b1, CLS_DATA, seq, w, par};
  endfunction

  function automatic logic [FL-1:0] ctrl_frame(input ctrl_kind_e k, input logic [1:0] seq);
    logic par;
    par = ^{CLS_CTRL, k, seq};
    return {1'b1, CLS_CTRL, k, seq, par, {(FL - CTRL_FRAME_LEN){1'b0}}};
  endfunction

  // next-state of the sender, in the order: acknowledgement, timeout, new
  // word, serializer
  logic [1:0]    b_n, n_n, c_n;
  logic          rewind, progress, accept, load, load_ctrl;
  logic [FL-1:0] frame;
  logic [1:0]    d, o, ca;

  always_comb begin
    d = f_seq - base_q;
    o = next_q - base_q;           // words sent and not yet acknowledged
    b_n = base_q; n_n = next_q; c_n = cnt_q;
    progress = 1'b0;
    rewind   = 1'b0;
    if (f_ctrl_ok) begin
      if (f_kind == CTRL_ACK) begin
        if (d < o) begin
          b_n = f_seq + 2'd1;
          c_n = cnt_q - (d + 2'd1);
          progress = 1'b1;
        end
      end else if (d <= o) begin
        b_n = f_seq;
        c_n = cnt_q - d;
        rewind = next_q != f_seq;
        n_n = f_seq;
        progress = 1'b1;
      end
    end
    // no answer for TIMEOUT cycles: send everything unacknowledged again
    if (!(n_n == b_n || progress) && 32'(timer_q) >= TIMEOUT - 1) begin
      n_n    = b_n;
      rewind = 1'b1;
    end
    ca     = c_n;                  // words held before this cycle's new one
    accept = tx_valid && tx_ready;
    if (accept) c_n = c_n + 2'd1;
    load      = ser_free && (ack_pend_q || (n_n - b_n) != ca);
    load_ctrl = ack_pend_q;
    frame     = ack_pend_q ? ctrl_frame(ack_kind_q, ack_seq_q) : data_frame(n_n, sbuf[n_n]);
    if (load && !load_ctrl) n_n = n_n + 2'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q       <= '0;
      next_q       <= '0;
      cnt_q        <= '0;
      timer_q      <= '0;
      sh_q         <= '0;
      left_q       <= '0;
      ser_out      <= 1'b0;
      resend_count <= '0;
    end else begin
      if (next_q == base_q || progress || rewind) timer_q <= '0;
      else                                         timer_q <= timer_q + 1'b1;
      if (rewind) resend_count <= resend_count + 16'd1;
      if (!ser_free) begin
        ser_out <= sh_q[FL-1];
        sh_q    <= sh_q << 1;
        left_q  <= left_q - 7'd1;
      end else if (load) begin
        ser_out <= frame[FL-1];
        sh_q    <= frame << 1;
        left_q  <= load_ctrl ? 7'(CTRL_FRAME_LEN - 1) : 7'(FL - 1);
      end else begin
        ser_out <= 1'b0;
      end
      base_q <= b_n;
      next_q <= n_n;
      cnt_q  <= c_n;
    end
  end

  // the word buffer needs no reset
  always_ff @(posedge clk) begin
    if (tx_valid && tx_ready) sbuf[2'(b_n + (c_n - 2'd1))] <= tx_data;
  end

  a_window : assert property (@(posedge clk) disable iff (!rst_n)
                              2'(next_q - base_q) <= cnt_q);

endmodule
