// scu_rec_unit: receive side of one serial link direction of the SCU.
//
// Bytes arrive from the serial macro one per 8 clocks. The decode logic reads
// each header byte: a data or supervisor header is followed by eight data
// bytes, which are assembled (most significant byte first) into a 64-bit word;
// an ACK or SACK header is a one-byte packet that returns a credit to the send
// unit of this same direction; idle and alignment bytes are dropped. Data
// words go into the receive buffer, three 64-bit words (192 bits) deep, so the
// sender at the far end may have three words in flight. From the head of the
// buffer a word goes to the receive register (and so to the receive DMA), to
// the passthru crossbar (store-and-forward for global operations), or to
// both, as configured. Each word leaving the buffer asks the partner send unit
// to send one ACK back. Supervisor words go to a separate register that
// raises sup_full until the processor reads it (sup_clear), which sends a SACK.
//
// The buffer depth and the header/data split follow the paper. The header
// layout and parity check, delivering a word with a parity error (flagged, not
// retried) and the supervisor register are this design's own choices; the
// paper does not say how errors are recovered.
//
// Interface: rx_byte/rx_valid from the serial macro; word/word_valid/reg_ready
// to the receive register and pass_valid/pass_ready to the passthru; one-cycle
// pulses ack_req, sack_req (to the partner send unit), ack_rx, sack_rx (credits
// for it), parity_err and overflow. A word is handed out one clock after its
// last byte is received.
module scu_rec_unit
  import qcdoc_pkg::*;
#(
  parameter int unsigned BUF_WORDS = REC_BUF_WORDS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  rx_byte,
  input  logic        rx_valid,
  input  logic        cfg_pass_en,   // forward words to the passthru
  input  logic        cfg_local_en,  // with cfg_pass_en: also keep a local copy
  output logic [63:0] word,
  output logic        word_valid,
  input  logic        reg_ready,
  output logic        pass_valid,
  input  logic        pass_ready,
  output logic [63:0] sup_word,
  output logic        sup_full,
  input  logic        sup_clear,
  output logic        ack_req,
  output logic        sack_req,
  output logic        ack_rx,
  output logic        sack_rx,
  output logic        parity_err,
  output logic        overflow
);

  localparam int unsigned PW = $clog2(BUF_WORDS);

  // receive buffer (rec buf)
  logic [63:0]   buf_q [BUF_WORDS];
  logic [PW-1:0] wp, rp;
  logic [PW:0]   cnt;
  logic          push, pop, empty, full;

  assign empty = cnt == 0;
  assign full  = cnt == (PW+1)'(BUF_WORDS);
  assign word  = buf_q[rp];

  logic need_local, need_pass;
  assign need_local = !cfg_pass_en || cfg_local_en;
  assign need_pass  = cfg_pass_en;
  assign word_valid = !empty && need_local && (!need_pass || pass_ready);
  assign pass_valid = !empty && need_pass && (!need_local || reg_ready);
  assign pop        = !empty && (!need_local || reg_ready) && (!need_pass || pass_ready);
  assign ack_req    = pop;

  // decode / assemble
  logic [3:0]  rem;
  logic        is_sup;
  logic [3:0]  par;
  logic [63:0] sh;
  logic [63:0] full_word;
  logic        word_done;
  logic        hdr_cycle;
  pkt_type_e   htype;

  assign hdr_cycle = rx_valid && rem == 0;
  assign htype     = pkt_type_e'(rx_byte[7:5]);
  assign full_word = {sh[55:0], rx_byte};
  assign word_done = rx_valid && rem == 4'd1;
  assign push      = word_done && !is_sup && !full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
      rem <= '0; is_sup <= 1'b0; par <= '0; sh <= '0;
      sup_word <= '0; sup_full <= 1'b0;
      ack_rx <= 1'b0; sack_rx <= 1'b0; parity_err <= 1'b0; overflow <= 1'b0;
      sack_req <= 1'b0;
    end else begin
      ack_rx <= 1'b0; sack_rx <= 1'b0; parity_err <= 1'b0; overflow <= 1'b0;
      sack_req <= 1'b0;
      if (hdr_cycle) begin
        if (!hdr_type_ok(rx_byte)) parity_err <= 1'b1;
        else unique case (htype)
          PKT_DATA, PKT_SUP: begin
            rem    <= 4'd8;
            is_sup <= htype == PKT_SUP;
            par    <= rx_byte[3:0];
          end
          PKT_ACK:  ack_rx  <= 1'b1;
          PKT_SACK: sack_rx <= 1'b1;
          PKT_IDLE, PKT_SYNC: ;
          default:  parity_err <= 1'b1;
        endcase
      end else if (rx_valid) begin
        sh  <= full_word;
        rem <= rem - 1'b1;
        if (word_done) begin
          if (data_parity(full_word) != par) parity_err <= 1'b1;
          if (is_sup) begin
            sup_word <= full_word;
            sup_full <= 1'b1;
          end else if (full) overflow <= 1'b1;
        end
      end
      if (sup_clear && sup_full) begin
        sup_full <= 1'b0;
        sack_req <= 1'b1;
      end
      if (push) begin
        buf_q[wp] <= full_word;
        wp <= (wp == PW'(BUF_WORDS-1)) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (rp == PW'(BUF_WORDS-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  // With correct flow control the far sender never overruns the buffer.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(word_done && !is_sup && full));

endmodule
