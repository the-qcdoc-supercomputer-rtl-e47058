// scu_snd_unit: send side of one serial link direction of the SCU.
//
// Words to send come from the send register (filled by the send DMA) or from
// the passthru crossbar (words being forwarded for a global operation); the
// forwarded words go first. They wait in the send buffer, three 64-bit words
// (192 bits), and leave as packets of one header byte followed by the eight
// data bytes, most significant byte first. The header is built by the encode
// logic and the output mux picks header or data byte for the serial macro.
//
// Flow control follows the rule that the sender may have three words in
// flight before an acknowledgement comes back, matching the three-word receive
// buffer at the far end: a credit counter starts at REC_BUF_WORDS, is spent
// per data packet and returned by every ACK the partner receive unit decodes.
// Supervisor words (the interrupting channel) bypass the send buffer and have
// one credit of their own, returned by a SACK. The unit also carries the
// acknowledgements its partner receive unit owes the far node: a one-byte ACK
// or SACK is sent between packets, ahead of any data.
//
// The buffer depth follows the paper; the packet order, the priority
// ACK > SACK > supervisor > data, and the one-credit supervisor channel are
// this design's own choices.
//
// Interface: valid/ready pairs for the three word sources; ack_req/sack_req
// and ack_rx/sack_rx are one-cycle pulses from the partner receive unit;
// tx_byte is always valid and is consumed when tx_take = 1.
// Timing: a word accepted into an empty buffer with credit left starts at
// the next tx_take; a data packet occupies 9 byte slots (72 clocks).
module scu_snd_unit
  import qcdoc_pkg::*;
#(
  parameter int unsigned BUF_WORDS = REC_BUF_WORDS,
  parameter int unsigned CREDITS   = REC_BUF_WORDS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [63:0] reg_word,
  input  logic        reg_valid,
  output logic        reg_ready,
  input  logic [63:0] pass_word,
  input  logic        pass_valid,
  output logic        pass_ready,
  input  logic [63:0] sup_word,
  input  logic        sup_valid,
  output logic        sup_ready,
  input  logic        ack_req,
  input  logic        sack_req,
  input  logic        ack_rx,
  input  logic        sack_rx,
  output logic [7:0]  tx_byte,
  input  logic        tx_take,
  output logic        stall,        // a word waits but no credit is left
  output logic [2:0]  credits
);

  localparam int unsigned PW = $clog2(BUF_WORDS);

  // send buffer (snd buf)
  logic [63:0]  buf_q [BUF_WORDS];
  logic [PW-1:0] wp, rp;
  logic [PW:0]  cnt;
  logic         push, pop;
  logic [63:0]  push_word;

  assign pass_ready = cnt < (PW+1)'(BUF_WORDS);
  assign reg_ready  = pass_ready && !pass_valid;
  assign push       = (pass_valid && pass_ready) || (reg_valid && reg_ready);
  assign push_word  = pass_valid ? pass_word : reg_word;

  // serializer state
  logic        busy;
  logic [3:0]  rem;
  logic [63:0] sh;
  logic [2:0]  credit;
  logic        sup_credit;
  logic [2:0]  ack_pend;
  logic [2:0]  sack_pend;

  typedef enum logic [2:0] {S_IDLE, S_ACK, S_SACK, S_SUP, S_DATA} sel_e;
  sel_e sel;

  always_comb begin
    sel = S_IDLE;
    if (ack_pend != 0)                 sel = S_ACK;
    else if (sack_pend != 0)           sel = S_SACK;
    else if (sup_valid && sup_credit)  sel = S_SUP;
    else if (cnt != 0 && credit != 0)  sel = S_DATA;
  end

  // encode + output mux
  always_comb begin
    if (busy) tx_byte = sh[63:56];
    else unique case (sel)
      S_ACK:   tx_byte = hdr_encode(PKT_ACK, '0);
      S_SACK:  tx_byte = hdr_encode(PKT_SACK, '0);
      S_SUP:   tx_byte = hdr_encode(PKT_SUP, sup_word);
      S_DATA:  tx_byte = hdr_encode(PKT_DATA, buf_q[rp]);
      default: tx_byte = hdr_encode(PKT_IDLE, '0);
    endcase
  end

  logic start_sup, start_data;
  assign start_sup  = tx_take && !busy && sel == S_SUP;
  assign start_data = tx_take && !busy && sel == S_DATA;
  assign pop        = start_data;
  assign sup_ready  = start_sup;
  assign stall      = !busy && cnt != 0 && credit == 0;
  assign credits    = credit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
      busy <= 1'b0; rem <= '0; sh <= '0;
      credit <= 3'(CREDITS); sup_credit <= 1'b1;
      ack_pend <= '0; sack_pend <= '0;
    end else begin
      if (push) begin
        buf_q[wp] <= push_word;
        wp <= (wp == PW'(BUF_WORDS-1)) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (rp == PW'(BUF_WORDS-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (PW+1)'(push) - (PW+1)'(pop);

      credit     <= credit + 3'(ack_rx) - 3'(start_data);
      sup_credit <= (sup_credit && !start_sup) || sack_rx;
      ack_pend   <= ack_pend  + 3'(ack_req)  - 3'(tx_take && !busy && sel == S_ACK);
      sack_pend  <= sack_pend + 3'(sack_req) - 3'(tx_take && !busy && sel == S_SACK);

      if (tx_take) begin
        if (busy) begin
          sh   <= {sh[55:0], 8'h00};
          rem  <= rem - 1'b1;
          busy <= rem != 4'd1;
        end else if (start_sup || start_data) begin
          sh   <= start_sup ? sup_word : buf_q[rp];
          rem  <= 4'd8;
          busy <= 1'b1;
        end
      end
    end
  end

  // A credit returned beyond the buffer size means the far end acknowledged
  // a word that was never sent.
  a_credit_bound: assert property (@(posedge clk) disable iff (!rst_n)
    credit <= 3'(CREDITS));

endmodule
