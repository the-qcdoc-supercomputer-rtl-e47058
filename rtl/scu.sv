// scu: Serial Communications Unit of the QCDOC node.
//
// The SCU moves 64-bit words between this node's memory and its neighbours on
// a six-dimensional torus, over N_LINKS (12) link directions, each with a send
// and a receive side: 24 channels, each with its own DMA engine. Per link the
// send path is send DMA -> send register -> send unit (snd buf, encode, mux)
// -> serial macro, and the receive path is serial macro -> receive unit
// (decode, rec buf) -> receive register -> receive DMA. The 24 engines share
// one bus master interface through a round-robin arbiter. A passthru crossbar
// forwards received words straight to send units for store-and-forward global
// sums. Control registers behind a bus slave interface load the DMA
// instruction SRAMs, start any subset of the 24 channels with a single write,
// configure the passthru, and carry the supervisor (interrupting) words.
//
// The block structure follows the SCU block diagram of the paper; the register
// map below and the interrupt rule are this design's own choices.
//
// Register map (byte offset in the slave window, 128-bit accesses):
//   0x0000 + ch*0x100 + idx*0x10   DMA instruction idx of channel ch (write);
//                                  ch 0..11 send on link ch, 12..23 receive
//                                  on link ch-12
//   0x2000  START   wdata[23:0] channel mask, wdata[32 +: IW] start index
//   0x2010  STATUS  read [23:0] busy, [87:64] done (sticky); write 1 to
//                   [87:64] clears done
//   0x2020  PASS    [11:0] send-side forward enable, [16+4j +: 4] source link
//                   of send unit j, [75:64] keep a local copy, [91:80] receive
//                   side forward enable
//   0x2030  ERR     read [11:0] supervisor word waiting, [27:16] parity error,
//                   [43:32] overflow (sticky); write 1 to [43:16] clears
//   0x2040  IRQEN   [23:0] interrupt on done, [32] interrupt on supervisor word
//   0x3000 + l*0x10 supervisor send on link l (write, wdata[63:0]); the ack is
//                   held back while the previous supervisor word is unsent
//   0x3800 + l*0x10 supervisor receive on link l (read, rdata[63:0]); the read
//                   frees the register and returns a SACK to the sender
// The slave acknowledges one clock after it sees a request.
module scu
  import qcdoc_pkg::*;
#(
  parameter int unsigned N          = N_LINKS,
  parameter int unsigned DESC_DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  output logic [7:0]   tx_byte  [N],
  input  logic [N-1:0] tx_take,
  input  logic [7:0]   rx_byte  [N],
  input  logic [N-1:0] rx_valid,
  output bus_req_t     m_req,
  input  bus_rsp_t     m_rsp,
  input  bus_req_t     s_req,
  output bus_rsp_t     s_rsp,
  output logic         irq,
  // observation of mechanisms, one bit per link, for counters and tests
  output logic [N-1:0] ev_stall,
  output logic [N-1:0] ev_forward,
  output logic         ev_contention
);

  localparam int unsigned NCH = 2 * N;
  localparam int unsigned IW  = $clog2(DESC_DEPTH);

  // control registers
  logic [NCH-1:0] done_q, irq_en;
  logic           sup_irq_en;
  logic [N-1:0]   pt_en, pt_local, pt_rec_en;
  logic [3:0]     pt_src [N];
  logic [N-1:0]   perr_q, ovf_q;
  logic [63:0]    sup_tx_word [N];
  logic [N-1:0]   sup_tx_valid;

  // per-channel signals
  logic [NCH-1:0] dma_busy, dma_done, dma_start;
  logic [NCH-1:0] desc_we;
  logic [NCH-1:0] mreq_valid, mreq_we, mack;
  logic [31:0]    mreq_addr  [NCH];
  logic [63:0]    mreq_wdata [NCH];
  logic [63:0]    mrdata;

  // per-link signals
  logic [63:0]  sreg_in_word [N], sreg_word [N], rreg_word [N], rreg_out_word [N];
  logic [N-1:0] sreg_in_valid, sreg_in_ready, sreg_valid, sreg_ready;
  logic [N-1:0] rreg_in_ready, rreg_valid, rreg_ready;
  logic [63:0]  rec_word [N], sup_rx_word [N];
  logic [N-1:0] rec_word_valid, rec_pass_valid, rec_pass_ready;
  logic [N-1:0] sup_full, sup_clear, sup_ready;
  logic [N-1:0] ack_req, sack_req, ack_rx, sack_rx, perr, ovf;
  logic [63:0]  pt_word [N];
  logic [N-1:0] pt_valid, pt_ready;
  logic [2:0]   credits [N];

  // slave decode
  logic [15:0] off;
  logic        s_ack_q;
  logic        is_desc, is_start, is_status, is_pass, is_err, is_irqen, is_sup_tx, is_sup_rx;
  logic [4:0]  ch_sel;
  logic [3:0]  link_sel;
  logic        s_go;

  assign off       = s_req.addr[15:0];
  assign is_desc   = off < 16'h2000;
  assign is_start  = off == 16'h2000;
  assign is_status = off == 16'h2010;
  assign is_pass   = off == 16'h2020;
  assign is_err    = off == 16'h2030;
  assign is_irqen  = off == 16'h2040;
  assign is_sup_tx = off[15:11] == 5'b00110;
  assign is_sup_rx = off[15:11] == 5'b00111;
  assign ch_sel    = off[12:8];
  assign link_sel  = off[7:4];
  assign s_go      = s_req.valid && !s_ack_q &&
                     !(is_sup_tx && s_req.we && sup_tx_valid[link_sel]);

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    assign desc_we[c]   = s_go && s_req.we && is_desc && ch_sel == 5'(c);
    assign dma_start[c] = s_go && s_req.we && is_start && s_req.wdata[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_ack_q <= 1'b0; s_rsp <= '0;
      done_q <= '0; irq_en <= '0; sup_irq_en <= 1'b0;
      pt_en <= '0; pt_local <= '0; pt_rec_en <= '0;
      for (int j = 0; j < N; j++) begin
        pt_src[j] <= '0;
        sup_tx_word[j] <= '0;
      end
      perr_q <= '0; ovf_q <= '0; sup_tx_valid <= '0;
    end else begin
      s_ack_q     <= s_go;
      s_rsp.ack   <= s_go;
      s_rsp.rdata <= '0;
      done_q <= done_q | dma_done;
      perr_q <= perr_q | perr;
      ovf_q  <= ovf_q | ovf;
      sup_tx_valid <= sup_tx_valid & ~sup_ready;
      if (s_go) begin
        if (s_req.we) begin
          if (is_status) done_q <= (done_q | dma_done) & ~s_req.wdata[64 +: NCH];
          if (is_err) begin
            perr_q <= (perr_q | perr) & ~s_req.wdata[16 +: N];
            ovf_q  <= (ovf_q | ovf) & ~s_req.wdata[32 +: N];
          end
          if (is_irqen) begin
            irq_en     <= s_req.wdata[NCH-1:0];
            sup_irq_en <= s_req.wdata[32];
          end
          if (is_pass) begin
            pt_en     <= s_req.wdata[N-1:0];
            pt_local  <= s_req.wdata[64 +: N];
            pt_rec_en <= s_req.wdata[80 +: N];
            for (int j = 0; j < N; j++) pt_src[j] <= s_req.wdata[16 + 4*j +: 4];
          end
          if (is_sup_tx) begin
            sup_tx_word[link_sel]  <= s_req.wdata[63:0];
            sup_tx_valid[link_sel] <= 1'b1;
          end
        end else begin
          if (is_status) begin
            s_rsp.rdata[NCH-1:0]   <= dma_busy;
            s_rsp.rdata[64 +: NCH] <= done_q;
          end
          if (is_pass) begin
            s_rsp.rdata[N-1:0]   <= pt_en;
            s_rsp.rdata[64 +: N] <= pt_local;
            s_rsp.rdata[80 +: N] <= pt_rec_en;
            for (int j = 0; j < N; j++) s_rsp.rdata[16 + 4*j +: 4] <= pt_src[j];
          end
          if (is_err) begin
            s_rsp.rdata[N-1:0]   <= sup_full;
            s_rsp.rdata[16 +: N] <= perr_q;
            s_rsp.rdata[32 +: N] <= ovf_q;
          end
          if (is_irqen) begin
            s_rsp.rdata[NCH-1:0] <= irq_en;
            s_rsp.rdata[32]      <= sup_irq_en;
          end
          if (is_sup_rx) s_rsp.rdata[63:0] <= sup_rx_word[link_sel];
        end
      end
    end
  end

  for (genvar l = 0; l < N; l++) begin : g_sup_clr
    assign sup_clear[l] = s_go && !s_req.we && is_sup_rx && link_sel == 4'(l);
  end

  assign irq = |(done_q & irq_en) || (sup_irq_en && |sup_full);

  // DMA engines: channel l sends on link l, channel N+l receives on link l
  for (genvar l = 0; l < N; l++) begin : g_link
    scu_dma #(.IS_SEND(1'b1), .DESC_DEPTH(DESC_DEPTH)) u_snd_dma (
      .clk, .rst_n,
      .desc_we(desc_we[l]), .desc_waddr(off[4 +: IW]), .desc_wdata(dma_desc_t'(s_req.wdata)),
      .start(dma_start[l]), .start_idx(s_req.wdata[32 +: IW]),
      .busy(dma_busy[l]), .done(dma_done[l]),
      .mem_valid(mreq_valid[l]), .mem_we(mreq_we[l]), .mem_addr(mreq_addr[l]),
      .mem_wdata(mreq_wdata[l]), .mem_ack(mack[l]), .mem_rdata(mrdata),
      .out_word(sreg_in_word[l]), .out_valid(sreg_in_valid[l]), .out_ready(sreg_in_ready[l]),
      .in_word('0), .in_valid(1'b0), .in_ready());

    scu_dma #(.IS_SEND(1'b0), .DESC_DEPTH(DESC_DEPTH)) u_rec_dma (
      .clk, .rst_n,
      .desc_we(desc_we[N+l]), .desc_waddr(off[4 +: IW]), .desc_wdata(dma_desc_t'(s_req.wdata)),
      .start(dma_start[N+l]), .start_idx(s_req.wdata[32 +: IW]),
      .busy(dma_busy[N+l]), .done(dma_done[N+l]),
      .mem_valid(mreq_valid[N+l]), .mem_we(mreq_we[N+l]), .mem_addr(mreq_addr[N+l]),
      .mem_wdata(mreq_wdata[N+l]), .mem_ack(mack[N+l]), .mem_rdata(mrdata),
      .out_word(), .out_valid(), .out_ready(1'b0),
      .in_word(rreg_out_word[l]), .in_valid(rreg_valid[l]), .in_ready(rreg_ready[l]));

    scu_word_reg u_send_reg (
      .clk, .rst_n,
      .in_word(sreg_in_word[l]), .in_valid(sreg_in_valid[l]), .in_ready(sreg_in_ready[l]),
      .out_word(sreg_word[l]), .out_valid(sreg_valid[l]), .out_ready(sreg_ready[l]));

    scu_word_reg u_receive_reg (
      .clk, .rst_n,
      .in_word(rec_word[l]), .in_valid(rec_word_valid[l]), .in_ready(rreg_in_ready[l]),
      .out_word(rreg_out_word[l]), .out_valid(rreg_valid[l]), .out_ready(rreg_ready[l]));

    scu_snd_unit u_snd (
      .clk, .rst_n,
      .reg_word(sreg_word[l]), .reg_valid(sreg_valid[l]), .reg_ready(sreg_ready[l]),
      .pass_word(pt_word[l]), .pass_valid(pt_valid[l]), .pass_ready(pt_ready[l]),
      .sup_word(sup_tx_word[l]), .sup_valid(sup_tx_valid[l]), .sup_ready(sup_ready[l]),
      .ack_req(ack_req[l]), .sack_req(sack_req[l]), .ack_rx(ack_rx[l]), .sack_rx(sack_rx[l]),
      .tx_byte(tx_byte[l]), .tx_take(tx_take[l]),
      .stall(ev_stall[l]), .credits(credits[l]));

    scu_rec_unit u_rec (
      .clk, .rst_n,
      .rx_byte(rx_byte[l]), .rx_valid(rx_valid[l]),
      .cfg_pass_en(pt_rec_en[l]), .cfg_local_en(pt_local[l]),
      .word(rec_word[l]), .word_valid(rec_word_valid[l]), .reg_ready(rreg_in_ready[l]),
      .pass_valid(rec_pass_valid[l]), .pass_ready(rec_pass_ready[l]),
      .sup_word(sup_rx_word[l]), .sup_full(sup_full[l]), .sup_clear(sup_clear[l]),
      .ack_req(ack_req[l]), .sack_req(sack_req[l]), .ack_rx(ack_rx[l]), .sack_rx(sack_rx[l]),
      .parity_err(perr[l]), .overflow(ovf[l]));
  end

  scu_passthru #(.N(N)) u_passthru (
    .rec_word(rec_word), .rec_valid(rec_pass_valid), .rec_ready(rec_pass_ready),
    .snd_word(pt_word), .snd_valid(pt_valid), .snd_ready(pt_ready),
    .en(pt_en), .src_sel(pt_src), .forwarded(ev_forward));

  scu_arbiter #(.N(NCH)) u_arb (
    .clk, .rst_n,
    .req_valid(mreq_valid), .req_we(mreq_we), .req_addr(mreq_addr), .req_wdata(mreq_wdata),
    .ack(mack), .rdata(mrdata), .m_req(m_req), .m_rsp(m_rsp), .contention(ev_contention));

endmodule
