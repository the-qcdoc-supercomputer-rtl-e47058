// pec: Prefetching EDRAM Controller.
//
// The PEC gives the processor fast access to the 4 MByte embedded DRAM. It
// has three ports: the processor direct bus (PDB, a full-speed bus to the
// processor's data read and write interfaces), a slave on the processor local
// bus for any other bus master (for example the SCU's DMA), and its own DMA
// engine that copies between EDRAM and external DDR memory. Each port has a
// read side (pec_read_port: four 1024-bit prefetch line registers in two sets)
// and a write side (pec_write_buf: two 1024-bit write buffers). One EDRAM
// command is issued per clock, chosen in this order: refresh when due, demand
// fetches (a read is waiting), write-buffer flushes, prefetches; among ports
// PDB before bus slave before DMA. Every 64-bit word is stored with 8 ECC bits
// (single-error correct, double-error detect): flushed lines are encoded,
// fetched lines are checked and corrected, then merged with newer data still
// waiting in any write buffer. Accepted writes are also snooped by all read
// ports. Together this keeps the three ports coherent, as the paper requires.
//
// From the paper: three ports, the 1024-bit line size, four prefetch
// registers in two sets per read port, two write buffers per write interface,
// SECDED ECC, refresh by the controller, the DMA engine to DDR, 128-bit wide
// ports (8 GByte/s at 500 MHz is 16 bytes per clock). This design's choices:
// the command priorities, the refresh interval, the write-buffer and prefetch
// policies, whole-64-bit-word writes, and a flat address map in which byte
// address bits [LA_W+6:7] select the line and the upper bits are ignored.
//
// Interface: pdb_*, slv_* are slave ports and m_* the DMA's master port, all
// in the simplified bus of qcdoc_pkg; dma_* start a copy; e_* drive the EDRAM
// macro (edram.sv). Timing: a read that hits a prefetch register, and a write
// that finds room in a write buffer, are acknowledged in the clock they are
// presented (one quadword per clock per port, the 8 GByte/s of the paper at
// 500 MHz); a read miss completes 3 clocks after it is presented when the
// EDRAM is free.
module pec
  import qcdoc_pkg::*;
#(
  parameter int unsigned LINES            = EDRAM_BYTES / (LINE_W / 8),
  parameter int unsigned REFRESH_INTERVAL = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  bus_req_t    pdb_req,
  output bus_rsp_t    pdb_rsp,
  input  bus_req_t    slv_req,
  output bus_rsp_t    slv_rsp,
  output bus_req_t    m_req,
  input  bus_rsp_t    m_rsp,
  input  logic        dma_start,
  input  logic        dma_dir,
  input  logic [31:0] dma_edram_addr,
  input  logic [31:0] dma_ddr_addr,
  input  logic [15:0] dma_count,
  output logic        dma_busy,
  output logic        dma_done,
  // EDRAM macro
  output logic        e_cmd_valid,
  output logic [1:0]  e_cmd,
  output logic [$clog2(LINES)-1:0] e_line,
  output logic [16*72-1:0] e_wdata,
  output logic [15:0] e_wmask,
  input  logic [16*72-1:0] e_rdata,
  // status and mechanism observation
  output logic [31:0] ecc_corrected,
  output logic [31:0] ecc_uncorrectable,
  output logic        ev_refresh,
  output logic [2:0]  ev_hit,
  output logic [2:0]  ev_miss,
  output logic [2:0]  ev_prefetch,
  output logic [2:0]  ev_flush
);

  localparam int unsigned LA_W = $clog2(LINES);
  localparam int unsigned NP   = 3;

  bus_req_t port_req [NP];
  bus_rsp_t port_rsp [NP];
  bus_req_t dma_e_req;
  bus_rsp_t dma_e_rsp;

  assign port_req[0] = pdb_req;
  assign port_req[1] = slv_req;
  assign port_req[2] = dma_e_req;
  assign pdb_rsp     = port_rsp[0];
  assign slv_rsp     = port_rsp[1];
  assign dma_e_rsp   = port_rsp[2];

  pec_dma u_dma (
    .clk, .rst_n,
    .start(dma_start), .dir(dma_dir), .edram_addr(dma_edram_addr), .ddr_addr(dma_ddr_addr),
    .count(dma_count), .busy(dma_busy), .done(dma_done),
    .e_req(dma_e_req), .e_rsp(dma_e_rsp), .m_req(m_req), .m_rsp(m_rsp));

  // per-port read and write sides
  logic [NP-1:0]   f_req, f_demand, f_grant, f_ret, fl_req, fl_grant, snp_valid, rd_ack, wr_ack;
  logic [LA_W-1:0] f_line [NP], fl_line [NP], snp_line [NP];
  logic [2:0]      snp_qw [NP];
  logic [1:0]      snp_mask [NP];
  logic [127:0]    snp_data [NP], rd_data [NP];
  logic [1023:0]   fl_data [NP];
  logic [15:0]     fl_wmask [NP];
  logic [1:0]      wb_v [NP];
  logic [LA_W-1:0] wb_line [NP][2];
  logic [1023:0]   wb_data [NP][2];
  logic [15:0]     wb_mask [NP][2];
  logic [1023:0]   merged;

  for (genvar p = 0; p < NP; p++) begin : g_port
    logic [LA_W-1:0] line;
    logic [2:0]      qw;
    assign line = port_req[p].addr[7 +: LA_W];
    assign qw   = port_req[p].addr[6:4];
    assign snp_line[p] = line;
    assign snp_qw[p]   = qw;
    assign snp_mask[p] = {|port_req[p].be[15:8], |port_req[p].be[7:0]};
    assign snp_data[p] = port_req[p].wdata;
    assign port_rsp[p].ack   = rd_ack[p] | wr_ack[p];
    assign port_rsp[p].rdata = rd_data[p];

    pec_read_port #(.LA_W(LA_W), .NSNP(NP)) u_rd (
      .clk, .rst_n,
      .rd_valid(port_req[p].valid && !port_req[p].we), .rd_line(line), .rd_qw(qw),
      .rd_ack(rd_ack[p]), .rd_data(rd_data[p]),
      .f_req(f_req[p]), .f_demand(f_demand[p]), .f_line(f_line[p]),
      .f_grant(f_grant[p]), .f_ret(f_ret[p]), .f_data(merged),
      .snp_valid(snp_valid), .snp_line(snp_line), .snp_qw(snp_qw),
      .snp_mask(snp_mask), .snp_data(snp_data),
      .ev_hit(ev_hit[p]), .ev_miss(ev_miss[p]), .ev_prefetch(ev_prefetch[p]));

    pec_write_buf #(.LA_W(LA_W)) u_wb (
      .clk, .rst_n,
      .wr_valid(port_req[p].valid && port_req[p].we), .wr_line(line), .wr_qw(qw),
      .wr_data(port_req[p].wdata), .wr_mask(snp_mask[p]), .wr_ack(wr_ack[p]),
      .fl_req(fl_req[p]), .fl_line(fl_line[p]), .fl_data(fl_data[p]), .fl_wmask(fl_wmask[p]),
      .fl_grant(fl_grant[p]),
      .buf_v(wb_v[p]), .buf_line(wb_line[p]), .buf_data(wb_data[p]), .buf_mask(wb_mask[p]),
      .snp_valid(snp_valid[p]));
  end

  // refresh timer
  logic [$clog2(REFRESH_INTERVAL+1)-1:0] rtimer;
  logic            ref_due, ref_grant;
  logic [LA_W-1:0] ref_row;

  // EDRAM command arbiter
  typedef enum logic [1:0] {G_NONE, G_REF, G_FETCH, G_FLUSH} gkind_e;
  gkind_e          gkind;
  logic [1:0]      gport;
  logic            ret_valid;
  logic [1:0]      ret_port;
  logic [LA_W-1:0] ret_line;

  always_comb begin
    gkind = G_NONE;
    gport = '0;
    if (ref_due) gkind = G_REF;
    else begin
      for (int p = NP - 1; p >= 0; p--)
        if (f_req[p] && f_demand[p]) begin gkind = G_FETCH; gport = 2'(p); end
      if (gkind == G_NONE)
        for (int p = NP - 1; p >= 0; p--)
          if (fl_req[p]) begin gkind = G_FLUSH; gport = 2'(p); end
      if (gkind == G_NONE)
        for (int p = NP - 1; p >= 0; p--)
          if (f_req[p]) begin gkind = G_FETCH; gport = 2'(p); end
    end
  end

  assign ref_grant = gkind == G_REF;
  for (genvar p = 0; p < NP; p++) begin : g_grant
    assign f_grant[p]  = gkind == G_FETCH && gport == 2'(p);
    assign fl_grant[p] = gkind == G_FLUSH && gport == 2'(p);
    assign f_ret[p]    = ret_valid && ret_port == 2'(p);
    assign ev_flush[p] = fl_grant[p];
  end
  assign ev_refresh = ref_grant;

  // ECC encode of the line being flushed
  logic [1023:0] fl_sel_data;
  assign fl_sel_data = fl_data[gport];
  for (genvar w = 0; w < 16; w++) begin : g_enc
    pec_ecc_enc u_enc (.data(fl_sel_data[64*w +: 64]), .code(e_wdata[72*w +: 72]));
  end

  always_comb begin
    e_cmd_valid = gkind != G_NONE;
    e_cmd       = 2'd0;
    e_line      = f_line[gport];
    e_wmask     = fl_wmask[gport];
    unique case (gkind)
      G_REF:   begin e_cmd = 2'd2; e_line = ref_row; end
      G_FLUSH: begin e_cmd = 2'd1; e_line = fl_line[gport]; end
      default: ;
    endcase
  end

  // ECC check of a returning line, then merge with pending write-buffer data
  logic [1023:0] dec_line;
  logic [15:0]   w_corr, w_unc;
  for (genvar w = 0; w < 16; w++) begin : g_dec
    pec_ecc_dec u_dec (.code(e_rdata[72*w +: 72]), .data(dec_line[64*w +: 64]),
                       .corrected(w_corr[w]), .uncorrectable(w_unc[w]));
  end

  // Words replaced by newer buffered data are not counted as ECC events.
  logic [15:0] ovr;
  always_comb begin
    merged = dec_line;
    ovr    = '0;
    for (int p = 0; p < NP; p++)
      for (int b = 0; b < 2; b++)
        if (wb_v[p][b] && wb_line[p][b] == ret_line)
          for (int w = 0; w < 16; w++)
            if (wb_mask[p][b][w]) begin
              merged[64*w +: 64] = wb_data[p][b][64*w +: 64];
              ovr[w] = 1'b1;
            end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rtimer <= '0; ref_due <= 1'b0; ref_row <= '0;
      ret_valid <= 1'b0; ret_port <= '0; ret_line <= '0;
      ecc_corrected <= '0; ecc_uncorrectable <= '0;
    end else begin
      if (rtimer == ($bits(rtimer))'(REFRESH_INTERVAL - 1)) begin
        rtimer  <= '0;
        ref_due <= 1'b1;
      end else rtimer <= rtimer + 1'b1;
      if (ref_grant) begin
        ref_due <= 1'b0;
        ref_row <= ref_row + 1'b1;
      end
      ret_valid <= gkind == G_FETCH;
      ret_port  <= gport;
      ret_line  <= f_line[gport];
      if (ret_valid) begin
        ecc_corrected     <= ecc_corrected + 32'($countones(w_corr & ~ovr));
        ecc_uncorrectable <= ecc_uncorrectable + 32'($countones(w_unc & ~ovr));
      end
    end
  end

  a_whole_words: assert property (@(posedge clk) disable iff (!rst_n)
    pdb_req.valid && pdb_req.we |-> (pdb_req.be[7:0] == '0 || pdb_req.be[7:0] == '1) &&
                                   (pdb_req.be[15:8] == '0 || pdb_req.be[15:8] == '1));

endmodule
