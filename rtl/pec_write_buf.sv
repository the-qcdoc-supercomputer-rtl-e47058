// pec_write_buf: write buffer of one port of the prefetching EDRAM controller.
//
// Each write interface of the controller (processor direct bus, bus slave,
// DMA) has two 1024-bit write buffer registers, as the paper states. This
// design uses them to gather writes into whole lines: a 128-bit write whose
// line is already in a buffer is merged into it; otherwise it takes a free
// buffer. The buffer not written last is flushed to EDRAM whenever the
// controller grants it, and the last-written one is flushed once the port
// stops writing, so a new line always finds a free buffer soon. A write that
// would land in the buffer being flushed in the same clock waits one clock.
// Each buffer keeps a mask of the 64-bit words it holds; only those words are
// written to EDRAM, and the same buffers and masks are offered to the
// controller so that a line fetched from EDRAM is merged with newer data still
// waiting here. Writes are accepted in whole 64-bit words (this design's
// choice; be is looked at per 64-bit half).
//
// Interface: wr_valid/wr_line/wr_qw/wr_data/wr_mask held until wr_ack, which
// is given (combinationally) in the clock the write is taken, so a stream of
// writes to buffered lines goes at one quadword per clock. fl_req/fl_line/fl_data/fl_wmask ask for a
// flush, fl_grant performs it. snp_valid pulses for every accepted write.
module pec_write_buf #(
  parameter int unsigned LA_W = 15
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_valid,
  input  logic [LA_W-1:0]  wr_line,
  input  logic [2:0]       wr_qw,
  input  logic [127:0]     wr_data,
  input  logic [1:0]       wr_mask,
  output logic             wr_ack,
  output logic             fl_req,
  output logic [LA_W-1:0]  fl_line,
  output logic [1023:0]    fl_data,
  output logic [15:0]      fl_wmask,
  input  logic             fl_grant,
  output logic [1:0]       buf_v,
  output logic [LA_W-1:0]  buf_line [2],
  output logic [1023:0]    buf_data [2],
  output logic [15:0]      buf_mask [2],
  output logic             snp_valid
);

  logic cur;      // buffer written last
  logic fsel;     // buffer to flush

  assign fsel     = buf_v[~cur] ? ~cur : cur;
  assign fl_req   = buf_v[~cur] || (buf_v[cur] && !wr_valid);
  assign fl_line  = buf_line[fsel];
  assign fl_data  = buf_data[fsel];
  assign fl_wmask = buf_mask[fsel];

  logic       req_now, hit, free, take;
  logic       wsel;
  always_comb begin
    req_now = wr_valid;
    hit  = 1'b0;
    wsel = 1'b0;
    for (int b = 0; b < 2; b++)
      if (buf_v[b] && buf_line[b] == wr_line && !hit) begin
        hit  = 1'b1;
        wsel = 1'(b);
      end
    free = 1'b0;
    if (!hit) begin
      if (!buf_v[0])      begin free = 1'b1; wsel = 1'b0; end
      else if (!buf_v[1]) begin free = 1'b1; wsel = 1'b1; end
    end
    take = req_now && (hit || free) && !(fl_grant && fsel == wsel);
  end
  assign snp_valid = take;
  assign wr_ack    = take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_v <= '0; cur <= 1'b0;
      for (int b = 0; b < 2; b++) begin
        buf_line[b] <= '0; buf_data[b] <= '0; buf_mask[b] <= '0;
      end
    end else begin
      if (fl_grant) begin
        buf_v[fsel]    <= 1'b0;
        buf_mask[fsel] <= '0;
      end
      if (take) begin
        cur <= wsel;
        buf_v[wsel] <= 1'b1;
        if (!hit) begin
          buf_line[wsel] <= wr_line;
          buf_mask[wsel] <= {14'b0, wr_mask} << (2 * wr_qw);
        end else
          buf_mask[wsel] <= buf_mask[wsel] | ({14'b0, wr_mask} << (2 * wr_qw));
        if (wr_mask[0]) buf_data[wsel][128*wr_qw      +: 64] <= wr_data[63:0];
        if (wr_mask[1]) buf_data[wsel][128*wr_qw + 64 +: 64] <= wr_data[127:64];
      end
    end
  end

endmodule
