// pec_read_port: one read port of the prefetching EDRAM controller.
//
// The controller has three read ports (processor direct bus, bus slave, DMA).
// As the paper describes, each has four 1024-bit line registers paired in two
// sets, so that a port can stream from two memory locations at once
// (ping-ponging between them), and EDRAM is read in whole 1024-bit lines.
// How the registers are used is this design's choice: a set holds a line and
// the line after it. A read that hits any valid register is answered in the
// same clock with its 128-bit quadword, so a master that keeps presenting
// addresses streams one quadword per clock (8 GByte/s at 500 MHz). A read that misses takes the least recently used
// set, fetches the missed line into it (a demand fetch) and answers when the
// line arrives. Whenever a read hits a line of a set whose other register does
// not hold the next line, that next line is fetched into the other register (a
// prefetch), so a sequential stream finds its data already on chip. Writes
// accepted by any port's write buffer are snooped and patched into matching
// registers so the port never returns stale data.
//
// Interface: rd_valid/rd_line/rd_qw held until rd_ack (data in rd_data with
// the ack; both are combinational from the line registers). f_req/f_demand/f_line ask the controller for a line fetch; f_grant
// accepts it, and f_ret with f_data delivers the corrected line one clock
// later. snp_* carry up to NSNP accepted writes per clock (two 64-bit halves of
// a quadword, each with its own enable).
// Timing: a hit completes in the clock it is presented; a miss completes in
// the clock after the line arrives (grant + 2 clocks).
module pec_read_port #(
  parameter int unsigned LA_W = 15,
  parameter int unsigned NSNP = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rd_valid,
  input  logic [LA_W-1:0]  rd_line,
  input  logic [2:0]       rd_qw,
  output logic             rd_ack,
  output logic [127:0]     rd_data,
  output logic             f_req,
  output logic             f_demand,
  output logic [LA_W-1:0]  f_line,
  input  logic             f_grant,
  input  logic             f_ret,
  input  logic [1023:0]    f_data,
  input  logic [NSNP-1:0]  snp_valid,
  input  logic [LA_W-1:0]  snp_line [NSNP],
  input  logic [2:0]       snp_qw   [NSNP],
  input  logic [1:0]       snp_mask [NSNP],
  input  logic [127:0]     snp_data [NSNP],
  output logic             ev_hit,
  output logic             ev_miss,
  output logic             ev_prefetch
);

  logic [1023:0]   ln  [4];
  logic [LA_W-1:0] tag [4];
  logic [3:0]      v;
  logic            lru;          // set to replace next
  logic            pend, pend_wait, pend_demand;
  logic [1:0]      pend_slot;
  logic [LA_W-1:0] pend_line;

  logic       hit;
  logic [1:0] hslot;
  always_comb begin
    hit   = 1'b0;
    hslot = '0;
    for (int s = 0; s < 4; s++)
      if (v[s] && tag[s] == rd_line && !hit) begin
        hit   = 1'b1;
        hslot = 2'(s);
      end
  end

  logic [1:0]      oslot;       // other register of the hit set
  logic [LA_W-1:0] nxt;
  logic            need_pf;
  assign oslot   = hslot ^ 2'd1;
  assign nxt     = rd_line + 1'b1;
  assign need_pf = !(v[oslot] && tag[oslot] == nxt);

  assign f_req    = pend && !pend_wait;
  assign f_demand = pend_demand;
  assign f_line   = pend_line;

  logic req_now;
  assign req_now = rd_valid;
  assign rd_ack  = rd_valid && hit;
  assign rd_data = ln[hslot][128*rd_qw +: 128];
  assign ev_hit  = req_now && hit;
  assign ev_miss = req_now && !hit && !pend;
  assign ev_prefetch = req_now && hit && need_pf && !pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0; lru <= 1'b0; pend <= 1'b0; pend_wait <= 1'b0; pend_demand <= 1'b0;
      pend_slot <= '0; pend_line <= '0;
      for (int s = 0; s < 4; s++) begin
        tag[s] <= '0;
        ln[s]  <= '0;
      end
    end else begin
      if (f_grant) pend_wait <= 1'b1;
      if (f_ret) begin
        ln[pend_slot]  <= f_data;
        tag[pend_slot] <= pend_line;
        v[pend_slot]   <= 1'b1;
        pend <= 1'b0; pend_wait <= 1'b0; pend_demand <= 1'b0;
      end
      if (req_now && hit) begin
        lru     <= ~hslot[1];
        if (need_pf && !pend) begin
          pend <= 1'b1; pend_demand <= 1'b0;
          pend_slot <= oslot; pend_line <= nxt;
          v[oslot] <= 1'b0;
        end
      end else if (req_now && !pend) begin
        pend <= 1'b1; pend_demand <= 1'b1;
        pend_slot <= {lru, 1'b0}; pend_line <= rd_line;
        v[{lru, 1'b0}] <= 1'b0;
        v[{lru, 1'b1}] <= 1'b0;
      end
      // write snooping: patch registers (and a line arriving this cycle)
      for (int p = 0; p < NSNP; p++) begin
        if (snp_valid[p]) begin
          for (int s = 0; s < 4; s++) begin
            if ((v[s] && tag[s] == snp_line[p]) ||
                (f_ret && 2'(s) == pend_slot && pend_line == snp_line[p])) begin
              if (snp_mask[p][0]) ln[s][128*snp_qw[p]      +: 64] <= snp_data[p][63:0];
              if (snp_mask[p][1]) ln[s][128*snp_qw[p] + 64 +: 64] <= snp_data[p][127:64];
            end
          end
        end
      end
    end
  end

endmodule
