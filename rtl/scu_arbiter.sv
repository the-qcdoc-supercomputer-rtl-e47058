// scu_arbiter: shares the SCU's bus master interface among its DMA engines.
//
// The 24 DMA engines (12 send, 12 receive) each ask for one 64-bit memory
// transfer at a time. The arbiter grants one of them, round robin starting
// after the last one served, and drives the request onto the 128-bit bus:
// the 64-bit word goes on the half of the bus selected by address bit 3, with
// the matching eight byte enables, and read data is taken from that half. The
// paper shows an arbiter between the DMA engines and the bus master
// interface; round robin and single-word transfers are this design's choice.
//
// Interface: per requester valid/we/addr/wdata, held until its ack pulse;
// rdata is shared and valid with that ack. m_req/m_rsp is the simplified bus
// of qcdoc_pkg. Timing: one clock to grant, then the bus transfer.
module scu_arbiter
  import qcdoc_pkg::*;
#(
  parameter int unsigned N = 2 * N_LINKS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [N-1:0] req_valid,
  input  logic [N-1:0] req_we,
  input  logic [31:0] req_addr  [N],
  input  logic [63:0] req_wdata [N],
  output logic [N-1:0] ack,
  output logic [63:0] rdata,
  output bus_req_t    m_req,
  input  bus_rsp_t    m_rsp,
  output logic        contention   // more than one requester waits this cycle
);

  localparam int unsigned NW = $clog2(N);

  logic [NW-1:0] cur, rr, pick;
  logic          active, found;

  always_comb begin
    found = 1'b0;
    pick  = rr;
    for (int k = 0; k < N; k++) begin
      int unsigned j;
      j = (int'(rr) + k) % N;
      if (!found && req_valid[j]) begin
        found = 1'b1;
        pick  = NW'(j);
      end
    end
  end

  assign contention = $countones(req_valid) > 1;

  always_comb begin
    m_req       = '0;
    m_req.valid = active;
    m_req.we    = req_we[cur];
    m_req.addr  = req_addr[cur];
    m_req.wdata = {req_wdata[cur], req_wdata[cur]};
    m_req.be    = req_addr[cur][3] ? 16'hFF00 : 16'h00FF;
    rdata       = req_addr[cur][3] ? m_rsp.rdata[127:64] : m_rsp.rdata[63:0];
    ack         = '0;
    ack[cur]    = active && m_rsp.ack;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0; rr <= '0; active <= 1'b0;
    end else if (!active) begin
      if (found) begin
        cur    <= pick;
        active <= 1'b1;
      end
    end else if (m_rsp.ack) begin
      active <= 1'b0;
      rr     <= (cur == NW'(N-1)) ? '0 : cur + 1'b1;
    end
  end

  a_owner_waits: assert property (@(posedge clk) disable iff (!rst_n)
    active |-> req_valid[cur]);

endmodule
