// pec_dma: the EDRAM <-> external DDR memory DMA engine of the EDRAM
// controller.
//
// It copies a block of `count` 128-bit quadwords between embedded DRAM (through
// the controller's third port, with its own prefetch and write buffers) and
// external DDR memory (through a bus master interface; the DDR controller is a
// slave on that bus). dir = 0 copies EDRAM to DDR, dir = 1 DDR to EDRAM. Each
// quadword is read from the source and then written to the destination; the
// EDRAM read side streams from the port's prefetched lines.
//
// The paper states only that the controller contains a DMA engine moving data
// between EDRAM and the external DDR memory. The command interface, the
// quadword-at-a-time transfer and the absence of bursts are this design's
// choices.
//
// Interface: start with dir/edram_addr/ddr_addr/count (byte addresses,
// 16-byte aligned) starts a copy when idle; busy while copying; done pulses at
// the end. e_req/e_rsp and m_req/m_rsp follow the simplified bus of qcdoc_pkg.
module pec_dma
  import qcdoc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        dir,
  input  logic [31:0] edram_addr,
  input  logic [31:0] ddr_addr,
  input  logic [15:0] count,
  output logic        busy,
  output logic        done,
  output bus_req_t    e_req,
  input  bus_rsp_t    e_rsp,
  output bus_req_t    m_req,
  input  bus_rsp_t    m_rsp
);

  typedef enum logic [1:0] {X_IDLE, X_RD, X_WR} state_e;
  state_e      state;
  logic        d;
  logic [31:0] ea, ma;
  logic [15:0] left;
  logic [127:0] q;

  logic src_ack, dst_ack;
  assign src_ack = d ? m_rsp.ack : e_rsp.ack;
  assign dst_ack = d ? e_rsp.ack : m_rsp.ack;
  assign busy    = state != X_IDLE;

  always_comb begin
    e_req = '0;
    m_req = '0;
    e_req.addr = ea;
    m_req.addr = ma;
    e_req.be   = '1;
    m_req.be   = '1;
    e_req.wdata = q;
    m_req.wdata = q;
    if (state == X_RD) begin
      if (d) m_req.valid = 1'b1; else e_req.valid = 1'b1;
    end
    if (state == X_WR) begin
      if (d) begin e_req.valid = 1'b1; e_req.we = 1'b1; end
      else   begin m_req.valid = 1'b1; m_req.we = 1'b1; end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= X_IDLE; d <= 1'b0; ea <= '0; ma <= '0; left <= '0; q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        X_IDLE: if (start && count != 0) begin
          d <= dir; ea <= edram_addr; ma <= ddr_addr; left <= count;
          state <= X_RD;
        end
        X_RD: if (src_ack) begin
          q     <= d ? m_rsp.rdata : e_rsp.rdata;
          state <= X_WR;
        end
        X_WR: if (dst_ack) begin
          ea   <= ea + 32'd16;
          ma   <= ma + 32'd16;
          left <= left - 16'd1;
          if (left == 16'd1) begin
            state <= X_IDLE;
            done  <= 1'b1;
          end else state <= X_RD;
        end
        default: state <= X_IDLE;
      endcase
    end
  end

endmodule
