// qcdoc_asic: the custom communication and memory logic of a QCDOC node.
//
// A QCDOC node is one chip plus a DDR memory module; tens of thousands of
// nodes form a six-dimensional torus for lattice QCD. This top level holds the
// parts of the node chip that were designed specifically for the machine,
// wired as in the chip's block diagram:
//   - the Serial Communications Unit (scu) with its 12 link directions, each
//     link running over one send and one receive port of the three
//     high-speed serial macros (hssl, four send and four receive ports each);
//   - the Prefetching EDRAM Controller (pec) with its EDRAM-DDR DMA engine;
//   - the 4 MByte embedded DRAM (edram).
// The processor core and its floating point unit, the processor local bus
// arbiter, the DDR controller, the bus bridges, Ethernet, I2C, GPIO, the
// interrupt controller and the PLL are standard library parts and are not part
// of this RTL; where they would connect, their signals are ports:
//   - pdb_*      : processor direct bus from the processor's data interfaces;
//   - scu_m_*    : SCU bus master (its DMA traffic, normally to the EDRAM via
//                  the bus arbiter and pec_s_*);
//   - scu_s_*    : SCU control register slave;
//   - pec_s_*    : EDRAM controller bus slave;
//   - pec_m_*    : EDRAM controller DMA master (to the DDR controller);
//   - pec_dma_*  : DMA command (in the chip, written by the processor);
//   - scu_irq    : SCU interrupt to the interrupt controller.
// One clock (the 500 MHz core clock) drives everything; the serial links move
// one bit per clock, 500 Mbit/s per port. The real chip runs its local bus at
// one third of the core clock; that ratio is not modelled here.
module qcdoc_asic
  import qcdoc_pkg::*;
#(
  parameter int unsigned N_LINK     = N_LINKS,
  parameter int unsigned DESC_DEPTH = 8,
  parameter int unsigned LINES      = EDRAM_BYTES / (LINE_W / 8)
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic [N_LINK-1:0] ser_out,
  input  logic [N_LINK-1:0] ser_in,
  input  bus_req_t          pdb_req,
  output bus_rsp_t          pdb_rsp,
  output bus_req_t          scu_m_req,
  input  bus_rsp_t          scu_m_rsp,
  input  bus_req_t          scu_s_req,
  output bus_rsp_t          scu_s_rsp,
  input  bus_req_t          pec_s_req,
  output bus_rsp_t          pec_s_rsp,
  output bus_req_t          pec_m_req,
  input  bus_rsp_t          pec_m_rsp,
  input  logic              pec_dma_start,
  input  logic              pec_dma_dir,
  input  logic [31:0]       pec_dma_edram_addr,
  input  logic [31:0]       pec_dma_ddr_addr,
  input  logic [15:0]       pec_dma_count,
  output logic              pec_dma_busy,
  output logic              pec_dma_done,
  output logic              scu_irq,
  output logic [31:0]       ecc_corrected,
  output logic [31:0]       ecc_uncorrectable,
  // mechanism observation
  output logic [N_LINK-1:0] ev_link_stall,
  output logic [N_LINK-1:0] ev_forward,
  output logic              ev_scu_contention,
  output logic              ev_refresh,
  output logic [2:0]        ev_pec_hit,
  output logic [2:0]        ev_pec_miss,
  output logic [2:0]        ev_pec_prefetch,
  output logic [2:0]        ev_pec_flush
);

  localparam int unsigned NMAC = (N_LINK + 3) / 4;

  logic [7:0]  tx_byte [N_LINK];
  logic [7:0]  rx_byte [N_LINK];
  logic [N_LINK-1:0] tx_take, rx_valid;

  for (genvar m = 0; m < NMAC; m++) begin : g_hssl
    logic [7:0] mtx [4];
    logic [7:0] mrx [4];
    logic [3:0] mtake, mvalid, mout, min;
    for (genvar p = 0; p < 4; p++) begin : g_p
      if (4 * m + p < N_LINK) begin : g_used
        assign mtx[p] = tx_byte[4*m+p];
        assign min[p] = ser_in[4*m+p];
        assign tx_take[4*m+p]  = mtake[p];
        assign rx_valid[4*m+p] = mvalid[p];
        assign rx_byte[4*m+p]  = mrx[p];
        assign ser_out[4*m+p]  = mout[p];
      end else begin : g_unused
        assign mtx[p] = 8'h00;
        assign min[p] = 1'b0;
      end
    end
    hssl #(.PORTS(4)) u_hssl (
      .clk, .rst_n, .tx_byte(mtx), .tx_take(mtake), .ser_out(mout),
      .ser_in(min), .rx_byte(mrx), .rx_valid(mvalid));
  end

  scu #(.N(N_LINK), .DESC_DEPTH(DESC_DEPTH)) u_scu (
    .clk, .rst_n,
    .tx_byte, .tx_take, .rx_byte, .rx_valid,
    .m_req(scu_m_req), .m_rsp(scu_m_rsp), .s_req(scu_s_req), .s_rsp(scu_s_rsp),
    .irq(scu_irq), .ev_stall(ev_link_stall), .ev_forward, .ev_contention(ev_scu_contention));

  logic                     e_cmd_valid;
  logic [1:0]               e_cmd;
  logic [$clog2(LINES)-1:0] e_line;
  logic [16*72-1:0]         e_wdata, e_rdata;
  logic [15:0]              e_wmask;

  pec #(.LINES(LINES)) u_pec (
    .clk, .rst_n,
    .pdb_req, .pdb_rsp, .slv_req(pec_s_req), .slv_rsp(pec_s_rsp),
    .m_req(pec_m_req), .m_rsp(pec_m_rsp),
    .dma_start(pec_dma_start), .dma_dir(pec_dma_dir), .dma_edram_addr(pec_dma_edram_addr),
    .dma_ddr_addr(pec_dma_ddr_addr), .dma_count(pec_dma_count),
    .dma_busy(pec_dma_busy), .dma_done(pec_dma_done),
    .e_cmd_valid, .e_cmd, .e_line, .e_wdata, .e_wmask, .e_rdata,
    .ecc_corrected, .ecc_uncorrectable,
    .ev_refresh, .ev_hit(ev_pec_hit), .ev_miss(ev_pec_miss),
    .ev_prefetch(ev_pec_prefetch), .ev_flush(ev_pec_flush));

  edram #(.LINES(LINES)) u_edram (
    .clk, .rst_n, .cmd_valid(e_cmd_valid), .cmd(e_cmd), .line(e_line),
    .wdata(e_wdata), .wmask(e_wmask), .rdata(e_rdata));

endmodule
