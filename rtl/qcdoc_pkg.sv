// qcdoc_pkg: constants and types shared by the QCDOC node ASIC blocks.
//
// Numbers that come from the published description of the node: 12 link
// directions (a 6-D torus, two directions per dimension), 64-bit data words
// in each link packet with an 8-bit header, a 3-word (192-bit) receive
// buffer, a 128-bit processor local bus, 1024-bit embedded-DRAM lines and
// 4 MByte of embedded DRAM. Everything else here is this design's choice:
// the header layout, the packet type codes, the simplified bus handshake and
// the DMA descriptor layout.
//
// Link header byte (this design's layout):
//   [7:5] packet type, [4] even parity over the type field,
//   [3:0] even parity over the four 16-bit quarters of the data word
//   (zero for packets that carry no data).
//
// Simplified bus (stands in for the CoreConnect PLB): the master holds a
// request (valid, we, addr, wdata, be) stable until the slave returns ack for
// one cycle; for reads rdata is valid in the ack cycle. One transfer is
// outstanding per master; there are no bursts and no split transactions.
package qcdoc_pkg;

  localparam int unsigned N_LINKS       = 12;   // 6 dimensions x 2 directions
  localparam int unsigned WORD_W        = 64;   // link payload
  localparam int unsigned REC_BUF_WORDS = 3;    // 192-bit rec buf
  localparam int unsigned BUS_DW        = 128;  // PLB data width
  localparam int unsigned BUS_AW        = 32;
  localparam int unsigned LINE_W        = 1024; // EDRAM line / prefetch register
  localparam int unsigned EDRAM_BYTES   = 4 * 1024 * 1024;

  typedef enum logic [2:0] {
    PKT_IDLE = 3'b000,   // nothing to send
    PKT_DATA = 3'b001,   // normal (non-interrupting) data word
    PKT_SUP  = 3'b010,   // supervisor (interrupting) data word
    PKT_ACK  = 3'b011,   // one data word left the far receive buffer
    PKT_SACK = 3'b100,   // far supervisor register was read
    PKT_SYNC = 3'b111    // link alignment byte, sent once after reset
  } pkt_type_e;

  function automatic logic [3:0] data_parity(input logic [63:0] d);
    for (int q = 0; q < 4; q++) data_parity[q] = ^d[16*q +: 16];
  endfunction

  function automatic logic [7:0] hdr_encode(input pkt_type_e t, input logic [63:0] d);
    logic [3:0] p;
    p = (t == PKT_DATA || t == PKT_SUP) ? data_parity(d) : 4'b0;
    return {t, ^t, p};
  endfunction

  // True when the type field of a header byte is consistent with its parity bit.
  function automatic logic hdr_type_ok(input logic [7:0] h);
    return (^h[7:5]) == h[4];
  endfunction

  typedef struct packed {
    logic                valid;
    logic                we;
    logic [BUS_AW-1:0]   addr;   // byte address
    logic [BUS_DW-1:0]   wdata;
    logic [BUS_DW/8-1:0] be;
  } bus_req_t;

  typedef struct packed {
    logic              ack;
    logic [BUS_DW-1:0] rdata;
  } bus_rsp_t;

  // Block-strided-move instruction, held in the DMA instruction SRAM.
  // Moves nblk blocks of blk_len 64-bit words; block k starts at
  // addr + k*stride (bytes). After the last word the engine either stops
  // (last = 1) or continues with the next instruction in the SRAM.
  typedef struct packed {
    logic [31:0] addr;
    logic [15:0] blk_len;
    logic [31:0] stride;
    logic [15:0] nblk;
    logic        last;
    logic [30:0] rsvd;
  } dma_desc_t;   // 128 bits: one bus write loads one instruction

endpackage
