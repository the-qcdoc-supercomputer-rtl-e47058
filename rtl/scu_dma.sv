// scu_dma: one SCU DMA engine with its block-strided-move instruction SRAM.
//
// Every send and every receive channel of the SCU has an engine like this.
// The processor loads block-strided-move instructions into the engine's own
// SRAM and starts it at an instruction index. An instruction moves nblk
// blocks of blk_len 64-bit words, block k starting at byte address
// addr + k*stride; when an instruction ends the engine stops if its last bit
// is set and otherwise goes on with the next one, so a chain of
// instructions describes a whole face of a lattice. A send engine
// (IS_SEND = 1) reads each word from memory and hands it to the send
// register; a receive engine takes each word from the receive register and
// writes it to memory.
//
// The paper says only that the engines move data between memory and the
// send/receive registers under block-strided-move instructions kept in SRAM
// in the SCU. The instruction layout, the chaining rule, the SRAM depth and
// the one-word-at-a-time memory traffic are this design's own choices.
//
// Interface: desc_we/desc_waddr/desc_wdata write the SRAM; start/start_idx
// start the engine (ignored while busy); done pulses when the last word of a
// chain has been moved. mem_* is a word-wide request to the SCU arbiter,
// held until mem_ack; read data is valid with mem_ack.
// Timing: one clock to fetch an instruction, then per word one memory
// transfer (as long as the bus takes) plus one clock for the register side.
module scu_dma
  import qcdoc_pkg::*;
#(
  parameter bit          IS_SEND    = 1'b1,
  parameter int unsigned DESC_DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        desc_we,
  input  logic [$clog2(DESC_DEPTH)-1:0] desc_waddr,
  input  dma_desc_t   desc_wdata,
  input  logic        start,
  input  logic [$clog2(DESC_DEPTH)-1:0] start_idx,
  output logic        busy,
  output logic        done,
  output logic        mem_valid,
  output logic        mem_we,
  output logic [31:0] mem_addr,
  output logic [63:0] mem_wdata,
  input  logic        mem_ack,
  input  logic [63:0] mem_rdata,
  output logic [63:0] out_word,
  output logic        out_valid,
  input  logic        out_ready,
  input  logic [63:0] in_word,
  input  logic        in_valid,
  output logic        in_ready
);

  localparam int unsigned IW = $clog2(DESC_DEPTH);

  dma_desc_t sram [DESC_DEPTH];   // instruction SRAM

  typedef enum logic [2:0] {D_IDLE, D_LOAD, D_MEM, D_REG, D_NEXT} state_e;
  state_e state;

  dma_desc_t   cur;
  logic [IW-1:0] idx;
  logic [31:0] blk_base, addr;
  logic [15:0] wcnt, bcnt;
  logic [63:0] data;

  assign busy      = state != D_IDLE;
  assign mem_valid = state == D_MEM;
  assign mem_we    = !IS_SEND;
  assign mem_addr  = addr;
  assign mem_wdata = data;
  assign out_word  = data;
  assign out_valid = IS_SEND && state == D_REG;
  assign in_ready  = !IS_SEND && state == D_REG;

  always_ff @(posedge clk) begin
    if (desc_we) sram[desc_waddr] <= desc_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE; cur <= '0; idx <= '0; blk_base <= '0; addr <= '0;
      wcnt <= '0; bcnt <= '0; data <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        D_IDLE: if (start) begin
          idx   <= start_idx;
          state <= D_LOAD;
        end
        D_LOAD: begin
          cur      <= sram[idx];
          blk_base <= sram[idx].addr;
          addr     <= sram[idx].addr;
          wcnt     <= '0;
          bcnt     <= '0;
          if (sram[idx].blk_len == 0 || sram[idx].nblk == 0)
            state <= sram[idx].last ? D_IDLE : D_LOAD;
          else
            state <= IS_SEND ? D_MEM : D_REG;
          if (sram[idx].blk_len == 0 || sram[idx].nblk == 0) begin
            idx  <= idx + 1'b1;
            done <= sram[idx].last;
          end
        end
        D_MEM: if (mem_ack) begin
          if (IS_SEND) begin
            data  <= mem_rdata;
            state <= D_REG;
          end else state <= D_NEXT;
        end
        D_REG: begin
          if (IS_SEND && out_ready) state <= D_NEXT;
          if (!IS_SEND && in_valid) begin
            data  <= in_word;
            state <= D_MEM;
          end
        end
        D_NEXT: begin
          if (wcnt + 16'd1 < cur.blk_len) begin
            wcnt  <= wcnt + 16'd1;
            addr  <= addr + 32'd8;
            state <= IS_SEND ? D_MEM : D_REG;
          end else if (bcnt + 16'd1 < cur.nblk) begin
            wcnt     <= '0;
            bcnt     <= bcnt + 16'd1;
            blk_base <= blk_base + cur.stride;
            addr     <= blk_base + cur.stride;
            state    <= IS_SEND ? D_MEM : D_REG;
          end else if (cur.last) begin
            done  <= 1'b1;
            state <= D_IDLE;
          end else begin
            idx   <= idx + 1'b1;
            state <= D_LOAD;
          end
        end
        default: state <= D_IDLE;
      endcase
    end
  end

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_valid && !mem_ack |=> mem_valid && $stable(mem_addr) && $stable(mem_wdata));

endmodule
