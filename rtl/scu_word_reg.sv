// scu_word_reg: the SCU send register or receive register.
//
// A one-word (64-bit) holding register between a link unit and its DMA
// engine, so that the DMA and the link each run at their own pace. It takes a
// word when empty, or when full and the word it holds leaves in the same
// cycle, and offers the held word on the output side. The paper shows a send
// and a receive register with their own control between unit and DMA; a single
// word of storage with a valid/ready handshake on each side is this design's
// choice.
//
// Timing: a word accepted at one clock edge is offered from the next cycle.
module scu_word_reg (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [63:0] in_word,
  input  logic        in_valid,
  output logic        in_ready,
  output logic [63:0] out_word,
  output logic        out_valid,
  input  logic        out_ready
);

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_word  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_word <= in_word;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_word));

endmodule
