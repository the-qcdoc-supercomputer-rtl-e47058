// scu_passthru: store-and-forward crossbar from receive units to send units.
//
// Global sums on the torus are done by shift-and-add: each node passes the
// word it received from one neighbour on to the next node along the same
// dimension, and keeps a copy to add locally. The passthru lets a word go from
// a receive buffer straight into a send buffer without a trip through memory
// and the processor, so the software overhead is paid once per dimension
// rather than once per node. Each send unit j has a source select src_sel[j]
// and an enable en[j]. A received word is forwarded to every send unit that
// selects its link, and leaves its receive buffer only when all of them can
// take it in the same cycle (whether a local copy is also kept is set in the
// receive unit).
//
// The paper names the passthru, its use for global operations and its 8-bit
// paths between the units. This version forwards whole 64-bit words, one per
// clock, rather than bytes; the source-select configuration is this design's
// own choice.
//
// Timing: combinational; the word enters the send buffer on the next edge.
module scu_passthru
  import qcdoc_pkg::*;
#(
  parameter int unsigned N = N_LINKS
) (
  input  logic [63:0]  rec_word  [N],
  input  logic [N-1:0] rec_valid,
  output logic [N-1:0] rec_ready,
  output logic [63:0]  snd_word  [N],
  output logic [N-1:0] snd_valid,
  input  logic [N-1:0] snd_ready,
  input  logic [N-1:0] en,
  input  logic [3:0]   src_sel   [N],
  output logic [N-1:0] forwarded       // link i forwarded a word this cycle
);

  logic [N-1:0] tgt [N];   // tgt[i][j]: send unit j takes words of link i

  always_comb begin
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) tgt[i][j] = en[j] && src_sel[j] == 4'(i);
      rec_ready[i] = (tgt[i] != '0) && ((snd_ready | ~tgt[i]) == '1);
    end
    for (int j = 0; j < N; j++) begin
      snd_word[j]  = rec_word[0];
      snd_valid[j] = 1'b0;
      for (int i = 0; i < N; i++) begin
        if (tgt[i][j]) begin
          snd_word[j]  = rec_word[i];
          snd_valid[j] = rec_valid[i] && rec_ready[i];
        end
      end
    end
  end

  assign forwarded = rec_valid & rec_ready;

endmodule
