// edram: behavioural model of the 4 MByte embedded DRAM macro (kind:
// behavioural model; the real macro is a process-specific library part whose
// insides and timing are not published).
//
// The memory is modelled as LINES lines of 1024 data bits, the line size the
// controller prefetches in, each stored as sixteen 72-bit ECC words
// (1152 bits). One command per clock: READ returns the whole line on rdata
// one clock later; WRITE stores the 72-bit words selected by wmask; REFRESH
// refreshes one row and moves no data. The model does not lose data, but it
// checks that refresh commands keep coming: more than MAX_REFRESH_GAP clocks
// without one is reported by an assertion. The default LINES makes 4 MByte of
// data; the refresh limit is this design's assumption.
module edram #(
  parameter int unsigned LINES           = 32768,
  parameter int unsigned MAX_REFRESH_GAP = 4096
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cmd_valid,
  input  logic [1:0]               cmd,        // 0 READ, 1 WRITE, 2 REFRESH
  input  logic [$clog2(LINES)-1:0] line,
  input  logic [16*72-1:0]         wdata,
  input  logic [15:0]              wmask,
  output logic [16*72-1:0]         rdata
);

  logic [16*72-1:0] mem [LINES];
  logic [31:0]      since_refresh;

  always_ff @(posedge clk) begin
    if (cmd_valid && cmd == 2'd0) rdata <= mem[line];
    if (cmd_valid && cmd == 2'd1)
      for (int w = 0; w < 16; w++)
        if (wmask[w]) mem[line][72*w +: 72] <= wdata[72*w +: 72];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) since_refresh <= '0;
    else if (cmd_valid && cmd == 2'd2) since_refresh <= '0;
    else since_refresh <= since_refresh + 1;
  end

  a_refresh: assert property (@(posedge clk) disable iff (!rst_n)
    since_refresh <= MAX_REFRESH_GAP);

endmodule
