// tb_pec_write_buf: self-checking test of one write buffer pair.
//
// A line memory model applies granted flushes (only the words in fl_wmask).
// The test issues 3000 random writes (whole quadwords or single 64-bit
// halves) to 12 lines with random flush grants, and checks at every clock
// that memory overlaid with the buffered words (buf_v/buf_line/buf_data/
// buf_mask, in the order the controller merges them) equals the reference of
// all acknowledged writes. It also checks that snp_valid pulses once per write
// and that both buffers drain when writes stop.
module tb_pec_write_buf;
  localparam int LA_W = 15;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic wr_valid, wr_ack, fl_req, fl_grant, snp_valid;
  logic [LA_W-1:0] wr_line, fl_line;
  logic [2:0] wr_qw;
  logic [127:0] wr_data;
  logic [1:0] wr_mask, buf_v;
  logic [1023:0] fl_data;
  logic [15:0] fl_wmask;
  logic [LA_W-1:0] buf_line [2];
  logic [1023:0] buf_data [2];
  logic [15:0] buf_mask [2];
  pec_write_buf dut (.*);

  logic [63:0] mem [12][16];
  logic [63:0] refm [12][16];
  logic gnt_en;
  assign fl_grant = fl_req && gnt_en;
  always @(negedge clk) gnt_en <= $urandom_range(0, 3) == 0;

  int n_snp = 0, n_flush = 0, view_bad = 0;
  always @(posedge clk) if (rst_n) begin
    n_snp <= n_snp + int'(snp_valid);
    if (fl_grant) begin
      n_flush <= n_flush + 1;
      for (int w = 0; w < 16; w++) if (fl_wmask[w]) mem[fl_line][w] = fl_data[64*w +: 64];
    end
  end

  // coherent view: memory overlaid with buffered words
  always @(negedge clk) if (rst_n && !wr_valid) begin
    for (int l = 0; l < 12; l++)
      for (int w = 0; w < 16; w++) begin
        logic [63:0] v;
        v = mem[l][w];
        for (int b = 0; b < 2; b++)
          if (buf_v[b] && buf_line[b] == LA_W'(l) && buf_mask[b][w]) v = buf_data[b][64*w +: 64];
        if (v != refm[l][w]) view_bad++;
      end
  end

  logic done_q;
  always @(posedge clk) done_q <= wr_valid && wr_ack;

  int n_wr = 0;
  task automatic wr(input int l, input int q, input logic [1:0] m, input logic [127:0] d);
    @(negedge clk);
    wr_valid = 1'b1; wr_line = LA_W'(l); wr_qw = 3'(q); wr_mask = m; wr_data = d;
    do @(negedge clk); while (!done_q);
    wr_valid = 1'b0;
    if (m[0]) refm[l][2*q]     = d[63:0];
    if (m[1]) refm[l][2*q + 1] = d[127:64];
    n_wr++;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_valid = 0; wr_line = 0; wr_qw = 0; wr_mask = 0; wr_data = 0;
    for (int l = 0; l < 12; l++)
      for (int w = 0; w < 16; w++) begin
        mem[l][w] = 64'(l * 16 + w); refm[l][w] = 64'(l * 16 + w);
      end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 3000; t++)
      wr((t % 4 == 0) ? $urandom_range(0, 11) : (t / 16) % 12, $urandom_range(0, 7),
         2'($urandom_range(1, 3)), {$urandom, $urandom, $urandom, $urandom});
    repeat (200) @(posedge clk);
    check(view_bad == 0, $sformatf("memory plus buffers always equals the written data (%0d bad)", view_bad));
    check(buf_v == 2'b00, "both buffers drained when writes stop");
    for (int l = 0; l < 12; l++)
      for (int w = 0; w < 16; w++) check(mem[l][w] == refm[l][w], $sformatf("line %0d word %0d in memory", l, w));
    check(n_snp == n_wr, $sformatf("one snoop pulse per write (%0d/%0d)", n_snp, n_wr));
    check(n_flush < n_wr, $sformatf("writes gathered into lines (%0d flushes for %0d writes)", n_flush, n_wr));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
