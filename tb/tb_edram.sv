// tb_edram: self-checking test of the EDRAM behavioural model.
//
// Writes random lines with random word masks to a few hundred random line
// addresses, keeps a reference copy, reads every written line back and checks
// it one clock after the read command (the model's read latency), checks that
// masked-off words keep their old value, and issues refresh commands often
// enough that the model's refresh-interval assertion never fires.
module tb_edram;
  localparam int LINES = 32768;
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

  logic cmd_valid;
  logic [1:0] cmd;
  logic [14:0] line;
  logic [16*72-1:0] wdata, rdata;
  logic [15:0] wmask;
  edram dut (.*);

  logic [16*72-1:0] refm [logic [14:0]];

  task automatic issue(input logic [1:0] c, input logic [14:0] l, input logic [16*72-1:0] d,
                       input logic [15:0] m);
    @(negedge clk);
    cmd_valid = 1'b1; cmd = c; line = l; wdata = d; wmask = m;
    @(negedge clk);
    cmd_valid = 1'b0;
  endtask

  function automatic logic [16*72-1:0] rnd_line();
    logic [16*72-1:0] d;
    for (int i = 0; i < 36; i++) d[32*i +: 32] = $urandom;
    return d;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [14:0] addrs [$];
  initial begin
    cmd_valid = 0; cmd = 0; line = 0; wdata = 0; wmask = 0;
    for (int l = 0; l < LINES; l++) dut.mem[l] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 600; t++) begin
      logic [14:0] l;
      logic [16*72-1:0] d, old;
      logic [15:0] m;
      l = 15'($urandom_range(0, 299)) * 15'd97;
      d = rnd_line();
      m = t % 3 == 0 ? 16'hFFFF : 16'($urandom);
      old = refm.exists(l) ? refm[l] : '0;
      for (int w = 0; w < 16; w++) if (m[w]) old[72*w +: 72] = d[72*w +: 72];
      refm[l] = old;
      issue(2'd1, l, d, m);
      if (t % 50 == 0) issue(2'd2, 15'(t), '0, '0);
    end
    foreach (refm[l]) begin
      issue(2'd0, l, '0, '0);
      check(rdata == refm[l], $sformatf("line %h read back", l));
      if (checks % 64 == 0) issue(2'd2, l, '0, '0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
