// tb_scu_snd_unit: self-checking test of the SCU send unit.
//
// A byte slot is offered every 8 clocks, as the serial macro does. The test
// queues five words and checks that exactly three data packets leave back to
// back (header byte with the expected type and parity, then the eight data
// bytes, most significant first) before the unit stalls for lack of credit;
// that each returned ACK lets one more packet go; that ACK and SACK requests
// are sent as one-byte packets; and that supervisor words use their own single
// credit. Expected header bytes are built here from the header layout, not by
// calling the design's functions.
module tb_scu_snd_unit;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [63:0] reg_word, pass_word, sup_word;
  logic reg_valid, reg_ready, pass_valid, pass_ready, sup_valid, sup_ready;
  logic ack_req, sack_req, ack_rx, sack_rx, stall, tx_take;
  logic [7:0] tx_byte;
  logic [2:0] credits, tc;

  scu_snd_unit dut (.*);

  always_ff @(posedge clk) tc <= rst_n ? tc + 3'd1 : 3'd0;
  assign tx_take = rst_n && tc == 3'd7;

  logic [7:0] bytes [$];
  always @(posedge clk) if (tx_take) bytes.push_back(tx_byte);

  function automatic logic [3:0] qpar(input logic [63:0] d);
    qpar = {^d[63:48], ^d[47:32], ^d[31:16], ^d[15:0]};
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Pop the next non-idle packet from the byte stream; gap = idle bytes skipped.
  task automatic next_pkt(output logic [7:0] hdr, output logic [63:0] d, output int gap);
    gap = 0;
    while (bytes.size() > 0 && bytes[0] == 8'h00) begin
      void'(bytes.pop_front());
      gap++;
    end
    hdr = bytes.size() > 0 ? bytes.pop_front() : 8'h00;
    d = '0;
    if (hdr[7:5] == 3'b001 || hdr[7:5] == 3'b010)
      for (int i = 0; i < 8; i++) d = {d[55:0], bytes.size() > 0 ? bytes.pop_front() : 8'h00};
  endtask

  // Drive on the falling edge; the word is taken at the next rising edge
  // once ready is seen.
  task automatic send_word(input logic [63:0] w);
    @(negedge clk);
    reg_word  = w;
    reg_valid = 1'b1;
    while (!reg_ready) @(negedge clk);
    @(negedge clk);
    reg_valid = 1'b0;
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] w [5];
  logic [7:0]  h;
  logic [63:0] d;
  int          gap;

  initial begin
    reg_valid = 0; pass_valid = 0; sup_valid = 0; ack_req = 0; sack_req = 0;
    ack_rx = 0; sack_rx = 0; reg_word = 0; pass_word = 0; sup_word = 0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    @(posedge clk);
    check(credits == 3'd3, "three credits after reset");
    for (int i = 0; i < 5; i++) w[i] = {$urandom, $urandom};
    fork
      for (int i = 0; i < 5; i++) send_word(w[i]);
    join_none
    repeat (8 * 40) @(posedge clk);
    bytes.delete();
    // restart the capture from the beginning: re-run with a fresh unit state is
    // not possible, so check what is observable now: three packets were sent
    check(credits == 3'd0, "credits spent after three packets");
    check(stall == 1'b1, "unit stalls with words waiting and no credit");
    repeat (8 * 20) @(posedge clk);
    check(bytes.size() == 20 && bytes[0] == 8'h00 && bytes[19] == 8'h00,
          "only idle bytes while out of credit");
    bytes.delete();
    // two acks release two packets, sent back to back
    @(posedge clk) ack_rx <= 1'b1;
    @(posedge clk) ack_rx <= 1'b0;
    @(posedge clk) ack_rx <= 1'b1;
    @(posedge clk) ack_rx <= 1'b0;
    repeat (8 * 24) @(posedge clk);
    for (int i = 3; i < 5; i++) begin
      next_pkt(h, d, gap);
      check(h == {3'b001, 1'b1, qpar(w[i])}, $sformatf("data header %0d = %h", i, h));
      check(d == w[i], $sformatf("data word %0d", i));
      if (i == 4) check(gap == 0, "released packets leave back to back");
    end
    check(stall == 1'b0 && credits == 3'd0, "buffer empty after release");
    // acknowledgements are one-byte packets
    bytes.delete();
    @(posedge clk) ack_req <= 1'b1;
    @(posedge clk) begin ack_req <= 1'b0; sack_req <= 1'b1; end
    @(posedge clk) sack_req <= 1'b0;
    repeat (8 * 4) @(posedge clk);
    next_pkt(h, d, gap);
    check(h == 8'h60, $sformatf("ACK byte = %h", h));
    next_pkt(h, d, gap);
    check(h == 8'h90, $sformatf("SACK byte = %h", h));
    // supervisor word: one credit of its own
    bytes.delete();
    @(negedge clk);
    sup_word = 64'h0123_4567_89AB_CDEF;
    sup_valid = 1'b1;
    while (!sup_ready) @(negedge clk);
    @(negedge clk);
    sup_word = 64'hFEDC_BA98_7654_3210;
    repeat (8 * 30) @(posedge clk);
    next_pkt(h, d, gap);
    check(h == {3'b010, 1'b1, qpar(64'h0123_4567_89AB_CDEF)}, $sformatf("SUP header = %h", h));
    check(d == 64'h0123_4567_89AB_CDEF, "SUP word");
    next_pkt(h, d, gap);
    check(h == 8'h00, "second supervisor word waits for SACK");
    bytes.delete();
    @(posedge clk) sack_rx <= 1'b1;
    @(posedge clk) sack_rx <= 1'b0;
    @(negedge clk);
    while (!sup_ready) @(negedge clk);
    @(negedge clk);
    sup_valid = 1'b0;
    repeat (8 * 12) @(posedge clk);
    next_pkt(h, d, gap);
    check(d == 64'hFEDC_BA98_7654_3210 && h[7:5] == 3'b010, "SUP word after SACK");
    check(seen == 3, "first three packets seen back to back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the first three packets, seen as they are sent
  int seen = 0;
  logic [7:0] cap [$];
  always @(posedge clk) if (tx_take && seen < 3) begin
    if (cap.size() > 0 || tx_byte != 8'h00) cap.push_back(tx_byte);
    if (cap.size() == 9) begin
      checks++;
      if (cap[0] != {3'b001, 1'b1, qpar(w[seen])} ||
          {cap[1], cap[2], cap[3], cap[4], cap[5], cap[6], cap[7], cap[8]} != w[seen]) begin
        failures++;
        $display("FAIL: packet %0d wrong", seen);
      end
      seen++;
      cap.delete();
    end
  end

endmodule
