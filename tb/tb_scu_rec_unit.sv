// tb_scu_rec_unit: self-checking test of the SCU receive unit.
//
// Bytes are fed one per 8 clocks, as from the serial macro. The test sends
// three data packets while the receive register is not taking words and checks
// that all three are held (the 192-bit buffer) with no overflow and no ACK yet;
// then lets them drain and checks order, values and one ACK request per word.
// It checks that ACK and SACK bytes return credits, that a supervisor word is
// held until read and then answered with a SACK request, that a corrupted data
// byte or header is flagged, and that in passthru mode a word goes to the
// passthru and, when enabled, to the local register as well. Packets are built
// here from the header layout.
module tb_scu_rec_unit;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0]  rx_byte;
  logic        rx_valid, cfg_pass_en, cfg_local_en;
  logic [63:0] word, sup_word;
  logic        word_valid, reg_ready, pass_valid, pass_ready, sup_full, sup_clear;
  logic        ack_req, sack_req, ack_rx, sack_rx, parity_err, overflow;

  scu_rec_unit dut (.*);

  int n_ack_req = 0, n_ack_rx = 0, n_sack_rx = 0, n_sack_req = 0, n_perr = 0, n_ovf = 0;
  logic [63:0] got [$];
  logic [63:0] got_pass [$];
  always @(posedge clk) if (rst_n) begin
    n_ack_req  += int'(ack_req);
    n_ack_rx   += int'(ack_rx);
    n_sack_rx  += int'(sack_rx);
    n_sack_req += int'(sack_req);
    n_perr     += int'(parity_err);
    n_ovf      += int'(overflow);
    if (word_valid && reg_ready) got.push_back(word);
    if (pass_valid && pass_ready) got_pass.push_back(word);
  end

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

  task automatic put_byte(input logic [7:0] b);
    @(negedge clk);
    rx_byte  = b;
    rx_valid = 1'b1;
    @(negedge clk);
    rx_valid = 1'b0;
    repeat (6) @(negedge clk);
  endtask

  task automatic put_data(input logic [63:0] d, input bit sup = 1'b0, input bit corrupt = 1'b0);
    put_byte({sup ? 3'b010 : 3'b001, 1'b1, qpar(d)});
    for (int i = 7; i >= 0; i--) put_byte(d[8*i +: 8] ^ ((corrupt && i == 3) ? 8'h04 : 8'h00));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] w [3];
  initial begin
    rx_valid = 0; rx_byte = 0; cfg_pass_en = 0; cfg_local_en = 0;
    reg_ready = 0; pass_ready = 0; sup_clear = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    put_byte(8'hF0);                       // alignment byte: ignored
    put_byte(8'h00);                       // idle
    for (int i = 0; i < 3; i++) begin
      w[i] = {$urandom, $urandom};
      put_data(w[i]);
    end
    repeat (4) @(posedge clk);
    check(got.size() == 0 && n_ack_req == 0, "words held while the register is busy");
    check(n_ovf == 0 && n_perr == 0, "three words fit in the receive buffer");
    @(negedge clk) reg_ready = 1'b1;
    repeat (6) @(posedge clk);
    check(got.size() == 3, "three words delivered");
    for (int i = 0; i < 3; i++) check(got[i] == w[i], $sformatf("word %0d in order", i));
    check(n_ack_req == 3, "one ACK request per word leaving the buffer");
    // credits
    put_byte(8'h60);
    put_byte(8'h90);
    check(n_ack_rx == 1 && n_sack_rx == 1, "ACK and SACK decoded");
    // supervisor word
    put_data(64'hDEAD_BEEF_0000_1111, 1'b1);
    @(posedge clk);
    check(sup_full && sup_word == 64'hDEAD_BEEF_0000_1111, "supervisor word held");
    check(got.size() == 3, "supervisor word does not enter the data path");
    @(negedge clk) sup_clear = 1'b1;
    @(negedge clk) sup_clear = 1'b0;
    @(negedge clk);
    check(!sup_full && n_sack_req == 1, "reading the supervisor word asks for a SACK");
    // errors
    put_data(64'h1234_5678_9ABC_DEF0, 1'b0, 1'b1);
    repeat (3) @(posedge clk);
    check(n_perr == 1, "corrupted data byte flagged");
    put_byte(8'h20);                        // DATA type with wrong type parity
    check(n_perr == 2, "corrupted header flagged");
    // passthru with local copy, then passthru only
    got.delete();
    @(negedge clk) begin cfg_pass_en = 1'b1; cfg_local_en = 1'b1; pass_ready = 1'b1; end
    put_data(64'hAAAA_5555_AAAA_5555);
    repeat (3) @(posedge clk);
    check(got.size() == 1 && got_pass.size() == 1 && got_pass[0] == 64'hAAAA_5555_AAAA_5555,
          "store-and-forward: word forwarded and kept");
    @(negedge clk) cfg_local_en = 1'b0;
    put_data(64'h0F0F_0F0F_F0F0_F0F0);
    repeat (3) @(posedge clk);
    check(got.size() == 1 && got_pass.size() == 2 && got_pass[1] == 64'h0F0F_0F0F_F0F0_F0F0,
          "passthru only: word forwarded, not kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
