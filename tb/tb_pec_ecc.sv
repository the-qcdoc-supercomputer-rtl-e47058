// tb_pec_ecc: self-checking test of the EDRAM SECDED code.
//
// For random data words the check bits from pec_ecc_enc are compared with a
// reference computed here directly from the code definition (data at the
// non-power-of-two positions 1..71, check bit k = parity of the positions with
// bit k set, bit 71 = overall parity). The decoder must return the data
// unchanged with no error flag for a clean word, correct every single-bit flip
// (all 72 positions, data and check bits), and flag a random double-bit flip
// as uncorrectable.
module tb_pec_ecc;
  int checks = 0, failures = 0;

  logic [63:0] data, dout;
  logic [71:0] code, cin;
  logic        corrected, uncorrectable;

  pec_ecc_enc u_enc (.data, .code);
  pec_ecc_dec u_dec (.code(cin), .data(dout), .corrected, .uncorrectable);

  function automatic logic [71:0] ref_code(input logic [63:0] d);
    logic [71:0] c;
    int k;
    c = '0;
    k = 0;
    for (int pos = 1; pos <= 71; pos++)
      if (pos != 1 && pos != 2 && pos != 4 && pos != 8 && pos != 16 && pos != 32 && pos != 64) begin
        c[pos - 1] = d[k];
        k++;
      end
    for (int b = 0; b < 7; b++) begin
      logic p;
      p = 1'b0;
      for (int pos = 1; pos <= 71; pos++) if (pos[b]) p ^= c[pos - 1];
      c[(1 << b) - 1] = p;
    end
    c[71] = ^c[70:0];
    return c;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int t = 0; t < 200; t++) begin
      data = t == 0 ? 64'h0 : t == 1 ? '1 : {$urandom, $urandom};
      #1;
      check(code == ref_code(data), $sformatf("check bits for %h", data));
      cin = code;
      #1;
      check(dout == data && !corrected && !uncorrectable, "clean word");
      for (int b = 0; b < 72; b++) begin
        cin = code ^ (72'd1 << b);
        #1;
        check(dout == data && corrected && !uncorrectable, $sformatf("single flip at %0d", b));
      end
      begin
        int b1, b2;
        b1 = $urandom_range(0, 71);
        b2 = (b1 + $urandom_range(1, 71)) % 72;
        cin = code ^ (72'd1 << b1) ^ (72'd1 << b2);
        #1;
        check(uncorrectable && !corrected, $sformatf("double flip %0d,%0d", b1, b2));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
