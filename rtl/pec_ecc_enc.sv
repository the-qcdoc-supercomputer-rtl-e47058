// pec_ecc_enc: SECDED check-bit generator for one 64-bit EDRAM word.
//
// The controller stores every 64-bit word with 8 check bits so that a single
// bit error can be corrected and a double bit error detected (the paper states
// only that 1-bit-correct/2-bit-detect ECC is built into the controller). The
// code is this design's choice: an extended Hamming code. The 64 data bits sit
// at the positions 1..71 that are not powers of two, in ascending order; check
// bit k, at position 2**k (k = 0..6), makes the parity of all positions with
// bit k set even; bit 71 of the stored word makes the parity of the whole
// 72-bit word even. Stored word = {overall, c[71:1]}.
// Purely combinational.
module pec_ecc_enc (
  input  logic [63:0] data,
  output logic [71:0] code
);

  always_comb begin
    logic [71:1] c;
    int unsigned d;
    c = '0;
    d = 0;
    for (int unsigned pos = 1; pos <= 71; pos++) begin
      if ((pos & (pos - 1)) != 0) begin
        c[pos] = data[d];
        d++;
      end
    end
    for (int unsigned k = 0; k < 7; k++) begin
      logic p;
      p = 1'b0;
      for (int unsigned pos = 1; pos <= 71; pos++)
        if (((pos >> k) & 1) != 0) p ^= c[pos];
      c[1 << k] = p;
    end
    code = {^c, c};
  end

endmodule
