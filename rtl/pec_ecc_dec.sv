// pec_ecc_dec: SECDED checker and corrector for one 72-bit EDRAM word.
//
// Inverse of pec_ecc_enc (extended Hamming code, layout described there). The
// syndrome is the position of a single flipped bit among 1..71; the overall
// parity bit tells one error (odd) from two (even, non-zero syndrome). A single
// error anywhere, including in a check bit, is corrected; a double error is
// reported as uncorrectable and the data is passed on unchanged.
// Purely combinational.
module pec_ecc_dec (
  input  logic [71:0] code,
  output logic [63:0] data,
  output logic        corrected,
  output logic        uncorrectable
);

  always_comb begin
    logic [71:1] c;
    logic [6:0]  syn;
    logic        odd;
    int unsigned d;
    c   = code[70:0];
    odd = ^code;
    syn = '0;
    for (int unsigned k = 0; k < 7; k++)
      for (int unsigned pos = 1; pos <= 71; pos++)
        if (((pos >> k) & 1) != 0) syn[k] ^= c[pos];
    corrected     = odd && syn <= 7'd71;
    uncorrectable = (!odd && syn != 0) || (odd && syn > 7'd71);
    if (odd && syn != 0 && syn <= 7'd71) c[syn] = ~c[syn];
    data = '0;
    d = 0;
    for (int unsigned pos = 1; pos <= 71; pos++) begin
      if ((pos & (pos - 1)) != 0) begin
        data[d] = c[pos];
        d++;
      end
    end
  end

endmodule
