// bch_t1_dec: decoder of the grafted extended BCH node with k = 11, t = 1.
//
// The node replaces a length-16 polar subtree by the (15,11) BCH code (Hamming
// code, generator x^4 + x + 1, code bits c_0..c_14 as the coefficients of
// c(x) = c_0 + c_1 x + ... + c_14 x^14) extended to 16 bits by repeating one code
// bit, as the text prescribes instead of a parity extension. Here code bit 15
// repeats c_0; which bit is repeated is this design's choice.
// Decoding: the two LLRs of c_0 are added, hard decisions are taken on the 15 BCH
// positions, the syndrome S1 = r(alpha) is formed in GF(16) and, if non-zero, the
// single bit at the position i with alpha^i = S1 is inverted (the t = 1 case of
// Berlekamp-Massey reduces to this). Output bit 15 is the corrected c_0 again, so
// the node always returns a codeword. Purely combinational.
module bch_t1_dec
  import fp_pkg::*;
(
  input  llr_t        llr [16],
  output logic [15:0] x
);
  logic signed [Q:0] l0;
  logic [14:0] r;
  logic [3:0]  s1;

  always_comb begin
    l0 = (Q+1)'(llr[0]) + (Q+1)'(llr[15]);
    r[0] = l0[Q];
    for (int i = 1; i < 15; i++) r[i] = sig(llr[i]);
    s1 = '0;
    for (int i = 0; i < 15; i++) if (r[i]) s1 ^= gf_exp(i);
    x[14:0] = r;
    for (int i = 0; i < 15; i++)
      if (s1 != 4'd0 && gf_exp(i) == s1) x[i] = ~r[i];
    x[15] = x[0];
  end
endmodule
