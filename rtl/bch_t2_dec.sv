// bch_t2_dec: decoder of the grafted extended BCH node with k = 7, t = 2.
//
// The node replaces a length-16 polar subtree by the (15,7) double-error
// correcting BCH code (generator x^8 + x^7 + x^6 + x^4 + 1, roots alpha and
// alpha^3 in GF(16)), extended by a 16th bit that is the parity of the 15 BCH
// bits, as the text prescribes. Code bits c_0..c_14 are the coefficients of
// c(x); putting the parity in bit 15 is this design's choice.
// Two-step hard decoding, as in the text:
//  1. SPC step: if the 16 hard decisions have odd parity, the bit with the
//     smallest LLR amplitude (found by par_min) is inverted. This lets a
//     three-error pattern whose least reliable bit is wrong drop to two errors.
//  2. Algebraic step: syndromes S1 = r(alpha), S3 = r(alpha^3); the error locator
//     of the binary t = 2 Berlekamp-Massey solution,
//     sigma(x) = 1 + S1 x + (S3/S1 + S1^2) x^2, is searched over all 15
//     positions in parallel (position i is in error when
//     alpha^{2i} + S1 alpha^i + (S3/S1 + S1^2) = 0). The found positions are
//     inverted only when their number matches the locator degree; otherwise
//     (more than two errors) the word is left as it is.
// Output bit 15 is recomputed as the parity of the corrected 15 bits, so the node
// returns a codeword of the extended code. Purely combinational.
module bch_t2_dec
  import fp_pkg::*;
(
  input  llr_t        llr [16],
  output logic [15:0] x
);
  logic [MAGW-1:0] amp [16];
  logic [15:0] hard, h1, rmask, onehot;
  logic [MAGW-1:0] min_val;
  logic [3:0] s1, s3, s1sq, s1cu, sig2;
  logic [14:0] loc;
  int nroots;
  logic deg2;

  always_comb begin
    for (int k = 0; k < 16; k++) begin
      hard[k] = sig(llr[k]);
      amp[k]  = mag(llr[k]);
    end
  end

  par_min #(.M(16), .W(MAGW)) u_min (
    .amp(amp), .rmask(rmask), .onehot(onehot), .min_val(min_val)
  );

  always_comb begin
    // step 1: single parity check over the extended word
    h1 = (^hard) ? (hard ^ onehot) : hard;
    // step 2: syndromes and error locator
    s1 = '0;
    s3 = '0;
    for (int i = 0; i < 15; i++)
      if (h1[i]) begin
        s1 ^= gf_exp(i);
        s3 ^= gf_exp((3 * i) % 15);
      end
    s1sq = gf_mul(s1, s1);
    s1cu = gf_mul(s1sq, s1);
    sig2 = gf_mul(s3, gf_inv(s1)) ^ s1sq;
    deg2 = (s3 != s1cu);
    nroots = 0;
    for (int i = 0; i < 15; i++) begin
      loc[i] = (gf_exp((2 * i) % 15) ^ gf_mul(s1, gf_exp(i)) ^ sig2) == 4'd0;
      if (loc[i]) nroots++;
    end
    x = {1'b0, h1[14:0]};
    if (s1 != 4'd0 && nroots == (deg2 ? 2 : 1))
      x[14:0] = h1[14:0] ^ loc;
    x[15] = ^x[14:0];
  end
endmodule
