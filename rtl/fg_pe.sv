// fg_pe: the processing-element array that computes one edge of the decoding
// tree per cycle.
//
// Lane k takes the two parent LLRs a[k] = alpha_v[k] and b[k] = alpha_v[k+M/2]
// of a node v of length M and produces either the left-child LLR
// f(a,b) = sign(a)sign(b)min(|a|,|b|) (g_mode = 0) or the right-child LLR
// g(a,b,beta_l) = b + (1-2 beta_l) a, saturated to the Q-bit range (g_mode = 1),
// where beta_l[k] is the partial sum returned by the left child. The array is
// purely combinational; the caller registers the result. The recursive decoder
// uses a single array of LANES = 512 lanes, enough for the first edge of a
// length-1024 code, so every edge takes one cycle. The min-sum f and the
// saturating g are this design's choices; the text only names the f/g functions.
module fg_pe
  import fp_pkg::*;
#(
  parameter int LANES = 512
) (
  input  llr_t       a      [LANES],
  input  llr_t       b      [LANES],
  input  logic       beta_l [LANES],
  input  logic       g_mode,
  output llr_t       y      [LANES]
);
  always_comb begin
    for (int k = 0; k < LANES; k++)
      y[k] = g_mode ? g_fn(a[k], b[k], beta_l[k]) : f_fn(a[k], b[k]);
  end
endmodule
