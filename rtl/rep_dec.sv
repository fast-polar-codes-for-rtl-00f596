// rep_dec: repetition (REP) node decoder of length M.
//
// In a REP node only the last leaf carries information, so every code bit equals
// that bit. The decoder adds the M input LLRs at full precision and returns the
// sign of the sum on all M outputs (a zero sum decodes as 0). Purely
// combinational. The text gives the node's definition and reuses this module in
// the REP-2 and PCR decoders; the adder tree is the plain way to do it.
module rep_dec #(
  parameter int M = 16,
  parameter int W = 5
) (
  input  logic signed [W-1:0] llr [M],
  output logic        [M-1:0] x
);
  localparam int SW = W + $clog2(M) + 1;
  logic signed [SW-1:0] sum;

  always_comb begin
    sum = '0;
    for (int k = 0; k < M; k++) sum += SW'(llr[k]);
    x = sum[SW-1] ? '1 : '0;
  end
endmodule
