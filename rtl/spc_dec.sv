// spc_dec: single-parity-check (SPC) node decoder of length M.
//
// Following the text: take the hard decisions (signs) of the M input LLRs, find
// the position of the smallest amplitude with the parallel comparison circuit
// (par_min), and check the parity of the hard decisions. If the parity is even
// the hard decisions are returned; otherwise the bit at the minimum-amplitude
// position is inverted. Output x[k] is the estimated code bit k of the node
// (its partial sum). Purely combinational, so a node is decided in the cycle its
// LLRs arrive. W is the LLR width (wider than Q when the inputs are sums, as in
// the PCR decoder). Amplitudes are taken as W-bit unsigned values so that the
// most negative input is handled too.
module spc_dec #(
  parameter int M = 16,
  parameter int W = 5
) (
  input  logic signed [W-1:0] llr [M],
  output logic        [M-1:0] x
);
  logic [W-1:0] amp [M];
  logic [M-1:0] hard, rmask, onehot;
  logic [W-1:0] min_val;

  always_comb begin
    for (int k = 0; k < M; k++) begin
      hard[k] = llr[k][W-1];
      amp[k]  = llr[k][W-1] ? W'(-llr[k]) : W'(llr[k]);
    end
  end

  par_min #(.M(M), .W(W)) u_min (
    .amp(amp), .rmask(rmask), .onehot(onehot), .min_val(min_val)
  );

  assign x = (^hard) ? (hard ^ onehot) : hard;
endmodule
