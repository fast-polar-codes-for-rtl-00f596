// rep2_dec: dual-REP (REP-2) node decoder of length M.
//
// A REP-2 node carries information only on its two highest-index leaves u_{M-2}
// and u_{M-1}. With x = u G_M the odd-index code bits all equal u_{M-1} and the
// even-index ones all equal u_{M-2} xor u_{M-1}, so the node is two repetition
// codes of length M/2, decoded in parallel by two rep_dec instances as the text
// describes. Purely combinational.
module rep2_dec #(
  parameter int M = 16,
  parameter int W = 5
) (
  input  logic signed [W-1:0] llr [M],
  output logic        [M-1:0] x
);
  localparam int H = M / 2;
  logic signed [W-1:0] ev [H];
  logic signed [W-1:0] od [H];
  logic [H-1:0] xe, xo;

  always_comb begin
    for (int j = 0; j < H; j++) begin
      ev[j] = llr[2*j];
      od[j] = llr[2*j+1];
    end
  end

  rep_dec #(.M(H), .W(W)) u_even (.llr(ev), .x(xe));
  rep_dec #(.M(H), .W(W)) u_odd  (.llr(od), .x(xo));

  always_comb begin
    for (int j = 0; j < H; j++) begin
      x[2*j]   = xe[j];
      x[2*j+1] = xo[j];
    end
  end
endmodule
