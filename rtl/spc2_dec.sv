// spc2_dec: dual-SPC (SPC-2) node decoder of length M.
//
// An SPC-2 node has its two lowest-index leaves frozen. With x = u G_M this gives
// two parity checks: all code bits XOR to 0, and the odd-index code bits XOR to 0.
// Their sum says the even-index bits XOR to 0 as well, so the node splits into two
// independent SPC codes of length M/2: one on the even-index code bits and one on
// the odd-index bits. Two spc_dec instances decode them in parallel, as the text
// describes. Purely combinational.
module spc2_dec #(
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

  spc_dec #(.M(H), .W(W)) u_even (.llr(ev), .x(xe));
  spc_dec #(.M(H), .W(W)) u_odd  (.llr(od), .x(xo));

  always_comb begin
    for (int j = 0; j < H; j++) begin
      x[2*j]   = xe[j];
      x[2*j+1] = xo[j];
    end
  end
endmodule
