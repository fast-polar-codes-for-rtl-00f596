// rpc_dec: repeated-parity-check (RPC) node decoder of length M.
//
// An RPC node has its three lowest-index leaves frozen. Splitting the code bits
// into four groups by index mod 4, the XORs c_0..c_3 of the groups must be all 0
// or all 1: a virtual length-4 repetition code. The decoder follows the text's
// algorithm: per group, take the parity c_i of the hard decisions and the
// smallest amplitude delta_i with its position p_i (a par_min instance per group).
// Delta0 (the cost of making every group parity 0) sums delta_i over groups with
// c_i = 1, Delta1 sums it over groups with c_i = 0. If Delta0 > Delta1 the groups
// with c_i = 0 have their least reliable bit inverted, if Delta0 < Delta1 the groups
// with c_i = 1 do. On a tie nothing is inverted, exactly as the algorithm is
// written. Purely combinational. Ties inside a group go to the lowest index.
module rpc_dec #(
  parameter int M = 16,
  parameter int W = 5
) (
  input  logic signed [W-1:0] llr [M],
  output logic        [M-1:0] x
);
  localparam int G  = M / 4;
  localparam int DW = W + 2;

  logic [W-1:0] amp  [4][G];
  logic [G-1:0] rmask [4];
  logic [G-1:0] onehot [4];
  logic [W-1:0] delta [4];
  logic [3:0]   c;
  logic [M-1:0] hard;
  logic [DW-1:0] d0, d1;

  always_comb begin
    for (int k = 0; k < M; k++) hard[k] = llr[k][W-1];
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < G; j++)
        amp[i][j] = llr[4*j+i][W-1] ? W'(-llr[4*j+i]) : W'(llr[4*j+i]);
  end

  for (genvar i = 0; i < 4; i++) begin : g_grp
    par_min #(.M(G), .W(W)) u_min (
      .amp(amp[i]), .rmask(rmask[i]), .onehot(onehot[i]), .min_val(delta[i])
    );
  end

  always_comb begin
    d0 = '0;
    d1 = '0;
    for (int i = 0; i < 4; i++) begin
      c[i] = 1'b0;
      for (int j = 0; j < G; j++) c[i] ^= hard[4*j+i];
      if (c[i]) d0 += DW'(delta[i]);
      else      d1 += DW'(delta[i]);
    end
    x = hard;
    for (int i = 0; i < 4; i++)
      if (((d0 > d1) && !c[i]) || ((d0 < d1) && c[i]))
        for (int j = 0; j < G; j++)
          x[4*j+i] = hard[4*j+i] ^ onehot[i][j];
  end
endmodule
