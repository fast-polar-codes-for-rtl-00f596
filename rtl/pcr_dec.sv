// pcr_dec: parity-checked-repetition (PCR) node decoder of length M.
//
// A PCR node carries information only on its three highest-index leaves. Grouping
// the code bits by index mod 4, every bit of group i equals c_i, where
// [c_0 c_1 c_2 c_3] = [0 u_{M-3} u_{M-2} u_{M-1}] G_4, which is a length-4 single
// parity check code. As in the text, the LLRs of each group are added (as in a REP
// node) into four enhanced LLRs Delta_i, an SPC decoder (spc_dec, reused at the
// wider width) decodes c_0..c_3, and each c_i is copied to all bits of its group.
// Purely combinational.
module pcr_dec #(
  parameter int M = 16,
  parameter int W = 5
) (
  input  logic signed [W-1:0] llr [M],
  output logic        [M-1:0] x
);
  localparam int G  = M / 4;
  localparam int SW = W + $clog2(G) + 1;

  logic signed [SW-1:0] dsum [4];
  logic [3:0] chat;

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      dsum[i] = '0;
      for (int j = 0; j < G; j++) dsum[i] += SW'(llr[4*j+i]);
    end
  end

  spc_dec #(.M(4), .W(SW)) u_spc (.llr(dsum), .x(chat));

  always_comb begin
    for (int k = 0; k < M; k++) x[k] = chat[k % 4];
  end
endmodule
