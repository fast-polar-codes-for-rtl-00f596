// par_min: parallel comparison circuit that locates the minimum of M unsigned
// amplitudes in logic depth independent of log2(M).
//
// The W-bit amplitudes are viewed as a W x M bit matrix whose row B_j holds bit j
// of every amplitude. Going from the most significant row down, a running mask C
// of eliminated positions absorbs row j (E = C | B_j) unless that would eliminate
// every position. The complement D = ~C marks every position holding the minimum
// amplitude (the "reverse mask"). This is the algorithm of the text.
// Because several positions can tie, a uniqueness stage keeps only the lowest
// marked index (D & -D); choosing the lowest index is this design's choice, the
// text only asks for some circuit that makes the position unique.
// min_val is the minimum amplitude itself, read out through the one-hot mask.
// Purely combinational.
module par_min #(
  parameter int M = 16,
  parameter int W = 4
) (
  input  logic [W-1:0] amp    [M],
  output logic [M-1:0] rmask,    // D: all minimum positions
  output logic [M-1:0] onehot,   // single selected minimum position
  output logic [W-1:0] min_val
);
  logic [M-1:0] brow [W];
  logic [M-1:0] c, e;

  always_comb begin
    for (int j = 0; j < W; j++)
      for (int i = 0; i < M; i++)
        brow[j][i] = amp[i][j];
    c = '0;
    for (int j = W - 1; j >= 0; j--) begin
      e = c | brow[j];
      if (!(&e)) c = e;
    end
    rmask  = ~c;
    onehot = rmask & (~rmask + M'(1));
    min_val = '0;
    for (int i = 0; i < M; i++)
      if (onehot[i]) min_val |= amp[i];
  end
endmodule
