// pipe_delay: a D-stage register delay line for a W-bit word (D = 0 is a
// plain wire). The unrolled decoder uses it to hold a node's LLRs until its left
// child has returned partial sums, and to hold those partial sums until the
// right child has returned its own. Every stage advances every cycle; there is
// no enable, since the unrolled pipeline never stalls.
module pipe_delay #(
  parameter int W = 8,
  parameter int D = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (D == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] r [D];
    always_ff @(posedge clk) begin
      r[0] <= d;
      for (int i = 1; i < D; i++) r[i] <= r[i-1];
    end
    assign q = r[D-1];
  end
endmodule
