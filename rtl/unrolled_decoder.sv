// unrolled_decoder: fully unrolled, fully pipelined fast-SC decoder for one
// fixed fast polar code.
//
// The code is fixed at elaboration by its schedule (SCHED, NNODES: the fast
// nodes in decoding order, packed as in fp_pkg). The default is a length-1024,
// rate-0.875 (896 information bits) fast polar code of 23 nodes, obtained with the
// polarization-weight construction followed by the rate re-allocation of fast
// polar codes; the text hard-codes N = 1024, R = 0.875 but does not list its
// frozen set, so this particular code is this design's choice.
// Every f and g step of the pruned tree has its own PE array and pipeline
// register, and every node its own dedicated decoder (unrolled_node, built
// recursively), so one packet of N channel LLRs can enter every cycle and one
// decoded codeword leaves every cycle. Latency is LATENCY = (pipeline registers of
// the tree) + 1 output register cycles; for the default code that is 44 cycles,
// and as many packets are in flight.
// Interface: ch_llr with in_valid each cycle; x_hat (estimated codeword) with
// out_valid LATENCY cycles later. No back-pressure.
module unrolled_decoder
  import fp_pkg::*;
#(
  parameter int         NLOG   = 10,
  parameter sched_vec_t SCHED  = sched_vec_t'(512'h1817161514641716252474263554741454648464949404),
  parameter int         NNODES = 23
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  llr_t              ch_llr [1 << NLOG],
  output logic              out_valid,
  output logic [(1<<NLOG)-1:0] x_hat
);
  localparam int N       = 1 << NLOG;
  localparam int TREE_LAT = sched_lat(SCHED, NNODES, 0, NLOG);
  localparam int LATENCY = TREE_LAT + 1;

  logic [N-1:0] beta;
  logic [LATENCY-1:0] vpipe;

  unrolled_node #(.S(NLOG), .IDX(0), .SCHED(SCHED), .NNODES(NNODES)) u_root (
    .clk(clk), .alpha(ch_llr), .beta(beta)
  );

  always_ff @(posedge clk) x_hat <= beta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= (vpipe << 1) | LATENCY'(in_valid);
  end
  assign out_valid = vpipe[LATENCY-1];
endmodule
