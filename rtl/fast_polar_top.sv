// fast_polar_top: the two fast-SC decoders for fast polar codes, side by side.
//
// The recursive decoder (rec_decoder) is small and flexible: it decodes any
// fast polar code of mother length 32..1024 described by a node schedule, one
// packet at a time, one tree edge per cycle. The unrolled decoder
// (unrolled_decoder) is large and fixed to one length-1024, rate-0.875 code, and
// accepts a new packet every cycle. They share nothing but the clock and reset;
// this wrapper only gives both one home and keeps each one's own interface, so
// either can be used alone by instantiating it directly. Having both in one
// design is this wrapper's choice: they are two separate implementations of the
// same decoding algorithm.
module fast_polar_top
  import fp_pkg::*;
#(
  parameter int NLOG     = 10,
  parameter int MAXNODES = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // recursive decoder
  input  logic              rec_start,
  input  logic [3:0]        rec_n_log,
  input  logic [6:0]        rec_num_nodes,
  input  node_t             rec_sched  [MAXNODES],
  input  llr_t              rec_llr    [1 << NLOG],
  output logic              rec_busy,
  output logic              rec_done,
  output logic [(1<<NLOG)-1:0] rec_x_hat,
  output logic              rec_node_done,
  output node_type_e        rec_node_type,
  // unrolled decoder
  input  logic              unr_valid_in,
  input  llr_t              unr_llr    [1 << NLOG],
  output logic              unr_valid_out,
  output logic [(1<<NLOG)-1:0] unr_x_hat
);
  rec_decoder #(.NLOG(NLOG), .MAXNODES(MAXNODES)) u_rec (
    .clk(clk), .rst_n(rst_n), .start(rec_start), .n_log(rec_n_log),
    .num_nodes(rec_num_nodes), .sched(rec_sched), .ch_llr(rec_llr),
    .busy(rec_busy), .done(rec_done), .x_hat(rec_x_hat),
    .node_done(rec_node_done), .node_type(rec_node_type)
  );

  unrolled_decoder #(.NLOG(NLOG)) u_unr (
    .clk(clk), .rst_n(rst_n), .in_valid(unr_valid_in), .ch_llr(unr_llr),
    .out_valid(unr_valid_out), .x_hat(unr_x_hat)
  );
endmodule
