// node_dec: the decision module, which decodes one fast-decodable node of any of
// the nine supported patterns and returns the node's code bits (its partial sums
// for the parent).
//
// Inputs are the node's LLRs in lanes 0..2^stage-1 (lanes above are ignored), the
// pattern type and the stage. Supported sizes follow the parallelism of the
// implementation: rate-1 nodes up to 256 bits, SPC and SPC-2 nodes up to 128
// bits, REP nodes up to 16 bits, and REP-2, RPC, PCR and the two BCH nodes at 16
// bits. Rate-0 nodes are bypassed by the decoder and return all zeros here.
// A smaller SPC or SPC-2 node reuses the large decoder by padding unused lanes
// with the largest positive LLR (hard 0, never the minimum); a smaller REP node
// pads with zero LLRs. This padding is this design's way of sharing one unit
// across sizes. SPC and SPC-2 use separate SPC units here rather than one shared
// unit. Purely combinational: the decoder feeds it from the PE array output in the
// same cycle.
module node_dec
  import fp_pkg::*;
#(
  parameter int MAXM = 256,   // largest node (rate 1)
  parameter int SPCM = 128,   // largest SPC / SPC-2 node
  parameter int SEG  = 16     // size of all other nodes
) (
  input  node_type_e   ntype,
  input  logic [3:0]   stage,
  input  llr_t         llr [MAXM],
  output logic [MAXM-1:0] x
);

  int msize;
  llr_t spc_in  [SPCM];
  llr_t spc2_in [SPCM];
  llr_t rep_in  [SEG];
  llr_t seg_in  [SEG];
  logic [SPCM-1:0] x_spc, x_spc2;
  logic [SEG-1:0]  x_rep, x_rep2, x_rpc, x_pcr, x_bch1, x_bch2;

  always_comb begin
    msize = 1 << stage;
    for (int k = 0; k < SPCM; k++) begin
      spc_in[k]  = (k < msize) ? llr[k] : llr_t'(LLR_MAX);
      spc2_in[k] = (k < msize) ? llr[k] : llr_t'(LLR_MAX);
    end
    for (int k = 0; k < SEG; k++) begin
      rep_in[k] = (k < msize) ? llr[k] : llr_t'(0);
      seg_in[k] = llr[k];
    end
  end

  spc_dec  #(.M(SPCM), .W(Q)) u_spc  (.llr(spc_in),  .x(x_spc));
  spc2_dec #(.M(SPCM), .W(Q)) u_spc2 (.llr(spc2_in), .x(x_spc2));
  rep_dec  #(.M(SEG),  .W(Q)) u_rep  (.llr(rep_in),  .x(x_rep));
  rep2_dec #(.M(SEG),  .W(Q)) u_rep2 (.llr(seg_in),  .x(x_rep2));
  rpc_dec  #(.M(SEG),  .W(Q)) u_rpc  (.llr(seg_in),  .x(x_rpc));
  pcr_dec  #(.M(SEG),  .W(Q)) u_pcr  (.llr(seg_in),  .x(x_pcr));
  bch_t1_dec                  u_bch1 (.llr(seg_in),  .x(x_bch1));
  bch_t2_dec                  u_bch2 (.llr(seg_in),  .x(x_bch2));

  always_comb begin
    x = '0;
    unique case (ntype)
      NT_R0:   x = '0;
      NT_R1:   for (int k = 0; k < MAXM; k++) x[k] = sig(llr[k]);
      NT_SPC:  x[SPCM-1:0] = x_spc;
      NT_SPC2: x[SPCM-1:0] = x_spc2;
      NT_RPC:  x[SEG-1:0]  = x_rpc;
      NT_BCH1: x[SEG-1:0]  = x_bch1;
      NT_BCH2: x[SEG-1:0]  = x_bch2;
      NT_PCR:  x[SEG-1:0]  = x_pcr;
      NT_REP2: x[SEG-1:0]  = x_rep2;
      NT_REP:  x[SEG-1:0]  = x_rep;
      default: x = '0;
    endcase
    for (int k = 0; k < MAXM; k++) if (k >= msize) x[k] = 1'b0;
  end
endmodule
