// unrolled_node: one subtree of the unrolled, fully pipelined decoder.
//
// The module instantiates itself recursively, following a fixed schedule of
// fast nodes (SCHED, NNODES; see fp_pkg). If the subtree of 2^S leaves starting
// at leaf IDX is a single node of the schedule, it is decoded by a dedicated
// decoder of exactly that pattern and size (combinational). Otherwise:
//   alpha --f--> reg --> left subtree --> beta_l
//   alpha delayed 1+L_l cycles, beta_l --g--> reg --> right subtree --> beta_r
//   beta = [beta_l (delayed 1+L_r) ^ beta_r, beta_r]
// where L_l and L_r are the children's latencies, so the subtree's own latency is
// 2 + L_l + L_r (0 for a single node). A rate-0 child is not built at all: its
// partial sums are constant zero, the g step follows the input directly (left
// rate-0 child) or the right half is simply zero (right rate-0 child), which
// removes one register stage each. A new packet can enter every cycle.
// Interface: alpha are the subtree's 2^S LLRs, beta its 2^S estimated code bits,
// valid L cycles after alpha. The dedicated per-node decoders and the
// one-packet-per-cycle pipeline follow the text; where the registers sit (one per
// tree edge, decisions combinational) is this design's choice.
module unrolled_node
  import fp_pkg::*;
#(
  parameter int         S      = 4,
  parameter int         IDX    = 0,
  parameter sched_vec_t SCHED  = sched_vec_t'({NT_SPC, 4'd4}),
  parameter int         NNODES = 1
) (
  input  logic              clk,
  input  llr_t              alpha [1 << S],
  output logic [(1<<S)-1:0] beta
);
  localparam int M = 1 << S;
  localparam int T = sched_find(SCHED, NNODES, IDX, S);

  if (T >= 0) begin : g_leaf
    if (T == int'(NT_R1)) begin : g_r1
      always_comb for (int k = 0; k < M; k++) beta[k] = sig(alpha[k]);
    end else if (T == int'(NT_SPC)) begin : g_spc
      spc_dec  #(.M(M), .W(Q)) u_dec (.llr(alpha), .x(beta));
    end else if (T == int'(NT_SPC2)) begin : g_spc2
      spc2_dec #(.M(M), .W(Q)) u_dec (.llr(alpha), .x(beta));
    end else if (T == int'(NT_REP)) begin : g_rep
      rep_dec  #(.M(M), .W(Q)) u_dec (.llr(alpha), .x(beta));
    end else if (T == int'(NT_REP2)) begin : g_rep2
      rep2_dec #(.M(M), .W(Q)) u_dec (.llr(alpha), .x(beta));
    end else if (T == int'(NT_RPC)) begin : g_rpc
      rpc_dec  #(.M(M), .W(Q)) u_dec (.llr(alpha), .x(beta));
    end else if (T == int'(NT_PCR)) begin : g_pcr
      pcr_dec  #(.M(M), .W(Q)) u_dec (.llr(alpha), .x(beta));
    end else if (T == int'(NT_BCH1) && M == 16) begin : g_bch1
      bch_t1_dec u_dec (.llr(alpha), .x(beta));
    end else if (T == int'(NT_BCH2) && M == 16) begin : g_bch2
      bch_t2_dec u_dec (.llr(alpha), .x(beta));
    end else begin : g_r0
      assign beta = '0;
    end
  end else begin : g_split
    localparam int H  = M / 2;
    localparam bit L0 = sched_find(SCHED, NNODES, IDX, S - 1) == int'(NT_R0);
    localparam bit R0 = sched_find(SCHED, NNODES, IDX + H, S - 1) == int'(NT_R0);
    localparam int LL = L0 ? 0 : sched_lat(SCHED, NNODES, IDX, S - 1);
    localparam int LR = R0 ? 0 : sched_lat(SCHED, NNODES, IDX + H, S - 1);

    logic [H-1:0] bl, bl_d, br;
    llr_t         ad [M];

    // left child
    if (L0) begin : g_l0
      assign bl = '0;
      always_comb for (int k = 0; k < M; k++) ad[k] = alpha[k];
    end else begin : g_l
      llr_t al_q [H];
      logic [M*Q-1:0] a_pk, ad_pk;
      always_ff @(posedge clk)
        for (int k = 0; k < H; k++) al_q[k] <= f_fn(alpha[k], alpha[k+H]);
      unrolled_node #(.S(S-1), .IDX(IDX), .SCHED(SCHED), .NNODES(NNODES)) u_l (
        .clk(clk), .alpha(al_q), .beta(bl)
      );
      always_comb for (int k = 0; k < M; k++) a_pk[k*Q +: Q] = alpha[k];
      pipe_delay #(.W(M*Q), .D(1 + LL)) u_adly (.clk(clk), .d(a_pk), .q(ad_pk));
      always_comb for (int k = 0; k < M; k++) ad[k] = llr_t'(ad_pk[k*Q +: Q]);
    end

    // right child
    if (R0) begin : g_r0
      assign br   = '0;
      assign bl_d = bl;
    end else begin : g_r
      llr_t ar_q [H];
      always_ff @(posedge clk)
        for (int k = 0; k < H; k++) ar_q[k] <= g_fn(ad[k], ad[k+H], bl[k]);
      unrolled_node #(.S(S-1), .IDX(IDX + H), .SCHED(SCHED), .NNODES(NNODES)) u_r (
        .clk(clk), .alpha(ar_q), .beta(br)
      );
      pipe_delay #(.W(H), .D(1 + LR)) u_bdly (.clk(clk), .d(bl), .q(bl_d));
    end

    assign beta = {br, bl_d ^ br};
  end
endmodule
