// rec_decoder: recursive fast successive-cancellation decoder for fast polar
// codes of mother length N = 2^n_log, 32 <= N <= 2^NLOG (1024 by default).
//
// The code is described to the decoder by its schedule: the list of fast nodes
// (type and stage) in decoding order, i.e. the leaves of the pruned decoding tree
// from left to right. Fast polar codes are built so that every length-16 segment
// is one of the supported patterns, so the schedule of a length-1024 code has at
// most 64 entries. The decoder walks the pruned tree with one PE array (fg_pe,
// 512 lanes) and one decision module (node_dec):
//  * each cycle it takes one edge down the tree: an f step into a left child or a
//    g step into a right child, writing the child LLRs into the stage memory;
//  * when the edge reaches the stage of the current schedule node, the decision
//    module decodes the node from the PE output in the same cycle;
//  * the node's code bits then climb the tree combinationally: at each level where
//    the node is a right child they are merged with the stored left-sibling bits
//    (beta_v = [beta_l ^ beta_r, beta_r]); at the first level where it is a left
//    child they are stored for the later g step;
//  * a rate-0 node is bypassed: the decoder only descends to its parent, and its
//    all-zero code bits are merged in the cycle that reaches the parent (or, if
//    the parent's LLRs already exist, in a cycle of their own without PE work).
// A packet therefore takes one cycle per edge of the pruned tree, not counting
// the edges into rate-0 nodes, plus one for each rate-0 node whose parent's LLRs
// were already present. The single-PE, single-decision-module structure and the node set
// follow the text; the schedule interface, the one-cycle edge-plus-decision and
// the R0 handling are this design's choices.
//
// Interface: pulse start for one cycle with ch_llr, n_log, num_nodes and sched
// valid; they are captured and may change afterwards. busy is high while
// decoding. done pulses for one cycle when x_hat (the estimated codeword, bits
// 0..N-1, bits above N are 0) is valid; x_hat holds until the next done.
// node_done/node_type report each decoded node for monitoring.
// Reset: rst_n is an asynchronous active-low reset of the control registers;
// it also disables the two schedule assertions, which lint reports as a mixed
// synchronous/asynchronous use of rst_n. The assertions are not circuit logic.
module rec_decoder
  import fp_pkg::*;
#(
  parameter int NLOG     = 10,
  parameter int MAXNODES = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [3:0]        n_log,
  input  logic [6:0]        num_nodes,
  input  node_t             sched  [MAXNODES],
  input  llr_t              ch_llr [1 << NLOG],
  output logic              busy,
  output logic              done,
  output logic [(1<<NLOG)-1:0] x_hat,
  output logic              node_done,
  output node_type_e        node_type
);
  localparam int N     = 1 << NLOG;
  localparam int LANES = N / 2;
  localparam int MAXM  = 256;
  localparam int PW    = $clog2(MAXNODES);

  // captured packet and configuration (packed registers)
  logic [N*Q-1:0]         ch_q;
  logic [8*MAXNODES-1:0]  sched_q;
  logic [N*Q-1:0]         ch_pk;
  logic [8*MAXNODES-1:0]  sched_pk;
  logic [3:0]             nlog_q;
  logic [6:0]             nnodes_q;

  // traversal state
  logic [NLOG:0]  idx;       // first leaf of the current node
  logic [6:0]     ptr;       // schedule entry being decoded
  logic [3:0]     cs;        // stage whose LLRs feed the next edge
  logic           gnext;     // next edge is a g step (right child)

  node_t       cur;
  logic        is_r0, r0_here, at_root, edge_en, decide, node_fin;
  logic [LANES*Q-1:0] pe_a_pk, pe_b_pk, pe_y_pk;
  logic [LANES-1:0]   pe_beta_pk;
  llr_t        pe_a [LANES];
  llr_t        pe_b [LANES];
  logic        pe_beta [LANES];
  llr_t        pe_y [LANES];
  llr_t        nd_llr [MAXM];
  logic [MAXM-1:0] nd_x;
  logic [NLOG:0]   idx_next;

  always_comb begin
    for (int k = 0; k < N; k++) ch_pk[k*Q +: Q] = ch_llr[k];
    for (int i = 0; i < MAXNODES; i++) sched_pk[8*i +: 8] = sched[i];
  end

  assign cur     = node_t'(sched_q[8*ptr[PW-1:0] +: 8]);
  assign is_r0   = (cur.ntype == NT_R0);
  assign at_root = (cs == cur.stage);
  // a rate-0 node is never entered: it is finished as soon as its parent's LLRs
  // exist, either already (no edge this cycle) or through this cycle's edge
  assign r0_here  = is_r0 && (cs <= cur.stage + 4'd1);
  assign edge_en  = busy && !at_root && !r0_here;
  assign decide   = busy && !is_r0 && (at_root || (cs - 4'd1 == cur.stage));
  assign node_fin = busy && (decide ||
                             (is_r0 && (r0_here || (cs - 4'd1 == cur.stage + 4'd1))));

  // ---- stage memories and PE operand selection ----
  // Stage c keeps the LLRs of the current node at that stage (2^c of them) and
  // the code bits of the left child at that stage, waiting for the g step.
  logic [LANES*Q-1:0] opa  [NLOG+1];
  logic [LANES*Q-1:0] opb  [NLOG+1];
  logic [LANES-1:0]   opbl [NLOG+1];
  logic [N-1:0]       work [NLOG+1];
  logic               act  [NLOG+1];
  logic               store_en [NLOG+1];
  logic [N-1:0]       rootv [NLOG+1];

  for (genvar c = 0; c < NLOG; c++) begin : g_st
    localparam int MC = 1 << c;
    logic [MC*Q-1:0] llr_q;
    logic [MC-1:0]   bl_q;
    always_ff @(posedge clk) begin
      if (edge_en && cs - 4'd1 == 4'(c)) llr_q <= pe_y_pk[MC*Q-1:0];
      if (busy && store_en[c])           bl_q  <= work[c][MC-1:0];
    end
  end

  // parent operands for each possible parent stage c (1..NLOG)
  for (genvar c = 1; c <= NLOG; c++) begin : g_op
    localparam int HC = 1 << (c - 1);
    logic [2*HC*Q-1:0] src;
    if (c < NLOG) begin : g_mem
      assign src = (nlog_q == 4'(c)) ? ch_q[2*HC*Q-1:0] : g_st[c].llr_q;
    end else begin : g_ch
      assign src = ch_q[2*HC*Q-1:0];
    end
    assign opa[c]  = (cs == 4'(c)) ? (LANES*Q)'(src[HC*Q-1:0])      : '0;
    assign opb[c]  = (cs == 4'(c)) ? (LANES*Q)'(src[2*HC*Q-1:HC*Q]) : '0;
    assign opbl[c] = (cs == 4'(c)) ? LANES'(g_st[c-1].bl_q)         : '0;
  end
  assign opa[0]  = '0;
  assign opb[0]  = '0;
  assign opbl[0] = '0;

  always_comb begin
    pe_a_pk = '0;
    pe_b_pk = '0;
    pe_beta_pk = '0;
    for (int c = 1; c <= NLOG; c++) begin
      pe_a_pk    |= opa[c];
      pe_b_pk    |= opb[c];
      pe_beta_pk |= opbl[c];
    end
    for (int k = 0; k < LANES; k++) begin
      pe_a[k]    = llr_t'(pe_a_pk[k*Q +: Q]);
      pe_b[k]    = llr_t'(pe_b_pk[k*Q +: Q]);
      pe_beta[k] = pe_beta_pk[k];
    end
  end

  always_comb begin
    for (int k = 0; k < LANES; k++) pe_y_pk[k*Q +: Q] = pe_y[k];
    for (int k = 0; k < MAXM; k++)
      nd_llr[k] = at_root ? llr_t'(ch_q[k*Q +: Q]) : pe_y[k];
  end

  fg_pe #(.LANES(LANES)) u_pe (
    .a(pe_a), .b(pe_b), .beta_l(pe_beta), .g_mode(gnext), .y(pe_y)
  );

  node_dec #(.MAXM(MAXM)) u_dec (
    .ntype(cur.ntype), .stage(cur.stage), .llr(nd_llr), .x(nd_x)
  );

  // ---- partial-sum climb: one level per stage, combinational ----
  // A node's code bits enter at its own stage; at each level where the subtree
  // is a right child they merge with the stored left sibling and move up, at the
  // first level where it is a left child they are stored.
  for (genvar s = 0; s <= NLOG; s++) begin : g_cl
    localparam int MS = 1 << s;
    logic here, up;
    assign here = node_fin && cur.stage == 4'(s);
    if (s == 0) begin : g_base
      assign up = 1'b0;
      assign work[s] = (here && !is_r0) ? N'(nd_x[0]) : '0;
    end else begin : g_up
      localparam int MH = 1 << (s - 1);
      assign up = act[s-1] && idx[s-1] && nlog_q != 4'(s - 1);
      if (s <= 8) begin : g_nd
        assign work[s] = (here && !is_r0) ? N'(nd_x[MS-1:0]) :
                         here             ? '0 :
                         N'({work[s-1][MH-1:0], g_st[s-1].bl_q ^ work[s-1][MH-1:0]});
      end else begin : g_big
        assign work[s] = here ? '0 :
                         N'({work[s-1][MH-1:0], g_st[s-1].bl_q ^ work[s-1][MH-1:0]});
      end
    end
    assign act[s]      = here || up;
    assign store_en[s] = act[s] && !idx[s] && nlog_q != 4'(s);
    assign rootv[s]    = (act[s] && nlog_q == 4'(s)) ? work[s] : '0;
  end

  logic [N-1:0] root_beta;
  logic         root_hit;
  always_comb begin
    root_beta = '0;
    root_hit  = 1'b0;
    for (int s = 0; s <= NLOG; s++) begin
      root_beta |= rootv[s];
      root_hit  |= act[s] && nlog_q == 4'(s);
    end
  end

  assign idx_next = idx + ((NLOG+1)'(1) << cur.stage);

  // stage to restart from after a node: parent of the next node's right-child
  // position, i.e. one above the lowest set bit of idx_next
  function automatic logic [3:0] restart_stage(input logic [NLOG:0] i);
    for (int s = 0; s <= NLOG; s++) if (i[s]) return 4'(s + 1);
    return 4'(NLOG);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      idx       <= '0;
      ptr       <= '0;
      cs        <= '0;
      gnext     <= 1'b0;
      nlog_q    <= '0;
      nnodes_q  <= '0;
      x_hat     <= '0;
      node_done <= 1'b0;
      node_type <= NT_R0;
      ch_q      <= '0;
      sched_q   <= '0;
    end else begin
      done      <= 1'b0;
      node_done <= node_fin;
      node_type <= cur.ntype;
      if (start && !busy) begin
        busy     <= 1'b1;
        ch_q     <= ch_pk;
        sched_q  <= sched_pk;
        nlog_q   <= n_log;
        nnodes_q <= num_nodes;
        idx      <= '0;
        ptr      <= '0;
        cs       <= n_log;
        gnext    <= 1'b0;
      end else if (busy) begin
        if (edge_en) begin
          cs    <= cs - 4'd1;
          gnext <= 1'b0;
        end
        if (node_fin) begin
          idx   <= idx_next;
          ptr   <= ptr + 7'd1;
          cs    <= restart_stage(idx_next);
          gnext <= 1'b1;
          if (root_hit) begin
            busy  <= 1'b0;
            done  <= 1'b1;
            x_hat <= root_beta;
          end
        end
      end
    end
  end

  // the schedule must tile the code: a node never reaches past the end, and the
  // schedule is not exhausted before the root is reached
  a_sched_fits: assert property (@(posedge clk) disable iff (!rst_n)
      node_fin |-> (idx_next <= ((NLOG+1)'(1) << nlog_q)));
  a_count: assert property (@(posedge clk) disable iff (!rst_n)
      node_fin |-> (ptr < nnodes_q));
endmodule
