// fp_pkg: types, constants and arithmetic shared by the fast polar decoder.
//
// LLRs are Q-bit two's complement numbers (Q = 5 for both channel and internal
// LLRs, the quantisation chosen for the implementation). Values are kept in the
// symmetric range [-LLR_MAX, LLR_MAX] so that a magnitude always fits in Q-1 bits;
// the symmetric range is this design's choice. A positive LLR means bit 0
// (sig(a) = 0 for a >= 0, 1 for a < 0).
//
// f(a,b) = sign(a)sign(b)min(|a|,|b|) (min-sum) and g(a,b,u) = b + (1-2u)a with
// saturation are the usual SC update rules of one tree edge. The min-sum form of f
// is this design's choice; the text only names the f/g functions.
//
// The GF(16) helpers (primitive polynomial x^4 + x + 1) serve the BCH node
// decoders; the field and the polynomial are the standard ones for length-15 BCH
// codes, not given in the text.
package fp_pkg;

  localparam int Q       = 5;                 // LLR width, channel and internal
  localparam int MAGW    = Q - 1;             // magnitude width
  localparam int LLR_MAX = (1 << (Q - 1)) - 1;

  typedef logic signed [Q-1:0] llr_t;
  typedef logic [MAGW-1:0]     mag_t;

  // Node (pattern) types. R0 is bypassed by the decoder, the other nine are
  // decoded by the decision module.
  typedef enum logic [3:0] {
    NT_R0   = 4'd0,   // rate 0: all frozen
    NT_R1   = 4'd1,   // rate 1: all information
    NT_SPC  = 4'd2,   // single parity check
    NT_SPC2 = 4'd3,   // dual SPC: two smallest indices frozen
    NT_RPC  = 4'd4,   // repeated parity check: three smallest frozen
    NT_BCH1 = 4'd5,   // grafted extended BCH, k = 11, t = 1
    NT_BCH2 = 4'd6,   // grafted extended BCH, k = 7,  t = 2
    NT_PCR  = 4'd7,   // parity checked repetition: three largest information
    NT_REP2 = 4'd8,   // dual REP: two largest information
    NT_REP  = 4'd9    // repetition: largest index information
  } node_type_e;

  // One entry of the decoding schedule: the fast nodes in decoding order.
  typedef struct packed {
    node_type_e  ntype;
    logic [3:0]  stage;    // s, node length M = 2^s
  } node_t;

  function automatic llr_t sat_llr(input int v);
    if (v > LLR_MAX)       return llr_t'(LLR_MAX);
    else if (v < -LLR_MAX) return llr_t'(-LLR_MAX);
    else                   return llr_t'(v);
  endfunction

  function automatic mag_t mag(input llr_t a);
    return (a < 0) ? mag_t'(-a) : mag_t'(a);
  endfunction

  function automatic logic sig(input llr_t a);
    return a[Q-1];
  endfunction

  function automatic llr_t f_fn(input llr_t a, input llr_t b);
    mag_t m;
    m = (mag(a) < mag(b)) ? mag(a) : mag(b);
    return (sig(a) ^ sig(b)) ? -llr_t'({1'b0, m}) : llr_t'({1'b0, m});
  endfunction

  function automatic llr_t g_fn(input llr_t a, input llr_t b, input logic u);
    int s;
    s = u ? (int'(b) - int'(a)) : (int'(b) + int'(a));
    return sat_llr(s);
  endfunction

  // ---- GF(16), primitive polynomial x^4 + x + 1 ----
  function automatic logic [3:0] gf_mul(input logic [3:0] a, input logic [3:0] b);
    logic [3:0] p, aa;
    p  = '0;
    aa = a;
    for (int i = 0; i < 4; i++) begin
      if (b[i]) p ^= aa;
      aa = aa[3] ? ({aa[2:0], 1'b0} ^ 4'b0011) : {aa[2:0], 1'b0};
    end
    return p;
  endfunction

  // alpha^e for e in [0, 14]
  function automatic logic [3:0] gf_exp(input int e);
    logic [3:0] p;
    p = 4'b0001;
    for (int i = 0; i < 15; i++) if (i < e) p = gf_mul(p, 4'b0010);
    return p;
  endfunction

  // multiplicative inverse, a^14; inverse of 0 is returned as 0
  function automatic logic [3:0] gf_inv(input logic [3:0] a);
    logic [3:0] p;
    p = 4'b0001;
    for (int i = 0; i < 14; i++) p = gf_mul(p, a);
    return p;
  endfunction

  // ---- fixed schedules for the unrolled decoder ----
  // A schedule packed into a vector: entry i (a node_t, 8 bits) in bits
  // [8i+7:8i]; up to SCHED_MAX entries.
  localparam int SCHED_MAX = 64;
  typedef logic [8*SCHED_MAX-1:0] sched_vec_t;

  // type of the schedule node that starts at leaf idx with stage s, or -1 when
  // the subtree (idx, s) is not a single node of the schedule
  function automatic int sched_find(input sched_vec_t sv, input int nn,
                                    input int idx, input int s);
    int start;
    node_t nd;
    start = 0;
    for (int i = 0; i < SCHED_MAX; i++) begin
      if (i < nn) begin
        nd = sv[8*i +: 8];
        if (start == idx && int'(nd.stage) == s) return int'(nd.ntype);
        start += 1 << nd.stage;
      end
    end
    return -1;
  endfunction

  // pipeline latency of subtree (idx, s) in the unrolled decoder: one register
  // per tree edge below its root that does not lead into a rate-0 node, i.e.
  // (internal nodes below the root) + (non-rate-0 leaves) = leaves - 2 +
  // non-rate-0 leaves; 0 for a single node
  function automatic int sched_lat(input sched_vec_t sv, input int nn,
                                   input int idx, input int s);
    int start, nl, nr;
    node_t nd;
    if (sched_find(sv, nn, idx, s) >= 0) return 0;
    start = 0; nl = 0; nr = 0;
    for (int i = 0; i < SCHED_MAX; i++) begin
      if (i < nn) begin
        nd = sv[8*i +: 8];
        if (start >= idx && start < idx + (1 << s)) begin
          nl++;
          if (nd.ntype != NT_R0) nr++;
        end
        start += 1 << nd.stage;
      end
    end
    return nl - 2 + nr;
  endfunction

endpackage
