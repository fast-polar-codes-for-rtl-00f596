// tb_rec_decoder: end-to-end test of the recursive decoder at its default size
// (N up to 1024, 64 schedule entries).
//
// Codes: (1) a rate-0.875 length-1024 fast polar code (896 information bits)
// built with the polarization-weight construction followed by the rate
// re-allocation of fast polar codes, 23 nodes; (2) a hand-made length-1024
// schedule that uses every pattern at its largest size (rate-0 128, SPC and SPC-2
// 128, rate-1 256); (3) a length-32 code that is a single SPC node at the root;
// (4) random tilings of random lengths 32..1024 by every pattern at every size the
// decision module supports.
// For each packet a random codeword is built node by node and combined up the
// tree (x_v = [x_l ^ x_r, x_r]); LLRs carry the correct signs and random
// amplitudes 1..15, and some packets also get weak errors on bits that the node
// they fall in can correct on its own. The decoder must return the codeword, and
// its busy time must equal one cycle per tree edge taken (edges into rate-0
// nodes are skipped, a rate-0 node whose parent is ready costs one cycle), which the testbench works out from the schedule.
// Mechanisms counted (each must occur): f steps, g steps, rate-0 bypasses, a
// decision at the root, and every one of the nine decoded patterns.
module tb_rec_decoder;
  import fp_pkg::*;
  import tb_ref_pkg::*;

  localparam int NN = 1024;
  localparam int MN = 64;

  logic        clk = 0, rst_n = 1, start = 0;
  logic [3:0]  n_log;
  logic [6:0]  num_nodes;
  node_t       sched [MN];
  llr_t        ch [NN];
  logic        busy, done, node_done;
  logic [NN-1:0] x_hat;
  node_type_e  node_type;
  int checks = 0, failures = 0;
  int cnt_f = 0, cnt_g = 0, cnt_r0 = 0, cnt_root = 0;
  int cnt_type [10];
  longint cyc = 0;

  rec_decoder dut (
    .clk(clk), .rst_n(rst_n), .start(start), .n_log(n_log), .num_nodes(num_nodes),
    .sched(sched), .ch_llr(ch), .busy(busy), .done(done), .x_hat(x_hat),
    .node_done(node_done), .node_type(node_type)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters, sampled from the decoder's own control signals
  always @(posedge clk) if (rst_n && busy) begin
    if (dut.edge_en && !dut.gnext) cnt_f++;
    if (dut.edge_en && dut.gnext)  cnt_g++;
    if (dut.is_r0 && dut.node_fin) cnt_r0++;
    if (dut.decide && dut.at_root) cnt_root++;
  end
  always @(posedge clk) if (node_done) cnt_type[int'(node_type)]++;

  // current test code
  node_type_e ty [MN];
  int         st [MN];
  int         nnodes, nlog;

  function automatic int tz(input int v);
    for (int b = 0; b < 11; b++) if (v & (1 << b)) return b;
    return 11;
  endfunction

  // expected busy cycles: a node costs the edges from the stage whose LLRs are
  // held down to its own stage (at least 1); a rate-0 node only down to its
  // parent (at least 1)
  function automatic int exp_cycles();
    int c, idx, cs;
    c = 0; idx = 0;
    for (int i = 0; i < nnodes; i++) begin
      cs = (i == 0) ? nlog : tz(idx) + 1;
      if (ty[i] == NT_R0) c += (cs - st[i] - 1 > 1) ? cs - st[i] - 1 : 1;
      else c += (cs - st[i] > 1) ? cs - st[i] : 1;
      idx += 1 << st[i];
    end
    return c;
  endfunction

  task automatic run_packet(input bit with_err);
    logic cw [MAXN];
    logic x [MAXN];
    int   nst [MAXN];
    int   idx, m, n, k, bcyc;
    bit   ok;
    n = 1 << nlog;
    idx = 0;
    for (int i = 0; i < nnodes; i++) begin
      m = 1 << st[i];
      node_cw(ty[i], m, cw);
      for (int q = 0; q < m; q++) begin x[idx + q] = cw[q]; nst[idx + q] = st[i]; end
      idx += m;
    end
    // combine the node codewords up the tree
    for (int s = 0; s < nlog; s++)
      for (int b = 0; b < n; b += (2 << s))
        if (nst[b] < s + 1)
          for (int q = 0; q < (1 << s); q++) x[b + q] ^= x[b + (1 << s) + q];
    for (int q = 0; q < NN; q++) ch[q] = (q < n) ? to_llr(x[q], $urandom_range(1, 15)) : llr_t'($urandom);
    if (with_err) begin
      // a single weak error in the whole packet, placed in the first node so
      // that every LLR of later nodes stays sign-correct; the channel elsewhere
      // is strong
      for (int q = 0; q < n; q++) ch[q] = to_llr(x[q], 15);
      k = $urandom_range(0, n - 1);
      ch[k] = to_llr(~x[k], 1);
    end
    n_log = 4'(nlog);
    num_nodes = 7'(nnodes);
    for (int i = 0; i < MN; i++) begin
      sched[i].ntype = (i < nnodes) ? ty[i] : NT_R0;
      sched[i].stage = (i < nnodes) ? 4'(st[i]) : 4'd0;
    end
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int q = 0; q < NN; q++) ch[q] = llr_t'($urandom);   // captured: inputs may change
    bcyc = 1;
    while (!done) begin
      @(negedge clk);
      if (busy) bcyc++;
    end
    checks++;
    ok = 1;
    for (int q = 0; q < NN; q++) if (x_hat[q] !== ((q < n) ? x[q] : 1'b0)) begin
      if (ok && failures < 6) $display("first mismatch at bit %0d", q);
      ok = 0;
    end
    if (!ok) begin
      failures++;
      if (failures < 6) $display("N=%0d nodes=%0d err=%0d: codeword mismatch", n, nnodes, with_err);
    end
    checks++;
    if (bcyc != exp_cycles()) begin
      failures++;
      if (failures < 6) $display("N=%0d: %0d cycles, expected %0d", n, bcyc, exp_cycles());
    end
  endtask

  // random tiling: at each position choose a stage that fits its alignment,
  // then a pattern that exists at that size
  task automatic random_code(input int nl);
    int idx, s, smax, n;
    node_type_e cand [10];
    int nc;
    n = 1 << nl;
    idx = 0; nnodes = 0; nlog = nl;
    while (idx < n) begin
      smax = (idx == 0) ? nl : tz(idx);
      if (smax > 8) smax = 8;
      s = $urandom_range(1, smax);
      if (nnodes > 40) s = smax;
      nc = 0;
      cand[nc++] = NT_R0;
      cand[nc++] = NT_R1;
      if (s <= 7) cand[nc++] = NT_SPC;
      if (s <= 7 && s >= 2) cand[nc++] = NT_SPC2;
      if (s <= 4) cand[nc++] = NT_REP;
      if (s == 4) begin
        cand[nc++] = NT_REP2; cand[nc++] = NT_RPC; cand[nc++] = NT_PCR;
        cand[nc++] = NT_BCH1; cand[nc++] = NT_BCH2;
      end
      ty[nnodes] = cand[$urandom_range(0, nc - 1)];
      st[nnodes] = s;
      nnodes++;
      idx += 1 << s;
    end
  endtask

  task automatic set_code(input int nl, input int cnt, input node_type_e t [32], input int s [32]);
    nlog = nl; nnodes = cnt;
    for (int i = 0; i < cnt; i++) begin ty[i] = t[i]; st[i] = s[i]; end
  endtask

  initial begin
    node_type_e t [32];
    int s [32];
    foreach (cnt_type[i]) cnt_type[i] = 0;
    n_log = 0; num_nodes = 0;
    foreach (sched[i]) sched[i] = '0;
    foreach (ch[i]) ch[i] = '0;
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // (1) fast polar code, N = 1024, K = 896
    t = '{NT_R0, NT_REP, NT_REP, NT_BCH2, NT_REP2, NT_BCH2, NT_BCH1, NT_R1, NT_PCR,
          NT_BCH1, NT_SPC2, NT_SPC, NT_PCR, NT_SPC, NT_SPC, NT_R1, NT_R1, NT_BCH2,
          NT_R1, NT_R1, NT_R1, NT_R1, NT_R1, NT_R0, NT_R0, NT_R0, NT_R0, NT_R0,
          NT_R0, NT_R0, NT_R0, NT_R0};
    s = '{4, 4, 4, 4, 4, 4, 4, 4, 4, 4, 5, 6, 4, 4, 5, 6, 7, 4, 4, 5, 6, 7, 8,
          0, 0, 0, 0, 0, 0, 0, 0, 0};
    set_code(10, 23, t, s);
    for (int p = 0; p < 4; p++) run_packet(0);
    $display("fast polar code N=1024 K=896: %0d nodes, %0d cycles per packet", nnodes, exp_cycles());

    // (2) every pattern at its largest size
    t = '{NT_R0, NT_REP, NT_PCR, NT_REP2, NT_RPC, NT_BCH2, NT_BCH1, NT_SPC2, NT_SPC2,
          NT_SPC, NT_R1, NT_R1, NT_R0, NT_R0, NT_R0, NT_R0, NT_R0, NT_R0, NT_R0, NT_R0,
          NT_R0, NT_R0, NT_R0, NT_R0, NT_R0, NT_R0, NT_R0, NT_R0, NT_R0, NT_R0, NT_R0, NT_R0};
    s = '{7, 4, 4, 4, 4, 4, 4, 5, 7, 7, 8, 8, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0,
          0, 0, 0, 0, 0, 0, 0, 0};
    set_code(10, 12, t, s);
    for (int p = 0; p < 4; p++) run_packet(0);

    // (3) the whole code is one SPC node
    t[0] = NT_SPC; s[0] = 5;
    set_code(5, 1, t, s);
    for (int p = 0; p < 4; p++) run_packet(0);
    for (int p = 0; p < 4; p++) run_packet(1);

    // (4) random codes of every length
    for (int r = 0; r < 60; r++) begin
      random_code($urandom_range(5, 10));
      run_packet(0);
    end

    foreach (cnt_type[i]) if (i != 0) begin
      checks++;
      if (cnt_type[i] == 0) begin failures++; $display("pattern %0d never decoded", i); end
    end
    checks++; if (cnt_f == 0)    begin failures++; $display("no f step"); end
    checks++; if (cnt_g == 0)    begin failures++; $display("no g step"); end
    checks++; if (cnt_r0 == 0)   begin failures++; $display("no rate-0 bypass"); end
    checks++; if (cnt_root == 0) begin failures++; $display("no root decision"); end
    $display("f steps %0d, g steps %0d, rate-0 bypasses %0d, root decisions %0d",
             cnt_f, cnt_g, cnt_r0, cnt_root);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
