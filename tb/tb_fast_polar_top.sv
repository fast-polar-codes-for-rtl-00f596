// tb_fast_polar_top: end-to-end test of the whole design at its default
// parameters (N = 1024, 64 schedule entries, the default unrolled code).
//
// Both decoders receive the same packets of the length-1024, rate-0.875 fast
// polar code (random codewords, LLRs with correct signs and random amplitudes):
// the recursive decoder through its schedule interface, the unrolled decoder
// through its streaming input. Both must return the codeword; the recursive one
// in one cycle per tree edge taken (43 for this code), the unrolled one 44 cycles
// after input. A burst of packets on consecutive cycles must leave the unrolled
// decoder on consecutive cycles. A second length-1024 schedule, which holds every
// pattern at its largest size, is decoded by the recursive decoder.
// Mechanisms counted (each must occur): f steps, g steps, rate-0 bypasses, every
// decoded pattern, back-to-back unrolled outputs.
module tb_fast_polar_top;
  import fp_pkg::*;
  import tb_ref_pkg::*;

  localparam int NN = 1024;
  localparam int MN = 64;

  logic clk = 0, rst_n = 1;
  logic rec_start = 0, rec_busy, rec_done, rec_node_done;
  logic [3:0] rec_n_log;
  logic [6:0] rec_num_nodes;
  node_t rec_sched [MN];
  llr_t  rec_llr [NN];
  logic [NN-1:0] rec_x_hat;
  node_type_e rec_node_type;
  logic unr_valid_in = 0, unr_valid_out;
  llr_t unr_llr [NN];
  logic [NN-1:0] unr_x_hat;
  int checks = 0, failures = 0;
  int cyc = 0;
  int cnt_f = 0, cnt_g = 0, cnt_r0 = 0, cnt_b2b = 0;
  int cnt_type [10];

  fast_polar_top dut (
    .clk(clk), .rst_n(rst_n),
    .rec_start(rec_start), .rec_n_log(rec_n_log), .rec_num_nodes(rec_num_nodes),
    .rec_sched(rec_sched), .rec_llr(rec_llr), .rec_busy(rec_busy), .rec_done(rec_done),
    .rec_x_hat(rec_x_hat), .rec_node_done(rec_node_done), .rec_node_type(rec_node_type),
    .unr_valid_in(unr_valid_in), .unr_llr(unr_llr), .unr_valid_out(unr_valid_out),
    .unr_x_hat(unr_x_hat)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && rec_busy) begin
    if (dut.u_rec.edge_en && !dut.u_rec.gnext) cnt_f++;
    if (dut.u_rec.edge_en && dut.u_rec.gnext)  cnt_g++;
    if (dut.u_rec.is_r0 && dut.u_rec.node_fin) cnt_r0++;
  end
  always @(posedge clk) if (rec_node_done) cnt_type[int'(rec_node_type)]++;

  node_type_e ty [MN];
  int st [MN];
  int nnodes;

  // fast polar code N = 1024, K = 896 (the unrolled decoder's default code)
  localparam node_type_e FP_T [23] = '{NT_R0, NT_REP, NT_REP, NT_BCH2, NT_REP2, NT_BCH2,
      NT_BCH1, NT_R1, NT_PCR, NT_BCH1, NT_SPC2, NT_SPC, NT_PCR, NT_SPC, NT_SPC, NT_R1,
      NT_R1, NT_BCH2, NT_R1, NT_R1, NT_R1, NT_R1, NT_R1};
  localparam int FP_S [23] = '{4, 4, 4, 4, 4, 4, 4, 4, 4, 4, 5, 6, 4, 4, 5, 6, 7, 4, 4, 5,
      6, 7, 8};
  // every pattern at its largest size
  localparam node_type_e ALL_T [12] = '{NT_R0, NT_REP, NT_PCR, NT_REP2, NT_RPC, NT_BCH2,
      NT_BCH1, NT_SPC2, NT_SPC2, NT_SPC, NT_R1, NT_R1};
  localparam int ALL_S [12] = '{7, 4, 4, 4, 4, 4, 4, 5, 7, 7, 8, 8};

  task automatic make_packet(output logic [NN-1:0] xv);
    logic cw [MAXN];
    logic x [MAXN];
    int   nst [MAXN];
    int   idx, m;
    idx = 0;
    for (int i = 0; i < nnodes; i++) begin
      m = 1 << st[i];
      node_cw(ty[i], m, cw);
      for (int q = 0; q < m; q++) begin x[idx + q] = cw[q]; nst[idx + q] = st[i]; end
      idx += m;
    end
    for (int s = 0; s < 10; s++)
      for (int b = 0; b < NN; b += (2 << s))
        if (nst[b] < s + 1)
          for (int q = 0; q < (1 << s); q++) x[b + q] ^= x[b + (1 << s) + q];
    for (int q = 0; q < NN; q++) xv[q] = x[q];
  endtask

  task automatic load_sched();
    rec_n_log = 4'd10;
    rec_num_nodes = 7'(nnodes);
    for (int i = 0; i < MN; i++) begin
      rec_sched[i].ntype = (i < nnodes) ? ty[i] : NT_R0;
      rec_sched[i].stage = (i < nnodes) ? 4'(st[i]) : 4'd0;
    end
  endtask

  // one packet through the recursive decoder (and, if both, the unrolled one)
  task automatic run_packet(input bit both, input int exp_rec_cycles);
    logic [NN-1:0] xv;
    int t0, t_unr, rcyc;
    bit unr_seen;
    make_packet(xv);
    for (int q = 0; q < NN; q++) begin
      rec_llr[q] = to_llr(xv[q], $urandom_range(1, 15));
      unr_llr[q] = rec_llr[q];
    end
    rec_start = 1;
    unr_valid_in = both;
    t0 = cyc;
    @(negedge clk);
    rec_start = 0;
    unr_valid_in = 0;
    rcyc = -1;
    unr_seen = !both;
    while (rcyc < 0 || !unr_seen) begin
      @(negedge clk);
      if (rec_done && rcyc < 0) begin
        rcyc = cyc - t0 - 1;
        checks++;
        if (rec_x_hat !== xv) begin failures++; $display("recursive: wrong codeword"); end
        checks++;
        if (rcyc != exp_rec_cycles) begin
          failures++; $display("recursive: %0d cycles, expected %0d", rcyc, exp_rec_cycles);
        end
      end
      if (unr_valid_out && !unr_seen) begin
        unr_seen = 1;
        checks++;
        if (unr_x_hat !== xv) begin failures++; $display("unrolled: wrong codeword"); end
        checks++;
        if (cyc - t0 != 44) begin failures++; $display("unrolled: latency %0d", cyc - t0); end
      end
    end
  endtask

  initial begin
    logic [NN-1:0] burst [30];
    int nout, run;
    foreach (cnt_type[i]) cnt_type[i] = 0;
    foreach (rec_sched[i]) rec_sched[i] = '0;
    foreach (rec_llr[i]) rec_llr[i] = '0;
    foreach (unr_llr[i]) unr_llr[i] = '0;
    rec_n_log = 0; rec_num_nodes = 0;
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    nnodes = 23;
    for (int i = 0; i < 23; i++) begin ty[i] = FP_T[i]; st[i] = FP_S[i]; end
    load_sched();
    for (int p = 0; p < 6; p++) run_packet(1, 43);

    // burst into the unrolled decoder: one packet per cycle
    for (int p = 0; p < 30; p++) begin
      make_packet(burst[p]);
      for (int q = 0; q < NN; q++) unr_llr[q] = to_llr(burst[p][q], $urandom_range(1, 15));
      unr_valid_in = 1;
      @(negedge clk);
    end
    unr_valid_in = 0;
    nout = 0; run = 0;
    for (int c = 0; c < 80 && nout < 30; c++) begin
      if (unr_valid_out) begin
        checks++;
        if (unr_x_hat !== burst[nout]) begin failures++; $display("burst packet %0d wrong", nout); end
        nout++;
        run++;
        if (run > 1) cnt_b2b++;
      end else run = 0;
      @(negedge clk);
    end
    checks++;
    if (nout != 30) begin failures++; $display("burst: %0d of 30 packets", nout); end

    nnodes = 12;
    for (int i = 0; i < 12; i++) begin ty[i] = ALL_T[i]; st[i] = ALL_S[i]; end
    load_sched();
    for (int p = 0; p < 3; p++) run_packet(0, 21);

    foreach (cnt_type[i]) if (i != 0) begin
      checks++;
      if (cnt_type[i] == 0) begin failures++; $display("pattern %0d never decoded", i); end
    end
    checks++; if (cnt_f == 0)   begin failures++; $display("no f step"); end
    checks++; if (cnt_g == 0)   begin failures++; $display("no g step"); end
    checks++; if (cnt_r0 == 0)  begin failures++; $display("no rate-0 bypass"); end
    checks++; if (cnt_b2b == 0) begin failures++; $display("no back-to-back output"); end
    $display("f %0d, g %0d, rate-0 bypasses %0d, back-to-back unrolled outputs %0d",
             cnt_f, cnt_g, cnt_r0, cnt_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
