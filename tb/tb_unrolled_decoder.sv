// tb_unrolled_decoder: end-to-end test of the unrolled decoder at its default
// size: the length-1024, rate-0.875 fast polar code of 23 nodes.
//
// Packets are streamed in back to back (with occasional idle cycles): each is a
// random codeword of the code, built node by node and combined up the tree, sent
// as LLRs with correct signs and random amplitudes 1..15. Every output must be the
// codeword sent LATENCY (44) cycles earlier, in order, and a burst of packets on
// consecutive cycles must come out on consecutive cycles (one packet per cycle).
module tb_unrolled_decoder;
  import fp_pkg::*;
  import tb_ref_pkg::*;

  localparam int NN = 1024;
  localparam int NP = 120;

  logic clk = 0, rst_n = 1, in_valid = 0, out_valid;
  llr_t ch [NN];
  logic [NN-1:0] x_hat;
  int checks = 0, failures = 0;
  int cyc = 0;

  unrolled_decoder dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .ch_llr(ch),
    .out_valid(out_valid), .x_hat(x_hat)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  node_type_e ty [23] = '{NT_R0, NT_REP, NT_REP, NT_BCH2, NT_REP2, NT_BCH2, NT_BCH1,
                          NT_R1, NT_PCR, NT_BCH1, NT_SPC2, NT_SPC, NT_PCR, NT_SPC,
                          NT_SPC, NT_R1, NT_R1, NT_BCH2, NT_R1, NT_R1, NT_R1, NT_R1, NT_R1};
  int st [23] = '{4, 4, 4, 4, 4, 4, 4, 4, 4, 4, 5, 6, 4, 4, 5, 6, 7, 4, 4, 5, 6, 7, 8};

  logic [NN-1:0] sent [NP];
  int            t_in [NP];
  int            n_in = 0, n_out = 0, run = 0, max_run = 0;

  task automatic make_packet(output logic [NN-1:0] xv);
    logic cw [MAXN];
    logic x [MAXN];
    int   nst [MAXN];
    int   idx, m;
    idx = 0;
    for (int i = 0; i < 23; i++) begin
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

  // output side, sampled between clock edges: check order, contents, latency
  // (rising edges from the one that takes the input to the one that presents
  // the output) and back-to-back delivery
  always @(negedge clk) begin
    if (out_valid) begin
      checks++;
      if (n_out >= n_in || x_hat !== sent[n_out]) begin
        failures++;
        if (failures < 5) $display("packet %0d: wrong codeword", n_out);
      end
      checks++;
      if (cyc - t_in[n_out] != 44) begin
        failures++;
        if (failures < 5) $display("packet %0d: latency %0d", n_out, cyc - t_in[n_out]);
      end
      n_out++;
      run++;
      if (run > max_run) max_run = run;
    end else run = 0;
  end

  initial begin
    logic [NN-1:0] xv;
    foreach (ch[i]) ch[i] = '0;
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < NP; p++) begin
      make_packet(xv);
      sent[p] = xv;
      for (int q = 0; q < NN; q++) ch[q] = to_llr(xv[q], $urandom_range(1, 15));
      in_valid = 1;
      t_in[p] = cyc;
      n_in++;
      @(negedge clk);
      in_valid = 0;
      foreach (ch[i]) ch[i] = llr_t'($urandom);
      if (p % 40 == 39) repeat (3) @(negedge clk);
    end
    repeat (60) @(negedge clk);
    checks++;
    if (n_out != NP) begin failures++; $display("%0d of %0d packets came out", n_out, NP); end
    checks++;
    if (max_run < 40) begin failures++; $display("longest back-to-back output run %0d", max_run); end
    $display("latency %0d cycles, longest back-to-back run %0d packets", dut.LATENCY, max_run);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
