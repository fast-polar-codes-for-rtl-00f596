// tb_node_dec: checks the decision module for every pattern at every size it
// supports. For each case a random codeword of the pattern is sent with correct
// signs and random amplitudes (must come back unchanged), and, for the patterns
// that can correct, once more with one weak error. Lanes above the node size
// carry random LLRs and must read back as 0.
module tb_node_dec;
  import fp_pkg::*;
  import tb_ref_pkg::*;
  node_type_e t;
  logic [3:0] s;
  llr_t l [256];
  logic [255:0] x;
  int checks = 0, failures = 0;

  node_dec dut (.ntype(t), .stage(s), .llr(l), .x(x));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input node_type_e ty, input int st, input bit err);
    logic cw [MAXN];
    int m, k;
    m = 1 << st;
    node_cw(ty, m, cw);
    for (int q = 0; q < 256; q++)
      l[q] = (q < m) ? to_llr(cw[q], $urandom_range(4, 15)) : llr_t'($urandom_range(0, 30) - 15);
    if (err) begin
      k = $urandom_range(0, m - 1);
      l[k] = to_llr(~cw[k], 1);
    end
    t = ty;
    s = 4'(st);
    #1;
    checks++;
    for (int q = 0; q < 256; q++)
      if (x[q] !== ((q < m) ? cw[q] : 1'b0)) begin
        failures++;
        if (failures < 8) $display("type %s stage %0d err %0d: mismatch at %0d", ty.name(), st, err, q);
        break;
      end
  endtask

  initial begin
    for (int r = 0; r < 40; r++) begin
      for (int st = 0; st <= 8; st++) run(NT_R0, st, 0);
      for (int st = 0; st <= 8; st++) run(NT_R1, st, 0);
      for (int st = 1; st <= 7; st++) begin run(NT_SPC, st, 0); run(NT_SPC, st, 1); end
      for (int st = 2; st <= 7; st++) run(NT_SPC2, st, 0);
      for (int st = 1; st <= 4; st++) begin run(NT_REP, st, 0); if (st >= 2) run(NT_REP, st, 1); end
      run(NT_REP2, 4, 0); run(NT_REP2, 4, 1);
      run(NT_RPC, 4, 0);  run(NT_RPC, 4, 1);
      run(NT_PCR, 4, 0);  run(NT_PCR, 4, 1);
      run(NT_BCH1, 4, 0); run(NT_BCH1, 4, 1);
      run(NT_BCH2, 4, 0); run(NT_BCH2, 4, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
