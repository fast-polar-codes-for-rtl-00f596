// tb_rep2_dec: checks the dual-REP node decoder: the even-index and the
// odd-index bits each follow the sign of their own LLR sum, every output is a
// REP-2 codeword, and a codeword with a few weak errors is recovered.
module tb_rep2_dec;
  import fp_pkg::*;
  import tb_ref_pkg::*;
  llr_t l [16];
  logic [15:0] x;
  int checks = 0, failures = 0;

  rep2_dec dut (.llr(l), .x(x));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int se, so;
    logic cw [MAXN];
    logic xx [MAXN];
    logic uu [MAXN];
    for (int t = 0; t < 3000; t++) begin
      se = 0; so = 0;
      for (int k = 0; k < 16; k++) begin
        l[k] = llr_t'($urandom_range(0, 30) - 15);
        if (k % 2) so += int'(l[k]); else se += int'(l[k]);
      end
      #1;
      checks++;
      for (int k = 0; k < 16; k++)
        if (x[k] !== ((k % 2) ? (so < 0) : (se < 0))) begin failures++; break; end
      for (int k = 0; k < 16; k++) xx[k] = x[k];
      polar_enc(xx, uu, 16);
      checks++;
      for (int k = 0; k < 14; k++) if (uu[k]) begin failures++; break; end
      node_cw(NT_REP2, 16, cw);
      for (int k = 0; k < 16; k++) l[k] = to_llr(cw[k], $urandom_range(5, 15));
      l[2 * $urandom_range(0, 7)] = to_llr(~cw[0], 2);
      l[2 * $urandom_range(0, 7) + 1] = to_llr(~cw[1], 2);
      #1;
      checks++;
      for (int k = 0; k < 16; k++) if (x[k] !== cw[k]) begin failures++; break; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
