// tb_spc2_dec: checks the dual-SPC node decoder (length 16 and 128). The
// reference decodes the even-index and odd-index bits as two SPC codes by linear
// scan. Every output must be an SPC-2 codeword (u_0 = u_1 = 0 after the inverse
// polar transform), and a codeword with one weak error in each half is
// recovered.
module tb_spc2_dec;
  import fp_pkg::*;
  import tb_ref_pkg::*;
  llr_t l16 [16];
  llr_t l128 [128];
  logic [15:0]  x16;
  logic [127:0] x128;
  int checks = 0, failures = 0;

  spc2_dec u16 (.llr(l16), .x(x16));
  spc2_dec #(.M(128)) u128 (.llr(l128), .x(x128));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_ref(input int m);
    int   li [MAXN];
    logic xe [MAXN];
    logic xo [MAXN];
    logic xx [MAXN];
    logic uu [MAXN];
    logic got;
    for (int j = 0; j < m / 2; j++) li[j] = (m == 16) ? int'(l16[2*j]) : int'(l128[2*j]);
    ref_spc(li, m / 2, xe);
    for (int j = 0; j < m / 2; j++) li[j] = (m == 16) ? int'(l16[2*j+1]) : int'(l128[2*j+1]);
    ref_spc(li, m / 2, xo);
    checks++;
    for (int j = 0; j < m / 2; j++) begin
      if (((m == 16) ? x16[2*j] : x128[2*j]) !== xe[j] ||
          ((m == 16) ? x16[2*j+1] : x128[2*j+1]) !== xo[j]) begin failures++; break; end
    end
    for (int k = 0; k < m; k++) xx[k] = (m == 16) ? x16[k] : x128[k];
    polar_enc(xx, uu, m);
    checks++;
    if (uu[0] || uu[1]) failures++;
  endtask

  initial begin
    logic cw [MAXN];
    int pe, po;
    for (int t = 0; t < 1000; t++) begin
      for (int k = 0; k < 128; k++) begin
        l128[k] = llr_t'($urandom_range(0, 30) - 15);
        if (k < 16) l16[k] = l128[k];
      end
      #1;
      check_ref(16);
      check_ref(128);
      node_cw(NT_SPC2, 128, cw);
      for (int k = 0; k < 128; k++) l128[k] = to_llr(cw[k], $urandom_range(3, 15));
      pe = 2 * $urandom_range(0, 63);
      po = 2 * $urandom_range(0, 63) + 1;
      l128[pe] = to_llr(~cw[pe], 1);
      l128[po] = to_llr(~cw[po], 1);
      #1;
      checks++;
      for (int k = 0; k < 128; k++) if (x128[k] !== cw[k]) begin failures++; break; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
