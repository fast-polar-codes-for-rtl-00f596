// tb_rpc_dec: checks the RPC node decoder against the decoding algorithm written
// out step by step (group parities c_i, least reliable bit of each group,
// Delta0/Delta1 comparison). Every output whose Delta0 and Delta1 differ must be
// an RPC codeword (u_0 = u_1 = u_2 = 0), and a codeword with one weak error is
// recovered.
module tb_rpc_dec;
  import fp_pkg::*;
  import tb_ref_pkg::*;
  llr_t l [16];
  logic [15:0] x;
  int checks = 0, failures = 0;

  rpc_dec dut (.llr(l), .x(x));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int   c [4], dl [4], p [4];
    int   d0, d1, k;
    logic xr [MAXN];
    logic xx [MAXN];
    logic uu [MAXN];
    logic cw [MAXN];
    for (int t = 0; t < 4000; t++) begin
      for (int q = 0; q < 16; q++) l[q] = llr_t'($urandom_range(0, 30) - 15);
      #1;
      d0 = 0; d1 = 0;
      for (int q = 0; q < 16; q++) xr[q] = l[q] < 0;
      for (int i = 0; i < 4; i++) begin
        c[i] = 0; dl[i] = 1000; p[i] = 0;
        for (int j = 0; j < 4; j++) begin
          k = 4 * j + i;
          c[i] ^= int'(l[k] < 0);
          if (absi(int'(l[k])) < dl[i]) begin p[i] = k; dl[i] = absi(int'(l[k])); end
        end
        if (c[i] == 1) d0 += dl[i]; else d1 += dl[i];
      end
      for (int i = 0; i < 4; i++)
        if ((d0 > d1 && c[i] == 0) || (d0 < d1 && c[i] == 1)) xr[p[i]] = ~xr[p[i]];
      checks++;
      for (int q = 0; q < 16; q++) if (x[q] !== xr[q]) begin failures++; break; end
      if (d0 != d1) begin
        for (int q = 0; q < 16; q++) xx[q] = x[q];
        polar_enc(xx, uu, 16);
        checks++;
        if (uu[0] || uu[1] || uu[2]) failures++;
      end
      node_cw(NT_RPC, 16, cw);
      for (int q = 0; q < 16; q++) l[q] = to_llr(cw[q], $urandom_range(4, 15));
      k = $urandom_range(0, 15);
      l[k] = to_llr(~cw[k], 1);
      #1;
      checks++;
      for (int q = 0; q < 16; q++) if (x[q] !== cw[q]) begin failures++; break; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
