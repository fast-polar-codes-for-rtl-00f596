// tb_pcr_dec: checks the PCR node decoder against maximum-likelihood decoding by
// enumeration of its eight codewords (correlation with the LLRs), on inputs
// where the best codeword is unique; SPC decoding of the group sums is ML for
// this code. Every output must be a PCR codeword, and a codeword with weak errors
// is recovered.
module tb_pcr_dec;
  import fp_pkg::*;
  import tb_ref_pkg::*;
  llr_t l [16];
  logic [15:0] x;
  int checks = 0, failures = 0;

  pcr_dec dut (.llr(l), .x(x));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic uu [MAXN];
    logic cw [MAXN];
    logic xx [MAXN];
    logic best [MAXN];
    int   met, bestm, nbest, k;
    for (int t = 0; t < 4000; t++) begin
      for (int q = 0; q < 16; q++) l[q] = llr_t'($urandom_range(0, 30) - 15);
      #1;
      bestm = -100000; nbest = 0;
      for (int v = 0; v < 8; v++) begin
        for (int q = 0; q < 16; q++) uu[q] = 0;
        uu[13] = v[0]; uu[14] = v[1]; uu[15] = v[2];
        polar_enc(uu, cw, 16);
        met = 0;
        for (int q = 0; q < 16; q++) met += cw[q] ? -int'(l[q]) : int'(l[q]);
        if (met > bestm) begin bestm = met; nbest = 1; for (int q = 0; q < 16; q++) best[q] = cw[q]; end
        else if (met == bestm) nbest++;
      end
      if (nbest == 1) begin
        checks++;
        for (int q = 0; q < 16; q++) if (x[q] !== best[q]) begin failures++; break; end
      end
      for (int q = 0; q < 16; q++) xx[q] = x[q];
      polar_enc(xx, uu, 16);
      checks++;
      for (int q = 0; q < 13; q++) if (uu[q]) begin failures++; break; end
      node_cw(NT_PCR, 16, cw);
      for (int q = 0; q < 16; q++) l[q] = to_llr(cw[q], $urandom_range(5, 15));
      k = $urandom_range(0, 15);
      l[k] = to_llr(~cw[k], 3);
      #1;
      checks++;
      for (int q = 0; q < 16; q++) if (x[q] !== cw[q]) begin failures++; break; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
