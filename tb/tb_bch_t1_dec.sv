// tb_bch_t1_dec: checks the extended BCH(16,11) node decoder. Codewords are made
// by multiplying a random message by the generator x^4 + x + 1, and bit 15
// repeats bit 0. Error-free words, words with one error on any of bits 1..14, and
// words with one wrong copy of the repeated bit (weaker than the other copy) must
// all decode to the transmitted codeword; so must words with a weak wrong copy of
// bit 0 and one more error, which need the two copies to be combined.
module tb_bch_t1_dec;
  import fp_pkg::*;
  import tb_ref_pkg::*;
  llr_t l [16];
  logic [15:0] x;
  int checks = 0, failures = 0;

  bch_t1_dec dut (.llr(l), .x(x));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic cw [MAXN];
    int k, mode;
    for (int t = 0; t < 4000; t++) begin
      node_cw(NT_BCH1, 16, cw);
      mode = t % 4;
      for (int q = 0; q < 16; q++) l[q] = to_llr(cw[q], $urandom_range(3, 15));
      if (mode == 1) begin
        k = $urandom_range(1, 14);
        l[k] = to_llr(~cw[k], $urandom_range(1, 15));
      end else if (mode == 2) begin
        k = ($urandom_range(0, 1) == 0) ? 0 : 15;
        l[k] = to_llr(~cw[k], $urandom_range(1, 2));
      end else if (mode == 3) begin
        // a weak wrong copy of c_0 plus one error elsewhere: only the combined
        // LLR of the two copies leaves a single error
        l[0]  = to_llr(~cw[0], 1);
        l[15] = to_llr(cw[15], $urandom_range(3, 15));
        k = $urandom_range(1, 14);
        l[k] = to_llr(~cw[k], $urandom_range(1, 15));
      end
      #1;
      checks++;
      for (int q = 0; q < 16; q++) if (x[q] !== cw[q]) begin
        failures++;
        if (failures < 5) $display("mode %0d pos %0d mismatch at %0d", mode, k, q);
        break;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
