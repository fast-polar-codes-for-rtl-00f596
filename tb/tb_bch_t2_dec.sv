// tb_bch_t2_dec: checks the extended BCH(16,7) node decoder. Codewords are made
// by multiplying a random message by x^8 + x^7 + x^6 + x^4 + 1, and bit 15 is the
// parity of bits 0..14. Words with up to two errors anywhere, and words with
// three errors one of which is the unique least reliable bit (the case the SPC
// extension is there for), must decode to the transmitted codeword.
module tb_bch_t2_dec;
  import fp_pkg::*;
  import tb_ref_pkg::*;
  llr_t l [16];
  logic [15:0] x;
  int checks = 0, failures = 0;

  bch_t2_dec dut (.llr(l), .x(x));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic cw [MAXN];
    int ne, pos [3];
    for (int t = 0; t < 4000; t++) begin
      node_cw(NT_BCH2, 16, cw);
      ne = t % 4;
      for (int q = 0; q < 16; q++) l[q] = to_llr(cw[q], $urandom_range(2, 15));
      pos[0] = $urandom_range(0, 15);
      do pos[1] = $urandom_range(0, 15); while (pos[1] == pos[0]);
      do pos[2] = $urandom_range(0, 15); while (pos[2] == pos[0] || pos[2] == pos[1]);
      for (int e = 0; e < ne; e++)
        l[pos[e]] = to_llr(~cw[pos[e]], (ne == 3 && e == 0) ? 1 : $urandom_range(2, 15));
      #1;
      checks++;
      for (int q = 0; q < 16; q++) if (x[q] !== cw[q]) begin
        failures++;
        if (failures < 5) $display("ne %0d pos %0d %0d %0d mismatch at %0d", ne, pos[0], pos[1], pos[2], q);
        break;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
