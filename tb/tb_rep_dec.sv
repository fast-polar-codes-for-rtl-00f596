// tb_rep_dec: checks the REP node decoder against the sign of the LLR sum, and
// that a repetition codeword with a minority of weak errors is recovered.
module tb_rep_dec;
  import fp_pkg::*;
  import tb_ref_pkg::*;
  llr_t l [16];
  logic [15:0] x;
  int checks = 0, failures = 0;

  rep_dec dut (.llr(l), .x(x));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s;
    logic b;
    for (int t = 0; t < 3000; t++) begin
      s = 0;
      for (int k = 0; k < 16; k++) begin
        l[k] = llr_t'($urandom_range(0, 30) - 15);
        s += int'(l[k]);
      end
      #1;
      checks++;
      if (x !== ((s < 0) ? 16'hFFFF : 16'h0000)) failures++;
      b = 1'($urandom);
      for (int k = 0; k < 16; k++) l[k] = to_llr(b, $urandom_range(4, 15));
      for (int e = 0; e < 3; e++) l[$urandom_range(0, 15)] = to_llr(~b, 2);
      #1;
      checks++;
      if (x !== {16{b}}) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
