// tb_spc_dec: checks the SPC node decoder (lengths 16 and 128) against a
// linear-scan reference: hard decisions, parity, inversion of the least reliable
// bit (lowest index on ties). Also checks that every output has even parity and
// that a codeword hit by one error on its least reliable bit is recovered.
module tb_spc_dec;
  import fp_pkg::*;
  import tb_ref_pkg::*;
  llr_t l16 [16];
  llr_t l128 [128];
  logic [15:0]  x16;
  logic [127:0] x128;
  int checks = 0, failures = 0;

  spc_dec u16 (.llr(l16), .x(x16));
  spc_dec #(.M(128)) u128 (.llr(l128), .x(x128));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int   li [MAXN];
    logic xr [MAXN];
    logic cw [MAXN];
    int   p;
    for (int t = 0; t < 1500; t++) begin
      for (int k = 0; k < 128; k++) begin
        l128[k] = llr_t'($urandom_range(0, 30) - 15);
        if (k < 16) l16[k] = l128[k];
      end
      #1;
      for (int k = 0; k < 16; k++) li[k] = int'(l16[k]);
      ref_spc(li, 16, xr);
      checks++;
      for (int k = 0; k < 16; k++) if (x16[k] !== xr[k]) begin failures++; break; end
      checks++;
      if (^x16) failures++;
      for (int k = 0; k < 128; k++) li[k] = int'(l128[k]);
      ref_spc(li, 128, xr);
      checks++;
      for (int k = 0; k < 128; k++) if (x128[k] !== xr[k]) begin failures++; break; end
      // one error on the weakest bit of a codeword
      node_cw(NT_SPC, 128, cw);
      p = $urandom_range(0, 127);
      for (int k = 0; k < 128; k++) l128[k] = to_llr(cw[k], $urandom_range(3, 15));
      l128[p] = to_llr(~cw[p], 1);
      #1;
      checks++;
      for (int k = 0; k < 128; k++) if (x128[k] !== cw[k]) begin failures++; break; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
