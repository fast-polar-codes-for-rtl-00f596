// tb_par_min: checks the parallel comparison circuit against a linear scan.
// Two instances are tested: the default 16 x 4-bit one and a 128 x 5-bit one as
// used by the largest SPC node. Random amplitudes, including many ties, are
// applied; the reverse mask must mark exactly the minimum positions, the one-hot
// output must be the lowest of them and min_val the minimum value.
module tb_par_min;
  logic [3:0]   a16 [16];
  logic [15:0]  rm16, oh16;
  logic [3:0]   mv16;
  logic [4:0]   a128 [128];
  logic [127:0] rm128, oh128;
  logic [4:0]   mv128;
  int checks = 0, failures = 0;

  par_min u16 (.amp(a16), .rmask(rm16), .onehot(oh16), .min_val(mv16));
  par_min #(.M(128), .W(5)) u128 (.amp(a128), .rmask(rm128), .onehot(oh128), .min_val(mv128));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mn, first;
    logic [15:0]  erm16;
    logic [127:0] erm128;
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < 16; i++)  a16[i]  = (t % 3 == 0) ? 4'(4 + $urandom_range(0, 3)) : 4'($urandom);
      for (int i = 0; i < 128; i++) a128[i] = (t % 2 == 0) ? 5'(8 + $urandom_range(0, 6)) : 5'($urandom);
      #1;
      mn = 99; first = -1;
      for (int i = 0; i < 16; i++) if (a16[i] < mn) begin mn = a16[i]; first = i; end
      for (int i = 0; i < 16; i++) erm16[i] = (a16[i] == mn);
      checks++;
      if (rm16 !== erm16 || oh16 !== (16'd1 << first) || mv16 !== 4'(mn)) begin
        failures++;
        if (failures < 5) $display("16: rm %h/%h oh %h first %0d mv %0d/%0d", rm16, erm16, oh16, first, mv16, mn);
      end
      mn = 99; first = -1;
      for (int i = 0; i < 128; i++) if (a128[i] < mn) begin mn = a128[i]; first = i; end
      for (int i = 0; i < 128; i++) erm128[i] = (a128[i] == mn);
      checks++;
      if (rm128 !== erm128 || oh128 !== (128'd1 << first) || mv128 !== 5'(mn)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
