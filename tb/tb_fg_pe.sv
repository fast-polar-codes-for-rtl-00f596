// tb_fg_pe: checks the f/g processing-element array lane by lane against integer
// arithmetic: f = sign(a)sign(b)min(|a|,|b|), g = b + (1-2beta)a clipped to
// [-15, 15]. Uses an 8-lane array; every lane is identical.
module tb_fg_pe;
  import fp_pkg::*;
  localparam int L = 8;
  llr_t a [L], b [L], y [L];
  logic beta [L];
  logic gm;
  int checks = 0, failures = 0;

  fg_pe #(.LANES(L)) dut (.a(a), .b(b), .beta_l(beta), .g_mode(gm), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ea, eb, e;
    for (int t = 0; t < 3000; t++) begin
      gm = 1'($urandom);
      for (int k = 0; k < L; k++) begin
        a[k] = llr_t'($urandom_range(0, 30) - 15);
        b[k] = llr_t'($urandom_range(0, 30) - 15);
        beta[k] = 1'($urandom);
      end
      #1;
      for (int k = 0; k < L; k++) begin
        ea = int'(a[k]); eb = int'(b[k]);
        if (!gm) begin
          e = (ea < 0 ? -ea : ea) < (eb < 0 ? -eb : eb) ? (ea < 0 ? -ea : ea) : (eb < 0 ? -eb : eb);
          if ((ea < 0) != (eb < 0)) e = -e;
        end else begin
          e = beta[k] ? eb - ea : eb + ea;
          if (e > 15) e = 15;
          if (e < -15) e = -15;
        end
        checks++;
        if (int'(y[k]) != e) begin
          failures++;
          if (failures < 5) $display("lane %0d g=%0d a=%0d b=%0d beta=%0d y=%0d exp=%0d", k, gm, ea, eb, beta[k], y[k], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
