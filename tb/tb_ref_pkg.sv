// tb_ref_pkg: reference models used by the testbenches.
//
// Everything here is written independently of the RTL, in plain sequential
// style: polar encoding of a node from its information pattern, BCH encoding by
// polynomial multiplication, linear-scan minimum search, and the node decoding
// rules written out directly from their definitions. LLRs are 5-bit values in
// [-15, 15]; bit 1 maps to a negative LLR.
package tb_ref_pkg;
  import fp_pkg::*;

  localparam int MAXN = 1024;
  typedef logic bits_t [MAXN];

  // information positions of a polar node of length m
  function automatic bit is_info(node_type_e t, int i, int m);
    case (t)
      NT_R0:   return 0;
      NT_R1:   return 1;
      NT_SPC:  return i >= 1;
      NT_SPC2: return i >= 2;
      NT_RPC:  return i >= 3;
      NT_PCR:  return i >= m - 3;
      NT_REP2: return i >= m - 2;
      NT_REP:  return i == m - 1;
      default: return 0;
    endcase
  endfunction

  // x = u F^{(x)s}: x_j = XOR of u_i over all i whose bits cover j
  function automatic void polar_enc(ref logic u[MAXN], ref logic x[MAXN], input int m);
    for (int j = 0; j < m; j++) begin
      x[j] = 0;
      for (int i = 0; i < m; i++) if ((i & j) == j) x[j] ^= u[i];
    end
  endfunction

  // random codeword of the (15,k) BCH code with generator g (bit i = x^i)
  function automatic logic [14:0] bch_cw(input int k, input logic [8:0] g);
    logic [14:0] c;
    logic [10:0] msg;
    c = '0;
    msg = 11'($urandom);
    for (int i = 0; i < k; i++)
      if (msg[i]) for (int j = 0; j <= 15 - k; j++) if (g[j]) c[i+j] ^= 1'b1;
    return c;
  endfunction

  localparam logic [8:0] G_BCH1 = 9'h013;   // x^4 + x + 1
  localparam logic [8:0] G_BCH2 = 9'h1D1;   // x^8 + x^7 + x^6 + x^4 + 1

  // random codeword of a node of the given type and length m, in x[0..m-1]
  function automatic void node_cw(input node_type_e t, input int m, ref logic x[MAXN]);
    logic u[MAXN];
    logic [14:0] c;
    if (t == NT_BCH1) begin
      c = bch_cw(11, G_BCH1);
      for (int i = 0; i < 15; i++) x[i] = c[i];
      x[15] = c[0];
    end else if (t == NT_BCH2) begin
      c = bch_cw(7, G_BCH2);
      for (int i = 0; i < 15; i++) x[i] = c[i];
      x[15] = ^c;
    end else begin
      for (int i = 0; i < m; i++) u[i] = is_info(t, i, m) ? 1'($urandom) : 1'b0;
      polar_enc(u, x, m);
    end
  endfunction

  function automatic llr_t to_llr(input logic b, input int magn);
    return b ? llr_t'(-magn) : llr_t'(magn);
  endfunction

  function automatic int absi(input int v);
    return v < 0 ? -v : v;
  endfunction

  // SPC decoding by linear scan; ties go to the lowest index
  function automatic void ref_spc(ref int l[MAXN], input int m, ref logic x[MAXN]);
    int p, best;
    logic par;
    p = 0; best = 1 << 30; par = 0;
    for (int k = 0; k < m; k++) begin
      x[k] = l[k] < 0;
      par ^= x[k];
      if (absi(l[k]) < best) begin best = absi(l[k]); p = k; end
    end
    if (par) x[p] = ~x[p];
  endfunction
endpackage
