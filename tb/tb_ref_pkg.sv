// tb_ref_pkg: reference models for the testbenches.
//
// Galois-field arithmetic here is built from exponent/log tables (generated by
// repeated multiplication by alpha = 0x02 modulo x^8+x^4+x^3+x^2+1), independent
// of the shift-and-add multiplier in the RTL package. The encoder and the brute-
// force single-symbol decoder below give the expected values for ChipKill checks.
// Interface: a package of functions, no timing. Own choice: the paper gives no
// reference model; these follow the code definition used by the RTL.
package tb_ref_pkg;

  typedef logic [7:0] byte_t;

  byte_t exp_t [0:509];
  int    log_t [0:255];
  bit    init_done = 0;

  function automatic void gf_init();
    int x;
    x = 1;
    for (int i = 0; i < 255; i++) begin
      exp_t[i]       = byte_t'(x);
      exp_t[i + 255] = byte_t'(x);
      log_t[x]       = i;
      x = x << 1;
      if (x & 'h100) x = x ^ 'h11D;
    end
    log_t[0] = 0;
    init_done = 1;
  endfunction

  function automatic byte_t ref_mul(byte_t a, byte_t b);
    if (!init_done) gf_init();
    if (a == 0 || b == 0) return 8'h00;
    return exp_t[log_t[a] + log_t[b]];
  endfunction

  function automatic byte_t ref_apow(int e);
    if (!init_done) gf_init();
    return exp_t[e % 255];
  endfunction

  function automatic byte_t sym(logic [511:0] line, int k, int c);
    return line[(k*8 + c)*8 +: 8];
  endfunction

  function automatic void ref_encode(logic [511:0] line, output logic [63:0] p0, output logic [63:0] p1);
    p0 = '0; p1 = '0;
    for (int k = 0; k < 8; k++)
      for (int c = 0; c < 8; c++) begin
        p0[k*8 +: 8] ^= sym(line, k, c);
        p1[k*8 +: 8] ^= ref_mul(sym(line, k, c), ref_apow(c));
      end
  endfunction

  // 0 = clean, 1 = corrected, 2 = uncorrectable; brute force over every single
  // symbol change of the codeword
  function automatic int ref_decode(logic [511:0] line, logic [63:0] p0, logic [63:0] p1,
                                    output logic [511:0] fixed);
    int st;
    logic [63:0] q0, q1;
    st = 0;
    fixed = line;
    ref_encode(line, q0, q1);
    for (int k = 0; k < 8; k++) begin
      byte_t s0, s1;
      bit ok;
      s0 = q0[k*8 +: 8] ^ p0[k*8 +: 8];
      s1 = q1[k*8 +: 8] ^ p1[k*8 +: 8];
      if (s0 == 0 && s1 == 0) continue;
      ok = 0;
      if (s0 == 0 || s1 == 0) ok = 1;      // exactly one check symbol differs
      for (int j = 0; j < 8 && !ok; j++)
        for (int v = 1; v < 256 && !ok; v++)
          if (byte_t'(v) == s0 && ref_mul(byte_t'(v), ref_apow(j)) == s1) begin
            ok = 1;
            fixed[(k*8 + j)*8 +: 8] = fixed[(k*8 + j)*8 +: 8] ^ byte_t'(v);
          end
      if (!ok) st = 2;
      else if (st == 0) st = 1;
    end
    return st;
  endfunction

  function automatic logic [511:0] rand_line();
    logic [511:0] l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

endpackage
