// tb_tern_ref_pkg: reference models for the ternary testbenches.
//
// Written independently of the RTL: the byte code is computed in balanced
// ternary, code = 121 + sum_i t_i * 3^i (equal to the base-3 digit form with
// d_i = t_i + 1), decoding searches all 243 trit vectors for the code, and the
// instructions are modelled on integer arrays of trits.
package tb_tern_ref_pkg;

  typedef int trit5_t[5];
  typedef int trit20_t[20];

  function automatic logic [1:0] t2b(int t);
    return (t > 0) ? 2'b01 : (t < 0) ? 2'b11 : 2'b00;
  endfunction

  function automatic int b2t(logic [1:0] b);
    return (b == 2'b01) ? 1 : (b == 2'b11) ? -1 : 0;
  endfunction

  function automatic int rand_trit();
    return int'($urandom_range(2)) - 1;
  endfunction

  function automatic logic [7:0] ref_code(trit5_t t);
    int c, p;
    c = 121; p = 1;
    for (int i = 0; i < 5; i++) begin c += t[i] * p; p *= 3; end
    return 8'(c);
  endfunction

  // Trits of a byte code, by exhaustive search; codes without a match give zeros.
  function automatic trit5_t ref_decode(logic [7:0] code);
    trit5_t t, r;
    r = '{0, 0, 0, 0, 0};
    for (int n = 0; n < 243; n++) begin
      int m;
      m = n;
      for (int i = 0; i < 5; i++) begin t[i] = (m % 3) - 1; m /= 3; end
      if (ref_code(t) == code) r = t;
    end
    return r;
  endfunction

  function automatic logic [9:0] pack5(trit5_t t);
    logic [9:0] v;
    for (int i = 0; i < 5; i++) v[2*i +: 2] = t2b(t[i]);
    return v;
  endfunction

  function automatic logic [31:0] word_of(trit20_t t);
    logic [31:0] w;
    for (int k = 0; k < 4; k++) begin
      trit5_t g;
      for (int i = 0; i < 5; i++) g[i] = t[5*k + i];
      w[8*k +: 8] = ref_code(g);
    end
    return w;
  endfunction

  function automatic trit20_t trits_of(logic [31:0] w);
    trit20_t t;
    for (int k = 0; k < 4; k++) begin
      trit5_t g;
      g = ref_decode(w[8*k +: 8]);
      for (int i = 0; i < 5; i++) t[5*k + i] = g[i];
    end
    return t;
  endfunction

  function automatic trit20_t rand_trits20();
    trit20_t t;
    for (int j = 0; j < 20; j++) t[j] = rand_trit();
    return t;
  endfunction

  function automatic int ref_dot(trit20_t a, trit20_t b);
    int s;
    s = 0;
    for (int j = 0; j < 20; j++) s += a[j] * b[j];
    return s;
  endfunction

  function automatic int ref_thresh(int x, int lo, int hi);
    if (x < lo) return -1;
    if (x >= hi) return 1;
    return 0;
  endfunction

endpackage
