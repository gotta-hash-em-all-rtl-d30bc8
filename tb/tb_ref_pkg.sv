// tb_ref_pkg: reference models for the testbenches.
//
// Straight-line mathematical definitions of the field operations and of the
// three permutations, written without any of the hardware's scheduling:
// products are reduced with the `%` operator on 508-bit values, powers by a
// plain bit loop, Bars by integer division and remainder. Only the constants
// (modulus, exponents, matrix, round constants, s_i, S-box) are shared with
// the design, through hash_pkg.
package tb_ref_pkg;
  import hash_pkg::*;

  function automatic fe_t ref_mul(fe_t a, fe_t b);
    logic [507:0] x;
    x = (508'(a) * 508'(b)) % 508'(P);
    return x[FW-1:0];
  endfunction

  function automatic fe_t ref_add(fe_t a, fe_t b);
    logic [255:0] x;
    x = (256'(a) + 256'(b)) % 256'(P);
    return x[FW-1:0];
  endfunction

  function automatic fe_t ref_pow(fe_t x, fe_t e);
    fe_t r;
    r = fe_t'(1);
    for (int i = FW - 1; i >= 0; i--) begin
      r = ref_mul(r, r);
      if (e[i]) r = ref_mul(r, x);
    end
    return r;
  endfunction

  // circ(2,1,1) written as an explicit matrix product
  function automatic state_t ref_mds(state_t x);
    state_t y;
    for (int i = 0; i < 3; i++) begin
      y[i] = '0;
      for (int k = 0; k < 3; k++)
        y[i] = ref_add(y[i], ref_mul((i == k) ? fe_t'(2) : fe_t'(1), x[k]));
    end
    return y;
  endfunction

  function automatic fe_t rand_fe();
    logic [255:0] r;
    for (int i = 0; i < 8; i++) r[i*32 +: 32] = $urandom;
    return fe_t'(r % 256'(P));
  endfunction

  function automatic state_t ref_rescue(state_t x, int unsigned nround);
    state_t s;
    s = x;
    for (int r = 0; r < int'(nround); r++) begin
      for (int i = 0; i < 3; i++) s[i] = ref_pow(s[i], D_FWD);
      s = ref_mds(s);
      for (int i = 0; i < 3; i++) s[i] = ref_add(s[i], RP_C[(2*r)*3 + i]);
      for (int i = 0; i < 3; i++) s[i] = ref_pow(s[i], D_INV);
      s = ref_mds(s);
      for (int i = 0; i < 3; i++) s[i] = ref_add(s[i], RP_C[(2*r+1)*3 + i]);
    end
    return s;
  endfunction

  function automatic state_t ref_griffin(state_t x, int unsigned nround);
    state_t s, y;
    fe_t l;
    s = ref_mds(x);
    for (int r = 0; r < int'(nround); r++) begin
      y[0] = ref_pow(s[0], D_INV);
      y[1] = ref_pow(s[1], D_FWD);
      l    = ref_add(y[0], y[1]);
      y[2] = ref_mul(s[2], ref_add(ref_add(ref_mul(l, l), ref_mul(GR_ALPHA, l)), GR_BETA));
      s = ref_mds(y);
      if (r != int'(nround) - 1)
        for (int i = 0; i < 3; i++) s[i] = ref_add(s[i], GR_C[r*3 + i]);
    end
    return s;
  endfunction

  function automatic state_t ref_concrete(state_t x, int k);
    state_t s;
    s = ref_mds(x);
    for (int i = 0; i < 3; i++) s[i] = ref_add(s[i], RC_C[k*3 + i]);
    return s;
  endfunction

  function automatic state_t ref_bricks(state_t x);
    state_t y;
    y[0] = ref_pow(x[0], D_FWD);
    y[1] = ref_mul(x[1], ref_add(ref_add(ref_mul(x[0], x[0]), ref_mul(RC_ALPHA1, x[0])), RC_BETA1));
    y[2] = ref_mul(x[2], ref_add(ref_add(ref_mul(x[1], x[1]), ref_mul(RC_ALPHA2, x[1])), RC_BETA2));
    return y;
  endfunction

  function automatic int unsigned ref_sbox(int unsigned z);
    int unsigned r;
    if (z >= RC_V) return z;
    r = 1;
    for (int i = 0; i < int'(RC_V) - 2; i++) r = (r * z) % RC_V;
    return r;
  endfunction

  function automatic fe_t ref_bar(fe_t x);
    logic [255:0] v, acc;
    int unsigned  zc [RC_N];
    v = 256'(x);
    for (int i = RC_N - 1; i >= 0; i--) begin
      zc[i] = int'(v % 256'(RC_S[i]));
      v     = v / 256'(RC_S[i]);
    end
    acc = '0;
    for (int i = 0; i < RC_N; i++) acc = acc * 256'(RC_S[i]) + 256'(ref_sbox(zc[i]));
    return fe_t'(acc % 256'(P));
  endfunction

  function automatic state_t ref_rc(state_t x);
    state_t s;
    s = ref_concrete(x, 0);
    for (int k = 1; k <= 3; k++) s = ref_concrete(ref_bricks(s), k);
    for (int i = 0; i < 3; i++) s[i] = ref_bar(s[i]);
    s = ref_concrete(s, 4);
    for (int k = 5; k <= 7; k++) s = ref_concrete(ref_bricks(s), k);
    return s;
  endfunction
endpackage
