// hash_pkg: field arithmetic, types and constants shared by the three
// permutation engines (Rescue-Prime, Griffin, Reinforced Concrete).
//
// All arithmetic is over the scalar field of the BN254 curve,
// p = 0x30644e72...f0000001 (254 bits). Field elements are 254-bit
// vectors (fe_t). The package holds:
//   * the modulus, the Barrett constant and the power-map exponents
//     d = 5 and 1/d = 5^-1 mod (p-1);
//   * the 3x3 MDS matrix circ(2,1,1) applied with additions only;
//   * the Reinforced Concrete decomposition bases s_i, the reciprocal table
//     2^508 / s_i used by the fast divider, and the chunk S-box;
//   * round constants.
// The structure (state of 3, 14 rounds for Rescue-Prime and Griffin, 7-round
// RC with 8 Concrete layers, reciprocal scaled by 2^508) follows the paper.
// The paper prints no constant values: the MDS matrix, the quadratic
// coefficients, the s_i, the S-box and the round constants are this design's
// own choice. Round constants are placeholders produced by a fixed formula
// (see gen_const); substitute the official tables to obtain standard digests.
package hash_pkg;

  localparam int unsigned FW = 254;               // field element width
  typedef logic [FW-1:0] fe_t;

  localparam fe_t P = 254'h30644e72e131a029b85045b68181585d2833e84879b9709143e1f593f0000001;
  // Barrett constant floor(2^508 / p)
  localparam logic [254:0] MU = 255'h54a47462623a04a7ab074a58680730147144852009e880ae620703a6be1de925;

  // power map exponents
  localparam fe_t D_FWD = 254'd5;
  localparam fe_t D_INV = 254'h26b6a528b427b35493736af8679aad17535cb9d394945a0dcfe7f7a98ccccccd;

  localparam int unsigned STATE  = 3;   // permutation state size
  localparam int unsigned BATCH  = 13;  // elements interleaved in one pipeline
  localparam int unsigned ROUNDS = 14;  // Rescue-Prime and Griffin rounds

  localparam int unsigned MODMUL_LAT = 4; // modmul / rc_modmul pipeline depth

  typedef fe_t state_t [STATE];

  // reconfigurable multiplier modes (Reinforced Concrete)
  typedef enum logic [1:0] {RCM_MULT = 2'd0, RCM_DECOMPOSE = 2'd1, RCM_COMPOSE = 2'd2} rcm_mode_t;

  typedef enum logic [1:0] {HASH_RESCUE = 2'd0, HASH_GRIFFIN = 2'd1, HASH_RC = 2'd2} hash_sel_t;

  // ---------------------------------------------------------------- field ops
  function automatic fe_t add_mod(fe_t a, fe_t b);
    logic [FW:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, P}) s = s - {1'b0, P};
    return s[FW-1:0];
  endfunction

  // circ(2,1,1): y_i = x0 + x1 + x2 + x_i
  function automatic state_t mds3(state_t x);
    state_t y;
    fe_t sum;
    sum = add_mod(add_mod(x[0], x[1]), x[2]);
    for (int i = 0; i < STATE; i++) y[i] = add_mod(sum, x[i]);
    return y;
  endfunction

  function automatic state_t add_state(state_t x, state_t c);
    state_t y;
    for (int i = 0; i < STATE; i++) y[i] = add_mod(x[i], c[i]);
    return y;
  endfunction

  // ------------------------------------------------------------ round constants
  // Placeholder constant k of family `dom`: ((t^5) + 0x9e37...) mod p with
  // t = dom*2^16 + k + 1, evaluated at elaboration time.
  function automatic fe_t gen_const(int unsigned dom, int unsigned k);
    logic [511:0] t, acc;
    t   = (512'(dom) << 16) + 512'(k) + 512'd1;
    acc = t;
    for (int i = 0; i < 4; i++) acc = (acc * t) % {258'd0, P};
    acc = (acc + 512'h9e3779b97f4a7c15f39cc0605cedc8341082276bf3a27251f86c6a11d0c18e95) % {258'd0, P};
    return acc[FW-1:0];
  endfunction

  localparam int unsigned RP_NCONST = 2 * ROUNDS * STATE;       // 84
  localparam int unsigned GR_NCONST = (ROUNDS - 1) * STATE;     // 39
  localparam int unsigned RC_NCONC  = 8;                        // Concrete layers
  localparam int unsigned RC_NCONST = RC_NCONC * STATE;         // 24

  typedef fe_t rp_const_t [RP_NCONST];
  typedef fe_t gr_const_t [GR_NCONST];
  typedef fe_t rc_const_t [RC_NCONST];

  function automatic rp_const_t gen_rp_consts();
    rp_const_t c;
    for (int i = 0; i < RP_NCONST; i++) c[i] = gen_const(1, i);
    return c;
  endfunction
  function automatic gr_const_t gen_gr_consts();
    gr_const_t c;
    for (int i = 0; i < GR_NCONST; i++) c[i] = gen_const(2, i);
    return c;
  endfunction
  function automatic rc_const_t gen_rc_consts();
    rc_const_t c;
    for (int i = 0; i < RC_NCONST; i++) c[i] = gen_const(3, i);
    return c;
  endfunction

  localparam rp_const_t RP_C = gen_rp_consts();
  localparam gr_const_t GR_C = gen_gr_consts();
  localparam rc_const_t RC_C = gen_rc_consts();

  // Griffin quadratic G(x2, y0, y1) = x2 * (L^2 + GR_ALPHA*L + GR_BETA), L = y0 + y1
  localparam fe_t GR_ALPHA = 254'd3;
  localparam fe_t GR_BETA  = 254'd5;

  // Reinforced Concrete Bricks coefficients
  localparam fe_t RC_ALPHA1 = 254'd1;
  localparam fe_t RC_BETA1  = 254'd3;
  localparam fe_t RC_ALPHA2 = 254'd2;
  localparam fe_t RC_BETA2  = 254'd4;

  // ------------------------------------------------------ Bars decomposition
  localparam int unsigned RC_N  = 27;     // chunks per element
  localparam int unsigned RC_V  = 659;    // S-box acts on chunks below v
  localparam int unsigned CW    = 10;     // chunk width
  localparam int unsigned DIV_K = 508;    // reciprocal scale D = 2^508
  typedef logic [CW-1:0] chunk_t;
  typedef int unsigned rc_s_t [RC_N];
  // x = sum_i z_i * prod_{j>i} s_j (mixed radix, z_0 most significant)
  localparam rc_s_t RC_S = '{693, 696, 694, 668, 679, 695, 691, 693, 700, 688, 700, 694, 701, 694,
                             699, 701, 701, 701, 695, 698, 697, 703, 702, 691, 688, 703, 679};

  // reciprocal ceil(2^508 / s), 499 bits for s < 1024
  localparam int unsigned RW = DIV_K - 9;
  typedef logic [RW-1:0] recip_t;
  typedef recip_t recip_tab_t [RC_N];
  function automatic recip_tab_t gen_recips();
    recip_tab_t r;
    logic [DIV_K:0] one, q;
    one = (DIV_K+1)'(1) << DIV_K;
    for (int i = 0; i < RC_N; i++) begin
      q = (one + (DIV_K+1)'(RC_S[i] - 1)) / (DIV_K+1)'(RC_S[i]);
      r[i] = q[RW-1:0];
    end
    return r;
  endfunction
  localparam recip_tab_t RC_RECIP = gen_recips();

  // Chunk S-box: inverse in F_v (0 -> 0) below v, identity from v upwards.
  typedef chunk_t sbox_tab_t [1 << CW];
  function automatic sbox_tab_t gen_sbox();
    sbox_tab_t t;
    int unsigned acc, base;
    for (int x = 0; x < (1 << CW); x++) begin
      if (x < RC_V) begin
        // x^(v-2) mod v by square-and-multiply
        acc  = 1;
        base = x;
        for (int e = 0; e < CW; e++) begin
          if ((((RC_V - 2) >> e) & 1) != 0) acc = (acc * base) % RC_V;
          base = (base * base) % RC_V;
        end
        t[x] = CW'(acc);
      end else begin
        t[x] = CW'(x);
      end
    end
    return t;
  endfunction
  localparam sbox_tab_t RC_SBOX = gen_sbox();

endpackage
