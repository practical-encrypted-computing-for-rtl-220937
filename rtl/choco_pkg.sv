// choco_pkg: scheme constants and arithmetic helpers shared by the BFV
// encryption / decryption accelerator.
//
// Scheme: BFV with polynomial degree N = 8192, three RNS coefficient primes of
// 58, 58 and 59 bits (the last one is the "key" or special prime that is
// dropped by modulus switching) and a 23-bit plaintext modulus t, i.e. the
// parameter set used as the main configuration. The bit sizes are the paper's;
// the actual primes are this design's choice: for each size the largest primes
// below 2^bits that are congruent to 1 mod 2*8192, which makes every prime
// usable for a negacyclic NTT of any power-of-two length up to 8192.
// gamma is the auxiliary 61-bit prime of the decryption base conversion,
// chosen the same way.
//
// Everything derived from the primes (N^-1, inverse roots, the scaling factor
// Delta = floor(q/t), base-conversion factors, ...) is computed at elaboration
// time by the constant functions below, so the formulas are visible here and
// changing a prime changes every derived constant consistently.
package choco_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int W      = 64;       // word width of every stored residue
  localparam int K      = 3;        // RNS residues of a fresh encryption
  localparam int KD     = K - 1;    // residues of the output ciphertext
  localparam int N_MAX  = 8192;     // largest supported polynomial degree
  localparam int N_DEF  = 8192;     // default polynomial degree

  typedef logic [W-1:0] word_t;

  // ---------------------------------------------------------------- primes
  // q_i = largest primes < 2^58, 2^58, 2^59 with q_i = 1 mod 16384.
  localparam word_t QMOD [K] = '{64'h03ff_ffff_fff3_4001,
                              64'h03ff_ffff_fff0_c001,
                              64'h07ff_ffff_fffc_c001};
  // primitive 16384-th roots of unity (psi^8192 = -1) for each q_i
  localparam word_t PSI_MAX [K] = '{64'h0334_41d1_d351_d895,
                                    64'h005d_e971_b35e_6f03,
                                    64'h06b2_0dbc_41fb_b831};
  // plaintext modulus: largest 23-bit prime = 1 mod 16384, and its root
  localparam word_t T       = 64'd8273921;
  localparam word_t PSI_T   = 64'h3d_d2da;
  // auxiliary prime of the decryption base conversion (61 bits)
  localparam word_t GAMMA   = 64'h1fff_ffff_fffa_4001;

  // ---------------------------------------------------------------- arithmetic
  function automatic word_t mulmod(word_t a, word_t b, word_t m);
    logic [127:0] p;
    p = 128'(a) * 128'(b);
    return word_t'(p % 128'(m));
  endfunction

  function automatic word_t addmod(word_t a, word_t b, word_t m);
    logic [W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, m}) s = s - {1'b0, m};
    return s[W-1:0];
  endfunction

  function automatic word_t submod(word_t a, word_t b, word_t m);
    return (a >= b) ? (a - b) : (a + m - b);
  endfunction

  function automatic word_t powmod(word_t base, longint unsigned e, word_t m);
    word_t r, b;
    r = 64'd1 % m;
    b = base % m;
    for (int i = 0; i < 64; i++) begin
      if (e[i]) r = mulmod(r, b, m);
      b = mulmod(b, b, m);
    end
    return r;
  endfunction

  // inverse modulo a prime (Fermat)
  function automatic word_t invmod(word_t a, word_t m);
    return powmod(a, m - 64'd2, m);
  endfunction

  // primitive 2n-th root of unity modulo q, from the 16384-th root
  function automatic word_t psi_for(word_t psi_max, word_t q, int n);
    return powmod(psi_max, 64'(N_MAX / n), q);
  endfunction

  function automatic int clog2i(int v);
    int r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

  // ---------------------------------------------------------------- encryption constants
  // q = q_0 * q_1 is the ciphertext modulus after modulus switching.
  localparam logic [127:0] QD = 128'(QMOD[0]) * 128'(QMOD[1]);

  // Delta = floor(q / t) reduced mod each q_i (plain scale)
  function automatic word_t delta_mod(int i);
    return word_t'((QD / 128'(T)) % 128'(QMOD[i]));
  endfunction
  // (q mod t): added to values in the upper (negative) half of Z_t, so that
  // the scaled message is round(q*m/t) for signed m (RNS scale)
  localparam word_t UPPER_INC      = word_t'(QD % 128'(T));
  localparam word_t PLAIN_HALF_THR = (T + 64'd1) >> 1;

  // modulus switching: divide-and-round by the last prime q_2
  localparam word_t QLAST      = QMOD[K-1];
  localparam word_t QLAST_HALF = QLAST >> 1;
  function automatic word_t qlast_half_mod(int i);
    return QLAST_HALF % QMOD[i];
  endfunction
  function automatic word_t inv_qlast_mod(int i);
    return invmod(QLAST % QMOD[i], QMOD[i]);
  endfunction

  // ---------------------------------------------------------------- decryption constants
  // fast base conversion from {q_0, q_1} to {t, gamma}
  function automatic word_t tg_mod(int i);                 // (t*gamma) mod q_i
    return mulmod(T, GAMMA % QMOD[i], QMOD[i]);
  endfunction
  function automatic word_t inv_punct_mod(int i);          // (q/q_i)^-1 mod q_i
    return invmod(QMOD[1-i] % QMOD[i], QMOD[i]);
  endfunction
  function automatic word_t neg_inv_q_mod(word_t m);        // -(q^-1) mod m
    return submod(64'd0, invmod(word_t'(QD % 128'(m)), m), m);
  endfunction
  localparam word_t GAMMA_HALF   = GAMMA >> 1;
  localparam word_t INV_GAMMA_T  = invmod(GAMMA % T, T);

  // ---------------------------------------------------------------- noise sampling
  // Cumulative distribution table of |x| for a discrete Gaussian with
  // sigma = 3.2 clipped to |x| <= 19: CDT[k] = floor(2^63 * P(|x| <= k)),
  // where P(0) ~ 1 and P(j) ~ 2*exp(-j^2 / (2 sigma^2)) for j >= 1, normalised.
  localparam int NORMAL_BOUND = 19;
  localparam logic [62:0] CDT [NORMAL_BOUND] = '{
    63'h0ff5_2b40_a591_7c80, 63'h2e5a_25d4_bf0e_3a00, 63'h489a_e269_55b0_4400,
    63'h5d2b_c20f_621b_e800, 63'h6bc8_694c_3cc8_0800, 63'h7532_d89a_c6ba_7400,
    63'h7ab3_96cb_7443_6000, 63'h7d9e_4e91_6643_e000, 63'h7f05_4958_19eb_1800,
    63'h7fa1_ce9c_0039_a000, 63'h7fdf_b3f2_12e8_c000, 63'h7ff5_e6f9_d231_4c00,
    63'h7ffd_1f97_bc44_0400, 63'h7fff_40fa_0088_cc00, 63'h7fff_d2e8_35e1_bc00,
    63'h7fff_f652_4386_fc00, 63'h7fff_fe1d_b476_9800, 63'h7fff_ffac_0a1d_c800,
    63'h7fff_fff4_2867_3800};

  typedef enum logic {DIST_TERNARY = 1'b0, DIST_NORMAL = 1'b1} dist_e;
  typedef enum logic {OP_ENCRYPT = 1'b0, OP_DECRYPT = 1'b1} op_e;

  // signed small sample (ternary -1..1 or normal -19..19)
  typedef logic signed [5:0] sample_t;

  // ---------------------------------------------------------------- pipeline latencies
  localparam int LAT_MUL     = 3;   // modmul
  localparam int LAT_ADD     = 1;   // poly_add
  localparam int LAT_DYADIC  = LAT_MUL;
  localparam int LAT_MODSW   = 2 + LAT_MUL;
  localparam int LAT_SCALE   = LAT_MUL + 1;
  localparam int LAT_FBC     = 4 * LAT_MUL + 2;
  localparam int LAT_ECORR   = 1 + LAT_MUL;

  // ---------------------------------------------------------------- Blake3
  localparam logic [31:0] B3_IV [8] = '{32'h6A09E667, 32'hBB67AE85, 32'h3C6EF372,
                                        32'hA54FF53A, 32'h510E527F, 32'h9B05688C,
                                        32'h1F83D9AB, 32'h5BE0CD19};
  localparam logic [31:0] B3_CHUNK_START = 32'd1;
  localparam logic [31:0] B3_CHUNK_END   = 32'd2;
  localparam logic [31:0] B3_ROOT        = 32'd8;
  localparam logic [31:0] B3_KEYED_HASH  = 32'd16;

endpackage
