// Shared body of the end-to-end testbenches of choco_taco. The including
// module defines the localparams N and PE and instantiates the top as `dut`
// with the signals declared here; everything else is in this file.
//
// Host model:
//   * keys: ternary secret s, random a in NTT form, small error e;
//     public key P1 = a_hat, P0 = -(a_hat*s_hat + e_hat), all per prime, with
//     s_hat and e_hat from a software negacyclic NTT (same ordering as the
//     hardware, checked against direct evaluation when N is small);
//   * input stream driver with optional random gaps, output collector with
//     optional random back-pressure.
// Tests:
//   A  encrypt random slots with gaps and back-pressure, decrypt the result
//      with the accelerator, the slots must come back;
//   B  the same without gaps, checking the length of every phase against the
//      transform and pipeline formulas;
//   C  decrypt a ciphertext built here (c1 random, c0 = Delta*p + e - c1*s)
//      whose plaintext p has four non-zero coefficients, and compare the
//      decoded slots with direct evaluation of p at the slot roots mod t.
// Mechanism counters (encryptions, decryptions, input stalls, RNG stalls,
// output back-pressure, modulus switches, base conversions) must all be
// non-zero at the end.

  localparam int LOGN = $clog2(N);
  localparam int G    = N / (2 * PE);
  localparam int FWD_CYC = LOGN * (G + 4) + 1;
  localparam int INV_CYC = (LOGN + 1) * (G + 4) + 1;

  logic        clk = 0, rst_n = 0;
  logic [31:0] rng_key [8];
  logic        cmd_valid = 0, cmd_ready;
  op_e         cmd_op = OP_ENCRYPT;
  logic        in_valid = 0, in_ready;
  word_t       in_data [K];
  logic        out_valid, out_ready = 0;
  word_t       out_data [KD];
  logic        op_done, stall_input, stall_rng, stall_output;

  int checks = 0, failures = 0;
  int n_enc = 0, n_dec = 0, n_stall_in = 0, n_stall_rng = 0, n_stall_out = 0;
  int n_modsw = 0, n_fbc = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (stall_input)  n_stall_in++;
    if (stall_rng)    n_stall_rng++;
    if (stall_output) n_stall_out++;
    if (dut.ms_valid) n_modsw++;
    if (dut.fb_valid) n_fbc++;
  end

  // ------------------------------------------------------------ phase timing
  int phase_cyc [string];
  always @(posedge clk) begin
    string nm;
    nm = dut.state.name();
    if (phase_cyc.exists(nm)) phase_cyc[nm]++;
    else phase_cyc[nm] = 1;
  end
  task automatic clear_phases();
    phase_cyc.delete();
  endtask

  // ------------------------------------------------------------ software NTT
  word_t tw [K][N], twi [K][N];

  function automatic int brev(int v);
    int r;
    r = 0;
    for (int i = 0; i < LOGN; i++) if (v & (1 << i)) r |= 1 << (LOGN - 1 - i);
    return r;
  endfunction

  task automatic init_tw();
    for (int r = 0; r < K; r++) begin
      word_t ps, psi_inv;
      ps = psi_for(PSI_MAX[r], QMOD[r], N);
      psi_inv = powmod(ps, 64'(2 * N - 1), QMOD[r]);
      for (int k = 0; k < N; k++) begin
        tw[r][k]  = powmod(ps, 64'(brev(k)), QMOD[r]);
        twi[r][k] = powmod(psi_inv, 64'(brev(k)), QMOD[r]);
      end
    end
  endtask

  // natural order in, bit-reversed order out
  task automatic sw_ntt(input int r, inout word_t a [N]);
    word_t q;
    int t;
    q = QMOD[r];
    t = N / 2;
    for (int m = 1; m < N; m = m * 2) begin
      for (int i = 0; i < m; i++) begin
        word_t w;
        int j1;
        w = tw[r][m + i];
        j1 = 2 * i * t;
        for (int j = j1; j < j1 + t; j++) begin
          word_t u, v;
          u = a[j];
          v = mulmod(a[j + t], w, q);
          a[j] = addmod(u, v, q);
          a[j + t] = submod(u, v, q);
        end
      end
      t = t / 2;
    end
  endtask

  // bit-reversed order in, natural order out
  task automatic sw_intt(input int r, inout word_t a [N]);
    word_t q, ninv;
    int t;
    q = QMOD[r];
    t = 1;
    for (int m = N / 2; m >= 1; m = m / 2) begin
      for (int i = 0; i < m; i++) begin
        word_t w;
        int j1;
        w = twi[r][m + i];
        j1 = 2 * i * t;
        for (int j = j1; j < j1 + t; j++) begin
          word_t u, v;
          u = a[j];
          v = a[j + t];
          a[j] = addmod(u, v, q);
          a[j + t] = mulmod(submod(u, v, q), w, q);
        end
      end
      t = t * 2;
    end
    ninv = invmod(word_t'(N), q);
    for (int j = 0; j < N; j++) a[j] = mulmod(a[j], ninv, q);
  endtask

  function automatic word_t signed_mod(int v, word_t q);
    return (v < 0) ? q - word_t'(-v) : word_t'(v);
  endfunction

  // ------------------------------------------------------------ keys
  int    s_coef [N];
  word_t s_hat [K][N], p0 [K][N], p1 [K][N];

  task automatic keygen();
    int e_coef [N];
    for (int i = 0; i < N; i++) begin
      s_coef[i] = int'($urandom % 3) - 1;
      e_coef[i] = int'($urandom % 7) - 3;
    end
    for (int r = 0; r < K; r++) begin
      word_t v [N], e [N];
      for (int i = 0; i < N; i++) begin
        v[i] = signed_mod(s_coef[i], QMOD[r]);
        e[i] = signed_mod(e_coef[i], QMOD[r]);
      end
      sw_ntt(r, v);
      sw_ntt(r, e);
      for (int j = 0; j < N; j++) begin
        s_hat[r][j] = v[j];
        p1[r][j] = {$urandom, $urandom} % QMOD[r];
        p0[r][j] = submod(0, addmod(mulmod(p1[r][j], v[j], QMOD[r]), e[j], QMOD[r]), QMOD[r]);
      end
    end
  endtask

  // software NTT against direct evaluation (only when cheap)
  task automatic check_sw_ntt();
    word_t v [N];
    for (int i = 0; i < N; i++) v[i] = signed_mod(s_coef[i], QMOD[0]);
    sw_ntt(0, v);
    for (int j = 0; j < N; j++) begin
      word_t x, acc, ps;
      ps = psi_for(PSI_MAX[0], QMOD[0], N);
      x = powmod(ps, 64'(2 * brev(j) + 1), QMOD[0]);
      acc = 0;
      for (int i = N - 1; i >= 0; i--) acc = addmod(mulmod(acc, x, QMOD[0]), signed_mod(s_coef[i], QMOD[0]), QMOD[0]);
      checks++;
      if (v[j] !== acc) begin
        failures++;
        if (failures < 10) $display("software NTT [%0d] mismatch", j);
      end
    end
  endtask

  // ------------------------------------------------------------ host streams
  word_t inq [K][$];
  word_t outq [KD][$];
  bit    gaps = 0, backpressure = 0;

  task automatic push_beat(input word_t w0, input word_t w1, input word_t w2);
    inq[0].push_back(w0);
    inq[1].push_back(w1);
    inq[2].push_back(w2);
  endtask

  initial begin
    for (int r = 0; r < K; r++) in_data[r] = '0;
    forever begin
      bit fire;
      @(negedge clk);
      if (inq[0].size() > 0 && (!gaps || ($urandom % 4) != 0)) begin
        in_valid = 1;
        for (int r = 0; r < K; r++) in_data[r] = inq[r][0];
      end else begin
        in_valid = 0;
      end
      #2;
      fire = in_valid && in_ready;
      @(posedge clk);
      if (fire) for (int r = 0; r < K; r++) void'(inq[r].pop_front());
    end
  end

  initial begin
    forever begin
      bit fire;
      @(negedge clk);
      out_ready = !backpressure || (($urandom % 3) != 0);
      #2;
      fire = out_valid && out_ready;
      @(posedge clk);
      if (fire) for (int r = 0; r < KD; r++) outq[r].push_back(out_data[r]);
    end
  end

  task automatic command(input op_e op, output int cyc);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_op = op;
    @(negedge clk);
    cmd_valid = 0;
    cyc = 1;
    while (!op_done) begin @(negedge clk); cyc++; end
    if (op == OP_ENCRYPT) n_enc++; else n_dec++;
  endtask

  // ------------------------------------------------------------ operations
  task automatic encrypt(input word_t msg [N], output word_t c0 [KD][N],
                         output word_t c1 [KD][N], output int cyc);
    for (int i = 0; i < N; i++) push_beat(msg[i], 0, 0);
    for (int j = 0; j < N; j++) push_beat(p1[0][j], p1[1][j], p1[2][j]);
    for (int j = 0; j < N; j++) push_beat(p0[0][j], p0[1][j], p0[2][j]);
    command(OP_ENCRYPT, cyc);
    checks++;
    if (outq[0].size() != 2 * N) begin
      failures++;
      $display("encryption returned %0d beats", outq[0].size());
    end
    for (int i = 0; i < N; i++)
      for (int r = 0; r < KD; r++) begin
        c1[r][i] = (outq[r].size() > 0) ? outq[r].pop_front() : 0;
      end
    for (int i = 0; i < N; i++)
      for (int r = 0; r < KD; r++) begin
        c0[r][i] = (outq[r].size() > 0) ? outq[r].pop_front() : 0;
      end
    for (int i = 0; i < N; i++)
      for (int r = 0; r < KD; r++) begin
        checks++;
        if (c0[r][i] >= QMOD[r] || c1[r][i] >= QMOD[r]) begin
          failures++;
          if (failures < 10) $display("ciphertext word out of range");
        end
      end
  endtask

  task automatic decrypt(input word_t c0 [KD][N], input word_t c1 [KD][N],
                         output word_t slots [N], output int cyc);
    for (int i = 0; i < N; i++) push_beat(c1[0][i], c1[1][i], 0);
    for (int j = 0; j < N; j++) push_beat(s_hat[0][j], s_hat[1][j], s_hat[2][j]);
    for (int i = 0; i < N; i++) push_beat(c0[0][i], c0[1][i], 0);
    command(OP_DECRYPT, cyc);
    checks++;
    if (outq[0].size() != N) begin
      failures++;
      $display("decryption returned %0d beats", outq[0].size());
    end
    for (int i = 0; i < N; i++) begin
      slots[i] = (outq[0].size() > 0) ? outq[0].pop_front() : 0;
      if (outq[1].size() > 0) void'(outq[1].pop_front());
    end
  endtask

  task automatic cmp_slots(input word_t got [N], input word_t exp_v [N], input string what);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (got[i] !== exp_v[i]) begin
        failures++;
        if (failures < 10) $display("%s slot %0d: got %0d expected %0d", what, i, got[i], exp_v[i]);
      end
    end
  endtask

  task automatic check_phase(input string st, input int expected);
    int got;
    got = phase_cyc.exists(st) ? phase_cyc[st] : 0;
    checks++;
    if (got != expected) begin
      failures++;
      $display("phase %s took %0d cycles, expected %0d", st, got, expected);
    end
  endtask

  // ------------------------------------------------------------ main
  initial begin
    word_t msg [N], slots [N], c0 [KD][N], c1 [KD][N];
    int cyc;
    for (int i = 0; i < 8; i++) rng_key[i] = $urandom;
    init_tw();
    keygen();
    if (N <= 256) check_sw_ntt();
    repeat (3) @(negedge clk);
    rst_n = 1;

    // A: encryption and decryption with gaps and back-pressure
    gaps = 1; backpressure = 1;
    for (int i = 0; i < N; i++) msg[i] = {$urandom, $urandom} % T;
    encrypt(msg, c0, c1, cyc);
    decrypt(c0, c1, slots, cyc);
    cmp_slots(slots, msg, "round trip (stalls)");

    // B: no gaps, phase lengths
    gaps = 0; backpressure = 0;
    for (int i = 0; i < N; i++) msg[i] = {$urandom, $urandom} % T;
    clear_phases();
    encrypt(msg, c0, c1, cyc);
    // the encoding INTT is the longer of the two parallel transforms
    check_phase("E_NTT", INV_CYC + 1);
    check_phase("E_INTT1", INV_CYC + 1);
    check_phase("E_INTT0", INV_CYC + 1);
    check_phase("E_P1", N + 1 + LAT_DYADIC);
    check_phase("E_P0", N + 1 + LAT_DYADIC);
    clear_phases();
    decrypt(c0, c1, slots, cyc);
    cmp_slots(slots, msg, "round trip");
    check_phase("D_C1", N + 1);
    check_phase("D_NTT", FWD_CYC + 1);
    check_phase("D_S", N + 1 + LAT_DYADIC);
    check_phase("D_INTT", INV_CYC + 1);
    check_phase("D_C0", N + 1 + LAT_ADD + LAT_FBC + LAT_ECORR);
    check_phase("D_DEC", FWD_CYC + 1);
    check_phase("D_OUT", N + 1);

    // C: decryption of a ciphertext made here
    begin
      int    pidx [4], e_coef [N];
      longint unsigned a_coef [N];
      word_t pval [4], pe [N];
      word_t psi_t;
      for (int k = 0; k < 4; k++) begin
        pidx[k] = int'($urandom % N);
        pval[k] = {$urandom, $urandom} % T;
      end
      for (int i = 0; i < N; i++) begin
        pe[i] = 0;
        e_coef[i] = int'($urandom % 41) - 20;
        a_coef[i] = {$urandom, $urandom};
      end
      for (int k = 0; k < 4; k++) pe[pidx[k]] = addmod(pe[pidx[k]], pval[k], T);
      for (int r = 0; r < KD; r++) begin
        word_t a [N], as [N];
        for (int i = 0; i < N; i++) a[i] = word_t'(a_coef[i] % longint'(QMOD[r]));
        as = a;
        sw_ntt(r, as);
        for (int j = 0; j < N; j++) as[j] = mulmod(as[j], s_hat[r][j], QMOD[r]);
        sw_intt(r, as);
        for (int i = 0; i < N; i++) begin
          word_t e;
          e = signed_mod(e_coef[i], QMOD[r]);
          c1[r][i] = a[i];
          c0[r][i] = submod(addmod(mulmod(delta_mod(r), pe[i], QMOD[r]), e, QMOD[r]), as[i], QMOD[r]);
        end
      end
      // slot i is p evaluated at psi_t^g, g = 3^i (first row) or -3^i (second row)
      psi_t = psi_for(PSI_T, T, N);
      for (int i = 0; i < N; i++) begin
        longint unsigned g;
        word_t x, acc;
        g = 1;
        for (int k = 0; k < i % (N / 2); k++) g = (g * 3) % longint'(2 * N);
        if (i >= N / 2) g = longint'(2 * N) - g;
        x = powmod(psi_t, g, T);
        acc = 0;
        for (int k = 0; k < N; k++)
          if (pe[k] != 0) acc = addmod(acc, mulmod(pe[k], powmod(x, 64'(k), T), T), T);
        msg[i] = acc;
      end
      gaps = 1;
      decrypt(c0, c1, slots, cyc);
      cmp_slots(slots, msg, "decryption of a built ciphertext");
    end

    // every mechanism must have been exercised
    checks++; if (n_enc == 0)       begin failures++; $display("no encryption"); end
    checks++; if (n_dec == 0)       begin failures++; $display("no decryption"); end
    checks++; if (n_stall_in == 0)  begin failures++; $display("no input stall"); end
    checks++; if (n_stall_rng == 0) begin failures++; $display("no RNG stall"); end
    checks++; if (n_stall_out == 0) begin failures++; $display("no output back-pressure"); end
    checks++; if (n_modsw == 0)     begin failures++; $display("no modulus switch"); end
    checks++; if (n_fbc == 0)       begin failures++; $display("no base conversion"); end
    $display("encryptions=%0d decryptions=%0d input_stalls=%0d rng_stalls=%0d output_stalls=%0d mod_switches=%0d base_conversions=%0d",
             n_enc, n_dec, n_stall_in, n_stall_rng, n_stall_out, n_modsw, n_fbc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
