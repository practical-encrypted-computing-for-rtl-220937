// tb_ntt_unit: checks the NTT unit against direct evaluation.
//
// For N = 64, PE = 4 and the 59-bit prime:
//   * forward: output word j must equal a(psi^(2*bitrev(j)+1)), evaluated
//     directly by Horner's rule;
//   * inverse of the forward result must return the input;
//   * product: INTT(NTT(a) .* NTT(b)) must equal the negacyclic convolution
//     a*b mod (x^N + 1), computed by schoolbook multiplication;
//   * cycle counts: forward log2(N)*(N/(2*PE)+4)+1, inverse with one more
//     pass, counted from the start cycle to the done pulse.
module tb_ntt_unit;
  import choco_pkg::*;
  localparam int    N   = 64;
  localparam int    PE  = 4;
  localparam int    LOGN = 6;
  localparam word_t QQ  = QMOD[2];
  localparam word_t PS  = psi_for(PSI_MAX[2], QMOD[2], N);

  logic clk = 0, rst_n = 0, ready, start = 0, inverse = 0, busy, done, we = 0;
  logic [LOGN-1:0] waddr = 0, raddr = 0;
  word_t wdata = 0, rdata;
  int checks = 0, failures = 0;

  ntt_unit #(.N(N), .PE(PE), .Q(QQ), .PSI(PS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int brev(int v);
    int r = 0;
    for (int i = 0; i < LOGN; i++) if (v & (1 << i)) r |= 1 << (LOGN - 1 - i);
    return r;
  endfunction

  task automatic load(input word_t v [N]);
    for (int i = 0; i < N; i++) begin
      @(negedge clk); we = 1; waddr = LOGN'(i); wdata = v[i];
    end
    @(negedge clk); we = 0;
  endtask

  task automatic unload(output word_t v [N]);
    for (int i = 0; i < N; i++) begin
      @(negedge clk); raddr = LOGN'(i);
      @(negedge clk); v[i] = rdata;
    end
  endtask

  task automatic run(input bit inv, output int cyc);
    @(negedge clk); start = 1; inverse = inv;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  task automatic cmp(input word_t got [N], input word_t exp_v [N], input string what);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (got[i] !== exp_v[i]) begin
        failures++;
        if (failures < 10) $display("%s [%0d]: got %h expected %h", what, i, got[i], exp_v[i]);
      end
    end
  endtask

  initial begin
    word_t a [N], b [N], fa [N], fb [N], r [N], e [N], prod [N];
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!ready) @(negedge clk);
    for (int trial = 0; trial < 3; trial++) begin
      for (int i = 0; i < N; i++) begin
        a[i] = {$urandom, $urandom} % QQ;
        b[i] = (trial == 0) ? word_t'(i < 3) : {$urandom, $urandom} % QQ;
      end
      // forward NTT of a against direct evaluation
      load(a);
      run(0, cyc);
      checks++;
      if (cyc != LOGN * (N / (2 * PE) + 4) + 1) begin
        failures++; $display("forward took %0d cycles", cyc);
      end
      unload(fa);
      for (int j = 0; j < N; j++) begin
        word_t x, acc;
        x = powmod(PS, 64'(2 * brev(j) + 1), QQ);
        acc = 0;
        for (int i = N - 1; i >= 0; i--) acc = addmod(mulmod(acc, x, QQ), a[i], QQ);
        e[j] = acc;
      end
      cmp(fa, e, "forward");
      // inverse returns the input
      run(1, cyc);
      checks++;
      if (cyc != (LOGN + 1) * (N / (2 * PE) + 4) + 1) begin
        failures++; $display("inverse took %0d cycles", cyc);
      end
      unload(r);
      cmp(r, a, "inverse");
      // negacyclic product
      load(b); run(0, cyc); unload(fb);
      for (int i = 0; i < N; i++) prod[i] = mulmod(fa[i], fb[i], QQ);
      load(prod); run(1, cyc); unload(r);
      for (int k = 0; k < N; k++) e[k] = 0;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          word_t p;
          p = mulmod(a[i], b[j], QQ);
          if (i + j < N) e[i+j] = addmod(e[i+j], p, QQ);
          else e[i+j-N] = submod(e[i+j-N], p, QQ);
        end
      cmp(r, e, "product");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
