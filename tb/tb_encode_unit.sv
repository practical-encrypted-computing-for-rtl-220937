// tb_encode_unit: checks that the encoding is a batching (slot-wise) encoding
// with the SEAL slot order, for N = 64:
//   * decode(encode(v)) = v mod t (input values include some >= t);
//   * slot-wise product: the negacyclic product mod t of two encoded
//     polynomials (schoolbook, computed here) decodes to a_i*b_i mod t;
//   * slot order: substituting x -> x^3 in an encoded polynomial must rotate
//     each of the two rows of N/2 slots left by one.
module tb_encode_unit;
  import choco_pkg::*;
  localparam int N = 64, LOGN = 6, H = N / 2;
  logic clk = 0, rst_n = 0, ready, busy, done, start = 0, inverse = 0, seq_restart = 0;
  logic enc_valid = 0, we = 0, slot_rd = 0;
  word_t enc_value = 0, wdata = 0, rdata;
  logic [LOGN-1:0] waddr = 0, raddr = 0;
  int checks = 0, failures = 0;

  encode_unit #(.N(N), .PE(2)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit inv);
    @(negedge clk); start = 1; inverse = inv;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  task automatic encode(input word_t v [N], output word_t p [N]);
    @(negedge clk); seq_restart = 1;
    @(negedge clk); seq_restart = 0;
    for (int i = 0; i < N; i++) begin
      enc_valid = 1; enc_value = v[i];
      @(negedge clk);
    end
    enc_valid = 0;
    run(1);
    for (int i = 0; i < N; i++) begin
      raddr = LOGN'(i);
      @(negedge clk);
      p[i] = rdata;
    end
  endtask

  task automatic decode(input word_t p [N], output word_t v [N]);
    for (int i = 0; i < N; i++) begin
      we = 1; waddr = LOGN'(i); wdata = p[i];
      @(negedge clk);
    end
    we = 0;
    run(0);
    seq_restart = 1;
    @(negedge clk); seq_restart = 0;
    for (int i = 0; i < N; i++) begin
      slot_rd = 1;
      @(negedge clk);
      v[i] = rdata;
    end
    slot_rd = 0;
  endtask

  task automatic cmp(input word_t got [N], input word_t e [N], input string what);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (got[i] !== e[i]) begin
        failures++;
        if (failures < 10) $display("%s slot %0d: got %0d expected %0d", what, i, got[i], e[i]);
      end
    end
  endtask

  initial begin
    word_t a [N], b [N], pa [N], pb [N], pc [N], r [N], e [N];
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!ready) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      a[i] = (i % 7 == 0) ? {$urandom, $urandom} : {$urandom, $urandom} % T;
      b[i] = {$urandom, $urandom} % T;
    end
    encode(a, pa);
    decode(pa, r);
    for (int i = 0; i < N; i++) e[i] = a[i] % T;
    cmp(r, e, "round trip");
    // slot-wise product
    encode(b, pb);
    for (int k = 0; k < N; k++) pc[k] = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        word_t p;
        p = mulmod(pa[i], pb[j], T);
        if (i + j < N) pc[i+j] = addmod(pc[i+j], p, T);
        else pc[i+j-N] = submod(pc[i+j-N], p, T);
      end
    decode(pc, r);
    for (int i = 0; i < N; i++) e[i] = mulmod(a[i] % T, b[i], T);
    cmp(r, e, "product");
    // x -> x^3 rotates both rows left by one
    for (int k = 0; k < N; k++) pc[k] = 0;
    for (int i = 0; i < N; i++) begin
      int d;
      d = (3 * i) % (2 * N);
      if (d < N) pc[d] = addmod(pc[d], pb[i], T);
      else pc[d-N] = submod(pc[d-N], pb[i], T);
    end
    decode(pc, r);
    for (int i = 0; i < H; i++) begin
      e[i] = b[(i + 1) % H];
      e[H+i] = b[H + (i + 1) % H];
    end
    cmp(r, e, "rotation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
