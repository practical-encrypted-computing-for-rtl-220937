// tb_fast_base_conv: for random x < q = q_0*q_1 (and edge values) checks the
// defining property of the fast base conversion: with F = floor(t*gamma*x/q)
// (computed here with 256-bit integers) the outputs must be
// y_t = F - a mod t and y_gamma = F - a mod gamma for the same a in {0, 1}
// (a is the overflow of the approximate conversion). Latency: 14 cycles.
module tb_fast_base_conv;
  import choco_pkg::*;
  logic  clk = 0, rst_n = 0, in_valid = 0, out_valid;
  word_t x [KD], y_t, y_g;
  int checks = 0, failures = 0, cyc = 0, n_a1 = 0;
  logic [255:0] f_q [$];
  int    t_in [$];

  fast_base_conv dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    int t0;
    logic [255:0] f;
    bit ok0, ok1;
    t0 = t_in.pop_front();
    f = f_q.pop_front();
    checks++;
    if (cyc - t0 != LAT_FBC) begin failures++; $display("latency %0d", cyc - t0); end
    ok0 = (256'(y_t) == f % 256'(T)) && (256'(y_g) == f % 256'(GAMMA));
    ok1 = (256'(y_t) == (f + 256'(T) - 1) % 256'(T)) &&
          (256'(y_g) == (f + 256'(GAMMA) - 1) % 256'(GAMMA));
    if (ok1 && !ok0) n_a1++;
    checks++;
    if (!(ok0 || ok1)) begin failures++; $display("F=%h: got y_t=%h y_g=%h", f, y_t, y_g); end
  end

  initial begin
    logic [255:0] q, xv;
    q = 256'(QMOD[0]) * 256'(QMOD[1]);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      xv = {$urandom, $urandom, $urandom, $urandom};
      xv = xv % q;
      if (n == 0) xv = 0;
      if (n == 1) xv = q - 1;
      for (int i = 0; i < KD; i++) x[i] = word_t'(xv % 256'(QMOD[i]));
      in_valid = ($urandom % 4) != 0;
      if (in_valid) begin
        f_q.push_back((256'(T) * 256'(GAMMA) * xv) / q);
        t_in.push_back(cyc);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (t_in.size() != 0) begin failures++; $display("%0d outputs missing", t_in.size()); end
    $display("overflow a=1 seen %0d times", n_a1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
