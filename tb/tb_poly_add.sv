// tb_poly_add: random residues (including q_i - 1, so sums wrap) are streamed in with
// gaps; every output must equal a+b mod q_i computed with 128-bit integer
// arithmetic here, and must arrive exactly 1 cycle after its input.
module tb_poly_add;
  import choco_pkg::*;
  logic  clk = 0, rst_n = 0, in_valid = 0, out_valid;
  word_t a [K], b [K], y [K];
  int checks = 0, failures = 0;
  word_t exp_q [$];
  int    t_in [$];
  int    cyc = 0;

  poly_add dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() < K || t_in.size() == 0) begin
      failures++; $display("unexpected output");
    end else begin
      int t0;
      t0 = t_in.pop_front();
      if (cyc - t0 != LAT_ADD) begin failures++; $display("latency %0d", cyc - t0); end
      for (int i = 0; i < K; i++) begin
        word_t e;
        e = exp_q.pop_front();
        checks++;
        if (y[i] !== e) begin failures++; $display("res %0d got %h expected %h", i, y[i], e); end
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      in_valid = ($urandom % 3) != 0;
      for (int i = 0; i < K; i++) begin
        a[i] = (n < 5) ? QMOD[i] - 1 : {$urandom, $urandom} % QMOD[i];
        b[i] = {$urandom, $urandom} % QMOD[i];
      end
      if (in_valid) begin
        for (int i = 0; i < K; i++) begin
          logic [127:0] p;
          p = 128'(a[i]) + 128'(b[i]);
          exp_q.push_back(word_t'(p % 128'(QMOD[i])));
        end
        t_in.push_back(cyc);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d outputs missing", exp_q.size() / K); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
