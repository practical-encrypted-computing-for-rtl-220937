// tb_mod_switch: picks random integers X below q_0*q_1*q_2 (plus edge values),
// feeds their three residues, and checks that the two outputs are the
// residues of round(X / q_2) = floor((X + floor(q_2/2)) / q_2), computed here
// with 256-bit integers, and arrive 5 cycles after the input.
module tb_mod_switch;
  import choco_pkg::*;
  logic  clk = 0, rst_n = 0, in_valid = 0, out_valid;
  word_t c [K], y [KD];
  int checks = 0, failures = 0, cyc = 0;
  word_t exp_q [$];
  int    t_in [$];

  mod_switch dut (.*);
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
    word_t e;
    checks++;
    t0 = t_in.pop_front();
    if (cyc - t0 != LAT_MODSW) begin failures++; $display("latency %0d", cyc - t0); end
    for (int i = 0; i < KD; i++) begin
      e = exp_q.pop_front();
      checks++;
      if (y[i] !== e) begin failures++; $display("res %0d got %h expected %h", i, y[i], e); end
    end
  end

  initial begin
    logic [255:0] qall, x, r;
    qall = 256'(QMOD[0]) * 256'(QMOD[1]) * 256'(QMOD[2]);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      x = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      x = x % qall;
      if (n == 0) x = 0;
      if (n == 1) x = qall - 1;
      if (n == 2) x = 256'(QMOD[2] >> 1);
      if (n == 3) x = 256'(QMOD[2] >> 1) + 1;
      for (int i = 0; i < K; i++) c[i] = word_t'(x % 256'(QMOD[i]));
      r = (x + 256'(QMOD[2] >> 1)) / 256'(QMOD[2]);
      in_valid = ($urandom % 4) != 0;
      if (in_valid) begin
        for (int i = 0; i < KD; i++) exp_q.push_back(word_t'(r % 256'(QMOD[i])));
        t_in.push_back(cyc);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (t_in.size() != 0) begin failures++; $display("%0d outputs missing", t_in.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
