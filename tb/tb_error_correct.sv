// tb_error_correct: builds decryption inputs x = round(q*m/t) + e mod q for
// random plaintext m and noise |e| < 2^60 (q/t is about 2^93), forms the
// fast-base-conversion image y_j = floor(t*gamma*x/q) - a mod m_j with a
// random overflow a in {0, 1}, and checks that the block returns m, i.e.
// round(t*x/q) mod t, 4 cycles later.
module tb_error_correct;
  import choco_pkg::*;
  logic  clk = 0, rst_n = 0, in_valid = 0, out_valid;
  word_t y_t, y_g, m;
  int checks = 0, failures = 0, cyc = 0;
  word_t m_q [$];
  int    t_in [$];

  error_correct dut (.*);
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
    t0 = t_in.pop_front();
    e = m_q.pop_front();
    checks++;
    if (cyc - t0 != LAT_ECORR) begin failures++; $display("latency %0d", cyc - t0); end
    checks++;
    if (m !== e) begin failures++; $display("got %0d expected %0d", m, e); end
  end

  initial begin
    logic [255:0] q, xv, f, noise;
    word_t mv;
    q = 256'(QMOD[0]) * 256'(QMOD[1]);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      mv = {$urandom, $urandom} % T;
      if (n == 0) mv = 0;
      if (n == 1) mv = T - 1;
      noise = 256'({$urandom, $urandom} >> 4);
      xv = (q * 256'(mv) + 256'(T / 2)) / 256'(T);
      if ($urandom % 2) xv = (xv + noise) % q;
      else              xv = (xv + q - noise) % q;
      f = (256'(T) * 256'(GAMMA) * xv) / q;
      if ($urandom % 2) f = f + (256'(T) * 256'(GAMMA)) - 1;   // a = 1
      y_t = word_t'(f % 256'(T));
      y_g = word_t'(f % 256'(GAMMA));
      in_valid = ($urandom % 4) != 0;
      if (in_valid) begin m_q.push_back(mv); t_in.push_back(cyc); end
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (t_in.size() != 0) begin failures++; $display("%0d outputs missing", t_in.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
