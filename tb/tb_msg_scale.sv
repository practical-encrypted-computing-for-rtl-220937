// tb_msg_scale: for random m in [0, t) and the edge values 0, (t-1)/2,
// (t+1)/2 and t-1, rebuilds the scaled value Y from its two residues by the
// Chinese remainder theorem and checks that Y is within t of round(q*m'/t)
// mod q, where m' = m for m < (t+1)/2 and m - t otherwise (the signed value
// the coefficient stands for). Latency must be 4 cycles.
module tb_msg_scale;
  import choco_pkg::*;
  logic  clk = 0, rst_n = 0, in_valid = 0, out_valid;
  word_t m, y [KD];
  int checks = 0, failures = 0, cyc = 0;
  word_t m_q [$];
  int    t_in [$];
  logic [255:0] q, c0, c1;

  msg_scale dut (.*);
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
    word_t mm;
    logic [255:0] yy, z, d;
    t0 = t_in.pop_front();
    mm = m_q.pop_front();
    checks++;
    if (cyc - t0 != LAT_SCALE) begin failures++; $display("latency %0d", cyc - t0); end
    yy = (256'(y[0]) * c0 + 256'(y[1]) * c1) % q;
    if (mm < (T + 1) / 2) z = (q * 256'(mm) + 256'(T / 2)) / 256'(T);
    else                  z = q - (q * 256'(T - mm) + 256'(T / 2)) / 256'(T);
    d = (yy >= z) ? yy - z : z - yy;
    if (d > q / 2) d = q - d;
    checks++;
    if (d > 256'(T)) begin failures++; $display("m=%0d: Y off by %0d", mm, d); end
  end

  initial begin
    q  = 256'(QMOD[0]) * 256'(QMOD[1]);
    c0 = 256'(QMOD[1]) * 256'(invmod(QMOD[1] % QMOD[0], QMOD[0]));
    c1 = 256'(QMOD[0]) * 256'(invmod(QMOD[0] % QMOD[1], QMOD[1]));
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      m = {$urandom, $urandom} % T;
      case (n)
        0: m = 0;
        1: m = (T - 1) / 2;
        2: m = (T + 1) / 2;
        3: m = T - 1;
        default: ;
      endcase
      in_valid = ($urandom % 4) != 0;
      if (in_valid) begin m_q.push_back(m); t_in.push_back(cyc); end
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (t_in.size() != 0) begin failures++; $display("%0d outputs missing", t_in.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
