// tb_rng_module: draws 6000 ternary and 6000 normal samples from the complete
// random number generator and checks
//   * every residue equals the sample reduced mod q_i,
//   * ternary values are in {-1,0,1} with each frequency within 1/3 +- 0.03,
//   * normal values are within +-19, with mean within +-0.15 and variance
//     within 10.24 +- 1.0 (sigma = 3.2),
//   * the sustained rate: 6000 ternary samples take at most 6000*1.1 + 20
//     cycles, 6000 normal samples at most 6000*1.25 + 20 cycles (one 8-cycle
//     hash yields 8 normal samples, plus one cycle to refill the buffer),
//   * two different keys give different streams.
module tb_rng_module;
  import choco_pkg::*;
  logic        clk = 0, rst_n = 0, valid, ready = 0;
  logic [31:0] key [8];
  dist_e       dist_sel = DIST_TERNARY;
  sample_t     sample;
  word_t       res [K];
  int checks = 0, failures = 0;

  rng_module dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic draw(input int n, output int cycles, output real mean, output real var_,
                      output int hist [3], output int first [8], output bit res_ok, output bit range_ok);
    real s = 0, s2 = 0;
    int got = 0;
    cycles = 0; res_ok = 1; range_ok = 1;
    hist = '{0, 0, 0};
    ready = 1;
    while (got < n) begin
      @(negedge clk);
      cycles++;
      if (valid) begin
        int v = int'(sample);
        if (got < 8) first[got] = v;
        for (int i = 0; i < K; i++)
          if (res[i] !== ((v < 0) ? QMOD[i] - word_t'(-v) : word_t'(v))) res_ok = 0;
        if (v < -19 || v > 19) range_ok = 0;
        if (v >= -1 && v <= 1) hist[v+1]++;
        s += v; s2 += v * v;
        got++;
      end
    end
    ready = 0;
    mean = s / n;
    var_ = s2 / n - mean * mean;
  endtask

  initial begin
    int cyc, hist [3], f1 [8], f2 [8];
    real mean, var_;
    bit rok, gok, same;
    for (int i = 0; i < 8; i++) key[i] = 32'h1234_5678 * (i + 1);
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (20) @(negedge clk);        // let the first block be produced
    dist_sel = DIST_TERNARY;
    draw(6000, cyc, mean, var_, hist, f1, rok, gok);
    check(rok, "ternary residues");
    check(hist[0] + hist[1] + hist[2] == 6000, "ternary range");
    for (int i = 0; i < 3; i++)
      check(hist[i] > 1820 && hist[i] < 2180, $sformatf("ternary frequency of %0d: %0d", i - 1, hist[i]));
    check(cyc <= 6620, $sformatf("ternary rate: %0d cycles", cyc));
    $display("ternary: %0d/%0d/%0d in %0d cycles", hist[0], hist[1], hist[2], cyc);
    dist_sel = DIST_NORMAL;
    draw(6000, cyc, mean, var_, hist, f2, rok, gok);
    check(rok, "normal residues");
    check(gok, "normal range");
    check(mean > -0.15 && mean < 0.15, $sformatf("normal mean %f", mean));
    check(var_ > 9.24 && var_ < 11.24, $sformatf("normal variance %f", var_));
    check(cyc <= 7520, $sformatf("normal rate: %0d cycles", cyc));
    $display("normal: mean %f variance %f in %0d cycles", mean, var_, cyc);
    // new key after reset: the stream must change
    rst_n = 0; key[0] = key[0] ^ 32'h1; dist_sel = DIST_TERNARY;
    @(negedge clk); rst_n = 1;
    repeat (20) @(negedge clk);
    draw(8, cyc, mean, var_, hist, f2, rok, gok);
    same = 1;
    for (int i = 0; i < 8; i++) if (f1[i] != f2[i]) same = 0;
    check(!same, "key change changes the stream");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
