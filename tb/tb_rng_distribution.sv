// tb_rng_distribution: feeds random 64-byte blocks (some bytes forced to the
// rejected value 255) and checks every sample against a reference that reads
// the same bytes: ternary = byte mod 3 - 1 skipping 255, normal = CDT scan of
// the low 63 bits of 8 little-endian bytes with bit 63 as sign. The
// distribution is switched in the middle of a block to check the 8-byte
// alignment of normal samples.
module tb_rng_distribution;
  import choco_pkg::*;
  logic        clk = 0, rst_n = 0, blk_valid = 0, blk_take, sample_valid, sample_ready = 0;
  dist_e       dist_sel = DIST_TERNARY;
  logic [31:0] blk [16];
  sample_t     sample;
  int checks = 0, failures = 0;

  rng_distribution dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_normal(logic [63:0] w);
    int m = 0;
    while (m < NORMAL_BOUND && w[62:0] >= CDT[m]) m++;
    return w[63] ? -m : m;
  endfunction

  initial begin
    logic [7:0] bytes [64];
    int p, e, rejects = 0, nnorm = 0, ntern = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 40; b++) begin
      for (int i = 0; i < 64; i++) begin
        bytes[i] = 8'($urandom);
        if ($urandom % 16 == 0) bytes[i] = 8'hFF;
      end
      for (int i = 0; i < 16; i++) blk[i] = {bytes[4*i+3], bytes[4*i+2], bytes[4*i+1], bytes[4*i]};
      @(negedge clk);
      blk_valid = 1;
      @(negedge clk);
      checks++;
      if (blk_take !== 1'b0) begin failures++; $display("block taken twice"); end
      blk_valid = 0;
      p = 0;
      // first half (or all) ternary, rest normal
      dist_sel = (b % 3 == 2) ? DIST_NORMAL : DIST_TERNARY;
      while (p < 64) begin
        if (b % 3 == 1 && p >= 21) dist_sel = DIST_NORMAL;
        if (dist_sel == DIST_NORMAL) p = (p + 7) / 8 * 8;
        if (p >= 64) break;
        sample_ready = ($urandom % 4) != 0;
        #1;
        if (dist_sel == DIST_TERNARY) begin
          if (bytes[p] == 8'hFF) begin
            checks++;
            if (sample_valid) begin failures++; $display("255 not rejected"); end
            rejects++;
            p++;
          end else begin
            e = int'(bytes[p] % 3) - 1;
            checks++;
            if (!sample_valid || int'(sample) != e) begin
              failures++; $display("block %0d byte %0d: ternary got %0d/%0b expected %0d", b, p, sample, sample_valid, e);
            end
            if (sample_ready) begin p++; ntern++; end
          end
        end else begin
          logic [63:0] w;
          for (int i = 0; i < 8; i++) w[8*i +: 8] = bytes[p+i];
          e = ref_normal(w);
          checks++;
          if (!sample_valid || int'(sample) != e) begin
            failures++; $display("block %0d byte %0d: normal got %0d expected %0d", b, p, sample, e);
          end
          if (sample_ready) begin p += 8; nnorm++; end
        end
        @(negedge clk);
      end
      sample_ready = 0;
      #1;
      checks++;
      if (sample_valid) begin failures++; $display("valid while empty"); end
    end
    checks++;
    if (rejects == 0 || nnorm == 0 || ntern == 0) failures++;
    $display("ternary %0d normal %0d rejected %0d", ntern, nnorm, rejects);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
