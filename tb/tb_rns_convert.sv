// tb_rns_convert: checks every sample value in -19..19 (the full range of both
// distributions) against (x + q_i) mod q_i computed with signed integers.
module tb_rns_convert;
  import choco_pkg::*;
  sample_t x;
  word_t   r [K];
  int checks = 0, failures = 0;

  rns_convert dut (.x, .r);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -19; v <= 19; v++) begin
      x = sample_t'(v);
      #1;
      for (int i = 0; i < K; i++) begin
        word_t e;
        e = (v < 0) ? QMOD[i] - word_t'(-v) : word_t'(v);
        checks++;
        if (r[i] !== e) begin
          failures++;
          $display("x=%0d residue %0d: got %h expected %h", v, i, r[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
