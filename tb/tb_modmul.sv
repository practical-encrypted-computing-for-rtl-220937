// tb_modmul: checks the pipelined modular multiplier for every coefficient
// prime and for the plaintext modulus t. A new operand pair enters every
// cycle; the product of the pair applied at cycle c must appear at cycle
// c + 3 (the three-stage latency) and equal (a*b) mod Q computed with
// 128-bit arithmetic here. Operands include 0, 1 and Q-1.
module tb_modmul;
  import choco_pkg::*;
  localparam word_t MODS [4] = '{QMOD[0], QMOD[1], QMOD[2], T};

  logic  clk = 0;
  word_t a [4], b [4], y [4];
  int checks = 0, failures = 0;

  for (genvar g = 0; g < 4; g++) begin : g_dut
    modmul #(.Q(MODS[g])) dut (.clk, .a(a[g]), .b(b[g]), .y(y[g]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t hist [4][$];
    for (int g = 0; g < 4; g++) begin a[g] = 0; b[g] = 0; end
    for (int c = 0; c < 1003; c++) begin
      @(negedge clk);
      // results of the operands applied LAT_MUL cycles ago
      if (c >= LAT_MUL)
        for (int g = 0; g < 4; g++) begin
          word_t e;
          e = hist[g].pop_front();
          checks++;
          if (y[g] !== e) begin
            failures++;
            if (failures < 10) $display("modulus %0d cycle %0d: got %h expected %h", g, c, y[g], e);
          end
        end
      for (int g = 0; g < 4; g++) begin
        case (c % 5)
          0: begin a[g] = MODS[g] - 1; b[g] = MODS[g] - 1; end
          1: begin a[g] = 1; b[g] = {$urandom, $urandom} % MODS[g]; end
          2: begin a[g] = 0; b[g] = {$urandom, $urandom} % MODS[g]; end
          default: begin
            a[g] = {$urandom, $urandom} % MODS[g];
            b[g] = {$urandom, $urandom} % MODS[g];
          end
        endcase
        hist[g].push_back(word_t'((128'(a[g]) * 128'(b[g])) % 128'(MODS[g])));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
