// modmul: pipelined modular multiplier, y = (a * b) mod Q.
//
// This is the processing element that the arithmetic blocks of the
// accelerator are built from. It has three register stages, as the paper's
// hardware model assumes for its multiplication and division units:
//   stage 1 registers the operands, stage 2 the full 2W-bit product,
//   stage 3 the remainder of the division by the constant modulus Q.
// The reduction is written as a plain remainder by a constant; a Barrett or
// Montgomery reduction would be a drop-in replacement with the same latency.
// Interface: operands a, b (both < Q) every cycle; y follows LAT_MUL = 3
// cycles later. There is no stall: data flows every cycle and the caller
// tracks validity alongside.
module modmul
  import choco_pkg::*;
#(
  parameter word_t Q = choco_pkg::QMOD[0]
) (
  input  logic  clk,
  input  word_t a,
  input  word_t b,
  output word_t y
);
  word_t        ra, rb;
  logic [127:0] prod;

  always_ff @(posedge clk) begin
    ra   <= a;
    rb   <= b;
    prod <= 128'(ra) * 128'(rb);
    y    <= word_t'(prod % 128'(Q));
  end
endmodule
