// poly_add: Modular Addition block (used in the cipher and the message
// polynomial-addition modules). y_i = a_i + b_i mod q_i for NRES residues in
// parallel, one coefficient per cycle, registered: out_valid follows in_valid
// by LAT_ADD = 1 cycle. The sum of two reduced values is below 2*q_i, so one
// conditional subtraction reduces it.
module poly_add
  import choco_pkg::*;
#(
  parameter int    NRES = choco_pkg::K,
  parameter word_t MODS [NRES] = choco_pkg::QMOD
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  word_t a [NRES],
  input  word_t b [NRES],
  output logic  out_valid,
  output word_t y [NRES]
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

  always_ff @(posedge clk)
    for (int i = 0; i < NRES; i++) y[i] <= addmod(a[i], b[i], MODS[i]);
endmodule
