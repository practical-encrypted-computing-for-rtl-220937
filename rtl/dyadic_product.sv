// dyadic_product: Dyadic Product block of the polynomial multiplication
// module. Multiplies two NTT-form polynomials coefficient by coefficient,
// y_i = a_i * b_i mod q_i, for NRES residues in parallel (one RNS layer per
// residue). One coefficient of every residue enters per cycle (in_valid) and
// leaves LAT_DYADIC = 3 cycles later (out_valid). During encryption a is the
// NTT of u from the NTT working buffer and b a public-key residue streamed
// from the input buffer; during decryption b is the secret key.
module dyadic_product
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
  logic [LAT_DYADIC-1:0] vpipe;

  for (genvar i = 0; i < NRES; i++) begin : g_res
    modmul #(.Q(MODS[i])) u_mul (.clk, .a(a[i]), .b(b[i]), .y(y[i]));
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT_DYADIC-2:0], in_valid};
  assign out_valid = vpipe[LAT_DYADIC-1];
endmodule
