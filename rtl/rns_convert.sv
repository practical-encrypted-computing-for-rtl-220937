// rns_convert: the Mod Tern / Mod Normal processing element of the RNG.
//
// A sampled value x is a small signed integer (ternary or clipped normal);
// the polynomial arithmetic needs it as residues x mod q_i for every
// coefficient prime. For x >= 0 the residue is x itself, for x < 0 it is
// q_i - |x|. One sample is converted per cycle, combinationally, into all
// NRES residues at once, so the value can be "distributed to all residues as
// it is generated". The moduli are the package primes; a different prime set
// is passed with the MODS parameter.
module rns_convert
  import choco_pkg::*;
#(
  parameter int    NRES = choco_pkg::K,
  parameter word_t MODS [NRES] = choco_pkg::QMOD
) (
  input  sample_t x,
  output word_t   r [NRES]
);
  logic [5:0] absx;
  word_t      mag;
  assign absx = (x < 0) ? 6'(-x) : 6'(x);
  assign mag  = word_t'(absx);
  always_comb
    for (int i = 0; i < NRES; i++)
      r[i] = (x < 0) ? MODS[i] - mag : mag;
endmodule
