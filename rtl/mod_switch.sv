// mod_switch: Modulus Switching module. Removes the key (special) prime q_2
// from a K = 3 residue coefficient, giving the K-1 = 2 residues of
// round(c / q_2) modulo q_0 and q_1. This is the only step that mixes
// residues. Following the divide-and-round of the SEAL library:
//   Key Mod block : l   = (c_2 + floor(q_2/2)) mod q_2      (adds the rounding)
//                   r_i = (l mod q_i) - (floor(q_2/2) mod q_i)   (mod q_i)
//   Data Mod block: y_i = (c_i - r_i) * q_2^-1 mod q_i
// Pipeline: one coefficient per cycle; stage 1 Key Mod add, stage 2 the
// reduction and subtraction, stages 3-5 the modular multiplier:
// LAT_MODSW = 5 cycles from in_valid to out_valid.
module mod_switch
  import choco_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  word_t c [K],
  output logic  out_valid,
  output word_t y [KD]
);
  word_t last_q;
  word_t c_q  [KD];
  word_t diff [KD];
  logic [LAT_MODSW-1:0] vpipe;

  always_ff @(posedge clk) begin
    // Key Mod: add half of q_2 so that the division rounds
    last_q <= addmod(c[K-1], QLAST_HALF, QLAST);
    for (int i = 0; i < KD; i++) c_q[i] <= c[i];
    // reduce to q_i, remove the half again, subtract from the data residue
    for (int i = 0; i < KD; i++)
      diff[i] <= submod(c_q[i], submod(last_q % QMOD[i], qlast_half_mod(i), QMOD[i]), QMOD[i]);
  end

  for (genvar i = 0; i < KD; i++) begin : g_res
    modmul #(.Q(QMOD[i])) u_mul (.clk, .a(diff[i]), .b(inv_qlast_mod(i)), .y(y[i]));
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT_MODSW-2:0], in_valid};
  assign out_valid = vpipe[LAT_MODSW-1];
endmodule
