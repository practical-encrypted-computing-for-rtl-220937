// fast_base_conv: Fast Base Conversion module of decryption.
//
// Input: one coefficient of x = [c0 + c1*s]_q in the residues of q_0, q_1.
// Output: its scaled image in the base {t, gamma}, the first half of the
// decryption scale-and-round of the SEAL library (Bajard et al.):
//   RNS Scale block : a_i = x_i * (t*gamma mod q_i)            mod q_i
//                     b_i = a_i * ((q/q_i)^-1 mod q_i)          mod q_i
//   (conversion buffer: the b_i are registered here)
//   Condense block  : s_j = sum_i b_i * (q/q_i mod m_j)         mod m_j
//                     y_j = s_j * (-q^-1 mod m_j)               mod m_j
// for m_j in {t, gamma}. The result y_t, y_gamma is what the error
// correction block turns into round(t*x/q) mod t.
// Pipeline: one coefficient per cycle, LAT_FBC = 14 cycles.
module fast_base_conv
  import choco_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  word_t x [KD],
  output logic  out_valid,
  output word_t y_t,
  output word_t y_g
);
  word_t a [KD], b [KD], bq [KD];
  word_t pt [KD], pg [KD];
  word_t st, sg;
  logic [LAT_FBC-1:0] vpipe;

  for (genvar i = 0; i < KD; i++) begin : g_res
    modmul #(.Q(QMOD[i])) u_tg   (.clk, .a(x[i]), .b(tg_mod(i)),        .y(a[i]));
    modmul #(.Q(QMOD[i])) u_punc (.clk, .a(a[i]), .b(inv_punct_mod(i)), .y(b[i]));
    modmul #(.Q(T))       u_ct   (.clk, .a(bq[i]), .b(QMOD[1-i] % T),     .y(pt[i]));
    modmul #(.Q(GAMMA))   u_cg   (.clk, .a(bq[i]), .b(QMOD[1-i] % GAMMA), .y(pg[i]));
  end

  always_ff @(posedge clk) begin
    bq <= b;                                   // conversion buffer
    st <= addmod(pt[0], pt[1], T);
    sg <= addmod(pg[0], pg[1], GAMMA);
  end

  modmul #(.Q(T))     u_nt (.clk, .a(st), .b(neg_inv_q_mod(T)),     .y(y_t));
  modmul #(.Q(GAMMA)) u_ng (.clk, .a(sg), .b(neg_inv_q_mod(GAMMA)), .y(y_g));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT_FBC-2:0], in_valid};
  assign out_valid = vpipe[LAT_FBC-1];
endmodule
