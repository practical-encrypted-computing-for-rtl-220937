// msg_scale: Message Scaling module. Turns an encoded plaintext coefficient
// m (0 <= m < t) into Delta*m in the K-1 residues of the output ciphertext
// modulus q = q_0*q_1, with Delta = floor(q/t):
//   Plain Scale block: p_i = m * (Delta mod q_i) mod q_i       (3 cycles)
//   RNS Scale block  : y_i = p_i + (m >= (t+1)/2 ? q mod t : 0) mod q_i
// The second term is the SEAL library's correction for coefficients in the
// upper half of Z_t, which stand for negative values. One coefficient per
// cycle, LAT_SCALE = 4 cycles from in_valid to out_valid.
module msg_scale
  import choco_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  word_t m,
  output logic  out_valid,
  output word_t y [KD]
);
  word_t p [KD];
  logic [LAT_MUL-1:0]   upper;
  logic [LAT_SCALE-1:0] vpipe;

  for (genvar i = 0; i < KD; i++) begin : g_res
    modmul #(.Q(QMOD[i])) u_mul (.clk, .a(m), .b(delta_mod(i)), .y(p[i]));
  end

  always_ff @(posedge clk) begin
    upper <= {upper[LAT_MUL-2:0], (m >= PLAIN_HALF_THR)};
    for (int i = 0; i < KD; i++)
      y[i] <= addmod(p[i], upper[LAT_MUL-1] ? UPPER_INC : 64'd0, QMOD[i]);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT_SCALE-2:0], in_valid};
  assign out_valid = vpipe[LAT_SCALE-1];
endmodule
