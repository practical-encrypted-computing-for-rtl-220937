// error_correct: Error Correction module of decryption (compare & correct).
//
// Takes the {t, gamma} image (y_t, y_gamma) from the fast base conversion
// and removes the conversion error, as in the SEAL library: gamma is large
// (61 bits) so y_gamma is a small signed error term; it is compared with
// gamma/2 to recover its sign and subtracted from y_t, and the result is
// multiplied by gamma^-1 mod t:
//   d = y_gamma > gamma/2 ? y_t + ((gamma - y_gamma) mod t) : y_t - (y_gamma mod t)
//   m = d * gamma^-1 mod t
// m is the plaintext coefficient round(t*x/q) mod t. Stage 1 (the error
// correct buffer) registers d, then the modular multiplier: LAT_ECORR = 4.
module error_correct
  import choco_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  word_t y_t,
  input  word_t y_g,
  output logic  out_valid,
  output word_t m
);
  word_t d;
  logic [LAT_ECORR-1:0] vpipe;

  always_ff @(posedge clk)
    if (y_g > GAMMA_HALF) d <= addmod(y_t, (GAMMA - y_g) % T, T);
    else                  d <= submod(y_t, y_g % T, T);

  modmul #(.Q(T)) u_mul (.clk, .a(d), .b(INV_GAMMA_T), .y(m));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT_ECORR-2:0], in_valid};
  assign out_valid = vpipe[LAT_ECORR-1];
endmodule
