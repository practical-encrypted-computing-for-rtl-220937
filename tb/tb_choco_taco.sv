// tb_choco_taco: end-to-end test of the accelerator at a reduced ring
// dimension, N = 64 with 4 butterfly units per transform, so that every
// phase is short. The stimulus, reference model and checks are in
// tb_choco_common.svh (encryption/decryption round trips with and without
// stalls, phase lengths, decryption of an independently built ciphertext,
// and counters showing that every mechanism was used).
module tb_choco_taco;
  import choco_pkg::*;
  localparam int N  = 64;
  localparam int PE = 4;
  localparam int WATCHDOG = 200000;

  `include "tb_choco_common.svh"

  choco_taco #(.N(N), .PE(PE)) dut (.*);
endmodule
