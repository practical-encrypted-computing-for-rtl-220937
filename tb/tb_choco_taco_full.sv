// tb_choco_taco_full: the same end-to-end test as tb_choco_taco, on the
// accelerator with its default parameters: N = 8192 coefficients, three
// 58/58/59-bit residues, 4 butterfly units per transform. Each transform
// takes about 14,000 cycles and each streaming phase 8,192, so one
// encryption or decryption is roughly 80,000-100,000 cycles.
module tb_choco_taco_full;
  import choco_pkg::*;
  localparam int N  = N_DEF;
  localparam int PE = 4;
  localparam int WATCHDOG = 2000000;

  `include "tb_choco_common.svh"

  choco_taco dut (.*);
endmodule
