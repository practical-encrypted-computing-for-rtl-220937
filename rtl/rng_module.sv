// rng_module: random number generation module of the accelerator.
//
// Chains the Blake3 hash block, the RNG buffer / distribution block and the
// RNS conversion (Mod Tern / Mod Normal) element:
//   blake3_core --64-byte block--> rng_distribution --sample--> rns_convert
// The hash runs in keyed extendable-output mode: block number c of the stream
// is compress(key, 0, c, 0, CHUNK_START|CHUNK_END|ROOT|KEYED_HASH), so the
// random stream is the Blake3 keyed XOF of the empty string under the
// 256-bit key supplied by the host. The block counter restarts at reset.
// The next hash block is computed while the current one is consumed, so the
// hash output register and the distribution buffer form a double buffer.
//
// Interface: dist_sel selects ternary or normal samples; samples come out as a
// valid/ready stream both as the signed value (sample) and as its residues
// modulo every coefficient prime (res). Throughput: one ternary sample per
// cycle (less 1/256 rejected bytes), one normal sample per cycle for 8
// cycles out of every 8-cycle hash, i.e. bounded by the 64 bytes that the
// hash delivers every 8 cycles.
module rng_module
  import choco_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] key [8],
  input  dist_e       dist_sel,
  output logic        valid,
  input  logic        ready,
  output sample_t     sample,
  output word_t       res [K]
);
  localparam logic [31:0] XOF_FLAGS = B3_CHUNK_START | B3_CHUNK_END | B3_ROOT | B3_KEYED_HASH;

  logic        h_start, h_ready, h_valid, taken, blk_take;
  logic [31:0] h_out [16];
  logic [31:0] zero_msg [16];
  logic [63:0] counter;

  always_comb for (int i = 0; i < 16; i++) zero_msg[i] = '0;

  assign h_start = h_ready && (!h_valid || taken);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      counter <= '0;
      taken   <= 1'b0;
    end else begin
      if (h_start) begin
        counter <= counter + 64'd1;
        taken   <= 1'b0;
      end else if (blk_take) begin
        taken <= 1'b1;
      end
    end
  end

  blake3_core u_hash (
    .clk, .rst_n, .start(h_start), .ready(h_ready), .cv(key), .msg(zero_msg),
    .counter, .block_len(32'd0), .flags(XOF_FLAGS), .valid(h_valid), .out(h_out));

  rng_distribution u_dist (
    .clk, .rst_n, .dist_sel, .blk_valid(h_valid && !taken), .blk(h_out), .blk_take,
    .sample_valid(valid), .sample_ready(ready), .sample);

  rns_convert u_conv (.x(sample), .r(res));
endmodule
