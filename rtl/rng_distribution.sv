// rng_distribution: RNG buffer and distribution block of the random number
// generator.
//
// It holds one 64-byte block of hash output (the RNG buffer) and interprets it
// as samples of one of the two distributions BFV encryption needs:
//   * ternary (for u): one byte per sample; byte values 0..254 give
//     (byte mod 3) - 1 in {-1, 0, 1}, the byte 255 is rejected so that the
//     three values are exactly equally likely;
//   * normal (for e1, e2): eight bytes per sample; bit 63 is the sign and
//     bits 62:0 are compared against a cumulative distribution table of |x|
//     for a discrete Gaussian with sigma 3.2 clipped at 19 (choco_pkg::CDT).
//     All 19 comparisons run in parallel, so sampling is constant time.
// The one-byte ternary samples and eight-byte normal samples follow the text;
// the mapping of bytes to values, the rejection, sigma and the table method
// are this design's choices.
//
// Interface: a new block is loaded with blk_take when the buffer is empty and
// blk_valid is high. sample/sample_valid is a valid/ready stream; dist_sel
// selects the distribution of the next sample and may change between samples
// (a normal sample starts at an 8-byte boundary of the buffer). A rejected
// ternary byte costs one cycle with sample_valid low.
module rng_distribution
  import choco_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  dist_e       dist_sel,
  input  logic        blk_valid,
  input  logic [31:0] blk       [16],
  output logic        blk_take,
  output logic        sample_valid,
  input  logic        sample_ready,
  output sample_t     sample
);
  logic [7:0] buffer [64];
  logic [6:0] ptr;          // next unread byte, 64 = empty
  logic       empty;
  logic [6:0] nptr;         // ptr aligned for a normal sample
  logic [63:0] word8;
  logic [7:0]  byte0;
  logic [4:0]  mag;
  logic        reject;

  assign empty = (ptr >= 7'd64) || (dist_sel == DIST_NORMAL && nptr >= 7'd64);
  assign nptr  = (ptr[2:0] == 3'd0) ? ptr : {ptr[6:3] + 4'd1, 3'b000};
  assign blk_take = empty && blk_valid;

  always_comb begin
    byte0 = buffer[ptr[5:0]];
    for (int i = 0; i < 8; i++) word8[8*i +: 8] = buffer[{nptr[5:3], 3'(i)}];
    mag = '0;
    for (int k = 0; k < NORMAL_BOUND; k++)
      if (word8[62:0] >= CDT[k]) mag = mag + 5'd1;
    reject = (dist_sel == DIST_TERNARY) && (byte0 == 8'hFF);
    if (dist_sel == DIST_TERNARY)
      sample = sample_t'(byte0 % 8'd3) - sample_t'(1);
    else
      sample = word8[63] ? -sample_t'({1'b0, mag}) : sample_t'({1'b0, mag});
    sample_valid = !empty && !reject;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= 7'd64;
      for (int i = 0; i < 64; i++) buffer[i] <= '0;
    end else if (blk_take) begin
      for (int i = 0; i < 64; i++) buffer[i] <= blk[i/4][8*(i%4) +: 8];
      ptr <= '0;
    end else if (!empty) begin
      if (dist_sel == DIST_TERNARY) begin
        if (reject || sample_ready) ptr <= ptr + 7'd1;
      end else if (sample_ready) begin
        ptr <= nptr + 7'd8;
      end
    end
  end
endmodule
