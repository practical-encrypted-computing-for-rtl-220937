// blake3_core: the Blake3 compression function, iterated one round per cycle.
//
// The random number generator of the accelerator is built on the Blake3
// cryptographic hash. This block computes one Blake3 compression
//   out = compress(cv, msg, counter, block_len, flags)
// and returns all 16 output words, i.e. the 64-byte extended output:
//   out[i]   = v[i] ^ v[i+8]      (i = 0..7)
//   out[i+8] = v[i+8] ^ cv[i]     (i = 0..7)
// The random generator uses it as the keyed Blake3 extendable output of an
// empty message: cv = key, msg = 0, block_len = 0,
// flags = CHUNK_START|CHUNK_END|ROOT|KEYED_HASH, and counter = output block
// number, which yields a stream of 64-byte pseudo-random blocks.
// That use of Blake3 in counter (XOF) mode is this design's choice; the
// paper names Blake3 as the hash of its RNG module.
//
// Timing: start is taken when ready is high; one of the seven rounds (column
// step followed by diagonal step, eight G functions) is computed per clock,
// and out/valid appear 8 cycles after start. valid is held until the next
// start. At 100 MHz one block every 8 cycles is 800 MB/s.
module blake3_core
  import choco_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        ready,
  input  logic [31:0] cv        [8],
  input  logic [31:0] msg       [16],
  input  logic [63:0] counter,
  input  logic [31:0] block_len,
  input  logic [31:0] flags,
  output logic        valid,
  output logic [31:0] out       [16]
);
  typedef logic [31:0] w32_t;
  typedef w32_t        vec16_t [16];

  localparam int PERM [16] = '{2, 6, 3, 10, 7, 0, 4, 13, 1, 11, 12, 5, 9, 14, 15, 8};

  vec16_t     v, m;
  w32_t       cv_q [8];
  logic [2:0] rnd;
  logic       busy;

  function automatic w32_t rotr(w32_t x, int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  // one G mixing function applied to state words a, b, c, d
  function automatic vec16_t g(vec16_t s, int a, int b, int c, int d, w32_t mx, w32_t my);
    vec16_t r;
    r = s;
    r[a] = r[a] + r[b] + mx;  r[d] = rotr(r[d] ^ r[a], 16);
    r[c] = r[c] + r[d];       r[b] = rotr(r[b] ^ r[c], 12);
    r[a] = r[a] + r[b] + my;  r[d] = rotr(r[d] ^ r[a], 8);
    r[c] = r[c] + r[d];       r[b] = rotr(r[b] ^ r[c], 7);
    return r;
  endfunction

  function automatic vec16_t round_fn(vec16_t s, vec16_t mm);
    vec16_t r;
    r = g(s, 0, 4,  8, 12, mm[0],  mm[1]);
    r = g(r, 1, 5,  9, 13, mm[2],  mm[3]);
    r = g(r, 2, 6, 10, 14, mm[4],  mm[5]);
    r = g(r, 3, 7, 11, 15, mm[6],  mm[7]);
    r = g(r, 0, 5, 10, 15, mm[8],  mm[9]);
    r = g(r, 1, 6, 11, 12, mm[10], mm[11]);
    r = g(r, 2, 7,  8, 13, mm[12], mm[13]);
    r = g(r, 3, 4,  9, 14, mm[14], mm[15]);
    return r;
  endfunction

  vec16_t v_next, m_perm;
  always_comb begin
    v_next = round_fn(v, m);
    for (int i = 0; i < 16; i++) m_perm[i] = m[PERM[i]];
  end

  assign ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      valid <= 1'b0;
      rnd   <= '0;
      for (int i = 0; i < 16; i++) begin
        v[i]   <= '0;
        m[i]   <= '0;
        out[i] <= '0;
      end
      for (int i = 0; i < 8; i++) cv_q[i] <= '0;
    end else if (start && !busy) begin
      busy  <= 1'b1;
      valid <= 1'b0;
      rnd   <= '0;
      for (int i = 0; i < 8; i++) begin
        v[i]    <= cv[i];
        cv_q[i] <= cv[i];
      end
      for (int i = 0; i < 4; i++) v[8+i] <= B3_IV[i];
      v[12] <= counter[31:0];
      v[13] <= counter[63:32];
      v[14] <= block_len;
      v[15] <= flags;
      m     <= msg;
    end else if (busy) begin
      v   <= v_next;
      m   <= m_perm;
      rnd <= rnd + 3'd1;
      if (rnd == 3'd6) begin
        busy <= 1'b0;
        valid <= 1'b1;
        for (int i = 0; i < 8; i++) begin
          out[i]   <= v_next[i] ^ v_next[i+8];
          out[i+8] <= v_next[i+8] ^ cv_q[i];
        end
      end
    end
  end
endmodule
