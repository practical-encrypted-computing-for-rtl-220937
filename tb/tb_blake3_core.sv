// tb_blake3_core: self-checking test of the Blake3 compression block.
//
// 1. The published Blake3 digest of the empty input,
//    af1349b9f5f9a1a6a0404dea36dcc9499bcb25c9adc112b7cc9a93cae41f3262,
//    is one compression with cv = IV, msg = 0, counter = 0, block_len = 0 and
//    flags = CHUNK_START|CHUNK_END|ROOT; its first 8 output words must match.
// 2. Random keys, counters and messages are compared on all 16 output words
//    with a reference written here as a straight loop over the G schedule.
// 3. The result must appear exactly 8 cycles after start.
module tb_blake3_core;
  import choco_pkg::*;

  logic        clk = 0, rst_n = 0, start = 0, ready, valid;
  logic [31:0] cv [8], msg [16], out [16];
  logic [63:0] counter;
  logic [31:0] block_len, flags;
  int checks = 0, failures = 0;

  blake3_core dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] rr(logic [31:0] x, int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  // reference compression
  task automatic ref_compress(input logic [31:0] c [8], input logic [31:0] mi [16],
                              input logic [63:0] ctr, input logic [31:0] bl,
                              input logic [31:0] fl, output logic [31:0] o [16]);
    logic [31:0] s [16], mm [16], t [16];
    int idx [8][4] = '{'{0,4,8,12}, '{1,5,9,13}, '{2,6,10,14}, '{3,7,11,15},
                       '{0,5,10,15}, '{1,6,11,12}, '{2,7,8,13}, '{3,4,9,14}};
    int p [16] = '{2, 6, 3, 10, 7, 0, 4, 13, 1, 11, 12, 5, 9, 14, 15, 8};
    for (int i = 0; i < 8; i++) s[i] = c[i];
    s[8] = 32'h6A09E667; s[9] = 32'hBB67AE85; s[10] = 32'h3C6EF372; s[11] = 32'hA54FF53A;
    s[12] = ctr[31:0]; s[13] = ctr[63:32]; s[14] = bl; s[15] = fl;
    mm = mi;
    for (int r = 0; r < 7; r++) begin
      for (int gi = 0; gi < 8; gi++) begin
        int a = idx[gi][0], b = idx[gi][1], cc = idx[gi][2], d = idx[gi][3];
        s[a] = s[a] + s[b] + mm[2*gi];   s[d] = rr(s[d] ^ s[a], 16);
        s[cc] = s[cc] + s[d];            s[b] = rr(s[b] ^ s[cc], 12);
        s[a] = s[a] + s[b] + mm[2*gi+1]; s[d] = rr(s[d] ^ s[a], 8);
        s[cc] = s[cc] + s[d];            s[b] = rr(s[b] ^ s[cc], 7);
      end
      for (int i = 0; i < 16; i++) t[i] = mm[p[i]];
      mm = t;
    end
    for (int i = 0; i < 8; i++) begin
      o[i] = s[i] ^ s[i+8];
      o[i+8] = s[i+8] ^ c[i];
    end
  endtask

  task automatic run_one(output int lat);
    lat = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    lat = 1;
    while (!valid) begin @(negedge clk); lat++; end
  endtask

  initial begin
    logic [31:0] exp_o [16];
    logic [31:0] known [8] = '{32'hb94913af, 32'ha6a1f9f5, 32'hea4d40a0, 32'h49c9dc36,
                               32'hc925cb9b, 32'hb712c1ad, 32'hca939acc, 32'h62321fe4};
    int lat;
    for (int i = 0; i < 8; i++) cv[i] = B3_IV[i];
    for (int i = 0; i < 16; i++) msg[i] = '0;
    counter = 0; block_len = 0; flags = 32'd11;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_one(lat);
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (out[i] !== known[i]) begin
        failures++;
        $display("empty-hash word %0d: got %h expected %h", i, out[i], known[i]);
      end
    end
    checks++;
    if (lat != 8) begin failures++; $display("latency %0d, expected 8", lat); end

    for (int n = 0; n < 20; n++) begin
      for (int i = 0; i < 8; i++) cv[i] = $urandom;
      for (int i = 0; i < 16; i++) msg[i] = (n % 2) ? $urandom : 0;
      counter = {$urandom, $urandom};
      block_len = 64; flags = 32'd27;
      ref_compress(cv, msg, counter, block_len, flags, exp_o);
      run_one(lat);
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (out[i] !== exp_o[i]) begin
          failures++;
          $display("case %0d word %0d: got %h expected %h", n, i, out[i], exp_o[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
