// choco_taco: BFV public-key encryption and decryption accelerator for a
// client device that offloads encrypted computation.
//
// Encryption of a batch of N plaintext slots m under public key (P0, P1):
//   c1 = ModSwitch( INTT( NTT(u) .* P1 ) + e2 )
//   c0 = ModSwitch( INTT( NTT(u) .* P0 ) + e1 ) + Delta * Encode(m)
// with u ternary and e1, e2 normal noise drawn from the on-chip Blake3 RNG.
// All polynomial work happens in K = 3 residues (RNS layers) in parallel;
// modulus switching drops the key prime, so the ciphertext has K-1 = 2
// residues per component. Decryption of (c0, c1) with secret key s:
//   m = Decode( ErrorCorrect( FastBaseConv( c0 + INTT( NTT(c1) .* s ) ) ) )
// reusing the same NTT, dyadic product, INTT and addition hardware.
//
// Blocks: rng_module (hash, buffer, distributions, RNS conversion);
// per residue an NTT unit (working buffer holding u, reused for c0 and c1)
// and an INTT unit (its buffer receives the dyadic products); dyadic_product;
// poly_add for the cipher and for the message; mod_switch; msg_scale;
// encode_unit (batch encode / decode mod t); fast_base_conv; error_correct;
// stream_fifo input and output buffers. The controller below runs the
// phases of an operation one after the other; inside each phase one
// coefficient of every residue moves per cycle through fully pipelined
// blocks, and the transforms run PE butterflies per cycle per residue.
// Message loading overlaps sampling of u, and the encoding INTT overlaps the
// NTT of u.
//
// Host interface (all words 64 bits, one beat = one coefficient index):
//   cmd_valid/cmd_ready/cmd_op start an operation when the unit is idle.
//   in_*  stream, OP_ENCRYPT: N message slots (in_data[0]), then P1 and then
//         P0, each N beats of K residues in NTT (bit-reversed) order.
//   in_*  stream, OP_DECRYPT: c1 (N beats, residues 0..K-2, coefficient
//         order), then s in NTT form (N beats), then c0 (N beats).
//   out_* stream, OP_ENCRYPT: c1 then c0, N beats each, K-1 residues.
//   out_* stream, OP_DECRYPT: N beats of decrypted slots in out_data[0].
//   rng_key is the 256-bit key of the random stream.
//   op_done pulses when an operation has finished and its output has been
//   taken; stall_input / stall_rng / stall_output flag cycles in which the
//   datapath waits for host data, for random samples or for output space.
// Both streams are valid/ready; the datapath stalls when the input buffer is
// empty, when the RNG has no sample, or when the output buffer could not
// hold the results already in flight.
//
// The order of operations follows the accelerator's worked example; the
// phase-serial controller, the stream formats and the buffer depths are this
// design's choices.
module choco_taco
  import choco_pkg::*;
#(
  parameter int N          = choco_pkg::N_DEF,
  parameter int PE         = 4,
  parameter int FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] rng_key [8],
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  op_e         cmd_op,
  input  logic        in_valid,
  output logic        in_ready,
  input  word_t       in_data  [K],
  output logic        out_valid,
  input  logic        out_ready,
  output word_t       out_data [KD],
  output logic        op_done,
  output logic        stall_input,
  output logic        stall_rng,
  output logic        stall_output
);
  localparam int LOGN = $clog2(N);
  localparam int MSG_DELAY = LAT_ADD + LAT_MODSW - LAT_SCALE;
  typedef logic [LOGN-1:0] addr_t;

  typedef enum logic [4:0] {
    S_IDLE,
    E_LOAD, E_NTT, E_P1, E_INTT1, E_C1, E_P0, E_INTT0, E_C0,
    D_C1, D_NTT, D_S, D_INTT, D_C0, D_DEC, D_OUT,
    S_FINISH
  } state_e;

  state_e state;

  // ------------------------------------------------------------------ buffers
  logic [K*W-1:0]  if_in, if_out;
  logic            if_valid, if_pop;
  word_t           if_word [K];
  logic [KD*W-1:0] of_in, of_out;
  logic            of_push, of_ready;
  logic [$clog2(FIFO_DEPTH+1)-1:0] of_count;

  always_comb
    for (int i = 0; i < K; i++) begin
      if_in[i*W +: W] = in_data[i];
      if_word[i]      = if_out[i*W +: W];
    end

  stream_fifo #(.WIDTH(K * W), .DEPTH(8)) u_in_buf (
    .clk, .rst_n, .in_valid, .in_ready, .in_data(if_in),
    .out_valid(if_valid), .out_ready(if_pop), .out_data(if_out), .count());

  stream_fifo #(.WIDTH(KD * W), .DEPTH(FIFO_DEPTH)) u_out_buf (
    .clk, .rst_n, .in_valid(of_push), .in_ready(of_ready), .in_data(of_in),
    .out_valid, .out_ready, .out_data(of_out), .count(of_count));

  always_comb
    for (int i = 0; i < KD; i++) out_data[i] = of_out[i*W +: W];

  // ------------------------------------------------------------------ RNG
  logic    rng_valid, rng_pop;
  word_t   rng_res [K];

  rng_module u_rng (
    .clk, .rst_n, .key(rng_key),
    .dist_sel((state == E_LOAD) ? DIST_TERNARY : DIST_NORMAL),
    .valid(rng_valid), .ready(rng_pop), .sample(), .res(rng_res));

  // ------------------------------------------------------------------ control signals
  logic [LOGN:0] cnt, cnt2, done_cnt;       // issue / second stream / completion counters
  logic          go;                        // one beat issued this cycle
  logic          v1;                        // beat issued last cycle (data read now)
  logic          started, fin_a, fin_b;
  logic [$clog2(FIFO_DEPTH+1):0] inflight;  // results on their way to the output buffer
  logic          credit;
  logic          need_in, need_rng, need_out;
  logic          phase_stream;
  logic          complete;                  // one beat completed this cycle

  // per-phase requirements
  always_comb begin
    need_in  = state inside {E_P1, E_P0, D_C1, D_S, D_C0};
    need_rng = state inside {E_C1, E_C0};
    need_out = state inside {E_C1, E_C0, D_OUT};
    phase_stream = state inside {E_P1, E_P0, E_C1, E_C0, D_C1, D_S, D_C0, D_OUT};
  end

  assign credit = (32'(of_count) + 32'(inflight)) < FIFO_DEPTH;
  assign go     = phase_stream && (cnt < (LOGN+1)'(N)) &&
                  (!need_in || if_valid) && (!need_rng || rng_valid) && (!need_out || credit);

  // stall events (a stream phase with work left that cannot issue), exposed
  // for performance counting
  assign stall_input  = phase_stream && (cnt < (LOGN+1)'(N)) && need_in && !if_valid;
  assign stall_rng    = phase_stream && (cnt < (LOGN+1)'(N)) && need_rng && !rng_valid;
  assign stall_output = phase_stream && (cnt < (LOGN+1)'(N)) && need_out && !credit;

  // E_LOAD runs two streams at once: message slots from the host into the
  // encoder, and ternary u samples from the RNG into the NTT buffers
  logic load_msg, load_u;
  assign load_msg = (state == E_LOAD) && (cnt  < (LOGN+1)'(N)) && if_valid;
  assign load_u   = (state == E_LOAD) && (cnt2 < (LOGN+1)'(N)) && rng_valid;

  assign if_pop  = (go && need_in) || load_msg;
  assign rng_pop = (go && need_rng) || load_u;

  // ------------------------------------------------------------------ stage-1 registers
  word_t in_q [K], rng_q [K];
  always_ff @(posedge clk) begin
    in_q  <= if_word;
    rng_q <= rng_res;
  end

  // ------------------------------------------------------------------ polynomial multiplication module
  logic  ntt_start, intt_start;
  logic  ntt_ready [K], ntt_done [K], intt_ready [K], intt_done [K];
  logic  ntt_we, intt_we;
  addr_t ntt_waddr;
  word_t ntt_wdata [K], ntt_rdata [K], intt_rdata [K];
  word_t dy_b [K], dy_y [K];
  logic  dy_valid;

  for (genvar r = 0; r < K; r++) begin : g_layer
    ntt_unit #(.N(N), .PE(PE), .Q(QMOD[r]), .PSI(psi_for(PSI_MAX[r], QMOD[r], N))) u_ntt (
      .clk, .rst_n, .ready(ntt_ready[r]), .start(ntt_start), .inverse(1'b0), .busy(),
      .done(ntt_done[r]), .we(ntt_we), .waddr(ntt_waddr), .wdata(ntt_wdata[r]),
      .raddr(addr_t'(cnt)), .rdata(ntt_rdata[r]));
    ntt_unit #(.N(N), .PE(PE), .Q(QMOD[r]), .PSI(psi_for(PSI_MAX[r], QMOD[r], N))) u_intt (
      .clk, .rst_n, .ready(intt_ready[r]), .start(intt_start), .inverse(1'b1), .busy(),
      .done(intt_done[r]), .we(intt_we), .waddr(addr_t'(done_cnt)), .wdata(dy_y[r]),
      .raddr(addr_t'(cnt)), .rdata(intt_rdata[r]));
  end

  // u from the RNG while loading, c1 from the host while decrypting
  assign ntt_we    = load_u || (go && state == D_C1);
  assign ntt_waddr = (state == E_LOAD) ? addr_t'(cnt2) : addr_t'(cnt);
  always_comb
    for (int r = 0; r < K; r++) ntt_wdata[r] = (state == E_LOAD) ? rng_res[r] : if_word[r];

  assign dy_b = in_q;
  dyadic_product u_dyadic (
    .clk, .rst_n, .in_valid(v1 && (state inside {E_P1, E_P0, D_S})),
    .a(ntt_rdata), .b(dy_b), .out_valid(dy_valid), .y(dy_y));
  assign intt_we = dy_valid;

  // ------------------------------------------------------------------ cipher addition, modulus switching
  word_t pa_b [K], pa_y [K];
  logic  pa_valid;
  always_comb
    for (int r = 0; r < K; r++) pa_b[r] = (state == D_C0) ? in_q[r] : rng_q[r];

  poly_add u_add_cipher (
    .clk, .rst_n, .in_valid(v1 && (state inside {E_C1, E_C0, D_C0})),
    .a(intt_rdata), .b(pa_b), .out_valid(pa_valid), .y(pa_y));

  word_t ms_y [KD];
  logic  ms_valid;
  mod_switch u_modsw (
    .clk, .rst_n, .in_valid(pa_valid && state != D_C0), .c(pa_y),
    .out_valid(ms_valid), .y(ms_y));

  // ------------------------------------------------------------------ message encoding and scaling
  logic  enc_ready, enc_done, enc_start, enc_inv, enc_restart, enc_we;
  word_t enc_rdata;
  word_t ec_m;
  logic  ec_valid;

  encode_unit #(.N(N), .PE(PE)) u_encode (
    .clk, .rst_n, .ready(enc_ready), .busy(), .done(enc_done),
    .start(enc_start), .inverse(enc_inv), .seq_restart(enc_restart),
    .enc_valid(load_msg), .enc_value(if_word[0]),
    .we(enc_we), .waddr(addr_t'(done_cnt)), .wdata(ec_m),
    .slot_rd(go && state == D_OUT), .raddr(addr_t'(cnt)), .rdata(enc_rdata));

  word_t sc_y [KD], sc_d [MSG_DELAY][KD];
  msg_scale u_scale (
    .clk, .rst_n, .in_valid(v1 && state == E_C0), .m(enc_rdata),
    .out_valid(), .y(sc_y));

  always_ff @(posedge clk) begin
    sc_d[0] <= sc_y;
    for (int d = 1; d < MSG_DELAY; d++) sc_d[d] <= sc_d[d-1];
  end

  word_t pm_y [KD];
  logic  pm_valid;
  poly_add #(.NRES(KD), .MODS(QMOD[0:KD-1])) u_add_msg (
    .clk, .rst_n, .in_valid(ms_valid && state == E_C0), .a(ms_y), .b(sc_d[MSG_DELAY-1]),
    .out_valid(pm_valid), .y(pm_y));

  // ------------------------------------------------------------------ decryption back end
  word_t fb_x [KD], fb_t, fb_g;
  logic  fb_valid;
  always_comb for (int r = 0; r < KD; r++) fb_x[r] = pa_y[r];

  fast_base_conv u_fbc (
    .clk, .rst_n, .in_valid(pa_valid && state == D_C0), .x(fb_x),
    .out_valid(fb_valid), .y_t(fb_t), .y_g(fb_g));

  error_correct u_ecorr (
    .clk, .rst_n, .in_valid(fb_valid), .y_t(fb_t), .y_g(fb_g),
    .out_valid(ec_valid), .m(ec_m));
  assign enc_we = ec_valid;

  // ------------------------------------------------------------------ output selection
  logic slot_v;       // slot read issued last cycle (decode output)
  always_comb begin
    of_push = 1'b0;
    of_in   = '0;
    if (state == E_C1 && ms_valid) begin
      of_push = 1'b1;
      for (int r = 0; r < KD; r++) of_in[r*W +: W] = ms_y[r];
    end else if (state == E_C0 && pm_valid) begin
      of_push = 1'b1;
      for (int r = 0; r < KD; r++) of_in[r*W +: W] = pm_y[r];
    end else if (state == D_OUT && slot_v) begin
      of_push = 1'b1;
      of_in[W-1:0] = enc_rdata;
    end
  end

  // completion of one beat in the current phase
  always_comb begin
    case (state)
      E_P1, E_P0, D_S:  complete = dy_valid;
      E_C1, E_C0, D_OUT: complete = of_push;
      D_C0:             complete = ec_valid;
      D_C1:             complete = go;
      default:          complete = 1'b0;
    endcase
  end

  // ------------------------------------------------------------------ sequencing
  logic all_ready;
  always_comb begin
    all_ready = enc_ready;
    for (int r = 0; r < K; r++) all_ready &= ntt_ready[r] & intt_ready[r];
  end
  assign cmd_ready = (state == S_IDLE) && all_ready;

  // transform starts: one pulse on entering a transform phase
  assign ntt_start   = !started && (state == E_NTT || state == D_NTT);
  assign intt_start  = !started && (state == E_INTT1 || state == E_INTT0 || state == D_INTT);
  assign enc_start   = !started && (state == E_NTT || state == D_DEC);
  assign enc_inv     = (state == E_NTT);
  assign enc_restart = (cmd_valid && cmd_ready) || (state == D_DEC && !started);

  logic stream_end;
  assign stream_end = (cnt == (LOGN+1)'(N)) && (done_cnt == (LOGN+1)'(N) ||
                      (done_cnt + (LOGN+1)'(complete)) == (LOGN+1)'(N));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cnt      <= '0;
      cnt2     <= '0;
      done_cnt <= '0;
      v1       <= 1'b0;
      slot_v   <= 1'b0;
      started  <= 1'b0;
      fin_a    <= 1'b0;
      fin_b    <= 1'b0;
      inflight <= '0;
      op_done  <= 1'b0;
    end else begin
      op_done <= 1'b0;
      v1      <= go;
      slot_v  <= go && (state == D_OUT);
      inflight <= inflight + $bits(inflight)'(go && need_out) - $bits(inflight)'(of_push);
      if (go || load_msg) cnt <= cnt + 1'b1;
      if (load_u) cnt2 <= cnt2 + 1'b1;
      if (complete) done_cnt <= done_cnt + 1'b1;
      if (ntt_start || intt_start || enc_start) started <= 1'b1;

      // generic end of a streaming phase
      if (phase_stream && stream_end) begin
        cnt      <= '0;
        done_cnt <= '0;
        started  <= 1'b0;
        case (state)
          E_P1:  state <= E_INTT1;
          E_C1:  state <= E_P0;
          E_P0:  state <= E_INTT0;
          E_C0:  state <= S_FINISH;
          D_C1:  state <= D_NTT;
          D_S:   state <= D_INTT;
          D_C0:  state <= D_DEC;
          D_OUT: state <= S_FINISH;
          default: state <= S_IDLE;
        endcase
      end

      case (state)
        S_IDLE: if (cmd_valid && cmd_ready) begin
          state <= (cmd_op == OP_ENCRYPT) ? E_LOAD : D_C1;
          cnt <= '0; cnt2 <= '0; done_cnt <= '0; started <= 1'b0;
        end
        E_LOAD: if ((cnt == (LOGN+1)'(N)) && (cnt2 == (LOGN+1)'(N))) begin
          state <= E_NTT; cnt <= '0; cnt2 <= '0; started <= 1'b0;
          fin_a <= 1'b0; fin_b <= 1'b0;
        end
        E_NTT: begin
          if (ntt_done[0]) fin_a <= 1'b1;
          if (enc_done)    fin_b <= 1'b1;
          if ((fin_a || ntt_done[0]) && (fin_b || enc_done)) begin
            state <= E_P1; started <= 1'b0;
          end
        end
        E_INTT1, E_INTT0, D_INTT: if (intt_done[0]) begin
          started <= 1'b0;
          state <= (state == E_INTT1) ? E_C1 : (state == E_INTT0) ? E_C0 : D_C0;
        end
        D_NTT: if (ntt_done[0]) begin state <= D_S; started <= 1'b0; end
        D_DEC: if (enc_done) begin state <= D_OUT; started <= 1'b0; end
        S_FINISH: if (of_count == '0) begin state <= S_IDLE; op_done <= 1'b1; end
        default: ;
      endcase
    end
  end

  // ------------------------------------------------------------------ protocol checks
  // the output buffer is never pushed while full (credit scheme)
  assert property (@(posedge clk) disable iff (!rst_n) of_push |-> of_ready);
  // the input buffer is only popped when it holds data
  assert property (@(posedge clk) disable iff (!rst_n) if_pop |-> if_valid);
endmodule
