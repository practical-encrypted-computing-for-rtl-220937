// ntt_unit: in-place negacyclic NTT / inverse NTT of one residue polynomial,
// with its working buffer and its twiddle-factor tables.
//
// One instance serves as the NTT block (forward), the INTT block (inverse) or
// the shared NTT/INTT block of the encoding module; the direction is chosen
// per run with the `inverse` input. The transform is the negacyclic NTT over
// Z_Q[x]/(x^N + 1) in the form used by the SEAL library:
//   forward: Cooley-Tukey butterflies, natural-order input, bit-reversed
//            output, twiddle of group i in stage s = psi^bitrev(2^s + i);
//            X = U + V*w, Y = U - V*w.
//   inverse: Gentleman-Sande butterflies, bit-reversed input, natural-order
//            output, twiddle psi^-bitrev(N/2^(s+1) + i); X = U + V,
//            Y = (U - V)*w; then one extra pass multiplies every
//            coefficient by N^-1.
// psi is a primitive 2N-th root of unity mod Q. The whole polynomial stays
// in the working buffer during the transform, as the butterfly data flow
// needs access to all of it.
//
// Processing elements: PE butterfly units work side by side on PE
// consecutive butterflies of a stage; each has two 3-stage modular
// multipliers. A stage takes N/(2*PE) issue cycles plus a 4-cycle drain
// (the next stage reads what this one writes), so from the start cycle to the
// done pulse a forward transform takes log2(N)*(N/(2*PE)+4)+1 cycles and an
// inverse one (log2(N)+1)*(N/(2*PE)+4)+1: 13,365 and 14,393 cycles for
// N = 8192, PE = 4.
//
// Twiddle tables: psi^j and psi^-j (j = 0..N-1, natural order, addressed
// through bit reversal) are filled by the unit itself after reset, one entry
// of each table every 3 cycles using the butterfly multipliers; `ready` goes
// high when they are complete. (In silicon these tables would be ROMs; the
// self-fill is this design's way to avoid shipping a table of N words.)
//
// Working buffer: N words, written in place by the butterflies (2*PE reads
// and 2*PE writes per cycle, modelled as a multi-ported array). While the
// unit is idle the host side can write it (we/waddr/wdata) and read it
// (raddr, rdata one cycle later).
//
// Interface: start (with inverse) is accepted when ready && !busy; done
// pulses for one cycle when the last result is written.
module ntt_unit
  import choco_pkg::*;
#(
  parameter int    N   = choco_pkg::N_DEF,
  parameter int    PE  = 4,
  parameter word_t Q   = choco_pkg::QMOD[0],
  parameter word_t PSI = choco_pkg::psi_for(choco_pkg::PSI_MAX[0], choco_pkg::QMOD[0], N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output logic                 ready,
  input  logic                 start,
  input  logic                 inverse,
  output logic                 busy,
  output logic                 done,
  input  logic                 we,
  input  logic [$clog2(N)-1:0] waddr,
  input  word_t                wdata,
  input  logic [$clog2(N)-1:0] raddr,
  output word_t                rdata
);
  localparam int    LOGN    = $clog2(N);
  localparam int    NB      = N / 2;            // butterflies per stage
  localparam word_t PSI_INV = choco_pkg::powmod(PSI, 64'(2 * N - 1), Q);
  localparam word_t NINV    = Q - (Q - 64'd1) / 64'(N);
  localparam int    DEPTH   = 1 + LAT_MUL;      // issue -> write

  typedef logic [LOGN-1:0] addr_t;
  typedef enum logic [1:0] {M_FWD, M_INV, M_SCALE} bmode_e;
  typedef enum logic [1:0] {S_INIT, S_IDLE, S_RUN, S_DRAIN} state_e;

  word_t mem  [N];
  word_t tw_f [N];
  word_t tw_i [N];

  state_e  state;
  logic    inv_q;
  logic [$clog2(LOGN+2)-1:0] stage;
  logic [LOGN-1:0]           bcnt;       // first butterfly of the issue group
  logic [LOGN:0]             init_j;
  logic [1:0]                init_ph;

  // ------------------------------------------------------------ bit reversal
  function automatic addr_t bitrev(addr_t v);
    addr_t r;
    for (int i = 0; i < LOGN; i++) r[i] = v[LOGN-1-i];
    return r;
  endfunction

  // ------------------------------------------------------------ issue stage
  logic   issue;
  bmode_e mode_c;
  addr_t  ax_c [PE], ay_c [PE];
  word_t  tw_c [PE];
  logic   last_stage;

  assign last_stage = inv_q ? (32'(stage) == LOGN) : (32'(stage) == LOGN - 1);
  assign mode_c     = !inv_q ? M_FWD : ((32'(stage) == LOGN) ? M_SCALE : M_INV);

  always_comb begin
    for (int l = 0; l < PE; l++) begin
      logic [LOGN-1:0] b, grp, j, k;
      logic [LOGN:0]   x;
      int              tl;
      b  = bcnt + LOGN'(l);
      grp = '0; j = '0; x = '0; k = '0;
      tl = (mode_c == M_FWD) ? (LOGN - 1 - int'(stage)) : int'(stage);
      ax_c[l] = '0; ay_c[l] = '0; tw_c[l] = '0;
      if (mode_c == M_SCALE) begin
        ax_c[l] = addr_t'({b, 1'b0});
        ay_c[l] = addr_t'({b, 1'b1});
        tw_c[l] = NINV;
      end else begin
        grp = b >> tl;
        j   = b & ((LOGN'(1) << tl) - LOGN'(1));
        x   = ((LOGN+1)'(grp) << (tl + 1)) | (LOGN+1)'(j);
        ax_c[l] = addr_t'(x);
        ay_c[l] = addr_t'(x) | (addr_t'(1) << tl);
        if (mode_c == M_FWD) begin
          k = (LOGN'(1) << stage) + grp;
          tw_c[l] = tw_f[bitrev(k)];
        end else begin
          k = LOGN'(N >> (int'(stage) + 1)) + grp;
          tw_c[l] = tw_i[bitrev(k)];
        end
      end
    end
  end

  // ------------------------------------------------------------ pipeline
  logic   p_v  [DEPTH];
  bmode_e p_m  [DEPTH];
  addr_t  p_x  [DEPTH][PE];
  addr_t  p_y  [DEPTH][PE];
  word_t  p_u  [PE], p_w [PE], p_t [PE];
  word_t  ma_a [PE], ma_b [PE], mb_a [PE], mb_b [PE];
  word_t  ya   [PE], yb   [PE];
  word_t  wx   [PE], wy   [PE];
  logic   pipe_busy;

  always_comb begin
    pipe_busy = 1'b0;
    for (int d = 0; d < DEPTH; d++) pipe_busy |= p_v[d];
  end

  // operand selection of the multipliers (pre-op) and twiddle init sharing
  always_comb begin
    for (int l = 0; l < PE; l++) begin
      ma_a[l] = p_u[l]; ma_b[l] = 64'd1;
      mb_a[l] = p_w[l]; mb_b[l] = p_t[l];
      case (p_m[0])
        M_INV: begin
          ma_a[l] = addmod(p_u[l], p_w[l], Q);
          mb_a[l] = submod(p_u[l], p_w[l], Q);
        end
        M_SCALE: ma_b[l] = NINV;
        default: ;
      endcase
    end
    if (state == S_INIT) begin
      ma_a[0] = (init_j == 0) ? 64'd1 : ya[0];  ma_b[0] = PSI;
      mb_a[0] = (init_j == 0) ? 64'd1 : yb[0];  mb_b[0] = PSI_INV;
    end
  end

  for (genvar l = 0; l < PE; l++) begin : g_pe
    modmul #(.Q(Q)) u_ma (.clk, .a(ma_a[l]), .b(ma_b[l]), .y(ya[l]));
    modmul #(.Q(Q)) u_mb (.clk, .a(mb_a[l]), .b(mb_b[l]), .y(yb[l]));
  end

  // post-op
  always_comb begin
    for (int l = 0; l < PE; l++) begin
      if (p_m[DEPTH-1] == M_FWD) begin
        wx[l] = addmod(ya[l], yb[l], Q);
        wy[l] = submod(ya[l], yb[l], Q);
      end else begin
        wx[l] = ya[l];
        wy[l] = yb[l];
      end
    end
  end

  // ------------------------------------------------------------ control
  assign ready = (state == S_IDLE);
  assign busy  = (state == S_RUN) || (state == S_DRAIN);
  assign issue = (state == S_RUN) && !pipe_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_INIT;
      inv_q   <= 1'b0;
      stage   <= '0;
      bcnt    <= '0;
      init_j  <= '0;
      init_ph <= '0;
      done    <= 1'b0;
      for (int d = 0; d < DEPTH; d++) p_v[d] <= 1'b0;
    end else begin
      done <= 1'b0;
      for (int d = 1; d < DEPTH; d++) p_v[d] <= p_v[d-1];
      p_v[0] <= 1'b0;
      case (state)
        S_INIT: begin
          init_ph <= (init_ph == 2'd2) ? 2'd0 : init_ph + 2'd1;
          if (init_ph == 2'd0) begin
            init_j <= init_j + 1'b1;
            if (init_j == (LOGN+1)'(N - 1)) state <= S_IDLE;
          end
        end
        S_IDLE: begin
          if (start) begin
            state <= S_RUN;
            inv_q <= inverse;
            stage <= '0;
            bcnt  <= '0;
          end
        end
        S_RUN: begin
          // the first group of a stage waits for the previous stage to drain;
          // later groups of the same stage issue back to back
          if (issue || (bcnt != '0)) begin
            p_v[0] <= 1'b1;
            if (32'(bcnt) + 32'(PE) >= 32'(NB)) begin
              bcnt <= '0;
              if (last_stage) state <= S_DRAIN;
              else stage <= stage + 1'b1;
            end else begin
              bcnt <= bcnt + LOGN'(PE);
            end
          end
        end
        S_DRAIN: begin
          if (p_v[DEPTH-1] && !p_v[DEPTH-2]) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // data registers of the pipeline (no reset needed: qualified by p_v)
  always_ff @(posedge clk) begin
    p_m[0] <= mode_c;
    for (int l = 0; l < PE; l++) begin
      p_x[0][l] <= ax_c[l];
      p_y[0][l] <= ay_c[l];
      p_u[l]    <= mem[ax_c[l]];
      p_w[l]    <= mem[ay_c[l]];
      p_t[l]    <= tw_c[l];
    end
    for (int d = 1; d < DEPTH; d++) begin
      p_m[d] <= p_m[d-1];
      p_x[d] <= p_x[d-1];
      p_y[d] <= p_y[d-1];
    end
  end

  // working buffer and twiddle tables
  always_ff @(posedge clk) begin
    if (state == S_INIT && init_ph == 2'd0) begin
      tw_f[addr_t'(init_j)] <= (init_j == 0) ? 64'd1 : ya[0];
      tw_i[addr_t'(init_j)] <= (init_j == 0) ? 64'd1 : yb[0];
    end
    if (p_v[DEPTH-1]) begin
      for (int l = 0; l < PE; l++) begin
        mem[p_x[DEPTH-1][l]] <= wx[l];
        mem[p_y[DEPTH-1][l]] <= wy[l];
      end
    end else if (we && state == S_IDLE) begin
      mem[waddr] <= wdata;
    end
    rdata <= mem[raddr];
  end
endmodule
