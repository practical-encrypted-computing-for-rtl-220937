// encode_unit: Encoding / Decoding module (batch encoding of the plaintext).
//
// BFV batching packs N integers mod t ("slots") into one plaintext
// polynomial so that polynomial arithmetic acts slot by slot. Following the
// SEAL library, slot i corresponds to evaluation at psi^(g_i) where psi is a
// primitive 2N-th root of unity mod t and
//   g_i = 3^i mod 2N          for i <  N/2   (first row)
//   g_i = -3^(i-N/2) mod 2N   for i >= N/2   (second row).
// The NTT leaves evaluation at psi^(2j+1) at bit-reversed position j, so slot
// i lives at buffer address bitrev((g_i - 1)/2).
//
//   Encoding: Plain Mod & Reorder writes value_i mod t to address
//             bitrev((g_i - 1)/2) of the working buffer; then the INTT
//             (mod t) turns the slot values into polynomial coefficients,
//             read in natural order for message scaling.
//   Decoding: the decrypted coefficients are written in natural order, the
//             NTT (mod t) evaluates them, and the slots are read back in
//             slot order through the same address sequence.
// The address sequence is generated on the fly (g advances by a factor of 3
// per slot, restarting at 1 for the second row), so no index table is stored.
//
// Interface: seq_restart rewinds the slot sequence. enc_valid/enc_value
// writes the next slot (encoding); we/waddr/wdata writes a coefficient by
// address; slot_rd reads the next slot and raddr reads by address, both
// with rdata one cycle later (slot_rd has priority). start/inverse run the
// transform of the internal ntt_unit (PE butterflies); ready/busy/done are
// its status.
module encode_unit
  import choco_pkg::*;
#(
  parameter int N  = choco_pkg::N_DEF,
  parameter int PE = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output logic                 ready,
  output logic                 busy,
  output logic                 done,
  input  logic                 start,
  input  logic                 inverse,
  input  logic                 seq_restart,
  input  logic                 enc_valid,
  input  word_t                enc_value,
  input  logic                 we,
  input  logic [$clog2(N)-1:0] waddr,
  input  word_t                wdata,
  input  logic                 slot_rd,
  input  logic [$clog2(N)-1:0] raddr,
  output word_t                rdata
);
  localparam int LOGN = $clog2(N);
  typedef logic [LOGN-1:0] addr_t;

  logic [LOGN-1:0] idx;        // current slot
  logic [LOGN:0]   pos;        // 3^(idx mod N/2) mod 2N
  addr_t           slot_addr;

  function automatic addr_t bitrev(addr_t v);
    addr_t r;
    for (int i = 0; i < LOGN; i++) r[i] = v[LOGN-1-i];
    return r;
  endfunction

  always_comb begin
    logic [LOGN:0] g;
    g = idx[LOGN-1] ? (LOGN+1)'(2 * N) - pos : pos;   // second row: -3^i
    slot_addr = bitrev(addr_t'((g - 1'b1) >> 1));
  end

  // Plain Mod & Reorder: slot sequence generator
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx <= '0;
      pos <= (LOGN+1)'(1);
    end else if (seq_restart) begin
      idx <= '0;
      pos <= (LOGN+1)'(1);
    end else if (enc_valid || slot_rd) begin
      idx <= idx + 1'b1;
      if (idx == addr_t'(N / 2 - 1)) pos <= (LOGN+1)'(1);
      else                           pos <= (LOGN+1)'(3 * pos);   // mod 2N by truncation
    end
  end

  logic  n_we;
  addr_t n_waddr, n_raddr;
  word_t n_wdata;

  assign n_we    = enc_valid || we;
  assign n_waddr = enc_valid ? slot_addr : waddr;
  assign n_wdata = enc_valid ? word_t'(enc_value % T) : wdata;
  assign n_raddr = slot_rd ? slot_addr : raddr;

  ntt_unit #(.N(N), .PE(PE), .Q(T), .PSI(psi_for(PSI_T, T, N))) u_ntt (
    .clk, .rst_n, .ready, .start, .inverse, .busy, .done,
    .we(n_we), .waddr(n_waddr), .wdata(n_wdata), .raddr(n_raddr), .rdata);
endmodule
