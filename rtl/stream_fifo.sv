// stream_fifo: small synchronous FIFO used as the accelerator's initial input
// buffer and final output buffer. Host data (key, message and ciphertext
// words) arrive as a valid/ready stream and are buffered here so that the
// datapath can take one word per cycle when it is ready; results wait here
// until the host takes them. Storage is a DEPTH-entry array (an SRAM
// scratchpad in silicon) with separate read and write pointers.
// Interface: in_valid/in_ready and out_valid/out_ready streams; out_data is
// the head entry (first-word fall-through); count is the fill level.
// A word written into an empty FIFO can be read in the next cycle.
module stream_fifo #(
  parameter int WIDTH = 128,
  parameter int DEPTH = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [WIDTH-1:0]         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [WIDTH-1:0]         out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             push, pop;

  assign in_ready  = (32'(count) < DEPTH);
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (pop)  rp <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end

  always_ff @(posedge clk)
    if (push) mem[wp] <= in_data;

  // a full FIFO never accepts, an empty one never delivers
  assert property (@(posedge clk) disable iff (!rst_n) (32'(count) == DEPTH) |-> !push);
  assert property (@(posedge clk) disable iff (!rst_n) (count == '0) |-> !pop);
endmodule
