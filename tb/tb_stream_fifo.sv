// tb_stream_fifo: random pushes and pops against a queue model; checks the
// data order, that the FIFO fills to exactly DEPTH entries (in_ready low),
// and that an empty FIFO reports no valid data.
module tb_stream_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = 0, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0, full_seen = 0, empty_seen = 0;
  logic [W-1:0] model [$];

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      // bias towards filling in the first half, draining in the second
      in_valid  = ($urandom % 100) < ((n % 1000) < 500 ? 70 : 30);
      out_ready = ($urandom % 100) < ((n % 1000) < 500 ? 30 : 70);
      in_data   = W'($urandom);
      #1;
      checks++;
      if (in_ready != (model.size() < D) || out_valid != (model.size() > 0) || count != model.size()) begin
        failures++; $display("status mismatch at %0d: size %0d count %0d", n, model.size(), count);
      end
      if (model.size() == D) full_seen++;
      if (model.size() == 0) empty_seen++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== model.pop_front()) begin failures++; $display("data mismatch at %0d", n); end
      end
      if (in_valid && in_ready) model.push_back(in_data);
      @(negedge clk);
    end
    checks++;
    if (full_seen == 0 || empty_seen == 0) begin failures++; $display("full/empty never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
