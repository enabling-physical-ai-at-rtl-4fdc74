// stream_fifo_tb - random pushes and pops against a queue model: order and
// data preserved, in_ready low exactly when DEPTH entries are held,
// out_valid low exactly when empty, level tracking the queue, and both the
// full and the empty condition reached.
module stream_fifo_tb;
  localparam int W = 16, D = 4;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;
  logic [$clog2(D):0] level;

  int checks = 0, failures = 0, fulls = 0, empties = 0;
  logic [W-1:0] q[$];

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      int bias;
      bias = (c / 200) % 2;   // alternate phases that fill and drain
      @(negedge clk);
      in_valid  = ($urandom_range(0, 3) < (bias ? 3 : 1));
      in_data   = W'($urandom);
      out_ready = ($urandom_range(0, 3) < (bias ? 1 : 3));
      #1;
      checks += 4;
      if (in_ready != (q.size() < D)) begin failures++; $display("in_ready wrong, size %0d", q.size()); end
      if (out_valid != (q.size() > 0)) begin failures++; $display("out_valid wrong, size %0d", q.size()); end
      if (int'(level) != q.size()) begin failures++; $display("level %0d exp %0d", level, q.size()); end
      if (out_valid && out_data !== q[0]) begin failures++; $display("data %h exp %h", out_data, q[0]); end
      if (q.size() == D) fulls++;
      if (q.size() == 0) empties++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    checks++;
    if (fulls == 0 || empties == 0) begin failures++; $display("full %0d empty %0d", fulls, empties); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
