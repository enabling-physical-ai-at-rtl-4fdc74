// trace_buffer_tb - fills a 200-entry, 96-bit buffer with random words,
// reads them back in random order with simultaneous writes to other
// addresses, and checks the one-cycle read latency and that rd_data holds
// its value while rd_en is low.
module trace_buffer_tb;
  localparam int W = 96, D = 200, AW = $clog2(D);

  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [W-1:0] wr_data = '0, rd_data;

  int checks = 0, failures = 0;
  logic [W-1:0] model [D];

  trace_buffer #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_data = {$urandom, $urandom, $urandom};
      model[a] = wr_data;
    end
    @(negedge clk);
    wr_en = 0;
    for (int n = 0; n < 1000; n++) begin
      logic [W-1:0] expd;
      int ra, wa;
      ra = $urandom_range(0, D - 1);
      wa = $urandom_range(0, D - 1);
      if (wa == ra) wa = (wa + 1) % D;
      rd_en = 1; rd_addr = AW'(ra);
      wr_en = $urandom_range(0, 1); wr_addr = AW'(wa); wr_data = {$urandom, $urandom, $urandom};
      expd = model[ra];
      if (wr_en) model[wa] = wr_data;
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      checks++;
      if (rd_data !== expd) begin failures++; if (failures < 10) $display("addr %0d read %h exp %h", ra, rd_data, expd); end
      // hold while rd_en is low
      rd_addr = AW'(wa);
      @(negedge clk);
      checks++;
      if (rd_data !== expd) begin failures++; $display("read data not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
