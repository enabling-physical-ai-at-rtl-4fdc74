// gru_layer_tb - loads random weights through the write port, streams
// sequences through the layer and compares the final hidden state with the
// reference GRU recurrence. Also checks the rate the paper claims for the
// pipelined time loop: a sequence offered back to back is taken at one
// sample per clock (II=1) and h_T is registered on the clock edge that
// takes the last sample, so it is valid in the following cycle.
// Later sequences use random gaps and random output back-pressure.
module gru_layer_tb;
  import merinda_pkg::*;
  import merinda_ref_pkg::*;

  localparam int V = 16, NX = 3;
  localparam int NW = 3*V*NX + 3*V*V + 3*V;
  localparam int AW = $clog2(NW);

  logic clk = 0, rst_n = 0;
  logic w_we = 0;
  logic [AW-1:0] w_addr = '0;
  fx_t w_data = '0;
  logic in_valid = 0, in_ready, in_last = 0;
  fx_t in_x [NX];
  logic out_valid, out_ready = 0;
  fx_t out_h [V];

  int checks = 0, failures = 0;
  fx_t wx[], wh[], b[];

  gru_layer #(.V(V), .N_X(NX)) dut (.*);

  always #5 clk = ~clk;

  function automatic fx_t rnd(int unsigned r);
    return fx_t'(int'($urandom_range(0, 2 * r)) - int'(r));
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_seq(int k, bit gaps, bit bp);
    fx_t seq[][];
    fx_t h[], xv[];
    int t0, t_last, t_out;
    seq = new[k];
    h = new[V]; xv = new[NX];
    for (int j = 0; j < V; j++) h[j] = 0;
    for (int t = 0; t < k; t++) begin
      seq[t] = new[NX];
      for (int i = 0; i < NX; i++) seq[t][i] = rnd(131072);
      gru_step(V, NX, wx, wh, b, seq[t], h);
    end
    fork
      begin
        for (int t = 0; t < k; t++) begin
          @(negedge clk);
          if (gaps) while ($urandom_range(0, 2) == 0) @(negedge clk);
          in_valid = 1;
          in_last  = (t == k - 1);
          for (int i = 0; i < NX; i++) in_x[i] = seq[t][i];
          #1;
          while (!in_ready) begin @(negedge clk); #1; end
          @(posedge clk);
          if (t == 0) t0 = $time / 10;
          if (t == k - 1) t_last = $time / 10;
          #1;
          in_valid = 0;
          in_last  = 0;
        end
      end
      begin
        out_ready = 0;
        @(negedge clk);
        while (!out_valid) @(negedge clk);
        t_out = ($time - 5) / 10;
        if (bp) repeat ($urandom_range(1, 4)) @(negedge clk);
        for (int j = 0; j < V; j++) begin
          checks++;
          if (out_h[j] !== h[j]) begin
            failures++;
            if (failures < 10) $display("h_T mismatch unit %0d: got %0d exp %0d", j, out_h[j], h[j]);
          end
        end
        out_ready = 1;
        @(negedge clk);
        out_ready = 0;
      end
    join
    if (!gaps) begin
      checks++;
      if (t_last - t0 != k - 1) begin
        failures++;
        $display("II check: %0d samples took %0d cycles", k, t_last - t0 + 1);
      end
    end
    checks++;
    if (t_out != t_last) begin
      failures++;
      $display("latency check: h_T registered %0d edges after the last sample", t_out - t_last);
    end
  endtask

  initial begin
    wx = new[3*V*NX]; wh = new[3*V*V]; b = new[3*V];
    for (int i = 0; i < 3*V*NX; i++) wx[i] = rnd(32768);
    for (int i = 0; i < 3*V*V; i++)  wh[i] = rnd(16384);
    for (int i = 0; i < 3*V; i++)    b[i]  = rnd(32768);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int a = 0; a < NW; a++) begin
      w_we   <= 1;
      w_addr <= AW'(a);
      w_data <= (a < 3*V*NX) ? wx[a] : (a < 3*V*NX + 3*V*V) ? wh[a - 3*V*NX] : b[a - 3*V*NX - 3*V*V];
      @(posedge clk);
    end
    w_we <= 0;
    @(posedge clk);
    run_seq(20, 0, 0);
    run_seq(1, 0, 0);
    run_seq(13, 1, 1);
    run_seq(200, 0, 1);
    run_seq(7, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
