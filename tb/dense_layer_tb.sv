// dense_layer_tb - loads random weights, drives random hidden vectors with
// random output back-pressure and compares every output with the reference
// dense layer (ReLU on the coefficient outputs only). Also checks that at
// least one coefficient was clipped by the ReLU and one shift output was
// negative (linear), and that a vector is taken every cycle when the output
// is always ready.
module dense_layer_tb;
  import merinda_pkg::*;
  import merinda_ref_pkg::*;

  localparam int V = 16, NC = 12, NS = 1, NO = NC + NS;
  localparam int NW = NO * V + NO;
  localparam int AW = $clog2(NW);

  logic clk = 0, rst_n = 0;
  logic w_we = 0;
  logic [AW-1:0] w_addr = '0;
  fx_t w_data = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  fx_t in_h [V];
  fx_t out_y [NO];

  int checks = 0, failures = 0, clipped = 0, negshift = 0;
  fx_t w[], b[];
  fx_t expq[$][];

  dense_layer #(.V(V), .N_COEF(NC), .N_SHIFT(NS)) dut (.*);

  always #5 clk = ~clk;

  function automatic fx_t rnd(int unsigned r);
    return fx_t'(int'($urandom_range(0, 2 * r)) - int'(r));
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker: compares on every handshake
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      fx_t e[];
      e = expq.pop_front();
      for (int o = 0; o < NO; o++) begin
        checks++;
        if (out_y[o] !== e[o]) begin
          failures++;
          if (failures < 10) $display("output %0d: got %0d exp %0d", o, out_y[o], e[o]);
        end
        if (o < NC && e[o] == 0) clipped++;
        if (o >= NC && e[o] < 0) negshift++;
      end
    end
  end

  initial begin
    int n_acc, t0, t1;
    w = new[NO*V]; b = new[NO];
    for (int i = 0; i < NO*V; i++) w[i] = rnd(32768);
    for (int i = 0; i < NO; i++)   b[i] = rnd(16384);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int a = 0; a < NW; a++) begin
      @(negedge clk);
      w_we = 1; w_addr = AW'(a); w_data = (a < NO*V) ? w[a] : b[a - NO*V];
    end
    @(negedge clk);
    w_we = 0;
    // phase 1: random valid and ready
    for (int n = 0; n < 60; n++) begin
      fx_t hv[], y[];
      hv = new[V]; y = new[NO];
      for (int j = 0; j < V; j++) begin hv[j] = rnd(65536); in_h[j] = hv[j]; end
      dense(V, NO, NC, 1, w, b, hv, y);
      in_valid = 1;
      out_ready = $urandom_range(0, 1);
      #1;
      while (!in_ready) begin @(negedge clk); out_ready = $urandom_range(0, 1); #1; end
      expq.push_back(y);
      @(negedge clk);
      in_valid = 0;
      out_ready = $urandom_range(0, 1);
    end
    out_ready = 1;
    repeat (3) @(negedge clk);
    // phase 2: throughput, one vector per cycle
    n_acc = 0;
    t0 = $time;
    for (int n = 0; n < 20; n++) begin
      fx_t hv[], y[];
      hv = new[V]; y = new[NO];
      for (int j = 0; j < V; j++) begin hv[j] = rnd(65536); in_h[j] = hv[j]; end
      dense(V, NO, NC, 1, w, b, hv, y);
      in_valid = 1;
      #1;
      if (in_ready) n_acc++;
      expq.push_back(y);
      @(negedge clk);
    end
    t1 = $time;
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (n_acc != 20 || (t1 - t0) != 200) begin
      failures++;
      $display("throughput: %0d vectors in %0d cycles", n_acc, (t1 - t0) / 10);
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d outputs missing", expq.size()); end
    checks++;
    if (clipped == 0 || negshift == 0) begin
      failures++;
      $display("ReLU never clipped (%0d) or shift never negative (%0d)", clipped, negshift);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
