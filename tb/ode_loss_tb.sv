// ode_loss_tb - streams random (estimate, measurement) pairs with gaps and
// checks the sum of squared errors and the mean square error against values
// computed in the testbench with 64-bit integer arithmetic, the 65-cycle
// division latency, a zero-error sequence and the saturation of a huge
// error to the largest representable value.
module ode_loss_tb;
  import merinda_pkg::*;

  localparam int N = 2;

  logic clk = 0, rst_n = 0;
  logic clear = 0, in_valid = 0, in_last = 0, done;
  fx_t in_est [N];
  fx_t in_meas [N];
  fx_t mse;
  logic [63:0] sse;

  int checks = 0, failures = 0;

  ode_loss #(.N_STATE(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int k, int unsigned range_raw, bit same);
    longint unsigned exp_sse, exp_mse;
    int t_last, lat;
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    exp_sse = 0;
    for (int t = 0; t < k; t++) begin
      while ($urandom_range(0, 3) == 0) @(negedge clk);
      for (int i = 0; i < N; i++) begin
        longint e;
        in_est[i]  = fx_t'(int'($urandom_range(0, 2 * range_raw)) - int'(range_raw));
        in_meas[i] = same ? in_est[i] : fx_t'(int'($urandom_range(0, 2 * range_raw)) - int'(range_raw));
        e = longint'(in_meas[i]) - longint'(in_est[i]);
        exp_sse += longint'((e * e) >>> FRAC_W);
      end
      in_valid = 1;
      in_last = (t == k - 1);
      @(negedge clk);
      in_valid = 0;
      in_last = 0;
    end
    t_last = $time;
    lat = 0;
    while (!done) begin @(negedge clk); lat++; end
    exp_mse = exp_sse / longint'(N * k);
    if (exp_mse > 64'h7fffffff) exp_mse = 64'h7fffffff;
    checks += 3;
    if (sse !== exp_sse) begin failures++; $display("sse %0d exp %0d", sse, exp_sse); end
    if (mse !== fx_t'(exp_mse)) begin failures++; $display("mse %0d exp %0d", mse, exp_mse); end
    if (lat != 64) begin failures++; $display("division took %0d cycles", lat + 1); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(10, 200000, 0);
    run(200, 3000000, 0);
    run(1, 65536, 0);
    run(37, 1000000, 1);
    run(50, 1 << 30, 0);   // errors near 2^15: saturates
    for (int r = 0; r < 10; r++) run($urandom_range(1, 100), $urandom_range(1, 1 << 24), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
