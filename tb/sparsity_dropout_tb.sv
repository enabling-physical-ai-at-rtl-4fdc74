// sparsity_dropout_tb - threshold mode on the two coefficient vectors of the
// Lotka-Volterra example (threshold 0.001: nothing dropped from the first,
// three terms dropped from the second), then random vectors in both modes
// compared with the reference selection, including ties in top-K mode.
module sparsity_dropout_tb;
  import merinda_pkg::*;
  import merinda_ref_pkg::*;

  localparam int N = 12;
  localparam int CW = $clog2(N + 1);

  logic clk = 0, rst_n = 0;
  logic mode = 0;
  fx_t threshold = '0;
  logic [CW-1:0] keep_k = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  fx_t in_c [N];
  fx_t out_theta [N];
  logic [N-1:0] out_mask;
  logic [CW-1:0] out_nnz;

  int checks = 0, failures = 0;

  sparsity_dropout #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(fx_t c[], fx_t exp_th[], int exp_nnz);
    @(negedge clk);
    for (int i = 0; i < N; i++) in_c[i] = c[i];
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid) begin failures++; $display("no output one cycle after input"); end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (out_theta[i] !== exp_th[i] || out_mask[i] !== (exp_th[i] != 0)) begin
        failures++;
        if (failures < 10) $display("term %0d: got %0d exp %0d", i, out_theta[i], exp_th[i]);
      end
    end
    checks++;
    if (int'(out_nnz) != exp_nnz) begin failures++; $display("nnz %0d exp %0d", out_nnz, exp_nnz); end
  endtask

  initial begin
    real ex1 [N] = '{0.4, 0.5, 0.6, 0.1, 0.2, 0.5, 0.1, 0.3, 0.4, 0.6, 0.8, 0.2};
    real ex2 [N] = '{0.0006, 0.55, 0.06, 0.0003, 0.005, -0.09, 0.8, 0.003, -0.7, 0.04, 0.06, 0.00005};
    real ex2d[N] = '{0.0, 0.55, 0.06, 0.0, 0.005, -0.09, 0.8, 0.003, -0.7, 0.04, 0.06, 0.0};
    fx_t c[], e[];
    int nnz;
    c = new[N]; e = new[N];
    repeat (2) @(posedge clk);
    rst_n = 1;
    mode = 0;
    threshold = fx_from_real(0.001);
    for (int i = 0; i < N; i++) begin c[i] = fx_from_real(ex1[i]); e[i] = c[i]; end
    apply(c, e, 12);
    for (int i = 0; i < N; i++) begin c[i] = fx_from_real(ex2[i]); e[i] = fx_from_real(ex2d[i]); end
    apply(c, e, 9);
    // random, both modes
    for (int n = 0; n < 200; n++) begin
      mode = n[0];
      threshold = fx_t'($urandom_range(0, 20000));
      keep_k = CW'($urandom_range(0, N));
      for (int i = 0; i < N; i++) begin
        c[i] = fx_t'(int'($urandom_range(0, 40000)) - 20000);
        if (n % 5 == 1 && i > 0 && $urandom_range(0, 2) == 0) c[i] = -c[i - 1]; // ties
      end
      dropout(N, mode, threshold, int'(keep_k), c, e, nnz);
      apply(c, e, nnz);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
