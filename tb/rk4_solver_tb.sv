// rk4_solver_tb - integrates two models out of a trace memory modelled in
// the testbench (one-cycle read latency, as a block RAM):
//   1. dx1 = -0.5 x1 + u, dx2 = 0.3 x2 with u = 0.25 constant, compared with
//      the closed-form solution (fourth-order accuracy, tolerance 2e-3);
//   2. random second-order Lotka-Volterra-like models with a varying input
//      and an input shift, compared bit for bit with the reference RK4.
// Checks Y_est[0] = Y(0), that meas_y returns the stored trace, the index
// and last flag, the cycle count 7k-4 without back-pressure, and correct
// results under random est_ready back-pressure.
module rk4_solver_tb;
  import merinda_pkg::*;
  import merinda_ref_pkg::*;

  localparam int N = 2, MAXS = 64, NT = 6;
  localparam int AW = $clog2(MAXS), LW = $clog2(MAXS + 1);

  logic clk = 0, rst_n = 0;
  logic start = 0;
  fx_t theta [N*NT];
  fx_t shift = '0, dt = '0;
  logic [LW-1:0] seq_len = '0;
  logic busy, done, rd_en;
  logic [AW-1:0] rd_addr;
  fx_t rd_y [N];
  fx_t rd_u;
  logic est_valid, est_ready = 1, est_last;
  fx_t est_y [N];
  fx_t meas_y [N];
  logic [AW-1:0] est_idx;

  fx_t mem_y [MAXS][N];
  fx_t mem_u [MAXS];

  int checks = 0, failures = 0;
  bit  bp = 0;

  rk4_solver #(.N_STATE(N), .MAX_SEQ(MAXS)) dut (.*);

  always #5 clk = ~clk;

  always_ff @(posedge clk) if (rd_en) begin rd_y <= mem_y[rd_addr]; rd_u <= mem_u[rd_addr]; end

  always @(negedge clk) est_ready = bp ? ($urandom_range(0, 2) != 0) : 1'b1;

  function automatic fx_t rnd(int unsigned r);
    return fx_t'(int'($urandom_range(0, 2 * r)) - int'(r));
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // exp_y[t][i] expected estimates; tol 0 means bit exact
  task automatic run_solve(int k, fx_t exp_y[][], real tol, bit check_cycles);
    int t_start, t_done, seen;
    @(negedge clk);
    seq_len = LW'(k);
    start = 1;
    @(posedge clk);
    t_start = $time / 10;
    @(negedge clk);
    start = 0;
    seen = 0;
    forever begin
      @(posedge clk);
      if (est_valid && est_ready) begin
        for (int i = 0; i < N; i++) begin
          checks += 2;
          if (tol == 0.0 ? (est_y[i] !== exp_y[seen][i])
                         : ((fx_to_real(est_y[i]) - fx_to_real(exp_y[seen][i])) > tol ||
                            (fx_to_real(exp_y[seen][i]) - fx_to_real(est_y[i])) > tol)) begin
            failures++;
            if (failures < 10) $display("t=%0d eq %0d: got %f exp %f", seen, i,
                                        fx_to_real(est_y[i]), fx_to_real(exp_y[seen][i]));
          end
          if (meas_y[i] !== mem_y[seen][i]) begin failures++; $display("meas_y wrong at %0d", seen); end
        end
        checks += 2;
        if (int'(est_idx) != seen) begin failures++; $display("idx %0d exp %0d", est_idx, seen); end
        if (est_last != (seen == k - 1)) begin failures++; $display("last flag wrong at %0d", seen); end
        seen++;
      end
      if (done) break;
    end
    t_done = $time / 10;
    checks++;
    if (seen != k) begin failures++; $display("%0d estimates for %0d samples", seen, k); end
    if (check_cycles) begin
      checks++;
      // start accepted at t_start; last EMIT handshake at t_done - 1
      if (t_done - 1 - t_start != 7 * k - 4) begin
        failures++;
        $display("cycles: %0d, expected %0d", t_done - 1 - t_start, 7 * k - 4);
      end
    end
  endtask

  initial begin
    fx_t ey[][], tv[], xv[];
    int k;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1. decoupled linear system, closed form
    for (int i = 0; i < N*NT; i++) theta[i] = '0;
    theta[0] = FX_ONE;                   // dx1: 1 * u
    theta[1] = fx_from_real(-0.5);       // dx1: -0.5 x1
    theta[NT + 2] = fx_from_real(0.3);   // dx2: 0.3 x2
    dt = fx_from_real(0.1);
    shift = '0;
    k = 40;
    ey = new[k];
    for (int t = 0; t < k; t++) begin
      real tt;
      tt = 0.1 * t;
      ey[t] = new[N];
      mem_u[t] = fx_from_real(0.25);
      // x1(0)=2 -> x1 = 0.5 + 1.5 e^{-0.5t};  x2(0)=0.5 -> 0.5 e^{0.3t}
      ey[t][0] = fx_from_real(0.5 + 1.5 * $exp(-0.5 * tt));
      ey[t][1] = fx_from_real(0.5 * $exp(0.3 * tt));
      mem_y[t][0] = ey[t][0];
      mem_y[t][1] = ey[t][1];
    end
    run_solve(k, ey, 0.002, 1);
    // 2. random models, bit exact, with and without back-pressure
    tv = new[N*NT]; xv = new[N];
    for (int r = 0; r < 6; r++) begin
      bp = r[0];
      k = (r == 5) ? MAXS : $urandom_range(1, 30);
      for (int i = 0; i < N*NT; i++) begin theta[i] = rnd(24000); tv[i] = theta[i]; end
      shift = rnd(10000);
      dt = fx_t'($urandom_range(1000, 6000));
      ey = new[k];
      for (int t = 0; t < k; t++) begin
        mem_u[t] = rnd(40000);
        mem_y[t][0] = rnd(80000);
        mem_y[t][1] = rnd(80000);
      end
      xv[0] = mem_y[0][0]; xv[1] = mem_y[0][1];
      for (int t = 0; t < k; t++) begin
        ey[t] = new[N];
        ey[t][0] = xv[0]; ey[t][1] = xv[1];
        rk4_step(N, tv, dt, mem_u[t] + shift, xv);
      end
      run_solve(k, ey, 0.0, !bp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
