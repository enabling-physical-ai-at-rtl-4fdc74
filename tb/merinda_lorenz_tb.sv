// merinda_lorenz_tb - the accelerator built for a three-state system
// (N_STATE = 3, 30 coefficients: the size of the chaotic Lorenz benchmark)
// and driven with a Lorenz trajectory (sigma 10, rho 28, beta 8/3, scaled by
// 1/10, input held at zero). Three 200-sample sequences, threshold and top-K
// dropout; every reconstruction sample and every result is compared with
// the reference model.
module merinda_lorenz_tb;
  import merinda_pkg::*;
  import merinda_ref_pkg::*;

  localparam int N = 3, V = 16, K = 200, NX = 4, P = 30, NO = 31;
  localparam int NSEQ = 3;
  localparam int AW = $clog2(K), LW = $clog2(K + 1), CW = $clog2(P + 1);

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [15:0] cfg_addr = '0;
  fx_t cfg_data = '0;
  fx_t dt;
  logic [LW-1:0] seq_len;
  logic drop_mode = 0;
  fx_t drop_thr;
  logic [CW-1:0] drop_k;
  logic s_valid = 0, s_ready;
  fx_t s_y [N];
  fx_t s_u;
  logic m_valid, m_ready = 1;
  fx_t m_est [N];
  fx_t m_meas [N];
  logic [AW-1:0] m_idx;
  logic m_last;
  logic res_valid;
  fx_t res_theta [P];
  logic [P-1:0] res_mask;
  logic [CW-1:0] res_nnz;
  fx_t res_shift, res_mse;
  logic [63:0] res_sse;

  merinda_top #(.N_STATE(N), .HIDDEN(V), .MAX_SEQ(K)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  fx_t wx[], wh[], bg[], wd[], bd[];
  fx_t trace_y [NSEQ][K][N];
  fx_t exp_est [NSEQ][K][N];
  fx_t exp_th [NSEQ][P];
  int  exp_nnz [NSEQ];
  longint unsigned exp_sse [NSEQ];
  bit  seq_mode [NSEQ] = '{0, 1, 0};

  function automatic fx_t rnd(int unsigned r);
    return fx_t'(int'($urandom_range(0, 2 * r)) - int'(r));
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic build_expected(int s);
    fx_t h[], xv[], y[], c[], th[], xs[];
    int nnz;
    h = new[V]; xv = new[NX]; y = new[NO]; c = new[P]; th = new[P]; xs = new[N];
    for (int j = 0; j < V; j++) h[j] = 0;
    for (int t = 0; t < K; t++) begin
      for (int i = 0; i < N; i++) xv[i] = trace_y[s][t][i];
      xv[N] = 0;
      gru_step(V, NX, wx, wh, bg, xv, h);
    end
    dense(V, NO, P, 1, wd, bd, h, y);
    for (int o = 0; o < P; o++) c[o] = y[o];
    dropout(P, seq_mode[s], drop_thr, int'(drop_k), c, th, nnz);
    for (int o = 0; o < P; o++) exp_th[s][o] = th[o];
    exp_nnz[s] = nnz;
    for (int i = 0; i < N; i++) xs[i] = trace_y[s][0][i];
    exp_sse[s] = 0;
    for (int t = 0; t < K; t++) begin
      for (int i = 0; i < N; i++) begin
        longint e;
        exp_est[s][t][i] = xs[i];
        e = longint'(trace_y[s][t][i]) - longint'(xs[i]);
        exp_sse[s] += longint'((e * e) >>> FRAC_W);
      end
      rk4_step(N, th, dt, y[P], xs);
    end
  endtask

  int est_seq = 0, est_t = 0, res_seq = 0;

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    for (int i = 0; i < N; i++) begin
      checks++;
      if (m_est[i] !== exp_est[est_seq][est_t][i]) begin
        failures++;
        if (failures < 10) $display("seq %0d t %0d eq %0d: est %0d exp %0d", est_seq, est_t, i,
                                    m_est[i], exp_est[est_seq][est_t][i]);
      end
    end
    if (est_t == K - 1) begin est_t = 0; est_seq++; end
    else est_t++;
  end

  always @(posedge clk) if (rst_n && res_valid) begin
    longint unsigned em;
    for (int o = 0; o < P; o++) begin
      checks++;
      if (res_theta[o] !== exp_th[res_seq][o]) begin failures++; $display("seq %0d theta[%0d] mismatch", res_seq, o); end
    end
    em = exp_sse[res_seq] / longint'(N * K);
    if (em > 64'h7fffffff) em = 64'h7fffffff;
    checks += 3;
    if (int'(res_nnz) != exp_nnz[res_seq]) begin failures++; $display("nnz %0d exp %0d", res_nnz, exp_nnz[res_seq]); end
    if (res_sse !== exp_sse[res_seq]) begin failures++; $display("sse mismatch"); end
    if (res_mse !== fx_t'(em)) begin failures++; $display("mse mismatch"); end
    $display("sequence %0d: %0d of %0d terms kept, MSE %f", res_seq, res_nnz, P, fx_to_real(res_mse));
    res_seq++;
  end

  initial begin
    real lx, ly, lz;
    dt = fx_from_real(0.005);
    seq_len = LW'(K);
    drop_thr = fx_from_real(0.05);
    drop_k = CW'(7);      // the Lorenz system has 7 non-zero terms
    wx = new[3*V*NX]; wh = new[3*V*V]; bg = new[3*V]; wd = new[NO*V]; bd = new[NO];
    for (int i = 0; i < 3*V*NX; i++) wx[i] = rnd(32768);
    for (int i = 0; i < 3*V*V; i++)  wh[i] = rnd(16384);
    for (int i = 0; i < 3*V; i++)    bg[i] = rnd(16384);
    for (int i = 0; i < NO*V; i++)   wd[i] = rnd(3000);
    for (int i = 0; i < NO; i++)     bd[i] = rnd(9000);
    // Lorenz trajectory, fine Euler steps, one sample every 0.005 s
    lx = 1.0; ly = 1.0; lz = 1.0;
    for (int s = 0; s < NSEQ; s++)
      for (int t = 0; t < K; t++) begin
        trace_y[s][t][0] = fx_from_real(lx / 10.0);
        trace_y[s][t][1] = fx_from_real(ly / 10.0);
        trace_y[s][t][2] = fx_from_real(lz / 10.0);
        for (int q = 0; q < 10; q++) begin
          real dx, dy, dz;
          dx = 10.0 * (ly - lx); dy = lx * (28.0 - lz) - ly; dz = lx * ly - 8.0 / 3.0 * lz;
          lx += 0.0005 * dx; ly += 0.0005 * dy; lz += 0.0005 * dz;
        end
      end
    for (int s = 0; s < NSEQ; s++) build_expected(s);

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 3*V*NX + 3*V*V + 3*V; a++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = 16'(a);
      cfg_data = (a < 3*V*NX) ? wx[a] : (a < 3*V*NX + 3*V*V) ? wh[a - 3*V*NX] : bg[a - 3*V*NX - 3*V*V];
    end
    for (int a = 0; a < NO*V + NO; a++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = 16'h1000 | 16'(a);
      cfg_data = (a < NO*V) ? wd[a] : bd[a - NO*V];
    end
    @(negedge clk);
    cfg_we = 0;
    // one sequence at a time, dropout mode set before each
    for (int s = 0; s < NSEQ; s++) begin
      drop_mode = seq_mode[s];
      for (int t = 0; t < K; t++) begin
        s_valid = 1;
        for (int i = 0; i < N; i++) s_y[i] = trace_y[s][t][i];
        s_u = 0;
        #1;
        while (!s_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      s_valid = 0;
      wait (res_seq == s + 1);
      @(negedge clk);
    end
    repeat (10) @(posedge clk);
    checks++;
    if (est_seq != NSEQ) begin failures++; $display("%0d sequences reconstructed", est_seq); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
