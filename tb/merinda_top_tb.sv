// merinda_top_tb - end-to-end run of the forward-pass accelerator at its
// default size (hidden size 16, two states, one input, sequences of 200
// samples). Loads random GRU and dense weights through the configuration
// port, streams several sequences back to back, and checks every
// reconstruction sample and every per-sequence result (sparse coefficients,
// mask, non-zero count, input shift, SSE, MSE) against the reference model
// run in the testbench.
//
// It also counts how often each mechanism of the design occurs and fails if
// one never does: the GRU taking one sample per clock, GRU loading overlapped
// with a running solve (ping-pong banks), the loader stalled because both
// banks are taken, input back-pressure, output back-pressure stalling the
// solver, ReLU clipping, threshold-mode and top-K-mode dropout each removing
// terms.
module merinda_top_tb;
  import merinda_pkg::*;
  import merinda_ref_pkg::*;

  localparam int N = 2, V = 16, K = 200, NX = 3, NT = 6, P = 12, NO = 13;
  localparam int NSEQ = 6;
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

  merinda_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_overlap = 0, n_bank_stall = 0, n_in_bp = 0, n_out_bp = 0, n_relu = 0;
  int n_thr_drop = 0, n_topk_drop = 0, n_ii1 = 0;

  fx_t wx[], wh[], bg[], wd[], bd[];
  fx_t trace_y [NSEQ][K][N];
  fx_t trace_u [NSEQ][K];
  bit  seq_mode [NSEQ];
  bit  bp_phase = 0;

  // expected results, in order
  fx_t exp_est [NSEQ][K][N];
  fx_t exp_th [NSEQ][P];
  fx_t exp_shift [NSEQ];
  int  exp_nnz [NSEQ];
  longint unsigned exp_sse [NSEQ];

  function automatic fx_t rnd(int unsigned r);
    return fx_t'(int'($urandom_range(0, 2 * r)) - int'(r));
  endfunction

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ reference
  task automatic build_expected(int s);
    fx_t h[], xv[], y[], c[], th[], xs[];
    int nnz;
    h = new[V]; xv = new[NX]; y = new[NO]; c = new[P]; th = new[P]; xs = new[N];
    for (int j = 0; j < V; j++) h[j] = 0;
    for (int t = 0; t < K; t++) begin
      xv[0] = trace_y[s][t][0]; xv[1] = trace_y[s][t][1]; xv[2] = trace_u[s][t];
      gru_step(V, NX, wx, wh, bg, xv, h);
    end
    dense(V, NO, P, 1, wd, bd, h, y);
    begin
      fx_t yr[];
      yr = new[NO];
      dense(V, NO, P, 0, wd, bd, h, yr);
      for (int o = 0; o < P; o++) if (yr[o] < 0) n_relu++;
    end
    for (int o = 0; o < P; o++) c[o] = y[o];
    dropout(P, seq_mode[s], drop_thr, int'(drop_k), c, th, nnz);
    if (nnz < P) begin
      if (seq_mode[s]) n_topk_drop++;
      else begin
        // count only terms the threshold removed that ReLU had not zeroed
        for (int o = 0; o < P; o++) if (c[o] != 0 && th[o] == 0) begin n_thr_drop++; break; end
      end
    end
    for (int o = 0; o < P; o++) exp_th[s][o] = th[o];
    exp_nnz[s] = nnz;
    exp_shift[s] = y[P];
    xs[0] = trace_y[s][0][0]; xs[1] = trace_y[s][0][1];
    exp_sse[s] = 0;
    for (int t = 0; t < K; t++) begin
      for (int i = 0; i < N; i++) begin
        longint e;
        exp_est[s][t][i] = xs[i];
        e = longint'(trace_y[s][t][i]) - longint'(xs[i]);
        exp_sse[s] += longint'((e * e) >>> FRAC_W);
      end
      rk4_step(N, th, dt, trace_u[s][t] + y[P], xs);
    end
  endtask

  // ------------------------------------------------------------ monitors
  int est_seq = 0, est_t = 0, res_seq = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.pop && dut.sv_busy) n_overlap++;
    if (dut.fi_valid && dut.gru_in_ready && !dut.bank_free) n_bank_stall++;
    if (s_valid && !s_ready) n_in_bp++;
    if (dut.est_valid && !dut.est_ready) n_out_bp++;
  end

  always @(negedge clk) m_ready = bp_phase ? ($urandom_range(0, 15) == 0) : 1'b1;

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    for (int i = 0; i < N; i++) begin
      checks += 2;
      if (m_est[i] !== exp_est[est_seq][est_t][i]) begin
        failures++;
        if (failures < 10) $display("seq %0d t %0d eq %0d: est %0d exp %0d", est_seq, est_t, i,
                                    m_est[i], exp_est[est_seq][est_t][i]);
      end
      if (m_meas[i] !== trace_y[est_seq][est_t][i]) begin
        failures++;
        if (failures < 10) $display("seq %0d t %0d: measurement mismatch", est_seq, est_t);
      end
    end
    checks += 2;
    if (int'(m_idx) != est_t) begin failures++; $display("index %0d exp %0d", m_idx, est_t); end
    if (m_last != (est_t == K - 1)) begin failures++; $display("last flag wrong at %0d", est_t); end
    if (est_t == K - 1) begin est_t = 0; est_seq++; end
    else est_t++;
  end

  always @(posedge clk) if (rst_n && res_valid) begin
    longint unsigned em;
    for (int o = 0; o < P; o++) begin
      checks++;
      if (res_theta[o] !== exp_th[res_seq][o] || res_mask[o] !== (exp_th[res_seq][o] != 0)) begin
        failures++;
        $display("seq %0d theta[%0d] %f exp %f", res_seq, o, fx_to_real(res_theta[o]),
                 fx_to_real(exp_th[res_seq][o]));
      end
    end
    em = exp_sse[res_seq] / longint'(N * K);
    if (em > 64'h7fffffff) em = 64'h7fffffff;
    checks += 4;
    if (int'(res_nnz) != exp_nnz[res_seq]) begin failures++; $display("nnz %0d exp %0d", res_nnz, exp_nnz[res_seq]); end
    if (res_shift !== exp_shift[res_seq]) begin failures++; $display("shift mismatch"); end
    if (res_sse !== exp_sse[res_seq]) begin failures++; $display("sse %0d exp %0d", res_sse, exp_sse[res_seq]); end
    if (res_mse !== fx_t'(em)) begin failures++; $display("mse %0d exp %0d", res_mse, em); end
    $display("sequence %0d: mode %0d, %0d of %0d terms kept, shift %f, MSE %f", res_seq,
             seq_mode[res_seq], res_nnz, P, fx_to_real(res_shift), fx_to_real(res_mse));
    res_seq++;
  end

  // --------------------------------------------------------------- stimulus
  initial begin
    int first_pop, last_pop, pops;
    dt = fx_from_real(0.01);
    seq_len = LW'(K);
    drop_thr = fx_from_real(0.05);
    drop_k = CW'(4);
    wx = new[3*V*NX]; wh = new[3*V*V]; bg = new[3*V]; wd = new[NO*V]; bd = new[NO];
    for (int i = 0; i < 3*V*NX; i++) wx[i] = rnd(32768);
    for (int i = 0; i < 3*V*V; i++)  wh[i] = rnd(16384);
    for (int i = 0; i < 3*V; i++)    bg[i] = rnd(16384);
    for (int i = 0; i < NO*V; i++)   wd[i] = rnd(3000);
    for (int i = 0; i < NO; i++)     bd[i] = rnd(9000);
    // Lotka-Volterra-like oscillating measurements with a pulsed input
    for (int s = 0; s < NSEQ; s++) begin
      real ph;
      ph = 0.7 * s;
      seq_mode[s] = (s % 2 == 1);
      for (int t = 0; t < K; t++) begin
        trace_y[s][t][0] = fx_from_real(1.0 + 0.5 * $sin(0.05 * t + ph));
        trace_y[s][t][1] = fx_from_real(0.8 + 0.4 * $cos(0.05 * t + 1.3 * ph));
        trace_u[s][t]    = fx_from_real(((t + 10 * s) % 40 < 8) ? 0.5 : 0.0);
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

    fork
      // dropout mode follows the sequence that reaches the dropout stage
      begin
        int s_drop;
        s_drop = 0;
        drop_mode = seq_mode[0];
        forever begin
          @(posedge clk);
          if (dut.dn_valid && dut.dn_ready) begin
            s_drop++;
            if (s_drop < NSEQ) begin #1; drop_mode = seq_mode[s_drop]; end
          end
          if (s_drop == NSEQ) break;
        end
      end
      // GRU rate on the first sequence
      begin
        pops = 0;
        while (pops < K) begin
          @(posedge clk);
          if (dut.pop) begin
            if (pops == 0) first_pop = $time / 10;
            last_pop = $time / 10;
            pops++;
          end
        end
        checks++;
        if (last_pop - first_pop == K - 1) n_ii1++;
        else begin failures++; $display("first sequence took %0d cycles for %0d samples", last_pop - first_pop + 1, K); end
      end
      // output back-pressure during the middle sequences
      begin
        wait (est_seq == 2);
        bp_phase = 1;
        wait (est_seq == 4);
        bp_phase = 0;
      end
    join_none
    // sample stream, back to back
      for (int s = 0; s < NSEQ; s++) begin
        for (int t = 0; t < K; t++) begin
          s_valid = 1;
          s_y[0] = trace_y[s][t][0];
          s_y[1] = trace_y[s][t][1];
          s_u = trace_u[s][t];
          #1;
          while (!s_ready) begin @(negedge clk); #1; end
          @(negedge clk);
        end
      end
    @(negedge clk);
    s_valid = 0;
    wait (res_seq == NSEQ);
    repeat (10) @(posedge clk);
    checks++;
    if (est_seq != NSEQ) begin failures++; $display("%0d sequences reconstructed", est_seq); end
    $display("mechanisms: II=1 %0d, overlap %0d, bank stall %0d, input backpressure %0d, output backpressure %0d,",
             n_ii1, n_overlap, n_bank_stall, n_in_bp, n_out_bp);
    $display("            ReLU clipped %0d, threshold drops %0d, top-K drops %0d",
             n_relu, n_thr_drop, n_topk_drop);
    checks += 8;
    if (n_ii1 == 0)        begin failures++; $display("II=1 loading never seen"); end
    if (n_overlap == 0)    begin failures++; $display("overlap never happened"); end
    if (n_bank_stall == 0) begin failures++; $display("bank stall never happened"); end
    if (n_in_bp == 0)      begin failures++; $display("input back-pressure never happened"); end
    if (n_out_bp == 0)     begin failures++; $display("output back-pressure never happened"); end
    if (n_relu == 0)       begin failures++; $display("ReLU never clipped"); end
    if (n_thr_drop == 0)   begin failures++; $display("threshold mode never dropped a term"); end
    if (n_topk_drop == 0)  begin failures++; $display("top-K mode never dropped a term"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
