// merinda_top - forward-pass accelerator for GRU-based model recovery.
//
// Model recovery fits a sparse polynomial ODE dx/dt = Theta * phi(x, u) to a
// measured trace. Instead of a neural ODE whose forward pass needs an
// iterative solver inside the network, the network here is a GRU (a
// discretised flow), a dense layer that maps the GRU's final hidden state to
// candidate ODE coefficients, and a dropout that keeps only the significant
// ones. Only then is the candidate model integrated once, with RK4, and the
// reconstruction compared with the measurement (the ODE loss that drives
// training).
//
// Dataflow, one sequence of seq_len samples [Y; u] at a time:
//
//   s_* --> stream_fifo --+--> gru_layer --> dense_layer --> sparsity_dropout
//                         |    (1 sample/clk)                       |
//                         +--> trace_buffer[bank] <-- rk4_solver <--+
//                                                         |
//                                        stream_fifo <----+----> ode_loss
//                                            |                     |
//                                          m_*                  res_*
//
// Two trace buffers are used in ping-pong: while the solver integrates
// sequence s out of one bank, sequence s+1 streams into the GRU and into the
// other bank. When both banks are taken the loader stops pulling from the
// input FIFO (bank stall) and s_ready falls once that FIFO fills. The
// dropout result waits in its output register while the solver is busy,
// which in turn holds the dense layer and the GRU.
//
// Configuration: the weights are written through cfg_we/cfg_addr/cfg_data;
// cfg_addr[15:12] selects the GRU (0) or the dense layer (1), the low bits
// are that layer's flat weight address. dt, seq_len and the dropout
// controls are plain inputs, expected to come from host-written registers.
// Weight training (backpropagation) is not part of this block; weights are
// loaded by the host.
//
// Results: m_* streams Y_est[t] with the measured Y[t], index and last flag;
// res_valid pulses once per sequence with the sparse coefficients, keep
// mask, non-zero count, input shift, MSE and raw sum of squared errors.
//
// What follows the paper: the GRU -> dense (ReLU) -> sparsity dropout ->
// Runge-Kutta -> MSE chain, hidden size 16, sequences of up to 200 samples,
// II=1 through the GRU, registers for the hidden state and on-chip buffers
// for the trace. This design's own: the fixed-point format, the
// activation approximations, the ping-pong trace buffers, the handshakes,
// the addressing, and which configuration is built by default (the
// two-state, one-input, second-order Lotka-Volterra setting).
module merinda_top
  import merinda_pkg::*;
#(
  parameter int unsigned N_STATE  = 2,    // |Y| = n
  parameter int unsigned HIDDEN   = 16,   // V, GRU hidden size
  parameter int unsigned MAX_SEQ  = 200,  // k, longest sequence
  parameter int unsigned FIFO_DEP = 4,
  localparam int unsigned N_X     = N_STATE + 1,
  localparam int unsigned NT      = (N_STATE + 2) * (N_STATE + 1) / 2,
  localparam int unsigned P       = N_STATE * NT,
  localparam int unsigned N_OUT   = P + 1,
  localparam int unsigned AW      = $clog2(MAX_SEQ),
  localparam int unsigned LW      = $clog2(MAX_SEQ + 1),
  localparam int unsigned CW      = $clog2(P + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // weight configuration
  input  logic          cfg_we,
  input  logic [15:0]   cfg_addr,
  input  fx_t           cfg_data,
  // run-time settings
  input  fx_t           dt,
  input  logic [LW-1:0] seq_len,
  input  logic          drop_mode,
  input  fx_t           drop_thr,
  input  logic [CW-1:0] drop_k,
  // input sample stream
  input  logic          s_valid,
  output logic          s_ready,
  input  fx_t           s_y [N_STATE],
  input  fx_t           s_u,
  // reconstruction stream
  output logic          m_valid,
  input  logic          m_ready,
  output fx_t           m_est  [N_STATE],
  output fx_t           m_meas [N_STATE],
  output logic [AW-1:0] m_idx,
  output logic          m_last,
  // per-sequence result
  output logic          res_valid,
  output fx_t           res_theta [P],
  output logic [P-1:0]  res_mask,
  output logic [CW-1:0] res_nnz,
  output fx_t           res_shift,
  output fx_t           res_mse,
  output logic [63:0]   res_sse
);

  localparam int unsigned SW = N_X * DATA_W;                 // sample word
  localparam int unsigned OW = 2 * N_STATE * DATA_W + AW + 1; // output word

  // ---------------------------------------------------------------- input
  logic          fi_valid, fi_ready;
  logic [SW-1:0] fi_data, s_word;
  fx_t           ld_x [N_X];
  logic [$clog2(FIFO_DEP):0] in_level, out_level;

  always_comb begin
    for (int i = 0; i < N_STATE; i++) s_word[i*DATA_W +: DATA_W] = s_y[i];
    s_word[N_STATE*DATA_W +: DATA_W] = s_u;
    for (int i = 0; i < N_X; i++) ld_x[i] = fi_data[i*DATA_W +: DATA_W];
  end

  stream_fifo #(.WIDTH(SW), .DEPTH(FIFO_DEP)) u_in_fifo (
    .clk, .rst_n,
    .in_valid(s_valid), .in_ready(s_ready), .in_data(s_word),
    .out_valid(fi_valid), .out_ready(fi_ready), .out_data(fi_data),
    .level(in_level)
  );

  // --------------------------------------------------------------- loader
  logic          wb;          // bank being written
  logic          rb;          // bank being solved
  logic [1:0]    bank_busy;
  logic [AW-1:0] ld_cnt;
  logic          ld_last, gru_in_ready, bank_free, pop;

  assign ld_last   = (LW'(ld_cnt) == seq_len - LW'(1));
  assign bank_free = (ld_cnt != '0) || !bank_busy[wb];
  assign fi_ready  = gru_in_ready && bank_free;
  assign pop       = fi_valid && fi_ready;

  // ------------------------------------------------------------------ GRU
  logic gru_we, dense_we;
  logic gru_out_valid, gru_out_ready;
  fx_t  h_t [HIDDEN];

  assign gru_we   = cfg_we && (cfg_addr[15:12] == 4'd0);
  assign dense_we = cfg_we && (cfg_addr[15:12] == 4'd1);

  gru_layer #(.V(HIDDEN), .N_X(N_X)) u_gru (
    .clk, .rst_n,
    .w_we(gru_we), .w_addr(cfg_addr[$clog2(3*HIDDEN*N_X + 3*HIDDEN*HIDDEN + 3*HIDDEN)-1:0]),
    .w_data(cfg_data),
    .in_valid(fi_valid && bank_free), .in_ready(gru_in_ready), .in_x(ld_x), .in_last(ld_last),
    .out_valid(gru_out_valid), .out_ready(gru_out_ready), .out_h(h_t)
  );

  // ---------------------------------------------------------------- dense
  logic dn_valid, dn_ready;
  fx_t  dn_y [N_OUT];
  fx_t  dn_c [P];

  dense_layer #(.V(HIDDEN), .N_COEF(P), .N_SHIFT(1)) u_dense (
    .clk, .rst_n,
    .w_we(dense_we), .w_addr(cfg_addr[$clog2(N_OUT*HIDDEN + N_OUT)-1:0]), .w_data(cfg_data),
    .in_valid(gru_out_valid), .in_ready(gru_out_ready), .in_h(h_t),
    .out_valid(dn_valid), .out_ready(dn_ready), .out_y(dn_y)
  );

  always_comb for (int i = 0; i < P; i++) dn_c[i] = dn_y[i];

  // The shift travels alongside the coefficients through the dropout stage.
  fx_t shift_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  shift_q <= '0;
    else if (dn_valid && dn_ready) shift_q <= dn_y[P];
  end

  // -------------------------------------------------------------- dropout
  logic          dp_valid, dp_ready;
  fx_t           dp_theta [P];
  logic [P-1:0]  dp_mask;
  logic [CW-1:0] dp_nnz;

  sparsity_dropout #(.N(P)) u_drop (
    .clk, .rst_n,
    .mode(drop_mode), .threshold(drop_thr), .keep_k(drop_k),
    .in_valid(dn_valid), .in_ready(dn_ready), .in_c(dn_c),
    .out_valid(dp_valid), .out_ready(dp_ready),
    .out_theta(dp_theta), .out_mask(dp_mask), .out_nnz(dp_nnz)
  );

  // --------------------------------------------------------------- solver
  logic          solve_active, sv_start, sv_busy, sv_done;
  logic          sv_rd_en;
  logic [AW-1:0] sv_rd_addr;
  logic [SW-1:0] bank_rd [2];
  fx_t           sv_rd_y [N_STATE];
  fx_t           sv_rd_u;
  logic          est_valid, est_ready, est_last;
  fx_t           est_y  [N_STATE];
  fx_t           meas_y [N_STATE];
  logic [AW-1:0] est_idx;
  logic          loss_done;

  assign sv_start = dp_valid && !solve_active;
  assign dp_ready = !solve_active;

  for (genvar b = 0; b < 2; b++) begin : g_bank
    trace_buffer #(.WIDTH(SW), .DEPTH(MAX_SEQ)) u_buf (
      .clk,
      .wr_en(pop && (wb == 1'(b))), .wr_addr(ld_cnt), .wr_data(fi_data),
      .rd_en(sv_rd_en && (rb == 1'(b))), .rd_addr(sv_rd_addr), .rd_data(bank_rd[b])
    );
  end

  always_comb begin
    for (int i = 0; i < N_STATE; i++) sv_rd_y[i] = bank_rd[rb][i*DATA_W +: DATA_W];
    sv_rd_u = bank_rd[rb][N_STATE*DATA_W +: DATA_W];
  end

  rk4_solver #(.N_STATE(N_STATE), .MAX_SEQ(MAX_SEQ)) u_rk4 (
    .clk, .rst_n,
    .start(sv_start), .theta(dp_theta), .shift(shift_q), .dt(dt), .seq_len(seq_len),
    .busy(sv_busy), .done(sv_done),
    .rd_en(sv_rd_en), .rd_addr(sv_rd_addr), .rd_y(sv_rd_y), .rd_u(sv_rd_u),
    .est_valid(est_valid), .est_ready(est_ready), .est_y(est_y), .meas_y(meas_y),
    .est_idx(est_idx), .est_last(est_last)
  );

  ode_loss #(.N_STATE(N_STATE)) u_loss (
    .clk, .rst_n,
    .clear(sv_start),
    .in_valid(est_valid && est_ready), .in_est(est_y), .in_meas(meas_y), .in_last(est_last),
    .done(loss_done), .mse(res_mse), .sse(res_sse)
  );

  // --------------------------------------------------------------- output
  logic [OW-1:0] est_word, fo_data;

  always_comb begin
    for (int i = 0; i < N_STATE; i++) begin
      est_word[i*DATA_W +: DATA_W]             = est_y[i];
      est_word[(N_STATE+i)*DATA_W +: DATA_W]   = meas_y[i];
      m_est[i]  = fo_data[i*DATA_W +: DATA_W];
      m_meas[i] = fo_data[(N_STATE+i)*DATA_W +: DATA_W];
    end
    est_word[2*N_STATE*DATA_W +: AW] = est_idx;
    est_word[OW-1]                   = est_last;
    m_idx  = fo_data[2*N_STATE*DATA_W +: AW];
    m_last = fo_data[OW-1];
  end

  stream_fifo #(.WIDTH(OW), .DEPTH(FIFO_DEP)) u_out_fifo (
    .clk, .rst_n,
    .in_valid(est_valid), .in_ready(est_ready), .in_data(est_word),
    .out_valid(m_valid), .out_ready(m_ready), .out_data(fo_data),
    .level(out_level)
  );

  // -------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb           <= 1'b0;
      rb           <= 1'b0;
      bank_busy    <= '0;
      ld_cnt       <= '0;
      solve_active <= 1'b0;
      res_valid    <= 1'b0;
      res_mask     <= '0;
      res_nnz      <= '0;
      res_shift    <= '0;
      for (int i = 0; i < P; i++) res_theta[i] <= '0;
    end else begin
      res_valid <= 1'b0;
      if (pop) begin
        if (ld_last) begin
          ld_cnt <= '0;
          wb     <= ~wb;
        end else begin
          ld_cnt <= ld_cnt + AW'(1);
        end
      end
      if (sv_start) begin
        solve_active <= 1'b1;
        res_theta    <= dp_theta;
        res_mask     <= dp_mask;
        res_nnz      <= dp_nnz;
        res_shift    <= shift_q;
      end
      if (loss_done) begin
        solve_active <= 1'b0;
        res_valid    <= 1'b1;
        rb           <= ~rb;
      end
      // a bank is taken from its first sample until its solve has finished
      for (int b = 0; b < 2; b++) begin
        if (pop && ld_cnt == '0 && wb == 1'(b))            bank_busy[b] <= 1'b1;
        else if (loss_done && rb == 1'(b))                 bank_busy[b] <= 1'b0;
      end
    end
  end

  // The solver is only started when it is idle, and the loader never
  // writes into the bank being solved.
  assert property (@(posedge clk) disable iff (!rst_n) sv_start |-> !sv_busy);
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && solve_active && wb == rb && sv_busy));

endmodule
