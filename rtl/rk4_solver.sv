// rk4_solver - low-order ODE solver: integrates the recovered model
// dx/dt = f(x, u; Theta_est) from the measured initial state Y(0), driven by
// the measured input sequence U, with the classical fourth-order
// Runge-Kutta method, and streams out the reconstruction Y_est.
//
//   k1 = f(x_t, u_t)            k2 = f(x_t + dt/2 k1, u_t)
//   k3 = f(x_t + dt/2 k2, u_t)  k4 = f(x_t + dt k3,   u_t)
//   x_{t+1} = x_t + dt * ((k1 + 2 k2 + 2 k3 + k4) * (1/6))
//
// u_t is the sample's input plus the dense layer's input shift, held over
// the whole step (zero-order hold). Y_est[0] = Y(0). RK4 is the paper's
// method; the hold of u, the fixed step dt (one per sample, given at start)
// and the sequential schedule below are this design's choices.
//
// One ode_rhs instance is time-shared over the four stages. Schedule per
// sample t: READ (address t to the trace buffer), CAPT (sample arrives),
// EMIT (Y_est[t] with the measured Y[t] on the output, waits for
// out_ready), then K1, K2, K3, K4 (x updated at the end of K4). A k-sample
// sequence therefore takes 7k - 4 cycles when the output is never stalled.
//
// Interface: start with theta/shift/dt/seq_len sampled that cycle; a
// synchronous read port (rd_en, rd_addr -> rd_y, rd_u next cycle); output
// stream est_* with the matching measurement meas_y, index and last flag;
// done pulses when the final sample has been taken.
module rk4_solver
  import merinda_pkg::*;
#(
  parameter int unsigned N_STATE = 2,
  parameter int unsigned MAX_SEQ = 200,
  localparam int unsigned NT     = (N_STATE + 2) * (N_STATE + 1) / 2,
  localparam int unsigned AW     = $clog2(MAX_SEQ),
  localparam int unsigned LW     = $clog2(MAX_SEQ + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  fx_t           theta [N_STATE*NT],
  input  fx_t           shift,
  input  fx_t           dt,
  input  logic [LW-1:0] seq_len,
  output logic          busy,
  output logic          done,
  // trace buffer read port
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  fx_t           rd_y [N_STATE],
  input  fx_t           rd_u,
  // reconstruction stream
  output logic          est_valid,
  input  logic          est_ready,
  output fx_t           est_y  [N_STATE],
  output fx_t           meas_y [N_STATE],
  output logic [AW-1:0] est_idx,
  output logic          est_last
);

  localparam fx_t FX_SIXTH = fx_t'((1 << FRAC_W) / 6);

  typedef enum logic [2:0] {S_IDLE, S_READ, S_CAPT, S_EMIT, S_K1, S_K2, S_K3, S_K4} state_e;

  state_e        state;
  fx_t           th  [N_STATE*NT];
  fx_t           sh, step, u_cur;
  logic [LW-1:0] len;
  logic [AW-1:0] t;
  fx_t           x   [N_STATE];
  fx_t           k1  [N_STATE];
  fx_t           k2  [N_STATE];
  fx_t           k3  [N_STATE];
  fx_t           xa  [N_STATE];
  fx_t           kf  [N_STATE];
  fx_t           xn  [N_STATE];

  // Stage argument for the shared right-hand-side evaluator.
  always_comb begin
    for (int i = 0; i < N_STATE; i++) begin
      unique case (state)
        S_K2:    xa[i] = x[i] + fx_mul(step >>> 1, k1[i]);
        S_K3:    xa[i] = x[i] + fx_mul(step >>> 1, k2[i]);
        S_K4:    xa[i] = x[i] + fx_mul(step, k3[i]);
        default: xa[i] = x[i];
      endcase
    end
  end

  ode_rhs #(.N_STATE(N_STATE)) u_rhs (.theta(th), .x(xa), .u(u_cur), .dx(kf));

  // RK4 combination, used at the end of K4 (kf holds k4 then).
  always_comb begin
    for (int i = 0; i < N_STATE; i++) begin
      fx_t ksum;
      ksum  = k1[i] + (k2[i] <<< 1) + (k3[i] <<< 1) + kf[i];
      xn[i] = x[i] + fx_mul(step, fx_mul(ksum, FX_SIXTH));
    end
  end

  assign busy      = (state != S_IDLE);
  assign rd_en     = (state == S_READ);
  assign rd_addr   = t;
  assign est_valid = (state == S_EMIT);
  assign est_y     = x;
  assign est_idx   = t;
  assign est_last  = (LW'(t) == len - LW'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      t     <= '0;
      len   <= '0;
      sh    <= '0;
      step  <= '0;
      u_cur <= '0;
      for (int i = 0; i < N_STATE; i++) begin
        x[i] <= '0; k1[i] <= '0; k2[i] <= '0; k3[i] <= '0; meas_y[i] <= '0;
      end
      for (int i = 0; i < N_STATE * NT; i++) th[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          th    <= theta;
          sh    <= shift;
          step  <= dt;
          len   <= seq_len;
          t     <= '0;
          state <= S_READ;
        end
        S_READ: state <= S_CAPT;
        S_CAPT: begin
          if (t == '0) x <= rd_y;
          meas_y <= rd_y;
          u_cur  <= rd_u + sh;
          state  <= S_EMIT;
        end
        S_EMIT: if (est_ready) begin
          if (est_last) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            state <= S_K1;
          end
        end
        S_K1: begin k1 <= kf; state <= S_K2; end
        S_K2: begin k2 <= kf; state <= S_K3; end
        S_K3: begin k3 <= kf; state <= S_K4; end
        S_K4: begin
          x     <= xn;
          t     <= t + AW'(1);
          state <= S_READ;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
