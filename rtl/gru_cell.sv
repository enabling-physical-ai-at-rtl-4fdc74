// gru_cell - one time step of a GRU layer, all hidden units at once.
//
// Computes, for every hidden unit j (0 <= j < V) in parallel,
//   z_j  = sigmoid( Wz[j]*x + Uz[j]*h + bz[j] )          update gate
//   r_j  = sigmoid( Wr[j]*x + Ur[j]*h + br[j] )          reset gate
//   n_j  = tanh   ( Wn[j]*x + Un[j]*(r .* h) + bn[j] )   candidate state
//   h'_j = (1 - z_j) * n_j + z_j * h_j
// Gate index 0 is the update gate, 1 the reset gate, 2 the candidate.
//
// The cell is purely combinational: every dot product over the input and
// hidden dimensions is unrolled into its own multiply-accumulate tree, so a
// new time step can begin every clock when the caller registers h' (see
// gru_layer). Splitting the cell into element-wise gate operations with
// fully unrolled inner loops follows the paper's computation optimisation;
// the gate equations are the standard GRU, and the fixed-point format and
// the piecewise-linear sigmoid/tanh (merinda_pkg) are this design's choice.
//
// Interface: x[N_X] input sample, h[V] previous hidden state, weight arrays
// w_x[3][V][N_X], w_h[3][V][V], bias[3][V]; h_next[V] new hidden state.
// Timing: zero cycles (combinational).
module gru_cell
  import merinda_pkg::*;
#(
  parameter int unsigned V   = 16,  // hidden size
  parameter int unsigned N_X = 3    // input width |Y| + m
) (
  input  fx_t x      [N_X],
  input  fx_t h      [V],
  input  fx_t w_x    [3][V][N_X],
  input  fx_t w_h    [3][V][V],
  input  fx_t bias   [3][V],
  output fx_t h_next [V]
);

  fx_t z  [V];
  fx_t r  [V];
  fx_t rh [V];

  // Update and reset gates.
  always_comb begin
    for (int j = 0; j < V; j++) begin
      fx_t az, ar;
      az = bias[0][j];
      ar = bias[1][j];
      for (int i = 0; i < N_X; i++) begin
        az += fx_mul(w_x[0][j][i], x[i]);
        ar += fx_mul(w_x[1][j][i], x[i]);
      end
      for (int i = 0; i < V; i++) begin
        az += fx_mul(w_h[0][j][i], h[i]);
        ar += fx_mul(w_h[1][j][i], h[i]);
      end
      z[j]  = fx_sigmoid(az);
      r[j]  = fx_sigmoid(ar);
      rh[j] = fx_mul(r[j], h[j]);
    end
  end

  // Candidate state and blend.
  always_comb begin
    for (int j = 0; j < V; j++) begin
      fx_t an, n;
      an = bias[2][j];
      for (int i = 0; i < N_X; i++) an += fx_mul(w_x[2][j][i], x[i]);
      for (int i = 0; i < V; i++)   an += fx_mul(w_h[2][j][i], rh[i]);
      n = fx_tanh(an);
      h_next[j] = fx_mul(FX_ONE - z[j], n) + fx_mul(z[j], h[j]);
    end
  end

endmodule
