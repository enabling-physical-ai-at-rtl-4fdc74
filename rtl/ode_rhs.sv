// ode_rhs - right-hand side of the recovered polynomial ODE.
//
//   dx_i/dt = sum_t theta[i*NT + t] * phi_t(x, u),   i = 0 .. N_STATE-1
//
// with phi the second-order library of merinda_pkg: u, x1..xn, x1^2..xn^2,
// then the cross products x_a*x_b (a < b); NT = C(n+2, 2) terms per
// equation. For n = 2 this is u, x1, x2, x1^2, x2^2, x1*x2, the term order
// of the paper's Lotka-Volterra example, so the coefficient vector the dense
// layer produces maps onto equations exactly as in that example. The term
// order for n > 2 is this design's choice.
//
// Combinational; all library terms and products are formed in parallel.
module ode_rhs
  import merinda_pkg::*;
#(
  parameter int unsigned N_STATE = 2,
  localparam int unsigned NT     = (N_STATE + 2) * (N_STATE + 1) / 2
) (
  input  fx_t theta [N_STATE*NT],
  input  fx_t x     [N_STATE],
  input  fx_t u,
  output fx_t dx    [N_STATE]
);

  fx_t phi [NT];

  always_comb begin
    int unsigned t;
    phi[0] = u;
    for (int a = 0; a < N_STATE; a++) phi[1 + a] = x[a];
    for (int a = 0; a < N_STATE; a++) phi[1 + N_STATE + a] = fx_mul(x[a], x[a]);
    t = 1 + 2 * N_STATE;
    for (int a = 0; a < N_STATE; a++)
      for (int b = a + 1; b < N_STATE; b++) begin
        phi[t] = fx_mul(x[a], x[b]);
        t++;
      end
  end

  always_comb begin
    for (int i = 0; i < N_STATE; i++) begin
      fx_t acc;
      acc = '0;
      for (int t = 0; t < NT; t++) acc += fx_mul(theta[i * NT + t], phi[t]);
      dx[i] = acc;
    end
  end

endmodule
