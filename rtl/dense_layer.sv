// dense_layer - the "analytical inverse" stage: maps the V final hidden
// states of the GRU to N_COEF model-coefficient estimates and N_SHIFT input
// shift values.
//
//   y_o = b_o + sum_j W[o][j] * h_j,   o = 0 .. N_COEF+N_SHIFT-1
//   coefficient outputs (o < N_COEF) pass through ReLU when RELU_EN = 1;
//   shift outputs (o >= N_COEF) are linear.
//
// N_COEF is n * C(M+n, n), one coefficient per polynomial term of every
// state equation (12 for the two-state, second-order example). Every output
// is its own unrolled dot product; the result is registered, so the stage
// has one cycle of latency and takes a new hidden vector every cycle.
//
// The paper puts ReLU on the coefficient nodes, yet its worked example lists
// negative coefficients; RELU_EN (default 1, as the architecture text says)
// lets the ReLU be removed. What the shift values act on is not stated;
// here they are added to the external input u by the ODE solver.
//
// Weight port flat order: W (output, hidden) then bias (output).
// Handshake: valid/ready on both sides, one output register.
module dense_layer
  import merinda_pkg::*;
#(
  parameter int unsigned V       = 16,
  parameter int unsigned N_COEF  = 12,
  parameter int unsigned N_SHIFT = 1,
  parameter bit          RELU_EN = 1'b1,
  localparam int unsigned N_OUT  = N_COEF + N_SHIFT,
  localparam int unsigned N_W    = N_OUT * V + N_OUT,
  localparam int unsigned AW     = $clog2(N_W)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          w_we,
  input  logic [AW-1:0] w_addr,
  input  fx_t           w_data,
  input  logic          in_valid,
  output logic          in_ready,
  input  fx_t           in_h [V],
  output logic          out_valid,
  input  logic          out_ready,
  output fx_t           out_y [N_OUT]
);

  fx_t w    [N_OUT][V];
  fx_t bias [N_OUT];
  fx_t y    [N_OUT];

  always_ff @(posedge clk) begin
    if (w_we) begin
      for (int o = 0; o < N_OUT; o++) begin
        for (int j = 0; j < V; j++)
          if (int'(w_addr) == o * V + j) w[o][j] <= w_data;
        if (int'(w_addr) == N_OUT * V + o) bias[o] <= w_data;
      end
    end
  end

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      fx_t acc;
      acc = bias[o];
      for (int j = 0; j < V; j++) acc += fx_mul(w[o][j], in_h[j]);
      if (RELU_EN && o < int'(N_COEF) && acc < 0) acc = '0;
      y[o] = acc;
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int o = 0; o < N_OUT; o++) out_y[o] <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_y <= y;
    end
  end

endmodule
