// sparsity_dropout - sparsity-guided dropout of the dense-layer coefficient
// estimates, giving the sparse coefficient vector Theta_est for the solver.
//
// Two selection rules, chosen by `mode` at run time:
//   mode 0 (threshold): coefficient i is kept when |c_i| >= threshold and
//                       set to zero otherwise (the paper's Lotka-Volterra
//                       run uses threshold 0.001).
//   mode 1 (top-K):     the keep_k coefficients of largest magnitude are
//                       kept, the rest zeroed, so exactly keep_k terms are
//                       non-zero (the paper's "dropout rate of |Theta|").
// For top-K every coefficient's rank is the number of others that beat it
// (larger magnitude, or equal magnitude and lower index); all N*(N-1)
// comparisons run in parallel. The rank tie-break is this design's choice.
//
// Outputs the sparse vector, the keep mask and the number of kept terms,
// registered: one cycle of latency, a new vector every cycle, valid/ready.
module sparsity_dropout
  import merinda_pkg::*;
#(
  parameter int unsigned N  = 12,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          mode,       // 0 threshold, 1 top-K
  input  fx_t           threshold,  // magnitude threshold, mode 0
  input  logic [CW-1:0] keep_k,     // terms kept, mode 1
  input  logic          in_valid,
  output logic          in_ready,
  input  fx_t           in_c [N],
  output logic          out_valid,
  input  logic          out_ready,
  output fx_t           out_theta [N],
  output logic [N-1:0]  out_mask,
  output logic [CW-1:0] out_nnz
);

  fx_t           mag  [N];
  logic [N-1:0]  keep;
  logic [CW-1:0] nnz;

  always_comb begin
    for (int i = 0; i < N; i++) mag[i] = (in_c[i] < 0) ? -in_c[i] : in_c[i];
    nnz = '0;
    for (int i = 0; i < N; i++) begin
      int unsigned rank;
      rank = 0;
      for (int j = 0; j < N; j++)
        if (j != i && (mag[j] > mag[i] || (mag[j] == mag[i] && j < i))) rank++;
      keep[i] = mode ? (rank < int'(keep_k)) : (mag[i] >= threshold);
      nnz += CW'(keep[i]);
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_mask  <= '0;
      out_nnz   <= '0;
      for (int i = 0; i < N; i++) out_theta[i] <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_mask <= keep;
        out_nnz  <= nnz;
        for (int i = 0; i < N; i++) out_theta[i] <= keep[i] ? in_c[i] : '0;
      end
    end
  end

endmodule
