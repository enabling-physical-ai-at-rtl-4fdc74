// gru_layer - runs the GRU cell over an input sequence at one sample per
// clock and hands the final hidden state to the dense layer.
//
// The hidden state is held in V separate registers (a fully partitioned
// buffer) so that all units are read and written in the same cycle, and the
// combinational gru_cell closes the recurrence within one clock: the layer
// accepts a new sample every cycle (initiation interval 1), as the paper's
// pipelined time loop does. The hidden state is forwarded directly to the
// next stage rather than written back to memory.
//
// Weights sit in registers written through a simple port. Flat address
// order: w_x (gate, unit, input), then w_h (gate, unit, hidden), then bias
// (gate, unit); the gate index runs slowest. This layout is this design's
// choice.
//
// Sequence framing: in_last marks the final sample of a sequence. The hidden
// state starts from zero at the first sample of each sequence (the paper
// does not give the initial state). After the last sample the layer presents
// h_T on out_h with out_valid and accepts no input until out_ready.
// Timing: h_T is valid the cycle after the last sample is accepted, so a
// k-sample sequence takes k cycles plus one.
module gru_layer
  import merinda_pkg::*;
#(
  parameter int unsigned V   = 16,
  parameter int unsigned N_X = 3,
  localparam int unsigned N_W = 3 * V * N_X + 3 * V * V + 3 * V,
  localparam int unsigned AW  = $clog2(N_W)
) (
  input  logic          clk,
  input  logic          rst_n,
  // weight write port
  input  logic          w_we,
  input  logic [AW-1:0] w_addr,
  input  fx_t           w_data,
  // sample stream
  input  logic          in_valid,
  output logic          in_ready,
  input  fx_t           in_x [N_X],
  input  logic          in_last,
  // final hidden state
  output logic          out_valid,
  input  logic          out_ready,
  output fx_t           out_h [V]
);

  localparam int unsigned OFS_WH = 3 * V * N_X;
  localparam int unsigned OFS_B  = OFS_WH + 3 * V * V;

  fx_t  w_x  [3][V][N_X];
  fx_t  w_h  [3][V][V];
  fx_t  bias [3][V];
  fx_t  h    [V];
  fx_t  h_in [V];
  fx_t  h_nx [V];
  logic first;   // next accepted sample starts a sequence

  always_ff @(posedge clk) begin
    if (w_we) begin
      for (int g = 0; g < 3; g++)
        for (int j = 0; j < V; j++) begin
          for (int i = 0; i < N_X; i++)
            if (int'(w_addr) == (g * V + j) * N_X + i) w_x[g][j][i] <= w_data;
          for (int i = 0; i < V; i++)
            if (int'(w_addr) == OFS_WH + (g * V + j) * V + i) w_h[g][j][i] <= w_data;
          if (int'(w_addr) == OFS_B + g * V + j) bias[g][j] <= w_data;
        end
    end
  end

  always_comb begin
    for (int j = 0; j < V; j++) h_in[j] = first ? '0 : h[j];
  end

  gru_cell #(.V(V), .N_X(N_X)) u_cell (
    .x(in_x), .h(h_in), .w_x(w_x), .w_h(w_h), .bias(bias), .h_next(h_nx)
  );

  assign in_ready = !out_valid;
  assign out_h    = h;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first     <= 1'b1;
      out_valid <= 1'b0;
      for (int j = 0; j < V; j++) h[j] <= '0;
    end else begin
      if (in_valid && in_ready) begin
        h     <= h_nx;
        first <= in_last;
        if (in_last) out_valid <= 1'b1;
      end else if (out_valid && out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

endmodule
