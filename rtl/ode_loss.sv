// ode_loss - the ODE loss: mean square error between the measured trace Y
// and the solver's reconstruction Y_est over one sequence,
//
//   mse = ( sum_t sum_i (Y_i[t] - Yest_i[t])^2 ) / (N_STATE * k).
//
// Each error is formed with a guard bit and squared at full width, so no
// error wraps. Squared errors are accumulated in a 64-bit register (raw Q format,
// FRAC_W fractional bits) as the pairs stream in, one pair per cycle. After
// the pair flagged last, a restoring divider produces one quotient bit per
// cycle for 64 cycles; the quotient saturates to the largest fx_t. The loss
// and its mean-square form are the paper's; the accumulator width and the
// serial divider are this design's choices.
//
// Interface: clear starts a new sequence; in_valid/in_est/in_meas/in_last
// carry the pairs (always accepted); done pulses with mse and sse valid.
// Timing: done comes 65 cycles after the last pair.
module ode_loss
  import merinda_pkg::*;
#(
  parameter int unsigned N_STATE = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        in_valid,
  input  fx_t         in_est  [N_STATE],
  input  fx_t         in_meas [N_STATE],
  input  logic        in_last,
  output logic        done,
  output fx_t         mse,
  output logic [63:0] sse
);

  logic [63:0] acc, sq, quot, rem;
  logic [31:0] cnt;
  logic [6:0]  bitn;
  logic        dividing;
  logic [64:0] trial;

  always_comb begin
    sq = '0;
    for (int i = 0; i < N_STATE; i++) begin
      logic signed [DATA_W:0]     e;   // one guard bit: the difference cannot wrap
      logic        [2*DATA_W+1:0] e2;
      e  = (DATA_W+1)'(in_meas[i]) - (DATA_W+1)'(in_est[i]);
      e2 = unsigned'((2*DATA_W+2)'(e * e));
      sq += 64'(e2 >> FRAC_W);
    end
  end

  assign trial = {rem, quot[63]} - {33'd0, cnt};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc      <= '0;
      cnt      <= '0;
      quot     <= '0;
      rem      <= '0;
      bitn     <= '0;
      dividing <= 1'b0;
      done     <= 1'b0;
      mse      <= '0;
      sse      <= '0;
    end else begin
      done <= 1'b0;
      if (clear) begin
        acc      <= '0;
        cnt      <= '0;
        dividing <= 1'b0;
      end else if (dividing) begin
        // quot shifts the dividend out at the top and the quotient in below
        if (!trial[64]) begin
          rem  <= trial[63:0];
          quot <= {quot[62:0], 1'b1};
        end else begin
          rem  <= {rem[62:0], quot[63]};
          quot <= {quot[62:0], 1'b0};
        end
        bitn <= bitn - 7'd1;
        if (bitn == 7'd1) begin
          dividing <= 1'b0;
          done     <= 1'b1;
          // final quotient bit is the one being shifted in now
          if ({quot[62:0], !trial[64]} > 64'(unsigned'({1'b0, {(DATA_W-1){1'b1}}})))
            mse <= {1'b0, {(DATA_W-1){1'b1}}};
          else
            mse <= fx_t'({quot[62:0], !trial[64]});
        end
      end else if (in_valid) begin
        acc <= acc + sq;
        cnt <= cnt + 32'(N_STATE);
        if (in_last) begin
          sse      <= acc + sq;
          quot     <= acc + sq;
          rem      <= '0;
          bitn     <= 7'd64;
          dividing <= 1'b1;
        end
      end
    end
  end

endmodule
