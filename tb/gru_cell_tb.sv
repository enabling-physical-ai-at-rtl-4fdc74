// gru_cell_tb - checks one combinational GRU step against the reference
// model bit for bit, and against a floating-point GRU (exact sigmoid/tanh)
// within a tolerance that covers the piecewise-linear activations.
module gru_cell_tb;
  import merinda_pkg::*;
  import merinda_ref_pkg::*;

  localparam int V = 16, NX = 3;

  fx_t x [NX];
  fx_t h [V];
  fx_t w_x [3][V][NX];
  fx_t w_h [3][V][V];
  fx_t bias [3][V];
  fx_t h_next [V];

  int checks = 0, failures = 0;

  gru_cell #(.V(V), .N_X(NX)) dut (.*);

  function automatic fx_t rnd(int unsigned range_raw);
    return fx_t'(int'($urandom_range(0, 2 * range_raw)) - int'(range_raw));
  endfunction

  function automatic real sg(real a); return 1.0 / (1.0 + $exp(-a)); endfunction
  function automatic real th(real a); return (($exp(a) - $exp(-a)) / ($exp(a) + $exp(-a))); endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fx_t wx[], wh[], b[], xv[], hv[];
    real maxerr;
    wx = new[3*V*NX]; wh = new[3*V*V]; b = new[3*V]; xv = new[NX]; hv = new[V];
    maxerr = 0.0;
    for (int trial = 0; trial < 40; trial++) begin
      // weights up to +-0.5, inputs up to +-2 (and larger in later trials)
      for (int g = 0; g < 3; g++)
        for (int j = 0; j < V; j++) begin
          for (int i = 0; i < NX; i++) begin w_x[g][j][i] = rnd(32768); wx[(g*V+j)*NX+i] = w_x[g][j][i]; end
          for (int i = 0; i < V; i++)  begin w_h[g][j][i] = rnd(16384); wh[(g*V+j)*V+i] = w_h[g][j][i]; end
          bias[g][j] = rnd(32768); b[g*V+j] = bias[g][j];
        end
      for (int i = 0; i < NX; i++) begin x[i] = rnd(trial < 20 ? 131072 : 655360); xv[i] = x[i]; end
      for (int j = 0; j < V; j++)  begin h[j] = rnd(65536); hv[j] = h[j]; end
      #1;
      gru_step(V, NX, wx, wh, b, xv, hv);
      for (int j = 0; j < V; j++) begin
        checks++;
        if (h_next[j] !== hv[j]) begin
          failures++;
          if (failures < 10) $display("mismatch trial %0d unit %0d: got %0d exp %0d", trial, j, h_next[j], hv[j]);
        end
      end
      // floating-point GRU
      begin
        real zr[V], rr[V], e;
        for (int j = 0; j < V; j++) begin
          real az, ar;
          az = fx_to_real(bias[0][j]); ar = fx_to_real(bias[1][j]);
          for (int i = 0; i < NX; i++) begin
            az += fx_to_real(w_x[0][j][i]) * fx_to_real(x[i]);
            ar += fx_to_real(w_x[1][j][i]) * fx_to_real(x[i]);
          end
          for (int i = 0; i < V; i++) begin
            az += fx_to_real(w_h[0][j][i]) * fx_to_real(h[i]);
            ar += fx_to_real(w_h[1][j][i]) * fx_to_real(h[i]);
          end
          zr[j] = sg(az); rr[j] = sg(ar);
        end
        for (int j = 0; j < V; j++) begin
          real an, hr;
          an = fx_to_real(bias[2][j]);
          for (int i = 0; i < NX; i++) an += fx_to_real(w_x[2][j][i]) * fx_to_real(x[i]);
          for (int i = 0; i < V; i++)  an += fx_to_real(w_h[2][j][i]) * rr[i] * fx_to_real(h[i]);
          hr = (1.0 - zr[j]) * th(an) + zr[j] * fx_to_real(h[j]);
          e = hr - fx_to_real(h_next[j]);
          if (e < 0) e = -e;
          if (e > maxerr) maxerr = e;
          checks++;
          if (e > 0.15) begin
            failures++;
            $display("float mismatch trial %0d unit %0d: got %f exp %f", trial, j, fx_to_real(h_next[j]), hr);
          end
        end
      end
    end
    $display("max deviation from floating-point GRU: %f", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
