// merinda_ref_pkg - software reference model of the forward pass, used by
// the testbenches to work out expected values independently of the RTL
// structure. It reuses only the number format and primitive operations of
// merinda_pkg (fixed-point multiply, PLAN sigmoid/tanh) and writes the
// algorithm out directly: GRU recurrence, dense layer with ReLU, dropout,
// polynomial library and RK4 integration, mean square error.
package merinda_ref_pkg;
  import merinda_pkg::*;

  // One GRU step. Weight arrays are flattened in the same order as the
  // gru_layer write port: wx[(g*V+j)*NX+i], wh[(g*V+j)*V+i], b[g*V+j].
  function automatic void gru_step(input int V, input int NX,
                                   input fx_t wx[], input fx_t wh[], input fx_t b[],
                                   input fx_t x[], ref fx_t h[]);
    fx_t z[], r[], hn[];
    z = new[V]; r = new[V]; hn = new[V];
    for (int j = 0; j < V; j++) begin
      fx_t az, ar;
      az = b[j]; ar = b[V + j];
      for (int i = 0; i < NX; i++) begin
        az += fx_mul(wx[(0*V + j)*NX + i], x[i]);
        ar += fx_mul(wx[(1*V + j)*NX + i], x[i]);
      end
      for (int i = 0; i < V; i++) begin
        az += fx_mul(wh[(0*V + j)*V + i], h[i]);
        ar += fx_mul(wh[(1*V + j)*V + i], h[i]);
      end
      z[j] = fx_sigmoid(az);
      r[j] = fx_sigmoid(ar);
    end
    for (int j = 0; j < V; j++) begin
      fx_t an;
      an = b[2*V + j];
      for (int i = 0; i < NX; i++) an += fx_mul(wx[(2*V + j)*NX + i], x[i]);
      for (int i = 0; i < V; i++)  an += fx_mul(wh[(2*V + j)*V + i], fx_mul(r[i], h[i]));
      hn[j] = fx_mul(FX_ONE - z[j], fx_tanh(an)) + fx_mul(z[j], h[j]);
    end
    for (int j = 0; j < V; j++) h[j] = hn[j];
  endfunction

  // Dense layer: w[o*V+j], b[o]; ReLU on outputs below ncoef.
  function automatic void dense(input int V, input int nout, input int ncoef, input bit relu,
                                input fx_t w[], input fx_t b[], input fx_t h[], ref fx_t y[]);
    for (int o = 0; o < nout; o++) begin
      fx_t acc;
      acc = b[o];
      for (int j = 0; j < V; j++) acc += fx_mul(w[o*V + j], h[j]);
      if (relu && o < ncoef && acc < 0) acc = 0;
      y[o] = acc;
    end
  endfunction

  function automatic fx_t fabs(fx_t a);
    return (a < 0) ? -a : a;
  endfunction

  // Dropout: mode 0 threshold, mode 1 keep the k largest (ties: lower index).
  function automatic void dropout(input int n, input bit mode, input fx_t thr, input int k,
                                  input fx_t c[], ref fx_t th[], ref int nnz);
    int order[];
    order = new[n];
    for (int i = 0; i < n; i++) order[i] = i;
    // selection sort of indices by descending magnitude, stable
    for (int a = 0; a < n; a++)
      for (int b = a + 1; b < n; b++)
        if (fabs(c[order[b]]) > fabs(c[order[a]]) ||
            (fabs(c[order[b]]) == fabs(c[order[a]]) && order[b] < order[a])) begin
          int t; t = order[a]; order[a] = order[b]; order[b] = t;
        end
    nnz = 0;
    for (int i = 0; i < n; i++) th[i] = 0;
    for (int a = 0; a < n; a++) begin
      int i;
      bit keep;
      i = order[a];
      keep = mode ? (a < k) : (fabs(c[i]) >= thr);
      if (keep) begin th[i] = c[i]; nnz++; end
    end
  endfunction

  // Second-order library with u in place of the constant term.
  function automatic void rhs(input int n, input fx_t th[], input fx_t x[], input fx_t u,
                              ref fx_t dx[]);
    fx_t phi[$];
    phi.push_back(u);
    for (int a = 0; a < n; a++) phi.push_back(x[a]);
    for (int a = 0; a < n; a++) phi.push_back(fx_mul(x[a], x[a]));
    for (int a = 0; a < n; a++)
      for (int b = a + 1; b < n; b++) phi.push_back(fx_mul(x[a], x[b]));
    for (int i = 0; i < n; i++) begin
      dx[i] = 0;
      for (int t = 0; t < phi.size(); t++) dx[i] += fx_mul(th[i*phi.size() + t], phi[t]);
    end
  endfunction

  // One RK4 step of size dt, u held.
  function automatic void rk4_step(input int n, input fx_t th[], input fx_t dt, input fx_t u,
                                   ref fx_t x[]);
    fx_t k1[], k2[], k3[], k4[], xa[];
    k1 = new[n]; k2 = new[n]; k3 = new[n]; k4 = new[n]; xa = new[n];
    rhs(n, th, x, u, k1);
    for (int i = 0; i < n; i++) xa[i] = x[i] + fx_mul(dt >>> 1, k1[i]);
    rhs(n, th, xa, u, k2);
    for (int i = 0; i < n; i++) xa[i] = x[i] + fx_mul(dt >>> 1, k2[i]);
    rhs(n, th, xa, u, k3);
    for (int i = 0; i < n; i++) xa[i] = x[i] + fx_mul(dt, k3[i]);
    rhs(n, th, xa, u, k4);
    for (int i = 0; i < n; i++)
      x[i] = x[i] + fx_mul(dt, fx_mul(k1[i] + (k2[i] <<< 1) + (k3[i] <<< 1) + k4[i],
                                      fx_t'((1 << FRAC_W) / 6)));
  endfunction

endpackage
