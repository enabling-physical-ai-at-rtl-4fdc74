// merinda_pkg - number format and arithmetic shared by the model-recovery
// forward-pass datapath.
//
// Every value in the datapath (samples, weights, hidden states, ODE
// coefficients, solver state) is a signed fixed-point number fx_t with
// DATA_W bits, FRAC_W of them fractional (Q16.16 by default). A product is
// formed at double width and shifted right arithmetically, i.e. truncated
// toward minus infinity, without saturation. The number format is this
// design's choice; the reference implementation was written in HLS C++ and
// does not state one.
//
// The GRU gate nonlinearities use the PLAN piecewise-linear sigmoid (four
// segments whose slopes are powers of two, so only shifts and adds are
// needed); tanh is derived from it as tanh(x) = 2*sigmoid(2x) - 1. Maximum
// error against the exact sigmoid is below 0.02. The choice of approximation
// is this design's own.
//
// The ODE library is the full second-order polynomial library of the state
// with the constant term replaced by the input u, ordered
//   u, x1..xn, x1^2..xn^2, x1*x2, x1*x3, ..., x(n-1)*xn
// which for n = 2 is exactly the order u, x1, x2, x1^2, x2^2, x1*x2 used in
// the worked Lotka-Volterra example. It holds C(n+2, 2) terms per equation.
package merinda_pkg;

  parameter int unsigned DATA_W = 32;
  parameter int unsigned FRAC_W = 16;

  typedef logic signed [DATA_W-1:0] fx_t;

  localparam fx_t FX_ONE  = fx_t'(1 << FRAC_W);
  localparam fx_t FX_HALF = fx_t'(1 << (FRAC_W - 1));

  // Number of polynomial terms per state equation for order 2: C(n+2, 2).
  function automatic int unsigned n_terms(int unsigned n);
    return (n + 2) * (n + 1) / 2;
  endfunction

  // Fixed-point multiply, truncating.
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return fx_t'(p >>> FRAC_W);
  endfunction

  // Real <-> fixed conversion helpers (simulation only, used by testbenches).
  function automatic fx_t fx_from_real(real r);
    return fx_t'($rtoi(r * real'(1 << FRAC_W) + ((r >= 0.0) ? 0.5 : -0.5)));
  endfunction

  function automatic real fx_to_real(fx_t a);
    return real'(a) / real'(1 << FRAC_W);
  endfunction

  // PLAN sigmoid approximation:
  //   |x| >= 5          : 1
  //   2.375 <= |x| < 5  : |x|/32 + 0.84375
  //   1 <= |x| < 2.375  : |x|/8  + 0.625
  //   |x| < 1           : |x|/4  + 0.5
  // and sigmoid(-x) = 1 - sigmoid(x).
  function automatic fx_t fx_sigmoid(fx_t x);
    fx_t ax, y;
    ax = (x < 0) ? -x : x;
    if (ax >= fx_t'(5 << FRAC_W))
      y = FX_ONE;
    else if (ax >= fx_t'((19 << FRAC_W) / 8))
      y = (ax >>> 5) + fx_t'((27 << FRAC_W) / 32);
    else if (ax >= FX_ONE)
      y = (ax >>> 3) + fx_t'((5 << FRAC_W) / 8);
    else
      y = (ax >>> 2) + FX_HALF;
    return (x < 0) ? (FX_ONE - y) : y;
  endfunction

  function automatic fx_t fx_tanh(fx_t x);
    return (fx_sigmoid(x <<< 1) <<< 1) - FX_ONE;
  endfunction

endpackage
