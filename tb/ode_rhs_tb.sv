// ode_rhs_tb - evaluates the first-pass ODE of the Lotka-Volterra example
//   dx1 = 0.4u + 0.5x1 + 0.6x2 + 0.1x1^2 + 0.2x2^2 + 0.5x1x2
//   dx2 = 0.1u + 0.3x1 + 0.4x2 + 0.6x1^2 + 0.8x2^2 + 0.2x1x2
// at random points against floating-point arithmetic, and random
// coefficient vectors against the reference library for n = 2 and n = 3.
module ode_rhs_tb;
  import merinda_pkg::*;
  import merinda_ref_pkg::*;

  fx_t th2 [12];
  fx_t x2 [2];
  fx_t u2;
  fx_t dx2 [2];
  fx_t th3 [30];
  fx_t x3 [3];
  fx_t u3;
  fx_t dx3 [3];

  int checks = 0, failures = 0;

  ode_rhs #(.N_STATE(2)) dut2 (.theta(th2), .x(x2), .u(u2), .dx(dx2));
  ode_rhs #(.N_STATE(3)) dut3 (.theta(th3), .x(x3), .u(u3), .dx(dx3));

  function automatic fx_t rnd(int unsigned r);
    return fx_t'(int'($urandom_range(0, 2 * r)) - int'(r));
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real c [12] = '{0.4, 0.5, 0.6, 0.1, 0.2, 0.5, 0.1, 0.3, 0.4, 0.6, 0.8, 0.2};
    fx_t tv[], xv[], dv[];
    for (int i = 0; i < 12; i++) th2[i] = fx_from_real(c[i]);
    for (int n = 0; n < 50; n++) begin
      real a, b, uu, e1, e2;
      a = real'($urandom_range(0, 4000)) / 1000.0 - 2.0;
      b = real'($urandom_range(0, 4000)) / 1000.0 - 2.0;
      uu = real'($urandom_range(0, 2000)) / 1000.0;
      x2[0] = fx_from_real(a); x2[1] = fx_from_real(b); u2 = fx_from_real(uu);
      #1;
      e1 = 0.4*uu + 0.5*a + 0.6*b + 0.1*a*a + 0.2*b*b + 0.5*a*b;
      e2 = 0.1*uu + 0.3*a + 0.4*b + 0.6*a*a + 0.8*b*b + 0.2*a*b;
      checks += 2;
      if ((fx_to_real(dx2[0]) - e1) > 0.001 || (e1 - fx_to_real(dx2[0])) > 0.001) begin
        failures++; $display("dx1 %f exp %f", fx_to_real(dx2[0]), e1);
      end
      if ((fx_to_real(dx2[1]) - e2) > 0.001 || (e2 - fx_to_real(dx2[1])) > 0.001) begin
        failures++; $display("dx2 %f exp %f", fx_to_real(dx2[1]), e2);
      end
    end
    // random, n = 2
    tv = new[12]; xv = new[2]; dv = new[2];
    for (int n = 0; n < 100; n++) begin
      for (int i = 0; i < 12; i++) begin th2[i] = rnd(65536); tv[i] = th2[i]; end
      for (int i = 0; i < 2; i++) begin x2[i] = rnd(262144); xv[i] = x2[i]; end
      u2 = rnd(131072);
      #1;
      rhs(2, tv, xv, u2, dv);
      for (int i = 0; i < 2; i++) begin
        checks++;
        if (dx2[i] !== dv[i]) begin failures++; $display("n=2 eq %0d got %0d exp %0d", i, dx2[i], dv[i]); end
      end
    end
    // random, n = 3
    tv = new[30]; xv = new[3]; dv = new[3];
    for (int n = 0; n < 100; n++) begin
      for (int i = 0; i < 30; i++) begin th3[i] = rnd(65536); tv[i] = th3[i]; end
      for (int i = 0; i < 3; i++) begin x3[i] = rnd(262144); xv[i] = x3[i]; end
      u3 = rnd(131072);
      #1;
      rhs(3, tv, xv, u3, dv);
      for (int i = 0; i < 3; i++) begin
        checks++;
        if (dx3[i] !== dv[i]) begin failures++; $display("n=3 eq %0d got %0d exp %0d", i, dx3[i], dv[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
