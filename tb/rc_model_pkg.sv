// rc_model_pkg: real-valued reference model of the reservoir computer, used
// by the testbenches to work out expected values independently of the RTL.
//
// It evaluates the same equations with double-precision arithmetic:
//   f(v)    = beta * sin^2(v + phi0)
//   k1      = eps * (f(x_{n-N} + rho u) - x_n)
//   k2      = eps * (f(x_{n-N+1} + rho u) - (x_n + k1))
//   x_{n+1} = x_n + (k1 + k2) / 2
// with an all-zero history at start. Words are Q3.13 (value = word / 8192).
package rc_model_pkg;

  function automatic real q2r(input logic signed [15:0] w);
    return real'(w) / 8192.0;
  endfunction

  function automatic real sin2f(input real beta, input real phi0, input real v);
    real s;
    s = $sin(v + phi0);
    return beta * s * s;
  endfunction

  // Reservoir model with an explicit history buffer.
  class reservoir_model;
    int   n;
    real  hist[$];   // x_{k-N} .. x_{k-1}, oldest first
    real  x;
    real  eps, beta, phi0, rho;

    function new(int n_nodes, real e, real b, real p, real r);
      n = n_nodes; eps = e; beta = b; phi0 = p; rho = r; x = 0.0;
      hist.delete();
      for (int i = 0; i < n_nodes; i++) hist.push_back(0.0);
    endfunction

    // One Heun step driven by input u; returns the new state.
    function real step(real u);
      real d0, d1, k1, k2, xn;
      d0 = hist[0];
      d1 = hist[1];
      k1 = eps * (sin2f(beta, phi0, d0 + rho * u) - x);
      k2 = eps * (sin2f(beta, phi0, d1 + rho * u) - (x + k1));
      xn = x + (k1 + k2) / 2.0;
      if (xn > 32767.0 / 8192.0) xn = 32767.0 / 8192.0;
      if (xn < -4.0) xn = -4.0;
      void'(hist.pop_front());
      hist.push_back(x);
      x = xn;
      return xn;
    endfunction
  endclass

endpackage
