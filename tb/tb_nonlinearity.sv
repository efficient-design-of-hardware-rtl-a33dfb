// tb_nonlinearity: self-checking test of f = beta sin^2(arg + phi0).
// Random arguments over the whole Q6.13 input range, phi0 over [-4, 4) and
// beta over [-4, 4) are applied; the output must lie within 4 LSB (4 * 2^-13)
// of beta sin^2(arg + phi0) computed here with $sin in double precision.
// Also checks exact points: f = 0 at arg + phi0 = 0 and f = beta at pi/2.
module tb_nonlinearity;
  import rc_pkg::*;
  logic signed [19:0] arg = 0;
  fix_t phi0 = 0, beta = 0, f;
  int checks = 0, failures = 0;
  real worst = 0.0;

  nonlinearity dut (.*);

  task automatic try_one(input logic signed [19:0] a, input fix_t p, input fix_t b, input real tol);
    real want, got, s;
    arg = a; phi0 = p; beta = b;
    #1;
    s = $sin((real'(a) + real'(p)) / 8192.0);
    want = real'(b) / 8192.0 * s * s;
    got = real'(f) / 8192.0;
    checks++;
    if ((got - want > tol) || (want - got > tol)) begin
      failures++;
      $display("FAIL: arg=%0d phi0=%0d beta=%0d got %f want %f", a, p, b, got, want);
    end
    if (got - want > worst) worst = got - want;
    if (want - got > worst) worst = want - got;
  endtask

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    try_one(20'sd0, 16'sd0, 16'sd8192, 0.0);                      // sin^2(0) = 0
    try_one(20'sd12868, 16'sd0, 16'sd8192, 2.0 / 8192.0);          // pi/2 -> 1
    try_one(20'sd0, 16'sd12868, -16'sd8192, 2.0 / 8192.0);         // beta < 0
    for (int k = 0; k < 5000; k++)
      try_one(20'($urandom), fix_t'($urandom), fix_t'($urandom), 4.0 / 8192.0);
    $display("largest error %g", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
