// tb_reservoir: self-checking test of the delay reservoir.
// A reduced reservoir (N = 20) is run with three published parameter sets
// (two found by the optimiser, one fixed set; given as eps = h/tau, beta,
// phi0, rho) on random sample-and-hold inputs u in [-1, 1], for 6 delay
// lengths each, so the delayed feedback is exercised many times over. Every node state is compared
// with a double-precision Heun integration of
//   tau dx/dt = -x + beta sin^2(x(t - tau_D) + rho u + phi0)
// (rc_model_pkg) and must stay within 2^-8 of it; the largest deviation is
// printed. With inputs offered at once and outputs taken at once a node must
// take 4 clocks.
module tb_reservoir;
  import rc_pkg::*;
  import rc_model_pkg::*;
  localparam int N = 20;
  logic clk = 0, rst_n = 0;
  fix_t eps = 0, beta = 0, phi0 = 0, rho = 0;
  logic [15:0] in_data = 0;
  logic in_req = 0, in_ack;
  logic [15:0] out_data;
  logic out_req, out_ack = 0;
  int checks = 0, failures = 0;
  real worst = 0.0;
  real exp_q[$];
  bit fast = 0;
  int cyc = 0;

  reservoir #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ack <= fast ? 1'b1 : ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n && out_req && out_ack) begin
    real e, g;
    e = exp_q.pop_front();
    g = q2r(out_data);
    checks++;
    if (g - e > worst) worst = g - e;
    if (e - g > worst) worst = e - g;
    if (g - e > 1.0 / 256.0 || e - g > 1.0 / 256.0) begin
      failures++;
      $display("FAIL: x got %f want %f", g, e);
    end
  end

  task automatic run_set(input fix_t e, input fix_t b, input fix_t p, input fix_t r, input int steps);
    reservoir_model m;
    fix_t u;
    int t0;
    eps = e; beta = b; phi0 = p; rho = r;
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    m = new(N, q2r(e), q2r(b), q2r(p), q2r(r));
    t0 = cyc;
    for (int k = 0; k < steps; k++) begin
      u = fix_t'($signed($urandom_range(0, 16384)) - 8192);
      exp_q.push_back(m.step(q2r(u)));
      if (!fast) repeat ($urandom_range(0, 2)) @(negedge clk);
      in_data = u; in_req = 1;
      @(posedge clk);
      while (!in_ack) @(posedge clk);
      if (k == 0) t0 = cyc;
      @(negedge clk);
      in_req = 0;
    end
    wait (exp_q.size() == 0);
    if (fast) begin
      checks++;
      if (cyc - t0 > 4 * steps + 1) begin
        failures++; $display("FAIL: %0d clocks for %0d nodes", cyc - t0, steps);
      end
    end
    @(negedge clk);
  endtask

  initial begin
    // eps = 0.01/7.8125e-3, beta = -1.09375, phi0 = -3.3125, rho = 1.5
    run_set(16'sd10486, -16'sd8960, -16'sd27136, 16'sd12288, 6 * N);
    // eps = 0.01/0.07, beta = -1.69, phi0 = -1.33, rho = 1.5
    run_set(16'sd1170, -16'sd13844, -16'sd10895, 16'sd12288, 6 * N);
    // eps = 0.01/5e-3, beta = 0.8, phi0 = 0.3, rho = 1.5 (fixed set of the PCA sweep)
    run_set(16'sd16384, 16'sd6554, 16'sd2458, 16'sd12288, 6 * N);
    // same, with data offered and taken at once: rate check
    fast = 1;
    run_set(16'sd1170, -16'sd13844, -16'sd10895, 16'sd12288, 3 * N);
    $display("largest deviation from the real-valued model %g", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
