// reservoir: the time-delay reservoir, one nonlinear node with delayed feedback.
//
// It integrates   tau dx/dt = -x(t) + f( x(t - tau_D) + rho u(t) ),
// f(v) = beta sin^2(v + phi0), with Heun's second-order method and one step
// of size h = theta = tau_D / N per virtual node, so the delay tau_D spans
// exactly N steps. With eps = h / tau and d_n = x_{n-N}:
//   k1      = eps * ( f(d_n     + rho u_n) - x_n )
//   xp      = x_n + k1
//   k2      = eps * ( f(d_{n+1} + rho u_n) - xp  )
//   x_{n+1} = x_n + (k1 + k2) / 2
// u_n is held for the whole step (sample and hold). The N past states live in
// a delay_line of N-1 entries plus the register dcur; the entry read at step
// n (d_{n+1}) becomes dcur for step n+1, so one memory read and one write per
// step suffice. One nonlinearity unit is shared by both Heun stages.
//
// Interface: u arrives on in_* and each x_{n+1} leaves on out_* (req/ack link,
// Q3.13 words). eps, beta, phi0, rho are Q3.13 and must be held constant
// while data flow; eps is h/tau, computed by the host, so no divider is
// needed. Timing: 4 clocks per node (take u, stage 1, stage 2, hand over x)
// when data are offered and taken at once; it waits when they are not. After
// reset it waits N-1 clocks while the delay line is cleared.
//
// The equation, the nonlinearity, the delay and the use of Heun's method are
// the original design's; the explicit step form, h = tau_D/N, eps as an input,
// the zero initial history and the saturating Q3.13 arithmetic are this
// design's choices.
module reservoir
  import rc_pkg::*;
#(
  parameter int unsigned N = 600
) (
  input  logic        clk,
  input  logic        rst_n,
  input  fix_t        eps,
  input  fix_t        beta,
  input  fix_t        phi0,
  input  fix_t        rho,
  input  logic [15:0] in_data,
  input  logic        in_req,
  output logic        in_ack,
  output logic [15:0] out_data,
  output logic        out_req,
  input  logic        out_ack
);
  typedef enum logic [1:0] {S_IN, S_K1, S_K2, S_OUT} state_t;
  state_t state;

  fix_t               x;       // x_n
  fix_t               u;       // u_n
  fix_t               dcur;    // d_n = x_{n-N}
  fix_t               dnext;   // d_{n+1}, from the delay line
  logic               dl_ready;
  logic               shift;
  logic signed [23:0] k1;
  logic signed [23:0] xp;

  delay_line #(.DEPTH(N - 1)) u_delay (
    .clk   (clk),
    .rst_n (rst_n),
    .shift (shift),
    .din   (x),
    .dout  (dnext),
    .ready (dl_ready)
  );

  // rho * u, and the argument of the shared nonlinearity.
  logic signed [47:0] rho_u;
  logic signed [19:0] nl_arg;
  fix_t               fval;
  assign rho_u  = fix_mul_wide(24'(rho), 24'(u));
  assign nl_arg = 20'((state == S_K1) ? 48'(dcur) + rho_u : 48'(dnext) + rho_u);

  nonlinearity u_nl (
    .arg  (nl_arg),
    .phi0 (phi0),
    .beta (beta),
    .f    (fval)
  );

  // Heun stages.
  logic signed [47:0] k1_w, k2_w, xn_w;
  always_comb begin
    k1_w = fix_mul_wide(24'(eps), 24'(fval) - 24'(x));
    k2_w = fix_mul_wide(24'(eps), 24'(fval) - xp);
    xn_w = 48'(x) + ((48'(k1) + k2_w) >>> 1);
  end

  assign in_ack = (state == S_IN) && dl_ready;
  assign shift  = (state == S_K2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IN;
      x        <= '0;
      u        <= '0;
      dcur     <= '0;
      k1       <= '0;
      xp       <= '0;
      out_data <= '0;
      out_req  <= 1'b0;
    end else begin
      unique case (state)
        S_IN: if (in_req && in_ack) begin
          u     <= fix_t'(in_data);
          state <= S_K1;
        end
        S_K1: begin
          k1    <= 24'(k1_w);
          xp    <= 24'(48'(x) + k1_w);
          state <= S_K2;
        end
        S_K2: begin
          dcur     <= dnext;
          x        <= sat_fix(xn_w);
          out_data <= sat_fix(xn_w);
          out_req  <= 1'b1;
          state    <= S_OUT;
        end
        S_OUT: if (out_ack) begin
          out_req <= 1'b0;
          state   <= S_IN;
        end
        default: state <= S_IN;
      endcase
    end
  end
endmodule
