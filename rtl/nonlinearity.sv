// nonlinearity: the nonlinear node of the reservoir, f = beta * sin^2(arg + phi0).
//
// sin^2 has period pi, so the phase s = arg + phi0 is multiplied by 1/pi
// (24-bit constant) and only the fractional part of s/pi is kept; two's
// complement makes this a floor-modulo for negative phases as well. The top
// LUT_BITS of that fraction index a table of sin^2(pi*k/2^LUT_BITS),
// k = 0 .. 2^LUT_BITS, with 16 fraction bits; the next 16 bits interpolate
// linearly between neighbouring entries. With LUT_BITS = 8 the error is about
// 4e-5, below the 2^-13 step of the number format. The table is computed at
// elaboration from $sin and becomes a ROM. The result is scaled by beta and
// saturated to Q3.13.
//
// Interface: arg is Q6.13 (20 bits) so that a delayed state plus rho*u fits;
// phi0, beta and f are Q3.13. Purely combinational: result in the same clock.
//
// The function f(x) = beta sin^2(x + phi0) is the original design's; the
// table-and-interpolation method is this design's choice.
module nonlinearity
  import rc_pkg::*;
#(
  parameter int unsigned LUT_BITS = 8
) (
  input  logic signed [19:0] arg,
  input  fix_t               phi0,
  input  fix_t               beta,
  output fix_t               f
);
  localparam int unsigned NT = 1 << LUT_BITS;
  typedef logic [16:0] tab_t [NT + 1];

  function automatic tab_t make_table();
    tab_t t;
    for (int k = 0; k <= int'(NT); k++) begin
      real s;
      s = $sin(3.14159265358979323846 * real'(k) / real'(NT));
      t[k] = 17'($rtoi(s * s * 65536.0 + 0.5));
    end
    return t;
  endfunction

  localparam tab_t TAB = make_table();
  // round(2^24 / pi)
  localparam logic signed [25:0] INV_PI = 26'sd5340354;

  logic signed [20:0]         phase;
  logic signed [36:0]         cyc;        // fraction of phase / pi, 37 bits
  logic [36:36-LUT_BITS-15]   frac;       // fraction bits in use
  logic [LUT_BITS-1:0]        idx;
  logic [15:0]                w;
  logic [16:0]                t0, t1;
  logic signed [34:0]         interp;
  logic [16:0]                s2;         // sin^2 with 16 fraction bits
  logic signed [47:0]         prod;

  always_comb begin
    phase  = 21'(arg) + 21'(phi0);
    cyc    = 37'(47'(phase) * 47'(INV_PI));   // integer part dropped
    frac   = cyc[36:36-LUT_BITS-15];
    idx    = frac[36 -: LUT_BITS];
    w      = frac[36-LUT_BITS -: 16];
    t0     = TAB[{1'b0, idx}];
    t1     = TAB[{1'b0, idx} + 1'b1];
    interp = (35'(signed'({1'b0, t1})) - 35'(signed'({1'b0, t0}))) * 35'(signed'({1'b0, w}));
    s2     = 17'(35'(signed'({1'b0, t0})) + (interp >>> 16));
    prod   = 48'(beta) * 48'(signed'({1'b0, s2}));
    f      = sat_fix(prod >>> 16);
  end
endmodule
