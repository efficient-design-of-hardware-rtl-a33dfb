// rc_pkg: number format and helpers shared by the reservoir computer.
//
// All data words are 16-bit signed fixed point with 13 fractional bits
// (Q3.13: sign, two integer bits, thirteen fraction bits, range [-4, 4)).
// Sixteen bits follow the 16-bit arithmetic of the original FPGA design; the
// thirteen fraction bits match its stated 13-bit quantisation level (2^-13).
// Products are truncated (arithmetic shift right) and results saturated to the
// 16-bit range; the rounding rule is this design's own choice.
package rc_pkg;

  localparam int unsigned DATA_W = 16;
  localparam int unsigned FRAC_W = 13;

  typedef logic signed [DATA_W-1:0] fix_t;

  localparam fix_t FIX_MAX = fix_t'(16'sh7FFF);
  localparam fix_t FIX_MIN = fix_t'(16'sh8000);

  // Saturate a wide signed value to a 16-bit word.
  function automatic fix_t sat_fix(input logic signed [47:0] v);
    if (v > 48'sd32767)       return FIX_MAX;
    else if (v < -48'sd32768) return FIX_MIN;
    else                      return fix_t'(v);
  endfunction

  // Fixed-point product, still at full width (2*FRAC_W fraction bits dropped
  // back to FRAC_W by truncation).
  function automatic logic signed [47:0] fix_mul_wide(input logic signed [23:0] a,
                                                      input logic signed [23:0] b);
    logic signed [47:0] p;
    p = 48'(a) * 48'(b);
    return p >>> FRAC_W;
  endfunction

endpackage
