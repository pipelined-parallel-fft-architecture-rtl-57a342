// fft_pkg: constants and small helpers shared by the 8-point R2MDC FFT.
//
// The transform length (8) and the three pipeline stages follow the
// radix-2 multi-path delay commutator of the design.  The word widths
// (8-bit input, 9-bit output) are read off the port list of the synthesised
// top-level block; the twiddle precision (8 fractional bits) is this
// implementation's own choice, as is the rounding rule (add one half, then
// arithmetic shift right).
package fft_pkg;

  // Default word widths.
  localparam int IN_W_DEF    = 8;   // input sample, each of re / im
  localparam int OUT_W_DEF   = 9;   // output sample, each of re / im
  localparam int TW_FRAC_DEF = 8;   // fractional bits of a twiddle factor

  // Setting of a 2x2 commutator switch.
  typedef enum logic {
    SW_STRAIGHT = 1'b0,  // upper -> upper, lower -> lower
    SW_CROSS    = 1'b1   // upper -> lower, lower -> upper
  } sw_mode_e;

  // round(2^frac / sqrt(2)): the magnitude of the real and imaginary parts
  // of W8^1 and W8^3 in fixed point.  Integer square root of 2^(2*frac-1),
  // then rounded to the nearest integer.
  function automatic int cos45_q(input int frac);
    longint target;
    longint c;
    target = longint'(1) << (2 * frac - 1);
    c = 0;
    while ((c + 1) * (c + 1) <= target) c++;
    // round: c + 1/2 squared is c*c + c + 1/4; compare 4x both sides
    if (4 * c * c + 4 * c + 1 <= 4 * target) c++;
    return int'(c);
  endfunction

endpackage
