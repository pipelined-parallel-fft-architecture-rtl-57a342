// cmplx_mult: complex multiplication of a data sample by a twiddle factor.
//
// As in the design, it uses four real multiplications and two add/subtract
// operations:
//   y_re = x_re*w_re - x_im*w_im
//   y_im = x_re*w_im + x_im*w_re
// The full-precision results are rounded back to the data scale (add
// 2^(TW_FRAC-1), arithmetic shift right by TW_FRAC) and kept at W bits.
// Rounding and width are this implementation's choices.  The caller must
// leave headroom: |W8^k| = 1, but a single component can grow by sqrt(2)
// (for example x = (a, a) times W8^1), and a result outside W bits wraps.
// The FFT top sizes its words so that this cannot happen.
//
// Interface: x_re / x_im [W], w_re / w_im [TW_FRAC+2], y_re / y_im [W].
// Timing: combinational.
module cmplx_mult
  import fft_pkg::*;
#(
  parameter int W       = 10,
  parameter int TW_FRAC = TW_FRAC_DEF
) (
  input  logic signed [W-1:0]         x_re,
  input  logic signed [W-1:0]         x_im,
  input  logic signed [TW_FRAC+1:0]   w_re,
  input  logic signed [TW_FRAC+1:0]   w_im,
  output logic signed [W-1:0]         y_re,
  output logic signed [W-1:0]         y_im
);

  localparam int TW_W = TW_FRAC + 2;
  localparam int PW   = W + TW_W;      // width of one real product
  localparam int SW   = PW + 1;        // width of a sum of two products

  logic signed [PW-1:0] p_rr, p_ii, p_ri, p_ir;
  logic signed [SW-1:0] s_re, s_im;
  logic signed [SW-1:0] r_re, r_im;

  always_comb begin
    // four real multipliers
    p_rr = PW'(x_re) * PW'(w_re);
    p_ii = PW'(x_im) * PW'(w_im);
    p_ri = PW'(x_re) * PW'(w_im);
    p_ir = PW'(x_im) * PW'(w_re);
    // one subtractor, one adder
    s_re = SW'(p_rr) - SW'(p_ii);
    s_im = SW'(p_ri) + SW'(p_ir);
    // round to nearest (half up) and drop the twiddle's fractional bits
    r_re = (s_re + SW'(1 << (TW_FRAC - 1))) >>> TW_FRAC;
    r_im = (s_im + SW'(1 << (TW_FRAC - 1))) >>> TW_FRAC;
    y_re = r_re[W-1:0];
    y_im = r_im[W-1:0];
  end

endmodule
