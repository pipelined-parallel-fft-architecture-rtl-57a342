// twiddle_rom: the twiddle factors W8^k = exp(-j*2*pi*k/8), k = 0..3.
//
// These are the factors that multiply the difference branch of the
// butterflies in the 8-point decimation-in-frequency flow graph: stage 1
// uses W8^0..W8^3, stage 2 W8^0 and W8^2, stage 3 W8^0 only.  Values are
// signed fixed point with TW_FRAC fractional bits and two integer bits, so
// that +1.0 and -1.0 are both exact:
//   k=0: ( 1,  0)   k=1: ( c, -c)   k=2: ( 0, -1)   k=3: (-c, -c)
// with c = round(2^TW_FRAC / sqrt(2)) (181 for TW_FRAC = 8).
// The set of factors follows the flow graph of the design; the fixed-point
// format and rounding are this implementation's choices.
//
// Interface: k[1:0] in, w_re / w_im [TW_FRAC+1:0] out.
// Timing: combinational lookup.
module twiddle_rom
  import fft_pkg::*;
#(
  parameter int TW_FRAC = TW_FRAC_DEF
) (
  input  logic [1:0]                k,
  output logic signed [TW_FRAC+1:0] w_re,
  output logic signed [TW_FRAC+1:0] w_im
);

  localparam int TW_W = TW_FRAC + 2;
  localparam logic signed [TW_W-1:0] ONE = TW_W'(1 << TW_FRAC);
  localparam logic signed [TW_W-1:0] C45 = TW_W'(cos45_q(TW_FRAC));

  always_comb begin
    unique case (k)
      2'd0: begin w_re = ONE;  w_im = '0;   end
      2'd1: begin w_re = C45;  w_im = -C45; end
      2'd2: begin w_re = '0;   w_im = -ONE; end
      2'd3: begin w_re = -C45; w_im = -C45; end
      default: begin w_re = ONE; w_im = '0; end
    endcase
  end

endmodule
