// butterfly: radix-2 decimation-in-frequency butterfly of the R2MDC FFT.
//
// Computes the two-point DFT of the design's butterfly figure,
//   A = a + b
//   B = (a - b) * W
// with one complex adder, one complex subtractor and one complex
// multiplier (cmplx_mult, four real multipliers).  Inputs are W bits per
// component; both outputs are W+1 bits, one bit of growth per stage.  As
// |A| and |B| are at most |a| + |b|, this never overflows as long as the
// magnitude of each input stays below 2^(W-1); the FFT top guarantees that
// by sign-extending its input by one bit before the first stage.
// The valid tag out_v is set when both inputs were valid.
// The arithmetic follows the design; the output register (one pipeline
// stage per butterfly), the word growth and the reset are this
// implementation's choices.
//
// Interface: clk, rst (synchronous, active high); a_*, b_*, in_v; twiddle
// w_re / w_im; A_*, B_*, out_v.
// Timing: one clock of latency; a new pair is accepted every clock.
module butterfly
  import fft_pkg::*;
#(
  parameter int W       = 9,
  parameter int TW_FRAC = TW_FRAC_DEF
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       in_v,
  input  logic signed [W-1:0]        a_re,
  input  logic signed [W-1:0]        a_im,
  input  logic signed [W-1:0]        b_re,
  input  logic signed [W-1:0]        b_im,
  input  logic signed [TW_FRAC+1:0]  w_re,
  input  logic signed [TW_FRAC+1:0]  w_im,
  output logic                       out_v,
  output logic signed [W:0]          A_re,
  output logic signed [W:0]          A_im,
  output logic signed [W:0]          B_re,
  output logic signed [W:0]          B_im
);

  logic signed [W:0] sum_re, sum_im, dif_re, dif_im;
  logic signed [W:0] prod_re, prod_im;

  always_comb begin
    sum_re = (W+1)'(a_re) + (W+1)'(b_re);
    sum_im = (W+1)'(a_im) + (W+1)'(b_im);
    dif_re = (W+1)'(a_re) - (W+1)'(b_re);
    dif_im = (W+1)'(a_im) - (W+1)'(b_im);
  end

  cmplx_mult #(.W(W + 1), .TW_FRAC(TW_FRAC)) u_mult (
    .x_re (dif_re),
    .x_im (dif_im),
    .w_re (w_re),
    .w_im (w_im),
    .y_re (prod_re),
    .y_im (prod_im)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      out_v <= 1'b0;
      A_re  <= '0;
      A_im  <= '0;
      B_re  <= '0;
      B_im  <= '0;
    end else begin
      out_v <= in_v;
      A_re  <= sum_re;
      A_im  <= sum_im;
      B_re  <= prod_re;
      B_im  <= prod_im;
    end
  end

endmodule
