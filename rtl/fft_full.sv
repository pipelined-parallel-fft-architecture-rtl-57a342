// fft_full: 8-point radix-2 decimation-in-frequency FFT in the multi-path
// delay commutator (R2MDC) form.
//
// One complex sample enters per clock, in natural order x(0), x(1), ...
// x(7), frame after frame with no gap.  The pipeline has three radix-2
// stages.  Each stage splits the data into two streams that travel side by
// side; delay lines hold one stream back so that the two samples a
// butterfly needs arrive together, and a commutator switch re-pairs the
// streams between stages:
//
//   din -> [distributor] -upper-> [4D] --------------> BF1(a)
//                        -lower-----------------------> BF1(b)   W8^0..3
//   BF1 A -----------------------> [switch 2] -> [2D] -> BF2(a)
//   BF1 B -> [2D] ---------------> [switch 2] ---------> BF2(b)   W8^0,2
//   BF2 A -----------------------> [switch 3] -> [1D] -> BF3(a)
//   BF2 B -> [1D] ---------------> [switch 3] ---------> BF3(b)   W8^0
//
// Ten delay elements in all (4 + 2 + 2 + 1 + 1).  The first four samples
// of a frame go to the 4D line and meet the last four at butterfly 1.
// The result comes out two samples per clock, on four consecutive clocks,
// in bit-reversed order:
//   stream 1 (oint1 / oimg1): X(0), X(2), X(1), X(3)
//   stream 2 (oint2 / oimg2): X(4), X(6), X(5), X(7)
// out_valid is high on those four clocks.  Sample x(0) of a frame enters
// on the clock where the internal counter is 0 (the first clock after
// reset, then every eighth clock); X(0) of that frame appears 10 clocks
// later.  A new frame is accepted every 8 clocks, so the throughput is one
// sample per clock.
//
// Arithmetic: the input (IN_W bits) is sign-extended by one bit and every
// butterfly adds one bit, so the last stage holds X(k) exactly up to the
// twiddle rounding in IN_W + 4 bits without overflow.  The outputs
// (OUT_W bits) are that result rounded to nearest and shifted right by
// IN_W + 4 - OUT_W bits; with the default 8-bit input and 9-bit output this
// is X(k) / 8, i.e. the DFT scaled by 1/N.
//
// What follows the design: the 8-point DIF flow graph, the R2MDC structure
// of distributor, delays and switches and their lengths, the butterfly with
// four real multipliers, the port names and the 8-bit input / 9-bit output
// widths of the top-level block.  This implementation's own choices: the
// synchronous active-high reset rst, the out_valid flag, the valid tags
// that ride with the data, the register after each butterfly, the twiddle
// and output rounding, the 1/8 output scaling, and the use of in_out2 as a
// count of input samples.
//
// Interface: clck, rst; idatar / idataim (IN_W, signed) in; oint1 / oimg1,
// oint2 / oimg2 (OUT_W, signed), out_valid, in_out2 (32) out.
module fft_full
  import fft_pkg::*;
#(
  parameter int IN_W    = IN_W_DEF,
  parameter int OUT_W   = OUT_W_DEF,
  parameter int TW_FRAC = TW_FRAC_DEF
) (
  input  logic                    clck,
  input  logic                    rst,
  input  logic signed [IN_W-1:0]  idatar,
  input  logic signed [IN_W-1:0]  idataim,
  output logic signed [OUT_W-1:0] oint1,
  output logic signed [OUT_W-1:0] oimg1,
  output logic signed [OUT_W-1:0] oint2,
  output logic signed [OUT_W-1:0] oimg2,
  output logic                    out_valid,
  output logic [31:0]             in_out2
);

  // word width entering stage 1, 2, 3 and leaving stage 3
  localparam int W0 = IN_W + 1;
  localparam int W1 = W0 + 1;
  localparam int W2 = W1 + 1;
  localparam int W3 = W2 + 1;
  localparam int SH = W3 - OUT_W;

  if (OUT_W > W3) begin : g_bad_out_w
    $error("OUT_W must not exceed IN_W + 4");
  end

  typedef struct packed {
    logic                 v;
    logic signed [W0-1:0] re;
    logic signed [W0-1:0] im;
  } s0_t;

  typedef struct packed {
    logic                 v;
    logic signed [W1-1:0] re;
    logic signed [W1-1:0] im;
  } s1_t;

  typedef struct packed {
    logic                 v;
    logic signed [W2-1:0] re;
    logic signed [W2-1:0] im;
  } s2_t;

  // ---------------------------------------------------------------- control
  sw_mode_e   dist_mode, sw2_mode, sw3_mode;
  logic [1:0] k1, k2;

  r2mdc_ctrl u_ctrl (
    .clk       (clck),
    .rst       (rst),
    .dist_mode (dist_mode),
    .sw2_mode  (sw2_mode),
    .sw3_mode  (sw3_mode),
    .k1        (k1),
    .k2        (k2),
    .n_samples (in_out2)
  );

  // ---------------------------------------------------------------- stage 1
  s0_t din_w, d_up, d_lo, d_up_dly;
  logic signed [TW_FRAC+1:0] w1_re, w1_im;
  logic                      v1;
  logic signed [W1-1:0]      a1_re, a1_im, b1_re, b1_im;

  assign din_w = '{v: 1'b1, re: W0'(idatar), im: W0'(idataim)};

  commutator #(.DW($bits(s0_t))) u_dist (
    .mode (dist_mode),
    .up_i ('0),
    .lo_i (din_w),
    .up_o (d_up),
    .lo_o (d_lo)
  );

  delay_line #(.DEPTH(4), .DW($bits(s0_t))) u_d4 (
    .clk (clck), .rst (rst), .din (d_up), .dout (d_up_dly)
  );

  twiddle_rom #(.TW_FRAC(TW_FRAC)) u_tw1 (.k(k1), .w_re(w1_re), .w_im(w1_im));

  butterfly #(.W(W0), .TW_FRAC(TW_FRAC)) u_bf1 (
    .clk  (clck), .rst (rst),
    .in_v (d_up_dly.v & d_lo.v),
    .a_re (d_up_dly.re), .a_im (d_up_dly.im),
    .b_re (d_lo.re),     .b_im (d_lo.im),
    .w_re (w1_re),       .w_im (w1_im),
    .out_v(v1),
    .A_re (a1_re), .A_im (a1_im),
    .B_re (b1_re), .B_im (b1_im)
  );

  // ---------------------------------------------------------------- stage 2
  s1_t u1, l1, l1_dly, sw2_up, sw2_lo, sw2_up_dly;
  logic signed [TW_FRAC+1:0] w2_re, w2_im;
  logic                      v2;
  logic signed [W2-1:0]      a2_re, a2_im, b2_re, b2_im;

  assign u1 = '{v: v1, re: a1_re, im: a1_im};
  assign l1 = '{v: v1, re: b1_re, im: b1_im};

  delay_line #(.DEPTH(2), .DW($bits(s1_t))) u_d2_lo (
    .clk (clck), .rst (rst), .din (l1), .dout (l1_dly)
  );

  commutator #(.DW($bits(s1_t))) u_sw2 (
    .mode (sw2_mode),
    .up_i (u1),
    .lo_i (l1_dly),
    .up_o (sw2_up),
    .lo_o (sw2_lo)
  );

  delay_line #(.DEPTH(2), .DW($bits(s1_t))) u_d2_up (
    .clk (clck), .rst (rst), .din (sw2_up), .dout (sw2_up_dly)
  );

  twiddle_rom #(.TW_FRAC(TW_FRAC)) u_tw2 (.k(k2), .w_re(w2_re), .w_im(w2_im));

  butterfly #(.W(W1), .TW_FRAC(TW_FRAC)) u_bf2 (
    .clk  (clck), .rst (rst),
    .in_v (sw2_up_dly.v & sw2_lo.v),
    .a_re (sw2_up_dly.re), .a_im (sw2_up_dly.im),
    .b_re (sw2_lo.re),     .b_im (sw2_lo.im),
    .w_re (w2_re),         .w_im (w2_im),
    .out_v(v2),
    .A_re (a2_re), .A_im (a2_im),
    .B_re (b2_re), .B_im (b2_im)
  );

  // ---------------------------------------------------------------- stage 3
  s2_t u2, l2, l2_dly, sw3_up, sw3_lo, sw3_up_dly;
  logic signed [TW_FRAC+1:0] w3_re, w3_im;
  logic                      v3;
  logic signed [W3-1:0]      a3_re, a3_im, b3_re, b3_im;

  assign u2 = '{v: v2, re: a2_re, im: a2_im};
  assign l2 = '{v: v2, re: b2_re, im: b2_im};

  delay_line #(.DEPTH(1), .DW($bits(s2_t))) u_d1_lo (
    .clk (clck), .rst (rst), .din (l2), .dout (l2_dly)
  );

  commutator #(.DW($bits(s2_t))) u_sw3 (
    .mode (sw3_mode),
    .up_i (u2),
    .lo_i (l2_dly),
    .up_o (sw3_up),
    .lo_o (sw3_lo)
  );

  delay_line #(.DEPTH(1), .DW($bits(s2_t))) u_d1_up (
    .clk (clck), .rst (rst), .din (sw3_up), .dout (sw3_up_dly)
  );

  // the last stage multiplies by W8^0 only
  twiddle_rom #(.TW_FRAC(TW_FRAC)) u_tw3 (.k(2'd0), .w_re(w3_re), .w_im(w3_im));

  butterfly #(.W(W2), .TW_FRAC(TW_FRAC)) u_bf3 (
    .clk  (clck), .rst (rst),
    .in_v (sw3_up_dly.v & sw3_lo.v),
    .a_re (sw3_up_dly.re), .a_im (sw3_up_dly.im),
    .b_re (sw3_lo.re),     .b_im (sw3_lo.im),
    .w_re (w3_re),         .w_im (w3_im),
    .out_v(v3),
    .A_re (a3_re), .A_im (a3_im),
    .B_re (b3_re), .B_im (b3_im)
  );

  // ---------------------------------------------------------------- output
  function automatic logic signed [OUT_W-1:0] scale_out(input logic signed [W3-1:0] x);
    logic signed [W3:0] t;
    if (SH == 0) return OUT_W'(x);
    t = ((W3+1)'(x) + (W3+1)'(1 << (SH > 0 ? SH - 1 : 0))) >>> SH;
    return t[OUT_W-1:0];
  endfunction

  assign out_valid = v3;
  assign oint1     = scale_out(a3_re);
  assign oimg1     = scale_out(a3_im);
  assign oint2     = scale_out(b3_re);
  assign oimg2     = scale_out(b3_im);

  // ------------------------------------------------------------- assertions
  // The delays keep the two streams a fixed distance apart: at every
  // butterfly either both inputs carry data or neither does.
  a_bf1_pair: assert property (@(posedge clck) disable iff (rst) d_up_dly.v == d_lo.v)
    else $error("stage 1 inputs out of step");
  a_bf2_pair: assert property (@(posedge clck) disable iff (rst) sw2_up_dly.v == sw2_lo.v)
    else $error("stage 2 inputs out of step");
  a_bf3_pair: assert property (@(posedge clck) disable iff (rst) sw3_up_dly.v == sw3_lo.v)
    else $error("stage 3 inputs out of step");

endmodule
