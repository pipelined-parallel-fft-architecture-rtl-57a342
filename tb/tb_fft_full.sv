// tb_fft_full: end-to-end test of the 8-point R2MDC FFT at its default
// parameters (8-bit input, 9-bit output, 8-bit twiddle fraction).
//
// Frames of 8 complex samples are streamed back to back, one sample per
// clock, starting on the first clock after reset.  The frames are:
//   - the constant input re = 2, im = 0 of the design's published
//     simulation, and re = 2, im = 2 (both readings of that experiment);
//   - a unit impulse, single complex tones at every bin, full-scale
//     extremes (all -128, alternating +127 / -128) and random samples.
// Each frame is transformed here by an integer model of the 8-point
// decimation-in-frequency flow graph, written as array arithmetic
// (x[m] +/- x[m+4], then x[m] +/- x[m+2], then x[m] +/- x[m+1]) with the
// same word widths and rounding as the hardware, and the outputs must
// match it bit for bit.  They must also lie within 1.5 LSB of the exact
// DFT / 8 computed in floating point, and X(0) of the constant frames must
// be exactly 2 (16 / 8).
// Timing checks: X(0) of frame f appears 10 clocks after x(0) of that frame
// entered; the four output clocks of a frame are consecutive; stream 1
// carries X(0), X(2), X(1), X(3) and stream 2 X(4), X(6), X(5), X(7);
// in_out2 counts input samples.
// After the stream, a reset in the middle of a frame must restart the
// framing: four random frames are replayed and must come out unchanged,
// with the same latency counted from the end of reset.
// Mechanism counters (each must be seen at least once): distributor to the
// 4D path and to the direct path, switch 2 and switch 3 each straight and
// crossed while carrying data, each twiddle W8^0..W8^3 at butterfly 1 and
// W8^0, W8^2 at butterfly 2 on valid data, complete output frames, and the
// mid-frame reset.
module tb_fft_full;

  localparam int IN_W  = 8;
  localparam int OUT_W = 9;
  localparam int TW_FRAC = 8;
  localparam int NFR   = 120;          // frames in the stream
  localparam int LAT   = 10;           // x(0) in -> X(0) out, clocks
  localparam int RF0   = 13;           // first frame replayed after the mid-frame reset
  localparam real PI   = 3.14159265358979323846;

  logic clck = 1'b0;
  logic rst;
  logic signed [IN_W-1:0]  idatar, idataim;
  logic signed [OUT_W-1:0] oint1, oimg1, oint2, oimg2;
  logic        out_valid;
  logic [31:0] in_out2;

  int checks = 0;
  int failures = 0;

  always #5 clck = ~clck;

  fft_full dut (
    .clck(clck), .rst(rst), .idatar(idatar), .idataim(idataim),
    .oint1(oint1), .oimg1(oimg1), .oint2(oint2), .oimg2(oimg2),
    .out_valid(out_valid), .in_out2(in_out2)
  );

  initial begin : watchdog
    repeat (NFR * 8 + 300) @(posedge clck);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ stimulus
  int xr [NFR][8];
  int xi [NFR][8];

  function automatic int clip(input int v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return v;
  endfunction

  task automatic make_frames();
    for (int f = 0; f < NFR; f++) begin
      for (int n = 0; n < 8; n++) begin
        if (f == 0)      begin xr[f][n] = 2; xi[f][n] = 0; end
        else if (f == 1) begin xr[f][n] = 2; xi[f][n] = 2; end
        else if (f == 2) begin xr[f][n] = (n == 0) ? 100 : 0; xi[f][n] = 0; end
        else if (f == 3) begin xr[f][n] = -128; xi[f][n] = -128; end
        else if (f == 4) begin xr[f][n] = (n % 2 == 0) ? 127 : -128; xi[f][n] = (n % 2 == 0) ? -128 : 127; end
        else if (f < 13) begin
          // complex tone at bin f - 5, amplitude 100
          xr[f][n] = clip($rtoi(100.0 * $cos(2.0 * PI * (f - 5) * n / 8.0) + 200.5) - 200);
          xi[f][n] = clip($rtoi(100.0 * $sin(2.0 * PI * (f - 5) * n / 8.0) + 200.5) - 200);
        end else begin
          xr[f][n] = $signed(32'($urandom_range(0, 255))) - 128;
          xi[f][n] = $signed(32'($urandom_range(0, 255))) - 128;
        end
      end
    end
  endtask

  // ------------------------------------------------------- reference model
  function automatic longint wrap(input longint v, input int w);
    longint m;
    m = v & ((longint'(1) << w) - 1);
    if (m >= (longint'(1) << (w - 1))) m -= (longint'(1) << w);
    return m;
  endfunction

  function automatic longint rnd(input longint v, input int sh);
    return (v + (longint'(1) << (sh - 1))) >>> sh;
  endfunction

  function automatic void twid(input int k, output longint wr, output longint wi);
    real s;
    s = real'(1 << TW_FRAC);
    wr = longint'($rtoi($cos(2.0 * PI * k / 8.0) * s + 1000.5)) - 1000;
    wi = longint'($rtoi(-$sin(2.0 * PI * k / 8.0) * s + 1000.5)) - 1000;
  endfunction

  // one radix-2 DIF pass over groups of size 2*half, words growing to w bits
  function automatic void dif_pass(inout longint ar[8], inout longint ai[8],
                                   input int half, input int w);
    longint br[8], bi[8];
    longint dr, di, wr, wi;
    int step;
    step = 4 / half;                        // twiddle stride in W8 units
    for (int g = 0; g < 8; g += 2 * half) begin
      for (int m = 0; m < half; m++) begin
        twid(m * step, wr, wi);
        br[g + m] = ar[g + m] + ar[g + m + half];
        bi[g + m] = ai[g + m] + ai[g + m + half];
        dr = ar[g + m] - ar[g + m + half];
        di = ai[g + m] - ai[g + m + half];
        br[g + m + half] = wrap(rnd(dr * wr - di * wi, TW_FRAC), w);
        bi[g + m + half] = wrap(rnd(dr * wi + di * wr, TW_FRAC), w);
      end
    end
    ar = br;
    ai = bi;
  endfunction

  // model outputs in bit-reversed position order, already scaled to OUT_W
  longint mr [NFR][8];
  longint mi [NFR][8];

  task automatic run_model();
    longint ar[8], ai[8];
    for (int f = 0; f < NFR; f++) begin
      for (int n = 0; n < 8; n++) begin ar[n] = longint'(xr[f][n]); ai[n] = longint'(xi[f][n]); end
      dif_pass(ar, ai, 4, IN_W + 2);
      dif_pass(ar, ai, 2, IN_W + 3);
      dif_pass(ar, ai, 1, IN_W + 4);
      for (int p = 0; p < 8; p++) begin
        mr[f][p] = wrap(rnd(ar[p], IN_W + 4 - OUT_W), OUT_W);
        mi[f][p] = wrap(rnd(ai[p], IN_W + 4 - OUT_W), OUT_W);
      end
    end
  endtask

  function automatic int bitrev3(input int p);
    return ((p & 1) << 2) | (p & 2) | ((p >> 2) & 1);
  endfunction

  // ---------------------------------------------------------------- checks
  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic check_dft(input int f, input int p, input longint gr, input longint gi);
    int k;
    real er, ei;
    k = bitrev3(p);
    er = 0.0;
    ei = 0.0;
    for (int n = 0; n < 8; n++) begin
      er += xr[f][n] * $cos(2.0 * PI * n * k / 8.0) + xi[f][n] * $sin(2.0 * PI * n * k / 8.0);
      ei += xi[f][n] * $cos(2.0 * PI * n * k / 8.0) - xr[f][n] * $sin(2.0 * PI * n * k / 8.0);
    end
    er /= 8.0;
    ei /= 8.0;
    checks++;
    if ((real'(gr) - er) > 1.5 || (er - real'(gr)) > 1.5 ||
        (real'(gi) - ei) > 1.5 || (ei - real'(gi)) > 1.5) begin
      failures++;
      $display("FAIL frame %0d X(%0d): got (%0d,%0d) exact/8 (%f,%f)", f, k, gr, gi, er, ei);
    end
  endtask

  // mechanism counters
  int n_dist_up = 0, n_dist_lo = 0, n_sw2_str = 0, n_sw2_crs = 0;
  int n_sw3_str = 0, n_sw3_crs = 0, n_frames_out = 0, n_resets = 0;
  int n_k1 [4] = '{default: 0};
  int n_k2 [4] = '{default: 0};

  always @(posedge clck) begin
    if (!rst) begin
      if (dut.dist_mode == fft_pkg::SW_CROSS)    n_dist_up++;
      else                                       n_dist_lo++;
      if (dut.sw2_up.v || dut.sw2_lo.v) begin
        if (dut.sw2_mode == fft_pkg::SW_CROSS) n_sw2_crs++;
        else                                   n_sw2_str++;
      end
      if (dut.sw3_up.v || dut.sw3_lo.v) begin
        if (dut.sw3_mode == fft_pkg::SW_CROSS) n_sw3_crs++;
        else                                   n_sw3_str++;
      end
      if (dut.d_up_dly.v && dut.d_lo.v)     n_k1[dut.k1]++;
      if (dut.sw2_up_dly.v && dut.sw2_lo.v) n_k2[dut.k2]++;
    end
  end

  task automatic need(input int n, input string what);
    checks++;
    $display("mechanism %-28s seen %0d times", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  // ------------------------------------------------------------------ main
  initial begin
    int out_cnt;
    int f, j, t_exp, exp_out;
    make_frames();
    run_model();
    rst = 1'b1;
    idatar = '0;
    idataim = '0;
    out_cnt = 0;
    repeat (3) @(posedge clck);
    #1 rst = 1'b0;
    for (int t = 0; t < NFR * 8 + LAT + 8; t++) begin
      // input of clock t
      if (t < NFR * 8) begin
        idatar  = IN_W'(xr[t / 8][t % 8]);
        idataim = IN_W'(xi[t / 8][t % 8]);
      end else begin
        idatar  = '0;
        idataim = '0;
      end
      check(longint'(in_out2), longint'(t), "in_out2 sample count");
      // output of clock t
      if (out_valid) begin
        f = out_cnt / 4;
        j = out_cnt % 4;
        t_exp = 8 * f + LAT + j;
        check(longint'(t), longint'(t_exp), "output clock");
        if (f < NFR) begin
          check(longint'(oint1), mr[f][2 * j],     $sformatf("frame %0d X(%0d) re", f, bitrev3(2 * j)));
          check(longint'(oimg1), mi[f][2 * j],     $sformatf("frame %0d X(%0d) im", f, bitrev3(2 * j)));
          check(longint'(oint2), mr[f][2 * j + 1], $sformatf("frame %0d X(%0d) re", f, bitrev3(2 * j + 1)));
          check(longint'(oimg2), mi[f][2 * j + 1], $sformatf("frame %0d X(%0d) im", f, bitrev3(2 * j + 1)));
          check_dft(f, 2 * j,     longint'(oint1), longint'(oimg1));
          check_dft(f, 2 * j + 1, longint'(oint2), longint'(oimg2));
          if (j == 0 && f < 2) begin
            // published experiment: constant 2 gives X(0) = 16, scaled by 1/8
            check(longint'(oint1), 2, "constant input X(0) re");
            check(longint'(oimg1), (f == 0) ? 0 : 2, "constant input X(0) im");
          end
          if (f < 2 && j > 0) begin
            check(longint'(oint1), 0, "constant input other bins");
          end
          if (j == 3) n_frames_out++;
        end else begin
          // the input idles at zero after the last frame: a zero frame
          check(longint'(oint1) | longint'(oimg1) | longint'(oint2) | longint'(oimg2), 0,
                "trailing zero frame");
        end
        out_cnt++;
      end
      @(posedge clck);
      #1;
    end
    // NFR frames plus the all-zero frame that follows them in the stream
    exp_out = (NFR + 1) * 4;
    check(longint'(out_cnt), longint'(exp_out), "number of output clocks");

    // Reset in the middle of a frame while the pipeline is full of data:
    // framing must restart from the first clock after reset, and frames
    // RF0 .. RF0+3 must come out exactly as before.
    for (int i = 0; i < 3; i++) begin
      idatar  = IN_W'($urandom);
      idataim = IN_W'($urandom);
      @(posedge clck);
      #1;
    end
    rst = 1'b1;
    @(posedge clck);
    #1;
    check(longint'(out_valid), 0, "out_valid cleared by reset");
    rst = 1'b0;
    n_resets++;
    out_cnt = 0;
    for (int t = 0; t < 4 * 8 + LAT + 8; t++) begin
      if (t < 4 * 8) begin
        idatar  = IN_W'(xr[RF0 + t / 8][t % 8]);
        idataim = IN_W'(xi[RF0 + t / 8][t % 8]);
      end else begin
        idatar  = '0;
        idataim = '0;
      end
      check(longint'(in_out2), longint'(t), "in_out2 restarts after reset");
      if (out_valid) begin
        f = out_cnt / 4;
        j = out_cnt % 4;
        t_exp = 8 * f + LAT + j;
        check(longint'(t), longint'(t_exp), "output clock after reset");
        if (f < 4) begin
          check(longint'(oint1), mr[RF0 + f][2 * j],     "after reset stream 1 re");
          check(longint'(oimg1), mi[RF0 + f][2 * j],     "after reset stream 1 im");
          check(longint'(oint2), mr[RF0 + f][2 * j + 1], "after reset stream 2 re");
          check(longint'(oimg2), mi[RF0 + f][2 * j + 1], "after reset stream 2 im");
        end
        out_cnt++;
      end
      @(posedge clck);
      #1;
    end
    exp_out = 5 * 4;
    check(longint'(out_cnt), longint'(exp_out), "number of output clocks after reset");
    need(n_resets, "reset in the middle of a frame");
    need(n_dist_up, "distributor to 4D path");
    need(n_dist_lo, "distributor to direct path");
    need(n_sw2_str, "switch 2 straight");
    need(n_sw2_crs, "switch 2 crossed");
    need(n_sw3_str, "switch 3 straight");
    need(n_sw3_crs, "switch 3 crossed");
    for (int k = 0; k < 4; k++) need(n_k1[k], $sformatf("butterfly 1 twiddle W8^%0d", k));
    need(n_k2[0], "butterfly 2 twiddle W8^0");
    need(n_k2[2], "butterfly 2 twiddle W8^2");
    need(n_frames_out, "complete output frames");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
