// tb_cmplx_mult: self-checking test of cmplx_mult.
//
// Random data samples are multiplied by the four W8^k factors (computed
// here from cos / sin) and by random factors.  Each result is compared
// bit for bit with a 64-bit integer model of (x_re + j x_im)(w_re + j w_im),
// rounded half up at TW_FRAC bits and wrapped to W bits.  For the W8^k
// factors and inputs small enough not to overflow, the result must also
// lie within one unit of the exact complex product in real arithmetic.
module tb_cmplx_mult;

  localparam int W = 10;
  localparam int TW_FRAC = 8;
  localparam real PI = 3.14159265358979323846;

  logic signed [W-1:0] x_re, x_im, y_re, y_im;
  logic signed [TW_FRAC+1:0] w_re, w_im;
  int checks = 0;
  int failures = 0;

  cmplx_mult #(.W(W), .TW_FRAC(TW_FRAC)) dut (
    .x_re(x_re), .x_im(x_im), .w_re(w_re), .w_im(w_im), .y_re(y_re), .y_im(y_im)
  );

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint wrap(input longint v);
    longint m;
    m = v & ((longint'(1) << W) - 1);
    if (m >= (longint'(1) << (W - 1))) m -= (longint'(1) << W);
    return m;
  endfunction

  function automatic longint rnd(input longint v);
    return (v + (longint'(1) << (TW_FRAC - 1))) >>> TW_FRAC;
  endfunction

  task automatic run_one(input bit real_check);
    longint xr, xi, wr, wi, er, ei;
    real fr, fi;
    #1;
    xr = longint'(x_re); xi = longint'(x_im);
    wr = longint'(w_re); wi = longint'(w_im);
    er = wrap(rnd(xr * wr - xi * wi));
    ei = wrap(rnd(xr * wi + xi * wr));
    checks++;
    if (longint'(y_re) != er || longint'(y_im) != ei) begin
      failures++;
      $display("FAIL x=(%0d,%0d) w=(%0d,%0d): got (%0d,%0d) expected (%0d,%0d)",
               xr, xi, wr, wi, y_re, y_im, er, ei);
    end
    if (real_check) begin
      fr = (real'(xr) * real'(wr) - real'(xi) * real'(wi)) / real'(1 << TW_FRAC);
      fi = (real'(xr) * real'(wi) + real'(xi) * real'(wr)) / real'(1 << TW_FRAC);
      checks++;
      if ((real'(y_re) - fr) > 1.0 || (fr - real'(y_re)) > 1.0 ||
          (real'(y_im) - fi) > 1.0 || (fi - real'(y_im)) > 1.0) begin
        failures++;
        $display("FAIL rounding x=(%0d,%0d) k-factor (%0d,%0d): got (%0d,%0d) exact (%f,%f)",
                 xr, xi, wr, wi, y_re, y_im, fr, fi);
      end
    end
  endtask

  initial begin
    real s;
    s = real'(1 << TW_FRAC);
    // W8^k factors, inputs limited to |x| < 2^(W-1)/sqrt(2) per component
    for (int i = 0; i < 400; i++) begin
      int k;
      k = i % 4;
      w_re = (TW_FRAC+2)'($rtoi($cos(2.0 * PI * k / 8.0) * s + ((k == 3) ? -0.5 : 0.5)));
      w_im = (TW_FRAC+2)'(-$rtoi($sin(2.0 * PI * k / 8.0) * s + 0.5));
      x_re = W'($signed(32'($urandom_range(0, 700))) - 350);
      x_im = W'($signed(32'($urandom_range(0, 700))) - 350);
      run_one(1'b1);
    end
    // random factors and full-range inputs: bit-exact against the model
    for (int i = 0; i < 400; i++) begin
      w_re = (TW_FRAC+2)'($urandom);
      w_im = (TW_FRAC+2)'($urandom);
      x_re = W'($urandom);
      x_im = W'($urandom);
      run_one(1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
