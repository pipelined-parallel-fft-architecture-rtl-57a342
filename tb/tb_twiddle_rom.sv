// tb_twiddle_rom: self-checking test of twiddle_rom.
//
// For each k = 0..3 compares the table with cos(2*pi*k/8) and
// -sin(2*pi*k/8) computed in real arithmetic and rounded to TW_FRAC
// fractional bits, and checks that every factor has unit magnitude to
// within the rounding error.
module tb_twiddle_rom;

  localparam int TW_FRAC = 8;
  localparam real PI = 3.14159265358979323846;

  logic [1:0] k;
  logic signed [TW_FRAC+1:0] w_re, w_im;
  int checks = 0;
  int failures = 0;

  twiddle_rom #(.TW_FRAC(TW_FRAC)) dut (.k(k), .w_re(w_re), .w_im(w_im));

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real scale, er, ei, mag;
    int exp_re, exp_im;
    scale = real'(1 << TW_FRAC);
    for (int i = 0; i < 4; i++) begin
      k = 2'(i);
      #1;
      er = $cos(2.0 * PI * i / 8.0) * scale;
      ei = -$sin(2.0 * PI * i / 8.0) * scale;
      exp_re = $rtoi(er + ((er >= 0.0) ? 0.5 : -0.5));
      exp_im = $rtoi(ei + ((ei >= 0.0) ? 0.5 : -0.5));
      checks++;
      if (int'(w_re) != exp_re || int'(w_im) != exp_im) begin
        failures++;
        $display("FAIL k=%0d: got (%0d,%0d) expected (%0d,%0d)", i, w_re, w_im, exp_re, exp_im);
      end
      mag = $sqrt(real'(w_re) * real'(w_re) + real'(w_im) * real'(w_im)) / scale;
      checks++;
      if (mag < 0.995 || mag > 1.005) begin
        failures++;
        $display("FAIL k=%0d: magnitude %f", i, mag);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
