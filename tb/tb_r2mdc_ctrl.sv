// tb_r2mdc_ctrl: self-checking test of r2mdc_ctrl.
//
// For t clocks after reset the expected settings are written from the
// R2MDC schedule in integer arithmetic:
//   distributor  to the 4D path for the first half of a frame (t mod 8 < 4)
//   k1           t mod 4
//   switch 2     crossed when (t - 5) mod 8 is 2, 3, 6 or 7
//   k2           2 * ((t - 5) mod 2)
//   switch 3     crossed when t is odd
//   n_samples    t
// Runs several frames, resets in the middle of a frame and checks that
// the schedule restarts from t = 0.
module tb_r2mdc_ctrl;
  import fft_pkg::*;

  logic clk = 1'b0;
  logic rst;
  sw_mode_e dist_mode, sw2_mode, sw3_mode;
  logic [1:0] k1, k2;
  logic [31:0] n_samples;
  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  r2mdc_ctrl dut (
    .clk(clk), .rst(rst), .dist_mode(dist_mode), .sw2_mode(sw2_mode),
    .sw3_mode(sw3_mode), .k1(k1), .k2(k2), .n_samples(n_samples)
  );

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_at(input int t);
    int s;
    sw_mode_e e_dist, e_sw2, e_sw3;
    int e_k1, e_k2;
    s = (t + 8 - 5) % 8;
    e_dist = ((t % 8) < 4) ? SW_CROSS : SW_STRAIGHT;
    e_k1   = t % 4;
    e_sw2  = (s == 2 || s == 3 || s == 6 || s == 7) ? SW_CROSS : SW_STRAIGHT;
    e_k2   = 2 * (s % 2);
    e_sw3  = (t % 2 == 1) ? SW_CROSS : SW_STRAIGHT;
    checks++;
    if (dist_mode != e_dist || sw2_mode != e_sw2 || sw3_mode != e_sw3 ||
        int'(k1) != e_k1 || int'(k2) != e_k2 || n_samples != 32'(t)) begin
      failures++;
      $display("FAIL t=%0d: dist=%0d sw2=%0d sw3=%0d k1=%0d k2=%0d n=%0d", t,
               dist_mode, sw2_mode, sw3_mode, k1, k2, n_samples);
    end
  endtask

  initial begin
    rst = 1'b1;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int t = 0; t < 43; t++) begin
      check_at(t);
      @(posedge clk);
      #1;
    end
    // reset in the middle of a frame
    rst = 1'b1;
    @(posedge clk);
    #1 rst = 1'b0;
    for (int t = 0; t < 20; t++) begin
      check_at(t);
      @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
