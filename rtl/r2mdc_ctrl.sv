// r2mdc_ctrl: control logic of the 8-point R2MDC FFT.
//
// A modulo-8 counter, cnt, holds the index n of the input sample that
// arrives on the current clock (cnt = 0 on the first clock after reset).
// Every switch setting and twiddle exponent is a fixed function of cnt,
// derived from the pipeline timing of fft_full (each butterfly registers
// its outputs, so stage 1 results leave 5 clocks after sample 0 entered
// and stage 2 results 8 clocks after):
//   distributor   SW_CROSS (to the 4D path) for n = 0..3, else SW_STRAIGHT
//   twiddle 1     k1 = cnt[1:0]               (W8^0..W8^3 for n = 4..7)
//   switch 2      s = cnt + 3 (mod 8);  SW_CROSS when s[1] = 1
//   twiddle 2     k2 = 2*s[0]                 (W8^0, W8^2; k2[0] is always 0)
//   switch 3      SW_CROSS when cnt[0] = 1
// Stage 3 always uses W8^0.  The block also counts every input sample in a
// 32-bit counter, brought out as in_out2 at the top; the top-level block of
// the design has a 32-bit output of that name whose meaning is not given,
// so its use as a sample counter is this implementation's choice, as are
// the counter form of the control and the synchronous reset.
//
// Interface: clk, rst; dist_mode, sw2_mode, sw3_mode, k1, k2, n_samples.
// Timing: all outputs are decoded from registers, valid the whole cycle.
module r2mdc_ctrl
  import fft_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  output sw_mode_e    dist_mode,
  output sw_mode_e    sw2_mode,
  output sw_mode_e    sw3_mode,
  output logic [1:0]  k1,
  output logic [1:0]  k2,
  output logic [31:0] n_samples
);

  logic [2:0] cnt;
  logic [1:0] s;   // low two bits of cnt + 3, all the schedule needs

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt       <= '0;
      n_samples <= '0;
    end else begin
      cnt       <= cnt + 3'd1;
      n_samples <= n_samples + 32'd1;
    end
  end

  always_comb begin
    s         = cnt[1:0] + 2'd3;
    dist_mode = cnt[2] ? SW_STRAIGHT : SW_CROSS;
    k1        = cnt[1:0];
    sw2_mode  = s[1] ? SW_CROSS : SW_STRAIGHT;
    k2        = {s[0], 1'b0};
    sw3_mode  = cnt[0] ? SW_CROSS : SW_STRAIGHT;
  end

endmodule
