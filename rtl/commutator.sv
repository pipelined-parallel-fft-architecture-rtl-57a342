// commutator: the switch boxes of the R2MDC pipeline.
//
// A 2x2 switch on two packed data paths.  In SW_STRAIGHT the upper input
// goes to the upper output and the lower input to the lower output; in
// SW_CROSS the two are exchanged.  Between stages 1-2 and 2-3 it reorders
// the two streams so that the samples a butterfly needs reach it on the
// same clock.  Driven with only its lower input (upper input tied to an
// invalid word) it is the 1-to-2 input distributor in front of stage 1:
// SW_CROSS sends the sample to the upper path, SW_STRAIGHT to the lower.
// The switch function follows the design; using one module for both the
// distributor and the switches is this implementation's choice.
//
// Interface: mode (sw_mode_e), up_i / lo_i, up_o / lo_o, each DW bits.
// Timing: purely combinational.
module commutator
  import fft_pkg::*;
#(
  parameter int DW = 21      // word width: valid tag + re + im
) (
  input  sw_mode_e      mode,
  input  logic [DW-1:0] up_i,
  input  logic [DW-1:0] lo_i,
  output logic [DW-1:0] up_o,
  output logic [DW-1:0] lo_o
);

  always_comb begin
    if (mode == SW_CROSS) begin
      up_o = lo_i;
      lo_o = up_i;
    end else begin
      up_o = up_i;
      lo_o = lo_i;
    end
  end

endmodule
