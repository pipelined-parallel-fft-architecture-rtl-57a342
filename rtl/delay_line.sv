// delay_line: the "D" boxes of the R2MDC pipeline (4D, 2D, 2D, 1D, 1D).
//
// A shift register DEPTH words deep.  Each word is one complex sample plus
// its valid tag, packed into DW bits by the caller; the line does not look
// inside the word.  Every clock the word at din enters and the word that
// entered DEPTH clocks earlier appears at dout, so dout is din delayed by
// exactly DEPTH cycles.  The delay lengths follow the design (half of the
// data of each stage waits here while the other half is processed); the
// shift-register form and the synchronous reset, which clears every word
// and so every valid tag, are this implementation's choices.
//
// Interface: clk, rst (synchronous, active high), din[DW], dout[DW].
// Timing: dout(t) = din(t - DEPTH); after reset dout is 0 for DEPTH cycles.
module delay_line #(
  parameter int DEPTH = 4,   // delay in clock cycles, >= 1
  parameter int DW    = 19   // word width: valid tag + re + im
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [DW-1:0] din,
  output logic [DW-1:0] dout
);

  logic [DW-1:0] sr [DEPTH];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < DEPTH; i++) sr[i] <= '0;
    end else begin
      sr[0] <= din;
      for (int i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
    end
  end

  assign dout = sr[DEPTH-1];

endmodule
