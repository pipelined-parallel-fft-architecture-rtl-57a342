// tb_commutator: self-checking test of commutator.
//
// Drives random words on both inputs in both switch settings and checks
// that SW_STRAIGHT passes them through and SW_CROSS exchanges them; also
// checks the distributor use (only the lower input driven).
module tb_commutator;
  import fft_pkg::*;

  localparam int DW = 21;

  sw_mode_e mode;
  logic [DW-1:0] up_i, lo_i, up_o, lo_o;
  int checks = 0;
  int failures = 0;

  commutator #(.DW(DW)) dut (.mode(mode), .up_i(up_i), .lo_i(lo_i), .up_o(up_o), .lo_o(lo_o));

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [DW-1:0] got, input logic [DW-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 200; i++) begin
      up_i = DW'($urandom);
      lo_i = DW'($urandom);
      mode = (i % 2 == 0) ? SW_STRAIGHT : SW_CROSS;
      #1;
      if (mode == SW_STRAIGHT) begin
        check(up_o, up_i, "straight upper");
        check(lo_o, lo_i, "straight lower");
      end else begin
        check(up_o, lo_i, "cross upper");
        check(lo_o, up_i, "cross lower");
      end
    end
    // distributor: upper input idle
    up_i = '0;
    lo_i = DW'(32'h5A5A5);
    mode = SW_CROSS;
    #1;
    check(up_o, lo_i, "distributor to upper");
    check(lo_o, '0, "distributor lower idle");
    mode = SW_STRAIGHT;
    #1;
    check(lo_o, lo_i, "distributor to lower");
    check(up_o, '0, "distributor upper idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
