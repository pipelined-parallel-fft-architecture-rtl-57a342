// tb_delay_line: self-checking test of delay_line.
//
// Tests the 4-deep line used in front of stage 1 and the 1-deep line of
// stage 3.  Random words are pushed every clock; each output is compared
// with the word pushed exactly DEPTH clocks earlier, kept in a model
// history.  Right after reset the output must be all zeros for DEPTH
// clocks (this also checks the delay is not shorter than DEPTH).
module tb_delay_line;

  localparam int DW = 19;

  logic clk = 1'b0;
  logic rst;
  logic [DW-1:0] din;
  logic [DW-1:0] dout4, dout1;
  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  delay_line #(.DEPTH(4), .DW(DW)) dut4 (.clk(clk), .rst(rst), .din(din), .dout(dout4));
  delay_line #(.DEPTH(1), .DW(DW)) dut1 (.clk(clk), .rst(rst), .din(din), .dout(dout1));

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [DW-1:0] hist [$];

  task automatic check(input logic [DW-1:0] got, input logic [DW-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    rst = 1'b1;
    din = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    for (int t = 0; t < 500; t++) begin
      din = DW'($urandom);
      hist.push_back(din);
      #1;
      // outputs visible before this clock edge hold the word from t - DEPTH
      check(dout4, (t >= 4) ? hist[t-4] : '0, "depth 4");
      check(dout1, (t >= 1) ? hist[t-1] : '0, "depth 1");
      @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
