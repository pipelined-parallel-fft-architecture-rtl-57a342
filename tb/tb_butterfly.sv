// tb_butterfly: self-checking test of butterfly.
//
// Feeds a new random pair (a, b) and twiddle factor every clock and checks,
// one clock later, A = a + b and B = (a - b) * W against an integer model
// (product rounded half up at TW_FRAC bits, wrapped to W+1 bits).  Checks
// the one-clock latency and that out_v follows in_v with that latency and
// is cleared by reset.
module tb_butterfly;

  localparam int W = 9;
  localparam int TW_FRAC = 8;
  localparam int OW = W + 1;

  logic clk = 1'b0;
  logic rst;
  logic in_v, out_v;
  logic signed [W-1:0] a_re, a_im, b_re, b_im;
  logic signed [TW_FRAC+1:0] w_re, w_im;
  logic signed [W:0] A_re, A_im, B_re, B_im;
  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  butterfly #(.W(W), .TW_FRAC(TW_FRAC)) dut (
    .clk(clk), .rst(rst), .in_v(in_v),
    .a_re(a_re), .a_im(a_im), .b_re(b_re), .b_im(b_im),
    .w_re(w_re), .w_im(w_im),
    .out_v(out_v), .A_re(A_re), .A_im(A_im), .B_re(B_re), .B_im(B_im)
  );

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint wrap(input longint v);
    longint m;
    m = v & ((longint'(1) << OW) - 1);
    if (m >= (longint'(1) << (OW - 1))) m -= (longint'(1) << OW);
    return m;
  endfunction

  function automatic longint rnd(input longint v);
    return (v + (longint'(1) << (TW_FRAC - 1))) >>> TW_FRAC;
  endfunction

  // W8^k in the fixed-point format of the design
  function automatic void w8(input int k, output longint wr, output longint wi);
    case (k)
      0: begin wr = 256;  wi = 0;    end
      1: begin wr = 181;  wi = -181; end
      2: begin wr = 0;    wi = -256; end
      default: begin wr = -181; wi = -181; end
    endcase
  endfunction

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    longint er_A, ei_A, er_B, ei_B, dr, di, wr, wi;
    longint prev_A_re, prev_B_im;
    logic exp_v;
    rst = 1'b1;
    in_v = 1'b1;
    a_re = '0; a_im = '0; b_re = '0; b_im = '0;
    w_re = 10'sd256; w_im = '0;
    repeat (2) @(posedge clk);
    #1;
    check(longint'(out_v), 0, "out_v in reset");
    rst = 1'b0;
    for (int i = 0; i < 1000; i++) begin
      a_re = W'($urandom); a_im = W'($urandom);
      b_re = W'($urandom); b_im = W'($urandom);
      w8(i % 4, wr, wi);
      w_re = (TW_FRAC+2)'(wr); w_im = (TW_FRAC+2)'(wi);
      in_v = ($urandom_range(0, 3) != 0);
      exp_v = in_v;
      er_A = longint'(a_re) + longint'(b_re);
      ei_A = longint'(a_im) + longint'(b_im);
      dr = longint'(a_re) - longint'(b_re);
      di = longint'(a_im) - longint'(b_im);
      er_B = wrap(rnd(dr * wr - di * wi));
      ei_B = wrap(rnd(dr * wi + di * wr));
      // one clock of latency: before the edge the previous result still shows
      #1;
      if (i > 0) begin
        check(longint'(A_re), prev_A_re, "A_re held until the clock");
        check(longint'(B_im), prev_B_im, "B_im held until the clock");
      end
      prev_A_re = er_A;
      prev_B_im = ei_B;
      @(posedge clk);
      #1;
      check(longint'(out_v), longint'(exp_v), "out_v");
      check(longint'(A_re), er_A, "A_re");
      check(longint'(A_im), ei_A, "A_im");
      check(longint'(B_re), er_B, "B_re");
      check(longint'(B_im), ei_B, "B_im");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
