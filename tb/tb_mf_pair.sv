// tb_mf_pair: self-checking testbench of mf_pair, the 2-tap kernel.
//
// Random taps wa, wb and samples x0..x2 (extremes included); the factors are
// 2*wa, 2*(wa+wb), 2*wb; y0 and y1 are compared with wa x0 + wb x1 and
// wa x1 + wb x2.
module tb_mf_pair;
  import mf_tb_pkg::*;

  localparam int unsigned DATA_W = mf_pkg::DATA_W_DEF;
  localparam int unsigned COEF_W = mf_pkg::COEF_W_DEF;
  localparam int unsigned Y_W    = DATA_W + COEF_W + mf_pkg::Y_GROWTH;
  localparam int          TRIALS = 4000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [DATA_W-1:0] x [3];
  logic signed [COEF_W+1:0] s [3];
  logic signed [Y_W-1:0]    y [2];

  int checks = 0;
  int failures = 0;

  mf_pair dut (.x(x), .s(s), .y(y));

  initial begin
    repeat (TRIALS * 2 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint wa, wb, xv [3], e0, e1;
    for (int t = 0; t < TRIALS; t++) begin
      wa = rand_sample(COEF_W);
      wb = rand_sample(COEF_W);
      for (int i = 0; i < 3; i++) xv[i] = rand_sample(DATA_W);
      for (int i = 0; i < 3; i++) x[i] = DATA_W'(xv[i]);
      s[0] = (COEF_W+2)'(2*wa);
      s[1] = (COEF_W+2)'(2*(wa + wb));
      s[2] = (COEF_W+2)'(2*wb);
      @(posedge clk);
      e0 = wa*xv[0] + wb*xv[1];
      e1 = wa*xv[1] + wb*xv[2];
      checks += 2;
      if (longint'(y[0]) != e0) failures++;
      if (longint'(y[1]) != e1) failures++;
      if ((longint'(y[0]) != e0 || longint'(y[1]) != e1) && failures < 10)
        $display("trial %0d: y0=%0d (exp %0d) y1=%0d (exp %0d)", t, y[0], e0, y[1], e1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
