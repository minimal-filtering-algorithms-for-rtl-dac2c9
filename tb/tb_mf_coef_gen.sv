// tb_mf_coef_gen: self-checking testbench of mf_coef_gen for all five sizes.
//
// One instance per M = 3, 5, 7, 9, 11 receives the same random taps; every
// factor 2*s_k is compared with the list of factors written out per algorithm
// in the reference package.
module tb_mf_coef_gen;
  import mf_tb_pkg::*;

  localparam int unsigned COEF_W = mf_pkg::COEF_W_DEF;
  localparam int          TRIALS = 2000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [COEF_W-1:0] w3 [3];
  logic signed [COEF_W+1:0] s3 [mf_tb_pkg::num_s(3)];
  mf_coef_gen #(.M(3)) dut3 (.w(w3), .s(s3));
  logic signed [COEF_W-1:0] w5 [5];
  logic signed [COEF_W+1:0] s5 [mf_tb_pkg::num_s(5)];
  mf_coef_gen #(.M(5)) dut5 (.w(w5), .s(s5));
  logic signed [COEF_W-1:0] w7 [7];
  logic signed [COEF_W+1:0] s7 [mf_tb_pkg::num_s(7)];
  mf_coef_gen #(.M(7)) dut7 (.w(w7), .s(s7));
  logic signed [COEF_W-1:0] w9 [9];
  logic signed [COEF_W+1:0] s9 [mf_tb_pkg::num_s(9)];
  mf_coef_gen #(.M(9)) dut9 (.w(w9), .s(s9));
  logic signed [COEF_W-1:0] w11 [11];
  logic signed [COEF_W+1:0] s11 [mf_tb_pkg::num_s(11)];
  mf_coef_gen #(.M(11)) dut11 (.w(w11), .s(s11));

  int checks = 0;
  int failures = 0;

  function automatic void check(int m, int k, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("M=%0d s%0d: got %0d exp %0d", m, k, got, exp);
    end
  endfunction

  initial begin
    repeat (TRIALS * 2 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t w, sv;
    for (int t = 0; t < TRIALS; t++) begin
      for (int i = 0; i < 16; i++) w[i] = (i < 11) ? rand_sample(COEF_W) : 0;
      for (int i = 0; i < 3; i++) w3[i] = COEF_W'(w[i]);
      for (int i = 0; i < 5; i++) w5[i] = COEF_W'(w[i]);
      for (int i = 0; i < 7; i++) w7[i] = COEF_W'(w[i]);
      for (int i = 0; i < 9; i++) w9[i] = COEF_W'(w[i]);
      for (int i = 0; i < 11; i++) w11[i] = COEF_W'(w[i]);
      @(posedge clk);
      sv = ref_s(3, w);
      for (int k = 0; k < num_s(3); k++) check(3, k, longint'(s3[k]), sv[k]);
      sv = ref_s(5, w);
      for (int k = 0; k < num_s(5); k++) check(5, k, longint'(s5[k]), sv[k]);
      sv = ref_s(7, w);
      for (int k = 0; k < num_s(7); k++) check(7, k, longint'(s7[k]), sv[k]);
      sv = ref_s(9, w);
      for (int k = 0; k < num_s(9); k++) check(9, k, longint'(s9[k]), sv[k]);
      sv = ref_s(11, w);
      for (int k = 0; k < num_s(11); k++) check(11, k, longint'(s11[k]), sv[k]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
