// tb_mf_alg11: self-checking testbench of mf_alg11, the 11-tap minimal
// filtering datapath.
//
// Each trial draws 11 random taps and 12 random samples (extreme values
// included), forms the factors 2*s_k from the tap formulas of the algorithm,
// applies them with the samples and compares y0 and y1 with the direct sums
// y_j = sum_i w_i x_(i+j). The datapath is combinational; results are sampled
// one clock period after the inputs change.
module tb_mf_alg11;
  import mf_tb_pkg::*;

  localparam int unsigned DATA_W = mf_pkg::DATA_W_DEF;
  localparam int unsigned COEF_W = mf_pkg::COEF_W_DEF;
  localparam int unsigned Y_W    = DATA_W + COEF_W + mf_pkg::Y_GROWTH;
  localparam int          M      = 11;
  localparam int          NX     = 12;
  localparam int          K      = 15;
  localparam int          TRIALS = 4000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [DATA_W-1:0]   x [NX];
  logic signed [COEF_W+1:0]   s [K];
  logic signed [Y_W-1:0]      y [2];

  int checks = 0;
  int failures = 0;

  mf_alg11 dut (.x(x), .s(s), .y(y));

  initial begin
    repeat (TRIALS * 2 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t w, xv, sv;
    longint e0, e1;
    for (int t = 0; t < TRIALS; t++) begin
      for (int i = 0; i < 16; i++) begin
        w[i]  = (i < M)  ? rand_sample(COEF_W) : 0;
        xv[i] = (i < NX) ? rand_sample(DATA_W) : 0;
      end
      if (t == 0) for (int i = 0; i < 16; i++) begin  // most negative everywhere
        w[i]  = (i < M)  ? -(longint'(1) <<< (COEF_W-1)) : 0;
        xv[i] = (i < NX) ? -(longint'(1) <<< (DATA_W-1)) : 0;
      end
      sv = ref_s(M, w);
      for (int i = 0; i < NX; i++) x[i] = DATA_W'(xv[i]);
      for (int k = 0; k < K; k++) s[k] = (COEF_W+2)'(sv[k]);
      @(posedge clk);
      e0 = naive_y(M, w, xv, 0);
      e1 = naive_y(M, w, xv, 1);
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
