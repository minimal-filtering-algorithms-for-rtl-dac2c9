// mf_alg5: minimal filtering basic operation for a 5-tap filter, 7 multipliers
// instead of 10.
//
// From six samples x0..x5 it computes y0 = sum_i w_i x_i and
// y1 = sum_i w_i x_(i+1), i = 0..4. Taps w0..w2 go through an F(2,3) kernel
// (mf_alg3) on x0..x3 with s0..s3; taps w3, w4 through a pair kernel
// (mf_pair) on x3..x5 with s4 = w3, s5 = w3 + w4, s6 = w4. The two partial
// results are added (the paper's A_2x7 merges both sums in one step; the
// total is the same).
//
// Interface: s[k] holds 2*s_k (one fractional bit); outputs are full
// precision, DATA_W+COEF_W+4 bits. Timing: purely combinational.
module mf_alg5 #(
  parameter int unsigned DATA_W = mf_pkg::DATA_W_DEF,
  parameter int unsigned COEF_W = mf_pkg::COEF_W_DEF,
  localparam int unsigned S_W = COEF_W + 2,
  localparam int unsigned Y_W = DATA_W + COEF_W + mf_pkg::Y_GROWTH
) (
  input  logic signed [DATA_W-1:0] x [6],
  input  logic signed [S_W-1:0]    s [7],
  output logic signed [Y_W-1:0]    y [2]
);

  logic signed [DATA_W-1:0] xa [4];
  logic signed [S_W-1:0]    sa [4];
  logic signed [DATA_W-1:0] xb [3];
  logic signed [S_W-1:0]    sb [3];
  logic signed [Y_W-1:0]    ya [2], yb [2];

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      xa[i] = x[i];
      sa[i] = s[i];
    end
    for (int i = 0; i < 3; i++) begin
      xb[i] = x[3+i];
      sb[i] = s[4+i];
    end
  end

  mf_alg3 #(.DATA_W(DATA_W), .COEF_W(COEF_W)) u_f23 (.x(xa), .s(sa), .y(ya));
  mf_pair #(.DATA_W(DATA_W), .COEF_W(COEF_W)) u_pair (.x(xb), .s(sb), .y(yb));

  assign y[0] = ya[0] + yb[0];
  assign y[1] = ya[1] + yb[1];

endmodule
