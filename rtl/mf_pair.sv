// mf_pair: two consecutive outputs of a 2-tap filter with three multipliers.
//
// For taps (wa, wb) and samples x0..x2 it computes
//   y0 = wa x0 + wb x1,   y1 = wa x1 + wb x2
// as mu0 = (x0 - x1) s0, mu1 = x1 s1, mu2 = (x2 - x1) s2 with s0 = wa,
// s1 = wa + wb, s2 = wb, then y0 = mu0 + mu1, y1 = mu1 + mu2. This is the
// last group of taps of the 5-tap and 11-tap units (the paper's s4..s6 of
// M=5 and s12..s14 of M=11).
//
// Interface: s[k] holds 2*s_k (one fractional bit, the common fixed-point
// format of all units, see mf_pkg); outputs are full precision,
// DATA_W+COEF_W+4 bits. Timing: purely combinational.
module mf_pair #(
  parameter int unsigned DATA_W = mf_pkg::DATA_W_DEF,
  parameter int unsigned COEF_W = mf_pkg::COEF_W_DEF,
  localparam int unsigned S_W = COEF_W + 2,
  localparam int unsigned Y_W = DATA_W + COEF_W + mf_pkg::Y_GROWTH
) (
  input  logic signed [DATA_W-1:0] x [3],
  input  logic signed [S_W-1:0]    s [3],
  output logic signed [Y_W-1:0]    y [2]
);

  localparam int unsigned A_W = DATA_W + 1;
  localparam int unsigned P_W = A_W + S_W;
  localparam int unsigned T_W = Y_W + 1;

  logic signed [A_W-1:0] a  [3];
  logic signed [P_W-1:0] mu [3];
  logic signed [T_W-1:0] t0, t1;

  always_comb begin
    a[0] = A_W'(x[0]) - A_W'(x[1]);
    a[1] = A_W'(x[1]);
    a[2] = A_W'(x[2]) - A_W'(x[1]);
    for (int k = 0; k < 3; k++) mu[k] = P_W'(a[k]) * P_W'(s[k]);
    t0 = T_W'(mu[0]) + T_W'(mu[1]);
    t1 = T_W'(mu[1]) + T_W'(mu[2]);
  end

  assign y[0] = Y_W'(t0 >>> 1);
  assign y[1] = Y_W'(t1 >>> 1);

endmodule
