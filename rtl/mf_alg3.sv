// mf_alg3: minimal filtering basic operation for a 3-tap filter (Winograd's
// F(2,3)), the building block of every larger unit.
//
// From four samples x0..x3 it computes the two outputs of two consecutive
// steps of a 3-tap FIR filter,
//   y0 = w0 x0 + w1 x1 + w2 x2,   y1 = w0 x1 + w1 x2 + w2 x3,
// with four multipliers instead of six. The data flow is the paper's:
//   pre-additions   a0 = x0 - x2, a1 = x1 + x2, a2 = x2 - x1, a3 = x1 - x3
//   multiplications mu_k = a_k * s_k
//   post-additions  y0 = mu0 + mu1 + mu2,  y1 = mu1 - mu2 - mu3
// with s0 = w0, s1 = (w0+w1+w2)/2, s2 = (w0-w1+w2)/2, s3 = w2 precomputed
// (see mf_coef_gen).
//
// Interface: s[k] holds 2*s_k (one fractional bit, this design's fixed-point
// choice), so every product carries one fractional bit. Both doubled sums are
// always even for factors made by mf_coef_gen (s1 and s2 have equal parity,
// s0 and s3 are even), so dropping their LSB is exact. Outputs are full
// precision, DATA_W+COEF_W+4 bits.
//
// Timing: purely combinational, like the paper's fully parallel data-flow
// graph; the register stage is added by mf_channel.
module mf_alg3 #(
  parameter int unsigned DATA_W = mf_pkg::DATA_W_DEF,
  parameter int unsigned COEF_W = mf_pkg::COEF_W_DEF,
  localparam int unsigned S_W = COEF_W + 2,
  localparam int unsigned Y_W = DATA_W + COEF_W + mf_pkg::Y_GROWTH
) (
  input  logic signed [DATA_W-1:0] x [4],
  input  logic signed [S_W-1:0]    s [4],
  output logic signed [Y_W-1:0]    y [2]
);

  localparam int unsigned A_W = DATA_W + 1;      // pre-adder outputs
  localparam int unsigned P_W = A_W + S_W;       // products, 1 fractional bit
  localparam int unsigned T_W = Y_W + 1;         // doubled sums

  logic signed [A_W-1:0] a  [4];
  logic signed [P_W-1:0] mu [4];
  logic signed [T_W-1:0] t0, t1;

  always_comb begin
    // Pre-additions (matrix A_4 / left half of the data-flow graph).
    a[0] = A_W'(x[0]) - A_W'(x[2]);
    a[1] = A_W'(x[1]) + A_W'(x[2]);
    a[2] = A_W'(x[2]) - A_W'(x[1]);
    a[3] = A_W'(x[1]) - A_W'(x[3]);
    // Multiplications by the diagonal of D.
    for (int k = 0; k < 4; k++) mu[k] = P_W'(a[k]) * P_W'(s[k]);
    // Post-additions (matrix A_2x4).
    t0 = T_W'(mu[0]) + T_W'(mu[1]) + T_W'(mu[2]);
    t1 = T_W'(mu[1]) - T_W'(mu[2]) - T_W'(mu[3]);
  end

  // Drop the fractional bit (always zero, see header).
  assign y[0] = Y_W'(t0 >>> 1);
  assign y[1] = Y_W'(t1 >>> 1);

endmodule
