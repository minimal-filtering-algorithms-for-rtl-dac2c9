// mf_alg7: minimal filtering basic operation for a 7-tap filter, 10
// multipliers instead of 14.
//
// From eight samples x0..x7 it computes y0 = sum_i w_i x_i and
// y1 = sum_i w_i x_(i+1), i = 0..6. The taps split as 3 + 1 + 3:
//   w0..w2: F(2,3) kernel (mf_alg3) on x0..x3 with s0..s3
//   w3:     two plain products x3*s4 and x4*s5, s4 = s5 = w3
//   w4..w6: F(2,3) kernel on x4..x7 with s6..s9
// The kernel outputs and the two products are added per output (the paper's
// A_6x10 followed by A_2x6).
//
// Interface: s[k] holds 2*s_k (one fractional bit); outputs are full
// precision, DATA_W+COEF_W+4 bits. Timing: purely combinational.
module mf_alg7 #(
  parameter int unsigned DATA_W = mf_pkg::DATA_W_DEF,
  parameter int unsigned COEF_W = mf_pkg::COEF_W_DEF,
  localparam int unsigned S_W = COEF_W + 2,
  localparam int unsigned Y_W = DATA_W + COEF_W + mf_pkg::Y_GROWTH
) (
  input  logic signed [DATA_W-1:0] x [8],
  input  logic signed [S_W-1:0]    s [10],
  output logic signed [Y_W-1:0]    y [2]
);

  localparam int unsigned P_W = DATA_W + S_W;

  logic signed [DATA_W-1:0] xa [4], xc [4];
  logic signed [S_W-1:0]    sa [4], sc [4];
  logic signed [Y_W-1:0]    ya [2], yc [2];
  logic signed [P_W-1:0]    mu4, mu5;

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      xa[i] = x[i];
      sa[i] = s[i];
      xc[i] = x[4+i];
      sc[i] = s[6+i];
    end
  end

  mf_alg3 #(.DATA_W(DATA_W), .COEF_W(COEF_W)) u_f23_lo (.x(xa), .s(sa), .y(ya));
  mf_alg3 #(.DATA_W(DATA_W), .COEF_W(COEF_W)) u_f23_hi (.x(xc), .s(sc), .y(yc));

  // Middle tap: s4 = s5 = 2*w3, so each product is even and its LSB is dropped.
  assign mu4 = P_W'(x[3]) * P_W'(s[4]);
  assign mu5 = P_W'(x[4]) * P_W'(s[5]);

  assign y[0] = ya[0] + Y_W'(mu4 >>> 1) + yc[0];
  assign y[1] = ya[1] + Y_W'(mu5 >>> 1) + yc[1];

endmodule
