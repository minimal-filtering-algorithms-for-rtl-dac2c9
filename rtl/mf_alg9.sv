// mf_alg9: minimal filtering basic operation for a 9-tap filter, 12
// multipliers instead of 18.
//
// From ten samples x0..x9 it computes y0 = sum_i w_i x_i and
// y1 = sum_i w_i x_(i+1), i = 0..8. The taps split into three groups of
// three, each an F(2,3) kernel (mf_alg3): group g works on x(3g)..x(3g+3)
// with s(4g)..s(4g+3). The three partial pairs are added (the paper's A_2x6).
//
// Interface: s[k] holds 2*s_k (one fractional bit); outputs are full
// precision, DATA_W+COEF_W+4 bits. Timing: purely combinational.
module mf_alg9 #(
  parameter int unsigned DATA_W = mf_pkg::DATA_W_DEF,
  parameter int unsigned COEF_W = mf_pkg::COEF_W_DEF,
  localparam int unsigned S_W = COEF_W + 2,
  localparam int unsigned Y_W = DATA_W + COEF_W + mf_pkg::Y_GROWTH
) (
  input  logic signed [DATA_W-1:0] x [10],
  input  logic signed [S_W-1:0]    s [12],
  output logic signed [Y_W-1:0]    y [2]
);

  logic signed [DATA_W-1:0] xg [3][4];
  logic signed [S_W-1:0]    sg [3][4];
  logic signed [Y_W-1:0]    yg [3][2];

  always_comb begin
    for (int g = 0; g < 3; g++) begin
      for (int i = 0; i < 4; i++) begin
        xg[g][i] = x[3*g+i];
        sg[g][i] = s[4*g+i];
      end
    end
  end

  for (genvar g = 0; g < 3; g++) begin : g_f23
    mf_alg3 #(.DATA_W(DATA_W), .COEF_W(COEF_W)) u_f23 (.x(xg[g]), .s(sg[g]), .y(yg[g]));
  end

  assign y[0] = yg[0][0] + yg[1][0] + yg[2][0];
  assign y[1] = yg[0][1] + yg[1][1] + yg[2][1];

endmodule
