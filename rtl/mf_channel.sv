// mf_channel: one clocked minimal-filtering unit of size M.
//
// Wraps the combinational datapath of size M (mf_alg3/5/7/9/11) with the two
// registers a chip needs around it:
//   - a coefficient register: when w_load is high, the taps w are turned into
//     the factors s_k by mf_coef_gen and stored; the datapath then uses the
//     stored factors for every following window, so the coefficient adders
//     are off the sample path (the factors are "calculated in advance");
//   - an output register: when x_valid is high, the two results y0, y1 of
//     the window x0..xM are captured and y_valid is raised the next cycle.
// Both registers are this design's own choice; the paper describes the
// datapath only.
//
// Timing: one window accepted per cycle, results one cycle later. Taps loaded
// in cycle n apply to windows presented from cycle n+1 on. A window presented
// together with w_load still uses the old taps. Reset (synchronous,
// active-low) clears the factors to zero and y_valid.
module mf_channel #(
  parameter int unsigned M      = 3,
  parameter int unsigned DATA_W = mf_pkg::DATA_W_DEF,
  parameter int unsigned COEF_W = mf_pkg::COEF_W_DEF,
  localparam int unsigned S_W = COEF_W + 2,
  localparam int unsigned Y_W = DATA_W + COEF_W + mf_pkg::Y_GROWTH,
  localparam int unsigned K   = mf_pkg::num_mults(M)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     w_load,
  input  logic signed [COEF_W-1:0] w [M],
  input  logic                     x_valid,
  input  logic signed [DATA_W-1:0] x [M+1],
  output logic                     y_valid,
  output logic signed [Y_W-1:0]    y [2]
);

  logic signed [S_W-1:0] s_new [K];
  logic signed [S_W-1:0] s_q   [K];
  logic signed [Y_W-1:0] y_d   [2];

  mf_coef_gen #(.M(M), .COEF_W(COEF_W)) u_coef (.w(w), .s(s_new));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < K; k++) s_q[k] <= '0;
    end else if (w_load) begin
      s_q <= s_new;
    end
  end

  if (M == 3) begin : g_alg
    mf_alg3  #(.DATA_W(DATA_W), .COEF_W(COEF_W)) u_alg (.x(x), .s(s_q), .y(y_d));
  end else if (M == 5) begin : g_alg
    mf_alg5  #(.DATA_W(DATA_W), .COEF_W(COEF_W)) u_alg (.x(x), .s(s_q), .y(y_d));
  end else if (M == 7) begin : g_alg
    mf_alg7  #(.DATA_W(DATA_W), .COEF_W(COEF_W)) u_alg (.x(x), .s(s_q), .y(y_d));
  end else if (M == 9) begin : g_alg
    mf_alg9  #(.DATA_W(DATA_W), .COEF_W(COEF_W)) u_alg (.x(x), .s(s_q), .y(y_d));
  end else begin : g_alg
    mf_alg11 #(.DATA_W(DATA_W), .COEF_W(COEF_W)) u_alg (.x(x), .s(s_q), .y(y_d));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      y_valid <= 1'b0;
      y[0]    <= '0;
      y[1]    <= '0;
    end else begin
      y_valid <= x_valid;
      if (x_valid) y <= y_d;
    end
  end

  // Results follow each accepted window by exactly one cycle.
  a_latency: assert property (@(posedge clk) disable iff (!rst_n) x_valid |=> y_valid);

endmodule
