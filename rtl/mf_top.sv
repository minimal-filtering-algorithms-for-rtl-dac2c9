// mf_top: the five minimal filtering units side by side.
//
// The design computes the basic filtering operation of convolutional layers
// -- two neighbouring outputs of an M-tap FIR filter over a sliding window of
// M+1 samples -- fully in parallel, with Winograd-style minimal filtering
// algorithms that need 4, 7, 10, 12 and 15 multipliers for M = 3, 5, 7, 9, 11
// instead of 2M. One unit of each size is instantiated (mf_channel), each
// with its own ports:
//   w<M>_load, w<M>  load the M taps; the factors s_k are precomputed and held
//   x<M>_valid, x<M> one window x0..xM per cycle
//   y<M>_valid, y<M> y0 = sum w_i x_i, y1 = sum w_i x_(i+1), one cycle later
// Samples and taps are signed DATA_W/COEF_W-bit integers; results are exact,
// DATA_W+COEF_W+4 bits wide. Clock, synchronous active-low reset, the
// coefficient registers and the output registers are this design's choice;
// the datapaths follow the paper's data-flow graphs.
module mf_top #(
  parameter int unsigned DATA_W = mf_pkg::DATA_W_DEF,
  parameter int unsigned COEF_W = mf_pkg::COEF_W_DEF,
  localparam int unsigned Y_W = DATA_W + COEF_W + mf_pkg::Y_GROWTH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     w3_load,
  input  logic signed [COEF_W-1:0] w3 [3],
  input  logic                     x3_valid,
  input  logic signed [DATA_W-1:0] x3 [4],
  output logic                     y3_valid,
  output logic signed [Y_W-1:0]    y3 [2],
  input  logic                     w5_load,
  input  logic signed [COEF_W-1:0] w5 [5],
  input  logic                     x5_valid,
  input  logic signed [DATA_W-1:0] x5 [6],
  output logic                     y5_valid,
  output logic signed [Y_W-1:0]    y5 [2],
  input  logic                     w7_load,
  input  logic signed [COEF_W-1:0] w7 [7],
  input  logic                     x7_valid,
  input  logic signed [DATA_W-1:0] x7 [8],
  output logic                     y7_valid,
  output logic signed [Y_W-1:0]    y7 [2],
  input  logic                     w9_load,
  input  logic signed [COEF_W-1:0] w9 [9],
  input  logic                     x9_valid,
  input  logic signed [DATA_W-1:0] x9 [10],
  output logic                     y9_valid,
  output logic signed [Y_W-1:0]    y9 [2],
  input  logic                     w11_load,
  input  logic signed [COEF_W-1:0] w11 [11],
  input  logic                     x11_valid,
  input  logic signed [DATA_W-1:0] x11 [12],
  output logic                     y11_valid,
  output logic signed [Y_W-1:0]    y11 [2]
);

  mf_channel #(.M(3), .DATA_W(DATA_W), .COEF_W(COEF_W)) u_m3 (
    .clk, .rst_n,
    .w_load(w3_load), .w(w3),
    .x_valid(x3_valid), .x(x3),
    .y_valid(y3_valid), .y(y3)
  );

  mf_channel #(.M(5), .DATA_W(DATA_W), .COEF_W(COEF_W)) u_m5 (
    .clk, .rst_n,
    .w_load(w5_load), .w(w5),
    .x_valid(x5_valid), .x(x5),
    .y_valid(y5_valid), .y(y5)
  );

  mf_channel #(.M(7), .DATA_W(DATA_W), .COEF_W(COEF_W)) u_m7 (
    .clk, .rst_n,
    .w_load(w7_load), .w(w7),
    .x_valid(x7_valid), .x(x7),
    .y_valid(y7_valid), .y(y7)
  );

  mf_channel #(.M(9), .DATA_W(DATA_W), .COEF_W(COEF_W)) u_m9 (
    .clk, .rst_n,
    .w_load(w9_load), .w(w9),
    .x_valid(x9_valid), .x(x9),
    .y_valid(y9_valid), .y(y9)
  );

  mf_channel #(.M(11), .DATA_W(DATA_W), .COEF_W(COEF_W)) u_m11 (
    .clk, .rst_n,
    .w_load(w11_load), .w(w11),
    .x_valid(x11_valid), .x(x11),
    .y_valid(y11_valid), .y(y11)
  );

endmodule
