// mf_coef_gen: precomputes the diagonal factors s_k of D for an M-tap unit.
//
// The minimal filtering algorithms multiply pre-added samples by factors
// derived from the taps w_0..w_(M-1). The paper computes them once, in
// advance; this block is the adder network that does so. For each group of
// taps (see mf_pkg: M = 3, 3+2, 3+1+3, 3+3+3, 3+3+3+2), starting at tap t:
//   three taps: w_t, (w_t + w_t+1 + w_t+2)/2, (w_t - w_t+1 + w_t+2)/2, w_t+2
//   two taps:   w_t, w_t + w_t+1, w_t+1
//   one tap:    w_t, w_t  (the tap is used by two multipliers)
// in the order s0, s1, ... of the paper's lists for M = 3, 5, 7, 9, 11.
//
// Interface: w is M signed COEF_W-bit taps; s is num_mults(M) signed
// COEF_W+2 bit factors, each the value 2*s_k (one fractional bit), which
// makes the halved sums exact. Timing: purely combinational; mf_channel
// registers its result when new taps are loaded. Factors that are a single
// tap (w_t, times two) need no adder: those outputs are the input shifted
// left by one, i.e. plain wiring.
module mf_coef_gen #(
  parameter int unsigned M      = 3,
  parameter int unsigned COEF_W = mf_pkg::COEF_W_DEF,
  localparam int unsigned S_W = COEF_W + 2,
  localparam int unsigned K   = mf_pkg::num_mults(M)
) (
  input  logic signed [COEF_W-1:0] w [M],
  output logic signed [S_W-1:0]    s [K]
);

  import mf_pkg::*;

  initial begin
    assert (M == 3 || M == 5 || M == 7 || M == 9 || M == 11)
      else $error("mf_coef_gen: M must be 3, 5, 7, 9 or 11");
  end

  // Tap and factor offsets of each group, fixed by M.
  function automatic int unsigned tap_base(int unsigned g);
    int unsigned t = 0;
    for (int unsigned h = 0; h < g; h++) t += grp_taps(group_kind(M, h));
    return t;
  endfunction

  function automatic int unsigned s_base(int unsigned g);
    int unsigned k = 0;
    for (int unsigned h = 0; h < g; h++) k += grp_mults(group_kind(M, h));
    return k;
  endfunction

  for (genvar g = 0; g < MAX_GROUPS; g++) begin : g_grp
    localparam grp_e        KIND = group_kind(M, g);
    localparam int unsigned T    = tap_base(g);
    localparam int unsigned B    = s_base(g);
    if (KIND == GRP_F23) begin : g_f23
      assign s[B+0] = S_W'(w[T]) <<< 1;
      assign s[B+1] = S_W'(w[T]) + S_W'(w[T+1]) + S_W'(w[T+2]);
      assign s[B+2] = S_W'(w[T]) - S_W'(w[T+1]) + S_W'(w[T+2]);
      assign s[B+3] = S_W'(w[T+2]) <<< 1;
    end else if (KIND == GRP_PAIR) begin : g_pair
      assign s[B+0] = S_W'(w[T]) <<< 1;
      assign s[B+1] = (S_W'(w[T]) + S_W'(w[T+1])) <<< 1;
      assign s[B+2] = S_W'(w[T+1]) <<< 1;
    end else if (KIND == GRP_ONE) begin : g_one
      assign s[B+0] = S_W'(w[T]) <<< 1;
      assign s[B+1] = S_W'(w[T]) <<< 1;
    end
  end

endmodule
