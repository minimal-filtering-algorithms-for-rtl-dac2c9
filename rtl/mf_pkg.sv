// mf_pkg: shared constants and helpers of the minimal-filtering datapaths.
//
// The basic filtering operation applies two consecutive steps of an M-tap FIR
// filter to M+1 samples, giving y0 = sum_i w_i x_i and y1 = sum_i w_i x_(i+1).
// Each of the five units (M = 3, 5, 7, 9, 11) splits its taps into groups:
//   group of 3 taps -> Winograd F(2,3) kernel, 4 multipliers (mf_alg3)
//   group of 2 taps -> pair kernel, 3 multipliers (mf_pair)
//   single tap      -> 2 plain multipliers
// M=3: 3 | M=5: 3+2 | M=7: 3+1+3 | M=9: 3+3+3 | M=11: 3+3+3+2.
// This decomposition follows the block structure of the paper's matrices.
//
// Number format (this design's choice, the paper gives no word length):
// samples and taps are signed integers; every precomputed factor s_k is kept
// with one fractional bit, i.e. the stored integer is 2*s_k, so that the
// halved sums (w0+w1+w2)/2 and (w0-w1+w2)/2 are exact. The products then carry
// one fractional bit which is always zero in the final sums and is dropped.
package mf_pkg;

  // Default word lengths.
  localparam int unsigned DATA_W_DEF = 16;
  localparam int unsigned COEF_W_DEF = 16;

  // Extra integer bits of the outputs over DATA_W+COEF_W: enough for 16 taps.
  localparam int unsigned Y_GROWTH = 4;

  // Group kinds of the tap decomposition.
  typedef enum logic [1:0] {
    GRP_NONE = 2'd0,
    GRP_ONE  = 2'd1,   // one tap, 2 multipliers
    GRP_PAIR = 2'd2,   // two taps, 3 multipliers
    GRP_F23  = 2'd3    // three taps, 4 multipliers
  } grp_e;

  localparam int unsigned MAX_GROUPS = 4;

  // Kind of group g (0-based) in the decomposition of an M-tap filter.
  function automatic grp_e group_kind(int unsigned m, int unsigned g);
    case (m)
      3:  return (g == 0) ? GRP_F23 : GRP_NONE;
      5:  return (g == 0) ? GRP_F23 : (g == 1) ? GRP_PAIR : GRP_NONE;
      7:  return (g == 0 || g == 2) ? GRP_F23 : (g == 1) ? GRP_ONE : GRP_NONE;
      9:  return (g < 3) ? GRP_F23 : GRP_NONE;
      11: return (g < 3) ? GRP_F23 : (g == 3) ? GRP_PAIR : GRP_NONE;
      default: return GRP_NONE;
    endcase
  endfunction

  // Taps covered and multipliers used by one group.
  function automatic int unsigned grp_taps(grp_e k);
    case (k)
      GRP_F23:  return 3;
      GRP_PAIR: return 2;
      GRP_ONE:  return 1;
      default:  return 0;
    endcase
  endfunction

  function automatic int unsigned grp_mults(grp_e k);
    case (k)
      GRP_F23:  return 4;
      GRP_PAIR: return 3;
      GRP_ONE:  return 2;
      default:  return 0;
    endcase
  endfunction

  // Number of multipliers (= length of the diagonal of D) for an M-tap unit:
  // 4, 7, 10, 12, 15 for M = 3, 5, 7, 9, 11 (Table 1 of the source).
  function automatic int unsigned num_mults(int unsigned m);
    int unsigned n = 0;
    for (int unsigned g = 0; g < MAX_GROUPS; g++) n += grp_mults(group_kind(m, g));
    return n;
  endfunction

endpackage
