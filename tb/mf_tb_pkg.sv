// mf_tb_pkg: reference models shared by the testbenches.
//
// naive_y computes one output of the M-tap filter directly from its
// definition, y_j = sum_i w_i x_(i+j), with 64-bit integers. ref_s lists the
// factors s_k of the diagonal matrix D for each M exactly as they are written
// out in the algorithm descriptions (times two, the format the datapaths
// use). rand_sample draws a random signed value of a given width, with the
// extreme values drawn often so that the full-precision widths are exercised.
package mf_tb_pkg;

  typedef longint vec_t [16];

  function automatic longint naive_y(int m, vec_t w, vec_t x, int j);
    longint acc = 0;
    for (int i = 0; i < m; i++) acc += w[i] * x[i+j];
    return acc;
  endfunction

  function automatic int num_s(int m);
    case (m)
      3: return 4;
      5: return 7;
      7: return 10;
      9: return 12;
      default: return 15;
    endcase
  endfunction

  // 2*s_k for the F(2,3) group on taps a, b, c: w_a, (w_a+w_b+w_c)/2,
  // (w_a-w_b+w_c)/2, w_c.
  function automatic void put_f23(ref vec_t s, input int k, input longint a, b, c);
    s[k]   = 2*a;
    s[k+1] = a + b + c;
    s[k+2] = a - b + c;
    s[k+3] = 2*c;
  endfunction

  function automatic vec_t ref_s(int m, vec_t w);
    vec_t s;
    for (int k = 0; k < 16; k++) s[k] = 0;
    case (m)
      3: put_f23(s, 0, w[0], w[1], w[2]);
      5: begin
        put_f23(s, 0, w[0], w[1], w[2]);
        s[4] = 2*w[3]; s[5] = 2*(w[3] + w[4]); s[6] = 2*w[4];
      end
      7: begin
        put_f23(s, 0, w[0], w[1], w[2]);
        s[4] = 2*w[3]; s[5] = 2*w[3];
        put_f23(s, 6, w[4], w[5], w[6]);
      end
      9: begin
        put_f23(s, 0, w[0], w[1], w[2]);
        put_f23(s, 4, w[3], w[4], w[5]);
        put_f23(s, 8, w[6], w[7], w[8]);
      end
      default: begin
        put_f23(s, 0, w[0], w[1], w[2]);
        put_f23(s, 4, w[3], w[4], w[5]);
        put_f23(s, 8, w[6], w[7], w[8]);
        s[12] = 2*w[9]; s[13] = 2*(w[9] + w[10]); s[14] = 2*w[10];
      end
    endcase
    return s;
  endfunction

  function automatic longint rand_sample(int width);
    longint lo = -(longint'(1) <<< (width-1));
    longint hi = (longint'(1) <<< (width-1)) - 1;
    int unsigned r = $urandom_range(0, 7);
    if (r == 0) return lo;
    if (r == 1) return hi;
    if (r == 2) return longint'($urandom_range(0, 6)) - 3;
    return lo + longint'({$urandom, $urandom} % 64'(hi - lo + 1));
  endfunction

endpackage
