// tb_ref_pkg: reference model for the testbenches of the T1 transforms.
//
// t_entry(N, k, n) returns entry (k, n) of the N-point low-complexity matrix,
// N = 8, 16 or 32. For N = 8 it is the matrix T1 itself. For larger N it uses
// the doubling rule that the printed 16- and 32-point matrices follow:
//   row 2j   : [ T(N/2)[j][n],  T(N/2)[j][N-1-n] ]  (sum half)
//   row 2j+1 : [ T(N/2)[j][n], -T(N/2)[j][N-1-n] ]  (difference half)
// The testbenches also compare a few generated rows with rows copied from
// the printed matrices, so the rule itself is checked. The model is a plain
// matrix-vector product and shares nothing with the factorized datapath.
package tb_ref_pkg;
  import t1_dct_pkg::*;

  function automatic int t_entry(int N, int k, int n);
    int h;
    if (N == 8) return int'(T1[k][n]);
    h = N / 2;
    if (n < h) return t_entry(h, k / 2, n);
    if (k % 2 == 0) return t_entry(h, k / 2, N - 1 - n);
    return -t_entry(h, k / 2, N - 1 - n);
  endfunction

  // One coefficient of the N-point transform of x (x holds N samples).
  function automatic int ref_coef(int N, int k, const ref int x[32]);
    int acc = 0;
    for (int n = 0; n < N; n++) acc += t_entry(N, k, n) * x[n];
    return acc;
  endfunction

  // A random signed W-bit sample; one vector in eight is driven to the
  // extremes to exercise the full output range.
  function automatic int rand_sample(int W, int mode);
    int lo = -(1 << (W - 1));
    int hi = (1 << (W - 1)) - 1;
    case (mode)
      0: return lo;
      1: return hi;
      default: return lo + int'($urandom_range(hi - lo));
    endcase
  endfunction
endpackage
