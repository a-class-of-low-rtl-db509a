// dct_ref_pkg -- reference model for the testbenches.
//
// Computes the transform directly from the 8x8 matrix T(a) (no fast
// algorithm): each row is evaluated with all entries doubled, so a_i = 1/2
// stays an integer, and the doubled sum is halved with an arithmetic shift
// (floor).  This is the rounding the hardware promises for rows holding a
// 1/2; for every other row the halving is exact.
package dct_ref_pkg;
  import dct_pkg::*;

  // Doubled matrix 2*T(a); a2x holds 2*a_i.
  function automatic void matrix2x(input avec2x_t a2x, output int m [8][8]);
    int a [1:8];
    for (int i = 1; i <= 8; i++) a[i] = int'(a2x[i]);
    m[0] = '{ 2,  2,  2,  2,  2,  2,  2,  2};
    m[1] = '{ 2, a[1], a[2], 0, 0, -a[2], -a[1], -2};
    m[2] = '{ 2,  0,  0, -2, -2,  0,  0,  2};
    m[3] = '{ a[3], 0, -2, -a[4], a[4], 2, 0, -a[3]};
    m[4] = '{ 2, -2, -2,  2,  2, -2, -2,  2};
    m[5] = '{ a[5], -2, 0, a[6], -a[6], 0, 2, -a[5]};
    m[6] = '{ 0, -2,  2,  0,  0,  2, -2,  0};
    m[7] = '{ 0, -a[7], a[8], -2, 2, -a[8], a[7], 0};
  endfunction

  // X = floor(T(a) x), row by row.
  function automatic void transform(input avec2x_t a2x, input int x [8], output int X [8]);
    int m [8][8];
    int acc;
    matrix2x(a2x, m);
    for (int r = 0; r < 8; r++) begin
      acc = 0;
      for (int c = 0; c < 8; c++) acc += m[r][c] * x[c];
      X[r] = acc >>> 1;
    end
  endfunction

  // Latencies reported for the seven optimal transforms (clock cycles).
  function automatic int paper_latency(int j);
    return (j <= 4) ? 4 : 5;
  endfunction

  function automatic avec2x_t opt_vec(int j);
    case (j)
      1: return A_T1_MRDCT;
      2: return A_T2_OCBT;
      3: return A_T3;
      4: return A_T4;
      5: return A_T5;
      6: return A_T6_RDCT;
      default: return A_T7;
    endcase
  endfunction
endpackage
