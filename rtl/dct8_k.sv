// dct8_k -- parametric stage K(a) of the fast algorithm for T(a).
//
// K(a) = diag([1 1; 1 -1], -1, 1, K4(a)) with
//          | -a4  -1   0   a3 |
//   K4  =  |  a6   0  -1   a5 |      acting on z4..z7,
//          |  0   a2   a1   1 |
//          | -1   a8  -a7   0 |
// so that
//   w0 = z0 + z1           w1 = z0 - z1          w2 = -z2        w3 = z3
//   w4 = -a4 z4 - z5 + a3 z7                     w5 = a6 z4 - z6 + a5 z7
//   w6 =  a2 z5 + a1 z6 + z7                     w7 = -z4 + a8 z5 - a7 z6
//
// The vector a is an elaboration-time parameter (each entry stored as 2*a_i,
// see dct_pkg).  Products by a_i in {0, +-1/2, +-1, +-2} are built from
// shifts and negations only; a zero a_i removes its adder, giving the
// published cost of 2 (+ number of non-zero a_i) additions for this stage.
//
// Pipelining.  Every adder level is followed by a register.  When each row
// of K4 has at most two terms (e.g. MRDCT, OCBT, j = 3, 4) the stage has one
// level and a latency of 1 clock; when some row has three terms (j = 5, 6, 7)
// the first level adds two of them, the third is registered alongside, and a
// second level finishes the sum: latency 2 clocks.  This reproduces the
// reported overall latencies of 4 and 5 cycles; splitting the stage this way
// is this design's reading of them.
//
// Word length.  The output is one bit wider than the input (two bits when
// some |a_i| = 2, an extension for the part of the class the published
// designs never use).  The inputs z4..z7 are A1 differences passed through
// A2 and so carry one bit less magnitude than the port width; with that
// range no row can overflow.  When some a_i = +-1/2 the four parametric rows
// are summed at twice their value and halved by one arithmetic right shift
// at the end, i.e. the result is floor(exact value): a single rounding per
// coefficient.  That rounding rule is this design's choice.
module dct8_k
  import dct_pkg::*;
#(
  parameter int      W = 10,          // input word length (A2 output)
  parameter avec2x_t A = A_T7         // parameter vector, entries are 2*a_i
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            in_valid,
  input  logic signed [W-1:0]             z [8],
  output logic                            out_valid,
  output logic signed [W+k_grow(A)-1:0]   w [8]
);

  localparam int  OW   = W + k_grow(A);
  localparam bit  HALF = uses_half(A);
  localparam int  IW   = OW + int'(HALF);   // internal width of the parametric rows
  localparam int  LEV  = k_levels(A);

  // Effective integer coefficient of a free entry: 2*a when rows are summed
  // at double value, a otherwise.
  function automatic int eff(int c2x);
    return HALF ? c2x : c2x / 2;
  endfunction

  // v times a constant in {0, +-1, +-2, +-4}: shifts and a negation only.
  function automatic logic signed [IW-1:0] smul(logic signed [IW-1:0] v, int c);
    case (c)
      1:       return v;
      -1:      return -v;
      2:       return v <<< 1;
      -2:      return -(v <<< 1);
      4:       return v <<< 2;
      -4:      return -(v <<< 2);
      default: return '0;
    endcase
  endfunction

  localparam int U = HALF ? 2 : 1;    // coefficient of the fixed +-1 entries

  // Sign-extended copies of the odd-part inputs.
  logic signed [IW-1:0] ze [4:7];
  always_comb for (int i = 4; i < 8; i++) ze[i] = IW'(z[i]);

  // Per row: the fixed term plus the first parametric term, and the second
  // parametric term.  Row r computes w_(4+r).
  logic signed [IW-1:0] s_a [4], s_b [4];
  always_comb begin
    s_a[0] = smul(ze[5], -U) + smul(ze[4], -eff(int'(A[4])));
    s_b[0] =                   smul(ze[7],  eff(int'(A[3])));
    s_a[1] = smul(ze[6], -U) + smul(ze[4],  eff(int'(A[6])));
    s_b[1] =                   smul(ze[7],  eff(int'(A[5])));
    s_a[2] = smul(ze[7],  U) + smul(ze[5],  eff(int'(A[2])));
    s_b[2] =                   smul(ze[6],  eff(int'(A[1])));
    s_a[3] = smul(ze[4], -U) + smul(ze[5],  eff(int'(A[8])));
    s_b[3] =                   smul(ze[6], -eff(int'(A[7])));
  end

  // Even part, first level.
  logic signed [OW-1:0] e_d [4];
  always_comb begin
    e_d[0] = OW'(z[0]) + z[1];
    e_d[1] = OW'(z[0]) - z[1];
    e_d[2] = -OW'(z[2]);
    e_d[3] = OW'(z[3]);
  end

  // Final halving of the parametric rows (floor).
  function automatic logic signed [OW-1:0] fin(logic signed [IW-1:0] v);
    logic signed [IW-1:0] t;
    t = v >>> int'(HALF);
    return t[OW-1:0];
  endfunction

  logic v1;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;

  if (LEV == 1) begin : g_one_level
    // At most one of s_a/s_b carries a parametric term here: one adder level.
    always_ff @(posedge clk) begin
      for (int i = 0; i < 4; i++) w[i] <= e_d[i];
      for (int r = 0; r < 4; r++) w[4 + r] <= fin(s_a[r] + s_b[r]);
    end
    assign out_valid = v1;
  end else begin : g_two_levels
    logic signed [OW-1:0] e_q [4];
    logic signed [IW-1:0] a_q [4], b_q [4];
    logic                 v2;
    always_ff @(posedge clk) begin
      e_q <= e_d;
      a_q <= s_a;
      b_q <= s_b;
    end
    always_ff @(posedge clk) begin
      for (int i = 0; i < 4; i++) w[i] <= e_q[i];
      for (int r = 0; r < 4; r++) w[4 + r] <= fin(a_q[r] + b_q[r]);
    end
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) v2 <= 1'b0;
      else        v2 <= v1;
    assign out_valid = v2;
  end

endmodule
