// dct_pkg -- shared types, constants and elaboration-time helpers for the
// multiparametric 8-point DCT approximation T(a).
//
// T(a) is an 8x8 integer matrix whose fixed entries are 0 and +-1 and whose
// eight free entries a1..a8 are taken from {0, +-1/2, +-1, +-2}.  Hardware
// computes it through the sparse factorisation T(a) = P * K(a) * A2 * A1.
// Because a_i may be 1/2, the parameter vector is carried here as twice its
// value ("a2x"), which is always an integer in {0, +-1, +-2, +-4}.
//
// The seven optimal parameter vectors (j = 1..7) of the published table are
// provided as constants; index 1 of a vector is a1.  A_T7 (j = 7, the best
// coding performance of the class) is the default transform of this design.
package dct_pkg;

  // One free matrix entry, stored as 2*a_i (4-bit two's complement).
  typedef logic signed [3:0] coef2x_t;
  // The parameter vector a = [a1 .. a8], each element as 2*a_i.
  typedef coef2x_t [1:8] avec2x_t;

  // Optimal vectors a_opt, written as 2*a (a = 0.5 -> 1, a = 1 -> 2, a = -1 -> -2).
  localparam avec2x_t A_T1_MRDCT = {4'sd0, 4'sd0, 4'sd0, 4'sd0, 4'sd0, 4'sd0, 4'sd0, 4'sd0};
  localparam avec2x_t A_T2_OCBT  = {4'sd2, 4'sd0, 4'sd0, 4'sd0, 4'sd2, 4'sd0, 4'sd0, 4'sd0};
  localparam avec2x_t A_T3       = {4'sd2, 4'sd0, 4'sd0, 4'sd2, 4'sd2, 4'sd0, 4'sd0, 4'sd2};
  localparam avec2x_t A_T4       = {4'sd2, 4'sd0, 4'sd0, 4'sd1, 4'sd2, 4'sd0, 4'sd0, 4'sd1};
  localparam avec2x_t A_T5       = {4'sd2, 4'sd2, 4'sd2, -4'sd2, 4'sd2, -4'sd2, -4'sd2, -4'sd2};
  localparam avec2x_t A_T6_RDCT  = {4'sd2, 4'sd2, 4'sd2, 4'sd2, 4'sd2, 4'sd2, 4'sd2, 4'sd2};
  localparam avec2x_t A_T7       = {4'sd2, 4'sd1, 4'sd1, 4'sd2, 4'sd2, 4'sd1, 4'sd1, 4'sd2};

  // True when some a_i is +-1/2: the parametric rows are then summed at
  // twice their value and halved (arithmetic shift, i.e. floor) at the end.
  function automatic bit uses_half(avec2x_t a);
    for (int i = 1; i <= 8; i++)
      if (a[i] == 4'sd1 || a[i] == -4'sd1) return 1'b1;
    return 1'b0;
  endfunction

  // True when some a_i is +-2: the parametric rows then need one extra bit.
  function automatic bit uses_two(avec2x_t a);
    for (int i = 1; i <= 8; i++)
      if (a[i] == 4'sd4 || a[i] == -4'sd4) return 1'b1;
    return 1'b0;
  endfunction

  // Number of non-zero terms in each parametric row of K(a):
  //   w4 = -a4 z4 - z5 + a3 z7      w5 = a6 z4 - z6 + a5 z7
  //   w6 =  a2 z5 + a1 z6 + z7      w7 = -z4 + a8 z5 - a7 z6
  // Two-input adder levels needed by K(a): 1 when every row has at most two
  // terms (the fixed 2x2 butterfly always needs one), 2 when a row has three.
  function automatic int k_levels(avec2x_t a);
    int n4, n5, n6, n7, m;
    n4 = 1 + int'(a[4] != 0) + int'(a[3] != 0);
    n5 = 1 + int'(a[6] != 0) + int'(a[5] != 0);
    n6 = 1 + int'(a[2] != 0) + int'(a[1] != 0);
    n7 = 1 + int'(a[8] != 0) + int'(a[7] != 0);
    m = n4;
    if (n5 > m) m = n5;
    if (n6 > m) m = n6;
    if (n7 > m) m = n7;
    return (m == 3) ? 2 : 1;
  endfunction

  // Word growth of the K(a) stage: one bit as for every arithmetic
  // sub-block, one more when some a_i is +-2.
  function automatic int k_grow(avec2x_t a);
    return uses_two(a) ? 2 : 1;
  endfunction

  // Pipeline latency of the transform core in clock cycles: input register,
  // A1, A2 and the K(a) adder levels (P is wiring).
  function automatic int core_latency(avec2x_t a);
    return 3 + k_levels(a);
  endfunction

  // Additions of the fast algorithm: 22 minus the number of zero a_i.
  function automatic int additions(avec2x_t a);
    int n;
    n = 22;
    for (int i = 1; i <= 8; i++)
      if (a[i] == 0) n--;
    return n;
  endfunction

  // Register map of the testbed UART (byte addresses on the AXI4-Lite link)
  // and its STATUS bits, shared by the UART and the controller.
  localparam logic [3:0] UART_RX_DATA = 4'h0;
  localparam logic [3:0] UART_TX_DATA = 4'h4;
  localparam logic [3:0] UART_STATUS  = 4'h8;
  localparam int STAT_RX_VALID   = 0;
  localparam int STAT_RX_OVERRUN = 1;
  localparam int STAT_TX_FULL    = 3;

  // Bytes per packet: eight 8-bit inputs in, eight outputs back, each
  // output sent as a 16-bit two's-complement word, low byte first.
  localparam int N_POINTS   = 8;
  localparam int OUT_BYTES  = 2;

endpackage
