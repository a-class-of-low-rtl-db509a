// dct8_core -- pipelined 8-point multiparametric DCT approximation T(a).
//
// Computes X = T(a) x for one vector of eight signed samples per clock,
// through the factorisation T(a) = P * K(a) * A2 * A1, one sub-block per
// factor matrix as in the published architecture:
//
//   x --[input reg]--> A1 (dct8_a1) --> A2 (dct8_a2) --> K(a) (dct8_k) --> P --> X
//
// P = (0)(1 4 3 2 6)(5)(7) is pure wiring and lives here: the K(a) outputs
// w0..w7 become X0 = w0, X4 = w1, X6 = w2, X2 = w3, X3 = w4, X5 = w5,
// X1 = w6, X7 = w7, so X comes out in natural coefficient order.
//
// The scaling matrix S(a) that makes T(a) orthonormal is not applied: it is
// meant to be merged into the quantiser.  The parameter A selects the member
// of the class (default: j = 7 of the optimal set).
//
// Timing.  A vector presented with in_valid in clock cycle t appears on X
// with out_valid in cycle t + LATENCY, where LATENCY = 4 when every row of
// K4(a) has at most two terms and 5 otherwise (the published latencies).
// Every arithmetic stage adds one bit of word length, so OUT_W = IN_W + 3
// (IN_W + 4 if some |a_i| = 2).  The input register stage, which accounts
// for the fourth/fifth cycle of latency, and the reset of the valid flags
// only (asynchronous, active low) are this design's choices.
module dct8_core
  import dct_pkg::*;
#(
  parameter int      IN_W = 8,        // input sample width (8-bit coefficients)
  parameter avec2x_t A    = A_T7      // parameter vector, entries are 2*a_i
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  input  logic signed [IN_W-1:0]              x [8],
  output logic                                out_valid,
  output logic signed [IN_W+1+k_grow(A):0]    X [8]
);

  localparam int OUT_W   = IN_W + 2 + k_grow(A);
  localparam int LATENCY = core_latency(A);

  // Input register.
  logic                   v0;
  logic signed [IN_W-1:0] x_q [8];
  always_ff @(posedge clk) x_q <= x;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v0 <= 1'b0;
    else        v0 <= in_valid;

  logic                   v1, v2;
  logic signed [IN_W:0]   y [8];
  logic signed [IN_W+1:0] z [8];
  logic signed [OUT_W-1:0] w [8];

  dct8_a1 #(.IN_W(IN_W)) u_a1 (
    .clk, .rst_n, .in_valid(v0), .x(x_q), .out_valid(v1), .y
  );

  dct8_a2 #(.W(IN_W + 1)) u_a2 (
    .clk, .rst_n, .in_valid(v1), .y, .out_valid(v2), .z
  );

  dct8_k #(.W(IN_W + 2), .A(A)) u_k (
    .clk, .rst_n, .in_valid(v2), .z, .out_valid, .w
  );

  // The result of every accepted vector leaves exactly LATENCY clocks later.
  a_latency: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> ##LATENCY out_valid);

  // Output permutation P.
  always_comb begin
    X[0] = w[0];
    X[4] = w[1];
    X[6] = w[2];
    X[2] = w[3];
    X[3] = w[4];
    X[5] = w[5];
    X[1] = w[6];
    X[7] = w[7];
  end

endmodule
