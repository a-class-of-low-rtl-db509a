// dct8_a1 -- first butterfly stage A1 of the fast algorithm for T(a).
//
// A1 = [I4 Ibar4; Ibar4 -I4] (Ibar = counter-identity) maps the eight input
// samples x0..x7 to
//     y_i     = x_i + x_(7-i)          i = 0..3
//     y_(4+i) = x_(3-i) - x_(4+i)      i = 0..3
// using 8 additions/subtractions.  As in the published architecture the
// result is one bit wider than the input (so it cannot overflow) and is
// registered: the stage has a latency of one clock and accepts a new vector
// every clock.  in_valid travels with the data; only the valid flag is reset
// (asynchronous, active low), which is a choice of this design.
module dct8_a1 #(
  parameter int IN_W = 8              // input word length
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] x [8],
  output logic                   out_valid,
  output logic signed [IN_W:0]   y [8]
);

  logic signed [IN_W:0] y_d [8];

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      y_d[i]     = (IN_W+1)'(x[i])   + x[7-i];
      y_d[4 + i] = (IN_W+1)'(x[3-i]) - x[4+i];
    end
  end

  always_ff @(posedge clk) y <= y_d;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

endmodule
