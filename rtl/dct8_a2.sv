// dct8_a2 -- second butterfly stage A2 of the fast algorithm for T(a).
//
// A2 = diag([I2 Ibar2; Ibar2 -I2], I4) combines the four even-part values
// and passes the odd part on unchanged:
//     z0 = y0 + y3    z1 = y1 + y2    z2 = y1 - y2    z3 = y0 - y3
//     z4..z7 = y4..y7
// (4 additions).  The output is one bit wider than the input and registered:
// latency one clock, one vector per clock.  Only the valid flag is reset
// (asynchronous, active low), a choice of this design.
module dct8_a2 #(
  parameter int W = 9                 // input word length (A1 output)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] y [8],
  output logic                out_valid,
  output logic signed [W:0]   z [8]
);

  logic signed [W:0] z_d [8];

  always_comb begin
    z_d[0] = (W+1)'(y[0]) + y[3];
    z_d[1] = (W+1)'(y[1]) + y[2];
    z_d[2] = (W+1)'(y[1]) - y[2];
    z_d[3] = (W+1)'(y[0]) - y[3];
    for (int i = 4; i < 8; i++) z_d[i] = (W+1)'(y[i]);
  end

  always_ff @(posedge clk) z <= z_d;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;

endmodule
