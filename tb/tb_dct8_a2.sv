// tb_dct8_a2 -- self-checking testbench for the A2 butterfly stage.
// Drives random 9-bit vectors (the A1 output range, extremes included)
// every clock and checks, one clock later, z0 = y0+y3, z1 = y1+y2,
// z2 = y1-y2, z3 = y0-y3 and z4..z7 = y4..y7.
module tb_dct8_a2;
  localparam int W = 9;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [W-1:0] y [8];
  logic signed [W:0]   z [8];
  int checks = 0, failures = 0;

  dct8_a2 #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_z [8];
  initial begin
    for (int i = 0; i < 8; i++) y[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      for (int i = 0; i < 8; i++) begin
        case (n % 4)
          0: y[i] = {1'b1, {(W-1){1'b0}}};
          1: y[i] = (i == 2 || i == 3) ? {1'b1, {(W-1){1'b0}}} : {1'b0, {(W-1){1'b1}}};
          default: y[i] = W'($urandom);
        endcase
      end
      in_valid = 1;
      ref_z[0] = int'(y[0]) + int'(y[3]);
      ref_z[1] = int'(y[1]) + int'(y[2]);
      ref_z[2] = int'(y[1]) - int'(y[2]);
      ref_z[3] = int'(y[0]) - int'(y[3]);
      for (int i = 4; i < 8; i++) ref_z[i] = int'(y[i]);
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid) failures++;
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (int'(z[i]) != ref_z[i]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d z[%0d]=%0d expected %0d", n, i, z[i], ref_z[i]);
        end
      end
    end
    @(negedge clk) in_valid = 0;
    @(posedge clk) #1;
    checks++;
    if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
