// tb_dct8_a1 -- self-checking testbench for the A1 butterfly stage.
// Drives random 8-bit vectors (including the extremes) every clock and
// compares each registered output vector, one clock later, with
// y_i = x_i + x_(7-i), y_(4+i) = x_(3-i) - x_(4+i) computed here in integers.
module tb_dct8_a1;
  localparam int IN_W = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [IN_W-1:0] x [8];
  logic signed [IN_W:0]   y [8];
  int checks = 0, failures = 0;
  int exp_q [$];

  dct8_a1 #(.IN_W(IN_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_y [8];
  initial begin
    for (int i = 0; i < 8; i++) x[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      for (int i = 0; i < 8; i++) begin
        case (n % 4)
          0: x[i] = 8'sh80;                       // most negative
          1: x[i] = 8'sh7f;                       // most positive
          default: x[i] = IN_W'($urandom);
        endcase
        if (n % 4 == 1 && i >= 4) x[i] = 8'sh80; // largest differences
      end
      in_valid = 1;
      for (int i = 0; i < 4; i++) begin
        ref_y[i]   = int'(x[i]) + int'(x[7-i]);
        ref_y[4+i] = int'(x[3-i]) - int'(x[4+i]);
      end
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid) begin
        failures++;
        $display("FAIL: out_valid low one clock after in_valid");
      end
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (int'(y[i]) != ref_y[i]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d y[%0d]=%0d expected %0d", n, i, y[i], ref_y[i]);
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
