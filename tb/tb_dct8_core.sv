// tb_dct8_core -- self-checking testbench for the complete T(a) pipeline.
//
// Eight cores run side by side: the seven optimal transforms (j = 1..7) and
// one extra member mixing a_i = +-1/2 and +-2.  A random signed 8-bit vector
// (with extreme patterns every few clocks) is offered every clock, with
// random idle clocks, so the pipeline is exercised at full rate.  Each output
// vector is compared with floor(T(a) x) evaluated directly from the 8x8
// matrix, and out_valid must follow in_valid after the published latency:
// 4 clocks for j = 1..4 and 5 clocks for j = 5..7.
module tb_dct8_core;
  import dct_pkg::*;
  import dct_ref_pkg::*;
  localparam int IN_W = 8;
  localparam int NCFG = 8;
  localparam int NCYC = 3000;
  localparam avec2x_t A_MIX = {4'sd4, -4'sd1, 4'sd2, -4'sd4, 4'sd1, 4'sd0, -4'sd2, 4'sd4};

  function automatic avec2x_t cfg(int g);
    return (g < 7) ? opt_vec(g + 1) : A_MIX;
  endfunction

  function automatic int exp_lat(int g);
    return (g < 7) ? paper_latency(g + 1) : 5;
  endfunction

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [IN_W-1:0] x [8];
  int checks = 0, failures = 0, cyc = 0;
  int  xh [NCYC + 16][8];
  bit  vh [NCYC + 16];

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam avec2x_t AV = cfg(g);
    localparam int OW = IN_W + 2 + k_grow(AV);
    localparam int LAT = exp_lat(g);
    logic out_valid;
    logic signed [OW-1:0] X [8];

    dct8_core #(.IN_W(IN_W), .A(AV)) dut (.clk, .rst_n, .in_valid, .x, .out_valid, .X);

    int eX [8];
    int xx [8];
    always @(posedge clk) if (rst_n) begin
      #1;
      if (cyc >= LAT + 1) begin
        checks++;
        if (out_valid !== vh[cyc - LAT]) begin
          failures++;
          if (failures < 10) $display("FAIL cfg %0d: out_valid=%0b at cycle %0d, latency %0d expected", g, out_valid, cyc, LAT);
        end
        if (vh[cyc - LAT]) begin
          xx = xh[cyc - LAT];
          transform(AV, xx, eX);
          for (int i = 0; i < 8; i++) begin
            checks++;
            if (int'(X[i]) != eX[i]) begin
              failures++;
              if (failures < 10) $display("FAIL cfg %0d cycle %0d: X[%0d]=%0d expected %0d", g, cyc, i, X[i], eX[i]);
            end
          end
        end
      end
    end
  end

  // Addition counts of the fast algorithm for j = 1..7, as published.
  localparam int PAPER_ADDS [7] = '{14, 16, 18, 18, 22, 22, 22};
  initial begin
    for (int j = 1; j <= 7; j++) begin
      checks++;
      if (additions(opt_vec(j)) != PAPER_ADDS[j-1]) begin
        failures++;
        $display("FAIL: j=%0d needs %0d additions, published %0d", j, additions(opt_vec(j)), PAPER_ADDS[j-1]);
      end
    end
  end

  int xi [8];
  initial begin
    for (int i = 0; i < 8; i++) x[i] = '0;
    foreach (vh[k]) vh[k] = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 1; n <= NCYC; n++) begin
      for (int i = 0; i < 8; i++) begin
        case (n % 6)
          0: xi[i] = -128;
          1: xi[i] = 127;
          2: xi[i] = (i % 2) ? 127 : -128;
          3: xi[i] = (i < 4) ? 127 : -128;
          default: xi[i] = int'($signed(8'($urandom)));
        endcase
        x[i] = IN_W'(xi[i]);
      end
      in_valid = ($urandom_range(0, 9) != 0);
      xh[cyc] = xi;
      vh[cyc] = in_valid;
      @(posedge clk);
      cyc++;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (8) begin
      vh[cyc] = 1'b0;
      @(posedge clk);
      cyc++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
