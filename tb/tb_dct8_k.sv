// tb_dct8_k -- self-checking testbench for the K(a) stage.
//
// Eight instances run side by side: the seven optimal parameter vectors
// (j = 1..7) and one extra vector that mixes +-1/2 and +-2.  Every clock a
// random 8-bit sample vector is pushed through integer models of A1 and A2,
// and the resulting z vector (so z4..z7 stay in their real range) drives all
// instances.  Each output vector is compared with w computed here from the
// K(a) equations (rows holding 1/2 rounded down), and out_valid must follow
// in_valid after exactly 1 clock (rows of at most two terms) or 2 clocks
// (some row of three terms).  Gaps in in_valid are inserted at random.
module tb_dct8_k;
  import dct_pkg::*;
  localparam int W = 10;
  localparam int NCFG = 8;
  localparam int NCYC = 3000;
  localparam avec2x_t A_MIX = {4'sd4, -4'sd1, 4'sd2, -4'sd4, 4'sd1, 4'sd0, -4'sd2, 4'sd4};

  function automatic avec2x_t cfg(int g);
    case (g)
      0: return A_T1_MRDCT;
      1: return A_T2_OCBT;
      2: return A_T3;
      3: return A_T4;
      4: return A_T5;
      5: return A_T6_RDCT;
      6: return A_T7;
      default: return A_MIX;
    endcase
  endfunction

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [W-1:0] z [8];
  int checks = 0, failures = 0, cyc = 0;
  int  zh [NCYC + 8][8];
  bit  vh [NCYC + 8];

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected K(a) output for input vector zz.
  function automatic void kref(avec2x_t a2x, int zz [8], output int w [8]);
    int c [1:8];
    for (int i = 1; i <= 8; i++) c[i] = int'(a2x[i]);
    w[0] = zz[0] + zz[1];
    w[1] = zz[0] - zz[1];
    w[2] = -zz[2];
    w[3] = zz[3];
    w[4] = (-c[4] * zz[4] - 2 * zz[5] + c[3] * zz[7]) >>> 1;
    w[5] = ( c[6] * zz[4] - 2 * zz[6] + c[5] * zz[7]) >>> 1;
    w[6] = ( c[2] * zz[5] + c[1] * zz[6] + 2 * zz[7]) >>> 1;
    w[7] = (-2 * zz[4] + c[8] * zz[5] - c[7] * zz[6]) >>> 1;
  endfunction

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam avec2x_t AV = cfg(g);
    localparam int OW = W + k_grow(AV);
    localparam int LAT = k_levels(AV);
    logic out_valid;
    logic signed [OW-1:0] w [8];

    dct8_k #(.W(W), .A(AV)) dut (.clk, .rst_n, .in_valid, .z, .out_valid, .w);

    int ew [8];
    int zz [8];
    always @(posedge clk) if (rst_n) begin
      #1;
      if (cyc >= LAT + 1) begin
        checks++;
        if (out_valid !== vh[cyc - LAT]) begin
          failures++;
          if (failures < 10) $display("FAIL cfg %0d: out_valid=%0b at cycle %0d, latency %0d expected", g, out_valid, cyc, LAT);
        end
        if (vh[cyc - LAT]) begin
          zz = zh[cyc - LAT];
          kref(AV, zz, ew);
          for (int i = 0; i < 8; i++) begin
            checks++;
            if (int'(w[i]) != ew[i]) begin
              failures++;
              if (failures < 10) $display("FAIL cfg %0d cycle %0d: w[%0d]=%0d expected %0d", g, cyc, i, w[i], ew[i]);
            end
          end
        end
      end
    end
  end

  int x [8], y [8], zi [8];
  initial begin
    for (int i = 0; i < 8; i++) z[i] = '0;
    foreach (vh[k]) vh[k] = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 1; n <= NCYC; n++) begin
      // cycle n begins after the n-th checked edge's negedge
      for (int i = 0; i < 8; i++) begin
        case (n % 5)
          0: x[i] = -128;
          1: x[i] = (i < 4) ? 127 : -128;
          2: x[i] = (i % 2) ? 127 : -128;
          default: x[i] = int'($signed(8'($urandom)));
        endcase
      end
      for (int i = 0; i < 4; i++) begin
        y[i]   = x[i] + x[7-i];
        y[4+i] = x[3-i] - x[4+i];
      end
      zi[0] = y[0] + y[3]; zi[1] = y[1] + y[2];
      zi[2] = y[1] - y[2]; zi[3] = y[0] - y[3];
      for (int i = 4; i < 8; i++) zi[i] = y[i];
      for (int i = 0; i < 8; i++) z[i] = W'(zi[i]);
      in_valid = ($urandom_range(0, 9) != 0);
      zh[cyc] = zi;
      vh[cyc] = in_valid;
      @(posedge clk);
      cyc++;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (4) begin
      vh[cyc] = 1'b0;
      @(posedge clk);
      cyc++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
