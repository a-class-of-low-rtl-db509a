// tb_dct_testbed_all -- the published hardware test, for all seven optimal
// transforms.
//
// Seven complete testbeds (j = 1..7 of the optimal set) share one clock and
// reset; the serial bit time is shortened to 8 clocks.  Each receives the
// same packets of eight random integers in [-10, 10] (the range of the
// published FPGA test) plus one packet of extreme values, and the sixteen
// bytes each returns per packet are decoded and compared with floor(T(a) x)
// from the 8x8 matrix.  The core latency that each controller measures must
// equal the published one: 4 clocks for j = 1..4, 5 for j = 5..7.
module tb_dct_testbed_all;
  import dct_pkg::*;
  import dct_ref_pkg::*;
  localparam int CPB  = 8;
  localparam int NPKT = 12;

  logic clk = 0, rst_n = 0, uart_rx = 1;
  int checks = 0, failures = 0;
  int pk_x [NPKT][8];
  bit sending_done = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (NPKT * 4000 + 20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_byte(input logic [7:0] b);
    logic [9:0] f;
    f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      uart_rx = f[i];
      repeat (CPB) @(posedge clk);
    end
  endtask

  int done_cnt [7];

  for (genvar g = 0; g < 7; g++) begin : g_tr
    localparam avec2x_t AV = opt_vec(g + 1);
    logic        uart_tx;
    logic [15:0] packets;
    logic [7:0]  core_cycles;

    dct_testbed_top #(.A(AV), .CLKS_PER_BIT(CPB)) dut (
      .clk, .rst_n, .uart_rx, .uart_tx, .packets, .core_cycles
    );

    logic [7:0] bytes [$];
    int ex [8], xx [8];
    initial begin
      logic [7:0] b;
      done_cnt[g] = 0;
      for (int p = 0; p < NPKT; p++) begin
        for (int k = 0; k < 16; k++) begin
          @(negedge uart_tx);
          repeat (CPB / 2) @(posedge clk);
          for (int i = 0; i < 8; i++) begin
            repeat (CPB) @(posedge clk);
            b[i] = uart_tx;
          end
          repeat (CPB) @(posedge clk);
          bytes.push_back(b);
        end
        xx = pk_x[p];
        transform(AV, xx, ex);
        for (int i = 0; i < 8; i++) begin
          logic signed [15:0] got;
          got = {bytes[2 * i + 1], bytes[2 * i]};
          checks++;
          if (int'(got) != ex[i]) begin
            failures++;
            if (failures < 10) $display("FAIL j=%0d packet %0d X%0d=%0d expected %0d", g + 1, p, i, got, ex[i]);
          end
        end
        bytes.delete();
        checks++;
        if (core_cycles != 8'(paper_latency(g + 1))) begin
          failures++;
          $display("FAIL j=%0d latency %0d, published %0d", g + 1, core_cycles, paper_latency(g + 1));
        end
        done_cnt[g]++;
      end
    end
  end

  initial begin
    for (int p = 0; p < NPKT; p++)
      for (int i = 0; i < 8; i++)
        pk_x[p][i] = (p == NPKT - 1) ? ((i % 3 == 0) ? -128 : 127) : $urandom_range(0, 20) - 10;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);
    for (int p = 0; p < NPKT; p++) begin
      for (int i = 0; i < 8; i++) send_byte(8'(pk_x[p][i]));
      // wait until every testbed has answered before the next packet
      wait (done_cnt[0] > p && done_cnt[1] > p && done_cnt[2] > p && done_cnt[3] > p &&
            done_cnt[4] > p && done_cnt[5] > p && done_cnt[6] > p);
    end
    repeat (20) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
