// tb_dct_testbed_top -- end-to-end test of the testbed at its default
// parameters (transform j = 7, 868 clocks per serial bit).
//
// The testbench plays the PC: it sends packets of eight signed 8-bit
// samples on uart_rx, decodes the sixteen bytes that come back on uart_tx,
// reassembles the eight 16-bit outputs and compares them with
// floor(T(a) x) computed directly from the 8x8 matrix.  Packets hold random
// integers in [-10, 10], as in the published hardware test, plus full-range
// and extreme vectors.  It also counts the mechanisms of the design and
// fails if one never occurred: STATUS polls that found no byte waiting,
// polls that found the transmitter full, core runs whose measured latency
// equals the published 5 cycles, and completed packets.  A receive overrun
// must never happen.
module tb_dct_testbed_top;
  import dct_pkg::*;
  import dct_ref_pkg::*;
  localparam int CPB  = 868;          // must match the top's default bit time
  localparam int NPKT = 5;
  localparam avec2x_t AV = A_T7;      // the top's default transform

  logic clk = 0, rst_n = 0, uart_rx = 1, uart_tx;
  logic [15:0] packets;
  logic [7:0]  core_cycles;
  int checks = 0, failures = 0;

  dct_testbed_top dut (.clk, .rst_n, .uart_rx, .uart_tx, .packets, .core_cycles);

  always #5 clk = ~clk;

  initial begin
    repeat (NPKT * 260000 + 100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic send_byte(input logic [7:0] b);
    logic [9:0] f;
    f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      uart_rx = f[i];
      repeat (CPB) @(posedge clk);
    end
  endtask

  // PC receiver: decode 8N1 frames on uart_tx.
  logic [7:0] rx_bytes [$];
  initial begin
    logic [7:0] b;
    forever begin
      @(negedge uart_tx);
      repeat (CPB / 2) @(posedge clk);
      if (uart_tx == 1'b0) begin
        for (int i = 0; i < 8; i++) begin
          repeat (CPB) @(posedge clk);
          b[i] = uart_tx;
        end
        repeat (CPB) @(posedge clk);
        check(uart_tx == 1'b1, "stop bit");
        rx_bytes.push_back(b);
      end
    end
  end

  // Mechanism counters, observed on the internal AXI4-Lite link.
  int n_rx_empty = 0, n_tx_full = 0, n_lat_ok = 0, n_overrun = 0;
  logic [3:0] last_ar;
  always @(posedge clk) if (rst_n) begin
    if (dut.bus.arvalid && dut.bus.arready) last_ar <= dut.bus.araddr;
    if (dut.bus.rvalid && dut.bus.rready && last_ar == UART_STATUS) begin
      if (!dut.bus.rdata[STAT_RX_VALID] && dut.u_ctrl.idx < 8 && !dut.u_ctrl.core_valid) n_rx_empty++;
      if (dut.bus.rdata[STAT_TX_FULL]) n_tx_full++;
      if (dut.bus.rdata[STAT_RX_OVERRUN]) n_overrun++;
    end
  end

  int x [8], ex [8];
  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);
    for (int p = 0; p < NPKT; p++) begin
      for (int i = 0; i < 8; i++) begin
        case (p)
          0, 1: x[i] = $urandom_range(0, 20) - 10;          // published test range
          2:    x[i] = int'($signed(8'($urandom)));          // full 8-bit range
          3:    x[i] = (i < 4) ? 127 : -128;
          default: x[i] = (i % 2) ? -128 : 127;
        endcase
      end
      for (int i = 0; i < 8; i++) send_byte(8'(x[i]));
      wait (rx_bytes.size() == 16);
      repeat (2 * CPB) @(posedge clk);
      transform(AV, x, ex);
      for (int i = 0; i < 8; i++) begin
        logic signed [15:0] got;
        got = {rx_bytes[2 * i + 1], rx_bytes[2 * i]};
        check(int'(got) == ex[i], $sformatf("packet %0d X%0d=%0d expected %0d", p, i, got, ex[i]));
      end
      rx_bytes.delete();
      check(packets == 16'(p + 1), "packet counter");
      if (core_cycles == 8'(paper_latency(7))) n_lat_ok++;
    end
    $display("mechanisms: empty RX polls=%0d TX full polls=%0d latency-5 runs=%0d packets=%0d overruns=%0d",
             n_rx_empty, n_tx_full, n_lat_ok, packets, n_overrun);
    check(n_rx_empty > 0, "controller waited for serial input");
    check(n_tx_full > 0, "controller stalled on a full transmitter");
    check(n_lat_ok == NPKT, "core latency of 5 cycles on every packet");
    check(packets == 16'(NPKT), "all packets completed");
    check(n_overrun == 0, "no receive overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
