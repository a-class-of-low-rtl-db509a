// tb_uart_axil -- self-checking testbench for the AXI4-Lite UART.
//
// The testbench is the AXI4-Lite master and also plays the far end of the
// serial line.  It checks: reception of bytes sent on rx (RX_VALID, RX_DATA,
// RX_VALID cleared by the read), the overrun flag when a second byte arrives
// unread (first byte kept, flag cleared by reading STATUS), transmission of
// written bytes with correct 8N1 framing and bit time on tx, TX_FULL while
// the holding register is occupied, and that a write while TX_FULL is
// dropped.  The bit time is shortened to 16 clocks.
module tb_uart_axil;
  import dct_pkg::*;
  localparam int CPB = 16;
  logic clk = 0, rst_n = 0, rx = 1, tx;
  int checks = 0, failures = 0;

  axi4l_if #(.ADDR_W(4), .DATA_W(32)) bus (.clk, .rst_n);
  uart_axil #(.CLKS_PER_BIT(CPB)) dut (.bus(bus.slave), .rx, .tx);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic axi_read(input logic [3:0] addr, output logic [31:0] data);
    @(negedge clk);
    bus.araddr = addr; bus.arvalid = 1; bus.rready = 1;
    do @(posedge clk); while (!bus.arready);
    @(negedge clk) bus.arvalid = 0;
    while (!bus.rvalid) @(negedge clk);
    data = bus.rdata;
    @(posedge clk);
    @(negedge clk) bus.rready = 0;
  endtask

  task automatic axi_write(input logic [3:0] addr, input logic [31:0] data);
    @(negedge clk);
    bus.awaddr = addr; bus.awvalid = 1; bus.wdata = data; bus.wstrb = 4'hf; bus.wvalid = 1;
    bus.bready = 1;
    do @(posedge clk); while (!(bus.awready && bus.wready));
    @(negedge clk) begin bus.awvalid = 0; bus.wvalid = 0; end
    while (!bus.bvalid) @(negedge clk);
    @(posedge clk);
    @(negedge clk) bus.bready = 0;
  endtask

  task automatic send_serial(input logic [7:0] b);
    logic [9:0] f;
    f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rx = f[i];
      repeat (CPB) @(posedge clk);
    end
  endtask

  // Serial monitor: decodes every frame on tx, checks start/stop bits.
  logic [7:0] got [$];
  initial begin
    logic [7:0] b;
    forever begin
      @(negedge tx);
      repeat (CPB / 2) @(posedge clk);
      check(tx == 1'b0, "start bit low at mid-bit");
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge clk);
        b[i] = tx;
      end
      repeat (CPB) @(posedge clk);
      check(tx == 1'b1, "stop bit high at mid-bit");
      got.push_back(b);
      @(posedge tx or posedge clk);
    end
  end

  logic [31:0] d;
  initial begin
    bus.awvalid = 0; bus.wvalid = 0; bus.arvalid = 0; bus.bready = 0; bus.rready = 0;
    bus.awaddr = 0; bus.araddr = 0; bus.wdata = 0; bus.wstrb = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);

    axi_read(UART_STATUS, d);
    check(d[STAT_RX_VALID] == 0 && d[STAT_TX_FULL] == 0, "idle status");

    // reception
    for (int n = 0; n < 6; n++) begin
      logic [7:0] b;
      b = (n == 0) ? 8'h00 : (n == 1) ? 8'hff : (n == 2) ? 8'ha5 : 8'($urandom);
      send_serial(b);
      repeat (2 * CPB) @(posedge clk);
      axi_read(UART_STATUS, d);
      check(d[STAT_RX_VALID] == 1, "RX_VALID after a frame");
      axi_read(UART_RX_DATA, d);
      check(d[7:0] == b, $sformatf("RX_DATA %02x expected %02x", d[7:0], b));
      axi_read(UART_STATUS, d);
      check(d[STAT_RX_VALID] == 0, "RX_VALID cleared by read");
    end

    // overrun
    send_serial(8'h3c);
    send_serial(8'hc3);
    repeat (2 * CPB) @(posedge clk);
    axi_read(UART_STATUS, d);
    check(d[STAT_RX_VALID] && d[STAT_RX_OVERRUN], "overrun flagged");
    axi_read(UART_STATUS, d);
    check(!d[STAT_RX_OVERRUN], "overrun cleared by STATUS read");
    axi_read(UART_RX_DATA, d);
    check(d[7:0] == 8'h3c, "first byte kept on overrun");

    // transmission: three back-to-back writes, the third while full
    axi_write(UART_TX_DATA, 32'h5a);
    axi_write(UART_TX_DATA, 32'h81);
    axi_read(UART_STATUS, d);
    check(d[STAT_TX_FULL] == 1, "TX_FULL with a byte waiting");
    axi_write(UART_TX_DATA, 32'hee);   // dropped
    repeat (25 * CPB) @(posedge clk);
    axi_read(UART_STATUS, d);
    check(d[STAT_TX_FULL] == 0, "TX_FULL clear after sending");
    // polled transmission of a few random bytes
    for (int n = 0; n < 4; n++) begin
      logic [7:0] b;
      b = 8'($urandom);
      do axi_read(UART_STATUS, d); while (d[STAT_TX_FULL]);
      axi_write(UART_TX_DATA, {24'h0, b});
      repeat (12 * CPB) @(posedge clk);
      check(got.size() == 3 + n && got[got.size() - 1] == b, $sformatf("tx byte %0d", n));
    end
    check(got.size() >= 2 && got[0] == 8'h5a && got[1] == 8'h81, "first two tx bytes");
    check(got.size() == 6, $sformatf("write while full dropped (%0d bytes sent)", got.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
