// tb_dct_ctrl -- self-checking testbench for the testbed controller.
//
// The testbench stands in for both neighbours of the controller: an
// AXI4-Lite slave with the UART register map (received bytes appear after
// random delays, TX_FULL is reported busy at random, ready signals come
// late at random) and a transform core that answers core_valid after a
// fixed latency with output values chosen here (full 11-bit range).  It
// checks that each packet's eight bytes reach core_x in order, that exactly
// one core_valid pulse is issued per packet, that the sixteen bytes written
// to TX_DATA are the outputs as 16-bit little-endian words, that no byte is
// written while TX_FULL is reported, that core_cycles equals the latency and
// that packets counts.  The interface assertions check the master side of
// every AXI handshake.
module tb_dct_ctrl;
  import dct_pkg::*;
  localparam int OUT_W = 11;
  localparam int LAT = 5;
  localparam int NPKT = 20;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  axi4l_if #(.ADDR_W(4), .DATA_W(32)) bus (.clk, .rst_n);
  logic                     core_valid, core_out_valid;
  logic signed [7:0]        core_x [8];
  logic signed [OUT_W-1:0]  core_X [8];
  logic [15:0]              packets;
  logic [7:0]               core_cycles;

  dct_ctrl #(.OUT_W(OUT_W)) dut (.bus(bus.master), .core_valid, .core_x, .core_out_valid, .core_X,
                                 .packets, .core_cycles);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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

  // ---------------- UART register model (AXI4-Lite slave) ----------------
  logic [7:0] rx_q [$];               // bytes "received from the PC"
  logic [7:0] tx_q [$];               // bytes written to TX_DATA
  bit   rx_avail = 0;                 // a byte is visible in RX_DATA
  bit   tx_full  = 0;
  int   tx_full_stalls = 0, rx_empty_polls = 0;

  // read channel
  logic [7:0] rx_byte;
  logic [3:0] raddr;
  initial begin
    bus.arready = 0; bus.rvalid = 0; bus.rdata = 0; bus.rresp = 0;
    forever begin
      @(posedge clk);
      if (bus.arvalid && !bus.rvalid && !bus.arready) begin
        repeat ($urandom_range(0, 2)) @(posedge clk);
        @(negedge clk) bus.arready = 1;
        @(posedge clk);
        raddr = bus.araddr;
        @(negedge clk) begin
          bus.arready = 0;
          case (raddr)
            UART_STATUS: begin
              bus.rdata = {28'h0, tx_full, 2'b00, rx_avail};
              if (!rx_avail) rx_empty_polls++;
              if (tx_full) tx_full_stalls++;
            end
            UART_RX_DATA: begin
              check(rx_avail, "RX_DATA read without RX_VALID");
              rx_byte = rx_q.pop_front();
              bus.rdata = {24'h0, rx_byte};
              rx_avail = 0;
            end
            default: bus.rdata = 32'hdead;
          endcase
          repeat ($urandom_range(0, 2)) @(negedge clk);
          bus.rvalid = 1;
        end
        do @(posedge clk); while (!bus.rready);
        @(negedge clk) bus.rvalid = 0;
      end
    end
  end

  // write channel
  initial begin
    bus.awready = 0; bus.wready = 0; bus.bvalid = 0; bus.bresp = 0;
    forever begin
      @(posedge clk);
      if (bus.awvalid && bus.wvalid) begin
        repeat ($urandom_range(0, 2)) @(posedge clk);
        @(negedge clk) begin bus.awready = 1; bus.wready = 1; end
        @(posedge clk);
        check(bus.awaddr == UART_TX_DATA, "write goes to TX_DATA");
        check(!tx_full, "no write while TX_FULL");
        tx_q.push_back(bus.wdata[7:0]);
        tx_full = 1;
        @(negedge clk) begin bus.awready = 0; bus.wready = 0; bus.bvalid = 1; end
        do @(posedge clk); while (!bus.bready);
        @(negedge clk) bus.bvalid = 0;
      end
    end
  end

  // TX_FULL drains and received bytes show up after random delays
  always @(negedge clk) begin
    if (rst_n) begin
      if (tx_full && $urandom_range(0, 7) == 0) tx_full <= 0;
      if (!rx_avail && rx_q.size() > 0 && $urandom_range(0, 7) == 0) rx_avail <= 1;
    end
  end

  // ---------------- core model ----------------
  int pend [$];
  int out_vals [8];
  logic signed [7:0] seen_x [$];
  int core_pulses = 0;
  initial begin
    core_out_valid = 0;
    for (int i = 0; i < 8; i++) core_X[i] = '0;
    forever begin
      @(posedge clk);
      if (core_valid) begin
        core_pulses++;
        for (int i = 0; i < 8; i++) seen_x.push_back(core_x[i]);
        repeat (LAT - 1) @(posedge clk);
        @(negedge clk) begin
          core_out_valid = 1;
          for (int i = 0; i < 8; i++) begin
            out_vals[i] = $urandom_range(0, 2047) - 1024;
            core_X[i] = OUT_W'(out_vals[i]);
            pend.push_back(out_vals[i]);
          end
        end
        @(negedge clk) core_out_valid = 0;
      end
    end
  end

  logic [7:0] sent [$];
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NPKT; p++) begin
      for (int i = 0; i < 8; i++) begin
        logic [7:0] b;
        b = 8'($urandom);
        rx_q.push_back(b);
        sent.push_back(b);
      end
      wait (packets == 16'(p + 1));
      @(posedge clk);
      check(core_cycles == 8'(LAT), $sformatf("core_cycles=%0d", core_cycles));
    end
    repeat (10) @(posedge clk);
    check(core_pulses == NPKT, "one core_valid per packet");
    check(seen_x.size() == 8 * NPKT, "inputs handed to the core");
    for (int k = 0; k < seen_x.size() && k < sent.size(); k++)
      check(seen_x[k] == sent[k], $sformatf("core_x byte %0d: %02x vs %02x", k, seen_x[k], sent[k]));
    check(tx_q.size() == 16 * NPKT, $sformatf("%0d bytes sent back", tx_q.size()));
    for (int k = 0; k + 1 < tx_q.size() && k / 2 < pend.size(); k += 2)
      check({tx_q[k + 1], tx_q[k]} == 16'(pend[k / 2]), $sformatf("output word %0d", k / 2));
    check(tx_full_stalls > 0 && rx_empty_polls > 0, "TX_FULL and empty RX polls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
