// dct_testbed_top -- FPGA testbed around the 8-point T(a) transform.
//
// Structure (the published test scheme):
//
//   PC <--rx/tx--> UART (uart_axil) <--AXI4-Lite--> controller (dct_ctrl)
//                                                       |
//                                             transform core (dct8_core)
//
// The PC sends a packet of eight signed 8-bit samples over the serial line;
// the controller reads them out of the UART, runs them through the
// pipelined transform and sends the eight outputs back, each as a 16-bit
// two's-complement word, low byte first, in the order X0..X7.  The PC checks
// them against a software model.
//
// Parameters: A selects the transform of the class (default j = 7),
// CLKS_PER_BIT sets the serial bit time in clocks (default 868: 115200 baud
// from a 100 MHz clock, a choice of this design).  Reset is asynchronous,
// active low.  packets counts completed packets; core_cycles is the core
// latency measured by the controller on the last packet.
module dct_testbed_top
  import dct_pkg::*;
#(
  parameter avec2x_t A            = A_T7,
  parameter int      CLKS_PER_BIT = 868
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        uart_rx,        // serial data from the PC
  output logic        uart_tx,        // serial data to the PC
  output logic [15:0] packets,
  output logic [7:0]  core_cycles
);

  localparam int IN_W  = 8;
  localparam int OUT_W = IN_W + 2 + k_grow(A);

  axi4l_if #(.ADDR_W(4), .DATA_W(32)) bus (.clk, .rst_n);

  logic                    core_valid, core_out_valid;
  logic signed [IN_W-1:0]  core_x [8];
  logic signed [OUT_W-1:0] core_X [8];

  uart_axil #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .bus(bus.slave), .rx(uart_rx), .tx(uart_tx)
  );

  dct_ctrl #(.OUT_W(OUT_W)) u_ctrl (
    .bus(bus.master), .core_valid, .core_x, .core_out_valid, .core_X,
    .packets, .core_cycles
  );

  dct8_core #(.IN_W(IN_W), .A(A)) u_core (
    .clk, .rst_n, .in_valid(core_valid), .x(core_x),
    .out_valid(core_out_valid), .X(core_X)
  );

endmodule
