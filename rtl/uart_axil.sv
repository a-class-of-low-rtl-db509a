// uart_axil -- UART with an AXI4-Lite register interface.
//
// The testbed's UART exchanges bytes with the PC over the serial pins and
// with the controller over AXI4; its register map is not published, so this
// design uses a small one (32-bit registers, byte addresses):
//
//   0x0  RX_DATA  read : received byte in [7:0]; reading it empties the
//                        receive buffer
//   0x4  TX_DATA  write: byte in [7:0] to send; ignored while TX_FULL
//   0x8  STATUS   read : [0] RX_VALID  a received byte is waiting
//                        [1] RX_OVERRUN a byte arrived while one was waiting
//                            (the new byte is lost; cleared by reading STATUS)
//                        [3] TX_FULL   the transmit holding register is busy
//
// Receive and transmit each have one holding register in front of the
// shift register.  AXI writes are accepted in the clock where both awvalid
// and wvalid are high (awready = wready); the response follows one clock
// later with OKAY.  A read address is accepted when no read data is pending
// and the data appears on the next clock.  Unmapped addresses read as zero.
module uart_axil
  import dct_pkg::*;
#(
  parameter int CLKS_PER_BIT = 868    // 100 MHz clock / 115200 baud
) (
  axi4l_if.slave bus,
  input  logic   rx,
  output logic   tx
);

  localparam logic [3:0] ADDR_RX   = UART_RX_DATA;
  localparam logic [3:0] ADDR_TX   = UART_TX_DATA;
  localparam logic [3:0] ADDR_STAT = UART_STATUS;

  logic       clk, rst_n;
  assign clk   = bus.clk;
  assign rst_n = bus.rst_n;

  logic       rx_strobe, tx_busy, tx_start;
  logic [7:0] rx_byte;
  logic [7:0] rx_buf, tx_buf;
  logic       rx_full, rx_overrun, tx_full;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rx, .valid(rx_strobe), .data(rx_byte)
  );

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .start(tx_start), .data(tx_buf), .busy(tx_busy), .tx
  );

  logic wr_fire, rd_fire;
  assign wr_fire = bus.awvalid && bus.wvalid && !bus.bvalid;
  assign rd_fire = bus.arvalid && !bus.rvalid;

  assign bus.awready = wr_fire;
  assign bus.wready  = wr_fire;
  assign bus.arready = rd_fire;
  assign bus.bresp   = 2'b00;
  assign bus.rresp   = 2'b00;

  assign tx_start = tx_full && !tx_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bus.bvalid <= 1'b0;
      bus.rvalid <= 1'b0;
      bus.rdata  <= '0;
      rx_buf     <= '0;
      rx_full    <= 1'b0;
      rx_overrun <= 1'b0;
      tx_buf     <= '0;
      tx_full    <= 1'b0;
    end else begin
      // write channel
      if (wr_fire) begin
        bus.bvalid <= 1'b1;
        if (bus.awaddr == ADDR_TX && bus.wstrb[0] && !tx_full) begin
          tx_buf  <= bus.wdata[7:0];
          tx_full <= 1'b1;
        end
      end else if (bus.bready) begin
        bus.bvalid <= 1'b0;
      end
      if (tx_start) tx_full <= 1'b0;

      // read channel
      if (rd_fire) begin
        bus.rvalid <= 1'b1;
        case (bus.araddr)
          ADDR_RX:   bus.rdata <= {24'h0, rx_buf};
          ADDR_STAT: bus.rdata <= {28'h0, tx_full, 1'b0, rx_overrun, rx_full};
          default:   bus.rdata <= '0;
        endcase
      end else if (bus.rready) begin
        bus.rvalid <= 1'b0;
      end

      // receive holding register
      if (rd_fire && bus.araddr == ADDR_STAT) rx_overrun <= 1'b0;
      if (rd_fire && bus.araddr == ADDR_RX)   rx_full    <= 1'b0;
      if (rx_strobe) begin
        if (rx_full && !(rd_fire && bus.araddr == ADDR_RX)) begin
          rx_overrun <= 1'b1;
        end else begin
          rx_buf  <= rx_byte;
          rx_full <= 1'b1;
        end
      end
    end
  end

endmodule
