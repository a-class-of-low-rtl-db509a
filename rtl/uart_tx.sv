// uart_tx -- serial transmitter, 8N1, least significant bit first, line
// idle high.
//
// A one-clock start pulse while busy is low loads data; the module then
// drives the start bit, eight data bits and the stop bit, each CLKS_PER_BIT
// clocks long, with busy high until the stop bit has been sent.  Frame
// format and bit rate are choices of this design.
module uart_tx #(
  parameter int CLKS_PER_BIT = 868    // 100 MHz clock / 115200 baud
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] data,
  output logic       busy,
  output logic       tx
);

  localparam int CW = $clog2(CLKS_PER_BIT + 1);

  logic [8:0]    frame;               // stop bit, data[7:0]; sent LSB first
  logic [3:0]    nbits;               // bit periods still to send
  logic [CW-1:0] cnt;

  assign busy = (nbits != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame <= '1;
      nbits <= '0;
      cnt   <= '0;
      tx    <= 1'b1;
    end else if (nbits == 0) begin
      if (start) begin                // start bit goes out at once
        frame <= {1'b1, data};
        tx    <= 1'b0;
        nbits <= 4'd10;
        cnt   <= CW'(CLKS_PER_BIT - 1);
      end
    end else if (cnt != 0) begin
      cnt <= cnt - 1'b1;
    end else begin                    // end of a bit period
      nbits <= nbits - 1'b1;
      cnt   <= CW'(CLKS_PER_BIT - 1);
      if (nbits == 4'd1) begin
        tx <= 1'b1;
      end else begin
        tx    <= frame[0];
        frame <= {1'b1, frame[8:1]};
      end
    end
  end

endmodule
