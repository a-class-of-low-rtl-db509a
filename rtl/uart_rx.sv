// uart_rx -- serial receiver, 8 data bits, no parity, 1 stop bit (8N1),
// least significant bit first, line idle high.
//
// The rx pin is synchronised with two flip-flops.  A falling edge starts a
// frame; the start bit is re-checked half a bit later, after which every bit
// is sampled in the middle of its period, CLKS_PER_BIT clocks apart.  When
// the stop bit reads high, data holds the byte and valid pulses for one
// clock; a frame whose stop bit is low is dropped.  Frame format and bit rate
// are choices of this design (the testbed only states that a UART is used).
module uart_rx #(
  parameter int CLKS_PER_BIT = 868    // 100 MHz clock / 115200 baud
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic       valid,
  output logic [7:0] data
);

  typedef enum logic [1:0] {IDLE, START, DATA, STOP} state_t;

  localparam int CW = $clog2(CLKS_PER_BIT + 1);

  state_t          state;
  logic [CW-1:0]   cnt;
  logic [2:0]      bitn;
  logic [7:0]      shreg;
  logic            rx_m, rx_s;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) {rx_m, rx_s} <= 2'b11;
    else        {rx_m, rx_s} <= {rx, rx_m};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      cnt   <= '0;
      bitn  <= '0;
      shreg <= '0;
      data  <= '0;
      valid <= 1'b0;
    end else begin
      valid <= 1'b0;
      case (state)
        IDLE: if (!rx_s) begin
          state <= START;
          cnt   <= CW'(CLKS_PER_BIT / 2);
        end
        START: if (cnt == 0) begin
          if (!rx_s) begin
            state <= DATA;
            cnt   <= CW'(CLKS_PER_BIT - 1);
            bitn  <= '0;
          end else begin
            state <= IDLE;              // glitch, not a start bit
          end
        end else cnt <= cnt - 1'b1;
        DATA: if (cnt == 0) begin
          shreg <= {rx_s, shreg[7:1]};
          cnt   <= CW'(CLKS_PER_BIT - 1);
          if (bitn == 3'd7) state <= STOP;
          bitn  <= bitn + 1'b1;
        end else cnt <= cnt - 1'b1;
        STOP: if (cnt == 0) begin
          state <= IDLE;
          if (rx_s) begin
            data  <= shreg;
            valid <= 1'b1;
          end
        end else cnt <= cnt - 1'b1;
        default: state <= IDLE;
      endcase
    end
  end

endmodule
