// dct_ctrl -- testbed controller state machine.
//
// Bridges the UART (reached as an AXI4-Lite master) and the transform core.
// One packet is handled at a time:
//   1. poll the UART STATUS register until RX_VALID is set, then read
//      RX_DATA; repeat until eight bytes x0..x7 (signed 8-bit) are collected;
//   2. present the eight samples to the core with core_valid high for one
//      clock, then wait for core_out_valid and capture X0..X7;
//   3. for each output, in the order X0..X7, send two bytes (the value as a
//      16-bit two's-complement word, low byte first), each time polling
//      STATUS until TX_FULL is clear and then writing TX_DATA;
//   4. count the packet and return to 1.
// Every AXI access is a single transfer: the address (and, for writes, the
// data) is held valid until accepted, then the response is awaited.  The
// published testbed states only that the controller receives a packet of
// eight 8-bit coefficients, passes it to the design and returns the eight
// outputs; the polling scheme, byte order and 16-bit output framing are this
// design's choices.  core_cycles reports the clocks from core_valid to
// core_out_valid of the last packet (the core latency).
module dct_ctrl
  import dct_pkg::*;
#(
  parameter int OUT_W = 11            // width of the core outputs (<= 16)
) (
  axi4l_if.master                   bus,
  output logic                      core_valid,
  output logic signed [7:0]         core_x [8],
  input  logic                      core_out_valid,
  input  logic signed [OUT_W-1:0]   core_X [8],
  output logic [15:0]               packets,
  output logic [7:0]                core_cycles
);

  typedef enum logic [3:0] {
    RX_STAT_AR, RX_STAT_R, RX_DATA_AR, RX_DATA_R,
    CORE_START, CORE_WAIT,
    TX_STAT_AR, TX_STAT_R, TX_WRITE, TX_RESP
  } state_t;

  logic clk, rst_n;
  assign clk   = bus.clk;
  assign rst_n = bus.rst_n;

  state_t             state;
  logic [3:0]         idx;            // byte index within the packet
  logic signed [15:0] res [8];        // captured outputs, sign-extended
  logic               aw_done, w_done;

  // Byte idx of the result stream: word idx/2, low byte when idx is even.
  logic [15:0] word;
  logic [7:0]  tx_byte;
  assign word    = res[idx[3:1]];
  assign tx_byte = idx[0] ? word[15:8] : word[7:0];

  assign bus.wstrb  = 4'b0001;
  assign bus.awaddr = UART_TX_DATA;
  assign bus.wdata  = {24'h0, tx_byte};
  assign bus.bready = (state == TX_RESP);
  assign bus.rready = (state == RX_STAT_R) || (state == RX_DATA_R) || (state == TX_STAT_R);
  assign bus.awvalid = (state == TX_WRITE) && !aw_done;
  assign bus.wvalid  = (state == TX_WRITE) && !w_done;
  assign bus.arvalid = (state == RX_STAT_AR) || (state == RX_DATA_AR) || (state == TX_STAT_AR);
  assign bus.araddr  = (state == RX_DATA_AR) ? UART_RX_DATA : UART_STATUS;

  assign core_valid = (state == CORE_START);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= RX_STAT_AR;
      idx         <= '0;
      aw_done     <= 1'b0;
      w_done      <= 1'b0;
      packets     <= '0;
      core_cycles <= '0;
      for (int i = 0; i < 8; i++) begin
        core_x[i] <= '0;
        res[i]    <= '0;
      end
    end else begin
      case (state)
        RX_STAT_AR: if (bus.arready) state <= RX_STAT_R;
        RX_STAT_R:  if (bus.rvalid)
                      state <= bus.rdata[STAT_RX_VALID] ? RX_DATA_AR : RX_STAT_AR;
        RX_DATA_AR: if (bus.arready) state <= RX_DATA_R;
        RX_DATA_R:  if (bus.rvalid) begin
                      core_x[idx[2:0]] <= bus.rdata[7:0];
                      if (idx == 4'(N_POINTS - 1)) begin
                        idx   <= '0;
                        state <= CORE_START;
                      end else begin
                        idx   <= idx + 1'b1;
                        state <= RX_STAT_AR;
                      end
                    end
        CORE_START: begin
                      core_cycles <= 8'd1;
                      state       <= CORE_WAIT;
                    end
        CORE_WAIT:  if (core_out_valid) begin
                      for (int i = 0; i < 8; i++) res[i] <= 16'(core_X[i]);
                      state <= TX_STAT_AR;
                    end else begin
                      core_cycles <= core_cycles + 1'b1;
                    end
        TX_STAT_AR: if (bus.arready) state <= TX_STAT_R;
        TX_STAT_R:  if (bus.rvalid)
                      state <= bus.rdata[STAT_TX_FULL] ? TX_STAT_AR : TX_WRITE;
        TX_WRITE:   begin
                      if (bus.awready) aw_done <= 1'b1;
                      if (bus.wready)  w_done  <= 1'b1;
                      if ((aw_done || bus.awready) && (w_done || bus.wready)) begin
                        aw_done <= 1'b0;
                        w_done  <= 1'b0;
                        state   <= TX_RESP;
                      end
                    end
        TX_RESP:    if (bus.bvalid) begin
                      if (idx == 4'(N_POINTS * OUT_BYTES - 1)) begin
                        idx     <= '0;
                        packets <= packets + 1'b1;
                        state   <= RX_STAT_AR;
                      end else begin
                        idx   <= idx + 1'b1;
                        state <= TX_STAT_AR;
                      end
                    end
        default:    state <= RX_STAT_AR;
      endcase
    end
  end

endmodule
