// axi4l_if -- AXI4-Lite link between the testbed controller (master) and
// the UART (slave).
//
// The testbed connects its controller to the UART core over AMBA AXI4; this
// design uses the AXI4-Lite subset (single 32-bit transfers, no bursts, no
// IDs), which is all a byte-wide register interface needs.  Five channels:
// write address (aw*), write data (w*), write response (b*), read address
// (ar*) and read data (r*), each with a valid/ready handshake: a transfer
// happens on a rising clock edge where both are high.
//
// The assertions encode the AXI handshake rule that a source, once it raises
// valid, keeps valid high and its payload stable until ready is seen.
interface axi4l_if #(
  parameter int ADDR_W = 4,
  parameter int DATA_W = 32
) (
  input logic clk,
  input logic rst_n
);

  logic [ADDR_W-1:0]   awaddr;
  logic                awvalid, awready;
  logic [DATA_W-1:0]   wdata;
  logic [DATA_W/8-1:0] wstrb;
  logic                wvalid, wready;
  logic [1:0]          bresp;
  logic                bvalid, bready;
  logic [ADDR_W-1:0]   araddr;
  logic                arvalid, arready;
  logic [DATA_W-1:0]   rdata;
  logic [1:0]          rresp;
  logic                rvalid, rready;

  modport master (
    input  clk, rst_n,
    output awaddr, awvalid, wdata, wstrb, wvalid, bready, araddr, arvalid, rready,
    input  awready, wready, bresp, bvalid, arready, rdata, rresp, rvalid
  );

  modport slave (
    input  clk, rst_n,
    input  awaddr, awvalid, wdata, wstrb, wvalid, bready, araddr, arvalid, rready,
    output awready, wready, bresp, bvalid, arready, rdata, rresp, rvalid
  );

  // Handshake rules: valid held, payload stable, until accepted.
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    awvalid && !awready |=> awvalid && $stable(awaddr));
  a_w_hold:  assert property (@(posedge clk) disable iff (!rst_n)
    wvalid && !wready |=> wvalid && $stable(wdata) && $stable(wstrb));
  a_b_hold:  assert property (@(posedge clk) disable iff (!rst_n)
    bvalid && !bready |=> bvalid && $stable(bresp));
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    arvalid && !arready |=> arvalid && $stable(araddr));
  a_r_hold:  assert property (@(posedge clk) disable iff (!rst_n)
    rvalid && !rready |=> rvalid && $stable(rdata) && $stable(rresp));

endinterface
