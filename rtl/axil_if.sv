// axil_if: AXI4-Lite bundle between the testbed controller (master) and the
// UART core (slave).
//
// Carries the five AXI4-Lite channels (write address, write data, write
// response, read address, read data) without burst, ID, cache or protection
// signals; the testbed needs single 32-bit register accesses only. The
// assertions encode the handshake rules every channel obeys: once VALID is
// raised it stays high, with its payload unchanged, until READY is seen.
interface axil_if #(
  parameter int ADDR_W = 4,
  parameter int DATA_W = 32
) (
  input logic clk,
  input logic rst_n
);
  logic              awvalid, awready;
  logic [ADDR_W-1:0] awaddr;
  logic              wvalid, wready;
  logic [DATA_W-1:0] wdata;
  logic              bvalid, bready;
  logic [1:0]        bresp;
  logic              arvalid, arready;
  logic [ADDR_W-1:0] araddr;
  logic              rvalid, rready;
  logic [DATA_W-1:0] rdata;
  logic [1:0]        rresp;

  modport master (
    output awvalid, awaddr, wvalid, wdata, bready, arvalid, araddr, rready,
    input  awready, wready, bvalid, bresp, arready, rvalid, rdata, rresp
  );

  modport slave (
    input  awvalid, awaddr, wvalid, wdata, bready, arvalid, araddr, rready,
    output awready, wready, bvalid, bresp, arready, rvalid, rdata, rresp
  );

  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    awvalid && !awready |=> awvalid && $stable(awaddr));
  a_w_hold:  assert property (@(posedge clk) disable iff (!rst_n)
    wvalid && !wready |=> wvalid && $stable(wdata));
  a_b_hold:  assert property (@(posedge clk) disable iff (!rst_n)
    bvalid && !bready |=> bvalid);
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    arvalid && !arready |=> arvalid && $stable(araddr));
  a_r_hold:  assert property (@(posedge clk) disable iff (!rst_n)
    rvalid && !rready |=> rvalid && $stable(rdata));
endinterface
