// klt_testbed_top: FPGA testbed for the six 8-point KLT approximation cores.
//
// A host computer sends eight signed 8-bit coefficients over a serial line;
// the result of the selected transform comes back over the same line. Inside,
// the UART core (axil_uart) holds the serial link, the controller (klt_ctrl)
// reads the received bytes and writes the outgoing ones through an AXI4-Lite
// port, and the six pipelined transform cores (klt_transform for T1, T3, T13,
// T16, T17, T18) all receive every input vector. xform_sel chooses whose
// output is returned; it is sampled when the vector enters the cores, so it
// may be changed between operations without a reset. Each output coefficient
// is sign-extended to 16 bits and returned as two bytes, low byte first.
//
// The published work built and measured each transform core on its own in
// a testbed of this shape (host, UART, AXI4, controller); placing all six
// behind one selector, so one bitstream covers every transform, is this
// design's choice. CLKS_PER_BIT = 868 gives 115200 baud at a 100 MHz clock,
// also this design's choice.
//
// Ports: clk, synchronous active-low rst_n, serial uart_rxd/uart_txd (8N1,
// idle high), xform_sel, and two status counters: vec_count (operations
// completed) and tx_stalls (times the controller found the transmit queue
// full).
module klt_testbed_top #(
  parameter int CLKS_PER_BIT = 868,
  parameter int FIFO_DEPTH   = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            uart_rxd,
  output logic            uart_txd,
  input  klt_pkg::xform_e xform_sel,
  output logic [15:0]     vec_count,
  output logic [15:0]     tx_stalls
);

  import klt_pkg::*;

  axil_if #(.ADDR_W(4), .DATA_W(32)) bus (.clk, .rst_n);

  axil_uart #(.CLKS_PER_BIT(CLKS_PER_BIT), .FIFO_DEPTH(FIFO_DEPTH)) u_uart (
    .clk, .rst_n, .s(bus.slave), .rxd(uart_rxd), .txd(uart_txd)
  );

  logic signed [7:0]  x [N];
  logic               x_valid;
  logic signed [15:0] y_sel [N];
  logic               y_sel_valid;

  klt_ctrl u_ctrl (
    .clk, .rst_n, .m(bus.master), .x, .x_valid,
    .y(y_sel), .y_valid(y_sel_valid), .vec_count, .tx_stalls
  );

  // Transform cores, each sign-extended to 16 bits.
  logic               core_valid [NUM_XFORMS];
  logic signed [15:0] core_y     [NUM_XFORMS][N];

  for (genvar t = 0; t < NUM_XFORMS; t++) begin : g_core
    localparam xform_e XF = xform_e'(t);
    localparam int     OW = out_width(XF, IN_W);
    logic signed [OW-1:0] y [N];

    klt_transform #(.XFORM(XF), .IN_W(IN_W)) u_core (
      .clk, .rst_n, .in_valid(x_valid), .x, .out_valid(core_valid[t]), .y
    );

    always_comb
      for (int i = 0; i < N; i++) core_y[t][i] = 16'(y[i]);
  end

  // Selection, held for the whole operation.
  xform_e sel_q;

  always_ff @(posedge clk) begin
    if (!rst_n)       sel_q <= XF_T1;
    else if (x_valid) sel_q <= xform_sel;
  end

  always_comb begin
    y_sel_valid = core_valid[int'(sel_q)];
    y_sel       = core_y[int'(sel_q)];
  end

endmodule
