// axil_uart: UART core of the testbed, with an AXI4-Lite register port.
//
// Links the FPGA to the host computer over an 8N1 serial line and lets the
// controller reach it through four 32-bit registers (byte offsets):
//   0x0  RX     read: oldest received byte in [7:0], removed by the read
//   0x4  TX     write: byte [7:0] queued for sending
//   0x8  STAT   read: [0] RX holds data, [1] RX full, [2] TX empty,
//               [3] TX full, [5] receive overrun (cleared by reading STAT),
//               [6] framing error (cleared by reading STAT)
//   0xC  CTRL   write: [0] flush TX queue, [1] flush RX queue
// Received and outgoing bytes are buffered in FIFO_DEPTH-entry queues; a
// byte that arrives while the RX queue is full is dropped and sets the
// overrun flag. Reads of unused offsets return zero, writes to them are
// ignored; every access gets an OKAY response.
//
// The published testbed only names a UART core that talks to the controller
// over AXI4; this register map and queue depth follow the common FPGA UART
// core such testbeds use and are this design's choice.
//
// Timing: a read is accepted (ARREADY) in the cycle after ARVALID rises and
// its data is returned in the next cycle; a write is accepted when address
// and data are both valid, and its response follows one cycle later.
module axil_uart #(
  parameter int CLKS_PER_BIT = 868,
  parameter int FIFO_DEPTH   = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  axil_if.slave  s,
  input  logic   rxd,
  output logic   txd
);

  localparam logic [1:0] REG_RX = 2'd0, REG_TX = 2'd1, REG_STAT = 2'd2, REG_CTRL = 2'd3;

  // Serial receiver and its queue
  logic       rx_valid, rx_ferr;
  logic [7:0] rx_byte, rxq_data;
  logic       rxq_empty, rxq_full, rxq_pop, rxq_flush;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rxd, .valid(rx_valid), .data(rx_byte), .frame_err(rx_ferr)
  );

  sync_fifo #(.W(8), .DEPTH(FIFO_DEPTH)) u_rxq (
    .clk, .rst_n, .flush(rxq_flush), .push(rx_valid), .wr_data(rx_byte),
    .pop(rxq_pop), .rd_data(rxq_data), .empty(rxq_empty), .full(rxq_full)
  );

  // Transmit queue and serial transmitter
  logic       txq_push, txq_flush, txq_empty, txq_full, tx_busy;
  logic [7:0] txq_data;
  wire        tx_start = !txq_empty && !tx_busy;

  sync_fifo #(.W(8), .DEPTH(FIFO_DEPTH)) u_txq (
    .clk, .rst_n, .flush(txq_flush), .push(txq_push), .wr_data(s.wdata[7:0]),
    .pop(tx_start), .rd_data(txq_data), .empty(txq_empty), .full(txq_full)
  );

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .start(tx_start), .data(txq_data), .busy(tx_busy), .txd
  );

  // Write channel: address and data are taken together.
  wire wr_fire = s.awvalid && s.wvalid && !s.bvalid;
  assign s.awready = wr_fire;
  assign s.wready  = wr_fire;
  assign s.bresp   = 2'b00;

  assign txq_push  = wr_fire && (s.awaddr[3:2] == REG_TX);
  assign txq_flush = wr_fire && (s.awaddr[3:2] == REG_CTRL) && s.wdata[0];
  assign rxq_flush = wr_fire && (s.awaddr[3:2] == REG_CTRL) && s.wdata[1];

  always_ff @(posedge clk) begin
    if (!rst_n)        s.bvalid <= 1'b0;
    else if (wr_fire)  s.bvalid <= 1'b1;
    else if (s.bready) s.bvalid <= 1'b0;
  end

  // Read channel
  logic overrun, frame_err;
  wire  rd_fire = s.arvalid && s.arready;
  assign rxq_pop = rd_fire && (s.araddr[3:2] == REG_RX);
  assign s.rresp = 2'b00;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s.arready <= 1'b0;
      s.rvalid  <= 1'b0;
      s.rdata   <= '0;
    end else begin
      s.arready <= s.arvalid && !s.arready && !s.rvalid;
      if (rd_fire) begin
        s.rvalid <= 1'b1;
        case (s.araddr[3:2])
          REG_RX:   s.rdata <= {24'd0, rxq_empty ? 8'd0 : rxq_data};
          REG_STAT: s.rdata <= {25'd0, frame_err, overrun, 1'b0,
                                txq_full, txq_empty, rxq_full, !rxq_empty};
          default:  s.rdata <= '0;
        endcase
      end else if (s.rready) begin
        s.rvalid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      overrun   <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      if (rd_fire && s.araddr[3:2] == REG_STAT) begin
        overrun   <= 1'b0;
        frame_err <= 1'b0;
      end
      if (rx_valid && rxq_full) overrun <= 1'b1;
      if (rx_ferr)              frame_err <= 1'b1;
    end
  end

endmodule
