// tb_axil_uart: checks the UART core through its AXI4-Lite port and its
// serial pins.
//
// A serial driver sends 8N1 frames into rxd and a serial monitor decodes
// txd, both with the bit period the core is built for. The test reads the
// status register after reset, receives bytes and reads them back in order,
// overfills the receive queue to see the full and overrun flags, sends a
// frame with a bad stop bit to see the framing-error flag, flushes the
// receive queue through CTRL, and queues more bytes for sending than the
// transmit queue holds to see the full flag, checking every byte that
// appears on txd.
module tb_axil_uart;
  localparam int CPB   = 8;
  localparam int DEPTH = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic rxd = 1'b1, txd;
  int checks = 0, failures = 0;
  byte unsigned txq [$];

  always #5 clk = ~clk;

  axil_if #(.ADDR_W(4), .DATA_W(32)) bus (.clk, .rst_n);
  axil_uart #(.CLKS_PER_BIT(CPB), .FIFO_DEPTH(DEPTH)) dut (
    .clk, .rst_n, .s(bus.slave), .rxd, .txd
  );

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic axi_read(input logic [3:0] addr, output logic [31:0] data);
    @(negedge clk);
    bus.arvalid = 1'b1;
    bus.araddr  = addr;
    bus.rready  = 1'b1;
    do @(posedge clk); while (!bus.arready);
    @(negedge clk);
    bus.arvalid = 1'b0;
    while (!bus.rvalid) @(negedge clk);
    data = bus.rdata;
    @(posedge clk);
    @(negedge clk);
    bus.rready = 1'b0;
  endtask

  task automatic axi_write(input logic [3:0] addr, input logic [31:0] data);
    @(negedge clk);
    bus.awvalid = 1'b1; bus.awaddr = addr;
    bus.wvalid  = 1'b1; bus.wdata  = data;
    bus.bready  = 1'b1;
    do @(posedge clk); while (!(bus.awready && bus.wready));
    @(negedge clk);
    bus.awvalid = 1'b0; bus.wvalid = 1'b0;
    while (!bus.bvalid) @(negedge clk);
    @(posedge clk);
    @(negedge clk);
    bus.bready = 1'b0;
  endtask

  task automatic ser_send(input byte unsigned b, input bit stop = 1'b1);
    rxd = 1'b0;
    repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      rxd = b[i];
      repeat (CPB) @(posedge clk);
    end
    rxd = stop;
    repeat (CPB) @(posedge clk);
    rxd = 1'b1;
    repeat (CPB) @(posedge clk);
  endtask

  // Serial monitor: start bit edge, then sample in the middle of each bit.
  initial begin
    byte unsigned b;
    forever begin
      @(negedge txd);
      repeat (CPB / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge clk);
        b[i] = txd;
      end
      repeat (CPB) @(posedge clk);
      check(txd == 1'b1, "stop bit on txd");
      txq.push_back(b);
    end
  end

  initial begin
    logic [31:0] d;
    byte unsigned sent [$];
    bit saw_full;
    bus.arvalid = 0; bus.rready = 0; bus.awvalid = 0; bus.wvalid = 0; bus.bready = 0;
    bus.araddr = '0; bus.awaddr = '0; bus.wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    axi_read(4'h8, d);
    check(d[3:0] == 4'b0100, $sformatf("STAT after reset = %h", d));

    // Receive three bytes, read them back in order.
    sent = '{8'h5A, 8'h00, 8'hF6};
    foreach (sent[i]) ser_send(sent[i]);
    axi_read(4'h8, d);
    check(d[0] == 1'b1, "RX valid flag after receiving");
    foreach (sent[i]) begin
      axi_read(4'h0, d);
      check(d[7:0] == sent[i], $sformatf("RX byte %0d = %h expected %h", i, d[7:0], sent[i]));
    end
    axi_read(4'h8, d);
    check(d[0] == 1'b0, "RX valid flag after draining");

    // Overfill the receive queue.
    sent.delete();
    for (int i = 0; i < DEPTH + 2; i++) begin
      sent.push_back(8'($urandom));
      ser_send(sent[i]);
    end
    axi_read(4'h8, d);
    check(d[1] == 1'b1, "RX full flag");
    check(d[5] == 1'b1, "overrun flag");
    axi_read(4'h8, d);
    check(d[5] == 1'b0, "overrun flag cleared by STAT read");
    for (int i = 0; i < DEPTH; i++) begin
      axi_read(4'h0, d);
      check(d[7:0] == sent[i], $sformatf("RX byte after overrun %0d", i));
    end

    // Framing error: stop bit low, the byte must not be queued.
    ser_send(8'hA5, 1'b0);
    axi_read(4'h8, d);
    check(d[6] == 1'b1, "framing error flag");
    check(d[0] == 1'b0, "bad frame not queued");

    // Flush the receive queue.
    ser_send(8'h11);
    ser_send(8'h22);
    axi_write(4'hC, 32'h2);
    axi_read(4'h8, d);
    check(d[0] == 1'b0, "RX queue flushed");

    // Transmit more than the queue holds.
    sent.delete();
    saw_full = 0;
    for (int i = 0; i < DEPTH + 3; i++) begin
      do begin
        axi_read(4'h8, d);
        if (d[3]) saw_full = 1;
      end while (d[3]);
      sent.push_back(8'($urandom));
      axi_write(4'h4, {24'd0, sent[i]});
    end
    check(saw_full, "TX full flag seen");
    repeat ((DEPTH + 5) * 10 * CPB) @(posedge clk);
    check(txq.size() == sent.size(), $sformatf("%0d bytes on txd, expected %0d", txq.size(), sent.size()));
    foreach (sent[i])
      if (i < txq.size()) check(txq[i] == sent[i], $sformatf("TX byte %0d = %h expected %h", i, txq[i], sent[i]));
    axi_read(4'h8, d);
    check(d[2] == 1'b1, "TX empty after sending");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
