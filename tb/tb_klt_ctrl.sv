// tb_klt_ctrl: checks the testbed controller against a model UART register
// file and a model transform.
//
// The model slave answers AXI4-Lite reads and writes after random delays,
// accepting the write address and the write data in different cycles, and
// keeps the host's bytes in a receive queue that it fills a few bytes at a
// time. Its status register reports the transmit queue full on some polls,
// so the controller must hold bytes back. The model transform returns T3 x
// three cycles after x_valid. The test checks that every input vector reaches
// the transform intact with one x_valid pulse, that the sixteen returned
// bytes per vector encode T3 x as 16-bit little-endian words, and that the
// operation and stall counters agree with what happened.
module tb_klt_ctrl;
  import tb_klt_ref_pkg::vec8_t;
  import tb_klt_ref_pkg::tmul;
  import tb_klt_ref_pkg::rand_range;

  localparam int NVEC = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  axil_if #(.ADDR_W(4), .DATA_W(32)) bus (.clk, .rst_n);

  logic signed [7:0]  x [8];
  logic               x_valid;
  logic signed [15:0] y [8];
  logic               y_valid;
  logic [15:0]        vec_count, tx_stalls;

  klt_ctrl dut (
    .clk, .rst_n, .m(bus.master), .x, .x_valid, .y, .y_valid, .vec_count, .tx_stalls
  );

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- model transform: T3, three cycles ----------------
  vec8_t xin_log [$];
  vec8_t ypipe [3];
  logic  vpipe [3];
  int    fires = 0;

  always @(posedge clk) begin
    vec8_t xv;
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) vpipe[i] <= 1'b0;
    end else begin
      for (int i = 0; i < 8; i++) xv[i] = int'(x[i]);
      vpipe[0] <= x_valid;
      ypipe[0] <= tmul(1, xv);
      for (int i = 1; i < 3; i++) begin
        vpipe[i] <= vpipe[i-1];
        ypipe[i] <= ypipe[i-1];
      end
      if (x_valid) begin
        fires++;
        xin_log.push_back(xv);
      end
    end
  end

  always_comb begin
    y_valid = vpipe[2];
    for (int i = 0; i < 8; i++) y[i] = 16'(ypipe[2][i]);
  end

  // ---------------- model UART register file ----------------
  byte unsigned rxq [$];
  byte unsigned txlog [$];
  int stat_full_reports = 0;
  int tx_polls = 0;

  initial begin
    bus.arready = 0; bus.rvalid = 0; bus.rdata = '0; bus.rresp = '0;
    bus.awready = 0; bus.wready = 0; bus.bvalid = 0; bus.bresp = '0;
  end

  // Read channel
  initial begin
    logic [3:0] a;
    forever begin
      @(posedge clk);
      if (rst_n && bus.arvalid) begin
        repeat ($urandom_range(2)) @(posedge clk);
        #1 bus.arready = 1'b1;
        a = bus.araddr;
        @(posedge clk);
        #1 bus.arready = 1'b0;
        repeat ($urandom_range(2)) @(posedge clk);
        #1;
        case (a)
          4'h0: bus.rdata = {24'd0, rxq.size() > 0 ? rxq.pop_front() : 8'd0};
          4'h8: begin
            logic txf;
            // Report the transmit queue full only while a result is being sent.
            txf = (txlog.size() < 16 * fires) && ($urandom_range(4) == 0);
            if (txf) stat_full_reports++;
            bus.rdata = {28'd0, txf, 1'b0, 1'b0, rxq.size() > 0};
          end
          default: bus.rdata = '0;
        endcase
        bus.rvalid = 1'b1;
        do @(posedge clk); while (!bus.rready);
        #1 bus.rvalid = 1'b0;
      end
    end
  end

  // Write channel: address and data accepted in separate cycles.
  initial begin
    logic [3:0] a;
    logic [31:0] d;
    forever begin
      @(posedge clk);
      if (rst_n && bus.awvalid && bus.wvalid) begin
        repeat ($urandom_range(2)) @(posedge clk);
        #1 bus.awready = 1'b1;
        a = bus.awaddr;
        @(posedge clk);
        #1 bus.awready = 1'b0;
        repeat ($urandom_range(2)) @(posedge clk);
        #1 bus.wready = 1'b1;
        d = bus.wdata;
        @(posedge clk);
        #1 bus.wready = 1'b0;
        check(a == 4'h4, "controller writes only the TX register");
        txlog.push_back(d[7:0]);
        repeat ($urandom_range(2)) @(posedge clk);
        #1 bus.bvalid = 1'b1;
        do @(posedge clk); while (!bus.bready);
        #1 bus.bvalid = 1'b0;
      end
    end
  end

  // ---------------- stimulus and checking ----------------
  initial begin
    vec8_t vecs [NVEC];
    for (int n = 0; n < NVEC; n++)
      for (int c = 0; c < 8; c++)
        vecs[n][c] = (n == 0) ? -128 : (n == 1) ? 127 : rand_range(-128, 127);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // The host's bytes arrive a few at a time.
    for (int n = 0; n < NVEC; n++)
      for (int c = 0; c < 8; c++) begin
        rxq.push_back(8'(vecs[n][c]));
        repeat ($urandom_range(30)) @(posedge clk);
      end
    wait (txlog.size() == 16 * NVEC);
    repeat (20) @(posedge clk);

    check(fires == NVEC, $sformatf("%0d x_valid pulses for %0d vectors", fires, NVEC));
    check(int'(vec_count) == NVEC, $sformatf("vec_count %0d", vec_count));
    check(txlog.size() == 16 * NVEC, "byte count");
    for (int n = 0; n < NVEC && n < xin_log.size(); n++) begin
      vec8_t e;
      bit bad;
      bad = 0;
      for (int c = 0; c < 8; c++) if (xin_log[n][c] != vecs[n][c]) bad = 1;
      check(!bad, $sformatf("vector %0d reached the transform intact", n));
      e = tmul(1, vecs[n]);
      for (int c = 0; c < 8; c++) begin
        logic [15:0] w;
        w = {txlog[16*n + 2*c + 1], txlog[16*n + 2*c]};
        check($signed(w) == 16'(e[c]),
              $sformatf("vector %0d coefficient %0d: %0d expected %0d", n, c, $signed(w), e[c]));
      end
    end
    check(stat_full_reports > 0, "transmit-full status was reported");
    check(int'(tx_stalls) == stat_full_reports,
          $sformatf("tx_stalls %0d, full reports %0d", tx_stalls, stat_full_reports));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
