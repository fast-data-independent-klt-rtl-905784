// tb_klt_testbed_top: end-to-end test of the testbed at its default
// parameters (115200-baud bit period at 100 MHz, 16-byte queues).
//
// A model host plays the part of the computer: it sends eight signed bytes
// per vector on uart_rxd, decodes the sixteen bytes that come back on
// uart_txd and compares the eight 16-bit words with T x computed directly
// from the published matrix of the selected transform. Following the
// published test, most input coefficients are drawn uniformly from
// [-10, 10]; one vector per transform uses full-range values that drive
// every output to the largest magnitude its row can reach. The host sends
// the next vector as soon as the first byte of the previous result arrives,
// so reception overlaps transmission, and switches xform_sel between
// vectors so that every transform, with each of its pipeline shapes (no A2
// stage, A2', A2''), is used. Each of these events is counted; one that
// never happens is a failure.
module tb_klt_testbed_top;
  import tb_klt_ref_pkg::*;

  localparam int  CPB       = 868;    // must match the top's default
  localparam int  VPX       = 3;      // vectors per transform
  localparam int  NVEC      = 6 * VPX;

  logic clk = 1'b0, rst_n = 1'b0;
  logic uart_rxd = 1'b1, uart_txd;
  klt_pkg::xform_e xform_sel = klt_pkg::XF_T1;
  logic [15:0] vec_count, tx_stalls;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  klt_testbed_top dut (
    .clk, .rst_n, .uart_rxd, .uart_txd, .xform_sel, .vec_count, .tx_stalls
  );

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- host model ----------------
  byte unsigned rxbytes [$];

  task automatic host_send(input byte unsigned b);
    uart_rxd = 1'b0;
    repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      uart_rxd = b[i];
      repeat (CPB) @(posedge clk);
    end
    uart_rxd = 1'b1;
    repeat (CPB) @(posedge clk);
  endtask

  initial begin
    byte unsigned b;
    forever begin
      @(negedge uart_txd);
      repeat (CPB / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge clk);
        b[i] = uart_txd;
      end
      repeat (CPB) @(posedge clk);
      check(uart_txd == 1'b1, "stop bit");
      rxbytes.push_back(b);
    end
  end

  // ---------------- mechanisms seen ----------------
  int used [6];
  int used_a2 [3];       // none, A2', A2''
  int overlapped = 0;    // vectors sent while a result was still arriving
  int full_range = 0;

  initial begin
    vec8_t vecs [NVEC];
    int    sel  [NVEC];
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);

    for (int n = 0; n < NVEC; n++) begin
      sel[n] = n % 6;
      for (int c = 0; c < 8; c++) begin
        if (n / 6 == 1)  // extremes of row (n % 8) of the selected matrix
          vecs[n][c] = (TMAT[sel[n]][n % 8][c] >= 0) ? 127 : -128;
        else
          vecs[n][c] = rand_range(-10, 10);
      end
    end

    for (int n = 0; n < NVEC; n++) begin
      xform_sel = klt_pkg::xform_e'(sel[n]);
      if (n > 0 && rxbytes.size() < 16 * n) overlapped++;
      for (int c = 0; c < 8; c++) host_send(8'(vecs[n][c]));
      // Wait for the first byte of this result before sending the next vector.
      wait (rxbytes.size() > 16 * n);
      used[sel[n]]++;
      used_a2[(sel[n] == 5) ? 2 : (sel[n] >= 3) ? 1 : 0]++;
      if (n / 6 == 1) full_range++;
    end
    wait (rxbytes.size() == 16 * NVEC);
    repeat (2 * CPB) @(posedge clk);

    for (int n = 0; n < NVEC; n++) begin
      vec8_t e;
      e = tmul(sel[n], vecs[n]);
      for (int c = 0; c < 8; c++) begin
        logic [15:0] w;
        w = {rxbytes[16*n + 2*c + 1], rxbytes[16*n + 2*c]};
        check($signed(w) == 16'(e[c]),
              $sformatf("vector %0d (T index %0d) y%0d = %0d expected %0d", n, sel[n], c, $signed(w), e[c]));
      end
    end
    check(rxbytes.size() == 16 * NVEC, "returned byte count");
    check(int'(vec_count) == NVEC, $sformatf("vec_count %0d expected %0d", vec_count, NVEC));

    for (int t = 0; t < 6; t++) begin
      $display("transform index %0d used %0d times", t, used[t]);
      check(used[t] > 0, $sformatf("transform index %0d never used", t));
    end
    $display("pipeline shapes: no A2 %0d, A2' %0d, A2'' %0d", used_a2[0], used_a2[1], used_a2[2]);
    for (int k = 0; k < 3; k++) check(used_a2[k] > 0, "every pipeline shape used");
    $display("overlapped receptions %0d, full-range vectors %0d, transmit stalls %0d",
             overlapped, full_range, tx_stalls);
    check(overlapped > 0, "reception overlapped transmission");
    check(full_range > 0, "full-range vectors sent");
    check(tx_stalls > 0, "controller held bytes back on a full transmit queue");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NVEC * 30 * 10 * CPB) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
