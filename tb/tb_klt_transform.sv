// tb_klt_transform: checks the six pipelined KLT cores against direct
// matrix-vector products with the full published matrices.
//
// All six cores see the same input stream: vectors chosen to reach the
// largest and smallest value of every output row (the worst case for the
// wordlengths), then random 8-bit vectors, entered back to back with random
// idle cycles. Each core's outputs are compared with T x and the number of
// cycles each vector took is compared with the published latency. The output
// width of each core is checked against the published wordlength increase.
module tb_klt_transform;
  import tb_klt_ref_pkg::*;

  localparam int IN_W = 8;
  localparam int NRAND = 600;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [IN_W-1:0] x [8];
  longint cycle = 0;
  int checks = 0, failures = 0;
  int outputs_seen [6];

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  for (genvar t = 0; t < 6; t++) begin : g_core
    localparam klt_pkg::xform_e XF = klt_pkg::xform_e'(t);
    localparam int OW = klt_pkg::out_width(XF, IN_W);
    logic out_valid;
    logic signed [OW-1:0] y [8];
    typedef struct { vec8_t y; longint cyc; } exp_t;
    exp_t q [$];

    klt_transform #(.XFORM(XF)) dut (
      .clk, .rst_n, .in_valid, .x, .out_valid, .y
    );

    initial begin
      checks++;
      if (OW != IN_W + DELTA_BITS[t]) begin
        failures++;
        $display("FAIL core %0d: output width %0d, expected %0d", t, OW, IN_W + DELTA_BITS[t]);
      end
    end

    always @(posedge clk) begin
      if (rst_n && in_valid) begin
        exp_t e;
        vec8_t xv;
        for (int i = 0; i < 8; i++) xv[i] = int'(x[i]);
        e.y = tmul(t, xv);
        e.cyc = cycle;
        q.push_back(e);
      end
      if (rst_n && out_valid) begin
        checks++;
        if (q.size() == 0) begin
          failures++;
          $display("FAIL core %0d: output without input", t);
        end else begin
          exp_t e;
          bit bad;
          e = q.pop_front();
          bad = 0;
          for (int i = 0; i < 8; i++) if (int'(y[i]) != e.y[i]) bad = 1;
          if (cycle - e.cyc != longint'(LATENCY[t])) bad = 1;
          if (bad) begin
            failures++;
            if (failures < 10)
              $display("FAIL core %0d: y0=%0d exp %0d y7=%0d exp %0d latency %0d exp %0d",
                       t, y[0], e.y[0], y[7], e.y[7], cycle - e.cyc, LATENCY[t]);
          end
          outputs_seen[t]++;
        end
      end
    end
  end

  task automatic apply(vec8_t v);
    @(negedge clk);
    for (int i = 0; i < 8; i++) x[i] = IN_W'(v[i]);
    in_valid = 1'b1;
  endtask

  task automatic idle();
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    vec8_t v;
    int total_in = 0;
    for (int i = 0; i < 8; i++) x[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Extremes of every row of every transform.
    for (int t = 0; t < 6; t++)
      for (int r = 0; r < 8; r++)
        for (int s = 0; s < 2; s++) begin
          for (int c = 0; c < 8; c++)
            v[c] = ((TMAT[t][r][c] >= 0) ^ (s == 1)) ? 127 : -128;
          apply(v);
          total_in++;
        end
    // Random stream with gaps.
    for (int n = 0; n < NRAND; n++) begin
      for (int c = 0; c < 8; c++) v[c] = rand_range(-128, 127);
      apply(v);
      total_in++;
      if ($urandom_range(3) == 0) idle();
    end
    idle();
    repeat (10) @(negedge clk);
    for (int t = 0; t < 6; t++) begin
      checks++;
      if (outputs_seen[t] != total_in) begin
        failures++;
        $display("FAIL core %0d: %0d outputs for %0d inputs", t, outputs_seen[t], total_in);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
