// tb_klt_a1_stage: checks the A1 butterfly against the A1 matrix rows
// (sums x[i] + x[7-i] on top, differences x[3-k] - x[4+k] below) on random
// and extreme 8-bit vectors, and checks its one-cycle latency.
module tb_klt_a1_stage;
  import tb_klt_ref_pkg::*;

  // Rows of A1 as published.
  localparam int A1 [8][8] = '{
    '{1,0,0,0,0,0,0,1}, '{0,1,0,0,0,0,1,0}, '{0,0,1,0,0,1,0,0}, '{0,0,0,1,1,0,0,0},
    '{0,0,0,1,-1,0,0,0}, '{0,0,1,0,0,-1,0,0}, '{0,1,0,0,0,0,-1,0}, '{1,0,0,0,0,0,0,-1}};

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic signed [7:0] x [8];
  logic signed [8:0] u [8];
  int checks = 0, failures = 0;
  vec8_t expq [$];

  always #5 clk = ~clk;

  klt_a1_stage #(.IN_W(8)) dut (.clk, .rst_n, .in_valid, .x, .out_valid, .u);

  initial begin
    vec8_t v, e;
    for (int i = 0; i < 8; i++) x[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      for (int c = 0; c < 8; c++)
        v[c] = (n < 2) ? (((n[0] ^ c[0]) != 0) ? 127 : -128) : rand_range(-128, 127);
      if (n == 2) for (int c = 0; c < 8; c++) v[c] = -128;
      if (n == 3) for (int c = 0; c < 8; c++) v[c] = 127;
      for (int r = 0; r < 8; r++) begin
        e[r] = 0;
        for (int c = 0; c < 8; c++) e[r] += A1[r][c] * v[c];
      end
      for (int c = 0; c < 8; c++) x[c] = 8'(v[c]);
      in_valid = 1'b1;
      @(negedge clk);
      // One cycle later the result must be on the output.
      checks++;
      if (!out_valid) begin
        failures++;
        $display("FAIL vector %0d: out_valid low one cycle after input", n);
      end
      for (int r = 0; r < 8; r++) begin
        checks++;
        if (int'(u[r]) != e[r]) begin
          failures++;
          $display("FAIL vector %0d row %0d: %0d expected %0d", n, r, u[r], e[r]);
        end
      end
      if (n % 5 == 4) begin
        in_valid = 1'b0;
        @(negedge clk);
        checks++;
        if (out_valid) begin
          failures++;
          $display("FAIL: out_valid high after an idle input cycle");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
