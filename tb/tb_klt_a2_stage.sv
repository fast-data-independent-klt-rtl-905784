// tb_klt_a2_stage: checks both second-stage butterflies against the
// published A2' and A2'' matrices on random 9-bit vectors (the width the A1
// stage delivers), and checks the one-cycle latency and the valid bit.
module tb_klt_a2_stage;
  import tb_klt_ref_pkg::*;

  localparam int A2P [8][8] = '{
    '{1,0,0,1,0,0,0,0}, '{0,1,0,0,0,0,0,0}, '{0,0,1,0,0,0,0,0}, '{1,0,0,-1,0,0,0,0},
    '{0,0,0,0,1,0,0,0}, '{0,0,0,0,0,1,0,0}, '{0,0,0,0,0,0,1,0}, '{0,0,0,0,0,0,0,1}};
  localparam int A2PP [8][8] = '{
    '{1,0,0,0,0,0,0,0}, '{0,1,1,0,0,0,0,0}, '{0,1,-1,0,0,0,0,0}, '{0,0,0,1,0,0,0,0},
    '{0,0,0,0,1,0,0,0}, '{0,0,0,0,0,1,0,0}, '{0,0,0,0,0,0,1,0}, '{0,0,0,0,0,0,0,1}};

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic vp, vpp;
  logic signed [8:0] u [8];
  logic signed [9:0] v1 [8], v2 [8];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  klt_a2_stage #(.IN_W(9), .KIND(klt_pkg::A2_PRIME))  dut_p  (.clk, .rst_n, .in_valid, .u, .out_valid(vp),  .v(v1));
  klt_a2_stage #(.IN_W(9), .KIND(klt_pkg::A2_DPRIME)) dut_pp (.clk, .rst_n, .in_valid, .u, .out_valid(vpp), .v(v2));

  initial begin
    vec8_t a, e1, e2;
    for (int i = 0; i < 8; i++) u[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      for (int c = 0; c < 8; c++) a[c] = (n == 0) ? -256 : (n == 1) ? 255 : rand_range(-256, 255);
      for (int r = 0; r < 8; r++) begin
        e1[r] = 0; e2[r] = 0;
        for (int c = 0; c < 8; c++) begin
          e1[r] += A2P[r][c] * a[c];
          e2[r] += A2PP[r][c] * a[c];
        end
      end
      for (int c = 0; c < 8; c++) u[c] = 9'(a[c]);
      in_valid = 1'b1;
      @(negedge clk);
      checks++;
      if (!vp || !vpp) begin
        failures++;
        $display("FAIL vector %0d: valid low one cycle after input", n);
      end
      for (int r = 0; r < 8; r++) begin
        checks += 2;
        if (int'(v1[r]) != e1[r]) begin
          failures++;
          $display("FAIL A2' vector %0d row %0d: %0d expected %0d", n, r, v1[r], e1[r]);
        end
        if (int'(v2[r]) != e2[r]) begin
          failures++;
          $display("FAIL A2'' vector %0d row %0d: %0d expected %0d", n, r, v2[r], e2[r]);
        end
      end
      if (n % 7 == 6) begin
        in_valid = 1'b0;
        @(negedge clk);
        checks++;
        if (vp || vpp) begin
          failures++;
          $display("FAIL: valid high after an idle input cycle");
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
