// tb_klt_m_kernel: checks the 4x4 kernel blocks of several transforms
// (M1 and M2 of T1, T3 and T13, M2 of T17 and M1 of T18) against a direct
// 4x4 product with the published constants, on random inputs that span the
// full input range, fed back to back. Also checks the two-cycle latency.
module tb_klt_m_kernel;
  import tb_klt_ref_pkg::*;

  localparam int NK = 8;
  localparam int KX [NK] = '{0, 0, 1, 1, 2, 2, 4, 5};  // transform index
  localparam int KB [NK] = '{0, 1, 0, 1, 0, 1, 1, 0};  // block
  localparam int IW = 9;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [IW-1:0] w [4];
  longint cycle = 0;
  int checks = 0, failures = 0;
  int seen [NK];

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  for (genvar k = 0; k < NK; k++) begin : g_k
    localparam klt_pkg::xform_e XF = klt_pkg::xform_e'(KX[k]);
    localparam int OW = IW + 2 + klt_pkg::m_prod_bits(XF);
    logic ov;
    logic signed [OW-1:0] z [4];
    typedef struct { int z [4]; longint cyc; } exp_t;
    exp_t q [$];

    klt_m_kernel #(.XFORM(XF), .BLK(KB[k]), .IN_W(IW)) dut (
      .clk, .rst_n, .in_valid, .w, .out_valid(ov), .z
    );

    always @(posedge clk) begin
      exp_t e;
      bit bad;
      if (rst_n && in_valid) begin
        for (int r = 0; r < 4; r++) begin
          e.z[r] = 0;
          for (int c = 0; c < 4; c++) e.z[r] += KCONST[KX[k]][KB[k]][4*r + c] * int'(w[c]);
        end
        e.cyc = cycle;
        q.push_back(e);
      end
      if (rst_n && ov) begin
        checks++;
        bad = 0;
        if (q.size() == 0) bad = 1;
        else begin
          e = q.pop_front();
          for (int r = 0; r < 4; r++) if (int'(z[r]) != e.z[r]) bad = 1;
          if (cycle - e.cyc != 2) bad = 1;
        end
        if (bad) begin
          failures++;
          if (failures < 10)
            $display("FAIL kernel %0d: z0=%0d exp %0d latency %0d", k, z[0], e.z[0], cycle - e.cyc);
        end
        seen[k]++;
      end
    end
  end

  initial begin
    int sent = 0;
    for (int c = 0; c < 4; c++) w[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      for (int c = 0; c < 4; c++)
        w[c] = (n < 2) ? IW'((n == 0) ? -256 : 255) : IW'(rand_range(-256, 255));
      in_valid = ($urandom_range(4) != 0);
      if (in_valid) sent++;
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (5) @(negedge clk);
    for (int k = 0; k < NK; k++) begin
      checks++;
      if (seen[k] != sent) begin
        failures++;
        $display("FAIL kernel %0d: %0d outputs for %0d inputs", k, seen[k], sent);
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
