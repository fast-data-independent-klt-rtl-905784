// klt_transform: pipelined 8-point KLT approximation core, y = T x.
//
// XFORM selects one of the six proposed low-complexity matrices T1, T3, T13,
// T16, T17 or T18. The core is the fast algorithm of that matrix laid out as
// a pipeline of sub-blocks, one per sparse factor:
//   T1, T3, T13 :  x -> A1 -> M -> P -> y                 (3 cycles)
//   T16, T17    :  x -> A1 -> A2' -> M -> P -> y          (4 cycles)
//   T18         :  x -> A1 -> A2'' -> M -> P -> y         (4 cycles)
// M is the block-diagonal pair of 4x4 kernels M1 (fed by elements 0..3) and
// M2 (fed by elements 4..7). A1 and A2 take one cycle each, M two, and the
// permutation P, which puts M1's rows on the even outputs and M2's rows on
// the odd outputs, is pure wiring. Each additive stage widens the data by one
// bit and M by 2 + ceil(log2(max|m|)) bits, so OUT_W - IN_W is 3, 5, 4, 6, 6, 5 for the
// six transforms, matching the published wordlength increases; the latency
// LAT is 3, 3, 3, 4, 4, 4 cycles, also as published. The diagonal scaling
// matrix that turns T into the orthonormal approximation is not built: as
// in the published design it is left to the quantizer that follows.
//
// Interface: in_valid/x[8] (signed IN_W bits) are sampled at a rising edge;
// the result appears on out_valid/y[8] (signed OUT_W bits) LAT edges later.
// A new vector can enter every cycle. rst_n is a synchronous active-low reset
// of the valid pipeline only.
module klt_transform #(
  parameter klt_pkg::xform_e XFORM = klt_pkg::XF_T1,
  parameter int              IN_W  = klt_pkg::IN_W,
  parameter int              OUT_W = klt_pkg::out_width(XFORM, IN_W),
  parameter int              LAT   = klt_pkg::latency(XFORM)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  x [klt_pkg::N],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] y [klt_pkg::N]
);

  import klt_pkg::*;

  localparam a2_kind_e A2   = a2_kind(XFORM);
  localparam int       MI_W = m_in_width(XFORM, IN_W);

  initial begin
    assert (OUT_W == out_width(XFORM, IN_W))
      else $error("klt_transform: OUT_W must equal klt_pkg::out_width(XFORM, IN_W)");
    assert (LAT == latency(XFORM))
      else $error("klt_transform: LAT must equal klt_pkg::latency(XFORM)");
  end

  // A1
  logic                  a1_valid;
  logic signed [IN_W:0]  a1_u [N];

  klt_a1_stage #(.IN_W(IN_W)) u_a1 (
    .clk, .rst_n, .in_valid, .x,
    .out_valid(a1_valid), .u(a1_u)
  );

  // A2' or A2'' where the fast algorithm has one
  logic                   m_in_valid;
  logic signed [MI_W-1:0] m_in [N];

  if (A2 == A2_NONE) begin : g_no_a2
    assign m_in_valid = a1_valid;
    assign m_in       = a1_u;
  end else begin : g_a2
    klt_a2_stage #(.IN_W(IN_W + 1), .KIND(A2)) u_a2 (
      .clk, .rst_n, .in_valid(a1_valid), .u(a1_u),
      .out_valid(m_in_valid), .v(m_in)
    );
  end

  // M = blockdiag(M1, M2)
  logic                    m1_valid, m2_valid;
  logic signed [MI_W-1:0]  w1 [HALF], w2 [HALF];
  logic signed [OUT_W-1:0] z1 [HALF], z2 [HALF];

  always_comb begin
    for (int k = 0; k < HALF; k++) begin
      w1[k] = m_in[k];
      w2[k] = m_in[HALF + k];
    end
  end

  klt_m_kernel #(.XFORM(XFORM), .BLK(0), .IN_W(MI_W), .OUT_W(OUT_W)) u_m1 (
    .clk, .rst_n, .in_valid(m_in_valid), .w(w1), .out_valid(m1_valid), .z(z1)
  );

  klt_m_kernel #(.XFORM(XFORM), .BLK(1), .IN_W(MI_W), .OUT_W(OUT_W)) u_m2 (
    .clk, .rst_n, .in_valid(m_in_valid), .w(w2), .out_valid(m2_valid), .z(z2)
  );

  // P: M1 rows are the even outputs, M2 rows the odd outputs. Pure wiring.
  always_comb begin
    for (int k = 0; k < HALF; k++) begin
      y[2*k]     = z1[k];
      y[2*k + 1] = z2[k];
    end
  end

  assign out_valid = m1_valid;

  // Both kernels run in lock step.
  a_kernels_aligned: assert property (@(posedge clk) disable iff (!rst_n) m1_valid == m2_valid);

endmodule
