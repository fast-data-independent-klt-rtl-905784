// klt_m_kernel: one 4x4 multiplierless kernel block (M1 or M2).
//
// Computes z = M w for a 4-element vector w, where M holds the sixteen
// published constants m0..m15 (row-major) of transform XFORM, block BLK
// (0 = M1, 1 = M2). Every constant lies in {0, +-1, +-2, +-3}, so each product
// is built from shifts and at most one addition: 2w = w <<< 1,
// 3w = (w <<< 1) + w; signs are applied by negation.
//
// The block is a two-level adder tree split over two registers, giving the
// two clock cycles of latency of the published kernel:
//   cycle 1: p[r][0] = m[4r]*w0 + m[4r+1]*w1,  p[r][1] = m[4r+2]*w2 + m[4r+3]*w3
//   cycle 2: z[r]    = p[r][0] + p[r][1]
// The output wordlength is IN_W + 2 + ceil(log2(max|m|)) (klt_pkg::out_width
// rule). The intermediate register is kept at the output width and all
// arithmetic is two's complement modulo 2^OUT_W; because the true row sums
// always fit in OUT_W bits, the result is exact even where a partial sum
// would not fit a narrower register. Keeping the partial sums at full width
// is this design's choice; the published text does not give internal widths.
//
// Interface: in_valid/w[4] sampled at edge n give out_valid/z[4] after
// edge n+1. Only the valid bits are reset (synchronous, active low).
module klt_m_kernel #(
  parameter klt_pkg::xform_e XFORM = klt_pkg::XF_T1,
  parameter int              BLK   = 0,
  parameter int              IN_W  = 9,
  parameter int              OUT_W = IN_W + 2 + klt_pkg::m_prod_bits(XFORM)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  w [klt_pkg::HALF],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] z [klt_pkg::HALF]
);

  localparam int HN = klt_pkg::HALF;

  typedef logic signed [OUT_W-1:0] acc_t;

  // Shift-and-add multiplication by a constant c in {0, +-1, +-2, +-3}.
  function automatic acc_t cmul(input logic signed [IN_W-1:0] a, input int c);
    acc_t ae, mag;
    ae = OUT_W'(a);  // sign extension
    case ((c < 0) ? -c : c)
      1:       mag = ae;
      2:       mag = ae <<< 1;
      3:       mag = (ae <<< 1) + ae;
      default: mag = '0;
    endcase
    return (c < 0) ? -mag : mag;
  endfunction

  // Constant m_k of this block.
  function automatic int mc(input logic [3:0] k);
    return klt_pkg::MTAB[int'(XFORM)][BLK][k];
  endfunction

  acc_t p [HN][2];
  logic p_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      p_valid   <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      p_valid   <= in_valid;
      out_valid <= p_valid;
    end
  end

  // First adder level: pairwise sums of constant products.
  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int r = 0; r < HN; r++) begin
        p[r][0] <= cmul(w[0], mc(4'(4*r)))     + cmul(w[1], mc(4'(4*r + 1)));
        p[r][1] <= cmul(w[2], mc(4'(4*r + 2))) + cmul(w[3], mc(4'(4*r + 3)));
      end
    end
  end

  // Second adder level.
  always_ff @(posedge clk) begin
    if (p_valid) begin
      for (int r = 0; r < HN; r++)
        z[r] <= p[r][0] + p[r][1];
    end
  end

endmodule
