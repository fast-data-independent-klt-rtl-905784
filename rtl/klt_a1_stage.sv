// klt_a1_stage: the A1 butterfly, first factor of every fast algorithm.
//
// Computes, for an 8-point input vector x,
//   u[i]   = x[i]   + x[7-i]     i = 0..3
//   u[4+k] = x[3-k] - x[4+k]     k = 0..3
// which is exactly the matrix A1 of the factorization. The result is
// registered, so the stage has one clock cycle of latency and accepts a new
// vector every cycle. The output is one bit wider than the input so the
// sums cannot overflow, as in the published design. A valid bit travels
// with the data; it is the only register with a reset (synchronous,
// active low), which is this design's choice.
//
// Interface: in_valid/x[8] sampled at a rising clock edge appear on
// out_valid/u[8] right after that edge.
module klt_a1_stage #(
  parameter int IN_W = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] x [klt_pkg::N],
  output logic                   out_valid,
  output logic signed [IN_W:0]   u [klt_pkg::N]
);

  localparam int HN = klt_pkg::HALF;

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int i = 0; i < HN; i++) begin
        u[i]      <= (IN_W+1)'(x[i]) + (IN_W+1)'(x[klt_pkg::N-1-i]);
        u[HN + i] <= (IN_W+1)'(x[HN-1-i]) - (IN_W+1)'(x[HN+i]);
      end
    end
  end

endmodule
