// klt_a2_stage: the second additive factor, A2' or A2''.
//
// A2' (used by T16 and T17) replaces elements 0 and 3 of the vector by
// their sum and difference:  v[0] = u[0] + u[3], v[3] = u[0] - u[3].
// A2'' (used by T18) does the same for elements 1 and 2:
// v[1] = u[1] + u[2], v[2] = u[1] - u[2]. All other elements pass unchanged.
// KIND selects which of the two the instance builds (A2_NONE is not a valid
// choice for this module). Every element is registered and widened by one
// bit, so the whole vector keeps one wordlength and the stage adds exactly
// one clock cycle and one bit, as in the published design.
//
// Interface: in_valid/u[8] sampled at a clock edge appear on out_valid/v[8]
// right after it. Only the valid bit is reset (synchronous, active low).
module klt_a2_stage #(
  parameter int                IN_W = 9,
  parameter klt_pkg::a2_kind_e KIND = klt_pkg::A2_PRIME
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] u [klt_pkg::N],
  output logic                   out_valid,
  output logic signed [IN_W:0]   v [klt_pkg::N]
);

  // Indices of the butterfly pair.
  localparam int IA = (KIND == klt_pkg::A2_DPRIME) ? 1 : 0;
  localparam int IB = (KIND == klt_pkg::A2_DPRIME) ? 2 : 3;

  initial assert (KIND != klt_pkg::A2_NONE)
    else $error("klt_a2_stage: KIND must be A2_PRIME or A2_DPRIME");

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int i = 0; i < klt_pkg::N; i++) begin
        if (i == IA)      v[i] <= (IN_W+1)'(u[IA]) + (IN_W+1)'(u[IB]);
        else if (i == IB) v[i] <= (IN_W+1)'(u[IA]) - (IN_W+1)'(u[IB]);
        else              v[i] <= (IN_W+1)'(u[i]);
      end
    end
  end

endmodule
