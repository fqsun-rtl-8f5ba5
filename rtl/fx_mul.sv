// fx_mul: pipelined signed fixed-point multiplier, Q1.(W-2) x Q1.(W-2).
//
// Stage 1 registers the full 2W-bit product, stage 2 registers it shifted
// right by the W-2 fraction bits (truncation toward minus infinity) and cut
// back to W bits. The result of operands applied in cycle k is on p in
// cycle k+2. The paper gives the two multiplier stages of the fixed-point
// versions; truncation rather than rounding is this design's choice.
// Lint note: the bits of the shifted product above W are dropped on
// purpose; for |a|,|b| <= 1 they only repeat the sign.
module fx_mul #(
  parameter int unsigned W = 32
) (
  input  logic                clk,
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W-1:0] p
);
  localparam int unsigned F = W - 2;

  logic signed [2*W-1:0] prod_q;
  logic signed [2*W-1:0] shifted;

  assign shifted = prod_q >>> F;

  always_ff @(posedge clk) begin
    prod_q <= a * b;
    p      <= shifted[W-1:0];
  end
endmodule
