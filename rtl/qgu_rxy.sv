// qgu_rxy: unified Rx / Ry gate unit of the QGU.
//
// With c = cos(theta/2) and s = sin(theta/2) from the context word, four
// pipelined multipliers form c*x and s*x; then, combinationally,
//   y' = y + c*x                               (diagonal entries, both gates)
//   Rx:  z' = z + (-i s) * x  = (z.re + s*x.im, z.im - s*x.re)
//   Ry:  state = 0: z' = z + s*x   (lower-left entry  +sin)
//        state = 1: z' = z - s*x   (upper-right entry -sin)
// Sharing one unit between Rx and Ry follows the paper; its drawing shows
// six multipliers, but c*x and s*x (four products) are all both gates
// need. Outputs are valid MUL_STAGES cycles after the inputs, which must be
// held.
module qgu_rxy #(
  parameter int unsigned W = 32
) (
  input  logic                clk,
  input  logic                is_ry,
  input  logic                state,
  input  logic signed [W-1:0] cos_h, sin_h,
  input  logic signed [W-1:0] x_re, x_im,
  input  logic signed [W-1:0] y_re, y_im,
  input  logic signed [W-1:0] z_re, z_im,
  output logic signed [W-1:0] yo_re, yo_im,
  output logic signed [W-1:0] zo_re, zo_im
);
  logic signed [W-1:0] cr, ci, sr, si;

  fx_mul #(.W(W)) u_cr (.clk, .a(x_re), .b(cos_h), .p(cr));
  fx_mul #(.W(W)) u_ci (.clk, .a(x_im), .b(cos_h), .p(ci));
  fx_mul #(.W(W)) u_sr (.clk, .a(x_re), .b(sin_h), .p(sr));
  fx_mul #(.W(W)) u_si (.clk, .a(x_im), .b(sin_h), .p(si));

  always_comb begin
    yo_re = y_re + cr;
    yo_im = y_im + ci;
    if (!is_ry) begin
      zo_re = z_re + si;
      zo_im = z_im - sr;
    end else if (!state) begin
      zo_re = z_re + sr;
      zo_im = z_im + si;
    end else begin
      zo_re = z_re - sr;
      zo_im = z_im - si;
    end
  end
endmodule
