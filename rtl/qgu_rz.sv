// qgu_rz: Rz gate unit of the QGU, Rz = diag(e^{-i theta/2}, e^{+i theta/2}).
//
// Four pipelined multipliers form c*x.re, c*x.im, s*x.re, s*x.im; then
//   state = 0:  y' = y + (c - i s) x = (y.re + c x.re + s x.im, y.im + c x.im - s x.re)
//   state = 1:  y' = y + (c + i s) x = (y.re + c x.re - s x.im, y.im + c x.im + s x.re)
// z passes unchanged (diagonal gate). Two adder levels after the multipliers
// and a state-controlled multiplexer, as in the paper's Rz drawing.
module qgu_rz #(
  parameter int unsigned W = 32
) (
  input  logic                clk,
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
    yo_re = state ? (y_re + (cr - si)) : (y_re + (cr + si));
    yo_im = state ? (y_im + (ci + sr)) : (y_im + (ci - sr));
    zo_re = z_re;
    zo_im = z_im;
  end
endmodule
