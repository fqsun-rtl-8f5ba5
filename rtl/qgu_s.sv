// qgu_s: phase (S) gate unit of the QGU, S = diag(1, i).
//
// Combinational (no multiplier):
//   state = 0:  y' = y + x
//   state = 1:  y' = y + i*x   (re: y.re - x.im, im: y.im + x.re)
// The partner amplitude z passes unchanged, S has no off-diagonal entry.
// Adder pair per component selected by state, as in the paper's S gate drawing.
module qgu_s #(
  parameter int unsigned W = 32
) (
  input  logic                state,
  input  logic signed [W-1:0] x_re, x_im,
  input  logic signed [W-1:0] y_re, y_im,
  input  logic signed [W-1:0] z_re, z_im,
  output logic signed [W-1:0] yo_re, yo_im,
  output logic signed [W-1:0] zo_re, zo_im
);
  always_comb begin
    yo_re = state ? (y_re - x_im) : (y_re + x_re);
    yo_im = state ? (y_im + x_re) : (y_im + x_im);
    zo_re = z_re;
    zo_im = z_im;
  end
endmodule
