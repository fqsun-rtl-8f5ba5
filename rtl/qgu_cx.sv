// qgu_cx: controlled-NOT gate unit of the QGU.
//
// Combinational. ctrl is the control-qubit bit of index i; the target bit
// only decides whether z sits at i+cut or i-cut, which the address side
// handles, so it is not needed here.
//   ctrl = 0:  y' = y + x, z' = z      (amplitude stays at i)
//   ctrl = 1:  y' = y,     z' = z + x  (amplitude moves to i+-cut)
// This is Algorithm 2 of the paper written as accumulation into a zeroed
// new state vector.
module qgu_cx #(
  parameter int unsigned W = 32
) (
  input  logic                ctrl,
  input  logic signed [W-1:0] x_re, x_im,
  input  logic signed [W-1:0] y_re, y_im,
  input  logic signed [W-1:0] z_re, z_im,
  output logic signed [W-1:0] yo_re, yo_im,
  output logic signed [W-1:0] zo_re, zo_im
);
  always_comb begin
    yo_re = ctrl ? y_re : (y_re + x_re);
    yo_im = ctrl ? y_im : (y_im + x_im);
    zo_re = ctrl ? (z_re + x_re) : z_re;
    zo_im = ctrl ? (z_im + x_im) : z_im;
  end
endmodule
