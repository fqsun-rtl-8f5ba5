// qgu_h: Hadamard gate unit of the QGU.
//
// For the amplitude x = alpha_i^(t) it forms m = x/sqrt(2) with two pipelined
// multipliers (real, imaginary) and then, combinationally,
//   state = 0:  y' = y + m,  z' = z + m   (z is alpha_{i+cut}^(t+1))
//   state = 1:  y' = y - m,  z' = z + m   (z is alpha_{i-cut}^(t+1))
// which is the Hadamard matrix applied one column at a time. Outputs are
// valid MUL_STAGES cycles after x is applied, with x, y, z, state held.
// Structure (1/sqrt(2) multipliers, +/- pair selected by state, one more
// adder) follows the paper's H gate drawing.
module qgu_h #(
  parameter int unsigned W = 32
) (
  input  logic                clk,
  input  logic                state,
  input  logic signed [W-1:0] x_re, x_im,
  input  logic signed [W-1:0] y_re, y_im,
  input  logic signed [W-1:0] z_re, z_im,
  output logic signed [W-1:0] yo_re, yo_im,
  output logic signed [W-1:0] zo_re, zo_im
);
  localparam logic signed [W-1:0] K = W'(fqsun_pkg::inv_sqrt2_fx(W));

  logic signed [W-1:0] m_re, m_im;

  fx_mul #(.W(W)) u_mre (.clk, .a(x_re), .b(K), .p(m_re));
  fx_mul #(.W(W)) u_mim (.clk, .a(x_im), .b(K), .p(m_im));

  always_comb begin
    yo_re = state ? (y_re - m_re) : (y_re + m_re);
    yo_im = state ? (y_im - m_im) : (y_im + m_im);
    zo_re = z_re + m_re;
    zo_im = z_im + m_im;
  end
endmodule
