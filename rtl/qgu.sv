// qgu: Quantum Gate Unit, the arithmetic core of the emulator.
//
// One call of the QGU applies one gate to one amplitude. Its operands are
//   x = alpha_i^(t)            the current amplitude at index i,
//   y = alpha_i^(t+1)          the partial new amplitude at i,
//   z = alpha_{i+-cut}^(t+1)   the partial new amplitude at the partner index
//                              (i+cut when the target bit of i is 0, i-cut
//                              when it is 1),
// and it returns the updated y' and z', which are written back over y and z.
// Running this for every i of the state vector accumulates g * psi into a
// zeroed vector (the paper's wave-function update, Algorithms 1 and 2).
//
// Five gate units work in parallel on the same operands (H, S, CX, unified
// Rx/Ry, Rz) and a multiplexer driven by the gate opcode picks the result,
// as in the paper's QGU figure. `state` is the target-qubit bit of i, `ctrl`
// the control-qubit bit of i (CX only), cos_h/sin_h are cos(theta/2) and
// sin(theta/2) precomputed by software.
//
// Timing: the operands must be held stable; y'/z' are valid
// fqsun_pkg::gate_latency(gate) cycles later (2 for H/Rx/Ry/Rz, 0 for S/CX).
module qgu #(
  parameter int unsigned W = 32
) (
  input  logic                clk,
  input  fqsun_pkg::gate_e    gate,
  input  logic                state,
  input  logic                ctrl,
  input  logic signed [W-1:0] cos_h, sin_h,
  input  logic signed [W-1:0] x_re, x_im,
  input  logic signed [W-1:0] y_re, y_im,
  input  logic signed [W-1:0] z_re, z_im,
  output logic signed [W-1:0] yo_re, yo_im,
  output logic signed [W-1:0] zo_re, zo_im
);
  import fqsun_pkg::*;

  logic signed [W-1:0] h_yr, h_yi, h_zr, h_zi;
  logic signed [W-1:0] s_yr, s_yi, s_zr, s_zi;
  logic signed [W-1:0] c_yr, c_yi, c_zr, c_zi;
  logic signed [W-1:0] r_yr, r_yi, r_zr, r_zi;
  logic signed [W-1:0] z_yr, z_yi, z_zr, z_zi;

  qgu_h #(.W(W)) u_h (
    .clk, .state, .x_re, .x_im, .y_re, .y_im, .z_re, .z_im,
    .yo_re(h_yr), .yo_im(h_yi), .zo_re(h_zr), .zo_im(h_zi));

  qgu_s #(.W(W)) u_s (
    .state, .x_re, .x_im, .y_re, .y_im, .z_re, .z_im,
    .yo_re(s_yr), .yo_im(s_yi), .zo_re(s_zr), .zo_im(s_zi));

  qgu_cx #(.W(W)) u_cx (
    .ctrl, .x_re, .x_im, .y_re, .y_im, .z_re, .z_im,
    .yo_re(c_yr), .yo_im(c_yi), .zo_re(c_zr), .zo_im(c_zi));

  qgu_rxy #(.W(W)) u_rxy (
    .clk, .is_ry(gate == G_RY), .state, .cos_h, .sin_h,
    .x_re, .x_im, .y_re, .y_im, .z_re, .z_im,
    .yo_re(r_yr), .yo_im(r_yi), .zo_re(r_zr), .zo_im(r_zi));

  qgu_rz #(.W(W)) u_rz (
    .clk, .state, .cos_h, .sin_h,
    .x_re, .x_im, .y_re, .y_im, .z_re, .z_im,
    .yo_re(z_yr), .yo_im(z_yi), .zo_re(z_zr), .zo_im(z_zi));

  always_comb begin
    unique case (gate)
      G_H:        {yo_re, yo_im, zo_re, zo_im} = {h_yr, h_yi, h_zr, h_zi};
      G_S:        {yo_re, yo_im, zo_re, zo_im} = {s_yr, s_yi, s_zr, s_zi};
      G_CX:       {yo_re, yo_im, zo_re, zo_im} = {c_yr, c_yi, c_zr, c_zi};
      G_RX, G_RY: {yo_re, yo_im, zo_re, zo_im} = {r_yr, r_yi, r_zr, r_zi};
      G_RZ:       {yo_re, yo_im, zo_re, zo_im} = {z_yr, z_yi, z_zr, z_zi};
      default:    {yo_re, yo_im, zo_re, zo_im} = {y_re, y_im, z_re, z_im};
    endcase
  end
endmodule
