// ctx_mem: context (instruction) memory, one word per gate of the circuit.
//
// A word holds the fields the paper lists: w1 and w0 (5 bits each), cut
// (the index distance 2^(n-1-wt) of the target qubit, CUT_W bits),
// sin(theta/2) and cos(theta/2) (W bits each, precomputed by software) and
// the 3-bit gate opcode. The host writes a word as four 32-bit fields,
// selected by wfield:
//   0: bits [2:0] gate, [7:3] w0, [12:8] w1
//   1: cut,  2: sin(theta/2),  3: cos(theta/2)
// The field split is this design's choice. The controller reads a whole word
// synchronously (data one cycle after re). Depth DEPTH = 2048 gates follows
// the text; the memory figure prints 2^12.
module ctx_mem #(
  parameter int unsigned W      = 32,
  parameter int unsigned CUT_W  = 17,
  parameter int unsigned DEPTH  = 2048,
  localparam int unsigned DAW   = $clog2(DEPTH)
) (
  input  logic              clk,
  // host write port
  input  logic              we,
  input  logic [DAW-1:0]    waddr,
  input  logic [1:0]        wfield,
  input  logic [31:0]       wdata,
  // controller read port
  input  logic              re,
  input  logic [DAW-1:0]    raddr,
  output fqsun_pkg::gate_e  r_gate,
  output logic [4:0]        r_w0,
  output logic [4:0]        r_w1,
  output logic [CUT_W-1:0]  r_cut,
  output logic [W-1:0]      r_sin,
  output logic [W-1:0]      r_cos
);
  import fqsun_pkg::*;

  typedef struct packed {
    logic [4:0]       w1;
    logic [4:0]       w0;
    logic [CUT_W-1:0] cut;
    logic [W-1:0]     sin_h;
    logic [W-1:0]     cos_h;
    logic [2:0]       gate;
  } ctx_t;

  ctx_t mem [DEPTH];
  ctx_t rd_q;

  always_ff @(posedge clk) begin
    if (we) begin
      unique case (wfield)
        2'd0: begin
          mem[waddr].gate <= wdata[2:0];
          mem[waddr].w0   <= wdata[7:3];
          mem[waddr].w1   <= wdata[12:8];
        end
        2'd1: mem[waddr].cut   <= wdata[CUT_W-1:0];
        2'd2: mem[waddr].sin_h <= wdata[W-1:0];
        default: mem[waddr].cos_h <= wdata[W-1:0];
      endcase
    end
    if (re) rd_q <= mem[raddr];
  end

  assign r_gate = gate_e'(rd_q.gate);
  assign r_w0   = rd_q.w0;
  assign r_w1   = rd_q.w1;
  assign r_cut  = rd_q.cut;
  assign r_sin  = rd_q.sin_h;
  assign r_cos  = rd_q.cos_h;
endmodule
