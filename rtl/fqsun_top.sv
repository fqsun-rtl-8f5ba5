// fqsun_top: the FQsun quantum-circuit emulator as seen from the host bus.
//
// The host (a processor with its software stack, outside this design)
// writes a circuit into the context memory, an initial state vector into
// the Ping memory and zeros into Pong, sets the qubit and gate counts and
// pulses start. The controller then applies the gates one after another,
// each as a sweep over all 2^n amplitudes through the QGU, alternating the
// roles of Ping and Pong, and raises done. The host reads the result from
// Pong (odd gate count) or Ping (even).
//
// Blocks: axi_mapper (AXI4-Lite slave and address decode), ctrl_buffers
// (load/start/stop/#qubits/done registers), ctx_mem (one word per gate),
// two amp_mem (Ping, Pong), io_arbiter (memory port routing), fqsun_ctrl
// (program counter and amplitude loop) and qgu (gate arithmetic).
// Parameters: W bits per real/imaginary part (Q1.(W-2) fixed point; 32 is
// the FX32 version), AW = log2 of the amplitude memory depth = maximum
// number of qubits (17 for the 32-bit formats), CTX_DEPTH gates.
// done is also brought out as a pin (for an interrupt).
// What follows the paper: the block split, the memory sizes (2048 context
// words, 2^17 amplitudes of 2 x 32 bits in each of Ping and Pong), the
// Ping/Pong alternation and the per-amplitude cycle counts. This design's
// own: the AXI4-Lite map, the gate-count register and the opcode values.
// Lint notes: w1 is stored in the context memory as the paper lays out the
// word, but the datapath needs only cut (which already encodes the CX
// target) and w0, so ctx_w1 is left unread. rst_n is an asynchronous
// reset and also disables assertions in the sub-blocks, hence the linter's
// synchronous/asynchronous remark.
module fqsun_top #(
  parameter int unsigned W         = 32,
  parameter int unsigned AW        = 17,
  parameter int unsigned CTX_DEPTH = 2048,
  parameter int unsigned ADDR_W    = 23
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic [ADDR_W-1:0] s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready,
  output logic              done
);
  import fqsun_pkg::*;

  localparam int unsigned DAW    = $clog2(CTX_DEPTH);
  localparam int unsigned GATE_W = DAW + 1;

  // control buffers <-> mapper / controller
  logic              cb_wr, cb_rd;
  logic [2:0]        cb_addr;
  logic [31:0]       cb_wdata, cb_rdata;
  logic              load, start, stop, done_set, busy, sel;
  logic [4:0]        nqubits;
  logic [GATE_W-1:0] ngates, pc;

  // context memory
  logic              cx_we, ctx_re;
  logic [DAW-1:0]    cx_waddr, ctx_raddr;
  logic [1:0]        cx_wfield;
  logic [31:0]       cx_wdata;
  gate_e             ctx_gate;
  logic [4:0]        ctx_w0, ctx_w1;
  logic [AW-1:0]     ctx_cut;
  logic [W-1:0]      ctx_sin, ctx_cos;

  // host amplitude access
  logic              am_en, am_mem;
  logic [1:0]        am_we;
  logic [AW-1:0]     am_addr;
  logic [2*W-1:0]    am_wdata, am_rdata;

  // controller amplitude access
  logic              src_en, src_we, dsta_en, dsta_we, dstb_en, dstb_we;
  logic [AW-1:0]     src_addr, dsta_addr, dstb_addr;
  logic [2*W-1:0]    src_rdata, dsta_rdata, dstb_rdata, dsta_wdata, dstb_wdata;

  // memory ports
  logic              pia_en, pib_en, poa_en, pob_en;
  logic [1:0]        pia_we, pib_we, poa_we, pob_we;
  logic [AW-1:0]     pia_addr, pib_addr, poa_addr, pob_addr;
  logic [2*W-1:0]    pia_wd, pib_wd, poa_wd, pob_wd, pia_rd, pib_rd, poa_rd, pob_rd;

  // QGU
  gate_e             q_gate;
  logic              q_state, q_ctrl;
  logic [W-1:0]      q_sin, q_cos;
  logic signed [W-1:0] yo_re, yo_im, zo_re, zo_im;

  axi_mapper #(.W(W), .AW(AW), .DAW(DAW), .ADDR_W(ADDR_W)) u_axi (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .busy,
    .cb_wr, .cb_rd, .cb_addr, .cb_wdata, .cb_rdata,
    .cx_we, .cx_waddr, .cx_wfield, .cx_wdata,
    .am_en, .am_we, .am_mem, .am_addr, .am_wdata, .am_rdata);

  ctrl_buffers #(.NQ_W(5), .GATE_W(GATE_W)) u_cb (
    .clk, .rst_n,
    .wr_en(cb_wr), .rd_en(cb_rd), .addr(cb_addr), .wdata(cb_wdata), .rdata(cb_rdata),
    .load, .start, .stop, .nqubits, .ngates,
    .done_set, .done, .busy, .result_in_pong(sel), .pc);

  ctx_mem #(.W(W), .CUT_W(AW), .DEPTH(CTX_DEPTH)) u_ctx (
    .clk,
    .we(cx_we), .waddr(cx_waddr), .wfield(cx_wfield), .wdata(cx_wdata),
    .re(ctx_re), .raddr(ctx_raddr),
    .r_gate(ctx_gate), .r_w0(ctx_w0), .r_w1(ctx_w1), .r_cut(ctx_cut),
    .r_sin(ctx_sin), .r_cos(ctx_cos));

  fqsun_ctrl #(.W(W), .AW(AW), .CUT_W(AW), .GATE_W(GATE_W), .DAW(DAW)) u_ctrl (
    .clk, .rst_n,
    .load, .start, .stop, .nqubits, .ngates, .done_set, .busy, .sel, .pc,
    .ctx_re, .ctx_raddr, .ctx_gate, .ctx_w0, .ctx_cut, .ctx_sin, .ctx_cos,
    .src_en, .src_we, .src_addr, .dsta_en, .dsta_we, .dsta_addr,
    .dstb_en, .dstb_we, .dstb_addr,
    .q_gate, .q_state, .q_ctrl, .q_sin, .q_cos);

  qgu #(.W(W)) u_qgu (
    .clk, .gate(q_gate), .state(q_state), .ctrl(q_ctrl),
    .cos_h(q_cos), .sin_h(q_sin),
    .x_re(src_rdata[W-1:0]),  .x_im(src_rdata[2*W-1:W]),
    .y_re(dsta_rdata[W-1:0]), .y_im(dsta_rdata[2*W-1:W]),
    .z_re(dstb_rdata[W-1:0]), .z_im(dstb_rdata[2*W-1:W]),
    .yo_re, .yo_im, .zo_re, .zo_im);

  assign dsta_wdata = {yo_im, yo_re};
  assign dstb_wdata = {zo_im, zo_re};

  io_arbiter #(.W(W), .AW(AW)) u_arb (
    .clk, .busy, .sel,
    .h_en(am_en), .h_we(am_we), .h_mem(am_mem), .h_addr(am_addr),
    .h_wdata(am_wdata), .h_rdata(am_rdata),
    .src_en, .src_we, .src_addr, .src_rdata,
    .dsta_en, .dsta_we, .dsta_addr, .dsta_wdata, .dsta_rdata,
    .dstb_en, .dstb_we, .dstb_addr, .dstb_wdata, .dstb_rdata,
    .ping_a_en(pia_en), .ping_a_we(pia_we), .ping_a_addr(pia_addr),
    .ping_a_wdata(pia_wd), .ping_a_rdata(pia_rd),
    .ping_b_en(pib_en), .ping_b_we(pib_we), .ping_b_addr(pib_addr),
    .ping_b_wdata(pib_wd), .ping_b_rdata(pib_rd),
    .pong_a_en(poa_en), .pong_a_we(poa_we), .pong_a_addr(poa_addr),
    .pong_a_wdata(poa_wd), .pong_a_rdata(poa_rd),
    .pong_b_en(pob_en), .pong_b_we(pob_we), .pong_b_addr(pob_addr),
    .pong_b_wdata(pob_wd), .pong_b_rdata(pob_rd));

  amp_mem #(.W(W), .AW(AW)) u_ping (
    .clk,
    .a_en(pia_en), .a_we(pia_we), .a_addr(pia_addr), .a_wdata(pia_wd), .a_rdata(pia_rd),
    .b_en(pib_en), .b_we(pib_we), .b_addr(pib_addr), .b_wdata(pib_wd), .b_rdata(pib_rd));

  amp_mem #(.W(W), .AW(AW)) u_pong (
    .clk,
    .a_en(poa_en), .a_we(poa_we), .a_addr(poa_addr), .a_wdata(poa_wd), .a_rdata(poa_rd),
    .b_en(pob_en), .b_we(pob_we), .b_addr(pob_addr), .b_wdata(pob_wd), .b_rdata(pob_rd));
endmodule
