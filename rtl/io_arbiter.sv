// io_arbiter: input/output arbiter between the Ping/Pong memories, the host
// side (AXI mapper) and the controller/QGU side.
//
// While the controller is idle (busy = 0) the host owns port A of both
// memories: h_mem picks Ping (0) or Pong (1), h_we picks the real/imag
// half. While a session runs, the controller owns all of port A and B:
//   sel = 0: src = Ping.A, dst A = Pong.A, dst B = Pong.B
//   sel = 1: src = Pong.A, dst A = Ping.A, dst B = Ping.B
// Writes on the controller side are full words: dst A takes y', dst B takes
// z' from the QGU and src takes zero. Read data returns the same way,
// selected by the sel / h_mem value registered with the read (memory reads
// take one cycle). Host accesses during a session are dropped. The paper
// only names this block; the routing above is what its Ping/Pong schedule
// requires.
module io_arbiter #(
  parameter int unsigned W  = 32,
  parameter int unsigned AW = 17
) (
  input  logic           clk,
  input  logic           busy,
  input  logic           sel,
  // host side
  input  logic           h_en,
  input  logic [1:0]     h_we,
  input  logic           h_mem,
  input  logic [AW-1:0]  h_addr,
  input  logic [2*W-1:0] h_wdata,
  output logic [2*W-1:0] h_rdata,
  // controller side
  input  logic           src_en,
  input  logic           src_we,
  input  logic [AW-1:0]  src_addr,
  output logic [2*W-1:0] src_rdata,
  input  logic           dsta_en,
  input  logic           dsta_we,
  input  logic [AW-1:0]  dsta_addr,
  input  logic [2*W-1:0] dsta_wdata,
  output logic [2*W-1:0] dsta_rdata,
  input  logic           dstb_en,
  input  logic           dstb_we,
  input  logic [AW-1:0]  dstb_addr,
  input  logic [2*W-1:0] dstb_wdata,
  output logic [2*W-1:0] dstb_rdata,
  // Ping memory ports
  output logic           ping_a_en,
  output logic [1:0]     ping_a_we,
  output logic [AW-1:0]  ping_a_addr,
  output logic [2*W-1:0] ping_a_wdata,
  input  logic [2*W-1:0] ping_a_rdata,
  output logic           ping_b_en,
  output logic [1:0]     ping_b_we,
  output logic [AW-1:0]  ping_b_addr,
  output logic [2*W-1:0] ping_b_wdata,
  input  logic [2*W-1:0] ping_b_rdata,
  // Pong memory ports
  output logic           pong_a_en,
  output logic [1:0]     pong_a_we,
  output logic [AW-1:0]  pong_a_addr,
  output logic [2*W-1:0] pong_a_wdata,
  input  logic [2*W-1:0] pong_a_rdata,
  output logic           pong_b_en,
  output logic [1:0]     pong_b_we,
  output logic [AW-1:0]  pong_b_addr,
  output logic [2*W-1:0] pong_b_wdata,
  input  logic [2*W-1:0] pong_b_rdata
);
  logic sel_q, h_mem_q;

  always_ff @(posedge clk) begin
    if (src_en) sel_q <= sel;
    if (h_en && !busy) h_mem_q <= h_mem;
  end

  always_comb begin
    ping_a_en = 1'b0; ping_a_we = 2'b00; ping_a_addr = '0; ping_a_wdata = '0;
    ping_b_en = 1'b0; ping_b_we = 2'b00; ping_b_addr = '0; ping_b_wdata = '0;
    pong_a_en = 1'b0; pong_a_we = 2'b00; pong_a_addr = '0; pong_a_wdata = '0;
    pong_b_en = 1'b0; pong_b_we = 2'b00; pong_b_addr = '0; pong_b_wdata = '0;
    if (!busy) begin
      if (!h_mem) begin
        ping_a_en = h_en; ping_a_we = h_we; ping_a_addr = h_addr; ping_a_wdata = h_wdata;
      end else begin
        pong_a_en = h_en; pong_a_we = h_we; pong_a_addr = h_addr; pong_a_wdata = h_wdata;
      end
    end else if (!sel) begin
      ping_a_en = src_en;  ping_a_we = {2{src_we}};  ping_a_addr = src_addr;  ping_a_wdata = '0;
      pong_a_en = dsta_en; pong_a_we = {2{dsta_we}}; pong_a_addr = dsta_addr; pong_a_wdata = dsta_wdata;
      pong_b_en = dstb_en; pong_b_we = {2{dstb_we}}; pong_b_addr = dstb_addr; pong_b_wdata = dstb_wdata;
    end else begin
      pong_a_en = src_en;  pong_a_we = {2{src_we}};  pong_a_addr = src_addr;  pong_a_wdata = '0;
      ping_a_en = dsta_en; ping_a_we = {2{dsta_we}}; ping_a_addr = dsta_addr; ping_a_wdata = dsta_wdata;
      ping_b_en = dstb_en; ping_b_we = {2{dstb_we}}; ping_b_addr = dstb_addr; ping_b_wdata = dstb_wdata;
    end
  end

  assign src_rdata  = sel_q   ? pong_a_rdata : ping_a_rdata;
  assign dsta_rdata = sel_q   ? ping_a_rdata : pong_a_rdata;
  assign dstb_rdata = sel_q   ? ping_b_rdata : pong_b_rdata;
  assign h_rdata    = h_mem_q ? pong_a_rdata : ping_a_rdata;
endmodule
