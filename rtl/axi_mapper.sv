// axi_mapper: AXI4-Lite slave that maps the host's bus onto FQsun storage.
//
// Address map (byte addresses, 32-bit words; region = addr[22:21]):
//   0  control buffers   word addr[4:2] (see ctrl_buffers)
//   1  context memory    entry = addr[20:4], field = addr[3:2]
//                        (0 gate/w0/w1, 1 cut, 2 sin, 3 cos); write only
//   2  Ping memory       entry = addr[AW+2:3], addr[2] = 0 real, 1 imaginary
//   3  Pong memory       same layout
// One transaction at a time: a write is taken when AWVALID and WVALID are
// both high, a read when ARVALID is high (writes first). Every target
// answers a read one cycle after it is enabled, so a read completes in
// three cycles (AR, wait, R). WSTRB is ignored (full-word writes only).
// Context and amplitude accesses while the controller is busy are dropped
// and answered with SLVERR. The paper states only that this block routes
// data between the processing system and the FQsun memories; the AXI4-Lite
// protocol, map and error handling are this design's.
// Lint notes: s_wstrb and the address bits that select nothing (byte
// offset [1:0], bit 20) are unused by design. rst_n is the asynchronous
// reset of the flops and also the synchronous disable of the handshake
// assertions, which a linter reports as mixed use.
module axi_mapper #(
  parameter int unsigned W      = 32,
  parameter int unsigned AW     = 17,
  parameter int unsigned DAW    = 11,
  parameter int unsigned ADDR_W = 23
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
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
  // status
  input  logic              busy,
  // control buffers
  output logic              cb_wr,
  output logic              cb_rd,
  output logic [2:0]        cb_addr,
  output logic [31:0]       cb_wdata,
  input  logic [31:0]       cb_rdata,
  // context memory write port
  output logic              cx_we,
  output logic [DAW-1:0]    cx_waddr,
  output logic [1:0]        cx_wfield,
  output logic [31:0]       cx_wdata,
  // amplitude memories (through the arbiter)
  output logic              am_en,
  output logic [1:0]        am_we,
  output logic              am_mem,
  output logic [AW-1:0]     am_addr,
  output logic [2*W-1:0]    am_wdata,
  input  logic [2*W-1:0]    am_rdata
);
  typedef enum logic [1:0] {A_IDLE, A_BRESP, A_RWAIT, A_RRESP} ast_e;
  localparam logic [1:0] OKAY = 2'b00, SLVERR = 2'b10;

  ast_e              st;
  logic [ADDR_W-1:0] addr;
  logic              is_wr, is_rd;
  logic [1:0]        region;
  logic              blocked;
  logic [1:0]        rd_region_q;
  logic              rd_half_q;

  assign is_wr   = (st == A_IDLE) && s_awvalid && s_wvalid;
  assign is_rd   = (st == A_IDLE) && !is_wr && s_arvalid;
  assign addr    = is_wr ? s_awaddr : s_araddr;
  assign region  = addr[22:21];
  assign blocked = busy && (region != 2'd0);

  assign s_awready = is_wr;
  assign s_wready  = is_wr;
  assign s_arready = is_rd;

  // decode to the targets
  always_comb begin
    cb_wr     = is_wr && region == 2'd0;
    cb_rd     = is_rd && region == 2'd0;
    cb_addr   = addr[4:2];
    cb_wdata  = s_wdata;
    cx_we     = is_wr && region == 2'd1 && !busy;
    cx_waddr  = addr[DAW+3:4];
    cx_wfield = addr[3:2];
    cx_wdata  = s_wdata;
    am_en     = (is_wr || is_rd) && region[1] && !busy;
    am_we     = is_wr ? (addr[2] ? 2'b10 : 2'b01) : 2'b00;
    am_mem    = region[0];
    am_addr   = addr[AW+2:3];
    am_wdata  = {s_wdata[W-1:0], s_wdata[W-1:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= A_IDLE;
      s_bvalid    <= 1'b0;
      s_bresp     <= OKAY;
      s_rvalid    <= 1'b0;
      s_rresp     <= OKAY;
      s_rdata     <= '0;
      rd_region_q <= '0;
      rd_half_q   <= 1'b0;
    end else begin
      unique case (st)
        A_IDLE: begin
          if (is_wr) begin
            s_bvalid <= 1'b1;
            s_bresp  <= blocked ? SLVERR : OKAY;
            st       <= A_BRESP;
          end else if (is_rd) begin
            rd_region_q <= region;
            rd_half_q   <= addr[2];
            s_rresp     <= blocked ? SLVERR : OKAY;
            st          <= A_RWAIT;
          end
        end
        A_BRESP: if (s_bready) begin
          s_bvalid <= 1'b0;
          st       <= A_IDLE;
        end
        A_RWAIT: begin
          unique case (rd_region_q)
            2'd0:    s_rdata <= cb_rdata;
            2'd1:    s_rdata <= '0;
            default: s_rdata <= (s_rresp != OKAY) ? '0 :
                                rd_half_q ? 32'(signed'(am_rdata[2*W-1:W])) :
                                            32'(signed'(am_rdata[W-1:0]));
          endcase
          s_rvalid <= 1'b1;
          st       <= A_RRESP;
        end
        A_RRESP: if (s_rready) begin
          s_rvalid <= 1'b0;
          st       <= A_IDLE;
        end
        default: st <= A_IDLE;
      endcase
    end
  end

  // AXI rule: a response, once valid, stays valid until accepted.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
