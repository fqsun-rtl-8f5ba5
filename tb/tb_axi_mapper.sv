// tb_axi_mapper: self-checking test of the AXI4-Lite mapper.
//
// An AXI master model issues writes and reads to all four regions. Target
// models here record what the mapper presents (control register access,
// context field writes, amplitude half-word writes) and answer reads one
// cycle later. Checks: the decoded target, entry, field and half for each
// access; read data and sign extension of narrow amplitude halves; OKAY
// responses; SLVERR and no memory access while busy, while the control
// registers stay reachable.
module tb_axi_mapper;
  localparam int W = 16, AW = 6, DAW = 5, ADDR_W = 23;
  logic clk = 1'b0, rst_n;
  always #5 clk = ~clk;

  logic [ADDR_W-1:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;
  logic busy;
  logic cb_wr, cb_rd, cx_we, am_en, am_mem;
  logic [2:0] cb_addr;
  logic [31:0] cb_wdata, cb_rdata, cx_wdata;
  logic [DAW-1:0] cx_waddr;
  logic [1:0] cx_wfield, am_we;
  logic [AW-1:0] am_addr;
  logic [2*W-1:0] am_wdata, am_rdata;

  axi_mapper #(.W(W), .AW(AW), .DAW(DAW), .ADDR_W(ADDR_W)) dut (.*);
  axi_lite_master #(.ADDR_W(ADDR_W)) host (
    .clk, .awaddr(s_awaddr), .awvalid(s_awvalid), .awready(s_awready),
    .wdata(s_wdata), .wstrb(s_wstrb), .wvalid(s_wvalid), .wready(s_wready),
    .bresp(s_bresp), .bvalid(s_bvalid), .bready(s_bready),
    .araddr(s_araddr), .arvalid(s_arvalid), .arready(s_arready),
    .rdata(s_rdata), .rresp(s_rresp), .rvalid(s_rvalid), .rready(s_rready));

  // target models: remember the last access, answer reads after one cycle
  int n_cb_wr = 0, n_cx = 0, n_am = 0;
  logic [2:0] l_cb_addr; logic [31:0] l_cb_wdata;
  logic [DAW-1:0] l_cx_addr; logic [1:0] l_cx_field; logic [31:0] l_cx_data;
  logic [1:0] l_am_we; logic l_am_mem; logic [AW-1:0] l_am_addr; logic [2*W-1:0] l_am_wdata;
  always_ff @(posedge clk) begin
    if (cb_wr) begin n_cb_wr++; l_cb_addr <= cb_addr; l_cb_wdata <= cb_wdata; end
    if (cb_rd) cb_rdata <= 32'hC0DE_0000 | 32'(cb_addr);
    if (cx_we) begin n_cx++; l_cx_addr <= cx_waddr; l_cx_field <= cx_wfield; l_cx_data <= cx_wdata; end
    if (am_en) begin
      n_am++; l_am_we <= am_we; l_am_mem <= am_mem; l_am_addr <= am_addr; l_am_wdata <= am_wdata;
      am_rdata <= {4'h8, 12'(am_addr), 3'h0, am_mem, 12'(am_addr)};
    end
  end

  int checks = 0, failures = 0;
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask

  function automatic logic [ADDR_W-1:0] amp_addr(int mem, int entry, int half);
    return ADDR_W'(((2 + mem) << 21) | (entry << 3) | (half << 2));
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] resp;
    logic [31:0] d;
    int e, f, m, h, k;
    rst_n = 0; busy = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // control registers
    for (int r = 0; r < 5; r++) begin
      k = n_cb_wr;
      host.write(ADDR_W'(r << 2), 32'h100 + r, resp);
      chk("cb resp", resp, 0); chk("cb write count", n_cb_wr, k + 1);
      chk("cb addr", l_cb_addr, r); chk("cb data", l_cb_wdata, 32'h100 + r);
      host.read(ADDR_W'(r << 2), d, resp);
      chk("cb read", d, 32'hC0DE_0000 | r); chk("cb rresp", resp, 0);
    end
    // context fields
    for (int t = 0; t < 40; t++) begin
      e = $urandom % (1 << DAW); f = $urandom % 4;
      host.write(ADDR_W'((1 << 21) | (e << 4) | (f << 2)), 32'(t * 77), resp);
      chk("cx resp", resp, 0); chk("cx entry", l_cx_addr, e); chk("cx field", l_cx_field, f);
      chk("cx data", l_cx_data, t * 77);
    end
    // amplitudes
    for (int t = 0; t < 60; t++) begin
      m = $urandom % 2; e = $urandom % (1 << AW); h = $urandom % 2;
      host.write(amp_addr(m, e, h), 32'(16'hF000 + t), resp);
      chk("am resp", resp, 0); chk("am mem", l_am_mem, m); chk("am entry", l_am_addr, e);
      chk("am half", l_am_we, h ? 2'b10 : 2'b01);
      chk("am data", h ? l_am_wdata[2*W-1:W] : l_am_wdata[W-1:0], 16'hF000 + t);
      host.read(amp_addr(m, e, h), d, resp);
      chk("am rresp", resp, 0);
      chk("am rdata (sign-extended half)", d,
          h ? {{16{1'b1}}, 4'h8, 12'(e)} : {16'h0, 3'h0, 1'(m), 12'(e)});
    end
    // busy: memories refused, control still reachable
    busy = 1;
    k = n_am;
    host.write(amp_addr(0, 3, 0), 32'h55, resp);
    chk("busy amp write SLVERR", resp, 2'b10);
    host.read(amp_addr(1, 3, 1), d, resp);
    chk("busy amp read SLVERR", resp, 2'b10);
    chk("no amp access while busy", n_am, k);
    k = n_cx;
    host.write(ADDR_W'(1 << 21), 32'h1, resp);
    chk("busy ctx SLVERR", resp, 2'b10); chk("no ctx write while busy", n_cx, k);
    host.read(ADDR_W'(3 << 2), d, resp);
    chk("status while busy", d, 32'hC0DE_0003); chk("status resp", resp, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
