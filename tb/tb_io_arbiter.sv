// tb_io_arbiter: self-checking test of the Ping/Pong input/output arbiter.
//
// Drives random requests on the host and controller sides and checks, for
// busy = 0 and for busy = 1 with sel = 0 and sel = 1, which memory port
// receives each request (enable, write enables, address, data; the source
// port always writes zero), that unused ports stay disabled, and that read
// data from the memory models returns to the side that asked for it one
// cycle later.
module tb_io_arbiter;
  localparam int W = 16, AW = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic busy, sel, h_en, h_mem, src_en, src_we, dsta_en, dsta_we, dstb_en, dstb_we;
  logic [1:0] h_we;
  logic [AW-1:0] h_addr, src_addr, dsta_addr, dstb_addr;
  logic [2*W-1:0] h_wdata, h_rdata, src_rdata, dsta_wdata, dsta_rdata, dstb_wdata, dstb_rdata;
  logic ping_a_en, ping_b_en, pong_a_en, pong_b_en;
  logic [1:0] ping_a_we, ping_b_we, pong_a_we, pong_b_we;
  logic [AW-1:0] ping_a_addr, ping_b_addr, pong_a_addr, pong_b_addr;
  logic [2*W-1:0] ping_a_wdata, ping_b_wdata, pong_a_wdata, pong_b_wdata;
  logic [2*W-1:0] ping_a_rdata, ping_b_rdata, pong_a_rdata, pong_b_rdata;

  io_arbiter #(.W(W), .AW(AW)) dut (.*);

  // memory port models: read data = {tag, address} one cycle after enable
  always_ff @(posedge clk) begin
    if (ping_a_en) ping_a_rdata <= {16'hA0A0, 12'h0, ping_a_addr};
    if (ping_b_en) ping_b_rdata <= {16'hB0B0, 12'h0, ping_b_addr};
    if (pong_a_en) pong_a_rdata <= {16'hA1A1, 12'h0, pong_a_addr};
    if (pong_b_en) pong_b_rdata <= {16'hB1B1, 12'h0, pong_b_addr};
  end

  int checks = 0, failures = 0;
  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    busy = 0; sel = 0; h_en = 0; h_mem = 0; h_we = 0; h_addr = 0; h_wdata = 0;
    src_en = 0; src_we = 0; src_addr = 0; dsta_en = 0; dsta_we = 0; dsta_addr = 0; dsta_wdata = 0;
    dstb_en = 0; dstb_we = 0; dstb_addr = 0; dstb_wdata = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      busy = ($urandom % 3) != 0; sel = 1'($urandom);
      h_en = 1; h_mem = 1'($urandom); h_we = ($urandom % 2) ? 2'b00 : 2'($urandom);
      h_addr = AW'($urandom); h_wdata = $urandom;
      src_en = 1; src_we = 1'($urandom); src_addr = AW'($urandom);
      dsta_en = 1; dsta_we = src_we; dsta_addr = AW'($urandom); dsta_wdata = $urandom;
      dstb_en = 1; dstb_we = src_we; dstb_addr = AW'($urandom); dstb_wdata = $urandom;
      #1;
      if (!busy) begin
        chk("host en ping", ping_a_en, !h_mem); chk("host en pong", pong_a_en, h_mem);
        chk("host we", h_mem ? pong_a_we : ping_a_we, h_we);
        chk("host addr", h_mem ? pong_a_addr : ping_a_addr, h_addr);
        chk("host data", h_mem ? pong_a_wdata : ping_a_wdata, h_wdata);
        chk("B ports idle", ping_b_en || pong_b_en, 0);
      end else begin
        // source memory: port A, writes zero
        chk("src en", sel ? pong_a_en : ping_a_en, 1);
        chk("src we", sel ? pong_a_we : ping_a_we, {2{src_we}});
        chk("src addr", sel ? pong_a_addr : ping_a_addr, src_addr);
        chk("src clears", sel ? pong_a_wdata : ping_a_wdata, 0);
        chk("dstA addr", sel ? ping_a_addr : pong_a_addr, dsta_addr);
        chk("dstA data", sel ? ping_a_wdata : pong_a_wdata, dsta_wdata);
        chk("dstB addr", sel ? ping_b_addr : pong_b_addr, dstb_addr);
        chk("dstB data", sel ? ping_b_wdata : pong_b_wdata, dstb_wdata);
        chk("dstB we", sel ? ping_b_we : pong_b_we, {2{dstb_we}});
        chk("src side B idle", sel ? pong_b_en : ping_b_en, 0);
      end
      // read data returns one cycle later
      if (!src_we || !busy) begin
        logic b, s, hm;
        logic [AW-1:0] ha, sa, aa, ba;
        b = busy; s = sel; hm = h_mem; ha = h_addr; sa = src_addr; aa = dsta_addr; ba = dstb_addr;
        @(posedge clk); #1;
        if (!b) chk("host rdata", h_rdata, {hm ? 16'hA1A1 : 16'hA0A0, 12'h0, ha});
        else begin
          chk("src rdata", src_rdata, {s ? 16'hA1A1 : 16'hA0A0, 12'h0, sa});
          chk("dstA rdata", dsta_rdata, {s ? 16'hA0A0 : 16'hA1A1, 12'h0, aa});
          chk("dstB rdata", dstb_rdata, {s ? 16'hB0B0 : 16'hB1B1, 12'h0, ba});
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
