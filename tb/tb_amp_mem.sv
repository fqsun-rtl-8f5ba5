// tb_amp_mem: self-checking test of the dual-port amplitude memory.
//
// Random reads and half-word writes on both ports (never the same word
// written by both ports in one cycle) against a reference array kept here.
// Checks one-cycle read latency, that read data holds while a port is idle
// or writing, and that the real/imaginary write enables act separately.
module tb_amp_mem;
  localparam int W = 32, AW = 6;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic a_en, b_en;
  logic [1:0] a_we, b_we;
  logic [AW-1:0] a_addr, b_addr;
  logic [2*W-1:0] a_wdata, b_wdata, a_rdata, b_rdata;
  logic [2*W-1:0] ref_mem [2**AW];
  logic [2*W-1:0] exp_a, exp_b;
  int checks = 0, failures = 0;

  amp_mem #(.W(W), .AW(AW)) dut (.*);

  function automatic logic [2*W-1:0] merge(logic [2*W-1:0] old, logic [1:0] we, logic [2*W-1:0] d);
    logic [2*W-1:0] r = old;
    if (we[0]) r[W-1:0] = d[W-1:0];
    if (we[1]) r[2*W-1:W] = d[2*W-1:W];
    return r;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_en = 0; b_en = 0; a_we = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    // fill through both ports
    for (int i = 0; i < 2**AW; i += 2) begin
      @(negedge clk);
      a_en = 1; a_we = 2'b11; a_addr = AW'(i);   a_wdata = {$urandom, $urandom};
      b_en = 1; b_we = 2'b11; b_addr = AW'(i+1); b_wdata = {$urandom, $urandom};
      ref_mem[i] = a_wdata; ref_mem[i+1] = b_wdata;
    end
    @(negedge clk); a_en = 0; b_en = 0;
    exp_a = 'x; exp_b = 'x;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      a_en = 1'($urandom); b_en = 1'($urandom);
      a_we = ($urandom % 3 == 0) ? 2'($urandom) : 2'b00;
      b_we = ($urandom % 3 == 0) ? 2'($urandom) : 2'b00;
      a_addr = AW'($urandom); b_addr = AW'($urandom);
      if (a_addr == b_addr && a_we != 0 && b_we != 0) b_we = 2'b00;
      a_wdata = {$urandom, $urandom}; b_wdata = {$urandom, $urandom};
      // expected read data (old contents; reads happen only when not writing)
      if (a_en && a_we == 0) exp_a = ref_mem[a_addr];
      if (b_en && b_we == 0) exp_b = ref_mem[b_addr];
      if (a_en) ref_mem[a_addr] = merge(ref_mem[a_addr], a_we, a_wdata);
      if (b_en) ref_mem[b_addr] = merge(ref_mem[b_addr], b_we, b_wdata);
      @(posedge clk); #1;
      if (t > 10) begin
        checks += 2;
        if (a_rdata !== exp_a) begin failures++; $display("FAIL A t=%0d %h exp %h", t, a_rdata, exp_a); end
        if (b_rdata !== exp_b) begin failures++; $display("FAIL B t=%0d %h exp %h", t, b_rdata, exp_b); end
      end
    end
    // final sweep
    @(negedge clk); b_en = 0; a_we = 0;
    for (int i = 0; i < 2**AW; i++) begin
      @(negedge clk); a_en = 1; a_addr = AW'(i);
      @(posedge clk); #1;
      checks++;
      if (a_rdata !== ref_mem[i]) begin failures++; $display("FAIL sweep %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
