// tb_ctx_mem: self-checking test of the context memory.
//
// Writes random gate words field by field (gate/w0/w1, cut, sin, cos) in a
// random field order, then reads every entry back through the controller
// port and compares all six fields; a read must appear one cycle after re.
module tb_ctx_mem;
  import fqsun_pkg::*;
  localparam int W = 32, CUT_W = 17, DEPTH = 64, DAW = 6;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic we, re;
  logic [DAW-1:0] waddr, raddr;
  logic [1:0] wfield;
  logic [31:0] wdata;
  gate_e r_gate;
  logic [4:0] r_w0, r_w1;
  logic [CUT_W-1:0] r_cut;
  logic [W-1:0] r_sin, r_cos;
  logic [2:0] e_gate [DEPTH];
  logic [4:0] e_w0 [DEPTH], e_w1 [DEPTH];
  logic [CUT_W-1:0] e_cut [DEPTH];
  logic [W-1:0] e_sin [DEPTH], e_cos [DEPTH];
  int checks = 0, failures = 0;

  ctx_mem #(.W(W), .CUT_W(CUT_W), .DEPTH(DEPTH)) dut (.*);

  task automatic wr(int a, int f, logic [31:0] d);
    @(negedge clk); we = 1; waddr = DAW'(a); wfield = 2'(f); wdata = d;
    @(negedge clk); we = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order[4];
    we = 0; re = 0; waddr = 0; raddr = 0; wfield = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      e_gate[a] = 3'($urandom % 6); e_w0[a] = 5'($urandom); e_w1[a] = 5'($urandom);
      e_cut[a] = CUT_W'(1) << ($urandom % CUT_W);
      e_sin[a] = $urandom; e_cos[a] = $urandom;
      order = '{0, 1, 2, 3};
      order.shuffle();
      foreach (order[k])
        unique case (order[k])
          0: wr(a, 0, {19'($urandom), e_w1[a], e_w0[a], e_gate[a]});
          1: wr(a, 1, 32'(e_cut[a]));
          2: wr(a, 2, e_sin[a]);
          default: wr(a, 3, e_cos[a]);
        endcase
    end
    // overwrite one field of entry 5 and check the others survive
    e_sin[5] = 32'h1234_5678;
    wr(5, 2, e_sin[5]);
    for (int a = DEPTH - 1; a >= 0; a--) begin
      @(negedge clk); re = 1; raddr = DAW'(a);
      @(negedge clk); re = 0;
      checks++;
      if (r_gate != gate_e'(e_gate[a]) || r_w0 != e_w0[a] || r_w1 != e_w1[a] ||
          r_cut != e_cut[a] || r_sin != e_sin[a] || r_cos != e_cos[a]) begin
        failures++;
        $display("FAIL entry %0d", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
