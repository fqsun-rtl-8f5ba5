// tb_ctrl_buffers: self-checking test of the control and status registers.
//
// Checks reset values, register write/readback, that start and stop are
// one-cycle pulses while load is a level, that done is set by done_set and
// cleared by start or stop, and the STATUS and PC readback.
module tb_ctrl_buffers;
  localparam int GATE_W = 12;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, wr_en, rd_en, load, start, stop, done_set, done, busy, result_in_pong;
  logic [2:0] addr;
  logic [31:0] wdata, rdata;
  logic [4:0] nqubits;
  logic [GATE_W-1:0] ngates, pc;
  int checks = 0, failures = 0;
  int start_pulses = 0, stop_pulses = 0;

  ctrl_buffers #(.NQ_W(5), .GATE_W(GATE_W)) dut (.*);

  always @(posedge clk) begin
    if (rst_n && start) start_pulses++;
    if (rst_n && stop) stop_pulses++;
  end

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h exp %h", what, got, exp); end
  endtask

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk); wr_en = 1; addr = 3'(a); wdata = d;
    @(negedge clk); wr_en = 0;
  endtask

  task automatic rd(int a, output logic [31:0] d);
    @(negedge clk); rd_en = 1; addr = 3'(a);
    @(negedge clk); rd_en = 0; d = rdata;
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    rst_n = 0; wr_en = 0; rd_en = 0; addr = 0; wdata = 0; done_set = 0; busy = 0;
    result_in_pong = 0; pc = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    chk("reset load", 32'(load), 0); chk("reset nq", 32'(nqubits), 0); chk("reset done", 32'(done), 0);
    wr(1, 32'd17); chk("nqubits", 32'(nqubits), 17); rd(1, d); chk("rd nqubits", d, 17);
    wr(2, 32'd745); chk("ngates", 32'(ngates), 745); rd(2, d); chk("rd ngates", d, 745);
    wr(0, 32'h1); chk("load level", 32'(load), 1); repeat (3) @(negedge clk); chk("load held", 32'(load), 1);
    rd(0, d); chk("rd ctrl", d, 1);
    wr(0, 32'h2); chk("load cleared", 32'(load), 0); chk("start high", 32'(start), 1);
    @(negedge clk); chk("start self-clears", 32'(start), 0);
    chk("start pulses", start_pulses, 1);
    @(negedge clk); done_set = 1; @(negedge clk); done_set = 0;
    chk("done set", 32'(done), 1);
    busy = 0; result_in_pong = 1; pc = 12'd345;
    rd(3, d); chk("status", d, 32'b101);
    rd(4, d); chk("pc", d, 345);
    wr(0, 32'h4); @(negedge clk); chk("stop clears done", 32'(done), 0); chk("stop pulses", stop_pulses, 1);
    @(negedge clk); done_set = 1; @(negedge clk); done_set = 0;
    busy = 1; result_in_pong = 0;
    rd(3, d); chk("status 2", d, 32'b011);
    wr(0, 32'h2); @(negedge clk); chk("start clears done", 32'(done), 0); chk("start pulses 2", start_pulses, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
