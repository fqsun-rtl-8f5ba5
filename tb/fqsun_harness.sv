// fqsun_harness: testbench-only host for workload tests of the emulator at
// its default size (fqsun_top with no parameter overrides: Q1.30 numbers,
// 2^17-entry Ping/Pong memories, 2048-gate context memory).
//
// It holds the design, an AXI4-Lite master and the host's tasks:
//   load_program(n, prog)      load mode, #qubits, gate count, context words
//   load_state(n, re, im)  initial vector into Ping, zeros into Pong
//   run()                  start, wait for the done pin, then poll STATUS
//   read_state(n, re, im)  read the result from Ping or Pong (STATUS bit 2)
// Gates are encoded as in package fqsun_host. Testbenches instantiate it
// and call the tasks hierarchically; it keeps counters of what happened.
module fqsun_harness;
  import fqsun_pkg::*;
  import fqsun_host::*;
  localparam int W = 32, ADDR_W = 23;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  // cycle count from simulation time (10 time units per clock)
  function automatic longint cycle();
    return longint'($time / 10);
  endfunction

  logic [ADDR_W-1:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready, done;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;

  fqsun_top dut (.*);
  axi_lite_master #(.ADDR_W(ADDR_W)) bus (
    .clk, .awaddr(s_awaddr), .awvalid(s_awvalid), .awready(s_awready),
    .wdata(s_wdata), .wstrb(s_wstrb), .wvalid(s_wvalid), .wready(s_wready),
    .bresp(s_bresp), .bvalid(s_bvalid), .bready(s_bready),
    .araddr(s_araddr), .arvalid(s_arvalid), .arready(s_arready),
    .rdata(s_rdata), .rresp(s_rresp), .rvalid(s_rvalid), .rready(s_rready));

  int bus_errors = 0, sessions = 0, ping_results = 0, pong_results = 0;
  int gates_run[6];
  longint last_run_cycles;

  initial begin
    bus.random_ready = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
  end

  task automatic wr(int a, logic [31:0] d);
    logic [1:0] r;
    bus.write(ADDR_W'(a), d, r);
    if (r != 2'b00) bus_errors++;
  endtask

  task automatic rd(int a, output logic [31:0] d);
    logic [1:0] r;
    bus.read(ADDR_W'(a), d, r);
    if (r != 2'b00) bus_errors++;
  endtask

  function automatic int amp(int mem, int e, int half);
    return ((2 + mem) << 21) | (e << 3) | (half << 2);
  endfunction

  task automatic load_program(int n, gate_t prog[]);
    wait (rst_n);
    wr(REG_CTRL, 32'h1);
    wr(REG_NQ, n);
    wr(REG_NG, prog.size());
    foreach (prog[k]) begin
      int base = (1 << 21) | (k << 4);
      wr(base + 0, 32'({prog[k].w1[4:0], prog[k].w0[4:0], 3'(prog[k].g)}));
      wr(base + 4, 32'(1 << (n - 1 - target_of(prog[k]))));
      wr(base + 8, 32'(to_fx($sin(prog[k].theta / 2.0), W)));
      wr(base + 12, 32'(to_fx($cos(prog[k].theta / 2.0), W)));
      gates_run[prog[k].g]++;
    end
    wr(REG_CTRL, 32'h0);
  endtask

  task automatic load_state(int n, real re[], real im[]);
    wr(REG_CTRL, 32'h1);
    for (int e = 0; e < (1 << n); e++) begin
      wr(amp(0, e, 0), 32'(to_fx(re[e], W)));
      wr(amp(0, e, 1), 32'(to_fx(im[e], W)));
      wr(amp(1, e, 0), 0);
      wr(amp(1, e, 1), 0);
    end
    wr(REG_CTRL, 32'h0);
  endtask

  task automatic run();
    logic [31:0] st;
    longint t0;
    wr(REG_CTRL, 32'h2);
    t0 = cycle();
    wait (!done);
    wait (done);
    last_run_cycles = cycle() - t0;
    do rd(REG_STATUS, st); while (!st[0]);
    sessions++;
  endtask

  task automatic read_state(int n, output real re[], output real im[]);
    logic [31:0] st, d;
    rd(REG_STATUS, st);
    if (st[2]) pong_results++; else ping_results++;
    re = new[1 << n]; im = new[1 << n];
    for (int e = 0; e < (1 << n); e++) begin
      rd(amp(int'(st[2]), e, 0), d); re[e] = from_fx(d, W);
      rd(amp(int'(st[2]), e, 1), d); im[e] = from_fx(d, W);
    end
  endtask
endmodule
