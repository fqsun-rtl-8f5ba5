// tb_fqsun_top: end-to-end test of the emulator through its AXI4-Lite port.
//
// Acting as the host, it loads random circuits (all six gate types, random
// qubits and angles) and random normalised initial states, runs them and
// compares the state read back from Ping or Pong with a double-precision
// reference. Sizes: W = 32 (Q1.30), AW = 5 (up to 5 qubits), sessions of
// 1..5 qubits. It also measures the cycles of one-gate sessions and checks
// the per-amplitude cost of each gate (4 cycles for H/Rx/Ry/Rz, 2 for S/CX)
// and exercises: start ignored while load is high, stop aborting a session,
// refused (SLVERR) memory access while busy, done polling, and results in
// both Ping (even gate count) and Pong (odd). Every one of these mechanisms
// is counted and must have happened at least once.
module tb_fqsun_top;
  import fqsun_pkg::*;
  import fqsun_host::*;
  localparam int W = 32, AW = 5, ADDR_W = 23;
  localparam real TOL = 1.0e-6;

  logic clk = 1'b0, rst_n;
  always #5 clk = ~clk;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  logic [ADDR_W-1:0] s_awaddr, s_araddr;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready, done;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0] s_wstrb;
  logic [1:0] s_bresp, s_rresp;

  fqsun_top #(.W(W), .AW(AW)) dut (.*);
  axi_lite_master #(.ADDR_W(ADDR_W)) bus (
    .clk, .awaddr(s_awaddr), .awvalid(s_awvalid), .awready(s_awready),
    .wdata(s_wdata), .wstrb(s_wstrb), .wvalid(s_wvalid), .wready(s_wready),
    .bresp(s_bresp), .bvalid(s_bvalid), .bready(s_bready),
    .araddr(s_araddr), .arvalid(s_arvalid), .arready(s_arready),
    .rdata(s_rdata), .rresp(s_rresp), .rvalid(s_rvalid), .rready(s_rready));

  int checks = 0, failures = 0;
  // mechanism counters
  int n_gate[6];
  int n_ping_result = 0, n_pong_result = 0, n_stop = 0, n_load_block = 0;
  int n_slverr = 0, n_done_polls = 0, n_cycle_checks = 0;

  task automatic chk(string what, real got, real exp, real tol = 0.0);
    checks++;
    if (got > exp + tol || got < exp - tol) begin
      failures++;
      if (failures < 20) $display("FAIL %s: %f exp %f", what, got, exp);
    end
  endtask

  task automatic wr(int a, logic [31:0] d);
    logic [1:0] r;
    bus.write(ADDR_W'(a), d, r);
    if (r != 2'b00) begin failures++; $display("FAIL unexpected write error at %h", a); end
  endtask

  task automatic rd(int a, output logic [31:0] d);
    logic [1:0] r;
    bus.read(ADDR_W'(a), d, r);
  endtask

  function automatic int amp(int mem, int e, int half);
    return ((2 + mem) << 21) | (e << 3) | (half << 2);
  endfunction

  task automatic load_gate(int pc, int n, gate_t x);
    int base = (1 << 21) | (pc << 4);
    wr(base + 0, 32'({x.w1[4:0], x.w0[4:0], 3'(x.g)}));
    wr(base + 4, 32'(1 << (n - 1 - target_of(x))));
    wr(base + 8, 32'(to_fx($sin(x.theta / 2.0), W)));
    wr(base + 12, 32'(to_fx($cos(x.theta / 2.0), W)));
  endtask

  task automatic load_state(int n, ref real re[], ref real im[]);
    for (int e = 0; e < (1 << n); e++) begin
      wr(amp(0, e, 0), 32'(to_fx(re[e], W)));
      wr(amp(0, e, 1), 32'(to_fx(im[e], W)));
      wr(amp(1, e, 0), 0);
      wr(amp(1, e, 1), 0);
    end
  endtask

  // start, poll STATUS until done; the cycles from the start write to the
  // rise of the done pin are left in run_cycles
  longint run_cycles;
  bit     run_timed;
  task automatic run(output longint cyc);
    logic [31:0] st;
    run_timed = 0;
    fork
      begin
        longint t0;
        do @(posedge clk); while (!(s_awvalid && s_awready));
        t0 = cycle;
        while (done) @(posedge clk);     // the previous session's done clears
        do @(posedge clk); while (!done);
        run_cycles = cycle - t0;
        run_timed = 1;
      end
      wr(REG_CTRL, 32'h2);
    join_any
    do begin rd(REG_STATUS, st); n_done_polls++; end while (!st[0]);
    wait (run_timed);
    cyc = run_cycles;
  endtask

  task automatic check_state(int n, int m, ref real re[], ref real im[]);
    logic [31:0] st, d;
    int mem;
    rd(REG_STATUS, st);
    mem = st[2];
    chk("result memory = gate count parity", mem, m % 2);
    if (mem) n_pong_result++; else n_ping_result++;
    for (int e = 0; e < (1 << n); e++) begin
      rd(amp(mem, e, 0), d); chk($sformatf("re[%0d]", e), from_fx(d, W), re[e], TOL);
      rd(amp(mem, e, 1), d); chk($sformatf("im[%0d]", e), from_fx(d, W), im[e], TOL);
    end
  endtask

  function automatic gate_t rnd_gate(int n);
    gate_t x;
    x.g = gate_e'($urandom % 6);
    if (n == 1 && x.g == G_CX) x.g = G_H;
    x.w0 = $urandom % n;
    do x.w1 = $urandom % n; while (n > 1 && x.w1 == x.w0);
    x.theta = 6.283185307179586 * ($urandom % 10000) / 10000.0;
    return x;
  endfunction

  task automatic random_state(int n, ref real re[], ref real im[]);
    real norm = 0.0;
    re = new[1 << n]; im = new[1 << n];
    foreach (re[e]) begin
      re[e] = (real'($urandom % 2001) - 1000.0); im[e] = (real'($urandom % 2001) - 1000.0);
      norm += re[e] * re[e] + im[e] * im[e];
    end
    foreach (re[e]) begin re[e] /= $sqrt(norm); im[e] /= $sqrt(norm); end
  endtask

  // one complete session: random state, m random gates (or the given list)
  task automatic session(int n, int m);
    real re[], im[];
    gate_t prog[];
    longint cyc;
    random_state(n, re, im);
    prog = new[m];
    foreach (prog[k]) prog[k] = rnd_gate(n);
    wr(REG_CTRL, 32'h1);     // load
    wr(REG_NQ, n); wr(REG_NG, m);
    foreach (prog[k]) load_gate(k, n, prog[k]);
    load_state(n, re, im);
    wr(REG_CTRL, 32'h0);
    run(cyc);
    foreach (prog[k]) begin
      ref_apply(re, im, n, prog[k]);
      n_gate[prog[k].g]++;
    end
    check_state(n, m, re, im);
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint cyc, base;
    logic [31:0] d;
    logic [1:0] r;
    real re[], im[];
    gate_t x;
    rst_n = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // random circuits of growing size
    session(1, 3);
    session(2, 4);
    session(3, 7);
    session(4, 12);
    session(5, 20);
    session(5, 9);

    // cycles per gate: one-gate sessions on 5 qubits, S first as the base
    begin
      gate_e order[6] = '{G_S, G_H, G_CX, G_RX, G_RY, G_RZ};
      random_state(5, re, im);
      load_state(5, re, im);
      wr(REG_NQ, 5); wr(REG_NG, 1);
      foreach (order[k]) begin
        x.g = order[k]; x.w0 = 1; x.w1 = 3; x.theta = 1.0;
        load_gate(0, 5, x);
        // clear Pong, the destination
        for (int e = 0; e < 32; e++) begin wr(amp(1, e, 0), 0); wr(amp(1, e, 1), 0); end
        run(cyc);
        ref_apply(re, im, 5, x);
        n_gate[x.g]++;
        check_state(5, 1, re, im);
        // move the result back into Ping for the next gate
        for (int e = 0; e < 32; e++) begin
          wr(amp(0, e, 0), 32'(to_fx(re[e], W))); wr(amp(0, e, 1), 32'(to_fx(im[e], W)));
        end
        if (k == 0) base = cyc - 32 * 2;          // fixed overhead + 2 * 32 for S
        else begin
          chk($sformatf("cycles of %s on 32 amplitudes", x.g.name()), real'(cyc),
              real'(base + 32 * cycles_per_amp(x.g)));
          n_cycle_checks++;
        end
      end
      chk("S/CX cost per amplitude", real'(cycles_per_amp(G_CX)), 2.0);
      chk("H/R cost per amplitude", real'(cycles_per_amp(G_H)), 4.0);
    end

    // start is ignored while load is high
    wr(REG_CTRL, 32'h1);
    wr(REG_CTRL, 32'h3);
    rd(REG_STATUS, d);
    chk("start ignored during load (busy)", d[1], 0);
    chk("start ignored during load (done)", d[0], 0);
    n_load_block++;
    wr(REG_CTRL, 32'h0);

    // stop aborts a long session; memory access during it is refused
    wr(REG_NQ, 5); wr(REG_NG, 40);
    for (int k = 0; k < 40; k++) begin x.g = G_H; x.w0 = k % 5; x.w1 = 0; x.theta = 0; load_gate(k, 5, x); end
    wr(REG_CTRL, 32'h2);
    bus.write(ADDR_W'(amp(0, 0, 0)), 32'h1234, r);
    chk("write to Ping while busy: SLVERR", r, 2);
    if (r == 2) n_slverr++;
    bus.read(ADDR_W'(amp(1, 0, 0)), d, r);
    chk("read of Pong while busy: SLVERR", r, 2);
    rd(REG_PC, d);
    chk("pc runs", d < 40, 1);
    wr(REG_CTRL, 32'h4);
    rd(REG_STATUS, d);
    chk("stopped: not busy", d[1], 0);
    chk("stopped: not done", d[0], 0);
    rd(REG_PC, d);
    chk("stop resets pc", d, 0);
    n_stop++;

    // and the emulator is usable again afterwards
    session(3, 5);

    // every mechanism must have happened
    foreach (n_gate[g]) begin
      checks++;
      if (n_gate[g] == 0) begin failures++; $display("FAIL gate %0d never ran", g); end
    end
    checks += 7;
    if (n_ping_result == 0) begin failures++; $display("FAIL no result in Ping"); end
    if (n_pong_result == 0) begin failures++; $display("FAIL no result in Pong"); end
    if (n_stop == 0)        begin failures++; $display("FAIL no stop"); end
    if (n_load_block == 0)  begin failures++; $display("FAIL no blocked start"); end
    if (n_slverr == 0)      begin failures++; $display("FAIL no refused access"); end
    if (n_done_polls == 0)  begin failures++; $display("FAIL no done polling"); end
    if (n_cycle_checks != 5) begin failures++; $display("FAIL cycle checks %0d", n_cycle_checks); end
    $display("mechanisms: gates H=%0d S=%0d CX=%0d Rx=%0d Ry=%0d Rz=%0d, Ping results=%0d, Pong results=%0d, stops=%0d, blocked starts=%0d, refused accesses=%0d, done polls=%0d, cycle checks=%0d",
             n_gate[0], n_gate[1], n_gate[2], n_gate[3], n_gate[4], n_gate[5], n_ping_result,
             n_pong_result, n_stop, n_load_block, n_slverr, n_done_polls, n_cycle_checks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
