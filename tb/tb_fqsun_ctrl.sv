// tb_fqsun_ctrl: self-checking test of the FQsun controller's sequencing.
//
// A context memory model here (one-cycle read) holds random gates. The test
// watches the controller's ports cycle by cycle and checks, for every gate
// and every amplitude index i in order: the read of src[i], dst[i] and the
// partner dst[i+-cut]; the QGU target and control bits; that the write
// follows the read after exactly 1 + latency cycles (4 cycles per amplitude
// for H/Rx/Ry/Rz, 2 for S/CX); that src[i] is cleared in the write; that
// sel flips after each gate; that the next context word is fetched at
// pc + 1; and that done_set pulses once after the last gate. It also checks
// that start is ignored while load is high and that stop aborts a session.
module tb_fqsun_ctrl;
  import fqsun_pkg::*;
  localparam int W = 32, AW = 5, DAW = 4, GATE_W = 5;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, load, start, stop, done_set, busy, sel;
  logic [4:0] nqubits;
  logic [GATE_W-1:0] ngates, pc;
  logic ctx_re;
  logic [DAW-1:0] ctx_raddr;
  gate_e ctx_gate;
  logic [4:0] ctx_w0;
  logic [AW-1:0] ctx_cut;
  logic [W-1:0] ctx_sin, ctx_cos;
  logic src_en, src_we, dsta_en, dsta_we, dstb_en, dstb_we;
  logic [AW-1:0] src_addr, dsta_addr, dstb_addr;
  gate_e q_gate;
  logic q_state, q_ctrl;
  logic [W-1:0] q_sin, q_cos;

  fqsun_ctrl #(.W(W), .AW(AW), .CUT_W(AW), .GATE_W(GATE_W), .DAW(DAW)) dut (.*);

  // context memory model
  gate_e m_gate [16];
  logic [4:0] m_w0 [16], m_wt [16];
  always_ff @(posedge clk) if (ctx_re) begin
    ctx_gate <= m_gate[ctx_raddr];
    ctx_w0   <= m_w0[ctx_raddr];
    ctx_cut  <= AW'(1) << (nqubits - 5'd1 - m_wt[ctx_raddr]);
    ctx_sin  <= W'(ctx_raddr) * 7;
    ctx_cos  <= W'(ctx_raddr) * 13;
  end

  int checks = 0, failures = 0;
  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: %0d exp %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // run one session of m gates on n qubits, checking every port event
  task automatic session(int n, int m);
    int nn = 1 << n;
    int cyc, t_read, lat, wt, ct, cut, part, dones;
    int t_gate_first;
    logic sel_exp;
    nqubits = 5'(n); ngates = GATE_W'(m);
    for (int g = 0; g < m; g++) begin
      m_gate[g] = gate_e'($urandom % 6);
      m_wt[g] = 5'($urandom % n);
      do m_w0[g] = 5'($urandom % n); while (m_gate[g] == G_CX && m_w0[g] == m_wt[g]);
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    sel_exp = 0; dones = 0; cyc = 0;
    for (int g = 0; g < m; g++) begin
      // wait for the context fetch of gate g
      while (!ctx_re) begin @(negedge clk); cyc++; if (done_set) dones++; end
      chk("fetch address", ctx_raddr, g);
      chk("pc", pc, g);
      chk("sel before gate", sel, sel_exp);
      lat = (m_gate[g] == G_S || m_gate[g] == G_CX) ? 0 : 2;
      wt = (m_gate[g] == G_CX) ? int'(m_wt[g]) : int'(m_wt[g]);
      cut = 1 << (n - 1 - wt);
      ct = n - 1 - int'(m_w0[g]);
      t_gate_first = -1;
      for (int i = 0; i < nn; i++) begin
        while (!(src_en && !src_we)) begin @(negedge clk); cyc++; end
        if (t_gate_first < 0) t_gate_first = cyc;
        part = ((i & cut) != 0) ? i - cut : i + cut;
        chk("src read addr", src_addr, i);
        chk("dst A read addr", dsta_addr, i);
        chk("dst B read addr", dstb_addr, part);
        chk("dst reads", dsta_en && !dsta_we && dstb_en && !dstb_we, 1);
        chk("state bit", q_state, (i & cut) != 0);
        if (m_gate[g] == G_CX) chk("control bit", q_ctrl, (i >> ct) & 1);
        t_read = cyc;
        @(negedge clk); cyc++;
        while (!src_we) begin @(negedge clk); cyc++; end
        chk("read-to-write cycles", cyc - t_read, 1 + lat);
        chk("gate opcode", q_gate, m_gate[g]);
        chk("src clear addr", src_addr, i);
        chk("dst writes", dsta_we && dstb_we && dsta_addr == AW'(i) && dstb_addr == AW'(part), 1);
        if (i == nn - 1) chk("cycles per gate", cyc - t_gate_first + 1, nn * (2 + lat));
        @(negedge clk); cyc++;
        if (done_set) dones++;
      end
      sel_exp = ~sel_exp;
      chk("sel after gate", sel, sel_exp);
    end
    repeat (3) begin @(negedge clk); if (done_set) dones++; end
    chk("done pulses", dones, 1);
    chk("idle after session", busy, 0);
    chk("result memory (1 = Pong when m odd)", sel, m % 2);
  endtask

  initial begin
    rst_n = 0; load = 0; start = 0; stop = 0; nqubits = 3; ngates = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    session(3, 5);
    session(4, 6);
    session(5, 3);
    // start is ignored while load is high
    @(negedge clk); load = 1; start = 1; @(negedge clk); start = 0;
    repeat (3) @(negedge clk);
    chk("start ignored during load", busy, 0);
    load = 0;
    // stop aborts a session
    nqubits = 5; ngates = 4;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (40) @(negedge clk);
    chk("busy before stop", busy, 1);
    stop = 1; @(negedge clk); stop = 0;
    chk("stopped", busy, 0);
    chk("stop resets pc", pc, 0);
    chk("stop resets sel", sel, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
