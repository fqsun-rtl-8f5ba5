// tb_wl_qft: the QFT benchmark on the emulator at its default size, for
// n = 3 .. 12 qubits (17 qubits, the largest the memories hold, takes about
// 300 million cycles and has its own testbench, tb_wl_qft17).
//
// For each n the host loads |0...0> and the QFT circuit built from H, CX and
// Rz (n H, n(n-1)+3*floor(n/2) CX, 1.5n(n-1) Rz; 721 gates for n = 17, the
// count the paper reports), runs it and reads the 2^n results.
// Checks: every amplitude against a double-precision reference of the same
// circuit (absolute error below 1e-6); that the output is the equal
// superposition the QFT gives for |0> (all amplitudes equal to the first,
// |alpha|^2 = 2^-n); the result memory (Pong for an odd gate count); and the run
// time against the per-gate cost (2^n x 4 cycles for H/Rz, x 2 for CX,
// plus 2 cycles per gate for the context fetch).
module tb_wl_qft;
  import fqsun_pkg::*;
  import fqsun_host::*;
  import fqsun_circuits::*;
  localparam real TOL = 1.0e-6;

  fqsun_harness h ();

  int checks = 0, failures = 0;
  task automatic chk(string what, real got, real exp, real tol = 0.0);
    checks++;
    if (got > exp + tol || got < exp - tol) begin
      failures++;
      if (failures < 20) $display("FAIL %s: %g exp %g", what, got, exp);
    end
  endtask

  initial begin
    #(64'd400_000_000);   // 40 million clock cycles
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(int NQ);
    gate_t q[$];
    gate_t prog[];
    real re[], im[], ore[], oim[];
    longint exp_cycles = 0;
    int nn = 1 << NQ;
    int pong0 = h.pong_results;
    qft(NQ, q);
    prog = new[q.size()];
    foreach (q[k]) prog[k] = q[k];
    re = new[nn]; im = new[nn];
    foreach (re[e]) begin re[e] = 0.0; im[e] = 0.0; end
    re[0] = 1.0;
    h.load_program(NQ, prog);
    h.load_state(NQ, re, im);
    h.run();
    foreach (prog[k]) begin
      ref_apply(re, im, NQ, prog[k]);
      exp_cycles += 2 + longint'(nn) * cycles_per_amp(prog[k].g);
    end
    h.read_state(NQ, ore, oim);
    // the paper's QFT gate count for 17 qubits is 721
    chk("gate count", q.size(), NQ + 5 * NQ * (NQ - 1) / 2 + 3 * (NQ / 2));
    chk("result in Pong when the gate count is odd", h.pong_results - pong0, q.size() % 2);
    chk("bus errors", h.bus_errors, 0);
    // run time: gates plus a few cycles of start/done overhead
    chk("run cycles", real'(h.last_run_cycles), real'(exp_cycles), 8.0);
    for (int e = 0; e < nn; e++) begin
      chk($sformatf("re[%0d]", e), ore[e], re[e], TOL);
      chk($sformatf("im[%0d]", e), oim[e], im[e], TOL);
      chk($sformatf("equal superposition re[%0d]", e), ore[e], ore[0], TOL);
      chk($sformatf("equal superposition im[%0d]", e), oim[e], oim[0], TOL);
      chk($sformatf("|alpha[%0d]|^2", e), ore[e] * ore[e] + oim[e] * oim[e], 1.0 / nn, 2.0 * TOL * $sqrt(1.0 / nn));
    end
    $display("QFT n=%0d: %0d gates, %0d cycles", NQ, q.size(), h.last_run_cycles);
  endtask

  initial begin
    for (int n = 3; n <= 12; n++) one(n);
    checks++;
    if (h.ping_results == 0 || h.pong_results == 0) begin
      failures++; $display("FAIL results did not use both memories");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
