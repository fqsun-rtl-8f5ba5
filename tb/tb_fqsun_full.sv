// tb_fqsun_full: one complete session of the emulator at its default size
// (Q1.30 numbers, 2^17-entry Ping/Pong memories, 2048-gate context memory)
// on 17 qubits, the largest state the 32-bit version holds.
//
// The host loads a random normalised 17-qubit state and one layer of an
// RQC-style circuit: one gate per qubit, cycling through H, S, CX, Rx, Ry,
// Rz, with random angles (17 gates, odd, so the result is in Pong). It runs
// the session and reads back all 2^17 amplitudes. Checks: every amplitude
// against a double-precision reference (absolute error below 1e-6), the
// norm of the result, the result memory, and the run time against the
// per-gate cost (2^17 x 4 cycles for H/Rx/Ry/Rz, x 2 for S/CX, plus 2 per
// gate for the context fetch, within a few cycles of start/done overhead).
module tb_fqsun_full;
  import fqsun_pkg::*;
  import fqsun_host::*;
  import fqsun_circuits::*;
  localparam int NQ = 17;
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
    #(64'd1_000_000_000);   // 100 million clock cycles
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gate_t prog[];
    real re[], im[], ore[], oim[];
    real norm = 0.0, onorm = 0.0;
    longint exp_cycles = 0;
    int nn = 1 << NQ;
    gate_e kinds[6] = '{G_H, G_S, G_CX, G_RX, G_RY, G_RZ};
    prog = new[NQ];
    foreach (prog[j])
      prog[j] = mk(kinds[j % 6], j, (j + 5) % NQ, 6.283185307179586 * ($urandom % 10000) / 10000.0);
    re = new[nn]; im = new[nn];
    foreach (re[e]) begin
      re[e] = real'($urandom % 2001) - 1000.0; im[e] = real'($urandom % 2001) - 1000.0;
      norm += re[e] * re[e] + im[e] * im[e];
    end
    foreach (re[e]) begin re[e] /= $sqrt(norm); im[e] /= $sqrt(norm); end
    h.load_program(NQ, prog);
    h.load_state(NQ, re, im);
    h.run();
    foreach (prog[k]) begin
      ref_apply(re, im, NQ, prog[k]);
      exp_cycles += 2 + longint'(nn) * cycles_per_amp(prog[k].g);
    end
    h.read_state(NQ, ore, oim);
    chk("result in Pong (odd gate count)", h.pong_results, 1);
    chk("bus errors", h.bus_errors, 0);
    chk("run cycles", real'(h.last_run_cycles), real'(exp_cycles), 8.0);
    for (int e = 0; e < nn; e++) begin
      chk($sformatf("re[%0d]", e), ore[e], re[e], TOL);
      chk($sformatf("im[%0d]", e), oim[e], im[e], TOL);
      onorm += ore[e] * ore[e] + oim[e] * oim[e];
    end
    chk("norm", onorm, 1.0, 1.0e-5);
    $display("n=%0d: %0d gates, %0d cycles", NQ, prog.size(), h.last_run_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
