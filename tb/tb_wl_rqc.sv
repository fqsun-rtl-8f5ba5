// tb_wl_rqc: the random-quantum-circuit (RQC) benchmark on the emulator at
// its default size, depth d = 10, for n = 3 .. 11 qubits.
//
// Each circuit has n x d gates drawn from Clifford + Ri (H, S, CX, Rx, Ry,
// Rz, random qubits and angles) and starts from |0...0>. The host runs it
// and reads the 2^n amplitudes; the testbench compares each with a
// double-precision reference (absolute error below 1e-6), compares the
// sampling distribution |alpha_j|^2, and checks that the result sums to 1.
module tb_wl_rqc;
  import fqsun_pkg::*;
  import fqsun_host::*;
  import fqsun_circuits::*;
  localparam real TOL = 1.0e-6;
  localparam int D = 10;

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
    #(64'd400_000_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(int n);
    gate_t q[$];
    gate_t prog[];
    real re[], im[], ore[], oim[];
    real p = 0.0;
    rqc(n, D, q);
    prog = new[q.size()];
    foreach (q[k]) prog[k] = q[k];
    re = new[1 << n]; im = new[1 << n];
    foreach (re[e]) begin re[e] = 0.0; im[e] = 0.0; end
    re[0] = 1.0;
    h.load_program(n, prog);
    h.load_state(n, re, im);
    h.run();
    foreach (prog[k]) ref_apply(re, im, n, prog[k]);
    h.read_state(n, ore, oim);
    foreach (re[e]) begin
      chk($sformatf("n=%0d re[%0d]", n, e), ore[e], re[e], TOL);
      chk($sformatf("n=%0d im[%0d]", n, e), oim[e], im[e], TOL);
      chk($sformatf("n=%0d p[%0d]", n, e), ore[e] * ore[e] + oim[e] * oim[e],
          re[e] * re[e] + im[e] * im[e], 4.0 * TOL);
      p += ore[e] * ore[e] + oim[e] * oim[e];
    end
    chk($sformatf("n=%0d total probability", n), p, 1.0, 1.0e-5);
    $display("RQC n=%0d d=%0d: %0d gates, %0d cycles", n, D, prog.size(), h.last_run_cycles);
  endtask

  initial begin
    for (int n = 3; n <= 11; n++) one(n);
    checks++;
    if (h.bus_errors != 0) begin failures++; $display("FAIL bus errors"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
