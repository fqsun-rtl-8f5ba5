// tb_wl_psr: the quantum-differentiable-programming benchmark (gradient by
// the parameter-shift rule, PSR) on the emulator at its default size, for
// n = 3 .. 5 qubits.
//
// The circuit is one ZXZ layer (Rz, Rx, Rz on each qubit, 3n angles) on
// |0...0>, the cost C(theta) = sum_j j |alpha_j|^2. For each angle the host
// runs the circuit with that angle shifted by +pi/2 and by -pi/2 (2 x 3n
// sessions) and forms dC/dtheta_k = (C(+) - C(-)) / 2, the two-term shift
// rule for these rotation gates (the paper prints the factor as 1/sqrt(2);
// 1/2 is the exact value for gates of the form exp(-i theta P / 2)). The
// cost and the ZXZ layer follow the paper; the sizes, the step size 0.1 and
// the finite-difference cross-check are this testbench's. Checks: every C from the emulator against
// the double-precision reference, every gradient component against a
// central finite difference of the reference, and that one gradient-descent
// step theta - 0.1 * grad lowers the cost measured on the emulator.
module tb_wl_psr;
  import fqsun_pkg::*;
  import fqsun_host::*;
  import fqsun_circuits::*;
  localparam real PI = 3.141592653589793;

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

  function automatic real cost(real re[], real im[]);
    real c = 0.0;
    foreach (re[j]) c += real'(j) * (re[j] * re[j] + im[j] * im[j]);
    return c;
  endfunction

  function automatic real ref_cost(int n, real th[]);
    gate_t q[$];
    real re[], im[];
    re = new[1 << n]; im = new[1 << n];
    foreach (re[e]) begin re[e] = 0.0; im[e] = 0.0; end
    re[0] = 1.0;
    zxz(n, th, q);
    foreach (q[k]) ref_apply(re, im, n, q[k]);
    return cost(re, im);
  endfunction

  // run the ZXZ circuit with angles th on the emulator, return C
  task automatic hw_cost(int n, real th[], output real c);
    gate_t q[$];
    gate_t prog[];
    real re[], im[], ore[], oim[];
    zxz(n, th, q);
    prog = new[q.size()];
    foreach (q[k]) prog[k] = q[k];
    re = new[1 << n]; im = new[1 << n];
    foreach (re[e]) begin re[e] = 0.0; im[e] = 0.0; end
    re[0] = 1.0;
    h.load_program(n, prog);
    h.load_state(n, re, im);
    h.run();
    h.read_state(n, ore, oim);
    c = cost(ore, oim);
  endtask

  task automatic one(int n);
    real th[], sh[], grad[];
    real c0, c1, cp, cm, fd, tol;
    int m = 3 * n;
    tol = 1.0e-5 * real'(1 << n);
    th = new[m]; grad = new[m];
    foreach (th[k]) th[k] = 2.0 * PI * ($urandom % 1000) / 1000.0;
    hw_cost(n, th, c0);
    chk($sformatf("n=%0d C(theta)", n), c0, ref_cost(n, th), tol);
    for (int k = 0; k < m; k++) begin
      sh = new[m](th); sh[k] = th[k] + PI / 2; hw_cost(n, sh, cp);
      chk($sformatf("n=%0d C(theta+pi/2 e_%0d)", n, k), cp, ref_cost(n, sh), tol);
      sh = new[m](th); sh[k] = th[k] - PI / 2; hw_cost(n, sh, cm);
      chk($sformatf("n=%0d C(theta-pi/2 e_%0d)", n, k), cm, ref_cost(n, sh), tol);
      grad[k] = (cp - cm) / 2.0;
      sh = new[m](th); sh[k] = th[k] + 1.0e-4; fd = ref_cost(n, sh);
      sh[k] = th[k] - 1.0e-4; fd = (fd - ref_cost(n, sh)) / 2.0e-4;
      chk($sformatf("n=%0d dC/dtheta_%0d", n, k), grad[k], fd, tol + 1.0e-4 * real'(1 << n));
    end
    foreach (th[k]) th[k] -= 0.1 * grad[k];
    hw_cost(n, th, c1);
    checks++;
    if (!(c1 < c0)) begin failures++; $display("FAIL n=%0d descent step: %f -> %f", n, c0, c1); end
    $display("PSR n=%0d: %0d angles, C %f -> %f after one step", n, m, c0, c1);
  endtask

  initial begin
    for (int n = 3; n <= 5; n++) one(n);
    checks++;
    if (h.bus_errors != 0) begin failures++; $display("FAIL bus errors"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
