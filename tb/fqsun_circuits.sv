// fqsun_circuits: testbench-only package building the benchmark circuits
// from the six native gates (qubit 0 is the most significant index bit).
//   qft(n):       H on each qubit followed by controlled phases CP(pi/2^k)
//                 to the later qubits, then the qubit-reversing swaps.
//                 CP(phi) on (c, t) = Rz_c(phi/2) Rz_t(phi/2) CX Rz_t(-phi/2)
//                 CX (exact up to a global phase), SWAP = three CX.
//   rqc(n, d):    d layers of n gates drawn at random from Clifford + Ri
//                 (H, S, CX, Rx, Ry, Rz) with random angles.
//   zxz(n, th):   one ZXZ layer, Rz(th[3q]) Rx(th[3q+1]) Rz(th[3q+2]) on each
//                 qubit q, the parameterised circuit of the PSR workload.
package fqsun_circuits;
  import fqsun_pkg::*;
  import fqsun_host::*;

  function automatic gate_t mk(gate_e g, int w0, int w1 = 0, real th = 0.0);
    gate_t x;
    x.g = g; x.w0 = w0; x.w1 = w1; x.theta = th;
    return x;
  endfunction

  function automatic void qft(int n, ref gate_t q[$]);
    real pi = 3.141592653589793;
    q.delete();
    for (int j = 0; j < n; j++) begin
      q.push_back(mk(G_H, j));
      for (int k = j + 1; k < n; k++) begin
        real phi = pi / real'(1 << (k - j));
        q.push_back(mk(G_RZ, j, 0, phi / 2));
        q.push_back(mk(G_RZ, k, 0, phi / 2));
        q.push_back(mk(G_CX, j, k));
        q.push_back(mk(G_RZ, k, 0, -phi / 2));
        q.push_back(mk(G_CX, j, k));
      end
    end
    for (int j = 0; j < n / 2; j++) begin
      q.push_back(mk(G_CX, j, n - 1 - j));
      q.push_back(mk(G_CX, n - 1 - j, j));
      q.push_back(mk(G_CX, j, n - 1 - j));
    end
  endfunction

  function automatic void rqc(int n, int d, ref gate_t q[$]);
    q.delete();
    for (int l = 0; l < d; l++)
      for (int j = 0; j < n; j++) begin
        gate_e g = gate_e'($urandom % 6);
        int t = $urandom % n;
        if (g == G_CX && n == 1) g = G_H;
        if (g == G_CX) q.push_back(mk(G_CX, j, (j + 1 + t % (n - 1)) % n));
        else q.push_back(mk(g, j, 0, 6.283185307179586 * ($urandom % 10000) / 10000.0));
      end
  endfunction

  function automatic void zxz(int n, real th[], ref gate_t q[$]);
    q.delete();
    for (int j = 0; j < n; j++) begin
      q.push_back(mk(G_RZ, j, 0, th[3 * j]));
      q.push_back(mk(G_RX, j, 0, th[3 * j + 1]));
      q.push_back(mk(G_RZ, j, 0, th[3 * j + 2]));
    end
  endfunction
endpackage
