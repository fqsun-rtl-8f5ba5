// fqsun_host: testbench-only package: the host software's encoding of gates
// and a reference state-vector simulator, shared by the end-to-end testbenches.
//
// The host side turns gates into context words the way the software stack
// would: cut = 2^(n-1-target), sin(theta/2) and cos(theta/2) in Q1.(W-2),
// field 0 = {w1, w0, opcode}. Qubit w is bit n-1-w of the amplitude index
// (qubit 0 is the most significant), matching cut. For CX, w0 is the control
// and w1 the target. The reference applies the exact gate matrices in double
// precision:
//   H = [1 1; 1 -1]/sqrt2, S = diag(1, i), Rx = [c -is; -is c],
//   Ry = [c -s; s c], Rz = diag(c - is, c + is), c = cos(t/2), s = sin(t/2).
// The bus accesses themselves are tasks of the testbenches, which own the
// AXI master.
package fqsun_host;
  import fqsun_pkg::*;

  typedef struct {
    gate_e g;
    int    w0;     // target (single-qubit gates) or control (CX)
    int    w1;     // target of CX
    real   theta;
  } gate_t;

  localparam int REG_CTRL = 0, REG_NQ = 4, REG_NG = 8, REG_STATUS = 12, REG_PC = 16;

  function automatic int target_of(gate_t x);
    return (x.g == G_CX) ? x.w1 : x.w0;
  endfunction

  // reference: apply one gate to (re, im), 2^n entries
  function automatic void ref_apply(ref real re[], ref real im[], input int n, input gate_t x);
    int nn = 1 << n;
    int cut = 1 << (n - 1 - target_of(x));
    real c = $cos(x.theta / 2.0), s = $sin(x.theta / 2.0), k = 1.0 / $sqrt(2.0);
    for (int i = 0; i < nn; i++) begin
      if ((i & cut) == 0) begin
        int j = i + cut;
        real ar = re[i], ai = im[i], br = re[j], bi = im[j];
        real nar, nai, nbr, nbi;
        if (x.g == G_CX && ((i >> (n - 1 - x.w0)) & 1) == 0) continue;
        unique case (x.g)
          G_H:  begin nar = k*(ar+br); nai = k*(ai+bi); nbr = k*(ar-br); nbi = k*(ai-bi); end
          G_S:  begin nar = ar; nai = ai; nbr = -bi; nbi = br; end
          G_CX: begin nar = br; nai = bi; nbr = ar; nbi = ai; end
          G_RX: begin nar = c*ar + s*bi; nai = c*ai - s*br; nbr = s*ai + c*br; nbi = -s*ar + c*bi; end
          G_RY: begin nar = c*ar - s*br; nai = c*ai - s*bi; nbr = s*ar + c*br; nbi = s*ai + c*bi; end
          default: begin  // Rz
            nar = c*ar + s*ai; nai = c*ai - s*ar; nbr = c*br - s*bi; nbi = c*bi + s*br;
          end
        endcase
        re[i] = nar; im[i] = nai; re[j] = nbr; im[j] = nbi;
      end
    end
  endfunction

  function automatic longint to_fx(real v, int w);
    return longint'(v * (2.0 ** (w - 2)));
  endfunction

  function automatic real from_fx(logic [31:0] v, int w);
    return real'($signed(v)) / (2.0 ** (w - 2));
  endfunction
endpackage
