// fqsun_pkg: types and constants shared by the FQsun wave-function emulator.
//
// The emulator keeps a 2^n-entry complex state vector and applies one gate
// at a time to it. Each gate is one instruction in the context memory and is
// identified by the 3-bit opcode below. The six opcodes are the six gate
// units of the Quantum Gate Unit (H, S, CX, Rx, Ry, Rz); T, X, Y and Z are
// issued by software as Rz/Rx/Ry with a fixed angle. The opcode values are
// this design's own choice: the paper fixes only the field width (3 bits).
//
// Numbers are fixed point with one sign bit, one integer bit and W-2
// fraction bits (Q1.(W-2)), as in the paper's FX16/FX24/FX32 formats.
package fqsun_pkg;

  typedef enum logic [2:0] {
    G_H  = 3'd0,
    G_S  = 3'd1,
    G_CX = 3'd2,
    G_RX = 3'd3,
    G_RY = 3'd4,
    G_RZ = 3'd5
  } gate_e;

  // Pipeline depth of the fixed-point multipliers (paper: two stages).
  localparam int unsigned MUL_STAGES = 2;

  // Number of pipeline stages a gate spends in the QGU after its operands
  // arrive. Fixed-point adders are combinational, so only gates that
  // multiply (H, Rx, Ry, Rz) take the multiplier's stages.
  function automatic int unsigned gate_latency(gate_e g);
    return (g == G_S || g == G_CX) ? 0 : MUL_STAGES;
  endfunction

  // Clock cycles per amplitude: one read cycle, the QGU latency, one write
  // cycle. This reproduces the paper's FX cycle counts (H 4, S 2, CX 2,
  // Rx 4, Ry 4, Rz 4).
  function automatic int unsigned cycles_per_amp(gate_e g);
    return 2 + gate_latency(g);
  endfunction

  // floor(sqrt(v)) for constant evaluation (bit-by-bit integer root).
  function automatic longint unsigned isqrt(longint unsigned v);
    longint unsigned r, b;
    r = 0;
    b = 64'h4000_0000_0000_0000;
    while (b > v) b = b >> 2;
    while (b != 0) begin
      if (v >= r + b) begin
        v = v - (r + b);
        r = (r >> 1) + b;
      end else begin
        r = r >> 1;
      end
      b = b >> 2;
    end
    return r;
  endfunction

  // 1/sqrt(2) in Q1.(w-2), rounded to nearest: with r = floor(2^(w-2) * sqrt(2))
  // = isqrt(2^(2(w-2)+1)), the value is (r + 1) / 2.
  function automatic longint unsigned inv_sqrt2_fx(int unsigned w);
    return (isqrt(64'd1 << (2 * (w - 2) + 1)) + 1) >> 1;
  endfunction

endpackage
