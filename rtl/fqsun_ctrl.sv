// fqsun_ctrl: the FQsun controller, which sequences a whole session.
//
// A session runs the m gates held in the context memory on an n-qubit state.
// The program counter pc walks the context memory. For every gate the
// controller fetches the context word (FETCH, DECODE) and then visits each
// amplitude index i = 0 .. 2^n-1 in turn:
//   READ   read x = src[i], y = dst[i] and z = dst[p], p = i+cut if the target
//          bit of i (i & cut) is 0, else i-cut;
//   WAIT   gate_latency(gate) cycles while the QGU multipliers fill (H, Rx,
//          Ry, Rz: 2 cycles, S and CX: none);
//   WRITE  dst[i] <= y', dst[p] <= z', src[i] <= 0.
// So one amplitude costs 2 + latency cycles (4 for H/Rx/Ry/Rz, 2 for S/CX,
// the paper's FX cycle counts), a gate costs 2 + 2^n * that. src and dst are
// the Ping and Pong memories; which is which (sel) flips after every gate, so
// the vector read by gate t+1 is the one gate t wrote and the vector gate t
// read has been zeroed for gate t+1 to accumulate into (the paper's Ping/Pong
// schedule). After the last gate done_set pulses and the final state is in
// Pong if m is odd, in Ping if m is even (sel = 1 means Pong).
// start (pulse) begins a session at pc = 0 with Ping as the source, unless
// load is high; stop (pulse) aborts and resets pc and sel. The paper gives
// the PC, the alternation and clearing, and start/stop/load/done; the exact
// state sequence is this design's.
// Lint note: rst_n is the asynchronous reset of the flops and also the
// synchronous disable of the a_nqubits_fit assertion, which a linter
// reports as mixed use.
module fqsun_ctrl #(
  parameter int unsigned W      = 32,
  parameter int unsigned AW     = 17,   // log2 of the amplitude memory depth
  parameter int unsigned CUT_W  = AW,
  parameter int unsigned GATE_W = 12,
  parameter int unsigned DAW    = 11    // context memory address width
) (
  input  logic              clk,
  input  logic              rst_n,
  // control buffers
  input  logic              load,
  input  logic              start,
  input  logic              stop,
  input  logic [4:0]        nqubits,
  input  logic [GATE_W-1:0] ngates,
  output logic              done_set,
  output logic              busy,
  output logic              sel,
  output logic [GATE_W-1:0] pc,
  // context memory read port
  output logic              ctx_re,
  output logic [DAW-1:0]    ctx_raddr,
  input  fqsun_pkg::gate_e  ctx_gate,
  input  logic [4:0]        ctx_w0,
  input  logic [CUT_W-1:0]  ctx_cut,
  input  logic [W-1:0]      ctx_sin,
  input  logic [W-1:0]      ctx_cos,
  // logical amplitude ports: src (current vector), dst A and dst B (new vector)
  output logic              src_en,
  output logic              src_we,
  output logic [AW-1:0]     src_addr,
  output logic              dsta_en,
  output logic              dsta_we,
  output logic [AW-1:0]     dsta_addr,
  output logic              dstb_en,
  output logic              dstb_we,
  output logic [AW-1:0]     dstb_addr,
  // QGU configuration
  output fqsun_pkg::gate_e  q_gate,
  output logic              q_state,
  output logic              q_ctrl,
  output logic [W-1:0]      q_sin,
  output logic [W-1:0]      q_cos
);
  import fqsun_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_DECODE, S_READ, S_WAIT, S_WRITE} st_e;

  st_e              st;
  logic [AW-1:0]    idx;
  logic [AW-1:0]    cut_q;
  logic [4:0]       ctrl_pos;
  logic [1:0]       cnt;
  logic [AW:0]      last_idx;
  logic [AW-1:0]    partner;
  logic             tbit;

  assign last_idx = ({{AW{1'b0}}, 1'b1} << nqubits) - 1'b1;
  assign tbit     = |(idx & cut_q);
  assign partner  = tbit ? (idx - cut_q) : (idx + cut_q);

  assign busy      = (st != S_IDLE);
  assign q_state   = tbit;
  assign q_ctrl    = idx[ctrl_pos[$clog2(AW)-1:0]];
  assign ctx_re    = (st == S_FETCH);
  assign ctx_raddr = pc[DAW-1:0];

  assign src_en    = (st == S_READ) || (st == S_WRITE);
  assign src_we    = (st == S_WRITE);
  assign src_addr  = idx;
  assign dsta_en   = src_en;
  assign dsta_we   = src_we;
  assign dsta_addr = idx;
  assign dstb_en   = src_en;
  assign dstb_we   = src_we;
  assign dstb_addr = partner;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      pc       <= '0;
      sel      <= 1'b0;
      idx      <= '0;
      cut_q    <= '0;
      ctrl_pos <= '0;
      cnt      <= '0;
      q_gate   <= G_H;
      q_sin    <= '0;
      q_cos    <= '0;
      done_set <= 1'b0;
    end else begin
      done_set <= 1'b0;
      if (stop) begin
        st  <= S_IDLE;
        pc  <= '0;
        sel <= 1'b0;
      end else begin
        unique case (st)
          S_IDLE: if (start && !load) begin
            pc  <= '0;
            sel <= 1'b0;
            if (ngates == '0) done_set <= 1'b1;
            else              st       <= S_FETCH;
          end
          S_FETCH: st <= S_DECODE;
          S_DECODE: begin
            q_gate   <= ctx_gate;
            q_sin    <= ctx_sin;
            q_cos    <= ctx_cos;
            cut_q    <= ctx_cut[AW-1:0];
            ctrl_pos <= nqubits - 5'd1 - ctx_w0;
            idx      <= '0;
            st       <= S_READ;
          end
          S_READ: begin
            cnt <= 2'(gate_latency(q_gate));
            st  <= (gate_latency(q_gate) == 0) ? S_WRITE : S_WAIT;
          end
          S_WAIT: begin
            cnt <= cnt - 2'd1;
            if (cnt == 2'd1) st <= S_WRITE;
          end
          S_WRITE: begin
            if ({1'b0, idx} == last_idx) begin
              sel <= ~sel;
              pc  <= pc + 1'b1;
              if (pc + 1'b1 == ngates) begin
                done_set <= 1'b1;
                st       <= S_IDLE;
              end else begin
                st <= S_FETCH;
              end
            end else begin
              idx <= idx + 1'b1;
              st  <= S_READ;
            end
          end
          default: st <= S_IDLE;
        endcase
      end
    end
  end

  // A session may only start with a qubit count the memories can hold.
  a_nqubits_fit: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_IDLE && start && !load) |-> (nqubits >= 5'd1 && nqubits <= 5'(AW)));
endmodule
