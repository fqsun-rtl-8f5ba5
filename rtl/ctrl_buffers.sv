// ctrl_buffers: the host-visible control and status registers.
//
// Register map (word offsets within the control region):
//   0 CTRL    W  bit0 load (level), bit1 start, bit2 stop (both self-clearing
//                 pulses); reads back {stop=0, start=0, load}
//   1 NQUBITS RW 5-bit number of qubits n of the session
//   2 NGATES  RW number of gates m in the context memory (GATE_W bits)
//   3 STATUS  R  bit0 done, bit1 busy, bit2 result in Pong
//   4 PC      R  program counter (index of the gate being executed)
// load, start, stop, done and the 5-bit #qubits are the paper's; the gate
// count register, the busy/Pong status bits and the PC readback are this
// design's additions (the paper does not say how the controller learns m).
// done is set by the controller (done_set) when the last gate finishes and
// cleared by start or stop. Writes and reads come from the AXI mapper; read
// data is registered (valid one cycle after rd_en), like the memories.
// Lint note: write-data bits above the widest register are unused.
module ctrl_buffers #(
  parameter int unsigned NQ_W   = 5,
  parameter int unsigned GATE_W = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  // host side
  input  logic              wr_en,
  input  logic              rd_en,
  input  logic [2:0]        addr,
  input  logic [31:0]       wdata,
  output logic [31:0]       rdata,
  // to / from the controller
  output logic              load,
  output logic              start,
  output logic              stop,
  output logic [NQ_W-1:0]   nqubits,
  output logic [GATE_W-1:0] ngates,
  input  logic              done_set,
  output logic              done,
  input  logic              busy,
  input  logic              result_in_pong,
  input  logic [GATE_W-1:0] pc
);
  logic done_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      load    <= 1'b0;
      start   <= 1'b0;
      stop    <= 1'b0;
      nqubits <= '0;
      ngates  <= '0;
      done_q  <= 1'b0;
    end else begin
      start <= 1'b0;
      stop  <= 1'b0;
      if (wr_en) begin
        unique case (addr)
          3'd0: begin
            load  <= wdata[0];
            start <= wdata[1];
            stop  <= wdata[2];
          end
          3'd1: nqubits <= wdata[NQ_W-1:0];
          3'd2: ngates  <= wdata[GATE_W-1:0];
          default: ;
        endcase
      end
      if (start || stop) done_q <= 1'b0;
      else if (done_set) done_q <= 1'b1;
    end
  end

  assign done = done_q;

  always_ff @(posedge clk) begin
    if (rd_en) begin
      unique case (addr)
        3'd0:    rdata <= 32'(load);
        3'd1:    rdata <= 32'(nqubits);
        3'd2:    rdata <= 32'(ngates);
        3'd3:    rdata <= 32'({result_in_pong, busy, done_q});
        3'd4:    rdata <= 32'(pc);
        default: rdata <= '0;
      endcase
    end
  end
endmodule
