// amp_mem: one amplitude memory (the design has two: Ping and Pong).
//
// 2^AW words, each one complex amplitude {imaginary, real} of 2*W bits.
// Two independent ports, A and B, each with a synchronous read (data on
// *_rdata one cycle after *_en, held until the next enabled read) and a
// write with separate enables for the real and imaginary halves, so a
// 32-bit host bus can fill a 64-bit word in two beats. A port that writes
// in a cycle does not read. The paper gives the word layout and the
// dual-port organisation; depth 2^17 for the 32-bit formats (2^18 for the
// 16-bit ones).
module amp_mem #(
  parameter int unsigned W  = 32,
  parameter int unsigned AW = 17
) (
  input  logic            clk,
  input  logic            a_en,
  input  logic [1:0]      a_we,      // [0] real half, [1] imaginary half
  input  logic [AW-1:0]   a_addr,
  input  logic [2*W-1:0]  a_wdata,   // {imag, real}
  output logic [2*W-1:0]  a_rdata,
  input  logic            b_en,
  input  logic [1:0]      b_we,
  input  logic [AW-1:0]   b_addr,
  input  logic [2*W-1:0]  b_wdata,
  output logic [2*W-1:0]  b_rdata
);
  logic [2*W-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we[0]) mem[a_addr][W-1:0]   <= a_wdata[W-1:0];
      if (a_we[1]) mem[a_addr][2*W-1:W] <= a_wdata[2*W-1:W];
      if (a_we == 2'b00) a_rdata <= mem[a_addr];
    end
  end

  always_ff @(posedge clk) begin
    if (b_en) begin
      if (b_we[0]) mem[b_addr][W-1:0]   <= b_wdata[W-1:0];
      if (b_we[1]) mem[b_addr][2*W-1:W] <= b_wdata[2*W-1:W];
      if (b_we == 2'b00) b_rdata <= mem[b_addr];
    end
  end

  // Both ports writing the same word in one cycle is undefined.
  a_no_write_clash: assert property (@(posedge clk)
    !(a_en && b_en && (a_we != 2'b00) && (b_we != 2'b00) && (a_addr == b_addr)));
endmodule
