// axi_lite_master: testbench-only AXI4-Lite master (the host processor's
// bus side). write() and read() run one transaction each and return the
// response code; the valid signals are held until the slave is ready, and
// the master waits a random 0-2 cycles before accepting a response.
module axi_lite_master #(
  parameter int ADDR_W = 23
) (
  input  logic              clk,
  output logic [ADDR_W-1:0] awaddr,
  output logic              awvalid,
  input  logic              awready,
  output logic [31:0]       wdata,
  output logic [3:0]        wstrb,
  output logic              wvalid,
  input  logic              wready,
  input  logic [1:0]        bresp,
  input  logic              bvalid,
  output logic              bready,
  output logic [ADDR_W-1:0] araddr,
  output logic              arvalid,
  input  logic              arready,
  input  logic [31:0]       rdata,
  input  logic [1:0]        rresp,
  input  logic              rvalid,
  output logic              rready
);
  bit random_ready = 1'b1;

  initial begin
    awaddr = '0; awvalid = 0; wdata = '0; wstrb = 4'hF; wvalid = 0; bready = 0;
    araddr = '0; arvalid = 0; rready = 0;
  end

  task automatic write(input logic [ADDR_W-1:0] a, input logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    awaddr = a; awvalid = 1; wdata = d; wvalid = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    if (random_ready) repeat ($urandom % 3) @(negedge clk);
    bready = 1;
    while (!bvalid) @(negedge clk);
    resp = bresp;
    @(posedge clk);
    @(negedge clk) bready = 0;
  endtask

  task automatic read(input logic [ADDR_W-1:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0;
    if (random_ready) repeat ($urandom % 3) @(negedge clk);
    rready = 1;
    while (!rvalid) @(negedge clk);
    d = rdata; resp = rresp;
    @(posedge clk);
    @(negedge clk) rready = 0;
  endtask
endmodule
