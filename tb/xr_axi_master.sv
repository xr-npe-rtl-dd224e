// xr_axi_master: behavioural AXI4-Lite master used by the co-processor
// testbenches in place of the host processor. Its tasks issue one write or
// read and wait for the response; they count how many answers were SLVERR.
// Handshake signals are driven and sampled at the falling clock edge.
module xr_axi_master (
  input  logic        clk,
  output logic        awvalid,
  input  logic        awready,
  output logic [15:0] awaddr,
  output logic        wvalid,
  input  logic        wready,
  output logic [31:0] wdata,
  input  logic        bvalid,
  output logic        bready,
  input  logic [1:0]  bresp,
  output logic        arvalid,
  input  logic        arready,
  output logic [15:0] araddr,
  input  logic        rvalid,
  output logic        rready,
  input  logic [31:0] rdata,
  input  logic [1:0]  rresp
);
  int slverr = 0;

  initial begin
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = '0; wdata = '0; araddr = '0;
  end

  task automatic write(input logic [15:0] addr, input logic [31:0] data);
    @(negedge clk);
    awvalid = 1; awaddr = addr; wvalid = 1; wdata = data;
    #1;
    while (!(awready && wready)) @(negedge clk);
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    if (bresp != 2'b00) slverr++;
    bready = 1;
    @(negedge clk);
    bready = 0;
  endtask

  task automatic read(input logic [15:0] addr, output logic [31:0] data);
    @(negedge clk);
    arvalid = 1; araddr = addr;
    #1;
    while (!arready) @(negedge clk);
    @(negedge clk);
    arvalid = 0;
    while (!rvalid) @(negedge clk);
    data = rdata;
    if (rresp != 2'b00) slverr++;
    rready = 1;
    @(negedge clk);
    rready = 0;
  endtask
endmodule
