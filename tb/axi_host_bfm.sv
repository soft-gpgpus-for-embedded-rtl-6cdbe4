// axi_host_bfm: AXI4-Lite master that plays the host driver in the
// whole-design testbenches. Tasks: write(addr, data) and read(addr, data).
// One transfer at a time; each task returns when the response has arrived.
// Interface: the AXI4-Lite master signals, driven on the falling clock
// edge. Each transfer waits for the handshake, then the response. The bus
// follows the paper (AXI); the single-transfer protocol is this design's own.
module axi_host_bfm (
  input  logic        clk,
  output logic        awvalid,
  input  logic        awready,
  output logic [31:0] awaddr,
  output logic        wvalid,
  input  logic        wready,
  output logic [31:0] wdata,
  output logic [3:0]  wstrb,
  input  logic        bvalid,
  output logic        bready,
  output logic        arvalid,
  input  logic        arready,
  output logic [31:0] araddr,
  input  logic        rvalid,
  output logic        rready,
  input  logic [31:0] rdata
);
  initial begin
    awvalid = 0; wvalid = 0; awaddr = 0; wdata = 0; wstrb = 4'hf;
    bready = 1; arvalid = 0; araddr = 0; rready = 1;
  end

  task automatic write(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    awvalid = 1; wvalid = 1; awaddr = a; wdata = d;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
  endtask

  task automatic read(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    arvalid = 1; araddr = a;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
  endtask
endmodule
