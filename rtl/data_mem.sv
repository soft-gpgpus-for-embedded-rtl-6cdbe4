// data_mem: word-organised data memory with many ports.
//
// Used three times: as the global memory shared by all SMs, as the constant
// memory written by the host and read by the operand units, and inside each
// SM as its shared memory (16 KB, the per-SM limit of the FlexGrip physical
// limits table). Addresses are byte addresses; the two low bits are ignored
// and the word index wraps modulo WORDS.
//
// NRD read ports are combinational (one per SP lane and operand unit, so a
// whole warp row reads in one cycle); NWR write ports are synchronous. When
// several ports write one word in the same cycle the highest-numbered port
// wins. The multi-port organisation is this design's own choice; the paper
// only names the memories.
module data_mem #(
  parameter int WORDS = 4096,
  parameter int NRD   = 1,
  parameter int NWR   = 1,
  localparam int AW   = $clog2(WORDS)
) (
  input  logic        clk,
  input  logic [31:0] raddr [NRD],
  output logic [31:0] rdata [NRD],
  input  logic        we    [NWR],
  input  logic [31:0] waddr [NWR],
  input  logic [31:0] wdata [NWR]
);
  logic [31:0] mem [WORDS];

  always_comb
    for (int p = 0; p < NRD; p++) rdata[p] = mem[raddr[p][AW+1:2]];

  always_ff @(posedge clk)
    for (int p = 0; p < NWR; p++)
      if (we[p]) mem[waddr[p][AW+1:2]] <= wdata[p];
endmodule
