// vector_regfile: the general-purpose registers of one SM.
//
// NUM_REGS 32-bit registers (8,192 per SM in the baseline) are split into
// NUM_SP banks, one per scalar processor lane. A thread whose index in the
// SM is t lives in bank (t mod NUM_SP); its register r sits at bank address
// (t div NUM_SP) * regs_per_thread + r. All lanes of a warp row therefore
// share one bank address, so each read port takes a single row address and
// returns NUM_SP words, one per lane. The bank layout is this design's own;
// the paper states only that the file is partitioned among threads.
//
// NRD read ports (one per operand unit) are combinational. One write port
// writes the lanes whose enable is set, at the clock edge.
module vector_regfile #(
  parameter int NUM_SP   = 8,
  parameter int NUM_REGS = 8192,
  parameter int NRD      = 3,
  localparam int DEPTH   = NUM_REGS / NUM_SP,
  localparam int AW      = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic [AW-1:0] raddr [NRD],
  output logic [31:0]   rdata [NRD][NUM_SP],
  input  logic [AW-1:0] waddr,
  input  logic [NUM_SP-1:0] we,
  input  logic [31:0]   wdata [NUM_SP]
);
  logic [31:0] bank [NUM_SP][DEPTH];

  always_comb
    for (int p = 0; p < NRD; p++)
      for (int l = 0; l < NUM_SP; l++)
        rdata[p][l] = bank[l][raddr[p]];

  always_ff @(posedge clk)
    for (int l = 0; l < NUM_SP; l++)
      if (we[l]) bank[l][waddr] <= wdata[l];
endmodule
