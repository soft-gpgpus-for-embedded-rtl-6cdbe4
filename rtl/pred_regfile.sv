// pred_regfile: predicate registers of one SM.
//
// Every thread has four 4-bit predicate registers P0..P3 holding the flags
// {S,Z,C,O} of an earlier instruction. Like the vector register file the
// storage is banked by SP lane: a row address (warp * rows-per-warp + row)
// selects the 16 predicate bits of every lane of one warp row. One
// combinational read port feeds the predicate lookup table; the write port
// updates one selected register (wsel) in the enabled lanes at the clock
// edge. All predicates are cleared by the synchronous active-low reset.
module pred_regfile
  import flexgrip_pkg::*;
#(
  parameter int NUM_SP    = 8,
  parameter int MAX_WARPS = 24,
  localparam int ROWS     = MAX_WARPS * WARP_SIZE / NUM_SP,
  localparam int AW       = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [AW-1:0]     raddr,
  output flags_t            rdata [NUM_SP][NUM_PRED],
  input  logic [AW-1:0]     waddr,
  input  logic [1:0]        wsel,
  input  logic [NUM_SP-1:0] we,
  input  flags_t            wdata [NUM_SP]
);
  flags_t regs [ROWS][NUM_SP][NUM_PRED];

  always_comb
    for (int l = 0; l < NUM_SP; l++)
      for (int p = 0; p < NUM_PRED; p++)
        rdata[l][p] = regs[raddr][l][p];

  always_ff @(posedge clk)
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int l = 0; l < NUM_SP; l++)
          for (int p = 0; p < NUM_PRED; p++) regs[r][l][p] <= '0;
    end else begin
      for (int l = 0; l < NUM_SP; l++)
        if (we[l]) regs[waddr][l][wsel] <= wdata[l];
    end
endmodule
