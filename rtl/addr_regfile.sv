// addr_regfile: address registers of one SM.
//
// Every thread has NUM_AREG (4) 32-bit address registers that serve as the
// base of memory operands. Banked by SP lane like the other register files:
// one row address selects all registers of one warp row. Read is
// combinational; the write port updates register wsel in the enabled lanes
// at the clock edge. Cleared by the synchronous active-low reset. The number
// and width of the registers are this design's own; the paper only names
// the file.
module addr_regfile
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
  output logic [31:0]       rdata [NUM_SP][NUM_AREG],
  input  logic [AW-1:0]     waddr,
  input  logic [1:0]        wsel,
  input  logic [NUM_SP-1:0] we,
  input  logic [31:0]       wdata [NUM_SP]
);
  logic [31:0] regs [ROWS][NUM_SP][NUM_AREG];

  always_comb
    for (int l = 0; l < NUM_SP; l++)
      for (int a = 0; a < NUM_AREG; a++)
        rdata[l][a] = regs[raddr][l][a];

  always_ff @(posedge clk)
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int l = 0; l < NUM_SP; l++)
          for (int a = 0; a < NUM_AREG; a++) regs[r][l][a] <= '0;
    end else begin
      for (int l = 0; l < NUM_SP; l++)
        if (we[l]) regs[waddr][l][wsel] <= wdata[l];
    end
endmodule
