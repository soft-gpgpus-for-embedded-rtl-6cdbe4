// instr_mem: system memory holding the kernel binary.
//
// Each SM's fetch stage presents a byte address and receives, in the same
// cycle, the 32-bit word at that address (low word) and the next word (high
// word), so that both 4-byte and 8-byte instructions are available. The
// host writes one 32-bit word per cycle through the write port. The
// capacity is this design's choice; the paper does not give one.
//
// Lint note: the host write address uses only the word-index bits; the
// byte-offset and upper bits are ignored.
module instr_mem #(
  parameter int WORDS  = 1024,
  parameter int NUM_SM = 1,
  localparam int AW    = $clog2(WORDS)
) (
  input  logic        clk,
  input  logic [31:0] raddr [NUM_SM],
  output logic [63:0] rdata [NUM_SM],
  input  logic        we,
  input  logic [31:0] waddr,
  input  logic [31:0] wdata
);
  logic [31:0] mem [WORDS];

  always_comb
    for (int s = 0; s < NUM_SM; s++) begin
      logic [AW-1:0] w;
      w = raddr[s][AW+1:2];
      rdata[s] = {mem[AW'(w + 1'b1)], mem[w]};
    end

  always_ff @(posedge clk)
    if (we) mem[waddr[AW+1:2]] <= wdata;
endmodule
