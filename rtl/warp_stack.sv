// warp_stack: the per-warp divergence stacks of the control flow unit.
//
// Every warp owns a stack of DEPTH entries of 66 bits: a 32-bit instruction
// address, a 2-bit type (reconvergence point or start of a taken path) and
// the 32-bit active-thread mask. The baseline depth is 32, enough for the
// worst case of 32 nested divergences; smaller depths (16, 2, 0) are the
// application-specific reductions. DEPTH=0 builds no storage: the stack is
// then always empty and full, and every push is reported as an overflow.
//
// Interface: one warp is addressed per cycle (wid). top/empty/full are
// combinational for that warp; push and pop take effect at the clock edge.
// A push with pop in the same cycle replaces the top. A push to a full stack
// is dropped and raises overflow for that cycle; a pop of an empty stack is
// ignored. Synchronous active-low reset empties all stacks.
module warp_stack
  import flexgrip_pkg::*;
#(
  parameter int MAX_WARPS = 24,
  parameter int DEPTH     = 32,
  localparam int WID_W    = $clog2(MAX_WARPS),
  localparam int SP_W     = $clog2(DEPTH + 1),
  localparam int IW       = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WID_W-1:0] wid,
  input  logic             push,
  input  stack_entry_t     push_entry,
  input  logic             pop,
  output stack_entry_t     top,
  output logic             empty,
  output logic             full,
  output logic             overflow
);
  if (DEPTH > 0) begin : g_stack
    stack_entry_t    mem [MAX_WARPS][DEPTH];
    logic [SP_W-1:0] sp  [MAX_WARPS];
    logic [SP_W-1:0] cur;

    assign cur      = sp[wid];
    assign empty    = (cur == '0);
    assign full     = (cur == SP_W'(DEPTH));
    assign top      = empty ? '0 : mem[wid][IW'(cur - 1'b1)];
    assign overflow = push && full && !pop;

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int w = 0; w < MAX_WARPS; w++) sp[w] <= '0;
      end else begin
        if (push && pop && !empty) begin
          mem[wid][IW'(cur - 1'b1)] <= push_entry;
        end else if (push && !full) begin
          mem[wid][IW'(cur)] <= push_entry;
          sp[wid]       <= cur + 1'b1;
        end else if (pop && !empty) begin
          sp[wid]       <= cur - 1'b1;
        end
      end
    end
  end else begin : g_none
    assign empty    = 1'b1;
    assign full     = 1'b1;
    assign top      = '0;
    assign overflow = push;
  end
endmodule
