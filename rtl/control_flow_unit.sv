// control_flow_unit: branch, reconvergence and warp-completion control.
//
// Sits in the execute stage next to the scalar processors. Rows of a warp
// instruction arrive one per cycle; the unit ORs each row's active-thread
// mask into the warp-wide mask, and on the last row decides the warp's next
// PC, next thread mask and state (the "Next PC" and mask that go back to
// the warp unit through the write stage). Divergence handling follows the
// paper's warp-stack scheme:
//   SSY  t  push {reconvergence, t, thread mask}.
//   BRA  t  taken = active threads (thread mask AND guard). None: fall
//           through. All: jump to t. Otherwise push {taken, t, thread mask}
//           (the mask before the branch) and run the not-taken threads first.
//   SYNC    end of a path. Pop the top entry. A "taken" entry sends the warp
//           to the taken path with the inverted mask (saved mask AND NOT the
//           current mask); a "reconvergence" entry restores the saved mask
//           at the reconvergence address. With an empty stack: fall through.
//   BAR     state WAIT (block-wide barrier, released by the warp unit).
//   EXIT    the active threads finish. If others of the path remain they
//           continue; else the stack is popped as for SYNC, or, when it is
//           empty, the warp is DONE.
// Threads that have finished are removed from every mask taken off the stack.
// A push to a full stack (or any push when WSTACK_DEPTH=0) sets the sticky
// overflow flag and the branch continues on the not-taken path only.
// The SSY/SYNC instruction pair is this design's own (G80-like) choice; the
// paper describes the stack contents and push/pop rules but no instructions.
//
// Outputs upd_* are combinational and valid when in_valid && in_last.
//
// Lint note: only the warp number, PC, next PC and mask of in_ctx are
// used; the slot and warp-in-block fields pass by this unit.
module control_flow_unit
  import flexgrip_pkg::*;
#(
  parameter int NUM_SP       = 8,
  parameter int MAX_WARPS    = 24,
  parameter int WSTACK_DEPTH = 32,
  localparam int RPW         = WARP_SIZE / NUM_SP,
  localparam int ROW_W       = (RPW > 1) ? $clog2(RPW) : 1,
  localparam int WID_W       = $clog2(MAX_WARPS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // clear the finished-thread masks of newly launched warps
  input  logic              launch_valid,
  input  logic [4:0]        launch_first,
  input  logic [3:0]        launch_nwarps,
  // one row of a warp instruction
  input  logic              in_valid,
  input  wctx_t             in_ctx,
  input  opcode_e           in_op,
  input  logic [31:0]       in_target,
  input  logic [ROW_W-1:0]  in_row,
  input  logic              in_last,
  input  logic [NUM_SP-1:0] in_lane_mask,
  // warp update (valid with in_valid && in_last)
  output logic [31:0]       upd_pc,
  output logic [31:0]       upd_mask,
  output upd_state_e        upd_state,
  output logic              overflow,       // sticky
  output logic              diverged        // pulse: a divergent branch pushed
);
  logic [31:0] acc, act, fin_new;
  logic [31:0] finished [MAX_WARPS];

  // stack control
  logic         push, pop, s_empty, s_full, s_ovf;
  stack_entry_t push_e, top_e;

  warp_stack #(.MAX_WARPS(MAX_WARPS), .DEPTH(WSTACK_DEPTH)) u_stack (
    .clk, .rst_n,
    .wid        (WID_W'(in_ctx.wid)),
    .push       (push),
    .push_entry (push_e),
    .pop        (pop),
    .top        (top_e),
    .empty      (s_empty),
    .full       (s_full),
    .overflow   (s_ovf)
  );

  // whole-warp active mask: earlier rows plus this one
  always_comb begin
    act = acc | (32'(in_lane_mask) << (32'(in_row) * NUM_SP));
  end

  logic fire;
  assign fire = in_valid && in_last;

  always_comb begin
    logic [31:0] fin;
    fin       = finished[in_ctx.wid];
    fin_new   = fin;
    upd_pc    = in_ctx.next_pc;
    upd_mask  = in_ctx.mask;
    upd_state = UPD_READY;
    push      = 1'b0;
    pop       = 1'b0;
    push_e    = '0;
    diverged  = 1'b0;
    if (fire) begin
      unique case (in_op)
        OP_SSY: begin
          push   = 1'b1;
          push_e = '{mask: in_ctx.mask, typ: ST_RECONV, addr: in_target};
        end
        OP_BRA: begin
          if (act == in_ctx.mask && act != 0) begin
            upd_pc = in_target;
          end else if (act != 0) begin
            push     = 1'b1;
            push_e   = '{mask: in_ctx.mask, typ: ST_TAKEN, addr: in_target};
            upd_mask = in_ctx.mask & ~act;
            diverged = !s_full;
          end
        end
        OP_SYNC: begin
          if (!s_empty) begin
            pop    = 1'b1;
            upd_pc = top_e.addr;
            if (top_e.typ == ST_TAKEN) upd_mask = top_e.mask & ~in_ctx.mask & ~fin;
            else                       upd_mask = top_e.mask & ~fin;
          end
        end
        OP_BAR: upd_state = UPD_WAIT;
        OP_EXIT: begin
          fin_new = fin | act;
          if ((in_ctx.mask & ~act) != 0) begin
            upd_mask = in_ctx.mask & ~act;
          end else if (!s_empty) begin
            pop    = 1'b1;
            upd_pc = top_e.addr;
            if (top_e.typ == ST_TAKEN) upd_mask = top_e.mask & ~in_ctx.mask & ~fin_new;
            else                       upd_mask = top_e.mask & ~fin_new;
          end else begin
            upd_mask  = '0;
            upd_state = UPD_DONE;
          end
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc      <= '0;
      overflow <= 1'b0;
      for (int w = 0; w < MAX_WARPS; w++) finished[w] <= '0;
    end else begin
      if (in_valid) acc <= in_last ? '0 : act;
      if (s_ovf) overflow <= 1'b1;
      if (fire && in_op == OP_EXIT) finished[in_ctx.wid] <= fin_new;
      if (launch_valid)
        for (int w = 0; w < MAX_WARPS; w++)
          if (w >= int'(launch_first) && w < int'(launch_first) + int'(launch_nwarps))
            finished[w] <= '0;
    end
  end
endmodule
