// warp_unit: warp table and warp scheduler at the front of the SM pipeline.
//
// For every warp of the SM the unit keeps a PC, a 32-bit thread mask, the
// thread-block slot it belongs to, its number inside the block and a state:
//   IDLE   not assigned to a block
//   READY  may be issued
//   BUSY   one instruction in the pipeline
//   WAIT   waiting at a block-wide barrier
//   DONE   all threads exited
// The scheduler issues READY warps to the fetch stage in round-robin order,
// starting after the warp issued last. An issued warp stays BUSY until the
// write stage returns its next PC, mask and state, so a warp has at most one
// instruction in flight and needs no hazard checks. A launch from the GPGPU
// controller makes warps first..first+nwarps-1 READY at the kernel's start
// PC, with the threads beyond the block's thread count masked off in its
// last warp. When every assigned warp of a slot is WAIT or DONE and at least
// one waits, the barrier opens (all WAIT become READY). When all are DONE
// the slot's warps return to IDLE and blk_done reports the slot (one slot
// per cycle). Round-robin issue and the PC/mask/state table follow the
// paper; the barrier and one-instruction-per-warp rule are this design's.
//
// Lint note: the loop index w is a 32-bit int of which only the low bits
// address the warp table.
module warp_unit
  import flexgrip_pkg::*;
#(
  parameter int MAX_WARPS  = 24,
  parameter int MAX_BLOCKS = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // launch of one thread block
  input  logic        launch_valid,
  input  logic [2:0]  launch_slot,
  input  logic [4:0]  launch_first,
  input  logic [3:0]  launch_nwarps,
  input  logic [8:0]  launch_nthreads,
  input  logic [31:0] launch_pc,
  // issue to fetch
  output logic        issue_valid,
  input  logic        issue_ready,
  output wctx_t       issue_ctx,
  // update from write-back
  input  logic        upd_valid,
  input  logic [4:0]  upd_wid,
  input  logic [31:0] upd_pc,
  input  logic [31:0] upd_mask,
  input  upd_state_e  upd_state,
  // block completion
  output logic        blk_done_valid,
  output logic [2:0]  blk_done_slot,
  // status
  output logic        barrier_release,   // pulse
  output logic        any_active
);
  typedef enum logic [2:0] {W_IDLE, W_READY, W_BUSY, W_WAIT, W_DONE} wstate_e;

  wstate_e     st   [MAX_WARPS];
  logic [31:0] pc   [MAX_WARPS];
  logic [31:0] mask [MAX_WARPS];
  logic [2:0]  slot [MAX_WARPS];
  logic [2:0]  wib  [MAX_WARPS];
  logic [$clog2(MAX_WARPS)-1:0] last_issued;

  // ---- round-robin pick ----
  logic                         found;
  logic [$clog2(MAX_WARPS)-1:0] pick;
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int k = 1; k <= MAX_WARPS; k++) begin
      int w;
      w = (int'(last_issued) + k) % MAX_WARPS;
      if (!found && st[w] == W_READY) begin
        found = 1'b1;
        pick  = w[$clog2(MAX_WARPS)-1:0];
      end
    end
  end

  assign issue_valid       = found;
  assign issue_ctx.wid     = 5'(pick);
  assign issue_ctx.slot    = slot[pick];
  assign issue_ctx.wib     = wib[pick];
  assign issue_ctx.pc      = pc[pick];
  assign issue_ctx.next_pc = pc[pick];
  assign issue_ctx.mask    = mask[pick];

  // ---- per-slot barrier / completion ----
  logic [MAX_BLOCKS-1:0] s_used, s_all_done, s_all_stopped, s_any_wait;
  always_comb begin
    s_used = '0; s_all_done = '1; s_all_stopped = '1; s_any_wait = '0;
    for (int w = 0; w < MAX_WARPS; w++)
      if (st[w] != W_IDLE) begin
        s_used[slot[w]] = 1'b1;
        if (st[w] != W_DONE) s_all_done[slot[w]] = 1'b0;
        if (st[w] != W_DONE && st[w] != W_WAIT) s_all_stopped[slot[w]] = 1'b0;
        if (st[w] == W_WAIT) s_any_wait[slot[w]] = 1'b1;
      end
  end

  logic       done_found;
  logic [2:0] done_slot;
  logic [MAX_BLOCKS-1:0] release_slots;
  always_comb begin
    done_found = 1'b0;
    done_slot  = '0;
    for (int s = 0; s < MAX_BLOCKS; s++)
      if (!done_found && s_used[s] && s_all_done[s]) begin
        done_found = 1'b1;
        done_slot  = 3'(s);
      end
    release_slots = s_used & s_all_stopped & s_any_wait;
  end

  assign blk_done_valid  = done_found;
  assign blk_done_slot   = done_slot;
  assign barrier_release = |release_slots;
  assign any_active      = |s_used;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int w = 0; w < MAX_WARPS; w++) begin
        st[w] <= W_IDLE; pc[w] <= '0; mask[w] <= '0; slot[w] <= '0; wib[w] <= '0;
      end
      last_issued <= $bits(last_issued)'(MAX_WARPS - 1);
    end else begin
      for (int w = 0; w < MAX_WARPS; w++) begin
        if (st[w] == W_WAIT && release_slots[slot[w]]) st[w] <= W_READY;
        if (done_found && st[w] != W_IDLE && slot[w] == done_slot) st[w] <= W_IDLE;
      end
      if (found && issue_ready) begin
        st[pick]    <= W_BUSY;
        last_issued <= pick;
      end
      if (upd_valid) begin
        pc[upd_wid]   <= upd_pc;
        mask[upd_wid] <= upd_mask;
        unique case (upd_state)
          UPD_WAIT: st[upd_wid] <= W_WAIT;
          UPD_DONE: st[upd_wid] <= W_DONE;
          default:  st[upd_wid] <= W_READY;
        endcase
      end
      if (launch_valid)
        for (int w = 0; w < MAX_WARPS; w++)
          if (w >= int'(launch_first) && w < int'(launch_first) + int'(launch_nwarps)) begin
            int n;
            n = int'(launch_nthreads) - (w - int'(launch_first)) * WARP_SIZE;
            st[w]   <= W_READY;
            pc[w]   <= launch_pc;
            slot[w] <= launch_slot;
            wib[w]  <= 3'(w - int'(launch_first));
            mask[w] <= (n >= WARP_SIZE) ? '1 : ((32'd1 << n) - 1);
          end
    end
  end

  // An update must come for a warp that is in flight.
  a_upd_busy: assert property (@(posedge clk) disable iff (!rst_n)
                               upd_valid |-> st[upd_wid] == W_BUSY);
endmodule
