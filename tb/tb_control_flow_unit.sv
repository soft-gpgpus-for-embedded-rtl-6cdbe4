// tb_control_flow_unit: drives warp instructions as four rows of eight
// lanes and checks the next PC, mask and state produced on the last row:
// plain instructions, uniform taken / not-taken branches, a divergent branch
// (push, not-taken path first), the SYNC that inverts the mask to the taken
// path, the SYNC that restores the mask at the reconvergence point, BAR,
// predicated and full EXIT, EXIT inside a divergent region, and the overflow
// flag of a unit whose stack holds a single entry.
// No ports; 10-unit clock with a watchdog. The push/pop rules follow the
// paper's description of divergence; SSY/SYNC are this design's encoding.
module tb_control_flow_unit;
  import flexgrip_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic launch_valid;
  logic [4:0] launch_first;
  logic [3:0] launch_nwarps;
  logic in_valid, in_last;
  wctx_t in_ctx;
  opcode_e in_op;
  logic [31:0] in_target;
  logic [1:0] in_row;
  logic [7:0] in_lane_mask;
  logic [31:0] upd_pc, upd_mask, pc1, mask1;
  upd_state_e upd_state, st1;
  logic overflow, diverged, ovf1, div1;

  control_flow_unit #(.NUM_SP(8), .MAX_WARPS(4), .WSTACK_DEPTH(8)) dut (.clk, .rst_n,
    .launch_valid, .launch_first, .launch_nwarps, .in_valid, .in_ctx, .in_op, .in_target,
    .in_row, .in_last, .in_lane_mask, .upd_pc, .upd_mask, .upd_state, .overflow, .diverged);
  control_flow_unit #(.NUM_SP(8), .MAX_WARPS(4), .WSTACK_DEPTH(1)) dut1 (.clk, .rst_n,
    .launch_valid, .launch_first, .launch_nwarps, .in_valid, .in_ctx, .in_op, .in_target,
    .in_row, .in_last, .in_lane_mask, .upd_pc (pc1), .upd_mask (mask1), .upd_state (st1),
    .overflow (ovf1), .diverged (div1));

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  logic [31:0] r_pc, r_mask;
  upd_state_e  r_st;
  logic        r_div;
  // one warp instruction; act = active threads (thread mask AND guard)
  task automatic send(opcode_e op, int wid, logic [31:0] mask, logic [31:0] pc,
                      logic [31:0] tgt, logic [31:0] act);
    for (int r = 0; r < 4; r++) begin
      @(negedge clk);
      in_valid = 1; in_op = op; in_target = tgt; in_row = 2'(r); in_last = (r == 3);
      in_ctx = '{wid: 5'(wid), slot: 0, wib: 0, pc: pc, next_pc: pc + 8, mask: mask};
      in_lane_mask = act[r*8 +: 8];
      #1;
      if (r == 3) begin r_pc = upd_pc; r_mask = upd_mask; r_st = upd_state; r_div = diverged; end
    end
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    in_valid = 0; launch_valid = 0; launch_first = 0; launch_nwarps = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    send(OP_ADD, 0, '1, 32'h40, 0, 32'h00ff_00ff);
    chk(r_pc == 32'h48 && r_mask == '1 && r_st == UPD_READY, "plain instruction");
    send(OP_BRA, 0, '1, 32'h48, 32'h200, '1);
    chk(r_pc == 32'h200 && r_mask == '1 && !r_div, "uniform taken");
    send(OP_BRA, 0, '1, 32'h48, 32'h200, '0);
    chk(r_pc == 32'h50 && r_mask == '1, "uniform not taken");
    send(OP_SYNC, 0, '1, 32'h60, 0, '1);
    chk(r_pc == 32'h68 && r_mask == '1, "SYNC with empty stack");
    // if/else: SSY 0x300; BRA 0x280 taken by the upper half-word threads
    send(OP_SSY, 0, '1, 32'h100, 32'h300, '1);
    chk(r_pc == 32'h108, "SSY");
    send(OP_BRA, 0, '1, 32'h108, 32'h280, 32'hffff_0000);
    chk(r_pc == 32'h110 && r_mask == 32'h0000_ffff && r_div, "divergent branch runs not-taken threads");
    // another warp in between must not disturb warp 0's stack
    send(OP_SSY, 1, '1, 32'h100, 32'h500, '1);
    send(OP_SYNC, 0, 32'h0000_ffff, 32'h200, 0, 32'h0000_ffff);
    chk(r_pc == 32'h280 && r_mask == 32'hffff_0000, "SYNC pops taken entry, mask inverted");
    send(OP_SYNC, 0, 32'hffff_0000, 32'h2f8, 0, 32'hffff_0000);
    chk(r_pc == 32'h300 && r_mask == '1, "SYNC pops reconvergence entry, mask restored");
    send(OP_SYNC, 1, '1, 32'h4f8, 0, '1);
    chk(r_pc == 32'h500 && r_mask == '1, "warp 1 reconverges from its own stack");
    send(OP_BAR, 0, '1, 32'h300, 0, '1);
    chk(r_st == UPD_WAIT && r_pc == 32'h308, "barrier");
    // EXIT inside a divergent region
    send(OP_SSY, 2, '1, 32'h0, 32'h100, '1);
    send(OP_BRA, 2, '1, 32'h8, 32'h80, 32'h0000_000f);
    chk(r_mask == 32'hffff_fff0, "divergent (warp 2)");
    send(OP_EXIT, 2, 32'hffff_fff0, 32'h40, 0, 32'hffff_fff0);
    chk(r_pc == 32'h80 && r_mask == 32'h0000_000f && r_st == UPD_READY, "EXIT pops to taken path");
    send(OP_SYNC, 2, 32'h0000_000f, 32'hf8, 0, 32'h0000_000f);
    chk(r_pc == 32'h100 && r_mask == 32'h0000_000f, "finished threads stay off after reconvergence");
    send(OP_EXIT, 2, 32'h0000_000f, 32'h100, 0, 32'h0000_0003);
    chk(r_mask == 32'h0000_000c && r_st == UPD_READY, "predicated EXIT");
    send(OP_EXIT, 2, 32'h0000_000c, 32'h108, 0, 32'h0000_000c);
    chk(r_st == UPD_DONE && r_mask == 0, "warp done");
    chk(!overflow, "no overflow at depth 8");
    chk(ovf1, "overflow at depth 1");
    // a new launch clears the finished threads of warp 2
    @(negedge clk); launch_valid = 1; launch_first = 2; launch_nwarps = 1;
    @(negedge clk); launch_valid = 0;
    send(OP_SSY, 2, '1, 32'h0, 32'h100, '1);
    send(OP_SYNC, 2, '1, 32'h8, 0, '1);
    chk(r_mask == '1, "launch clears finished threads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
