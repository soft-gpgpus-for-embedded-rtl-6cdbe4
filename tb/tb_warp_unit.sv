// tb_warp_unit: launches two blocks (slot 1: warps 4..6 with 70 threads,
// slot 2: warps 10..11 with 64 threads) and plays the pipeline: each issued
// warp is returned four cycles later with a chosen next state. Checks the
// launch PC and masks (last warp of slot 1 holds 6 threads), strict
// round-robin issue order, one instruction in flight per warp, barrier
// release only when every warp of the block waits, and one blk_done report
// per block once all its warps are done. Issue rate: with three READY warps
// the unit issues three warps per 5-cycle round trip.
module tb_warp_unit;
  import flexgrip_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic launch_valid, issue_valid, issue_ready, upd_valid, blk_done_valid, barrier_release, any_active;
  logic [2:0] launch_slot, blk_done_slot;
  logic [4:0] launch_first, upd_wid;
  logic [3:0] launch_nwarps;
  logic [8:0] launch_nthreads;
  logic [31:0] launch_pc, upd_pc, upd_mask;
  wctx_t issue_ctx;
  upd_state_e upd_state;

  warp_unit #(.MAX_WARPS(24), .MAX_BLOCKS(8)) dut (.*);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  task automatic launch(input int s, input int first, input int nw, input int nt, input int pc);
    @(negedge clk);
    launch_valid = 1; launch_slot = 3'(s); launch_first = 5'(first); launch_nwarps = 4'(nw);
    launch_nthreads = 9'(nt); launch_pc = pc;
    @(negedge clk);
    launch_valid = 0;
  endtask

  // pipeline model: returns each issued warp 4 cycles later
  upd_state_e next_state [24];
  int         issued_cnt [24];
  bit         inflight [24];
  int         order [$];
  wctx_t      pipe [4];
  logic       pv [4];
  int         done_reports [8];
  always @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < 4; i++) pv[i] <= 0;
    end else begin
      if (issue_valid && issue_ready) begin
        chk(!inflight[issue_ctx.wid], "second instruction of a busy warp");
        inflight[issue_ctx.wid] = 1;
        issued_cnt[issue_ctx.wid]++;
        order.push_back(issue_ctx.wid);
      end
      pv[0] <= issue_valid && issue_ready; pipe[0] <= issue_ctx;
      for (int i = 1; i < 4; i++) begin pv[i] <= pv[i-1]; pipe[i] <= pipe[i-1]; end
      if (pv[3]) inflight[pipe[3].wid] = 0;
      if (blk_done_valid) done_reports[blk_done_slot]++;
    end
  end
  always_comb begin
    upd_valid = pv[3];
    upd_wid   = pipe[3].wid;
    upd_pc    = pipe[3].pc + 8;
    upd_mask  = pipe[3].mask;
    upd_state = next_state[pipe[3].wid];
  end

  initial begin
    launch_valid = 0; issue_ready = 0;
    for (int w = 0; w < 24; w++) next_state[w] = UPD_READY;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!issue_valid && !any_active, "idle after reset");
    launch(1, 4, 3, 70, 32'h100);
    chk(issue_valid && issue_ctx.wid == 4 && issue_ctx.pc == 32'h100 && issue_ctx.slot == 1 &&
        issue_ctx.wib == 0 && issue_ctx.mask == '1, "first issue");
    issue_ready = 1;
    // round-robin over 4,5,6 (one per cycle) with returns after 4 cycles
    repeat (30) @(negedge clk);
    for (int i = 0; i < 12; i++)
      chk(order[i] == 4 + i % 3, $sformatf("round robin %0d: %0d", i, order[i]));
    // three warps, each back after a 5-cycle round trip: 3 issues per 5 cycles
    chk(order.size() >= 17 && order.size() <= 19, $sformatf("issue rate %0d in 30 cycles", order.size()));
    // mask of the last warp
    issue_ready = 0;
    repeat (6) @(negedge clk);
    for (int k = 0; k < 3; k++) begin
      @(negedge clk);
      chk(issue_valid, "ready warp");
      if (issue_ctx.wid == 6) chk(issue_ctx.mask == 32'h3F && issue_ctx.wib == 2, "last warp mask");
      issue_ready = 1; @(negedge clk); issue_ready = 0;
    end
    repeat (6) @(negedge clk);
    // barrier: warps 4 and 5 wait first, 6 keeps running
    launch(2, 10, 2, 64, 32'h200);
    next_state[4] = UPD_WAIT; next_state[5] = UPD_WAIT;
    issue_ready = 1;
    repeat (40) @(negedge clk);
    chk(dut.st[4] == 3'd3 && dut.st[5] == 3'd3, "warps 4,5 waiting");
    chk(!barrier_release, "no release while warp 6 runs");
    next_state[4] = UPD_READY; next_state[5] = UPD_READY; next_state[6] = UPD_WAIT;
    begin
      int rel = 0;
      for (int c = 0; c < 40; c++) begin @(negedge clk); if (barrier_release) rel++; end
      chk(rel >= 1, "barrier released once all wait");
    end
    chk(dut.st[4] != 3'd3 && dut.st[5] != 3'd3, "waiting warps released");
    // completion of slot 1, then slot 2
    next_state[4] = UPD_DONE; next_state[5] = UPD_DONE; next_state[6] = UPD_DONE;
    repeat (40) @(negedge clk);
    chk(done_reports[1] == 1 && done_reports[2] == 0, "slot 1 done once");
    chk(dut.st[4] == 3'd0 && dut.st[6] == 3'd0, "slot 1 warps idle");
    next_state[10] = UPD_DONE; next_state[11] = UPD_DONE;
    repeat (40) @(negedge clk);
    chk(done_reports[2] == 1 && !any_active && !issue_valid, "slot 2 done, unit idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
