// tb_gpgpu_controller: assigns blocks of 64 and 72 threads to slots of an
// 8-lane SM controller while vrf_busy is raised at random. Checks that every
// thread's R0 receives its index inside the block at row address
// (warp*4 + row) * regs-per-thread, that nothing is written while vrf_busy
// is high, that the launch names warps slot*W .. slot*W+W-1 with W =
// ceil(threads/32), the thread count and start PC, that the slot's block id
// is recorded, and that block completions pass straight through.
// Latency: with vrf_busy low, a block of W warps launches 4*W+1 cycles after
// it is accepted.
module tb_gpgpu_controller;
  import flexgrip_pkg::*;
  localparam int NSP = 8, VAW = 10;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  kcfg_t cfg;
  logic [31:0] start_pc, launch_pc;
  logic asg_valid, asg_ready, done_valid, vrf_busy, launch_valid, blk_done_valid;
  logic [2:0] asg_slot, done_slot, launch_slot, blk_done_slot;
  logic [15:0] asg_block;
  logic [15:0] slot_ctaid [8];
  logic [NSP-1:0] vrf_we;
  logic [VAW-1:0] vrf_waddr;
  logic [31:0] vrf_wdata [NSP];
  logic [4:0] launch_first;
  logic [3:0] launch_nwarps;
  logic [8:0] launch_nthreads;

  gpgpu_controller #(.NUM_SP(NSP), .MAX_WARPS(24), .MAX_BLOCKS(8), .NUM_REGS(8192)) dut (.*);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  logic [31:0] rf [1024][NSP];
  bit busy_rand;
  always @(posedge clk) begin
    if (rst_n && vrf_we != 0) begin
      chk(!vrf_busy, "write while busy");
      for (int l = 0; l < NSP; l++) if (vrf_we[l]) rf[vrf_waddr][l] = vrf_wdata[l];
    end
  end
  always @(negedge clk) vrf_busy = busy_rand && ($urandom_range(0, 2) == 0);

  task automatic assign_block(input int slot, input int blk, input int nt, input int rpt);
    int cyc = 0;
    cfg = '{nctaid: 16'd100, ntid: 9'(nt), rpt: 7'(rpt), spb: 15'd0};
    for (int a = 0; a < 1024; a++) for (int l = 0; l < NSP; l++) rf[a][l] = 32'hDEAD;
    @(negedge clk);
    chk(asg_ready, "ready when idle");
    asg_valid = 1; asg_slot = 3'(slot); asg_block = 16'(blk);
    @(negedge clk); asg_valid = 0;
    while (!launch_valid && cyc < 1000) begin @(negedge clk); cyc++; end
    begin
      int nw = (nt + 31) / 32;
      if (!busy_rand) chk(cyc + 1 == 4 * nw + 1, $sformatf("launch latency %0d", cyc + 1));
      chk(launch_valid && launch_slot == 3'(slot) && launch_first == 5'(slot * nw) &&
          launch_nwarps == 4'(nw) && launch_nthreads == 9'(nt) && launch_pc == start_pc, "launch");
      chk(slot_ctaid[slot] == 16'(blk), "block id of slot");
      for (int w = 0; w < nw; w++)
        for (int r = 0; r < 4; r++)
          for (int l = 0; l < NSP; l++)
            chk(rf[((slot * nw + w) * 4 + r) * rpt][l] == 32'(w * 32 + r * NSP + l),
                $sformatf("R0 of thread %0d", w * 32 + r * NSP + l));
    end
    @(negedge clk);
    chk(!launch_valid && asg_ready, "launch is one cycle");
  endtask

  initial begin
    asg_valid = 0; blk_done_valid = 0; busy_rand = 0; start_pc = 32'h40;
    repeat (2) @(posedge clk);
    rst_n = 1;
    assign_block(0, 7, 64, 16);
    assign_block(1, 9, 64, 16);
    busy_rand = 1;
    assign_block(2, 11, 72, 8);
    assign_block(0, 3, 256, 4);
    busy_rand = 0;
    @(negedge clk);
    blk_done_valid = 1; blk_done_slot = 3'd5; #1;
    chk(done_valid && done_slot == 3'd5, "done passes through");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
