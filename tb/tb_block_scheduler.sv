// tb_block_scheduler: two modelled SMs that finish each assigned block after
// a random delay. For several kernel shapes it checks max_blocks (limited by
// warps, registers, shared memory or the eight-slot cap), that every block
// id is assigned exactly once, that no SM ever holds more than max_blocks
// blocks or reuses a busy slot, that the SMs are served alternately while
// both have room, that done pulses once after the last completion, and that
// a block of more than 256 threads ends at once with error. Latency: the
// block count is ready k+1 cycles after start (one candidate per cycle).
module tb_block_scheduler;
  import flexgrip_pkg::*;
  localparam int NSM = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, error;
  kcfg_t cfg;
  logic [3:0] max_blocks;
  logic asg_valid [NSM], asg_ready [NSM], sm_done_valid [NSM];
  logic [2:0] asg_slot [NSM], sm_done_slot [NSM];
  logic [15:0] asg_block [NSM];

  block_scheduler #(.NUM_SM(NSM), .MAX_BLOCKS(8), .MAX_WARPS(24), .NUM_REGS(8192),
                    .SMEM_BYTES(16384), .MAX_BLOCK_THREADS(256)) dut (.*);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  // SM models
  int timer [NSM][8];
  bit busy_slot [NSM][8];
  int assigned [int];
  int held [NSM], done_pulses, last_sm;
  int alternations, same;
  always @(posedge clk) begin
    if (rst_n) begin
      for (int m = 0; m < NSM; m++) begin
        if (asg_valid[m]) begin
          chk(asg_ready[m], "assign without ready");
          chk(!busy_slot[m][asg_slot[m]], "slot reused while busy");
          chk(int'(asg_slot[m]) < int'(max_blocks), "slot beyond max_blocks");
          busy_slot[m][asg_slot[m]] = 1;
          timer[m][asg_slot[m]] = $urandom_range(3, 40);
          held[m]++;
          chk(held[m] <= int'(max_blocks), "SM over max_blocks");
          if (assigned.exists(asg_block[m])) assigned[asg_block[m]]++; else assigned[asg_block[m]] = 1;
          if (last_sm >= 0) begin if (last_sm != m) alternations++; else same++; end
          last_sm = m;
        end
        sm_done_valid[m] <= 0;
        for (int s = 0; s < 8; s++)
          if (busy_slot[m][s]) begin
            if (timer[m][s] > 0) timer[m][s]--;
            else begin
              // one completion per SM per cycle
              busy_slot[m][s] = 0; held[m]--;
              sm_done_valid[m] <= 1; sm_done_slot[m] <= 3'(s);
              break;
            end
          end
      end
      if (done) done_pulses++;
    end
  end

  task automatic run(input int nctaid, input int ntid, input int rpt, input int spb,
                     input int exp_k, input bit exp_err);
    int cyc = 0, kcyc = -1;
    assigned.delete(); done_pulses = 0; last_sm = -1; alternations = 0; same = 0;
    cfg = '{nctaid: 16'(nctaid), ntid: 9'(ntid), rpt: 7'(rpt), spb: 15'(spb)};
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (busy && cyc < 20000) begin
      @(negedge clk); cyc++;
      if (kcyc < 0 && dut.state == 2'd2) kcyc = cyc;
    end
    @(negedge clk);
    chk(max_blocks == 4'(exp_k), $sformatf("max_blocks %0d exp %0d", max_blocks, exp_k));
    chk(error == exp_err, "error flag");
    chk(done_pulses == 1, $sformatf("done pulses %0d", done_pulses));
    if (!exp_err) begin
      chk(assigned.size() == nctaid, $sformatf("blocks assigned %0d of %0d", assigned.size(), nctaid));
      foreach (assigned[b]) chk(assigned[b] == 1 && b < nctaid, "block assigned once");
      chk(kcyc == exp_k + 1, $sformatf("block-count latency %0d", kcyc));
      if (nctaid > 1) chk(alternations > same, "round-robin over SMs");
    end
  endtask

  initial begin
    start = 0; cfg = '0;
    for (int m = 0; m < NSM; m++) begin asg_ready[m] = 1; sm_done_valid[m] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(40, 256, 16, 0, 2, 0);     // registers: 8 warps * 32 * 16 = 4096 per block
    run(40, 64, 8, 1024, 8, 0);    // eight-slot cap
    run(30, 64, 8, 6000, 2, 0);    // shared memory
    run(30, 224, 4, 0, 3, 0);      // warps: 7 per block, 24 per SM
    run(5, 300, 4, 0, 0, 1);       // too many threads
    run(1, 32, 1, 4, 8, 0);        // single block
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
