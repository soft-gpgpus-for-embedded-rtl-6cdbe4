// tb_warp_stack: random pushes and pops on three warps' stacks of depth 4,
// compared with a queue model per warp; checks top, empty, full, the
// overflow flag on a push to a full stack and push+pop replacing the top.
// A second instance with depth 0 must report every push as overflow.
// Expected contents come from a queue model per warp. No ports; 10-unit
// clock with a watchdog. The 66-bit entry follows the paper.
module tb_warp_stack;
  import flexgrip_pkg::*;
  localparam int W = 3, D = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [1:0] wid;
  logic push, pop, empty, full, ovf, e0, f0, o0;
  stack_entry_t pe, top, t0;

  warp_stack #(.MAX_WARPS(W), .DEPTH(D)) dut (.clk, .rst_n, .wid, .push, .push_entry (pe),
    .pop, .top, .empty, .full, .overflow (ovf));
  warp_stack #(.MAX_WARPS(W), .DEPTH(0)) dut0 (.clk, .rst_n, .wid, .push, .push_entry (pe),
    .pop, .top (t0), .empty (e0), .full (f0), .overflow (o0));

  stack_entry_t model [W][$];

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  int n_ovf = 0;
  initial begin
    push = 0; pop = 0; wid = 0; pe = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      wid  = 2'($urandom_range(0, W - 1));
      push = $urandom_range(0, 2) != 0 && (n % 100) < 60;
      pop  = $urandom_range(0, 2) == 0 || (n % 100) >= 60;
      pe   = {$urandom, 2'($urandom_range(0, 1)), $urandom};
      #1;
      chk(empty == (model[wid].size() == 0), "empty");
      chk(full == (model[wid].size() == D), "full");
      if (model[wid].size() > 0) chk(top == model[wid][$], "top");
      chk(ovf == (push && !pop && model[wid].size() == D), "overflow");
      chk(e0 && f0 && (o0 == push), "depth 0");
      if (ovf) n_ovf++;
      @(posedge clk);
      if (push && pop && model[wid].size() > 0) model[wid][$] = pe;
      else if (push && model[wid].size() < D) model[wid].push_back(pe);
      else if (pop && model[wid].size() > 0) void'(model[wid].pop_back());
    end
    chk(n_ovf > 0, "overflow seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
