// tb_fetch_stage: issues warps at random PCs into a memory of mixed 4- and
// 8-byte instructions and checks the registered instruction (upper word
// cleared for 4-byte ones), next PC (PC+4 or PC+8) and the warp context,
// while decode randomly stalls; no issue may be lost or duplicated.
// No ports; 10-unit clock with a watchdog. The 4- and 8-byte instruction
// lengths follow the paper; the length bit is this design's encoding.
module tb_fetch_stage;
  import flexgrip_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic issue_valid, issue_ready, fd_valid, fd_ready;
  wctx_t issue_ctx, fd_ctx;
  logic [31:0] imem_addr;
  logic [63:0] imem_rdata, fd_instr;
  logic [31:0] mem [64];

  fetch_stage dut (.clk, .rst_n, .issue_valid, .issue_ready, .issue_ctx, .imem_addr, .imem_rdata,
                   .fd_valid, .fd_ready, .fd_ctx, .fd_instr);
  assign imem_rdata = {mem[(imem_addr / 4 + 1) % 64], mem[(imem_addr / 4) % 64]};

  typedef struct { wctx_t c; logic [63:0] i; } exp_t;
  exp_t q[$];
  int n_short = 0, n_long = 0, n_stall = 0;

  always @(posedge clk) if (rst_n) begin
    if (issue_valid && issue_ready) begin
      exp_t e;
      logic [31:0] w0;
      w0 = mem[(issue_ctx.pc / 4) % 64];
      e.c = issue_ctx;
      e.c.next_pc = issue_ctx.pc + (w0[0] ? 8 : 4);
      e.i = w0[0] ? {mem[(issue_ctx.pc / 4 + 1) % 64], w0} : {32'd0, w0};
      if (w0[0]) n_long++; else n_short++;
      q.push_back(e);
    end
    if (fd_valid && fd_ready) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL: unexpected output"); end
      else begin
        e = q.pop_front();
        if (fd_ctx !== e.c || fd_instr !== e.i) begin
          failures++;
          if (failures < 10) $display("FAIL pc %h instr %h exp %h", fd_ctx.pc, fd_instr, e.i);
        end
      end
    end
    if (fd_valid && !fd_ready) n_stall++;
  end

  initial begin
    for (int i = 0; i < 64; i++) mem[i] = $urandom;
    issue_valid = 0; fd_ready = 0; issue_ctx = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      if (!(issue_valid && !issue_ready)) begin
        issue_valid = $urandom_range(0, 3) != 0;
        issue_ctx = '{wid: 5'($urandom), slot: 3'($urandom), wib: 3'($urandom),
                      pc: 32'($urandom_range(0, 62)) * 4, next_pc: 0, mask: $urandom};
      end
      fd_ready = $urandom_range(0, 2) != 0;
    end
    @(negedge clk); issue_valid = 0; fd_ready = 1;
    repeat (3) @(posedge clk);
    checks++;
    if (q.size() != 0 || n_short == 0 || n_long == 0 || n_stall == 0) begin
      failures++; $display("FAIL: leftovers %0d short %0d long %0d stall %0d", q.size(), n_short, n_long, n_stall);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
