// tb_flexgrip_top: end-to-end test of the GPGPU with two SMs.
//
// A host model loads the parallel-reduction kernel (flexgrip_tb_pkg), its
// constants and 20 blocks x 64 inputs over AXI4-Lite, starts the kernel,
// waits for done and reads back the 20 block sums, which are compared with
// sums computed here. A second instance with no warp stack (WSTACK_DEPTH=0)
// runs the same kernel and must flag a warp-stack overflow. The test counts
// how often each mechanism occurs (row stalls, 4-byte fetches, divergent
// pushes, mask-inverting and reconvergence pops, barrier releases,
// predicated-off lanes, thread-ID writes delayed by write-back, blocks
// waiting for a free slot, blocks on each SM) and fails any that never did.
module tb_flexgrip_top;
  import flexgrip_pkg::*;
  import flexgrip_tb_pkg::*;

  localparam int NBLK = 20, NTID = 64, K = 3;
  localparam logic [31:0] IN_BASE = 32'h0, OUT_BASE = 32'h8000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---- two DUTs, each with its own host model ----
  logic        awvalid[2], awready[2], wvalid[2], wready[2], bvalid[2], bready[2];
  logic        arvalid[2], arready[2], rvalid[2], rready[2], irq[2];
  logic [31:0] awaddr[2], wdata[2], araddr[2], rdata[2];
  logic [3:0]  wstrb[2];
  logic [1:0]  bresp[2], rresp[2];

  flexgrip_top #(.NUM_SM(2)) dut (
    .clk, .rst_n,
    .s_axi_awvalid (awvalid[0]), .s_axi_awready (awready[0]), .s_axi_awaddr (awaddr[0]),
    .s_axi_wvalid (wvalid[0]), .s_axi_wready (wready[0]), .s_axi_wdata (wdata[0]),
    .s_axi_wstrb (wstrb[0]), .s_axi_bvalid (bvalid[0]), .s_axi_bready (bready[0]),
    .s_axi_bresp (bresp[0]), .s_axi_arvalid (arvalid[0]), .s_axi_arready (arready[0]),
    .s_axi_araddr (araddr[0]), .s_axi_rvalid (rvalid[0]), .s_axi_rready (rready[0]),
    .s_axi_rdata (rdata[0]), .s_axi_rresp (rresp[0]), .irq_done (irq[0])
  );
  flexgrip_top #(.NUM_SM(1), .WSTACK_DEPTH(0)) dut_nostack (
    .clk, .rst_n,
    .s_axi_awvalid (awvalid[1]), .s_axi_awready (awready[1]), .s_axi_awaddr (awaddr[1]),
    .s_axi_wvalid (wvalid[1]), .s_axi_wready (wready[1]), .s_axi_wdata (wdata[1]),
    .s_axi_wstrb (wstrb[1]), .s_axi_bvalid (bvalid[1]), .s_axi_bready (bready[1]),
    .s_axi_bresp (bresp[1]), .s_axi_arvalid (arvalid[1]), .s_axi_arready (arready[1]),
    .s_axi_araddr (araddr[1]), .s_axi_rvalid (rvalid[1]), .s_axi_rready (rready[1]),
    .s_axi_rdata (rdata[1]), .s_axi_rresp (rresp[1]), .irq_done (irq[1])
  );
  axi_host_bfm h0 (.clk, .awvalid (awvalid[0]), .awready (awready[0]), .awaddr (awaddr[0]),
    .wvalid (wvalid[0]), .wready (wready[0]), .wdata (wdata[0]), .wstrb (wstrb[0]),
    .bvalid (bvalid[0]), .bready (bready[0]), .arvalid (arvalid[0]), .arready (arready[0]),
    .araddr (araddr[0]), .rvalid (rvalid[0]), .rready (rready[0]), .rdata (rdata[0]));
  axi_host_bfm h1 (.clk, .awvalid (awvalid[1]), .awready (awready[1]), .awaddr (awaddr[1]),
    .wvalid (wvalid[1]), .wready (wready[1]), .wdata (wdata[1]), .wstrb (wstrb[1]),
    .bvalid (bvalid[1]), .bready (bready[1]), .arvalid (arvalid[1]), .arready (arready[1]),
    .araddr (araddr[1]), .rvalid (rvalid[1]), .rready (rready[1]), .rdata (rdata[1]));

  task automatic hw(int d, logic [31:0] a, logic [31:0] v);
    if (d == 0) h0.write(a, v); else h1.write(a, v);
  endtask
  task automatic hr(int d, logic [31:0] a, output logic [31:0] v);
    if (d == 0) h0.read(a, v); else h1.read(a, v);
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- mechanism counters (SM 0 of the two-SM design) ----
  int n_rowstall, n_short, n_div, n_takenpop, n_reconvpop, n_barrier, n_predoff;
  int n_idwait, n_slotwait, n_blk_sm[2];
  always @(posedge clk) if (rst_n) begin
    if (dut.g_sm[0].u_sm.u_read.dr_valid && !dut.g_sm[0].u_sm.u_read.dr_ready) n_rowstall++;
    if (dut.g_sm[0].u_sm.u_fetch.issue_valid && dut.g_sm[0].u_sm.u_fetch.issue_ready &&
        !dut.g_sm[0].u_sm.u_fetch.imem_rdata[0]) n_short++;
    if (dut.g_sm[0].u_sm.u_exec.u_cfu.diverged) n_div++;
    if (dut.g_sm[0].u_sm.u_exec.u_cfu.pop && dut.g_sm[0].u_sm.u_exec.u_cfu.top_e.typ == ST_TAKEN) n_takenpop++;
    if (dut.g_sm[0].u_sm.u_exec.u_cfu.pop && dut.g_sm[0].u_sm.u_exec.u_cfu.top_e.typ == ST_RECONV) n_reconvpop++;
    if (dut.g_sm[0].u_sm.u_warp.barrier_release) n_barrier++;
    if (dut.g_sm[0].u_sm.u_read.dr_valid &&
        (dut.g_sm[0].u_sm.u_read.tmask & ~dut.g_sm[0].u_sm.u_read.pass) != 0) n_predoff++;
    if (dut.g_sm[0].u_sm.u_ctrl.state == 2'd1 && dut.g_sm[0].u_sm.u_ctrl.vrf_busy) n_idwait++;
    if (dut.u_bsched.state == 2'd2 && dut.u_bsched.next_blk < NBLK && !dut.u_bsched.have_slot) n_slotwait++;
    for (int s = 0; s < 2; s++) if (dut.asg_valid[s] && dut.asg_ready[s]) n_blk_sm[s]++;
  end

  logic [31:0] in_data [NBLK*NTID];

  task automatic load_and_run(int d, output int cyc);
    logic [31:0] prog[$];
    logic [31:0] st;
    reduction_kernel(prog);
    foreach (prog[i]) hw(d, 32'h1000_0000 + 32'(i) * 4, prog[i]);
    hw(d, 32'h2000_0000, IN_BASE);
    hw(d, 32'h2000_0004, OUT_BASE);
    hw(d, 32'h2000_0008, K);
    foreach (in_data[i]) hw(d, 32'h3000_0000 + IN_BASE + 32'(i) * 4, in_data[i]);
    hw(d, 32'h04, NBLK);
    hw(d, 32'h08, NTID);
    hw(d, 32'h0C, 16);
    hw(d, 32'h10, NTID * 4);
    hw(d, 32'h14, 0);
    hw(d, 32'h00, 1);
    cyc = 0;
    do begin
      repeat (50) @(posedge clk);
      hr(d, 32'h00, st);
    end while (!st[1]);
    hr(d, 32'h18, st);
    cyc = int'(st);
  endtask

  initial begin
    int cyc0, cyc1;
    logic [31:0] v, st;
    for (int i = 0; i < NBLK*NTID; i++) in_data[i] = $urandom_range(0, 100000);
    repeat (4) @(posedge clk);
    rst_n = 1;
    fork
      load_and_run(0, cyc0);
      load_and_run(1, cyc1);
    join
    $display("kernel cycles: 2 SM = %0d, no-stack 1 SM = %0d", cyc0, cyc1);
    // results of the two-SM design
    for (int b = 0; b < NBLK; b++) begin
      logic [31:0] exp;
      exp = 0;
      for (int t = 0; t < NTID; t++) exp += in_data[b*NTID+t] * K + 1;
      hr(0, 32'h3000_0000 + OUT_BASE + 32'(b) * 4, v);
      check(v == exp, $sformatf("block %0d sum %0d expected %0d", b, v, exp));
    end
    hr(0, 32'h00, st);
    check(st[3:0] == 4'b0010, $sformatf("status %b (done, no error, no overflow)", st[3:0]));
    hr(0, 32'h1C, v);
    check(v == 8, $sformatf("blocks per SM %0d, expected 8", v));
    hr(1, 32'h00, st);
    check(st[3] == 1'b1, "stack overflow flagged without a warp stack");
    check(cyc0 > 0 && cyc0 < cyc1, "two SMs faster than one");
    $display("mechanisms: rowstall=%0d short=%0d diverge=%0d takenpop=%0d reconvpop=%0d barrier=%0d predoff=%0d idwait=%0d slotwait=%0d blk_sm0=%0d blk_sm1=%0d",
             n_rowstall, n_short, n_div, n_takenpop, n_reconvpop, n_barrier, n_predoff,
             n_idwait, n_slotwait, n_blk_sm[0], n_blk_sm[1]);
    check(n_rowstall > 0, "row stall");
    check(n_short > 0, "4-byte instruction");
    check(n_div > 0, "divergent branch push");
    check(n_takenpop > 0, "taken-path pop (mask inversion)");
    check(n_reconvpop > 0, "reconvergence pop");
    check(n_barrier > 0, "barrier release");
    check(n_predoff > 0, "predicated-off lanes");
    check(n_idwait > 0, "thread-ID write waiting for write-back");
    check(n_slotwait > 0, "block waiting for a free slot");
    check(n_blk_sm[0] == NBLK/2 && n_blk_sm[1] == NBLK/2, "blocks shared evenly between SMs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
