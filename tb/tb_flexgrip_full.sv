// tb_flexgrip_full: the GPGPU at its default (baseline) configuration,
// 1 SM with 8 SPs, runs the parallel-reduction kernel over 24 blocks of
// 256 threads (6,144 inputs, the largest block the design accepts) loaded by
// the host model over AXI4-Lite. The block sums read back are compared with
// sums computed here; status, blocks per SM and the cycle counter are
// checked too.
module tb_flexgrip_full;
  import flexgrip_pkg::*;
  import flexgrip_tb_pkg::*;

  localparam int NBLK = 24, NTID = 256, K = 7;
  localparam logic [31:0] IN_BASE = 32'h0, OUT_BASE = 32'h8000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        awvalid, awready, wvalid, wready, bvalid, bready;
  logic        arvalid, arready, rvalid, rready, irq;
  logic [31:0] awaddr, wdata, araddr, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;

  flexgrip_top dut (
    .clk, .rst_n,
    .s_axi_awvalid (awvalid), .s_axi_awready (awready), .s_axi_awaddr (awaddr),
    .s_axi_wvalid (wvalid), .s_axi_wready (wready), .s_axi_wdata (wdata),
    .s_axi_wstrb (wstrb), .s_axi_bvalid (bvalid), .s_axi_bready (bready),
    .s_axi_bresp (bresp), .s_axi_arvalid (arvalid), .s_axi_arready (arready),
    .s_axi_araddr (araddr), .s_axi_rvalid (rvalid), .s_axi_rready (rready),
    .s_axi_rdata (rdata), .s_axi_rresp (rresp), .irq_done (irq)
  );
  axi_host_bfm h (.clk, .awvalid, .awready, .awaddr, .wvalid, .wready, .wdata, .wstrb,
                  .bvalid, .bready, .arvalid, .arready, .araddr, .rvalid, .rready, .rdata);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] in_data [NBLK*NTID];

  initial begin
    logic [31:0] prog[$];
    logic [31:0] v, st;
    for (int i = 0; i < NBLK*NTID; i++) in_data[i] = $urandom_range(0, 1000000);
    repeat (4) @(posedge clk);
    rst_n = 1;
    reduction_kernel(prog);
    foreach (prog[i]) h.write(32'h1000_0000 + 32'(i) * 4, prog[i]);
    h.write(32'h2000_0000, IN_BASE);
    h.write(32'h2000_0004, OUT_BASE);
    h.write(32'h2000_0008, K);
    foreach (in_data[i]) h.write(32'h3000_0000 + IN_BASE + 32'(i) * 4, in_data[i]);
    h.write(32'h04, NBLK);
    h.write(32'h08, NTID);
    h.write(32'h0C, 16);
    h.write(32'h10, NTID * 4);
    h.write(32'h14, 0);
    h.write(32'h00, 1);
    wait (irq);
    h.read(32'h18, v);
    $display("kernel cycles: %0d", v);
    check(v > 0, "cycle counter");
    for (int b = 0; b < NBLK; b++) begin
      logic [31:0] exp;
      exp = 0;
      for (int t = 0; t < NTID; t++) exp += in_data[b*NTID+t] * K + 1;
      h.read(32'h3000_0000 + OUT_BASE + 32'(b) * 4, v);
      check(v == exp, $sformatf("block %0d sum %0d expected %0d", b, v, exp));
    end
    h.read(32'h00, st);
    check(st[3:0] == 4'b0010, $sformatf("status %b", st[3:0]));
    // 256 threads = 8 warps: warps allow 3 blocks, 8,192 registers / (256*16) allow 2
    h.read(32'h1C, v);
    check(v == 2, $sformatf("blocks per SM %0d, expected 2", v));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
