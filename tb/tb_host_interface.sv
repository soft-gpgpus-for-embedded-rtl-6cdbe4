// tb_host_interface: drives the AXI4-Lite slave through the bus-functional
// model axi_host_bfm. Checks the configuration registers (write then read
// back), the memory write strobes and addresses for the instruction,
// constant and global regions, global-memory read-back, the start pulse,
// the status word, the cycle counter while busy, the done flag and
// interrupt, and the latency: every write response and read datum comes
// one cycle after the request is accepted.
module tb_host_interface;
  import flexgrip_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] awaddr, wdata, araddr, rdata;
  logic [3:0] wstrb;
  logic [1:0] bresp, rresp;
  kcfg_t cfg;
  logic [31:0] start_pc, mem_waddr, mem_wdata, gmem_raddr, gmem_rdata;
  logic start, busy, done, error, overflow, irq_done, imem_we, cmem_we, gmem_we;
  logic [3:0] max_blocks;

  host_interface dut (
    .clk, .rst_n,
    .s_axi_awvalid (awvalid), .s_axi_awready (awready), .s_axi_awaddr (awaddr),
    .s_axi_wvalid (wvalid), .s_axi_wready (wready), .s_axi_wdata (wdata), .s_axi_wstrb (wstrb),
    .s_axi_bvalid (bvalid), .s_axi_bready (bready), .s_axi_bresp (bresp),
    .s_axi_arvalid (arvalid), .s_axi_arready (arready), .s_axi_araddr (araddr),
    .s_axi_rvalid (rvalid), .s_axi_rready (rready), .s_axi_rdata (rdata), .s_axi_rresp (rresp),
    .cfg, .start_pc, .start, .busy, .done, .error, .overflow, .max_blocks, .irq_done,
    .imem_we, .cmem_we, .gmem_we, .mem_waddr, .mem_wdata, .gmem_raddr, .gmem_rdata);
  axi_host_bfm bfm (.clk, .awvalid, .awready, .awaddr, .wvalid, .wready, .wdata, .wstrb,
                    .bvalid, .bready, .arvalid, .arready, .araddr, .rvalid, .rready, .rdata);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  // memory model behind the interface
  logic [31:0] imem [256], cmem [256], gmem [256];
  int starts = 0;
  always @(posedge clk) begin
    if (imem_we) imem[mem_waddr[9:2]] <= mem_wdata;
    if (cmem_we) cmem[mem_waddr[9:2]] <= mem_wdata;
    if (gmem_we) gmem[mem_waddr[9:2]] <= mem_wdata;
    if (start) starts++;
  end
  assign gmem_rdata = gmem[gmem_raddr[9:2]];

  // every accepted request is answered in the next cycle
  int lat_seen = 0, lat_ok = 0;
  logic wacc_q = 0, racc_q = 0;
  always @(posedge clk) begin
    if (wacc_q) begin lat_seen++; if (bvalid && bresp == 2'b00) lat_ok++; end
    if (racc_q) begin lat_seen++; if (rvalid && rresp == 2'b00) lat_ok++; end
    wacc_q <= awvalid && awready && wvalid && wready;
    racc_q <= arvalid && arready;
  end

  initial begin
    logic [31:0] d;
    busy = 0; done = 0; error = 0; overflow = 0; max_blocks = 4'd3;
    repeat (2) @(posedge clk);
    rst_n = 1;
    bfm.write(32'h04, 32'd20); bfm.write(32'h08, 32'd64); bfm.write(32'h0C, 32'd16);
    bfm.write(32'h10, 32'd512); bfm.write(32'h14, 32'h80);
    chk(cfg.nctaid == 20 && cfg.ntid == 64 && cfg.rpt == 16 && cfg.spb == 512 && start_pc == 32'h80, "config");
    bfm.read(32'h04, d); chk(d == 20, "read nctaid");
    bfm.read(32'h08, d); chk(d == 64, "read ntid");
    bfm.read(32'h0C, d); chk(d == 16, "read rpt");
    bfm.read(32'h10, d); chk(d == 512, "read spb");
    bfm.read(32'h14, d); chk(d == 32'h80, "read start pc");
    bfm.read(32'h1C, d); chk(d == 3, "read max_blocks");
    for (int i = 0; i < 32; i++) begin
      bfm.write(32'h1000_0000 + 4 * i, 32'h1000 + i);
      bfm.write(32'h2000_0000 + 4 * i, 32'h2000 + i);
      bfm.write(32'h3000_0000 + 4 * i, 32'h3000 + i);
    end
    for (int i = 0; i < 32; i++) begin
      chk(imem[i] == 32'h1000 + i && cmem[i] == 32'h2000 + i && gmem[i] == 32'h3000 + i, "memory writes");
      bfm.read(32'h3000_0000 + 4 * i, d); chk(d == 32'h3000 + i, "global read");
    end
    chk(starts == 0, "no start yet");
    bfm.write(32'h00, 32'd1);
    chk(starts == 1, "start pulse");
    busy = 1;
    repeat (50) @(posedge clk);
    bfm.read(32'h00, d); chk(d == 32'b0001, "status busy");
    #1 busy = 0; done = 1; @(posedge clk); #1 done = 0;
    chk(irq_done, "done interrupt");
    bfm.read(32'h18, d); chk(d >= 50 && d <= 54, $sformatf("cycle counter %0d", d));
    error = 1; overflow = 1;
    bfm.read(32'h00, d); chk(d == 32'b1110, "status done/error/overflow");
    bfm.write(32'h00, 32'd1);
    chk(!irq_done && starts == 2, "start clears done");
    // latency, observed at the pins during the BFM transfers
    chk(lat_ok == lat_seen && lat_seen > 100, $sformatf("response latency %0d of %0d", lat_ok, lat_seen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
