// host_interface: AXI4-Lite slave through which the host driver controls
// the GPGPU.
//
// The driver loads the kernel binary, the kernel parameters (constant
// memory) and the input data (global memory), writes the launch
// configuration, starts the kernel, polls or waits for the done interrupt and
// reads back the results. Address map (byte addresses, bits 29:28 select
// the region; only full 32-bit writes are supported, WSTRB is ignored):
//   0x0000_0000 registers
//     0x00 W: bit0 = start kernel    R: status {.., overflow, error, done, busy}
//     0x04 number of thread blocks   0x08 threads per block
//     0x0C registers per thread      0x10 shared-memory bytes per block
//     0x14 kernel start PC           0x18 R: cycles of the last kernel
//     0x1C R: blocks per SM chosen by the scheduler
//   0x1000_0000 system (instruction) memory, write only
//   0x2000_0000 constant memory, write only
//   0x3000_0000 global memory, read/write
// Writes complete when address and data are both valid (one transfer at a
// time, response OKAY one cycle later). Reads return one cycle after the
// address. The register map is this design's own; the paper only says that
// kernel, parameters, data, control and status pass over AXI.
//
// Lint note: address bits 31:30 are not decoded (the regions repeat).
module host_interface
  import flexgrip_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_awaddr,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  output logic [1:0]  s_axi_bresp,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  input  logic [31:0] s_axi_araddr,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  // kernel control
  output kcfg_t       cfg,
  output logic [31:0] start_pc,
  output logic        start,
  input  logic        busy,
  input  logic        done,
  input  logic        error,
  input  logic        overflow,
  input  logic [3:0]  max_blocks,
  output logic        irq_done,
  // memory access
  output logic        imem_we,
  output logic        cmem_we,
  output logic        gmem_we,
  output logic [31:0] mem_waddr,
  output logic [31:0] mem_wdata,
  output logic [31:0] gmem_raddr,
  input  logic [31:0] gmem_rdata
);
  logic        wr, rd;
  logic [1:0]  wreg, rreg;
  logic        done_flag;
  logic [31:0] cycles;

  assign wr   = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign rd   = s_axi_arvalid && !s_axi_rvalid;
  assign wreg = s_axi_awaddr[29:28];
  assign rreg = s_axi_araddr[29:28];

  assign s_axi_awready = wr;
  assign s_axi_wready  = wr;
  assign s_axi_arready = rd;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;

  assign imem_we    = wr && wreg == 2'd1;
  assign cmem_we    = wr && wreg == 2'd2;
  assign gmem_we    = wr && wreg == 2'd3;
  assign mem_waddr  = {4'd0, s_axi_awaddr[27:0]};
  assign mem_wdata  = s_axi_wdata;
  assign gmem_raddr = {4'd0, s_axi_araddr[27:0]};
  assign start      = wr && wreg == 2'd0 && s_axi_awaddr[7:0] == 8'h00 && s_axi_wdata[0];
  assign irq_done   = done_flag;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
      cfg          <= '0;
      start_pc     <= '0;
      done_flag    <= 1'b0;
      cycles       <= '0;
    end else begin
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (s_axi_rvalid && s_axi_rready) s_axi_rvalid <= 1'b0;
      if (wr) begin
        s_axi_bvalid <= 1'b1;
        if (wreg == 2'd0)
          unique case (s_axi_awaddr[7:0])
            8'h04: cfg.nctaid <= s_axi_wdata[15:0];
            8'h08: cfg.ntid   <= s_axi_wdata[8:0];
            8'h0C: cfg.rpt    <= s_axi_wdata[6:0];
            8'h10: cfg.spb    <= s_axi_wdata[14:0];
            8'h14: start_pc   <= s_axi_wdata;
            default: ;
          endcase
      end
      if (rd) begin
        s_axi_rvalid <= 1'b1;
        if (rreg == 2'd3) s_axi_rdata <= gmem_rdata;
        else if (rreg == 2'd0)
          unique case (s_axi_araddr[7:0])
            8'h00: s_axi_rdata <= {28'd0, overflow, error, done_flag, busy};
            8'h04: s_axi_rdata <= 32'(cfg.nctaid);
            8'h08: s_axi_rdata <= 32'(cfg.ntid);
            8'h0C: s_axi_rdata <= 32'(cfg.rpt);
            8'h10: s_axi_rdata <= 32'(cfg.spb);
            8'h14: s_axi_rdata <= start_pc;
            8'h18: s_axi_rdata <= cycles;
            8'h1C: s_axi_rdata <= 32'(max_blocks);
            default: s_axi_rdata <= '0;
          endcase
        else s_axi_rdata <= '0;
      end
      if (start) begin
        done_flag <= 1'b0;
        cycles    <= '0;
      end else begin
        if (busy) cycles <= cycles + 1'b1;
        if (done) done_flag <= 1'b1;
      end
    end
  end

  // AXI rules: a response stays valid until it is accepted.
  a_bhold: assert property (@(posedge clk) disable iff (!rst_n)
                            s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_rhold: assert property (@(posedge clk) disable iff (!rst_n)
                            s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));

  logic unused;
  assign unused = ^s_axi_wstrb;
endmodule
