// flexgrip_top: the FlexGrip soft GPGPU.
//
// A host processor loads a CUDA-style kernel, its parameters and its data
// over AXI4-Lite and starts it. The block scheduler then computes how many
// thread blocks fit one streaming multiprocessor (SM) and hands the blocks
// to the NUM_SM SMs round-robin; each SM runs its blocks' warps on NUM_SP
// scalar processors and reports completed blocks; when all are done the
// host sees done/irq_done and reads the results from global memory.
//
// Memories at this level: system memory (kernel binary, IMEM_WORDS words),
// constant memory (CMEM_WORDS) and global memory (GMEM_WORDS), all on-chip
// arrays; every SM has its own shared memory. Each SM gets one global and
// one constant read port per lane and operand unit and one global write port
// per lane; the host has one more global port of each kind.
//
// Defaults are the baseline configuration: 1 SM with 8 SPs, three operand
// units with multiplier, 32-deep warp stacks, 24 warps, 8 blocks, 8,192
// registers and 16 KB of shared memory per SM. NUM_SM=2 and NUM_SP=16/32
// give the paper's larger configurations; NUM_OPERANDS=2 and smaller
// WSTACK_DEPTH give its application-specific reductions. Memory sizes are
// this design's choice.
module flexgrip_top
  import flexgrip_pkg::*;
#(
  parameter int NUM_SM       = 1,
  parameter int NUM_SP       = 8,
  parameter int NUM_OPERANDS = 3,
  parameter int WSTACK_DEPTH = 32,
  parameter int MAX_WARPS    = 24,
  parameter int MAX_BLOCKS   = 8,
  parameter int NUM_REGS     = 8192,
  parameter int SMEM_BYTES   = 16384,
  parameter int IMEM_WORDS   = 1024,
  parameter int CMEM_WORDS   = 1024,
  parameter int GMEM_WORDS   = 16384
) (
  input  logic        clk,
  input  logic        rst_n,
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
  output logic        irq_done
);
  localparam int NRP = NUM_OPERANDS * NUM_SP;      // read ports per SM

  kcfg_t       cfg;
  logic [31:0] start_pc;
  logic        start, busy, done, error;
  logic [3:0]  max_blocks;
  logic        imem_we, cmem_we, gmem_we;
  logic [31:0] mem_waddr, mem_wdata, host_graddr, host_grdata;
  logic        sm_ovf [NUM_SM];
  logic        overflow;

  always_comb begin
    overflow = 1'b0;
    for (int s = 0; s < NUM_SM; s++) overflow |= sm_ovf[s];
  end

  host_interface u_host (
    .clk, .rst_n,
    .s_axi_awvalid, .s_axi_awready, .s_axi_awaddr, .s_axi_wvalid, .s_axi_wready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_bvalid, .s_axi_bready, .s_axi_bresp,
    .s_axi_arvalid, .s_axi_arready, .s_axi_araddr, .s_axi_rvalid, .s_axi_rready,
    .s_axi_rdata, .s_axi_rresp,
    .cfg, .start_pc, .start, .busy, .done, .error, .overflow, .max_blocks, .irq_done,
    .imem_we, .cmem_we, .gmem_we, .mem_waddr, .mem_wdata,
    .gmem_raddr (host_graddr), .gmem_rdata (host_grdata)
  );

  // ---------------- block scheduler ----------------
  logic        asg_valid [NUM_SM], asg_ready [NUM_SM];
  logic [2:0]  asg_slot  [NUM_SM];
  logic [15:0] asg_block [NUM_SM];
  logic        sm_done_valid [NUM_SM];
  logic [2:0]  sm_done_slot  [NUM_SM];

  block_scheduler #(.NUM_SM(NUM_SM), .MAX_BLOCKS(MAX_BLOCKS), .MAX_WARPS(MAX_WARPS),
                    .NUM_REGS(NUM_REGS), .SMEM_BYTES(SMEM_BYTES)) u_bsched (
    .clk, .rst_n, .start, .cfg, .busy, .done, .error, .max_blocks,
    .asg_valid, .asg_ready, .asg_slot, .asg_block, .sm_done_valid, .sm_done_slot
  );

  // ---------------- memories ----------------
  logic [31:0] imem_raddr [NUM_SM];
  logic [63:0] imem_rdata [NUM_SM];

  instr_mem #(.WORDS(IMEM_WORDS), .NUM_SM(NUM_SM)) u_imem (
    .clk, .raddr (imem_raddr), .rdata (imem_rdata),
    .we (imem_we), .waddr (mem_waddr), .wdata (mem_wdata)
  );

  logic [31:0] g_raddr [NUM_SM*NRP+1];
  logic [31:0] g_rdata [NUM_SM*NRP+1];
  logic        g_we    [NUM_SM*NUM_SP+1];
  logic [31:0] g_waddr [NUM_SM*NUM_SP+1];
  logic [31:0] g_wdata [NUM_SM*NUM_SP+1];
  logic [31:0] c_raddr [NUM_SM*NRP];
  logic [31:0] c_rdata [NUM_SM*NRP];
  logic        c_we    [1];
  logic [31:0] c_waddr [1];
  logic [31:0] c_wdata [1];

  // host port is the last one
  assign g_raddr[NUM_SM*NRP]    = host_graddr;
  assign host_grdata            = g_rdata[NUM_SM*NRP];
  assign g_we[NUM_SM*NUM_SP]    = gmem_we;
  assign g_waddr[NUM_SM*NUM_SP] = mem_waddr;
  assign g_wdata[NUM_SM*NUM_SP] = mem_wdata;
  assign c_we[0]    = cmem_we;
  assign c_waddr[0] = mem_waddr;
  assign c_wdata[0] = mem_wdata;

  data_mem #(.WORDS(GMEM_WORDS), .NRD(NUM_SM*NRP+1), .NWR(NUM_SM*NUM_SP+1)) u_gmem (
    .clk, .raddr (g_raddr), .rdata (g_rdata), .we (g_we), .waddr (g_waddr), .wdata (g_wdata)
  );

  data_mem #(.WORDS(CMEM_WORDS), .NRD(NUM_SM*NRP), .NWR(1)) u_cmem (
    .clk, .raddr (c_raddr), .rdata (c_rdata), .we (c_we), .waddr (c_waddr), .wdata (c_wdata)
  );

  // ---------------- streaming multiprocessors ----------------
  for (genvar s = 0; s < NUM_SM; s++) begin : g_sm
    logic [31:0] sg_raddr [NRP], sg_rdata [NRP], sc_raddr [NRP], sc_rdata [NRP];
    logic        sg_we    [NUM_SP];
    logic [31:0] sg_waddr [NUM_SP], sg_wdata [NUM_SP];

    streaming_multiprocessor #(.NUM_SP(NUM_SP), .NUM_OPERANDS(NUM_OPERANDS),
                               .WSTACK_DEPTH(WSTACK_DEPTH), .MAX_WARPS(MAX_WARPS),
                               .MAX_BLOCKS(MAX_BLOCKS), .NUM_REGS(NUM_REGS),
                               .SMEM_BYTES(SMEM_BYTES)) u_sm (
      .clk, .rst_n, .cfg, .start_pc,
      .asg_valid (asg_valid[s]), .asg_ready (asg_ready[s]), .asg_slot (asg_slot[s]),
      .asg_block (asg_block[s]), .done_valid (sm_done_valid[s]), .done_slot (sm_done_slot[s]),
      .imem_addr (imem_raddr[s]), .imem_rdata (imem_rdata[s]),
      .g_raddr (sg_raddr), .g_rdata (sg_rdata), .c_raddr (sc_raddr), .c_rdata (sc_rdata),
      .g_we (sg_we), .g_waddr (sg_waddr), .g_wdata (sg_wdata),
      .stack_overflow (sm_ovf[s])
    );

    always_comb begin
      for (int p = 0; p < NRP; p++) begin
        g_raddr[s*NRP+p] = sg_raddr[p];
        sg_rdata[p]      = g_rdata[s*NRP+p];
        c_raddr[s*NRP+p] = sc_raddr[p];
        sc_rdata[p]      = c_rdata[s*NRP+p];
      end
      for (int l = 0; l < NUM_SP; l++) begin
        g_we[s*NUM_SP+l]    = sg_we[l];
        g_waddr[s*NUM_SP+l] = sg_waddr[l];
        g_wdata[s*NUM_SP+l] = sg_wdata[l];
      end
    end
  end
endmodule
