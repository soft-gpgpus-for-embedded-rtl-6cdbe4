// streaming_multiprocessor: one FlexGrip SM.
//
// A five-stage SIMT pipeline fed by the warp unit:
//   warp unit -> fetch -> decode -> read -> execute -> write -> (warp unit)
// The warp unit issues one warp at a time round-robin; fetch reads its
// instruction from system memory; decode splits it into tokens; the read
// stage walks the warp's 32/NUM_SP rows, one per cycle, reading operands
// from the vector register file, shared/constant/global memory or the
// immediate and forming the active-thread mask from the predicate
// registers; the execute stage runs NUM_SP scalar processors and the
// control flow unit with its warp stacks; the write stage writes registers,
// predicates, address registers and memory and returns the warp's next PC
// and mask. The GPGPU controller receives thread blocks from the block
// scheduler, seeds R0 of every thread with its thread ID and starts the
// block's warps. Shared memory (SMEM_BYTES) lives here; global, constant
// and system memory are outside and reached through the ports below.
//
// Timing: an instruction occupies fetch and decode for one cycle each and
// read, execute and write for 32/NUM_SP cycles (one row per cycle, rows
// overlapped). A warp is issued again only after its last row was written.
//
// Lint note: the warp unit's barrier_release and any_active and the execute
// stage's diverged are status pulses that no SM logic needs; they are left
// unconnected here and are observed by testbenches.
module streaming_multiprocessor
  import flexgrip_pkg::*;
#(
  parameter int NUM_SP       = 8,
  parameter int NUM_OPERANDS = 3,
  parameter int WSTACK_DEPTH = 32,
  parameter int MAX_WARPS    = 24,
  parameter int MAX_BLOCKS   = 8,
  parameter int NUM_REGS     = 8192,
  parameter int SMEM_BYTES   = 16384,
  localparam int NRP         = NUM_OPERANDS * NUM_SP   // memory read ports
) (
  input  logic        clk,
  input  logic        rst_n,
  input  kcfg_t       cfg,
  input  logic [31:0] start_pc,
  // block scheduler
  input  logic        asg_valid,
  output logic        asg_ready,
  input  logic [2:0]  asg_slot,
  input  logic [15:0] asg_block,
  output logic        done_valid,
  output logic [2:0]  done_slot,
  // system memory
  output logic [31:0] imem_addr,
  input  logic [63:0] imem_rdata,
  // global and constant memory reads
  output logic [31:0] g_raddr [NRP],
  input  logic [31:0] g_rdata [NRP],
  output logic [31:0] c_raddr [NRP],
  input  logic [31:0] c_rdata [NRP],
  // global memory writes
  output logic        g_we    [NUM_SP],
  output logic [31:0] g_waddr [NUM_SP],
  output logic [31:0] g_wdata [NUM_SP],
  // status
  output logic        stack_overflow
);
  localparam int RPW   = WARP_SIZE / NUM_SP;
  localparam int ROW_W = (RPW > 1) ? $clog2(RPW) : 1;
  localparam int QW    = $clog2(MAX_WARPS * RPW);
  localparam int VAW   = $clog2(NUM_REGS / NUM_SP);

  // ---------------- GPGPU controller and warp unit ----------------
  logic        launch_valid;
  logic [2:0]  launch_slot;
  logic [4:0]  launch_first;
  logic [3:0]  launch_nwarps;
  logic [8:0]  launch_nthreads;
  logic [31:0] launch_pc;
  logic        blk_done_valid;
  logic [2:0]  blk_done_slot;
  logic [15:0] slot_ctaid [MAX_BLOCKS];
  logic              ctl_vrf_busy;
  logic [NUM_SP-1:0] ctl_vrf_we;
  logic [VAW-1:0]    ctl_vrf_waddr;
  logic [31:0]       ctl_vrf_wdata [NUM_SP];

  gpgpu_controller #(.NUM_SP(NUM_SP), .MAX_WARPS(MAX_WARPS), .MAX_BLOCKS(MAX_BLOCKS),
                     .NUM_REGS(NUM_REGS)) u_ctrl (
    .clk, .rst_n, .cfg, .start_pc,
    .asg_valid, .asg_ready, .asg_slot, .asg_block, .done_valid, .done_slot,
    .slot_ctaid,
    .vrf_busy (ctl_vrf_busy), .vrf_we (ctl_vrf_we), .vrf_waddr (ctl_vrf_waddr),
    .vrf_wdata (ctl_vrf_wdata),
    .launch_valid, .launch_slot, .launch_first, .launch_nwarps, .launch_nthreads, .launch_pc,
    .blk_done_valid, .blk_done_slot
  );

  logic        issue_valid, issue_ready;
  wctx_t       issue_ctx;
  logic        upd_valid;
  logic [4:0]  upd_wid;
  logic [31:0] upd_pc, upd_mask;
  upd_state_e  upd_state;
  logic        barrier_release, any_active;

  warp_unit #(.MAX_WARPS(MAX_WARPS), .MAX_BLOCKS(MAX_BLOCKS)) u_warp (
    .clk, .rst_n,
    .launch_valid, .launch_slot, .launch_first, .launch_nwarps, .launch_nthreads, .launch_pc,
    .issue_valid, .issue_ready, .issue_ctx,
    .upd_valid, .upd_wid, .upd_pc, .upd_mask, .upd_state,
    .blk_done_valid, .blk_done_slot, .barrier_release, .any_active
  );

  // ---------------- fetch and decode ----------------
  logic        fd_valid, fd_ready;
  wctx_t       fd_ctx;
  logic [63:0] fd_instr;

  fetch_stage u_fetch (
    .clk, .rst_n, .issue_valid, .issue_ready, .issue_ctx,
    .imem_addr, .imem_rdata, .fd_valid, .fd_ready, .fd_ctx, .fd_instr
  );

  logic  dr_valid, dr_ready;
  wctx_t dr_ctx;
  dec_t  dr_dec;

  decode_stage u_decode (
    .clk, .rst_n, .fd_valid, .fd_ready, .fd_ctx, .fd_instr,
    .dr_valid, .dr_ready, .dr_ctx, .dr_dec
  );

  // ---------------- register files and shared memory ----------------
  logic [VAW-1:0] vrf_raddr [NUM_OPERANDS];
  logic [31:0]    vrf_rdata [NUM_OPERANDS][NUM_SP];
  logic [NUM_SP-1:0] vrf_we, wb_vrf_we;
  logic [VAW-1:0]    vrf_waddr, wb_vrf_waddr;
  logic [31:0]       vrf_wdata [NUM_SP];
  logic [31:0]       wb_vrf_wdata [NUM_SP];

  // write stage has priority; the controller uses idle cycles
  always_comb begin
    if (ctl_vrf_busy) begin
      vrf_we = wb_vrf_we; vrf_waddr = wb_vrf_waddr; vrf_wdata = wb_vrf_wdata;
    end else begin
      vrf_we = ctl_vrf_we; vrf_waddr = ctl_vrf_waddr; vrf_wdata = ctl_vrf_wdata;
    end
  end

  vector_regfile #(.NUM_SP(NUM_SP), .NUM_REGS(NUM_REGS), .NRD(NUM_OPERANDS)) u_vrf (
    .clk, .raddr (vrf_raddr), .rdata (vrf_rdata),
    .waddr (vrf_waddr), .we (vrf_we), .wdata (vrf_wdata)
  );

  logic [QW-1:0]     prf_raddr, prf_waddr, arf_raddr, arf_waddr;
  flags_t            prf_rdata [NUM_SP][NUM_PRED];
  flags_t            prf_wdata [NUM_SP];
  logic [1:0]        prf_wsel, arf_wsel;
  logic [NUM_SP-1:0] prf_we, arf_we;
  logic [31:0]       arf_rdata [NUM_SP][NUM_AREG];
  logic [31:0]       arf_wdata [NUM_SP];

  pred_regfile #(.NUM_SP(NUM_SP), .MAX_WARPS(MAX_WARPS)) u_prf (
    .clk, .rst_n, .raddr (prf_raddr), .rdata (prf_rdata),
    .waddr (prf_waddr), .wsel (prf_wsel), .we (prf_we), .wdata (prf_wdata)
  );

  addr_regfile #(.NUM_SP(NUM_SP), .MAX_WARPS(MAX_WARPS)) u_arf (
    .clk, .rst_n, .raddr (arf_raddr), .rdata (arf_rdata),
    .waddr (arf_waddr), .wsel (arf_wsel), .we (arf_we), .wdata (arf_wdata)
  );

  logic [31:0] mem_addr [NUM_OPERANDS][NUM_SP];
  logic [31:0] g_rd [NUM_OPERANDS][NUM_SP];
  logic [31:0] s_rd [NUM_OPERANDS][NUM_SP];
  logic [31:0] c_rd [NUM_OPERANDS][NUM_SP];
  logic [31:0] s_raddr [NRP];
  logic [31:0] s_rdata [NRP];
  logic        s_we    [NUM_SP];
  logic [31:0] m_waddr [NUM_SP];
  logic [31:0] m_wdata [NUM_SP];

  always_comb
    for (int k = 0; k < NUM_OPERANDS; k++)
      for (int l = 0; l < NUM_SP; l++) begin
        g_raddr[k*NUM_SP+l] = mem_addr[k][l];
        c_raddr[k*NUM_SP+l] = mem_addr[k][l];
        s_raddr[k*NUM_SP+l] = mem_addr[k][l];
        g_rd[k][l] = g_rdata[k*NUM_SP+l];
        c_rd[k][l] = c_rdata[k*NUM_SP+l];
        s_rd[k][l] = s_rdata[k*NUM_SP+l];
      end

  data_mem #(.WORDS(SMEM_BYTES / 4), .NRD(NRP), .NWR(NUM_SP)) u_smem (
    .clk, .raddr (s_raddr), .rdata (s_rdata),
    .we (s_we), .waddr (m_waddr), .wdata (m_wdata)
  );

  assign g_waddr = m_waddr;
  assign g_wdata = m_wdata;

  // ---------------- read ----------------
  logic              re_valid, re_last;
  wctx_t             re_ctx;
  dec_t              re_dec;
  logic [ROW_W-1:0]  re_row;
  logic [NUM_SP-1:0] re_lane_mask;
  logic [31:0]       re_opa [NUM_SP], re_opb [NUM_SP], re_opc [NUM_SP], re_addr [NUM_SP];
  logic [VAW-1:0]    re_vaddr;
  logic [QW-1:0]     re_qrow;

  read_stage #(.NUM_SP(NUM_SP), .NUM_OPERANDS(NUM_OPERANDS), .MAX_WARPS(MAX_WARPS),
               .MAX_BLOCKS(MAX_BLOCKS), .NUM_REGS(NUM_REGS)) u_read (
    .clk, .rst_n, .dr_valid, .dr_ready, .dr_ctx, .dr_dec, .cfg, .slot_ctaid,
    .vrf_raddr, .vrf_rdata, .prf_raddr, .prf_rdata, .arf_raddr, .arf_rdata,
    .mem_addr, .g_rdata (g_rd), .s_rdata (s_rd), .c_rdata (c_rd),
    .re_valid, .re_ctx, .re_dec, .re_row, .re_last, .re_lane_mask,
    .re_opa, .re_opb, .re_opc, .re_addr, .re_vaddr, .re_qrow
  );

  // ---------------- execute ----------------
  logic              ew_valid, ew_last;
  wctx_t             ew_ctx;
  dec_t              ew_dec;
  logic [NUM_SP-1:0] ew_lane_mask;
  logic [31:0]       ew_result [NUM_SP], ew_saddr [NUM_SP], ew_sdata [NUM_SP];
  flags_t            ew_flags [NUM_SP];
  logic [VAW-1:0]    ew_vaddr;
  logic [QW-1:0]     ew_qrow;
  logic [31:0]       ew_upd_pc, ew_upd_mask;
  upd_state_e        ew_upd_state;
  logic              diverged;

  execute_stage #(.NUM_SP(NUM_SP), .NUM_OPERANDS(NUM_OPERANDS), .MAX_WARPS(MAX_WARPS),
                  .WSTACK_DEPTH(WSTACK_DEPTH), .NUM_REGS(NUM_REGS)) u_exec (
    .clk, .rst_n, .launch_valid, .launch_first, .launch_nwarps,
    .re_valid, .re_ctx, .re_dec, .re_row, .re_last, .re_lane_mask,
    .re_opa, .re_opb, .re_opc, .re_addr, .re_vaddr, .re_qrow,
    .ew_valid, .ew_ctx, .ew_dec, .ew_last, .ew_lane_mask, .ew_result, .ew_flags,
    .ew_saddr, .ew_sdata, .ew_vaddr, .ew_qrow, .ew_upd_pc, .ew_upd_mask, .ew_upd_state,
    .overflow (stack_overflow), .diverged
  );

  // ---------------- write ----------------
  write_stage #(.NUM_SP(NUM_SP), .MAX_WARPS(MAX_WARPS), .NUM_REGS(NUM_REGS)) u_write (
    .ew_valid, .ew_ctx, .ew_dec, .ew_last, .ew_lane_mask, .ew_result, .ew_flags,
    .ew_saddr, .ew_sdata, .ew_vaddr, .ew_qrow, .ew_upd_pc, .ew_upd_mask, .ew_upd_state,
    .vrf_we (wb_vrf_we), .vrf_waddr (wb_vrf_waddr), .vrf_wdata (wb_vrf_wdata),
    .vrf_busy (ctl_vrf_busy),
    .prf_we, .prf_waddr, .prf_wsel, .prf_wdata,
    .arf_we, .arf_waddr, .arf_wsel, .arf_wdata,
    .g_we, .s_we, .m_waddr, .m_wdata,
    .upd_valid, .upd_wid, .upd_pc, .upd_mask, .upd_state
  );
endmodule
