// write_stage: last pipeline stage of the SM.
//
// Turns one registered row of results into register-file and memory writes,
// all taking effect at the next clock edge, and hands the warp's update back
// to the warp unit on the last row of an instruction:
//   - general register dst of every active lane (instructions that write a
//     register), at the bank address formed in the read stage;
//   - flags into predicate register pdst of every active lane when the
//     instruction sets a predicate;
//   - address register areg of every active lane for R2A;
//   - stores of every active lane to global or shared memory (the address
//     was computed by operand unit 1, the data is operand 2);
//   - next PC, mask and state of the warp.
// Purely combinational; vrf_busy tells the GPGPU controller that the write
// port is taken this cycle.
//
// Lint note: of the decoded instruction only the fields that choose a write
// destination are used, and of the warp context only the warp number (the
// rest of the update comes from the execute stage).
module write_stage
  import flexgrip_pkg::*;
#(
  parameter int NUM_SP    = 8,
  parameter int MAX_WARPS = 24,
  parameter int NUM_REGS  = 8192,
  localparam int RPW      = WARP_SIZE / NUM_SP,
  localparam int QW       = $clog2(MAX_WARPS * RPW),
  localparam int VAW      = $clog2(NUM_REGS / NUM_SP)
) (
  input  logic              ew_valid,
  input  wctx_t             ew_ctx,
  input  dec_t              ew_dec,
  input  logic              ew_last,
  input  logic [NUM_SP-1:0] ew_lane_mask,
  input  logic [31:0]       ew_result [NUM_SP],
  input  flags_t            ew_flags  [NUM_SP],
  input  logic [31:0]       ew_saddr  [NUM_SP],
  input  logic [31:0]       ew_sdata  [NUM_SP],
  input  logic [VAW-1:0]    ew_vaddr,
  input  logic [QW-1:0]     ew_qrow,
  input  logic [31:0]       ew_upd_pc,
  input  logic [31:0]       ew_upd_mask,
  input  upd_state_e        ew_upd_state,
  // vector register file
  output logic [NUM_SP-1:0] vrf_we,
  output logic [VAW-1:0]    vrf_waddr,
  output logic [31:0]       vrf_wdata [NUM_SP],
  output logic              vrf_busy,
  // predicate registers
  output logic [NUM_SP-1:0] prf_we,
  output logic [QW-1:0]     prf_waddr,
  output logic [1:0]        prf_wsel,
  output flags_t            prf_wdata [NUM_SP],
  // address registers
  output logic [NUM_SP-1:0] arf_we,
  output logic [QW-1:0]     arf_waddr,
  output logic [1:0]        arf_wsel,
  output logic [31:0]       arf_wdata [NUM_SP],
  // memories
  output logic              g_we  [NUM_SP],
  output logic              s_we  [NUM_SP],
  output logic [31:0]       m_waddr [NUM_SP],
  output logic [31:0]       m_wdata [NUM_SP],
  // warp update
  output logic              upd_valid,
  output logic [4:0]        upd_wid,
  output logic [31:0]       upd_pc,
  output logic [31:0]       upd_mask,
  output upd_state_e        upd_state
);
  logic [NUM_SP-1:0] act;
  assign act = ew_valid ? ew_lane_mask : '0;

  assign vrf_we    = ew_dec.wr_reg  ? act : '0;
  assign vrf_waddr = ew_vaddr;
  assign vrf_busy  = |vrf_we;
  assign prf_we    = ew_dec.setp    ? act : '0;
  assign prf_waddr = ew_qrow;
  assign prf_wsel  = ew_dec.pdst;
  assign arf_we    = ew_dec.wr_areg ? act : '0;
  assign arf_waddr = ew_qrow;
  assign arf_wsel  = ew_dec.areg;

  always_comb
    for (int l = 0; l < NUM_SP; l++) begin
      vrf_wdata[l] = ew_result[l];
      prf_wdata[l] = ew_flags[l];
      arf_wdata[l] = ew_result[l];
      g_we[l]      = act[l] && ew_dec.is_store && ew_dec.space == SP_GLOBAL;
      s_we[l]      = act[l] && ew_dec.is_store && ew_dec.space == SP_SHARED;
      m_waddr[l]   = ew_saddr[l];
      m_wdata[l]   = ew_sdata[l];
    end

  assign upd_valid = ew_valid && ew_last;
  assign upd_wid   = ew_ctx.wid;
  assign upd_pc    = ew_upd_pc;
  assign upd_mask  = ew_upd_mask;
  assign upd_state = ew_upd_state;
endmodule
