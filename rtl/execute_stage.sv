// execute_stage: fourth pipeline stage of the SM.
//
// Holds NUM_SP scalar processors and the control flow unit. Each cycle one
// warp row arrives from the read stage: lane l's SP computes the result and
// flags of thread (row * NUM_SP + l) from its three operands, while the
// control flow unit accumulates the row's active mask and, on the last row,
// produces the warp's next PC, mask and state. Results, flags, store
// address/data (operand 1 and 2) and the warp update are registered into the
// execute/write pipeline register; the stage never stalls, so every row
// leaves one cycle after it arrived.
// NUM_OPERANDS=2 builds the SPs without multiplier.
module execute_stage
  import flexgrip_pkg::*;
#(
  parameter int NUM_SP       = 8,
  parameter int NUM_OPERANDS = 3,
  parameter int MAX_WARPS    = 24,
  parameter int WSTACK_DEPTH = 32,
  parameter int NUM_REGS     = 8192,
  localparam int RPW         = WARP_SIZE / NUM_SP,
  localparam int ROW_W       = (RPW > 1) ? $clog2(RPW) : 1,
  localparam int QW          = $clog2(MAX_WARPS * RPW),
  localparam int VAW         = $clog2(NUM_REGS / NUM_SP)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              launch_valid,
  input  logic [4:0]        launch_first,
  input  logic [3:0]        launch_nwarps,
  // from read
  input  logic              re_valid,
  input  wctx_t             re_ctx,
  input  dec_t              re_dec,
  input  logic [ROW_W-1:0]  re_row,
  input  logic              re_last,
  input  logic [NUM_SP-1:0] re_lane_mask,
  input  logic [31:0]       re_opa  [NUM_SP],
  input  logic [31:0]       re_opb  [NUM_SP],
  input  logic [31:0]       re_opc  [NUM_SP],
  input  logic [31:0]       re_addr [NUM_SP],
  input  logic [VAW-1:0]    re_vaddr,
  input  logic [QW-1:0]     re_qrow,
  // to write
  output logic              ew_valid,
  output wctx_t             ew_ctx,
  output dec_t              ew_dec,
  output logic              ew_last,
  output logic [NUM_SP-1:0] ew_lane_mask,
  output logic [31:0]       ew_result [NUM_SP],
  output flags_t            ew_flags  [NUM_SP],
  output logic [31:0]       ew_saddr  [NUM_SP],
  output logic [31:0]       ew_sdata  [NUM_SP],
  output logic [VAW-1:0]    ew_vaddr,
  output logic [QW-1:0]     ew_qrow,
  output logic [31:0]       ew_upd_pc,
  output logic [31:0]       ew_upd_mask,
  output upd_state_e        ew_upd_state,
  output logic              overflow,
  output logic              diverged
);
  logic [31:0] result [NUM_SP];
  flags_t      flags  [NUM_SP];

  for (genvar l = 0; l < NUM_SP; l++) begin : g_sp
    scalar_processor #(.HAS_MUL(NUM_OPERANDS == 3)) u_sp (
      .op     (re_dec.op),
      .a      (re_opa[l]),
      .b      (re_opb[l]),
      .c      (re_opc[l]),
      .result (result[l]),
      .flags  (flags[l])
    );
  end

  logic [31:0] upd_pc, upd_mask;
  upd_state_e  upd_state;

  control_flow_unit #(.NUM_SP(NUM_SP), .MAX_WARPS(MAX_WARPS),
                      .WSTACK_DEPTH(WSTACK_DEPTH)) u_cfu (
    .clk, .rst_n,
    .launch_valid, .launch_first, .launch_nwarps,
    .in_valid     (re_valid),
    .in_ctx       (re_ctx),
    .in_op        (re_dec.op),
    .in_target    (re_dec.imm),
    .in_row       (re_row),
    .in_last      (re_last),
    .in_lane_mask (re_lane_mask),
    .upd_pc, .upd_mask, .upd_state,
    .overflow, .diverged
  );

  always_ff @(posedge clk) begin
    if (!rst_n) ew_valid <= 1'b0;
    else        ew_valid <= re_valid;
  end

  always_ff @(posedge clk) begin
    if (re_valid) begin
      ew_ctx       <= re_ctx;
      ew_dec       <= re_dec;
      ew_last      <= re_last;
      ew_lane_mask <= re_lane_mask;
      ew_vaddr     <= re_vaddr;
      ew_qrow      <= re_qrow;
      ew_upd_pc    <= upd_pc;
      ew_upd_mask  <= upd_mask;
      ew_upd_state <= upd_state;
      for (int l = 0; l < NUM_SP; l++) begin
        ew_result[l] <= result[l];
        ew_flags[l]  <= flags[l];
        ew_saddr[l]  <= re_addr[l];
        ew_sdata[l]  <= re_opb[l];
      end
    end
  end
endmodule
