// read_stage: third pipeline stage of the SM (read controller and operand
// units).
//
// A warp of 32 threads is processed as 32/NUM_SP rows of NUM_SP threads
// (four rows for 8 SPs). The read controller holds the decoded instruction
// and emits one row per cycle to the execute stage; upstream stages stall
// (dr_ready low) until the last row has been sent. For every row it
//   - forms the row's register-file, predicate and address-register row
//     address from the warp number and row (bank address = row * regs per
//     thread + register index),
//   - reads the guard predicate of each lane and passes it with the
//     instruction's condition through the predicate lookup table; the result
//     ANDed with the warp's thread mask is the row's active-thread mask,
//   - sets up the operand units (register, immediate, memory operand,
//     load/store address) and collects their outputs, and
//   - supplies the special registers (thread id, block id, block and grid
//     size) for S2R.
// NUM_OPERANDS=2 drops the third operand unit and its register read port
// (the configuration without multiply-add).
//
// Outputs are registered (the read/execute pipeline register). Row
// sequencing, the operand modes and the special registers are this design's
// choices; the units, predicate LUT and AND gate follow the paper's figures.
module read_stage
  import flexgrip_pkg::*;
#(
  parameter int NUM_SP       = 8,
  parameter int NUM_OPERANDS = 3,
  parameter int MAX_WARPS    = 24,
  parameter int MAX_BLOCKS   = 8,
  parameter int NUM_REGS     = 8192,
  localparam int RPW         = WARP_SIZE / NUM_SP,           // rows per warp
  localparam int ROW_W       = (RPW > 1) ? $clog2(RPW) : 1,
  localparam int QW          = $clog2(MAX_WARPS * RPW),       // row address
  localparam int VAW         = $clog2(NUM_REGS / NUM_SP)      // bank address
) (
  input  logic        clk,
  input  logic        rst_n,
  // from decode
  input  logic        dr_valid,
  output logic        dr_ready,
  input  wctx_t       dr_ctx,
  input  dec_t        dr_dec,
  // kernel configuration and block ids of the slots
  input  kcfg_t       cfg,
  input  logic [15:0] slot_ctaid [MAX_BLOCKS],
  // register files
  output logic [VAW-1:0] vrf_raddr [NUM_OPERANDS],
  input  logic [31:0]    vrf_rdata [NUM_OPERANDS][NUM_SP],
  output logic [QW-1:0]  prf_raddr,
  input  flags_t         prf_rdata [NUM_SP][NUM_PRED],
  output logic [QW-1:0]  arf_raddr,
  input  logic [31:0]    arf_rdata [NUM_SP][NUM_AREG],
  // memories (same address to global, shared and constant memory)
  output logic [31:0] mem_addr [NUM_OPERANDS][NUM_SP],
  input  logic [31:0] g_rdata  [NUM_OPERANDS][NUM_SP],
  input  logic [31:0] s_rdata  [NUM_OPERANDS][NUM_SP],
  input  logic [31:0] c_rdata  [NUM_OPERANDS][NUM_SP],
  // to execute: one row per cycle
  output logic              re_valid,
  output wctx_t             re_ctx,
  output dec_t              re_dec,
  output logic [ROW_W-1:0]  re_row,
  output logic              re_last,
  output logic [NUM_SP-1:0] re_lane_mask,
  output logic [31:0]       re_opa  [NUM_SP],
  output logic [31:0]       re_opb  [NUM_SP],
  output logic [31:0]       re_opc  [NUM_SP],
  output logic [31:0]       re_addr [NUM_SP],
  output logic [VAW-1:0]    re_vaddr,
  output logic [QW-1:0]     re_qrow
);
  logic [ROW_W-1:0] row;
  logic             last;
  logic [QW-1:0]    q;
  logic [VAW-1:0]   vbase;
  logic [31:0]      smem_base;

  assign last      = (row == ROW_W'(RPW - 1));
  assign dr_ready  = last;
  assign q         = QW'(dr_ctx.wid * RPW + row);
  assign vbase     = VAW'(q * cfg.rpt);
  assign smem_base = 32'(dr_ctx.slot) * 32'(cfg.spb);
  assign prf_raddr = q;
  assign arf_raddr = q;

  // ---- read controller: operand unit set-up ----
  opmode_e    mode  [3];
  mem_space_e space [3];
  logic       barea [3];
  logic [RIDX_W-1:0] sidx [3];

  function automatic void from_type(input src_type_e t, output opmode_e m,
                                    output mem_space_e s, output logic b);
    unique case (t)
      SRC_REG:    begin m = OPM_REG; s = SP_NONE;   b = 1'b0; end
      SRC_IMM:    begin m = OPM_IMM; s = SP_NONE;   b = 1'b0; end
      SRC_CONST:  begin m = OPM_MEM; s = SP_CONST;  b = 1'b1; end
      default:    begin m = OPM_MEM; s = SP_SHARED; b = 1'b1; end
    endcase
  endfunction

  always_comb begin
    from_type(dr_dec.src1_t, mode[0], space[0], barea[0]);
    from_type(dr_dec.src2_t, mode[1], space[1], barea[1]);
    mode[2] = OPM_REG; space[2] = SP_NONE; barea[2] = 1'b0;
    unique case (dr_dec.op)
      OP_LD:  begin mode[0] = OPM_MEM;  space[0] = dr_dec.space; barea[0] = 1'b0; end
      OP_ST:  begin mode[0] = OPM_ADDR; space[0] = dr_dec.space; barea[0] = 1'b0; end
      OP_R2A: begin mode[0] = OPM_ADDR; space[0] = SP_NONE;      barea[0] = 1'b0; end
      default: ;
    endcase
    sidx[0] = dr_dec.src1;
    sidx[1] = dr_dec.src2;
    sidx[2] = dr_dec.src3;
  end

  // ---- operand units ----
  logic [31:0] opnd [3][NUM_SP];
  logic [31:0] areg_sel [NUM_SP];
  always_comb
    for (int l = 0; l < NUM_SP; l++) areg_sel[l] = arf_rdata[l][dr_dec.areg];

  for (genvar k = 0; k < NUM_OPERANDS; k++) begin : g_unit
    assign vrf_raddr[k] = VAW'(vbase + VAW'(sidx[k]));
    read_operand_unit #(.NUM_SP(NUM_SP)) u_unit (
      .mode      (mode[k]),
      .space     (space[k]),
      .base_areg (barea[k]),
      .imm       (dr_dec.imm),
      .smem_base (smem_base),
      .reg_data  (vrf_rdata[k]),
      .areg_data (areg_sel),
      .mem_addr  (mem_addr[k]),
      .g_rdata   (g_rdata[k]),
      .s_rdata   (s_rdata[k]),
      .c_rdata   (c_rdata[k]),
      .opnd      (opnd[k])
    );
  end
  for (genvar k = NUM_OPERANDS; k < 3; k++) begin : g_nounit
    always_comb for (int l = 0; l < NUM_SP; l++) opnd[k][l] = 32'd0;
  end

  // ---- predicate LUT and active-thread mask ----
  logic [NUM_SP-1:0] pass, tmask;
  for (genvar l = 0; l < NUM_SP; l++) begin : g_lut
    pred_lut u_lut (
      .cond  (dr_dec.gcond),
      .flags (prf_rdata[l][dr_dec.gpred]),
      .pass  (pass[l])
    );
  end
  assign tmask = dr_ctx.mask[32'(row) * NUM_SP +: NUM_SP];

  // ---- special registers for S2R ----
  function automatic logic [31:0] sreg(sreg_e s, int lane);
    unique case (s)
      SR_TID:   return 32'(dr_ctx.wib) * WARP_SIZE + 32'(row) * NUM_SP + 32'(lane);
      SR_CTAID: return 32'(slot_ctaid[dr_ctx.slot]);
      SR_NTID:  return 32'(cfg.ntid);
      default:  return 32'(cfg.nctaid);
    endcase
  endfunction

  // ---- read/execute pipeline register ----
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      re_valid <= 1'b0;
      row      <= '0;
    end else begin
      re_valid <= dr_valid;
      if (dr_valid) row <= last ? '0 : row + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (dr_valid) begin
      re_ctx       <= dr_ctx;
      re_dec       <= dr_dec;
      re_row       <= row;
      re_last      <= last;
      re_lane_mask <= tmask & pass;
      re_vaddr     <= VAW'(vbase + VAW'(dr_dec.dst));
      re_qrow      <= q;
      for (int l = 0; l < NUM_SP; l++) begin
        re_opa[l]  <= (dr_dec.op == OP_S2R) ? sreg(sreg_e'(dr_dec.imm[1:0]), l) : opnd[0][l];
        re_opb[l]  <= opnd[1][l];
        re_opc[l]  <= opnd[2][l];
        re_addr[l] <= mem_addr[0][l];
      end
    end
  end
endmodule
