// decode_stage: second pipeline stage of the SM.
//
// Splits the instruction into the tokens the later stages use: opcode,
// guard predicate and condition, the three source operands with their
// kinds, the destination, the sign-extended immediate, and derived control
// bits (writes a general register, writes an address register, is a store,
// is a control-flow instruction). The instruction layout is this design's
// own (flexgrip_pkg::instr_t); a 4-byte instruction arrives with its upper
// word zero and decodes as an unpredicated register-register operation.
//
// One register stage with a valid/ready handshake; fd_ready is high when
// the output register is empty or being emptied.
//
// Lint note: bit 0 (the length bit) has done its work in fetch and is not
// decoded again.
module decode_stage
  import flexgrip_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        fd_valid,
  output logic        fd_ready,
  input  wctx_t       fd_ctx,
  input  logic [63:0] fd_instr,
  output logic        dr_valid,
  input  logic        dr_ready,
  output wctx_t       dr_ctx,
  output dec_t        dr_dec
);
  instr_t i;
  dec_t   d;

  always_comb begin
    i = instr_t'(fd_instr);
    d.op     = i.op;
    d.dst    = i.dst;
    d.src1   = i.src1;
    d.src2   = i.src2;
    d.src3   = i.src3;
    d.src1_t = i.src1_t;
    d.src2_t = i.src2_t;
    d.imm    = {{16{i.imm[15]}}, i.imm};
    d.setp   = i.setp;
    d.pdst   = i.pdst;
    d.gpred  = i.gpred;
    d.gcond  = i.gcond;
    d.areg   = i.areg;
    d.space  = i.space;
    d.wr_reg   = 1'b0;
    d.wr_areg  = 1'b0;
    d.is_ctrl  = 1'b0;
    d.is_store = 1'b0;
    unique case (i.op)
      OP_MOV, OP_ADD, OP_SUB, OP_MUL, OP_MAD, OP_AND, OP_OR, OP_XOR,
      OP_SHL, OP_SHR, OP_SAR, OP_MIN, OP_MAX, OP_S2R, OP_LD: d.wr_reg = 1'b1;
      OP_R2A:                                      d.wr_areg = 1'b1;
      OP_ST:                                       d.is_store = 1'b1;
      OP_BRA, OP_SSY, OP_SYNC, OP_BAR, OP_EXIT:    d.is_ctrl = 1'b1;
      default: ;
    endcase
  end

  assign fd_ready = !dr_valid || dr_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dr_valid <= 1'b0;
      dr_ctx   <= '0;
      dr_dec   <= '0;
    end else if (fd_ready) begin
      dr_valid <= fd_valid;
      if (fd_valid) begin
        dr_ctx <= fd_ctx;
        dr_dec <= d;
      end
    end
  end
endmodule
