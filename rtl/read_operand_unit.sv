// read_operand_unit: one "read source operand" unit of the read stage.
//
// The read stage has one such unit per source operand (three in the
// baseline, two when the multiplier is removed). The units are identical;
// the read controller tells each, per instruction, what to deliver:
//   OPM_REG  the register file value of every lane,
//   OPM_IMM  the immediate,
//   OPM_MEM  a word of global, shared or constant memory at a calculated
//            address (so an operand can come straight from memory),
//   OPM_ADDR the calculated address itself (loads/stores, address moves).
// The "calculate address" part adds the signed immediate to a base, which is
// the lane's selected address register (base_areg=1) or its register value.
// For shared memory the block's shared-memory base is added as well.
//
// Combinational, one warp row (NUM_SP lanes) at a time. The memories are
// outside: mem_addr goes to all three, and the unit picks the data of the
// requested space. The split into operand controller, address calculation
// and output mux follows the paper's read-stage figure; the modes are this
// design's own.
module read_operand_unit
  import flexgrip_pkg::*;
#(
  parameter int NUM_SP = 8
) (
  input  opmode_e     mode,
  input  mem_space_e  space,
  input  logic        base_areg,
  input  logic [31:0] imm,
  input  logic [31:0] smem_base,
  input  logic [31:0] reg_data  [NUM_SP],
  input  logic [31:0] areg_data [NUM_SP],
  output logic [31:0] mem_addr  [NUM_SP],
  input  logic [31:0] g_rdata   [NUM_SP],
  input  logic [31:0] s_rdata   [NUM_SP],
  input  logic [31:0] c_rdata   [NUM_SP],
  output logic [31:0] opnd      [NUM_SP]
);
  // calculate address
  always_comb
    for (int l = 0; l < NUM_SP; l++)
      mem_addr[l] = (base_areg ? areg_data[l] : reg_data[l]) + imm +
                    ((space == SP_SHARED) ? smem_base : 32'd0);

  // output mux
  always_comb
    for (int l = 0; l < NUM_SP; l++)
      unique case (mode)
        OPM_REG:  opnd[l] = reg_data[l];
        OPM_IMM:  opnd[l] = imm;
        OPM_ADDR: opnd[l] = mem_addr[l];
        OPM_MEM:
          unique case (space)
            SP_GLOBAL: opnd[l] = g_rdata[l];
            SP_SHARED: opnd[l] = s_rdata[l];
            SP_CONST:  opnd[l] = c_rdata[l];
            default:   opnd[l] = 32'd0;
          endcase
        default: opnd[l] = 32'd0;
      endcase
endmodule
