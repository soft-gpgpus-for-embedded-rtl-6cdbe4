// scalar_processor: the integer datapath of one SP lane.
//
// Each thread of a warp row runs on one SP. The SP takes up to three
// operands and returns a 32-bit result plus the flags {S,Z,C,O} that a
// predicate register stores. As in the execute part of the read/execute
// figure, operands 1 and 2 can pass through a multiplier whose product is
// added to operand 3 (MAD) by the same adder that serves ADD/SUB/CMP.
// HAS_MUL=0 removes the multiplier (the reduced configuration that needs no
// third operand); MUL and MAD then return 0.
//
// Combinational; the execute stage registers the outputs. Operations other
// than those listed pass operand 1 through (MOV, S2R, LD and R2A already
// carry their value in operand 1). The opcode set and the flag definitions
// are this design's own.
module scalar_processor
  import flexgrip_pkg::*;
#(
  parameter bit HAS_MUL = 1'b1
) (
  input  opcode_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [31:0] c,
  output logic [31:0] result,
  output flags_t      flags
);
  logic [31:0] prod, add_a, add_b;
  logic        add_cin;
  logic [32:0] sum;

  always_comb begin
    prod = HAS_MUL ? a * b : 32'd0;
    // adder operand selection: a+b, a-b (a + ~b + 1) or prod + c
    add_a   = a;
    add_b   = b;
    add_cin = 1'b0;
    unique case (op)
      OP_SUB, OP_CMP: begin add_b = ~b; add_cin = 1'b1; end
      OP_MAD:         begin add_a = prod; add_b = HAS_MUL ? c : 32'd0; end
      default: ;
    endcase
    sum = {1'b0, add_a} + {1'b0, add_b} + 33'(add_cin);

    flags.c = 1'b0;
    flags.o = 1'b0;
    unique case (op)
      OP_ADD, OP_SUB, OP_CMP, OP_MAD: begin
        result  = sum[31:0];
        flags.c = sum[32];
        flags.o = (add_a[31] == add_b[31]) && (sum[31] != add_a[31]);
      end
      OP_MUL: result = prod;
      OP_AND: result = a & b;
      OP_OR:  result = a | b;
      OP_XOR: result = a ^ b;
      OP_SHL: result = a << b[4:0];
      OP_SHR: result = a >> b[4:0];
      OP_SAR: result = $signed(a) >>> b[4:0];
      OP_MIN: result = ($signed(a) < $signed(b)) ? a : b;
      OP_MAX: result = ($signed(a) > $signed(b)) ? a : b;
      default: result = a;
    endcase
    flags.s = result[31];
    flags.z = (result == 32'd0);
  end
endmodule
