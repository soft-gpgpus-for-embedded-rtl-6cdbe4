// pred_lut: predicate lookup table of the read stage.
//
// For one thread, the 4-bit predicate register {S,Z,C,O} selected by the
// instruction and the instruction's guard condition index a table whose
// output is that thread's instruction-mask bit. The read stage ANDs the bit
// with the warp's thread mask to form the active-thread mask. Purely
// combinational. The use of a lookup table indexed by condition and flags
// follows the paper; the set of sixteen conditions and their encodings are
// this design's own (see flexgrip_pkg::cond_e).
module pred_lut
  import flexgrip_pkg::*;
(
  input  cond_e  cond,
  input  flags_t flags,
  output logic   pass
);
  // Table: one 16-bit row per condition, indexed by the flag nibble.
  function automatic logic [15:0] row(cond_e c);
    logic [15:0] r;
    for (int f = 0; f < 16; f++) begin
      flags_t x;
      logic   v;
      x = flags_t'(f[3:0]);
      unique case (c)
        CC_TR:  v = 1'b1;
        CC_LT:  v = x.s ^ x.o;
        CC_EQ:  v = x.z;
        CC_LE:  v = x.z | (x.s ^ x.o);
        CC_GT:  v = ~x.z & ~(x.s ^ x.o);
        CC_NE:  v = ~x.z;
        CC_GE:  v = ~(x.s ^ x.o);
        CC_FL:  v = 1'b0;
        CC_LTU: v = ~x.c;
        CC_GEU: v = x.c;
        CC_OF:  v = x.o;
        CC_NOF: v = ~x.o;
        CC_SF:  v = x.s;
        CC_NSF: v = ~x.s;
        CC_GTU: v = x.c & ~x.z;
        CC_LEU: v = ~x.c | x.z;
        default: v = 1'b0;
      endcase
      r[f] = v;
    end
    return r;
  endfunction

  logic [15:0] sel_row;
  always_comb begin
    sel_row = row(cond);
    pass    = sel_row[flags];
  end
endmodule
