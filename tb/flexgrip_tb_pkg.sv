// flexgrip_tb_pkg: helpers shared by the FlexGrip testbenches.
//
// mk_instr builds one 8-byte instruction in the format of flexgrip_pkg::instr_t
// from its fields, so test programs read like assembly listings; Asm collects
// instructions (8-byte or 4-byte) into memory words and resolves labels in two
// passes. reduction_kernel is the parallel-reduction program used by the
// whole-design tests: each block loads ntid inputs x, forms x*k+1 with a
// multiply-add (k from constant memory), sums them in shared memory by a
// tree with barriers and a divergent branch per level, and thread 0 stores
// the block's sum to out[ctaid]. Constant memory: c[0] = input base,
// c[4] = output base, c[8] = k.
package flexgrip_tb_pkg;
  import flexgrip_pkg::*;

  function automatic logic [63:0] mk_instr(opcode_e op, int dst, int s1, int s2,
                                           int imm = 0, src_type_e t1 = SRC_REG,
                                           src_type_e t2 = SRC_REG, int s3 = 0,
                                           bit setp = 0, int pdst = 0,
                                           cond_e gc = CC_TR, int gp = 0,
                                           mem_space_e sp = SP_GLOBAL, int ar = 0);
    instr_t i;
    i = '0;
    i.is_long = 1'b1; i.op = op;
    i.dst = RIDX_W'(dst); i.src1 = RIDX_W'(s1); i.src2 = RIDX_W'(s2); i.src3 = RIDX_W'(s3);
    i.imm = 16'(imm); i.src1_t = t1; i.src2_t = t2; i.setp = setp; i.pdst = 2'(pdst);
    i.gcond = gc; i.gpred = 2'(gp); i.space = sp; i.areg = 2'(ar);
    return i;
  endfunction

  // 4-byte form: register operands only, no immediate, no predicate write
  function automatic logic [31:0] mk_short(opcode_e op, int dst, int s1, int s2);
    logic [63:0] w;
    w = mk_instr(op, dst, s1, s2);
    w[0] = 1'b0;
    return w[31:0];
  endfunction

  class Asm;
    logic [31:0] words[$];
    int pc;
    function void put(logic [63:0] i);
      words.push_back(i[31:0]); words.push_back(i[63:32]); pc += 8;
    endfunction
    function void put_short(logic [31:0] i);
      words.push_back(i); pc += 4;
    endfunction
  endclass

  function automatic void reduction_kernel(ref logic [31:0] prog[$]);
    int l_loop = 0, l_taken = 0, l_join = 0;
    for (int pass = 0; pass < 2; pass++) begin
      Asm a = new();
      a.put(mk_instr(OP_S2R, 1, 0, 0, SR_CTAID));                    // R1 = ctaid
      a.put(mk_instr(OP_S2R, 2, 0, 0, SR_NTID));                     // R2 = ntid
      a.put(mk_instr(OP_MUL, 3, 1, 2));                              // R3 = ctaid*ntid
      a.put_short(mk_short(OP_ADD, 3, 3, 0));                        // R3 += tid (4-byte)
      a.put_short(mk_short(OP_XOR, 15, 15, 15));                     // R15 = 0   (4-byte)
      a.put(mk_instr(OP_R2A, 0, 15, 0, 4, .ar(1)));                  // A1 = R15 + 4
      a.put(mk_instr(OP_SHL, 4, 3, 0, 2, .t2(SRC_IMM)));             // R4 = gid*4
      a.put(mk_instr(OP_ADD, 4, 4, 0, 0, .t2(SRC_CONST)));           // R4 += c[A0+0]
      a.put(mk_instr(OP_LD, 5, 4, 0, 0, .sp(SP_GLOBAL)));            // R5 = g[R4]
      a.put(mk_instr(OP_MOV, 6, 0, 0, 8, .t1(SRC_CONST)));           // R6 = c[8] = k
      a.put(mk_instr(OP_MOV, 7, 0, 0, 1, .t1(SRC_IMM)));             // R7 = 1
      a.put(mk_instr(OP_MAD, 5, 5, 6, 0, .s3(7)));                   // R5 = R5*k + 1
      a.put(mk_instr(OP_SHL, 8, 0, 0, 2, .t2(SRC_IMM)));             // R8 = tid*4
      a.put(mk_instr(OP_ST, 0, 8, 5, 0, .sp(SP_SHARED)));            // s[R8] = R5
      a.put(mk_instr(OP_BAR, 0, 0, 0));
      a.put(mk_instr(OP_SHR, 9, 2, 0, 1, .t2(SRC_IMM)));             // R9 = ntid/2
      l_loop = a.pc;
      a.put(mk_instr(OP_CMP, 0, 0, 9, 0, .setp(1), .pdst(0)));       // P0 = tid - s
      a.put(mk_instr(OP_SSY, 0, 0, 0, l_join));
      a.put(mk_instr(OP_BRA, 0, 0, 0, l_taken, .gc(CC_GE), .gp(0))); // tid >= s: skip
      a.put(mk_instr(OP_SHL, 10, 9, 0, 2, .t2(SRC_IMM)));            // R10 = s*4
      a.put(mk_instr(OP_ADD, 10, 10, 8));                            // R10 = (tid+s)*4
      a.put(mk_instr(OP_LD, 11, 10, 0, 0, .sp(SP_SHARED)));
      a.put(mk_instr(OP_LD, 12, 8, 0, 0, .sp(SP_SHARED)));
      a.put(mk_instr(OP_ADD, 11, 11, 12));
      a.put(mk_instr(OP_ST, 0, 8, 11, 0, .sp(SP_SHARED)));
      a.put(mk_instr(OP_SYNC, 0, 0, 0));
      l_taken = a.pc;
      a.put(mk_instr(OP_SYNC, 0, 0, 0));
      l_join = a.pc;
      a.put(mk_instr(OP_BAR, 0, 0, 0));
      a.put(mk_instr(OP_SHR, 9, 9, 0, 1, .t2(SRC_IMM)));             // s >>= 1
      a.put(mk_instr(OP_CMP, 0, 9, 0, 0, .t2(SRC_IMM), .setp(1), .pdst(1)));
      a.put(mk_instr(OP_BRA, 0, 0, 0, l_loop, .gc(CC_NE), .gp(1)));  // loop while s != 0
      a.put(mk_instr(OP_CMP, 0, 0, 0, 0, .t2(SRC_IMM), .setp(1), .pdst(2)));
      a.put(mk_instr(OP_EXIT, 0, 0, 0, 0, .gc(CC_NE), .gp(2)));      // all but thread 0 exit
      a.put(mk_instr(OP_LD, 13, 0, 0, 0, .sp(SP_SHARED)));           // R13 = s[0]
      a.put(mk_instr(OP_SHL, 14, 1, 0, 2, .t2(SRC_IMM)));            // R14 = ctaid*4
      a.put(mk_instr(OP_ADD, 14, 14, 0, 0, .t2(SRC_CONST), .ar(1))); // R14 += c[A1+0]
      a.put(mk_instr(OP_ST, 0, 14, 13, 0, .sp(SP_GLOBAL)));          // out[ctaid] = R13
      a.put(mk_instr(OP_EXIT, 0, 0, 0));
      if (pass == 1) prog = a.words;
    end
  endfunction
endpackage
