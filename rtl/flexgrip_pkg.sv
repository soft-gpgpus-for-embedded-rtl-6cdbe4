// flexgrip_pkg: types and constants shared by the FlexGrip soft GPGPU.
//
// The SM executes one instruction for a warp of 32 threads. The instruction
// format below is this design's own: the fields follow the tokens that the
// decode stage produces (opcode, predicate, three sources, destination), but
// the bit positions are not the G80 binary encoding. An instruction is 4 or
// 8 bytes long; bit 0 of the first word marks the 8-byte form, and a 4-byte
// instruction reads as an 8-byte one whose upper word is zero (so it has no
// immediate, only register sources, and writes no predicate).
//
// Predicates are 4-bit flag sets {sign, zero, carry, overflow}; each thread
// owns four of them (P0..P3). A guard condition plus one predicate register
// decide whether a thread executes an instruction.
//
// Lint note: WARP_SIZE, NUM_PRED and NUM_AREG are used by the modules that
// import the package, not inside it.
package flexgrip_pkg;

  localparam int WARP_SIZE = 32;   // threads per warp
  localparam int NUM_PRED  = 4;    // predicate registers per thread
  localparam int NUM_AREG  = 4;    // address registers per thread
  localparam int RIDX_W    = 6;    // register index width (64 registers)

  typedef enum logic [5:0] {
    OP_NOP  = 6'd0,  OP_MOV  = 6'd1,  OP_ADD  = 6'd2,  OP_SUB  = 6'd3,
    OP_MUL  = 6'd4,  OP_MAD  = 6'd5,  OP_AND  = 6'd6,  OP_OR   = 6'd7,
    OP_XOR  = 6'd8,  OP_SHL  = 6'd9,  OP_SHR  = 6'd10, OP_SAR  = 6'd11,
    OP_MIN  = 6'd12, OP_MAX  = 6'd13, OP_CMP  = 6'd14, OP_S2R  = 6'd15,
    OP_R2A  = 6'd16, OP_LD   = 6'd17, OP_ST   = 6'd18, OP_BRA  = 6'd19,
    OP_SSY  = 6'd20, OP_SYNC = 6'd21, OP_BAR  = 6'd22, OP_EXIT = 6'd23
  } opcode_e;

  // Where a source operand comes from.
  typedef enum logic [1:0] {
    SRC_REG = 2'd0, SRC_IMM = 2'd1, SRC_CONST = 2'd2, SRC_SHARED = 2'd3
  } src_type_e;

  // Memory space of a load/store or memory operand.
  typedef enum logic [1:0] {
    SP_GLOBAL = 2'd0, SP_SHARED = 2'd1, SP_CONST = 2'd2, SP_NONE = 2'd3
  } mem_space_e;

  // Guard conditions evaluated on a predicate register {S,Z,C,O}.
  // Signed comparisons follow a subtraction a-b; C is the carry out of
  // a + ~b + 1, so C=1 means a >= b unsigned.
  typedef enum logic [3:0] {
    CC_TR  = 4'd0,  CC_LT  = 4'd1,  CC_EQ  = 4'd2,  CC_LE  = 4'd3,
    CC_GT  = 4'd4,  CC_NE  = 4'd5,  CC_GE  = 4'd6,  CC_FL  = 4'd7,
    CC_LTU = 4'd8,  CC_GEU = 4'd9,  CC_OF  = 4'd10, CC_NOF = 4'd11,
    CC_SF  = 4'd12, CC_NSF = 4'd13, CC_GTU = 4'd14, CC_LEU = 4'd15
  } cond_e;

  // Special registers read by S2R (selected by the immediate).
  typedef enum logic [1:0] {
    SR_TID = 2'd0, SR_CTAID = 2'd1, SR_NTID = 2'd2, SR_NCTAID = 2'd3
  } sreg_e;

  typedef struct packed {
    logic s;   // sign
    logic z;   // zero
    logic c;   // carry
    logic o;   // overflow
  } flags_t;

  // 64-bit instruction. Bits 31:0 are the first word in memory.
  typedef struct packed {
    mem_space_e space;    // 63:62 memory space of LD/ST
    logic [1:0] areg;     // 61:60 address register for memory operands / R2A
    logic [1:0] pdst;     // 59:58 predicate register written when setp
    src_type_e  src2_t;   // 57:56
    src_type_e  src1_t;   // 55:54
    logic [RIDX_W-1:0] src3; // 53:48
    logic [15:0] imm;     // 47:32 immediate / offset / branch target
    logic       setp;     // 31    write flags to predicate register pdst
    logic [1:0] gpred;    // 30:29 guard predicate register
    cond_e      gcond;    // 28:25 guard condition (CC_TR = always)
    logic [RIDX_W-1:0] src2; // 24:19
    logic [RIDX_W-1:0] src1; // 18:13
    logic [RIDX_W-1:0] dst;  // 12:7
    opcode_e    op;       // 6:1
    logic       is_long;  // 0
  } instr_t;

  // Decoded instruction as it travels down the pipeline.
  typedef struct packed {
    opcode_e    op;
    logic [RIDX_W-1:0] dst;
    logic [RIDX_W-1:0] src1;
    logic [RIDX_W-1:0] src2;
    logic [RIDX_W-1:0] src3;
    src_type_e  src1_t;
    src_type_e  src2_t;
    logic [31:0] imm;     // sign-extended immediate
    logic       setp;
    logic [1:0] pdst;
    logic [1:0] gpred;
    cond_e      gcond;
    logic [1:0] areg;
    mem_space_e space;
    logic       wr_reg;   // writes a general register
    logic       wr_areg;  // writes an address register
    logic       is_ctrl;  // handled by the control flow unit
    logic       is_store;
  } dec_t;

  // Warp state update returned by the write stage to the warp unit.
  typedef enum logic [1:0] {
    UPD_READY = 2'd0, UPD_WAIT = 2'd1, UPD_DONE = 2'd2
  } upd_state_e;

  // Warp stack entry types (Fig. 2 "Type").
  typedef enum logic [1:0] {
    ST_RECONV = 2'd0,   // reconvergence point pushed by SSY
    ST_TAKEN  = 2'd1    // start address of the taken path of a divergent branch
  } stack_type_e;

  typedef struct packed {
    logic [31:0] mask;
    stack_type_e typ;
    logic [31:0] addr;
  } stack_entry_t;        // 66 bits


  // Warp context carried with every instruction through the pipeline.
  // Widths allow up to 32 warps and 8 thread blocks per SM.
  typedef struct packed {
    logic [4:0]  wid;      // warp number in the SM
    logic [2:0]  slot;     // thread-block slot of the SM
    logic [2:0]  wib;      // warp number inside its thread block
    logic [31:0] pc;
    logic [31:0] next_pc;  // pc + instruction length
    logic [31:0] mask;     // thread mask (threads on the current path)
  } wctx_t;

  // Kernel configuration written by the host before a launch.
  typedef struct packed {
    logic [15:0] nctaid;   // number of thread blocks in the grid
    logic [8:0]  ntid;     // threads per block (1..256)
    logic [6:0]  rpt;      // registers per thread
    logic [14:0] spb;      // shared memory bytes per block
  } kcfg_t;


  // What a read operand unit delivers (set by the read controller).
  typedef enum logic [1:0] {
    OPM_REG  = 2'd0,   // register file value
    OPM_IMM  = 2'd1,   // immediate
    OPM_MEM  = 2'd2,   // memory word at base + immediate
    OPM_ADDR = 2'd3    // the calculated address itself
  } opmode_e;


endpackage
