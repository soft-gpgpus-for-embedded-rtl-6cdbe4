// tb_read_operand_unit: every mode and memory space of one operand unit
// with random register, address-register and memory data: register and
// immediate pass-through, address = base + offset (+ shared base for
// shared memory) with the base taken from the register or the address
// register, and selection of the memory word of the requested space.
// No ports; purely combinational block, with a time-out watchdog. The
// operand kinds follow the paper's figure; the address rule is this design's.
module tb_read_operand_unit;
  import flexgrip_pkg::*;
  localparam int NSP = 4;
  int checks = 0, failures = 0;
  opmode_e mode;
  mem_space_e space;
  logic base_areg;
  logic [31:0] imm, smem_base;
  logic [31:0] reg_data [NSP], areg_data [NSP], mem_addr [NSP];
  logic [31:0] g_rdata [NSP], s_rdata [NSP], c_rdata [NSP], opnd [NSP];

  read_operand_unit #(.NUM_SP(NSP)) dut (.mode, .space, .base_areg, .imm, .smem_base, .reg_data,
    .areg_data, .mem_addr, .g_rdata, .s_rdata, .c_rdata, .opnd);

  // memories are modelled as functions of the address
  always_comb
    for (int l = 0; l < NSP; l++) begin
      g_rdata[l] = mem_addr[l] ^ 32'h1111_0000;
      s_rdata[l] = mem_addr[l] ^ 32'h2222_0000;
      c_rdata[l] = mem_addr[l] ^ 32'h3333_0000;
    end

  initial begin
    for (int n = 0; n < 500; n++) begin
      mode = opmode_e'($urandom_range(0, 3));
      space = mem_space_e'($urandom_range(0, 3));
      base_areg = 1'($urandom);
      imm = {{16{1'b0}}, 16'($urandom)}; if (n % 2) imm = {16'hffff, imm[15:0]};
      smem_base = 32'($urandom_range(0, 7)) * 256;
      for (int l = 0; l < NSP; l++) begin reg_data[l] = $urandom; areg_data[l] = $urandom; end
      #1;
      for (int l = 0; l < NSP; l++) begin
        logic [31:0] a, e;
        a = (base_areg ? areg_data[l] : reg_data[l]) + imm + (space == SP_SHARED ? smem_base : 0);
        case (mode)
          OPM_REG: e = reg_data[l];
          OPM_IMM: e = imm;
          OPM_ADDR: e = a;
          default: e = (space == SP_GLOBAL) ? a ^ 32'h1111_0000 : (space == SP_SHARED) ? a ^ 32'h2222_0000 :
                       (space == SP_CONST) ? a ^ 32'h3333_0000 : 0;
        endcase
        checks++;
        if (opnd[l] !== e || mem_addr[l] !== a) begin
          failures++;
          if (failures < 10) $display("FAIL mode %s space %s lane %0d got %h exp %h", mode.name(), space.name(), l, opnd[l], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
