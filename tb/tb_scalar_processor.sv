// tb_scalar_processor: random operands through every SP operation, results
// and flags compared with expressions evaluated here; a second instance
// built without multiplier must return 0 for MUL and MAD.
// Expected values are computed in the testbench with SystemVerilog
// operators. No ports; combinational block, with a time-out watchdog. The
// operation set is this design's own subset of the integer instructions.
module tb_scalar_processor;
  import flexgrip_pkg::*;
  int checks = 0, failures = 0;
  opcode_e op;
  logic [31:0] a, b, c, r, r_nm;
  flags_t f, f_nm;

  scalar_processor dut (.op, .a, .b, .c, .result (r), .flags (f));
  scalar_processor #(.HAS_MUL(1'b0)) dut_nomul (.op, .a, .b, .c, .result (r_nm), .flags (f_nm));

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    opcode_e ops[] = '{OP_MOV, OP_ADD, OP_SUB, OP_MUL, OP_MAD, OP_AND, OP_OR, OP_XOR,
                       OP_SHL, OP_SHR, OP_SAR, OP_MIN, OP_MAX, OP_CMP, OP_S2R, OP_LD};
    for (int n = 0; n < 300; n++) begin
      a = $urandom; b = (n % 3 == 0) ? $urandom_range(0, 40) : $urandom; c = $urandom;
      if (n % 10 == 0) b = a;
      foreach (ops[k]) begin
        logic [31:0] e;
        logic [32:0] w;
        op = ops[k];
        case (op)
          OP_ADD:  e = a + b;
          OP_SUB, OP_CMP: e = a - b;
          OP_MUL:  e = a * b;
          OP_MAD:  e = a * b + c;
          OP_AND:  e = a & b;
          OP_OR:   e = a | b;
          OP_XOR:  e = a ^ b;
          OP_SHL:  e = a << (b % 32);
          OP_SHR:  e = a >> (b % 32);
          OP_SAR:  e = 32'($signed(a) >>> (b % 32));
          OP_MIN:  e = ($signed(a) < $signed(b)) ? a : b;
          OP_MAX:  e = ($signed(a) < $signed(b)) ? b : a;
          default: e = a;
        endcase
        #1;
        chk(r == e, $sformatf("op %s a=%h b=%h c=%h r=%h exp %h", op.name(), a, b, c, r, e));
        chk(f.z == (e == 0) && f.s == e[31], $sformatf("S/Z op %s", op.name()));
        if (op == OP_ADD) begin
          w = {1'b0, a} + {1'b0, b};
          chk(f.c == w[32] && f.o == ((a[31] == b[31]) && (e[31] != a[31])), "C/O add");
        end
        if (op == OP_SUB || op == OP_CMP)
          chk(f.c == (a >= b) && f.o == ((a[31] != b[31]) && (e[31] != a[31])), "C/O sub");
        if (op == OP_MUL || op == OP_MAD) chk(r_nm == 0, "no multiplier");
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
