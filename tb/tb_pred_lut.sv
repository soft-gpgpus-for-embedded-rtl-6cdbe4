// tb_pred_lut: checks the predicate lookup table against comparisons made
// directly on random operand pairs. For each pair the flags of a - b are
// formed here (sign, zero, carry out of a + ~b + 1, signed overflow) and
// every condition is compared with the signed/unsigned relation it names.
// No ports and no clock (purely combinational block), with a time-out
// watchdog. The four flags follow the paper; the condition codes are this
// design's own.
module tb_pred_lut;
  import flexgrip_pkg::*;
  int checks = 0, failures = 0;
  cond_e  cond;
  flags_t flags;
  logic   pass;

  pred_lut dut (.cond, .flags, .pass);

  initial begin
    for (int n = 0; n < 400; n++) begin
      logic [31:0] a, b, d;
      logic [32:0] s;
      a = (n % 4 == 0) ? $urandom_range(0, 3) : $urandom;
      b = (n % 4 == 0) ? $urandom_range(0, 3) : $urandom;
      if (n % 7 == 0) b = a;
      s = {1'b0, a} + {1'b0, ~b} + 33'd1;
      d = s[31:0];
      flags.s = d[31]; flags.z = (d == 0); flags.c = s[32];
      flags.o = (a[31] != b[31]) && (d[31] != a[31]);
      for (int c = 0; c < 16; c++) begin
        logic exp;
        cond = cond_e'(c);
        case (cond_e'(c))
          CC_TR:  exp = 1;
          CC_LT:  exp = $signed(a) <  $signed(b);
          CC_EQ:  exp = a == b;
          CC_LE:  exp = $signed(a) <= $signed(b);
          CC_GT:  exp = $signed(a) >  $signed(b);
          CC_NE:  exp = a != b;
          CC_GE:  exp = $signed(a) >= $signed(b);
          CC_FL:  exp = 0;
          CC_LTU: exp = a <  b;
          CC_GEU: exp = a >= b;
          CC_OF:  exp = flags.o;
          CC_NOF: exp = !flags.o;
          CC_SF:  exp = d[31];
          CC_NSF: exp = !d[31];
          CC_GTU: exp = a >  b;
          default: exp = a <= b;   // CC_LEU
        endcase
        #1;
        checks++;
        if (pass !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL cond %0d a=%h b=%h got %b", c, a, b, pass);
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
