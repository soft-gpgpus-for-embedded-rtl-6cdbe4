// tb_execute_stage: random rows of ADD, SUB, MAD, XOR and a uniform branch
// through a 4-lane execute stage; one cycle later the registered results,
// flags, lane mask, store address/data and, on the last row, the warp
// update must match values computed here. A copy built with two operands
// (no multiplier) must give 0 for MAD.
// No ports; 10-unit clock with a watchdog. The result is registered
// once (one cycle latency, this design's timing).
module tb_execute_stage;
  import flexgrip_pkg::*;
  localparam int NSP = 4, RPW = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic re_valid, re_last, ew_valid, ew_last, ovf, div, ew_valid2, ew_last2, ovf2, div2;
  wctx_t re_ctx, ew_ctx, ew_ctx2;
  dec_t re_dec, ew_dec, ew_dec2;
  logic [2:0] re_row;
  logic [NSP-1:0] re_lane_mask, ew_lane_mask, ew_lane_mask2;
  logic [31:0] re_opa [NSP], re_opb [NSP], re_opc [NSP], re_addr [NSP];
  logic [31:0] ew_result [NSP], ew_saddr [NSP], ew_sdata [NSP], ew_result2 [NSP], ew_saddr2 [NSP], ew_sdata2 [NSP];
  flags_t ew_flags [NSP], ew_flags2 [NSP];
  logic [10:0] re_vaddr, ew_vaddr, ew_vaddr2;
  logic [5:0] re_qrow, ew_qrow, ew_qrow2;
  logic [31:0] ew_upd_pc, ew_upd_mask, ew_upd_pc2, ew_upd_mask2;
  upd_state_e ew_upd_state, ew_upd_state2;

  execute_stage #(.NUM_SP(NSP), .NUM_OPERANDS(3), .MAX_WARPS(8), .WSTACK_DEPTH(4), .NUM_REGS(8192)) dut (
    .clk, .rst_n, .launch_valid (1'b0), .launch_first (5'd0), .launch_nwarps (4'd0),
    .re_valid, .re_ctx, .re_dec, .re_row, .re_last, .re_lane_mask, .re_opa, .re_opb, .re_opc, .re_addr,
    .re_vaddr, .re_qrow, .ew_valid, .ew_ctx, .ew_dec, .ew_last, .ew_lane_mask, .ew_result, .ew_flags,
    .ew_saddr, .ew_sdata, .ew_vaddr, .ew_qrow, .ew_upd_pc, .ew_upd_mask, .ew_upd_state,
    .overflow (ovf), .diverged (div));
  execute_stage #(.NUM_SP(NSP), .NUM_OPERANDS(2), .MAX_WARPS(8), .WSTACK_DEPTH(4), .NUM_REGS(8192)) dut2 (
    .clk, .rst_n, .launch_valid (1'b0), .launch_first (5'd0), .launch_nwarps (4'd0),
    .re_valid, .re_ctx, .re_dec, .re_row, .re_last, .re_lane_mask, .re_opa, .re_opb, .re_opc, .re_addr,
    .re_vaddr, .re_qrow, .ew_valid (ew_valid2), .ew_ctx (ew_ctx2), .ew_dec (ew_dec2), .ew_last (ew_last2),
    .ew_lane_mask (ew_lane_mask2), .ew_result (ew_result2), .ew_flags (ew_flags2),
    .ew_saddr (ew_saddr2), .ew_sdata (ew_sdata2), .ew_vaddr (ew_vaddr2), .ew_qrow (ew_qrow2),
    .ew_upd_pc (ew_upd_pc2), .ew_upd_mask (ew_upd_mask2), .ew_upd_state (ew_upd_state2),
    .overflow (ovf2), .diverged (div2));

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    opcode_e ops[] = '{OP_ADD, OP_SUB, OP_MAD, OP_XOR, OP_BRA};
    re_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      opcode_e op;
      op = ops[n % 5];
      for (int r = 0; r < RPW; r++) begin
        logic [31:0] e [NSP];
        @(negedge clk);
        re_valid = 1; re_row = 3'(r); re_last = (r == RPW - 1);
        re_dec = '0; re_dec.op = op; re_dec.imm = 32'h400;
        re_ctx = '{wid: 5'(n % 8), slot: 0, wib: 0, pc: 32'h80, next_pc: 32'h88, mask: '1};
        re_lane_mask = (op == OP_BRA) ? '1 : NSP'($urandom);
        re_vaddr = 11'($urandom); re_qrow = 6'($urandom);
        for (int l = 0; l < NSP; l++) begin
          re_opa[l] = $urandom; re_opb[l] = $urandom; re_opc[l] = $urandom; re_addr[l] = $urandom;
          case (op)
            OP_ADD: e[l] = re_opa[l] + re_opb[l];
            OP_SUB: e[l] = re_opa[l] - re_opb[l];
            OP_MAD: e[l] = re_opa[l] * re_opb[l] + re_opc[l];
            OP_XOR: e[l] = re_opa[l] ^ re_opb[l];
            default: e[l] = re_opa[l];
          endcase
        end
        @(posedge clk); #1;
        chk(ew_valid && ew_last == (r == RPW - 1) && ew_lane_mask == re_lane_mask &&
            ew_vaddr == re_vaddr && ew_qrow == re_qrow && ew_dec.op == op, "control fields");
        for (int l = 0; l < NSP; l++) begin
          chk(ew_result[l] == e[l] && ew_flags[l].z == (e[l] == 0) && ew_flags[l].s == e[l][31],
              $sformatf("%s lane %0d", op.name(), l));
          chk(ew_saddr[l] == re_addr[l] && ew_sdata[l] == re_opb[l], "store address/data");
          if (op == OP_MAD) chk(ew_result2[l] == 0, "no multiplier");
        end
        if (r == RPW - 1)
          chk(ew_upd_pc == ((op == OP_BRA) ? 32'h400 : 32'h88) && ew_upd_mask == '1 &&
              ew_upd_state == UPD_READY, "warp update");
      end
    end
    @(negedge clk); re_valid = 0;
    @(posedge clk); #1;
    chk(!ew_valid, "valid drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
