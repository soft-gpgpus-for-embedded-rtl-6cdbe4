// tb_write_stage: random result rows of register-writing, predicate-setting,
// address-register, global and shared store, and control instructions; the
// register, predicate, address-register and memory write enables, addresses
// and data, and the warp update, are compared with the expected routing.
// No ports; purely combinational block, with a time-out watchdog. The
// destinations (registers, predicates, address registers, memory) follow the
// paper; the enable rules are this design's own.
module tb_write_stage;
  import flexgrip_pkg::*;
  localparam int NSP = 4;
  int checks = 0, failures = 0;
  logic ew_valid, ew_last;
  wctx_t ew_ctx;
  dec_t ew_dec;
  logic [NSP-1:0] ew_lane_mask, vrf_we, prf_we, arf_we;
  logic [31:0] ew_result [NSP], ew_saddr [NSP], ew_sdata [NSP], vrf_wdata [NSP], arf_wdata [NSP];
  logic [31:0] m_waddr [NSP], m_wdata [NSP];
  flags_t ew_flags [NSP], prf_wdata [NSP];
  logic [10:0] ew_vaddr, vrf_waddr;
  logic [5:0] ew_qrow, prf_waddr, arf_waddr;
  logic [31:0] ew_upd_pc, ew_upd_mask, upd_pc, upd_mask;
  upd_state_e ew_upd_state, upd_state;
  logic vrf_busy, upd_valid;
  logic [1:0] prf_wsel, arf_wsel;
  logic g_we [NSP], s_we [NSP];
  logic [4:0] upd_wid;

  write_stage #(.NUM_SP(NSP), .MAX_WARPS(8), .NUM_REGS(8192)) dut (.*);

  initial begin
    opcode_e ops[] = '{OP_ADD, OP_CMP, OP_R2A, OP_ST, OP_LD, OP_BRA, OP_NOP};
    for (int n = 0; n < 500; n++) begin
      logic [NSP-1:0] act;
      bit wr, sp, wa, stg, sts;
      ew_valid = $urandom_range(0, 4) != 0;
      ew_last = 1'($urandom);
      ew_ctx = wctx_t'({$urandom, $urandom, $urandom, $urandom});
      ew_dec = '0;
      ew_dec.op = ops[$urandom_range(0, 6)];
      ew_dec.wr_reg = ew_dec.op inside {OP_ADD, OP_LD};
      ew_dec.wr_areg = ew_dec.op == OP_R2A;
      ew_dec.is_store = ew_dec.op == OP_ST;
      ew_dec.setp = 1'($urandom);
      ew_dec.pdst = 2'($urandom); ew_dec.areg = 2'($urandom);
      ew_dec.space = mem_space_e'($urandom_range(0, 2));
      ew_lane_mask = NSP'($urandom);
      ew_vaddr = 11'($urandom); ew_qrow = 6'($urandom);
      ew_upd_pc = $urandom; ew_upd_mask = $urandom; ew_upd_state = upd_state_e'($urandom_range(0, 2));
      for (int l = 0; l < NSP; l++) begin
        ew_result[l] = $urandom; ew_saddr[l] = $urandom; ew_sdata[l] = $urandom;
        ew_flags[l] = flags_t'($urandom_range(0, 15));
      end
      #1;
      act = ew_valid ? ew_lane_mask : '0;
      wr = ew_dec.op inside {OP_ADD, OP_LD};
      checks++;
      if (vrf_we !== (wr ? act : '0) || vrf_waddr !== ew_vaddr || vrf_busy !== (wr && act != 0) ||
          prf_we !== (ew_dec.setp ? act : '0) || prf_waddr !== ew_qrow || prf_wsel !== ew_dec.pdst ||
          arf_we !== ((ew_dec.op == OP_R2A) ? act : '0) || arf_wsel !== ew_dec.areg ||
          upd_valid !== (ew_valid && ew_last) || upd_wid !== ew_ctx.wid || upd_pc !== ew_upd_pc ||
          upd_mask !== ew_upd_mask || upd_state !== ew_upd_state) begin
        failures++;
        if (failures < 10) $display("FAIL routing op %s", ew_dec.op.name());
      end
      for (int l = 0; l < NSP; l++) begin
        checks++;
        if (g_we[l] !== (act[l] && ew_dec.op == OP_ST && ew_dec.space == SP_GLOBAL) ||
            s_we[l] !== (act[l] && ew_dec.op == OP_ST && ew_dec.space == SP_SHARED) ||
            m_waddr[l] !== ew_saddr[l] || m_wdata[l] !== ew_sdata[l] ||
            vrf_wdata[l] !== ew_result[l] || prf_wdata[l] !== ew_flags[l] || arf_wdata[l] !== ew_result[l]) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d op %s", l, ew_dec.op.name());
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
