// tb_read_stage: drives decoded instructions into an 8-lane read stage whose
// register file, predicate file and memories are models in this testbench
// (data = function of address). Checks, per emitted row: one row per cycle
// and four rows per warp (dr_ready only on the last), the register-file row
// address (warp*rows + row)*regs-per-thread + index, register, immediate,
// constant and global-load operands, the guard predicate with the thread
// mask, and the thread id given to S2R.
module tb_read_stage;
  import flexgrip_pkg::*;
  localparam int NSP = 8, RPW = 4, QW = 7, VAW = 10;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic dr_valid, dr_ready, re_valid, re_last;
  wctx_t dr_ctx, re_ctx;
  dec_t dr_dec, re_dec;
  kcfg_t cfg;
  logic [15:0] slot_ctaid [8];
  logic [VAW-1:0] vrf_raddr [3], re_vaddr;
  logic [31:0] vrf_rdata [3][NSP];
  logic [QW-1:0] prf_raddr, arf_raddr, re_qrow;
  flags_t prf_rdata [NSP][NUM_PRED];
  logic [31:0] arf_rdata [NSP][NUM_AREG];
  logic [31:0] mem_addr [3][NSP], g_rdata [3][NSP], s_rdata [3][NSP], c_rdata [3][NSP];
  logic [1:0] re_row;
  logic [NSP-1:0] re_lane_mask;
  logic [31:0] re_opa [NSP], re_opb [NSP], re_opc [NSP], re_addr [NSP];

  read_stage #(.NUM_SP(NSP), .NUM_OPERANDS(3), .MAX_WARPS(24), .MAX_BLOCKS(8), .NUM_REGS(8192)) dut (.*);

  // memory models
  always_comb
    for (int k = 0; k < 3; k++)
      for (int l = 0; l < NSP; l++) begin
        vrf_rdata[k][l] = {12'h0, 2'(k), 4'(l), 4'h0, vrf_raddr[k]};
        g_rdata[k][l] = mem_addr[k][l] ^ 32'hA5A5_0000;
        s_rdata[k][l] = mem_addr[k][l] ^ 32'h5A5A_0000;
        c_rdata[k][l] = mem_addr[k][l] ^ 32'hC3C3_0000;
      end
  always_comb
    for (int l = 0; l < NSP; l++)
      for (int p = 0; p < NUM_PRED; p++) begin
        prf_rdata[l][p] = flags_t'(4'((l + prf_raddr) % 3 == 0 ? 4'b0100 : 4'b0000));  // z
        arf_rdata[l][p] = 32'(p * 256 + l * 4);
      end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  int rows_seen = 0, ready_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if (re_valid) rows_seen++;
    if (dr_valid && dr_ready) ready_seen++;
  end

  initial begin
    cfg = '{nctaid: 16'd5, ntid: 9'd64, rpt: 7'd16, spb: 15'd1024};
    for (int s = 0; s < 8; s++) slot_ctaid[s] = 16'(100 + s);
    dr_valid = 0; dr_ctx = '0; dr_dec = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      int kind = n % 4;
      logic [31:0] m;
      m = $urandom;
      @(negedge clk);
      dr_valid = 1;
      dr_ctx = '{wid: 5'($urandom_range(0, 23)), slot: 3'($urandom), wib: 3'($urandom_range(0, 1)),
                 pc: 0, next_pc: 8, mask: m};
      dr_dec = '0;
      dr_dec.dst = 6'($urandom_range(0, 15)); dr_dec.src1 = 6'($urandom_range(0, 15));
      dr_dec.src2 = 6'($urandom_range(0, 15)); dr_dec.src3 = 6'($urandom_range(0, 15));
      dr_dec.imm = 32'h0000_0040; dr_dec.areg = 2'($urandom);
      dr_dec.gcond = (n % 3 == 0) ? CC_EQ : CC_TR;
      dr_dec.gpred = 2'($urandom);
      unique case (kind)
        0: begin dr_dec.op = OP_ADD; dr_dec.src1_t = SRC_REG; dr_dec.src2_t = SRC_IMM; end
        1: begin dr_dec.op = OP_MAD; dr_dec.src1_t = SRC_CONST; dr_dec.src2_t = SRC_REG; end
        2: begin dr_dec.op = OP_LD; dr_dec.space = SP_GLOBAL; end
        default: begin dr_dec.op = OP_S2R; dr_dec.imm = 32'(SR_TID); end
      endcase
      for (int r = 0; r < RPW; r++) begin
        int q;
        q = dr_ctx.wid * RPW + r;
        chk(dr_ready == (r == RPW - 1), "dr_ready only on last row");
        @(posedge clk); #1;
        chk(re_valid && re_row == 2'(r) && re_last == (r == RPW - 1) && re_qrow == 7'(q) &&
            re_vaddr == 10'(q * 16 + dr_dec.dst), $sformatf("row %0d fields", r));
        for (int l = 0; l < NSP; l++) begin
          logic [31:0] ea, eb, ec;
          bit pm;
          pm = m[r * NSP + l] && (dr_dec.gcond == CC_TR || (l + q) % 3 == 0);
          chk(re_lane_mask[l] == pm, $sformatf("lane mask row %0d lane %0d", r, l));
          unique case (kind)
            0: begin ea = {12'h0, 2'd0, 4'(l), 4'h0, 10'(q * 16 + dr_dec.src1)}; eb = 32'h40; end
            1: begin ea = (32'(dr_dec.areg) * 256 + 32'(l) * 4 + 32'h40) ^ 32'hC3C3_0000;
                     eb = {12'h0, 2'd1, 4'(l), 4'h0, 10'(q * 16 + dr_dec.src2)}; end
            2: begin ea = (32'(dr_dec.areg) * 256 + 32'(l) * 4 + 32'h40) ^ 32'hA5A5_0000; eb = re_opb[l]; end
            default: begin ea = 32'(dr_ctx.wib) * 32 + 32'(r * NSP + l); eb = re_opb[l]; end
          endcase
          chk(re_opa[l] == ea && re_opb[l] == eb, $sformatf("kind %0d row %0d lane %0d opa %h exp %h", kind, r, l, re_opa[l], ea));
          if (kind == 1) chk(re_opc[l] == {12'h0, 2'd2, 4'(l), 4'h0, 10'(q * 16 + dr_dec.src3)}, "opc");
        end
        if (r < RPW - 1) @(negedge clk);
      end
    end
    @(negedge clk); dr_valid = 0;
    @(posedge clk); #1;
    chk(!re_valid, "valid drops");
    // rate: 60 instructions x 4 rows in 240 cycles, one accept per instruction
    chk(rows_seen == 240 && ready_seen == 60, $sformatf("rate rows=%0d accepts=%0d", rows_seen, ready_seen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
