// tb_decode_stage: random 8-byte and 4-byte instructions through the decode
// stage; every field and derived control bit of the output is compared
// with values extracted here from the bit layout, under random stalls.
// Expected fields come from the testbench's own instruction builder
// (mk_instr). No ports; 10-unit clock with a watchdog. The encoding is this
// design's own; the paper names only the fields.
module tb_decode_stage;
  import flexgrip_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic fd_valid, fd_ready, dr_valid, dr_ready;
  wctx_t fd_ctx, dr_ctx;
  logic [63:0] fd_instr;
  dec_t dr_dec;

  decode_stage dut (.clk, .rst_n, .fd_valid, .fd_ready, .fd_ctx, .fd_instr,
                    .dr_valid, .dr_ready, .dr_ctx, .dr_dec);

  typedef struct { wctx_t c; logic [63:0] i; } item_t;
  item_t q[$];

  always @(posedge clk) if (rst_n) begin
    if (fd_valid && fd_ready) q.push_back('{fd_ctx, fd_instr});
    if (dr_valid && dr_ready) begin
      item_t it;
      logic [63:0] x;
      logic [5:0] op;
      logic wr, wa, ct, stv;
      it = q.pop_front();
      x = it.i;
      op = x[6:1];
      wr = op inside {1,2,3,4,5,6,7,8,9,10,11,12,13,15,17};
      wa = op == 16; stv = op == 18; ct = op inside {[19:23]};
      checks++;
      if (dr_ctx !== it.c || dr_dec.op !== op || dr_dec.dst !== x[12:7] || dr_dec.src1 !== x[18:13] ||
          dr_dec.src2 !== x[24:19] || dr_dec.gcond !== x[28:25] || dr_dec.gpred !== x[30:29] ||
          dr_dec.setp !== x[31] || dr_dec.imm !== {{16{x[47]}}, x[47:32]} || dr_dec.src3 !== x[53:48] ||
          dr_dec.src1_t !== x[55:54] || dr_dec.src2_t !== x[57:56] || dr_dec.pdst !== x[59:58] ||
          dr_dec.areg !== x[61:60] || dr_dec.space !== x[63:62] || dr_dec.wr_reg !== wr ||
          dr_dec.wr_areg !== wa || dr_dec.is_store !== stv || dr_dec.is_ctrl !== ct) begin
        failures++;
        if (failures < 10) $display("FAIL instr %h dec %p", x, dr_dec);
      end
    end
  end

  initial begin
    fd_valid = 0; dr_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      if (!(fd_valid && !fd_ready)) begin
        logic [63:0] x;
        x = {$urandom, $urandom};
        x[6:1] = 6'($urandom_range(0, 23));
        if (!x[0]) x[63:32] = 0;    // 4-byte form
        fd_valid = $urandom_range(0, 3) != 0;
        fd_instr = x;
        fd_ctx = wctx_t'({$urandom, $urandom, $urandom, $urandom});
      end
      dr_ready = $urandom_range(0, 2) != 0;
    end
    @(negedge clk); fd_valid = 0; dr_ready = 1;
    repeat (3) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: %0d lost", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
