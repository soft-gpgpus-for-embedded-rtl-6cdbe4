// fetch_stage: first pipeline stage of the SM.
//
// Accepts the warp chosen by the warp scheduler (its number, PC and thread
// mask), reads the instruction at that PC from system memory and adds the
// instruction length to the PC: 8 bytes when bit 0 of the first word is set,
// otherwise 4 bytes, in which case the upper word of the instruction is
// forced to zero. PC, next PC, mask and instruction are registered into the
// fetch/decode pipeline register.
//
// Timing: system memory is read combinationally in the issue cycle, so an
// issued warp appears at the output one cycle later. Handshake: a transfer
// happens when valid and ready are both high; issue_ready is high when the
// output register is empty or being emptied.
module fetch_stage
  import flexgrip_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // from the warp unit
  input  logic        issue_valid,
  output logic        issue_ready,
  input  wctx_t       issue_ctx,     // next_pc field ignored
  // system memory
  output logic [31:0] imem_addr,
  input  logic [63:0] imem_rdata,
  // to decode
  output logic        fd_valid,
  input  logic        fd_ready,
  output wctx_t       fd_ctx,
  output logic [63:0] fd_instr
);
  logic        is_long;
  logic [63:0] instr;

  assign imem_addr   = issue_ctx.pc;
  assign is_long     = imem_rdata[0];
  assign instr       = is_long ? imem_rdata : {32'd0, imem_rdata[31:0]};
  assign issue_ready = !fd_valid || fd_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fd_valid <= 1'b0;
      fd_ctx   <= '0;
      fd_instr <= '0;
    end else if (issue_ready) begin
      fd_valid <= issue_valid;
      if (issue_valid) begin
        fd_ctx         <= issue_ctx;
        fd_ctx.next_pc <= issue_ctx.pc + (is_long ? 32'd8 : 32'd4);
        fd_instr       <= instr;
      end
    end
  end
endmodule
