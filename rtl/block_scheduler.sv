// block_scheduler: distributes the thread blocks of a kernel over the SMs.
//
// On start the scheduler first works out how many blocks one SM can hold:
// the largest k <= MAX_BLOCKS such that k blocks fit the SM's warps
// (MAX_WARPS), registers (NUM_REGS, counted per allocated warp:
// 32 * registers-per-thread) and shared memory (SMEM_BYTES). It counts k up
// by repeated addition, one candidate per cycle, so no divider is needed.
// Then it hands out blocks 0..nctaid-1 round-robin: a pointer walks over the
// SMs, and the SM it points to receives the next block if it has a free slot
// below k and its controller is ready; the pointer moves on every cycle.
// Completed blocks free their slot. When all blocks have completed, done
// pulses for one cycle and busy falls. A block that cannot fit an SM at all
// (or more than 256 threads) ends the kernel at once with error set.
// asg_valid[s] is a one-cycle command raised only while asg_ready[s] is high.
module block_scheduler
  import flexgrip_pkg::*;
#(
  parameter int NUM_SM     = 1,
  parameter int MAX_BLOCKS = 8,
  parameter int MAX_WARPS  = 24,
  parameter int NUM_REGS   = 8192,
  parameter int SMEM_BYTES = 16384,
  parameter int MAX_BLOCK_THREADS = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  kcfg_t       cfg,
  output logic        busy,
  output logic        done,
  output logic        error,
  output logic [3:0]  max_blocks,
  // per SM
  output logic        asg_valid [NUM_SM],
  input  logic        asg_ready [NUM_SM],
  output logic [2:0]  asg_slot  [NUM_SM],
  output logic [15:0] asg_block [NUM_SM],
  input  logic        sm_done_valid [NUM_SM],
  input  logic [2:0]  sm_done_slot  [NUM_SM]
);
  typedef enum logic [1:0] {B_IDLE, B_CALC, B_RUN} bstate_e;
  localparam int SMW = (NUM_SM > 1) ? $clog2(NUM_SM) : 1;

  bstate_e     state;
  logic [31:0] wacc, racc, sacc;
  logic [31:0] wpb, rpb, spb;
  logic [3:0]  k;
  logic [15:0] next_blk, completed;
  logic [SMW-1:0] ptr;
  logic [MAX_BLOCKS-1:0] used [NUM_SM];

  assign wpb = (32'(cfg.ntid) + 31) / 32;
  assign rpb = wpb * WARP_SIZE * 32'(cfg.rpt);
  assign spb = 32'(cfg.spb);
  assign busy = (state != B_IDLE);

  // free slot of the SM under the pointer
  logic       have_slot;
  logic [2:0] free_slot;
  always_comb begin
    have_slot = 1'b0;
    free_slot = '0;
    for (int s = 0; s < MAX_BLOCKS; s++)
      if (!have_slot && s < int'(max_blocks) && !used[ptr][s]) begin
        have_slot = 1'b1;
        free_slot = 3'(s);
      end
  end

  logic give;
  assign give = (state == B_RUN) && (next_blk < cfg.nctaid) && have_slot && asg_ready[ptr];

  always_comb
    for (int m = 0; m < NUM_SM; m++) begin
      asg_valid[m] = give && (ptr == SMW'(m));
      asg_slot[m]  = free_slot;
      asg_block[m] = next_blk;
    end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= B_IDLE; done <= 1'b0; error <= 1'b0; max_blocks <= '0;
      wacc <= '0; racc <= '0; sacc <= '0; k <= '0;
      next_blk <= '0; completed <= '0; ptr <= '0;
      for (int m = 0; m < NUM_SM; m++) used[m] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        B_IDLE:
          if (start) begin
            wacc <= '0; racc <= '0; sacc <= '0; k <= '0;
            next_blk <= '0; completed <= '0; ptr <= '0; error <= 1'b0;
            state <= B_CALC;
          end
        B_CALC:
          if (int'(k) < MAX_BLOCKS && cfg.ntid != 0 && int'(cfg.ntid) <= MAX_BLOCK_THREADS &&
              wacc + wpb <= 32'(MAX_WARPS) && racc + rpb <= 32'(NUM_REGS) &&
              sacc + spb <= 32'(SMEM_BYTES)) begin
            k <= k + 1'b1; wacc <= wacc + wpb; racc <= racc + rpb; sacc <= sacc + spb;
          end else begin
            max_blocks <= k;
            if (k == 0 || cfg.nctaid == 0) begin
              error <= (k == 0);
              done  <= 1'b1;
              state <= B_IDLE;
            end else begin
              state <= B_RUN;
            end
          end
        default: begin
          if (give) begin
            used[ptr][free_slot] <= 1'b1;
            next_blk <= next_blk + 1'b1;
          end
          ptr <= (int'(ptr) == NUM_SM - 1) ? '0 : ptr + 1'b1;
          if (completed == cfg.nctaid) begin
            done  <= 1'b1;
            state <= B_IDLE;
          end
        end
      endcase
      // completions (several SMs may finish in one cycle)
      begin
        logic [15:0] c;
        c = 0;
        for (int m = 0; m < NUM_SM; m++)
          if (sm_done_valid[m]) begin
            used[m][sm_done_slot[m]] <= 1'b0;
            c = c + 1'b1;
          end
        if (state == B_RUN) completed <= completed + c;
      end
    end
  end
endmodule
