// gpgpu_controller: interface between the block scheduler and one SM.
//
// When the block scheduler assigns thread block `blk` to slot `slot` of this
// SM, the controller
//   1. records the block id of the slot (read by S2R in the read stage),
//   2. writes every thread's ID (its linear index inside the block) into
//      general register R0 of that thread, one warp row (NUM_SP threads) per
//      cycle, using the register file's write port in cycles when the write
//      stage does not need it (vrf_busy),
//   3. launches the block's warps in the warp unit.
// The block's warps are slot*W .. slot*W+W-1, W = ceil(threads/32). Block
// completions from the warp unit are passed on to the block scheduler.
// asg_ready is high only in the idle state; an assignment is taken when
// asg_valid and asg_ready are both high. Which register receives the ID and
// the slot-to-warp mapping are this design's choices.
//
// Lint note: MAX_WARPS and the block-count and shared-memory fields of cfg
// are not needed here (the block scheduler has already checked that the
// block fits).
module gpgpu_controller
  import flexgrip_pkg::*;
#(
  parameter int NUM_SP     = 8,
  parameter int MAX_WARPS  = 24,
  parameter int MAX_BLOCKS = 8,
  parameter int NUM_REGS   = 8192,
  localparam int RPW       = WARP_SIZE / NUM_SP,
  localparam int VAW       = $clog2(NUM_REGS / NUM_SP)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  kcfg_t       cfg,
  input  logic [31:0] start_pc,
  // from the block scheduler
  input  logic        asg_valid,
  output logic        asg_ready,
  input  logic [2:0]  asg_slot,
  input  logic [15:0] asg_block,
  output logic        done_valid,
  output logic [2:0]  done_slot,
  // block ids by slot
  output logic [15:0] slot_ctaid [MAX_BLOCKS],
  // register-file write port (thread IDs)
  input  logic        vrf_busy,
  output logic [NUM_SP-1:0] vrf_we,
  output logic [VAW-1:0]    vrf_waddr,
  output logic [31:0]       vrf_wdata [NUM_SP],
  // warp unit
  output logic        launch_valid,
  output logic [2:0]  launch_slot,
  output logic [4:0]  launch_first,
  output logic [3:0]  launch_nwarps,
  output logic [8:0]  launch_nthreads,
  output logic [31:0] launch_pc,
  input  logic        blk_done_valid,
  input  logic [2:0]  blk_done_slot
);
  typedef enum logic [1:0] {C_IDLE, C_INIT, C_LAUNCH} cstate_e;
  cstate_e     state;
  logic [2:0]  cur_slot;
  logic [4:0]  w;          // warp being initialised (index inside block)
  logic [4:0]  r;          // row inside the warp
  logic [3:0]  nwarps;
  logic [4:0]  first;

  assign nwarps = 4'((32'(cfg.ntid) + 31) / 32);
  assign first  = 5'(32'(cur_slot) * 32'(nwarps));

  assign asg_ready = (state == C_IDLE);

  // one row of thread IDs
  logic [31:0] q;
  always_comb begin
    q         = (32'(first) + 32'(w)) * RPW + 32'(r);
    vrf_waddr = VAW'(q * 32'(cfg.rpt));
    vrf_we    = (state == C_INIT && !vrf_busy) ? '1 : '0;
    for (int l = 0; l < NUM_SP; l++)
      vrf_wdata[l] = 32'(w) * WARP_SIZE + 32'(r) * NUM_SP + 32'(l);
  end

  assign launch_valid    = (state == C_LAUNCH);
  assign launch_slot     = cur_slot;
  assign launch_first    = first;
  assign launch_nwarps   = nwarps;
  assign launch_nthreads = cfg.ntid;
  assign launch_pc       = start_pc;
  assign done_valid      = blk_done_valid;
  assign done_slot       = blk_done_slot;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= C_IDLE;
      cur_slot <= '0;
      w        <= '0;
      r        <= '0;
      for (int s = 0; s < MAX_BLOCKS; s++) slot_ctaid[s] <= '0;
    end else begin
      unique case (state)
        C_IDLE:
          if (asg_valid) begin
            cur_slot             <= asg_slot;
            slot_ctaid[asg_slot] <= asg_block;
            w                    <= '0;
            r                    <= '0;
            state                <= C_INIT;
          end
        C_INIT:
          if (!vrf_busy) begin
            if (r == 5'(RPW - 1)) begin
              r <= '0;
              if (w == 5'(nwarps - 1)) state <= C_LAUNCH;
              else                     w <= w + 1'b1;
            end else begin
              r <= r + 1'b1;
            end
          end
        default: state <= C_IDLE;   // C_LAUNCH lasts one cycle
      endcase
    end
  end
endmodule
