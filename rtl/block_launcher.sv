// block_launcher: thread block slots and warp slots of one SM.
//
// An SM holds at most MAX_TB thread blocks and MAX_WARPS warps. Whenever a block
// slot is idle, the dispatch queue is not empty and enough warp slots are free
// for a whole block, the launcher pops the next thread block id (serial
// dispatch: the SM never waits for a global dispatcher) and then allocates the
// block's warps, one per cycle, to the lowest free warp slots. Each warp slot
// records its block slot and its index inside the block. When every warp of a
// block has exited, the block slot becomes idle again.
//
// Interface: warps_per_block is fixed for a kernel (1..MAX_WARPS). q_pop is a
// one-cycle pulse taken in the same cycle as q_tb_id/q_age. alloc_valid marks
// the cycle a warp slot is filled (the warp is live from the next cycle).
// exit_valid/exit_warp retire a live warp. Slot and warp tables are registered.
// The slot limits and popping on an idle slot follow the paper; the one warp
// per cycle allocation and lowest-index choice are this design's own.
module block_launcher #(
  parameter int MAX_TB    = temp_pkg::MAX_TB_PER_SM,
  parameter int MAX_WARPS = temp_pkg::MAX_WARPS_PER_SM,
  parameter int TBID_W    = temp_pkg::TBID_W,
  parameter int AGE_W     = temp_pkg::AGE_W,
  localparam int SLOT_W   = (MAX_TB > 1) ? $clog2(MAX_TB) : 1,
  localparam int WARP_W   = (MAX_WARPS > 1) ? $clog2(MAX_WARPS) : 1,
  localparam int CNT_W    = $clog2(MAX_WARPS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [CNT_W-1:0]  warps_per_block,
  // dispatch queue
  input  logic              q_empty,
  input  logic [TBID_W-1:0] q_tb_id,
  input  logic [AGE_W-1:0]  q_age,
  output logic              q_pop,
  // warp retirement from the SM pipeline
  input  logic              exit_valid,
  input  logic [WARP_W-1:0] exit_warp,
  // new warp
  output logic              alloc_valid,
  output logic [WARP_W-1:0] alloc_warp,
  // tables
  output logic              slot_valid [MAX_TB],
  output logic [TBID_W-1:0] slot_tb_id [MAX_TB],
  output logic [AGE_W-1:0]  slot_age   [MAX_TB],
  output logic              warp_valid [MAX_WARPS],
  output logic [SLOT_W-1:0] warp_slot  [MAX_WARPS],
  output logic [CNT_W-1:0]  warp_wib   [MAX_WARPS],
  output logic              busy
);

  typedef enum logic {S_IDLE, S_ALLOC} state_e;
  state_e state_q;

  logic [SLOT_W-1:0] cur_slot_q;
  logic [CNT_W-1:0]  cur_idx_q;
  logic [CNT_W-1:0]  live_q [MAX_TB];

  // Free resources.
  logic              free_slot_found;
  logic [SLOT_W-1:0] free_slot;
  logic              free_warp_found;
  logic [WARP_W-1:0] free_warp;
  logic [CNT_W-1:0]  free_warps;

  always_comb begin
    free_slot_found = 1'b0;
    free_slot       = '0;
    for (int s = MAX_TB - 1; s >= 0; s--) begin
      if (!slot_valid[s]) begin
        free_slot_found = 1'b1;
        free_slot       = SLOT_W'(s);
      end
    end
    free_warp_found = 1'b0;
    free_warp       = '0;
    free_warps      = '0;
    for (int w = MAX_WARPS - 1; w >= 0; w--) begin
      if (!warp_valid[w]) begin
        free_warp_found = 1'b1;
        free_warp       = WARP_W'(w);
        free_warps      = free_warps + 1'b1;
      end
    end
  end

  assign busy        = (state_q == S_ALLOC);
  assign q_pop       = (state_q == S_IDLE) && !q_empty && free_slot_found &&
                       (warps_per_block != '0) && (free_warps >= warps_per_block);
  assign alloc_valid = (state_q == S_ALLOC) && free_warp_found;
  assign alloc_warp  = free_warp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      cur_slot_q <= '0;
      cur_idx_q  <= '0;
      for (int s = 0; s < MAX_TB; s++) begin
        slot_valid[s] <= 1'b0;
        slot_tb_id[s] <= '0;
        slot_age[s]   <= '0;
        live_q[s]     <= '0;
      end
      for (int w = 0; w < MAX_WARPS; w++) begin
        warp_valid[w] <= 1'b0;
        warp_slot[w]  <= '0;
        warp_wib[w]   <= '0;
      end
    end else begin
      // Retire a warp; free its block slot with its last warp.
      if (exit_valid && warp_valid[exit_warp]) begin
        warp_valid[exit_warp] <= 1'b0;
        live_q[warp_slot[exit_warp]] <= live_q[warp_slot[exit_warp]] - 1'b1;
        if (live_q[warp_slot[exit_warp]] == CNT_W'(1))
          slot_valid[warp_slot[exit_warp]] <= 1'b0;
      end
      case (state_q)
        S_IDLE: if (q_pop) begin
          slot_valid[free_slot] <= 1'b1;
          slot_tb_id[free_slot] <= q_tb_id;
          slot_age[free_slot]   <= q_age;
          live_q[free_slot]     <= warps_per_block;
          cur_slot_q            <= free_slot;
          cur_idx_q             <= '0;
          state_q               <= S_ALLOC;
        end
        S_ALLOC: if (alloc_valid) begin
          warp_valid[free_warp] <= 1'b1;
          warp_slot[free_warp]  <= cur_slot_q;
          warp_wib[free_warp]   <= cur_idx_q;
          cur_idx_q             <= cur_idx_q + 1'b1;
          if (cur_idx_q == warps_per_block - 1'b1) state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_exit_live: assert property (@(posedge clk) disable iff (!rst_n)
                                exit_valid |-> warp_valid[exit_warp])
    else $error("block_launcher: exit of a warp slot that is not live");

endmodule
