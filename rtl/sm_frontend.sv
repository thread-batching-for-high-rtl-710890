// sm_frontend: thread block dispatch and warp scheduling of one SM.
//
// Chains the three per-SM pieces of the design: the dispatch queue (head/tail
// range of thread block ids, batch numbering), the block launcher (block and
// warp slots) and the TBAS warp scheduler (one thread batch in the running set,
// oldest-first promotion). The SM's execution pipeline, which is not part of
// this design, sits around it: it receives the issued warp together with its
// thread block id and warp index in the block, tells in the same cycle whether
// the instruction is long-latency (issue_stall), and later wakes or retires the
// warp.
//
// Interface: `load` with head/tail/stride programs the SM before a kernel.
// dispatch_valid/dispatch_tb_id show each thread block id taken from the queue.
// sm_idle is high when the queue is empty and no block is resident.
module sm_frontend
  import temp_pkg::*;
#(
  parameter int MAX_TB     = MAX_TB_PER_SM,
  parameter int MAX_WARPS  = MAX_WARPS_PER_SM,
  parameter int MIN_ACTIVE = 1,
  localparam int WARP_W    = (MAX_WARPS > 1) ? $clog2(MAX_WARPS) : 1,
  localparam int CNT_W     = $clog2(MAX_WARPS + 1),
  localparam int SLOT_W    = (MAX_TB > 1) ? $clog2(MAX_TB) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [TBID_W-1:0] load_head,
  input  logic [TBID_W-1:0] load_tail,
  input  logic [TBID_W-1:0] load_stride,
  input  logic [CNT_W-1:0]  warps_per_block,
  input  logic              issue_stall,
  input  logic              wake_valid,
  input  logic [WARP_W-1:0] wake_warp,
  input  logic              exit_valid,
  input  logic [WARP_W-1:0] exit_warp,
  output logic              issue_valid,
  output logic [WARP_W-1:0] issue_warp,
  output logic [TBID_W-1:0] issue_tb_id,
  output logic [CNT_W-1:0]  issue_wib,
  output logic [AGE_W-1:0]  issue_age,
  output logic              dispatch_valid,
  output logic [TBID_W-1:0] dispatch_tb_id,
  output logic              promote,
  output logic              demote,
  output logic              run_valid,
  output logic [AGE_W-1:0]  run_age,
  output logic              sm_idle
);

  logic              q_empty, q_pop;
  logic [TBID_W-1:0] q_tb_id;
  logic [AGE_W-1:0]  q_age;

  dispatch_queue #(.TBID_W(TBID_W), .AGE_W(AGE_W)) u_dq (
    .clk, .rst_n, .load, .load_head, .load_tail, .load_stride,
    .pop(q_pop), .empty(q_empty), .tb_id(q_tb_id), .batch_age(q_age)
  );

  logic              slot_valid [MAX_TB];
  logic [TBID_W-1:0] slot_tb_id [MAX_TB];
  logic [AGE_W-1:0]  slot_age   [MAX_TB];
  logic              warp_valid [MAX_WARPS];
  logic [SLOT_W-1:0] warp_slot  [MAX_WARPS];
  logic [CNT_W-1:0]  warp_wib   [MAX_WARPS];
  logic              alloc_valid, busy;
  logic [WARP_W-1:0] alloc_warp;

  block_launcher #(.MAX_TB(MAX_TB), .MAX_WARPS(MAX_WARPS), .TBID_W(TBID_W), .AGE_W(AGE_W)) u_bl (
    .clk, .rst_n, .warps_per_block,
    .q_empty, .q_tb_id, .q_age, .q_pop,
    .exit_valid, .exit_warp,
    .alloc_valid, .alloc_warp,
    .slot_valid, .slot_tb_id, .slot_age,
    .warp_valid, .warp_slot, .warp_wib, .busy
  );

  tbas_scheduler #(.MAX_TB(MAX_TB), .MAX_WARPS(MAX_WARPS), .AGE_W(AGE_W), .MIN_ACTIVE(MIN_ACTIVE)) u_sched (
    .clk, .rst_n,
    .slot_valid, .slot_age, .warp_valid, .warp_slot,
    .alloc_valid, .alloc_warp,
    .issue_stall, .wake_valid, .wake_warp, .exit_valid, .exit_warp,
    .issue_valid, .issue_warp,
    .run_valid, .run_age, .promote, .demote
  );

  assign issue_tb_id    = slot_tb_id[warp_slot[issue_warp]];
  assign issue_age      = slot_age[warp_slot[issue_warp]];
  assign issue_wib      = warp_wib[issue_warp];
  assign dispatch_valid = q_pop;
  assign dispatch_tb_id = q_tb_id;

  always_comb begin
    sm_idle = q_empty && !busy;
    for (int s = 0; s < MAX_TB; s++) if (slot_valid[s]) sm_idle = 1'b0;
  end

endmodule
