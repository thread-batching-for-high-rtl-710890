// tbas_scheduler: thread batch-aware warp scheduler (TBAS) of one SM.
//
// Warps of the same thread batch touch the same pages, and page coloring puts
// those pages in the same DRAM rows, so TBAS lets only one batch run at a time.
// The running set is the set of ready warps of the running batch; warps of the
// other resident batches wait in the pending set. Each cycle the scheduler
//   * issues one warp of the running set, round-robin, if the running batch has
//     at least MIN_ACTIVE ready warps;
//   * otherwise demotes the running batch as a whole and, through the
//     promotion priority arbiter, promotes the OLDEST resident batch that has at
//     least MIN_ACTIVE ready warps (possibly the same batch again later). The
//     switch takes this one cycle and issues nothing.
// A warp becomes ready when it is allocated, stops being ready when it issues a
// long-latency instruction (issue_stall, given by the pipeline in the issue
// cycle), becomes ready again on wake, and leaves on exit.
//
// Interface: the block/warp tables come from block_launcher. issue_valid /
// issue_warp name the warp issued this cycle. promote/demote pulse for one cycle.
// Demote-whole-batch and oldest-first promotion follow the paper. MIN_ACTIVE
// (default 1), one issue per cycle, round-robin order and the one-cycle switch
// are this design's own choices.
module tbas_scheduler #(
  parameter int MAX_TB     = temp_pkg::MAX_TB_PER_SM,
  parameter int MAX_WARPS  = temp_pkg::MAX_WARPS_PER_SM,
  parameter int AGE_W      = temp_pkg::AGE_W,
  parameter int MIN_ACTIVE = 1,
  localparam int SLOT_W    = (MAX_TB > 1) ? $clog2(MAX_TB) : 1,
  localparam int WARP_W    = (MAX_WARPS > 1) ? $clog2(MAX_WARPS) : 1,
  localparam int CNT_W     = $clog2(MAX_WARPS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // tables from the block launcher
  input  logic              slot_valid [MAX_TB],
  input  logic [AGE_W-1:0]  slot_age   [MAX_TB],
  input  logic              warp_valid [MAX_WARPS],
  input  logic [SLOT_W-1:0] warp_slot  [MAX_WARPS],
  input  logic              alloc_valid,
  input  logic [WARP_W-1:0] alloc_warp,
  // pipeline events
  input  logic              issue_stall,   // issued instruction is long-latency
  input  logic              wake_valid,
  input  logic [WARP_W-1:0] wake_warp,
  input  logic              exit_valid,
  input  logic [WARP_W-1:0] exit_warp,
  // issue
  output logic              issue_valid,
  output logic [WARP_W-1:0] issue_warp,
  // running set
  output logic              run_valid,
  output logic [AGE_W-1:0]  run_age,
  output logic              promote,
  output logic              demote
);

  logic              ready_q [MAX_WARPS];
  logic              run_valid_q;
  logic [AGE_W-1:0]  run_age_q;
  logic [WARP_W-1:0] rr_q;

  // Warps that are live and ready, and their batch.
  logic              rdy      [MAX_WARPS];
  logic [AGE_W-1:0]  warp_age [MAX_WARPS];
  logic              in_run   [MAX_WARPS];
  logic [CNT_W-1:0]  run_cnt;

  always_comb begin
    run_cnt = '0;
    for (int w = 0; w < MAX_WARPS; w++) begin
      rdy[w]      = warp_valid[w] && ready_q[w];
      warp_age[w] = slot_age[warp_slot[w]];
      in_run[w]   = rdy[w] && run_valid_q && (warp_age[w] == run_age_q);
      run_cnt     = run_cnt + CNT_W'(in_run[w]);
    end
  end

  logic run_ok;
  assign run_ok = run_valid_q && (run_cnt >= CNT_W'(MIN_ACTIVE));

  // Ready-warp count of the batch each block slot belongs to.
  logic             elig [MAX_TB];
  logic [CNT_W-1:0] bcnt [MAX_TB];
  always_comb begin
    for (int s = 0; s < MAX_TB; s++) begin
      bcnt[s] = '0;
      for (int w = 0; w < MAX_WARPS; w++)
        if (rdy[w] && warp_age[w] == slot_age[s]) bcnt[s] = bcnt[s] + 1'b1;
      elig[s] = slot_valid[s] && (bcnt[s] >= CNT_W'(MIN_ACTIVE));
    end
  end

  logic              g_valid;
  logic [SLOT_W-1:0] g_idx;
  logic [AGE_W-1:0]  g_age;

  batch_priority_arbiter #(.N(MAX_TB), .AGE_W(AGE_W)) u_arb (
    .eligible(elig), .age(slot_age),
    .grant_valid(g_valid), .grant_idx(g_idx), .grant_age(g_age)
  );

  // Round-robin pick among the running set, starting after the last issued warp.
  logic              pick_found;
  logic [WARP_W-1:0] pick;
  always_comb begin
    pick_found = 1'b0;
    pick       = '0;
    for (int k = 1; k <= MAX_WARPS; k++) begin
      int idx;
      idx = (int'(rr_q) + k) % MAX_WARPS;
      if (!pick_found && in_run[idx]) begin
        pick_found = 1'b1;
        pick       = WARP_W'(idx);
      end
    end
  end

  assign issue_valid = run_ok && pick_found;
  assign issue_warp  = pick;
  assign run_valid   = run_valid_q;
  assign run_age     = run_age_q;
  assign demote      = run_valid_q && !run_ok;
  assign promote     = !run_ok && g_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_valid_q <= 1'b0;
      run_age_q   <= '0;
      rr_q        <= WARP_W'(MAX_WARPS - 1);
      for (int w = 0; w < MAX_WARPS; w++) ready_q[w] <= 1'b0;
    end else begin
      if (issue_valid) begin
        rr_q <= pick;
        if (issue_stall) ready_q[pick] <= 1'b0;
      end
      if (wake_valid)  ready_q[wake_warp]  <= 1'b1;
      if (exit_valid)  ready_q[exit_warp]  <= 1'b0;
      if (alloc_valid) ready_q[alloc_warp] <= 1'b1;
      if (!run_ok) begin
        run_valid_q <= g_valid;
        if (g_valid) run_age_q <= g_age;
      end
    end
  end

  a_issue_in_run: assert property (@(posedge clk) disable iff (!rst_n)
                                   issue_valid |-> (warp_valid[issue_warp] && warp_age[issue_warp] == run_age_q))
    else $error("tbas_scheduler: issued a warp outside the running batch");

endmodule
