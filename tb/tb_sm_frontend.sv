// tb_sm_frontend: one SM front-end (4 block slots, 12 warp slots) runs a kernel
// of 20 thread blocks (ids 40..59), 3 warps each, thread block stride 2. A
// pipeline model here gives every warp a random program of compute and
// long-latency loads ending in an exit, with random load latency. Checks:
// blocks leave the queue in id order, once each; every issued warp belongs to
// the running batch and carries batch ordinal (id-40)/2; every (block, warp)
// pair exits exactly once; the SM ends idle; batches are switched (demote and
// promote) during the run.
module tb_sm_frontend;
  import temp_pkg::*;
  localparam int MAX_TB = 4, MAX_WARPS = 12, WPB = 3, HEAD = 40, TAIL = 60, STRIDE = 2;
  localparam int WW = 4, CW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load, issue_stall, wake_valid, exit_valid;
  logic [WW-1:0] wake_warp, exit_warp, issue_warp;
  logic issue_valid, dispatch_valid, promote, demote, run_valid, sm_idle;
  logic [TBID_W-1:0] issue_tb_id, dispatch_tb_id;
  logic [CW-1:0] issue_wib;
  logic [AGE_W-1:0] issue_age, run_age;
  int checks = 0, failures = 0;

  sm_frontend #(.MAX_TB(MAX_TB), .MAX_WARPS(MAX_WARPS)) dut (
    .clk, .rst_n, .load, .load_head(TBID_W'(HEAD)), .load_tail(TBID_W'(TAIL)),
    .load_stride(TBID_W'(STRIDE)), .warps_per_block(CW'(WPB)),
    .issue_stall, .wake_valid, .wake_warp, .exit_valid, .exit_warp,
    .issue_valid, .issue_warp, .issue_tb_id, .issue_wib, .issue_age,
    .dispatch_valid, .dispatch_tb_id, .promote, .demote, .run_valid, .run_age, .sm_idle);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  int ops_left [MAX_WARPS];
  bit active   [MAX_WARPS];
  int wake_at  [MAX_WARPS];
  bit exit_pend[MAX_WARPS];
  int exited [int];
  int cyc = 0, next_disp = HEAD, n_exit = 0, n_prom = 0, n_dem = 0;

  initial begin
    for (int w = 0; w < MAX_WARPS; w++) begin active[w] = 0; wake_at[w] = -1; exit_pend[w] = 0; end
    load = 0; issue_stall = 0; wake_valid = 0; exit_valid = 0; wake_warp = 0; exit_warp = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); load = 1;
    @(negedge clk); load = 0;
  end

  always @(negedge clk) if (rst_n && !load) begin
    cyc++;
    wake_valid = 0; exit_valid = 0; issue_stall = 0;
    for (int w = 0; w < MAX_WARPS; w++)
      if (exit_pend[w]) begin exit_valid = 1; exit_warp = WW'(w); exit_pend[w] = 0; active[w] = 0; break; end
    for (int w = 0; w < MAX_WARPS; w++)
      if (wake_at[w] >= 0 && wake_at[w] <= cyc) begin wake_valid = 1; wake_warp = WW'(w); wake_at[w] = -1; break; end
    #1;
    if (dispatch_valid) begin
      check(int'(dispatch_tb_id) == next_disp, $sformatf("dispatched %0d expected %0d", dispatch_tb_id, next_disp));
      next_disp++;
    end
    if (promote) n_prom++;
    if (demote) n_dem++;
    if (issue_valid) begin
      int w, key;
      w = int'(issue_warp);
      check(run_valid && issue_age == run_age, "issued warp outside the running batch");
      check(int'(issue_age) == (int'(issue_tb_id) - HEAD) / STRIDE, "batch ordinal of issued warp");
      check(int'(issue_tb_id) >= HEAD && int'(issue_tb_id) < next_disp && int'(issue_wib) < WPB, "issued warp identity");
      if (!active[w]) begin active[w] = 1; ops_left[w] = 2 * $urandom_range(1, 3) + 1; end
      if (ops_left[w] == 1) begin
        issue_stall = 1; exit_pend[w] = 1;
        key = int'(issue_tb_id) * 16 + int'(issue_wib);
        check(!exited.exists(key), "warp exited twice");
        exited[key] = 1; n_exit++;
      end else if (ops_left[w] % 2 == 0) begin
        issue_stall = 1; wake_at[w] = cyc + $urandom_range(2, 30);
      end
      ops_left[w]--;
    end
  end

  initial begin
    wait (n_exit == (TAIL - HEAD) * WPB);
    repeat (4) @(negedge clk);
    check(next_disp == TAIL, "not every block dispatched");
    check(sm_idle, "SM not idle at the end");
    check(n_prom > 1 && n_dem > 1, "no batch switching seen");
    $display("promotions %0d demotions %0d", n_prom, n_dem);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (exits %0d)", n_exit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
