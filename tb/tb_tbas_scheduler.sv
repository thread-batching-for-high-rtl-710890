// tb_tbas_scheduler: drives the TBAS warp scheduler with 4 block slots of 2 warps
// each (one block per thread batch, as in the paper's worked example), a random
// program per warp (compute, long-latency load, exit), random memory latency
// and refilling of freed slots with younger batches. A reference model kept
// here, written as per-batch counts, predicts every cycle whether a warp
// issues, which one (round-robin inside the running batch), and which batch is
// promoted when the running one runs out of ready warps (the oldest batch with
// a ready warp). Also counts promotions of an older batch over younger ones.
module tb_tbas_scheduler;
  localparam int MAX_TB = 4, MAX_WARPS = 8, AGE_W = 16, WPS = 2;
  localparam int NBATCH = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              slot_valid [MAX_TB];
  logic [AGE_W-1:0]  slot_age   [MAX_TB];
  logic              warp_valid [MAX_WARPS];
  logic [1:0]        warp_slot  [MAX_WARPS];
  logic              alloc_valid, issue_stall, wake_valid, exit_valid;
  logic [2:0]        alloc_warp, wake_warp, exit_warp;
  logic              issue_valid, run_valid, promote, demote;
  logic [2:0]        issue_warp;
  logic [AGE_W-1:0]  run_age;
  int checks = 0, failures = 0;

  tbas_scheduler #(.MAX_TB(MAX_TB), .MAX_WARPS(MAX_WARPS), .AGE_W(AGE_W), .MIN_ACTIVE(1)) dut (
    .clk, .rst_n, .slot_valid, .slot_age, .warp_valid, .warp_slot,
    .alloc_valid, .alloc_warp, .issue_stall, .wake_valid, .wake_warp,
    .exit_valid, .exit_warp, .issue_valid, .issue_warp,
    .run_valid, .run_age, .promote, .demote);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // per-warp program: ops left; op 0 = compute, 1 = load, 2 = exit
  int ops_left [MAX_WARPS];
  int wake_at  [MAX_WARPS];   // cycle of wake, -1 none
  bit exit_pend[MAX_WARPS];
  bit m_rdy    [MAX_WARPS];   // model ready bits
  bit m_run_v;
  int m_run_age;
  int m_last;                 // last issued warp
  int cyc = 0, next_age = 0, batches_done = 0;
  int n_promote = 0, n_demote = 0, n_issue = 0, n_reprom = 0;
  int alloc_q [$];            // warps waiting to be allocated
  int prev_run_age = -1;

  function automatic int cur_op(int w);
    if (ops_left[w] == 1) return 2;
    return (ops_left[w] % 2 == 0) ? 1 : 0;
  endfunction


  initial begin
    for (int s = 0; s < MAX_TB; s++) begin slot_valid[s] = 0; slot_age[s] = 0; end
    for (int w = 0; w < MAX_WARPS; w++) begin
      warp_valid[w] = 0; warp_slot[w] = 2'(w / WPS); m_rdy[w] = 0;
      wake_at[w] = -1; exit_pend[w] = 0; ops_left[w] = 0;
    end
    m_run_v = 0; m_run_age = 0; m_last = MAX_WARPS - 1;
    alloc_valid = 0; wake_valid = 0; exit_valid = 0; issue_stall = 0;
    alloc_warp = 0; wake_warp = 0; exit_warp = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
  end

  always @(negedge clk) if (rst_n) begin
    int exp_w, best_age, cnt;
    bit exp_issue, found;
    cyc++;
    // ---- apply last cycle's effects on the tables (as the launcher would)
    if (alloc_valid) warp_valid[alloc_warp] = 1;
    if (exit_valid) begin
      int s;
      warp_valid[exit_warp] = 0;
      s = int'(exit_warp) / WPS;
      if (!warp_valid[s * WPS] && !warp_valid[s * WPS + 1]) begin
        slot_valid[s] = 0; batches_done++;
      end
    end
    // ---- new inputs
    alloc_valid = 0; wake_valid = 0; exit_valid = 0;
    for (int w = 0; w < MAX_WARPS; w++)
      if (exit_pend[w]) begin exit_valid = 1; exit_warp = 3'(w); exit_pend[w] = 0; break; end
    for (int w = 0; w < MAX_WARPS; w++)
      if (wake_at[w] >= 0 && wake_at[w] <= cyc) begin
        wake_valid = 1; wake_warp = 3'(w); wake_at[w] = -1; break;
      end
    if (alloc_q.size() > 0) begin
      alloc_valid = 1; alloc_warp = 3'(alloc_q.pop_front());
    end else if (next_age < NBATCH && $urandom_range(0, 3) == 0) begin
      for (int s = 0; s < MAX_TB; s++)
        if (!slot_valid[s] && !warp_valid[s * WPS] && !warp_valid[s * WPS + 1]) begin
          slot_valid[s] = 1; slot_age[s] = AGE_W'(next_age); next_age++;
          for (int k = 0; k < WPS; k++) begin
            alloc_q.push_back(s * WPS + k);
            ops_left[s * WPS + k] = 2 * $urandom_range(1, 4) + 1;  // ...,load,compute,exit
          end
          break;
        end
    end
    #1;
    issue_stall = issue_valid && (cur_op(int'(issue_warp)) != 0);
    // ---- reference model: what must happen at the coming edge
    cnt = 0;
    for (int w = 0; w < MAX_WARPS; w++)
      if (warp_valid[w] && m_rdy[w] && m_run_v && int'(slot_age[warp_slot[w]]) == m_run_age) cnt++;
    exp_issue = (cnt >= 1);
    check(issue_valid == exp_issue, $sformatf("issue_valid %0d expected %0d", issue_valid, exp_issue));
    check(run_valid == m_run_v && (!m_run_v || int'(run_age) == m_run_age), "running batch");
    if (exp_issue) begin
      exp_w = -1;
      for (int k = 1; k <= MAX_WARPS && exp_w < 0; k++) begin
        int w;
        w = (m_last + k) % MAX_WARPS;
        if (warp_valid[w] && m_rdy[w] && int'(slot_age[warp_slot[w]]) == m_run_age) exp_w = w;
      end
      check(int'(issue_warp) == exp_w, $sformatf("issued warp %0d expected %0d", issue_warp, exp_w));
      n_issue++;
      m_last = exp_w;
      case (cur_op(exp_w))
        0: ;
        1: begin m_rdy[exp_w] = 0; wake_at[exp_w] = cyc + $urandom_range(3, 25); end
        default: begin m_rdy[exp_w] = 0; exit_pend[exp_w] = 1; end
      endcase
      ops_left[exp_w]--;
    end else begin
      check(demote == m_run_v, "demote flag");
      if (m_run_v) n_demote++;
      found = 0; best_age = 0;
      for (int w = 0; w < MAX_WARPS; w++)
        if (warp_valid[w] && m_rdy[w] && slot_valid[warp_slot[w]] &&
            (!found || int'(slot_age[warp_slot[w]]) < best_age)) begin
          found = 1; best_age = int'(slot_age[warp_slot[w]]);
        end
      check(promote == found, "promote flag");
      if (found) begin
        n_promote++;
        if (best_age < prev_run_age) n_reprom++;
        prev_run_age = best_age;
      end
      m_run_v = found;
      if (found) m_run_age = best_age;
    end
    if (wake_valid) m_rdy[wake_warp] = 1;
    if (exit_valid) m_rdy[exit_warp] = 0;
    if (alloc_valid) m_rdy[alloc_warp] = 1;
  end

  initial begin
    wait (rst_n);
    wait (batches_done == NBATCH);
    repeat (2) @(negedge clk);
    check(n_promote > 0 && n_demote > 0, "no promotion/demotion seen");
    check(n_reprom > 0, "never promoted an older batch back");
    $display("issues %0d promotions %0d demotions %0d older-batch promotions %0d",
             n_issue, n_promote, n_demote, n_reprom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (batches done %0d)", batches_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
