// tb_thread_data_mappings: the two thread-data mappings that motivate thread
// batching, run end to end through the whole design at its default size.
//
// Kernel A (1D blocks over a matrix): thread block b works on matrix row b; a
// matrix row is 2 KB, so one 4 KB page holds the rows of blocks 2p and 2p+1
// and the right thread block stride is 2.
// Kernel B (2D grid of 2D blocks): the grid is 4 blocks wide and every block of
// grid row r works on the same page r, so the stride is 4.
// Kernel C is kernel A with the blocks split over the SMs at odd boundaries
// (15, 16, 17, ... blocks), so that pages straddle two SMs.
//
// Around the design the bench models the operating system's page coloring (a
// page goes to a bank of the SM that runs the first block touching it, rows of
// successive batches of an SM spread over that SM's four banks), the warps'
// programs (4 loads with compute between, then exit), and the interconnect.
// Checks per kernel: every block dispatched, every warp exits once, every load
// answered, and the number of local and remote accesses equals the number this
// bench works out from the page ownership. A and B must be all local; C must
// have remote accesses. Row hits, closed-bank accesses and conflicts are
// printed per kernel.
module tb_thread_data_mappings;
  import temp_pkg::*;
  localparam int NS = NUM_SM, NC = NUM_CH, NW = MAX_WARPS_PER_SM;
  localparam int NBLK = 128, WPB = 4, NLOAD = 4;
  localparam int WW = 6, CW = 6, QW = 7;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              load;
  logic [TBID_W-1:0] load_head [NS], load_tail [NS], load_stride;
  logic              issue_valid [NS], issue_stall [NS], wake_valid [NS], exit_valid [NS];
  logic [WW-1:0]     issue_warp [NS], wake_warp [NS], exit_warp [NS];
  logic [TBID_W-1:0] issue_tb_id [NS], dispatch_tb_id [NS];
  logic [CW-1:0]     issue_wib [NS];
  logic [AGE_W-1:0]  issue_age [NS], run_age [NS];
  logic              dispatch_valid [NS], promote [NS], demote [NS], run_valid [NS], sm_idle [NS];
  logic [PA_W-1:0]   sm_req_addr [NS];
  logic              sm_req_write [NS], sm_req_local [NS];
  logic [TAG_W-1:0]  sm_req_tag [NS];
  logic [CH_W-1:0]   sm_req_ch [NS];
  dram_req_t         sm_req_dram [NS];
  logic              mc_req_valid [NC], mc_req_ready [NC], mc_resp_valid [NC], mc_resp_ready [NC];
  dram_req_t         mc_req [NC];
  logic [TAG_W-1:0]  mc_resp_tag [NC];
  logic              mc_resp_is_cpu [NC], mc_resp_is_write [NC], dram_cmd_valid [NC];
  dram_cmd_t         dram_cmd [NC];
  logic [QW-1:0]     mc_occupancy [NC];
  logic [31:0]       mc_n_hit [NC], mc_n_closed [NC], mc_n_conflict [NC];
  logic              ddr_req_valid, ddr_req_ready, ddr_resp_valid, ddr_resp_ready;
  logic              ddr_resp_is_cpu, ddr_resp_is_write, ddr_cmd_valid;
  dram_req_t         ddr_req;
  dram_cmd_t         ddr_cmd;
  logic [TAG_W-1:0]  ddr_resp_tag;
  logic [QW-1:0]     ddr_occupancy;
  logic [31:0]       ddr_n_hit, ddr_n_closed, ddr_n_conflict;

  temp_tbas_top dut (
    .clk, .rst_n, .load, .load_head, .load_tail, .load_stride,
    .warps_per_block(CW'(WPB)),
    .issue_valid, .issue_warp, .issue_tb_id, .issue_wib, .issue_age, .issue_stall,
    .wake_valid, .wake_warp, .exit_valid, .exit_warp,
    .dispatch_valid, .dispatch_tb_id, .promote, .demote, .run_valid, .run_age, .sm_idle,
    .sm_req_addr, .sm_req_write, .sm_req_tag, .sm_req_ch, .sm_req_dram, .sm_req_local,
    .mc_req_valid, .mc_req_ready, .mc_req, .mc_resp_valid, .mc_resp_ready,
    .mc_resp_tag, .mc_resp_is_cpu, .mc_resp_is_write, .dram_cmd_valid, .dram_cmd,
    .mc_occupancy, .mc_n_hit, .mc_n_closed, .mc_n_conflict,
    .ddr_req_valid, .ddr_req_ready, .ddr_req, .ddr_resp_valid, .ddr_resp_ready,
    .ddr_resp_tag, .ddr_resp_is_cpu, .ddr_resp_is_write, .ddr_cmd_valid, .ddr_cmd,
    .ddr_occupancy, .ddr_n_hit, .ddr_n_closed, .ddr_n_conflict);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // ---------------- kernels and the OS page coloring ------------------------
  int kernel;                    // 0: A, 1: B, 2: C
  int head [NS], tail [NS];
  int page_owner [int];          // page -> SM
  int page_color [int];          // page -> color
  int page_row [int];            // page -> DRAM row

  function automatic int page_of(int b);
    return (kernel == 1) ? b / 4 : b / 2;
  endfunction

  function automatic int col_of(int b, int k, int j);
    if (kernel == 1) return (b % 4) * 128 + k * 16 + j;
    return (b % 2) * 256 + k * 16 + j;
  endfunction

  function automatic int sm_of(int b);
    for (int s = 0; s < NS; s++) if (b >= head[s] && b < tail[s]) return s;
    return -1;
  endfunction

  // Split the blocks over the SMs and color every page: the owner is the SM
  // of the first block touching the page; an SM's n-th page goes to its bank
  // n % 4 (color 4s + n%4), row n/4 + 1.
  task automatic setup_kernel(int k);
    int cnt [NS];
    kernel = k;
    page_owner.delete(); page_color.delete(); page_row.delete();
    for (int s = 0; s < NS; s++) begin
      if (k == 2) begin head[s] = (s == 0) ? 0 : tail[s - 1]; tail[s] = (s == NS - 1) ? NBLK : head[s] + 15 + (s % 3); end
      else begin head[s] = s * NBLK / NS; tail[s] = head[s] + NBLK / NS; end
      cnt[s] = 0;
    end
    for (int b = 0; b < NBLK; b++) begin
      int p, s;
      p = page_of(b);
      if (!page_owner.exists(p)) begin
        s = sm_of(b);
        page_owner[p] = s;
        page_color[p] = 4 * s + cnt[s] % 4;
        page_row[p] = 1 + 8 * k + cnt[s] / 4;
        cnt[s]++;
      end
    end
  endtask

  function automatic logic [PA_W-1:0] addr_of(int b, int k, int j);
    int p, color;
    p = page_of(b);
    color = page_color[p];
    return PA_W'((page_row[p] << 17) | ((color >> 1) << 13) | ((color & 1) << 12) | ((col_of(b, k, j) & 511) << 3));
  endfunction

  // ---------------- SM pipeline and interconnect model ----------------------
  typedef struct { logic [PA_W-1:0] addr; logic [TAG_W-1:0] tag; int target_sm; } sreq_t;
  sreq_t     smq [NS][$];
  dram_req_t chq [NC][$];
  int        wakeq [NS][$];
  int  ops_left [NS][NW];
  bit  active [NS][NW];
  bit  exit_pend [NS][NW];
  int  loads_done [NS][NW];
  int  next_disp [NS];
  bit  exited [int];
  bit  running = 0;
  int  cyc = 0, n_exit = 0, n_req = 0, n_resp = 0, n_local = 0, n_remote = 0;

  initial begin
    load = 0; load_stride = '0;
    for (int s = 0; s < NS; s++) begin
      load_head[s] = '0; load_tail[s] = '0;
      issue_stall[s] = 0; wake_valid[s] = 0; exit_valid[s] = 0; wake_warp[s] = 0; exit_warp[s] = 0;
      sm_req_addr[s] = 0; sm_req_write[s] = 0; sm_req_tag[s] = 0;
      for (int w = 0; w < NW; w++) begin active[s][w] = 0; exit_pend[s][w] = 0; end
    end
    for (int c = 0; c < NC; c++) begin mc_req_valid[c] = 0; mc_req[c] = '0; mc_resp_ready[c] = 1; end
    ddr_req_valid = 0; ddr_req = '0; ddr_resp_ready = 1;
  end

  always @(negedge clk) if (running) begin
    cyc++;
    for (int s = 0; s < NS; s++) begin
      issue_stall[s] = 0; wake_valid[s] = 0; exit_valid[s] = 0;
      for (int w = 0; w < NW; w++)
        if (exit_pend[s][w]) begin exit_valid[s] = 1; exit_warp[s] = WW'(w); exit_pend[s][w] = 0; active[s][w] = 0; break; end
      if (wakeq[s].size() > 0) begin wake_valid[s] = 1; wake_warp[s] = WW'(wakeq[s].pop_front()); end
      if (smq[s].size() > 0) begin sm_req_addr[s] = smq[s][0].addr; sm_req_tag[s] = smq[s][0].tag; end
    end
    for (int c = 0; c < NC; c++) begin
      mc_req_valid[c] = (chq[c].size() > 0);
      if (mc_req_valid[c]) mc_req[c] = chq[c][0];
    end
    #1;
    for (int c = 0; c < NC; c++) begin
      if (mc_req_valid[c] && mc_req_ready[c]) void'(chq[c].pop_front());
      if (mc_resp_valid[c]) begin
        int t;
        t = int'(mc_resp_tag[c]);
        wakeq[(t >> 6) & 7].push_back(t & 63);
        n_resp++;
      end
    end
    for (int s = 0; s < NS; s++) begin
      if (smq[s].size() > 0) begin
        sreq_t q;
        q = smq[s].pop_front();
        check(sm_req_local[s] == (q.target_sm == s), "local flag of request");
        if (sm_req_local[s]) n_local++; else n_remote++;
        chq[sm_req_ch[s]].push_back(sm_req_dram[s]);
      end
      if (dispatch_valid[s]) begin
        check(int'(dispatch_tb_id[s]) == next_disp[s], $sformatf("SM%0d dispatched %0d expected %0d", s, dispatch_tb_id[s], next_disp[s]));
        next_disp[s]++;
      end
      if (issue_valid[s]) begin
        int w, t, k, key;
        w = int'(issue_warp[s]); t = int'(issue_tb_id[s]); k = int'(issue_wib[s]);
        check(run_valid[s] && issue_age[s] == run_age[s], "issued warp outside the running batch");
        if (!active[s][w]) begin active[s][w] = 1; ops_left[s][w] = 2 * NLOAD + 1; loads_done[s][w] = 0; end
        if (ops_left[s][w] == 1) begin
          issue_stall[s] = 1; exit_pend[s][w] = 1;
          key = t * 64 + k;
          check(!exited.exists(key), "warp exited twice");
          exited[key] = 1; n_exit++;
        end else if (ops_left[s][w] % 2 == 0) begin
          sreq_t q;
          issue_stall[s] = 1;
          q.addr = addr_of(t, k, loads_done[s][w]);
          q.tag = TAG_W'((s << 6) | w);
          q.target_sm = page_owner[page_of(t)];
          smq[s].push_back(q);
          loads_done[s][w]++;
          n_req++;
        end
        ops_left[s][w]--;
      end
    end
  end

  task automatic run_kernel(int k, int stride, string name);
    int exp_local, exp_remote;
    int h0, c0, x0, h1, c1, x1;
    bit all_idle;
    setup_kernel(k);
    exp_local = 0; exp_remote = 0;
    for (int b = 0; b < NBLK; b++)
      if (page_owner[page_of(b)] == sm_of(b)) exp_local += WPB * NLOAD; else exp_remote += WPB * NLOAD;
    exited.delete();
    n_exit = 0; n_req = 0; n_resp = 0; n_local = 0; n_remote = 0; cyc = 0;
    h0 = int'(mc_n_hit[0] + mc_n_hit[1]); c0 = int'(mc_n_closed[0] + mc_n_closed[1]); x0 = int'(mc_n_conflict[0] + mc_n_conflict[1]);
    @(negedge clk);
    for (int s = 0; s < NS; s++) begin
      load_head[s] = TBID_W'(head[s]); load_tail[s] = TBID_W'(tail[s]); next_disp[s] = head[s];
    end
    load_stride = TBID_W'(stride);
    load = 1;
    @(negedge clk);
    load = 0;
    running = 1;
    wait (n_exit == NBLK * WPB && n_resp == n_req);
    repeat (20) @(negedge clk);
    running = 0;
    all_idle = 1;
    for (int s = 0; s < NS; s++) begin
      all_idle &= sm_idle[s];
      check(next_disp[s] == tail[s], $sformatf("%s: SM%0d did not dispatch its range", name, s));
    end
    check(all_idle, {name, ": SMs not idle at the end"});
    check(n_req == NBLK * WPB * NLOAD && n_resp == n_req, {name, ": loads issued and answered"});
    check(n_local == exp_local, $sformatf("%s: local accesses %0d, expected %0d", name, n_local, exp_local));
    check(n_remote == exp_remote, $sformatf("%s: remote accesses %0d, expected %0d", name, n_remote, exp_remote));
    h1 = int'(mc_n_hit[0] + mc_n_hit[1]) - h0; c1 = int'(mc_n_closed[0] + mc_n_closed[1]) - c0; x1 = int'(mc_n_conflict[0] + mc_n_conflict[1]) - x0;
    check(h1 + c1 + x1 == n_req, {name, ": every access classified once"});
    $display("%s: %0d cycles, local %0d remote %0d (local ratio %0d%%), row hit %0d closed %0d conflict %0d",
             name, cyc, n_local, n_remote, 100 * n_local / n_req, h1, c1, x1);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_kernel(0, 2, "A: 1D blocks, stride 2");
    check(n_remote == 0, "A must be all local");
    run_kernel(1, 4, "B: 2D blocks, stride 4");
    check(n_remote == 0, "B must be all local");
    run_kernel(2, 2, "C: A split at odd boundaries");
    check(n_remote > 0, "C must have remote accesses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (kernel %0d, exits %0d, replies %0d of %0d)", kernel, n_exit, n_resp, n_req);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
