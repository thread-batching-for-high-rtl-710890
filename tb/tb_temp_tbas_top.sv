// tb_temp_tbas_top: end-to-end run of the whole design at its default size
// (8 SMs of 8 block slots and 48 warp slots, 2 GDDR5 channels of 16 banks and
// one DDR3 channel of 8 banks, 64-entry queues). No parameter of the top is overridden.
//
// Kernel: 128 thread blocks of 4 warps, thread block stride 2, 16 consecutive
// blocks per SM. Around the design this bench models
//  * the operating system's page coloring: thread batch i of SM s lives in
//    color 4s + i%4 (a bank of that SM), row i/4 + 1;
//  * each warp's program: 3 loads to its batch's page, with compute between,
//    then exit; the last warp of a batch makes its last load to the NEXT batch's
//    page (cross-batch sharing), which is remote for an SM's last batch;
//  * the interconnect: per-SM request queues drained into per-channel queues,
//    CPU requests (rows in the upper half of each bank) mixed in, replies
//    routed back by tag, with random reply-network stalls;
//  * CPU traffic to the CPUs' own DDR3 channel (8 banks).
// Checks: serial dispatch order per SM; every DDR3 request answered once; every issued warp is in its SM's
// running batch; mapping (channel, local/remote) of each request; every
// request answered once; every warp exits once; all SMs idle at the end.
// Mechanisms counted (each must occur): dispatch, promotion, demotion, row hit,
// closed-bank access, row conflict, local access, remote access, full request
// queue, reply stall, CPU request served ahead of an older GPU request.
module tb_temp_tbas_top;
  import temp_pkg::*;
  localparam int NS = NUM_SM, NC = NUM_CH, NW = MAX_WARPS_PER_SM;
  localparam int BPS = 16, WPB = 4, STRIDE = 2, NLOAD = 3;
  localparam int NBLK = NS * BPS;
  localparam int BATCH_PER_SM = BPS / STRIDE;
  localparam int WW = 6, CW = 6, QW = 7;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              load;
  logic [TBID_W-1:0] load_head [NS], load_tail [NS];
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
    .clk, .rst_n, .load, .load_head, .load_tail, .load_stride(TBID_W'(STRIDE)),
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

  // ---------------- page coloring done by the "OS" -------------------------
  function automatic logic [PA_W-1:0] page_addr(int g, int col);
    int s, i, color, row;
    s = g / BATCH_PER_SM;
    i = g % BATCH_PER_SM;
    color = 4 * s + i % 4;
    row = i / 4 + 1;
    return PA_W'((row << 17) | ((color >> 1) << 13) | ((color & 1) << 12) | ((col & 511) << 3));
  endfunction

  // ---------------- SM pipeline model ---------------------------------------
  typedef struct { logic [PA_W-1:0] addr; logic [TAG_W-1:0] tag; int target_sm; } sreq_t;
  sreq_t     smq [NS][$];
  dram_req_t chq [NC][$];
  int        chq_acc [NC][$];
  dram_req_t cpuq [NC][$];
  int        wakeq [NS][$];
  int  ops_left [NS][NW];
  bit  active [NS][NW];
  bit  exit_pend [NS][NW];
  int  loads_done [NS][NW];
  int  next_disp [NS];
  bit  exited [int];
  int  cyc = 0, n_exit = 0, n_gpu_req = 0, n_gpu_resp = 0, n_cpu_req = 0, n_cpu_resp = 0;
  int  outstanding [NS][NW];
  int  gpu_acc [NC][int];       // accepted cycle of pending GPU tags per channel
  int  cpu_acc [NC][int];
  int  cpu_tag = 0;
  dram_req_t ddrq [$];
  int  n_ddr_req = 0, n_ddr_resp = 0;
  bit  ddr_seen [int];
  // mechanism counters
  int  m_disp = 0, m_prom = 0, m_dem = 0, m_local = 0, m_remote = 0, m_full = 0, m_rstall = 0, m_cpu_ahead = 0;

  initial begin
    load = 0;
    for (int s = 0; s < NS; s++) begin
      load_head[s] = TBID_W'(s * BPS); load_tail[s] = TBID_W'(s * BPS + BPS);
      next_disp[s] = s * BPS;
      issue_stall[s] = 0; wake_valid[s] = 0; exit_valid[s] = 0; wake_warp[s] = 0; exit_warp[s] = 0;
      sm_req_addr[s] = 0; sm_req_write[s] = 0; sm_req_tag[s] = 0;
      for (int w = 0; w < NW; w++) begin active[s][w] = 0; exit_pend[s][w] = 0; outstanding[s][w] = 0; end
    end
    for (int c = 0; c < NC; c++) begin mc_req_valid[c] = 0; mc_req[c] = '0; mc_resp_ready[c] = 1; end
    ddr_req_valid = 0; ddr_req = '0; ddr_resp_ready = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); load = 1;
    @(negedge clk); load = 0;
  end

  always @(negedge clk) if (rst_n && !load) begin
    cyc++;
    // ---- drive SM-side inputs
    for (int s = 0; s < NS; s++) begin
      issue_stall[s] = 0; wake_valid[s] = 0; exit_valid[s] = 0;
      for (int w = 0; w < NW; w++)
        if (exit_pend[s][w]) begin exit_valid[s] = 1; exit_warp[s] = WW'(w); exit_pend[s][w] = 0; active[s][w] = 0; break; end
      if (wakeq[s].size() > 0) begin wake_valid[s] = 1; wake_warp[s] = WW'(wakeq[s].pop_front()); end
      if (smq[s].size() > 0) begin sm_req_addr[s] = smq[s][0].addr; sm_req_tag[s] = smq[s][0].tag; end
    end
    // ---- CPU traffic: upper half of the rows of a bank
    for (int c = 0; c < NC; c++)
      if (n_exit < NBLK * WPB && $urandom_range(0, 24) == 0) begin
        dram_req_t r;
        r = '{is_cpu: 1'b1, is_write: 1'b0, bank: BANK_W'($urandom_range(0, 15)),
              row: ROW_W'(16384 + $urandom_range(0, 7)), col: '0, tag: TAG_W'(cpu_tag)};
        cpu_tag = (cpu_tag + 1) % 4096;
        cpuq[c].push_back(r);
        n_cpu_req++;
      end
    // ---- CPU traffic to its own DDR3 channel (8 banks), 3 rows per bank
    if (n_exit < NBLK * WPB && $urandom_range(0, 3) == 0) begin
      ddrq.push_back('{is_cpu: 1'b1, is_write: 1'($urandom_range(0, 1)), bank: BANK_W'($urandom_range(0, 7)),
                       row: ROW_W'($urandom_range(0, 2)), col: COL_W'($urandom), tag: TAG_W'(n_ddr_req)});
      n_ddr_req++;
    end
    ddr_req_valid = (ddrq.size() > 0);
    if (ddr_req_valid) ddr_req = ddrq[0];
    ddr_resp_ready = ($urandom_range(0, 4) != 0);
    // ---- interconnect: CPU requests go first into the channel, then GPU queue
    for (int c = 0; c < NC; c++) begin
      mc_req_valid[c] = 0;
      if (cpuq[c].size() > 0 && $urandom_range(0, 1) == 0) begin mc_req_valid[c] = 1; mc_req[c] = cpuq[c][0]; end
      else if (chq[c].size() > 0) begin mc_req_valid[c] = 1; mc_req[c] = chq[c][0]; end
      mc_resp_ready[c] = ($urandom_range(0, 9) != 0);
    end
    #1;
    // ---- observe
    for (int c = 0; c < NC; c++) begin
      if (mc_req_valid[c] && !mc_req_ready[c]) m_full++;
      if (mc_req_valid[c] && mc_req_ready[c]) begin
        if (mc_req[c].is_cpu) begin void'(cpuq[c].pop_front()); cpu_acc[c][int'(mc_req[c].tag)] = cyc; end
        else begin void'(chq[c].pop_front()); gpu_acc[c][int'(mc_req[c].tag)] = cyc; end
      end
      if (mc_resp_valid[c] && !mc_resp_ready[c]) m_rstall++;
      if (mc_resp_valid[c] && mc_resp_ready[c]) begin
        int t;
        t = int'(mc_resp_tag[c]);
        if (mc_resp_is_cpu[c]) begin
          int oldest_gpu;
          check(cpu_acc[c].exists(t), "unknown CPU reply");
          oldest_gpu = 1 << 30;
          foreach (gpu_acc[c][k]) if (gpu_acc[c][k] < oldest_gpu) oldest_gpu = gpu_acc[c][k];
          if (oldest_gpu < cpu_acc[c][t]) m_cpu_ahead++;
          cpu_acc[c].delete(t);
          n_cpu_resp++;
        end else begin
          int s, w;
          check(gpu_acc[c].exists(t), $sformatf("unknown or repeated GPU reply tag %0d", t));
          gpu_acc[c].delete(t);
          s = (t >> 6) & 7; w = t & 63;
          check(outstanding[s][w] == 1, "reply for a warp with no load pending");
          outstanding[s][w] = 0;
          wakeq[s].push_back(w);
          n_gpu_resp++;
        end
      end
    end
    if (ddr_req_valid && ddr_req_ready) void'(ddrq.pop_front());
    if (ddr_resp_valid && ddr_resp_ready) begin
      check(!ddr_seen.exists(int'(ddr_resp_tag)) && int'(ddr_resp_tag) < n_ddr_req, "DDR3 reply tag");
      ddr_seen[int'(ddr_resp_tag)] = 1;
      n_ddr_resp++;
    end
    for (int s = 0; s < NS; s++) begin
      // memory request leaving the SM: check its mapping, route it to a channel
      if (smq[s].size() > 0) begin
        sreq_t q;
        q = smq[s].pop_front();
        check(int'(sm_req_ch[s]) == int'(q.addr[12]), "channel of request");
        check(sm_req_local[s] == (q.target_sm == s), "local flag of request");
        check(sm_req_dram[s].tag == q.tag && sm_req_dram[s].row == q.addr[31:17], "mapped request fields");
        if (sm_req_local[s]) m_local++; else m_remote++;
        chq[sm_req_ch[s]].push_back(sm_req_dram[s]);
      end
      if (dispatch_valid[s]) begin
        check(int'(dispatch_tb_id[s]) == next_disp[s], $sformatf("SM%0d dispatched %0d expected %0d", s, dispatch_tb_id[s], next_disp[s]));
        next_disp[s]++;
        m_disp++;
      end
      if (promote[s]) m_prom++;
      if (demote[s]) m_dem++;
      if (issue_valid[s]) begin
        int w, t, k, g, key, tgt_g;
        w = int'(issue_warp[s]); t = int'(issue_tb_id[s]); k = int'(issue_wib[s]);
        check(run_valid[s] && issue_age[s] == run_age[s], "issued warp outside the running batch");
        check(t / BPS == s && k < WPB, "issued warp identity");
        if (!active[s][w]) begin active[s][w] = 1; ops_left[s][w] = 2 * NLOAD + 1; loads_done[s][w] = 0; end
        if (ops_left[s][w] == 1) begin
          issue_stall[s] = 1; exit_pend[s][w] = 1;
          key = t * 64 + k;
          check(!exited.exists(key), "warp exited twice");
          exited[key] = 1; n_exit++;
        end else if (ops_left[s][w] % 2 == 0) begin
          sreq_t q;
          issue_stall[s] = 1;
          g = t / STRIDE;
          tgt_g = g;
          if (t % STRIDE == STRIDE - 1 && k == WPB - 1 && loads_done[s][w] == NLOAD - 1 && g + 1 < NBLK / STRIDE)
            tgt_g = g + 1;
          q.addr = page_addr(tgt_g, (t % STRIDE) * 64 + k * 16 + loads_done[s][w]);
          q.tag = TAG_W'((s << 6) | w);
          q.target_sm = tgt_g / BATCH_PER_SM;
          smq[s].push_back(q);
          outstanding[s][w] = 1;
          loads_done[s][w]++;
          n_gpu_req++;
        end
        ops_left[s][w]--;
      end
    end
  end

  initial begin
    bit all_idle;
    wait (rst_n);
    wait (n_exit == NBLK * WPB);
    wait (n_cpu_resp == n_cpu_req && n_ddr_resp == n_ddr_req);
    repeat (20) @(negedge clk);
    all_idle = 1;
    for (int s = 0; s < NS; s++) begin
      all_idle &= sm_idle[s];
      check(next_disp[s] == s * BPS + BPS, "SM did not dispatch its whole range");
    end
    check(all_idle, "SMs not idle at the end");
    check(n_gpu_resp == n_gpu_req && n_gpu_req == NBLK * WPB * NLOAD, "GPU requests answered");
    check(n_cpu_resp == n_cpu_req, "CPU requests answered");
    $display("cycles %0d  GPU requests %0d  CPU requests %0d", cyc, n_gpu_req, n_cpu_req);
    $display("dispatch %0d promote %0d demote %0d local %0d remote %0d", m_disp, m_prom, m_dem, m_local, m_remote);
    $display("row hit %0d closed %0d conflict %0d  queue-full %0d reply-stall %0d cpu-ahead %0d",
             mc_n_hit[0] + mc_n_hit[1], mc_n_closed[0] + mc_n_closed[1], mc_n_conflict[0] + mc_n_conflict[1],
             m_full, m_rstall, m_cpu_ahead);
    $display("DDR3 requests %0d: row hit %0d closed %0d conflict %0d", n_ddr_req, ddr_n_hit, ddr_n_closed, ddr_n_conflict);
    check(ddr_n_hit + ddr_n_closed + ddr_n_conflict == 32'(n_ddr_req), "DDR3 accesses counted");
    check(ddr_n_hit > 0 && ddr_n_conflict > 0, "mechanism never seen: DDR3 row hit and conflict");
    check(m_disp == NBLK, "dispatch count");
    check(m_prom > 0, "mechanism never seen: batch promotion");
    check(m_dem > 0, "mechanism never seen: batch demotion");
    check(m_local > 0, "mechanism never seen: local access");
    check(m_remote > 0, "mechanism never seen: remote access");
    check(mc_n_hit[0] + mc_n_hit[1] > 0, "mechanism never seen: row hit");
    check(mc_n_closed[0] + mc_n_closed[1] > 0, "mechanism never seen: closed-bank access");
    check(mc_n_conflict[0] + mc_n_conflict[1] > 0, "mechanism never seen: row conflict");
    check(m_full > 0, "mechanism never seen: full request queue");
    check(m_rstall > 0, "mechanism never seen: reply stall");
    check(m_cpu_ahead > 0, "mechanism never seen: CPU request ahead of older GPU request");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (exits %0d of %0d, replies %0d of %0d)", n_exit, NBLK * WPB, n_gpu_resp, n_gpu_req);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
