// tb_block_launcher: drives the block launcher with a modelled dispatch queue and
// random warp retirement. Checks, against counts kept here: ids are popped in
// order; a pop happens exactly when the launcher is idle, the queue is not
// empty, a block slot is idle and enough warp slots are free; each block gets
// warps_per_block warps numbered 0.. in its own slot; a slot is freed with the
// last warp of its block; the warp limit is never exceeded; every block ends.
module tb_block_launcher;
  localparam int MAX_TB = 4, MAX_WARPS = 8, TBID_W = 16, AGE_W = 16;
  localparam int NBLK = 40, WPB = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              q_empty, q_pop;
  logic [TBID_W-1:0] q_tb_id;
  logic [AGE_W-1:0]  q_age;
  logic              exit_valid;
  logic [2:0]        exit_warp;
  logic              alloc_valid, busy;
  logic [2:0]        alloc_warp;
  logic              slot_valid [MAX_TB];
  logic [TBID_W-1:0] slot_tb_id [MAX_TB];
  logic [AGE_W-1:0]  slot_age   [MAX_TB];
  logic              warp_valid [MAX_WARPS];
  logic [1:0]        warp_slot  [MAX_WARPS];
  logic [3:0]        warp_wib   [MAX_WARPS];
  int checks = 0, failures = 0;

  block_launcher #(.MAX_TB(MAX_TB), .MAX_WARPS(MAX_WARPS)) dut (
    .clk, .rst_n, .warps_per_block(4'(WPB)),
    .q_empty, .q_tb_id, .q_age, .q_pop, .exit_valid, .exit_warp,
    .alloc_valid, .alloc_warp, .slot_valid, .slot_tb_id, .slot_age,
    .warp_valid, .warp_slot, .warp_wib, .busy);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int head = 0;
  assign q_empty = (head == NBLK);
  assign q_tb_id = TBID_W'(100 + head);
  assign q_age   = AGE_W'(head / 2);

  // model state
  int live_warps = 0, res_blocks = 0, done_blocks = 0, last_popped = -1;
  int blk_left [int];         // tb id -> warps not yet exited
  int alloc_cnt = 0, cur_tb = -1;
  bit mw [MAX_WARPS];         // model of live warp slots
  int mw_tb [MAX_WARPS];
  int mw_wib [MAX_WARPS];

  always @(negedge clk) if (rst_n) begin
    // choose a random live warp to retire
    exit_valid = 0;
    exit_warp = 0;
    if ($urandom_range(0, 2) == 0) begin
      int w;
      w = $urandom_range(0, MAX_WARPS - 1);
      if (mw[w]) begin exit_valid = 1; exit_warp = 3'(w); end
    end
  end

  always @(posedge clk) if (rst_n) begin
    bit can;
    can = !busy && !q_empty && (res_blocks < MAX_TB) && (MAX_WARPS - live_warps >= WPB);
    check(q_pop == can, $sformatf("pop=%0d expected %0d (blocks %0d warps %0d)", q_pop, can, res_blocks, live_warps));
    if (q_pop) begin
      check(int'(q_tb_id) == 100 + last_popped + 1, "ids popped out of order");
      last_popped = last_popped + 1;
      cur_tb = int'(q_tb_id);
      blk_left[cur_tb] = WPB;
      alloc_cnt = 0;
      res_blocks++;
      head <= head + 1;
    end
    if (alloc_valid) begin
      check(!mw[alloc_warp], "allocated a live warp slot");
      mw[alloc_warp] = 1;
      mw_tb[alloc_warp] = cur_tb;
      mw_wib[alloc_warp] = alloc_cnt;
      live_warps++;
      alloc_cnt++;
      check(alloc_cnt <= WPB, "too many warps for one block");
    end
    if (exit_valid) begin
      int t;
      t = mw_tb[exit_warp];
      mw[exit_warp] = 0;
      live_warps--;
      blk_left[t] = blk_left[t] - 1;
      if (blk_left[t] == 0) begin res_blocks--; done_blocks++; end
    end
    check(live_warps <= MAX_WARPS, "warp limit exceeded");
  end

  // every live warp: slot points at its block, index in block as allocated
  always @(negedge clk) if (rst_n) begin
    for (int w = 0; w < MAX_WARPS; w++) begin
      check(warp_valid[w] == mw[w], $sformatf("warp %0d live=%0d expected %0d", w, warp_valid[w], mw[w]));
      if (mw[w]) begin
        check(slot_valid[warp_slot[w]] && int'(slot_tb_id[warp_slot[w]]) == mw_tb[w],
              "warp slot does not point at its block");
        check(int'(slot_age[warp_slot[w]]) == (mw_tb[w] - 100) / 2, "slot age");
        check(int'(warp_wib[w]) == mw_wib[w], "warp index in block");
      end
    end
  end

  // slot freed exactly with its last warp
  always @(negedge clk) if (rst_n) begin
    int nv;
    nv = 0;
    for (int s = 0; s < MAX_TB; s++) nv += int'(slot_valid[s]);
    check(nv == res_blocks, $sformatf("resident blocks %0d expected %0d", nv, res_blocks));
  end

  initial begin
    exit_valid = 0; exit_warp = 0;
    for (int w = 0; w < MAX_WARPS; w++) mw[w] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done_blocks == NBLK);
    repeat (3) @(negedge clk);
    check(last_popped == NBLK - 1, "not every block was dispatched");
    check(!busy && live_warps == 0, "launcher not idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (done %0d)", done_blocks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
