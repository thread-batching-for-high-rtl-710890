// tb_frfcfs_mc: checks the channel controller with an 8-entry queue.
//  1. latency: closed bank T_RCD+T_CL+T_BURST, row hit T_CL+T_BURST, conflict
//     T_RP+T_RCD+T_CL+T_BURST cycles from acceptance to reply (12/12/12/2);
//  2. first-ready: behind a busy bank, a younger row hit is served before an
//     older row miss;
//  3. CPU first: an older GPU row hit waits for a younger CPU request;
//  4. queue full: req_ready drops after 8 waiting requests;
//  5. reply back-pressure: nothing is lost while resp_ready is low;
//  6. random traffic: every tag comes back exactly once; counters add up.
module tb_frfcfs_mc;
  import temp_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, resp_valid, resp_ready, resp_is_cpu, resp_is_write, cmd_valid;
  dram_req_t req;
  dram_cmd_t cmd;
  logic [TAG_W-1:0] resp_tag;
  logic [3:0] occ;
  logic [31:0] n_hit, n_closed, n_conflict;
  int checks = 0, failures = 0;

  frfcfs_mc #(.DEPTH(DEPTH)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .resp_valid, .resp_ready,
    .resp_tag, .resp_is_cpu, .resp_is_write, .cmd_valid, .dram_cmd(cmd), .occupancy(occ),
    .n_hit, .n_closed, .n_conflict);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int acc_cyc [int];
  int rsp_cyc [int];
  int order [$];
  int n_resp = 0;
  always @(posedge clk) if (rst_n && resp_valid && resp_ready) begin
    check(!rsp_cyc.exists(int'(resp_tag)), $sformatf("tag %0d returned twice", resp_tag));
    rsp_cyc[int'(resp_tag)] = cyc;
    order.push_back(int'(resp_tag));
    n_resp++;
  end

  task automatic send(bit cpu, int bank, int row, int tag);
    @(negedge clk);
    req_valid = 1;
    req = '{is_cpu: cpu, is_write: 1'(tag % 2), bank: BANK_W'(bank), row: ROW_W'(row), col: COL_W'(tag), tag: TAG_W'(tag)};
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    acc_cyc[tag] = cyc;
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic wait_tag(int tag);
    int t;
    t = 0;
    while (!rsp_cyc.exists(tag) && t < 2000) begin @(negedge clk); t++; end
    check(rsp_cyc.exists(tag), $sformatf("tag %0d never returned", tag));
  endtask

  function automatic int served_first(int a, int b);
    foreach (order[i]) begin
      if (order[i] == a) return 1;
      if (order[i] == b) return 0;
    end
    return 0;
  endfunction

  initial begin
    req_valid = 0; req = '0; resp_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. latency of the three row-buffer outcomes (+1: accepted, then selected)
    send(0, 0, 5, 1); wait_tag(1);
    check(rsp_cyc[1] - acc_cyc[1] == 1 + 12 + 12 + 2, $sformatf("closed-bank latency %0d", rsp_cyc[1] - acc_cyc[1]));
    send(0, 0, 5, 2); wait_tag(2);
    check(rsp_cyc[2] - acc_cyc[2] == 1 + 12 + 2, $sformatf("row-hit latency %0d", rsp_cyc[2] - acc_cyc[2]));
    send(0, 0, 6, 3); wait_tag(3);
    check(rsp_cyc[3] - acc_cyc[3] == 1 + 12 + 12 + 12 + 2, $sformatf("conflict latency %0d", rsp_cyc[3] - acc_cyc[3]));
    check(n_hit == 1 && n_closed == 1 && n_conflict == 1, "row outcome counters");
    // 2. first-ready: bank 1 busy on row 9; older miss (row 3) vs younger hit (row 9)
    send(0, 1, 9, 10); send(0, 1, 3, 11); send(0, 1, 9, 12);
    wait_tag(10); wait_tag(11); wait_tag(12);
    check(served_first(12, 11) == 1, "row hit not served before older row miss");
    // 3. CPU first: bank 2 busy; older GPU hit vs younger CPU miss
    send(0, 2, 7, 20); send(0, 2, 7, 21); send(1, 2, 8, 22);
    wait_tag(21); wait_tag(22);
    check(served_first(22, 21) == 1, "CPU request not served before older GPU row hit");
    // 4. queue full: bank 3 busy, fill with requests to bank 3
    send(0, 3, 1, 30);
    for (int i = 0; i < DEPTH; i++) send(0, 3, 2 + i, 31 + i);
    @(negedge clk); req_valid = 1; req.bank = 3; req.tag = 99; #1;
    check(!req_ready && occ == 4'(DEPTH), $sformatf("queue should be full (occ %0d)", occ));
    req_valid = 0;
    for (int i = 0; i <= DEPTH; i++) wait_tag(30 + i);
    // 5. back-pressure: two banks complete while replies are blocked
    resp_ready = 0;
    send(0, 4, 1, 40); send(0, 5, 1, 41);
    repeat (60) @(negedge clk);
    check(resp_valid && n_resp == 3 + 3 + 3 + DEPTH + 1, "reply held while resp_ready low");
    resp_ready = 1;
    wait_tag(40); wait_tag(41);
    // 6. random traffic
    fork
      for (int i = 0; i < 300; i++) send($urandom_range(0, 4) == 0, $urandom_range(0, 15), $urandom_range(0, 3), 100 + i);
      forever begin @(negedge clk); resp_ready = ($urandom_range(0, 3) != 0); end
    join_any
    for (int i = 0; i < 300; i++) wait_tag(100 + i);
    check(n_resp == 3 + 3 + 3 + DEPTH + 1 + 2 + 300, $sformatf("reply count %0d", n_resp));
    check(n_hit + n_closed + n_conflict == 32'(n_resp), "outcome counters do not add up");
    $display("hits %0d closed %0d conflicts %0d", n_hit, n_closed, n_conflict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
