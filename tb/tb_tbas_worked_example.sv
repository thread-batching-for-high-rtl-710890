// tb_tbas_worked_example: the four-batch walk-through of thread batch-aware
// scheduling, run on one SM front-end at its default size.
//
// One SM gets thread blocks 0..3, one block per thread batch (stride 1), two
// warps per block. Blocks 0 and 1 keep their data in row 0 of the SM's bank,
// blocks 2 and 3 in row 1 (two pages per row). Every warp runs: compute, load,
// compute, exit, and a load returns 6 cycles after issue. TBAS must run the
// batches in the order 0,1,0,1,2,3,2,3: after batch 1 stalls, batch 0 has its
// data back and, being the oldest, is promoted again ahead of batches 2 and 3.
// All loads of row 0 are issued before any load of row 1, so the bank switches
// rows once.
module tb_tbas_worked_example;
  import temp_pkg::*;
  localparam int NBLK = 4, WPB = 2, LAT = 6;
  localparam int WW = 6, CW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic load, issue_stall, wake_valid, exit_valid;
  logic [WW-1:0] wake_warp, exit_warp, issue_warp;
  logic issue_valid, dispatch_valid, promote, demote, run_valid, sm_idle;
  logic [TBID_W-1:0] issue_tb_id, dispatch_tb_id;
  logic [CW-1:0] issue_wib;
  logic [AGE_W-1:0] issue_age, run_age;
  int checks = 0, failures = 0;

  sm_frontend dut (
    .clk, .rst_n, .load, .load_head(TBID_W'(0)), .load_tail(TBID_W'(NBLK)),
    .load_stride(TBID_W'(1)), .warps_per_block(CW'(WPB)),
    .issue_stall, .wake_valid, .wake_warp, .exit_valid, .exit_warp,
    .issue_valid, .issue_warp, .issue_tb_id, .issue_wib, .issue_age,
    .dispatch_valid, .dispatch_tb_id, .promote, .demote, .run_valid, .run_age, .sm_idle);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  int step [64];              // next op of each warp: 0 C0, 1 load, 2 C1, 3 exit
  int wake_at [64];
  bit exit_pend [64];
  int batch_order [$];
  int row_seq [$];
  int cyc = 0, n_exit = 0, last_batch = -1;

  initial begin
    for (int w = 0; w < 64; w++) begin step[w] = 0; wake_at[w] = -1; exit_pend[w] = 0; end
    load = 0; issue_stall = 0; wake_valid = 0; exit_valid = 0; wake_warp = 0; exit_warp = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); load = 1;
    @(negedge clk); load = 0;
  end

  always @(negedge clk) if (rst_n && !load) begin
    cyc++;
    wake_valid = 0; exit_valid = 0; issue_stall = 0;
    for (int w = 0; w < 64; w++)
      if (exit_pend[w]) begin exit_valid = 1; exit_warp = WW'(w); exit_pend[w] = 0; break; end
    for (int w = 0; w < 64; w++)
      if (wake_at[w] >= 0 && wake_at[w] <= cyc) begin wake_valid = 1; wake_warp = WW'(w); wake_at[w] = -1; break; end
    #1;
    if (issue_valid) begin
      int w;
      w = int'(issue_warp);
      if (int'(issue_age) != last_batch) begin batch_order.push_back(int'(issue_age)); last_batch = int'(issue_age); end
      case (step[w])
        1: begin issue_stall = 1; wake_at[w] = cyc + LAT; row_seq.push_back(int'(issue_tb_id) / 2); end
        3: begin issue_stall = 1; exit_pend[w] = 1; n_exit++; end
        default: ;
      endcase
      step[w]++;
    end
  end

  initial begin
    automatic int exp_order [8] = '{0, 1, 0, 1, 2, 3, 2, 3};
    automatic int switches;
    wait (n_exit == NBLK * WPB);
    repeat (4) @(negedge clk);
    $display("batch order: %p", batch_order);
    $display("row of each load: %p", row_seq);
    check(batch_order.size() == 8, "number of running-batch changes");
    for (int i = 0; i < 8 && i < batch_order.size(); i++)
      check(batch_order[i] == exp_order[i], $sformatf("running batch %0d is %0d, expected %0d", i, batch_order[i], exp_order[i]));
    switches = 0;
    for (int i = 1; i < row_seq.size(); i++) if (row_seq[i] != row_seq[i - 1]) switches++;
    check(row_seq.size() == NBLK * WPB, "one load per warp");
    check(switches == 1, $sformatf("row switches %0d, expected 1", switches));
    check(sm_idle, "SM idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (exits %0d)", n_exit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
