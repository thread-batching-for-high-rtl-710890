// tb_dispatch_queue: self-checking test of the per-SM head/tail dispatch queue.
// Loads a range, pops it with random gaps, and checks every popped id and its
// batch ordinal against (head + i) and i / stride; checks empty at the end,
// that a pop on an empty queue changes nothing, and that a reload restarts.
module tb_dispatch_queue;
  localparam int TBID_W = 16, AGE_W = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load, pop, empty;
  logic [TBID_W-1:0] head, tail, stride, tb_id;
  logic [AGE_W-1:0] age;
  int checks = 0, failures = 0;

  dispatch_queue #(.TBID_W(TBID_W), .AGE_W(AGE_W)) dut (
    .clk, .rst_n, .load, .load_head(head), .load_tail(tail), .load_stride(stride),
    .pop, .empty, .tb_id, .batch_age(age));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run_range(int h, int t, int st);
    int i;
    @(negedge clk); load = 1; head = TBID_W'(h); tail = TBID_W'(t); stride = TBID_W'(st);
    @(negedge clk); load = 0;
    i = 0;
    while (i < t - h) begin
      check(!empty, "queue empty too early");
      check(tb_id == TBID_W'(h + i), $sformatf("tb_id %0d expected %0d", tb_id, h + i));
      check(age == AGE_W'(i / (st == 0 ? 1 : st)), $sformatf("age %0d expected %0d at i=%0d", age, i / (st == 0 ? 1 : st), i));
      pop = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (pop) i++;
      pop = 0;
    end
    check(empty, "queue not empty after the range");
    pop = 1; @(negedge clk); pop = 0;
    check(empty && tb_id == TBID_W'(t), "pop on empty queue moved the head");
  endtask

  initial begin
    load = 0; pop = 0; head = 0; tail = 0; stride = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(empty, "empty after reset");
    run_range(5, 17, 3);
    run_range(100, 140, 1);
    run_range(0, 24, 4);
    run_range(7, 15, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
