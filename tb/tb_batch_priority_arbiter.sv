// tb_batch_priority_arbiter: random and directed checks of oldest-first
// promotion: the grant must be the eligible entry with the smallest age, the
// lowest index among equal ages, and no grant when nothing is eligible.
module tb_batch_priority_arbiter;
  localparam int N = 8, AGE_W = 16;
  logic             elig [N];
  logic [AGE_W-1:0] age  [N];
  logic             gv;
  logic [2:0]       gi;
  logic [AGE_W-1:0] ga;
  int checks = 0, failures = 0;

  batch_priority_arbiter #(.N(N), .AGE_W(AGE_W)) dut (
    .eligible(elig), .age, .grant_valid(gv), .grant_idx(gi), .grant_age(ga));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic evaluate();
    int best;
    #1;
    best = -1;
    for (int i = 0; i < N; i++)
      if (elig[i] && (best < 0 || age[i] < age[best])) best = i;
    if (best < 0) check(!gv, "grant with nothing eligible");
    else check(gv && int'(gi) == best && ga == age[best],
               $sformatf("grant %0d/%0d expected %0d", gv, gi, best));
  endtask

  initial begin
    // Fig. 9-like: four batches aged 0..3, oldest is chosen
    for (int i = 0; i < N; i++) begin elig[i] = 0; age[i] = AGE_W'(N - i); end
    evaluate();
    elig[3] = 1; elig[6] = 1; evaluate();
    elig[7] = 1; evaluate();
    age[2] = age[7]; elig[2] = 1; evaluate();   // tie -> lower index
    repeat (2000) begin
      for (int i = 0; i < N; i++) begin
        elig[i] = ($urandom_range(0, 2) == 0);
        age[i]  = AGE_W'($urandom_range(0, 20));
      end
      evaluate();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
