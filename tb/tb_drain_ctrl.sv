// tb_drain_ctrl: self-checking test of the pipeline-drain control.
// Each trial renames a barrier (sJMP / eosJMP) in cycle c, retires it a
// random a cycles later and holds the snapshot engine busy for a random b
// cycles after that. Expected: rename is stalled exactly in cycles
// c+1 .. c+a+b and free again in cycle c+a+b+1, and one drain start is
// reported per barrier. The first trial reproduces the paper's pipeline
// example (sJMP renamed in cycle 3, retired in 6, one SPM cycle, rename again
// in 8). Back-to-back barriers (one renamed in the first free cycle) are
// included.
module tb_drain_ctrl;
  logic clk = 0, rst_n = 0;
  logic barrier, retire, busy, stall, dstart;
  int checks = 0, failures = 0, n_drains = 0, n_back2back = 0;

  drain_ctrl dut (
    .clk(clk), .rst_n(rst_n), .rename_barrier_i(barrier), .barrier_retire_i(retire),
    .snap_busy_i(busy), .rename_stall_o(stall), .drain_start_o(dstart)
  );

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && dstart) n_drains++;

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s at %0t: got %0d expected %0d", what, $time, got, exp);
    end
  endtask

  // cycle-indexed trial: returns after the first free cycle (c+a+b+1),
  // leaving `barrier` set in that cycle when `chain` is 1
  task automatic trial(input int a, input int b, input bit chain);
    // cycle c (we are just after a negedge)
    barrier = 1; retire = 0; busy = 0;
    #1 check("no stall at barrier", stall, 0);
    for (int t = 1; t <= a + b + 1; t++) begin
      @(negedge clk);
      barrier = 0;
      retire  = (t == a);
      busy    = (t > a) && (t <= a + b);
      #1;
      check("stall window", stall, (t <= a + b) ? 1 : 0);
    end
    if (chain) begin
      barrier = 1; n_back2back++;
    end
  endtask

  initial begin
    barrier = 0; retire = 0; busy = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // Fig. 4 numbers: renamed 3, retired 6 (a = 3), one SPM cycle (b = 1):
    // stalled in 4..7, renaming again in 8 = c + a + b + 1
    trial(3, 1, 0);
    @(negedge clk); barrier = 0;
    for (int n = 0; n < 300; n++) begin
      trial($urandom_range(1, 12), $urandom_range(1, 20), 1'($urandom_range(0, 3) == 0));
      @(negedge clk);
      // when chained, the barrier was renamed in the free cycle: its own trial
      // therefore starts one cycle late; start a fresh drain here either way
      barrier = 0;
      #1;
      if (n_back2back > 0 && stall) begin
        // chained barrier: wait for a retire to clear it
        retire = 1; @(negedge clk); retire = 0;
        #1 check("chained drain retired", stall, 0);
      end
    end
    check("drains counted", n_drains, 301 + n_back2back);
    if (n_back2back == 0) begin failures++; $display("FAIL no back-to-back barrier"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
