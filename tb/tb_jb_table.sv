// tb_jb_table: self-checking test of the Jump-Back Table.
// A reference LIFO kept in the testbench follows the same random sequence of
// sJMP issue / execute / commit, eosJMP commit and squash events that the
// table sees, one event per cycle and within the issue rule. Before each clock
// edge the NextPC mux output, redirect, V2, first/second eosJMP, outcome,
// occupancy and overflow are compared with the reference. Directed phases
// fill the table to overflow and check that V2 blocks a nested sJMP until the
// previous one commits. Small depth (6) keeps the run short.
module tb_jb_table;
  import sempe_pkg::*;
  localparam int unsigned D  = 6;
  localparam int unsigned CW = $clog2(D + 1);

  logic clk = 0, rst_n = 0;
  logic issue, exec_, commit, eos, taken;
  logic [63:0] target, core_pc, next_pc;
  logic [CW-1:0] squash, count;
  logic redirect, v2, ovf, first, second, pop, top_taken, empty, full;
  int checks = 0, failures = 0;
  int n_redirect = 0, n_pop = 0, n_ovf = 0, n_squash = 0, n_v2_block = 0;

  jb_table #(.AW(64), .DEPTH(D)) dut (
    .clk(clk), .rst_n(rst_n),
    .sjmp_issue_i(issue), .sjmp_exec_i(exec_), .sjmp_target_i(target), .sjmp_taken_i(taken),
    .sjmp_commit_i(commit), .eos_commit_i(eos), .squash_cnt_i(squash),
    .core_next_pc_i(core_pc), .next_pc_o(next_pc), .redirect_o(redirect),
    .sjmp_v2_o(v2), .overflow_o(ovf), .eos_first_o(first), .eos_second_o(second),
    .pop_o(pop), .top_taken_o(top_taken), .count_o(count), .empty_o(empty), .full_o(full)
  );

  always #5 clk = ~clk;

  typedef struct { logic [63:0] addr; logic tk; logic jb; logic valid; logic executed; } ent_t;
  ent_t q[$];

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s at %0t: got %h expected %h", what, $time, got, exp);
    end
  endtask

  task automatic idle();
    issue = 0; exec_ = 0; commit = 0; eos = 0; squash = '0; taken = 0; target = '0;
    core_pc = {$urandom, $urandom};
  endtask

  // compare outputs with the reference for the event now applied, then clock
  task automatic step();
    logic ref_v2;
    #1;
    ref_v2 = (q.size() == 0) || q[$].valid;
    check("count", count, q.size());
    check("v2", v2, ref_v2);
    check("empty/full", {empty, full}, {q.size() == 0, q.size() == D});
    if (eos && q.size() > 0 && !q[$].jb) begin
      check("redirect", redirect, 1);
      check("next_pc jb", next_pc, q[$].addr);
      check("first/second", {first, second}, 2'b10);
    end else begin
      check("no redirect", redirect, 0);
      check("next_pc core", next_pc, core_pc);
      if (eos && q.size() > 0) check("first/second", {first, second}, 2'b01);
    end
    if (q.size() > 0 && q[$].executed) check("top taken", top_taken, q[$].tk);
    check("overflow", ovf, issue && q.size() == D);
    @(posedge clk);
    // reference update
    if (squash != 0) begin
      repeat (int'(squash)) void'(q.pop_back());
    end else begin
      if (commit) q[$].valid = 1;
      if (exec_) begin q[$].addr = target; q[$].tk = taken; q[$].executed = 1; end
      if (eos) begin
        if (!q[$].jb) q[$].jb = 1;
        else          void'(q.pop_back());
      end
    end
    if (issue && q.size() < D) q.push_back('{addr: 0, tk: 0, jb: 0, valid: 0, executed: 0});
    #1 idle();
  endtask

  initial begin
    idle();
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;

    // random protocol-legal traffic
    for (int n = 0; n < 4000; n++) begin
      int pick;
      pick = $urandom_range(0, 9);
      idle();
      if (q.size() == 0 || q[$].valid) begin
        if (pick < 4 && q.size() < D) issue = 1;
        else if (q.size() > 0) begin
          eos = 1;
          if (!q[$].jb) n_redirect++; else n_pop++;
        end else issue = 1;
      end else begin
        // newest entry not committed yet: exec, commit, or squash it
        if (!q[$].executed) begin
          if (pick < 2) begin squash = 1; n_squash++; end
          else begin exec_ = 1; target = {$urandom, $urandom}; taken = 1'($urandom); end
        end else begin
          if (pick == 0) begin squash = 1; n_squash++; end
          else commit = 1;
        end
        // try a nested issue while V2 is clear: must be blocked by the core
        if (pick == 9 && !issue) n_v2_block += (v2 == 0);
      end
      step();
    end

    // drain everything
    while (q.size() > 0) begin
      idle();
      if (!q[$].valid) squash = 1;
      else eos = 1;
      step();
    end

    // fill to overflow
    for (int i = 0; i < D; i++) begin
      idle(); issue = 1; step();
      idle(); exec_ = 1; target = 64'(i); taken = 1'(i); step();
      idle(); commit = 1; step();
    end
    idle(); issue = 1; n_ovf++; step();
    check("still full", count, D);
    // unwind: first/second eosJMP per level, addresses in LIFO order
    for (int i = D - 1; i >= 0; i--) begin
      idle(); eos = 1; step();
      idle(); eos = 1; step();
    end
    check("empty at end", count, 0);

    if (n_redirect == 0 || n_pop == 0 || n_squash == 0 || n_v2_block == 0) begin
      failures++;
      $display("FAIL coverage redirect=%0d pop=%0d squash=%0d v2block=%0d", n_redirect, n_pop, n_squash, n_v2_block);
    end
    $display("coverage redirect=%0d pop=%0d squash=%0d v2block=%0d overflow=%0d",
             n_redirect, n_pop, n_squash, n_v2_block, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
