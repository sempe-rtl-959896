// jb_table: the Jump-Back Table (jbTable) of SeMPE, a LIFO with one entry per
// nested secret branch (sJMP) in flight.
//
// Each entry holds the sJMP destination address, the branch outcome (T/NT), a
// Jump-Back bit and a Valid bit. The life of an entry:
//   issue   (sjmp_issue_i)   a new entry is pushed with Valid = 0, Jump-Back = 0.
//                            An sJMP may issue only when the table is empty or the
//                            newest entry is Valid; `sjmp_v2_o` is that condition,
//                            meant to be copied into the issue-queue V2 bit of the
//                            sJMP. A push into a full table is refused and raises
//                            `overflow_o` (a run-time exception, e.g. recursion).
//   execute (sjmp_exec_i)    the computed destination address and the outcome are
//                            written into the newest entry.
//   commit  (sjmp_commit_i)  the newest entry becomes Valid.
//   eosJMP commit            the newest entry is looked up. If Jump-Back is clear,
//                            its address is steered onto the next PC through the
//                            NextPC mux (`redirect_o`, `next_pc_o`) and Jump-Back
//                            is set; otherwise the entry is removed (`pop_o`).
//   flush (squash_cnt_i)     one newest entry is deleted per squashed sJMP. Only
//                            entries that are not yet Valid (uncommitted sJMPs)
//                            can be squashed; an assertion checks this.
// The next PC mux selects the table address when an eosJMP commits and the
// newest Jump-Back bit is 0, and the core's own next address otherwise.
//
// Timing: `next_pc_o`, `redirect_o`, `eos_first_o`, `eos_second_o`, `top_*`
// are combinational from the current state and the eosJMP commit; all table
// updates take effect at the next clock edge. Reset empties the table.
//
// From the paper: the fields, LIFO order, the issue rule, Steps 1-6 and the
// flush rule. This design's own choices: the address and outcome are written at
// execute (Fig. 3 labels Step 1 "sJMP executed (destination address)") while
// the Valid bit is set at commit, so V2 waits for the previous sJMP to commit
// (the paper calls this both "executed" and "Valid bit set"); table-full is reported as an exception
// signal; operations in one cycle apply in the order squash, commit/eosJMP,
// execute, issue.
module jb_table
  import sempe_pkg::*;
#(
  parameter int unsigned AW    = ADDR_W,
  parameter int unsigned DEPTH = JBT_DEPTH,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // sJMP life cycle
  input  logic          sjmp_issue_i,
  input  logic          sjmp_exec_i,
  input  logic [AW-1:0] sjmp_target_i,
  input  logic          sjmp_taken_i,
  input  logic          sjmp_commit_i,
  input  logic          eos_commit_i,
  input  logic [CW-1:0] squash_cnt_i,
  // NextPC mux
  input  logic [AW-1:0] core_next_pc_i,
  output logic [AW-1:0] next_pc_o,
  output logic          redirect_o,
  // status
  output logic          sjmp_v2_o,
  output logic          overflow_o,
  output logic          eos_first_o,
  output logic          eos_second_o,
  output logic          pop_o,
  output logic          top_taken_o,
  output logic [CW-1:0] count_o,
  output logic          empty_o,
  output logic          full_o
);

  typedef struct packed {
    logic [AW-1:0] addr;
    logic          taken;
    logic          jb;
    logic          valid;
  } jbt_entry_t;

  jbt_entry_t      tbl [DEPTH];
  logic [CW-1:0]   cnt;
  jbt_entry_t      top;
  logic [CW-1:0]   cnt_sq;   // count after the squash

  assign empty_o = (cnt == '0);
  assign full_o  = (cnt == CW'(DEPTH));
  assign count_o = cnt;

  always_comb begin
    top = '0;
    if (!empty_o) top = tbl[cnt - 1'b1];
  end

  assign sjmp_v2_o    = empty_o || top.valid;
  assign eos_first_o  = eos_commit_i && !empty_o && !top.jb;
  assign eos_second_o = eos_commit_i && !empty_o &&  top.jb;
  assign pop_o        = eos_second_o;
  assign redirect_o   = eos_first_o;
  assign next_pc_o    = redirect_o ? top.addr : core_next_pc_i;
  assign top_taken_o  = top.taken;

  always_comb begin
    cnt_sq = (squash_cnt_i > cnt) ? '0 : cnt - squash_cnt_i;
  end

  // after squash and pop, is there room for a push?
  logic [CW-1:0] cnt_mid;
  always_comb begin
    cnt_mid = cnt_sq;
    if (eos_second_o && squash_cnt_i == '0) cnt_mid = cnt_sq - 1'b1;
  end
  assign overflow_o = sjmp_issue_i && (cnt_mid == CW'(DEPTH));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      for (int i = 0; i < DEPTH; i++) tbl[i] <= '0;
    end else begin
      if (squash_cnt_i == '0) begin
        if (sjmp_commit_i && !empty_o) tbl[cnt - 1'b1].valid <= 1'b1;
        if (eos_first_o)               tbl[cnt - 1'b1].jb    <= 1'b1;
        if (sjmp_exec_i && !empty_o) begin
          tbl[cnt - 1'b1].addr  <= sjmp_target_i;
          tbl[cnt - 1'b1].taken <= sjmp_taken_i;
        end
      end
      if (sjmp_issue_i && !overflow_o) begin
        tbl[cnt_mid] <= '{addr: '0, taken: 1'b0, jb: 1'b0, valid: 1'b0};
        cnt          <= cnt_mid + 1'b1;
      end else begin
        cnt <= cnt_mid;
      end
    end
  end

  // A squash may only remove uncommitted (not Valid) entries.
  property p_squash_uncommitted;
    @(posedge clk) disable iff (!rst_n)
      (squash_cnt_i != '0 && !empty_o) |-> !top.valid;
  endproperty
  a_squash_uncommitted: assert property (p_squash_uncommitted)
    else $error("jb_table: squash of a committed sJMP entry");

  // An sJMP may only issue when V2 is set.
  a_issue_v2: assert property (@(posedge clk) disable iff (!rst_n)
                               sjmp_issue_i |-> (sjmp_v2_o || squash_cnt_i != '0))
    else $error("jb_table: sJMP issued while V2 is clear");

endmodule
