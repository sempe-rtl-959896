// drain_ctrl: the pipeline-drain control of SeMPE.
//
// SeMPE drains the pipeline three times per secret branch: after the sJMP
// (before the secure block), after the first eosJMP (end of the not-taken
// path) and after the second eosJMP (end of the taken path). In each case the
// barrier instruction (the sJMP or eosJMP) is renamed, then renaming stops
// (`rename_stall_o`) while older instructions and the barrier itself retire,
// and stays stopped while the scratchpad save/restore that the barrier's
// retirement starts is running (`snap_busy_i`). Fetch and decode may continue
// meanwhile until their queues fill, as in an ordinary core.
//
// States: RUN -> (barrier renamed) WAIT_RETIRE -> (barrier retired)
// WAIT_SNAP -> (snapshot engine idle) RUN. Rename is stalled in WAIT_RETIRE
// and in WAIT_SNAP while the engine is busy, i.e. from the cycle after the
// barrier renamed until the first cycle the engine is idle again; in that
// cycle the next instruction renames. `drain_start_o` pulses in the cycle a
// drain begins.
//
// Timing, as in the paper's pipeline example (Fig. 4): barrier renamed in
// cycle c and retired in cycle r, engine busy in cycles r+1 .. r+b; the next
// instruction renames in cycle r+b+1 (the figure: sJMP retires in cycle 6,
// one "SPM latency" cycle 7, rename resumes in cycle 8).
//
// From the paper: where the three drains happen and that rename stops. This
// design's own choice: the handshake with the snapshot engine.
module drain_ctrl (
  input  logic clk,
  input  logic rst_n,
  input  logic rename_barrier_i,   // an sJMP or eosJMP is renamed this cycle
  input  logic barrier_retire_i,   // that sJMP / eosJMP retires this cycle
  input  logic snap_busy_i,        // scratchpad save/restore running
  output logic rename_stall_o,
  output logic drain_start_o
);

  typedef enum logic [1:0] {RUN, WAIT_RETIRE, WAIT_SNAP} dstate_e;
  dstate_e state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= RUN;
    else begin
      unique case (state)
        RUN:         if (rename_barrier_i) state <= WAIT_RETIRE;
        WAIT_RETIRE: if (barrier_retire_i) state <= WAIT_SNAP;
        WAIT_SNAP:   if (!snap_busy_i)     state <= rename_barrier_i ? WAIT_RETIRE : RUN;
        default:                           state <= RUN;
      endcase
    end
  end

  assign rename_stall_o = (state == WAIT_RETIRE) || (state == WAIT_SNAP && snap_busy_i);
  assign drain_start_o  = !rename_stall_o && rename_barrier_i;

  // Nothing is renamed while the pipeline drains.
  a_no_rename_in_drain: assert property (@(posedge clk) disable iff (!rst_n)
      rename_stall_o |-> !rename_barrier_i)
    else $error("drain_ctrl: barrier renamed during a drain");

endmodule
