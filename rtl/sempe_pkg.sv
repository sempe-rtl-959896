// sempe_pkg: sizes, types and helpers shared by the SeMPE (secure multi-path
// execution) extension blocks.
//
// The numbers follow the evaluated configuration: a Jump-Back Table / scratchpad
// deep enough for 30 nested secret branches, 48 architectural registers of 64
// bits, 64-bit addresses, and a scratchpad that moves 64 bytes per cycle
// (8 registers). The two snapshot "states" of one nesting level are the
// register values captured before the secure block (PRE) and after the
// not-taken path (POST_NT).
package sempe_pkg;

  // Paper defaults
  localparam int unsigned ADDR_W        = 64;  // x86_64 addresses, jbTable entry "size of a register (64 bits)"
  localparam int unsigned JBT_DEPTH     = 30;  // "up to 30 snapshots supported"
  localparam int unsigned NUM_ARCH_REGS = 48;  // "48 architectural registers"
  localparam int unsigned REG_W         = 64;
  localparam int unsigned SPM_BYTES_PER_CYCLE = 64; // "SPM throughput 64 Bytes/cycle R/W"

  // Which snapshot of a nesting level an SPM word belongs to.
  typedef enum logic {
    SNAP_PRE     = 1'b0,  // registers before entering the secure block
    SNAP_POST_NT = 1'b1   // registers after the not-taken path
  } snap_sel_e;

  // Which path of the innermost secure block is being executed.
  typedef enum logic {
    PATH_NT = 1'b0,
    PATH_T  = 1'b1
  } path_e;

  // Snapshot operations requested from the ArchRS controller.
  typedef enum logic [1:0] {
    OP_NONE     = 2'd0,
    OP_SAVE_ALL = 2'd1,  // at sJMP commit: all registers to PRE
    OP_FIRST    = 2'd2,  // at first eosJMP commit: save NT-modified, restore them from PRE
    OP_FINAL    = 2'd3   // at second eosJMP commit: rebuild the true-path state
  } snap_op_e;

  // x86 SecPrefix and eosJMP encoding (0x2e, 0x2e 0x90)
  localparam logic [7:0] SEC_PREFIX = 8'h2E;
  localparam logic [7:0] NOP_OPCODE = 8'h90;

endpackage
