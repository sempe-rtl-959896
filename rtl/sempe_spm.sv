// sempe_spm: the scratchpad memory (SPM) that holds the Architectural Register
// Snapshots of SeMPE, one snapshot per nesting level of secret branches.
//
// A snapshot at nesting level N holds
//   - PRE:     the architectural registers before entering the secure block,
//   - POST_NT: the architectural registers after the not-taken path,
//   - the T-modified and NT-modified bit-vectors, one bit per architectural
//     register, recording which registers each path wrote.
// The nesting level is the offset of the snapshot in the SPM.
//
// Register storage: one port, one access per cycle, either a read or a write of
// one chunk of REGS_PER_ACC registers (64 bytes per cycle at the defaults:
// 8 x 64-bit registers). Address = {level, snapshot, chunk}. A write carries a
// per-register enable so that only modified registers need be written. A read
// returns the chunk one cycle later on `rdata_o` (`rvalid_o`).
//
// Bit-vector storage: `mark_*` ORs a mask into the T or NT vector of one level
// (used both for retiring register writes and for folding an inner secure
// block's changes into its parent); `clear_*` zeroes both vectors of a level;
// `vec_level_i` reads both vectors of a level combinationally. A clear and a
// mark of the same level in one cycle: the clear wins for that level.
//
// From the paper: contents and layout of a snapshot (Fig. 4), 30 snapshots,
// 48 registers, 64 B/cycle throughput, nesting level as offset. This design's
// own choices: 1-cycle read latency, a single shared port, keeping the two
// bit-vectors in flip-flops beside the register array. The paper states both
// "216KB (up to 30 snapshots supported)" and "The total size of a snapshot ...
// is 7392 bytes"; with 48 x 64-bit registers two register states are 768 bytes
// plus 12 bytes of vectors, which this design stores (see the project notes).
module sempe_spm
  import sempe_pkg::*;
#(
  parameter int unsigned DEPTH        = JBT_DEPTH,
  parameter int unsigned NREGS        = NUM_ARCH_REGS,
  parameter int unsigned RW           = REG_W,
  parameter int unsigned BYTES_PER_CYCLE = SPM_BYTES_PER_CYCLE,
  localparam int unsigned REGS_PER_ACC = (BYTES_PER_CYCLE * 8) / RW,
  localparam int unsigned NCHUNK       = (NREGS + REGS_PER_ACC - 1) / REGS_PER_ACC,
  localparam int unsigned LW           = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned KW           = (NCHUNK > 1) ? $clog2(NCHUNK) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // register snapshot port
  input  logic                    req_i,
  input  logic                    we_i,
  input  logic [LW-1:0]           level_i,
  input  snap_sel_e               snap_i,
  input  logic [KW-1:0]           chunk_i,
  input  logic [REGS_PER_ACC-1:0] wmask_i,
  input  logic [RW-1:0]           wdata_i [REGS_PER_ACC],
  output logic [RW-1:0]           rdata_o [REGS_PER_ACC],
  output logic                    rvalid_o,
  // modified-register bit-vectors
  input  logic                    mark_i,
  input  logic [LW-1:0]           mark_level_i,
  input  path_e                   mark_path_i,
  input  logic [NREGS-1:0]        mark_mask_i,
  input  logic                    clear_i,
  input  logic [LW-1:0]           clear_level_i,
  input  logic [LW-1:0]           vec_level_i,
  output logic [NREGS-1:0]        t_vec_o,
  output logic [NREGS-1:0]        nt_vec_o
);

  localparam int unsigned WORDS = DEPTH * 2 * NCHUNK;

  logic [RW-1:0]    mem [WORDS][REGS_PER_ACC];
  logic [NREGS-1:0] t_vec  [DEPTH];
  logic [NREGS-1:0] nt_vec [DEPTH];

  logic [$clog2(WORDS)-1:0] addr;
  assign addr = $bits(addr)'((32'(level_i) * 2 + 32'(snap_i)) * NCHUNK + 32'(chunk_i));

  // register array (no reset: it is always written before it is read)
  always_ff @(posedge clk) begin
    if (req_i && we_i) begin
      for (int r = 0; r < REGS_PER_ACC; r++)
        if (wmask_i[r]) mem[addr][r] <= wdata_i[r];
    end
    if (req_i && !we_i) rdata_o <= mem[addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid_o <= 1'b0;
    else        rvalid_o <= req_i && !we_i;
  end

  // bit-vectors
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < DEPTH; l++) begin
        t_vec[l]  <= '0;
        nt_vec[l] <= '0;
      end
    end else begin
      if (mark_i) begin
        if (mark_path_i == PATH_T) t_vec[mark_level_i]  <= t_vec[mark_level_i]  | mark_mask_i;
        else                       nt_vec[mark_level_i] <= nt_vec[mark_level_i] | mark_mask_i;
      end
      if (clear_i) begin
        t_vec[clear_level_i]  <= '0;
        nt_vec[clear_level_i] <= '0;
      end
    end
  end

  assign t_vec_o  = t_vec[vec_level_i];
  assign nt_vec_o = nt_vec[vec_level_i];

  a_level_range: assert property (@(posedge clk) disable iff (!rst_n)
                                  req_i |-> (32'(level_i) < DEPTH && 32'(chunk_i) < NCHUNK))
    else $error("sempe_spm: access out of range");

endmodule
