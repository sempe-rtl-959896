// archrs_ctrl: the Architectural Register Snapshot (ArchRS) sequencer of SeMPE.
// It removes the phantom register dependences between the two paths of a
// secret branch by saving and restoring architectural registers through the
// scratchpad memory (SPM), while the pipeline is drained.
//
// Three operations, one per pipeline drain, each at the current nesting level L:
//   sJMP commit      (OP_SAVE_ALL): every architectural register is copied to
//                    SPM[L].PRE; both modified vectors of L are cleared; the
//                    level's path becomes NT and the nesting depth grows.
//   1st eosJMP commit (OP_FIRST): registers the NT path modified are copied to
//                    SPM[L].POST_NT, then put back to their PRE values, so the
//                    taken path starts from the state before the secure block.
//                    The level's path becomes T.
//   2nd eosJMP commit (OP_FINAL): every register modified by either path is read
//                    back from both PRE and POST_NT and written to the register
//                    file. With the NT path true, a register the NT path wrote
//                    takes its POST_NT value and one only the T path wrote takes
//                    its PRE value. With the T path true, the register is
//                    rewritten with its own current value. The set of registers
//                    read and written, and the cycle count, depend only on the
//                    modified vectors, never on the outcome. The union of the
//                    two vectors is then folded into the parent level's vector
//                    of its current path, because to the parent the inner
//                    secure block is just code that wrote those registers.
// While idle, `commit_wmask_i` (architectural registers written by instructions
// retiring this cycle) is ORed into the innermost level's vector of its path.
//
// Data moves one chunk of REGS_PER_ACC registers per cycle (the SPM width).
// Chunks with no selected register are skipped. `busy_o` rises the cycle after
// the event; cycles from the event to `done_o` (the last busy cycle):
// SAVE_ALL = NCHUNK + 1; FIRST = 2 + 3n, n = chunks holding an NT-modified
// register (n writes, then a read and a register-file write per chunk);
// FINAL = 3 + 3m, m = chunks holding a register modified by either path (two
// SPM reads and one register-file write per chunk). Neither depends on the
// branch outcome.
//
// Register-file port: `arf_rd_chunk_o` selects a chunk and `arf_rd_data_i`
// returns it in the same cycle; `arf_wr_*` writes a chunk with a per-register
// mask at the clock edge. Saves stream register data straight from
// `arf_rd_data_i` to `spm_wdata_o` without a register stage, so synthesis of
// this module alone sees those 512 output bits as plain wires; the sequencer
// only chooses the chunk, the SPM address and the masks.
//
// From the paper: what is saved and when, the two bit-vectors, the restore rule
// for each outcome, reading every register modified in either path, the
// nesting level as SPM offset. This design's own choices: chunk-by-chunk
// sequencing and skipping, the cycle costs above, and folding an inner level's
// vectors into its parent (the paper does not say how nested blocks update the
// outer vectors).
module archrs_ctrl
  import sempe_pkg::*;
#(
  parameter int unsigned DEPTH           = JBT_DEPTH,
  parameter int unsigned NREGS           = NUM_ARCH_REGS,
  parameter int unsigned RW              = REG_W,
  parameter int unsigned BYTES_PER_CYCLE = SPM_BYTES_PER_CYCLE,
  localparam int unsigned REGS_PER_ACC   = (BYTES_PER_CYCLE * 8) / RW,
  localparam int unsigned NCHUNK         = (NREGS + REGS_PER_ACC - 1) / REGS_PER_ACC,
  localparam int unsigned LW             = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned KW             = (NCHUNK > 1) ? $clog2(NCHUNK) : 1,
  localparam int unsigned CW             = $clog2(DEPTH + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // events from the core / jbTable
  input  logic                    sjmp_commit_i,
  input  logic                    eos_first_i,
  input  logic                    eos_second_i,
  input  logic                    taken_i,        // T/NT of the level, valid with eos_second_i
  input  logic [NREGS-1:0]        commit_wmask_i,
  output logic                    busy_o,
  output logic                    done_o,
  output logic [CW-1:0]           depth_o,        // number of open secure blocks
  // architectural register file
  output logic [KW-1:0]           arf_rd_chunk_o,
  input  logic [RW-1:0]           arf_rd_data_i [REGS_PER_ACC],
  output logic                    arf_wr_en_o,
  output logic [KW-1:0]           arf_wr_chunk_o,
  output logic [REGS_PER_ACC-1:0] arf_wr_mask_o,
  output logic [RW-1:0]           arf_wr_data_o [REGS_PER_ACC],
  // SPM
  output logic                    spm_req_o,
  output logic                    spm_we_o,
  output logic [LW-1:0]           spm_level_o,
  output snap_sel_e               spm_snap_o,
  output logic [KW-1:0]           spm_chunk_o,
  output logic [REGS_PER_ACC-1:0] spm_wmask_o,
  output logic [RW-1:0]           spm_wdata_o [REGS_PER_ACC],
  input  logic [RW-1:0]           spm_rdata_i [REGS_PER_ACC],
  output logic                    spm_mark_o,
  output logic [LW-1:0]           spm_mark_level_o,
  output path_e                   spm_mark_path_o,
  output logic [NREGS-1:0]        spm_mark_mask_o,
  output logic                    spm_clear_o,
  output logic [LW-1:0]           spm_clear_level_o,
  output logic [LW-1:0]           spm_vec_level_o,
  input  logic [NREGS-1:0]        spm_t_vec_i,
  input  logic [NREGS-1:0]        spm_nt_vec_i
);

  localparam int unsigned PADREGS = NCHUNK * REGS_PER_ACC;

  typedef enum logic [3:0] {
    S_IDLE, S_SAVE_ALL, S_SAVE_NT, S_RST_RD, S_RST_WR,
    S_FIN_PRE, S_FIN_POST, S_FIN_WR, S_MERGE, S_DONE
  } state_e;

  state_e         state;
  logic [CW-1:0]  depth;
  logic [LW-1:0]  lvl;          // level of the running operation
  logic [KW:0]    k;            // chunk cursor (NCHUNK = past the end)
  logic           taken_q;
  path_e          path [DEPTH];
  logic [RW-1:0]  pre_q [REGS_PER_ACC];

  logic [PADREGS-1:0] t_pad, nt_pad, any_pad;
  logic [NCHUNK-1:0]  nt_sel, any_sel;
  logic [REGS_PER_ACC-1:0] valid_regs [NCHUNK];

  assign t_pad   = PADREGS'(spm_t_vec_i);
  assign nt_pad  = PADREGS'(spm_nt_vec_i);
  assign any_pad = t_pad | nt_pad;

  always_comb begin
    for (int c = 0; c < NCHUNK; c++) begin
      nt_sel[c]  = |nt_pad[c*REGS_PER_ACC +: REGS_PER_ACC];
      any_sel[c] = |any_pad[c*REGS_PER_ACC +: REGS_PER_ACC];
      for (int r = 0; r < REGS_PER_ACC; r++)
        valid_regs[c][r] = (c * REGS_PER_ACC + r) < NREGS;
    end
  end

  // first selected chunk at or after `from`, NCHUNK if none
  function automatic logic [KW:0] next_sel(input logic [NCHUNK-1:0] sel, input logic [KW:0] from);
    logic [KW:0] res;
    res = (KW+1)'(NCHUNK);
    for (int c = NCHUNK - 1; c >= 0; c--)
      if (sel[c] && c >= int'(from)) res = (KW+1)'(c);
    return res;
  endfunction

  logic [KW-1:0] kc;
  logic          kvalid;        // cursor points at a chunk (not the lookup cycle)
  assign kc     = k[KW-1:0];
  assign kvalid = (32'(k) < NCHUNK);

  assign busy_o          = (state != S_IDLE);
  assign depth_o         = depth;
  assign spm_vec_level_o = (state == S_IDLE) ? LW'(depth - 1'b1) : lvl;

  // datapath
  always_comb begin
    arf_rd_chunk_o    = kc;
    arf_wr_en_o       = 1'b0;
    arf_wr_chunk_o    = kc;
    arf_wr_mask_o     = '0;
    spm_req_o         = 1'b0;
    spm_we_o          = 1'b0;
    spm_level_o       = lvl;
    spm_snap_o        = SNAP_PRE;
    spm_chunk_o       = kc;
    spm_wmask_o       = '0;
    spm_mark_o        = 1'b0;
    spm_mark_level_o  = LW'(depth - 1'b1);
    spm_mark_path_o   = path[LW'(depth - 1'b1)];
    spm_mark_mask_o   = commit_wmask_i;
    spm_clear_o       = 1'b0;
    spm_clear_level_o = lvl;
    done_o            = 1'b0;
    for (int r = 0; r < REGS_PER_ACC; r++) begin
      spm_wdata_o[r]   = arf_rd_data_i[r];
      arf_wr_data_o[r] = spm_rdata_i[r];
    end

    unique case (state)
      S_IDLE: begin
        spm_mark_o = (depth != '0) && (commit_wmask_i != '0);
      end
      S_SAVE_ALL: begin
        if (k == '0) spm_clear_o = 1'b1;   // fresh vectors for this level
        spm_req_o   = 1'b1;
        spm_we_o    = 1'b1;
        spm_snap_o  = SNAP_PRE;
        spm_wmask_o = valid_regs[kc];
      end
      S_SAVE_NT: begin
        spm_req_o   = kvalid;
        spm_we_o    = 1'b1;
        spm_snap_o  = SNAP_POST_NT;
        spm_wmask_o = nt_pad[kc*REGS_PER_ACC +: REGS_PER_ACC];
      end
      S_RST_RD: begin
        spm_req_o  = 1'b1;
        spm_snap_o = SNAP_PRE;
      end
      S_RST_WR: begin
        arf_wr_en_o   = 1'b1;
        arf_wr_mask_o = nt_pad[kc*REGS_PER_ACC +: REGS_PER_ACC];
      end
      S_FIN_PRE: begin
        spm_req_o  = kvalid;
        spm_snap_o = SNAP_PRE;
      end
      S_FIN_POST: begin
        spm_req_o  = 1'b1;
        spm_snap_o = SNAP_POST_NT;
      end
      S_FIN_WR: begin
        arf_wr_en_o   = 1'b1;
        arf_wr_mask_o = any_pad[kc*REGS_PER_ACC +: REGS_PER_ACC];
        for (int r = 0; r < REGS_PER_ACC; r++) begin
          if (taken_q)                               arf_wr_data_o[r] = arf_rd_data_i[r];
          else if (nt_pad[kc*REGS_PER_ACC + r])      arf_wr_data_o[r] = spm_rdata_i[r];
          else                                       arf_wr_data_o[r] = pre_q[r];
        end
      end
      S_MERGE: begin
        // fold this level's changes into the parent's current path
        spm_mark_o       = (lvl != '0) && (any_pad != '0);
        spm_mark_level_o = lvl - 1'b1;
        spm_mark_path_o  = path[lvl - 1'b1];
        spm_mark_mask_o  = spm_t_vec_i | spm_nt_vec_i;
      end
      S_DONE: begin
        done_o      = 1'b1;
      end
      default: ;
    endcase
  end

  // sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      depth   <= '0;
      lvl     <= '0;
      k       <= '0;
      taken_q <= 1'b0;
      for (int l = 0; l < DEPTH; l++) path[l] <= PATH_NT;
      for (int r = 0; r < REGS_PER_ACC; r++) pre_q[r] <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          k <= '0;
          if (sjmp_commit_i) begin
            lvl   <= LW'(depth);
            state <= S_SAVE_ALL;
          end else if (eos_first_i) begin
            lvl   <= LW'(depth - 1'b1);
            state <= S_SAVE_NT;
            k     <= (KW+1)'(NCHUNK);   // resolved below once the level's vectors are visible
          end else if (eos_second_i) begin
            lvl     <= LW'(depth - 1'b1);
            taken_q <= taken_i;
            state   <= S_FIN_PRE;
            k       <= (KW+1)'(NCHUNK);
          end
        end
        S_SAVE_ALL: begin
          if (32'(k) == NCHUNK - 1) begin
            path[lvl] <= PATH_NT;
            depth     <= depth + 1'b1;
            state     <= S_DONE;
          end else begin
            k <= k + 1'b1;
          end
        end
        S_SAVE_NT: begin
          if (kvalid) begin
            if (32'(next_sel(nt_sel, k + 1'b1)) == NCHUNK) begin
              state <= S_RST_RD;
              k     <= next_sel(nt_sel, '0);
            end else begin
              k <= next_sel(nt_sel, k + 1'b1);
            end
          end else begin
            // lookup cycle: the level's vectors are now visible
            k <= next_sel(nt_sel, '0);
            if (nt_sel == '0) begin
              path[lvl] <= PATH_T;
              state     <= S_DONE;
            end
          end
        end
        S_RST_RD: state <= S_RST_WR;
        S_RST_WR: begin
          if (32'(next_sel(nt_sel, k + 1'b1)) == NCHUNK) begin
            path[lvl] <= PATH_T;
            state     <= S_DONE;
          end else begin
            k     <= next_sel(nt_sel, k + 1'b1);
            state <= S_RST_RD;
          end
        end
        S_FIN_PRE: begin
          if (kvalid) begin
            state <= S_FIN_POST;
          end else begin
            k <= next_sel(any_sel, '0);
            if (any_sel == '0) state <= S_MERGE;
          end
        end
        S_FIN_POST: begin
          pre_q <= spm_rdata_i;
          state <= S_FIN_WR;
        end
        S_FIN_WR: begin
          if (32'(next_sel(any_sel, k + 1'b1)) == NCHUNK) begin
            state <= S_MERGE;
          end else begin
            k     <= next_sel(any_sel, k + 1'b1);
            state <= S_FIN_PRE;
          end
        end
        S_MERGE: begin
          depth <= depth - 1'b1;
          state <= S_DONE;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Snapshot events arrive only while idle (the pipeline is drained).
  a_events_idle: assert property (@(posedge clk) disable iff (!rst_n)
      (sjmp_commit_i || eos_first_i || eos_second_i) |-> (state == S_IDLE))
    else $error("archrs_ctrl: snapshot event while busy");
  a_no_commit_busy: assert property (@(posedge clk) disable iff (!rst_n)
      (state != S_IDLE) |-> (commit_wmask_i == '0))
    else $error("archrs_ctrl: register retired during a snapshot operation");
  a_depth: assert property (@(posedge clk) disable iff (!rst_n)
      (eos_first_i || eos_second_i) |-> (depth != '0))
    else $error("archrs_ctrl: eosJMP without an open secure block");

endmodule
