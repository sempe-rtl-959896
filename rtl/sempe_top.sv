// sempe_top: the SeMPE (secure multi-path execution) extension of an
// out-of-order core. It makes a secret-dependent branch (sJMP) run both of its
// paths, not-taken path first, and commit both, so that neither the order of
// execution nor the branch predictor reveals the secret; the register state of
// the true path is rebuilt afterwards from scratchpad snapshots.
//
// Contents:
//   sempe_predecode  recognises sJMP (0x2e + Jcc) and eosJMP (0x2e 0x90) bytes
//                    and tells fetch to fall through without the predictor.
//   jb_table         Jump-Back Table (LIFO) with the NextPC mux and issue V2.
//   drain_ctrl       stops rename at each sJMP / eosJMP until it retires and
//                    its snapshot operation has finished.
//   archrs_ctrl      save / restore sequencer for architectural registers.
//   sempe_spm        scratchpad memory for the snapshots and modified vectors.
//
// The core itself (fetch, rename, issue queue, ROB, physical register file,
// branch predictor, caches) is outside this module and connects through the
// ports below:
//   fetch/decode  fetch_*  ->  dec_*         classification of the bytes at fetch_pc
//   rename        rename_barrier_i (an sJMP or eosJMP renames) -> rename_stall_o
//   issue         sjmp_issue_i, sjmp_v2_o (copy into the sJMP's V2 issue bit)
//   execute       sjmp_exec_i with the computed target and outcome
//   retire        sjmp_commit_i, eos_commit_i, commit_wmask_i (architectural
//                 registers written by the instructions retiring this cycle)
//   flush         squash_cnt_i = number of sJMPs squashed from the ROB
//   next PC       core_next_pc_i -> next_pc_o; redirect_o marks the jump back
//                 to the taken path (the core discards younger fetched work)
//   arch. regs    arf_* chunk read (combinational) / masked chunk write port,
//                 REGS_PER_ACC registers wide, used only while rename is stalled
// All state is reset by rst_n (asynchronous, active low).
module sempe_top
  import sempe_pkg::*;
#(
  parameter int unsigned AW              = ADDR_W,
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
  // fetch / decode
  input  logic                    fetch_valid_i,
  input  logic [AW-1:0]           fetch_pc_i,
  input  logic [7:0]              fetch_bytes_i [7],
  output logic                    dec_is_sjmp_o,
  output logic                    dec_is_eosjmp_o,
  output logic                    dec_bpred_bypass_o,
  output logic [3:0]              dec_length_o,
  output logic [AW-1:0]           dec_fallthru_pc_o,
  output logic [AW-1:0]           dec_target_pc_o,
  // rename
  input  logic                    rename_barrier_i,
  output logic                    rename_stall_o,
  output logic                    drain_start_o,
  // issue / execute
  input  logic                    sjmp_issue_i,
  output logic                    sjmp_v2_o,
  output logic                    jbt_overflow_o,
  input  logic                    sjmp_exec_i,
  input  logic [AW-1:0]           sjmp_target_i,
  input  logic                    sjmp_taken_i,
  // retire / flush
  input  logic                    sjmp_commit_i,
  input  logic                    eos_commit_i,
  input  logic [NREGS-1:0]        commit_wmask_i,
  input  logic [CW-1:0]           squash_cnt_i,
  // next PC
  input  logic [AW-1:0]           core_next_pc_i,
  output logic [AW-1:0]           next_pc_o,
  output logic                    redirect_o,
  // architectural register file
  output logic [KW-1:0]           arf_rd_chunk_o,
  input  logic [RW-1:0]           arf_rd_data_i [REGS_PER_ACC],
  output logic                    arf_wr_en_o,
  output logic [KW-1:0]           arf_wr_chunk_o,
  output logic [REGS_PER_ACC-1:0] arf_wr_mask_o,
  output logic [RW-1:0]           arf_wr_data_o [REGS_PER_ACC],
  // status
  output logic [CW-1:0]           jbt_count_o,
  output logic [CW-1:0]           secblock_depth_o,
  output logic                    snap_busy_o
);

  // ---------------- decode ----------------
  logic dec_plain_jcc;
  sempe_predecode #(.AW(AW)) u_predecode (
    .valid_i        (fetch_valid_i),
    .pc_i           (fetch_pc_i),
    .bytes_i        (fetch_bytes_i),
    .is_sjmp_o      (dec_is_sjmp_o),
    .is_eosjmp_o    (dec_is_eosjmp_o),
    .is_plain_jcc_o (dec_plain_jcc),
    .bpred_bypass_o (dec_bpred_bypass_o),
    .length_o       (dec_length_o),
    .fallthru_pc_o  (dec_fallthru_pc_o),
    .target_pc_o    (dec_target_pc_o)
  );

  // ---------------- jump-back table ----------------
  logic eos_first, eos_second, jbt_pop, top_taken, jbt_empty, jbt_full;
  jb_table #(.AW(AW), .DEPTH(DEPTH)) u_jbt (
    .clk            (clk),
    .rst_n          (rst_n),
    .sjmp_issue_i   (sjmp_issue_i),
    .sjmp_exec_i    (sjmp_exec_i),
    .sjmp_target_i  (sjmp_target_i),
    .sjmp_taken_i   (sjmp_taken_i),
    .sjmp_commit_i  (sjmp_commit_i),
    .eos_commit_i   (eos_commit_i),
    .squash_cnt_i   (squash_cnt_i),
    .core_next_pc_i (core_next_pc_i),
    .next_pc_o      (next_pc_o),
    .redirect_o     (redirect_o),
    .sjmp_v2_o      (sjmp_v2_o),
    .overflow_o     (jbt_overflow_o),
    .eos_first_o    (eos_first),
    .eos_second_o   (eos_second),
    .pop_o          (jbt_pop),
    .top_taken_o    (top_taken),
    .count_o        (jbt_count_o),
    .empty_o        (jbt_empty),
    .full_o         (jbt_full)
  );

  // ---------------- snapshot engine and SPM ----------------
  logic                    spm_req, spm_we, spm_rvalid;
  logic [LW-1:0]           spm_level;
  snap_sel_e               spm_snap;
  logic [KW-1:0]           spm_chunk;
  logic [REGS_PER_ACC-1:0] spm_wmask;
  logic [RW-1:0]           spm_wdata [REGS_PER_ACC];
  logic [RW-1:0]           spm_rdata [REGS_PER_ACC];
  logic                    spm_mark, spm_clear;
  logic [LW-1:0]           spm_mark_level, spm_clear_level, spm_vec_level;
  path_e                   spm_mark_path;
  logic [NREGS-1:0]        spm_mark_mask, spm_t_vec, spm_nt_vec;
  logic                    snap_done;

  archrs_ctrl #(.DEPTH(DEPTH), .NREGS(NREGS), .RW(RW), .BYTES_PER_CYCLE(BYTES_PER_CYCLE)) u_archrs (
    .clk               (clk),
    .rst_n             (rst_n),
    .sjmp_commit_i     (sjmp_commit_i),
    .eos_first_i       (eos_first),
    .eos_second_i      (eos_second),
    .taken_i           (top_taken),
    .commit_wmask_i    (commit_wmask_i),
    .busy_o            (snap_busy_o),
    .done_o            (snap_done),
    .depth_o           (secblock_depth_o),
    .arf_rd_chunk_o    (arf_rd_chunk_o),
    .arf_rd_data_i     (arf_rd_data_i),
    .arf_wr_en_o       (arf_wr_en_o),
    .arf_wr_chunk_o    (arf_wr_chunk_o),
    .arf_wr_mask_o     (arf_wr_mask_o),
    .arf_wr_data_o     (arf_wr_data_o),
    .spm_req_o         (spm_req),
    .spm_we_o          (spm_we),
    .spm_level_o       (spm_level),
    .spm_snap_o        (spm_snap),
    .spm_chunk_o       (spm_chunk),
    .spm_wmask_o       (spm_wmask),
    .spm_wdata_o       (spm_wdata),
    .spm_rdata_i       (spm_rdata),
    .spm_mark_o        (spm_mark),
    .spm_mark_level_o  (spm_mark_level),
    .spm_mark_path_o   (spm_mark_path),
    .spm_mark_mask_o   (spm_mark_mask),
    .spm_clear_o       (spm_clear),
    .spm_clear_level_o (spm_clear_level),
    .spm_vec_level_o   (spm_vec_level),
    .spm_t_vec_i       (spm_t_vec),
    .spm_nt_vec_i      (spm_nt_vec)
  );

  sempe_spm #(.DEPTH(DEPTH), .NREGS(NREGS), .RW(RW), .BYTES_PER_CYCLE(BYTES_PER_CYCLE)) u_spm (
    .clk           (clk),
    .rst_n         (rst_n),
    .req_i         (spm_req),
    .we_i          (spm_we),
    .level_i       (spm_level),
    .snap_i        (spm_snap),
    .chunk_i       (spm_chunk),
    .wmask_i       (spm_wmask),
    .wdata_i       (spm_wdata),
    .rdata_o       (spm_rdata),
    .rvalid_o      (spm_rvalid),
    .mark_i        (spm_mark),
    .mark_level_i  (spm_mark_level),
    .mark_path_i   (spm_mark_path),
    .mark_mask_i   (spm_mark_mask),
    .clear_i       (spm_clear),
    .clear_level_i (spm_clear_level),
    .vec_level_i   (spm_vec_level),
    .t_vec_o       (spm_t_vec),
    .nt_vec_o      (spm_nt_vec)
  );

  // ---------------- pipeline drain ----------------
  drain_ctrl u_drain (
    .clk              (clk),
    .rst_n            (rst_n),
    .rename_barrier_i (rename_barrier_i),
    .barrier_retire_i (sjmp_commit_i || eos_commit_i),
    .snap_busy_i      (snap_busy_o),
    .rename_stall_o   (rename_stall_o),
    .drain_start_o    (drain_start_o)
  );

  // Every open secure block has a Valid jbTable entry: the snapshot depth
  // follows the number of committed sJMPs still in the table.
  a_depth_le_count: assert property (@(posedge clk) disable iff (!rst_n)
      !snap_busy_o |-> (secblock_depth_o <= jbt_count_o))
    else $error("sempe_top: more open snapshots than jbTable entries");

  // Signals kept for observation only.
  logic unused;
  assign unused = ^{dec_plain_jcc, jbt_pop, jbt_empty, jbt_full, snap_done, spm_rvalid};

endmodule
