// tb_archrs_ctrl: self-checking test of the ArchRS save/restore sequencer,
// run together with the scratchpad it drives.
// A register file of 48 x 64-bit registers lives in the testbench. Random
// nested secure regions (up to 4 deep) are executed: the not-taken path and
// then the taken path each write random registers (reported through
// commit_wmask) and may contain inner regions. A reference state, which is the
// state an ordinary core would reach running only the true paths, is kept
// alongside. Checked:
//   - after the first eosJMP every register is back at its value before the
//     secure block;
//   - after the second eosJMP every register holds the true-path value;
//   - each operation takes exactly the documented number of cycles
//     (save-all 7, first 2+3n, final 3+3m for n / m chunks touched), so the
//     final restore costs the same for either outcome.
module tb_archrs_ctrl;
  import sempe_pkg::*;
  localparam int unsigned N = NUM_ARCH_REGS, R = 8, NC = 6, MAXD = 4;

  logic clk = 0, rst_n = 0;
  logic sjmp_commit, eos_first, eos_second, taken, busy, done;
  logic [N-1:0] wmask;
  logic [4:0] depth;
  logic [2:0] arf_rd_chunk, arf_wr_chunk;
  logic [63:0] arf_rd_data [R], arf_wr_data [R];
  logic arf_wr_en;
  logic [R-1:0] arf_wr_mask;
  // SPM wiring
  logic spm_req, spm_we, spm_rvalid, spm_mark, spm_clear;
  logic [4:0] spm_level, spm_mark_level, spm_clear_level, spm_vec_level;
  snap_sel_e spm_snap;
  path_e spm_mark_path;
  logic [2:0] spm_chunk;
  logic [R-1:0] spm_wmask;
  logic [63:0] spm_wdata [R], spm_rdata [R];
  logic [N-1:0] spm_mark_mask, spm_t_vec, spm_nt_vec;

  int checks = 0, failures = 0;
  int n_nt_true = 0, n_t_true = 0, n_nested = 0, n_empty_path = 0;

  logic [63:0] arf [N];

  archrs_ctrl dut (
    .clk(clk), .rst_n(rst_n),
    .sjmp_commit_i(sjmp_commit), .eos_first_i(eos_first), .eos_second_i(eos_second),
    .taken_i(taken), .commit_wmask_i(wmask), .busy_o(busy), .done_o(done), .depth_o(depth),
    .arf_rd_chunk_o(arf_rd_chunk), .arf_rd_data_i(arf_rd_data), .arf_wr_en_o(arf_wr_en),
    .arf_wr_chunk_o(arf_wr_chunk), .arf_wr_mask_o(arf_wr_mask), .arf_wr_data_o(arf_wr_data),
    .spm_req_o(spm_req), .spm_we_o(spm_we), .spm_level_o(spm_level), .spm_snap_o(spm_snap),
    .spm_chunk_o(spm_chunk), .spm_wmask_o(spm_wmask), .spm_wdata_o(spm_wdata), .spm_rdata_i(spm_rdata),
    .spm_mark_o(spm_mark), .spm_mark_level_o(spm_mark_level), .spm_mark_path_o(spm_mark_path),
    .spm_mark_mask_o(spm_mark_mask), .spm_clear_o(spm_clear), .spm_clear_level_o(spm_clear_level),
    .spm_vec_level_o(spm_vec_level), .spm_t_vec_i(spm_t_vec), .spm_nt_vec_i(spm_nt_vec)
  );

  sempe_spm u_spm (
    .clk(clk), .rst_n(rst_n), .req_i(spm_req), .we_i(spm_we), .level_i(spm_level), .snap_i(spm_snap),
    .chunk_i(spm_chunk), .wmask_i(spm_wmask), .wdata_i(spm_wdata), .rdata_o(spm_rdata), .rvalid_o(spm_rvalid),
    .mark_i(spm_mark), .mark_level_i(spm_mark_level), .mark_path_i(spm_mark_path), .mark_mask_i(spm_mark_mask),
    .clear_i(spm_clear), .clear_level_i(spm_clear_level), .vec_level_i(spm_vec_level),
    .t_vec_o(spm_t_vec), .nt_vec_o(spm_nt_vec)
  );

  always #5 clk = ~clk;

  // behavioural architectural register file
  always_comb
    for (int r = 0; r < R; r++)
      arf_rd_data[r] = (int'(arf_rd_chunk) * R + r < N) ? arf[int'(arf_rd_chunk) * R + r] : 64'h0;

  logic        tb_we;
  logic [5:0]  tb_reg;
  logic [63:0] tb_val;
  always_ff @(posedge clk) begin
    if (arf_wr_en)
      for (int r = 0; r < R; r++)
        if (arf_wr_mask[r] && int'(arf_wr_chunk) * R + r < N) arf[int'(arf_wr_chunk) * R + r] <= arf_wr_data[r];
    if (tb_we) arf[tb_reg] <= tb_val;
  end

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s at %0t: got %h expected %h", what, $time, got, exp);
    end
  endtask

  typedef logic [63:0] state_t [N];

  function automatic int chunks_of(input logic [N-1:0] m);
    int c = 0;
    for (int k = 0; k < NC; k++) if (|m[k*R +: R]) c++;
    return c;
  endfunction

  // pulse one event, return cycles until done
  task automatic event_wait(input int which, input logic tk, output int cycles);
    @(negedge clk);
    sjmp_commit = (which == 0); eos_first = (which == 1); eos_second = (which == 2); taken = tk;
    @(negedge clk);
    sjmp_commit = 0; eos_first = 0; eos_second = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    @(negedge clk);
  endtask

  // one retiring register write
  task automatic write_reg(input int r, input logic [63:0] v, inout state_t st);
    @(negedge clk);
    tb_we = 1; tb_reg = 6'(r); tb_val = v; wmask = '0; wmask[r] = 1'b1;
    @(negedge clk);
    tb_we = 0; wmask = '0;
    st[r] = v;
  endtask

  task automatic compare_all(input string what, input state_t exp);
    for (int r = 0; r < N; r++) check(what, arf[r], exp[r]);
  endtask

  // a path: random register writes, maybe an inner region; mod collects writes
  task automatic run_path(input int lvl, inout state_t st, inout logic [N-1:0] mod);
    int nw;
    nw = $urandom_range(0, 6);
    if (nw == 0) n_empty_path++;
    for (int i = 0; i < nw; i++) begin
      int r;
      r = $urandom_range(0, N - 1);
      write_reg(r, {$urandom, $urandom}, st);
      mod[r] = 1'b1;
      if (lvl < MAXD && $urandom_range(0, 3) == 0) begin
        logic [N-1:0] inner;
        n_nested++;
        region(lvl + 1, st, inner);
        mod |= inner;
      end
    end
  endtask

  // a secure region; st is the true-path (ordinary) state, mod the registers
  // the whole region may have written (union over both paths)
  task automatic region(input int lvl, inout state_t st, output logic [N-1:0] mod);
    state_t pre, nt_st, t_st;
    logic [N-1:0] nt_mod, t_mod;
    logic tk;
    int cyc;
    tk = 1'($urandom);
    compare_all("entry state", st);
    pre = st;
    event_wait(0, 0, cyc);
    check("save-all cycles", cyc, NC + 1);
    check("depth after save", depth, lvl + 1);
    nt_st = pre; nt_mod = '0;
    run_path(lvl, nt_st, nt_mod);
    event_wait(1, 0, cyc);
    check("first cycles", cyc, 2 + 3 * chunks_of(nt_mod));
    compare_all("restored to pre", pre);
    t_st = pre; t_mod = '0;
    run_path(lvl, t_st, t_mod);
    event_wait(2, tk, cyc);
    check("final cycles", cyc, 3 + 3 * chunks_of(nt_mod | t_mod));
    check("depth after final", depth, lvl);
    st = tk ? t_st : nt_st;
    if (tk) n_t_true++; else n_nt_true++;
    compare_all("true-path state", st);
    mod = nt_mod | t_mod;
  endtask

  initial begin
    state_t st;
    logic [N-1:0] m;
    sjmp_commit = 0; eos_first = 0; eos_second = 0; taken = 0; wmask = '0;
    tb_we = 0; tb_reg = 0; tb_val = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < N; r++) begin arf[r] = {$urandom, $urandom}; st[r] = arf[r]; end
    for (int n = 0; n < 60; n++) begin
      // some ordinary code between regions
      write_reg($urandom_range(0, N - 1), {$urandom, $urandom}, st);
      region(0, st, m);
    end
    check("depth back to 0", depth, 0);
    if (n_nt_true == 0 || n_t_true == 0 || n_nested == 0 || n_empty_path == 0) begin
      failures++;
      $display("FAIL coverage");
    end
    $display("coverage nt_true=%0d t_true=%0d nested=%0d empty_paths=%0d", n_nt_true, n_t_true, n_nested, n_empty_path);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
