// tb_sempe_top: end-to-end test of the SeMPE unit at its default size
// (30-deep Jump-Back Table and scratchpad, 48 x 64-bit architectural
// registers, 64-bit addresses, 64 bytes per scratchpad access).
//
// A small in-order behavioural core in this testbench fetches a program from a
// byte-addressed instruction list, feeds the bytes to the unit's predecoder,
// and drives rename, sJMP issue / execute / commit, eosJMP commit and register
// retirement, honouring `rename_stall_o` and `sjmp_v2_o`. It follows the
// unit's next PC at every eosJMP. Its architectural register file is written
// both by its own instructions and by the unit's restore port.
//
// The program has the shape of the paper's microbenchmark: per iteration one
// secret branch whose not-taken path is a workload and whose taken path holds
// the next secret branch, W levels deep, the innermost one choosing between
// workloads W and W+1. Secret conditions come from registers 36..(36+W-1).
// Workloads are short chains of register-to-register operations writing
// overlapping registers, so both paths create phantom register dependences.
//
// Checks, for W = 1, 3 and 10 and several secret values each:
//   - final registers equal those of a plain interpreter running the program
//     with sJMP as an ordinary branch and eosJMP as a NOP;
//   - the committed-PC trace and the total cycle count are identical for all
//     secret values (the order and timing of execution do not depend on the
//     secret);
//   - predecode classification and sJMP targets.
// A last phase nests 30 sJMPs (the table's full depth), shows that a 31st
// raises the overflow exception, and unwinds all 30 levels.
// Mechanisms counted (each must occur): pipeline drains, jump-back redirects,
// NT-true and T-true restores, nesting deeper than one, sJMP squash, nested
// sJMP blocked by V2, table overflow.
module tb_sempe_top;
  import sempe_pkg::*;
  localparam int unsigned N = 48, R = 8, D = 30;

  logic clk = 0, rst_n = 0;
  // DUT ports
  logic        fetch_valid;
  logic [63:0] fetch_pc;
  logic [7:0]  fetch_bytes [7];
  logic        dec_sjmp, dec_eos, dec_bypass;
  logic [3:0]  dec_len;
  logic [63:0] dec_ft, dec_tgt;
  logic        barrier, stall, dstart;
  logic        issue, v2, ovf, exec_, taken_in, commit, eos;
  logic [63:0] target_in, core_pc, next_pc;
  logic [N-1:0] wmask;
  logic [4:0]  squash;
  logic        redirect;
  logic [2:0]  arf_rd_chunk, arf_wr_chunk;
  logic [63:0] arf_rd_data [R], arf_wr_data [R];
  logic        arf_wr_en;
  logic [R-1:0] arf_wr_mask;
  logic [4:0]  jbt_count, sb_depth;
  logic        snap_busy;

  sempe_top dut (
    .clk(clk), .rst_n(rst_n),
    .fetch_valid_i(fetch_valid), .fetch_pc_i(fetch_pc), .fetch_bytes_i(fetch_bytes),
    .dec_is_sjmp_o(dec_sjmp), .dec_is_eosjmp_o(dec_eos), .dec_bpred_bypass_o(dec_bypass),
    .dec_length_o(dec_len), .dec_fallthru_pc_o(dec_ft), .dec_target_pc_o(dec_tgt),
    .rename_barrier_i(barrier), .rename_stall_o(stall), .drain_start_o(dstart),
    .sjmp_issue_i(issue), .sjmp_v2_o(v2), .jbt_overflow_o(ovf),
    .sjmp_exec_i(exec_), .sjmp_target_i(target_in), .sjmp_taken_i(taken_in),
    .sjmp_commit_i(commit), .eos_commit_i(eos), .commit_wmask_i(wmask), .squash_cnt_i(squash),
    .core_next_pc_i(core_pc), .next_pc_o(next_pc), .redirect_o(redirect),
    .arf_rd_chunk_o(arf_rd_chunk), .arf_rd_data_i(arf_rd_data), .arf_wr_en_o(arf_wr_en),
    .arf_wr_chunk_o(arf_wr_chunk), .arf_wr_mask_o(arf_wr_mask), .arf_wr_data_o(arf_wr_data),
    .jbt_count_o(jbt_count), .secblock_depth_o(sb_depth), .snap_busy_o(snap_busy)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_drain = 0, n_redirect = 0, n_nt_true = 0, n_t_true = 0, n_deep = 0;
  int n_squash = 0, n_v2_block = 0, n_ovf = 0;

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t: got %h expected %h", what, $time, got, exp);
    end
  endtask

  always @(posedge clk) if (rst_n && dstart) n_drain++;
  always @(posedge clk) if (rst_n && sb_depth > 1) n_deep++;

  // ---------------- architectural register file ----------------
  logic [63:0] arf [N];
  logic        core_we;
  logic [5:0]  core_rd;
  logic [63:0] core_val;
  always_comb
    for (int r = 0; r < R; r++)
      arf_rd_data[r] = (int'(arf_rd_chunk) * R + r < N) ? arf[int'(arf_rd_chunk) * R + r] : 64'h0;
  always_ff @(posedge clk) begin
    if (arf_wr_en)
      for (int r = 0; r < R; r++)
        if (arf_wr_mask[r] && int'(arf_wr_chunk) * R + r < N) arf[int'(arf_wr_chunk) * R + r] <= arf_wr_data[r];
    if (core_we) arf[core_rd] <= core_val;
  end

  // ---------------- program ----------------
  typedef enum logic [2:0] {I_ALU, I_SJMP, I_EOS, I_JMP, I_HALT} itype_e;
  typedef struct {
    itype_e      t;
    logic [5:0]  rd, rs;
    logic [15:0] imm;
    logic [63:0] pc, target;
    int          len;
  } instr_t;
  instr_t prog[$];
  int     at_pc[longint];
  localparam logic [63:0] BASE = 64'h0000_0000_0040_0000;

  function automatic logic [63:0] next_free_pc();
    if (prog.size() == 0) return BASE;
    return prog[$].pc + 64'(prog[$].len);
  endfunction

  function automatic int emit(input itype_e t, input int rd, input int rs, input int imm);
    instr_t i;
    i.t = t; i.rd = 6'(rd); i.rs = 6'(rs); i.imm = 16'(imm);
    i.pc = next_free_pc(); i.target = 0;
    case (t)
      I_ALU:  i.len = 4;
      I_SJMP: i.len = 7;
      I_EOS:  i.len = 2;
      I_JMP:  i.len = 5;
      default: i.len = 1;
    endcase
    prog.push_back(i);
    at_pc[longint'(i.pc)] = prog.size() - 1;
    return prog.size() - 1;
  endfunction

  function automatic void workload(input int w);
    int n = 3 + (w % 3);
    for (int j = 0; j < n; j++)
      void'(emit(I_ALU, (w * 5 + j * 7) % 32, (w * 3 + j) % 32, w * 16 + j + 1));
  endfunction

  // secret branch at nesting level lvl (0-based) of a W-deep chain
  function automatic void sregion(input int lvl, input int W);
    int sj, jp;
    sj = emit(I_SJMP, 0, 36 + lvl, 0);
    workload(lvl + 1);                       // not-taken path
    jp = emit(I_JMP, 0, 0, 0);
    prog[sj].target = next_free_pc();        // taken path starts here
    if (lvl < W - 1) sregion(lvl + 1, W);
    else             workload(W + 1);
    prog[jp].target = next_free_pc();        // join point
    void'(emit(I_EOS, 0, 0, 0));
  endfunction

  function automatic void build(input int W, input int iters);
    prog.delete(); at_pc.delete();
    for (int i = 0; i < iters; i++) begin
      void'(emit(I_ALU, 32 + (i % 4), 32 + ((i + 1) % 4), i + 3));  // non-secret code
      sregion(0, W);
    end
    void'(emit(I_HALT, 0, 0, 0));
  endfunction

  function automatic void encode(input instr_t i, output logic [7:0] b [7]);
    logic [31:0] rel;
    for (int k = 0; k < 7; k++) b[k] = 8'h00;
    case (i.t)
      I_ALU:  begin b[0] = 8'h48; b[1] = 8'h01; b[2] = {2'b0, i.rd}; b[3] = {2'b0, i.rs}; end
      I_SJMP: begin
        rel = 32'(i.target - (i.pc + 7));
        b[0] = 8'h2e; b[1] = 8'h0f; b[2] = 8'h85;
        b[3] = rel[7:0]; b[4] = rel[15:8]; b[5] = rel[23:16]; b[6] = rel[31:24];
      end
      I_EOS:  begin b[0] = 8'h2e; b[1] = 8'h90; end
      I_JMP:  begin b[0] = 8'he9; end
      default: b[0] = 8'hf4;
    endcase
  endfunction

  function automatic logic [63:0] alu(input logic [63:0] a, input logic [15:0] imm);
    return (a * 64'd3) ^ {48'h0, imm} ^ (a >> 7);
  endfunction

  // plain interpreter: ordinary branch semantics
  typedef logic [63:0] state_t [N];
  function automatic void interpret(inout state_t st);
    logic [63:0] pc = BASE;
    int guard = 0;
    while (guard++ < 1000000) begin
      instr_t i = prog[at_pc[longint'(pc)]];
      case (i.t)
        I_ALU:  begin st[i.rd] = alu(st[i.rs], i.imm); pc = i.pc + 64'(i.len); end
        I_SJMP: pc = st[i.rs][0] ? i.target : i.pc + 64'(i.len);
        I_EOS:  pc = i.pc + 64'(i.len);
        I_JMP:  pc = i.target;
        default: return;
      endcase
    end
  endfunction

  task automatic idle();
    fetch_valid = 0; barrier = 0; issue = 0; exec_ = 0; commit = 0; eos = 0;
    wmask = '0; squash = '0; core_we = 0; taken_in = 0; target_in = '0; core_pc = '0;
  endtask

  task automatic wait_rename();
    while (stall) @(negedge clk);
  endtask

  // run the loaded program on the unit; returns cycles and PC-trace hash
  task automatic run(output int cycles, output logic [63:0] trace);
    logic [63:0] pc;
    logic [63:0] jb_expect [$];   // taken-path address per open secure block
    int steps = 0;
    int t0;
    pc = BASE; trace = 64'hcbf29ce484222325;
    t0 = $time;
    forever begin
      instr_t i;
      logic [7:0] b [7];
      i = prog[at_pc[longint'(pc)]];
      trace = (trace ^ pc) * 64'h100000001b3;
      // fetch / predecode
      encode(i, b);
      fetch_valid = 1; fetch_pc = pc; fetch_bytes = b;
      #1;
      check("dec sjmp", dec_sjmp, i.t == I_SJMP);
      check("dec eos", dec_eos, i.t == I_EOS);
      check("dec bypass", dec_bypass, i.t == I_SJMP || i.t == I_EOS);
      if (i.t == I_SJMP) check("dec target", dec_tgt, i.target);
      if (i.t == I_HALT) break;
      @(negedge clk); idle();
      wait_rename();
      case (i.t)
        I_ALU: begin
          core_we = 1; core_rd = i.rd; core_val = alu(arf[i.rs], i.imm);
          wmask[i.rd] = 1'b1;
          @(negedge clk); idle();
          pc = i.pc + 64'(i.len);
        end
        I_JMP: begin
          @(negedge clk); idle();
          pc = i.target;
        end
        I_SJMP: begin
          logic sec;
          sec = arf[i.rs][0];
          barrier = 1;
          @(negedge clk); idle();
          #1 check("v2 before issue", v2, 1);
          issue = 1;
          @(negedge clk); idle();
          if ((at_pc[longint'(i.pc)] % 5) == 1) begin
            // an older mispredicted (public) branch squashes the issued sJMP,
            // which is refetched and reissued; placed by program position
            squash = 1; n_squash++;
            @(negedge clk); idle();
            issue = 1;
            @(negedge clk); idle();
          end
          #1;
          // a nested sJMP could not issue now: V2 stays clear until commit
          check("v2 clear while pending", v2, 0);
          n_v2_block++;
          exec_ = 1; target_in = dec_tgt_saved(i); taken_in = sec;
          @(negedge clk); idle();
          commit = 1;
          @(negedge clk); idle();
          jb_expect.push_back(i.target);
          pc = i.pc + 64'(i.len);          // not-taken path first, whatever the secret
        end
        I_EOS: begin
          barrier = 1;
          @(negedge clk); idle();
          eos = 1; core_pc = i.pc + 64'(i.len);
          #1;
          if (redirect) begin
            n_redirect++;
            check("jump-back address", next_pc, jb_expect[$]);
            pc = next_pc;
          end else begin
            check("eos fallthrough", next_pc, i.pc + 64'(i.len));
            if (dut.u_jbt.top_taken_o) n_t_true++; else n_nt_true++;
            void'(jb_expect.pop_back());
            pc = next_pc;
          end
          @(negedge clk); idle();
        end
        default: ;
      endcase
      steps++;
    end
    idle();
    wait_rename();
    cycles = ($time - t0) / 10;
  endtask

  function automatic logic [63:0] dec_tgt_saved(input instr_t i);
    return i.target;   // the core's branch unit computes the same target
  endfunction

  task automatic reset_unit();
    idle();
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
  endtask

  initial begin
    int ws [3];
    state_t init, ref_st;
    ws = '{1, 3, 10};
    idle();
    fetch_pc = 0;
    for (int k = 0; k < 7; k++) fetch_bytes[k] = 0;
    core_rd = 0; core_val = 0;

    foreach (ws[wi]) begin
      int W;
      int cyc0;
      logic [63:0] tr0;
      W = ws[wi];
      build(W, 4);
      for (int r = 0; r < N; r++) init[r] = {$urandom, $urandom};
      for (int trial = 0; trial < 5; trial++) begin
        int cyc;
        logic [63:0] tr;
        // new secret bits, same public data
        for (int l = 0; l < 10; l++) init[36 + l] = {$urandom, $urandom};
        if (trial == 0) for (int l = 0; l < 10; l++) init[36 + l][0] = 1'b0;
        if (trial == 1) for (int l = 0; l < 10; l++) init[36 + l][0] = 1'b1;
        reset_unit();
        for (int r = 0; r < N; r++) begin arf[r] = init[r]; ref_st[r] = init[r]; end
        interpret(ref_st);
        run(cyc, tr);
        for (int r = 0; r < N; r++) check($sformatf("W=%0d final r%0d", W, r), arf[r], ref_st[r]);
        check("jbt empty", jbt_count, 0);
        check("depth 0", sb_depth, 0);
        if (trial == 0) begin cyc0 = cyc; tr0 = tr; end
        else begin
          check("cycles independent of secret", cyc, cyc0);
          check("trace independent of secret", tr, tr0);
        end
        $display("W=%0d trial %0d: %0d instructions in program, %0d cycles", W, trial, prog.size(), cyc);
      end
    end

    // full depth: 30 nested sJMPs, then a 31st overflows
    reset_unit();
    for (int l = 0; l < D; l++) begin
      wait_rename();
      barrier = 1; @(negedge clk); idle();
      issue = 1; @(negedge clk); idle();
      exec_ = 1; target_in = 64'h1000 + 64'(l); taken_in = 1'(l); @(negedge clk); idle();
      commit = 1; @(negedge clk); idle();
      // each level's NT path writes register l
      wait_rename();
      core_we = 1; core_rd = 6'(l); core_val = 64'hA000 + 64'(l); wmask[l] = 1'b1;
      @(negedge clk); idle();
    end
    wait_rename();
    check("depth 30", sb_depth, D);
    issue = 1; #1;
    check("overflow raised", ovf, 1);
    if (ovf) n_ovf++;
    @(negedge clk); idle();
    check("still 30 entries", jbt_count, D);
    for (int l = D - 1; l >= 0; l--) begin
      wait_rename();
      barrier = 1; @(negedge clk); idle();
      eos = 1; #1;
      check("deep redirect", redirect, 1);
      check("deep address", next_pc, 64'h1000 + 64'(l));
      @(negedge clk); idle();
      wait_rename();
      barrier = 1; @(negedge clk); idle();
      eos = 1; #1;
      check("deep pop", redirect, 0);
      @(negedge clk); idle();
    end
    wait_rename();
    check("unwound", jbt_count, 0);

    $display("mechanisms: drains=%0d redirects=%0d nt_true=%0d t_true=%0d deep_cycles=%0d squash=%0d v2_block=%0d overflow=%0d",
             n_drain, n_redirect, n_nt_true, n_t_true, n_deep, n_squash, n_v2_block, n_ovf);
    if (n_drain == 0)    begin failures++; $display("FAIL no pipeline drain"); end
    if (n_redirect == 0) begin failures++; $display("FAIL no jump-back"); end
    if (n_nt_true == 0)  begin failures++; $display("FAIL no NT-true restore"); end
    if (n_t_true == 0)   begin failures++; $display("FAIL no T-true restore"); end
    if (n_deep == 0)     begin failures++; $display("FAIL no nesting"); end
    if (n_squash == 0)   begin failures++; $display("FAIL no squash"); end
    if (n_v2_block == 0) begin failures++; $display("FAIL no V2 block"); end
    if (n_ovf == 0)      begin failures++; $display("FAIL no overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
