// tb_sempe_workloads: the four microbenchmark kernels (Fibonacci, Ones,
// Quicksort, Eight Queens) run as real loop code inside nested secret regions
// on the SeMPE unit at its default size.
//
// Each program has the microbenchmark shape: a public loop of `iters`
// iterations, each holding W secret branches nested W-1 deep; the not-taken
// path of level l runs kernel instance l+1 and the innermost taken path runs
// instance W+1. All instances use the same scratch registers r1..r15 and fold
// their result into r16, so every path overwrites what the other path wrote:
// the register snapshots of the unit must undo this. Memory written inside a
// path goes to a region private to that kernel instance (the shadow-copy
// discipline a SeMPE compiler applies), so memory needs no rollback.
// Kernels (instance k, sizes chosen here to keep the run short):
//   Fibonacci  Fib(10+k) by iteration;
//   Ones       fill a vector of 8+k words with LCG values, sum it while
//              clearing it ("deleting" it);
//   Quicksort  fill 8+k words, sort with Lomuto quicksort and an explicit
//              stack in memory, fold a position-weighted checksum;
//   Queens     backtracking search for a placement of eight queens on an 8x8
//              board, first queen starting at column k mod 8; fold the columns.
// The kernels contain public conditional branches (plain Jcc, predicted by the
// core), loads and stores.
//
// A small in-order behavioural core in this testbench fetches each
// instruction's bytes through the unit's predecoder, honours rename_stall_o
// and sjmp_v2_o, drives sJMP issue / execute / commit, eosJMP commit and the
// per-instruction register write mask, and follows the unit's next PC at each
// eosJMP. Checks, for every kernel, W = 1, 4 and 10 and three secret
// assignments each: final registers equal a plain interpreter's (sJMP as an
// ordinary branch, eosJMP as a NOP); the committed-PC trace and the cycle
// count do not depend on the secret; predecode classes, lengths and targets;
// and each kernel instance's private memory shows its work (vector cleared,
// array sorted, queens not attacking each other).
// Timing: about 2 cycles per ordinary instruction in the behavioural core,
// plus the drains and scratchpad operations of the unit at each sJMP / eosJMP.
module tb_sempe_workloads;
  import sempe_pkg::*;
  localparam int unsigned N = 48, R = 8;

  logic clk = 0, rst_n = 0;
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
  int n_redirect = 0, n_nt_true = 0, n_t_true = 0, n_pub_branch = 0, n_mem = 0;

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t: got %h expected %h", what, $time, got, exp);
    end
  endtask

  // ---------------- architectural register file and data memory ----------------
  logic [63:0] arf [N];
  logic        core_we;
  logic [5:0]  core_rd;
  logic [63:0] core_val;
  logic [63:0] dmem [longint];
  always_comb
    for (int r = 0; r < R; r++)
      arf_rd_data[r] = (int'(arf_rd_chunk) * R + r < N) ? arf[int'(arf_rd_chunk) * R + r] : 64'h0;
  always_ff @(posedge clk) begin
    if (arf_wr_en)
      for (int r = 0; r < R; r++)
        if (arf_wr_mask[r] && int'(arf_wr_chunk) * R + r < N) arf[int'(arf_wr_chunk) * R + r] <= arf_wr_data[r];
    if (core_we) arf[core_rd] <= core_val;
  end

  // ---------------- mini assembler ----------------
  typedef enum logic [4:0] {
    O_LI, O_ADD, O_ADDI, O_SUB, O_MUL, O_AND, O_LD, O_ST,
    O_BEQ, O_BNE, O_BLT, O_BGE, O_JMP, O_SJMP, O_EOS, O_HALT
  } op_e;
  typedef struct {
    op_e         op;
    logic [5:0]  rd, rs, rt;
    logic [63:0] imm;
    int          tl;          // target label, -1 if none
    logic [63:0] pc, target;
    int          len;
  } instr_t;
  instr_t prog[$];
  int     at_pc[longint];
  int     lbl[int];
  int     nlbl;
  localparam logic [63:0] BASE = 64'h0000_0000_0040_0000;

  function automatic int new_label();
    nlbl++;
    return nlbl;
  endfunction

  function automatic void place(input int l);
    lbl[l] = prog.size();
  endfunction

  function automatic int op_len(input op_e op);
    case (op)
      O_BEQ, O_BNE, O_BLT, O_BGE: return 6;   // near Jcc rel32
      O_JMP:  return 5;
      O_SJMP: return 7;                       // 0x2e + near Jcc rel32
      O_EOS:  return 2;
      O_HALT: return 1;
      default: return 4;
    endcase
  endfunction

  function automatic void emit(input op_e op, input int rd, input int rs, input int rt,
                               input longint imm, input int tl);
    instr_t i;
    i.op = op; i.rd = 6'(rd); i.rs = 6'(rs); i.rt = 6'(rt); i.imm = 64'(imm); i.tl = tl;
    i.pc = (prog.size() == 0) ? BASE : prog[$].pc + 64'(prog[$].len);
    i.len = op_len(op); i.target = '0;
    prog.push_back(i);
    at_pc[longint'(i.pc)] = prog.size() - 1;
  endfunction

  function automatic void li(input int rd, input longint v);             emit(O_LI, rd, 0, 0, v, -1);     endfunction
  function automatic void add(input int rd, input int rs, input int rt); emit(O_ADD, rd, rs, rt, 0, -1);  endfunction
  function automatic void sub(input int rd, input int rs, input int rt); emit(O_SUB, rd, rs, rt, 0, -1);  endfunction
  function automatic void mul(input int rd, input int rs, input int rt); emit(O_MUL, rd, rs, rt, 0, -1);  endfunction
  function automatic void andr(input int rd, input int rs, input int rt); emit(O_AND, rd, rs, rt, 0, -1); endfunction
  function automatic void addi(input int rd, input int rs, input longint v); emit(O_ADDI, rd, rs, 0, v, -1); endfunction
  function automatic void ld(input int rd, input int rs, input longint off); emit(O_LD, rd, rs, 0, off, -1); endfunction
  function automatic void st(input int rt, input int rs, input longint off); emit(O_ST, 0, rs, rt, off, -1); endfunction
  function automatic void br(input op_e op, input int rs, input int rt, input int l); emit(op, 0, rs, rt, 0, l); endfunction
  function automatic void jmp(input int l); emit(O_JMP, 0, 0, 0, 0, l); endfunction

  // register use: r1..r15 kernel scratch (r15 = 0), r16 result,
  // r32..r34 public loop state, r36.. secret conditions
  localparam int RES = 16, ZR = 15;
  localparam longint LCG_A = 1103515245, LCG_C = 12345;

  function automatic void k_fib(input int k);
    int top, done;
    top = new_label(); done = new_label();
    li(1, 0); li(2, 1); li(3, 0); li(4, 10 + k);
    place(top);
    br(O_BGE, 3, 4, done);
    add(5, 1, 2); addi(1, 2, 0); addi(2, 5, 0); addi(3, 3, 1);
    jmp(top);
    place(done);
    add(RES, RES, 1); li(7, 31); mul(RES, RES, 7);
  endfunction

  // fill n words at r14 with LCG values (seed r33 + k), index r3, value r6
  function automatic void fill(input int k, input int n);
    int top, done;
    top = new_label(); done = new_label();
    li(4, n); addi(6, 33, k); li(7, LCG_A); li(8, 16'hffff); li(3, 0);
    place(top);
    br(O_BGE, 3, 4, done);
    mul(6, 6, 7); addi(6, 6, LCG_C); andr(5, 6, 8);
    add(9, 14, 3); st(5, 9, 0); addi(3, 3, 1);
    jmp(top);
    place(done);
  endfunction

  function automatic void k_ones(input int k);
    int top, done;
    top = new_label(); done = new_label();
    li(14, 4096 * k); li(ZR, 0);
    fill(k, 8 + k);
    li(3, 0); li(10, 0);
    place(top);
    br(O_BGE, 3, 4, done);
    add(9, 14, 3); ld(5, 9, 0); add(10, 10, 5); st(ZR, 9, 0); addi(3, 3, 1);
    jmp(top);
    place(done);
    add(RES, RES, 10); li(7, 31); mul(RES, RES, 7);
  endfunction

  function automatic void k_qsort(input int k);
    int loop, done, pl, pnext, pend, ck, ckd;
    loop = new_label(); done = new_label(); pl = new_label(); pnext = new_label();
    pend = new_label(); ck = new_label(); ckd = new_label();
    li(14, 4096 * k); li(ZR, 0);
    fill(k, 8 + k);
    li(13, 4096 * k + 2048); addi(12, 13, 0);          // r12 stack pointer, r13 stack base
    st(ZR, 12, 0); addi(11, 4, -1); st(11, 12, 1); addi(12, 12, 2);   // push (0, n-1)
    place(loop);
    br(O_BEQ, 12, 13, done);
    addi(12, 12, -2); ld(1, 12, 0); ld(2, 12, 1);      // r1 lo, r2 hi
    br(O_BGE, 1, 2, loop);
    add(9, 14, 2); ld(3, 9, 0);                         // r3 pivot
    addi(4, 1, 0); addi(5, 1, 0);                       // r4 i, r5 j
    place(pl);
    br(O_BGE, 5, 2, pend);
    add(9, 14, 5); ld(6, 9, 0);
    br(O_BGE, 6, 3, pnext);
    add(10, 14, 4); ld(7, 10, 0); st(6, 10, 0); st(7, 9, 0); addi(4, 4, 1);
    place(pnext);
    addi(5, 5, 1);
    jmp(pl);
    place(pend);
    add(10, 14, 4); ld(7, 10, 0); add(9, 14, 2); ld(6, 9, 0); st(6, 10, 0); st(7, 9, 0);
    st(1, 12, 0); addi(11, 4, -1); st(11, 12, 1); addi(12, 12, 2);    // push (lo, i-1)
    addi(11, 4, 1); st(11, 12, 0); st(2, 12, 1); addi(12, 12, 2);     // push (i+1, hi)
    jmp(loop);
    place(done);
    li(3, 0); li(10, 0); li(7, 31);
    place(ck);
    br(O_BGE, 3, 4, ckd);
    mul(10, 10, 7); add(9, 14, 3); ld(5, 9, 0); add(10, 10, 5); addi(3, 3, 1);
    jmp(ck);
    place(ckd);
    add(RES, RES, 10); mul(RES, RES, 7);
  endfunction

  function automatic void k_queens(input int k);
    int try_, chk, bad, safe, pos, back, solved, lp, out;
    try_ = new_label(); chk = new_label(); bad = new_label(); safe = new_label();
    pos = new_label(); back = new_label(); solved = new_label(); lp = new_label(); out = new_label();
    li(14, 4096 * k); li(ZR, 0); li(2, 8); li(1, 0);   // r1 row, r2 = 8
    li(3, k % 8); st(3, 14, 0);
    place(try_);
    add(9, 14, 1); ld(3, 9, 0);                          // r3 = col[row]
    br(O_BGE, 3, 2, back);
    li(4, 0);                                           // r4 = earlier row j
    place(chk);
    br(O_BGE, 4, 1, safe);
    add(10, 14, 4); ld(5, 10, 0);
    br(O_BEQ, 5, 3, bad);
    sub(6, 5, 3);
    br(O_BGE, 6, ZR, pos);
    sub(6, ZR, 6);
    place(pos);
    sub(7, 1, 4);
    br(O_BEQ, 6, 7, bad);
    addi(4, 4, 1);
    jmp(chk);
    place(bad);
    addi(3, 3, 1); st(3, 9, 0);
    jmp(try_);
    place(safe);
    addi(1, 1, 1);
    br(O_BEQ, 1, 2, solved);
    add(9, 14, 1); st(ZR, 9, 0);
    jmp(try_);
    place(back);
    addi(1, 1, -1);
    br(O_BLT, 1, ZR, solved);
    add(9, 14, 1); ld(3, 9, 0); addi(3, 3, 1); st(3, 9, 0);
    jmp(try_);
    place(solved);
    li(4, 0); li(10, 0); li(7, 8);
    place(lp);
    br(O_BGE, 4, 2, out);
    mul(10, 10, 7); add(9, 14, 4); ld(5, 9, 0); add(10, 10, 5); addi(4, 4, 1);
    jmp(lp);
    place(out);
    add(RES, RES, 10); li(7, 31); mul(RES, RES, 7);
  endfunction

  function automatic void kernel(input int kind, input int k);
    case (kind)
      0: k_fib(k);
      1: k_ones(k);
      2: k_qsort(k);
      default: k_queens(k);
    endcase
  endfunction

  // secret branch at nesting level lvl (0-based) of a W-deep chain
  function automatic void sregion(input int kind, input int lvl, input int W);
    int tk, jn;
    tk = new_label(); jn = new_label();
    emit(O_SJMP, 0, 36 + lvl, 0, 0, tk);
    kernel(kind, lvl + 1);                   // not-taken path
    jmp(jn);
    place(tk);                               // taken path
    if (lvl < W - 1) sregion(kind, lvl + 1, W);
    else             kernel(kind, W + 1);
    place(jn);                               // join point
    emit(O_EOS, 0, 0, 0, 0, -1);
  endfunction

  function automatic void build(input int kind, input int W, input int iters);
    int top, done;
    prog.delete(); at_pc.delete(); lbl.delete(); nlbl = 0;
    top = new_label(); done = new_label();
    li(32, 0); li(34, iters);
    place(top);
    br(O_BGE, 32, 34, done);
    sregion(kind, 0, W);
    addi(32, 32, 1); addi(33, 33, 7);
    jmp(top);
    place(done);
    emit(O_HALT, 0, 0, 0, 0, -1);
    foreach (prog[n]) if (prog[n].tl >= 0) prog[n].target = prog[lbl[prog[n].tl]].pc;
  endfunction

  function automatic void encode(input instr_t i, output logic [7:0] b [7]);
    logic [31:0] rel;
    for (int k = 0; k < 7; k++) b[k] = 8'h00;
    case (i.op)
      O_BEQ, O_BNE, O_BLT, O_BGE: begin
        rel = 32'(i.target - (i.pc + 6));
        b[0] = 8'h0f;
        b[1] = (i.op == O_BEQ) ? 8'h84 : (i.op == O_BNE) ? 8'h85 : (i.op == O_BLT) ? 8'h8c : 8'h8d;
        b[2] = rel[7:0]; b[3] = rel[15:8]; b[4] = rel[23:16]; b[5] = rel[31:24];
      end
      O_JMP: begin
        rel = 32'(i.target - (i.pc + 5));
        b[0] = 8'he9; b[1] = rel[7:0]; b[2] = rel[15:8]; b[3] = rel[23:16]; b[4] = rel[31:24];
      end
      O_SJMP: begin
        rel = 32'(i.target - (i.pc + 7));
        b[0] = 8'h2e; b[1] = 8'h0f; b[2] = 8'h85;
        b[3] = rel[7:0]; b[4] = rel[15:8]; b[5] = rel[23:16]; b[6] = rel[31:24];
      end
      O_EOS:  begin b[0] = 8'h2e; b[1] = 8'h90; end
      O_HALT: b[0] = 8'hf4;
      default: begin b[0] = 8'h48; b[1] = 8'h01; b[2] = {2'b0, i.rd}; b[3] = {2'b0, i.rs}; end
    endcase
  endfunction

  function automatic logic [63:0] alu(input instr_t i, input logic [63:0] a, input logic [63:0] b);
    case (i.op)
      O_LI:   return i.imm;
      O_ADD:  return a + b;
      O_ADDI: return a + i.imm;
      O_SUB:  return a - b;
      O_MUL:  return a * b;
      default: return a & b;   // O_AND
    endcase
  endfunction

  function automatic logic br_taken(input instr_t i, input logic [63:0] a, input logic [63:0] b);
    case (i.op)
      O_BEQ: return a == b;
      O_BNE: return a != b;
      O_BLT: return $signed(a) < $signed(b);
      default: return $signed(a) >= $signed(b);
    endcase
  endfunction

  // plain interpreter: ordinary branch semantics, memory of its own
  typedef logic [63:0] state_t [N];
  function automatic void interpret(inout state_t s);
    logic [63:0] pc = BASE;
    logic [63:0] mem [longint];
    int guard = 0;
    while (guard++ < 5000000) begin
      instr_t i = prog[at_pc[longint'(pc)]];
      pc = i.pc + 64'(i.len);
      case (i.op)
        O_LD:   s[i.rd] = mem.exists(longint'(s[i.rs] + i.imm)) ? mem[longint'(s[i.rs] + i.imm)] : 64'h0;
        O_ST:   mem[longint'(s[i.rs] + i.imm)] = s[i.rt];
        O_BEQ, O_BNE, O_BLT, O_BGE: if (br_taken(i, s[i.rs], s[i.rt])) pc = i.target;
        O_JMP:  pc = i.target;
        O_SJMP: if (s[i.rs][0]) pc = i.target;
        O_EOS:  ;
        O_HALT: return;
        default: s[i.rd] = alu(i, s[i.rs], s[i.rt]);
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

  task automatic write_reg(input logic [5:0] rd, input logic [63:0] v);
    core_we = 1; core_rd = rd; core_val = v; wmask[rd] = 1'b1;
  endtask

  // run the loaded program on the unit; returns cycles and PC-trace hash
  task automatic run(output int cycles, output logic [63:0] trace);
    logic [63:0] pc;
    logic [63:0] jb_expect [$];
    int t0;
    pc = BASE; trace = 64'hcbf29ce484222325;
    t0 = $time;
    dmem.delete();
    forever begin
      instr_t i;
      logic [7:0] b [7];
      logic [63:0] a, bv, ea;
      i = prog[at_pc[longint'(pc)]];
      trace = (trace ^ pc) * 64'h100000001b3;
      encode(i, b);
      fetch_valid = 1; fetch_pc = pc; fetch_bytes = b;
      #1;
      check("dec sjmp", dec_sjmp, i.op == O_SJMP);
      check("dec eos", dec_eos, i.op == O_EOS);
      check("dec bypass", dec_bypass, i.op == O_SJMP || i.op == O_EOS);
      if (i.op inside {O_SJMP, O_BEQ, O_BNE, O_BLT, O_BGE}) begin
        check("dec length", dec_len, 4'(i.len));
        check("dec target", dec_tgt, i.target);
      end
      if (i.op == O_HALT) break;
      @(negedge clk); idle();
      wait_rename();
      a = arf[i.rs]; bv = arf[i.rt]; ea = arf[i.rs] + i.imm;
      pc = i.pc + 64'(i.len);
      case (i.op)
        O_LD: begin
          write_reg(i.rd, dmem.exists(longint'(ea)) ? dmem[longint'(ea)] : 64'h0);
          n_mem++;
          @(negedge clk); idle();
        end
        O_ST: begin
          dmem[longint'(ea)] = bv;
          n_mem++;
          @(negedge clk); idle();
        end
        O_BEQ, O_BNE, O_BLT, O_BGE: begin
          if (br_taken(i, a, bv)) pc = i.target;
          n_pub_branch++;
          @(negedge clk); idle();
        end
        O_JMP: begin
          pc = i.target;
          @(negedge clk); idle();
        end
        O_SJMP: begin
          barrier = 1;
          @(negedge clk); idle();
          #1 check("v2 before issue", v2, 1);
          issue = 1;
          @(negedge clk); idle();
          exec_ = 1; target_in = i.target; taken_in = a[0];
          @(negedge clk); idle();
          commit = 1;
          @(negedge clk); idle();
          jb_expect.push_back(i.target);
        end
        O_EOS: begin
          barrier = 1;
          @(negedge clk); idle();
          eos = 1; core_pc = pc;
          #1;
          if (redirect) begin
            n_redirect++;
            check("jump-back address", next_pc, jb_expect[$]);
          end else begin
            check("eos fallthrough", next_pc, pc);
            if (dut.u_jbt.top_taken_o) n_t_true++; else n_nt_true++;
            void'(jb_expect.pop_back());
          end
          pc = next_pc;
          @(negedge clk); idle();
        end
        default: begin
          write_reg(i.rd, alu(i, a, bv));
          @(negedge clk); idle();
        end
      endcase
    end
    idle();
    wait_rename();
    cycles = int'(($time - t0) / 10);
  endtask

  // every kernel instance ran (both paths commit), so each one's private
  // memory must show its work: vector cleared, array sorted, legal placement
  task automatic check_kernel_memory(input int kind, input int W);
    for (int k = 1; k <= W + 1; k++) begin
      longint b = 4096 * k;
      case (kind)
        1: for (int j = 0; j < 8 + k; j++) check("ones vector deleted", dmem[b + j], 0);
        2: for (int j = 1; j < 8 + k; j++) check("quicksort order", 64'($signed(dmem[b + j - 1]) <= $signed(dmem[b + j])), 1);
        3: for (int r = 0; r < 8; r++) begin
             check("queen on board", 64'(dmem[b + r] < 8), 1);
             for (int q = 0; q < r; q++) begin
               longint d = longint'(dmem[b + r]) - longint'(dmem[b + q]);
               check("queens do not attack", 64'(d != 0 && d != r - q && d != q - r), 1);
             end
           end
        default: ;
      endcase
    end
  endtask

  task automatic reset_unit();
    idle();
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
  endtask

  initial begin
    int ws [3];
    string names [4];
    state_t init, ref_st;
    ws = '{1, 4, 10};
    names = '{"Fibonacci", "Ones", "Quicksort", "Queens"};
    idle();
    fetch_pc = 0;
    for (int k = 0; k < 7; k++) fetch_bytes[k] = 0;
    core_rd = 0; core_val = 0;

    for (int kind = 0; kind < 4; kind++) begin
      foreach (ws[wi]) begin
        int W;
        int cyc0;
        logic [63:0] tr0;
        W = ws[wi];
        build(kind, W, 2);
        for (int r = 0; r < N; r++) init[r] = {$urandom, $urandom};
        for (int trial = 0; trial < 3; trial++) begin
          int cyc;
          logic [63:0] tr;
          for (int l = 0; l < 10; l++) init[36 + l] = {$urandom, $urandom};
          if (trial == 0) for (int l = 0; l < 10; l++) init[36 + l][0] = 1'b0;
          if (trial == 1) for (int l = 0; l < 10; l++) init[36 + l][0] = 1'b1;
          reset_unit();
          for (int r = 0; r < N; r++) begin arf[r] = init[r]; ref_st[r] = init[r]; end
          interpret(ref_st);
          run(cyc, tr);
          check_kernel_memory(kind, W);
          for (int r = 0; r < N; r++)
            check($sformatf("%s W=%0d final r%0d", names[kind], W, r), arf[r], ref_st[r]);
          check("jbt empty", jbt_count, 0);
          check("depth 0", sb_depth, 0);
          if (trial == 0) begin cyc0 = cyc; tr0 = tr; end
          else begin
            check("cycles independent of secret", cyc, cyc0);
            check("trace independent of secret", tr, tr0);
          end
          $display("%s W=%0d trial %0d: %0d static instructions, %0d cycles",
                   names[kind], W, trial, prog.size(), cyc);
        end
      end
    end

    $display("mechanisms: redirects=%0d nt_true=%0d t_true=%0d public_branches=%0d mem_ops=%0d",
             n_redirect, n_nt_true, n_t_true, n_pub_branch, n_mem);
    if (n_redirect == 0) begin failures++; $display("FAIL no jump-back"); end
    if (n_nt_true == 0)  begin failures++; $display("FAIL no NT-true restore"); end
    if (n_t_true == 0)   begin failures++; $display("FAIL no T-true restore"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
