// tb_sempe_spm: self-checking test of the snapshot scratchpad at its default
// size (30 levels, 48 x 64-bit registers, 64 bytes per access).
// Random masked chunk writes and reads are mirrored in a reference array; each
// read is checked one cycle later (the read latency). The T/NT modified
// vectors are checked after random marks and clears, including a clear and a
// mark of the same level in one cycle.
module tb_sempe_spm;
  import sempe_pkg::*;
  localparam int unsigned D = JBT_DEPTH, N = NUM_ARCH_REGS, R = 8, NC = 6;

  logic clk = 0, rst_n = 0;
  logic req, we, rvalid, mark, clear;
  logic [4:0] level, mark_level, clear_level, vec_level;
  snap_sel_e snap;
  path_e mark_path;
  logic [2:0] chunk;
  logic [R-1:0] wmask;
  logic [63:0] wdata [R], rdata [R];
  logic [N-1:0] mark_mask, t_vec, nt_vec;
  int checks = 0, failures = 0;

  sempe_spm dut (
    .clk(clk), .rst_n(rst_n), .req_i(req), .we_i(we), .level_i(level), .snap_i(snap),
    .chunk_i(chunk), .wmask_i(wmask), .wdata_i(wdata), .rdata_o(rdata), .rvalid_o(rvalid),
    .mark_i(mark), .mark_level_i(mark_level), .mark_path_i(mark_path), .mark_mask_i(mark_mask),
    .clear_i(clear), .clear_level_i(clear_level), .vec_level_i(vec_level),
    .t_vec_o(t_vec), .nt_vec_o(nt_vec)
  );

  always #5 clk = ~clk;

  logic [63:0]  ref_mem [D][2][NC][R];
  logic         ref_ok  [D][2][NC][R];   // written at least once
  logic [N-1:0] ref_t [D], ref_nt [D];

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s at %0t: got %h expected %h", what, $time, got, exp);
    end
  endtask

  initial begin
    req = 0; we = 0; mark = 0; clear = 0; level = 0; snap = SNAP_PRE; chunk = 0; wmask = 0;
    mark_level = 0; clear_level = 0; vec_level = 0; mark_path = PATH_NT; mark_mask = 0;
    for (int r = 0; r < R; r++) wdata[r] = 0;
    for (int l = 0; l < D; l++) begin
      ref_t[l] = 0; ref_nt[l] = 0;
      for (int s = 0; s < 2; s++) for (int c = 0; c < NC; c++) for (int r = 0; r < R; r++) ref_ok[l][s][c][r] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;

    // vectors are zero after reset
    for (int l = 0; l < D; l++) begin
      vec_level = 5'(l); #1;
      check("reset t", t_vec, 0);
      check("reset nt", nt_vec, 0);
    end

    for (int n = 0; n < 6000; n++) begin
      logic [4:0] l; logic s; logic [2:0] c;
      @(negedge clk);
      l = 5'($urandom_range(0, D - 1)); s = 1'($urandom); c = 3'($urandom_range(0, NC - 1));
      req = 1; level = l; snap = snap_sel_e'(s); chunk = c;
      we = ($urandom_range(0, 2) != 0);
      wmask = 8'($urandom);
      for (int r = 0; r < R; r++) wdata[r] = {$urandom, $urandom};
      // vectors
      mark = 1'($urandom); mark_level = 5'($urandom_range(0, D - 1));
      mark_path = path_e'($urandom); mark_mask = {16'($urandom), $urandom};
      clear = ($urandom_range(0, 7) == 0);
      clear_level = ($urandom_range(0, 1) == 0) ? mark_level : 5'($urandom_range(0, D - 1));
      @(posedge clk);
      if (we) begin
        for (int r = 0; r < R; r++) if (wmask[r]) begin
          ref_mem[l][s][c][r] = wdata[r]; ref_ok[l][s][c][r] = 1;
        end
      end
      if (mark) begin
        if (mark_path == PATH_T) ref_t[mark_level] |= mark_mask;
        else                     ref_nt[mark_level] |= mark_mask;
      end
      if (clear) begin ref_t[clear_level] = 0; ref_nt[clear_level] = 0; end
      #1;
      if (!we) begin
        check("rvalid", rvalid, 1);
        for (int r = 0; r < R; r++) if (ref_ok[l][s][c][r]) check("rdata", rdata[r], ref_mem[l][s][c][r]);
      end else begin
        check("no rvalid", rvalid, 0);
      end
      vec_level = 5'($urandom_range(0, D - 1)); #1;
      check("t_vec", t_vec, ref_t[vec_level]);
      check("nt_vec", nt_vec, ref_nt[vec_level]);
    end
    req = 0; mark = 0; clear = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
