// tb_sempe_predecode: self-checking test of the SeMPE instruction recogniser.
// Directed cases cover sJMP in both Jcc forms (forward and backward
// displacements), eosJMP, plain Jcc, other prefixed and unprefixed bytes, and
// an invalid slot; then random byte windows are compared with a reference
// classifier written here from the x86 encodings.
module tb_sempe_predecode;
  import sempe_pkg::*;

  logic        valid;
  logic [63:0] pc;
  logic [7:0]  b [7];
  logic        is_sjmp, is_eos, is_jcc, bypass;
  logic [3:0]  len;
  logic [63:0] ft, tgt;
  int checks = 0, failures = 0;

  sempe_predecode dut (
    .valid_i(valid), .pc_i(pc), .bytes_i(b),
    .is_sjmp_o(is_sjmp), .is_eosjmp_o(is_eos), .is_plain_jcc_o(is_jcc),
    .bpred_bypass_o(bypass), .length_o(len), .fallthru_pc_o(ft), .target_pc_o(tgt)
  );

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic set(input logic [7:0] b0, b1, b2, b3, b4, b5, b6);
    b[0] = b0; b[1] = b1; b[2] = b2; b[3] = b3; b[4] = b4; b[5] = b5; b[6] = b6;
  endtask

  initial begin
    valid = 1'b1;
    pc    = 64'h0000_0000_0040_1000;

    // 2e 74 10 : sJMP short je +0x10
    set(8'h2e, 8'h74, 8'h10, 8'h00, 8'h00, 8'h00, 8'h00); #1;
    check("short sjmp", {is_sjmp, is_eos, is_jcc, bypass}, 4'b1001);
    check("short sjmp len", len, 3);
    check("short sjmp fallthru", ft, 64'h401003);
    check("short sjmp target", tgt, 64'h401013);

    // 2e 7e f0 : sJMP short jle -0x10
    set(8'h2e, 8'h7e, 8'hf0, 8'h00, 8'h00, 8'h00, 8'h00); #1;
    check("short back target", tgt, 64'h400ff3);

    // 2e 0f 8e 00 01 00 00 : sJMP near jle +0x100
    set(8'h2e, 8'h0f, 8'h8e, 8'h00, 8'h01, 8'h00, 8'h00); #1;
    check("near sjmp", {is_sjmp, is_eos, is_jcc, bypass}, 4'b1001);
    check("near sjmp len", len, 7);
    check("near sjmp target", tgt, 64'h401107);

    // 2e 0f 85 fc ff ff ff : near jne -4
    set(8'h2e, 8'h0f, 8'h85, 8'hfc, 8'hff, 8'hff, 8'hff); #1;
    check("near back target", tgt, 64'h401003);

    // 2e 90 : eosJMP
    set(8'h2e, 8'h90, 8'h00, 8'h00, 8'h00, 8'h00, 8'h00); #1;
    check("eosjmp", {is_sjmp, is_eos, is_jcc, bypass}, 4'b0101);
    check("eosjmp len", len, 2);
    check("eosjmp fallthru", ft, 64'h401002);

    // 74 10 : plain je uses the predictor
    set(8'h74, 8'h10, 8'h00, 8'h00, 8'h00, 8'h00, 8'h00); #1;
    check("plain jcc", {is_sjmp, is_eos, is_jcc, bypass}, 4'b0010);
    check("plain jcc target", tgt, 64'h401012);

    // 0f 84 10 00 00 00 : plain near je
    set(8'h0f, 8'h84, 8'h10, 8'h00, 8'h00, 8'h00, 8'h00); #1;
    check("plain near jcc target", tgt, 64'h401016);

    // 2e 8b 00 : CS-prefixed mov, not a SeMPE instruction
    set(8'h2e, 8'h8b, 8'h00, 8'h00, 8'h00, 8'h00, 8'h00); #1;
    check("cs mov", {is_sjmp, is_eos, is_jcc, bypass}, 4'b0000);

    // 90 : plain NOP
    set(8'h90, 8'h00, 8'h00, 8'h00, 8'h00, 8'h00, 8'h00); #1;
    check("nop", {is_sjmp, is_eos, is_jcc, bypass}, 4'b0000);

    // invalid slot
    valid = 1'b0;
    set(8'h2e, 8'h90, 8'h00, 8'h00, 8'h00, 8'h00, 8'h00); #1;
    check("invalid", {is_sjmp, is_eos, is_jcc, bypass}, 4'b0000);
    valid = 1'b1;

    // random windows against a reference classifier
    for (int n = 0; n < 2000; n++) begin
      logic e_sjmp, e_eos, e_jcc;
      logic [63:0] e_tgt;
      logic [3:0] e_len;
      pc = {$urandom, $urandom};
      for (int i = 0; i < 7; i++) b[i] = 8'($urandom);
      case ($urandom_range(0, 3))
        0: b[0] = 8'h2e;
        1: begin b[0] = 8'h2e; b[1] = 8'h70 + 8'($urandom_range(0, 15)); end
        2: begin b[0] = 8'h2e; b[1] = 8'h0f; b[2] = 8'h80 + 8'($urandom_range(0, 15)); end
        default: ;
      endcase
      #1;
      e_sjmp = (b[0] == 8'h2e) && ((b[1] >= 8'h70 && b[1] <= 8'h7f) ||
                                   (b[1] == 8'h0f && b[2] >= 8'h80 && b[2] <= 8'h8f));
      e_eos  = (b[0] == 8'h2e) && (b[1] == 8'h90);
      e_jcc  = (b[0] != 8'h2e) && ((b[0] >= 8'h70 && b[0] <= 8'h7f) ||
                                   (b[0] == 8'h0f && b[1] >= 8'h80 && b[1] <= 8'h8f));
      check("rand class", {is_sjmp, is_eos, is_jcc, bypass}, {e_sjmp, e_eos, e_jcc, e_sjmp | e_eos});
      if (e_sjmp) begin
        if (b[1] == 8'h0f) begin
          e_len = 7;
          e_tgt = pc + 7 + {{32{b[6][7]}}, b[6], b[5], b[4], b[3]};
        end else begin
          e_len = 3;
          e_tgt = pc + 3 + {{56{b[2][7]}}, b[2]};
        end
        check("rand len", len, e_len);
        check("rand target", tgt, e_tgt);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
