// sempe_predecode: recognises the two SeMPE instruction forms in an x86_64
// instruction byte stream.
//
//   sJMP    = SecPrefix byte 0x2e in front of a conditional branch
//             (short Jcc 0x70-0x7f rel8, or near Jcc 0x0f 0x80-0x8f rel32)
//   eosJMP  = the byte pair 0x2e 0x90 (a prefixed NOP)
//
// For an sJMP the branch predictor must not be consulted: `bpred_bypass` tells
// the fetch unit to continue at the fall-through address (`fallthru_pc`), so the
// not-taken path is always fetched first. The taken-path address (`target_pc`)
// is decoded here from the displacement; it is the value the core later writes
// into the Jump-Back Table when the sJMP executes. A conditional branch without
// the prefix is reported as an ordinary branch that uses the predictor.
//
// Interface: `bytes_i[0]` is the first byte of the instruction at `pc_i`; seven
// bytes cover the longest form (2e 0f 8x + rel32). Purely combinational.
//
// From the paper: the prefix byte 0x2e, the eosJMP encoding 0x2e 0x90 and the
// rule that sJMP does not use the predictor and falls through. This design's
// own choice: which x86 branch opcodes carry the prefix (the two Jcc forms) and
// computing length and target here rather than in the core's branch unit.
module sempe_predecode
  import sempe_pkg::*;
#(
  parameter int unsigned AW = ADDR_W
) (
  input  logic          valid_i,
  input  logic [AW-1:0] pc_i,
  input  logic [7:0]    bytes_i [7],
  output logic          is_sjmp_o,
  output logic          is_eosjmp_o,
  output logic          is_plain_jcc_o,   // conditional branch without SecPrefix
  output logic          bpred_bypass_o,   // do not consult / update the predictor
  output logic [3:0]    length_o,         // length of a recognised branch / eosJMP
  output logic [AW-1:0] fallthru_pc_o,
  output logic [AW-1:0] target_pc_o
);

  logic          pfx;
  logic          short_jcc, near_jcc;       // at offset 1 (after prefix)
  logic          short_jcc0, near_jcc0;     // at offset 0 (no prefix)
  logic [31:0]   disp;
  logic [AW-1:0] disp_ext;

  always_comb begin
    pfx        = (bytes_i[0] == SEC_PREFIX);
    short_jcc  = (bytes_i[1][7:4] == 4'h7);
    near_jcc   = (bytes_i[1] == 8'h0F) && (bytes_i[2][7:4] == 4'h8);
    short_jcc0 = (bytes_i[0][7:4] == 4'h7);
    near_jcc0  = (bytes_i[0] == 8'h0F) && (bytes_i[1][7:4] == 4'h8);

    is_sjmp_o      = valid_i && pfx && (short_jcc || near_jcc);
    is_eosjmp_o    = valid_i && pfx && (bytes_i[1] == NOP_OPCODE);
    is_plain_jcc_o = valid_i && !pfx && (short_jcc0 || near_jcc0);
    bpred_bypass_o = is_sjmp_o || is_eosjmp_o;

    disp   = '0;
    length_o = 4'd0;
    if (is_sjmp_o) begin
      if (short_jcc) begin
        length_o = 4'd3;
        disp     = {{24{bytes_i[2][7]}}, bytes_i[2]};
      end else begin
        length_o = 4'd7;
        disp     = {bytes_i[6], bytes_i[5], bytes_i[4], bytes_i[3]};
      end
    end else if (is_eosjmp_o) begin
      length_o = 4'd2;
    end else if (is_plain_jcc_o) begin
      if (short_jcc0) begin
        length_o = 4'd2;
        disp     = {{24{bytes_i[1][7]}}, bytes_i[1]};
      end else begin
        length_o = 4'd6;
        disp     = {bytes_i[5], bytes_i[4], bytes_i[3], bytes_i[2]};
      end
    end
    disp_ext      = AW'(signed'(disp));
    fallthru_pc_o = pc_i + AW'(length_o);
    target_pc_o   = fallthru_pc_o + disp_ext;
  end

endmodule
