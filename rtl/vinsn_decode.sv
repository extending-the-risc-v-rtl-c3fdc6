// vinsn_decode: field extraction for the I' and S' vector instruction types.
// I' reuses the 12-bit immediate of the I type for four 3-bit vector register
// names (vrs1, vrd1, vrs2, vrd2); S' keeps rs2 of the S type and uses the
// upper seven bits for vrs1, vrd1 and a single immediate bit. The bit
// positions are those of the paper's encoding figure. The type is chosen by
// opcode: custom-0 is S' (vector load/store), custom-1..3 are I' (this
// opcode assignment is this design's choice). Purely combinational.
module vinsn_decode
  import simd_pkg::*;
(
  input  logic [31:0] insn,
  output vfields_t    f
);
  always_comb begin
    f.opcode = insn[6:0];
    f.rd     = insn[11:7];
    f.func3  = insn[14:12];
    f.rs1    = insn[19:15];
    f.rs2    = insn[24:20];
    f.imm    = insn[25];
    f.vrs1   = insn[31:29];
    f.vrd1   = insn[28:26];
    f.vrs2   = insn[25:23];
    f.vrd2   = insn[22:20];
    f.is_sp  = (insn[6:0] == OP_C0);
    f.is_ip  = (insn[6:0] == OP_C1) || (insn[6:0] == OP_C2) || (insn[6:0] == OP_C3);
  end
endmodule
