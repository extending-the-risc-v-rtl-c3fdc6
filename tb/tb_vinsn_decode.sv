// tb_vinsn_decode: encodes random I' and S' instructions field by field and
// checks that every field is recovered at its bit position, and that the
// I'/S' type flags follow the custom opcodes.
// Field positions follow the publication's I'/S' formats; the opcode
// assignment is this design's.
module tb_vinsn_decode;
  import simd_pkg::*;
  logic [31:0] insn;
  vfields_t f;
  int checks = 0, failures = 0;
  vinsn_decode dut (.insn, .f);
  task automatic chk(string w, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", w, got, exp); end
  endtask
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [6:0] ops [6];
    ops = '{OP_C0, OP_C1, OP_C2, OP_C3, OP_IMM, OP_LOAD};
    for (int i = 0; i < 300; i++) begin
      int vrs1, vrd1, vrs2, vrd2, rs1, f3, rd, op, rs2, im;
      vrs1 = $urandom_range(0, 7); vrd1 = $urandom_range(0, 7);
      vrs2 = $urandom_range(0, 7); vrd2 = $urandom_range(0, 7);
      rs1 = $urandom_range(0, 31); f3 = $urandom_range(0, 7); rd = $urandom_range(0, 31);
      op = int'(ops[i % 6]);
      insn = {3'(vrs1), 3'(vrd1), 3'(vrs2), 3'(vrd2), 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
      rs2 = (vrs2 & 3) * 8 + vrd2;
      im  = vrs2 >> 2;
      #1;
      chk("vrs1", int'(f.vrs1), vrs1); chk("vrd1", int'(f.vrd1), vrd1);
      chk("vrs2", int'(f.vrs2), vrs2); chk("vrd2", int'(f.vrd2), vrd2);
      chk("rs1", int'(f.rs1), rs1); chk("func3", int'(f.func3), f3); chk("rd", int'(f.rd), rd);
      chk("rs2", int'(f.rs2), rs2); chk("imm", int'(f.imm), im); chk("opcode", int'(f.opcode), op);
      chk("is_sp", int'(f.is_sp), int'(op == int'(OP_C0)));
      chk("is_ip", int'(f.is_ip), int'(op == int'(OP_C1) || op == int'(OP_C2) || op == int'(OP_C3)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
