// tb_rv_asm: instruction encoders used by the testbenches to build RV32IM
// programs, including the custom I' and S' vector instructions of this
// design (c0_lv/c0_sv on custom-0, c1_merge/c1_sort4 on custom-1, c2_sort
// on custom-2, c3_psum on custom-3).
// The field positions follow the publication's I'/S' formats; the opcode
// assignment is this design's.
package tb_rv_asm;
  function automatic logic [31:0] r_t(int f7, int rs2, int rs1, int f3, int rd, int op);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
  endfunction
  function automatic logic [31:0] i_t(int imm, int rs1, int f3, int rd, int op);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
  endfunction
  function automatic logic [31:0] s_t(int imm, int rs2, int rs1, int f3);
    logic [11:0] im;
    im = 12'(imm);
    return {im[11:5], 5'(rs2), 5'(rs1), 3'(f3), im[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_t(int off, int rs2, int rs1, int f3);
    logic [12:0] o;
    o = 13'(off);
    return {o[12], o[10:5], 5'(rs2), 5'(rs1), 3'(f3), o[4:1], o[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] lui(int rd, int imm20);
    return {20'(imm20), 5'(rd), 7'b0110111};
  endfunction
  function automatic logic [31:0] addi(int rd, int rs1, int imm); return i_t(imm, rs1, 0, rd, 7'b0010011); endfunction
  function automatic logic [31:0] add(int rd, int rs1, int rs2);  return r_t(0, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] sub(int rd, int rs1, int rs2);  return r_t(32, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] slt(int rd, int rs1, int rs2);  return r_t(0, rs2, rs1, 2, rd, 7'b0110011); endfunction
  function automatic logic [31:0] mul(int rd, int rs1, int rs2);  return r_t(1, rs2, rs1, 0, rd, 7'b0110011); endfunction
  function automatic logic [31:0] div(int rd, int rs1, int rs2);  return r_t(1, rs2, rs1, 4, rd, 7'b0110011); endfunction
  function automatic logic [31:0] rem(int rd, int rs1, int rs2);  return r_t(1, rs2, rs1, 6, rd, 7'b0110011); endfunction
  function automatic logic [31:0] lw(int rd, int rs1, int imm);   return i_t(imm, rs1, 2, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lbu(int rd, int rs1, int imm);  return i_t(imm, rs1, 4, rd, 7'b0000011); endfunction
  function automatic logic [31:0] sw(int rs2, int rs1, int imm);  return s_t(imm, rs2, rs1, 2); endfunction
  function automatic logic [31:0] sb(int rs2, int rs1, int imm);  return s_t(imm, rs2, rs1, 0); endfunction
  function automatic logic [31:0] bne(int rs1, int rs2, int off); return b_t(off, rs2, rs1, 1); endfunction
  function automatic logic [31:0] blt(int rs1, int rs2, int off); return b_t(off, rs2, rs1, 4); endfunction
  function automatic logic [31:0] beq(int rs1, int rs2, int off); return b_t(off, rs2, rs1, 0); endfunction
  function automatic logic [31:0] jalr(int rd, int rs1, int imm); return i_t(imm, rs1, 0, rd, 7'b1100111); endfunction
  function automatic logic [31:0] jal(int rd, int off);
    logic [20:0] o;
    o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] ecall(); return 32'h0000_0073; endfunction
  // I' type: vrs1 31:29, vrd1 28:26, vrs2 25:23, vrd2 22:20
  function automatic logic [31:0] ip_t(int op, int f3, int rd, int rs1, int vrs1, int vrd1, int vrs2, int vrd2);
    return {3'(vrs1), 3'(vrd1), 3'(vrs2), 3'(vrd2), 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
  endfunction
  // S' type: vrs1 31:29, vrd1 28:26, imm 25, rs2 24:20
  function automatic logic [31:0] sp_t(int f3, int rd, int rs1, int rs2, int vrs1, int vrd1);
    return {3'(vrs1), 3'(vrd1), 1'b0, 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'b0001011};
  endfunction
  function automatic logic [31:0] c0_lv(int vrd, int rs1, int rs2); return sp_t(0, 0, rs1, rs2, 0, vrd); endfunction
  function automatic logic [31:0] c0_sv(int vrs, int rs1, int rs2); return sp_t(1, 0, rs1, rs2, vrs, 0); endfunction
  function automatic logic [31:0] c1_merge(int vrd1, int vrd2, int vrs1, int vrs2);
    return ip_t(7'b0101011, 0, 0, 0, vrs1, vrd1, vrs2, vrd2);
  endfunction
  function automatic logic [31:0] c1_sort4(int vrd, int vrs); return ip_t(7'b0101011, 1, 0, 0, vrs, vrd, 0, 0); endfunction
  function automatic logic [31:0] c2_sort(int vrd, int vrs);  return ip_t(7'b1011011, 0, 0, 0, vrs, vrd, 0, 0); endfunction
  function automatic logic [31:0] c3_psum(int rd, int rs1, int vrd, int vrs);
    return ip_t(7'b1111011, 0, rd, rs1, vrs, vrd, 0, 0);
  endfunction
endpackage
