// tb_rv32im_core: the core alone, with a behavioural instruction memory
// (always hitting) and a data memory that accepts every request and replies
// exactly 2 cycles later, like a data-cache hit. The program, built here,
// runs random RV32IM register-register and immediate operations (corner
// operands included), byte/half/word loads and stores, all branch kinds
// taken and not taken, JAL/JALR, and the custom vector instructions; the
// expected results come from a small reference model in this file.
// Timing checks (from the retire cycle of each instruction):
//   - simple instructions retire one per cycle;
//   - a dependent instruction runs 3 cycles after a load that hits;
//   - a custom unit result is usable after its pipeline length
//     (c2_sort 6, c1_sort4 3, c1_merge 4, c3_psum 4 cycles), plus the
//     write-back cycle;
//   - two independent c2_sort calls issue on consecutive cycles;
//   - a division holds the core: the next instruction retires 35 cycles
//     after the division is first presented (33 divider cycles, start
//     and write-back).
// Single-cycle issue and the 3-cycle load-to-use latency follow the
// publication; encodings and division timing are this design's.
module tb_rv32im_core;
  import simd_pkg::*;
  import tb_rv_asm::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic [31:0] pc, insn, dreq_addr;
  logic ihit, dreq_valid, dreq_ready, dreq_we, dreq_uns, dresp_valid, halt, retire;
  msize_e dreq_size;
  logic [255:0] dreq_wdata, dresp_rdata;
  logic [5:0] dreq_tag, dresp_tag;
  rv32im_core dut (.*);

  logic [31:0] prog [$];
  logic [31:0] ex [32];            // reference register values
  logic [7:0]  dmem [65536];
  int checks = 0, failures = 0, cyc = 0;
  int rt [int];                    // retire cycle by pc
  int fs [int];                    // first cycle each pc is presented

  task automatic chk(string what, logic [255:0] got, logic [255:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  // ------------------------------------------------ memories
  assign insn = (pc[31:2] < prog.size()) ? prog[pc[31:2]] : 32'h0000_0073;
  assign ihit = 1'b1;
  assign dreq_ready = 1'b1;
  logic [255:0] p1_d, p2_d;
  logic [5:0]   p1_t, p2_t;
  logic         p1_v, p2_v;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (retire) rt[int'(pc)] = cyc;
    if (!rst && !fs.exists(int'(pc))) fs[int'(pc)] = cyc;
    p2_v <= p1_v; p2_d <= p1_d; p2_t <= p1_t;
    p1_v <= 1'b0;
    if (!rst && dreq_valid && dreq_ready) begin
      int nb;
      logic [255:0] d;
      nb = dreq_size == SZ_V ? 32 : (1 << int'(dreq_size));
      d = '0;
      if (dreq_we) for (int j = 0; j < nb; j++) dmem[16'(dreq_addr + j)] = dreq_wdata[8*j +: 8];
      else begin
        for (int j = 0; j < nb; j++) d[8*j +: 8] = dmem[16'(dreq_addr + j)];
        if (!dreq_uns && dreq_size == SZ_B) d[31:0] = {{24{d[7]}}, d[7:0]};
        if (!dreq_uns && dreq_size == SZ_H) d[31:0] = {{16{d[15]}}, d[15:0]};
        p1_v <= 1'b1; p1_d <= d; p1_t <= dreq_tag;
      end
    end
    if (rst) begin p1_v <= 1'b0; p2_v <= 1'b0; end
  end
  assign dresp_valid = p2_v;
  assign dresp_rdata = p2_d;
  assign dresp_tag   = p2_t;

  // ------------------------------------------------ program builder + model
  function automatic logic [31:0] alu(int f7, int f3, logic [31:0] a, logic [31:0] b);
    logic [63:0] p;
    if (f7 == 1) begin
      case (f3)
        0: return a * b;
        1: begin p = 64'($signed(a)) * 64'($signed(b)); return p[63:32]; end
        2: begin p = 64'($signed(a)) * {32'd0, b}; return p[63:32]; end
        3: begin p = {32'd0, a} * {32'd0, b}; return p[63:32]; end
        4: return b == 0 ? 32'hFFFF_FFFF : (a == 32'h8000_0000 && b == 32'hFFFF_FFFF) ? a : 32'($signed(a) / $signed(b));
        5: return b == 0 ? 32'hFFFF_FFFF : a / b;
        6: return b == 0 ? a : (a == 32'h8000_0000 && b == 32'hFFFF_FFFF) ? 32'd0 : 32'($signed(a) % $signed(b));
        default: return b == 0 ? a : a % b;
      endcase
    end
    case (f3)
      0: return f7 == 32 ? a - b : a + b;
      1: return a << b[4:0];
      2: return 32'($signed(a) < $signed(b));
      3: return 32'(a < b);
      4: return a ^ b;
      5: return f7 == 32 ? 32'($signed(a) >>> b[4:0]) : a >> b[4:0];
      6: return a | b;
      default: return a & b;
    endcase
  endfunction
  function automatic int here(); return 4 * prog.size(); endfunction
  task automatic emit(logic [31:0] i); prog.push_back(i); endtask
  task automatic rop(int f7, int f3, int rd, int rs1, int rs2);
    emit(r_t(f7, rs2, rs1, f3, rd, 7'b0110011));
    if (rd != 0) ex[rd] = alu(f7, f3, ex[rs1], ex[rs2]);
  endtask
  task automatic iop(int f3, int rd, int rs1, int imm);
    int f7;
    f7 = (f3 == 5 && imm[10]) ? 32 : 0;
    emit(i_t(imm, rs1, f3, rd, 7'b0010011));
    if (rd != 0) ex[rd] = alu(f7, f3, ex[rs1], (f3 == 1 || f3 == 5) ? 32'(imm[4:0]) : 32'(imm));
  endtask
  task automatic li(int rd, logic [31:0] v);
    logic [31:0] hi;
    hi = v + 32'h800;
    emit(lui(rd, int'(hi[31:12])));
    emit(addi(rd, rd, int'({{20{v[11]}}, v[11:0]})));
    ex[rd] = v;
  endtask
  function automatic logic [31:0] operand();
    case ($urandom_range(0, 5))
      0: return 32'h8000_0000;
      1: return 32'hFFFF_FFFF;
      2: return 32'd0;
      3: return $urandom_range(0, 40);
      default: return $urandom;
    endcase
  endfunction

  function automatic void ssort(ref int signed t [16], input int n);
    for (int i = 1; i < n; i++)
      for (int j = i; j > 0 && t[j-1] > t[j]; j--) begin
        int signed x;
        x = t[j]; t[j] = t[j-1]; t[j-1] = x;
      end
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int p_alu0, p_alu1, p_lw, p_use, p_srt, p_srt2, p_srt_use, p_s4, p_s4_use, p_mg, p_mg_use, p_ps, p_ps_use, p_div, p_after_div;
  int n_taken_exp = 0, n_fall_exp = 0;
  int signed a [16];
  initial begin
    foreach (ex[i]) ex[i] = 0;
    for (int i = 0; i < 65536; i++) dmem[i] = 8'($urandom);
    for (int i = 0; i < 16; i++) begin
      a[i] = int'($urandom_range(0, 2000)) - 1000;
      for (int j = 0; j < 4; j++) dmem[16'h2000 + 4*i + j] = 8'(a[i] >> (8*j));
    end
    // random ALU section
    for (int r = 1; r < 16; r++) li(r, operand());
    for (int k = 0; k < 300; k++) begin
      int f3, f7;
      f3 = $urandom_range(0, 7);
      case ($urandom_range(0, 2))
        0: f7 = 0;
        1: f7 = (f3 == 0 || f3 == 5) ? 32 : 0;
        default: f7 = 1;
      endcase
      if ($urandom_range(0, 3) == 0) begin
        int imm;
        imm = (f3 == 1) ? $urandom_range(0, 31) : (f3 == 5) ? ($urandom_range(0, 31) | ($urandom_range(0, 1) << 10)) : int'($urandom_range(0, 4095)) - 2048;
        iop(f3, $urandom_range(1, 15), $urandom_range(0, 15), imm);
      end else rop(f7, f3, $urandom_range(1, 15), $urandom_range(0, 15), $urandom_range(0, 15));
    end
    // timing: simple instructions one per cycle
    p_alu0 = here();
    for (int k = 0; k < 16; k++) rop(0, k % 8, 16 + (k % 4), 1 + k, 2 + (k % 7));
    p_alu1 = here() - 4;
    // loads and stores (base x20 = 0x1000)
    li(20, 32'h1000);
    for (int k = 0; k < 6; k++) begin
      emit(sw(1 + k, 20, 4 * k));
      for (int j = 0; j < 4; j++) dmem[16'h1000 + 4*k + j] = 8'(ex[1 + k] >> (8*j));
    end
    emit(sb(7, 20, 25)); dmem[16'h1019] = ex[7][7:0];
    emit(s_t(30, 8, 20, 1)); dmem[16'h101E] = ex[8][7:0]; dmem[16'h101F] = ex[8][15:8];
    p_lw = here();
    emit(lw(21, 20, 8)); ex[21] = ex[3];
    p_use = here();
    rop(0, 0, 22, 21, 21);
    emit(i_t(25, 20, 0, 23, 7'b0000011)); ex[23] = {{24{dmem[16'h1019][7]}}, dmem[16'h1019]};
    emit(lbu(24, 20, 25));                ex[24] = {24'd0, dmem[16'h1019]};
    emit(i_t(30, 20, 1, 25, 7'b0000011)); ex[25] = {{16{dmem[16'h101F][7]}}, dmem[16'h101F], dmem[16'h101E]};
    emit(i_t(30, 20, 5, 26, 7'b0000011)); ex[26] = {16'd0, dmem[16'h101F], dmem[16'h101E]};
    // division blocks
    p_div = here();
    rop(1, 4, 27, 1, 2);
    p_after_div = here();
    rop(0, 0, 28, 1, 1);
    // branches: each taken branch increments x29, each
    // fall-through increments x30 (the taken path lands on the x29 increment)
    li(29, 0); li(30, 0);
    for (int k = 0; k < 24; k++) begin
      int f3, ra, rb;
      bit tk;
      logic [31:0] va, vb;
      case (k % 6) 0: f3 = 0; 1: f3 = 1; 2: f3 = 4; 3: f3 = 5; 4: f3 = 6; default: f3 = 7; endcase
      ra = $urandom_range(0, 15); rb = (k % 4 == 0) ? ra : $urandom_range(0, 15);
      va = ex[ra]; vb = ex[rb];
      case (f3)
        0: tk = va == vb;
        1: tk = va != vb;
        4: tk = $signed(va) < $signed(vb);
        5: tk = $signed(va) >= $signed(vb);
        6: tk = va < vb;
        default: tk = va >= vb;
      endcase
      emit(b_t(12, rb, ra, f3));
      emit(addi(30, 30, 1));
      emit(jal(0, 8));
      emit(addi(29, 29, 1));
      if (tk) begin n_taken_exp++; ex[29]++; end else begin n_fall_exp++; ex[30]++; end
    end
    // jal/jalr
    emit(jal(31, 8)); ex[31] = here();
    emit(addi(29, 29, 100));
    li(19, here() + 24);
    emit(i_t(0, 19, 0, 18, 7'b1100111)); ex[18] = here();
    emit(addi(29, 29, 100));
    emit(addi(29, 29, 100));
    emit(addi(29, 29, 100));
    // vectors: v1,v2 <- a[0..7], a[8..15]
    li(16, 32'h2000); li(17, 32'h20);
    emit(c0_lv(1, 16, 0));
    emit(c0_lv(2, 16, 17));
    p_srt = here();
    emit(c2_sort(3, 1));
    p_srt2 = here();
    emit(c2_sort(4, 2));
    p_srt_use = here();
    emit(c1_merge(5, 6, 3, 4));
    p_mg = p_srt_use;
    p_mg_use = here();
    emit(c1_sort4(7, 5));
    p_s4 = p_mg_use;
    p_s4_use = here();
    emit(c3_psum(14, 17, 2, 7));     // x17 = 0x20: bit 0 clear, keep running total (0 after reset)
    p_ps = p_s4_use;
    p_ps_use = here();
    emit(add(13, 14, 0));
    li(12, 1);
    emit(c3_psum(15, 12, 1, 1));     // x12 = 1: restart
    li(16, 32'h3000);
    for (int k = 3; k < 9; k++) begin
      li(17, 32 * (k - 3));
      emit(c0_sv(k == 8 ? 1 : k, 16, 17));
    end
    emit(ecall());

    repeat (3) @(posedge clk);
    #1 rst = 0;
    while (!halt) @(posedge clk);
    repeat (6) @(posedge clk);

    // registers
    for (int r = 1; r < 32; r++) if (r != 13 && r != 14 && r != 15 && r != 17 && r != 16)
      chk($sformatf("x%0d", r), 256'(dut.u_rf.r[r]), 256'(ex[r]));
    chk("taken branches", 256'(dut.u_rf.r[29]), 256'(n_taken_exp));
    chk("fall-through branches", 256'(dut.u_rf.r[30]), 256'(n_fall_exp));
    // memory results of the vector units
    begin
      int signed s [16], t [16];
      logic [255:0] v3, v4, v5, v6, v7, v8, got [6];
      logic [31:0] acc, tot;
      for (int k = 0; k < 6; k++) for (int j = 0; j < 32; j++) got[k][8*j +: 8] = dmem[16'h3000 + 32*k + j];
      s = a; ssort(s, 8);
      for (int i = 0; i < 8; i++) v3[32*i +: 32] = s[i];
      for (int i = 0; i < 8; i++) t[i] = a[8+i];
      ssort(t, 8);
      for (int i = 0; i < 8; i++) v4[32*i +: 32] = t[i];
      s = a; ssort(s, 16);
      for (int i = 0; i < 8; i++) begin v5[32*i +: 32] = s[8+i]; v6[32*i +: 32] = s[i]; end
      for (int i = 0; i < 4; i++) t[i] = s[8+i];
      ssort(t, 4);
      v7 = got[4];                   // lanes 4..7 are not specified by the unit
      for (int i = 0; i < 4; i++) v7[32*(3-i) +: 32] = t[i];
      acc = 0;
      for (int i = 0; i < 8; i++) begin acc += v7[32*i +: 32]; v8[32*i +: 32] = acc; end
      tot = acc;
      chk("c2_sort v3", got[0], v3);
      chk("c2_sort v4", got[1], v4);
      chk("c1_merge upper v5", got[2], v5);
      chk("c1_merge lower v6", got[3], v6);
      chk("c1_sort4 v7", got[4][127:0], v7[127:0]);
      chk("c3_psum v2", dut.u_vrf.r[2], v8);
      chk("c3_psum total x14", 256'(dut.u_rf.r[14]), 256'(tot));
      chk("x13 reads x14 after c3_psum", 256'(dut.u_rf.r[13]), 256'(tot));
      acc = 0;
      for (int i = 0; i < 8; i++) begin acc += a[i]; v8[32*i +: 32] = acc; end
      chk("c3_psum restart v8", got[5], v8);
      chk("c3_psum restart x15", 256'(dut.u_rf.r[15]), 256'(acc));
    end
    // timing
    $display("gaps: alu=%0d load-use=%0d sort-use=%0d sort-sort=%0d merge-use=%0d sort4-use=%0d psum-use=%0d div=%0d",
      rt[p_alu1] - rt[p_alu0], rt[p_use] - rt[p_lw], rt[p_srt_use] - rt[p_srt2], rt[p_srt2] - rt[p_srt],
      rt[p_mg_use] - rt[p_mg], rt[p_s4_use] - rt[p_s4], rt[p_ps_use] - rt[p_ps], rt[p_after_div] - fs[p_div]);
    chk("simple insns one per cycle", 256'(rt[p_alu1] - rt[p_alu0]), 15);
    chk("load-to-use 3 cycles", 256'(rt[p_use] - rt[p_lw]), 3);
    chk("c2_sort calls pipelined", 256'(rt[p_srt2] - rt[p_srt]), 1);
    chk("c2_sort 6 cycles + write-back", 256'(rt[p_srt_use] - rt[p_srt2]), 7);
    chk("c1_merge 4 cycles + write-back", 256'(rt[p_mg_use] - rt[p_mg]), 5);
    chk("c1_sort4 3 cycles + write-back", 256'(rt[p_s4_use] - rt[p_s4]), 4);
    chk("c3_psum 4 cycles + write-back", 256'(rt[p_ps_use] - rt[p_ps]), 5);
    chk("division: next insn retires 35 cycles after", 256'(rt[p_after_div] - fs[p_div]), 35);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
