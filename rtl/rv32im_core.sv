// rv32im_core: single-stage in-order RV32IM core with vector registers and
// custom SIMD units.
//
// How it works. Each cycle the instruction at pc comes combinationally from
// the instruction cache (ihit). Simple instructions (ALU, multiply, LUI,
// AUIPC, jumps, branches) read the register file, compute and write back in
// the same cycle, so a dependent instruction runs on the next cycle with no
// forwarding and no tracking. Instructions whose result arrives later -
// scalar and vector loads, division and the custom SIMD instructions - set
// a scoreboard bit on their destination registers; any later instruction
// that reads or writes a busy register waits. Loads and stores are handed
// to the data cache (dreq_*) and run there independently; their results
// come back on dresp_* and clear the scoreboard. The custom units are
// pipelines of fixed length that accept one call per cycle; a reservation
// shift register makes sure two of them never return in the same cycle.
// Division is blocking (rv_div, 33 cycles).
//
// Custom instructions (encodings of this design; fields as in vinsn_decode):
//   c0_lv  custom-0 f3=0 (S'): vrd1 <- mem[rs1+rs2], VLEN-aligned
//   c0_sv  custom-0 f3=1 (S'): mem[rs1+rs2] <- vrs1
//   c1_merge custom-1 f3=0 (I'): {vrd1,vrd2} <- merge(vrs1,vrs2)
//   c1_sort4 custom-1 f3=1 (I'): vrd1 <- bitonic sort of lanes 0..3 of vrs1
//   c2_sort  custom-2 (I'): vrd1 <- sort8(vrs1)
//   c3_psum  custom-3 (I'): vrd1 <- prefix sum(vrs1) + running total;
//                           rd <- running total; rs1 bit 0 restarts
// ECALL/EBREAK stop the core (halt) once nothing is in flight. FENCE is a
// no-op; CSRs are not implemented (read as a no-op). Unknown opcodes are
// treated as no-ops.
//
// The paper fixes the single stage, the untracked simple results, the
// 3-cycle load-to-use latency on a data-cache hit and the template
// interface of the custom units; port widths, encodings, the scoreboard,
// the reservation register and division are this design's choices.
module rv32im_core
  import simd_pkg::*;
#(
  parameter logic [31:0] RESET_PC = 32'h0
) (
  input  logic              clk,
  input  logic              rst,
  // instruction fetch
  output logic [31:0]       pc,
  input  logic [31:0]       insn,
  input  logic              ihit,
  // data cache request
  output logic              dreq_valid,
  input  logic              dreq_ready,
  output logic              dreq_we,
  output msize_e            dreq_size,
  output logic              dreq_uns,
  output logic [31:0]       dreq_addr,
  output logic [VLEN-1:0]   dreq_wdata,
  output logic [5:0]        dreq_tag,
  // data cache load reply (tag = {vector, register})
  input  logic              dresp_valid,
  input  logic [VLEN-1:0]   dresp_rdata,
  input  logic [5:0]        dresp_tag,
  output logic              halt,
  output logic              retire
);
  // ---------------------------------------------------------------- decode
  vfields_t f;
  vinsn_decode u_vdec (.insn, .f);

  logic [6:0] opc;
  logic [2:0] f3;
  logic [4:0] rd, rs1, rs2;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;
  always_comb begin
    opc = insn[6:0];
    f3  = insn[14:12];
    rd  = insn[11:7];
    rs1 = insn[19:15];
    rs2 = insn[24:20];
    imm_i = {{20{insn[31]}}, insn[31:20]};
    imm_s = {{20{insn[31]}}, insn[31:25], insn[11:7]};
    imm_b = {{19{insn[31]}}, insn[31], insn[7], insn[30:25], insn[11:8], 1'b0};
    imm_u = {insn[31:12], 12'b0};
    imm_j = {{11{insn[31]}}, insn[31], insn[19:12], insn[20], insn[30:21], 1'b0};
  end

  // ------------------------------------------------------- register files
  logic [31:0] x1v, x2v;
  logic [2:0]  x_we;
  logic [4:0]  x_wa [3];
  logic [31:0] x_wd [3];
  regfile #(.XLEN(32), .NWP(3)) u_rf (
    .clk, .rst, .raddr1(rs1), .raddr2(rs2), .rdata1(x1v), .rdata2(x2v),
    .we(x_we), .waddr(x_wa), .wdata(x_wd));

  logic [VLEN-1:0] v1v, v2v;
  logic [2:0]      v_we;
  logic [2:0]      v_wa [3];
  logic [VLEN-1:0] v_wd [3];
  vregfile #(.VLEN(VLEN), .NVREG(NVREG), .NWP(3)) u_vrf (
    .clk, .rst, .raddr1(f.vrs1), .raddr2(f.vrs2), .rdata1(v1v), .rdata2(v2v),
    .we(v_we), .waddr(v_wa), .wdata(v_wd));

  // ---------------------------------------------------------- custom units
  typedef enum logic [2:0] {U_NONE, U_MERGE, U_SORT4, U_SORT, U_PSUM} unit_e;
  localparam int NU = 4;
  localparam int LAT [NU] = '{4, 3, 6, 4};   // merge, sort4, sort, psum
  logic [NU-1:0]   u_in;
  logic [NU-1:0]   u_ov;
  logic [4:0]      u_ord  [NU];
  logic [2:0]      u_ovd1 [NU];
  logic [2:0]      u_ovd2 [NU];
  logic [31:0]     u_od   [NU];
  logic [VLEN-1:0] u_ov1  [NU];
  logic [VLEN-1:0] u_ov2  [NU];

  c1_merge #(.VLEN(VLEN)) u_merge (.clk, .reset(rst), .in_valid(u_in[0]),
    .rd, .vrd1(f.vrd1), .vrd2(f.vrd2), .in_data(x1v), .in_vdata1(v1v), .in_vdata2(v2v),
    .out_v(u_ov[0]), .out_rd(u_ord[0]), .out_vrd1(u_ovd1[0]), .out_vrd2(u_ovd2[0]),
    .out_data(u_od[0]), .out_vdata1(u_ov1[0]), .out_vdata2(u_ov2[0]));
  c1_sort4 #(.VLEN(VLEN)) u_sort4 (.clk, .reset(rst), .in_valid(u_in[1]),
    .rd, .vrd1(f.vrd1), .vrd2(f.vrd2), .in_data(x1v), .in_vdata1(v1v), .in_vdata2(v2v),
    .out_v(u_ov[1]), .out_rd(u_ord[1]), .out_vrd1(u_ovd1[1]), .out_vrd2(u_ovd2[1]),
    .out_data(u_od[1]), .out_vdata1(u_ov1[1]), .out_vdata2(u_ov2[1]));
  c2_sort #(.VLEN(VLEN)) u_sort (.clk, .reset(rst), .in_valid(u_in[2]),
    .rd, .vrd1(f.vrd1), .vrd2(f.vrd2), .in_data(x1v), .in_vdata1(v1v), .in_vdata2(v2v),
    .out_v(u_ov[2]), .out_rd(u_ord[2]), .out_vrd1(u_ovd1[2]), .out_vrd2(u_ovd2[2]),
    .out_data(u_od[2]), .out_vdata1(u_ov1[2]), .out_vdata2(u_ov2[2]));
  c3_psum #(.VLEN(VLEN)) u_psum (.clk, .reset(rst), .in_valid(u_in[3]),
    .rd, .vrd1(f.vrd1), .vrd2(f.vrd2), .in_data(x1v), .in_vdata1(v1v), .in_vdata2(v2v),
    .out_v(u_ov[3]), .out_rd(u_ord[3]), .out_vrd1(u_ovd1[3]), .out_vrd2(u_ovd2[3]),
    .out_data(u_od[3]), .out_vdata1(u_ov1[3]), .out_vdata2(u_ov2[3]));

  // one result per cycle at most (guaranteed by the reservation register)
  logic            c_v;
  logic [4:0]      c_rd;
  logic [2:0]      c_vd1, c_vd2;
  logic [31:0]     c_d;
  logic [VLEN-1:0] c_v1, c_v2;
  always_comb begin
    c_v = 1'b0; c_rd = '0; c_vd1 = '0; c_vd2 = '0; c_d = '0; c_v1 = '0; c_v2 = '0;
    for (int u = 0; u < NU; u++) begin
      if (u_ov[u]) begin
        c_v = 1'b1; c_rd = u_ord[u]; c_vd1 = u_ovd1[u]; c_vd2 = u_ovd2[u];
        c_d = u_od[u]; c_v1 = u_ov1[u]; c_v2 = u_ov2[u];
      end
    end
  end

  // ------------------------------------------------------------ scoreboard
  logic [31:0] sb_x;
  logic [7:0]  sb_v;
  logic [7:0]  rsv;      // rsv[k]: a custom result returns k cycles from now

  // --------------------------------------------------------- control/exec
  logic [31:0] alu_y, alu_b;
  logic        alu_alt, alu_mul;
  rv_alu u_alu (.f3, .alt(alu_alt), .mul(alu_mul), .a(x1v), .b(alu_b), .y(alu_y));

  logic        div_start, div_busy, div_done;
  logic [31:0] div_res;
  rv_div u_div (.clk, .rst, .start(div_start), .op(f3[1:0]), .a(x1v), .b(x2v),
                .busy(div_busy), .done(div_done), .result(div_res));

  logic        halted;
  logic        is_div, is_load, is_store, is_cust, is_vld, is_vst, is_sys;
  unit_e       unit;
  logic        use_rs1, use_rs2, use_vs1, use_vs2, wr_rd, wr_vd1, wr_vd2;
  logic        hazard, can_go, go;
  logic [31:0] next_pc, wb_val;
  logic        wb_en;
  logic        taken;
  int          lat;

  always_comb begin
    is_load  = (opc == OP_LOAD);
    is_store = (opc == OP_STORE);
    is_vld   = (opc == OP_C0) && (f3 == F3_C0_LV);
    is_vst   = (opc == OP_C0) && (f3 == F3_C0_SV);
    is_div   = (opc == OP_REG) && (insn[31:25] == 7'b0000001) && f3[2];
    is_sys   = (opc == OP_SYSTEM) && (f3 == 3'd0);
    unit = U_NONE;
    if (opc == OP_C1) unit = (f3 == F3_C1_SORT4) ? U_SORT4 : U_MERGE;
    if (opc == OP_C2) unit = U_SORT;
    if (opc == OP_C3) unit = U_PSUM;
    is_cust = (unit != U_NONE);
    unique case (unit)
      U_MERGE: lat = LAT[0];
      U_SORT4: lat = LAT[1];
      U_SORT:  lat = LAT[2];
      U_PSUM:  lat = LAT[3];
      default: lat = 1;
    endcase

    // register usage
    use_rs1 = !(opc inside {OP_LUI, OP_AUIPC, OP_JAL}) && !is_sys && (opc != OP_FENCE);
    use_rs2 = (opc inside {OP_BRANCH, OP_STORE, OP_REG}) || (opc == OP_C0);
    use_vs1 = is_cust || is_vst;
    use_vs2 = (unit == U_MERGE);
    wr_rd   = !(opc inside {OP_BRANCH, OP_STORE, OP_FENCE, OP_SYSTEM, OP_C0}) && (rd != 0);
    wr_vd1  = (is_cust || is_vld) && (f.vrd1 != 0);
    wr_vd2  = is_cust && (f.vrd2 != 0);

    hazard = (use_rs1 && sb_x[rs1]) || (use_rs2 && sb_x[rs2]) ||
             (wr_rd && sb_x[rd]) ||
             (use_vs1 && sb_v[f.vrs1]) || (use_vs2 && sb_v[f.vrs2]) ||
             (wr_vd1 && sb_v[f.vrd1]) || (wr_vd2 && sb_v[f.vrd2]);

    can_go = ihit && !halted && !hazard;
    if ((is_load || is_store || is_vld || is_vst) && !dreq_ready) can_go = 1'b0;
    if (is_cust && rsv[lat]) can_go = 1'b0;
    if (is_div && !div_done) can_go = 1'b0;
    if (is_sys && (sb_x != 0 || sb_v != 0 || !dreq_ready || rsv != 0)) can_go = 1'b0;
    div_start = ihit && !halted && !hazard && is_div && !div_busy && !div_done;

    // ALU operands
    alu_b   = (opc == OP_REG) ? x2v : imm_i;
    alu_alt = insn[30] && ((opc == OP_REG) || (f3 == 3'd5));
    alu_mul = (opc == OP_REG) && (insn[31:25] == 7'b0000001);

    unique case (f3)
      3'd0: taken = (x1v == x2v);
      3'd1: taken = (x1v != x2v);
      3'd4: taken = ($signed(x1v) <  $signed(x2v));
      3'd5: taken = ($signed(x1v) >= $signed(x2v));
      3'd6: taken = (x1v <  x2v);
      3'd7: taken = (x1v >= x2v);
      default: taken = 1'b0;
    endcase

    next_pc = pc + 32'd4;
    wb_en   = 1'b0;
    wb_val  = alu_y;
    unique case (opc)
      OP_LUI:    begin wb_en = 1'b1; wb_val = imm_u; end
      OP_AUIPC:  begin wb_en = 1'b1; wb_val = pc + imm_u; end
      OP_JAL:    begin wb_en = 1'b1; wb_val = pc + 32'd4; next_pc = pc + imm_j; end
      OP_JALR:   begin wb_en = 1'b1; wb_val = pc + 32'd4; next_pc = (x1v + imm_i) & ~32'd1; end
      OP_BRANCH: if (taken) next_pc = pc + imm_b;
      OP_IMM:    wb_en = 1'b1;
      OP_REG:    begin wb_en = 1'b1; if (is_div) wb_val = div_res; end
      default: ;
    endcase
    go = can_go;
  end

  // data cache request
  always_comb begin
    dreq_valid = go && (is_load || is_store || is_vld || is_vst);
    dreq_we    = is_store || is_vst;
    dreq_size  = (is_vld || is_vst) ? SZ_V : msize_e'({1'b0, f3[1:0]});
    dreq_uns   = f3[2];
    dreq_addr  = is_store ? x1v + imm_s : ((is_vld || is_vst) ? x1v + x2v : x1v + imm_i);
    dreq_wdata = is_vst ? v1v : {(VLEN/32){x2v}};
    dreq_tag   = is_vld ? {1'b1, 2'b00, f.vrd1} : {1'b0, rd};
  end

  // custom unit issue
  always_comb begin
    u_in = '0;
    if (go) begin
      u_in[0] = (unit == U_MERGE);
      u_in[1] = (unit == U_SORT4);
      u_in[2] = (unit == U_SORT);
      u_in[3] = (unit == U_PSUM);
    end
  end

  // register write ports
  always_comb begin
    x_we[0] = go && wb_en && (rd != 0);
    x_wa[0] = rd;
    x_wd[0] = wb_val;
    x_we[1] = dresp_valid && !dresp_tag[5];
    x_wa[1] = dresp_tag[4:0];
    x_wd[1] = dresp_rdata[31:0];
    x_we[2] = c_v;
    x_wa[2] = c_rd;
    x_wd[2] = c_d;
    v_we[0] = dresp_valid && dresp_tag[5];
    v_wa[0] = dresp_tag[2:0];
    v_wd[0] = dresp_rdata;
    v_we[1] = c_v;
    v_wa[1] = c_vd1;
    v_wd[1] = c_v1;
    v_we[2] = c_v;
    v_wa[2] = c_vd2;
    v_wd[2] = c_v2;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pc     <= RESET_PC;
      halted <= 1'b0;
      sb_x   <= '0;
      sb_v   <= '0;
      rsv    <= '0;
    end else begin
      logic [31:0] sx;
      logic [7:0]  sv;
      sx = sb_x;
      sv = sb_v;
      // completions
      if (dresp_valid && !dresp_tag[5]) sx[dresp_tag[4:0]] = 1'b0;
      if (dresp_valid &&  dresp_tag[5]) sv[dresp_tag[2:0]] = 1'b0;
      if (c_v) begin
        sx[c_rd]  = 1'b0;
        sv[c_vd1] = 1'b0;
        sv[c_vd2] = 1'b0;
      end
      // issue
      rsv <= rsv >> 1;
      if (go) begin
        pc <= next_pc;
        if (is_sys) halted <= 1'b1;
        if (is_load && rd != 0) sx[rd] = 1'b1;
        if (is_vld && f.vrd1 != 0) sv[f.vrd1] = 1'b1;
        if (is_cust) begin
          if (rd != 0)     sx[rd]     = 1'b1;
          if (f.vrd1 != 0) sv[f.vrd1] = 1'b1;
          if (f.vrd2 != 0) sv[f.vrd2] = 1'b1;
          rsv <= (rsv >> 1) | (8'd1 << (lat - 1));
        end
      end
      sx[0] = 1'b0;
      sv[0] = 1'b0;
      sb_x <= sx;
      sb_v <= sv;
    end
  end

  assign halt   = halted;
  assign retire = go;

  // a custom unit may only return in a slot that was reserved for it
  property p_one_return;
    @(posedge clk) disable iff (rst) $onehot0(u_ov);
  endproperty
  a_one_return: assert property (p_one_return);
endmodule
