// tb_simd_softcore: end-to-end test of the whole softcore at its default
// sizes. A behavioural AXI memory on clk2x holds a program at address 0 and
// 16 random signed words at 0x4000. The program (built with tb_rv_asm):
//  - sorts the 16 words with c0_lv, two c2_sort, c1_merge and c0_sv, then
//    walks the result with scalar loads counting order violations (x20)
//    and summing (x21);
//  - computes running prefix sums of both halves with c3_psum (x22, x23);
//  - runs c1_sort4, and c2_sort followed 3 cycles later by c1_sort4 so both
//    would return together (writeback reservation);
//  - multiplies and divides (x24..x26);
//  - stores to ten addresses 64 KiB apart so the DL1 and the LLC evict the
//    dirty sorted block to memory, re-reads the sorted block (x27);
//  - does a byte store/load (x29, x30), then ECALL.
// The expected values are computed here from the input words. Each
// mechanism (IL1/DL1/LLC misses, write-backs, no-fetch vector store,
// early LLC delivery, load-use stall, writeback reservation, overlapped
// custom calls, division stall, double-rate beats) is counted and must
// occur at least once.
// The mechanisms counted are the publication's; the program and memory
// model are this testbench's own.
module tb_simd_softcore;
  import tb_rv_asm::*;
  logic clk = 1'b0, clk2x = 1'b0, rst = 1'b1;
  // phase-aligned clocks: clk2x at twice the core clock, rising together
  initial forever begin
    #1 clk2x = 1'b1; clk = 1'b1;
    #1 clk2x = 1'b0;
    #1 clk2x = 1'b1; clk = 1'b0;
    #1 clk2x = 1'b0;
  end

  logic         arvalid, arready, rvalid, rready, rlast, awvalid, awready;
  logic         wvalid, wready, wlast, bvalid, bready, halt, retire;
  logic [31:0]  araddr, awaddr;
  logic [7:0]   arlen, awlen;
  logic [127:0] rdata, wdata;

  simd_softcore dut (
    .clk, .clk2x, .rst,
    .m_arvalid(arvalid), .m_arready(arready), .m_araddr(araddr), .m_arlen(arlen),
    .m_rvalid(rvalid), .m_rready(rready), .m_rdata(rdata), .m_rlast(rlast),
    .m_awvalid(awvalid), .m_awready(awready), .m_awaddr(awaddr), .m_awlen(awlen),
    .m_wvalid(wvalid), .m_wready(wready), .m_wdata(wdata), .m_wlast(wlast),
    .m_bvalid(bvalid), .m_bready(bready), .halt, .retire);

  tb_axi_mem #(.W(128), .WORDS(65536), .LAT(6)) u_mem (
    .clk(clk2x), .rst, .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast, .bvalid, .bready);

  int checks = 0, failures = 0;
  task automatic check(string what, logic [255:0] got, logic [255:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // program
  logic [31:0] prog [$];
  task automatic emit(logic [31:0] i); prog.push_back(i); endtask

  // ascending signed sort of the first n entries (insertion sort)
  function automatic void ssort(ref int signed t [16], input int n);
    for (int i = 1; i < n; i++)
      for (int j = i; j > 0 && t[j-1] > t[j]; j--) begin
        int signed x;
        x = t[j]; t[j] = t[j-1]; t[j-1] = x;
      end
  endfunction

  int signed a [16];
  int signed s [16];
  logic [31:0] exp_sum, ps0, ps1;

  // mechanism counters
  int n_imiss, n_dfetch, n_dwb, n_dalloc, n_lmiss, n_lwb, n_early, n_ldstall, n_rsv, n_overlap, n_divstall, n_narrow, n_wide;
  always @(posedge clk) if (!rst) begin
    if (dut.u_il1.llc_ack && !dut.u_il1.hit) n_imiss++;
    if (dut.u_dl1.state == dut.u_dl1.FETCH && dut.u_dl1.llc_ack) n_dfetch++;
    if (dut.u_dl1.state == dut.u_dl1.WB && dut.u_dl1.llc_ack) n_dwb++;
    if (dut.u_dl1.state == dut.u_dl1.IDLE && dut.u_dl1.s1_v && !dut.u_dl1.hit && dut.u_dl1.full_wr) n_dalloc++;
    if (dut.u_llc.state == dut.u_llc.FILL_AR && dut.u_llc.m_arready) n_lmiss++;
    if (dut.u_llc.state == dut.u_llc.WB_AW && dut.u_llc.m_awready) n_lwb++;
    if (dut.u_llc.state == dut.u_llc.FILL_R && dut.u_llc.ack_q) n_early++;
    if (dut.u_core.ihit && !dut.u_core.halted && dut.u_core.hazard) n_ldstall++;
    if (dut.u_core.ihit && dut.u_core.is_cust && dut.u_core.rsv[dut.u_core.lat] && !dut.u_core.hazard) n_rsv++;
    if (dut.u_core.u_in != 0 && dut.u_core.rsv != 0) n_overlap++;
    if (dut.u_core.ihit && dut.u_core.is_div && !dut.u_core.div_done) n_divstall++;
    if (dut.u_link.s_rvalid && dut.u_link.s_rready) n_wide++;
  end
  always @(posedge clk2x) if (!rst && rvalid && rready) n_narrow++;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    logic [255:0] v;
    // data
    for (int i = 0; i < 16; i++) a[i] = int'($urandom_range(0, 2000)) - 1000;
    s = a;
    ssort(s, 16);
    exp_sum = 0;
    foreach (s[i]) exp_sum += s[i];
    ps0 = 0; for (int i = 0; i < 8; i++) ps0 += a[i];
    ps1 = ps0; for (int i = 8; i < 16; i++) ps1 += a[i];

    emit(lui(10, 4));            // x10 = 0x4000
    emit(lui(11, 5));            // x11 = 0x5000
    emit(addi(12, 0, 32));
    emit(c0_lv(1, 10, 0));
    emit(addi(13, 10, 32));
    emit(c0_lv(2, 10, 12));
    emit(c2_sort(1, 1));
    emit(c2_sort(2, 2));
    emit(c1_merge(1, 2, 1, 2));
    emit(c0_sv(2, 11, 0));
    emit(c0_sv(1, 11, 12));
    emit(addi(5, 11, 0));
    emit(addi(6, 11, 60));
    emit(addi(20, 0, 0));
    emit(lw(21, 5, 0));
    emit(lw(7, 5, 0));           // 15: loop
    emit(lw(8, 5, 4));
    emit(slt(9, 8, 7));
    emit(add(20, 20, 9));
    emit(add(21, 21, 8));
    emit(addi(5, 5, 4));
    emit(bne(5, 6, -24));
    emit(c0_lv(3, 10, 0));       // 22
    emit(addi(1, 0, 1));
    emit(c3_psum(22, 1, 4, 3));
    emit(c0_lv(5, 10, 12));
    emit(c3_psum(23, 0, 6, 5));
    emit(addi(14, 0, 64));
    emit(c0_sv(4, 11, 14));
    emit(addi(15, 0, 96));
    emit(c0_sv(6, 11, 15));
    emit(c1_sort4(7, 3));
    emit(addi(16, 0, 128));
    emit(c0_sv(7, 11, 16));
    emit(c2_sort(1, 3));         // 34
    emit(addi(0, 0, 0));
    emit(addi(0, 0, 0));
    emit(c1_sort4(2, 5));
    emit(addi(17, 0, 3));
    emit(mul(24, 21, 17));
    emit(addi(18, 0, 7));
    emit(div(25, 24, 18));
    emit(rem(26, 24, 18));
    emit(lui(19, 16));           // x19 = 0x10000
    emit(add(28, 11, 19));
    for (int k = 0; k < 10; k++) begin
      emit(sw(21, 28, 0));
      emit(add(28, 28, 19));
    end
    emit(addi(5, 11, 0));
    emit(addi(27, 0, 0));
    emit(lw(7, 5, 0));           // loop2
    emit(add(27, 27, 7));
    emit(addi(5, 5, 4));
    emit(bne(5, 6, -12));
    emit(lw(7, 5, 0));
    emit(add(27, 27, 7));
    emit(sb(18, 11, 1));
    emit(lbu(29, 11, 1));
    emit(lw(30, 11, 0));
    emit(ecall());

    for (int i = 0; i < prog.size(); i++) u_mem.mem[i/4][32*(i%4) +: 32] = prog[i];
    for (int i = 0; i < 16; i++) u_mem.mem[(32'h4000/16) + i/4][32*(i%4) +: 32] = a[i];

    repeat (10) @(posedge clk);
    rst = 1'b0;
    cyc = 0;
    while (!halt) begin
      @(posedge clk);
      cyc++;
    end
    repeat (4) @(posedge clk);
    $display("program ran %0d core cycles", cyc);

    check("x20 order violations", 256'(dut.u_core.u_rf.r[20]), 0);
    check("x21 sum", 256'(dut.u_core.u_rf.r[21]), 256'(exp_sum));
    check("x22 psum half", 256'(dut.u_core.u_rf.r[22]), 256'(ps0));
    check("x23 psum total", 256'(dut.u_core.u_rf.r[23]), 256'(ps1));
    begin
      logic [31:0] m3, q, r;
      m3 = exp_sum * 32'd3;
      q  = $signed(m3) / 32'sd7;
      r  = $signed(m3) % 32'sd7;
      check("x24 mul", 256'(dut.u_core.u_rf.r[24]), 256'(m3));
      check("x25 div", 256'(dut.u_core.u_rf.r[25]), 256'(q));
      check("x26 rem", 256'(dut.u_core.u_rf.r[26]), 256'(r));
    end
    check("x27 reread sum", 256'(dut.u_core.u_rf.r[27]), 256'(exp_sum));
    check("x29 lbu", 256'(dut.u_core.u_rf.r[29]), 256'(7));
    check("x30 lw after sb", 256'(dut.u_core.u_rf.r[30]), 256'((32'(s[0]) & 32'hFFFF00FF) | 32'h0700));
    begin
      int signed t [16];
      t = a;
      ssort(t, 8);
      v = 0;
      for (int i = 0; i < 8; i++) v[32*i +: 32] = t[i];
      check("v1 c2_sort", dut.u_core.u_vrf.r[1], v);
      for (int i = 0; i < 4; i++) t[i] = a[8+i];
      ssort(t, 4);
      v = 0;
      for (int i = 0; i < 4; i++) v[32*(3-i) +: 32] = t[i];
      check("v2 c1_sort4", dut.u_core.u_vrf.r[2], v);
      for (int i = 0; i < 4; i++) t[i] = a[i];
      ssort(t, 4);
      v = 0;
      for (int i = 0; i < 4; i++) v[32*(3-i) +: 32] = t[i];
      check("v7 c1_sort4", dut.u_core.u_vrf.r[7], v);
    end
    begin
      logic [31:0] acc;
      acc = 0;
      for (int i = 0; i < 8; i++) begin acc += a[i]; v[32*i +: 32] = acc; end
      check("v4 c3_psum", dut.u_core.u_vrf.r[4], v);
      for (int i = 0; i < 8; i++) begin acc += a[8+i]; v[32*i +: 32] = acc; end
      check("v6 c3_psum", dut.u_core.u_vrf.r[6], v);
    end

    $display("events: imiss=%0d dfetch=%0d dwb=%0d dalloc=%0d lmiss=%0d lwb=%0d early=%0d ldstall=%0d rsv=%0d overlap=%0d divstall=%0d narrow=%0d wide=%0d",
             n_imiss, n_dfetch, n_dwb, n_dalloc, n_lmiss, n_lwb, n_early, n_ldstall, n_rsv, n_overlap, n_divstall, n_narrow, n_wide);
    check("IL1 miss seen", 256'(n_imiss > 0), 1);
    check("DL1 fetch seen", 256'(n_dfetch > 0), 1);
    check("DL1 write-back seen", 256'(n_dwb > 0), 1);
    check("DL1 no-fetch vector store seen", 256'(n_dalloc > 0), 1);
    check("LLC miss seen", 256'(n_lmiss > 0), 1);
    check("LLC write-back seen", 256'(n_lwb > 0), 1);
    check("LLC early delivery seen", 256'(n_early > 0), 1);
    check("load-use stall seen", 256'(n_ldstall > 0), 1);
    check("writeback reservation seen", 256'(n_rsv > 0), 1);
    check("overlapped custom calls seen", 256'(n_overlap > 0), 1);
    check("division stall seen", 256'(n_divstall > 0), 1);
    check("two narrow beats per wide beat", 256'(n_narrow), 256'(2 * n_wide));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
