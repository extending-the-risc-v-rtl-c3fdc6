// tb_sort: the sorting workload, at reduced size, on the whole softcore.
// The program sorts N random signed 32-bit integers in memory:
//  1. chunk phase: each 16-value chunk is loaded as two vectors, both are
//     sorted with c2_sort and merged with c1_merge, and stored back (lower
//     half first);
//  2. merge phase: runs of 16, 32, ... values are merged pairwise between
//     two buffers with a vector merge loop: the larger half of each
//     c1_merge result is kept in a register and merged with the next vector
//     taken from whichever run has the smaller next head; the lower half
//     is stored.
// The program then scans the result with scalar loads, counting order
// violations (x20), summing the values (x21) and their squares (x22); the
// testbench checks all three against the sorted input (the sums make a
// lost or duplicated value show). It also prints the cycle count. The algorithm follows the publication's description (network sort
// of chunks, then merge sort with a merge block); the program layout and
// size (N = 1024) are this testbench's own.
module tb_sort;
  import tb_rv_asm::*;
  localparam int N = 1024;
  localparam int BUF0 = 32'h0001_0000, BUF1 = 32'h0002_0000;
  logic clk = 1'b0, clk2x = 1'b0, rst = 1'b1;
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
  logic [31:0] prog [$];
  function automatic int here(); return prog.size(); endfunction
  task automatic emit(logic [31:0] i); prog.push_back(i); endtask
  task automatic li(int rd, logic [31:0] v);
    logic [31:0] hi;
    hi = v + 32'h800;
    emit(lui(rd, int'(hi[31:12])));
    emit(addi(rd, rd, int'({{20{v[11]}}, v[11:0]})));
  endtask
  function automatic void ssort(ref int signed t [N]);
    for (int i = 1; i < N; i++)
      for (int j = i; j > 0 && t[j-1] > t[j]; j--) begin
        int signed x;
        x = t[j]; t[j] = t[j-1]; t[j-1] = x;
      end
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int signed a [N];
  initial begin
    int l_chunk, l_outer, l_inner, l_merge, l_loop, p_j1, p_j2, p_b1, p_b2, p_b3, l_takea, l_takeb, p_b4, l_done, p_call, cyc;
    logic [31:0] sum, sq;
    int signed s [N];
    for (int i = 0; i < N; i++) a[i] = int'($urandom_range(0, 200000)) - 100000;
    // ---- chunk phase: x10 = pointer, x12 = end
    li(10, BUF0); li(12, BUF0 + 4*N); li(17, 32);
    l_chunk = here();
    emit(c0_lv(1, 10, 0));
    emit(c0_lv(2, 10, 17));
    emit(c2_sort(1, 1));
    emit(c2_sort(2, 2));
    emit(c1_merge(1, 2, 1, 2));
    emit(c0_sv(2, 10, 0));
    emit(c0_sv(1, 10, 17));
    emit(addi(10, 10, 64));
    emit(bne(10, 12, 4 * (l_chunk - here())));
    // ---- merge phase: x10 src, x11 dst, x12 bytes, x13 run width (bytes)
    li(10, BUF0); li(11, BUF1); li(12, 4 * N); li(13, 64);
    l_outer = here();
    emit(addi(14, 0, 0));
    l_inner = here();
    emit(add(1, 10, 14));
    emit(add(2, 1, 13));
    emit(add(3, 2, 0));
    emit(add(4, 3, 13));
    emit(add(5, 11, 14));
    p_call = here(); emit(0);                  // jal x31, merge
    emit(add(15, 13, 13));
    emit(add(14, 14, 15));
    emit(blt(14, 12, 4 * (l_inner - here())));
    emit(add(16, 10, 0));
    emit(add(10, 11, 0));
    emit(add(11, 16, 0));
    emit(add(13, 13, 13));
    emit(blt(13, 12, 4 * (l_outer - here())));
    // ---- check: x10 = sorted data
    emit(add(5, 10, 0));
    emit(add(6, 10, 12));
    emit(addi(6, 6, -4));
    emit(addi(20, 0, 0));
    emit(lw(21, 5, 0));
    emit(mul(22, 21, 21));
    emit(lw(7, 5, 0));
    emit(lw(8, 5, 4));
    emit(slt(9, 8, 7));
    emit(add(20, 20, 9));
    emit(add(21, 21, 8));
    emit(mul(23, 8, 8));
    emit(add(22, 22, 23));
    emit(addi(5, 5, 4));
    emit(bne(5, 6, -32));
    emit(ecall());
    // ---- merge(x1..x2, x3..x4) -> x5, return to x31
    l_merge = here();
    prog[p_call] = jal(31, 4 * (l_merge - p_call));
    emit(c0_lv(1, 1, 0));
    emit(addi(1, 1, 32));
    emit(c0_lv(2, 3, 0));
    emit(addi(3, 3, 32));
    l_loop = here();
    emit(c1_merge(1, 2, 1, 2));
    emit(c0_sv(2, 5, 0));
    emit(addi(5, 5, 32));
    p_b1 = here(); emit(0);                    // beq x1, x2, takeb
    p_b2 = here(); emit(0);                    // beq x3, x4, takea
    emit(lw(6, 1, 0));
    emit(lw(7, 3, 0));
    p_b3 = here(); emit(0);                    // blt x7, x6, takeb
    l_takea = here();
    emit(c0_lv(2, 1, 0));
    emit(addi(1, 1, 32));
    emit(jal(0, 4 * (l_loop - here())));
    l_takeb = here();
    p_b4 = here(); emit(0);                    // beq x3, x4, done
    emit(c0_lv(2, 3, 0));
    emit(addi(3, 3, 32));
    emit(jal(0, 4 * (l_loop - here())));
    l_done = here();
    emit(c0_sv(1, 5, 0));
    emit(jalr(0, 31, 0));
    prog[p_b1] = beq(1, 2, 4 * (l_takeb - p_b1));
    prog[p_b2] = beq(3, 4, 4 * (l_takea - p_b2));
    prog[p_b3] = blt(7, 6, 4 * (l_takeb - p_b3));
    prog[p_b4] = beq(3, 4, 4 * (l_done - p_b4));

    for (int i = 0; i < prog.size(); i++) u_mem.mem[i/4][32*(i%4) +: 32] = prog[i];
    for (int i = 0; i < N; i++) u_mem.mem[(BUF0/16) + i/4][32*(i%4) +: 32] = a[i];
    s = a;
    ssort(s);
    sum = 0;
    foreach (s[i]) sum += s[i];
    sq = 0;
    foreach (s[i]) sq += 32'(s[i]) * 32'(s[i]);

    repeat (10) @(posedge clk);
    rst = 1'b0;
    cyc = 0;
    while (!halt) begin @(posedge clk); cyc++; end
    repeat (4) @(posedge clk);
    $display("sorted %0d values in %0d core cycles (%0d.%01d cycles per value)", N, cyc, cyc / N, (10 * cyc / N) % 10);
    checks += 2;
    if (dut.u_core.u_rf.r[20] !== 0)  begin failures++; $display("FAIL %0d order violations", dut.u_core.u_rf.r[20]); end
    if (dut.u_core.u_rf.r[21] !== sum) begin failures++; $display("FAIL sum %h expected %h", dut.u_core.u_rf.r[21], sum); end
    checks++;
    if (dut.u_core.u_rf.r[22] !== sq) begin failures++; $display("FAIL sum of squares %h expected %h", dut.u_core.u_rf.r[22], sq); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
