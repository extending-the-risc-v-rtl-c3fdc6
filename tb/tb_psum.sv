// tb_psum: the prefix-sum workload, at reduced size, on the whole softcore.
// N random 32-bit integers are prefix-summed twice: once with the vector
// unit (vector load, c3_psum carrying the running total between calls,
// vector store: 8 values per iteration) and once serially (load, add,
// store), as in the published comparison. The program then compares the
// two output arrays word by word, counting differences in x20; x13 holds
// the vector unit's final total. The testbench checks the count, the total
// and the serial total, and prints the cycles of both versions and their
// ratio. The algorithm follows the publication; the size (N = 4096) and
// the program are this testbench's own.
module tb_psum;
  import tb_rv_asm::*;
  localparam int N = 4096;
  localparam int IN = 32'h0001_0000, OUT = 32'h0002_0000, OUT2 = 32'h0003_0000;
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

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int l, cyc, t_vec, t_ser;
    logic [31:0] tot;
    li(10, IN); li(11, OUT); li(12, IN + 4*N); li(1, 1);
    emit(c0_lv(1, 10, 0));
    emit(c3_psum(13, 1, 2, 1));          // first call restarts the total
    emit(c0_sv(2, 11, 0));
    emit(addi(10, 10, 32));
    emit(addi(11, 11, 32));
    l = here();
    emit(c0_lv(1, 10, 0));
    emit(c3_psum(13, 0, 2, 1));
    emit(c0_sv(2, 11, 0));
    emit(addi(10, 10, 32));
    emit(addi(11, 11, 32));
    emit(bne(10, 12, 4 * (l - here())));
    emit(add(25, 13, 0));                // vector version done (x25 = total)
    li(5, IN); li(6, OUT2); emit(addi(7, 0, 0));
    l = here();
    emit(lw(8, 5, 0));
    emit(add(7, 7, 8));
    emit(sw(7, 6, 0));
    emit(addi(5, 5, 4));
    emit(addi(6, 6, 4));
    emit(bne(5, 12, 4 * (l - here())));
    emit(addi(26, 0, 1));                // serial version done
    li(5, OUT); li(6, OUT2); li(12, OUT + 4*N); emit(addi(20, 0, 0));
    l = here();
    emit(lw(8, 5, 0));
    emit(lw(9, 6, 0));
    emit(sub(9, 9, 8));
    emit(r_t(0, 9, 0, 3, 9, 7'b0110011));  // sltu x9, x0, x9: 1 when different
    emit(add(20, 20, 9));
    emit(addi(5, 5, 4));
    emit(addi(6, 6, 4));
    emit(bne(5, 12, 4 * (l - here())));
    emit(ecall());

    for (int i = 0; i < prog.size(); i++) u_mem.mem[i/4][32*(i%4) +: 32] = prog[i];
    tot = 0;
    for (int i = 0; i < N; i++) begin
      logic [31:0] v;
      v = $urandom;
      tot += v;
      u_mem.mem[(IN/16) + i/4][32*(i%4) +: 32] = v;
    end
    repeat (10) @(posedge clk);
    rst = 1'b0;
    cyc = 0; t_vec = 0; t_ser = 0;
    while (!halt) begin
      @(posedge clk);
      cyc++;
      if (t_vec == 0 && dut.u_core.u_rf.r[25] != 0) t_vec = cyc;
      if (t_ser == 0 && dut.u_core.u_rf.r[26] == 1) t_ser = cyc - t_vec;
    end
    repeat (4) @(posedge clk);
    $display("prefix sum of %0d values: vector %0d cycles, serial %0d cycles, ratio %0d.%02d",
             N, t_vec, t_ser, t_ser / t_vec, (100 * t_ser / t_vec) % 100);
    checks += 4;
    if (dut.u_core.u_rf.r[20] !== 0)   begin failures++; $display("FAIL %0d outputs differ", dut.u_core.u_rf.r[20]); end
    if (dut.u_core.u_rf.r[13] !== tot) begin failures++; $display("FAIL vector total %h expected %h", dut.u_core.u_rf.r[13], tot); end
    if (dut.u_core.u_rf.r[7] !== tot)  begin failures++; $display("FAIL serial total"); end
    if (t_vec == 0 || t_ser == 0)      begin failures++; $display("FAIL phase markers not seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
