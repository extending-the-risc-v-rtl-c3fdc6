// tb_memcpy: the streaming workload the design was tuned for, at reduced
// size. The whole top runs a vector memcpy() written with the vector load
// and store instructions (one 256-bit register per iteration) from a
// source array to a destination array that together are twice the
// last-level cache, so both streams go through DRAM bursts; then it reads
// the destination back and folds it with the prefix-sum unit, whose running
// total must equal the sum of the source words. Destination blocks already
// written back to the memory model must equal the source. The copy rate in
// bytes per core cycle is printed. Memory: a 4 MiB model behind the 128-bit
// double-rate port.
// The workload (vector load/store memcpy) follows the publication; its size
// here is reduced to keep the simulation short.
module tb_memcpy;
  import tb_rv_asm::*;
  localparam int SRC = 32'h0010_0000, DST = 32'h0018_0000, LEN = 32'h0004_0000;
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
  tb_axi_mem #(.W(128), .WORDS(262144), .LAT(6)) u_mem (
    .clk(clk2x), .rst, .arvalid, .arready, .araddr, .arlen, .rvalid, .rready, .rdata, .rlast,
    .awvalid, .awready, .awaddr, .awlen, .wvalid, .wready, .wdata, .wlast, .bvalid, .bready);

  int checks = 0, failures = 0;
  logic [31:0] prog [$];
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int cyc, t_copy, n_same, n_wb;
    logic [31:0] sum;
    // program
    prog.push_back(lui(10, SRC >> 12));
    prog.push_back(lui(11, DST >> 12));
    prog.push_back(lui(12, (SRC + LEN) >> 12));
    prog.push_back(c0_lv(1, 10, 0));           // copy loop
    prog.push_back(c0_sv(1, 11, 0));
    prog.push_back(addi(10, 10, 32));
    prog.push_back(addi(11, 11, 32));
    prog.push_back(bne(10, 12, -16));
    prog.push_back(addi(20, 0, 1));            // copy done marker (x20)
    prog.push_back(lui(11, DST >> 12));
    prog.push_back(lui(12, (DST + LEN) >> 12));
    prog.push_back(c0_lv(2, 11, 0));
    prog.push_back(c3_psum(13, 20, 3, 2));     // first call restarts the total
    prog.push_back(addi(11, 11, 32));
    prog.push_back(c0_lv(2, 11, 0));           // check loop
    prog.push_back(c3_psum(13, 0, 3, 2));
    prog.push_back(addi(11, 11, 32));
    prog.push_back(bne(11, 12, -12));
    prog.push_back(add(14, 13, 0));            // wait for the last total
    prog.push_back(ecall());
    for (int i = 0; i < prog.size(); i++) u_mem.mem[i/4][32*(i%4) +: 32] = prog[i];
    sum = 0;
    for (int w = 0; w < LEN / 4; w++) begin
      logic [31:0] v;
      v = $urandom;
      sum += v;
      u_mem.mem[(SRC/16) + w/4][32*(w%4) +: 32] = v;
      u_mem.mem[(DST/16) + w/4][32*(w%4) +: 32] = 32'd0;
    end
    repeat (10) @(posedge clk);
    rst = 1'b0;
    cyc = 0; t_copy = 0;
    while (!halt) begin
      @(posedge clk);
      cyc++;
      if (t_copy == 0 && dut.u_core.u_rf.r[20] == 1) t_copy = cyc;
    end
    repeat (4) @(posedge clk);
    $display("memcpy of %0d bytes: %0d core cycles, %0d.%02d bytes/cycle copied; whole run %0d cycles",
             LEN, t_copy, LEN / t_copy, (100 * LEN / t_copy) % 100, cyc);
    checks++;
    if (dut.u_core.u_rf.r[14] !== sum) begin
      failures++; $display("FAIL destination sum %h expected %h", dut.u_core.u_rf.r[14], sum);
    end
    // destination blocks already written back to DRAM must match the source
    n_same = 0; n_wb = 0;
    for (int q = 0; q < LEN / 16; q++)
      if (u_mem.mem[(DST/16) + q] != 0) begin
        n_wb++;
        if (u_mem.mem[(DST/16) + q] === u_mem.mem[(SRC/16) + q]) n_same++;
      end
    $display("destination quadwords in DRAM: %0d written back, %0d equal to the source", n_wb, n_same);
    checks += 2;
    if (n_wb < LEN / 64) begin failures++; $display("FAIL too little of the copy reached DRAM"); end
    if (n_same != n_wb)  begin failures++; $display("FAIL DRAM copy differs from the source"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
