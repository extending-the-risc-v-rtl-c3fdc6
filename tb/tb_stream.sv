// tb_stream: the STREAM memory benchmark (copy, scale, add, triad) as
// plain RV32IM scalar loops, without the vector instructions, on 32-bit
// integers (the core has no floating point). Each array is N = 65536 words
// (256 KiB), so the three arrays are three times the last-level cache and
// the kernels stream through DRAM. The program then sums each array (x20,
// x21, x22); the testbench checks the sums against its own model and
// prints each kernel's cycles and bytes moved per cycle. The kernels follow
// the published benchmark; integer data and the sizes are this
// testbench's own choice.
module tb_stream;
  import tb_rv_asm::*;
  localparam int N = 65536;
  localparam int A = 32'h0010_0000, B = 32'h0014_0000, C = 32'h0018_0000;
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
  function automatic int here(); return prog.size(); endfunction
  task automatic emit(logic [31:0] i); prog.push_back(i); endtask
  task automatic li(int rd, logic [31:0] v);
    logic [31:0] hi;
    hi = v + 32'h800;
    emit(lui(rd, int'(hi[31:12])));
    emit(addi(rd, rd, int'({{20{v[11]}}, v[11:0]})));
  endtask
  // one kernel: x1, x2, x3 walk the arrays, x4 is x1's end; body(k)
  task automatic kernel(int k, logic [31:0] d, logic [31:0] s1, logic [31:0] s2);
    int l;
    li(1, d); li(2, s1); li(3, s2); li(4, d + 4*N);
    l = here();
    case (k)
      0: begin emit(lw(5, 2, 0)); emit(sw(5, 1, 0)); end                        // copy  d = s1
      1: begin emit(lw(5, 2, 0)); emit(mul(5, 5, 30)); emit(sw(5, 1, 0)); end   // scale d = 3*s1
      2: begin emit(lw(5, 2, 0)); emit(lw(6, 3, 0)); emit(add(5, 5, 6)); emit(sw(5, 1, 0)); end
      default: begin emit(lw(5, 2, 0)); emit(lw(6, 3, 0)); emit(mul(6, 6, 30)); emit(add(5, 5, 6)); emit(sw(5, 1, 0)); end
    endcase
    emit(addi(1, 1, 4)); emit(addi(2, 2, 4)); emit(addi(3, 3, 4));
    emit(bne(1, 4, 4 * (l - here())));
    emit(addi(24 + k, 0, 1));            // kernel k done
  endtask
  task automatic asum(int rd, logic [31:0] base);
    int l;
    li(1, base); li(4, base + 4*N); emit(addi(rd, 0, 0));
    l = here();
    emit(lw(5, 1, 0)); emit(add(rd, rd, 5)); emit(addi(1, 1, 4));
    emit(bne(1, 4, 4 * (l - here())));
  endtask

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, t [4], prev;
    logic [31:0] sa, sb, sc;
    string nm [4] = '{"copy", "scale", "add", "triad"};
    int bytes [4] = '{8, 8, 12, 12};
    emit(addi(30, 0, 3));
    kernel(0, C, A, A);                  // c = a
    kernel(1, B, C, C);                  // b = 3c
    kernel(2, C, A, B);                  // c = a + b
    kernel(3, A, B, C);                  // a = b + 3c
    asum(20, A); asum(21, B); asum(22, C);
    emit(ecall());
    for (int i = 0; i < prog.size(); i++) u_mem.mem[i/4][32*(i%4) +: 32] = prog[i];
    sa = 0; sb = 0; sc = 0;
    for (int i = 0; i < N; i++) begin
      logic [31:0] a, b, c;
      a = $urandom;
      u_mem.mem[(A/16) + i/4][32*(i%4) +: 32] = a;
      c = a; b = 3 * c; c = a + b; a = b + 3 * c;
      sa += a; sb += b; sc += c;
    end
    repeat (10) @(posedge clk);
    rst = 1'b0;
    cyc = 0;
    foreach (t[k]) t[k] = 0;
    while (!halt) begin
      @(posedge clk);
      cyc++;
      for (int k = 0; k < 4; k++) if (t[k] == 0 && dut.u_core.u_rf.r[24 + k] == 1) t[k] = cyc;
    end
    repeat (4) @(posedge clk);
    prev = 0;
    for (int k = 0; k < 4; k++) begin
      $display("%s: %0d cycles, %0d.%02d bytes/cycle", nm[k], t[k] - prev,
               bytes[k] * N / (t[k] - prev), (100 * bytes[k] * N / (t[k] - prev)) % 100);
      prev = t[k];
    end
    checks += 4;
    if (dut.u_core.u_rf.r[20] !== sa) begin failures++; $display("FAIL sum of a"); end
    if (dut.u_core.u_rf.r[21] !== sb) begin failures++; $display("FAIL sum of b"); end
    if (dut.u_core.u_rf.r[22] !== sc) begin failures++; $display("FAIL sum of c"); end
    if (t[3] == 0)                    begin failures++; $display("FAIL kernels not all seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
