// tb_vregfile: vector register file (8 x 256 bits). Random writes on all
// three ports and random reads, checked against an array model: v0 always
// reads zero, writes land on the clock edge, and on equal addresses the
// higher port wins.
// 8 registers of 256 bits and v0 = 0 follow the publication; the port count
// is this design's choice.
module tb_vregfile;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic [2:0]  raddr1, raddr2;
  logic [255:0] rdata1, rdata2;
  logic [2:0]  we;
  logic [2:0]  waddr [3];
  logic [255:0] wdata [3];
  logic [255:0] m [8];
  int checks = 0, failures = 0;
  vregfile dut (.clk, .rst, .raddr1, .raddr2, .rdata1, .rdata2, .we, .waddr, .wdata);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    we = 0;
    foreach (m[i]) m[i] = 0;
    @(posedge clk); #1 rst = 0;
    for (int t = 0; t < 2000; t++) begin
      for (int p = 0; p < 3; p++) begin
        we[p] = $urandom_range(0, 1);
        waddr[p] = 3'($urandom);
        wdata[p] = {8{$urandom}} ^ 256'($urandom);
      end
      raddr1 = 3'($urandom); raddr2 = 3'($urandom);
      #1;
      checks += 2;
      if (rdata1 !== ((raddr1 == 0) ? 256'd0 : m[raddr1])) begin failures++; $display("FAIL r1"); end
      if (rdata2 !== ((raddr2 == 0) ? 256'd0 : m[raddr2])) begin failures++; $display("FAIL r2"); end
      @(posedge clk);
      for (int p = 0; p < 3; p++) if (we[p] && waddr[p] != 0) m[waddr[p]] = wdata[p];
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
