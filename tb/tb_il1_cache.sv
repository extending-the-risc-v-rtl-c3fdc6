// tb_il1_cache: a behavioural LLC answers block requests after a random
// delay with words computed from their address. The pc moves through
// sequential runs and random jumps over 16 KiB (eight times the cache, so
// blocks conflict). On every hit the instruction must equal the word at pc;
// a requested block must hit on the cycle after its ack; the number of LLC
// requests must match a direct-mapped tag model.
// Direct mapping, registers and the 256-bit block follow the publication;
// the handshake is this design's.
module tb_il1_cache;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic [31:0]  pc, insn, llc_addr;
  logic         hit, llc_req, llc_ack;
  logic [255:0] llc_rdata;
  int checks = 0, failures = 0, misses = 0, exp_misses = 0;
  il1_cache dut (.clk, .rst, .pc, .insn, .hit, .llc_req, .llc_addr, .llc_ack, .llc_rdata);

  function automatic logic [31:0] word(input logic [31:0] a);
    return (a * 32'h9E3779B1) ^ 32'h1234_5678;
  endfunction
  // behavioural LLC
  initial begin
    llc_ack = 0;
    forever begin
      @(posedge clk);
      #1 llc_ack = 0;
      if (llc_req) begin
        logic [31:0] a;
        a = llc_addr;
        repeat ($urandom_range(1, 6)) @(posedge clk);
        #1;
        for (int i = 0; i < 8; i++) llc_rdata[32*i +: 32] = word(a + 4*i);
        llc_ack = 1;
        misses++;
      end
    end
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [20:0] mtag [64];
    logic        mval [64];
    foreach (mval[i]) mval[i] = 0;
    pc = 0;
    @(posedge clk); #1 rst = 0;
    for (int n = 0; n < 3000; n++) begin
      int idx;
      idx = int'(pc[10:5]);
      if (!(mval[idx] && mtag[idx] == pc[31:11])) begin
        exp_misses++;
        mval[idx] = 1; mtag[idx] = pc[31:11];
        // wait for the block, then it must hit on the next cycle
        while (!llc_ack) begin @(posedge clk); #2; end
        @(posedge clk); #2;
        checks++;
        if (!hit) begin failures++; $display("FAIL no hit after fill pc=%h", pc); end
      end
      checks++;
      if (!hit || insn !== word(pc)) begin failures++; $display("FAIL pc=%h hit=%b insn=%h", pc, hit, insn); end
      @(posedge clk); #2;
      pc = ($urandom_range(0, 7) == 0) ? {18'd0, 12'($urandom), 2'b00} : pc + 4;
      pc[31:14] = 0;
      #1;
    end
    checks++;
    if (misses != exp_misses) begin failures++; $display("FAIL misses %0d expected %0d", misses, exp_misses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
