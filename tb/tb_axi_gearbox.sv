// tb_axi_gearbox: a wide (256-bit) master on the core clock writes random
// bursts of 1..64 beats through the gearbox into a 128-bit memory model on
// the double-rate clock, then reads them back. Checks: narrow memory holds
// the low half of each wide beat first; read data, rlast and beat counts;
// the narrow burst length is 2*(len+1)-1; and the rate: with no master
// stalls a wide beat moves every core cycle in both directions (the last
// beat follows the first by exactly len cycles).
// The 2x rate and 128/256-bit widths follow the publication; the packing
// order and handshakes checked are this design's.
module tb_axi_gearbox;
  logic clk = 1'b0, clk2x = 1'b0, rst = 1'b1;
  initial forever begin
    #1 clk2x = 1'b1; clk = 1'b1;
    #1 clk2x = 1'b0;
    #1 clk2x = 1'b1; clk = 1'b0;
    #1 clk2x = 1'b0;
  end
  logic s_arvalid, s_arready, s_rvalid, s_rready, s_rlast, s_awvalid, s_awready;
  logic s_wvalid, s_wready, s_wlast, s_bvalid, s_bready;
  logic [31:0] s_araddr, s_awaddr;
  logic [7:0]  s_arlen, s_awlen;
  logic [255:0] s_rdata, s_wdata;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast, m_awvalid, m_awready;
  logic m_wvalid, m_wready, m_wlast, m_bvalid, m_bready;
  logic [31:0] m_araddr, m_awaddr;
  logic [7:0]  m_arlen, m_awlen;
  logic [127:0] m_rdata, m_wdata;
  axi_gearbox dut (.*);
  tb_axi_mem #(.W(128), .WORDS(4096), .LAT(3)) u_mem (
    .clk(clk2x), .rst, .arvalid(m_arvalid), .arready(m_arready), .araddr(m_araddr), .arlen(m_arlen),
    .rvalid(m_rvalid), .rready(m_rready), .rdata(m_rdata), .rlast(m_rlast),
    .awvalid(m_awvalid), .awready(m_awready), .awaddr(m_awaddr), .awlen(m_awlen),
    .wvalid(m_wvalid), .wready(m_wready), .wdata(m_wdata), .wlast(m_wlast),
    .bvalid(m_bvalid), .bready(m_bready));

  int checks = 0, failures = 0, exp_len;
  int cyc = 0;
  always @(posedge clk) cyc++;
  // narrow burst lengths are twice the wide ones
  always @(posedge clk2x) if (!rst && ((m_arvalid && m_arready) || (m_awvalid && m_awready))) begin
    checks++;
    if ((m_arvalid ? m_arlen : m_awlen) != 8'(2*exp_len - 1)) begin
      failures++; $display("FAIL narrow len %0d for %0d wide beats", m_arvalid ? m_arlen : m_awlen, exp_len);
    end
  end
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [255:0] data [64];
    s_arvalid = 0; s_awvalid = 0; s_wvalid = 0; s_rready = 0; s_bready = 0; s_wlast = 0;
    repeat (4) @(posedge clk); #1 rst = 0;
    repeat (2) @(posedge clk);
    for (int k = 0; k < 40; k++) begin
      int len, sent, got, t0, t1;
      bit stall;
      logic [31:0] a;
      len = (k % 4 == 0) ? 64 : $urandom_range(1, 64);
      stall = (k % 2 == 1);
      exp_len = len;
      a = {18'd0, 9'($urandom), 5'd0};
      foreach (data[i]) data[i] = {8{$urandom}};
      // write burst
      #1 s_awvalid = 1; s_awaddr = a; s_awlen = 8'(len - 1);
      do @(posedge clk); while (!s_awready);
      #1 s_awvalid = 0;
      sent = 0;
      s_wvalid = !(stall && $urandom_range(0, 2) == 0); s_wdata = data[0]; s_wlast = (len == 1);
      while (sent < len) begin
        @(posedge clk);
        if (s_wvalid && s_wready) begin
          if (sent == 0) t0 = cyc;
          t1 = cyc;
          sent++;
        end
        #1;
        s_wdata = data[sent % 64]; s_wlast = (sent == len - 1);
        s_wvalid = (sent < len) && !(stall && $urandom_range(0, 2) == 0);
      end
      s_wvalid = 0;
      if (!stall) begin
        checks++;
        if (t1 - t0 != len - 1) begin failures++; $display("FAIL write rate: %0d beats in %0d cycles", len, t1 - t0 + 1); end
      end
      s_bready = 1;
      do @(posedge clk); while (!s_bvalid);
      #1 s_bready = 0;
      // narrow memory layout
      for (int i = 0; i < len; i++) begin
        int w;
        w = (int'(a[31:4]) + 2*i) % 4096;
        checks++;
        if (u_mem.mem[w] !== data[i][127:0] || u_mem.mem[(w+1) % 4096] !== data[i][255:128]) begin
          failures++; $display("FAIL narrow layout beat %0d", i);
        end
      end
      // read burst
      #1 s_arvalid = 1; s_araddr = a; s_arlen = 8'(len - 1);
      do @(posedge clk); while (!s_arready);
      #1 s_arvalid = 0;
      got = 0;
      s_rready = !(stall && $urandom_range(0, 2) == 0);
      while (got < len) begin
        @(posedge clk);
        if (s_rvalid && s_rready) begin
          checks++;
          if (s_rdata !== data[got] || s_rlast !== (got == len - 1)) begin
            failures++; $display("FAIL read beat %0d last=%b", got, s_rlast);
          end
          if (got == 0) t0 = cyc;
          t1 = cyc;
          got++;
        end
        #1 s_rready = !(stall && $urandom_range(0, 2) == 0);
      end
      s_rready = 0;
      if (!stall) begin
        checks++;
        if (t1 - t0 != len - 1) begin failures++; $display("FAIL read rate: %0d beats in %0d cycles", len, t1 - t0 + 1); end
      end
      repeat ($urandom_range(0, 3)) @(posedge clk);
    end
    repeat (4) @(posedge clk);
    checks++;
    if (s_rvalid) begin failures++; $display("FAIL extra read beat"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
