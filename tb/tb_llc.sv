// tb_llc: two requesters drive the LLC's IL1 and DL1 ports at once; a
// 256-bit memory model serves its bursts. The DL1 side reads and writes
// L1 blocks, the IL1 side only reads, in disjoint address ranges that share
// two LLC sets with eight tags each, so blocks are evicted (dirty ones
// written back) and fetched again. Every read is compared with a reference
// copy of memory. Also checked: a hit is acknowledged 2 cycles after the
// request; on a miss, the requested L1 block is acknowledged before the
// fill burst ends (early delivery); misses fetch whole 2 KiB blocks as one
// burst of 64 beats; write-backs happen.
// Sub-block rows, whole-block bursts and early delivery follow the
// publication; the port protocol and priorities are this design's.
module tb_llc;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic i_req, i_ack, d_req, d_we, d_ack;
  logic [31:0] i_addr, d_addr;
  logic [255:0] d_wdata, rdata;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast, m_awvalid, m_awready;
  logic m_wvalid, m_wready, m_wlast, m_bvalid, m_bready;
  logic [31:0] m_araddr, m_awaddr;
  logic [7:0]  m_arlen, m_awlen;
  logic [255:0] m_rdata, m_wdata;
  llc dut (.*);
  tb_axi_mem #(.W(256), .WORDS(16384), .LAT(4)) u_mem (
    .clk, .rst, .arvalid(m_arvalid), .arready(m_arready), .araddr(m_araddr), .arlen(m_arlen),
    .rvalid(m_rvalid), .rready(m_rready), .rdata(m_rdata), .rlast(m_rlast),
    .awvalid(m_awvalid), .awready(m_awready), .awaddr(m_awaddr), .awlen(m_awlen),
    .wvalid(m_wvalid), .wready(m_wready), .wdata(m_wdata), .wlast(m_wlast),
    .bvalid(m_bvalid), .bready(m_bready));

  int checks = 0, failures = 0, n_early = 0, n_lat2 = 0, n_short = 0;
  logic [255:0] ref_m [16384];
  bit in_burst = 0;
  always @(posedge clk) if (!rst) begin
    if (m_arvalid && m_arready) begin
      in_burst <= 1;
      checks++;
      if (m_arlen != 8'd63 || m_araddr[10:0] != 0) begin failures++; $display("FAIL fill burst %h len %0d", m_araddr, m_arlen); end
    end
    if (m_rvalid && m_rready && m_rlast) in_burst <= 0;
    if ((i_ack || d_ack) && in_burst) n_early++;
  end
  function automatic logic [255:0] init(input int w);
    return {8{32'(w) * 32'h9E3779B1}};
  endfunction
  function automatic logic [31:0] pick(input bit ins);
    // bits 18:16 tag (IL1 uses 4..7, DL1 0..3), bit 11 set 0/1, bits 10:5 L1 block
    return {13'd0, ins, 2'($urandom), 4'd0, 1'($urandom), 6'($urandom), 5'd0};
  endfunction
  task automatic run_port(input bit ins, input int n);
    for (int k = 0; k < n; k++) begin
      logic [31:0] a;
      int t;
      bit we;
      a = pick(ins);
      we = !ins && $urandom_range(0, 2) == 0;
      if (ins) begin i_addr = a; i_req = 1; end
      else begin d_addr = a; d_we = we; d_wdata = {8{$urandom}}; d_req = 1; end
      t = 0;
      do begin @(posedge clk); t++; #1; end while (!(ins ? i_ack : d_ack));
      if (t < 2) n_short++;
      if (t == 2) n_lat2++;
      if (we) ref_m[a[18:5]] = d_wdata;
      else begin
        checks++;
        if (rdata !== ref_m[a[18:5]]) begin failures++; $display("FAIL read %h: %h expected %h", a, rdata, ref_m[a[18:5]]); end
      end
      if (ins) i_req = 0; else d_req = 0;
      repeat ($urandom_range(0, 2)) @(posedge clk);
      #1;
    end
  endtask
  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int w = 0; w < 16384; w++) begin u_mem.mem[w] = init(w); ref_m[w] = init(w); end
    i_req = 0; d_req = 0; d_we = 0;
    repeat (3) @(posedge clk); #1 rst = 0;
    fork
      run_port(1'b1, 1500);
      run_port(1'b0, 3000);
    join
    checks += 4;
    if (n_early == 0)               begin failures++; $display("FAIL no early delivery"); end
    if (n_lat2 == 0 || n_short > 0) begin failures++; $display("FAIL hit latency (2-cycle acks %0d, shorter %0d)", n_lat2, n_short); end
    if (u_mem.n_wr_bursts == 0)     begin failures++; $display("FAIL no write-back"); end
    if (u_mem.n_rd_bursts < 8)      begin failures++; $display("FAIL too few fills"); end
    $display("early=%0d lat2=%0d fills=%0d writebacks=%0d", n_early, n_lat2, u_mem.n_rd_bursts, u_mem.n_wr_bursts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
