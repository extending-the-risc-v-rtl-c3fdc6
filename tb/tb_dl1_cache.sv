// tb_dl1_cache: random byte/half/word/vector loads and stores over 16 KiB
// (four times the cache, so blocks are evicted dirty and fetched back),
// issued whenever req_ready allows. A behavioural LLC keeps blocks in an
// array and answers after a random delay. Every load reply is compared with
// a byte-array model, in order; replies must come exactly 2 cycles after
// the request on hits (checked: never earlier, and at 2 at least once);
// full-block vector store misses must not fetch from the LLC.
// Geometry, write-back, the no-fetch vector store and the 3-cycle
// load-to-use budget follow the publication; the handshake is this
// design's.
module tb_dl1_cache;
  import simd_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  logic          req_valid, req_ready, req_we, req_uns, resp_valid, llc_req, llc_we, llc_ack;
  msize_e        req_size;
  logic [31:0]   req_addr, llc_addr;
  logic [255:0]  req_wdata, resp_rdata, llc_wdata, llc_rdata;
  logic [5:0]    req_tag, resp_tag;
  int checks = 0, failures = 0, n_lat2 = 0, n_fetch = 0, n_vst_miss_fetch = 0;
  dl1_cache dut (.clk, .rst, .req_valid, .req_ready, .req_we, .req_size, .req_uns, .req_addr,
    .req_wdata, .req_tag, .resp_valid, .resp_rdata, .resp_tag,
    .llc_req, .llc_we, .llc_addr, .llc_wdata, .llc_ack, .llc_rdata);

  logic [7:0]   model [16384];
  logic [255:0] lmem [512];          // LLC model, 512 blocks of 32 bytes
  typedef struct { logic [255:0] d; logic [5:0] tag; int t; } exp_t;
  exp_t q [$];
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    llc_ack = 0;
    forever begin
      @(posedge clk);
      #1 llc_ack = 0;
      if (llc_req) begin
        repeat ($urandom_range(1, 5)) @(posedge clk);
        #1;
        if (llc_we) lmem[llc_addr[13:5]] = llc_wdata;
        else begin
          llc_rdata = lmem[llc_addr[13:5]];
          n_fetch++;
        end
        llc_ack = 1;
      end
    end
  end
  initial forever begin
    exp_t e;
    @(posedge clk); #1;
    if (rst || !resp_valid) continue;
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL unexpected reply"); end
    else begin
      e = q.pop_front();
      if (resp_rdata !== e.d || resp_tag !== e.tag) begin
        failures++; $display("FAIL load reply %h expected %h", resp_rdata, e.d);
      end
      if (cyc - e.t < 2) begin failures++; $display("FAIL reply too early"); end
      if (cyc - e.t == 2) n_lat2++;
    end
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int i = 0; i < 16384; i++) model[i] = 8'(i * 7 + 3);
    for (int b = 0; b < 512; b++) for (int j = 0; j < 32; j++) lmem[b][8*j +: 8] = 8'((b*32 + j) * 7 + 3);
    req_valid = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int n = 0; n < 4000; n++) begin
      logic [31:0] a;
      int sz, nb;
      bit vmiss;
      sz = $urandom_range(0, 3);
      nb = 1 << (sz == 3 ? 5 : sz);
      a = {18'd0, 14'($urandom)};
      a = a & ~32'(nb - 1);
      if ($urandom_range(0, 3) == 0) a[31:10] = 0;   // frequent hits
      req_valid = 1; req_we = $urandom_range(0, 2) == 0; req_size = msize_e'(sz);
      req_uns = $urandom_range(0, 1); req_addr = a; req_tag = 6'($urandom);
      req_wdata = {8{$urandom}};
      #1;
      while (!req_ready) begin @(posedge clk); #1; end
      if (req_we) begin
        for (int j = 0; j < nb; j++) model[a + j] = (sz == 3) ? req_wdata[8*j +: 8] : req_wdata[8*j +: 8];
      end else begin
        exp_t e;
        logic [31:0] w;
        e.d = '0;
        if (sz == 3) for (int j = 0; j < 32; j++) e.d[8*j +: 8] = model[a + j];
        else begin
          w = 0;
          for (int j = 0; j < nb; j++) w[8*j +: 8] = model[a + j];
          if (!req_uns && sz == 0) w = {{24{w[7]}}, w[7:0]};
          if (!req_uns && sz == 1) w = {{16{w[15]}}, w[15:0]};
          e.d[31:0] = w;
        end
        e.tag = req_tag;
        e.t = cyc;
        q.push_back(e);
      end
      vmiss = req_we && sz == 3;
      if (vmiss) begin
        int f0;
        f0 = n_fetch;
        @(posedge clk); #1;
        req_valid = 0;
        // the vector store completes without any fetch from the LLC
        while (!req_ready) begin @(posedge clk); #1; end
        checks++;
        if (n_fetch != f0) begin failures++; n_vst_miss_fetch++; $display("FAIL vector store fetched"); end
      end else begin
        @(posedge clk); #1;
        req_valid = 0;
      end
    end
    req_valid = 0;
    repeat (50) @(posedge clk);
    checks += 2;
    if (q.size() != 0) begin failures++; $display("FAIL %0d replies missing", q.size()); end
    if (n_lat2 == 0) begin failures++; $display("FAIL no 2-cycle hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
