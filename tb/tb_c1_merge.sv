// tb_c1_merge: drives the c1_merge custom-instruction unit with a random call on
// most cycles (back to back, so several calls are in flight) and checks
// each result against a model computed here: the result, the delayed
// destination names and out_v must appear exactly 4 cycles after the
// call, and out_v must be low when no call was made 4 cycles before.
// Inputs are two ascending 8-lane lists (the first call is the example of the paper's figure); model: the 16 values sorted, upper 8 in vdata1 and lower 8 in vdata2.
// The merge network and 4-cycle latency follow the publication; the
// upper/lower split checked follows its description of the sorting loop.
module tb_c1_merge;
  localparam int VLEN = 256;
  localparam int LAT  = 4;
  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  logic            in_valid;
  logic [4:0]      rd, out_rd;
  logic [2:0]      vrd1, vrd2, out_vrd1, out_vrd2;
  logic [31:0]     in_data, out_data;
  logic [VLEN-1:0] in_vdata1, in_vdata2, out_vdata1, out_vdata2;
  logic            out_v;
  int checks = 0, failures = 0;
  c1_merge dut (.clk, .reset, .in_valid, .rd, .vrd1, .vrd2, .in_data, .in_vdata1, .in_vdata2,
             .out_v, .out_rd, .out_vrd1, .out_vrd2, .out_data, .out_vdata1, .out_vdata2);

  typedef struct { logic v; logic [4:0] rd; logic [2:0] d1, d2; logic [31:0] od; logic [VLEN-1:0] o1, o2; } exp_t;
  exp_t pipe [LAT];
  function automatic void ssort(ref int signed t [16], input int n);
    for (int i = 1; i < n; i++)
      for (int j = i; j > 0 && t[j-1] > t[j]; j--) begin
        int signed x;
        x = t[j]; t[j] = t[j-1]; t[j-1] = x;
      end
  endfunction
  function automatic void model(ref exp_t e);
    int signed t [16];
    for (int k = 0; k < 8; k++) begin
      t[k]   = in_vdata1[32*k +: 32];
      t[k+8] = in_vdata2[32*k +: 32];
    end
    ssort(t, 16);
    e.od = '0;
    for (int k = 0; k < 8; k++) begin
      e.o2[32*k +: 32] = t[k];
      e.o1[32*k +: 32] = t[k+8];
    end
  endfunction
  function automatic logic [VLEN-1:0] sorted8(input logic [VLEN-1:0] x);
    int signed t [16];
    logic [VLEN-1:0] r;
    for (int k = 0; k < 8; k++) t[k] = x[32*k +: 32];
    ssort(t, 8);
    for (int k = 0; k < 8; k++) r[32*k +: 32] = t[k];
    return r;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    exp_t e;
    in_valid = 0; rd = 0; vrd1 = 0; vrd2 = 0; in_data = 0; in_vdata1 = 0; in_vdata2 = 0;
    for (int i = 0; i < LAT; i++) pipe[i].v = 0;
    repeat (3) @(posedge clk);
    #1 reset = 0;
    for (int t = 0; t < 600 + LAT; t++) begin
      in_valid = (t < 600) && ($urandom_range(0, 3) != 0);
      rd = 5'($urandom); vrd1 = 3'($urandom); vrd2 = 3'($urandom);
      in_data = {31'($urandom), ($urandom_range(0, 15) == 0)};
      for (int k = 0; k < VLEN/32; k++) begin
        in_vdata1[32*k +: 32] = ($urandom_range(0, 3) == 0) ? 32'($urandom_range(0, 9)) : $urandom;
        in_vdata2[32*k +: 32] = $urandom;
      end
      in_vdata1 = sorted8(in_vdata1);
      in_vdata2 = sorted8(in_vdata2);
      if (t == 0) begin
        in_valid = 1;
        in_vdata1 = {32'd10, 32'd9, 32'd5, 32'd4, 32'd3, 32'd2, 32'd1, 32'd0};
        in_vdata2 = {32'd12, 32'd11, 32'd8, 32'd6, 32'd6, 32'd3, 32'd2, 32'd0};
      end

      e.v = in_valid; e.rd = rd; e.d1 = vrd1; e.d2 = vrd2;
      if (in_valid) model(e);
      #1;
      checks++;
      if (out_v !== pipe[LAT-1].v) begin
        failures++; $display("FAIL t=%0d out_v=%b expected %b", t, out_v, pipe[LAT-1].v);
      end else if (out_v) begin
        checks++;
        if (out_rd !== pipe[LAT-1].rd || out_vrd1 !== pipe[LAT-1].d1 || out_vrd2 !== pipe[LAT-1].d2) begin
          failures++; $display("FAIL t=%0d names", t);
        end
        checks++;
        if (out_vdata1 !== pipe[LAT-1].o1 || out_vdata2 !== pipe[LAT-1].o2) begin
          failures++; $display("FAIL t=%0d data got %h %h exp %h %h", t, out_vdata1, out_vdata2, pipe[LAT-1].o1, pipe[LAT-1].o2);
        end
      end
      @(posedge clk);
      #1;
      for (int i = LAT-1; i > 0; i--) pipe[i] = pipe[i-1];
      pipe[0] = e;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
