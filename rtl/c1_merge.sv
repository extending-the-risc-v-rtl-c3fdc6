// c1_merge: I'-type custom instruction that merges two vector registers,
// each holding eight ascending 32-bit values, into one sorted list of 16.
// The upper (largest) eight go to vrd1 and the lower eight to vrd2, both in
// ascending lane order. The network is the final merge of a 16-input
// odd-even mergesort as drawn in the paper: four layers of registered
// compare-and-swap units, pairs (i,i+8); (4..7,8..11); distance-2 pairs;
// distance-1 pairs. Latency 4 cycles, one call accepted per cycle.
// The paper also mentions an extra leading stage for merging arbitrarily
// long lists progressively but does not describe it; it is not built.
// Interface and timing: the template interface; inputs 0..7 are vrs1 and
// 8..15 are vrs2. out_data is zero.
module c1_merge #(
  parameter int VLEN     = 256,
  parameter int C_CYCLES = 4
) (
  input  logic            clk,
  input  logic            reset,
  input  logic            in_valid,
  input  logic [4:0]      rd,
  input  logic [2:0]      vrd1,
  input  logic [2:0]      vrd2,
  input  logic [31:0]     in_data,
  input  logic [VLEN-1:0] in_vdata1,
  input  logic [VLEN-1:0] in_vdata2,
  output logic            out_v,
  output logic [4:0]      out_rd,
  output logic [2:0]      out_vrd1,
  output logic [2:0]      out_vrd2,
  output logic [31:0]     out_data,
  output logic [VLEN-1:0] out_vdata1,
  output logic [VLEN-1:0] out_vdata2
);
  localparam int N = 16;
  localparam int L = 4;
  // partner(l, i): lane compared with lane i in layer l (i itself: passed
  // through); the lower index of a pair receives the minimum
  function automatic int partner(input int l, input int i);
    int t [N];
    unique case (l)
      0: t = '{8, 9, 10, 11, 12, 13, 14, 15, 0, 1, 2, 3, 4, 5, 6, 7};
      1: t = '{0, 1, 2, 3, 8, 9, 10, 11, 4, 5, 6, 7, 12, 13, 14, 15};
      2: t = '{0, 1, 4, 5, 2, 3, 8, 9, 6, 7, 12, 13, 10, 11, 14, 15};
      3: t = '{0, 2, 1, 4, 3, 6, 5, 8, 7, 10, 9, 12, 11, 14, 13, 15};
      default: t = '{default: 0};
    endcase
    return t[i];
  endfunction

  ctmpl_delay #(.N(C_CYCLES)) u_dly (
    .clk, .reset, .in_valid, .rd, .vrd1, .vrd2,
    .out_v, .out_rd, .out_vrd1, .out_vrd2);

  logic [31:0] net [L+1][N];
  for (genvar i = 0; i < 8; i++) begin : g_io
    assign net[0][i]   = in_vdata1[32*i +: 32];
    assign net[0][i+8] = in_vdata2[32*i +: 32];
    assign out_vdata2[32*i +: 32] = net[L][i];
    assign out_vdata1[32*i +: 32] = net[L][i+8];
  end
  for (genvar l = 0; l < L; l++) begin : g_layer
    for (genvar i = 0; i < N; i++) begin : g_lane
      if (partner(l, i) > i) begin : g_cas
        cas u_cas (.clk, .a(net[l][i]), .b(net[l][partner(l, i)]),
                   .lo(net[l+1][i]), .hi(net[l+1][partner(l, i)]));
      end else if (partner(l, i) == i) begin : g_pass
        always_ff @(posedge clk) net[l+1][i] <= net[l][i];
      end
    end
  end
  assign out_data = '0;
  logic unused;
  assign unused = ^in_data;
endmodule
