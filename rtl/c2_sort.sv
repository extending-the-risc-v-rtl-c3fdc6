// c2_sort: I'-type custom instruction that sorts the eight 32-bit lanes of
// a 256-bit vector register (lane k = bits 32k+31:32k) into ascending order,
// smallest in lane 0. The network is the 8-input odd-even mergesort of the
// paper's figure: six layers of registered compare-and-swap units, so the
// result appears 6 cycles after the call and a new call can start every
// cycle. Lanes that are not compared in a layer are simply registered.
// Interface and timing: the template interface; vrd1 <- sort(vrs1) with
// out_v, out_vrd1 delayed by C_CYCLES. out_data and out_vdata2 are zero.
module c2_sort #(
  parameter int VLEN     = 256,
  parameter int C_CYCLES = 6
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
  localparam int N = 8;
  localparam int L = 6;
  // partner(l, i): lane compared with lane i in layer l (i itself: passed
  // through); the lower index of a pair receives the minimum
  function automatic int partner(input int l, input int i);
    int t [N];
    unique case (l)
      0: t = '{1, 0, 3, 2, 5, 4, 7, 6};
      1: t = '{2, 3, 0, 1, 6, 7, 4, 5};
      2: t = '{0, 2, 1, 3, 4, 6, 5, 7};
      3: t = '{4, 5, 6, 7, 0, 1, 2, 3};
      4: t = '{0, 1, 4, 5, 2, 3, 6, 7};
      5: t = '{0, 2, 1, 4, 3, 6, 5, 7};
      default: t = '{default: 0};
    endcase
    return t[i];
  endfunction

  ctmpl_delay #(.N(C_CYCLES)) u_dly (
    .clk, .reset, .in_valid, .rd, .vrd1, .vrd2,
    .out_v, .out_rd, .out_vrd1, .out_vrd2);

  logic [31:0] net [L+1][N];
  for (genvar i = 0; i < N; i++) begin : g_io
    assign net[0][i] = in_vdata1[32*i +: 32];
    assign out_vdata1[32*i +: 32] = net[L][i];
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
  assign out_vdata2 = '0;
  assign out_data   = '0;
  logic unused;
  assign unused = ^{in_data, in_vdata2};
endmodule
