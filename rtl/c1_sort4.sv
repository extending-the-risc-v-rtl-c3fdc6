// c1_sort4: the paper's example I'-type custom instruction, a 4-input
// bitonic sorter built from six registered compare-and-swap units in three
// layers (3-cycle latency, one call accepted every cycle). The CAS wiring
// and the output order are the paper's: lanes 0..3 of in_vdata1 (lane k =
// bits 32k+31:32k) are sorted and written back with the smallest value in
// lane 3 and the largest in lane 0 (out_vdata1 = {net12,net13,net14,net15}).
// The paper's example uses 128-bit vectors; here VLEN defaults to the main
// configuration's 256 bits and the upper lanes of the result are zero.
// Interface and timing: the template interface. The call's destination
// names and valid bit travel through ctmpl_delay and leave with the result
// C_CYCLES cycles later (out_v). out_data and out_vdata2 are unused by this
// instruction and driven to zero.
module c1_sort4 #(
  parameter int VLEN     = 256,
  parameter int C_CYCLES = 3
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
  ctmpl_delay #(.N(C_CYCLES)) u_dly (
    .clk, .reset, .in_valid, .rd, .vrd1, .vrd2,
    .out_v, .out_rd, .out_vrd1, .out_vrd2);

  logic [31:0] net [16];
  for (genvar i = 0; i < 4; i++) begin : g_in
    assign net[i] = in_vdata1[32*(i+1)-1 -: 32];
  end
  cas cas0 (.clk, .a(net[0]),  .b(net[1]),  .lo(net[4]),  .hi(net[5]));
  cas cas1 (.clk, .a(net[2]),  .b(net[3]),  .lo(net[6]),  .hi(net[7]));
  cas cas2 (.clk, .a(net[4]),  .b(net[7]),  .lo(net[8]),  .hi(net[11]));
  cas cas3 (.clk, .a(net[5]),  .b(net[6]),  .lo(net[9]),  .hi(net[10]));
  cas cas4 (.clk, .a(net[8]),  .b(net[9]),  .lo(net[12]), .hi(net[13]));
  cas cas5 (.clk, .a(net[10]), .b(net[11]), .lo(net[14]), .hi(net[15]));

  always_comb begin
    out_vdata1 = '0;
    out_vdata1[127:0] = {net[12], net[13], net[14], net[15]};
  end
  assign out_vdata2 = '0;
  assign out_data   = '0;
  // in_data and in_vdata2 are part of the template interface but unused here
  logic unused;
  assign unused = ^{in_data, in_vdata2, in_vdata1[VLEN-1:128]};
endmodule
