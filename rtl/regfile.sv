// regfile: the 32 base registers of RV32I, 32 bits each, with x0 reading
// as constant zero. Two combinational read ports serve rs1/rs2 of the
// instruction being executed. Three write ports take results from the
// single-cycle datapath (port 0), returning loads (port 1) and custom SIMD
// units (port 2); writes land on the rising edge. The core's scoreboard
// never lets two ports target one register in the same cycle; should it
// happen, the higher port number wins. All registers reset to zero (a
// choice of this design). Port count is this design's choice.
module regfile #(
  parameter int XLEN = 32,
  parameter int NWP  = 3
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [4:0]      raddr1,
  input  logic [4:0]      raddr2,
  output logic [XLEN-1:0] rdata1,
  output logic [XLEN-1:0] rdata2,
  input  logic [NWP-1:0]  we,
  input  logic [4:0]      waddr [NWP],
  input  logic [XLEN-1:0] wdata [NWP]
);
  logic [XLEN-1:0] r [32];
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 32; i++) r[i] <= '0;
    end else begin
      for (int p = 0; p < NWP; p++)
        if (we[p] && waddr[p] != 5'd0) r[waddr[p]] <= wdata[p];
    end
  end
  assign rdata1 = (raddr1 == 5'd0) ? '0 : r[raddr1];
  assign rdata2 = (raddr2 == 5'd0) ? '0 : r[raddr2];
endmodule
