// vregfile: the vector registers, NVREG (8) of VLEN (256) bits. Register
// v0 reads as constant zero, like x0, so unused operands of the
// many-operand instructions can be aliased to it. Two combinational read
// ports (vrs1, vrs2); three write ports: vector loads (port 0) and the two
// destinations vrd1/vrd2 of custom units (ports 1 and 2), written on the
// rising edge. Higher port wins on an address clash (the core prevents
// clashes). All registers reset to zero (a choice of this design).
module vregfile #(
  parameter int VLEN  = 256,
  parameter int NVREG = 8,
  parameter int NWP   = 3
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [$clog2(NVREG)-1:0] raddr1,
  input  logic [$clog2(NVREG)-1:0] raddr2,
  output logic [VLEN-1:0]          rdata1,
  output logic [VLEN-1:0]          rdata2,
  input  logic [NWP-1:0]           we,
  input  logic [$clog2(NVREG)-1:0] waddr [NWP],
  input  logic [VLEN-1:0]          wdata [NWP]
);
  logic [VLEN-1:0] r [NVREG];
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NVREG; i++) r[i] <= '0;
    end else begin
      for (int p = 0; p < NWP; p++)
        if (we[p] && waddr[p] != '0) r[waddr[p]] <= wdata[p];
    end
  end
  assign rdata1 = (raddr1 == '0) ? '0 : r[raddr1];
  assign rdata2 = (raddr2 == '0) ? '0 : r[raddr2];
endmodule
