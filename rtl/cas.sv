// cas: compare-and-swap unit of the sorting networks. On each rising clock
// edge it registers min(a,b) on lo and max(a,b) on hi (one cycle latency),
// as in the paper's template example. Whether the 32-bit keys are signed is
// not stated by the paper; SIGNED=1 (C int) is this design's default.
module cas #(
  parameter int W      = 32,
  parameter bit SIGNED = 1'b1
) (
  input  logic         clk,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] lo,
  output logic [W-1:0] hi
);
  logic a_gt_b;
  always_comb begin
    if (SIGNED) a_gt_b = $signed(a) > $signed(b);
    else        a_gt_b = a > b;
  end
  always_ff @(posedge clk) begin
    lo <= a_gt_b ? b : a;
    hi <= a_gt_b ? a : b;
  end
endmodule
