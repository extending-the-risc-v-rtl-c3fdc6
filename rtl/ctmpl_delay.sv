// ctmpl_delay: the bookkeeping part of the custom-instruction template. It
// delays the call's valid bit and destination register names (rd, vrd1,
// vrd2) by the instruction's pipeline length N, so that they come out
// together with the result and several calls can be in flight at once.
// The valid bits are cleared by reset; the names need no reset.
module ctmpl_delay #(
  parameter int N = 3
) (
  input  logic       clk,
  input  logic       reset,
  input  logic       in_valid,
  input  logic [4:0] rd,
  input  logic [2:0] vrd1,
  input  logic [2:0] vrd2,
  output logic       out_v,
  output logic [4:0] out_rd,
  output logic [2:0] out_vrd1,
  output logic [2:0] out_vrd2
);
  logic [N-1:0]  v_q;
  logic [10:0]   n_q [N];
  always_ff @(posedge clk) begin
    if (reset) v_q <= '0;
    else       v_q <= {v_q[N-2:0], in_valid};
    n_q[0] <= {rd, vrd1, vrd2};
    for (int i = 1; i < N; i++) n_q[i] <= n_q[i-1];
  end
  assign out_v = v_q[N-1];
  assign {out_rd, out_vrd1, out_vrd2} = n_q[N-1];
endmodule
