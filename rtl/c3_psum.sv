// c3_psum: I'-type custom instruction computing the inclusive prefix sum of
// the eight 32-bit lanes of a vector register, continued across calls so
// that an array of any length can be streamed through it. Stages 1-3 are
// the registered Hillis-Steele steps of the paper's figure (each lane adds
// the lane 1, 2 and 4 positions below it); stage 4 adds the running total,
// which is lane 7 of the previous result fed back, so each output is the
// sum of everything passed in since the sum was started. Latency 4 cycles,
// one call per cycle, no stalls (back-to-back calls see each other's total
// because stage 4 uses the value being produced in the same register).
// This design's choices: the running total is cleared by reset, and a call
// with bit 0 of in_data (the rs1 value) set starts a new sum from zero; the
// running total after the call is also returned in out_data (for rd).
// Addition wraps modulo 2^32.
module c3_psum #(
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
  localparam int N = 8;

  ctmpl_delay #(.N(C_CYCLES)) u_dly (
    .clk, .reset, .in_valid, .rd, .vrd1, .vrd2,
    .out_v, .out_rd, .out_vrd1, .out_vrd2);

  logic [31:0] s0 [N];
  logic [31:0] s1 [N], s2 [N], s3 [N], s4 [N];
  logic [2:0]  v_q;        // valid of stages 1..3
  logic [2:0]  clr_q;      // restart flag travelling with the call
  logic [31:0] total;      // running total = lane 7 of the last result

  for (genvar i = 0; i < N; i++) begin : g_in
    assign s0[i] = in_vdata1[32*i +: 32];
    assign out_vdata1[32*i +: 32] = s4[i];
  end
  assign total = s4[N-1];

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      s1[i] <= (i >= 1) ? s0[i] + s0[i-1] : s0[i];
      s2[i] <= (i >= 2) ? s1[i] + s1[i-2] : s1[i];
      s3[i] <= (i >= 4) ? s2[i] + s2[i-4] : s2[i];
    end
    if (reset) begin
      v_q   <= '0;
      clr_q <= '0;
      for (int i = 0; i < N; i++) s4[i] <= '0;
    end else begin
      v_q   <= {v_q[1:0], in_valid};
      clr_q <= {clr_q[1:0], in_data[0]};
      if (v_q[2]) begin
        for (int i = 0; i < N; i++) s4[i] <= s3[i] + (clr_q[2] ? 32'd0 : total);
      end
    end
  end
  assign out_data   = total;
  assign out_vdata2 = '0;
  logic unused;
  assign unused = ^{in_vdata2, in_data[31:1]};
endmodule
