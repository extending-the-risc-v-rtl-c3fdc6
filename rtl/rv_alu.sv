// rv_alu: combinational integer unit of the RV32IM core. Computes the
// RV32I register/immediate operations selected by func3 (alt selects SUB
// and SRA) and, when mul is set, the four RV32M multiplications
// (MUL, MULH, MULHSU, MULHU) in a single cycle, as a DSP-based multiplier
// would on an FPGA. Division is done elsewhere (rv_div).
module rv_alu (
  input  logic [2:0]  f3,
  input  logic        alt,
  input  logic        mul,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic signed [65:0] p;
  always_comb begin
    p = '0;
    y = '0;
    if (mul) begin
      unique case (f3[1:0])
        2'd0, 2'd1: p = $signed({a[31], a}) * $signed({b[31], b});
        2'd2:       p = $signed({a[31], a}) * $signed({1'b0, b});
        default:    p = $signed({1'b0, a})  * $signed({1'b0, b});
      endcase
      y = (f3[1:0] == 2'd0) ? p[31:0] : p[63:32];
    end else begin
      unique case (f3)
        3'd0: y = alt ? a - b : a + b;
        3'd1: y = a << b[4:0];
        3'd2: y = {31'd0, $signed(a) < $signed(b)};
        3'd3: y = {31'd0, a < b};
        3'd4: y = a ^ b;
        3'd5: y = alt ? 32'($signed(a) >>> b[4:0]) : a >> b[4:0];
        3'd6: y = a | b;
        default: y = a & b;
      endcase
    end
  end
endmodule
