// rv_div: iterative radix-2 divider for the RV32M DIV, DIVU, REM and REMU
// instructions (op = func3[1:0]: 0 DIV, 1 DIVU, 2 REM, 3 REMU). A start
// pulse latches the operands; one quotient bit is produced per cycle and
// done pulses for one cycle 33 cycles after start, with the result held
// until the next start. Division by zero and signed overflow give the
// results the RISC-V specification defines. The paper does not say how
// division is built; this unit is this design's choice.
module rv_div (
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  logic [1:0]  op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        busy,
  output logic        done,
  output logic [31:0] result
);
  logic [31:0] quo, dvs;
  logic [32:0] rem;
  logic [5:0]  cnt;
  logic        neg_q, neg_r, is_rem, dz;
  logic [31:0] a_abs, b_abs;
  logic [32:0] trial;
  always_comb begin
    a_abs = (!op[0] && a[31]) ? -a : a;
    b_abs = (!op[0] && b[31]) ? -b : b;
    trial = {rem[31:0], quo[31]} - {1'b0, dvs};
  end
  always_ff @(posedge clk) begin
    done <= 1'b0;
    if (rst) begin
      busy <= 1'b0;
      cnt  <= '0;
      result <= '0;
    end else if (start && !busy) begin
      busy   <= 1'b1;
      cnt    <= 6'd32;
      quo    <= a_abs;
      dvs    <= b_abs;
      rem    <= '0;
      neg_q  <= !op[0] && (a[31] ^ b[31]) && (b != 0);
      neg_r  <= !op[0] && a[31];
      is_rem <= op[1];
      dz     <= (b == 0);
    end else if (busy) begin
      if (cnt != 0) begin
        if (!trial[32]) begin
          rem <= {1'b0, trial[31:0]};
          quo <= {quo[30:0], 1'b1};
        end else begin
          rem <= {rem[31:0], quo[31]};
          quo <= {quo[30:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
      end else begin
        busy <= 1'b0;
        done <= 1'b1;
        if (is_rem) result <= neg_r ? -rem[31:0] : rem[31:0];
        else if (dz) result <= 32'hFFFF_FFFF;
        else        result <= neg_q ? -quo : quo;
      end
    end
  end
endmodule
