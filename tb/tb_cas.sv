// tb_cas: checks the registered compare-and-swap unit against a signed
// min/max model on random and corner operands, one cycle after each input.
// The min/max behaviour follows the publication; signed comparison is this
// design's choice.
module tb_cas;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [31:0] a, b, lo, hi;
  int checks = 0, failures = 0;
  cas dut (.clk, .a, .b, .lo, .hi);
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    logic [31:0] ea, eb;
    for (int i = 0; i < 500; i++) begin
      a = (i < 4) ? {i[0], 31'd5} : $urandom;
      b = (i < 4) ? {i[1], 31'd7} : $urandom;
      ea = a; eb = b;
      @(posedge clk); #1;
      checks++;
      if (lo !== (($signed(ea) < $signed(eb)) ? ea : eb) || hi !== (($signed(ea) < $signed(eb)) ? eb : ea)) begin
        failures++;
        $display("FAIL a=%h b=%h lo=%h hi=%h", ea, eb, lo, hi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
