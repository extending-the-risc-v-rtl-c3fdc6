// tb_nru_policy: exhaustive check of the NRU victim choice and update for
// all valid/bit/hit combinations of a 4-way set, against the rules: victim
// is the lowest invalid way, else the lowest way with a clear bit, else way
// 0; an access sets its bit, and clears all others when all would be set.
// One NRU bit per block follows the publication; the exact update and tie
// rules are this design's.
module tb_nru_policy;
  logic [3:0] valid, nru, hit_way, victim, nru_next;
  int checks = 0, failures = 0;
  nru_policy dut (.valid, .nru, .hit_way, .victim, .nru_next);
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int v = 0; v < 16; v++)
      for (int n = 0; n < 16; n++)
        for (int h = 0; h < 5; h++) begin
          logic [3:0] ev, en;
          int w;
          valid = 4'(v); nru = 4'(n); hit_way = (h == 4) ? 4'd0 : 4'(1 << h);
          #1;
          w = -1;
          for (int i = 0; i < 4 && w < 0; i++) if (!valid[i]) w = i;
          for (int i = 0; i < 4 && w < 0; i++) if (!nru[i]) w = i;
          if (w < 0) w = 0;
          ev = 4'(1 << w);
          en = nru | hit_way;
          if (hit_way != 0 && en == 4'hF) en = hit_way;
          checks += 2;
          if (victim !== ev) begin failures++; $display("FAIL victim v=%b n=%b got %b", valid, nru, victim); end
          if (nru_next !== en) begin failures++; $display("FAIL next n=%b h=%b got %b", nru, hit_way, nru_next); end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
