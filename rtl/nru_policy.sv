// nru_policy: not-recently-used replacement for one set of a WAYS-way
// cache, using one bit per block. Combinational.
//  - victim: the lowest invalid way if there is one, otherwise the lowest
//    way whose NRU bit is 0 (if every bit is 1, way 0).
//  - nru_next: the bits after an access to the one-hot way hit_way: that
//    way's bit is set; if that would make every bit 1, all other bits are
//    cleared instead. With hit_way = 0 the bits are returned unchanged.
// The paper names the policy and its one bit per block; the exact update
// and tie-break rules here are the conventional ones.
module nru_policy #(
  parameter int WAYS = 4
) (
  input  logic [WAYS-1:0] valid,
  input  logic [WAYS-1:0] nru,
  input  logic [WAYS-1:0] hit_way,
  output logic [WAYS-1:0] victim,
  output logic [WAYS-1:0] nru_next
);
  always_comb begin
    victim = '0;
    for (int w = WAYS-1; w >= 0; w--)
      if (!nru[w]) victim = WAYS'(1) << w;
    if (victim == '0) victim = WAYS'(1);
    for (int w = WAYS-1; w >= 0; w--)
      if (!valid[w]) victim = WAYS'(1) << w;
  end
  always_comb begin
    nru_next = nru | hit_way;
    if (hit_way != '0 && (&nru_next)) nru_next = hit_way;
  end
endmodule
