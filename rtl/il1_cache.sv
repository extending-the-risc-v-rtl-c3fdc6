// il1_cache: level-1 instruction cache. Direct-mapped, SETS (64) blocks of
// BLOCK (256) bits, held in registers so that a hit delivers the 32-bit
// instruction combinationally in the same cycle the pc is presented: the
// core executes one instruction per cycle on hits. A block wider than one
// instruction acts as natural prefetching. Read-only, so there is no dirty
// bit and nothing is ever written back.
// Miss: llc_req is raised (block-aligned llc_addr) and held until the LLC's
// one-cycle llc_ack brings the block, which is written into the set; the
// pc, held by the stalled core, then hits on the next cycle.
// Geometry, registers and direct mapping follow the paper; the handshake is
// this design's. valid bits reset to zero.
module il1_cache #(
  parameter int SETS  = 64,
  parameter int BLOCK = 256
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [31:0]      pc,
  output logic [31:0]      insn,
  output logic             hit,
  output logic             llc_req,
  output logic [31:0]      llc_addr,
  input  logic             llc_ack,
  input  logic [BLOCK-1:0] llc_rdata
);
  localparam int OFFW = $clog2(BLOCK/8);
  localparam int IDXW = $clog2(SETS);
  localparam int TW   = 32 - OFFW - IDXW;

  logic [BLOCK-1:0] data  [SETS];
  logic [TW-1:0]    tags  [SETS];
  logic [SETS-1:0]  valid;

  logic [IDXW-1:0] idx;
  logic [TW-1:0]   tg;
  assign idx = pc[OFFW +: IDXW];
  assign tg  = pc[31 -: TW];

  assign hit      = valid[idx] && (tags[idx] == tg);
  assign insn     = data[idx][int'(pc[OFFW-1:2])*32 +: 32];
  assign llc_req  = !hit;
  assign llc_addr = {pc[31:OFFW], {OFFW{1'b0}}};

  always_ff @(posedge clk) begin
    if (rst) valid <= '0;
    else if (llc_ack && !hit) begin
      data[idx]  <= llc_rdata;
      tags[idx]  <= tg;
      valid[idx] <= 1'b1;
    end
  end
endmodule
