// dl1_cache: level-1 data cache. WAYS-way set-associative (4), SETS sets
// (32), blocks of BLOCK bits (256, the vector register width), write-back
// and write-allocate, with one valid, one dirty and one NRU bit per block.
//
// Pipeline (hit): cycle 0 the core presents a request and it is registered;
// cycle 1 the tags are compared, a store updates the block and a load
// reads it into the reply register; cycle 2 the reply (dresp) is valid and
// the core writes its register at the end of that cycle, so a dependent
// instruction executes in cycle 3. A new request is accepted every cycle
// while requests hit.
// Miss: the request waits in stage 1 (req_ready low) while the FSM writes
// back a dirty victim (chosen by nru_policy) to the LLC and fetches the
// block; the request is then retried as a hit. A full-block, aligned vector
// store that misses allocates the block without fetching it, because the
// whole block is overwritten.
// Scalar loads return the byte, half or word sign- or zero-extended in
// rdata[31:0]; vector loads return the whole block. Addresses are aligned
// down to the access size (misalignment is not handled).
// LLC port: a level request (llc_req with llc_we/llc_addr/llc_wdata) held
// until a one-cycle llc_ack; a read's block comes with the ack.
// The geometry, write-back policy, NRU, the dirty bit and the no-fetch
// vector store miss are the paper's; the handshakes and the one-miss-at-a-
// time organisation are this design's.
module dl1_cache
  import simd_pkg::*;
#(
  parameter int SETS  = 32,
  parameter int WAYS  = 4,
  parameter int BLOCK = 256,
  parameter int TAGW  = 6
) (
  input  logic             clk,
  input  logic             rst,
  // core side
  input  logic             req_valid,
  output logic             req_ready,
  input  logic             req_we,
  input  msize_e           req_size,
  input  logic             req_uns,
  input  logic [31:0]      req_addr,
  input  logic [BLOCK-1:0] req_wdata,
  input  logic [TAGW-1:0]  req_tag,
  output logic             resp_valid,
  output logic [BLOCK-1:0] resp_rdata,
  output logic [TAGW-1:0]  resp_tag,
  // LLC side
  output logic             llc_req,
  output logic             llc_we,
  output logic [31:0]      llc_addr,
  output logic [BLOCK-1:0] llc_wdata,
  input  logic             llc_ack,
  input  logic [BLOCK-1:0] llc_rdata
);
  localparam int OFFW = $clog2(BLOCK/8);
  localparam int IDXW = $clog2(SETS);
  localparam int TW   = 32 - OFFW - IDXW;

  logic [BLOCK-1:0] data  [WAYS][SETS];
  logic [TW-1:0]    tags  [WAYS][SETS];
  logic [WAYS-1:0]  valid [SETS];
  logic [WAYS-1:0]  dirty [SETS];
  logic [WAYS-1:0]  nru   [SETS];

  // stage-1 request register
  logic             s1_v, s1_we, s1_uns;
  msize_e           s1_size;
  logic [31:0]      s1_addr;
  logic [BLOCK-1:0] s1_wdata;
  logic [TAGW-1:0]  s1_tag;

  typedef enum logic [1:0] {IDLE, WB, FETCH} state_e;
  state_e state;
  logic [WAYS-1:0] vict_q;

  logic [IDXW-1:0] idx;
  logic [TW-1:0]   tg;
  logic [WAYS-1:0] hitv, victim, nru_nx;
  logic            hit;
  int              hw;
  assign idx = s1_addr[OFFW +: IDXW];
  assign tg  = s1_addr[31 -: TW];

  always_comb begin
    hitv = '0;
    hw   = 0;
    for (int w = 0; w < WAYS; w++)
      if (valid[idx][w] && tags[w][idx] == tg) begin
        hitv[w] = 1'b1;
        hw = w;
      end
    hit = s1_v && (hitv != '0);
  end

  nru_policy #(.WAYS(WAYS)) u_nru (
    .valid(valid[idx]), .nru(nru[idx]), .hit_way(hit ? hitv : '0),
    .victim, .nru_next(nru_nx));

  // a miss that overwrites the whole block needs no fetch
  logic full_wr;
  assign full_wr = s1_we && (s1_size == SZ_V);

  assign req_ready = !s1_v || (hit && state == IDLE);

  // merge a store into a block
  function automatic logic [BLOCK-1:0] merge(input logic [BLOCK-1:0] old, input logic [BLOCK-1:0] wd,
                                             input msize_e sz, input logic [31:0] a);
    logic [BLOCK-1:0] r;
    int w, b;
    r = old;
    w = int'(a[OFFW-1:2]);
    b = int'(a[1:0]);
    unique case (sz)
      SZ_B: r[w*32 + (b*8) +: 8]          = wd[7:0];
      SZ_H: r[w*32 + ((b/2)*16) +: 16]    = wd[15:0];
      SZ_W: r[w*32 +: 32]                 = wd[31:0];
      default: r = wd;
    endcase
    return r;
  endfunction

  function automatic logic [31:0] extract(input logic [BLOCK-1:0] blk, input msize_e sz,
                                          input logic uns, input logic [31:0] a);
    logic [31:0] wv;
    logic [31:0] r;
    wv = blk[int'(a[OFFW-1:2])*32 +: 32];
    wv = wv >> (a[1:0] * 8);
    unique case (sz)
      SZ_B: r = uns ? {24'd0, wv[7:0]}  : {{24{wv[7]}}, wv[7:0]};
      SZ_H: r = uns ? {16'd0, wv[15:0]} : {{16{wv[15]}}, wv[15:0]};
      default: r = wv;
    endcase
    return r;
  endfunction

  int vw;
  always_comb begin
    vw = 0;
    for (int w = 0; w < WAYS; w++) if (vict_q[w]) vw = w;
  end

  always_comb begin
    llc_req   = (state != IDLE);
    llc_we    = (state == WB);
    llc_addr  = (state == WB) ? {tags[vw][idx], idx, {OFFW{1'b0}}}
                              : {s1_addr[31:OFFW], {OFFW{1'b0}}};
    llc_wdata = data[vw][idx];
  end

  always_ff @(posedge clk) begin
    resp_valid <= 1'b0;
    if (rst) begin
      s1_v  <= 1'b0;
      state <= IDLE;
      for (int s = 0; s < SETS; s++) begin
        valid[s] <= '0;
        dirty[s] <= '0;
        nru[s]   <= '0;
      end
    end else begin
      unique case (state)
        IDLE: begin
          if (hit) begin
            nru[idx] <= nru_nx;
            if (s1_we) begin
              data[hw][idx]  <= merge(data[hw][idx], s1_wdata, s1_size, s1_addr);
              dirty[idx][hw] <= 1'b1;
            end else begin
              resp_valid <= 1'b1;
              resp_tag   <= s1_tag;
              resp_rdata <= (s1_size == SZ_V) ? data[hw][idx]
                          : BLOCK'(extract(data[hw][idx], s1_size, s1_uns, s1_addr));
            end
          end else if (s1_v) begin
            vict_q <= victim;
            if ((valid[idx] & dirty[idx] & victim) != '0) state <= WB;
            else if (full_wr) begin
              for (int w = 0; w < WAYS; w++)
                if (victim[w]) begin
                  tags[w][idx]  <= tg;
                  data[w][idx]  <= s1_wdata;
                end
              valid[idx] <= valid[idx] | victim;
              dirty[idx] <= dirty[idx] | victim;
              nru[idx]   <= ((nru[idx] | victim) == '1) ? victim : (nru[idx] | victim);
              s1_v <= 1'b0;
            end else state <= FETCH;
          end
          if (req_ready) begin
            s1_v     <= req_valid;
            s1_we    <= req_we;
            s1_size  <= req_size;
            s1_uns   <= req_uns;
            s1_addr  <= req_addr;
            s1_wdata <= req_wdata;
            s1_tag   <= req_tag;
          end
        end
        WB: if (llc_ack) begin
          dirty[idx] <= dirty[idx] & ~vict_q;
          if (full_wr) begin
            tags[vw][idx] <= tg;
            data[vw][idx] <= s1_wdata;
            valid[idx]    <= valid[idx] | vict_q;
            dirty[idx]    <= (dirty[idx] & ~vict_q) | vict_q;
            nru[idx]      <= ((nru[idx] | vict_q) == '1) ? vict_q : (nru[idx] | vict_q);
            s1_v  <= 1'b0;
            state <= IDLE;
          end else state <= FETCH;
        end
        FETCH: if (llc_ack) begin
          tags[vw][idx] <= tg;
          data[vw][idx] <= llc_rdata;
          valid[idx]    <= valid[idx] | vict_q;
          dirty[idx]    <= dirty[idx] & ~vict_q;
          state <= IDLE;               // the request is retried and hits
        end
        default: state <= IDLE;
      endcase
    end
  end

  // a request is only taken when the cache can accept it
  a_no_drop: assert property (@(posedge clk) disable iff (rst)
    (state != IDLE) |-> !req_ready);
endmodule
