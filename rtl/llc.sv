// llc: unified last-level cache shared by the instruction and data L1
// caches. WAYS-way (4) set-associative, SETS sets (32), very wide blocks of
// BLOCK bits (16384 = 2 KiB), write-back with one dirty and one NRU bit per
// block: 256 KiB in total.
//
// Storage. A block is not kept in one memory word: each way is a memory of
// SETS*SUBBLOCKS rows of BLOCK/SUBBLOCKS (512) bits, the block occupying
// SUBBLOCKS (32) consecutive rows. A row holds two L1 blocks, so any L1
// block is read or written in one cycle; the tag array holds one tag per
// whole block.
//
// Requests. The L1 ports (i_* read-only, d_* read/write) present a level
// request with a block-aligned address; the DL1 wins when both ask.
// Timing of a hit: accepted in IDLE, looked up in LOOKUP (write or read of
// the L1 block), ack with the data on the following cycle. A request is
// never accepted in the cycle its predecessor's ack is shown.
// Miss: the victim (nru_policy) is written back, if dirty, as one burst of
// BLOCK bits (AW, then BEATS beats of 256 bits on W, then B), then the new
// block is read as one burst (AR, BEATS beats on R). Whole blocks map to
// single bursts, which stay inside a 4 KiB AXI boundary. The requested L1
// block is acknowledged as soon as its beat arrives, before the burst ends;
// writes are done after the fill by a second lookup.
// Memory port: a reduced AXI4 subset (valid/ready on AR, R, AW, W, B; len
// in beats minus one; no ids, sizes or response codes) with 256-bit data.
// The organisation (wide blocks as bursts, sub-block rows, early delivery,
// NRU, write-back) follows the paper; the handshakes, the priority and the
// one-miss-at-a-time FSM are this design's. The write-back reads the array
// combinationally; a BRAM mapping would add one cycle of read-ahead.
module llc #(
  parameter int SETS      = 32,
  parameter int WAYS      = 4,
  parameter int BLOCK     = 16384,
  parameter int SUBBLOCKS = 32,
  parameter int L1BLOCK   = 256
) (
  input  logic               clk,
  input  logic               rst,
  // IL1 port
  input  logic               i_req,
  input  logic [31:0]        i_addr,
  output logic               i_ack,
  // DL1 port
  input  logic               d_req,
  input  logic               d_we,
  input  logic [31:0]        d_addr,
  input  logic [L1BLOCK-1:0] d_wdata,
  output logic               d_ack,
  // read data for both L1 ports
  output logic [L1BLOCK-1:0] rdata,
  // memory (AXI-style burst) port
  output logic               m_arvalid,
  input  logic               m_arready,
  output logic [31:0]        m_araddr,
  output logic [7:0]         m_arlen,
  input  logic               m_rvalid,
  output logic               m_rready,
  input  logic [L1BLOCK-1:0] m_rdata,
  input  logic               m_rlast,
  output logic               m_awvalid,
  input  logic               m_awready,
  output logic [31:0]        m_awaddr,
  output logic [7:0]         m_awlen,
  output logic               m_wvalid,
  input  logic               m_wready,
  output logic [L1BLOCK-1:0] m_wdata,
  output logic               m_wlast,
  input  logic               m_bvalid,
  output logic               m_bready
);
  localparam int ROWW   = BLOCK / SUBBLOCKS;
  localparam int HALVES = ROWW / L1BLOCK;
  localparam int BEATS  = BLOCK / L1BLOCK;
  localparam int OFFW   = $clog2(BLOCK/8);
  localparam int L1OFF  = $clog2(L1BLOCK/8);
  localparam int BW     = $clog2(BEATS);
  localparam int IDXW   = $clog2(SETS);
  localparam int TW     = 32 - OFFW - IDXW;
  localparam int ROWS   = SETS * SUBBLOCKS;
  localparam int RW     = $clog2(ROWS);

  logic [HALVES-1:0][L1BLOCK-1:0] mem [WAYS][ROWS];
  logic [TW-1:0]   tags  [WAYS][SETS];
  logic [WAYS-1:0] valid [SETS];
  logic [WAYS-1:0] dirty [SETS];
  logic [WAYS-1:0] nru   [SETS];

  typedef enum logic [2:0] {IDLE, LOOKUP, WB_AW, WB_W, WB_B, FILL_AR, FILL_R} state_e;
  state_e state;

  logic               q_src;    // 1: DL1, 0: IL1
  logic               q_we;
  logic [31:0]        q_addr;
  logic [L1BLOCK-1:0] q_wdata;
  logic [WAYS-1:0]    vict_q;
  logic [BW-1:0]      beat;
  logic               answered, ack_q, ack_src;

  logic [IDXW-1:0] idx;
  logic [TW-1:0]   tg;
  logic [BW-1:0]   qbeat;
  assign idx   = q_addr[OFFW +: IDXW];
  assign tg    = q_addr[31 -: TW];
  assign qbeat = q_addr[L1OFF +: BW];

  function automatic logic [RW-1:0] row_of(input logic [IDXW-1:0] s, input logic [BW-1:0] b);
    return RW'((int'(s) * SUBBLOCKS) + (int'(b) / HALVES));
  endfunction
  function automatic int half_of(input logic [BW-1:0] b);
    return int'(b) % HALVES;
  endfunction

  logic [WAYS-1:0] hitv, victim, nru_nx;
  logic            hit;
  int              hw, vw;
  always_comb begin
    hitv = '0;
    hw = 0;
    for (int w = 0; w < WAYS; w++)
      if (valid[idx][w] && tags[w][idx] == tg) begin
        hitv[w] = 1'b1;
        hw = w;
      end
    hit = (state == LOOKUP) && (hitv != '0);
    vw = 0;
    for (int w = 0; w < WAYS; w++) if (vict_q[w]) vw = w;
  end

  nru_policy #(.WAYS(WAYS)) u_nru (
    .valid(valid[idx]), .nru(nru[idx]), .hit_way(hit ? hitv : '0),
    .victim, .nru_next(nru_nx));

  always_comb begin
    m_arvalid = (state == FILL_AR);
    m_araddr  = {tg, idx, {OFFW{1'b0}}};
    m_arlen   = 8'(BEATS - 1);
    m_rready  = (state == FILL_R);
    m_awvalid = (state == WB_AW);
    m_awaddr  = {tags[vw][idx], idx, {OFFW{1'b0}}};
    m_awlen   = 8'(BEATS - 1);
    m_wvalid  = (state == WB_W);
    m_wdata   = mem[vw][row_of(idx, beat)][half_of(beat)];
    m_wlast   = (state == WB_W) && (beat == BW'(BEATS - 1));
    m_bready  = (state == WB_B);
    i_ack     = ack_q && !ack_src;
    d_ack     = ack_q &&  ack_src;
  end

  always_ff @(posedge clk) begin
    ack_q <= 1'b0;
    if (rst) begin
      state <= IDLE;
      for (int s = 0; s < SETS; s++) begin
        valid[s] <= '0;
        dirty[s] <= '0;
        nru[s]   <= '0;
      end
    end else begin
      unique case (state)
        IDLE: if (!ack_q && (d_req || i_req)) begin
          q_src   <= d_req;
          q_we    <= d_req && d_we;
          q_addr  <= d_req ? d_addr : i_addr;
          q_wdata <= d_wdata;
          state   <= LOOKUP;
        end
        LOOKUP: begin
          if (hit) begin
            nru[idx] <= nru_nx;
            if (q_we) begin
              mem[hw][row_of(idx, qbeat)][half_of(qbeat)] <= q_wdata;
              dirty[idx][hw] <= 1'b1;
            end else begin
              rdata <= mem[hw][row_of(idx, qbeat)][half_of(qbeat)];
            end
            ack_q   <= 1'b1;
            ack_src <= q_src;
            state   <= IDLE;
          end else begin
            vict_q <= victim;
            beat   <= '0;
            state  <= (valid[idx] & dirty[idx] & victim) != '0 ? WB_AW : FILL_AR;
          end
        end
        WB_AW: if (m_awready) state <= WB_W;
        WB_W: if (m_wready) begin
          beat <= beat + 1'b1;
          if (beat == BW'(BEATS - 1)) state <= WB_B;
        end
        WB_B: if (m_bvalid) begin
          dirty[idx] <= dirty[idx] & ~vict_q;
          state <= FILL_AR;
        end
        FILL_AR: if (m_arready) begin
          tags[vw][idx] <= tg;
          valid[idx]    <= valid[idx] & ~vict_q;
          dirty[idx]    <= dirty[idx] & ~vict_q;
          beat     <= '0;
          answered <= 1'b0;
          state    <= FILL_R;
        end
        FILL_R: if (m_rvalid) begin
          mem[vw][row_of(idx, beat)][half_of(beat)] <= m_rdata;
          beat <= beat + 1'b1;
          if (!q_we && beat == qbeat) begin
            // early delivery of the requested L1 block
            rdata    <= m_rdata;
            ack_q    <= 1'b1;
            ack_src  <= q_src;
            answered <= 1'b1;
          end
          if (m_rlast || beat == BW'(BEATS - 1)) begin
            valid[idx] <= valid[idx] | vict_q;
            nru[idx]   <= ((nru[idx] | vict_q) == '1) ? vict_q : (nru[idx] | vict_q);
            state <= (answered || (!q_we && beat == qbeat)) ? IDLE : LOOKUP;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_one_ack: assert property (@(posedge clk) disable iff (rst) !(i_ack && d_ack));
endmodule
