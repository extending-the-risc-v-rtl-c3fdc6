// axi_gearbox: the double-rate interconnect link. The LLC side moves one
// WIDE (256-bit) beat per core clock; the interconnect side runs on clk2x,
// twice the core clock, with NARROW (128-bit) beats, so the narrow port
// delivers the same bandwidth as a port twice as wide at the core clock.
//
// Clocks: clk and clk2x are phase-aligned, clk2x = 2 x clk. All logic runs
// on clk2x. A toggle flop on clk (t_c) sampled on clk2x (t_x) tells which
// clk2x edge is also a core edge: when t_x equals t_c, the next clk2x edge
// coincides with the core edge. Handshakes with the LLC side are performed
// only on those edges, so each core-clock handshake is counted once; the
// LLC-side outputs are settled in the second half of each core cycle.
//
// Channels (reduced AXI4: valid/ready, len = beats-1, last, no ids):
//   AR/AW: forwarded with the length doubled (2*(len+1)-1).
//   R: pairs of narrow beats (low half first) are packed into wide beats
//      and queued in a 2-entry FIFO for the LLC side.
//   W: a wide beat is split into two narrow beats, low half first; a new
//      wide beat is accepted when the previous one is out or leaving.
//   B: the response is held until the LLC side takes it.
// The double-rate idea and the widths are the paper's; the clocking
// scheme, FIFO depth and handshake details are this design's.
module axi_gearbox #(
  parameter int WIDE   = 256,
  parameter int NARROW = 128
) (
  input  logic              clk,
  input  logic              clk2x,
  input  logic              rst,
  // wide side (core clock)
  input  logic              s_arvalid,
  output logic              s_arready,
  input  logic [31:0]       s_araddr,
  input  logic [7:0]        s_arlen,
  output logic              s_rvalid,
  input  logic              s_rready,
  output logic [WIDE-1:0]   s_rdata,
  output logic              s_rlast,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_awaddr,
  input  logic [7:0]        s_awlen,
  input  logic              s_wvalid,
  output logic              s_wready,
  input  logic [WIDE-1:0]   s_wdata,
  input  logic              s_wlast,
  output logic              s_bvalid,
  input  logic              s_bready,
  // narrow side (clk2x)
  output logic              m_arvalid,
  input  logic              m_arready,
  output logic [31:0]       m_araddr,
  output logic [7:0]        m_arlen,
  input  logic              m_rvalid,
  output logic              m_rready,
  input  logic [NARROW-1:0] m_rdata,
  input  logic              m_rlast,
  output logic              m_awvalid,
  input  logic              m_awready,
  output logic [31:0]       m_awaddr,
  output logic [7:0]        m_awlen,
  output logic              m_wvalid,
  input  logic              m_wready,
  output logic [NARROW-1:0] m_wdata,
  output logic              m_wlast,
  input  logic              m_bvalid,
  output logic              m_bready
);
  // ---------------------------------------------------- phase detection
  logic t_c, t_x, edge_next;
  always_ff @(posedge clk) begin
    if (rst) t_c <= 1'b0;
    else     t_c <= ~t_c;
  end
  always_ff @(posedge clk2x) begin
    if (rst) t_x <= 1'b0;
    else     t_x <= t_c;
  end
  assign edge_next = (t_x == t_c);   // this clk2x edge is also a core edge

  // --------------------------------------------------------- AR and AW
  assign s_arready = !m_arvalid;
  assign s_awready = !m_awvalid;
  always_ff @(posedge clk2x) begin
    if (rst) begin
      m_arvalid <= 1'b0;
      m_awvalid <= 1'b0;
    end else begin
      if (m_arvalid && m_arready) m_arvalid <= 1'b0;
      else if (edge_next && s_arvalid && s_arready) begin
        m_arvalid <= 1'b1;
        m_araddr  <= s_araddr;
        m_arlen   <= 8'({s_arlen, 1'b1});
      end
      if (m_awvalid && m_awready) m_awvalid <= 1'b0;
      else if (edge_next && s_awvalid && s_awready) begin
        m_awvalid <= 1'b1;
        m_awaddr  <= s_awaddr;
        m_awlen   <= 8'({s_awlen, 1'b1});
      end
    end
  end

  // ------------------------------------------------------------------ R
  logic [NARROW-1:0] r_lo;
  logic              r_have_lo;
  logic [WIDE:0]     r_fifo [2];     // {last, data}
  logic [1:0]        r_cnt;
  logic              r_push, r_pop;
  logic [WIDE:0]     r_in;
  assign m_rready = (r_cnt < 2'd2);
  assign r_push   = m_rvalid && m_rready && r_have_lo;
  assign r_in     = {m_rlast, m_rdata, r_lo};
  assign r_pop    = edge_next && s_rvalid && s_rready;
  assign s_rvalid = (r_cnt != 0);
  assign {s_rlast, s_rdata} = r_fifo[0];
  always_ff @(posedge clk2x) begin
    if (rst) begin
      r_have_lo <= 1'b0;
      r_cnt     <= '0;
    end else begin
      if (m_rvalid && m_rready) begin
        r_have_lo <= !r_have_lo;
        if (!r_have_lo) r_lo <= m_rdata;
      end
      unique case ({r_push, r_pop})
        2'b10: begin r_fifo[r_cnt[0]] <= r_in; r_cnt <= r_cnt + 1'b1; end
        2'b01: begin r_fifo[0] <= r_fifo[1]; r_cnt <= r_cnt - 1'b1; end
        2'b11: begin
          if (r_cnt == 2'd1) r_fifo[0] <= r_in;
          else begin r_fifo[0] <= r_fifo[1]; r_fifo[1] <= r_in; end
        end
        default: ;
      endcase
    end
  end

  // ------------------------------------------------------------------ W
  logic [WIDE-1:0] w_buf;
  logic            w_last;
  logic [1:0]      w_cnt;            // narrow beats still to send
  assign m_wvalid = (w_cnt != 0);
  assign m_wdata  = (w_cnt == 2'd2) ? w_buf[NARROW-1:0] : w_buf[WIDE-1:NARROW];
  assign m_wlast  = (w_cnt == 2'd1) && w_last;
  assign s_wready = (w_cnt == 0) || (w_cnt == 2'd1 && m_wready);
  always_ff @(posedge clk2x) begin
    if (rst) w_cnt <= '0;
    else begin
      logic [1:0] c;
      c = w_cnt;
      if (m_wvalid && m_wready) c = c - 1'b1;
      if (edge_next && s_wvalid && s_wready) begin
        w_buf  <= s_wdata;
        w_last <= s_wlast;
        c = 2'd2;
      end
      w_cnt <= c;
    end
  end

  // ------------------------------------------------------------------ B
  logic b_pend;
  assign s_bvalid = b_pend;
  assign m_bready = !b_pend;
  always_ff @(posedge clk2x) begin
    if (rst) b_pend <= 1'b0;
    else if (m_bvalid && m_bready) b_pend <= 1'b1;
    else if (edge_next && s_bvalid && s_bready) b_pend <= 1'b0;
  end
endmodule
