// simd_softcore: the whole softcore. A single-stage RV32IM core with eight
// 256-bit vector registers and pipelined custom SIMD units (rv32im_core)
// fetches from a register-based direct-mapped IL1 (il1_cache) and sends
// loads and stores to a 4-way DL1 whose blocks are as wide as a vector
// register (dl1_cache). Both L1 caches miss into a unified 4-way LLC with
// 16384-bit blocks (llc), which exchanges whole blocks with main memory as
// single bursts. The LLC's 256-bit memory port is carried by a double-rate
// link (axi_gearbox) onto a 128-bit AXI-style port clocked at clk2x.
//
// Clocks: clk (core) and clk2x (interconnect) must be phase-aligned with
// clk2x at twice the frequency; rst is synchronous and active high and must
// be held for a few cycles of both clocks. Execution starts at address 0
// after reset and stops (halt) at ECALL/EBREAK once nothing is in flight.
// Data path widths per cycle: 32 bits IL1->core, 256 bits DL1<->core,
// 256 bits L1<->LLC, 256 bits LLC<->link, 128 bits at clk2x to memory.
module simd_softcore
  import simd_pkg::*;
(
  input  logic         clk,
  input  logic         clk2x,
  input  logic         rst,
  // 128-bit AXI-style main memory port (clk2x)
  output logic         m_arvalid,
  input  logic         m_arready,
  output logic [31:0]  m_araddr,
  output logic [7:0]   m_arlen,
  input  logic         m_rvalid,
  output logic         m_rready,
  input  logic [127:0] m_rdata,
  input  logic         m_rlast,
  output logic         m_awvalid,
  input  logic         m_awready,
  output logic [31:0]  m_awaddr,
  output logic [7:0]   m_awlen,
  output logic         m_wvalid,
  input  logic         m_wready,
  output logic [127:0] m_wdata,
  output logic         m_wlast,
  input  logic         m_bvalid,
  output logic         m_bready,
  output logic         halt,
  output logic         retire
);
  // core <-> IL1
  logic [31:0] pc, insn;
  logic        ihit;
  // core <-> DL1
  logic            dreq_valid, dreq_ready, dreq_we, dreq_uns;
  msize_e          dreq_size;
  logic [31:0]     dreq_addr;
  logic [VLEN-1:0] dreq_wdata, dresp_rdata;
  logic [5:0]      dreq_tag, dresp_tag;
  logic            dresp_valid;
  // L1 <-> LLC
  logic               i_req, i_ack, d_req, d_we, d_ack;
  logic [31:0]        i_addr, d_addr;
  logic [L1BLOCK-1:0] d_wdata, l_rdata;
  // LLC <-> link
  logic               w_arvalid, w_arready, w_rvalid, w_rready, w_rlast;
  logic               w_awvalid, w_awready, w_wvalid, w_wready, w_wlast, w_bvalid, w_bready;
  logic [31:0]        w_araddr, w_awaddr;
  logic [7:0]         w_arlen, w_awlen;
  logic [L1BLOCK-1:0] w_rdata, w_wdata;

  rv32im_core u_core (
    .clk, .rst, .pc, .insn, .ihit,
    .dreq_valid, .dreq_ready, .dreq_we, .dreq_size, .dreq_uns, .dreq_addr,
    .dreq_wdata, .dreq_tag, .dresp_valid, .dresp_rdata, .dresp_tag,
    .halt, .retire);

  il1_cache u_il1 (
    .clk, .rst, .pc, .insn, .hit(ihit),
    .llc_req(i_req), .llc_addr(i_addr), .llc_ack(i_ack), .llc_rdata(l_rdata));

  dl1_cache u_dl1 (
    .clk, .rst,
    .req_valid(dreq_valid), .req_ready(dreq_ready), .req_we(dreq_we),
    .req_size(dreq_size), .req_uns(dreq_uns), .req_addr(dreq_addr),
    .req_wdata(dreq_wdata), .req_tag(dreq_tag),
    .resp_valid(dresp_valid), .resp_rdata(dresp_rdata), .resp_tag(dresp_tag),
    .llc_req(d_req), .llc_we(d_we), .llc_addr(d_addr), .llc_wdata(d_wdata),
    .llc_ack(d_ack), .llc_rdata(l_rdata));

  llc u_llc (
    .clk, .rst,
    .i_req, .i_addr, .i_ack,
    .d_req, .d_we, .d_addr, .d_wdata, .d_ack,
    .rdata(l_rdata),
    .m_arvalid(w_arvalid), .m_arready(w_arready), .m_araddr(w_araddr), .m_arlen(w_arlen),
    .m_rvalid(w_rvalid), .m_rready(w_rready), .m_rdata(w_rdata), .m_rlast(w_rlast),
    .m_awvalid(w_awvalid), .m_awready(w_awready), .m_awaddr(w_awaddr), .m_awlen(w_awlen),
    .m_wvalid(w_wvalid), .m_wready(w_wready), .m_wdata(w_wdata), .m_wlast(w_wlast),
    .m_bvalid(w_bvalid), .m_bready(w_bready));

  axi_gearbox u_link (
    .clk, .clk2x, .rst,
    .s_arvalid(w_arvalid), .s_arready(w_arready), .s_araddr(w_araddr), .s_arlen(w_arlen),
    .s_rvalid(w_rvalid), .s_rready(w_rready), .s_rdata(w_rdata), .s_rlast(w_rlast),
    .s_awvalid(w_awvalid), .s_awready(w_awready), .s_awaddr(w_awaddr), .s_awlen(w_awlen),
    .s_wvalid(w_wvalid), .s_wready(w_wready), .s_wdata(w_wdata), .s_wlast(w_wlast),
    .s_bvalid(w_bvalid), .s_bready(w_bready),
    .m_arvalid, .m_arready, .m_araddr, .m_arlen,
    .m_rvalid, .m_rready, .m_rdata, .m_rlast,
    .m_awvalid, .m_awready, .m_awaddr, .m_awlen,
    .m_wvalid, .m_wready, .m_wdata, .m_wlast,
    .m_bvalid, .m_bready);
endmodule
