// tb_axi_mem: behavioural main-memory model with a reduced AXI4 slave port
// (AR, R, AW, W, B; len = beats-1; no ids). It serves one burst at a time:
// a read answers LAT cycles after AR with len+1 consecutive beats, a write
// takes its beats as they come and answers on B. Memory is WORDS words of
// W bits, addressed by the word index of the byte address (wrapping). It
// stands in for the interconnect and DRAM, which are not part of the RTL.
// Counters (n_rd_bursts, n_wr_bursts) let testbenches see the traffic.
// Not part of the published design: a stand-in for the vendor interconnect
// and DRAM, with a protocol subset chosen here.
module tb_axi_mem #(
  parameter int W     = 128,
  parameter int WORDS = 65536,
  parameter int LAT   = 4
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         arvalid,
  output logic         arready,
  input  logic [31:0]  araddr,
  input  logic [7:0]   arlen,
  output logic         rvalid,
  input  logic         rready,
  output logic [W-1:0] rdata,
  output logic         rlast,
  input  logic         awvalid,
  output logic         awready,
  input  logic [31:0]  awaddr,
  input  logic [7:0]   awlen,
  input  logic         wvalid,
  output logic         wready,
  input  logic [W-1:0] wdata,
  input  logic         wlast,
  output logic         bvalid,
  input  logic         bready
);
  localparam int AW = $clog2(WORDS);
  localparam int OB = $clog2(W/8);
  logic [W-1:0] mem [WORDS];
  typedef enum logic [2:0] {IDLE, RWAIT, RDATA, WDATA, WRESP} st_e;
  st_e st;
  logic [AW-1:0] a;
  logic [7:0]    n;
  int            wait_c;
  int            n_rd_bursts, n_wr_bursts;

  assign arready = (st == IDLE) && !awvalid;
  assign awready = (st == IDLE);
  assign rvalid  = (st == RDATA);
  assign rdata   = mem[a];
  assign rlast   = (st == RDATA) && (n == 0);
  assign wready  = (st == WDATA);
  assign bvalid  = (st == WRESP);

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= IDLE;
      n_rd_bursts <= 0;
      n_wr_bursts <= 0;
    end else begin
      unique case (st)
        IDLE: if (awvalid) begin
          a <= awaddr[OB +: AW]; n <= awlen; st <= WDATA; n_wr_bursts <= n_wr_bursts + 1;
        end else if (arvalid) begin
          a <= araddr[OB +: AW]; n <= arlen; st <= RWAIT; wait_c <= LAT; n_rd_bursts <= n_rd_bursts + 1;
        end
        RWAIT: if (wait_c == 0) st <= RDATA; else wait_c <= wait_c - 1;
        RDATA: if (rready) begin
          a <= a + 1'b1;
          if (n == 0) st <= IDLE; else n <= n - 1'b1;
        end
        WDATA: if (wvalid) begin
          mem[a] <= wdata;
          a <= a + 1'b1;
          if (wlast != (n == 0)) $display("tb_axi_mem: wlast mismatch");
          if (n == 0) st <= WRESP; else n <= n - 1'b1;
        end
        WRESP: if (bready) st <= IDLE;
        default: st <= IDLE;
      endcase
    end
  end
endmodule
