// smem_top -- many-ported shared memory: X master ports, M clusters of N SRAM
// array groups, K logic banks per array, Y sub-banks per logic bank.
//
// Every master port is an AXI5 subset (see split_l0) with 256-bit data and
// read data chunking. A burst entering a port is cut into single beats; the
// level-0 unit spreads consecutive beats over the M clusters, the level-1
// unit of that master inside the cluster spreads them over the N array groups,
// and the array's dispatching picks a logic bank by a hashed address field and
// a sub-bank by address region. Only the sub-bank arbiters are shared between
// masters, so masters working in different regions never interfere. Read data
// comes back per beat, in whatever order the sub-banks answer, tagged with its
// chunk number.
//
// The interconnect runs on clk. The SRAM macros run at half that rate: the
// top generates the memory-cycle enable `mem_ce` (high on every other cycle
// after reset), and all sub-banks access their macros only on those edges.
//
// Default sizes give the prototype configuration: X = 16 masters, M = 4, N = 4,
// K = 16 banks, 8 outstanding commands and a 64-beat buffer per port, 256-bit
// data, 32 MB in total (Y = 2 regions and 2048-row macros, i.e. 512 macros of
// 64 KB, are this design's choice of how to reach 32 MB).
//
// Uncontended read latency, AR handshake to the first R handshake: 7 cycles
// when the beat meets a memory-cycle edge at once, one more otherwise
// (slot table, splitter, beat queue, level-1 FIFO, grant at a memory edge,
// one memory cycle of access, level-1 output FIFO, R FIFO).
module smem_top
  import smem_pkg::*;
#(
  parameter int unsigned X        = 16,
  parameter int unsigned M        = 4,
  parameter int unsigned N        = 4,
  parameter int unsigned K        = 16,
  parameter int unsigned Y        = 2,
  parameter int unsigned ROWS     = 2048,
  parameter int unsigned OUTST    = 8,
  parameter int unsigned BEAT_BUF = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [X-1:0]             arvalid,
  output logic [X-1:0]             arready,
  input  logic [X-1:0][IDW-1:0]    arid,
  input  logic [X-1:0][AW-1:0]     araddr,
  input  logic [X-1:0][BEATW-1:0]  arlen,
  output logic [X-1:0]             rvalid,
  input  logic [X-1:0]             rready,
  output logic [X-1:0][IDW-1:0]    rid,
  output logic [X-1:0][DW-1:0]     rdata,
  output logic [X-1:0]             rlast,
  output logic [X-1:0]             rchunkv,
  output logic [X-1:0][BEATW-1:0]  rchunknum,
  output logic [X-1:0][DW/128-1:0] rchunkstrb,
  input  logic [X-1:0]             awvalid,
  output logic [X-1:0]             awready,
  input  logic [X-1:0][IDW-1:0]    awid,
  input  logic [X-1:0][AW-1:0]     awaddr,
  input  logic [X-1:0][BEATW-1:0]  awlen,
  input  logic [X-1:0]             wvalid,
  output logic [X-1:0]             wready,
  input  logic [X-1:0][DW-1:0]     wdata,
  input  logic [X-1:0]             wlast,
  output logic [X-1:0]             bvalid,
  input  logic [X-1:0]             bready,
  output logic [X-1:0][IDW-1:0]    bid
);

  logic mem_ce;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mem_ce <= 1'b0;
    else        mem_ce <= !mem_ce;
  end

  // [master][cluster] on the master side, [cluster][master] on the cluster side
  logic      [X-1:0][M-1:0] p_out_valid, p_out_ready, p_in_valid, p_in_ready;
  beat_req_t [X-1:0][M-1:0] p_out;
  beat_rsp_t [X-1:0][M-1:0] p_in;
  logic      [M-1:0][X-1:0] c_in_valid, c_in_ready, c_out_valid, c_out_ready;
  beat_req_t [M-1:0][X-1:0] c_in;
  beat_rsp_t [M-1:0][X-1:0] c_out;

  for (genvar p = 0; p < X; p++) begin : g_port
    split_l0 #(.M(M), .N(N), .OUTST(OUTST), .BEAT_BUF(BEAT_BUF)) u_l0 (
      .clk, .rst_n,
      .arvalid(arvalid[p]), .arready(arready[p]), .arid(arid[p]),
      .araddr(araddr[p]), .arlen(arlen[p]),
      .rvalid(rvalid[p]), .rready(rready[p]), .rid(rid[p]), .rdata(rdata[p]),
      .rlast(rlast[p]), .rchunkv(rchunkv[p]), .rchunknum(rchunknum[p]),
      .rchunkstrb(rchunkstrb[p]),
      .awvalid(awvalid[p]), .awready(awready[p]), .awid(awid[p]),
      .awaddr(awaddr[p]), .awlen(awlen[p]),
      .wvalid(wvalid[p]), .wready(wready[p]), .wdata(wdata[p]), .wlast(wlast[p]),
      .bvalid(bvalid[p]), .bready(bready[p]), .bid(bid[p]),
      .out_valid(p_out_valid[p]), .out(p_out[p]), .out_ready(p_out_ready[p]),
      .in_valid(p_in_valid[p]), .in(p_in[p]), .in_ready(p_in_ready[p])
    );
    for (genvar c = 0; c < M; c++) begin : g_x
      assign c_in_valid[c][p]  = p_out_valid[p][c];
      assign c_in[c][p]        = p_out[p][c];
      assign p_out_ready[p][c] = c_in_ready[c][p];
      assign p_in_valid[p][c]  = c_out_valid[c][p];
      assign p_in[p][c]        = c_out[c][p];
      assign c_out_ready[c][p] = p_in_ready[p][c];
    end
  end

  for (genvar c = 0; c < M; c++) begin : g_cluster
    cluster #(.X(X), .M(M), .N(N), .K(K), .Y(Y), .ROWS(ROWS)) u_cluster (
      .clk, .rst_n, .ce(mem_ce),
      .in_valid(c_in_valid[c]), .in(c_in[c]), .in_ready(c_in_ready[c]),
      .out_valid(c_out_valid[c]), .out(c_out[c]), .out_ready(c_out_ready[c])
    );
  end

endmodule
