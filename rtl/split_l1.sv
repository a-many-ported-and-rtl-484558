// split_l1 -- level-1 split and dispatching unit of one master inside one
// cluster.
//
// Beats of this master that the level-0 unit sent to this cluster arrive on
// in_valid / in / in_ready and pass through a small input FIFO (register
// slice, IN_DEPTH entries). The head beat is offered to exactly one of the N
// SRAM array groups of the cluster, chosen by smem_pkg::group_of; this is the
// second, intra-cluster randomisation step, so that the beats of one linear
// burst that land in the same cluster use different arrays. A beat blocked by
// its array blocks the ones behind it (in-order per master and cluster).
//
// Back from the arrays, the N response streams for this master are merged
// round-robin into an output FIFO (OUT_DEPTH entries) feeding the level-0
// unit on out_valid / out / out_ready. Latency: one cycle through each FIFO.
// The output FIFO is 8 deep because the level-0 unit drains each cluster at
// only a quarter beat per cycle when all four clusters return data. With 2
// entries, read data waiting here held sub-banks busy and cut 16-port random
// read throughput to about 90 % per port; with 8 it is above 99 %.
//
// The routing by the fractal placement follows the architecture; the FIFO
// depths and the round-robin merge are this design's choices.
module split_l1
  import smem_pkg::*;
#(
  parameter int unsigned M         = 4,
  parameter int unsigned N         = 4,
  parameter int unsigned IN_DEPTH  = 2,
  parameter int unsigned OUT_DEPTH = 8,
  localparam int unsigned NW       = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the level-0 unit
  input  logic              in_valid,
  input  beat_req_t         in,
  output logic              in_ready,
  output logic              out_valid,
  output beat_rsp_t         out,
  input  logic              out_ready,
  // to / from the N array groups
  output logic [N-1:0]      arr_valid,
  output beat_req_t         arr_req,
  input  logic [N-1:0]      arr_ready,
  input  logic [N-1:0]      arr_rsp_valid,
  input  beat_rsp_t [N-1:0] arr_rsp,
  output logic [N-1:0]      arr_rsp_ready
);

  logic          h_valid, h_ready;
  beat_req_t     h;
  logic [NW-1:0] grp;
  logic [N-1:0]  m_gnt;
  logic [NW-1:0] m_idx;
  logic          m_any, mo_ready;

  stream_fifo #(.T(beat_req_t), .DEPTH(IN_DEPTH)) u_in (
    .clk, .rst_n, .in_valid, .in, .in_ready,
    .out_valid(h_valid), .out(h), .out_ready(h_ready)
  );

  assign grp     = NW'(group_of(h.wa, M, N));
  assign arr_req = h;
  always_comb begin
    arr_valid = '0;
    arr_valid[grp] = h_valid;
  end
  assign h_ready = arr_ready[grp];

  rr_arbiter #(.N(N)) u_merge (
    .clk, .rst_n, .req(arr_rsp_valid), .adv(mo_ready),
    .gnt(m_gnt), .gnt_idx(m_idx), .gnt_any(m_any)
  );
  assign arr_rsp_ready = mo_ready ? m_gnt : '0;

  stream_fifo #(.T(beat_rsp_t), .DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n, .in_valid(m_any), .in(arr_rsp[m_idx]), .in_ready(mo_ready),
    .out_valid, .out, .out_ready
  );

endmodule
