// cluster -- one of the M clusters of the shared memory: X level-1 split
// units (one per master) fully connected to N SRAM array groups.
//
// Each master's level-0 unit owns one beat stream into the cluster
// (in_valid[p] / in[p] / in_ready[p]) and one response stream out of it
// (out_valid[p] / out[p] / out_ready[p]). Level-1 unit p sends each beat to one
// array group; array group g offers master p's beats to its sub-bank arbiters
// and returns master p's responses to level-1 unit p. A master's path stays
// its own up to the sub-bank arbiters, which are the only points where
// masters meet. The cluster holds 1/M of the memory (8 MB at the default
// sizes) and is the unit that is built once and replicated M times.
//
// Latency of a read beat with no contention, counted from the cycle it is in
// the level-1 input FIFO: grant at the next memory-cycle edge (0 or 1 cycle),
// response 2 cycles later, one cycle through the output FIFO.
module cluster
  import smem_pkg::*;
#(
  parameter int unsigned X    = 16,
  parameter int unsigned M    = 4,
  parameter int unsigned N    = 4,
  parameter int unsigned K    = 16,
  parameter int unsigned Y    = 2,
  parameter int unsigned ROWS = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ce,
  input  logic [X-1:0]      in_valid,
  input  beat_req_t [X-1:0] in,
  output logic [X-1:0]      in_ready,
  output logic [X-1:0]      out_valid,
  output beat_rsp_t [X-1:0] out,
  input  logic [X-1:0]      out_ready
);

  // level-1 side, indexed [master][group]
  logic      [X-1:0][N-1:0] l1_valid, l1_ready, l1_rsp_valid, l1_rsp_ready;
  beat_req_t [X-1:0]        l1_req;
  beat_rsp_t [X-1:0][N-1:0] l1_rsp;
  // array side, indexed [group][master]
  logic      [N-1:0][X-1:0] a_valid, a_ready, a_rsp_valid, a_rsp_ready;
  beat_rsp_t [N-1:0][X-1:0] a_rsp;

  for (genvar p = 0; p < X; p++) begin : g_l1
    split_l1 #(.M(M), .N(N)) u_l1 (
      .clk, .rst_n,
      .in_valid(in_valid[p]), .in(in[p]), .in_ready(in_ready[p]),
      .out_valid(out_valid[p]), .out(out[p]), .out_ready(out_ready[p]),
      .arr_valid(l1_valid[p]), .arr_req(l1_req[p]), .arr_ready(l1_ready[p]),
      .arr_rsp_valid(l1_rsp_valid[p]), .arr_rsp(l1_rsp[p]),
      .arr_rsp_ready(l1_rsp_ready[p])
    );
    for (genvar g = 0; g < N; g++) begin : g_x
      assign a_valid[g][p]      = l1_valid[p][g];
      assign l1_ready[p][g]     = a_ready[g][p];
      assign l1_rsp_valid[p][g] = a_rsp_valid[g][p];
      assign l1_rsp[p][g]       = a_rsp[g][p];
      assign a_rsp_ready[g][p]  = l1_rsp_ready[p][g];
    end
  end

  for (genvar g = 0; g < N; g++) begin : g_arr
    sram_array #(.X(X), .M(M), .N(N), .K(K), .Y(Y), .ROWS(ROWS)) u_arr (
      .clk, .rst_n, .ce,
      .in_valid(a_valid[g]), .in(l1_req), .in_ready(a_ready[g]),
      .out_valid(a_rsp_valid[g]), .out(a_rsp[g]), .out_ready(a_rsp_ready[g])
    );
  end

endmodule
