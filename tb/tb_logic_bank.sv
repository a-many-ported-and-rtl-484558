// tb_logic_bank -- checks one logic bank (Y sub-banks by region, own arbiter
// each, merged response stream) at the beat level: masters write private
// words, then read them all back while writing other words, under random
// back-pressure. The bank's single tagged response stream is split per
// master here so that the shared beat checker can be used. Addresses are
// chosen inside cluster 0, group 0, logic bank 0 (bank hash included).
`timescale 1ns/1ps
module tb_logic_bank;
  import smem_pkg::*;
  localparam int unsigned X = 4, M = 4, N = 4, K = 4, Y = 2, ROWS = 64;
  localparam int unsigned NR = Y * ROWS;

  logic clk = 1'b0, rst_n = 1'b0, ce = 1'b0;
  always #5 clk = ~clk;
  always @(posedge clk) ce <= rst_n ? !ce : 1'b0;

  logic [X-1:0] in_valid = '0, in_ready, out_valid, out_ready;
  beat_req_t [X-1:0] in;
  beat_rsp_t [X-1:0] out;
  logic rsp_valid, rsp_ready;
  bank_rsp_t rsp;

  logic_bank #(.X(X), .M(M), .N(N), .K(K), .Y(Y), .ROWS(ROWS)) dut (
    .clk, .rst_n, .ce, .req_valid(in_valid), .req(in), .req_ready(in_ready),
    .rsp_valid, .rsp, .rsp_ready
  );

  always_comb begin
    rsp_ready = 1'b0;
    for (int p = 0; p < X; p++) begin
      out_valid[p] = rsp_valid && int'(rsp.mid) == p;
      out[p]       = rsp.rsp;
      if (int'(rsp.mid) == p) rsp_ready = out_ready[p];
    end
  end

  // word r: row r % ROWS, region r / ROWS; bank field chosen so that the
  // XOR hash gives bank 0
  function automatic int map_wa(int r);
    return M * N * ((r % K) + K * r);
  endfunction

  int n_regions_seen [Y];
  always @(posedge clk)
    for (int y = 0; y < Y; y++) if (dut.sb_rsp_valid[y]) n_regions_seen[y]++;
  final for (int y = 0; y < Y; y++) if (n_regions_seen[y] == 0) $display("region %0d unused", y);

  `include "tb_beat_checker.svh"

endmodule
