// tb_sram_array -- checks one SRAM array group (dispatching, K logic banks) at the
// beat level: masters write private words, then read them all back (shared
// reads) while writing other private words, under random out_ready
// back-pressure. Every response must come back to the right master with the
// right tag and data; out-of-order returns and input back-pressure must occur.
// Addresses are chosen inside this array (cluster and group fields 0).
`timescale 1ns/1ps
module tb_sram_array;
  import smem_pkg::*;
  localparam int unsigned X = 4, M = 4, N = 4, K = 4, Y = 2, ROWS = 16;
  localparam int unsigned WORDS  = M * N * K * Y * ROWS;    // 2048
  localparam int unsigned NR     = WORDS / 16;          // usable words

  logic clk = 1'b0, rst_n = 1'b0, ce = 1'b0;
  always #5 clk = ~clk;
  always @(posedge clk) ce <= rst_n ? !ce : 1'b0;

  logic [X-1:0] in_valid = '0, in_ready, out_valid, out_ready;
  beat_req_t [X-1:0] in;
  beat_rsp_t [X-1:0] out;

  sram_array #(.X(X), .M(M), .N(N), .K(K), .Y(Y), .ROWS(ROWS)) dut (.*);

  function automatic int map_wa(int r);
    return 16 * r;
  endfunction

  `include "tb_beat_checker.svh"

endmodule
