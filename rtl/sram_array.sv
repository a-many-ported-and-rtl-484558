// sram_array -- one SRAM array group: per-master dispatching onto K logic
// banks and per-master collection of the banks' responses.
//
// All multi-beat bursts have already been cut into single beats that match the
// 256-bit SRAM width. Each of the X masters has its own input stream
// (in_valid / in / in_ready). Its dispatching logic decodes the logic bank from
// the word address (smem_pkg::bank_of, an XOR hash of the bank field with the
// low row bits) and offers the beat to that bank only; in_ready is that bank's
// ready for this master. The decode is combinational: a beat reaches the
// sub-bank arbiters in the cycle it is presented.
//
// Going back, every logic bank has one response stream tagged with the master
// it belongs to. For each master a round-robin merge picks one of the banks
// whose response is for it and presents it on out_valid / out / out_ready.
// So up to X responses (one per master) leave the array per cycle.
//
// The dispatching of beats to K banks by a programmable address scheme
// follows the architecture; the particular hash and the merges are this
// design's choices.
module sram_array
  import smem_pkg::*;
#(
  parameter int unsigned X    = 16,
  parameter int unsigned M    = 4,
  parameter int unsigned N    = 4,
  parameter int unsigned K    = 16,
  parameter int unsigned Y    = 2,
  parameter int unsigned ROWS = 2048,
  localparam int unsigned KW  = (K > 1) ? $clog2(K) : 1
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

  logic [X-1:0][KW-1:0] bank;
  logic [K-1:0][X-1:0]  lb_valid, lb_ready;
  logic [K-1:0]         lb_rsp_valid, lb_rsp_ready;
  bank_rsp_t [K-1:0]    lb_rsp;
  logic [X-1:0][K-1:0]  m_req, m_gnt;
  logic [X-1:0][KW-1:0] m_idx;
  logic [X-1:0]         m_any;

  // Dispatching: one decoder per master.
  always_comb begin
    in_ready = '0;
    for (int unsigned p = 0; p < X; p++) begin
      bank[p] = KW'(bank_of(in[p].wa, M, N, K));
      for (int unsigned k = 0; k < K; k++) begin
        lb_valid[k][p] = in_valid[p] && (int'(bank[p]) == k);
        if (int'(bank[p]) == k) in_ready[p] = lb_ready[k][p];
      end
    end
  end

  for (genvar k = 0; k < K; k++) begin : g_lb
    logic_bank #(.X(X), .M(M), .N(N), .K(K), .Y(Y), .ROWS(ROWS)) u_lb (
      .clk, .rst_n, .ce,
      .req_valid(lb_valid[k]), .req(in), .req_ready(lb_ready[k]),
      .rsp_valid(lb_rsp_valid[k]), .rsp(lb_rsp[k]), .rsp_ready(lb_rsp_ready[k])
    );
  end

  // Return: one merge per master over the banks holding a response for it.
  always_comb begin
    for (int unsigned p = 0; p < X; p++)
      for (int unsigned k = 0; k < K; k++)
        m_req[p][k] = lb_rsp_valid[k] && (int'(lb_rsp[k].mid) == p);
  end

  for (genvar p = 0; p < X; p++) begin : g_ret
    rr_arbiter #(.N(K)) u_merge (
      .clk, .rst_n, .req(m_req[p]), .adv(out_ready[p]),
      .gnt(m_gnt[p]), .gnt_idx(m_idx[p]), .gnt_any(m_any[p])
    );
    assign out_valid[p] = m_any[p];
    assign out[p]       = lb_rsp[m_idx[p]].rsp;
  end

  always_comb begin
    lb_rsp_ready = '0;
    for (int unsigned p = 0; p < X; p++)
      if (out_ready[p]) lb_rsp_ready = lb_rsp_ready | m_gnt[p];
  end

endmodule
