// logic_bank -- one SRAM logic bank: Y sub-banks, each covering one address
// region, each with its own arbiter.
//
// Every master has its own request path into the bank (req_valid / req /
// req_ready per master). The region field of the word address (the most
// significant part, see smem_pkg::region_of) selects the sub-bank; the row
// field selects the word inside its macro. Two masters that access different
// regions therefore never meet in an arbiter. The Y sub-bank response streams
// are merged round-robin onto the single return stream of the bank
// (rsp_valid / rsp / rsp_ready); the merge is combinational, so a response
// leaves the bank in the cycle it becomes valid if rsp_ready is high.
//
// Sub-banks by region with replicated arbitration follow the architecture;
// Y = 2 and the round-robin merge are this design's choices.
module logic_bank
  import smem_pkg::*;
#(
  parameter int unsigned X    = 16,
  parameter int unsigned M    = 4,
  parameter int unsigned N    = 4,
  parameter int unsigned K    = 16,
  parameter int unsigned Y    = 2,
  parameter int unsigned ROWS = 2048,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned YW  = (Y > 1) ? $clog2(Y) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ce,
  input  logic [X-1:0]       req_valid,
  input  beat_req_t [X-1:0]  req,
  output logic [X-1:0]       req_ready,
  output logic               rsp_valid,
  output bank_rsp_t          rsp,
  input  logic               rsp_ready
);

  logic [X-1:0][RW-1:0] row;
  logic [X-1:0][YW-1:0] region;
  logic [Y-1:0][X-1:0]  sb_valid, sb_ready;
  logic [Y-1:0]         sb_rsp_valid, sb_rsp_ready, m_gnt;
  bank_rsp_t [Y-1:0]    sb_rsp;
  logic [YW-1:0]        m_idx;
  logic                 m_any;

  always_comb begin
    req_ready = '0;
    for (int unsigned p = 0; p < X; p++) begin
      row[p]    = RW'(row_of(req[p].wa, M, N, K, ROWS));
      region[p] = YW'(region_of(req[p].wa, M, N, K, ROWS, Y));
      for (int unsigned y = 0; y < Y; y++) begin
        sb_valid[y][p] = req_valid[p] && (int'(region[p]) == y);
        if (int'(region[p]) == y) req_ready[p] = sb_ready[y][p];
      end
    end
  end

  for (genvar y = 0; y < Y; y++) begin : g_sb
    sub_bank #(.X(X), .ROWS(ROWS)) u_sb (
      .clk, .rst_n, .ce,
      .req_valid(sb_valid[y]), .req, .req_row(row), .req_ready(sb_ready[y]),
      .rsp_valid(sb_rsp_valid[y]), .rsp(sb_rsp[y]), .rsp_ready(sb_rsp_ready[y])
    );
  end

  rr_arbiter #(.N(Y)) u_merge (
    .clk, .rst_n, .req(sb_rsp_valid), .adv(rsp_ready),
    .gnt(m_gnt), .gnt_idx(m_idx), .gnt_any(m_any)
  );

  assign rsp_valid    = m_any;
  assign rsp          = sb_rsp[m_idx];
  assign sb_rsp_ready = rsp_ready ? m_gnt : '0;

endmodule
