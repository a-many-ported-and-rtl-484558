// sub_bank -- one sub-bank of a logic bank: its own arbiter in front of one
// SRAM macro, and a response register that sends read data or a write
// acknowledgement back to the master that was served.
//
// Each of the X masters has its own request path up to this point (req_valid /
// req / req_ready, a valid-ready handshake per master). On every memory cycle
// (ce high) in which the response slot is free, or is being emptied on that
// same edge, a round-robin arbiter picks one requesting master and the SRAM
// performs that beat. Reads and writes share the single SRAM port. The
// response (bank_rsp_t, carrying the master index) is valid from the next
// clk edge on, so the read word is taken by the return path at the following
// memory-cycle edge at the earliest; it is held until rsp_ready. While it is
// held no new access is granted, which back-pressures the masters.
// Throughput: one beat per memory cycle, i.e. 0.5 beat per clk.
//
// Independent arbitration per sub-bank follows the architecture; round robin,
// the valid-ready handshakes and the single response register are this
// design's choices.
module sub_bank
  import smem_pkg::*;
#(
  parameter int unsigned X    = 16,
  parameter int unsigned ROWS = 2048,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned XW  = (X > 1) ? $clog2(X) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ce,          // memory-cycle enable (half rate)
  input  logic [X-1:0]       req_valid,
  input  beat_req_t [X-1:0]  req,
  input  logic [X-1:0][RW-1:0] req_row,   // row inside this macro, per master
  output logic [X-1:0]       req_ready,
  output logic               rsp_valid,
  output bank_rsp_t          rsp,
  input  logic               rsp_ready
);

  logic [X-1:0]  gnt;
  logic [XW-1:0] gnt_idx;
  logic          gnt_any, take, busy, aged;
  logic          p_we;
  logic [MIDW-1:0]  p_mid;
  logic [SLOTW-1:0] p_slot;
  logic [BEATW-1:0] p_beat;
  logic [DW-1:0]    rdata;

  rr_arbiter #(.N(X)) u_arb (
    .clk, .rst_n, .req(req_valid), .adv(take),
    .gnt, .gnt_idx, .gnt_any
  );

  assign rsp_valid = busy && aged;
  assign take      = ce && gnt_any && (!busy || (rsp_valid && rsp_ready));
  assign req_ready = take ? gnt : '0;

  sram_macro #(.DW(DW), .ROWS(ROWS)) u_sram (
    .clk, .ce, .en(take), .we(req[gnt_idx].we),
    .addr(req_row[gnt_idx]), .wdata(req[gnt_idx].data), .rdata
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      aged   <= 1'b0;
      p_we   <= 1'b0;
      p_mid  <= '0;
      p_slot <= '0;
      p_beat <= '0;
    end else begin
      if (take) begin
        busy   <= 1'b1;
        aged   <= 1'b0;
        p_we   <= req[gnt_idx].we;
        p_mid  <= MIDW'(gnt_idx);
        p_slot <= req[gnt_idx].slot;
        p_beat <= req[gnt_idx].beat;
      end else begin
        if (busy) aged <= 1'b1;
        if (rsp_valid && rsp_ready) busy <= 1'b0;
      end
    end
  end

  always_comb begin
    rsp.mid      = p_mid;
    rsp.rsp.we   = p_we;
    rsp.rsp.slot = p_slot;
    rsp.rsp.beat = p_beat;
    rsp.rsp.data = p_we ? '0 : rdata;
  end

  // A held response must stay valid until it is taken.
  a_rsp_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               rsp_valid && !rsp_ready |=> rsp_valid);
  // At most one master served per memory cycle.
  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n)
                                $onehot0(req_ready));

endmodule
