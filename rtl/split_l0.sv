// split_l0 -- master port and level-0 split and dispatching unit of one
// master.
//
// Master side: a subset of AXI5 with 256-bit data and read data chunking.
// AR/AW carry id, byte address (32-byte aligned) and len (beats - 1, up to 15,
// INCR bursts). W beats follow their AW in order. R beats may come back in any
// order within a burst and interleaved between bursts: each carries rid, the
// chunk number rchunknum (= beat index in the burst), rchunkstrb (all ones,
// every beat is a whole 256-bit chunk) and rlast on the last beat returned for
// that burst. B is returned once every beat of the burst is written.
//
// Inside: up to OUTST read and OUTST write bursts are outstanding (a command
// slot each). An AR or AW is refused (ready low) while no slot is free or an
// outstanding burst of the same direction has the same id, so that responses
// of one id can never overtake each other. The read splitter cuts the oldest
// read burst into beats, one per cycle; the write splitter pairs each W beat
// with its address. Each beat goes, by smem_pkg::cluster_of, to the read or
// write beat queue of its cluster (BEAT_BUF beats over all 2*M queues). Per
// cluster a round-robin choice between the read and the write queue sends one
// beat per cycle towards that cluster (out_valid[c] / out[c] / out_ready[c]),
// so consecutive beats of a burst are spread over the M clusters.
//
// Back from the clusters (in_valid[c] / in[c] / in_ready[c]), write
// acknowledgements are always accepted and counted per slot; read beats are
// taken one per cycle (round robin over the clusters) into the R output FIFO.
//
// The 8 outstanding commands, the 64-beat buffer, the AXI5 port with read
// data chunking and the splitting rule follow the architecture; the channel
// subset, the id rule, the queue arrangement and the arbitration are this
// design's choices.
module split_l0
  import smem_pkg::*;
#(
  parameter int unsigned M        = 4,
  parameter int unsigned N        = 4,
  parameter int unsigned OUTST    = 8,
  parameter int unsigned BEAT_BUF = 64,
  localparam int unsigned QD      = BEAT_BUF / (2 * M),
  localparam int unsigned MW      = (M > 1) ? $clog2(M) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI5 subset, master side
  input  logic              arvalid,
  output logic              arready,
  input  logic [IDW-1:0]    arid,
  input  logic [AW-1:0]     araddr,
  input  logic [BEATW-1:0]  arlen,
  output logic              rvalid,
  input  logic              rready,
  output logic [IDW-1:0]    rid,
  output logic [DW-1:0]     rdata,
  output logic              rlast,
  output logic              rchunkv,
  output logic [BEATW-1:0]  rchunknum,
  output logic [DW/128-1:0] rchunkstrb,
  input  logic              awvalid,
  output logic              awready,
  input  logic [IDW-1:0]    awid,
  input  logic [AW-1:0]     awaddr,
  input  logic [BEATW-1:0]  awlen,
  input  logic              wvalid,
  output logic              wready,
  input  logic [DW-1:0]     wdata,
  input  logic              wlast,
  output logic              bvalid,
  input  logic              bready,
  output logic [IDW-1:0]    bid,
  // beat streams to / from the M clusters
  output logic [M-1:0]      out_valid,
  output beat_req_t [M-1:0] out,
  input  logic [M-1:0]      out_ready,
  input  logic [M-1:0]      in_valid,
  input  beat_rsp_t [M-1:0] in,
  output logic [M-1:0]      in_ready
);

  typedef struct packed {
    logic             valid;
    logic [IDW-1:0]   id;
    waddr_t           base;
    logic [BEATW-1:0] len;
    logic [BEATW:0]   cnt;     // beats returned (read) / acknowledged (write)
  } slot_t;

  slot_t [OUTST-1:0] rs, ws;

  // ------------------------------------------------------------ slot choice
  logic [SLOTW-1:0] r_free, w_free;
  logic             r_has_free, w_has_free, r_id_busy, w_id_busy;

  always_comb begin
    r_has_free = 1'b0; r_free = '0; r_id_busy = 1'b0;
    w_has_free = 1'b0; w_free = '0; w_id_busy = 1'b0;
    for (int unsigned s = 0; s < OUTST; s++) begin
      if (!rs[s].valid && !r_has_free) begin r_has_free = 1'b1; r_free = SLOTW'(s); end
      if (!ws[s].valid && !w_has_free) begin w_has_free = 1'b1; w_free = SLOTW'(s); end
      if (rs[s].valid && rs[s].id == arid) r_id_busy = 1'b1;
      if (ws[s].valid && ws[s].id == awid) w_id_busy = 1'b1;
    end
  end

  // Issue-order queues of slot numbers (depth OUTST, so never full when a
  // slot is free).
  logic             ro_in_ready, ro_valid, ro_pop;
  logic [SLOTW-1:0] ro_slot;
  logic             wo_in_ready, wo_valid, wo_pop;
  logic [SLOTW-1:0] wo_slot;

  assign arready = r_has_free && !r_id_busy && ro_in_ready;
  assign awready = w_has_free && !w_id_busy && wo_in_ready;

  stream_fifo #(.T(logic [SLOTW-1:0]), .DEPTH(OUTST)) u_rorder (
    .clk, .rst_n, .in_valid(arvalid && arready), .in(r_free), .in_ready(ro_in_ready),
    .out_valid(ro_valid), .out(ro_slot), .out_ready(ro_pop)
  );
  stream_fifo #(.T(logic [SLOTW-1:0]), .DEPTH(OUTST)) u_worder (
    .clk, .rst_n, .in_valid(awvalid && awready), .in(w_free), .in_ready(wo_in_ready),
    .out_valid(wo_valid), .out(wo_slot), .out_ready(wo_pop)
  );

  // ------------------------------------------------------ splitters
  logic [BEATW-1:0] rb, wb;                 // beat counters of the head bursts
  waddr_t           r_wa, w_wa;
  logic [MW-1:0]    r_cl, w_cl;
  logic [M-1:0]     rq_in_ready, wq_in_ready, rq_push, wq_push;
  beat_req_t        r_beat, w_beat;
  logic             r_go, w_go;

  always_comb begin
    r_wa = rs[ro_slot].base + waddr_t'(rb);
    w_wa = ws[wo_slot].base + waddr_t'(wb);
    r_cl = MW'(cluster_of(r_wa, M, N));
    w_cl = MW'(cluster_of(w_wa, M, N));
    r_beat = '{we: 1'b0, wa: r_wa, slot: ro_slot, beat: rb, data: '0};
    w_beat = '{we: 1'b1, wa: w_wa, slot: wo_slot, beat: wb, data: wdata};
  end

  assign r_go   = ro_valid && rq_in_ready[r_cl];
  assign ro_pop = r_go && (rb == rs[ro_slot].len);
  assign wready = wo_valid && wq_in_ready[w_cl];
  assign w_go   = wvalid && wready;
  assign wo_pop = w_go && (wb == ws[wo_slot].len);

  always_comb begin
    rq_push = '0;
    wq_push = '0;
    rq_push[r_cl] = r_go;
    wq_push[w_cl] = w_go;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rb <= '0;
      wb <= '0;
    end else begin
      if (r_go) rb <= ro_pop ? '0 : rb + 1'b1;
      if (w_go) wb <= wo_pop ? '0 : wb + 1'b1;
    end
  end

  // ------------------------------------------- per-cluster beat queues
  logic      [M-1:0] rq_valid, wq_valid, rq_pop, wq_pop;
  beat_req_t [M-1:0] rq_head, wq_head;

  for (genvar c = 0; c < M; c++) begin : g_cl
    logic [1:0] sel_gnt;
    logic       sel_idx, sel_any;

    stream_fifo #(.T(beat_req_t), .DEPTH(QD)) u_rq (
      .clk, .rst_n, .in_valid(rq_push[c]), .in(r_beat), .in_ready(rq_in_ready[c]),
      .out_valid(rq_valid[c]), .out(rq_head[c]), .out_ready(rq_pop[c])
    );
    stream_fifo #(.T(beat_req_t), .DEPTH(QD)) u_wq (
      .clk, .rst_n, .in_valid(wq_push[c]), .in(w_beat), .in_ready(wq_in_ready[c]),
      .out_valid(wq_valid[c]), .out(wq_head[c]), .out_ready(wq_pop[c])
    );
    rr_arbiter #(.N(2)) u_sel (
      .clk, .rst_n, .req({wq_valid[c], rq_valid[c]}), .adv(out_ready[c]),
      .gnt(sel_gnt), .gnt_idx(sel_idx), .gnt_any(sel_any)
    );
    assign out_valid[c] = sel_any;
    assign out[c]       = sel_idx ? wq_head[c] : rq_head[c];
    assign rq_pop[c]    = out_ready[c] && sel_gnt[0];
    assign wq_pop[c]    = out_ready[c] && sel_gnt[1];
  end

  // ---------------------------------------------------------- returns
  logic [M-1:0]  rd_req, rd_gnt;
  logic [MW-1:0] rd_idx;
  logic          rd_any, rf_in_ready, rf_valid, r_hs;
  beat_rsp_t     rf_head;

  always_comb
    for (int unsigned c = 0; c < M; c++) rd_req[c] = in_valid[c] && !in[c].we;

  rr_arbiter #(.N(M)) u_rsel (
    .clk, .rst_n, .req(rd_req), .adv(rf_in_ready),
    .gnt(rd_gnt), .gnt_idx(rd_idx), .gnt_any(rd_any)
  );

  always_comb
    for (int unsigned c = 0; c < M; c++)
      in_ready[c] = in[c].we ? 1'b1 : (rd_gnt[c] && rf_in_ready);

  stream_fifo #(.T(beat_rsp_t), .DEPTH(2)) u_rfifo (
    .clk, .rst_n, .in_valid(rd_any), .in(in[rd_idx]), .in_ready(rf_in_ready),
    .out_valid(rf_valid), .out(rf_head), .out_ready(rready)
  );

  assign rvalid     = rf_valid;
  assign rid        = rs[rf_head.slot].id;
  assign rdata      = rf_head.data;
  assign rchunkv    = 1'b1;
  assign rchunknum  = rf_head.beat;
  assign rchunkstrb = '1;
  assign rlast      = (rs[rf_head.slot].cnt == {1'b0, rs[rf_head.slot].len});
  assign r_hs       = rvalid && rready;

  // Write response: lowest slot whose beats are all acknowledged.
  logic [SLOTW-1:0] b_slot;
  always_comb begin
    bvalid = 1'b0;
    b_slot = '0;
    for (int unsigned s = 0; s < OUTST; s++)
      if (!bvalid && ws[s].valid && ws[s].cnt == {1'b0, ws[s].len} + 1'b1) begin
        bvalid = 1'b1;
        b_slot = SLOTW'(s);
      end
  end
  assign bid = ws[b_slot].id;

  // ------------------------------------------------------ slot tables
  // Write acknowledgements arriving this cycle, per slot (up to M at once).
  logic [OUTST-1:0][BEATW:0] ack_inc;
  always_comb begin
    for (int unsigned s = 0; s < OUTST; s++) begin
      ack_inc[s] = '0;
      for (int unsigned c = 0; c < M; c++)
        if (in_valid[c] && in[c].we && int'(in[c].slot) == s) ack_inc[s] = ack_inc[s] + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= '0;
      ws <= '0;
    end else begin
      if (arvalid && arready)
        rs[r_free] <= '{valid: 1'b1, id: arid, base: waddr_t'(araddr >> 5), len: arlen, cnt: '0};
      if (r_hs) begin
        if (rlast) rs[rf_head.slot].valid <= 1'b0;
        else       rs[rf_head.slot].cnt   <= rs[rf_head.slot].cnt + 1'b1;
      end
      if (awvalid && awready)
        ws[w_free] <= '{valid: 1'b1, id: awid, base: waddr_t'(awaddr >> 5), len: awlen, cnt: '0};
      for (int unsigned s = 0; s < OUTST; s++)
        if (ack_inc[s] != 0) ws[s].cnt <= ws[s].cnt + ack_inc[s];
      if (bvalid && bready) ws[b_slot].valid <= 1'b0;
    end
  end

  // W beats must match the burst length given on AW.
  a_wlast: assert property (@(posedge clk) disable iff (!rst_n)
                            w_go |-> (wlast == (wb == ws[wo_slot].len)));
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             rvalid && !rready |=> rvalid);

endmodule
