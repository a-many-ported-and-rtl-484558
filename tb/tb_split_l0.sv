// tb_split_l0 -- checks the master port and level-0 split unit against M
// modelled clusters. The cluster models store written words, and answer
// every beat after a random delay, in random order. Checked: each beat goes
// to the cluster given by the placement and carries the right address and
// data; R beats carry the right id, chunk number, data and rlast; B comes only
// after every beat of the burst was acknowledged; an AR/AW whose id is
// outstanding is held back; at most 8 bursts per direction are outstanding;
// with prompt clusters a 16-beat read stream runs at one beat per cycle.
`timescale 1ns/1ps
module tb_split_l0;
  import smem_pkg::*;
  localparam int unsigned M = 4, N = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic arvalid, arready, rvalid, rready, rlast, rchunkv;
  logic [IDW-1:0] arid, rid, awid, bid;
  logic [AW-1:0] araddr, awaddr;
  logic [BEATW-1:0] arlen, awlen, rchunknum;
  logic [DW-1:0] rdata, wdata;
  logic [DW/128-1:0] rchunkstrb;
  logic awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [M-1:0] out_valid, out_ready, in_valid, in_ready;
  beat_req_t [M-1:0] out;
  beat_rsp_t [M-1:0] in;

  split_l0 #(.M(M), .N(N)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, s); end
  endtask

  // ------------------------------------------------------ cluster models
  logic [DW-1:0] mem [int];
  typedef struct { int c; beat_rsp_t r; longint t; } pend_t;
  pend_t pend [$];
  bit hold = 1'b0, rnd = 1'b0;
  int sel [M];

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < M; c++) begin
      if (out_valid[c] && out_ready[c]) begin
        pend_t pd;
        chk(cluster_of(out[c].wa, M, N) == c, "beat in its cluster");
        pd.c = c; pd.r.we = out[c].we; pd.r.slot = out[c].slot; pd.r.beat = out[c].beat;
        pd.r.data = '0;
        if (out[c].we) mem[int'(out[c].wa)] = out[c].data;
        else pd.r.data = mem.exists(int'(out[c].wa)) ? mem[int'(out[c].wa)] : '0;
        pd.t = cyc + (rnd ? longint'($urandom_range(2, 12)) : longint'(2));
        pend.push_back(pd);
      end
    end
    begin
      int del [$];
      del.delete();
      for (int c = 0; c < M; c++)
        if (in_valid[c] && in_ready[c]) begin
          if (in[c].we) ack_seen(c);
          del.push_back(sel[c]);
        end
      del.rsort();
      foreach (del[i]) pend.delete(del[i]);
    end
  end

  // per-slot write acks seen, indexed by the slot the beat carried
  int acks_by_slot [8];
  function automatic void ack_seen(int c);
    acks_by_slot[int'(in[c].slot)]++;
  endfunction

  always @(negedge clk) begin
    for (int c = 0; c < M; c++) begin
      int cand [$];
      cand.delete();
      sel[c] = -1;
      for (int i = 0; i < pend.size(); i++)
        if (pend[i].c == c && pend[i].t <= cyc) cand.push_back(i);
      if (!hold && cand.size() > 0) sel[c] = cand[rnd ? $urandom_range(0, cand.size() - 1) : 0];
      in_valid[c] <= sel[c] >= 0;
      in[c] <= sel[c] >= 0 ? pend[sel[c]].r : '0;
      out_ready[c] <= rnd ? ($urandom_range(0, 3) != 0) : 1'b1;
    end
    rready <= rnd ? ($urandom_range(0, 3) != 0) : 1'b1;
    bready <= rnd ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  // ------------------------------------------------------ AXI side checks
  typedef struct { bit busy; int base; int len; bit [15:0] got; int n; } rd_t;
  rd_t rd_out [16];
  int  wr_len [16][$];     // lens of outstanding writes per id
  int  wr_slot [16][$];
  int  n_r = 0, n_b = 0, n_ooo = 0;

  always @(posedge clk) if (rst_n) begin
    if (rvalid && rready) begin
      automatic int id = int'(rid), bt = int'(rchunknum);
      chk(rd_out[id].busy, "R for an idle id");
      if (rd_out[id].busy) begin
        automatic int wa = rd_out[id].base + bt;
        chk(bt <= rd_out[id].len && !rd_out[id].got[bt], "chunk number");
        chk(mem.exists(wa) && rdata == mem[wa], $sformatf("rdata wa %0d", wa));
        chk(rchunkv && rchunkstrb == '1, "chunk strobe");
        if (bt != rd_out[id].n) n_ooo++;
        rd_out[id].got[bt] = 1'b1;
        rd_out[id].n++;
        chk(rlast == (rd_out[id].n == rd_out[id].len + 1), "rlast");
        if (rlast) rd_out[id].busy = 1'b0;
      end
      n_r++;
    end
    if (bvalid && bready) begin
      automatic int id = int'(bid);
      chk(wr_len[id].size() > 0, "B for an idle id");
      if (wr_len[id].size() > 0) begin
        automatic int l = wr_len[id].pop_front();
        automatic int s = int'(dut.b_slot);
        chk(acks_by_slot[s] == l + 1, "B only after all beats acknowledged");
        acks_by_slot[s] = 0;
      end
      n_b++;
    end
  end

  task automatic ar_issue(int id, int wa, int len);
    @(negedge clk);
    arvalid = 1'b1; arid = IDW'(id); araddr = AW'(wa * 32); arlen = BEATW'(len);
    #1;
    while (!arready) begin @(negedge clk); #1; end
    @(posedge clk);
    chk(!rd_out[id].busy, "AR accepted while the id is outstanding");
    rd_out[id].busy = 1'b1; rd_out[id].base = wa; rd_out[id].len = len;
    rd_out[id].got = '0; rd_out[id].n = 0;
    #1 arvalid = 1'b0;
  endtask

  function automatic logic [DW-1:0] pat(int wa, int v);
    return {8{32'(wa * 7 + v * 1000003)}};
  endfunction

  task automatic aw_issue(int id, int wa, int len, int v);
    @(negedge clk);
    awvalid = 1'b1; awid = IDW'(id); awaddr = AW'(wa * 32); awlen = BEATW'(len);
    #1;
    while (!awready) begin @(negedge clk); #1; end
    @(posedge clk);
    chk(wr_len[id].size() == 0, "AW accepted while the id is outstanding");
    wr_len[id].push_back(len);
    #1 awvalid = 1'b0;
    for (int b = 0; b <= len; b++) begin
      @(negedge clk);
      wvalid = 1'b1; wdata = pat(wa + b, v); wlast = (b == len);
      #1;
      while (!wready) begin @(negedge clk); #1; end
      @(posedge clk);
      #1 wvalid = 1'b0;
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog: n_r %0d n_b %0d pend %0d", n_r, n_b, pend.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_ar_acc, nexp;
  int wlens [40];
  initial begin
    longint t0;
    arvalid = 0; awvalid = 0; wvalid = 0; arid = 0; awid = 0; araddr = 0; awaddr = 0;
    arlen = 0; awlen = 0; wdata = 0; wlast = 0; rready = 1; bready = 1;
    in_valid = '0; in = '0; out_ready = '1;
    for (int i = 0; i < 16; i++) rd_out[i].busy = 0;
    for (int i = 0; i < 8; i++) acks_by_slot[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // writes of 16 bursts with random lengths and ids, random delays
    rnd = 1'b1;
    for (int i = 0; i < 40; i++) begin
      wlens[i] = (i < 40) ? $urandom_range(0, 15) : 15;
      aw_issue($urandom_range(0, 5), i * 16, wlens[i], 1);
    end
    for (int i = 40; i < 80; i++) aw_issue(i % 16, i * 16, 15, 2);
    while (n_b < 80) @(posedge clk);
    // reads of the same data, ids reused to force id stalls
    nexp = 0;
    for (int i = 0; i < 40; i++) begin
      ar_issue($urandom_range(0, 5), i * 16, wlens[i]);
      nexp += wlens[i] + 1;
    end
    while (n_r < nexp) @(posedge clk);
    repeat (20) @(posedge clk);
    chk(n_ooo > 0, "chunks returned out of order");
    // outstanding limit: clusters hold every response
    rnd = 1'b0;
    hold = 1'b1;
    n_ar_acc = 0;
    fork
      for (int i = 0; i < 10; i++) begin ar_issue(i, i * 16, 0); n_ar_acc++; end
    join_none
    repeat (100) @(posedge clk);
    chk(n_ar_acc == 8, $sformatf("8 reads outstanding, got %0d", n_ar_acc));
    hold = 1'b0;
    wait (n_ar_acc == 10);
    repeat (60) @(posedge clk);
    // bulk read at full rate: 32 bursts of 16 beats
    t0 = cyc;
    n_r = 0;
    fork
      for (int i = 0; i < 32; i++) ar_issue(i % 16, 640 + (i * 16) % 640, 15);
    join
    while (n_r < 512) @(posedge clk);
    $display("512 beats in %0d cycles", cyc - t0);
    chk(cyc - t0 <= 530, "one R beat per cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
