// tb_smem_top -- end-to-end test of the shared memory through its AXI5 ports.
//
// Masters are modelled by tasks that drive AR, AW and W on the falling clock
// edge; monitors on the rising edge check every R and B beat against a word
// model of the memory kept in the testbench (the expected data of a read is
// the data the testbench itself wrote there). Phases:
//   A  every master writes random bursts into the lower half of its own area
//   B  every master reads A's data back while writing the upper half of its
//      area, with random rready / bready back-pressure
//   C  the data written in B is read back
//   D  master 0 alone: 32 back-to-back 16-beat writes, then reads; the port
//      must stay at least 90 % busy (the architecture aims at close to 100 %)
//   E  one single-beat read: first-beat latency is checked against this
//      design's uncontended latency (7 or 8 cycles)
//   F  two masters hammer the same word, forcing sub-bank arbitration
// Mechanisms counted (each must occur): sub-bank conflicts, out-of-order
// chunks, interleaved read bursts, AR stalls (id in use or slots full),
// W back-pressure, return-path stalls, R back-pressure.
`timescale 1ns/1ps
module tb_smem_top;
  import smem_pkg::*;

  localparam int unsigned X = 4, M = 4, N = 4, K = 4, Y = 2, ROWS = 64;
  localparam int unsigned WORDS = M * N * K * Y * ROWS;   // 8192
  localparam int unsigned AREA  = WORDS / X;               // words per master

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [X-1:0]             arvalid, arready, rvalid, rready, rlast, rchunkv;
  logic [X-1:0][IDW-1:0]    arid, rid, awid, bid;
  logic [X-1:0][AW-1:0]     araddr, awaddr;
  logic [X-1:0][BEATW-1:0]  arlen, awlen, rchunknum;
  logic [X-1:0][DW-1:0]     rdata, wdata;
  logic [X-1:0][DW/128-1:0] rchunkstrb;
  logic [X-1:0]             awvalid, awready, wvalid, wready, wlast, bvalid, bready;

  smem_top #(.X(X), .M(M), .N(N), .K(K), .Y(Y), .ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ---------------------------------------------------------------- model
  logic [DW-1:0] model [int];
  function automatic logic [DW-1:0] pattern(int wa, int ver);
    logic [DW-1:0] d;
    for (int i = 0; i < DW / 32; i++) d[i*32 +: 32] = 32'(wa * 977 + ver * 131 + i * 7919) ^ 32'h5a5a_0000;
    return d;
  endfunction

  // Outstanding bursts as seen by the testbench, per master and id.
  typedef struct { bit busy; int base; int len; bit [15:0] got; int n; } rd_t;
  rd_t rd_out [X][16];
  int  wr_out [X][16];
  int  rd_done [X], wr_done [X];
  bit  rdata_chk_off [X];

  // mechanism counters
  int n_conflict = 0, n_ooo = 0, n_interleave = 0, n_ar_stall = 0;
  int n_w_bp = 0, n_ret_stall = 0, n_r_bp = 0;
  int cur_rid [X];
  bit in_burst [X];
  bit rnd_ready = 1'b0;

  // ------------------------------------------------------------ monitors
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < X; p++) begin
      if (arvalid[p] && !arready[p]) n_ar_stall++;
      if (wvalid[p] && !wready[p]) n_w_bp++;
      if (rvalid[p] && !rready[p]) n_r_bp++;
      if (rvalid[p] && rready[p]) begin
        automatic int id = int'(rid[p]);
        automatic int bt = int'(rchunknum[p]);
        check(rd_out[p][id].busy, $sformatf("R for idle id m%0d id%0d", p, id));
        if (rd_out[p][id].busy) begin
          automatic int wa = rd_out[p][id].base + bt;
          check(bt <= rd_out[p][id].len && !rd_out[p][id].got[bt],
                $sformatf("bad chunk m%0d id%0d beat %0d", p, id, bt));
          if (!rdata_chk_off[p])
            check(model.exists(wa) && rdata[p] == model[wa],
                  $sformatf("rdata m%0d wa %0d", p, wa));
          check(rchunkv[p] && rchunkstrb[p] == '1, "chunk strobes");
          if (bt != rd_out[p][id].n) n_ooo++;
          if (in_burst[p] && cur_rid[p] != id) n_interleave++;
          rd_out[p][id].got[bt] = 1'b1;
          rd_out[p][id].n++;
          check(rlast[p] == (rd_out[p][id].n == rd_out[p][id].len + 1),
                $sformatf("rlast m%0d id%0d", p, id));
          if (rlast[p]) begin
            rd_out[p][id].busy = 1'b0;
            rd_done[p]++;
            in_burst[p] = 1'b0;
          end else begin
            in_burst[p] = 1'b1;
            cur_rid[p] = id;
          end
        end
      end
      if (bvalid[p] && bready[p]) begin
        check(wr_out[p][int'(bid[p])] > 0, $sformatf("B for idle id m%0d", p));
        wr_out[p][int'(bid[p])]--;
        wr_done[p]++;
      end
    end
    if (|(dut.p_in_valid & ~dut.p_in_ready)) n_ret_stall++;
    if ($countones(dut.g_cluster[0].u_cluster.g_arr[0].u_arr.g_lb[0].u_lb.g_sb[0].u_sb.req_valid) > 1)
      n_conflict++;
  end

  always @(negedge clk) begin
    for (int p = 0; p < X; p++) begin
      rready[p] <= rnd_ready ? ($urandom_range(0, 3) != 0) : 1'b1;
      bready[p] <= rnd_ready ? ($urandom_range(0, 3) != 0) : 1'b1;
    end
  end

  // ------------------------------------------------------------- drivers
  task automatic ar_issue(int p, int id, int wa, int len);
    @(negedge clk);
    arvalid[p] = 1'b1; arid[p] = IDW'(id); araddr[p] = AW'(wa * 32); arlen[p] = BEATW'(len);
    #1;
    while (!arready[p]) begin @(negedge clk); #1; end
    @(posedge clk);
    check(!rd_out[p][id].busy, "AR accepted while same id outstanding");
    rd_out[p][id].busy = 1'b1; rd_out[p][id].base = wa; rd_out[p][id].len = len;
    rd_out[p][id].got = '0; rd_out[p][id].n = 0;
    #1 arvalid[p] = 1'b0;
  endtask

  task automatic aw_issue(int p, int id, int wa, int len, int ver);
    @(negedge clk);
    awvalid[p] = 1'b1; awid[p] = IDW'(id); awaddr[p] = AW'(wa * 32); awlen[p] = BEATW'(len);
    #1;
    while (!awready[p]) begin @(negedge clk); #1; end
    @(posedge clk);
    wr_out[p][id]++;
    for (int b = 0; b <= len; b++) model[wa + b] = pattern(wa + b, ver);
    #1 awvalid[p] = 1'b0;
    for (int b = 0; b <= len; b++) begin
      @(negedge clk);
      wvalid[p] = 1'b1; wdata[p] = pattern(wa + b, ver); wlast[p] = (b == len);
      #1;
      while (!wready[p]) begin @(negedge clk); #1; end
      @(posedge clk);
      #1 wvalid[p] = 1'b0;
    end
  endtask

  function automatic int rnd_wa(int p, int half, int len);
    return p * AREA + half * (AREA / 2) + $urandom_range(0, AREA / 2 - 1 - len);
  endfunction

  task automatic wait_idle(int p, int nrd, int nwr);
    while (rd_done[p] < nrd || wr_done[p] < nwr) @(posedge clk);
  endtask

  // lists of what was written, to read it back
  int a_wa [X][$], a_len [X][$], b_wa [X][$], b_len [X][$];
  localparam int NB = 24;

  task automatic master_run(int p);
    int wa, len, nrd, nwr;
    // A: writes to the lower half
    for (int i = 0; i < NB; i++) begin
      len = $urandom_range(0, 15);
      wa  = rnd_wa(p, 0, len);
      a_wa[p].push_back(wa); a_len[p].push_back(len);
      aw_issue(p, $urandom_range(0, 3), wa, len, 1);
    end
    wait_idle(p, 0, NB);
    // B: read A's data while writing the upper half
    fork
      for (int i = 0; i < NB; i++) ar_issue(p, $urandom_range(0, 3), a_wa[p][i], a_len[p][i]);
      for (int i = 0; i < NB; i++) begin
        int l2, w2;
        l2 = $urandom_range(0, 15);
        w2 = rnd_wa(p, 1, l2);
        b_wa[p].push_back(w2); b_len[p].push_back(l2);
        aw_issue(p, $urandom_range(0, 3), w2, l2, 2 + i);
      end
    join
    wait_idle(p, NB, 2 * NB);
    // C: read B's data back (later bursts may overwrite earlier ones; the
    // model holds the latest)
    for (int i = 0; i < NB; i++) ar_issue(p, $urandom_range(0, 7), b_wa[p][i], b_len[p][i]);
    wait_idle(p, 2 * NB, 2 * NB);
  endtask

  // one process per master for phases A-C
  bit start_abc = 1'b0;
  int n_finished = 0;
  for (genvar g = 0; g < X; g++) begin : g_master
    initial begin
      wait (start_abc);
      master_run(g);
      n_finished++;
    end
  end

  // ----------------------------------------------------------- watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // --------------------------------------------------------------- main
  initial begin
    longint t0, t1;
    int nrd0, nwr0;
    arvalid = '0; awvalid = '0; wvalid = '0; arid = '0; awid = '0; araddr = '0;
    awaddr = '0; arlen = '0; awlen = '0; wdata = '0; wlast = '0;
    rready = '1; bready = '1;
    for (int p = 0; p < X; p++) begin
      rd_done[p] = 0; wr_done[p] = 0; rdata_chk_off[p] = 0; in_burst[p] = 0; cur_rid[p] = 0;
      for (int i = 0; i < 16; i++) begin rd_out[p][i].busy = 0; wr_out[p][i] = 0; end
    end
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    // A, B, C on all masters in parallel
    rnd_ready = 1'b1;
    start_abc = 1'b1;
    wait (n_finished == X);
    rnd_ready = 1'b0;
    repeat (10) @(posedge clk);

    // D: bulk transfer on master 0 alone, 32 x 16 beats = 16 KB
    nwr0 = wr_done[0];
    t0 = cyc;
    fork
      for (int i = 0; i < 32; i++) begin
        @(negedge clk);
        awvalid[0] = 1'b1; awid[0] = IDW'(i % 16); awaddr[0] = AW'((i * 16) * 32); awlen[0] = 4'd15;
        #1;
        while (!awready[0]) begin @(negedge clk); #1; end
        @(posedge clk);
        wr_out[0][i % 16]++;
        #1 awvalid[0] = 1'b0;
      end
      for (int b = 0; b < 512; b++) begin
        @(negedge clk);
        model[b] = pattern(b, 100);
        wvalid[0] = 1'b1; wdata[0] = pattern(b, 100); wlast[0] = (b % 16 == 15);
        #1;
        while (!wready[0]) begin @(negedge clk); #1; end
      end
    join
    @(posedge clk); t1 = cyc;
    #1 wvalid[0] = 1'b0;
    $display("bulk write: 512 beats accepted in %0d cycles", t1 - t0);
    check(t1 - t0 <= 512 * 100 / 90, "bulk write port utilisation >= 90%");
    wait_idle(0, 0, nwr0 + 32);

    nrd0 = rd_done[0];
    t0 = cyc;
    for (int i = 0; i < 32; i++) ar_issue(0, i % 16, i * 16, 15);
    wait_idle(0, nrd0 + 32, 0);
    t1 = cyc;
    $display("bulk read: 512 beats in %0d cycles", t1 - t0);
    check(t1 - t0 <= 512 * 100 / 90 + 12, "bulk read port utilisation >= 90%");

    // E: single-beat read latency, AR handshake to R handshake
    repeat (10) @(posedge clk);
    nrd0 = rd_done[0];
    ar_issue(0, 5, 100, 0);
    t0 = cyc;
    while (rd_done[0] == nrd0) @(posedge clk);
    t1 = cyc;
    $display("single read latency %0d cycles", t1 - t0);
    check(t1 - t0 >= 7 && t1 - t0 <= 8, "uncontended read latency 7-8 cycles");

    // F: masters 0 and 1 read word 0 repeatedly (same sub-bank)
    fork
      for (int i = 0; i < 16; i++) ar_issue(0, i % 8, 0, 0);
      for (int i = 0; i < 16; i++) ar_issue(1, i % 8, 0, 0);
    join
    repeat (100) @(posedge clk);

    $display("mechanisms: conflict=%0d ooo=%0d interleave=%0d ar_stall=%0d w_bp=%0d ret_stall=%0d r_bp=%0d",
             n_conflict, n_ooo, n_interleave, n_ar_stall, n_w_bp, n_ret_stall, n_r_bp);
    check(n_conflict > 0, "sub-bank arbitration conflict seen");
    check(n_ooo > 0, "out-of-order chunk seen");
    check(n_interleave > 0, "interleaved read bursts seen");
    check(n_ar_stall > 0, "AR stall seen");
    check(n_w_bp > 0, "W back-pressure seen");
    check(n_ret_stall > 0, "return-path stall seen");
    check(n_r_bp > 0, "R back-pressure seen");
    for (int p = 0; p < X; p++)
      for (int i = 0; i < 16; i++) check(!rd_out[p][i].busy && wr_out[p][i] == 0, "all bursts completed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
