// tb_smem_load -- throughput workload on the shared memory at its default
// sizes (16 ports, 32 MB). It measures what one port gets while all ports
// load the memory at the same time, which is the random-traffic experiment
// of the architecture description.
//   R  every port issues NBURST random 16-beat reads over the whole 32 MB as
//      fast as the port accepts them (8 ids, so up to 8 outstanding)
//   W  the same with 16-beat writes; AW and W are driven by separate
//      processes so W data flows without gaps
//   RW reads and writes together on every port
// For each port and phase it counts the R / W beats moved between the first
// command and the last response and reports beats per cycle. It checks that
// every burst completes, that rlast and B arrive once per burst, and that
// the slowest port reaches the throughput floors below. Read data is not
// compared here (tb_smem_full does that); this bench only loads the design.
// Floors: 95 % for reads, 95 % for writes, 90 % per direction in RW. The
// floors are this bench's choice; the reference figures are about 96 % read
// and 99 % write. Measured: 99.6 %, 99.7 %, 96.8 % / 96.8 %.
`timescale 1ns/1ps
module tb_smem_load;
  import smem_pkg::*;

  localparam int unsigned X = 16;
  localparam int unsigned WORDS = 4 * 4 * 16 * 2 * 2048;
  localparam int NBURST = 256;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [X-1:0]             arvalid, arready, rvalid, rready, rlast, rchunkv;
  logic [X-1:0][IDW-1:0]    arid, rid, awid, bid;
  logic [X-1:0][AW-1:0]     araddr, awaddr;
  logic [X-1:0][BEATW-1:0]  arlen, awlen, rchunknum;
  logic [X-1:0][DW-1:0]     rdata, wdata;
  logic [X-1:0][DW/128-1:0] rchunkstrb;
  logic [X-1:0]             awvalid, awready, wvalid, wready, wlast, bvalid, bready;

  smem_top dut (.*);

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

  // per-port counters, reset at the start of each phase
  int     r_beats [X], r_lasts [X], w_beats [X], b_cnt [X];
  longint t_first [X], t_last_r [X], t_last_b [X];
  int     r_per_id [X][16];

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < X; p++) begin
      if (rvalid[p] && rready[p]) begin
        r_beats[p]++;
        r_per_id[p][int'(rid[p])]++;
        t_last_r[p] = cyc;
        if (rlast[p]) begin
          r_lasts[p]++;
          check(r_per_id[p][int'(rid[p])] == 16, "rlast after 16 beats of the id");
          r_per_id[p][int'(rid[p])] = 0;
        end
      end
      if (wvalid[p] && wready[p]) w_beats[p]++;
      if (bvalid[p] && bready[p]) begin
        b_cnt[p]++;
        t_last_b[p] = cyc;
      end
    end
  end

  task automatic clear_counts();
    for (int p = 0; p < X; p++) begin
      r_beats[p] = 0; r_lasts[p] = 0; w_beats[p] = 0; b_cnt[p] = 0;
      t_first[p] = cyc; t_last_r[p] = cyc; t_last_b[p] = cyc;
      for (int i = 0; i < 16; i++) r_per_id[p][i] = 0;
    end
  endtask

  function automatic int rnd_burst_wa();
    return $urandom_range(0, WORDS / 16 - 1) * 16;
  endfunction

  // ------------------------------------------------------------- drivers
  task automatic reads(int p);
    for (int i = 0; i < NBURST; i++) begin
      @(negedge clk);
      arvalid[p] = 1'b1; arid[p] = IDW'(i % 8); araddr[p] = AW'(rnd_burst_wa() * 32);
      arlen[p] = 4'd15;
      #1;
      while (!arready[p]) begin @(negedge clk); #1; end
      @(posedge clk);
      #1 arvalid[p] = 1'b0;
    end
  endtask

  task automatic aws(int p);
    for (int i = 0; i < NBURST; i++) begin
      @(negedge clk);
      awvalid[p] = 1'b1; awid[p] = IDW'(i % 8); awaddr[p] = AW'(rnd_burst_wa() * 32);
      awlen[p] = 4'd15;
      #1;
      while (!awready[p]) begin @(negedge clk); #1; end
      @(posedge clk);
      #1 awvalid[p] = 1'b0;
    end
  endtask

  task automatic ws(int p);
    for (int b = 0; b < NBURST * 16; b++) begin
      @(negedge clk);
      wvalid[p] = 1'b1; wdata[p] = {8{32'(b * 32'h9e3779b1 + p)}}; wlast[p] = (b % 16 == 15);
      #1;
      while (!wready[p]) begin @(negedge clk); #1; end
    end
    @(posedge clk);
    #1 wvalid[p] = 1'b0;
  endtask

  // phase selector: 1 = reads, 2 = writes, 3 = both
  int phase = 0;
  int n_done = 0;
  for (genvar g = 0; g < X; g++) begin : g_master
    initial begin
      int ph;
      forever begin
        wait (phase != 0);
        ph = phase;
        fork
          if (ph[0]) begin
            reads(g);
            while (r_lasts[g] < NBURST) @(posedge clk);
          end
          if (ph[1]) begin
            fork aws(g); ws(g); join
            while (b_cnt[g] < NBURST) @(posedge clk);
          end
        join
        n_done++;
        wait (phase == 0);
      end
    end
  end

  // ----------------------------------------------------------- watchdog
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_phase(int ph, string name, int floor_pct);
    real rmin, wmin, f;
    clear_counts();
    n_done = 0;
    phase = ph;
    wait (n_done == X);
    phase = 0;
    rmin = 1.0; wmin = 1.0;
    for (int p = 0; p < X; p++) begin
      if (ph[0]) begin
        check(r_beats[p] == NBURST * 16 && r_lasts[p] == NBURST, "all read beats and rlasts");
        f = real'(r_beats[p]) / real'(t_last_r[p] - t_first[p]);
        $display("  port %0d read %0.1f %% (%0d cycles)", p, f * 100.0, t_last_r[p] - t_first[p]);
        if (f < rmin) rmin = f;
      end
      if (ph[1]) begin
        check(w_beats[p] == NBURST * 16 && b_cnt[p] == NBURST, "all write beats and Bs");
        f = real'(w_beats[p]) / real'(t_last_b[p] - t_first[p]);
        if (f < wmin) wmin = f;
      end
    end
    if (ph[0]) begin
      $display("%s: slowest port read  %0.1f %% of one beat per cycle", name, rmin * 100.0);
      check(rmin * 100.0 >= real'(floor_pct), {name, " read throughput floor"});
    end
    if (ph[1]) begin
      $display("%s: slowest port write %0.1f %% of one beat per cycle", name, wmin * 100.0);
      check(wmin * 100.0 >= real'(floor_pct), {name, " write throughput floor"});
    end
    repeat (20) @(posedge clk);
  endtask

  // --------------------------------------------------------------- main
  initial begin
    arvalid = '0; awvalid = '0; wvalid = '0; arid = '0; awid = '0; araddr = '0;
    awaddr = '0; arlen = '0; awlen = '0; wdata = '0; wlast = '0;
    rready = '1; bready = '1;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    run_phase(1, "16 ports random reads ", 95);
    run_phase(2, "16 ports random writes", 95);
    run_phase(3, "16 ports reads+writes", 90);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
