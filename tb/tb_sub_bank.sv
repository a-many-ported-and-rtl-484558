// tb_sub_bank -- checks one sub-bank: arbitration among X masters, one access
// per memory cycle, round-robin fairness, response routing (master index,
// slot, beat), read data against a reference array, hold of a response under
// rsp_ready back-pressure, and the 2-cycle grant-to-response latency.
`timescale 1ns/1ps
module tb_sub_bank;
  import smem_pkg::*;
  localparam int unsigned X = 4, ROWS = 16;

  logic clk = 1'b0, rst_n = 1'b0, ce = 1'b0;
  always #5 clk = ~clk;
  always @(posedge clk) ce <= rst_n ? !ce : 1'b0;

  logic [X-1:0] req_valid = '0, req_ready;
  beat_req_t [X-1:0] req;
  logic [X-1:0][3:0] req_row;
  logic rsp_valid, rsp_ready = 1'b1;
  bank_rsp_t rsp;

  sub_bank #(.X(X), .ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, s); end
  endtask

  logic [DW-1:0] ref_mem [ROWS];
  typedef struct { bit we; int row; int tag; longint t; logic [DW-1:0] d; } exp_t;
  exp_t exp_q [X][$];
  int grants [X];
  bit rnd_rsp = 1'b0;
  int lat_checked = 0;

  function automatic logic [DW-1:0] pat(int row, int tag);
    return {8{32'(row * 65537 + tag * 31 + 7)}};
  endfunction

  // grant / response monitor
  always @(posedge clk) if (rst_n) begin
    chk($countones(req_ready) <= 1, "at most one grant");
    for (int p = 0; p < X; p++)
      if (req_valid[p] && req_ready[p]) begin
        exp_t e;
        chk(ce, "grant only on a memory-cycle edge");
        e.we = req[p].we; e.row = int'(req_row[p]); e.tag = int'({req[p].slot, req[p].beat});
        e.t = cyc;
        e.d = ref_mem[e.row];
        if (req[p].we) ref_mem[e.row] = req[p].data;
        exp_q[p].push_back(e);
        grants[p]++;
      end
    if (rsp_valid && rsp_ready) begin
      automatic int m = int'(rsp.mid);
      if (exp_q[m].size() == 0) chk(0, "unexpected response");
      else begin
        automatic exp_t e = exp_q[m].pop_front();
        chk(rsp.rsp.we == e.we && int'({rsp.rsp.slot, rsp.rsp.beat}) == e.tag,
            $sformatf("response fields m%0d", m));
        if (!e.we) chk(rsp.rsp.data == e.d, $sformatf("read data row %0d", e.row));
        if (!rnd_rsp) begin chk(cyc - e.t == 2, "grant-to-response 2 cycles"); lat_checked++; end
      end
    end
  end
  always @(negedge clk) rsp_ready <= rnd_rsp ? ($urandom_range(0, 2) != 0) : 1'b1;

  // each master: a list of accesses issued back to back
  task automatic access(int p, bit we, int row, int tag);
    @(negedge clk);
    req_valid[p] = 1'b1;
    req[p].we = we; req[p].wa = '0; req[p].slot = SLOTW'(tag >> 4); req[p].beat = BEATW'(tag);
    req[p].data = pat(row, tag); req_row[p] = 4'(row);
    #1;
    while (!req_ready[p]) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 req_valid[p] = 1'b0;
  endtask

  bit go = 0;
  int phase_done = 0;
  for (genvar g = 0; g < X; g++) begin : g_m
    initial begin
      wait (go);
      for (int i = 0; i < 4; i++) access(g, 1, g * 4 + i, i);           // own rows
      for (int i = 0; i < 40; i++) access(g, 0, $urandom_range(g * 4, g * 4 + 3), 16 + i);
      phase_done++;
    end
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    int g0 [X];
    req = '0; req_row = '0;
    for (int p = 0; p < X; p++) grants[p] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // phase 1: all masters, no back-pressure: one grant per memory cycle,
    // round robin, 2-cycle latency
    go = 1;
    t0 = cyc;
    wait (phase_done == X);
    repeat (6) @(posedge clk);
    $display("%0d accesses in %0d cycles", X * 44, cyc - t0);
    chk(cyc - t0 <= 2 * X * 44 + 12, "one access per memory cycle");
    for (int p = 0; p < X; p++) chk(grants[p] == 44, "every master served");
    chk(lat_checked == X * 44, "every response checked");
    // phase 2: random back-pressure on the response
    rnd_rsp = 1;
    fork
      for (int i = 0; i < 60; i++) access(0, 0, $urandom_range(0, 15), 100 + (i % 28));
      for (int i = 0; i < 60; i++) access(1, 1'($urandom_range(0, 1)), $urandom_range(4, 7), 100 + (i % 28));
      for (int i = 0; i < 60; i++) access(2, 0, $urandom_range(0, 15), 100 + (i % 28));
    join
    repeat (10) @(posedge clk);
    for (int p = 0; p < X; p++) chk(exp_q[p].size() == 0, "all responses returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
