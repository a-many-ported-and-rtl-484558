// tb_split_l1 -- checks the level-1 split unit against N modelled array
// groups: every beat must reach the array group given by the intra-cluster
// placement (for M = N = 4 the fixed table of smem_pkg, checked here against
// an independent copy), unchanged; responses coming back from the arrays after
// random delays must all reach the output, unchanged. With all arrays ready
// the unit must accept one beat per cycle.
`timescale 1ns/1ps
module tb_split_l1;
  import smem_pkg::*;
  localparam int unsigned M = 4, N = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1;
  beat_req_t in;
  beat_rsp_t out;
  logic [N-1:0] arr_valid, arr_ready, arr_rsp_valid, arr_rsp_ready;
  beat_req_t arr_req;
  beat_rsp_t [N-1:0] arr_rsp;

  split_l1 #(.M(M), .N(N)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, s); end
  endtask

  // Independent copy of the placement drawing: 16-beat burst beat b goes to
  // cluster CL[b % 4]; inside it, square GR[b] (reading order).
  int CL [4] = '{0, 1, 3, 2};
  int GR [16] = '{0, 3, 0, 2,  1, 2, 1, 1,  3, 1, 3, 3,  2, 0, 2, 0};

  typedef struct { beat_rsp_t r; longint t; } pend_t;
  pend_t aq [N][$];
  int inflight = 0, n_sent = 0, n_back = 0;
  bit rnd = 1'b0;
  logic [DW-1:0] seen [int];   // expected response data per tag

  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < N; g++) begin
      if (arr_valid[g] && arr_ready[g]) begin
        pend_t pd;
        automatic int b = int'(arr_req.wa) % 16;
        chk(g == GR[b], $sformatf("beat %0d sent to group %0d", b, g));
        chk($countones(arr_valid) == 1, "one array at a time");
        chk(arr_req.data == {8{32'(arr_req.wa)}}, "data unchanged");
        pd.r.we = arr_req.we; pd.r.slot = arr_req.slot; pd.r.beat = arr_req.beat;
        pd.r.data = ~arr_req.data;
        pd.t = cyc + longint'($urandom_range(1, rnd ? 8 : 1));
        aq[g].push_back(pd);
      end
      if (arr_rsp_valid[g] && arr_rsp_ready[g]) void'(aq[g].pop_front());
    end
    if (out_valid && out_ready) begin
      automatic int tag = int'({out.slot, out.beat});
      chk(seen.exists(tag), $sformatf("unknown response tag %0d", tag));
      if (seen.exists(tag)) begin
        chk(out.data == seen[tag], "response data unchanged");
        seen.delete(tag);
      end
      n_back++;
      inflight--;
    end
  end

  always @(negedge clk) begin
    for (int g = 0; g < N; g++) begin
      arr_ready[g] <= rnd ? ($urandom_range(0, 2) != 0) : 1'b1;
      arr_rsp_valid[g] <= aq[g].size() > 0 && aq[g][0].t <= cyc;
      arr_rsp[g] <= aq[g].size() > 0 ? aq[g][0].r : '0;
    end
    out_ready <= rnd ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  task automatic send(int wa, int tag);
    while (inflight > 100) @(posedge clk);
    @(negedge clk);
    in_valid = 1'b1;
    in.we = wa[0]; in.wa = waddr_t'(wa); in.slot = SLOTW'(tag >> 4); in.beat = BEATW'(tag);
    in.data = {8{32'(wa)}};
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    seen[tag] = ~{8{32'(wa)}};
    inflight++; n_sent++;
    #1 in_valid = 1'b0;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    in = '0; arr_ready = '0; arr_rsp_valid = '0; arr_rsp = '0;
    // the fixed table matches its drawing: cluster CL[b%4] holds beat b
    for (int b = 0; b < 16; b++)
      chk(cluster_of(waddr_t'(b), M, N) == CL[b % 4] && group_of(waddr_t'(b), M, N) == GR[b],
          $sformatf("placement of beat %0d", b));
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // streaming, everything ready: one beat per cycle
    t0 = cyc;
    for (int i = 0; i < 64; i++) send(i * 4 + 1, i);   // cluster-1 style addresses
    $display("64 beats accepted in %0d cycles", cyc - t0);
    chk(cyc - t0 <= 66, "one beat per cycle");
    while (inflight > 0) @(posedge clk);
    // random back-pressure and delays
    rnd = 1'b1;
    for (int i = 0; i < 300; i++) send($urandom_range(0, 4095), i % 128);
    while (inflight > 0 && cyc < 40000) @(posedge clk);
    chk(n_back == n_sent && n_sent == 364, "all responses returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
