// Shared body of the beat-level testbenches of cluster, sram_array and
// logic_bank: in_* beat streams per master, out_* response streams per master. Needs X, NR (number of usable words), the function map_wa (usable word
// number to word address), clk, rst_n and the port signals.

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, s); end
  endtask

  logic [DW-1:0] model [int];
  typedef struct { bit busy; bit we; logic [DW-1:0] d; int seq; } fl_t;
  fl_t flight [X][128];
  int  issued [X], retired [X], last_seq [X], next_seq [X];
  int  n_ooo = 0, n_bp = 0;
  bit  rnd_ready = 1'b0;

  function automatic logic [DW-1:0] pat(int wa, int v);
    return {8{32'(wa * 40503 + v * 977 + 3)}};
  endfunction

  // Random back-pressure, plus a 24-cycle stop per master every 64 cycles
  // (staggered) that fills any response FIFO and backs data up into the
  // merges, where responses of one master then overtake each other.
  always @(negedge clk)
    for (int p = 0; p < X; p++)
      out_ready[p] <= rnd_ready ? ($urandom_range(0, 2) != 0 && ((cyc + 16 * p) % 64) >= 24) : 1'b1;

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < X; p++) begin
      if (in_valid[p] && !in_ready[p]) n_bp++;
      if (out_valid[p] && out_ready[p]) begin
        automatic int tag = int'({out[p].slot, out[p].beat});
        chk(flight[p][tag].busy, $sformatf("response with idle tag m%0d t%0d", p, tag));
        chk(out[p].we == flight[p][tag].we, "response type");
        if (!flight[p][tag].we) chk(out[p].data == flight[p][tag].d, $sformatf("read data m%0d", p));
        if (flight[p][tag].seq < last_seq[p]) n_ooo++;
        last_seq[p] = flight[p][tag].seq;
        flight[p][tag].busy = 1'b0;
        retired[p]++;
      end
    end
  end

  task automatic send(int p, bit we, int wa, int v);
    int tag, seq;
    seq = next_seq[p]++;
    tag = seq % 128;
    while (flight[p][tag].busy) @(posedge clk);
    @(negedge clk);
    in_valid[p] = 1'b1;
    in[p].we = we; in[p].wa = waddr_t'(wa); in[p].slot = SLOTW'(tag >> 4);
    in[p].beat = BEATW'(tag); in[p].data = pat(wa, v);
    #1;
    while (!in_ready[p]) begin @(negedge clk); #1; end
    @(posedge clk);
    flight[p][tag].busy = 1'b1; flight[p][tag].we = we; flight[p][tag].seq = seq;
    flight[p][tag].d = model.exists(wa) ? model[wa] : '0;
    if (we) model[wa] = pat(wa, v);
    issued[p]++;
    #1 in_valid[p] = 1'b0;
  endtask

  // word j of master p's private set s (0 or 1)
  function automatic int own_wa(int p, int s, int j);
    return map_wa((p + X * (2 * j + s)) % NR);
  endfunction

  localparam int NW = NR / (2 * X);
  bit go1 = 0, go2 = 0;
  int done1 = 0, done2 = 0;
  for (genvar g = 0; g < X; g++) begin : g_m
    initial begin
      wait (go1);
      for (int j = 0; j < NW; j++) send(g, 1, own_wa(g, 0, j), 1);
      done1++;
      wait (go2);
      // one beat stream per master: reads and writes interleaved
      for (int i = 0; i < 3 * NW; i++)
        if (i % 3 == 2) send(g, 1, own_wa(g, 1, i / 3), 2);
        else send(g, 0, own_wa($urandom_range(0, X - 1), 0, $urandom_range(0, NW - 1)), 0);
      done2++;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    for (int p = 0; p < X; p++) $display("m%0d issued %0d retired %0d d1 %0d d2 %0d", p, issued[p], retired[p], done1, done2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in = '0;
    for (int p = 0; p < X; p++) begin
      issued[p] = 0; retired[p] = 0; last_seq[p] = 0; next_seq[p] = 0;
      for (int t = 0; t < 128; t++) flight[p][t].busy = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    go1 = 1;
    wait (done1 == X);
    for (int p = 0; p < X; p++) while (retired[p] < issued[p]) @(posedge clk);
    rnd_ready = 1;
    go2 = 1;
    wait (done2 == X);
    for (int p = 0; p < X; p++) while (retired[p] < issued[p]) @(posedge clk);
    repeat (5) @(posedge clk);
    $display("issued %0d beats, out-of-order %0d, input stalls %0d", issued[0] * X, n_ooo, n_bp);
    for (int p = 0; p < X; p++) chk(retired[p] == issued[p] && issued[p] == 4 * NW, "all beats answered");
    chk(n_ooo > 0, "out-of-order responses occur");
    chk(n_bp > 0, "input back-pressure occurs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
