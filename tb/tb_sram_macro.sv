// tb_sram_macro -- checks the SRAM macro model: writes and reads happen only
// on memory-cycle edges (ce high), a read word appears after the access edge
// and holds until the next read, and writes are ignored when ce is low.
`timescale 1ns/1ps
module tb_sram_macro;
  localparam int unsigned DW = 256, ROWS = 64;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic ce = 1'b0, en = 1'b0, we = 1'b0;
  logic [5:0] addr = '0;
  logic [DW-1:0] wdata = '0, rdata;
  logic [DW-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;

  sram_macro #(.DW(DW), .ROWS(ROWS)) dut (.*);

  always @(posedge clk) ce <= !ce;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  function automatic logic [DW-1:0] rnd();
    logic [DW-1:0] d;
    for (int i = 0; i < DW / 32; i++) d[i*32 +: 32] = $urandom;
    return d;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] held;
    @(negedge clk);
    // fill every row
    for (int r = 0; r < ROWS; r++) begin
      while (!ce) @(negedge clk);
      en = 1; we = 1; addr = 6'(r); wdata = rnd(); ref_mem[r] = wdata;
      @(negedge clk);
    end
    en = 0; we = 0;
    // write attempts with ce low must be ignored
    for (int r = 0; r < 8; r++) begin
      while (ce) @(negedge clk);
      en = 1; we = 1; addr = 6'(r); wdata = ~ref_mem[r];
      @(negedge clk);
      en = 0;
    end
    en = 0; we = 0;
    // random reads and writes
    for (int i = 0; i < 400; i++) begin
      while (!ce) @(negedge clk);
      en = 1; addr = 6'($urandom_range(0, ROWS - 1));
      we = ($urandom_range(0, 2) == 0);
      wdata = rnd();
      if (we) begin
        ref_mem[addr] = wdata;
        @(negedge clk);
      end else begin
        held = ref_mem[addr];
        @(negedge clk);
        en = 0;
        chk(rdata == held, $sformatf("read row %0d", addr));
        @(negedge clk);                      // ce low edge: output holds
        chk(rdata == held, "read data holds");
      end
      en = 0;
    end
    // a write does not disturb the read output
    while (!ce) @(negedge clk);
    en = 1; we = 0; addr = 6'd3; held = ref_mem[3];
    @(negedge clk); en = 0;
    while (!ce) @(negedge clk);
    en = 1; we = 1; addr = 6'd4; wdata = rnd(); ref_mem[4] = wdata;
    @(negedge clk); en = 0;
    chk(rdata == held, "write leaves read output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
