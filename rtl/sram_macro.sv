// sram_macro -- one physical single-port SRAM instance (one sub-bank region of
// one logic bank).
//
// ROWS words of DW bits. The interconnect runs on clk; the memory runs at half
// that rate, which is modelled by the memory-cycle enable `ce` (high on every
// other clk edge): an access is taken only on an edge where ce and en are both
// high. A read returns its word on rdata from the next ce edge on, i.e. one
// memory cycle (two interconnect cycles) later, and rdata holds until the next
// read. A write updates the array on the ce edge. Read and write cannot happen
// in the same memory cycle (single port).
//
// The 256-bit width and the 2:1 clock ratio follow the architecture; the depth
// (2048 rows, 64 KB, so that 512 instances give 32 MB) is this design's choice.
// The array is written as a plain SystemVerilog memory so that it simulates and
// can be replaced by a foundry macro of the same ports.
module sram_macro #(
  parameter int unsigned DW   = 256,
  parameter int unsigned ROWS = 2048,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic          clk,
  input  logic          ce,
  input  logic          en,
  input  logic          we,
  input  logic [RW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (ce && en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
