// stream_fifo -- synchronous FIFO with valid-ready handshakes on both sides.
//
// DEPTH entries of type T in a circular buffer. in_ready is high while the
// FIFO is not full; out_valid while it is not empty, with the oldest entry on
// out. A push and a pop may happen on the same edge, also when full (the pop
// frees the entry, so in_ready then also looks at out_ready). An entry pushed
// on one edge can be popped from the next cycle on (one cycle latency).
// Used as register slices and as the beat buffers of the split units.
module stream_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 2,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  T     in,
  output logic in_ready,
  output logic out_valid,
  output T     out,
  input  logic out_ready
);

  T              mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic [PW:0]   cnt;
  logic          push, pop;

  assign out_valid = (cnt != 0);
  assign out       = mem[rp];
  assign pop       = out_valid && out_ready;
  assign in_ready  = (cnt != (PW+1)'(DEPTH)) || pop;
  assign push      = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= (int'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (pop)  rp <= (int'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      cnt <= cnt + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  cnt <= (PW+1)'(DEPTH));

endmodule
