// rr_arbiter -- round-robin arbiter over N requesters.
//
// Combinational grant: among the asserted req bits, the first one at or after
// the pointer wins (gnt one-hot, gnt_idx its index, gnt_any if any). When `adv`
// is high on a clock edge and a grant is given, the pointer moves to the
// requester after the winner, so every requester is served within N grants.
// Reset puts the pointer at requester 0.
module rr_arbiter #(
  parameter int unsigned N  = 4,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  req,
  input  logic          adv,
  output logic [N-1:0]  gnt,
  output logic [IW-1:0] gnt_idx,
  output logic          gnt_any
);

  logic [IW-1:0] ptr;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    gnt_any = 1'b0;
    for (int unsigned i = 0; i < N; i++) begin
      logic [IW-1:0] j;
      j = IW'((int'(ptr) + i) % N);
      if (!gnt_any && req[j]) begin
        gnt_any    = 1'b1;
        gnt[j]     = 1'b1;
        gnt_idx    = j;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              ptr <= '0;
    else if (adv && gnt_any) ptr <= IW'((int'(gnt_idx) + 1) % N);
  end

endmodule
