// smem_pkg -- shared types, sizes and address mapping of the many-ported
// shared memory.
//
// The memory is a flat space of 256-bit words (beats). A word address is cut
// into fields that select, from the least significant end:
//   cluster  (M clusters)       -- level-0 split, first rule of the design:
//                                  consecutive beats go to different clusters
//   group    (N array groups)   -- level-1 split, second rule: consecutive
//                                  beats in one cluster go to different arrays
//   bank     (K logic banks)    -- XOR-hashed with the low row bits
//   row      (ROWS per macro)
//   region   (Y sub-banks)      -- the most significant bits: each logic bank
//                                  is sliced by address region into sub-banks
// The cluster and group permutations for M = N = 4 are the beat placement of
// a 16-beat burst drawn in the architecture description (beats 0,4,8,C in
// cluster 0; 1,5,9,D in cluster 1; 3,7,B,F in cluster 2; 2,6,A,E in
// cluster 3). The group index of each square is taken in reading order
// (top-left 0, top-right 1, bottom-left 2, bottom-right 3), which is this
// design's reading of the drawing. For other M, N a plain modulo mapping is
// used. The bank hash, the field order above the group and the row / region
// split are this design's choices.
package smem_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned DW     = 256;        // data width of ports and SRAM
  localparam int unsigned AW     = 25;         // byte address, 32 MB
  localparam int unsigned WAW    = AW - 5;     // word (beat) address bits
  localparam int unsigned MIDW   = 4;          // master index width (up to 16)
  localparam int unsigned SLOTW  = 3;          // 8 outstanding commands
  localparam int unsigned BEATW  = 4;          // up to 16 beats per burst
  localparam int unsigned IDW    = 4;          // AXI ID width

  typedef logic [WAW-1:0] waddr_t;

  // One single-beat transaction travelling from a master into the memory.
  typedef struct packed {
    logic             we;     // 1 = write beat, 0 = read beat
    waddr_t           wa;     // word address
    logic [SLOTW-1:0] slot;   // outstanding-command slot at the master port
    logic [BEATW-1:0] beat;   // beat index within the burst (chunk number)
    logic [DW-1:0]    data;   // write data (unused for reads)
  } beat_req_t;

  // One single-beat response travelling back to a master.
  typedef struct packed {
    logic             we;     // 1 = write acknowledgement, 0 = read data
    logic [SLOTW-1:0] slot;
    logic [BEATW-1:0] beat;
    logic [DW-1:0]    data;   // read data (zero for write acks)
  } beat_rsp_t;

  // Response as it leaves a sub-bank: also names the master it returns to.
  typedef struct packed {
    logic [MIDW-1:0]  mid;
    beat_rsp_t        rsp;
  } bank_rsp_t;

  // ------------------------------------------------------- address mapping
  // Fixed permutations read from the 16-beat placement drawing (M = N = 4).
  function automatic int unsigned cluster_of(waddr_t wa, int unsigned m, int unsigned n);
    int unsigned q;
    q = int'(wa) % m;
    if (m == 4 && n == 4) begin
      case (q)
        0: return 0;
        1: return 1;
        2: return 3;
        default: return 2;
      endcase
    end
    return q;
  endfunction

  function automatic int unsigned group_of(waddr_t wa, int unsigned m, int unsigned n);
    int unsigned c, q;
    c = cluster_of(wa, m, n);
    q = (int'(wa) / m) % n;
    if (m == 4 && n == 4) begin
      case (c)
        0: case (q) 0: return 0; 1: return 1; 2: return 3; default: return 2; endcase
        1: case (q) 0: return 3; 1: return 2; 2: return 1; default: return 0; endcase
        2: case (q) 0: return 2; 1: return 1; 2: return 3; default: return 0; endcase
        default: case (q) 0: return 0; 1: return 1; 2: return 3; default: return 2; endcase
      endcase
    end
    return q;
  endfunction

  // Logic bank: the word-address field above cluster and group, XORed with
  // the low bits of the row so that strided accesses spread over the banks.
  function automatic int unsigned bank_of(waddr_t wa, int unsigned m, int unsigned n,
                                          int unsigned k);
    int unsigned lin, row;
    lin = (int'(wa) / (m * n)) % k;
    row = (int'(wa) / (m * n * k));
    return (lin ^ row) % k;
  endfunction

  function automatic int unsigned row_of(waddr_t wa, int unsigned m, int unsigned n,
                                         int unsigned k, int unsigned rows);
    return (int'(wa) / (m * n * k)) % rows;
  endfunction

  // Region (sub-bank): the most significant part of the word address.
  function automatic int unsigned region_of(waddr_t wa, int unsigned m, int unsigned n,
                                            int unsigned k, int unsigned rows,
                                            int unsigned y);
    return (int'(wa) / (m * n * k * rows)) % y;
  endfunction

endpackage
