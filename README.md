# A many-ported shared memory built from recursive split-and-dispatch stages

An ADAS SoC has many processing elements (camera pipelines, neural-network
engines, CPUs) that all stream large buffers through one big on-chip memory at
the same time. This design is a 32 MB shared SRAM with 16 master ports. Each
port is 256 bits wide. It aims to give every port close to its full bandwidth
for reads and writes at once, with the same latency everywhere in the address
space.

The main idea is not to send whole bursts to one memory. Every burst is cut
into single 256-bit beats at the port. The beats are then scattered through
two levels of split-and-dispatch stages, so that consecutive beats of one
burst land in different clusters and different SRAM arrays. Random and
streaming traffic thus both spread evenly over all the SRAM. No memory is
"near" or "far" for any master. Masters meet only at the last step, the
arbiter in front of each SRAM sub-bank. Two masters that work in different
address regions never share an arbiter, which gives the path isolation that
functional-safety cases ask for.

The SystemVerilog here follows the architecture described in *A Many-ported
and Shared Memory Architecture for High-Performance ADAS SoCs* (Luan, Yao,
Huang, NoCs 2022). It uses that paper's prototype configuration. The paper
describes the structure and the splitting rules, but not the
micro-architecture of each stage. Every detail it leaves open was decided
here, and is listed in the section *Departures and open points*.

## Structure

```
 master port p (AXI5 subset, 256 bit)            x16
   split_l0  ── level-0 split: burst -> beats, beats -> 4 clusters
     │ one beat stream + one response stream per cluster
     ▼
 cluster c                                         x4   (8 MB each)
   split_l1  (one per master) ── level-1 split: beats -> 4 array groups
     ▼
   sram_array (array group)                        x4 per cluster
     per-master dispatching ── beat -> 1 of 16 logic banks (hashed)
     logic_bank                                    x16 per array
       sub_bank (arbiter + SRAM macro)             x2 per bank, by region
         sram_macro  2048 x 256 bit = 64 KB
```

4 clusters x 4 arrays x 16 banks x 2 sub-banks = 512 macros of 64 KB = 32 MB.

| parameter | default | meaning |
|---|---|---|
| `X` | 16 | master ports |
| `M` | 4 | clusters (level-0 fan-out) |
| `N` | 4 | SRAM array groups per cluster (level-1 fan-out) |
| `K` | 16 | logic banks per array |
| `Y` | 2 | sub-banks (address regions) per logic bank |
| `ROWS` | 2048 | 256-bit words per SRAM macro |
| `OUTST` | 8 | outstanding read and write bursts per port |
| `BEAT_BUF` | 64 | beats buffered per port between splitter and clusters |

`X`, `M`, `N`, `K`, the 256-bit width, 8 outstanding commands, the 64-beat
buffer and the 32 MB total are the paper's prototype values. `Y` and `ROWS`
are this design's choice. The paper says only that the 32 MB is made of
"over half a thousand" macros, and 512 fits that.

## Where a word lives: the address map

This is the part that makes the design work. It is in
`rtl/smem_pkg.sv` (`cluster_of`, `group_of`, `bank_of`, `row_of`,
`region_of`). A byte address is 25 bits. Dropping the 5 byte-offset bits
gives a 20-bit word (beat) address `wa`. From its least significant end:

| field | bits of `wa` | selects | chosen by |
|---|---|---|---|
| cluster | 1:0 | 1 of 4 clusters | level-0 split, fixed permutation |
| group | 3:2 | 1 of 4 arrays in the cluster | level-1 split, permutation per cluster |
| bank | 7:4 XOR 11:8 | 1 of 16 logic banks | array dispatching |
| row | 18:8 | word in the macro | sub-bank |
| region | 19 | 1 of 2 sub-banks | logic bank |

**Cluster and group.** A 16-beat aligned burst has its beats 0..F placed
like this. The placement is the one drawn in the paper. Each of the 16 beats
lands in a different array of a different cluster position:

| beat `wa[3:0]` | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | A | B | C | D | E | F |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| cluster | 0 | 1 | 3 | 2 | 0 | 1 | 3 | 2 | 0 | 1 | 3 | 2 | 0 | 1 | 3 | 2 |
| group   | 0 | 3 | 0 | 2 | 1 | 2 | 1 | 1 | 3 | 1 | 3 | 3 | 2 | 0 | 2 | 0 |

The cluster of a beat is taken from the drawing as printed. The group numbers
come from reading the four squares of each cluster in the drawing
left-to-right, top-to-bottom. The drawing does not number them, so this
reading is this design's. What matters, and what the table guarantees, is
that:

- any 4 consecutive beats reach 4 different clusters;
- any 16 consecutive beats reach 16 different arrays.

The mapping is applied to the address, not to the beat's position in its
burst, so unaligned bursts are spread in the same way. For configurations
other than M = N = 4, a plain modulo mapping is used instead.

**Bank hash.** Inside an array, the bank is the 4-bit field above the group,
XORed with the low 4 row bits. Linear streams still walk through all 16
banks. Strides that are a multiple of 256 words (a common image line pitch)
also spread over the banks instead of hitting one.

**Region.** The most significant bit picks the sub-bank. Each logic bank is
thus cut into two horizontal slices, one per 16 MB half. Every slice has its
own arbiter. With the 16 masters each given a private 2 MB area, masters 0..7
and masters 8..15 never compete in an arbiter.

## Life of a beat

**Master port (`split_l0`).** The port is a subset of AXI5 that includes read
data chunking:

- AR and AW carry a 4-bit id, a 32-byte aligned address and a length of 1 to
  16 beats (INCR).
- W follows AW in order.
- Every R beat carries `rchunknum` (its beat index in the burst) and
  `rchunkstrb` (all ones, because every beat is a whole 256-bit chunk).
  Beats may return in any order and bursts may interleave. `rlast` marks the
  last beat delivered for a burst, not beat `len`.
- B is returned once every beat of the burst has been written into its
  sub-bank.

The port accepts up to 8 read and 8 write bursts. It refuses an AR or AW
(ready low) whose id is still outstanding in that direction. This keeps
responses of one id in order without a reorder buffer.

The read splitter turns the oldest accepted read burst into one beat per
cycle. The write splitter pairs every W beat with its address. Each beat is
pushed into the read or write queue of its cluster (8 entries each, 64 beats
in all). Per cluster, a round-robin choice between the two queues sends one
beat per cycle to the cluster. A master's read and write traffic together
needs 2 beats per cycle. Spread over 4 cluster links, that is half a beat per
link per cycle, so the shared link does not limit throughput.

**Level 1 (`split_l1`).** Inside the cluster, the master's own level-1 unit
buffers the beat in a 2-entry FIFO and offers it to one array group. It
blocks only if that group cannot take it.

**Array group (`sram_array`, `logic_bank`).** The array decodes the bank
combinationally, and the bank decodes the region. The beat then waits at the
sub-bank arbiter together with the other masters' beats.

**Sub-bank (`sub_bank`).** On every memory-cycle edge, a round-robin arbiter
grants one master. One access is made per memory cycle: 0.5 beat per
interconnect cycle, with reads and writes sharing the single SRAM port. The
response is either read data or a write acknowledgement, tagged with the
master, the command slot and the beat index. It becomes valid one cycle after
the grant and is taken by the return path at the next memory edge at the
earliest. While it is held, the sub-bank grants nothing.

**Return.** Responses go back along the same tree:

- the logic bank merges its 2 sub-banks;
- the array merges, per master, its 16 banks;
- the level-1 unit merges its 4 arrays into an 8-entry FIFO.

At the port, write acknowledgements from all 4 clusters are counted at once.
Read beats are taken one per cycle, round-robin over the clusters, into a
2-entry R FIFO. All merges use valid/ready handshakes. A master that stops
taking R data back-pressures only the sub-banks holding its data. Other
masters see that as arbiter contention at those sub-banks, nothing more.

## Clocks and timing

The interconnect runs on `clk`, 1 GHz in the prototype. The SRAM macros run
at half that rate. `smem_top` makes a memory-cycle enable `mem_ce` that is
high on every other `clk` edge, and sub-banks arbitrate and access their
macros only on those edges. This is a one-clock model of the paper's
two-clock design. A real implementation would clock the macros from a
divided clock, and `mem_ce` marks those edges.

Measured with the testbenches (default and reduced sizes give the same
numbers):

| quantity | value |
|---|---|
| uncontended read, AR handshake to first R beat | 7 cycles (one more if the beat misses a memory edge) |
| bulk write, one port, 32 x 16 beats | 512 W beats accepted in 513 cycles |
| bulk read, one port, 32 x 16 beats | 512 R beats in 521 cycles (98 %) |
| one sub-bank, 4 masters contending | one grant every 2 cycles, equal shares |
| 16 ports at once, random 16-beat reads over 32 MB | slowest port 99.6 % of one beat per cycle |
| 16 ports at once, random 16-beat writes | slowest port 99.7 % |
| 16 ports at once, reads and writes together | slowest port 96.8 % read and 96.8 % write at the same time |

The paper reports a 32-cycle read pipeline latency for its implementation,
which has more pipeline stages than this RTL (the 1 GHz timing closure over a
30 mm² floorplan needs them). The paper does not say where those stages are,
so none were added here. Bandwidth is the same: each port reaches about one
beat per cycle in both directions once the pipeline is full.

## Departures and open points

- **Outstanding commands.** The prototype description gives 8 outstanding
  commands per port. A latency table in the paper uses 16 per port. The RTL
  has 8 (`OUTST`). Raising it needs a wider `SLOTW` in `smem_pkg`.
- **Read order.** All reads are returned as chunks in any order. There is no
  `ARCHUNKEN` input and no reorder buffer, so a master that cannot accept
  chunked data cannot use the port.
- **AXI subset.** There is no WSTRB, size, burst type, cache, prot or QoS.
  The length is up to 16 beats.
- **Ids.** An id that is outstanding blocks a new command with the same id
  (per direction).
- **Arbitration, FIFO depths, merges.** Round robin everywhere. 2-entry
  FIFOs at the level-1 input and the R output. The level-1 return FIFO has 8
  entries. With 2 entries, read data waiting for its master kept sub-banks
  busy, and 16-port random reads fell to about 90 % per port. The 64-beat port buffer is split into
  8-beat read and write queues per cluster. None of these are specified in
  the paper.
- **Bank hash and field order.** These are this design's. The paper only
  says that interleaving or hashing may be used and that the scheme is
  programmable. Here it is fixed.
- **Not built.** ECC and command/data time-outs, which the paper names as
  additional safety mechanisms without describing them. Clock generation.
  The physical partitioning (clusters as hard macros, I/O on the east and
  west edges).
- **Memory macro.** `sram_macro` is a plain array with one port and a
  one-memory-cycle read. Replace it with the foundry macro of the same
  interface for implementation.

## Verification

Each module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_sram_macro` | reads and writes only on memory edges, read data holds, writes ignored off-edge |
| `tb_sub_bank` | one grant per memory cycle, round-robin shares, 2-cycle grant-to-response, data and tags, held responses under back-pressure |
| `tb_logic_bank`, `tb_sram_array`, `tb_cluster` | beat-level traffic from 4 masters (write, then concurrent reads and writes, random back-pressure); every response returns to its master with the right data; out-of-order returns and input stalls occur (shared body in `tb/tb_beat_checker.svh`) |
| `tb_split_l1` | every beat reaches the array group of the placement table (checked against an independent copy of the drawing), one beat per cycle, all responses returned |
| `tb_split_l0` | beats reach their cluster; R data, ids, chunk numbers and `rlast`; B only after all acknowledgements; id blocking; limit of 8 outstanding; one R beat per cycle |
| `tb_smem_top` | end to end with 4 ports and a small memory: random bursts written, read back during other writes, read back again; bulk write/read rate (>= 90 %); single-read latency; forced sub-bank contention. It counts sub-bank conflicts, out-of-order chunks, interleaved bursts, AR stalls, W back-pressure, return-path stalls and R back-pressure, and fails if any never occurs. |
| `tb_smem_full` | the same test on the full 16-port, 32 MB design at default parameters |
| `tb_smem_load` | throughput workload on the full design: all 16 ports issue random 16-beat reads, then writes, then both, at full injection; all bursts complete, and the slowest port stays above 95 % (read), 95 % (write) and 90 % (each direction when mixed) |

Running one of them with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb \
          rtl/smem_pkg.sv tb/tb_smem_top.sv --top-module tb_smem_top -Mdir obj
./obj/Vtb_smem_top
```

The RTL files carry no `timescale`; the testbenches do, hence the option.
The same command with `tb_smem_full` or `tb_smem_load` builds the full-size
design. The build
takes about a minute; the run takes under a second. Every module in `rtl/`
is synthesizable SystemVerilog. The memories are plain arrays, which a
synthesis tool will keep as memories or map onto macros.

The random-traffic workload runs 256 bursts (4096 beats) per port and
phase. That is shorter than the paper's 10,000 transactions per port, but
the per-port rates settle well within it. The paper's ADAS trace replays were
not repeated, because the traces are not available.

## Changing the design

- Sizes are parameters of `smem_top` and are passed down. `M` and `N` other
  than 4 fall back to modulo placement.
- `ROWS` and `Y` change the capacity. Keep `M*N*K*Y*ROWS <= 2^20` words, or
  widen `AW` in `smem_pkg`.
- The address map is only the five functions in `smem_pkg`. A different hash
  needs changes there only, as long as the map stays one-to-one.
- Beat and response formats are the packed structs `beat_req_t`,
  `beat_rsp_t` and `bank_rsp_t` in `smem_pkg`.
