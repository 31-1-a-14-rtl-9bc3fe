# A ReRAM-on-logic LLM accelerator: logic-die RTL

This is synthesizable SystemVerilog for the logic die of a speculative-decoding
LLM accelerator. The chip pairs a large target model (TLM), whose weights stream
from external DRAM, with a small draft model (DLM) whose compressed weights sit
in four ReRAM dies stacked face to face on the logic die. Three ideas carry the
design:

* **Outlier-free INT8 activations.** Before a token is quantized it is rotated
  by a Hadamard-type matrix. The rotation spreads outliers over all features,
  so one per-token INT8 scale is enough. The rotation is split into a
  fast Walsh-Hadamard transform of size 2^k and a small Hadamard matrix H_m of
  any size m. It is applied as two overlapping local rotations, so any hidden
  size n with 2^k·m·2 ≥ n can be handled. This is the **local rotation unit (LRU)**.
* **Block-clustered weight compression.** Every 32×16 weight block of the draft
  model is replaced by a 2-bit index into a codebook of four INT4 blocks. The
  **tile-fused tensor engine (TFTE)** first adds the activation tiles whose
  blocks share an index. It then multiplies each codebook entry that is used,
  only once, so an entry is fetched and multiplied at most once per row.
* **Adaptive parallel speculative decoding (APSD).** The draft model proposes
  tokens and the target model verifies them. When a whole draft is accepted,
  the next draft is already being made in parallel with the verification. When
  it is not, the controller falls back to short serial drafts.

The four engines (link transceiver, compute, ReRAM load, DRAM DMA) are fed by
an out-of-order scheduler, so loads and compute overlap.

## Block map

```
 MCU write port ──► ISA buffer (64 KB) ──► top_ctrl ──► wdos (4 queues + 4x4 counter matrix)
                                                          │      │        │          │
                                                    inter_chip  compute  ReRAM load  EMAC
                                                      _xcvr       │      cfu + rli    │
                                                          │       │        │          │
 global token buffer, 16 banks x 512 x 2048 b (2 MB) ◄────┴───────┤        │          │
 weight buffer,       16 banks x 256 x 2048 b (1 MB) ◄───────────────────┘          │
                                                                  │                   DRAM
                                            tfte (16 x tfu + 32x16 MAC cluster)
                                            lru  (LTB 128 KB, tau, rfa, hau, dyn_quant)
                                            nlpu (RMS norm, softmax)
 apsd_ctrl ── launches draft / target programs (contexts 0 / 1) and commits tokens
```

`llm_accel_top` wires this together. The ReRAM dies, the DRAM, the peer chip, the
host microcontroller and the PLL are outside; their signals are top-level ports.

## Instruction format and the scheduler (`wdos`)

Instructions are 64 bits wide (`accel_pkg::instr_t`):

| bits  | field   | meaning |
|-------|---------|---------|
| 63:62 | `qid`   | queue: 0 transceiver, 1 compute, 2 ReRAM load, 3 EMAC |
| 61:59 | `par`   | parent mark: bit i = must wait for the i-th *other* queue |
| 58:56 | `dau`   | daughter mark: bit i = signals the i-th other queue when done |
| 55:0  | payload | operation, one of the `op_*_t` structs in `accel_pkg` |

"The i-th other queue" counts the three other queues in ascending order
(`mark_to_q`). `top_ctrl` reads instructions from the ISA buffer, one per cycle.
It has two program contexts (pc_start..pc_end, end exclusive) served round
robin. It pushes each word into the queue named by `qid` and stalls when that
queue is full.

The scheduler keeps a 4×4 matrix of small counters: `cnt[p][d]` is the number
of finished instructions of queue p that queue d has not yet consumed. The head
of queue d issues when its unit is idle and `cnt[p][d] > 0` for every parent p
it marks. On issue those counters are decremented. When an instruction finishes
(`unit_done`), the counters of all its daughters are incremented. Each queue
stays in order, but the queues run freely against each other. A head that waits
only for a counter raises `dep_stall`. Incrementing at completion, not at issue,
is this design's choice: it makes a dependency mean "the producer's data exist".
An assertion flags counter overflow.

A producer and its consumer must agree on their marks: one daughter bit on the
producer for one parent bit on the consumer. The testbenches build programs
from this rule.

## Local rotation unit (`lru`)

This is the hardest block to follow, so here is one full pass.

A token of n features is held in the 128 KB local token buffer (LTB) as R rows of
64 × 32-bit features, with 2^k real features per row (n = R·2^k). An m×m
matrix H_m of ±1 entries is stored column by column. LTB row `hbase + j` holds
column j, and bit r of that row is H_m[r][j]. A 1 bit means +1 and a 0 bit
means −1. The token allocator (`tau`) then runs:

1. **Upper stage, rows 0..m−1.** Each row goes through the reconfigurable FWHT
   array (`rfa`). In every aligned group of 2^k lanes it computes the
   unnormalised Walsh-Hadamard transform, using log2(64) = 6 butterfly stages
   of which the first k are enabled. The result is written back in place.
   Then the rows are mixed by H_m, one 4-row output tile at a time. For output
   rows r..r+3 and every input row j, the Hadamard accumulation unit (`hau`)
   adds or subtracts row j into four partial sums, according to bits H_m[r..r+3][j].
   There are no multipliers. Sums are scaled by `scale_q15`/2^15 (normally
   2^15/√(2^k·m)) and written to a scratch area. The rows are then copied back.
   Padding rows past m are skipped.
2. **Lower stage, rows R−m..R−1.** The same steps again. Because m ≤ R ≤ 2m, the
   two stages overlap and together touch every row, which is the condition
   2^k·m·2 ≥ n.
3. **Quantize.** One pass over all R rows finds the absolute maximum. A second
   pass emits INT8 rows (`q_valid`, `q_row`, `q_data`) with the exponent `q_shift`
   of a power-of-two scale. The shift is the smallest s with absmax >> s ≤ 127,
   with rounding half away from zero and saturation at ±127.

Configuration limits: k = 1..6, m ≤ 63, m ≤ R ≤ 2m, all rows inside 512 LTB rows.
The latency grows with m² per stage (every output tile walks all m input rows)
plus two passes over the R rows; `tb_lru` checks the cycle count against a bound.

## Tile-fused tensor engine (`tfte`, `tfu`, `mac_cluster`)

A GTB row holds 8 activation tiles of 32 INT8 values (A0..A7, 2048 bits). For each
row the instruction provides eight 2-bit codebook indices. Each of the 16 lanes:

1. fuses: for every codebook entry e, adds the tiles whose index is e,
   shifts the sum right by `fuse_shift` (rounding half up) and saturates to INT8
   (`tfu`, one cycle);
2. for each entry actually used, reads WB row `cb_base + e` of its own bank.
   This is a 32×16 INT4 block, weight (r,c) at bits 4·(16r + c). It then adds
   the 32-long dot products into 16 accumulators (`mac_cluster`);
3. outputs sat8(sum >>> `out_shift`), with optional ReLU.

A row with u distinct indices costs 2 + 2u + 1 cycles and u buffer reads instead
of 8. The `fetches` output counts the reads, so the saving can be seen. In the top,
all lanes get the instruction's indices and lane b works on GTB bank b and
WB bank b. The results go back to a GTB row (16 INT8 values per bank,
zero-extended).

## ReRAM load path (`cfu`, `rli`, `async_fifo`)

Each die delivers a 512-bit quarter of a 2048-bit row per read at 100 MHz, over 2048
face-to-face bumps in total, which is 25.6 GB/s. A ReRAM-load instruction names
a ReRAM base row, a WB bank, a WB base row and a count. The codebook fetcher
(`cfu`) issues one read per cycle while the dies accept them (`rr_ready`). At the
same time it pushes the matching (bank, row) into the RLI address FIFO.

The ReRAM load interface runs its capture side on `clk2x` (200 MHz). A toggling
flop produces the dies' 100 MHz clock `rr_clk`. Each die's bus is sampled in the
middle of its data window, on the 200 MHz edge where `rr_clk` falls. Every die
has its own Gray-pointer asynchronous FIFO into the buffer clock domain. A
2048-bit WB row is written when all four FIFOs and the address FIFO hold an
entry and the bank port is free (`wb_ready`). In the top the TFTE's reads take
priority, so ReRAM rows wait while it runs; sticky `overflow` flags report a
lost word.

## Adaptive parallel speculative decoding (`apsd_ctrl`)

`apsd_ctrl` works at the level of token lists. The draft and target models
themselves run as instruction programs on the rest of the chip. Their tokens
arrive on `dlm_tokens` / `tlm_tokens`. Both `*_req` strobes also start program
contexts 0 and 1 in the top.

* **Short drafting:** request `short` draft tokens (default 5), then verify them
  with the target model. In parallel, request `long` (default 15) speculative
  drafts that assume all current drafts are accepted (`dlm_spec`).
* **Decide:** `acc` is the longest prefix of drafts equal to the target's tokens.
  acc+1 tokens are committed: the accepted drafts plus the target's own next
  token. If all drafts were accepted **and** the target's newest token equals the
  first parallel draft, the remaining parallel drafts become the next drafts.
  Decoding stays parallel (`n_continue`). Otherwise the parallel drafts are
  discarded and decoding reverts to short drafting (`n_revert`, with the
  wasted tokens counted in `n_rejected`).

Verification is greedy (exact match). The committed stream is therefore exactly
the target's greedy output, which the testbenches check.

## Other units

* `nlpu`: RMS normalisation or softmax of one 64-lane row. Inputs are Q23.8.
  RMS uses a 32-step restoring square root, then x·256/rms. Softmax uses
  2^(−d·log2 e), with log2 e ≈ 369/256 and a piecewise-linear 2^−frac. Outputs
  are Q0.16, summing to about 65535. One lane is processed per cycle, about
  N + 35 cycles per row.
* `emac`: row DMA between the DRAM port (64-bit words, req/ready, in-order
  `rvalid`) and a GTB or WB row, 32 beats per row.
* `inter_chip_xcvr`: sends or receives rows as 64 words of 32 bits, with
  valid/ready on transmit and valid on receive.
* `sram_sp`, `sram_banked`: single-port arrays with a one-cycle read, used for
  the LTB, ISA buffer, WB and GTB.

## Host registers (top)

The host writes the ISA buffer through `mcu_isa_*` and these registers through `mcu_csr_*`:

| addr | contents |
|------|----------|
| 0, 1 | context 0/1 program: pc_start [12:0], pc_end [29:16] |
| 2    | APSD short draft length [5:0], long [13:8], target token count [31:16] |
| 3    | LRU output: GTB bank [3:0], first row [12:4] |
| 4    | bit 0 start APSD, bits 2:1 start context 0/1 by hand |

Compute payloads (`op_e`): TFTE GEMV, LTB load (GTB rows into the LTB),
LRU run, NLPU run. The other queues take `op_rload_t`, `op_emac_t` and `op_xcvr_t`.

## Where this RTL departs from the paper

* The paper's spec quotes 2.33 TOPS at 285 MHz, which is about 4096 MACs. Its
  block diagram, however, shows 16 clusters of 32×16 MACs. The clusters here
  follow the diagram. Only INT4 codebook weights are built, not the INT8 weight
  mode.
* The text calls the FWHT array reconfigurable for 2^1–2^2, while the diagram
  prints 2^1–2^6. The RTL supports 2^1–2^6. A 2^8 FWHT (the paper's 14336 =
  2^8·28 example) would need two passes and is not supported.
* Number formats are this design's own: power-of-two quantizer scale, Q1.15
  Hadamard scale instead of a fused FP16 scale, and the NLPU formats.
* The whole logic die runs on one core clock, plus `clk2x` for ReRAM capture.
  The 250 MHz buffer write clock and the 150 MHz link clock are not separate
  domains in the top (the `rli` block keeps its own `clk_wb` port).
* The MCU, PLL, SPI, ReRAM macros and DRAM are not built. The dies and the
  DRAM have behavioural models in `tb/`.
* In the top, all 16 TFTE lanes share one set of indices per instruction.

## Simulating

Every block has a self-checking testbench `tb/tb_<block>.sv` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/accel_pkg.sv tb/tb_lru.sv \
          --top-module tb_lru -o sim && ./obj_dir/sim +verilator+rand+reset+2
```

`tb_llm_accel_top` runs the top at its default size. The host loads a program
that does the following:

* loads activation tiles from DRAM and codebooks from the ReRAM models;
* runs two GEMVs on all 16 lanes;
* sends one result row to a peer chip and receives another;
* rotates and quantizes a 10-row token in the LRU;
* runs a softmax;
* stores the results to DRAM.

Each result is checked against a reference computed in the testbench. The
testbench then runs APSD to 80 committed tokens. It counts dependency stalls,
out-of-order issues, queue-full fetch stalls, buffer-port stalls of the DMA and
link, ReRAM write stalls, TFTE fetch savings, and APSD continuations and
fallbacks. Any of these that never happens counts as a failure. It builds in
about two minutes and runs in seconds.
