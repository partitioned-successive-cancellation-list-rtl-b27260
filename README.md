# Partitioned SCL polar decoder (PSCL) in SystemVerilog

Successive-cancellation list (SCL) decoding of polar codes corrects errors
much better than plain successive cancellation (SC). Its cost is memory: every
one of the L list paths needs its own copy of the intermediate LLRs of the whole
decoding tree. Partitioned SCL cuts the tree into P subtrees ("partitions").
Above the partitions the decoder runs plain SC, with a single copy of
everything. Inside a partition it runs CRC-aided SCL with L paths. At the end
of a partition, a CRC picks one candidate, and only that candidate leaves it.
Partitions are decoded one after another, so the L-fold memory is needed for
one partition only and the next partition reuses it.

This RTL implements that decoder as described in *Partitioned
Successive-Cancellation List Decoding of Polar Codes* (Hashemi,
Balatsoukas-Stimming, Giard, Thibeault, Gross). Its default configuration is
the paper's PSCL(4,2)-CRC8 decoder for a rate-1/2 polar code of length
N = 2048:

- 4 partitions of 512 bits;
- list size 2;
- a CRC-8 in each partition;
- 6-bit LLRs and 8-bit path metrics.

The paper describes the algorithm and its memory requirement. It reports
synthesis results but not the micro-architecture. The architecture here
(row-parallel processing, lazy path copying, the controller) is therefore this
design's own. It follows the general style of the LLR-based list decoder that
the paper builds on.

## Decoding a frame

The decoding tree of a length-N code has levels n = log2 N (the channel LLRs)
down to 0 (single bits). A node at level s holds 2^s LLRs `alpha`. Its children
get:

    f (left child):   alpha_l[i] = sgn(a) sgn(b) min(|a|, |b|)
    g (right child):  alpha_r[i] = b + (1 - 2 beta_l[i]) a
    where a = alpha[i], b = alpha[i + 2^(s-1)]

`beta_l` is the vector of partial sums (hard decisions, re-encoded) returned by
the left child once it has been decoded. A finished node returns
`beta = {beta_r, beta_l XOR beta_r}`: the left half is the XOR and the right
half is copied.

With P partitions, the partitions are the subtrees at level
n_p = log2(N/P). One frame is decoded as follows:

1. **Load.** The N channel LLRs arrive as N/PE rows of PE LLRs each.
2. **Partition root (`sc_top_tree`).** For partition p, f and g updates run
   from the channel level down to level n_p.
   - p = 0: f updates only.
   - p > 0: one g update at level n_p + ctz(p), using the stored partial sums
     of the finished left sibling, then f updates.
   (ctz is the number of trailing zeros.) The result is the partition's root
   LLRs, held in a single copy.
3. **List decoding (`scl_partition_decoder`).** CRC-aided SCL runs on the
   512-bit subtree (at the defaults) with L paths. It then chooses one
   candidate: the best-metric path whose CRC remainder is zero. If no path
   passes the CRC, it takes the best-metric path anyway.
4. **Return.** The chosen bits go to `u_hat`. `polar_encoder` re-encodes them
   into the partition's partial sums (x = u·G^⊗n_p).
   `sc_top_tree` stores these for the g updates of later partitions.

Steps 2–4 repeat for every partition. Then `out_valid` pulses.

## Inside a partition: the list decoder

This is the part that takes the most care. All L paths run in lock step through
the same schedule. For bit j of the partition:

- **Update cycles (state RUN).** One g update, at the level where bit j leaves
  the path of bit j−1 (that is, ctz(j)). Then f updates down to level 1. For
  bit 0, the f updates start at level n_p − 1. Each update processes one row of
  PE LLRs per cycle, for every path at once.
- **Decision cycle (state DECIDE).** The decision LLR (level 0) is computed from
  level 1 in the same cycle that uses it. Then:
  - Each path proposes u = 0 and u = 1 (only u = 0 for a frozen bit).
  - The candidate metrics are PM (unchanged) if the bit agrees with the sign of
    the LLR, and PM + |LLR| otherwise.
  - `path_sorter` ranks the 2L candidates by (valid first, smaller metric, lower
    index 2·path+bit).
  - The candidate of rank r becomes slot r. The list therefore stays sorted,
    and slot 0 is always the best path.
  - Each slot copies, from its parent, its metric, CRC remainder, decided bits,
    partial sums and LLR pointer row. It then appends its new bit.

**Lazy copy of LLRs.** A path cloned from another does not copy the other
path's LLR memory. Each path has its own row memory for levels 1..n_p−1, plus
a pointer for each level that names the path whose memory holds that level's
valid LLRs. The rules:

- When path r computes a level, it writes that level into its own memory and
  sets its pointer for that level to itself.
- Reads go through the pointer.

This is safe for the following reason. Bit j only writes levels at or below
ctz(j), and every path writes such a level before it reads it. The levels
above, which may still be shared, are only read. Because the paths run in lock
step, all memories are read at the same address. A crossbar chooses each path's
row by its pointer.

**Partial sums** of each path are kept as the betas of its finished left
children, one vector per level (511 bits per path at the defaults), in
`partial_sum_update`. They are copied whole when a slot takes a new parent.

**CRC.** Each path shifts its decoded information bits into a W-bit remainder
(MSB first, zero start, generator 0x2F for CRC-8). The encoder must put, in the
last W information positions of each partition, the CRC of that partition's
other information bits. A correct candidate then ends with remainder zero.

## Number formats

| quantity | format |
|---|---|
| LLR | QA = 6-bit two's complement. f/g results saturate to ±31. A channel input of −32 is accepted. |
| path metric | QPM = 8-bit unsigned, saturating at 255. |

The paper gives only these two widths. The saturation rules are this design's.

8-bit metrics only work when the LLR quantisation step is large enough that the
correct path's metric stays well below 255. The testbenches therefore quantise
channel LLRs to integers (step 1.0 of 2y/σ²). With a step of 0.25, the correct
path saturates in the 512-bit partitions, and decoding of the N = 2048 code
fails even at high SNR. A wider QPM or a finer quantiser would need to be
chosen together.

## Memory and how it compares with the paper's count

The paper's memory formula, Eq. (8), is

    M = (sum_{k=0}^{P-1} N/2^k + (N/2^{P-1} - 1) L) Q_alpha
        + L Q_PM
        + sum_{k=1}^{P-2} N/2^k + (N/2^{P-2} - 1) L

The numbers plotted in its Fig. 5 match this formula only when P is read as
log2(number of partitions) + 1. For example, with 4 partitions and L = 2 the
figure shows 30722 bits, which is Eq. (8) evaluated at P = 3. That reading also
agrees with Fig. 4, which places four partitions at level n − 2. This design
follows Figs. 4 and 5: partitions are subtrees of N/P leaves.

At the defaults, the LLR storage is:

- tree above the partitions: levels 11, 10 and 9, which is 2048 + 1024 + 512
  LLRs = 56 rows × 64 × 6 = 21,504 bits;
- per path: levels 1..8, 12 rows × 384 bits = 4,608 bits (the paper's count is
  511 LLRs = 3,066 bits);
- total: 30,720 bits, against 27,636 by the paper's count.

The difference comes from padding levels narrower than a row to a full row.

The partial sums take:

- 1,536 bits above the partitions;
- 511 bits per path.

On top of these, this design stores for each path:

- the decided bits, 512 bits, used for the output;
- its CRC remainder;
- its metric.

## Timing

One update row per cycle and one cycle per bit decision. The decoding time from
the last channel row to `out_valid` is

    sum over partitions p of  [ T_tree(p) + T_list + 6 ]
    T_tree(p) = sum of max(1, 2^s/PE) over the levels s the root walk produces
    T_list    = sum over bits j of [ 1 + sum_{s=1}^{t_j} max(1, 2^s/PE) ]

Here t_0 = n_p − 1, t_j = ctz(j), and the 6 cycles are handshakes between the
blocks. At the defaults this is 64 + 4 × (1032 + 6) = 4216 cycles, plus 32
cycles to load the frame.

The paper states 5248 cycles for all of its decoders. Its schedule is not
given, so that figure is not reproduced. The testbenches check the formula
above, cycle-exact.

## Interface (`pscl_decoder`)

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | clock; asynchronous active-low reset |
| frozen | in | N | 1 = frozen bit; hold stable from the first LLR row to `out_valid` |
| llr_valid | in | 1 | a row of channel LLRs is present (accepted while `in_ready`) |
| llr_row | in | PE×QA | LLRs k·PE .. k·PE+PE−1 of row k; positive favours bit 0; rows in order |
| in_ready | out | 1 | decoder is idle and accepting rows; the last row starts decoding |
| out_valid | out | 1 | one-cycle pulse when the frame is decoded |
| u_hat | out | N | decoded bits u (frozen positions 0), held until the next frame ends |
| crc_ok | out | P | per partition: the chosen candidate passed its CRC |

Parameters: N (2048), P (4), L (2), QA (6), QPM (8), PE (64), CRC_W (8),
CRC_POLY (8'h2F).

The constraints are:

- N, P and PE are powers of two;
- P ≥ 2, N/P ≥ 4 and L ≥ 2;
- PE ≤ N/P.

The paper's other PSCL configurations are reached by parameters:

- PSCL(2,2)-CRC16: P = 2, CRC_W = 16 and a 16-bit polynomial;
- PSCL(4,4)-CRC8: L = 4.

## Files

| file | block |
|---|---|
| `rtl/pscl_pkg.sv` | shared enum (f/g) and row-layout helper functions |
| `rtl/llr_pe.sv` | one f/g processing element |
| `rtl/llr_pe_array.sv` | PE lanes updating one row |
| `rtl/llr_row_mem.sv` | row memory, 1 write / 2 read ports |
| `rtl/path_metric_unit.sv` | path-metric update of one path |
| `rtl/path_sorter.sv` | keeps the L best of 2L candidates |
| `rtl/crc_lfsr.sv` | one CRC step |
| `rtl/partial_sum_update.sv` | partial-sum combination and storage |
| `rtl/polar_encoder.sv` | polar transform |
| `rtl/scl_partition_decoder.sv` | CRC-aided SCL on one partition |
| `rtl/sc_top_tree.sv` | SC tree above the partitions |
| `rtl/pscl_decoder.sv` | top level |

## Verification

Every block has a self-checking testbench `tb/tb_<block>.sv`. Each one prints
`TB_RESULT checks=… failures=…` and has a watchdog.

**Reference model.** `tb/pscl_ref_pkg.sv` is a behavioural reference of the
whole decoder. It is written differently from the RTL:

- it recomputes each decision LLR from the root by walking the tree;
- it copies whole paths;
- it checks CRCs by long division.

It uses the same number formats and tie-breaking rules as the RTL, so outputs
must match bit for bit. It also provides:

- the code construction (Bhattacharyya bound at 2 dB);
- message generation with per-partition CRCs;
- an AWGN/BPSK channel.

**End-to-end testbenches.**

- `tb_scl_partition_decoder` (32-bit partition, L = 4) and `tb_pscl_decoder`
  (N = 256, P = 4, L = 2, PE = 8) compare hundreds of noisy frames with the
  reference. They also check the cycle count.
- The end-to-end runs require each mechanism to occur at least once:
  - g updates above the partitions;
  - list pruning;
  - lazily shared LLR rows;
  - a CRC choice other than the best path;
  - a partition where no path passes the CRC;
  - correctly decoded frames.
- `tb_pscl_full` runs the decoder at its default size (N = 2048) on 64 frames
  at 0.75–2.25 dB, with the same checks. It takes about 20 seconds.
- `tb_pscl_workloads` runs the paper's other two configurations on the same
  N = 2048 code. It uses re-parameterised decoders through the shared bench
  `tb/pscl_frame_bench.sv`:
  - PSCL(2,2) with the CRC-16 polynomial 0x755B;
  - PSCL(4,4) with CRC-8.
  These runs are also bit-exact and cycle-exact. Together they take about
  25 seconds.

To simulate one testbench with Verilator:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/pscl_pkg.sv tb/pscl_ref_pkg.sv tb/tb_pscl_full.sv --top-module tb_pscl_full
    ./obj_dir/Vtb_pscl_full

## Departures from the paper and open points

- **Architecture.** The micro-architecture is this design's own: PE = 64 lanes
  per path, and a separate PE array for the tree above the partitions. The
  paper names only the base design it modified.
- **CRC.** The CRC polynomial, bit order and placement are assumptions. The
  paper cites Koopman's tables without printing the polynomial.
- **Partial-sum index.** The paper writes the upper half of a node's partial
  sums as beta_r[i + 2^(s-1)] for i >= 2^(s-1), which indexes past the end of
  beta_r. This design uses beta_r[i - 2^(s-1)]: the right child's sums are
  copied, as in the standard rule and in the paper's encoding example.
- **Selection among passing candidates.** When several candidates pass the CRC,
  the best-metric one is taken.
- **Latency.** 4216 cycles here against the paper's 5248.
- **Memories.** Memories are register arrays with asynchronous read. An ASIC
  implementation would map them to SRAM or latch arrays, whose timing would add
  pipeline stages.
- **Not evaluated.** Area, frequency (500 MHz in the paper) and error-rate
  curves are not evaluated here. The testbenches check functional equivalence
  with the reference decoder and count correct frames, nothing more.
