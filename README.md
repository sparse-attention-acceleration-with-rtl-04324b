# In-memory key pruning with exact on-chip recomputation: RTL of a single-CORELET sparse-attention accelerator

## The idea

Self-attention compares every query vector q_i with all s key vectors, so
its cost and memory traffic grow as s². For a given query, most keys get
scores so low that softmax maps them to almost nothing. The design here finds
those keys cheaply, inside the memory that stores them, and never moves them.
Only the keys that survive reach the accelerator. There the exact scores are
computed again, so the answer keeps full precision.

Each 8-bit key element is split in two:

* **The 4 most significant bits (K_MSB).** They are stored in *transposable*
  ReRAM arrays, one key per column. A query's MSBs are applied to the array
  rows. Each column then produces the low-precision dot product
  q_msb · k_msb as an analog quantity. A comparator tests it against a
  threshold, and a 1-bit ADC turns the result into one bit per key of a
  *pruning vector*. Bit = 1 means pruned: the approximate score was below
  the threshold.
* **The 4 least significant bits (K_LSB) and the value vectors.** They are
  stored in ordinary ReRAM channels.

The accelerator reads the pruning vector. It fetches the full key (MSBs by a
transposed read, LSBs from the standard channel) and the value of every
unpruned token. From these it computes the exact 8-bit × 8-bit scores,
softmax and the weighted sum of values.

Queries that follow each other tend to keep similar key sets. If a key was
unpruned for query i−1 and is still unpruned for query i, it is already in
the on-chip buffers and is not fetched again. With P(t) the pruning vector of
the current query and P(t−1) that of the previous one:

    fetch  = P(t−1) & ~P(t)     (pruned before, needed now)
    reuse  = ~P(t−1) & ~P(t)    (needed before and now: already on chip)

Padding (tokens beyond the real sequence length) is removed in two
directions. Padded keys are forced to "pruned", and padded queries are never
processed.

## Configuration

The RTL is the smallest configuration: one compute unit (a *CORELET*) and
16 KB of key/value buffers. All sizes are parameters in `rtl/sprint_pkg.sv`.

| quantity | value |
|---|---|
| embedding size d | 64, 8-bit elements |
| token index space | 4096 (the 0.5 KB unpruned-index vector holds one bit per token) |
| transposable array | 64 rows × 4096 columns of 4-bit cells (32 tiled 64×128 arrays) |
| standard ReRAM | 16 channels × 64 bit; token j on channel j mod 16 |
| K/V buffers | 8 banks × 128 bit × 128 entries: 2 banks K_MSB, 2 banks K_LSB, 4 banks V |
| keys on chip | 128 (one 64-byte key plus one 64-byte value per entry) |
| QK-PU, V-PU | 64-way 8×8-bit multiply arrays |
| softmax | 12-bit input, 8-bit output, two 64-entry 8-bit exp tables, two dividers |
| in-memory threshold time | 7 cycles (< 8) |

## Block structure

    sprint_top
     ├─ tarray        transposable arrays: K_MSB storage, in-memory dot product + threshold
     ├─ reram_std ×16 standard channels: q, K_LSB, v
     ├─ mem_ctrl      per-query sequencing, pruning-vector filter, SLD, 16 MRG + 16 KIG
     │   ├─ sld       fetch / reuse vectors
     │   └─ mrg ×32   index generators (MRG on the fetch vector, KIG on the reuse vector)
     └─ corelet
         ├─ index_buffer  unpruned vector, per-token on-chip bit and buffer address, slot allocation
         ├─ kv_buffer ×3  K_MSB, K_LSB and V buffers
         ├─ qk_pu         Q buffer and exact score
         ├─ softmax       exp tables, exponent FIFO, sum, two dividers
         ├─ v_pu          probability × value accumulation
         └─ sync_fifo     temporary buffer, ready queue and output queue
                          (also used inside index_buffer and softmax)

`tarray` and `reram_std` are behavioural models of memory, not accelerator
logic. `tarray` models the analog dot product, comparator and ADC as exact
integer arithmetic, with no noise. Its thresholding evaluates all 4096
columns in one cycle and is not meant for synthesis.

## One query, step by step (`mem_ctrl`)

1. **Read q.** q is read from the standard channel that holds it
   (8 beats of 64 bits).
2. **CopyQ.** The 64 query MSB nibbles (256 bits) are written into the
   array's query register with four 64-bit CopyQ commands. The last one
   carries a start bit. The array is then busy for 7 cycles, and no command
   may be issued during that time; an assertion checks this.
3. **ReadP.** The pruning vector is read back 64 bits per command. Only the
   chunks below `valid_len` are read. Each chunk is filtered as it arrives:
   * tokens at or beyond `valid_len` are forced to pruned;
   * once 128 unpruned keys have been seen, later unpruned keys are also
     forced to pruned and counted in `cnt_ovf` (see "Departures" below).
4. **SLD.** The filtered vector goes to the CORELET, together with the query
   and the number of unpruned keys. The SLD combines it with the previous
   vector.
5. **Key streams.** Sixteen request generators (MRG) walk the fetch vector.
   Sixteen key index generators (KIG) walk the reuse vector. Generator c
   looks only at tokens c, c+16, c+32, …, which are the tokens of channel c.
   It reads one bit per cycle, so a full pass takes 4096/16 = 256 cycles.
   * A KIG index goes straight to the CORELET as "this key is on chip".
   * An MRG index starts a per-channel fetch. The channel issues a
     transposed read (TRead) of the key's column in the array, and a burst
     read of K_LSB and v (12 beats) from its standard channel. When both
     have arrived, the key, value and token number go to the CORELET.
   * Round-robin arbiters share the single array command port between
     channels, and likewise the reuse stream and the fill stream.
6. The controller waits for the CORELET to finish, then moves to query i+1.
   The first query of each run tells the CORELET to drop everything it
   holds.

ReRAM latencies are assumptions of this design, since the text gives none:
tRCD = tCL = 10 cycles. ReadP and TRead return after tCL.

## Inside the CORELET

### Where a key comes from

A score needs the key in the K buffers. On-chip keys (KIG) are looked up in
the index buffer's table to find their slot.

Fetched keys land in a two-entry temporary buffer and get a free slot:
first a slot that has never been used, otherwise one from a free-slot list.
They are then written into the single-ported K/V buffers. A write takes the
buffer port for one cycle, so no score can be read in that cycle. This is the
*stall*, counted in `cnt_stall`. The written slot is queued, and its score is
computed in a later cycle.

Port priority is: write, then queued fetched slot, then on-chip key. Keys are
scored in whatever order they become available, so a missing key never holds
up a present one.

Slots are freed while a new pruning vector is loaded. The index buffer walks
its 128 slots, one per cycle. It frees every slot whose token is pruned for
the new query, or every slot on the first query of a run. After this walk the
buffer holds exactly the reuse set, which is what the KIG stream assumes.

### Arithmetic

* **Score.** With K_MSB signed and K_LSB unsigned, the full key is
  k = 16·K_MSB + K_LSB. The QK-PU computes q·k as the sum of q·K_MSB
  (shifted left by 4) and q·K_LSB. The sum is shifted right arithmetically
  by 3 (1/√64) and saturated to 12 bits. The score appears one cycle after
  the key is read.
* **exp.** The score x is read as a fixed-point number with 8 fraction bits.
  With u = 2047 − x (0…4095):

      e = exp_hi[u[11:6]] · exp_lo[u[5:0]]
      exp_hi[h] = round(255·e^(−h/4)),   exp_lo[l] = round(255·e^(−l/256))

  This gives 255²·e^((x−2047)/256). The constant factor cancels in the
  normalisation. The tables are `rtl/exp_hi.hex` and `rtl/exp_lo.hex`.
* **Normalisation.** The 16-bit exponents go into a FIFO while a 24-bit adder
  sums them. When all of the query's scores have arrived, each entry is
  divided by the sum: p = min(255, ⌊256·e / sum⌋), an 8-bit probability.
  Each of the two dividers has two cycles per division. They alternate, so
  one probability leaves every cycle.
* **Output.** For each probability the V-PU reads the value vector from the
  V buffer (one cycle) and adds p·v into 64 accumulators of 24 bits. The
  result is saturated to 16 bits, with 8 fraction bits.

The attention vector goes to a two-entry output FIFO, tagged with its query
index.

## Top-level interface (`sprint_top`)

* `ld_valid`, `ld_tok`, `ld_q`, `ld_k`, `ld_v`: load one token's q, k and v
  (64 × 8 bit each). The top splits k into its MSB and LSB nibbles.
* `th_we`, `th`: set the signed pruning threshold.
  A key is pruned when q_msb·k_msb < th.
* `start`, `valid_len`: process queries 0…valid_len−1 against keys
  0…valid_len−1. `busy` stays high until the run is finished.
* `out_valid`, `out_idx`, `out_vec`, `out_ready`: attention vectors, in query
  order, with back-pressure.
* Counters: `cnt_fetch` (keys fetched), `cnt_reuse` (keys reused from the
  buffers), `cnt_ovf` (unpruned keys dropped over capacity), `cnt_query` and
  `cnt_stall`.

## Departures from the published design, and limits

* **Only one CORELET.** The larger configurations interleave keys over
  several CORELETs. They would need a way to merge partial softmax sums,
  which is not described, so they are not built.
* **At most 128 unpruned keys per query.** Unpruned keys beyond 128 are
  dropped (the first 128 in index order are kept) and counted. The original
  text does not say how a query with more unpruned keys than buffer entries
  is handled. Workloads of 1024 tokens and more, at the reported pruning
  rates of about 74–75 %, exceed this. Sequences of 384 tokens with padding,
  and 197-token image workloads, stay within it.
* **No overlap between queries.** Thresholding of query i+1 does not overlap
  with the CORELET's work on query i.
* **Own choices:** the score scaling, the exp table format, the divider
  timing, the buffer depths, slot allocation and eviction order, and the
  ReRAM timing, as described above.
* **Analog parts are not modelled.** The DAC, analog comparators and ADCs of
  the array are idealised.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`.

* `tb_sprint_top` runs the whole system with 256 tokens. Every attention
  vector is compared with a reference model in the testbench, which has its
  own exp tables computed with `$exp`. The fetch, reuse, overflow and query
  counters are checked against the reference too. The three runs cover
  normal pruning with padding, every key surviving (overflow), and every key
  pruned. The test counts a failure if any of these never happens: pruning,
  reuse, fetch, stall, overflow, padding, or an all-pruned query.
  The memory controller and the CORELET are tested here.
* `tb_sprint_full` runs the top at its default size (4096-token index
  space) on 384 valid tokens, with the same reference checks.
* The block testbenches check:
  * `tb_tarray`: pruning vectors, busy time of 7 cycles and read latency;
  * `tb_reram_std`: data and burst latencies;
  * `tb_sld`, `tb_mrg`: index order and scan time of S/16 cycles;
  * `tb_index_buffer`: eviction, allocation and lookup;
  * `tb_qk_pu`, `tb_softmax`: exact values, one result per cycle;
  * `tb_v_pu`, `tb_kv_buffer`, `tb_sync_fifo`.

To simulate, run from the directory that holds `rtl/` and `tb/`. The exp
tables are read as `rtl/exp_hi.hex` and `rtl/exp_lo.hex`.

    verilator --binary --timing --assert -Wno-fatal --top-module tb_sprint_top \
        rtl/sprint_pkg.sv rtl/*.sv tb/tb_sprint_top.sv
    ./obj_dir/Vtb_sprint_top

Replace `tb_sprint_top` with any other testbench name. Blocks that do not use
the package need only their own files.
