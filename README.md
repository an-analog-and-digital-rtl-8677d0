# Hybrid analog/digital attention accelerator with in-memory token pruning

Self-attention compares every query with every key, then mixes the value
vectors with the softmax of those scores. Most keys end up with a
negligible weight. This accelerator uses that. A charge-domain
compute-in-memory (CIM) array makes a cheap, low-precision first pass:
4-bit query times 4-bit key, for all 64 keys at once, inside the SRAM that
stores the keys. A comparator per key turns each approximate score into a
keep/prune bit. Only the kept keys go on to an exact 8-bit digital pass
(score, softmax, weighted sum of values). Keys kept by consecutive queries
are mostly the same, so a small key/value buffer next to the digital
datapath lets most of them be reused rather than fetched again.

This repository gives SystemVerilog for the whole design. The digital parts
are synthesizable RTL. The analog parts (9T bitcell array, bitline
processor, comparators) are behavioural models that use `real` voltages and
ideal charge sharing. They compute what the circuits are meant to compute,
so the full chip can be simulated end to end.

## Data flow of one query

```
 CIM clock domain (clk_a)                               digital clock domain (clk_d)
 ┌───────────────────────────────────────────┐         ┌──────────────────────────────────────┐
 │ CIM Q buffer ──RWL[63:0]──► CIM array      │         │ data overlap detection               │
 │  (q MSBs)  └─SSCS─TG_ctrl─► (k MSBs,       │  masked │   (kept & not held → fetch)          │
 │                             256 x 64)      │ indices │ selective fetch engine ─┬─ K LSB SRAM│
 │                     RBL[255:0] (analog)    │ ──CDC──►│                         ├─ Value SRAM│
 │                             ▼              │         │  K_MSB reads ◄──CDC─────┘            │
 │          bitline processor (64 PEs)        │ ◄─addr──│ K/V buffer (16 slots)                │
 │                  V_POS, V_NEG              │ ──data─►│   ▼                                  │
 │          64 comparators (V_Th)             │         │ signed MAC → softmax → unsigned MAC  │
 │          pruning index buffer ─AND─ mask   │         │   ▼                                  │
 └───────────────────────────────────────────┘         │ output buffer (64 x 12 bit)          │
                                                       └──────────────────────────────────────┘
```

1. The analog control unit runs the CIM pass for query *i*. The result is a
   64-bit vector U, where `u[j] = 1` means key *j* is kept. U is ANDed with
   the token mask and sent, tagged with the query slot, through the clock
   domain crossing (CDC) unit.
2. The digital core takes the record. For each kept key it checks whether
   the key's K/V vectors are already in the K/V buffer. If they are not, it
   fetches them. The key's 4 MSBs come from the CIM array through a
   standard read. Its 4 LSBs come from the key LSB SRAM and the value from
   the value SRAM.
3. It computes the exact scores, the softmax and the weighted sum of
   values, and writes 64 outputs of 12 bits to the output buffer.
4. The analog side does not wait for step 2. It goes straight on to query
   *i+1*. The array serves the standard reads of step 2 while it computes.

## The charge-domain pruning pass

This is the least obvious part of the design. Its files are `cim_array.sv`,
`sscs_engine.sv`, `analog_pe.sv`, `blp.sv`, `comparator_bank.sv` and
`analog_ctrl.sv`.

**Storage as bit-planes.** Key *j* takes four rows of the 256 x 64 array.
Row `4j+b` holds bit *b* of the 4-bit MSB part (`k[7:4]`) of all 64
elements, and column *n* is element *n*. A standard read returns half a row
(32 bits). Word address `{row, half}` covers elements `32*half .. +31`. So
one key is 8 reads.

**One q bit per step.** For each query bit *b*, from LSB to MSB, the array
goes through three one-cycle phases:

| phase | what happens (model) |
|---|---|
| precharge | every bitcell capacitor and every RBL is charged to VDD |
| multiply | RWL[n] = bit *b* of query element *n*; a capacitor discharges where its stored bit and its RWL are both 1 |
| accumulate | on each row, the capacitors of the columns whose `TG_ctrl` is on share charge: RBL = VDD·(1 − ones/n) |

Here *ones* is the number of columns with q bit = k bit = 1 and *n* is the
number of columns taking part. The RBL *drop* is therefore proportional to a
binary dot product.

**SSCS.** SSCS stands for sparsity-aware selective charge sharing. Without
it, n = 64. A query with many zero elements then gives only small drops,
which a comparator resolves badly. The SSCS engine switches off `TG_ctrl`
for every column whose query element is zero (all four bits). It does so
outside the precharge phase. Those columns cannot contribute ones anyway,
so the same count is now divided by fewer columns and the signal grows by
64/n. `sscs_en` turns the feature off for comparison.

**Bitline processor.** One analog processing element serves each key. It
reads the key's four RBLs, one per k bit. Each RBL feeds a binary-weighted
sampler (BWS) with equal sampling and storage capacitors. Each cycle the
BWS refreshes the sampling capacitor, samples the RBL drop onto it, then
shares it with the storage capacitor. The storage capacitor therefore ends
at `Σ_b 2^(b−4)·drop_b`: the q-bit weights. A second BWS (the K-BWS) then
samples the four Q-BWS outputs from k bit 0 to 3 in the same way, which
adds the k-bit weights.

Elements are two's complement, so bit 3 weighs −8. A product term is
negative when exactly one of its q bit and k bit is bit 3. Each Q-BWS
therefore has two storage capacitors, one per sign, and there are two
K-BWS chains. When one side stores a sample, the other side shares with the
empty, refreshed sampling capacitor. This halves it, so both sides keep the
same binary weights. The result is

```
V_POS − V_NEG = VDD · (q_msb · k_msb) / (256 · n)
```

**Comparator.** Key *j* is kept when `V_POS[j] − V_NEG[j] ≥ V_Th`. To prune
below a score threshold θ, set `V_Th = θ / (256·n)` with VDD = 1. With SSCS
on, *n* depends on the query, so one fixed `V_Th` means a score threshold
that scales with the query's density. A threshold of 0 (or just below 0) is
unaffected. This is how the pruning maps in the testbenches are built.

**Schedule.** `analog_ctrl` takes 28 clock cycles per query:
1. clear (1 cycle);
2. for each of the four q bits: precharge, multiply, accumulate, sample,
   store (20 cycles);
3. K-BWS (4 cycles);
4. compare (1 cycle);
5. capture (1 cycle);
6. push (1 cycle).

It waits in the push state while the index FIFO is full.

The models are ideal: no mismatch, leakage, comparator offset or noise. In
simulation, pruning decisions are therefore exact for the 4-bit MSB dot
product. On silicon, decisions near the threshold are where errors appear.
With 4-bit MSBs, scores within about ±256 of the threshold were the
unreliable region the chip was characterised for.

## The exact digital pass

`digital_core.sv` sequences the datapath. Per query it makes two passes
over the kept keys, lowest index first.

* **Pass 1.** Make sure the key is held in the K/V buffer (fetch on a
  miss). Compute `s = sat8((q·k) >>> 7)` on the signed MAC unit, which has
  64 int8 multipliers and an adder tree. Add `exp(s)` to the softmax sum
  and keep *s*.
* **Pass 2.** Make sure the key is still held; it may have been evicted
  when more keys are kept than there are slots. Compute
  `p = min(4095, exp(s)·4096/sum)` and accumulate `p·v` in the unsigned MAC
  unit (64 lanes).
* **Write.** `out[n] = sat12(Σ p·v[n] >> 8)` goes to the output buffer slot
  of the query. A query with no kept keys writes zeros.

Number formats (this design's choice):

| value | format |
|---|---|
| q, k | int8, read as Q3.4 |
| s | int8, Q3.4, after the 1/√64 attention scale, hence the shift of 7 |
| exp(s) | 24-bit, units of 2^−12; `EXP_MSB[s[7:4]]·EXP_LSB[s[3:0]] >> 10` with `EXP_MSB[m] = round(e^m·2^12)` and `EXP_LSB[l] = round(e^(l/16)·2^10)` |
| p | unsigned Q0.12 |
| v | unsigned 8-bit, as the MAC unit is unsigned |
| out | unsigned 12-bit, Q8.4 |

**K/V buffer and reuse.** The 2 KB buffer has 16 slots of 64 B key plus
64 B value. Each slot has a token tag and a valid bit. The data overlap
detection engine compares the kept set with the set of held tokens. Only
kept-and-not-held keys are fetched. On a miss the victim is chosen in this
order:
1. an invalid slot;
2. a slot whose token this query does not keep;
3. a round-robin slot.

Across queries, keys that stay kept stay in the buffer. Fetching a key
takes 8 CIM reads (through the CDC unit) plus 8 reads from each SRAM. The
K MSB bit-planes are transposed back into elements as they are written:
`k[n][4+b] = beat(2b + n/32)[n%32]`.

**Timing.** The units form a pipeline, and a held key is issued every
cycle in each pass. In pass 1, the signed MAC scores one key while the
softmax adder takes the exponent of the previous one. In pass 2, the
division and the P×V accumulation each take one key per cycle. A miss stops
the issue while the key is fetched. The fetch costs about 20 cycles plus the
CDC latency, plus one lookup cycle. A query whose m kept keys are all held
finishes in 2m + 6 cycles.

## Clock domains

The CIM side runs on `clk_a` and the digital side on `clk_d`. They are
independent. `cdc_unit` is the only connection between them. It holds
three gray-code asynchronous FIFOs of depth 8:
* index records, from CIM to digital;
* CIM read addresses, from digital to CIM;
* 32-bit K_MSB data, from CIM to digital.

It also acts as a small read server on the CIM side: it pops an address,
reads the array, and pushes the data.

## Sizes

| quantity | value | origin |
|---|---|---|
| keys per CIM pass | 64 | chip |
| vector length | 64 | chip |
| CIM array | 256 rows × 64 columns (16 Kb) | chip |
| analog precision | 4 × 4 bits, signed | chip |
| digital precision | 8 × 8 bits | chip |
| CIM Q buffer | 1 Kb = 4 queries × 64 × 4 bit | capacity from the chip, 4-slot organisation chosen here |
| Q buffer | 2 Kb = 4 × 64 × 8 bit | as above |
| output buffer | 3 Kb = 4 × 64 × 12 bit | as above |
| key LSB SRAM | 2 KB = 64 keys × 64 × 4 bit, 32-bit port | chip |
| value SRAM | 4 KB = 64 × 64 × 8 bit, 64-bit port | chip |
| K/V buffer | 2 KB = 16 slots | capacity from the chip, slot organisation chosen here |
| CDC FIFOs | depth 8 | chosen here |

All RTL defaults are these sizes; nothing is scaled down.

## Programming model

CIM-side host port (`clk_a`: `a_we`, `a_sel`, `a_addr`, `a_wdata`):

| `a_sel` | target | address | data |
|---|---|---|---|
| `A_KEY` | CIM array | `{row, half}` | 32 bits, bit *i* = column `32*half+i` |
| `A_QMSB` | CIM Q buffer | `{slot[1:0], word[1:0]}` | 16 elements × 4 bits |
| `A_MASK` | mask | — | 64 bits (1 = real token; reset all ones) |

Do not write keys while `a_busy` is high: the write takes the array's
address port.

Digital-side host port (`clk_d`: `d_we`, `d_sel`, `d_addr`, `d_wdata`):

| `d_sel` | target | address | data |
|---|---|---|---|
| `D_KLSB` | key LSB SRAM | `8*tok + t` | elements `8t..8t+7`, 4 bits each |
| `D_VAL` | value SRAM | `8*tok + t` | elements `8t..8t+7`, 8 bits each |
| `D_QBUF` | Q buffer | `{slot, word[2:0]}` | elements `8w..8w+7`, 8 bits each |

The CIM Q buffer must hold `q[7:4]` of the same queries.

To run a batch:
1. Set `vth` (a `real`) and `sscs_en`.
2. Pulse `start` with `nq` (1..4) on `clk_a`. Slots `0..nq−1` are
   processed in order.
3. Each finished query pulses `q_done` with `q_done_qi` on `clk_d`.
4. Read results through `ob_rd_q`/`ob_rd_n` → `ob_rdata`.

Counters `n_fetch`, `n_reuse`, `n_evict` and `n_kept` count since reset.

## Where this RTL departs from, or goes beyond, the chip

* The digital pipeline stalls on every miss. Fetches are not overlapped
  with arithmetic on keys that are already held, and the pipeline depth is
  this design's own.
* The chip shows a "local register, 8 entries of K/V" next to the digital
  processor as well as the 2 KB K/V buffer. Their split is not described.
  Here, token residency and reuse live in the 16-slot K/V buffer, and there
  is no separate 8-entry register.
* The following are this design's choices:
  * memory word layouts;
  * number formats;
  * score shift;
  * replacement policy;
  * cycle schedule;
  * CDC structure;
  * the mask meaning (1 = valid token, gated with AND);
  * the `sscs_en` switch.
* One CIM pass covers 64 keys. A sequence longer than 64 tokens needs the
  host to reload the key array per block of 64 keys; the RTL does not merge
  softmax sums across such blocks.
* V_Th is a `real` input port. On the chip it is an analog reference.
* The internal clock generator, the pads and the physical bitcell are not
  modelled.

## Files

| file | block |
|---|---|
| `rtl/attn_pkg.sv` | sizes, record and control types |
| `rtl/attn_top.sv` | top: analog core + CDC unit + digital core |
| `rtl/analog_core.sv`, `analog_ctrl.sv` | CIM side, its sequencer |
| `rtl/cim_q_buffer.sv`, `sscs_engine.sv` | query MSBs / RWL driver, SSCS |
| `rtl/cim_array.sv`, `analog_pe.sv`, `blp.sv`, `comparator_bank.sv` | behavioural analog models |
| `rtl/pruning_idx_buffer.sv`, `mask_buffer.sv` | U register, mask gating |
| `rtl/cdc_unit.sv`, `async_fifo.sv` | clock domain crossing |
| `rtl/digital_core.sv` | digital sequencer with its units |
| `rtl/overlap_detect.sv`, `fetch_engine.sv`, `kv_buffer.sv` | reuse and fetch |
| `rtl/key_lsb_sram.sv`, `value_sram.sv`, `q_buffer.sv`, `output_buffer.sv` | memories |
| `rtl/signed_mac.sv`, `softmax_unit.sv`, `unsigned_mac.sv` | datapath |
| `tb/tb_<module>.sv` | self-checking testbench of each module |

## Simulating

Every testbench is self-checking and prints
`TB_RESULT checks=N failures=M`. For example, the end-to-end test at full
size takes about half a minute:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/attn_pkg.sv tb/tb_attn_top.sv --top-module tb_attn_top -Mdir obj_top
./obj_top/Vtb_attn_top
```

`tb_attn_top` loads random keys, values and queries and runs three batches
of four queries:
1. SSCS on, threshold just below 0;
2. SSCS off, threshold 100.5, with a mask;
3. new queries, threshold −200.5.

It checks every kept set against the exact 4-bit rule and every output
against an 8-bit reference written independently in the testbench. It also
requires that each of these mechanisms happened at least once:
* pruning;
* SSCS exclusion;
* masking;
* fetch;
* reuse;
* eviction;
* standard reads overlapping CIM phases;
* the two sides working at the same time.

`tb_fig5_pruning_map` reproduces the signed 4-bit decision map used to
characterise the pruning comparator. Eight keys each hold one value from
7, 5, …, −7 in all 64 elements. Each query holds one such value in 48
elements (25 % sparsity) or 16 elements (75 %). With threshold 0 and SSCS
both off and on, the testbench checks three things:
* the score recovered from V_POS − V_NEG is 48·q·k or 16·q·k;
* keys are kept exactly where q·k > 0;
* SSCS raises the analog difference by 64/n.

Because the simulator is two-state, the testbenches reset or write
everything they read.
