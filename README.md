# SLIM in RTL: an SSD that runs the feed-forward layers of a sparse LLM where the weights live

Large language models spend most of their bytes in the feed-forward (FFN) or
mixture-of-experts layers, and for a single user on an edge box those weights
do not fit in DRAM. This design keeps them in NAND flash inside an SSD and
computes on them in place. A small engine next to every flash die multiplies
the weights as they come out of the die's page register. The SSD's DRAM holds
the KV cache and a small predictor, and becomes processing-in-memory (PIM).

The main saving comes from sparsity. Before each FFN, a low-rank predictor
estimates how much every hidden neuron j will matter, y_j = (x·L·R)_j. Only
neurons with |y_j| above a threshold are fetched from flash. The threshold is
not trained into the model: a table holds one threshold per sparsity level,
and the level can be changed at run time.

The RTL covers the digital logic of that system:

- the logic added next to every DRAM bank;
- the predictor threshold;
- the flash-side address generation and per-die queues;
- the die engines and the reduction of their results;
- the scheduler that overlaps the DRAM and flash halves of two inputs.

The DRAM arrays, the flash dies and controllers, the NVMe host interface and
the SSD firmware processor are not built. Their connections are ports of the
top module, `slim_top`.

## Data flow of one decoder layer

```
 host/firmware ──DQ 8b──► near_bank_unit ×512 ──64b──► DRAM bank (outside)
                              │ 16-bit scores (pred_en)
                              ▼
                      sparsity_thresholder ──► activated list[stream]
                                                     │ (SSD phase)
                                                     ▼
                      ffn_addr_gen ──► tsu ──► nand_req[die] ──► flash die (outside)
                                                                     │ page data
                      x broadcast ──► nsp_pe ×64 ◄── nand_data[die] ◄┘
                                         │ partial sums
                                         ▼
                                   psum_reducer ──► ffn_valid/ffn_data
                 pipeline_ctrl: DRAM phase / SSD phase of stream 0 and 1
```

**DRAM phase.** This phase covers attention and prediction, and the host
runs it. Attention and the predictor product x·L·R are bit-serial
multiplications inside the DRAM rows. The sequences of majority commands
that do them are not built here.

What the design builds is the per-bank helper, `near_bank_unit`. It has
three jobs:

- **Layout.** Data arrives byte by byte over the chip's 8-bit DQ pins into a
  256 KB buffer. A `LAYOUT` command transposes it into bit-planes and writes
  them into bank rows over the 64-bit internal column bus.
- **Scores.** An `ACCUM` command reads the bit-planes back through a 64-input
  adder tree. The tree turns 64 bit-serial products into one 16-bit sum.
- **Softmax.** Sums marked `to_sm` go through a softmax unit, and the
  probabilities land back in the buffer.

While `pred_en` is high, the scores of the selected bank also feed
`sparsity_thresholder`. It compares each |score| with the threshold of the
current level and appends the index of every neuron that passes to a list
for that stream.

**SSD phase.** The top module runs this phase by itself, in four steps.

1. Clear the stream's partial-sum slot in every engine. The FFN input x has
   already been written into every engine, which is the broadcast step.
2. Replay the activated list through `ffn_addr_gen`. It turns neuron j into a
   page read on die `j mod 64`. `tsu` queues the reads per die, up to four
   each, and a die whose queue is full stalls the generator.
3. Each die returns the neuron's fused vector straight into its engine,
   `nsp_pe`. The engine accumulates that neuron's contribution to the output.
4. Once every listed neuron has been counted by the engines,
   `psum_reducer` adds the 64 engines' partial sums word by word. The sum is
   the FFN output, put out on `ffn_valid`/`ffn_word`/`ffn_data`. The top
   then reports the SSD phase done.

**Scheduling.** `pipeline_ctrl` issues DRAM phases, run by the host with
`dram_start`/`dram_done`, and SSD phases for up to two independent streams
and any number of layers. In pipelined mode, the DRAM phase of one stream
runs while the SSD phase of the other does. The best case gives
(t_DRAM + t_SSD) / max(t_DRAM, t_SSD) more throughput. Sequential mode runs
one phase at a time, and an assertion guards this.

## The fused FFN engine (`nsp_pe`)

A gated FFN computes `down( SiLU(x·Wg) ⊙ (x·Wu) )`. Done neuron by neuron,
that becomes, for every activated neuron j:

```
g = x · Wg[:,j]        u = x · Wu[:,j]        h = act(g) · u
psum[k] += h · Wd[j,k]     for k = 0 .. dim_e-1
```

So the engine needs column j of Wg, column j of Wu and row j of Wd, and
nothing of size dim_h. These three vectors are stored next to each other in
flash as one *fused vector* of 3·dim_e bytes. One read brings everything one
neuron needs. A skipped neuron costs nothing.

The engine has 16 multipliers. In the G and U phases, each 16-byte beat
gives 16 products, which an adder tree sums into g or u. In the H cycle, g
and u are scaled to 8 bits (`>>> qshift`, saturated). Then
h = sat8((hswish(g)·u) >>> 4), with g read as Q4.4. Hard-swish,
g·clamp(g+3,0,6)/6, stands in for SiLU, because no hardware SiLU is
described. In the D phase, each beat updates 16 of the 32-bit partial sums
in the output SRAM, by read-modify-write.

A fused vector takes **3·dim_words + 1 cycles**, where dim_words =
dim_e/16. That is one beat per cycle from the die plus one cycle for h. The
unit testbench checks this count.

The 64 KB SRAM is split in two parts:

- 16 KB of inputs: two slots of dim_e bytes each.
- 48 KB of partial sums: two slots of dim_e 32-bit words each.

Stream s uses slot s, at word address s·dim_words. The split lets two
streams of Llama-2-13B (dim_e 5120) sit side by side. An even split would
not.

## Page-aligned mapping and vector packing (`ffn_addr_gen`)

Neuron j goes to die `j mod N_DIE`, as local vector `l = j div N_DIE` of
that die. The host gives the geometry per layer, so the unit never divides
by the page size:

- **ppv ≥ 1 pages per vector.** Vector l starts on page
  `base + l·ppv` and spans ppv pages. For example, dim_e 4096 gives a
  12 KB vector, which takes 3 SLC pages of 4 KB.
- **vpp > 1 vectors per page** (packing, when 3·dim_e < page). Vector l is in
  page `base + l div vpp` at byte offset `(l mod vpp)·vec_bytes`. One page
  read (tR) then serves up to vpp neurons of the same die, when those
  neurons are activated.

A transaction (`slim_pkg::nand_txn_t`) carries the die, page, number of
pages, byte offset and neuron index. The flash controller is expected to read
`npages` pages and stream 3·dim_e bytes from `offset`, 16 bytes per beat,
into the die's engine.

## Bit-serial layout and reduction next to each DRAM bank (`near_bank_unit`)

Bit-serial PIM computes on all 8192 bits of a DRAM row at once. It needs
every value stored vertically: bit k of 64 adjacent elements forms one 64-bit
column word of row `row+k`. Writing that layout through 8 DQ pins is the
bottleneck, so the unit does it on the 64-bit internal bus:

- **`transpose_unit`** takes ew words of 64 bits, where each word holds 8 or
  4 elements and ew is 8 or 16. It returns ew bit-planes, each holding bit k
  of all 64 elements.
- **`LAYOUT`** runs over `count` column groups. For each group it reads ew
  buffer words, transposes them, and writes plane k to row `row+k`, column
  `col+g`.
- **`ACCUM`** reads the planes of every group back. `bitserial_accumulator`
  counts the ones in each plane with a 64-input adder tree, shifts the count
  by the bit position, and adds it. In signed mode it subtracts the sign
  plane. The result is shifted right by `oshift` and saturated to 16 bits.
  It goes to `res_score`, to buffer word `buf_addr`, and, with `to_sm`, to
  the softmax.
- **`softmax_unit`** stores up to 2048 Q8.8 scores and finds their maximum.
  It then computes e_i = 2^((s_i - max)·log2 e) in 1.15 fixed point: the
  exponent is split into integer and fraction, and the fraction is
  interpolated linearly. One division gives 2^31/Σe. Each probability is
  e_i·recip >> 15 in 0.16 format, one every two cycles. `NB_SMBASE` sets
  where the probabilities are written in the buffer.

The bank port is a plain request/response interface: `bk_valid`/`bk_ready`,
`bk_we`, row, column and data, with read data on `bk_rvalid`/`bk_rdata` in
order. The unit keeps one bank access outstanding at a time.

## Fixed-point formats and widths

| quantity | format |
|---|---|
| weights, x, g, u, h | signed 8 bit (g as Q4.4 inside the activation) |
| engine partial sums, FFN outputs | signed 32 bit |
| predictor / attention scores | signed 16 bit, Q8.8 for the softmax |
| softmax probabilities | unsigned 0.16 |
| thresholds | signed 16 bit, 16 levels |

## Where this departs from the paper or fills gaps

- **Firmware done in hardware.** The paper assigns address generation and
  phase sequencing to SSD firmware. Here they are hardware, at one
  transaction per cycle: `ffn_addr_gen` and the SSD-phase sequencer in
  `slim_top`.
- **Design's own choices:**
  - the TSU queue depth (4 per die);
  - the serial, one-engine-per-cycle reduction;
  - the near-bank command set;
  - the activated list (16384 entries per stream).
- **Not built: DRAM majority-command sequencing.** It is left to the host.
  Its command sequences are not given.
- **Not built: MoE router.** Each chosen expert runs as one FFN pass.
- **SiLU** is replaced by hard-swish.
- **Softmax arithmetic** is this design's own recipe.
- **DRAM geometry.** A 16384 × 8192-bit array with 64-bit columns gives 14
  row bits and 7 column bits. The configuration table instead lists 65536
  rows and 1024 columns, read here as four such subarrays. The subarray
  select is not modelled.
- **Timing scale.** Flash read time and DRAM timings appear only in the
  testbench models, in clock cycles. The RTL is latency-insensitive on both
  interfaces.

## Files

`rtl/` holds one module or package per file:

| module | what |
|---|---|
| `slim_pkg` | shared types, DRAM/SSD/engine constants, command and transaction structs |
| `slim_top` | the whole design, 512 near-bank units and 64 engines by default |
| `near_bank_unit` | per-bank buffer, layout, adder tree, softmax |
| `transpose_unit`, `bitserial_accumulator`, `softmax_unit` | its parts |
| `sparsity_thresholder` | threshold table and activation test |
| `ffn_addr_gen`, `tsu` | neuron → page-read transactions, per-die queues |
| `nsp_pe` | fused FFN engine |
| `psum_reducer` | sum of the engines' partial sums |
| `pipeline_ctrl` | sequential / pipelined DRAM–SSD scheduling |

`tb/` holds one self-checking testbench per module (`<module>_tb`), each
ending in a `TB_RESULT checks=… failures=…` line. It also holds two
behavioural models:

- `dram_bank_model`: a bank with row-buffer timing and a majority operation.
- `nand_die_model`: a die that returns hashed bytes after a read delay, so
  any weight can be recomputed.

The end-to-end test, **`slim_top_tb`**, runs a reduced top: 2 banks, 4 dies, dim_e 64, 64
neurons. It does two pipelined streams over two layers at two sparsity
levels with packed pages, then a sequential run with two-page vectors. It
checks every FFN output value against an integer model. It also counts the
mechanisms: skipped neurons, level switch, overlap, sequential run, queue
stalls, packed and multi-page reads, softmax and reduction. Each must
happen at least once.

No testbench at the full default size is included. A build of the top with
all defaults (512 banks, 64 dies) compiles with Verilator in about
9 minutes. Its simulation of one operation did not finish within
10 minutes, so the largest size simulated end to end is the reduced
configuration of `slim_top_tb`. The unit testbenches of `nsp_pe`,
`near_bank_unit`, `psum_reducer`, `tsu` and `ffn_addr_gen` run those blocks
at their default sizes.

To simulate, for example:

```
verilator --binary --timing --assert --top-module slim_top_tb \
  -y rtl -y tb +libext+.sv rtl/slim_pkg.sv tb/slim_top_tb.sv -o sim
./obj_dir/sim
```

All flops reset asynchronously (`rst_n` low). Memories are not reset, and
every memory word is written before it is read.
