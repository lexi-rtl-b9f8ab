# LEXI exponent codec: design notes

## The idea

BF16 values are {sign, 8-bit exponent, 7-bit mantissa}. In LLM activations,
caches and weights the mantissa bits look random, but the exponents do not.
They sit in a narrow band: fewer than 32 distinct values per layer, with about
3 bits of entropy. LEXI leaves signs and mantissas alone and Huffman-codes only
the exponent, right at a chiplet's network interface:

- **Egress:** the sender's interface compresses values just before they enter
  the network.
- **Ingress:** the receiver's interface decompresses them on arrival.

Three choices keep the hardware small and fast:

- **A codebook per layer, trained on a prefix.** The first 512 values of each
  layer's output build the histogram. The rest of the layer, typically millions
  of values, reuses that codebook.
- **Codebook building is cheap.** The histogram is counted in M parallel lanes,
  each with a small local cache, so the shared histogram sees few writes. A
  pipelined bitonic sorter, a one-merge-per-cycle tree builder and a LUT
  programmer then finish the job in under 80 cycles.
- **Decoding is cheap.** Codes in one codebook are prefix-free and at most 24
  bits long. The decoder splits its table into four stages of eight entries,
  for code prefixes up to 8, 16, 24 and 32 bits. Frequent (short) codes resolve
  in the first stage. Each exponent has a fallback: a 24-bit all-ones escape
  followed by the raw 8 bits. This keeps the scheme lossless for every input.

This repository contains synthesizable SystemVerilog for both sides of one
network interface, plus self-checking testbenches.

## Block diagram

```
             lexi_top
  tx_val[10] ──► lexi_compressor ───────────────────────────────► tx_flit (100 b)
                 ├─ 10 × local_cache (8 entries, FIFO eviction)
                 ├─ hist_arbiter (first come, 3-cycle hold)
                 ├─ global_histogram (31 exponents + escape leaf)
                 ├─ bitonic_sorter (32 entries, 15 stages)
                 ├─ huffman_tree_builder (≤ 31 cycles)
                 ├─ codebook_assigner (canonical codes, LUT programming)
                 ├─ 10 × enc_lut (32 entries, 1-cycle lookup)
                 └─ flit_packer
  rx_val[10] ◄── lexi_decompressor ◄───────────────────────────── rx_flit (100 b)
                 ├─ codebook_assigner (same block, rebuilds the codes)
                 └─ 10 × dec_lane (4 stages × 8 entries)
```

`lexi_pkg` holds the shared widths, structs and the flit kinds. The router,
SRAM, PE array and physical link are outside this design. Their connections
are the `tx_*` and `rx_*` ports of `lexi_top`.

## Flit format

Each flit is one 100-bit word. That is one cycle of a 100 Gb/s link at 1 GHz.
The payload fills from the MSB down and is zero padded.

| bits | field |
|------|-------|
| 99:98 | kind: 0 data, 1 raw, 2 codebook, 3 last codebook flit |
| 97:94 | count of values or entries |
| 93:0  | payload |

- **Data:** `count` signs, then `count` 7-bit mantissas, then `count` exponent
  codewords.
  - This is the field order of the paper's flit drawing.
  - At most 10 values and 94 bits fit.
  - A codeword never crosses a flit boundary.
  - With 2-bit codes a data flit carries 10 values, against 5 in a raw flit.
- **Raw:** up to five uncompressed BF16 words.
- **Codebook:** up to seven 13-bit entries {exponent, code length}, in rank
  order (most frequent first).
  - The last entry of the last codebook flit is the escape leaf.
  - The receiver rebuilds the exact codes from the lengths, because codes are
    canonical.

## What happens in a layer (compressor)

`layer_start` begins a layer. The compressor then moves through these phases;
`st_phase` shows the current one.

1. **TRAIN.**
   - Each lane takes one value per cycle; lane i takes value i of each input
     group.
   - The lane looks the exponent up in its local cache:
     - A hit increments the count.
     - A miss into a full cache evicts the oldest entry into a one-word
       eviction register, and the new exponent takes the slot with count 1.
   - Waiting evictions ask `hist_arbiter` for the global histogram port. The
     oldest request wins and keeps the port for three cycles.
   - The histogram update is a three-step read-modify-write: register, search
     and add, write back.
   - A lane whose eviction register is still waiting when it misses again
     stalls the input until the arbiter takes the waiting entry.
   - The values themselves are sent at once as raw flits, so the link never
     waits for the codebook.
   - The phase ends after 512 values.
2. **FLUSH.** The caches empty their remaining entries through the same
   arbiter. New input is held back during this phase.
3. **SORT.** The 32 histogram entries go through the bitonic network, sorted
   by count, in 15 cycles.
4. **TREE.** Huffman lengths are built with two queues: the sorted leaves, and
   merged nodes in creation order.
   - Their heads are always the two smallest nodes, so one merge takes one
     cycle, and n leaves take n−1 cycles.
   - Each node carries a bit mask of the leaves below it; a merge adds one to
     the length of those leaves.
   - The escape leaf has count 0, so it is merged early and ends up among the
     longest codes. It is then swapped to be the last of the longest codes.
5. **ASSIGN.** Canonical codes are given in rank order. The resulting words
   are broadcast to the ten encoder LUTs, one word per cycle: first a clear
   word, then one word per rank, 33 cycles in total.
   - Codes of one length are consecutive; shorter codes come first.
   - The escape leaf therefore gets the all-ones code.
   - Each rank is also placed in the decoder table: the first stage that has a
     free entry and whose index width (8/16/24/32) covers the code length. A
     rank that fits nowhere is sent as an escape.
6. **CB.** The codebook is sent as codebook flits. This waits until the raw
   values already queued have been sent.
7. **COMP.**
   - Every exponent is looked up in its lane's LUT in the same cycle.
   - A miss produces the 32-bit escape (24 ones, then the raw exponent).
   - `flit_packer` queues up to 20 values and sends a data flit when no more
     values fit, or when no input is offered.
   - When a flit is sent, its room is already counted in `in_ready`. A steady
     input stream therefore produces one flit per cycle while the link is
     ready; the end-to-end test measures no idle egress cycles in this state.

A layer shorter than 512 values is simply sent raw. The next `layer_start`
cuts it off.

## Decompressor

Incoming data and raw flits are dealt round-robin to ten `dec_lane`s. The
results are collected in the same round-robin order, so values leave in order.

A lane decodes one codeword at a time:
- In the codeword's first cycle, stage 1 compares the stream against its eight
  {code, length, exponent} entries.
- On a miss, the next cycle tries stage 2, and so on.
- Stage 4 also recognises the 24-ones escape and takes the next 8 bits as the
  exponent.

A codebook flit is collected into a 32-entry list. After the last codebook flit:
1. The unit stops accepting flits.
2. It lets the lanes finish the previous layer's flits.
3. It runs the same `codebook_assigner` as the sender. This guarantees that
   both ends derive identical codes and table placement.
4. It programs all lanes.

## Parameters

| parameter | default | source |
|-----------|---------|--------|
| `M` (lanes, both sides) | 10 | paper, design point of the evaluation |
| `DEPTH` (local cache entries) | 8 | paper |
| `TRAIN_N` (training values per layer) | 512 | paper |
| `HOLD` (arbiter hold) | 3 | paper |
| codebook entries `NSYM` | 32 | paper |
| longest code `LMAX` | 24 | paper |
| decoder stages × entries | 4 × 8, prefixes 8/16/24/32 | paper |
| flit width | 100 | own choice: 100 Gb/s at 1 GHz |
| counter width | 16 | own choice |

## Timing at default size

All figures are clock cycles.

| step | cycles |
|------|--------|
| training input | 52 (512 values, 10 per cycle) |
| flush of caches | up to ~240 (about 80 cached entries × 3-cycle hold); 200 on average in the tests |
| sort | 15 |
| tree | n − 1 ≤ 31 |
| LUT programming | 33 |
| measured sort + tree + assign | 64–80 |

Steady-state rates:
- **Encoder:** 10 values per cycle in, one flit per cycle out.
- **Decoder lane:** one cycle per codeword in stage 1, up to four for a
  stage-4 code or an escape, plus about two cycles per flit to hand the
  result over and take the next flit.

## Where this design differs from the paper

- **Codebook build time.** The paper counts 15 + 31 + 32 = 78 cycles, and
  about 55 ns for its chosen design point.
  - This design needs 15 + (n−1) + 33 cycles after the histogram is complete.
    The extra cycle is the explicit table-clear word.
  - The histogram is complete only after the caches have been flushed. With
    the paper's three-cycle arbiter hold, that takes up to ~240 cycles for 80
    cached entries. The paper does not say how the flush overlaps with the
    rest.
  - The flush costs latency, not bandwidth: values are sent raw while the
    codebook is built.
- **Values before the codebook is ready.** The paper says encoding is "fully
  pipelined with subsequent data" but does not say how the first values are
  carried. Here they go as raw BF16 flits.
- **Tree construction.** The paper uses a priority queue; this design uses the
  equivalent two-queue method. The cycle count is the same.
- **Codes.** The paper traverses the tree. This design assigns canonical codes
  from the lengths instead, which lets the codebook header be only
  {exponent, length} pairs.
- **Reserving the escape code.** The paper reserves an all-ones escape but
  does not say how it stays free. Here an extra zero-count leaf takes the
  longest all-ones code.
  - Every 24-bit all-ones prefix therefore begins with that leaf's code.
  - The histogram consequently holds 31 real exponents, not 32.
- **Decoder table.** The paper indexes its tables with the leading 8/16/24/32
  bits. Here each stage is an 8-entry content-addressed table matched on the
  first *length* bits.
  - Which codes go into which stage is this design's greedy rule, "by
    frequency and code length".
  - A code that fits no stage is escaped. With fewer than 32 exponents this
    did not occur in the tests.
- **Decoder throughput.** A lane spends one cycle per stage searched. A flit
  of ten stage-1 codes occupies a lane for about 12 cycles, so ten lanes reach
  about 10/12 of the link rate in the paper's best case, and less for deeper
  codes. The paper
  likewise says "near line-rate". In the loopback test the decoder is what
  throttles the link.
- **Weights.** The paper compresses weights offline, in software, and
  decompresses them at ingress. No offline compressor is included here. A
  weight stream written in the same flit format (codebook flits, then data
  flits) is decoded by the same `lexi_decompressor`.
- **Lane mapping.** Lane i simply takes the i-th value of each input group.
  The paper's "PE to lane mapping" is only a label in its figure.

## Workloads

The paper evaluates Jamba-tiny-dev, Zamba2-1.2B and Qwen1.5-1.8B on WikiText-2
(1K input tokens) and C4 (2K input tokens), each generating 512 tokens.

The codec streams, so storage does not grow with the model or the sequence
length. What each layer needs is:
- one codebook of fewer than 32 exponents (paper profiling);
- 512 training values, against about 2 M activations per layer for Qwen with
  1K tokens (paper).

The design holds this for every listed configuration. More distinct exponents
than the table holds are escaped and stay lossless. The paper gives no layer
sizes for Jamba, Zamba or C4.

## Verification

Each block has a self-checking testbench in `tb/`. All of them use random
stimulus and print `TB_RESULT checks=… failures=…`.

- `lexi_ref_pkg` is a reference model written separately from the RTL. It
  covers canonical codes, decoder placement, flit building and flit parsing.
  The codebook, decoder and codec testbenches use it.
- `tb_lexi_top` runs at the default size with the egress looped back into the
  ingress, over five layers:
  - skewed exponents;
  - 40 evenly used exponents, which overflow the histogram and need escapes
    and deep decoder stages;
  - input gaps with link and consumer back-pressure;
  - a layer cut off during training;
  - a final skewed layer.

  It checks every value bit-exact and in order, about 72 000 checks. It counts
  every mechanism and fails any that never happened, and it checks build
  latency, flit density and full egress use.
- Block testbenches check cycle counts where the paper gives them: 15 sorter
  stages, n−1 tree cycles, 33 programming cycles and 3-cycle arbiter holds.

Run a testbench with Verilator, for example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb \
  rtl/lexi_pkg.sv tb/lexi_ref_pkg.sv tb/tb_lexi_top.sv && ./obj_dir/Vtb_lexi_top
```
