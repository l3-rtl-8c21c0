# Decoding attention inside DDR4 DIMMs: a DIMM-PIM engine in SystemVerilog

During decoding, a large language model re-reads its whole key/value (KV)
cache once per generated token. For long outputs this cache grows to
terabytes. The matching work (score `q·K`, softmax, context `p·V`) does
only a few operations per byte read. Data movement limits it, not arithmetic.
This design moves that work into the memory that holds the cache: ordinary
DDR4 DIMMs whose DRAM chips carry a small multiply-accumulate unit beside
every bank, plus a processing unit on the DIMM's buffer chip.

The RTL implements the memory side of such a system:

* **bank PUs**: one per DRAM bank, reading the KV cache at internal bank
  bandwidth;
* **rank PU**: one per rank, on the buffer chip. It merges partial results,
  runs the softmax, re-arranges data between the host's and the PIM layout,
  and sequences the PIM commands;
* **rankset arbiter**: lets one group of ranks talk to the host while the
  others compute.

The host CPU, the GPUs and the PCIe/DDR PHYs are outside the design. The top
module brings their side out as plain request ports.

## 1. Organisation

```
chime_pim_top                      16 channels x 4 ranks (4 ranksets)
 |- rankset_arbiter                who owns the channel buses
 `- chime_rank  [rankset][channel]
     |- rank_pu                    on the DIMM buffer chip
     |   |- pim_request_decoder    host writes -> re-layout / jobs
     |   |- relayout_unit          host layout <-> PIM layout
     |   |- pim_controller         PIM command sequencer (two buses)
     |   |- adder_unit             sums chip partials
     |   |- softmax_unit           streaming softmax
     |   `- rank_sram              raw scores between passes
     `- pim_chip x 8               x8 DDR4 chips
         |- shared_buffer          query / probability broadcast
         `- 16 x (dram_bank + bank_pu)
```

`chime_pkg` holds the shared types:

* the command structs `int_cmd_t` and `ext_cmd_t`;
* the host request `host_req_t`;
* the saturating and exponential helpers.

All modules run on one clock. The DRAM command clock and the PU clock are
taken as the same; the timing parameters below are in that clock. Resets are
asynchronous and active low.

The default sizes follow the evaluated DDR4-3200 system:

* 16 channels with two dual-rank DIMMs each;
* 8 chips per rank, each with 4 bank groups × 4 banks;
* head dimension 128;
* t_CCD = 4, t_RCD = t_RP = 22.

## 2. Where the data lives

**Tokens across banks.** A job covers one group of KV heads for `len`
tokens. Token `t` lives in bank `t mod 16` of every chip, in "chunk"
`c = t div 16`. So the 16 banks of a chip each work on a different token of
the same chunk. Word `k` of that token sits at bank address
`base + c·WPT + k` in the K region, and at `base + V_OFF + c·WPT + k` in the
V region. `V_OFF` is half the bank, and `WPT` is the number of 64-bit words
per token and chip.

**Heads across chips (coarse-grain re-layout).** One head of 128 elements is
spread over `N_HC` chips:

* chip `c` serves head `c div N_HC`;
* it holds elements `r, r+N_HC, r+2·N_HC, …` of that head, with
  `r = c mod N_HC`;
* so `WPT = 128 / (4·N_HC)`.

Two settings matter:

* **MHA** models (every query head has its own KV head): `N_HC = 8`. One
  head covers the whole rank and `WPT = 4`.
* **GQA-8** models (8 query heads share a KV head): `N_HC = 1`. Each chip
  holds a whole head, `WPT = 32`, and `N_GQA = 8` queries share every key
  that is read.

**Bytes inside a chip (fine-grain re-layout).** On a normal DIMM, a 64-bit
bus beat carries four 16-bit elements. Each element is split over two x8
chips, so no chip would ever see a whole number. The re-layout unit instead
sends the two bytes of element slot `j` of a chip word in beats `2j`
(low byte) and `2j+1` (high byte) of that chip's 8-beat burst. The `beats`
output of `relayout_unit` shows the resulting bus. Writing K/V/query data
goes host layout → PIM layout. Reading the output goes back.

## 3. One attention job and its two buses

Each chip has two independent paths, and each path carries at most one
command per burst slot of `T_CCD` clocks:

* the **internal bus**, from the rank PU's command to all bank PUs at once;
* the **external bus**, the chip data lane to and from the buffer chip.

`pim_controller` overlaps the two paths.

| phase | internal bus (all banks) | external bus (chip ↔ rank PU) |
|---|---|---|
| QLOAD | – | `PIM_WR_R` (adder-tree mode), `PIM_WR_SB` × N_GQA·WPT query words |
| SCORE | `PIM_MAC` × WPT per chunk (one token per bank, `last` on the final word) | `PIM_RD_RB` × 16·N_GQA/4 per chunk, reading chunk c while chunk c+1 computes |
| FIN | – | softmax unit computes 1/Σ per head and query |
| CTX | `PIM_MAC` × WPT per chunk (accumulate p·v) | SRAM read → normalise → `PIM_WR_SB` × 16·N_GQA/4 probabilities for the next chunk |
| CTXRD | – | `PIM_RD_RB` × 16·N_GQA·WPT partial context words into the adder |

Bank-PU result buffers and the probability slots of the shared buffer are
double-buffered by chunk parity. Each stream may therefore run at most one
chunk ahead of the other:

* a score MAC for chunk `c` waits until chunk `c−2` has been read;
* a context MAC for chunk `c` waits until the probabilities of chunk `c` have
  been written.

When the MAC stream enters a new DRAM row, it waits `T_RCD` clocks for the
first row and `T_RP + T_RCD` for later rows. A row is `ROW_WORDS` = 128
words, the 1 KB page of an x8 chip.

**No bubbles.** The MAC stream needs `WPT` slots per chunk. The result stream
needs `16·N_GQA/4` slots per chunk. The internal bus never waits when the
second is not larger than the first:

* MHA with `N_HC = 8` gives 4 against 4;
* GQA-8 with `N_HC = 1` gives 32 against 32.

This is the rule by which the head mapping is chosen: as many chips per head
as the external bus allows. Keeping `N_HC = 8` for a GQA-8 model gives 4
against 32. The controller counts the lost slots in `bubbles`. It counts only
after the MAC stream has started, so filling the pipeline is not counted.
`row_stalls` counts slots spent opening rows, and `cycles` gives the job
length.

The rank-PU side in SCORE:

1. The adder sums the `N_HC` chip partials of each head, one cycle after
   `chip_rvalid`.
2. The softmax unit folds the scores into its running statistics.
3. The SRAM stores the raw scores.

In CTX, the stored scores come back and are normalised one cycle later. The
probabilities are then written into the shared buffers. After CTXRD, the
adder holds the context vector of every head and query. The host reads it
back through the re-layout unit.

## 4. Numbers

The paper's machine computes in FP16. This RTL uses fixed point, which is the
largest departure from the paper. The formats:

* K, V, Q and scores: Q8.8 two's complement;
* probabilities: unsigned Q0.16;
* multiply-accumulate: 40-bit accumulators;
* results: saturated back to 16 bits.

The `1/√d` scale is taken as folded into the query by the host.

The softmax is computed online, burst by burst. For each head and query it
keeps a running maximum `m` and a sum `l = Σ exp(x − m)`. It rescales `l`
whenever `m` rises. This gives the same result as a per-chunk softmax followed
by a cross-chunk correction.

`exp(−d)` is computed as `2^(−d·log2 e)` from a 32-entry table, using
`round(65536 · 2^(−f/32))` and a shift. The final 1/l is one integer division
per head and query. Against a floating-point reference, outputs agree to
within 0.1 + 3 % for data in ±0.5 (q, k) and ±4 (v).

## 5. Host side and ranksets

The host writes requests as ordinary memory writes (`host_req_t`):

* `REQ_WR_KV`: one 32-element burst of a token's K or V block. After the
  last burst, the rank PU writes `WPT` re-laid words into the token's bank.
* `REQ_WR_Q`: a query block.
* `REQ_START`: starts a job over `len` tokens at K base `base`.
* `REQ_RD_OUT`: one output burst of one query.

`req_ready` stays low while the rank writes banks or computes. A rank either
talks to the host or computes.

A **rankset** is the rank with the same index on every channel. Ranks on one
channel share its bus, so `rankset_arbiter` grants the channel buses to one
rankset at a time:

* the grant goes only to a rankset that asks (`xfer_req`) and is not
  computing;
* it is held while the request stays up, then passes round-robin.

The other ranksets keep computing meanwhile. `overlap` counts transfer cycles
during which some other rankset was busy. Round-robin is this design's
choice; the paper leaves the schedule to host software.

## 6. Sizes and what they hold

| parameter | default | paper |
|---|---|---|
| N_CHANNELS × N_RANKSETS | 16 × 4 | 16 × 4 |
| N_CHIPS, N_BK | 8, 16 | 8, 16 |
| E_H, N_HC, N_GQA | 128, 8, 1 (MHA) | same; GQA-8 uses 1, 8 |
| T_CCD, T_RCD, T_RP | 4, 22, 22 | 4, 22, 22 |
| BANK_WORDS | 16 384 words (128 KB) | 256 MB per bank (2 TB in all) |
| MAX_TOK (per job) | 32 768 | – |

The bank depth is the one scaled size. A 2 TB memory array cannot be held by
a simulator. With 16 384 words, the whole top models 1 GiB:

* one rank holds 32 768 token slots of one head (K and V);
* one job can run up to 32 768 tokens.

That covers the mean request length of every trace the paper uses. The
lengths are from its trace table; the mean plus two standard deviations is at
most about 29 700 tokens (OpenR1).

It does not cover whole requests. With KV bytes per token from the model
table (layers × KV heads × 128 × 2 × 2 B):

* a mean OpenR1 request of OPT-66B needs 30 GB;
* for QWEN-72B it needs 4.2 GB;
* for GPT-175B it needs 60 GB.

The paper's 2 TB holds 33 to 477 of these. The scaled model holds only the
Dolphin-short requests of OPT-66B (one request) and QWEN-72B (seven). Setting
`BANK_WORDS` to 2^25 gives the paper's capacity in the RTL; only the
simulator's memory prevents it.

## 7. Departures and omissions

* Fixed point instead of FP16 (section 4).
* One rank computes one head group per job. Assigning heads and layers to
  ranks is the host's business and is not modelled.
* The alignment-predicting scheduler is host software and is not built. It
  forms sub-batches using random-forest latency predictors.
* GPU work and PCIe transfers are not modelled either. The rankset arbiter
  only shows the communication/computation overlap at the memory side.
* `PIM_LD_SB` (bank → shared buffer) is implemented in the chip and tested
  there, but the sequencer does not use it. Queries and probabilities come
  from the rank PU with `PIM_WR_SB`.
* The host request format, the command encodings, the result-buffer read
  order and the two-slot double buffering are this design's choices.
* DRAM refresh and bank-group timing other than t_CCD are not modelled.
* `dram_bank` is a behavioural array with a one-cycle read, not a DRAM macro.

## 8. Simulation

Each block has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=… failures=…` line. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_chime_rank \
          rtl/chime_pkg.sv tb/tb_chime_rank.sv -o sim && obj_dir/sim
```

| testbench | what it shows |
|---|---|
| tb_bank_pu, tb_pim_chip | score dot products, context accumulation, slots, WR_R clearing, LD_SB, RD_RB latency |
| tb_relayout_unit | both head mappings, byte placement on the bus, onload round trip |
| tb_adder_unit, tb_softmax_unit | chip sums; softmax against floating point incl. masked lanes and a moving maximum |
| tb_pim_request_decoder | request → DRAM_WR addresses, query store, job handshake, output read |
| tb_pim_controller | full command stream; 0 bubbles for MHA, bubbles (184) when GQA-8 keeps N_HC = 8 |
| tb_chime_rank | one MHA rank end to end against a floating-point softmax(qK)V (501 cycles for 45 tokens, 0 bubbles) |
| tb_rank_pu | the GQA-8 mapping end to end: 8 queries × 8 heads, 0 bubbles |
| tb_chime_pim_top | 2 channels × 3 ranksets: grant waits, re-layout, rankset overlap, no bubbles, row stalls, a masked last chunk; fails if any mechanism never happened |
| tb_workload_mha | one rank at its default sizes running a 413-token job, the mean Dolphin-short request length for an MHA model: 0 bubbles, 1237 cycles (3.0 cycles per token per rank) |
| tb_workload_gqa | one rank with the GQA-8 mapping (QWEN-72B heads) running a 413-token job for 8 heads × 8 queries: 0 bubbles, 25 005 cycles |

### Sizes actually simulated

A full-size run uses the same flow as `tb_chime_pim_top`, with `N_CH = 16`,
`N_RS = 4` and the parameter list on `chime_pim_top` removed. It elaborates
64 ranks × 8 chips × 16 banks = 8192 bank PUs and banks. Verilator turns
that into several hundred C++ files, and a single-threaded build had done
less than half of them after 20 minutes. So no full-size run has been
completed, and none is part of the regression.

The largest configuration checked end to end in the regression is
`tb_chime_pim_top`:

* 2 channels × 3 ranksets, so 6 ranks, 48 chips and 768 banks of 2048 words;
* 45-token jobs.

Every other parameter in it is at its default. A single rank has been run with the default
chip count and bank depth (`tb_workload_mha`, `tb_workload_gqa`). The per-rank logic is the same
at every size; only the number of instances and the bank depth change. The
rank-level tests cover both head mappings (MHA and GQA-8).
