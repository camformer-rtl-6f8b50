# CAMformer: attention computed in a content-addressable memory

Transformer attention compares one query with every key, keeps the strongest matches and
mixes the matching value rows. If queries and keys are reduced to single bits, the comparison
becomes a count of matching bits: a Hamming similarity. A content-addressable memory (CAM)
computes that count for every stored row at once. In this design, each row of a 16 x 64
binary-attention CAM (BA-CAM) holds one binary key. The query is broadcast on the search
lines. Every cell compares its key bit with the query bit, and the matching cells share
charge onto the row's matchline. The matchline voltage is then the fraction of matching bits,
and a small ADC turns it into a number.

The rest of the chip is digital. It turns those numbers into a sparse attention result:

    A(q) = SoftMax( Top-32( q . K^T ) / sqrt(d_k) ) . V

- q and K are binary: the query is 64 bits, and there are up to n = 1024 keys of 64 bits each.
- V is BF16, with 64 values per key.
- Only the 32 best-scoring keys (fewer if a query asks for it) take part in the SoftMax and
  in the weighted sum of V rows.

This repository holds synthesizable SystemVerilog for the digital parts, and behavioural
models for the two analog parts (the CAM array and its ADCs). It also holds a self-checking
testbench for every block and an end-to-end testbench of the whole accelerator.

## The three stages

One query goes through three stages. The stages work as a coarse-grained pipeline: while
one query is being contextualized, the next one can be normalized and a third can be
searched.

| stage | what it does | main blocks |
|---|---|---|
| association | Scores the keys 16 at a time on the CAM. Keeps the best 2 of every group of 16. | `key_sram`, `query_buffer`, `ba_cam_array`, `sar_adc`, `fixed_scaler`, `score_accum`, `tile_top2` |
| normalization | Narrows the winners to 32. Turns their scores into probabilities. | `ptop_reg`, `bitonic_topk`, `softmax_lut`, `bf16_add`, `bf16_div`, `softmax_engine`, `output_buffer` |
| contextualization | Forms A as the sum of p_i times V_i over the 32 winners. | `value_sram`, `mem_ctrl`, `bf16_mac` (x8), `bf16_mul`, `context_stage` |

`camformer_top` connects the three stages. Its ports are the things the chip talks to:

- a key-load port, which stands in for a DMA engine;
- a query port, with the number of keys n the query sees and its final k (at most 32);
- a DRAM read port for V rows;
- the 64 x BF16 output A, with valid/ready;
- a `status` struct of activity and stall flags.

## From matchline to score

A CAM row stores 64 key bits. A search gives, for each row, the number of matching bits
m (0..64). The ADC reads the voltage m/64.

1. A 6-bit SAR ADC, one per row, produces `code = min(m, 63)`.
2. A fixed multiply-by-2 and subtract-64 gives the signed score `s = 2*code - 64`. This is
   the +-1 dot product of query and key: matches minus mismatches.

Scores lie in [-64, +62]. A perfect match (m = 64) saturates to 63, and so to +62: a 6-bit
code cannot hold 64. Only the very top score is affected, by one step. This keeps the
6-, 7- and 8-bit widths of the original datapath instead of widening the ADC.

If d_k is larger than 64, each key is searched in ceil(d_k/64) vertical segments.
`score_accum` adds up the partial scores. The default d_k = 64 needs one segment.

## The tile schedule

The 1024 keys are processed as 64 tiles of 16. A tile's keys are written into the CAM one
row per clock. The CAM is searched once, then the 16 ADCs convert. The
`association_stage` controller overlaps conversion with the next tile's programming:

    clock   0 ..16 : program tile t (16 rows, plus one clock of Key SRAM read latency)
    clock  17      : search tile t (the matchlines hold their level after this clock)
    clock  18 ..34 : program tile t+1   | ADCs convert tile t (7 clocks), scale,
                                        | accumulate, then top-2 of tile t
    clock  35      : search tile t+1

A tile costs 18 clocks per segment, so a full 1024-key query costs 1152 clocks. A search
waits while either of these is true:

- the ADCs are still busy;
- the previous tile's top-2 pair has not been taken by both consumers
  (`status.cand_stall`).

The key count n is chosen per query (`cfg_n_keys`, 1..1024; 0 means 1024). The key set
can therefore grow from query to query, as in causal decoding. ceil(n/16) tiles are
searched. In a partly filled last tile all 16 rows are searched, but rows at or beyond n
are marked invalid and never selected.

## Two-stage top-k and the PTop register

Ranking is split in two so that little score storage is needed. It also lets V rows be
fetched long before the final ranking is known.

1. **Stage 1, per tile.** `tile_top2` sorts the 16 scores with a bitonic network and keeps
   the best two. Each winner gets its global key index and a Value-SRAM slot
   (2*tile and 2*tile+1). A 1024-key query therefore has 128 stage-1 candidates and 128
   slots. Ties go to the lower key index.
2. **Stage 2, refinement.** `ptop_reg` collects the winners in a 64-entry register. When it
   fills up, a 64-input bitonic Top-32 network (`bitonic_topk`) keeps the best 32 and frees
   the other 32 entries. For 64 tiles this happens after tiles 32 and 48. The last tile of
   a query forces a final refinement, so there are 3 refinements per 1024-key query. The
   final 32 candidates wait in an output register until the SoftMax engine takes them.

**Runtime sparsity.** Each query carries its own k (`cfg_k`, 1..32; 0 means 32). It
travels with the query through the association stage to the PTop register. At the final
refinement, only the best k entries stay valid; the others get probability 0 and are
skipped by the MACs. Stage 1 and the Value-SRAM prefetch do not change with k.

If every candidate is kept, the result equals an exact Top-32 over those 128 candidates.
It is not always the exact Top-32 over all 1024 keys: a tile with three strong keys loses
its third one. This is intended, and the testbenches model it exactly.

## V prefetch and who owns the Value SRAM

Each stage-1 winner is also sent to the memory controller (`mem_ctrl`) when it appears.
The controller queues the key index and requests that V row from DRAM. Up to 16 reads
can be outstanding. The row comes back as 8 beats of 8 x BF16 (128 bits), in request
order, and is written into the winner's slot of the 16 KB `value_sram`. By the time the
final 32 are known, most of their rows are already on chip. Three out of four fetched
rows are never used; that is the price of hiding DRAM latency.

The Value SRAM holds the 128 rows of one query only. This gives the design's main
ownership rule:

- The first fetch of a new query is held back (`status.own_wait`) until
  `context_stage` signals `ctx_done` for the previous query.
- `ctx_done` also clears every row-written flag.
- Each row is tagged with a one-bit query parity.

As a result, the MACs never use a row left over from an earlier query. This applies even
to slots that the current, shorter query never writes.

The consequence is that, for one query, V fetching overlaps its own association and
normalization but not the previous query's contextualization. With one 128-bit DRAM beat
per clock, fetching the 1024 beats of a 1024-key query sets the steady-state rate. In the
end-to-end test this is about 1200 clocks per query. Tile scoring alone would allow 1152.

## SoftMax timing

`softmax_engine` takes the final 32 candidates.

- **Accumulate phase.** One candidate per clock, it reads exp(s/8) from a 256-entry BF16
  table (512 bytes; 8 = sqrt(64)). It keeps the value and adds it into a single BF16
  accumulator. The denominator is ready 34 clocks after the candidates are accepted.
- **Divide phase.** This starts once the output buffer is free. The 32 numerators stream
  into a pipelined BF16 divider, one per clock. The divider's latency is t_div = 12 clocks,
  so the 32 quotients are done 31 + t_div = 43 clocks later. The results are written to
  `output_buffer` together with the candidates' slots, and the buffer is marked full.

Invalid candidates (fewer than 32 real keys) get probability 0. The table entry for
address x (two's complement) is the BF16 value, rounded to nearest even, of exp(x/8).
It is stored in `rtl/softmax_exp_lut.hex` and read with `$readmemh`.

## Contextualization

`context_stage` starts when the output buffer is full. For each valid entry i it does the
following:

1. It waits until row slot_i of the Value SRAM is present for this query
   (`status.v_stall` while it waits).
2. It reads the row, 8 x BF16 per clock for 8 clocks.
3. It feeds 8 two-stage BF16 MAC units, which update 8 of the 64 BF16 accumulator
   entries: acc[j] += p_i * V_i[j].

The same accumulator entries come round only every 8 clocks. The 3-clock read-and-MAC
loop therefore never collides with itself. When all rows are done, A is offered on
`a_data`. When A is accepted, the output buffer is released and `ctx_done` pulses.

## Arithmetic

BF16 here means 1 sign bit, 8 exponent bits and 7 fraction bits, with these rules:

- normal numbers only;
- subnormal inputs and underflows become zero;
- overflow gives infinity;
- rounding is to nearest even;
- NaN is not handled.

The adder, multiplier and divider are separate units (`bf16_add`, `bf16_mul`, `bf16_div`).
The MAC rounds the product and the sum separately.

The SoftMax denominator is a single BF16 running sum. It therefore loses the smallest
terms once the sum is large. With 32 terms this costs a few percent on small
probabilities. The end-to-end reference models this rounding, so the comparison checks
the hardware and not the format.

## What follows the original design and what is this implementation's choice

These follow the original design:

- the 16 x 64 binary CAM with charge-sharing matchlines;
- 6-bit SAR ADCs and the 2*code - 64 scaling;
- the accumulation register for vertical tiling;
- bitonic top-2 per tile of 16, and the 64-entry potential-top register refined by a
  64-input Top-32 sorter;
- the 8 KB Key SRAM, the 512 B exponent table, and one BF16 accumulator plus a pipelined
  BF16 divider (31 + t_div);
- the 32 x BF16 output buffer, the 16 KB Value SRAM of 128 rows, 8 BF16 MACs and the
  64 x BF16 accumulator;
- V prefetch triggered by every stage-1 winner;
- the coarse-grained pipeline of three stages.

These are this implementation's choices:

- All handshakes, FIFO depths, cycle counts and state machines.
- The tile period of 18 clocks. The CAM search is one clock; the original gives no cycle
  count for programming or searching.
- The ADC saturating at 63, and one ADC per row. The original calls its SAR ADCs shared,
  but its block diagram shows 16 codes side by side.
- Runtime sparsity as a per-query k that travels with the query.
- exp(x/sqrt(d_k)) in the table. The original wording can be read as exp(x)/sqrt(d_k);
  that constant factor would cancel in the normalisation anyway.
- t_div = 12, and the divider algorithm (restoring, one quotient bit per stage).
- Tie-breaking by lower key index.
- The one-query ownership rule and the parity tags of the Value SRAM.
- PTop entries hold a key index and a slot besides the 8-bit score. They are wider than
  score-only entries would be.
- BF16 special-value handling.

Not built:

- the DMA engine, host CPU, co-processor and DRAM, which are outside the accelerator.
  `tb/dram_model.sv` is a behavioural DRAM for the testbenches.
- an integer-V mode that bit-slices the operands and shifts and adds per-slice results.
  It is only sketched in the original and is not part of the main configuration.
- multi-head operation. It uses one instance of this core per head, e.g. 16 for
  BERT-Large.

The CAM and ADC models are ideal. They have no noise, offset or nonlinearity, so they show
the function of the analog parts but nothing of their accuracy.

Throughput: the original design reports about 191 queries per millisecond at 1 GHz,
roughly 5200 clocks per query. This RTL needs about 1200 clocks per 1024-key query because
its CAM program and search cycle is short. Treat its cycle counts as those of this
implementation.

The stage balance also differs. In the original, contextualization is only slightly
faster than association. Here the 8 MACs need only 32 x 8 = 256 clocks per query, against
1152 for association. The limit in practice is the V traffic from DRAM, because the Value
SRAM is handed from query to query as a whole.

## Sizes and workloads

The defaults are d_k = d_v = 64, n = 1024 keys, CAM 16 x 64, top-2 per tile and top-32
overall. One BERT-Large head has n = 1024 and d_k = d_v = 64, and runs at these defaults.
Shorter sequences also fit, through `cfg_n_keys`:

- GLUE-style BERT inputs, with n <= 512;
- DeiT image transformers, with n = 197 tokens in 13 tiles.

`camformer_top` takes the parameters N_KEYS, DK and DV. The package `camformer_pkg` fixes
the CAM geometry, the score width, the top-k sizes and the number of MAC lanes.

## Files

- `rtl/camformer_pkg.sv`: shared constants and types. `cand_t` is a candidate: valid, score,
  key index, slot. `status_t` holds the activity flags.
- `rtl/<block>.sv`: one module per file. The opening comment of each file describes its
  interface and timing.
- `rtl/softmax_exp_lut.hex`: the exponent table.
- `tb/tb_<block>.sv`: a self-checking testbench per block. Each prints
  `TB_RESULT checks=N failures=M`.
  - `tb/bf16_ref_pkg.sv` is a real-number BF16 reference.
  - `tb/cand_ref_pkg.sv` is a reference top-k.
  - `tb/dram_model.sv` is a DRAM with latency and random stalls.
  - `tb/assoc_check.sv` is a timing monitor for the association stage.
- `tb/tb_camformer_workloads.sv` uses the same harness with the sequence lengths of the
  evaluated workloads: n = 1024 (a BERT-Large head), 197 (DeiT) and 512 (BERT on GLUE).
- `tb/tb_camformer_top.sv` runs the accelerator at its default size:
  - 8 queries (six over all 1024 keys, one over 121 keys and one over 313) against
    1024 random keys, with k = 32, 16 or 8 depending on the query;
  - random DRAM latency and back-pressure on the outputs.

  It compares every output with a reference computed in the testbench. It also counts how
  often each mechanism happens and fails if any count is zero. The mechanisms are tile
  searches, refinements, association stalls, ownership waits, output-buffer waits, V-row
  waits, and overlap of one query's search with another's division.

## Simulating

The hex file is read by the path `rtl/softmax_exp_lut.hex`, so run the simulation from the
directory that holds `rtl/` and `tb/`. Packages must be compiled first. To run one
testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_camformer_top \
      rtl/camformer_pkg.sv tb/bf16_ref_pkg.sv tb/cand_ref_pkg.sv \
      $(ls rtl/*.sv | grep -v camformer_pkg) \
      tb/dram_model.sv tb/assoc_check.sv tb/tb_camformer_top.sv
    ./obj_dir/Vtb_camformer_top +verilator+rand+reset+2

For another testbench, replace the top module and the last file. A testbench that uses no
helper can drop the helpers from the list. The full end-to-end run takes a few seconds.
Every testbench has a watchdog that ends the run with a failure if it hangs.
