# Two-staged adaptive SCL polar decoder (TA-SCL), RTL

Successive-cancellation list (SCL) decoding of polar codes with a CRC
corrects more errors as the list grows. But a list of 32 paths is slow and
costly to run on every frame. At useful signal-to-noise ratios, most frames
are already decoded correctly by a list of two.

TA-SCL uses that fact with two decoders in a fixed arrangement:

* **D_s** is a small, very fast decoder with a list of 2. It decodes every frame, one after the other, at a constant rate.
* **D_l** is a large-list decoder (list of 32). It only gets the frames whose D_s result fails the CRC.

An LLR buffer holds the channel values of failed frames until D_l is free.
An output buffer puts the results back into input order, so every frame
leaves after the same fixed delay.

If too many frames fail close together, the LLR buffer fills up. The next
failing frame is then not queued: its (wrong) D_s result is output as it is.
The buffer size ζ and the speed ratio β = C_l / C_s between the two decoders
set how often that happens. The design chooses them so that the effect on
the frame error rate stays negligible.

This RTL implements D_s in full, the two buffers, and the control that ties
them together. D_l is outside the design: the top level has a port group for
it. A behavioural stand-in for the testbenches is in `tb/dl_model.sv`.

## Configuration

The defaults are the main configuration: code P1 with N = 1024 and K = 512,
including a 24-bit CRC.

| Parameter | Default | Meaning |
|---|---|---|
| `N` | 1024 | code length |
| `P` | 64 | interface parallelism: one word is 2P LLRs or 2P decoded bits, so a frame is N/2P = 8 words (C_rw = 8 cycles) |
| `Q` | 6 | channel / LLR buffer LLR width |
| `ZETA` (ζ) | 2 | frames the LLR buffer can hold for D_l (plus one for the frame in D_s) |
| `C_S` | 203 | D_s latency in cycles, which is also its frame period |
| `C_L` | 647 | D_l latency in cycles per frame |
| `QS`, `QPM` (package) | 7, 8 | LLR and path-metric width inside D_s |
| `CRC_R`, `CRC_POLY` | 24, 0x864CFB | CRC length and generator (CRC-24A) |

Derived sizes at the defaults:

* β = 647/203 ≈ 3.19.
* The LLR buffer holds 3 frames: 24 words of 768 bits.
* The output buffer holds floor((ζ+1)·C_l / C_s) + 1 = 10 frames: 80 words of 128 bits.
* The fixed latency from first input word to first output word is C_s + (ζ+1)·C_l + C_rw + 1 = 2153 cycles.

## D_s: the list-2 decoder (`ds_decoder`)

D_s splits the N-bit decoding tree at stage 4:

* **above stage 4**, ordinary SC computation;
* **below stage 4**, N/16 sub-codes of 16 bits each, decoded as whole blocks.

### High stages: one cycle per tree node

The nodes above the sub-codes are visited depth-first, and each visit takes
one cycle.

* **PE arrays.** Each path has its own array of N/4 processing elements (`pe_array`). At the root, whose N/2 LLRs are the same for both paths, the two arrays each take half.
* **What one visit computes.** In one visit an array produces both:
  * the F outputs (min-sum) for the left child;
  * both possible G outputs for the right child, one for partial sum 0 and one for 1.
* **No extra cycle for the right child.** When the walk later reaches the right child, it picks the G output that matches the partial sums decided in the meantime.

This "look-ahead" halves the node count, leaving N/16 − 1 cycles for
the whole upper tree.

### Low stages: special nodes

The frozen positions inside a 16-bit sub-code depend on the code. The
sub-code is cut into at most three *special nodes*, whose codes can be
decoded in one step:

| Node | Code | Frozen pattern | Two candidates returned |
|---|---|---|---|
| Rate-0 | all-zero | all frozen | the zero word only |
| Rate-1 | any word | none frozen | hard decision; hard decision with its least reliable bit flipped |
| Rep | repetition | all but the last | the all-0 and the all-1 word, better first |
| SPC | even parity | only the first | best even-parity word; runner-up |
| Rep2 | two repetitions, even and odd positions | all but the last two | best pair; the better of the two single swaps |
| SPC2 | two parity checks, even and odd positions | the first two | best pair; the better of the two single swaps |

Rep2 and SPC2 are product codes. Rows T−2 and T−1 of the polar transform
cover the even and the odd bit positions, so both halves are decoded at the
same time.

The split (`ta_scl_pkg::decompose16`) is greedy from the left. It takes the
longest aligned node whose frozen pattern is one of the above. For the
nested frozen patterns of practical polar codes this gives:

* 1 node for 0, 1, 2, 14, 15 or 16 frozen bits;
* 2 nodes for 7, 8 or 9 frozen bits;
* 3 nodes otherwise.

Any other pattern that needs more than three nodes raises `cfg_err`.

**Decoding a sub-code.** One cycle per special node:

* Every candidate path receives the node's LLRs. `ta_scl_pkg::node_llr` computes them from the sub-code's 16 LLRs and that path's own decisions so far.
* An `snd_unit` per candidate returns the two best codewords and their path-metric penalties.
* The penalty of a codeword is the sum of |LLR| over the bits where it disagrees with the hard decision. The hard decision is 1 for LLR ≤ 0.

Candidates are not pruned between nodes: 2 paths become 4, 8, then 16.
After the last node of the sub-code:

* `lm_sorter` picks the two smallest metrics in one more cycle (ties go to the lower index);
* each survivor's CRC register advances by the sub-code's information bits (`crc_update`);
* the survivors' path state (tree LLRs, partial sums, decided bits) is copied into the two path slots in one clock edge.

A sub-code that is wholly frozen or wholly information is a single node.
It needs no sort, and takes one cycle.

### Latency

```
C_s = N/2P  +  (N/16 − 1)  +  Σ over sub-codes ( M_SN + C_sort )
       load     upper tree      special nodes + sort (0 for all-frozen / all-info)
```

For P1 the sub-codes fall into groups of 32, 13, 2 and 17 that take 1, 2, 3
and 4 cycles:

* 32·1 + 13·2 + 2·3 + 17·4 = 132;
* C_s = 8 + 63 + 132 = 203.

The testbench frozen set has these per-sub-code frozen counts. The decoder
measures exactly 203 cycles on it.

### Interface timing

* **Input.** A frame enters as 8 words on `in_valid`/`in_llr`. The first word is accepted when `in_ready` is high.
* **`done` cycle.** `done` comes C_s cycles after the first word. In that cycle:
  * `crc_ok` is valid;
  * the first of 8 result words appears on `out_data`, and the others follow one per cycle;
  * `in_ready` is high again, so the next frame can start in that same cycle.
* **Output choice.** The output is the surviving path that passes the CRC with the smaller metric. If neither passes, it is the smaller-metric path, and `crc_ok` is 0.

## Buffering, overflow and reordering (`ta_scl_top`)

This is the least obvious part of the design.

### LLR buffer

* **Storage.** `llr_buffer` is a one-write, one-read RAM of ζ+1 frame slots.
* **Writes.** Every arriving frame is written into a free slot while D_s loads it.
* **Slot release.** If D_s succeeds, the slot is released at D_s `done`. If it fails and the frame is kept, the slot stays busy until D_l has read it.
* **D_l queue.** A small FIFO holds the slots waiting for D_l, in order.
* **D_l reads.** D_l reads its frame at its own start, 8 words on `dl_llr_valid` one cycle behind the read address.

### Keep-or-drop rule

At D_s `done` for a frame that failed the CRC, the control computes the work
D_l still has:

```
W = (cycles left on the frame in D_l) + (queued frames) · C_l
```

* If W ≤ ζ·C_l, the frame is queued (or started at once if D_l is idle).
* Otherwise it is dropped and `overflow` pulses.

This is a cycle-exact form of the "hazard state" of the Markov model behind
TA-SCL:

* The buffer is full (ζ frames wait or run).
* D_l cannot finish its current frame within the next D_s period.
* Keeping the new frame would need a slot that will not be free in time.

In that state the frame in D_s is the one given up. D_l is never
interrupted.

### Output buffer and fixed latency

`output_buffer` is a true dual-port RAM of `FRAMES` = 10 frame slots.

* **Port A** writes every D_s result and performs the reads for output.
* **Port B** writes D_l's results. Each one overwrites the D_s result of the same frame, which makes a kept frame's output the large-list decision.

The worst case sets the delay:

1. A frame is kept behind a full queue.
2. It waits for the whole queue before D_l starts on it.
3. Its result is ready C_s + (ζ+1)·C_l after its first input word, plus C_rw to write it.

Every frame is therefore read out exactly C_s + (ζ+1)·C_l + C_rw cycles
after its first input word. A FIFO of due times schedules the reads.

* **Sizing.** With frames one C_s apart, floor((ζ+1)·C_l / C_s) + 1 slots cover that delay.
* **No port clash.** For the default sizes the read of a frame never coincides with a D_s write on port A. An assertion guards this.
* **Output signals.** Each frame leaves as 8 words on `out_valid`/`out_data`, and `out_sof` marks the first.
* **Dropped frames.** A dropped frame leaves with its failing D_s result.

### D_l port group

| Direction | Signal | Meaning |
|---|---|---|
| out | `dl_start` | pulse: D_l takes a new frame |
| out | `dl_llr_valid`, `dl_llr[2P]` | the frame's 8 LLR words, starting the cycle after `dl_start` |
| in | `dl_out_valid`, `dl_out_data[2P]` | the 8 result words. The control expects the first word exactly C_l cycles after `dl_start` and the next `dl_start` no earlier than the first result word. |

Status outputs: `ds_fail` (with D_s done), `overflow`, `cfg_err`.

## Where this RTL departs from the published architecture

* **D_l is not included.** Its insides are not part of this design. The testbench model `dl_model` decodes with plain min-sum SC and keeps the exact C_l timing.
* **List size 1 is not built.** The list-size-1 mode of D_s (no sorting) is absent, so configuration D4 (C_s = 170, ζ = 6) cannot be run.
* **Special nodes are time-multiplexed.** They are decoded one per cycle on a reused bank of eight `snd_unit`s, not by three feed-forward stages of SND blocks. The cycle count is the same.
* **`lm_sorter` finds only the two smallest metrics** (two minimum searches), not a full radix-16 sort.
* **Memories are registers.**
  * Each path keeps the F and both G outputs of every stage, so list pruning is a plain copy.
  * The buffers are behavioural RAM arrays; a chip would use SRAM macros.
* **Path metrics saturate at 255** and are not renormalised.
* **Channel LLRs are 6 bits.** D_s computes with 7-bit LLRs and sign-extends the 6-bit channel words it shares with the LLR buffer.
* **The CRC generator and bit order were chosen here** (CRC-24A, MSB first, zero start). So were the split of each 16-bit pattern into special nodes, and the frozen set of the testbenches. The published work gives only the per-sub-code cycle counts for its codes.
* **The control details are this design's own:** the keep-or-drop rule in cycles, the fixed output delay, the handshakes, and the D_l port timing.
* **Code P2 runs with overrides.** It has the same N but C_s = 187 and C_l = 651. It runs with `C_S=187, C_L=651` and its own frozen set; see `ta_scl_top_d2_tb`.
* **Code P3 runs with overrides.** It is N = 256 with an 8-bit CRC. It runs with `N=256, C_S=53, C_L=168, CRC_R=8`; see `ta_scl_top_d3_tb`.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `pe_array_tb` | F / G outputs against integer formulas |
| `snd_unit_tb` | both candidates of every node type and length against exhaustive search over the node's code |
| `lm_sorter_tb` | indices of the two smallest metrics, including ties and few valid candidates |
| `crc_update_tb` | chained 16-bit updates against a bitwise CRC-24A, and zero remainder for a word with its CRC |
| `llr_buffer_tb`, `output_buffer_tb` | random traffic against an array model, registered read timing, read-old collisions |
| `ds_decoder_tb` | full N = 1024 frames: latency exactly 203 cycles, decoded word of clean and noisy frames, CRC failure on pure noise |
| `ta_scl_top_tb` | the whole decoder at its default size |
| `ta_scl_top_d2_tb` | the same test for the high-rate code: K = 768, C_s = 187, C_l = 651, 11-frame output buffer |
| `ta_scl_top_d3_tb` | the same test for the short code: N = 256, 8-bit CRC, C_s = 53, C_l = 168 |

`ta_scl_top_tb` sends 30 frames back to back. Ten of them are pure noise,
including a burst of six, and it checks:

* D_s finishing every frame exactly C_s cycles after its first word;
* D_s failures and overflows on exactly the frames a reference buffer model predicts;
* the output order and the exact output delay;
* D_s results for good frames and D_l results for kept bad frames.

It also counts each mechanism and fails if one never occurs:

* D_s success;
* a D_l start from idle;
* queueing behind a busy D_l;
* overflow;
* out-of-order completion.

`tb/tb_polar_pkg.sv` holds the reference code, independent of the RTL:

* frozen sets;
* polar encoder;
* CRC;
* noisy LLR generation;
* an SC decoder.

Building a testbench with plain verilator (from the directory that holds
`rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/ta_scl_pkg.sv tb/tb_polar_pkg.sv tb/ta_scl_top_tb.sv --top-module ta_scl_top_tb
./obj_dir/Vta_scl_top_tb
```

The full-size top-level test simulates about 8,500 cycles in a few seconds.
The D_s register file is large, so synthesis of `ds_decoder` at N = 1024 is
slow.

## Files

* `rtl/ta_scl_pkg.sv`: types, widths, F/G arithmetic, node classification and decomposition, node-LLR computation.
* `rtl/pe_array.sv`, `rtl/snd_unit.sv`, `rtl/lm_sorter.sv`, `rtl/crc_update.sv`: D_s datapath units.
* `rtl/ds_decoder.sv`: the list-2 decoder D_s.
* `rtl/llr_buffer.sv`, `rtl/output_buffer.sv`: the two buffers.
* `rtl/ta_scl_top.sv`: the TA-SCL decoder.
* `tb/*_tb.sv`: testbenches.
* `tb/tb_polar_pkg.sv`: reference helpers.
* `tb/dl_model.sv`: D_l stand-in.
