# Fast-SSC polar decoder with sequence repetition (SR) nodes

This is synthesizable SystemVerilog for a successive-cancellation polar
decoder of the Fast-SSC family. It decodes whole subtrees of the SC tree at
once when they are *sequence repetition* (SR) nodes. The design follows the
SRFSC decoder architecture of "Implementation of a High-Throughput Fast-SSC
Polar Decoder with Sequence Repetition Node". The defaults are that
publication's example: N = 1024, P = 64 processing elements, Q(6,4,0)
quantisation, 13-bit instructions and one SR module.

## Structure

| File | Role |
|---|---|
| `rtl/srfsc_pkg.sv` | LLR type (sign and magnitude, 6 bits), instruction type, f/g and saturating-add functions |
| `rtl/srfsc_decoder.sv` | top level: the modules below, with load ports for instructions, repetition sequences and channel LLRs |
| `rtl/controller.sv` | walks the decoding tree by following the instruction list; issues f, g, leaf and SR operations; derives Cmd1..Cmd4 |
| `rtl/instr_mem.sv` | instruction memory: one instruction per leaf, in visiting order |
| `rtl/repseq_mem.sv` | repetition sequence memory, addressed by NodeType (entry 0 = all-zero sequence) |
| `rtl/llr_mem.sv` | channel LLRs (4 bits) and internal LLRs of every tree level |
| `rtl/proc_module.sv`, `rtl/pe.sv` | P processing elements (f or g), plus Rate-0/Rate-1 hard decisions |
| `rtl/psn.sv` | partial sum network: combines the leaf estimates, gives the partial sums for g and the final codeword |
| `rtl/sr_module.sv` | SR node decoder (three steps, below) |
| `rtl/sr_xor.sv` | Step 1: copies the node LLRs once per repetition sequence and applies the sequence to their signs |
| `rtl/sm_adder_tree.sv` | Step 1: 7-layer sign-magnitude adder tree; its output layer is selected by Cmd1 |
| `rtl/cs_tree.sv` | Step 2: 7-layer compare-select (f) tree; gives each SPC node's f value and least reliable position (Cmd4) |
| `rtl/parity_check.sv` | Step 2: hard decisions, plus a bit flip in every SPC node whose parity is violated |
| `rtl/sr_bits_gen.sv` | Step 2: expands the source estimate back to the SR node with the chosen sequence |
| `rtl/mag_adder_tree.sv` | Step 3: 4-layer magnitude adder tree; gives the reliability sum of each sequence (Cmd2) |
| `rtl/max_tree.sv` | Step 3: 2-layer tree that picks the sequence with the largest sum (Cmd3) |

## SR nodes and the instruction word

An SR node of length 2^SRstage has a source node of length 2^SourceStage at
its right-hand end; the source node is Rate-0, Rate-1, a repetition node or
an SPC node. The node's estimate is the source estimate repeated
2^(SRstage−SourceStage) times. Each copy is XORed with one bit of a
repetition sequence. When the node's left-hand descendants include
repetition nodes, there are 2^SeqNum candidate sequences.

Each instruction is 13 bits. From the MSB down its fields are:

| Field | Bits | Meaning |
|---|---|---|
| SRstage | 3 | log2 of the node length |
| SourceStage | 3 | log2 of the source node length |
| FroNum | 2 | frozen bits in the source node: 0 Rate-1, 1 SPC, 2 or 3 = 2 or 4 parallel SPC nodes |
| SeqNum | 2 | log2 of the number of repetition sequences |
| NodeType | 3 | address in the repetition sequence memory |

Rate-0 leaves are coded as FroNum = 2, SourceStage = 1, SeqNum = 0. Rate-1
leaves are coded as FroNum = 0, SeqNum = 0, SourceStage = SRstage. Both go
to the processing module, which bypasses the SR module. Any other
instruction goes to the SR module. Every SR node must satisfy
2^(SRstage+SeqNum) ≤ 2P. When SRstage ≠ SourceStage, it must also satisfy
2^(SourceStage+SeqNum) ≤ 16.

In the SR module:

1. **Step 1.** The source LLRs for each sequence are computed:
   α_src[k] = Σ_m (−1)^{s[m]} α[k·2^D + m], with D = SRstage − SourceStage.
   These sums come from the adder tree layer 7 − Cmd1.
2. **Step 2.** Each SPC node of each sequence is decoded. The SPC node length
   is 2^(SourceStage+1−FroNum). The CS tree layer is 7 − Cmd4. For
   FroNum = 3, the four SPC nodes share a parity, taken as the sign of the sum
   of their four f values (a 2-layer adder tree).
3. **Step 3.** Runs in parallel with Step 2. It sums |α_src| for each
   sequence and picks the largest sum. The estimate of that sequence is the
   output.

The formulas are Cmd1 = 7 − (SRstage − SourceStage), Cmd2 = 4 − SourceStage,
Cmd3 = 2 − SeqNum, and Cmd4 = 7 (FroNum = 0) or 6 − SourceStage + FroNum.

## Schedule and timing

The controller follows the SC order. Each stage costs these cycles:

| Stage | Cycles |
|---|---|
| f or g on a node of length 2^l | max(1, 2^l / 2P) |
| Rate-0 or Rate-1 leaf | 1 |
| SR node | 1 + SR_LAT = 3 |

- The SR module has three pipeline registers: after the Step-1 adder tree,
  after the CS tree, and after the Step-3 adder tree. This makes
  SR_LAT = 2.
- While an SR node is in the SR module, a counter holds the controller.
- After each leaf, the PSN combines the new estimate with the stored left
  siblings in the same cycle.

Cycles per frame at N = 1024 and P = 64 (from start to done):

| Code | Instructions | Cycles | Published |
|---|---|---|---|
| P(1024,256) | 33 | 189 | 186 |
| P(1024,512) | 40 | 224 | 222 (41 instructions) |
| P(1024,768) | 38 | 208 | 200 |

The testbench builds its codes with a polarization-weight construction,
not the 5G reliability sequence. So the frozen sets, the instruction lists
and the cycle counts differ slightly from the published ones. At the
published 109.6 MHz, 224 cycles would give about 501 Mbps at rate 1/2.

## Using the decoder

1. Hold `rst_n` low, then release it.
2. Write the instruction list with `imem_we`/`imem_addr`/`imem_data`.
3. Write the repetition sequences with `rs_we`/`rs_addr`/`rs_data`.
   - `rs_addr` is the NodeType.
   - Sequence l goes in bits [l·P +: P].
   - Bit m of a sequence is the sign flip of the m-th LLR of each block.
4. Write the channel LLRs, 2P per row, with `ch_we`/`ch_row`/`ch_llr`.
   Each LLR is 4-bit sign and magnitude.
5. Pulse `start`. `busy` stays high while the frame is decoded.
6. `done` pulses once at the end. `codeword` then holds the decoded
   codeword x = u·G, and `cw_valid` is high.

Steps 2 and 3 are needed only when the code changes.

## Verification

Each module has a self-checking testbench `tb/tb_<module>.sv`, which prints
`TB_RESULT checks=… failures=…`. `tb/srfsc_ref_pkg.sv` is a bit-accurate
reference. It contains the code construction, an instruction compiler, an
encoder, an SR-node model and a whole-decoder model that also counts cycles.

`tb_srfsc_decoder` runs the top at its default size on all three codes,
with one noise-free frame and four AWGN frames for each code. It checks:

- the codeword against the model;
- the cycle count against the model;
- each noise-free frame against the codeword that was sent.

It also counts every mechanism: f, g, multi-chunk steps, Rate-0, Rate-1,
SR nodes, SR waits, Step-1 sums, sequence choice, bit flips and each FroNum
value.

Plain Verilator 5 can run any testbench. For example:

    verilator --binary --timing --assert -Irtl -Itb rtl/srfsc_pkg.sv rtl/*.sv \
        tb/srfsc_ref_pkg.sv tb/tb_srfsc_decoder.sv --top-module tb_srfsc_decoder

## Choices of this design (not given in the publication)

- **Memory, processing module and PSN.** The publication only outlines
  these.
  - Internal LLRs are stored as rows of P per level, read 2P at a time.
  - The PSN keeps one register of partial sums per tree level.
- **SR module pipeline.** The publication says registers were inserted but
  not where they go. The positions and SR_LAT = 2 are this design's choice.
- **Fixed-point details.**
  - Adders saturate at ±31.
  - A zero result is given a positive sign.
  - Ties in the compare-select trees go to the lower index.
- **Odd parity for FroNum = 3.** It comes from the sign of the sum of the
  four SPC f values. The exact rule is in the original SR-node reference,
  not in the publication.
- **FroNum width.** The text gives FroNum two ranges: 0..P/2, and 0..3 for
  the example. The 2-bit field was used, which gives a 13-bit instruction.
- **Frame handling.** Frames are decoded one after another. Loading does not
  overlap decoding.
- **Memory sizes.** The instruction memory holds 256 entries. The repetition
  sequence memory holds 8 node types, with entry 0 fixed at zero.
