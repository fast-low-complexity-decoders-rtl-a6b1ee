# A fast simplified successive-cancellation decoder for low-rate polar codes

A polar code of length N is decoded by walking a binary tree. Every node of
length Nv receives Nv soft values (LLRs) from its parent. It passes Nv/2 of
them to its left child, gets back Nv/2 hard bits, computes LLRs for its right
child, gets Nv/2 more bits, and combines the two halves into its own Nv-bit
estimate. A plain successive-cancellation decoder visits every node down to the
single bits, which makes it slow. The "fast" SSC approach stops the descent at
subtrees whose frozen-bit pattern has a known structure. Such a subtree is
decoded in one step by a dedicated circuit.

This design is a 1024-bit decoder of that kind. It has P = 512 processing
inputs and 6-bit LLRs. Low-rate codes have many subtrees that are almost
all-frozen, and the design adds dedicated decoders for three such patterns:
Rep1, 0RepSPC and 001. They sit next to the usual repetition (Rep), single
parity check (SPC) and mixed types. The decoder runs a program: a list of
instructions made offline from the code's frozen set, one instruction per tree
operation. It runs that program once per frame. Meanwhile the next frame loads
into a second channel buffer, and the previous estimate can be read from a
second codeword buffer.

## Node operations

Every instruction names one operation on one node of length Nv = 2^log2nv.
The LLR vector of the node is α, and its halves are α_a (first Nv/2) and
α_b (last Nv/2).

| opcode | what it does | cycles |
|---|---|---|
| F | left-child LLRs: `sign(a)·sign(b)·min(|a|,|b|)` (min-sum) | ⌈Nv/P⌉ |
| G | right-child LLRs: `b + a`, or `b − a` where the left child's bit is 1 | ⌈Nv/P⌉ |
| G0R | G with an all-zero (rate-0) left child | ⌈Nv/P⌉ |
| COMB | node estimate `[βl ⊕ βr, βr]` | ⌈Nv/P⌉ |
| COMB0R | Combine with an all-zero left child | ⌈Nv/P⌉ |
| R1 | G, hard decision (rate-1 right child), Combine | ⌈Nv/P⌉ |
| RSPC | G, SPC decoding of the right child, Combine | ⌈Nv/P⌉+4 |
| 0SPC | as RSPC with a rate-0 left child | ⌈Nv/P⌉+4 |
| REP | repetition node, Nv ≤ 32: all bits = sign of the LLR sum | 1 |
| REP1 | Nv = 8: Rep on the left half, rate-1 right half | 1 |
| REPSPC | Nv = 8: Rep on the left half, SPC on the right half | 1 |
| 01 | Nv = 4: rate-0 left pair, rate-1 right pair | 1 |
| 001 | Nv = 8: rate-0 left half, a 01 node on the right | 1 |
| 0REPSPC | Nv = 16: rate-0 left half, a RepSPC node on the right | 1 |

A frame's decoding time is the sum of these counts over its program. No cycles
are lost between instructions. At N = 1024 a node of the root level takes two
cycles for F, G and Combine types. Every node below the root takes one.

Some of these nodes are shortcuts:
- **Rep1** decodes the repetition bit from F of its two halves. Both possible G
  outputs, for bit 0 and for bit 1, are computed in parallel. The repetition
  bit selects which hard decisions to keep. This is one cycle instead of the
  F–Rep–G–Combine sequence.
- **0RepSPC** and **001** are right children decoded straight from the G
  output of their parent, so the parent's G and Combine are one instruction.

SPC decoding takes the hard decisions. If their parity is odd, it flips the
least reliable bit, choosing the lowest index on a tie.

## Processing unit

`processing_unit` is one datapath that executes every opcode. It has
LANES = P/2 = 256 lanes, because F and G each consume two LLRs per output.

- **m0** chooses between the stored left-child estimate β0 and all zeros. Its
  output feeds G and the left input of Combine. The zero choice turns G and
  Combine into their rate-0 forms.
- **G's output** feeds four right-child decoders: Sign (rate-1), the pipelined
  SPC decoder, a RepSPC decoder and a 01 decoder.
- **m3** chooses the right-child bits for Combine: one of those four decoders
  or the stored β1.
- **Leaf decoders** for Rep, Rep1, RepSPC and 01 read the node's LLRs
  directly.
- **m2** outputs the node estimate. It takes a leaf decoder's result or the
  Combine output.
- **m1** outputs F or G as new LLRs.

Everything is combinational except `spc_node`. It is a four-stage pipeline:
1. Hard decisions and magnitudes.
2. Minimum, its index and parity within groups of 16 lanes.
3. The overall minimum index and parity.
4. The corrected bits.

The controller holds the SPC instruction's inputs for those cycles and stores
the result in the last one. That is where the "+4" of the SPC types comes
from.

## Memories and their layout

All storage is built from registers. There are no SRAM macros.

- **α memory** (`alpha_ram`) has N−1 LLRs. A node of length Nv = 2^s keeps
  its LLRs at addresses [Nv, 2Nv). Each level of the tree therefore has its own
  region. A right child overwrites its finished left sibling. The root's LLRs
  are never copied; they are read from the channel buffer.
- **β memory** (`beta_ram`) has two banks of N bits, one for left children
  and one for right children. A node's estimate sits at [Nv, 2Nv) of its
  side's bank. When a parent combines, it reads both banks at its children's
  level. Each instruction carries a `side` bit that says which bank its result
  goes to.
- **Channel memory** (`channel_ram`) has two buffers of N 5-bit LLRs.
- **Codeword memory** (`codeword_ram`) has two buffers of N bits. The root's
  Combine writes here instead of to the β memory. `beta_router` makes that
  choice from the node level.
- **Instruction memory** (`instr_ram`) has 1024 entries.

A read of a node with Nv > P takes ⌈Nv/P⌉ chunks. Chunk c presents
α[c·LANES + j] and α[Nv/2 + c·LANES + j] to lane j. Writes use the same
pairing: the lower half of a Combine result goes to the first half of the
node, and the upper half to the second.

`alpha_router` feeds the processing unit from the channel buffer at the root
level, and from the α memory below it. Channel LLRs have 5 bits and the
internal ones have 6, with the same single fractional bit, so widening is a
sign extension. All arithmetic saturates symmetrically to ±31.

## Program format

`instr_t` (package `fssc_pkg`) is packed as `{last, side, log2nv[3:0], op[3:0]}`:

- `op`: the opcode, numbered as in the table above (F = 0 … 0REPSPC = 13).
- `log2nv`: the node length.
- `side`: the β-memory bank for the result.
- `last`: marks the final instruction (the root's Combine, or a root leaf).

The program for a code is produced by walking its tree:
1. Classify each subtree by its frozen pattern.
2. For an internal node, emit F, then the left child's program.
3. Emit G (or G0R), then the right child's program.
4. Emit COMB (or COMB0R).
5. Merge G + right child + Combine into R1, RSPC, 0SPC, 001 or 0REPSPC where
   the right child allows it.

The reference model in `tb/fssc_model_pkg.sv` (`code_model::emit`) is exactly
this generator. It is a good starting point for preparing programs for other
codes.

## Interfaces and timing

`fast_ssc_decoder` (defaults N = 1024, P = 512, DEPTH = 1024):

- **Program load.** Raise `imem_we`, with `imem_addr` and `imem_data` set;
  one instruction is written per clock.
- **Channel input.** 32 LLRs (160 bits) come in per cycle on `in_llr`, with a
  `in_valid`/`in_ready` handshake. A word is taken on a clock edge where both
  are high. After 32 words the buffer is marked full and loading switches to
  the other buffer. `in_ready` stays low while that buffer still holds an
  undecoded frame. The source is stalled only when it is two frames ahead.
- **Decoding.** `start` begins decoding of the next full buffer. `busy` is
  high for exactly the program's cycle count. `done` pulses in the last cycle.
  The channel buffer is then released.
- **Output.** After `done`, `cw_buf` names the codeword buffer that holds the
  new estimate. It is read combinationally 32 bits at a time through
  `cw_rd_buf` and `cw_rd_addr`. The next frame writes the other buffer.

Reset (`rst_n`) is asynchronous and active low. It clears the controller and
loader state. Memory contents are not reset.

Loading a frame takes 32 cycles, fewer than decoding one. So with frames
streamed back to back, the decoder runs continuously.

## Departures from the published design and known limits

- **SPC length.** RSPC and 0SPC nodes are limited to Nv ≤ P, which is a
  right-child SPC of at most 256 bits. The published cycle count ⌈Nv/P⌉+4
  allows longer SPC nodes, but how the minimum search would span chunks is not
  described. At N = 1024 this only excludes a root node made of an SPC half.
  An assertion in the controller flags such a program.
- **Design choices not taken from the source:**
  - the memory layout (level-indexed regions, two β banks);
  - the instruction encoding;
  - the split of the SPC pipeline;
  - the valid/ready handshake and buffer flags;
  - the 32-bit codeword read port;
  - the instruction depth of 1024.
- **Saturation** is symmetric at ±31. The behaviour of the most negative
  6-bit code is not specified by the source.
- **Published latencies.** The published codes' latencies (193/157 cycles for
  (1024,342) and 204/165 for (1024,512), unaltered/altered) come from frozen
  sets that are not listed. This design reproduces the per-operation cycle
  rule behind those numbers, not the numbers themselves. Codes of the same
  sizes built with the Bhattacharyya bound (see below) take 204 and 206 cycles.
  That is close to the published unaltered trees.
- **Length-2048 codes** need the memories at N = 2048. The RTL is
  parameterized for that, but it has been simulated only at N = 1024 and
  smaller.
- **Clock rate, area and power** of the published FPGA and 65 nm
  implementations are results of a physical flow. The RTL makes no claim
  about them.

## Verification

Each module has a self-checking testbench `tb/<module>_tb.sv`. Each one prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. The references are
computed independently in the testbench, mostly with the integer functions of
`fssc_model_pkg` (min-sum F, G, Combine, Rep, SPC and so on).

- **Node decoders.** `rep_node`, `rep1_node`, `repspc_node` and `ml01_node`
  are checked against the step-by-step SC reference. `ml01_node` is checked
  against an exhaustive maximum-likelihood search.
- **SPC decoder.** `spc_node` is fed a new vector every cycle and must answer
  exactly 4 cycles later.
- **Processing unit.** `processing_unit` runs every opcode at every supported
  size on a 32-lane instance.
- **Memories and routers** are checked against array models.
- **Controller.** `controller` checks the per-instruction cycle counts, write
  enables, `done` and the buffer swaps cycle by cycle.
- **Whole decoder.** `fast_ssc_decoder_tb` runs the decoder at its default
  size. Random codes are drawn so that every node type occurs. For each code
  it generates the program and streams frames in with gaps, so that stalls
  happen, while frames are also being decoded. Noise-free frames must decode
  to the sent codeword. Noisy frames must match the reference decoder bit for
  bit. Every frame must take exactly the predicted number of cycles. The
  testbench counts every opcode, a stalled input, a multi-chunk operation and
  loading during decoding. It fails if any of them never happened.
- **Published code sizes.** `fast_ssc_workload_tb` decodes a (1024,342) and a
  (1024,512) code at the default size. Their frozen sets come from the
  Bhattacharyya bound of an erasure channel, with erasure probability 0.6 and
  0.5 respectively. Each frame is checked as above.

To simulate with Verilator 5 (from the repository root):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/fssc_pkg.sv tb/fssc_model_pkg.sv tb/fast_ssc_decoder_tb.sv \
  --top-module fast_ssc_decoder_tb -o sim && obj_dir/sim
```

Replace the testbench name to run any other test. The full-size decoder test
builds in well under a minute and runs in a fraction of a second.
