# Fast-SSC polar decoder with merged operations

A polar code of length N is decoded by walking a binary tree of depth
log2(N). Each node at stage S receives 2^S log-likelihood ratios (LLRs, α)
from its parent. It derives LLRs for its left child (operation **F**), waits
for the left child's hard decisions (partial sums, β), derives LLRs for its
right child (operation **G**), and finally combines both children's partial
sums into its own (operation **C**). Successive-cancellation (SC) decoding
performs every one of these steps in turn. A Fast-SSC decoder shortens the
walk: it recognises subtrees with a known structure (all frozen, all
information, repetition, single parity check, ...) and decodes them in one
step.

This design goes one step further. It **merges pairs and triples of operations
that a Fast-SSC program executes back to back into a single clock cycle**. It
also stores the small low-stage vectors so that such merged steps can read and
write everything they touch in one memory access. The result is the same
decoder output with 18–33 % fewer time steps than plain Fast-SSC, measured on
codes of length 1024.

The default configuration is:

| Parameter | Value | Meaning |
|---|---|---|
| `N` | 1024 | code length |
| `PE` | 64 | processing elements; one memory word holds 2·PE values |
| `QI` | 6 | internal LLR width; LLRs are kept in [−31, 31] |
| `QC` | 5 | channel LLR width |

LLRs have one fractional bit (the Q(6,5,1) scheme). Every size is a parameter
or a package constant.

## Tree, stages and the parallelism threshold

A node at stage S holds 2^S LLRs. With PE = 64, the datapath handles 2·PE =
128 LLRs per cycle, so nodes split into two kinds:

- **High stages** (S > log2 PE, i.e. S = 7..10): the node spans
  M = 2^(S−1)/PE memory words. An operation on such a node takes M cycles,
  one word per cycle. F and G on one word produce PE output LLRs, which is half
  a word.
- **Low stages** (S ≤ 6): a node has at most 64 LLRs. The whole node fits in
  one word, so any operation on it takes one cycle. Without merging, most of
  the hardware would sit idle.

Merging exploits this idle hardware. Two consecutive operations on a chain of
small nodes, for example an F on a 64-LLR node followed by an F on its 32-LLR
left child, use 32 + 16 lanes. They therefore fit in one cycle if the second
operation takes its inputs straight from the first.

## Operation set

Every instruction carries an opcode, the stage S of the node it works on, and
a `dst` bit that says which β unit receives the result (see below).

**Basic operations** (one per cycle, or one per word at a high stage):

| op | action |
|---|---|
| F | left-child LLRs, min-sum: sign(a)·sign(b)·min(\|a\|,\|b\|) |
| G | right-child LLRs: b + (1−2β)·a, saturated |
| G0 | G with β = 0, used when the left child is all-frozen |
| C | partial sums [β_l ⊕ β_r, β_r] |
| C0 | C with β_l = 0 |
| P-R1, P-01 | G with a Rate-1 right child decoded by hard decision, then C (P-01: left child Rate-0) |
| P-RSPC, P-0SPC | G with an SPC right child, then C (P-0SPC: left child Rate-0) |
| Rep | repetition node: every bit equals the sign of the sum of the LLRs |
| SPC | single parity check node: hard decisions, then the least reliable bit is flipped if the parity is odd |
| ML | 4-bit node with two information bits; exhaustive search over the 4 codewords |
| RepSPC | 8-bit node: Rep left child, SPC right child |
| END | stop |

**Merged operations:**

| op | merged sequence | written to memory |
|---|---|---|
| F×2 | F then F on the left child | both results |
| G0×2 | G0 then G0 | last result only |
| C×2, C×3 | 2 or 3 chained combines up the tree | last result only |
| C0×2, C0×3 | same, with Rate-0 left children | last result only |
| G-F | G then F on the right child | both results |
| F-G0 | F then G0 on the left child, whose own left child is Rate-0 | G0 result only |
| F-Rep | F then the Rep decision of the left child | left child's partial sums |
| Rep-RepSPC | 16-bit node: Rep left child, RepSPC right child | node partial sums |
| Rep-Rate1 | 8-bit node: Rep left child, Rate-1 right child | node partial sums |
| Rate0-ML | 8-bit node: Rate-0 left child, ML right child | node partial sums |

A merged operation keeps an intermediate result only when a later instruction
reads it again. For example, F×2 keeps the first F because the left child's
LLRs are needed for its later G; G0×2 does not.

### Where merged operations may run

- G0×2 and F-G0 run on nodes of up to 2·PE inputs, i.e. up to a one-word node
  at stage log2(PE)+1.
- F×2 and G-F run on nodes of up to PE inputs.
- C/C0 cascades end at a node of at most PE bits.
- F-Rep is used for Rep children of 8, 16 and 32 bits.

### The instruction program

The instruction program is computed offline from the frozen-bit pattern:

1. Build the Fast-SSC program in tree order.
2. Apply the merging passes, in this order:
   - G-F and F-G0;
   - F×2, formed from the tail end of each run of F operations, so a G-F is
     not broken up;
   - F-Rep;
   - G0×2;
   - C/C0 cascades, formed from the head of each run.
3. End the program with END.

The testbench package `tb/fssc_tb_pkg.sv` contains this compiler
(`compile_prog`), together with a bit-exact reference decoder that runs
unmerged programs.

## Memory organisation

There are four storage blocks, plus the instruction memory:

- **Channel array.** It holds N/(2·PE) = 8 words of 2·PE channel LLRs (5 bits
  each), loaded half a word per cycle. The root stage reads this array
  directly, and its values are sign-extended to 6 bits on the way out.
- **α memory.** It holds one group of words per high stage below the root,
  stacked from stage log2(N)−1 downwards:

  | Stage | Words | Word addresses |
  |---|---|---|
  | 9 | 4 | 0–3 |
  | 8 | 2 | 4–5 |
  | 7 | 1 | 6 |
  | 6 and below | 1, shared (the *packed word*) | 7 |

- **β memory.** It has two units with the same layout as the α memory:
  - unit 0 receives the partial sums of left children;
  - unit 1 receives those of right children.

  A combine step therefore reads β_l and β_r at one address in one cycle. The
  instruction's `dst` bit selects the unit written.
- **Codeword memory.** The root-stage combine writes the decoded codeword here
  (8 words). It is read PE bits at a time in natural order.

### Half-word banks at high stages

A word has two banks of PE elements each. For a node at stage S spread over M
words:

- Bank 0 of its words holds the first half of the node and bank 1 the second
  half. Reading word k gives PE aligned pairs (a[i], a[i + 2^(S−1)]), which is
  exactly what F and G need.
- The child at stage S−1 has M/2 words. Cycle k of the parent's operation
  writes bank ⌊k / (M/2)⌋ of child word k mod (M/2). The same bank selection
  picks which half of the β words belongs to the current step for G and C.

### The packed low-stage word

All stages at or below log2(PE) share one α word and one β word. Each stage
has a fixed field:

| Stage | Field |
|---|---|
| 6 | elements 0–63 |
| 5 | 64–95 |
| 4 | 96–111 |
| 3 | 112–119 |
| 2 | 120–123 |

A low-stage operation reads the whole word. It writes only its target fields,
using a per-element write mask.

Because a node and all its descendants live in the same word, a merged
operation finds every input in one read, and all its outputs go out in one
masked write. This layout also raises memory utilisation: one word per
low stage would waste most of each word.

## Datapath

The datapath is purely combinational between the memory read ports and the
write ports. Every unit sees the same α word and the same two β words, and
the opcode selects which unit drives the α write and which drives the β
write.

### F unit (`fssc_f_unit`)

The F unit has PE min-sum lanes, split into groups of PE/2, PE/4, …, 4 and 4
lanes (32, 16, 8, 4, 4 for PE = 64).

- **High stage:** the lanes compute PE independent F operations on the word.
- **Low stage:** the group of 2^(S−1) lanes computes F on the stage-S field.
- **F×2:** a multiplexer in front of the next smaller group switches its
  inputs from the memory word to the outputs of the group above, so the
  second F runs in the same cycle.

The group of lane i always writes packed position i + 64, so the output
already sits at the right field.

### G0 unit (`fssc_g0_unit`)

The G0 unit has the same structure as the F unit, with G at β = 0 in every
lane. It implements G0 and G0×2.

For G0×2 and F-G0 on a one-word node, the datapath applies one more G0 to the
PE lanes of the F or G0 unit and writes the PE/2 results at the stage
log2(PE)−1 field.

### Merged branch units

- **G-F (`fssc_gf_unit`), F-G0 (`fssc_fg0_unit`), F-Rep (`fssc_frep_unit`):**
  each is two arithmetic steps chained inside the low-stage word.
- **C unit (`fssc_c_unit`):**
  - It has one combine per stage, chained so that the result of stage t
    becomes β_r for stage t+1.
  - Each later combine takes its β_l from unit 0 at the field of its own
    stage. C×2 and C×3 therefore finish in one cycle.
  - At a high stage, the unit combines one half word of each β unit into a
    full word.
- **G path (`fssc_g_path`):** the original G → (Sign | SPC) → C chain. It
  serves G itself and the P- operations.
  - SPC at a high stage is only allowed on a one-word node, because the
    parity check must see every bit in one step.

### Special-node cluster (`fssc_leaf_unit`)

- Rep decoders exist for every field size; the sum is kept at full
  precision.
- There is one PE-wide SPC (Wagner) decoder with a valid mask. Ties on the
  smallest magnitude go to the lowest index.
- There are fixed-size units for ML (4 bits), RepSPC (8 bits), Rep-Rate1 and
  Rate0-ML (8 bits), and Rep-RepSPC (16 bits).

**Rep-RepSPC (`fssc_reprepspc`).** This unit avoids a serial chain of two
repetition decisions:

- The Rep decision on F of the 16 inputs is computed.
- At the same time, two complete RepSPC decoders run on the right child's
  LLRs computed for β = 0 and for β = 1.
- The Rep decision then selects one of them through a multiplexer.

Each RepSPC uses the same trick inside itself, with two SPC decoders.

## Controller and timing (`fssc_controller`)

The controller reads the instruction memory combinationally at `pc`. Its
timing is:

- An instruction on a low-stage node takes one cycle.
- An instruction on a high-stage node takes M = 2^(S−1)/PE cycles, counted by
  k.
- There are no bubbles between instructions, so the decode time in cycles is
  the sum of the step counts of the program.

In each cycle the controller issues:

| Output | Value |
|---|---|
| α read address | channel word k at the root; base(S)+k at a high stage; the packed word otherwise |
| child write address | base(S−1) + (k mod M/2), with bank ⌊k/(M/2)⌋; the same address is used for the β read |
| β write address | base(S)+k at a high stage; the packed word at a low stage |
| codeword write | replaces the β write when S is the root stage |

Two assertions check the stage limits of the merged operations and of
high-stage SPC.

Reset is asynchronous and active low. The handshake is:

- `start` begins decoding from address 0;
- `busy` is high while instructions execute;
- `done` pulses for one cycle when END is reached.

## Top level (`fssc_decoder`) and its use

| Port | Purpose |
|---|---|
| `im_we`, `im_waddr`, `im_wdata` | load the program (`instr_t` = {opcode, 4-bit stage, dst}) |
| `ch_we`, `ch_waddr`, `ch_wdata[PE]` | load the channel LLRs, PE per cycle; half word h holds LLRs h·PE … h·PE+PE−1 |
| `start`, `busy`, `done` | decode handshake |
| `cw_raddr`, `cw_rdata[PE]` | read the codeword, PE bits per address in natural order |

The codeword is x = u·G_N, the encoded form. The information bits are the
entries of x at the information positions after re-encoding. The decoder
itself does not extract them.

## Measured behaviour

The following cycle counts are for decoding one frame at the default size.
They come from codes built with a polarization-weight reliability order,
because the standard 5G reliability table is not reproduced here.

| Code | Fast-SSC ops / cycles | merged ops / cycles | time-step saving |
|---|---|---|---|
| (1024, 256) | 165 / 215 | 111 / 161 | 25.1 % |
| (1024, 512) | 201 / 252 | 142 / 193 | 23.4 % |
| (1024, 768) | 159 / 209 | 121 / 171 | 18.2 % |

For comparison, the published figures for the 5G codes at PE = 64 are:

- savings of 26.9 %, 25.8 % and 19.9 % in time steps;
- latencies of 168, 198 and 181 cycles (0.39 / 0.46 / 0.42 µs at 430 MHz).

The trend and size match. Remaining differences come from the different
frozen sets.

## Departures and open points

- Memories are register arrays with combinational reads and masked writes,
  not SRAM macros. No clock frequency or area is claimed.
- The instruction encoding, the instruction memory depth (512), the I/O ports
  and the exact field offsets in the packed word are this design's own.
- A stand-alone SPC opcode is added for SPC nodes that are not reached
  through P-RSPC.
- Rep and SPC nodes larger than PE bits are split by the compiler into
  smaller operations. The datapath has no word-serial Rep/SPC.
- F-G0 runs on nodes of up to 2·PE inputs, following the merged-operation
  size table rather than the sentence that limits it to low stages.
- The C-G / C0-G merges discussed as candidates are not part of the
  instruction set, which is consistent with the final operation list.
- Only PE = 64 has been simulated, although the RTL is parameterised.

## Verification

Each module under `rtl/` has a self-checking testbench in `tb/`. Each one
prints `TB_RESULT checks=… failures=…` and has a watchdog. The tests cover:

- the arithmetic units against node-level reference functions;
- the memories against shadow copies;
- the controller's addresses against an independent model of the memory map;
- the complete decoder, which:
  - decodes noiseless and AWGN frames of three rates and a hand-made pattern
    covering every special node;
  - checks each result bit-exactly against a software decoder that runs the
    *unmerged* program;
  - checks the cycle count;
  - counts every opcode and datapath mechanism, failing if any never occurs.

To run one test with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/fssc_pkg.sv rtl/fssc_mem_pkg.sv tb/fssc_tb_pkg.sv tb/tb_fssc_decoder.sv \
  --top-module tb_fssc_decoder -Mdir obj && ./obj/Vtb_fssc_decoder
```

Replace `tb_fssc_decoder` with any other `tb_*` module to run that unit's
test. The full-size decoder test completes in well under a second.
