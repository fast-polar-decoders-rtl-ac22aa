# A programmable Fast-SSC polar decoder in SystemVerilog

A polar code of length N = 2^n is decoded by walking a binary tree.
- Each node of the tree is a shorter polar code, called a constituent code.
- A node passes soft information (LLRs, called *alpha*) down to its children.
- It passes hard decisions (partial sums, called *beta*) back up.

Plain successive-cancellation (SC) decoding visits every one of the 2N-1 nodes, one bit at a time, which makes it slow. Fast simplified SC (Fast-SSC) decoding stops early. Many subtrees form a constituent code that can be decoded in one step, straight from its input LLRs:
- a rate-0 node (all bits frozen) whose output is known to be zero;
- a rate-1 node (no frozen bits), decoded by taking signs;
- a repetition code;
- a single-parity-check (SPC) code;
- a few small special cases.

Merging such nodes with the work their parents do shortens the schedule further. This is the big gain for high-rate codes: a (32768, 29492) code decodes in about two thousand clock cycles here, against roughly N·log N operations for plain SC.

This RTL is such a decoder. It is not hard-wired to one code. An offline compiler turns a code's frozen-bit pattern into a short program of node functions, and the hardware executes that program once per frame. A new code only needs a new program.

The default build is the configuration the design was developed for:
- N = 32768;
- P = 256, meaning 256 f/g elements working on 512 LLRs per cycle;
- 7-bit internal LLRs and 5-bit channel LLRs, written (7,5,1) in (W, WC, fractional bits) form;
- 32 channel LLRs per input beat;
- a 256-bit estimate read port;
- room for 3000 instructions.

## The instruction set

An instruction is 5 bits: a 4-bit function and 1 bit saying whether the node it finishes is a left or a right child (`polar_pkg::instr_t`).

Notation for the table:
- `α` is the node's input LLR vector, of length 2^s. The node sits at *stage* s.
- `β_l` and `β_r` are its children's decisions.
- f(a,b) = sign(a)·sign(b)·min(|a|,|b|).
- g(a,b,u) = b + a when u = 0, and b − a when u = 1. The result saturates to ±(2^(W−1)−1).

| code | function | what it does | tree move |
|---|---|---|---|
| 0 | F | α_left = f(α) | down to the left child |
| 1 | G | α_right = g(α, β_l) | down to the right child |
| 2 | COMBINE | β = (β_l ⊕ β_r, β_r) | up |
| 3 | COMBINE-0R | COMBINE with β_l = 0 (rate-0 left child) | up |
| 4 | G-0R | α_right = g(α, 0) | down to the right child |
| 5 | P-R1 | β_r = sign(g(α, β_l)), then COMBINE, in one step (rate-1 right child) | up |
| 6 | P-RSPC | β_r = SPC(g(α, β_l)), then COMBINE (SPC right child) | up |
| 7 | P-01 | P-R1 with β_l = 0 | up |
| 8 | P-0SPC | P-RSPC with β_l = 0 | up |
| 9 | ML | exhaustive maximum-likelihood decision for one length-4 code | up |
| 10 | REP | repetition code up to length 16: every bit = sign(Σα) | up |
| 11 | REP-SPC | length-8 node: repetition left child, SPC right child | up |

The program is the decoder tree's functions in depth-first order. The hardware needs no other information about the tree:
- It starts each frame at stage n.
- F, G and G-0R lower the stage by one.
- Every other function raises it by one.
- The function that raises the stage above n ends the frame.

The unusual entries are:

- **SPC** (single parity check).
  - Take hard decisions.
  - If their parity is odd, flip the least reliable one, i.e. the one with the smallest |α|.
  - A compare-select tree finds that bit.
- **ML.** The one length-4 code in the supported codes that is neither rate-0, rate-1, repetition nor SPC.
  - Its generator is given as rows 0001 and 0100. The design reads these as "first and third input bits frozen": u = (0, a, 0, b).
  - In the decoder's bit-reversed order its codewords are 0000, 1111, 0101 and 1010. Four correlations and a comparator tree pick the best.
  - That reading of the generator rows is an assumption. The alternative reading gives a code of the same size, with a different mapping.
- **REP-SPC.** A length-8 node whose left half is a repetition code and whose right half is an SPC code. It is decoded in one combinational step:
  - four f elements feed a small repetition decoder;
  - at the same time, eight g elements produce both candidate right-child inputs, for repetition bit 0 and for bit 1;
  - each candidate goes through its own SPC decoder;
  - the repetition bit selects one result.

The companion program compiler is the function `PolarModel::exec` in `tb/polar_model_pkg.sv`. It recognises node types in this order:

1. rate-0
2. rate-1
3. repetition
4. SPC
5. REP-SPC
6. ML

A node that matches none of these is split. Before emitting anything for a split node, the compiler tries the merged forms: P-R1, P-RSPC, P-01, P-0SPC and G-0R.

## Data layout

### Bit-reversed vectors

All vectors are kept in bit-reversed order. As a result, the two inputs of every f or g element are neighbours: α[2i] and α[2i+1]. Element i's output lands at position i, whatever the length of the node.

COMBINE follows the same pattern, writing β[2i] = β_l[i] ⊕ β_r[i] and β[2i+1] = β_r[i]. No multiplexing depends on the node length.

### Words and memory map

The datapath works on words of 2P LLRs, or 2P bits for beta. A node of stage s takes max(1, 2^s / 2P) words, so one instruction occupies the datapath that many cycles. The exceptions are ML, REP and REP-SPC, which always take one cycle.

Every stage 1 … n−1 owns a fixed block of words, even when its vectors are much shorter than a word. This wastes a little memory but keeps routing simple. Stage n−1 starts at word 0, stage n−2 follows it, and so on; `polar_pkg::stage_base` gives the formula. For N = 32768 and P = 256 this is 71 words.

| memory | organisation | written with | read as |
|---|---|---|---|
| channel RAM | 2P/BUS banks × (2N/2P) rows × BUS·WC bits; two frames, one per half | one bank per input beat | one row of all banks (2P LLRs) |
| alpha RAM | two memories of P LLRs × 71 words | the P outputs of one F/G word, alternating memories | both memories together (2P LLRs) |
| beta RAM | a left and a right memory of 2P bits × 71 words | a whole word, into the memory chosen by the child bit | a P-bit half of the same word from both memories |
| codeword RAM | N/2P words of 2P bits | the root's β, one word per cycle | RDW-bit slices |
| instruction RAM | 3000 × 5 bits | host write port | one instruction per cycle |

The root's input, stage n, is read from the channel RAM. Its output goes to the codeword RAM.

The alpha and beta memories are synchronous: the read data appears one cycle after the address. Each memory has a bypass register. When the word being read is written in the same cycle, the register supplies the new data. The instruction that follows a write can therefore read its result without a bubble.

## The pipeline

The controller (`controller.sv`) issues one word per cycle through two stages:

1. **Issue.** The current stage and word index go to the alpha and beta routers. The routers turn them into RAM read addresses.
2. **Execute.** The RAM data arrive at the processing unit, the function runs, and the result is written. F/G results go to the alpha RAM. All other results go to the beta RAM, or to the codeword RAM at the root.

Instructions follow each other back to back, so a frame takes one cycle per word of each instruction, plus one cycle of pipeline fill.

### The processing unit

The processing unit (`processing_unit.sv`) is arranged around four multiplexers:

- **m0** forces β_l to zero for the "0R"/"0x" functions.
- **m1** selects the f or the g result as the new alpha.
- **m3** feeds COMBINE with one of three inputs: the child's stored β_r, the sign of g (P-R1), or the SPC decision on g (P-RSPC).
- **m2** selects what is written to the beta RAM: the REP, REP-SPC or ML decision, or the COMBINE output.

The COMBINE output also goes straight to the codeword RAM.

### SPC nodes longer than one word

An SPC child longer than P bits arrives over several cycles, P LLRs at a time. The SPC decoder handles it in steps:

- For each word, it writes the uncorrected hard decisions.
- It keeps a running parity and the position of the least reliable bit seen so far.
- Whenever a word contains a new minimum, the processing unit saves that word's COMBINE result.

After the last word, the controller inserts one correction cycle. If the overall parity is odd, the saved word is rewritten with the offending bit flipped. This costs one extra cycle per multi-word SPC node.

## Interfaces and timing

All signals are synchronous to `clk`. `rst_n` is an asynchronous, active-low reset.

- **Program.** Load the program while `run` is low (or before the first frame):
  - Write instruction i with `instr_we`, `instr_addr = i` and `instr_data`.
  - Then raise `run`.
  - To switch codes, drop `run`, wait for the frame in flight to end, reload, and raise `run` again.
- **Channel input.** Send `BUS` LLRs per beat on `ch_data` with `ch_valid`/`ch_ready`. A beat transfers when both are high.
  - A frame is N/BUS beats, in channel order. That is 1024 beats at the defaults.
  - Two frames can be buffered. While the decoder works on one, the next is loaded.
  - `ch_ready` drops only when both halves are full.
- **Estimate output.**
  - When a frame is decoded, `est_valid` rises and the codeword estimate sits in the codeword RAM. Bit j is the decision for LLR j.
  - Read it RDW bits at a time: `est_rd_data` shows slice `est_rd_addr` one cycle after the address.
  - Pulse `est_release` when done.
  - If the next frame reaches its root write before the release, the decoder stalls until then.

### Cycle counts

The cycle count of a frame follows exactly from its program:

> 1 + Σ over instructions of words(instruction) + number of multi-word SPC nodes

For codes constructed here with a noise variance of 0.1936 (about 4.5 dB for these rates), the results are:

| code | instructions | cycles per frame | cycles reported for the original design |
|---|---|---|---|
| (32768, 29492) | 1239 | 2029 | 2847 |
| (32768, 27568) | 2203 | 3059 | 3631 |

The difference from the original design's figures has two causes:

- The code construction is different. Frozen-bit sets depend on the construction method, and the tree changes with them.
- This SPC decoder has no internal pipeline registers (see below).

Loading a frame takes 1024 cycles, so at these rates loading is fully hidden behind decoding.

## How this RTL relates to the original design

These parts follow the published architecture:
- the twelve functions, the 5-bit instruction and the program-driven controller;
- the block structure: instruction RAM, controller, channel loader, channel RAM, alpha and beta routers, alpha RAM, beta RAM, processing unit and codeword RAM;
- the two-frame channel RAM with 16 banks of 128 × 160 bits;
- the alpha RAM built from two P-wide halves with a bypass register;
- the left/right beta RAM read by half words;
- the 512-bit-write, 256-bit-read codeword RAM;
- the four-level growing-width repetition adder tree;
- the REP-SPC structure;
- the restriction of the ML block to one length-4 code;
- the processing unit's multiplexer arrangement.

These parts are choices made here, because the published description does not fix them:
- opcode values;
- the memory address map;
- the two-stage issue/execute pipeline;
- the valid/ready handshakes and the estimate release/stall rule;
- the ML bit ordering;
- tie-breaking, where ties go to the lowest index or the first candidate.

Known departures:
- **SPC latency.** The original design puts pipeline registers inside the SPC compare-select tree. It gets zero extra cycles for length ≤ 8, one for ≤ 64, two for ≤ 256, and N_v/P + 4 cycles for multi-word codes. Here the tree is combinational: one word per cycle plus one correction cycle. The decisions are the same, but the cycle counts are lower and the critical path through g → SPC → COMBINE is longer than in the original.
- **Beta RAM bypass.** The beta RAM has a bypass register, like the alpha RAM. The original mentions one only for alpha. The back-to-back schedule needs it.
- **Root functions.** The root must be finished by an ascending function that goes through COMBINE (COMBINE, COMBINE-0R or P-x), because only that path reaches the codeword RAM. Codes whose whole tree is a single REP, REP-SPC or ML node are not supported, which matters only for N ≤ 16.
- **Size limits.** Sizes need 2P ≥ 16, 2P ≥ BUS and 2P ≥ RDW.

Other configurations are reachable through parameters, but only the defaults are simulated end to end:
- P = 64 (which also needs RDW ≤ 128);
- (6,4,0) quantisation, with W = 6 and WC = 4;
- other code lengths N.

A rate-0.5 code of length 32768, constructed the same way, needs about 4075 instructions. That exceeds the default 3000-instruction memory. Raise `IDEPTH` for such codes.

## Files

Everything lives in `rtl/` and `tb/`.

`rtl/` holds one module per file:
- `polar_pkg.sv` — types and layout functions;
- `f_unit`, `g_unit`, `combine_unit`;
- `rep_dec`, `spc_comb` (a helper), `spc_dec`, `repspc_dec`, `ml_dec`;
- `processing_unit`;
- `alpha_ram`, `beta_ram`, `channel_ram`, `codeword_ram`, `instr_ram`;
- `channel_loader`, `alpha_router`, `beta_router`, `controller`;
- the top, `polar_decoder`.

`tb/` holds:
- `polar_model_pkg.sv`, a software reference:
  - code construction (Bhattacharyya bounds);
  - systematic encoding;
  - an AWGN channel and LLR quantisation;
  - the program compiler;
  - a bit-exact decoder model that also predicts the cycle count;
- one self-checking testbench per block, `tb_<module>.sv`;
- the end-to-end test, `tb_polar_decoder.sv`.
- `tb_polar_decoder_n16k.sv`, which decodes three frames of a (16384, 14746) code built for Eb/N0 = 5 dB on an N = 16384, P = 256 instance: 813 instructions, 1157 cycles per frame, bit-exact against the model.

### What the end-to-end test runs

`tb_polar_decoder.sv` runs at the default size. It decodes six frames of three codes:
- the rate-0.9 code;
- the rate-0.84 code;
- a variant of the rate-0.84 code that contains ML nodes.

It compares every estimated bit and every frame's cycle count with the model. It also checks that each of the following happened at least once:
- each of the twelve functions;
- the SPC correction write;
- both bypass registers;
- loading while decoding;
- input back-pressure;
- the output stall.

Every testbench prints one line `TB_RESULT checks=<n> failures=<m>`. It passes when m = 0.

## Simulating

With Verilator 5, for example the end-to-end test (about 10 s to build, 1 s to run):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl \
    rtl/polar_pkg.sv tb/polar_model_pkg.sv tb/tb_polar_decoder.sv \
    --top-module tb_polar_decoder -Mdir obj_top
./obj_top/Vtb_polar_decoder
```

`-y rtl` lets Verilator find each module in `rtl/<module>.sv`. A block test is built the same way, naming `rtl/polar_pkg.sv` and the block's testbench, for instance `tb/tb_spc_dec.sv` with `--top-module tb_spc_dec`.

Block testbenches override parameters to small sizes (P = 4 or 8, N = 64) so that every corner can be reached quickly. The end-to-end test runs the defaults unchanged.
