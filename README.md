# Multi-kernel polar decoder

This is a successive-cancellation (SC) decoder for polar codes built from a mix of
2×2 (binary, T2) and 3×3 (ternary, T3) kernels. Most polar decoders handle only
lengths that are powers of two. This one accepts any length N = 2^a·3^b up to a
maximum NMAX, built from its kernels in any order, and any set of frozen bits.
The kernel sequence is not fixed when the hardware is built. The host loads it,
with a few derived numbers, into a small register file before each decode, so one
instance can switch between codes from one frame to the next.

The default build is NMAX = 4096, P = 120 processing elements and Q = 7-bit LLRs.
It accepts 55 code lengths, from 2 to 4096. The same RTL also builds the two
smaller configurations it was sized for:

| NMAX | P   | Q |
|------|-----|---|
| 1024 | 60  | 6 |
| 256  | 18  | 5 |

Everything is plain synthesizable SystemVerilog. The memories are written as
arrays with a registered read port, so a RAM compiler or an SRAM macro can replace
them one for one.

## The decoding tree and its order

A code with kernel sequence r_0, r_1, …, r_{s-1} (each 2 or 3, listed from the
root to the leaves) has length N = r_0·r_1·…·r_{s-1}. SC decoding walks a tree:

- The root, at depth 0, holds the N channel LLRs.
- A node at depth d holds N_d = N / (r_0·…·r_{d-1}) LLRs and has r_d children.
- The leaves, at depth s, each decide one bit.

A node processes its children in order:

- **Binary node.** It computes `f` for child 0. Once child 0 has returned its
  partial sums β, it computes `g` for child 1.
- **Ternary node.** It computes `f` for child 0, then `g1` for child 1, using
  child 0's β, then `g2` for child 2, using the β of both earlier children.
- **After the last child.** The node runs `comb`, which merges the children's β
  vectors into its own β and hands it to its parent.

The data is kept in *bit-reversed* order, which is what makes the memory access
simple. Element r·i+k of a node's vector belongs to child k, position i.
Therefore:

- The LLRs a processing element needs for one operation are always 2 or 3
  neighbouring elements.
- The β bits a combine block writes for position i of the children are
  neighbours too.

Channel LLRs must be loaded, and the decoded bits are returned, in this order.

### One operation, several cycles

Each cycle the processing unit takes 2P LLRs. An operation at depth d therefore
takes `steps_d = ceil(N_d / 2P)` cycles. The control unit spends:

- `steps_d` cycles on every LLR-producing operation at depth d;
- `steps_d` cycles on every `comb` at depth d;
- one cycle on each node just above the leaves, which handles at most 3 LLRs. In
  that cycle the PE result is turned straight into the leaf's hard decision.

Decoding stops as soon as the last leaf is decided. The `comb` operations on the
rightmost path from root to leaf are therefore never run. The total cycle count is

    L = Σ_{d=0}^{s-1} ceil(N_d / 2P) · ((r_d + 1) · N / N_d − 1)

Codes with the same length can differ a lot in latency, because kernel order
matters. Measured cycle counts:

| kernels (root → leaves) | N | NMAX / P | cycles |
|---|---|---|---|
| 2,3,2,2,2,3,3,3,3 | 3888 | 4096 / 120 | 7965 |
| 2,3,3,2,3,3,3,3 | 2916 | 4096 / 120 | 5953 |
| 2,2,2,2,2,2,3,3,3 | 1728 | 4096 / 120 | 3548 |
| 3,2,2,2,2,2,2,2,2,2 | 1536 | 4096 / 120 | 4644 |
| 2 ×12 | 4096 | 4096 / 120 | 12484 |
| 2,2,3,2,2,2,2,2,2 | 768 | 1024 / 60 | 2326 |
| 2,2,2,2,2,2,3,3 | 576 | 1024 / 60 | 1234 |
| 3,2,2,2,2,2,2,2 | 384 | 1024 / 60 | 1156 |
| 2,2,3,3,3,3 | 324 | 1024 / 60 | 652 |
| 2 ×10 | 1024 | 1024 / 60 | 3140 |
| 3,3,3,3,3 | 243 | 256 / 18 | 519 |
| 3,2,2,2,2,2,2 | 192 | 256 / 18 | 587 |
| 2,2,2,3,2,2 | 96 | 256 / 18 | 272 |
| 3,3,3,3 | 81 | 256 / 18 | 162 |
| 3,2,2,2,2 | 48 | 256 / 18 | 137 |

These are the counts of cycles with `busy` high in simulation. All of them equal
the formula. All but one also equal the latencies published for this architecture.
The exception is the N = 1536 code, which was published as 4663 cycles. Both the
formula and this RTL give 4644. The RTL keeps the formula, and the difference is
not explained.

### Control unit

`control_unit` is a single state machine. Its state is:

- the current depth d;
- a child index c_d for every depth (2 bits each);
- a flag telling whether the node is running its children's operations or its
  `comb`;
- a step counter j, split into word = j / r_d and part = j mod r_d;
- a leaf counter.

A step-count check decides when an operation is finished. The next state then
follows from the current one:

| Current state | Next |
|---|---|
| LLR operation, above the leaf level | descend to child c_d |
| Leaf-level node, not its last child | move on to the next sibling |
| Leaf-level node, last child | start the node's `comb` |
| `comb` finished | return to the parent; the parent then runs its next child or its own `comb` |
| Last leaf decided | `busy` falls and `done` pulses one cycle later |

The RAMs answer one cycle after they are addressed. The unit therefore computes its
read addresses from the *next* state and its write addresses from the current one.

## Processing unit

The processing unit has P processing elements (PEs) and P combine blocks (CBs):

| Part | Count | Handles |
|---|---|---|
| Mixed PE (`pe_mixed`) | 2P/3 | binary `f`, `g` and ternary `f`, `g1`, `g2` |
| Binary PE (`pe_bin`) | P/3 | binary `f`, `g` |
| Mixed CB (`cb_mixed`) | 2P/3 | binary and ternary `comb` |
| Binary CB (`cb_bin`) | P/3 | binary `comb` |

P must be a multiple of 3. With this split the unit consumes exactly 2P input LLRs
per cycle whatever the stage:

- in a binary stage, PE i reads inputs 2i and 2i+1;
- in a ternary stage, mixed PE i reads inputs 3i, 3i+1 and 3i+2, and the binary PEs
  are idle.

Each mixed PE has two input multiplexers that pick between these pairings.

### Sign-magnitude arithmetic

LLRs are sign-magnitude numbers: the MSB is the sign (1 means negative) and the
other Q−1 bits are the magnitude. In this format `f` needs no adder:

- binary `f(a,b)`: sign = sign(a) ⊕ sign(b); magnitude = min(|a|, |b|).
- ternary `f(a,b,c)`: sign = XOR of the three signs; magnitude = minimum of the
  three.

The `g` rules add two terms whose signs depend on the partial sums u already
decided:

| Rule | First term | Second term |
|---|---|---|
| binary `g` | (−1)^u0 · a | b |
| ternary `g1` | (−1)^u0 · a | f(b, c) |
| ternary `g2` | (−1)^u0 · b | (−1)^(u0⊕u1) · c |

Adding two sign-magnitude numbers takes two cases:

- **The effective signs agree.** The magnitudes are added. The sum saturates at
  2^(Q−1)−1.
- **They differ.** The smaller magnitude is subtracted from the larger, and the
  result takes the sign of the larger term. A difference always fits, so only the
  adders saturate.

A PE therefore computes both differences |x|−|y| and |y|−|x|. Their borrow bits
double as the comparisons that `f` needs, so one set of subtractors serves both
rules. The mixed PE has:

- subtractors for all six ordered pairs of a, b and c;
- three saturating adders;
- a three-way minimum built from those borrows.

A `g1` with |c| < |b| uses the a–c pair, otherwise the a–b pair. Both pairs are
already computed.

If the two magnitudes are equal, the result is zero and takes the second term's
sign, because the first term's sign is chosen only when its magnitude is strictly
larger. That sign matters: a zero LLR reaching a leaf is decided by its sign bit.
The testbenches' reference model follows the same convention.

The hard decision is the sign bit of PE 0's result. A frozen leaf is forced to 0:
`u = hd AND NOT frozen`.

### Combine blocks

- **Binary.** CB i outputs (β0 ⊕ β1, β1) as output elements 2i and 2i+1.
- **Ternary.** CB i outputs (β0 ⊕ β1, β0 ⊕ β2, β0 ⊕ β1 ⊕ β2) as output elements
  3i, 3i+1 and 3i+2.

β0, β1 and β2 are the children's partial sums at position i. In both cases the
results fill a 2P-bit word.

## Memory layout

| Memory | Word | Depth (words) | NMAX 4096 / P 120 / Q 7 |
|---|---|---|---|
| Channel LLR RAM | 2P·Q | ceil(NMAX/2P) | 18 × 1680 = 30,240 bits |
| Internal LLR RAM | 2P·Q | Σ_{s=1}^{log2 NMAX − 1} ceil(NMAX / 2^s / 2P) | 26 × 1680 = 43,680 bits |
| Internal β RAM, 3 banks | 2P | Σ_{s=0}^{log2 NMAX − 1} ceil(NMAX / 2^s / 2P) per bank | 3 × 44 × 240 = 31,680 bits |
| Codeword RAM | W_COD = 32 | NMAX / W_COD | 4,096 bits |
| Frozen pattern RAM | W_FROZEN = 32 | NMAX / W_FROZEN | 4,096 bits |
| **Total** | | | **113,792 bits** |

The depths are sized for the worst case: an all-binary code of length NMAX. Any
allowed mixed code needs no more. The 4096 configuration stores 113,792 bits in
all, the figure published for this architecture.

### Regions

The Internal LLR RAM is split into one region per tree depth, from 1 to s−1.
Region d holds the LLR vector of the depth-d node currently being decoded, in
`steps_d` consecutive words. A node's children reuse the region of depth d+1 one
after another. So at any time each region holds one vector only.

The β RAM has three banks, one per possible child index, with a region per depth
from 1 to s:

- A node at depth d that is child c of its parent writes its β vector into bank c
  of region d.
- A leaf writes its bit into bit 0 of bank c, region s.
- The `g`, `g2` and `comb` operations of the parent read banks 0, 1 and 2 of
  region d+1 at the same address.

Those same-address reads are why all three banks share one read address.

Where each region starts depends on the code. The host supplies it as two offsets
per depth, `llr_off` and `beta_off`. Packing the regions one after another from
word 0 always fits.

Within a step, the control unit addresses:

| Operation | Reads | Writes |
|---|---|---|
| LLR operation at depth d, step j | channel word j (d = 0), or internal word `llr_off[d] + j`; β banks 0 and 1 at `beta_off[d+1] + j / r_d` | word `llr_off[d+1] + j / r_d`, slice `j mod r_d` |
| `comb` at depth d, step j | all three banks at `beta_off[d+1] + j / r_d`, slice `j mod r_d` | bank c at `beta_off[d] + j` |

## Partial words and bypass registers

One step of a binary operation produces only P LLRs, and one step of a ternary
operation only 2P/3. A memory word holds 2P. The word is therefore filled over
2 steps (binary) or 3 steps (ternary), which always come in consecutive cycles.
`llr_mem_interface` builds the write word:

| Stage | Step | Write word |
|---|---|---|
| binary | part 0 | zeros above, new results below |
| binary | part 1 | new results above, first half of the previous write below |
| ternary | part 0 | results in slice 0, zeros above |
| ternary | part 1 | results in slice 1, slice 0 from the previous write |
| ternary | part 2 | results in slice 2, slices 0 and 1 from the previous write |

The previous write is not read back from the RAM. It comes from the bypass
register `llr_bypass_reg`, which keeps a copy of the last word written.

That register also solves a timing problem. A RAM written in cycle j can only be
read in cycle j+2, but deep in the tree a vector fits in one word and is needed
the very next cycle. Each bypass register records whether the address the RAM is
reading in this cycle equals the address being written. If it does, the next
cycle's read data comes from the register instead of the RAM.

`beta_bypass_reg` does the same for the β RAM. One 2P-bit register serves all
three banks, since only one bank is written per cycle. A hit replaces only the data
of the bank that was written.

`beta_mem_interface` works in the other direction: it cuts a part of each bank word
for the processing unit.

- Binary steps take P bits: slice j mod 2.
- Ternary steps take 2P/3 bits: slice j mod 3, padded with zeros.

On the write side it chooses between:

- the binary CB word;
- the ternary CB word;
- the leaf decision `hd AND NOT frozen`, padded with zeros.

## Code parameters and host interface

`code_param_regs` holds:

- for each depth d = 0 … log2 NMAX, a record `stage_cfg_t`:
  - `tern`: the kernel at d is ternary;
  - `steps`: ceil(N_d / 2P);
  - `llr_off`: start of region d in the Internal LLR RAM;
  - `beta_off`: start of region d in the β RAM;
- the code length N and the number of stages s.

`cfg_we`, with `cfg_sel` = d, writes the record of depth d. With
`cfg_sel` = log2 NMAX + 1 it writes N (`cfg_wn_len`) and s (`cfg_ws_m`).

Offsets and step counts are 10 bits wide (`OFFW` in `polar_pkg`). That is enough
for every configuration listed above. Sizes where ceil(NMAX/2P) times the number
of stages exceeds 1023 need a wider field.

Packed offsets follow from the kernel list:

    N_0 = N,  N_{d+1} = N_d / r_d,  steps_d = ceil(N_d / 2P)
    llr_off[1] = 0,  llr_off[d+1] = llr_off[d] + steps_d       (d = 1 … s−2)
    beta_off[1] = 0, beta_off[d+1] = beta_off[d] + steps_d     (d = 1 … s−1)

A decode runs in four steps:

1. **Load the channel LLRs.** Use `ch_we`, `ch_waddr` and `ch_wdata`. Word w holds
   bit-reversed channel LLRs 2P·w … 2P·w+2P−1, element k in bits [kQ+Q−1 : kQ].
2. **Load the frozen pattern.** Use `fz_we`, `fz_waddr` and `fz_wdata`. Bit i is
   leaf i in decoding order; 1 means frozen.
3. **Load the code parameters** and pulse `start`.
4. **Read the result.** `busy` stays high for exactly L cycles, and `done` pulses
   once the last bit is stored. The decoded bits, in leaf order, are then read
   through `cw_raddr`/`cw_rdata`, with a one-cycle read latency.

The code parameters and the frozen pattern must not change while `busy` is high.
A `start` that arrives while `busy` is high is ignored. Reset is asynchronous and
active-low. It clears the control state and the bypass registers, but not the
memories.

## Verification

Every block has its own self-checking testbench in `tb/`, which compares it with a
model written independently in the testbench:

- **PEs.** All input combinations at small Q, and random vectors at Q = 7.
- **Combine blocks.** Exhaustive.
- **Memories, bypass registers, memory interfaces and code-parameter registers.**
  Random traffic.
- **`tb_control_unit`.** Runs the controller alone. For each code it checks:
  - the cycle count against the formula;
  - the number and order of leaves;
  - the number of LLR writes and `comb` cycles;
  - that no address leaves its region.

  It covers every one of the 27 lengths of the NMAX = 256 configuration, in
  binary-first and ternary-first kernel order.

Three end-to-end testbenches share a stimulus generator, `decoder_driver`. It
encodes random bits, builds noiseless and noisy channel LLRs, and loads the
parameters. It then checks the decoder's bits against a leaf-by-leaf software SC
decoder (`polar_ref_pkg`), and checks the latency against the formula and the
published value:

| Testbench | Configuration | Codes |
|---|---|---|
| `tb_polar_decoder` | NMAX 256, P 18, Q 5 | the five published codes, plus binary, ternary and single-stage codes |
| `tb_workloads_1024` | NMAX 1024, P 60, Q 6 | the four published codes and N = 1024 binary |
| `tb_polar_decoder_full` | default parameters | the four published 4096-class codes and N = 4096 binary |

`tb_polar_decoder` also counts each mechanism of the design. It fails if any count
stays at zero. The mechanisms are:

- each PE rule, binary and ternary;
- both kinds of `comb`;
- channel and internal LLR sources;
- partial writes that merge into an earlier slice;
- hits in both bypass registers;
- frozen and information leaves;
- multi-step operations;
- `g` results at full scale, which is where saturation happens.

To run a testbench with Verilator 5, from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/polar_pkg.sv tb/polar_ref_pkg.sv tb/tb_polar_decoder_full.sv \
        --top-module tb_polar_decoder_full
    ./obj_dir/Vtb_polar_decoder_full

Every testbench prints `TB_RESULT checks=… failures=…`. The full-size run takes
about a second.

## Where this design makes its own choices

- **Host interface.** The write ports, channel word layout, frozen-bit polarity and
  codeword read port are this design's own. The architecture only says the host
  loads LLRs, frozen set and parameters and reads the decoded bits.
- **Codeword and frozen RAM widths.** They are left open by the architecture and
  set to 32 bits here.
- **Control.** It is one state machine with a child counter per depth, not a
  hierarchy of smaller machines. The schedule it produces, and the resulting
  latency, are the architecture's.
- **Code-parameter registers.** They store explicit step counts and both offsets
  per depth in fixed 10-bit fields. Their bit count therefore differs from the
  ceil(log2 N) + s·(2 + 2·ceil(log2(N/2P))) bits quoted for the architecture.
- **Bypass hit detection.** It compares addresses. The architecture states what
  the bypass registers are for, not how a hit is found.
- **Slice placement.** The write slices are ordered so that lower LLR indices sit
  at lower bit positions.
- **Latency of the N = 1536 code.** The latency formula is followed where it
  disagrees with the published cycle count for that code (see above).
- **Fractional bits.** Q_f has no hardware meaning: all arithmetic is on integers.
  The fraction only matters when the host scales channel LLRs. The published
  choices are Q_f = 3 for the 4096 and 1024 configurations and Q_f = 2 for the 256
  one.

Not covered: error-rate curves (they need long channel simulations), list
decoding, and timing or area results, which depend on a cell library.
