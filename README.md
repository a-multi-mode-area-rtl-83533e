# Multi-mode SCL polar decoder core: RTL for the symbol-level path expansion

Successive-cancellation list (SCL) decoding of polar codes keeps L candidate
decoding paths. Each path has a path metric (PM). Smaller is better: the PM
is the sum of the LLR magnitudes the path contradicts. At every information
bit each path splits in two, and only the L best of the 2L children survive.
Fast tree-based SCL decoders do not work bit by bit. They decode a small leaf
node of M bits at once: each path splits into its q most likely M-bit
symbols, and the best L of the qL children survive.

This core is built around that symbol step, for M = 8, L = 4 and q = 4. The
same hardware also runs in three *modes*, which trade list size for
throughput:

| Mode_Sel | name   | codewords in parallel | list size per codeword |
|---------:|--------|----------------------:|-----------------------:|
| 0        | MODE-4 | 1                     | 4                      |
| 1        | MODE-2 | 2                     | 2                      |
| 2        | MODE-1 | 4                     | 1 (plain SC)           |

The four decoding-path slots (n_d = 4) are always busy. In MODE-2, slots 1
and 2 hold one codeword and slots 3 and 4 the other. In MODE-1 each slot is
its own SC decoder. The mode can change between two symbols of the same
codeword. For example, a high-rate code can use MODE-4 for its first,
unreliable bits and then switch to MODE-1 ("MODE-4_1"). That cuts latency at
little cost in error rate.

The RTL covers:

- the symbol-expansion unit (MM-LC-AML) with all of its sorters;
- the channel memories and their mode-dependent routing;
- the output multiplexing;
- the adder trees for repetition nodes.

The SC/SCL processing units, the LLR memory, the rate-0/rate-1 leaf decoders,
the CRC and the tree scheduler are **not** part of this RTL. Their signals are
ports of the top module `mm_scl_top`. See "Boundary of the core" below.

## 1. Metric of an 8-bit symbol, split in two halves

A leaf node of 8 bits gets the LLRs α0..α7 of its 8 code bits. The code word
is c = u·G8, where u = (u1..u8) is the symbol and G8 is the 8-bit polar
transform. A symbol's metric is

    metric(u) = Σ_j  |α_j| · [c_j ≠ hard(α_j)]

It follows from the recursive structure of G8 that the metric splits exactly
into two halves of four bits:

    v_i = u_{2i-1} xor u_{2i}      (i = 1..4)   -> code bits seen by α0..α3
    u_e = (u2, u4, u6, u8)                      -> code bits seen by α4..α7
    metric(u) = A[v] + B[u_e]

A and B are each a table of 16 entries. Each is produced by one **RCC**
block (`rcc`, "recursive channel combination"). An RCC takes four hard
decisions z_j and four magnitudes x_j. For each 4-bit word w it adds the x_j
whose code bit of w·G4 differs from z_j:

    c0 = w1^w2^w3^w4,  c1 = w3^w4,  c2 = w2^w4,  c3 = w4    (w1 = MSB of the index)

This reduces the search over 256 symbols to a search over 16 + 16 table
entries and their pairwise sums. Every datapath below works on the two tables
instead of on the 256 symbols.

## 2. Rate-R-2 leaves and the pruning trick

Only six frozen-bit patterns are handled by the symbol unit. F marks a frozen
bit, D an information bit, and u1 comes first:

    FDDDDDDD  FFDDDDDD  FFFDDDDD  FFFDFDDD  FFFFFDDD  FFFFFFDD

In every one of them, u1 (and for most, u2 and u3 too) is frozen. A frozen u1
ties v1 = u2 = u_e1, so a valid symbol pairs an A entry with a B entry whose
first bit matches. The tables are therefore split into groups by the bits the
pattern fixes. The q best sums can only use the q best entries of each group.
Step 1 of the datapath exploits this: it sorts inside the groups and keeps
only a few entries per group before forming any sums.

That gives four steps. "Key" is the value the sorters compare; here it is a
metric or a path metric.

| step | work                                                                                   |
|------|----------------------------------------------------------------------------------------|
| 0    | two RCCs give A = a0..a15 and B = a16..a31                                              |
| 1    | group-wise sorting, then muxes driven by the frozen pattern pick the entries to pair   |
| 2    | cross adders form every allowed A+B sum; the symbol is rebuilt from the two tags (u_{2i-1} = v_i ^ u_e,i, u_{2i} = u_e,i) |
| 3    | MSNG sets the key of any symbol with a 1 in a frozen position to the maximum; a sorter keeps the q best; PM is added |

### 2.1 MODE-4 (q = 4, `mm_mld_s1`, MLD_S1_q4 path)

- Four S8TO4 blocks each reduce one group of eight (a0..7, a8..15, a16..23,
  a24..31) to its best four.
- A control bit is 1 for FDDDDDDD and FFDDDDDD, and 0 otherwise.
  - At 1, the S8TO4 outputs are used.
  - At 0, the raw groups a0..3 / a16..19 and a4..7 / a20..23 are used. In these
    patterns three bits are fixed, so each group has only four members.
- Two 16-input cross adders give 32 sums.
- MSNG masks the invalid sums, S32TO4 keeps the best four, and PM is added.

### 2.2 MODE-2 (q = 2, MLD_S1_q2 path)

- The two best of each sorted half inside the S8TO4 blocks feed four S4TO2.
- A 2-bit control word selects what the four 4-ADDERs combine:
  - FFDDDDDD → 0
  - FDDDDDDD → 1
  - FFFDDDDD → 2
  - FFFDFDDD, FFFFFDDD, FFFFFFDD → 3
- Unused adder inputs receive the filler sub-symbols Z = 0000 and F = 1111.
- MSNG and S16TO2 follow, then PM is added.

### 2.3 MODE-1 (q = 1, MLD_S1_q1 path)

- The inputs are the pair minima, the quad minima and the octet minima, all
  taken from inside the same S8TO4 blocks.
- A 3-way control selects them: FFDDDDDD/FDDDDDDD → 0, FFFDDDDD → 1, others → 2.
- Four adders and MSNG follow, and S4TO1 picks the single best symbol.
- No PM is needed: SC keeps one path.

All three paths share Step 0 and the first sorter row. The sorted
intermediate results of the four S8TO4 are exactly what MODE-2 and MODE-1
need. This sharing is what makes the multi-mode unit cheap.

The fillers Z and F carry the maximum key. A Z on the v side with an F on
the u_e side rebuilds to 11111111, which is never valid, since u1 is always
frozen. The MODE-2 4-ADDERs, however, see Z and F on both sides. They also
form Z+Z, which is the symbol 00000000. That symbol is valid, so a filler
with a zero key could win the sort.

**Patterns beyond the six.** In MODE-4 the control-0 path pairs the
groups in which u1 = u2 = u3 = 0, i.e. v1 = u_e1 = 0 and v2 = u_e2. It is exact for *any*
pattern whose first three bits are frozen, for example FFFFDDDD or FFFDDFDD.
MSNG removes whatever those extra frozen bits forbid, and the testbench
checks this against a brute-force search. Patterns with u3 free but a later
bit frozen (e.g. FFDFDDDD) are only approximated. MODE-2 and MODE-1 are built
for the six patterns only.

## 3. Sorters

All sorters compare the `key` field of a candidate (`cand_t`: key plus a tag
that carries the sub-symbol, the symbol and/or the parent path).

| block | content | result |
|-------|---------|--------|
| `s2` | one comparator, two muxes | c = smaller, d = larger, e = (a > b); ties keep a in c |
| `s4` | two S2 on (x1,x2),(x3,x4), then four S2 on the crossed outputs; two 4:1 muxes pick the middle two, selected by two comparison flags | four inputs sorted with two comparator delays |
| `s8to4` | two S4, then S2(ya_k, yb_{5-k}) | best four of eight (unordered) |
| `s32to4` | seven S8TO4 as a 4-2-1 tree | best four of 32 |
| `s16to4` | three S8TO4 as a 2-1 tree | the stage-2 sorter of MODE-4 |
| `s4to2`, `s16to2`, `s4to1` | helper trees of S2 blocks | best two or best one |

Outputs of "best k of n" sorters are sets: their order is not specified.

## 4. MM-LC-AML: four paths, stage 2 and path metrics (`mm_lc_aml`)

- Four `mm_mld_s1` instances, one per path slot, each with its own LLRs
  (`LLRInV_i`) and its own PM register.
- **MODE-4:** the 16 candidates, tagged with their parent slot, go to S16TO4.
  Its four survivors become the new paths.
- **MODE-2:** S4TO2 #1 takes the q = 2 results of slots 1 and 2; S4TO2 #2 takes
  those of slots 3 and 4. A 2:1 mux in front of each PM register picks the
  MODE-4 or the MODE-2 result.
- **MODE-1:** each slot's best symbol leaves on `sco[i]`; PMs stay unchanged.
- **Outputs:** each survivor leaves on `sclo[k]` as {parent slot, 8-bit
  symbol, new PM}. The processing units use the parent field to copy partial
  sums and LLRs.
- **PM control:**
  - `pm_init` starts a codeword. It sets slot 1 to 0 and the others to the
    maximum. In MODE-2 it sets slots 1 and 3 to 0. In MODE-1 it sets all slots
    to 0.
  - `pm_load` overwrites all four PMs. It serves PM updates made by leaf
    decoders outside this unit (rate-0, rate-1, repetition).

### Timing

| mode   | register stages | cycles from `in_valid` to result |
|--------|----------------:|---------------------------------:|
| MODE-4 | 4               | 4 (`sclo_valid`)                 |
| MODE-2 | 3               | 3 (`sclo_valid`)                 |
| MODE-1 | 2               | 2 (`sco_valid`)                  |

- Registers sit after Step 0 (all modes), after Step 1 (MODE-4), after
  Step 3 (all modes) and at the PM/SCLO registers (MODE-4, MODE-2).
- The next symbol's LLRs depend on the survivors, so only one symbol is in
  flight. `ready` is low while one is. An assertion flags a start while busy,
  and `pm_init` during an operation.
- The mode is carried with each operation, so the mode may change from one
  symbol to the next.

## 5. Top: channel memories and routing (`mm_scl_top`)

**Channel memories.** There are four memories, CMEM_1..4, each holding one
received word. Each stores N five-bit channel LLRs, eight per word, and reads
synchronously (one cycle).

**Routing to the processing units.** The unit that serves path slot i
(DCD_i) reads through a mode mux:

| DCD | MODE-4 | MODE-2 | MODE-1 |
|-----|--------|--------|--------|
| 1   | CMEM_1 | CMEM_1 | CMEM_1 |
| 2   | CMEM_1 | CMEM_1 | CMEM_2 |
| 3   | CMEM_1 | CMEM_3 | CMEM_3 |
| 4   | CMEM_1 | CMEM_3 | CMEM_4 |

Each CMEM_i is read at DCD_i's address. The read-data mux uses the mode that
was set when the address was given.

**Path outputs.** `path_out[i]` carries SCLO_i in MODE-4 and MODE-2 and SCO_i
in MODE-1. The choice follows which result arrived, not the live Mode_Sel.

**Repetition nodes.** There is one `rep_adder_tree` per slot. A repetition
node has one information bit, its last one, so its LLR is the sum of its 8 or
16 LLRs. An 8-4-2-1 adder tree forms that sum, and the result is registered
(one cycle).

### Ports of `mm_scl_top` (defaults N = 1024, CM_PAR = 8)

| port | dir | meaning |
|------|-----|---------|
| `mode_sel[1:0]` | in | 0 MODE-4, 1 MODE-2, 2 MODE-1 |
| `cm_we[4]`, `cm_waddr`, `cm_wdata` | in | load channel words (8 × 5 bit) into CMEM_i |
| `dcd_raddr[4]` / `dcd_rdata[4]` | in / out | CMEM reads of DCD_1..4, data after one cycle |
| `aml_valid` / `aml_ready` | in / out | start one rate-R-2 symbol / no symbol in flight |
| `frz[7:0]` | in | frozen pattern, f1 in bit 7 |
| `llr[4][8]` | in | α0..α7 of each slot, 6-bit signed |
| `pm_init`, `pm_load`, `pm_load_val[4]` | in | path-metric control |
| `path_out_valid`, `path_out[4]` | out | {valid, parent, symbol, PM} per slot |
| `pm[4]` | out | path-metric registers |
| `rep_valid`, `rep_len16`, `rep_llr[4][16]` | in | repetition-node LLRs |
| `rep_sum_valid`, `rep_sum[4]` | out | their sums, one cycle later |

## 6. Numbers and widths

| quantity | value | origin |
|----------|-------|--------|
| symbol size M, paths n_d, q | 8, 4, 4 | paper |
| channel LLR width | 5 bits | paper |
| LLR width at the symbol unit | 6 bits signed | own choice |
| PM / key width | 16 bits, saturating adds | own choice (no normalisation) |
| candidate tag | 10 bits: 2 parent + 8 symbol | own choice |
| code length N (CMEM depth) | 1024 | paper's N = 1024 code |
| LLRs per CMEM word | 8 | own choice |

The largest code in the evaluations has N = 32768. The AML unit does not
depend on N; only the CMEM depth does. Set `N` on `mm_scl_top` to 8192 or
32768 for those codes.

## 7. Where this RTL departs from, or adds to, the description

- **Register positions.** Only the number of pipeline stages per mode is
  given; where the registers sit is chosen here.
- **S4 mux wiring and S8TO4 pairing.** The S4 mux wiring and its select
  flags, and the S8TO4 output pairing, were reconstructed so that the blocks
  sort correctly. The drawings show the structure but not every wire.
- **RCC bit mapping.** The code-bit-to-adder mapping in the RCC is derived
  from the polar transform. The RCC's "mismatch" input is taken to be the
  sign of α_j.
- **Fillers.** The key of the Z/F fillers is the maximum (Section 2).
- **Symbol rebuilding.** The XOR logic that rebuilds the symbol from the two
  halves is written out here. The description calls it trivial and omits it.
- **PM and flow control.** PM initialisation, `pm_load`, the one-in-flight
  handshake and the saturating PMs are choices of this design.
- **Sorter interpretation.** The description's "S4 outputs in decreasing
  order" is taken as decreasing reliability, i.e. increasing metric.

## 8. Boundary of the core

What a complete decoder adds around this core:

- processing units that compute f/g LLR updates and partial sums for each
  path, and copy them by the parent field;
- the LLR memory;
- the rate-0 and rate-1 leaf decoders;
- the final CRC-32 check over the surviving paths;
- the scheduler that walks the code tree and issues `frz`, `aml_valid`,
  `rep_valid` and the CMEM addresses.

None of these is described in enough detail to write here. Without them,
full decoding runs, and so the decoding-cycle counts and error-rate curves of
the evaluated codes, cannot be reproduced with this RTL.

## 9. Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=… failures=…`. `tb/tb_ref_pkg.sv` holds the reference
model:

- the 8-bit polar encoder;
- a brute-force symbol metric over all 256 symbols;
- a per-list "q best valid symbols" reference;
- `check_step`, which checks a whole AML step. It compares the survivor key
  multiset with the brute-force result, and checks parents, frozen bits,
  recomputed keys and duplicates.

What each testbench covers:

- **Sorters:** checked against a reference sort on random keys with many ties.
- **`tb_rcc`:** exhaustive over all sub-symbols, and checks that
  A[v] + B[u_e] equals the brute-force 8-bit metric.
- **`tb_mm_mld_s1`:** random LLRs, every pattern, every mode; checks latency.
- **`tb_mm_lc_aml`:** symbol sequences with mode switches and PM feedback.
- **`tb_mm_scl_top`:** runs the core at its default parameters. It:
  - loads four words;
  - checks the CMEM routing in every mode;
  - decodes symbol sequences in MODE-4, MODE-2, MODE-1 and MODE-4_1 (switching
    mid-word), with LLRs taken from the memories;
  - exercises `pm_init`, `pm_load` and both repetition lengths.

  It counts each mechanism (routing per mode, symbols per mode, mode switches,
  each frozen pattern, PM init/load, 8- and 16-LLR repetition sums) and fails
  if any never happened.

- **`tb_mm_scl_code`:** decodes real codewords through `mm_scl_top` at its
  default size.
  - The code is a (1024, 512) polar code built for the binary erasure channel.
    Erasure probability is 0.5; the recursion is z → 2z − z² and z → z².
  - First it checks that every 8-bit leaf of this code has one of nine
    patterns: rate-0, rate-1, repetition, or one of the six rate-R-2 patterns.
    For this code the counts are 46, 46, 11 and 25 leaves.
  - Random messages are sent with BPSK over AWGN at Eb/N0 = 6 dB, and the
    channel LLRs are rounded to 5 bits.
  - The words are then decoded in MODE-1 (four words), MODE-2 (two words),
    MODE-4 (one word) and MODE-4_1. The switch points for MODE-4_1 are 656
    and 312, which are 21000 and 10000 scaled from N = 32768.
  - The processing units are modelled in the testbench. They run a min-sum
    f/g tree with partial sums. Rate-0, rate-1 and 8-bit repetition leaves
    are expanded there by exhaustive search, and the new PMs are written back
    with `pm_load`. Every rate-R-2 leaf goes through the RTL and is checked
    like the other tests. In MODE-1, repetition leaves use the RTL adder trees.
  - The leaf LLRs are handed over as α_j = β_rev(j), where β is the leaf's LLR
    vector in tree order. The testbench checks that the core's metric equals
    the tree-order metric for every chosen symbol.
  - Every word must come back error-free. The path with the smallest PM is
    chosen, since there is no CRC.
  - Each DCD model reads its whole channel word once, through the CMEM
    routing, at the start of the word. A real tree decoder reads the channel
    memory again for the right half of the tree. With the routing of
    Section 5, that re-read comes from CMEM_i once MODE-4_1 has switched to
    MODE-1. In that case the word must be present in all four memories, or
    it must have been consumed before the switch.

To run one testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/polar_pkg.sv tb/tb_ref_pkg.sv tb/tb_mm_scl_top.sv --top-module tb_mm_scl_top
    ./obj_dir/Vtb_mm_scl_top

Replace the last file and the top-module name for another testbench. The
sorter testbenches do not need `tb_ref_pkg.sv`.
