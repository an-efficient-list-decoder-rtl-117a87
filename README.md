# A CRC-aided successive-cancellation list decoder for polar codes

A polar code of length N = 2^n is decoded one bit at a time. Successive
cancellation (SC) works out bit u_i from the channel values and from the bits
already decided. A list decoder keeps the L most likely partial decodings
("paths") rather than committing to one. At every information bit each path
splits into two candidates, one per bit value, and the L best of the 2L
survive. A CRC is appended to the data bits. At the end, the first surviving
path whose CRC checks out is the answer.

This RTL implements such a decoder as a partly parallel datapath. Each path
has T processing units (PUs). The log-likelihood messages (LLMs) of all paths
live in one stage-organised memory. Path copies are never physical: every
per-path state is reached through an index that says which path's data to
use. The default build decodes the (1024, 512) code with L = 4, T = 8, 4-bit
channel messages and a 32-bit CRC. One frame takes 3200 clock cycles.

## Arithmetic: max-log messages that never saturate

Every message is a pair (P[0], P[1]), the log-likelihoods of the bit being 0
or 1. Larger means more likely, and only maxima and sums are used:

    F:  c0 = max(a0 + b0, a1 + b1)     c1 = max(a1 + b0, a0 + b1)
    G:  c0 = a[u] + b0                 c1 = a[1-u] + b1      (u = partial sum)

Both operations share the same four adders (`pu.sv`). No subtraction or
normalisation takes place, so the messages stay non-negative. They grow by
at most one bit per stage: the channel messages have t bits, and stage λ has
t + λ bits. The path metric of path l for bit value u is P_{l,n}[0][u] at
the last stage. Because nothing ever saturates, metrics from different
paths can be compared exactly.

**Channel compression.** Only the larger minus the smaller channel value is
kept, as a t-bit magnitude Msg plus the index s of the larger entry
(`decomp.sv`). The pair is (0, Msg) when s = 1 and (Msg, 0) when s = 0.

**Fine-grained PU widths.** Within a PU array, PU j only ever works on
stages where j < 2^(n-λ). So PU j only needs inputs as wide as the lowest
such stage allows:

    p[0] = t + n - 1,   p[j] = t + n - 1 - floor(log2 j)   (j > 0)

For n = 10, T = 8, t = 4 this gives 13, 12, 11, 11, 10, 10, 10, 10. The
function `fpp_width` in `polar_pkg.sv` computes it. Each PU ignores the
input bits above its width, which are zero by construction, and its output
is zero-extended back to the common word width.

## Schedule

Bit i is decoded in one *round*. Round 0 computes stages 1..n, all with F.
Round i > 0 starts at stage φ(i) = n - (number of trailing zeros of i) and
computes φ(i)..n: G for the first stage, F for the rest.

- Stage λ produces 2^(n-λ) message pairs per path.
- With T PUs per path it takes max(1, 2^(n-λ)/T) cycles.
- An information bit adds one pruning cycle, which is the single pipeline
  register in front of the sorter.
- A frozen bit is decided as 0 at the end of its last stage cycle.

Summed over a frame:

    N_C = 2N + (N/T) log2(N/(4T)) + K          (= 3200 for N=1024, T=8, K=512)

After that comes one cycle that commits the last decision. `done` rises
N_C + 1 cycles after the cycle in which `start` was taken. The controller
is `dec_ctrl.sv`. Its states are IDLE, COMP (stage cycles), PRUNE, FIN (last
commit) and DONE.

## Message memories and the bypass

**C-MEM** (`cmem.sv`) holds the compressed channel messages. It has N/(2T)
words, and each word holds 2T messages. This is exactly what one stage-1
cycle needs for one path. The stage-1 word is copied to all L paths.

**L-MEM** (`lmem.sv`, `lmem_sub.sv`) holds stages 1..n of all paths:

- Each stage has its own sub-memory S_λ, with (t+λ)-bit entries and
  max(1, 2^(n-λ)/(2T)) words.
- One word holds min(2T, 2^(n-λ)) message pairs of every path.
- Each cycle, cycle k of stage λ reads word k of stage λ-1, which is 2T
  pairs, and produces T pairs.
- Reads are synchronous. The controller therefore issues the address of
  the *next* cycle's operand, derived from its next state.

**wBUF / OSel** (`osel.sv`). A full word holds 2T pairs per path, twice
what the PUs produce in one cycle. Even cycles therefore park their T pairs
in the write buffer. Odd cycles write the word {new half, parked half}.
Stages that take a single cycle write their (≤ T) pairs at once,
zero-filled above.

**rBUF bypass.** Late in a round, stages are one cycle long. There, the
word that stage λ+1 needs is the one being written in the very cycle its
read is issued, so the memory would return the old contents. rBUF keeps a
copy of the last written word. The controller raises `bsel` for that case,
and the input selector (`isel.sv`) then takes rBUF instead of the memory.
Without the bypass, each such stage would need an extra cycle.

## Path copies by reference

Each slot l (0..L-1) holds one path. A pruning decision produces, for every
slot, a source path a_l and a bit c_l: "slot l continues path a_l with bit
c_l". Nothing is copied right away.

**Messages: CCG and crossbar** (`ccg.sv`, `crossbar.sv`). For every slot and
stage, the CCG keeps the index r_l[λ] of the slot whose L-MEM row holds that
slot's stage-λ messages. At the end of round i, for each stage s:

    w_l[s] = r_{a_l}[s]   if s < φ(i)      (stages not recomputed: follow the source)
    w_l[s] = l            otherwise        (recomputed this round: own row)

While stage λ is computed, PUA_l reads row cc_l = w_l[λ-1] through the
crossbar. The CCG registers load w when the round ends.

**Partial sums: PSU** (`psu.sv`). G needs the polar transform of the bits
of the sibling sub-tree that was just decided. The PSU keeps only N/2 - 1
bits per path:

- Stage j has 2^(n-j) registers. They hold the transform of the last
  completed left half-block of 2^(n-j) bits.
- The partial sums are built from these registers combinationally:

      b_{j-1}[2k] = R_j[k] xor b_j[k],   b_{j-1}[2k+1] = b_j[k],   b_n = c

- When a decision is committed, the registers that must change load the
  new values, and all others are copied from PSU_{a_l}.
- In a G stage, PU j of slot l takes partial sum k·T + j in cycle k.

**CRC** (`crcu.sv`). Each slot has a serial h-bit CRC register and a sticky
mismatch flag cs_l. On every information bit the register is updated from
the source slot's register. After the first K - h information bits, the
remaining h decided bits are compared with the checksum bit by bit instead
(`crc_shift`). The flag is also inherited from the source slot.

**Decoded data** (`path_bits.sv`). Each slot keeps its K - h data bits in a
shift register that is reloaded from the source slot on each data-bit
decision.

**Commit timing.** The decision of bit i is held in the pruning unit's
register. It is committed into PSU, CRC and data store at the end of round
i+1, when the next decision is taken. The G stage of round i+1 therefore
reads the partial sums directly from the uncommitted decision (a_l, c_l).
The FIN cycle commits the last bit.

## Pruning: the maximum values filter

At an information bit, the 2L candidates D_{2l+u} = (P_{l,n}[0][u], l, u)
come from the word just written to rBUF. The maximum values filter
(`mvf.sv`) finds the L largest:

1. A bitonic sequence generator is built from two-input sorters
   (`sorter2.sv`, increasing or decreasing). It turns the 2L candidates into
   a bitonic sequence of log2(L)(log2(L)+1)/2 columns.
2. L compare-and-select units (`cas.sv`) each take the larger of entries r
   and r + L.

This yields the L largest as an unordered set, without a full sort.
Candidates carry their index (l, u) along; ties go to the second input.

While fewer than L paths exist (the first log2 L information bits), the
pruning unit (`ppu.sv`) forks instead of pruning:

- slot l keeps bit 0;
- slot l + n_act becomes path l with bit 1;
- n_act, the number of live paths, doubles.

## Result: direct selection

When the frame is done, `direct_sel.sv` outputs the data bits of the lowest
slot whose CRC flag is clear. If every slot failed, `fail` is set and slot 0
is output. No metric comparison is made between passing paths. This is
cheaper than picking the passing path with the best metric. With a strong
CRC the loss is small. With a short CRC and a large list the loss grows.

## Interface (`list_decoder.sv`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `ch_we`, `ch_waddr`, `ch_wdata` | in | load C-MEM: word w holds messages 2Tw..2Tw+2T-1, message e = {Msg, s} in bits [e(t+1) +: t+1] |
| `info_set[N-1:0]` | in | 1 at the K information positions (CRC included), held during decoding |
| `start` | in | begin decoding (accepted in IDLE or DONE) |
| `done` | out | result valid, held until the next `start` |
| `data[K-h-1:0]` | out | decoded data bits, `data[j]` = j-th data bit in decoding order |
| `sel`, `fail` | out | chosen slot; no slot passed the CRC |
| `busy`, `cur_bit`, `list_full` | out | status for observation |

The CRC runs over the K - h data bits in decoding order, MSB first, from an
all-zero register, with no final inversion. Its h check bits occupy the last
h information positions. Load C-MEM for a new frame only while the decoder
is idle or done.

Parameters, with their defaults:

| parameter | default | meaning |
|---|---|---|
| `N_LOG` | 10 | n, code length N = 2^n |
| `L` | 4 | list size (power of two) |
| `T` | 8 | PUs per path (power of two, n ≥ log2 T + 2) |
| `Q` | 4 | t, channel message magnitude bits |
| `K` | 512 | information bits including the CRC |
| `H` | 32 | CRC length h |
| `POLY` | 32'h1EDC6F41 | CRC polynomial without the x^h term |

At the defaults, synthesis with yosys gives roughly 6.6k flip-flop bits and
54k memory bits (L-MEM and C-MEM). About 4k of the flip-flop bits are the
per-path CRC, partial-sum and data registers.

## Where this design departs from, or goes beyond, the published architecture

- **CRC coverage.** One statement of the architecture runs the CRC over the
  first N - h *code* bits. Here only the information bits go through it,
  and frozen bits are skipped. This agrees with the stated criterion that
  the candidate's unfrozen bits pass the CRC.
- **CRC32 polynomial.** The polynomial is not specified; the Castagnoli
  polynomial is used.
- **L-MEM macros.** The L-MEM is one array per stage. The further packing of
  these irregular sub-memories into equal-width macro instances with dummy
  bits, and the choice of SRAM, register file or flip-flops per instance,
  are left to the memory mapping of a back end.
- **Start-up forks**, the **data-bit store**, the **commit one round late**,
  the **frozen-set input**, the **C-MEM loading port** and the
  **start/done handshake** are this design's own choices. The published
  description leaves these points open.
- **One pipeline stage** in the pruning path (n_p = 1). Deeper pruning
  pipelines would add cycles per information bit and are not modelled.

## Verification

Every block has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
one compares the block against a model written independently inside the
testbench, and ends by printing `TB_RESULT checks=<n> failures=<m>`. For
example:

- the PSU test compares the partial sums with the polar transform of the
  decided bit histories;
- the CRC test compares with long division;
- the sorter network test checks the selected set against a count of larger
  values;
- the controller test rebuilds the whole schedule and checks every cycle,
  the read addresses, the bypass flag and the cycle count.

`tb_list_decoder.sv` runs the complete decoder at the default parameters.

1. It builds a random information set from Bhattacharyya parameters (rate
   1/2, erasure channel with ε = 0.5).
2. It appends the CRC and encodes the frame.
3. It sends the frame over BPSK with Gaussian noise and quantises it into
   the compressed 4-bit format.
4. It decodes:
   - one noiseless frame and six frames at Eb/N0 = 3.5 dB, which must
     decode correctly;
   - sixteen frames at 1.5 dB, which must either decode correctly or flag
     `fail`;
   - one frame of random channel values, which must fail the CRC.

Every frame must take exactly N_C + 1 cycles. The test also counts how often
each mechanism occurred, and any mechanism that never occurred is a failure:
G stages, wBUF half-word writes, rBUF bypasses, start-up forks, prunes with
path copies, selection of a slot other than 0, and CRC failure.

To run a test with plain Verilator:

    verilator --binary --timing --assert -Irtl rtl/polar_pkg.sv \
        tb/tb_list_decoder.sv --top-module tb_list_decoder
    ./obj_dir/Vtb_list_decoder

The package goes first on the command line. Verilator finds the modules in
`rtl/` by their file names. Block tests run the same way with their own
`tb_<module>`. The full-size test builds in well under a minute and runs its
24 frames in about a second.

## Files

`polar_pkg.sv` holds the default sizes, the controller states and the
sizing functions (φ, stage cycles, word sizes, PU widths, N_C). The
datapath units are `pu`, `pua`, `decomp`, `cmem`, `lmem`/`lmem_sub`,
`isel`, `crossbar` and `osel`. Path management is `sorter2`, `cas`, `mvf`,
`ccg`, `ppu`, `psu`, `crcu`, `path_bits` and `direct_sel`. Sequencing is
`dec_ctrl`, and `list_decoder` is the top.
