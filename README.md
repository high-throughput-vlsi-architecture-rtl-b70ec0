# GRAND-MO: a one-cycle-per-step burst-noise decoder

This is SystemVerilog RTL for a hard-input decoder that uses GRAND Markov Order
(GRAND-MO). It follows the VLSI architecture in *High-Throughput VLSI
Architecture for GRAND Markov Order* (Abbas, Jalaleddine, Gross). The RTL was
written from that description. It is not the authors' code.

GRAND ("guessing random additive noise decoding") does not use the structure
of the code. It guesses the noise instead. It builds candidate error patterns
`e` in a fixed order and accepts the first one for which `H·(r ⊕ e)ᵀ = 0`,
where `H` is the parity-check matrix and `r` the received hard-decision word.
Any linear `(n,k)` code can be decoded just by loading its `H`. GRAND-MO is
meant for channels with memory, where errors come in bursts. Its candidates
are therefore bursts of consecutive flipped bits, not scattered single flips.
An interleaver is then not needed.

The hardware uses a restricted query order with three parameters:

* `m`: at most `m` bursts per pattern. The hardware supports `m ≤ 2`.
* `l1`: the longest single burst that is tried.
* `l2`: the longest second burst that is tried. The first burst of a
  two-burst pattern is at most `L = min(l1, l2)` long.

The key to the speed is that all patterns which share their first burst are
checked in one clock cycle. This takes a bank of XOR gates fed by a shift
register of precomputed burst syndromes. With the default configuration
(n = 128, n−k ≤ 32, m = 2, l1, l2 ≤ 32), one word takes at most

    L·(2n − L − 3)/2 + 2 = 3538 cycles      (n = 128, L = 32)

A word that arrives without errors, the common case on a good channel, takes
one cycle.

## Burst syndromes and what one cycle checks

Number the bits `0 … n−1`. Let `h_j` be column `j` of `H`. Define the
cumulative syndromes

    cum[0] = 0,   cum[j] = h_0 ⊕ h_1 ⊕ … ⊕ h_{j−1}.

A burst covering bits `i … j` then has the syndrome `cum[i] ⊕ cum[j+1]`. This
identity is what the whole datapath is built on. A burst syndrome is always
the XOR of two stored words, whatever the burst's length.

The **decoder core** holds the cumulative syndromes in an n-row shift
register. It can be loaded with a shift `sh`, or shifted up by one row:

    row r        = cum[sh + 1 + r]     (flagged invalid when sh + 1 + r > n)
    row −1 (prev) = cum[sh]

Each column `c` forms `x_c = s_comp ⊕ row(c−1)`. Each pair `(c, r)` with
`c ≤ r < c + LMAX` forms the test syndrome `x_c ⊕ row(r)`. That value equals

    s_comp ⊕ syndrome(burst on bits sh+c … sh+r).

`s_comp` comes from the controller:

* **m = 1 step** (`sh = 0`, `s_comp = s_c = H·rᵀ`). A zero test syndrome means
  `r` minus that single burst is a codeword. This one cycle checks every burst
  of length ≤ l1 at every position.
* **m = 2 step** with a first burst on bits `a … a+l−1`. Here `sh = a + l + 1`
  and `s_comp = s_c ⊕ cum[a] ⊕ cum[a+l]`. The tested bursts start at
  `sh = a+l+1` or later, so there is at least one good bit between the two
  bursts. The cycle checks every second burst of length ≤ l2.

Each test syndrome is NOR-reduced to one bit. A bit counts as a hit only if
its row is valid and its length `r−c+1` is within the step's limit. The
priority encoder reports the first hit in query order: lowest start first,
then shortest burst. At the defaults there are 128·32 − 32·31/2 = 3600 tests
of 32 bits each per cycle. The priority encoder is a binary tree over all of
them.

### The schedule

| step                  | first burst `(a, l)`          | core command before the step       | `s_comp`                 |
|-----------------------|-------------------------------|------------------------------------|--------------------------|
| 1: syndrome check     | –                             | –                                  | (checks `s_c == 0`)      |
| 2: m = 1              | none                          | load, shift 0                      | `s_c`                    |
| first step of length l | `(0, l)`                     | load ("reset"), shift `l+1`        | `s_c ⊕ cum[0] ⊕ cum[l]`  |
| following steps       | `(a, l)`, `a = 1 … n−l−2`     | shift up by one                    | `s_c ⊕ cum[a] ⊕ cum[a+l]`|

Lengths run `l = 1 … L`. Each length takes `n − l − 1` cycles. Together with
the two fixed steps this gives the cycle count above. With m = 1 the decoder
stops after step 2, so any word takes at most 2 cycles. If no step produces a
hit, the word is **abandoned**: `abandon` is raised and `r` is passed through
unchanged.

A small example is n = 6, l1 = 4, l2 = 3. Step 2 checks 18 single bursts. The
ten m = 2 steps then check 9, 6, 3 and 1 patterns with a one-bit first burst,
6, 3 and 1 with a two-bit first burst, and 3 and 1 with a three-bit first
burst. That makes 51 patterns in 11 cycles.

## Blocks

| file | block | what it does |
|------|-------|--------------|
| `rtl/grand_mo_pkg.sv` | package | default sizes, controller state type, `wc_steps()` |
| `rtl/h_memory.sv` | H memory | loads H in one cycle (n columns), then builds `cum[]`, one entry per cycle (n cycles), and raises `ready` |
| `rtl/syndrome_unit.sv` | H·rᵀ | AND-XOR tree for `s_c` |
| `rtl/decoder_core.sv` | decoder core | shift register, XOR array, NOR-reduce, length mask, priority encoder |
| `rtl/priority_encoder.sv` | helper | tree-shaped lowest-set-bit encoder |
| `rtl/grand_mo_controller.sv` | controller | step schedule, `s_comp`, core commands, index list, handshakes |
| `rtl/word_generator.sv` | word generator | turns bit indices into `e` and outputs `u_hat = r ⊕ e` |
| `rtl/grand_mo_top.sv` | top | wires the blocks together and registers `r` |

The controller passes the found pattern to the word generator as a list of
`m·l` bit indices, each `⌈log2 n⌉` bits wide, with a valid bit per entry.
Entries `0…LMAX−1` hold the first burst. The entries after them hold the burst
the core found.

## Interface and timing (`grand_mo_top`)

* **Loading H.** Pulse `h_load` for one cycle with `h_in[j] =` column `j` of H
  (n−k bits). For codes with fewer than `NK` parity bits, leave the spare rows
  of H at zero. `h_ready` falls and rises again n cycles later. Reload only
  while no word is in flight; an assertion checks this.
* **Decoding.** A word is taken when `in_valid && in_ready`. `cfg_m` (1 or 2),
  `cfg_l1` and `cfg_l2` are sampled at the same time, so each word can use
  different settings. `r_in` may change after that.
* **Result.** `out_valid` rises exactly `steps` cycles after acceptance. It
  stays high, with `u_hat`, `abandon`, `n_bursts` (0 means `r` was already a
  codeword) and `steps` held, until `out_ready`. One word is decoded at a time,
  and nothing is pipelined.
* **Reset.** `rst_n` is asynchronous and active low. It clears every register,
  and H must be loaded again afterwards.

`u_hat` is the corrected n-bit codeword. Mapping it to the k message bits
(`u = (r⊕e)·G⁻¹`) is left to the surrounding system.

## Parameters and configurations

| parameter | default | meaning |
|-----------|---------|---------|
| `N` | 128 | code length n |
| `NK` | 32 | number of rows of the H memory, the largest n−k (code rates 0.75 … 1) |
| `LMAX` | 32 | largest `l1`, `l2`; the width of the XOR array |
| `MMAX` (package) | 2 | most bursts per pattern |

The 79-bit configuration (codes of length 79 with rate ≥ 0.75, m = 1,
l1 = 16) is the same RTL with `N=79, NK=19, LMAX=16`. It needs at most 2 cycles
per word. A shorter code can also run on a larger instance: append zero bits to
`r` and zero columns to H. The query order never hits a burst that only covers
padding.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block
against a model written separately in the testbench, for example XOR-ing the
columns of H directly instead of using `cum[]`.

* `tb_h_memory`, `tb_syndrome_unit`, `tb_word_generator`: the leaf blocks.
* `tb_priority_encoder`: the tree encoder at 37 and 4096 inputs against a
  linear scan.
* `tb_decoder_core`: random loads and shifts against a direct search over the
  bursts.
* `tb_grand_mo_controller`: the schedule step by step, covering `s_comp`,
  commands, limits, index list and step counts, with the core modelled by the
  testbench.
* `tb_grand_mo_top` (n = 32) and `tb_grand_mo_top_full` (defaults, n = 128):
  end to end. A reference decoder walks the query order pattern by pattern,
  and the testbench checks the result and the exact latency. Each run must
  include all of these: a clean codeword, a single-burst hit, a two-burst hit
  after a shift by one, a two-burst hit after a reset-and-shift, an abandon
  after the full worst case, m = 1, output back-pressure and an H reload.
  At the defaults, the test also checks that words are abandoned after exactly
  3538 cycles.
* `tb_grand_mo_fig_order`: the n = 6, m = 2, l1 = 4, l2 = 3 example. With
  H = identity, every pattern has its own syndrome, and the test decodes all
  63 non-zero words. The test holds a table of the 51 example patterns, each
  with its time step. Each pattern must be found after exactly its step plus
  the syndrome-check cycle. The other 12 words must be abandoned after 11
  cycles.
* `tb_grand_mo_markov` (n = 128, (128,104) random code, m = 2, l1 = 32,
  l2 = 16) and `tb_grand_mo_n79` (the 79-bit configuration): frames sent over a
  two-state Gilbert burst channel with g = 0.4, each frame checked against the
  reference model. The runs print the frame error rate and the average number
  of cycles. The frame counts are small, so these runs show behaviour rather
  than the error rates at 1e-5.

To run a testbench with plain Verilator:

    verilator --binary --timing --assert -y rtl rtl/grand_mo_pkg.sv \
        tb/tb_grand_mo_top_full.sv --top-module tb_grand_mo_top_full
    ./obj_dir/Vtb_grand_mo_top_full

Each testbench ends with a line `TB_RESULT checks=<n> failures=<n>`. Every
testbench here, the full-size one included, finishes in seconds.

## Where this RTL goes beyond or departs from the paper

* **From the paper:** the block structure (H memory, H·rᵀ, decoder core,
  controller, word generator); the shift register of burst syndromes
  `s_{1..l}`, with column inputs `s_comp ⊕ s_{1..j}`; NOR-reduce followed by
  a priority encoder; the schedule (m = 1 in one step, "shift up by 2, then by
  1", "reset and shift up by l+1"); the cycle-count formula; one step per
  cycle; the default sizes.
* **Chosen here:**
  * Cumulative syndromes are built inside the H memory after each load, over
    n cycles.
  * Each register row has a valid flag, so rows shifted in as zero never
    match.
  * Burst lengths are masked at run time, which makes `l1` and `l2`
    configurable per word.
  * The priority order is lowest start first, then shortest burst, and the
    encoder is a tree.
  * The core reports a burst as a start/end index pair. The paper's block
    diagram shows a single `⌈log2 n⌉` bus there.
  * `l2` limits the second burst, and `min(l1,l2)` limits the first.
  * The valid/ready handshakes, the abandon behaviour (output `r`) and the
    registered copy of `r` are this design's own.
* **Not the same as the paper's figure.** The paper's pattern-order figure for
  n = 6, m = 2, l1 = 4, l2 = 3 counts 46 patterns. Its hardware example figure
  and the cycle formula give 51 patterns in 11 cycles. This RTL matches the
  hardware example and the formula.
* **Not modelled:** the unrestricted Markov query order of the original
  algorithm (with its `Δl` parameter and up to ⌊d/2⌋ bursts), which the
  hardware replaces with the restricted order; soft information; and the
  G⁻¹ step.
* **Timing.** The paper reports 500 MHz in 65 nm for this datapath with no
  pipelining. No timing or area closure has been done on this RTL.
