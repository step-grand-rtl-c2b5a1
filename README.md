# Step-GRAND: a soft-input GRAND decoder with a bounded worst case

GRAND (Guessing Random Additive Noise Decoding) decodes any linear block code by guessing
the noise instead of using the code's structure: it flips a test error pattern (TEP) `e`
into the hard-decided received word `y_hat` and asks whether the result is a codeword,
`H * (y_hat ^ e)^T == 0`. Soft-input variants order the guesses by the channel
reliabilities, trying flips of the least reliable bits first. Their weak point in
hardware is the worst case: when many guesses fail, latency grows with the number of
patterns tried.

Step-GRAND bounds that number. TEPs of Hamming weight `HW` are drawn only from the
`gamma(HW)` least reliable positions, and `gamma` shrinks in steps as `HW` grows. This
repository holds synthesizable SystemVerilog for a step-GRAND decoder: code length
n = 128, 5-bit LLRs, up to 32 parity checks (code rates 0.75 to 1), TEP weights up to
P = 6. With the main parameter set (alpha = 2, beta = 6, P = 6) it tests 8,828 TEPs in at
most 279 clock cycles. When `y_hat` is already a codeword it answers in one cycle.

## 1. Which patterns are tried

The reliability order comes first. Positions are sorted by `|LLR|` in ascending order, so
rank 0 is the least reliable position. Three parameters define the subsets:

* `P`: the largest TEP weight.
* `beta`: the step size, i.e. how much the subset shrinks from one weight to the next.
* `alpha`: the number of segments. The `P` weights are split into `alpha` segments of
  `P/alpha` weights each. Inside segment `i` (1..alpha) the subset shrinks by
  `(alpha-i+1)*beta` per weight. Segment `i` starts at
  `gamma = (alpha-i+1)(alpha-i+2)/2 * (P/alpha) * beta`.

| parameters        | gamma for HW = 1..6   | TEPs tested |
|-------------------|-----------------------|-------------|
| alpha=2, beta=6, P=6 | 54, 42, 30, 18, 12, 6 | 8,828 |
| alpha=1, beta=6, P=6 | 36, 30, 24, 18, 12, 6 | 6,348 |
| alpha=1, beta=7, P=6 | 42, 35, 28, 21, 14, 7 | 11,907 |

For each weight, every subset of size `HW` of the first `gamma(HW)` ranks is tried. The
decoder uses lexicographic order on the sorted rank tuples: weight 1 goes by rank;
weight 2 runs (0,1), (0,2), ... (1,2), ...; and so on. The first pattern that zeroes the
syndrome wins. If none does, the frame is given up and returned uncorrected
(`out_success = 0`).

## 2. A decode, cycle by cycle

One time step is one clock cycle. Nothing inside a decode is pipelined, except the sorter.

| cycle(s)          | what happens |
|-------------------|--------------|
| 1                 | `s_c = H * y_hat^T`. If `s_c == 0` the word is output (latency 1). |
| 2 .. 8            | The bitonic sorter orders the 128 positions: log2(n) = 7 pipelined merge phases. Each position carries its channel index (`Ind`) and its H column. |
| 9                 | Weight 1: all `gamma(1)` tests `s_c == s_i` run at once. The evaluation-unit register is loaded with every pair syndrome `s_a ^ s_b`. |
| 10                | Weight 2: all `C(gamma(2),2)` pairs are tested at once against `s_c`. |
| 11 ..             | Weights 3..P: one composite syndrome per cycle (Section 3). |
| after a hit       | `1 + chunk` cycles of priority-encoder scan (Section 4). |

Here `s_i` is column `i` of H in sorted order, i.e. the syndrome of a single flip at rank
`i`. When the whole search fails, the latency is

    3 + log2(n) + sum_{HW=3..P} C(gamma(HW) - 2, HW - 2)

With the defaults this is 3 + 7 + 28 + 120 + 120 + 1 = 279 cycles.

## 3. Testing thousands of patterns per cycle: composite syndromes

This is the core of the architecture. Because the code is linear, the syndrome of a TEP
is the XOR of the single-flip syndromes of its positions. The **evaluation unit** holds
`s_a ^ s_b` for all pairs `a < b` of the `GMAX = 42` least reliable positions: 861
entries of 32 bits. The **controller** supplies one *composite syndrome* per cycle. Each
entry is XORed with it and NOR-reduced, so one cycle tests up to 861 TEPs. The OR of all
the NOR outputs is the hit flag.

* Weight 2: the composite is `s_c` itself, and the unit tests all pairs inside
  `gamma(2)`.
* Weight `HW >= 3`: the controller walks through *prefixes* `i1 < ... < im` with
  `m = HW-2`, in lexicographic order, with every element below `gamma(HW) - 2`. For each
  prefix it sends `s_comp = s_c ^ s_i1 ^ ... ^ s_im`, and the unit tests all pairs
  `(a,b)` with `im < a < b < gamma(HW)`. Each TEP of weight `HW` is then tested exactly
  once, in its lexicographic place. The number of cycles is the number of prefixes,
  `C(gamma(HW)-2, HW-2)`.

Example with `gamma = 6`, weight 4: the prefixes are (1,2), (1,3), (1,4), (2,3), (2,4),
(3,4) (1-based), which is C(4,2) = 6 cycles. The prefix (1,3) is tested against the pairs
(4,5), (4,6) and (5,6).

In the published architecture the register is a *shift register*: it is shifted up past
the pairs that are no longer valid and reloaded when the prefix changes. This
implementation keeps the register fixed instead. Two bounds select the live entries:
`a >= a_min` (one past the prefix's last element) and `b < b_lim` (`gamma(HW)`). The same
TEPs are tested in the same cycle, and no 861-entry barrel shifter is needed. The
register position of a hit also gives its pair directly. Because the bounds are inputs,
one register serves any run-time parameter set whose weight-2 subset fits in 42.

## 4. From a hit to the decoded word

Weight 1 is resolved in its own cycle by a 54-input priority encoder. For weights 2 and
up, the 861 NOR outputs are captured when the hit flag rises. An L = 64 input priority
encoder then reads them 64 at a time, starting from entry 0, one chunk per cycle. The
first chunk that holds a hit gives the position, which gives the pair `(a,b)`. This adds
`1 + chunk` cycles (1 to 14). The controller maps the prefix ranks and `a`, `b` through
`Ind` back to channel positions. The **word generator** flips those bits of `y_hat`. The
top registers `c_hat` and `u_hat`.

## 5. Blocks

    stepgrand_top
    |- h_memory         (n-k) x n parity-check matrix, all columns read in parallel
    |- syndrome_calc    s_c = H * y_hat^T
    |- bitonic_sorter   7-stage pipelined Batcher network, carries index and H column
    |- controller       schedule, weight-1 test, pair and composite syndromes, hit mapping
    |  '- priority_encoder (54 wide, weight-1 hit)
    |- eval_unit        861 pair syndromes, XOR/NOR/OR test, capture register
    |  '- priority_encoder (64 wide, chunk scan)
    '- word_generator   flips TEP bits into y_hat, extracts u_hat

`stepgrand_pkg` holds the default sizes and the functions that compute `gamma(HW)`
(Algorithm 1 of step-GRAND) and the pair layout.

## 6. Using the decoder

**Loading H.** Write one column per cycle while the decoder is idle: `h_wr_en`,
`h_wr_col` (0..127), `h_wr_data` (bit r = row r). A code with fewer than 32 checks leaves
the upper rows zero. A code shorter than 128 is padded with zero columns, and the padding
positions are given LLR +15 so that they sort last.

**LLRs.** Each LLR is 5-bit two's complement: 1 sign bit, 1 integer bit and 3 fraction
bits. Positive means bit 0. The hard decision is the sign bit. `|LLR|` saturates at 15.

**Frames.** A frame is taken when `in_valid && in_ready`. `cfg_alpha`, `cfg_beta` and
`cfg_p` are sampled with it. `out_valid` pulses for one cycle with:

* `c_hat`: the codeword.
* `u_hat`: `c_hat[K-1:0]`.
* `out_success`: a codeword was found.
* `out_hw`: the weight of the applied TEP.
* `out_cfg_err`: the parameter set does not fit the hardware. This means `gamma(1) > 54`,
  or `gamma(2) > 42`, or `P > 6`, or `alpha` does not divide `P`. No search is made.

The decoder handles one frame at a time, and `in_ready` is low while it is busy.

**Message bits.** `u_hat` assumes a systematic code with the message in positions
0..K-1. For a non-systematic code, use `c_hat` and apply the code's own `G^-1` outside the
decoder.

**Parameters.** The module parameters are `N` (128), `Q` (5), `NK` (32), `K` (105),
`PMAX` (6) and `L` (64). The register sizes come from `ALPHA_DEF` and `BETA_DEF` in the
package (2 and 6). A build for a larger subset, e.g. alpha = 2, beta = 7, means changing
those two values. The pair register grows as `C(gamma(2),2) x NK` flip-flops.

## 7. Codes and parameter sets

| code and parameters | fits | worst case (cycles) |
|---------------------|------|---------------------|
| CA-polar (128,105+11), alpha=2 beta=6 P=6 | yes: 23 checks, gamma 54 / 42 | 279 |
| CA-polar (128,105+11), alpha=1 beta=6 P=6 | yes: gamma 36 / 30 | 273 |
| BCH (127,106), alpha=1 beta=7 P=6 | yes: 21 checks, gamma 42 / 35, one padding position | 432 |
| BCH (127,106), alpha=2 beta=7 P=6 | no: needs gamma 63 / 49; `out_cfg_err` | - |

## 8. Departures and design choices

These points are this implementation's own, where the published description is silent
or is implemented differently:

* A fixed-layout pair register with live-entry bounds, in place of the shift-up and
  reload shift register (Section 3). It tests the same TEPs per cycle.
* The sorter starts in the cycle after the syndrome check. This matches the published
  latency formula `3 + log2(n) + ...`.
* Hits are resolved by scanning 64-entry chunks from the start, with the lowest index
  winning. The published architecture names an L-to-log2(L) encoder and a "2D priority
  encoder" without giving L or the scan order.
* Equal `|LLR|` values are ordered by channel index.
* `alpha`, `beta` and `P` are run-time inputs, limited by the register sizes built for
  (2, 6, 6). The published hardware lists alpha <= 2, beta <= 6, P <= 6.
* The inverse generator matrix is not stored: `u_hat` assumes a systematic code.
* Frame handshake, H load port, reset (asynchronous, active low), the abandonment output
  and `out_cfg_err` are this implementation's own.
* One typo in the published walk-through lists the composite `s_c ^ s2 ^ s3` twice when
  evaluating weight 4. The register contents shown for that step imply `s_c ^ s2 ^ s4`,
  which is what the lexicographic order gives and what is built.

## 9. Verification

Each block has a self-checking testbench in `tb/`. They compare against values computed
independently, and each prints `TB_RESULT checks=N failures=M`.

| testbench | checks |
|-----------|--------|
| `tb_h_memory` | reset, random column writes against a shadow copy |
| `tb_syndrome_calc` | row-wise parity reference |
| `tb_priority_encoder` | lowest set bit, single bits, empty vector |
| `tb_word_generator` | flips, repeated and disabled positions |
| `tb_bitonic_sorter` | back-to-back sets, order and carried data against an insertion sort, 7-cycle latency |
| `tb_eval_unit` | hit flag and first-hit position for random bounds and duplicated syndromes |
| `tb_controller` | flip positions and exact cycle of `done` for hits of every weight, with a sorter timing model |
| `tb_stepgrand_top` | full decoder at default size: codeword (1 cycle), weight 1..6 hits, exhausted search (279 cycles; 273 with alpha = 1), multi-chunk scan, alpha = 1, unsupported parameters |
| `tb_workload_bch` | the real BCH (127,106) code, generator polynomial built in the testbench, alpha = 1, beta = 7 (432-cycle worst case), unsupported alpha = 2 |

`tb/stepgrand_ref_pkg.sv` is the reference model shared by the testbenches. It
enumerates TEPs one at a time and predicts the latency. To run a testbench with
Verilator 5, list the two packages and the testbench, and let Verilator find the modules
in `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_stepgrand_top \
        -y rtl -y tb rtl/stepgrand_pkg.sv tb/stepgrand_ref_pkg.sv tb/tb_stepgrand_top.sv
    ./obj_dir/Vtb_stepgrand_top

The full-size test finishes in well under a second of simulation time. Block testbenches
that do not use the reference model only need `rtl/stepgrand_pkg.sv` and their own file.

**What is not verified.** The tests use a random systematic code in place of the 5G
CA-polar code, whose construction is not reproduced here. Error-rate curves and average
latency over an AWGN channel are not reproduced. No gate-level synthesis results (area,
454 MHz) are claimed for this RTL.
