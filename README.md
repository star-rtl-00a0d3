# A softmax engine built from RRAM crossbars

In attention models the softmax over each row of scores grows costly with
sequence length. When the matrix products already run inside RRAM crossbars,
the softmax becomes the bottleneck. This design computes softmax with the same
kind of arrays. It has no exponential unit, no comparator tree and no adder
tree:

* a **content-addressable memory holding every possible score in sorted
  order** finds the maximum;
* **the same array, used as a dot-product crossbar**, subtracts that maximum
  from each score;
* a **CAM plus a look-up crossbar** turns each difference into its
  exponential;
* a **second copy of the look-up table, driven by how often each table row was
  hit**, produces the sum of exponentials in one crossbar read;
* a divider forms the probabilities.

The SystemVerilog here is a cycle-accurate digital model of that engine. Each
crossbar is an array of stored words whose search or column sums are computed
exactly. It is synthesizable, and the top level is
`rtl/star_softmax_engine.sv`.

The RTL follows the published engine in what each array stores, how the
arrays are used and how they are connected. The following were not given and
are choices of this design:

* the cycle timing;
* the handshakes;
* the buffers between the steps;
* the divider circuit;
* the output format.

The section "Departures and open points" lists every such choice.

## Number formats

| quantity | format | notes |
|---|---|---|
| score `x_i` | 9-bit two's complement Q6.3 (-32.0 … 31.875) | the widest of the evaluated formats; Q6.2 and Q5.2 scores are shifted left and sign-extended to Q6.3 before entry |
| difference `d_i = x_i - x_max` | 10-bit signed, always ≤ 0 | |
| exponential `e_i` | 18-bit unsigned fraction, `min(round(e^d · 2^18), 2^18 - 1)` | e^0 saturates to all ones |
| denominator `S = Σ e_j` | 28 bits | up to 512 × (2^18 - 1) |
| probability `p_i` | 16-bit unsigned Q0.16, `min(floor(e_i · 2^16 / S), 2^16 - 1)` | a lone element gives 0xFFFF |

All sizes are in `rtl/star_pkg.sv`. The engine has:

* a CAM/SUB crossbar of 512 rows × 9 bits;
* exponential CAM, LUT and VMM crossbars of 256 rows each;
* an 18-bit LUT word;
* vectors of up to 512 elements.

## Step 1: finding the maximum with a sorted CAM (`star_cam_sub_xbar`, `star_max_finder`)

The CAM/SUB crossbar has one row for each of the 512 possible scores. The rows
are stored in **descending order**: row `r` holds the bit pattern of
`255 - r` (in Q6.3 units). Each bit is a complementary pair of cells, which is
why the array has 18 columns for 9-bit words.

In CAM mode a score is applied to the search lines. Only the row holding that
exact value keeps its matchline high, so the match vector is one-hot. The
match vectors of all the scores of a vector are ORed into a 512-bit register.
After the last score, a set bit marks each distinct value that occurred.
Because the rows are sorted, the **first set bit** (lowest row index) is the
maximum. The position of that bit is all that is needed; the maximum's value
is never read out.

Example with four 4-bit rows:

* three scores match rows 3, 2 and 4, and the fourth also matches row 4;
* the OR of their match vectors is `0111`, read from row 1 down;
* the maximum is therefore the word in row 2.

The engine also records the matched row number of each score. It stores them
in a row buffer of `MAX_LEN` entries, one per element in arrival order.

## Step 2: subtraction on the same array

The crossbar then switches to compute mode, where the word lines are inputs.
For element `i` the engine drives:

* **+1** on the row of `x_i`, by decoding the row number it stored;
* **−1** on the row of `x_max`;
* nothing on every other row.

Bit column `c` then carries `bit_c(x_i) − bit_c(x_max)`, which is −1, 0 or
+1. Each column sum is digitised. The sums are shift-added with weight `2^c`,
except the sign column, which has weight `−2^8`. The result is exactly
`x_i − x_max` in two's complement. If `x_i` is itself the maximum, both drives
land on one row and cancel, so the result is 0.

One element is processed per cycle. The array is in CAM mode while a vector
streams in and in compute mode while it is subtracted, so it changes mode only
twice per vector.

## Step 3: exponentials by look-up (`star_exp_cam`, `star_lut_xbar`)

A difference is never positive, so its sign is dropped. The magnitude `|d_i|`
is searched in a 256-row CAM whose row `k` holds `k`, that is `k/8` in real
units. The match vector drives the word lines of the LUT crossbar. Row `k` of
the LUT holds

    LUT[k] = min(round(e^(-k/8) · 2^18), 2^18 − 1)

and the sense amplifiers read it out as `e_i`.

A magnitude above 255 (x_i more than 31.875 below the maximum) matches no
row. The LUT then reads zero. This loses nothing: the table is already zero
from row 106 on, where `e^(-k/8) · 2^18 < 0.5`.

## Step 4: the sum as a single crossbar read (`star_match_counter`, `star_vmm_xbar`)

This step departs most from a conventional design. The match vector of each
element also feeds **one counter per CAM row**, so `count[k]` becomes the
number of elements whose difference had magnitude `k`. The denominator then
regroups as a sum over table rows:

    Σ_j e_j  =  Σ_k count[k] · LUT[k]

That is a vector-matrix product between the counts and the table. The VMM
crossbar holds a second copy of the LUT, one bit per cell. The counts are
applied to its word lines, so bit column `c` sums the counts of the rows that
have bit `c` set. The 18 column sums are digitised and shift-added to give the
denominator. This takes one read after the last element instead of 512
additions.

## Step 5: division (`star_divider`)

A 17-stage pipelined restoring divider works out one quotient bit per stage:

* stage 0 decides the integer bit (`e_i ≥ S`);
* stages 1–16 give the fraction bits.

It accepts a new operand pair every cycle and has a fixed latency of 17
cycles. A quotient of exactly 1 saturates to 0xFFFF.

## Vector-level pipelining and the exponential banks (`star_softmax_engine`)

The division needs the denominator, which is known only after the last
element, so every `e_i` is kept until then. The top level splits the work
into two parts:

* the **front end** does steps 1–4, which share the CAM/SUB crossbar;
* the **back end** does step 5.

Between them are **two exponential banks**, each holding up to 512 words, the
denominator and the length of one vector. The back end divides vector *k*
from one bank while the front end takes in and processes vector *k+1* into
the other. The front end waits, and raises `front_stall`, only when both banks
still hold vectors that have not been divided. This can happen when a long
vector is followed by short ones.

Front-end states, one vector at a time:

| state | cycles | action |
|---|---|---|
| FIND | one per element, as offered | `in_ready` high; search, OR-merge, record row |
| WAIT | ≥ 1 | wait for the write bank to be free |
| SUB | N | subtract element i; exponential of element i−1 |
| DRAIN | 1 | exponential of the last element |
| SUM | 1 | VMM read, store sum and length, mark bank full, clear counters and OR register |

For a vector of N elements with no stall, the first probability is valid
**N + 21 clock edges** after the edge that accepted the last score. The
others follow one per cycle, in input order. `in_ready` is low for N + 3
cycles after the last score.

## Interface

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, active-low asynchronous reset |
| `prog_en`, `prog_sel`, `prog_row`, `prog_data` | in | 1, 2, 9, 18 | write one row of the crossbar chosen by `prog_sel` (`PROG_CAMSUB`, `PROG_EXPCAM`, `PROG_LUT`, `PROG_VMM`) |
| `in_valid`, `in_ready`, `in_data`, `in_last` | in/out | 1, 1, 9, 1 | score stream (valid/ready); `in_last` ends a vector |
| `out_valid`, `out_data`, `out_idx`, `out_last` | out | 1, 16, 9, 1 | probability stream, no backpressure |
| `front_stall` | out | 1 | front end waiting for a free bank |

A vector also ends after 512 elements if `in_last` does not come. The
crossbars must be loaded after reset and before the first score:

* CAM/SUB row `r` (0–511) ← `(255 − r) mod 512`;
* exponential CAM row `k` (0–255) ← `k`;
* LUT row `k` ← `min(round(e^(-k/8) · 2^18), 2^18 − 1)`;
* VMM row `k` ← the same value as LUT row `k`.

The engine does not check for a missing or repeated value. A score that is
not stored raises an assertion in simulation.

The engine sits between two matrix multiplications of an attention layer:
`Q·Kᵀ` supplies the scores and the probabilities feed the product with `V`.
The matrix-multiply engine is not part of this RTL. The score and probability
streams are where it would connect.

## Files

| file | contents |
|---|---|
| `rtl/star_pkg.sv` | sizes, score type, crossbar mode and programming-select enums |
| `rtl/star_cam_sub_xbar.sv` | CAM/SUB crossbar: search and ±1 subtraction |
| `rtl/star_max_finder.sv` | OR-merge register and first-one search |
| `rtl/star_exp_cam.sv` | magnitude CAM |
| `rtl/star_lut_xbar.sv` | exponential look-up crossbar |
| `rtl/star_match_counter.sv` | per-row hit counters |
| `rtl/star_vmm_xbar.sv` | count × table crossbar for the denominator |
| `rtl/star_divider.sv` | pipelined divider |
| `rtl/star_softmax_engine.sv` | top level: sequencing, row buffer, banks |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_star_workloads.sv` | whole attention heads, L = 128 and 512 |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. To
run one, for example the full engine at its default size:

    verilator --binary --timing --assert -Irtl rtl/star_pkg.sv \
        tb/tb_star_softmax_engine.sv --top-module tb_star_softmax_engine -o sim
    ./obj_dir/sim

Replace the names to run any of the module testbenches. The full-engine test
builds in a few seconds and runs in under a second.

The full-engine test does the following:

1. It loads the tables through the programming port.
2. It streams these vectors:
   * a four-element example;
   * a single element;
   * 128-element vectors in the Q6.2, Q6.3 and Q5.2 score formats;
   * a vector with repeated maxima and differences beyond the table;
   * a 512-element vector followed by two tiny ones, which forces a stall;
   * a 512-element vector without `in_last`.
3. It compares every output bit-exactly with a fixed-point reference model.
4. It checks the outputs of the 128-element vectors against double-precision
   softmax. The largest error is about 1.5 × 10⁻⁵.
5. It checks the latency formula above.
6. It checks that back-end overlap, stalls, out-of-range differences and
   saturated outputs all occurred.

`tb/tb_star_workloads.sv` runs the softmax load of whole BERT-base attention
heads. It streams every row of a head back to back and checks each output
bit-exactly. It covers L = 128 in each of the three score formats, and
L = 512. A head of L rows keeps the front end busy for L(2L + 3) cycles, about
two cycles per score. The division overlaps the next row, so it adds only the
last row's latency. Measured: 33 297 cycles for a 128 × 128 head and
526 353 cycles for a 512 × 512 head. The largest error against
double-precision softmax is 1.6 × 10⁻⁵. This test runs in about 15 seconds.

## Departures and open points

The published description gives the arrays, their contents and their order
of use. It does not give any of the following, all of which are this design's
choices:

* **Analog behaviour.** Column sums are digitised exactly. The real arrays use
  sample-and-hold circuits and ADCs whose resolution for this engine is not
  specified. A lower ADC resolution would introduce errors in the subtraction
  (columns take only −1, 0 or +1, so three levels suffice) and in the denominator
  (column sums reach 512, which needs 10 bits).
* **Storing row numbers.** The row number of each score is kept, and the +1
  drive is decoded from it. This replaces keeping or recomputing its 512-bit
  match vector.
* **Buffers and banks.** The row buffer and the two exponential banks,
  together 512 × 9 bits plus 2 × 512 × 18 bits, hold data between the steps.
* **Table contents are loaded, not fixed.** The tables are written through a
  port, which matches the source's statement that they are preloaded.
* **LUT word width.** The width, 18 bits (m = 18 in the table formula), is read
  from the published 256 × 18 LUT size. In the published small example the
  number of LUT columns equals m. The same example prints e^-3 as 0.1353, a
  misprint for 0.0498, but its table row `0001` is the correct value.
* **Sorted storage.** The CAM/SUB rows are stored in descending order, as
  the source's text says. The cell contents printed in its small example
  figure are not sorted, so that figure is taken to show the mechanism only.
* **Range of the exponential CAM.** The 256-row CAM covers differences down to
  −31.875. Larger differences read as zero, which is exact at 18-bit
  resolution.
* **Divider.** The divider circuit, the output format and the counter width
  are this design's choices.
* **Pipelining scope.** Vector-level pipelining is modelled only inside the
  softmax engine, between its front and back ends. The source design also
  overlaps it with the matrix-multiply engine, whose schedule is not
  described.
* **Not modelled.** The matrix-multiply engine (128 × 128 crossbars with 5-bit
  ADCs), the RRAM cells and the analog read-out are not modelled.
