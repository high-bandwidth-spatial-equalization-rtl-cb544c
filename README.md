# PPAC finite-alphabet spatial equalizer

In the uplink of a massive MU-MIMO base station, every received sample
vector `y` (one complex entry per antenna, `B` antennas) has to be multiplied
by an equalization matrix to separate the `U` users: `s_hat = W^H y`. At mmWave
bandwidths this happens billions of times per second, so the matrix-vector
product dominates power and area.

*Finite-alphabet equalization* makes this product cheap by writing the
equalizer as `V^H = diag(beta*) X^H`. The matrix `X^H` has only low-resolution
entries (1 to 3 bits per real and imaginary part). Each user `u` then has one
high-resolution complex scale factor `beta*_u`, applied once per user after
the inner product:

    s_hat_u = beta*_u * (x_u^H y)

This RTL implements that product in a *processing-in-memory* (PIM) array.
The low-resolution matrix sits in a memory whose bit-cells each hold an XNOR
gate. Each memory row counts its XNOR outputs in a small ALU. The received
vector goes in one bit plane per clock cycle, most significant bit first. So
one `U x B` complex product with `K`-bit matrix entries and `L`-bit samples
takes `L` cycles, whatever `B` and `U` are.

The default configuration is `B = 256` antennas, `U = 16` users, `L = 7`-bit
samples and `K = 3`-bit matrix entries. This is one equalizer instance. The
published evaluation reaches 2 G vectors/s by running many such instances in
parallel, time-interleaved. That instance farm is not included here.

## Number formats

* **Matrix entries** are *mid-rise* numbers. A `K`-bit entry with stored bits
  `b_0 .. b_{K-1}` has the value `sum_k 2^k (2 b_k - 1)`. The 1-bit alphabet is
  `{-1, +1}`, the 2-bit one `{-3, -1, 1, 3}` and the 3-bit one is the odd numbers
  from -7 to 7. The code of a value `v` is `(v + 2^K - 1) / 2`. You negate a
  value by inverting all of its bits. A `K`-bit array also holds every smaller
  alphabet, because ±1 and ±3 are valid 3-bit values too.
* **Samples** `y` are `L`-bit two's complement numbers.
* **Complex numbers** are handled through the real-valued decomposition. The
  array sees the `2B`-entry real vector `y_R = [Re y; Im y]`. For user `u` it
  stores two real rows:

      real row:  [ Re(x_u^H)  -Im(x_u^H) ]   . y_R = Re(x_u^H y)
      imag row:  [ Im(x_u^H)   Re(x_u^H) ]   . y_R = Im(x_u^H y)

  Here `x_u^H` is row `u` of `X^H`, stored exactly as given (it is already
  conjugated).

## How an XNOR array computes an inner product

This section covers the part that is least obvious from the code.

**Bit-cell and row.** Take one PPAC row, storing bits `a_i` for
`i = 1..N`, with `N = 2B`. Each bit stands for the bipolar value
`x_i = 2 a_i - 1`. In every cycle the array gets one bit plane: the bits
`y_i in {0,1}` of one significance of all `2B` samples. Each bit-cell outputs
`XNOR(a_i, y_i)`. The row then counts the ones (the row popcount):

    p = #{ i : a_i == y_i }

The count is built in two steps. First, a local adder counts each group
(bank) of `BANK_W` cells. Then the row ALU adds the bank counts.

**Row ALU offset.** The wanted quantity is `sum_i x_i y_i`, a bipolar row
times a unipolar bit plane. Let `p1` be the popcount for the all-ones plane,
which is simply the number of stored ones. Then:

    sum_i x_i y_i = p + p1 - N

To check this, count the four cases of `(a_i, y_i)`. The `a=0, y=0` cases
cancel between `p` and `-N`. What remains is
`#(a=1,y=1) - #(a=0,y=1)`.

The row ALU has two registers fed by the popcount adder. The first loads
every cycle and holds `p`. The second, the offset register, loads only when
`ld_ofs` is high. The controller loads it during one calibration cycle in
which the serializer drives an all-ones plane, so the register holds `p1`.
The ALU output `p_reg + (ofs_reg - 2B)` is then the inner product, one cycle
after the bit plane.

**Multi-bit rows.** A `K`-bit matrix row uses `K` PPAC rows, one per bit
significance. Row `k` holds the bits `b_k` of every entry, and its row ALU
gives `r_k`. The multi-bit row output is `sum_k (r_k <<< k)`. By the mid-rise
definition, this is the inner product of the `K`-bit row with the bit plane.

**Bit-serial accumulation.** Bit planes arrive MSB first. Each processing
element (PE) keeps, for the real row and the imaginary row, an accumulator
`acc_next = din + f(acc)`. Here `din` is the multi-bit row result and `f` is
controlled by two signals, `acc` and `acc_neg` (written `accX-1` in the
original drawing):

    f = acc ? (acc_neg ? -(2*acc) : 2*acc) : 0

In hardware, `f` is the fed-back value shifted left by one, XORed with
`acc_neg`, ANDed with `acc`, plus `acc_neg` as the adder's carry-in. The XOR
and the carry-in together form a two's complement negation.

The MSB of a two's complement sample has weight `-2^(L-1)`. The controller
therefore runs the following schedule:

| bit plane (time order) | `acc` | `acc_neg` | accumulator afterwards |
|---|---|---|---|
| MSB (`L-1`) | 0 | 0 | `r_{L-1}` |
| `L-2` | 1 | 1 | `r_{L-2} - 2 r_{L-1}` |
| `L-3 .. 0` | 1 | 0 | `2*acc + r_l` |

After `L` planes the accumulator holds
`-2^(L-1) r_{L-1} + sum_{l<L-1} 2^l r_l = x_u^H y` exactly. The scaling by
`beta*_u` follows in a complex multiplier.

**Word widths.** All widths are exact; no intermediate result can overflow.

| signal | width | range |
|---|---|---|
| bank count | `clog2(BANK_W+1)` | `0..BANK_W` |
| row ALU result | `clog2(2B)+2` signed | `-2B..2B` |
| multi-bit row | `clog2(2B)+K+1` signed | `|.| <= 2B(2^K-1)` |
| accumulator | `clog2(2B)+K+L` signed | `|.| <= 2B(2^K-1)2^(L-1)` |
| output `s` | accumulator + `BETA_W` + 1 | full-precision complex product |

At the defaults these are 5, 11, 13, 19 and 32 bits.

## Block structure

```
ppac_equalizer                       top: one equalizer instance
 |- ppac_row_decoder                 mem_addr/mem_we -> one of 2KU row write enables
 |- ppac_ctrl                        sequencing, handshake, calibration, acc/accX-1
 |- ppac_plane_serializer            y -> y_R bit planes, MSB first (or all ones)
 `- ppac_pe  x U                     one per user
     |- ppac_multibit_row  x 2       real and imaginary row
     |   `- (ppac_row + ppac_row_alu) x K
     |        `- ppac_bank x 2B/BANK_W
     |             `- ppac_bitcell x BANK_W
     |- ppac_bitserial_acc x 2
     `- ppac_cmul                    beta*_u register and complex multiplier
ppac_pkg                             default sizes and width functions
```

At the defaults the array has 96 rows of 512 bit-cells (49,152 cells), 96 row
ALUs, 32 accumulators and 16 complex multipliers.

## Interface and timing

All signals are synchronous to `clk`. `rst_n` is an active-low asynchronous
reset of the control and datapath registers. Bit-cells, the serializer and
the memory have no reset.

**Matrix write.** Pulsing `mem_we` writes `mem_wdata` (2B bits) into one
PPAC row. The row address is `(u*2 + part)*K + k`:

* `part` is 0 for the real row and 1 for the imaginary row;
* `k` is the bit significance;
* bit `i < B` of the data belongs to `Re y_i`, and bit `B+i` to `Im y_i`.

`ppac_pkg::row_addr()` computes this address. Rows do not need to be
written in order.

**Beta write.** `beta_we` loads `beta_re`/`beta_im` (`BETA_W`-bit two's
complement) into the register of user `beta_addr`. These are the values of
`beta*_u`, already conjugated.

Matrix and beta writes are allowed only while `busy` is low. Assertions in
the RTL enforce this.

**Calibration.** After reset and after any matrix write, the offset registers
are stale. In the first idle cycle without a write, the controller applies
the all-ones plane and loads the offset registers (`calib` is high). During
that cycle, and during matrix writes, `in_ready` is low.

**Vectors.** `y_re[b]` and `y_im[b]` (L bits each) are taken when `in_valid`
and `in_ready` are both high at a rising edge. `in_valid` must then stay high
until the vector is taken (asserted). The next vector is accepted in the
cycle that applies the last bit plane. With `in_valid` held high, one vector
is therefore taken every `L` cycles, with no gap.

**Results.** `out_valid` is high for exactly one cycle, `L + 1` rising edges
after the edge that took the vector. In that cycle `s_re[u]`/`s_im[u]` hold
`beta*_u * x_u^H y` at full precision. The outputs are combinational from the
accumulator output registers and the beta registers, so read them in that
cycle.

| cycle following edge | e0 | e1 | ... | e(L-1) | eL | e(L+1) |
|---|---|---|---|---|---|---|
| bit plane applied to the array | MSB | L-2 | ... | LSB | next vector's MSB | |
| plane added into the accumulators | | MSB | ... | bit 1 | LSB | |
| `out_valid` | | | | | | 1 |

Here e0 is the edge that takes the vector.

Throughput is one vector per `L` cycles. The original design was reported at
about 800 MHz in 28 nm, which gives about 114 M vectors/s for `L = 7`.

## What follows the published design and what is added here

Taken from the published architecture:

* the XNOR bit-cell;
* the per-row popcount and the row ALU's two registers with the `2B` offset;
* `K` rows per matrix row, combined by shifts and adds;
* MSB-first bit-serial input and the doubling accumulator with its
  `acc`/`accX-1` controls;
* the real-valued decomposition and the `2KU x 2B` array;
* one complex beta multiplier per user.

Choices made in this RTL, which the source does not specify:

* **Storage.** The bit-cells are flops with a synchronous write enable. The
  original uses latches behind a clock gate per bit-cell group, which is
  logically the same.
* **Bank size.** `BANK_W = 16` bit-cells per bank.
* **Offset register.** It is loaded with the all-ones popcount in a
  calibration cycle that the controller inserts automatically.
* **Control schedule.** The `acc`/`accX-1` schedule above is derived from
  two's complement arithmetic; the source names the signals but gives no
  timing.
* **PE organisation.** Each PE holds two multi-bit rows (real and imaginary)
  and two accumulators.
* **Beta.** `BETA_W = 12` bits per part, full-precision products, no
  rounding.
* **Interfaces.** The whole-vector input interface with valid/ready, the
  matrix write port and its address map, and the reset behaviour.
* **Matrix precision.** `K = 3` is the default because it holds all three
  evaluated alphabets. A `K = 1` build needs a third of the array.

Not included:

* the time-interleaving of many instances for 2 G vectors/s;
* the computation of `X^H` and `beta` from the channel (done offline by the
  FAME-FBS or quantized L-MMSE algorithms);
* library clock-gating cells.

The RTL has been simulated but not synthesized to a technology, so no timing
or area figure is claimed for it.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares the
module against values computed independently in the testbench.

* `tb_ppac_bitcell`, `tb_ppac_bank`, `tb_ppac_row` check storage and XNOR
  counts.
* `tb_ppac_row_alu` checks `p + p1 - 2B` and that the offset is held.
* `tb_ppac_multibit_row` checks `sum v_i y_i` for random 3-bit mid-rise rows
  and bit planes, including all-equal extremes.
* `tb_ppac_bitserial_acc` checks the two's complement bit-serial sum,
  including the largest magnitudes.
* `tb_ppac_cmul` checks the complex product.
* `tb_ppac_plane_serializer` checks MSB-first order and the all-ones plane.
* `tb_ppac_ctrl` checks the full cycle schedule relative to each accepted
  vector: one vector every `L` cycles, latency, calibration.
* `tb_ppac_pe` checks one user end to end at reduced size.
* `tb_ppac_equalizer` tests the whole design at `B=16, U=4, L=4, K=2`.
  It sends 300 vectors with random gaps and five matrix reloads.
* `tb_ppac_equalizer_full` runs the same test with every parameter at its
  default (256 x 16, L=7, K=3), on 200 vectors.

Both end-to-end benches have four phases. They use `K`-bit, 1-bit and 2-bit
matrices with `L`-bit samples, then `K`-bit matrices with 4-bit samples
(sign-extended). They finish with an extreme case: all samples `-2^(L-1)`
and all entries `±(2^K-1)`. The benches count calibrations, input stalls,
back-to-back vectors, idle gaps and reloads. Each one fails if any of these
never happened. They also check spacing and latency cycle by cycle.

Each bench prints `TB_RESULT checks=N failures=M` and has a cycle-count
watchdog.

To simulate with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_ppac_equalizer \
        -y rtl -y tb +libext+.sv rtl/ppac_pkg.sv tb/tb_ppac_equalizer.sv
    ./obj_dir/Vtb_ppac_equalizer

Replace `tb_ppac_equalizer` with any testbench name. The full-size bench
takes a few minutes to build (the C++ model of the 49k-cell array is large)
and seconds to run.

To change the configuration, override the parameters of `ppac_equalizer`
(`B`, `U`, `L >= 2`, `K`, `BANK_W` dividing `2B`, `BETA_W`) or the defaults in
`ppac_pkg`.
