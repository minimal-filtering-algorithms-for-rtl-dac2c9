# Minimal filtering units for small CNN kernels

Most of the work in a convolutional layer is made of one small step, repeated:
slide a window over a stream of samples and take its inner product with an
M-tap filter. Done directly, two neighbouring outputs

    y0 = w0 x0 + w1 x1 + ... + w(M-1) x(M-1)
    y1 = w0 x1 + w1 x2 + ... + w(M-1) xM

cost 2M multipliers in a fully parallel circuit. The RTL here computes the same
pair of outputs with about 30 % fewer multipliers. It uses Winograd's minimal
filtering trick for three taps and extends it to 5, 7, 9 and 11 taps:

| M  | samples in | multipliers, direct | multipliers, here | tap groups  |
|----|-----------:|--------------------:|------------------:|-------------|
| 3  | 4          | 6                   | 4                 | 3           |
| 5  | 6          | 10                  | 7                 | 3 + 2       |
| 7  | 8          | 14                  | 10                | 3 + 1 + 3   |
| 9  | 10         | 18                  | 12                | 3 + 3 + 3   |
| 11 | 12         | 22                  | 15                | 3 + 3 + 3 + 2 |

The algorithms and their data-flow graphs come from A. Cariow and G. Cariowa,
"Minimal Filtering Algorithms for Convolutional Neural Networks". The word
lengths, the registers, the clocking and the reset are this implementation's
own choices. The publication describes only the arithmetic.

## The three-tap trick

Everything rests on one kernel (`mf_alg3`). Given samples x0..x3 and taps
w0..w2, it forms four sums of samples, multiplies each by a factor fixed by
the taps, and adds the four products two different ways:

    mu0 = (x0 - x2) * s0        s0 = w0
    mu1 = (x1 + x2) * s1        s1 = (w0 + w1 + w2) / 2
    mu2 = (x2 - x1) * s2        s2 = (w0 - w1 + w2) / 2
    mu3 = (x1 - x3) * s3        s3 = w2

    y0 = mu0 + mu1 + mu2
    y1 = mu1 - mu2 - mu3

To see why it is right, expand mu1 + mu2 = x1 w1 + x2 (w0 + w2). Adding mu0
removes the unwanted x2 w0 term and adds x0 w0, which gives y0. Likewise
mu1 - mu2 = x1 (w0 + w2) + x2 w1. Subtracting mu3 removes x1 w2 and adds
x3 w2, which gives y1.

Because the taps of a CNN layer are constant, s0..s3 are computed once, when
the taps are loaded, and not per window. What remains per window is 4
pre-adders, 4 multipliers and two 3-input adders, against 6 multipliers and
two 3-input adders for the direct form.

## Longer filters: groups of taps

A longer filter is split into consecutive groups of taps. Each group's share
of y0 and y1 is computed on its own, and the shares are added:

* **3 taps** (starting at tap t): an F(2,3) kernel on samples x(t)..x(t+3).
  It uses 4 multipliers.
* **2 taps** `wa, wb` (`mf_pair`): a Karatsuba-like kernel on x(t)..x(t+2)
  with factors wa, wa + wb and wb:
  `mu0 = (x0 - x1) wa`, `mu1 = x1 (wa + wb)`, `mu2 = (x2 - x1) wb`, then
  `y0 = mu0 + mu1` and `y1 = mu1 + mu2`. It uses 3 multipliers.
* **1 tap**: two plain products, `x(t) w` and `x(t+1) w`.

Neighbouring groups share one sample. The 3-tap group at taps 0..2 reads
x0..x3, and the next group starts at x3. The factors s0, s1, ... are numbered
group after group, in the order of the table below. Use that order when
driving a datapath directly.

| M  | factor layout (s index: value)                                          |
|----|-------------------------------------------------------------------------|
| 3  | 0..3: F(2,3) on w0..w2                                                  |
| 5  | 0..3: F(2,3) on w0..w2; 4: w3, 5: w3+w4, 6: w4                          |
| 7  | 0..3: F(2,3) on w0..w2; 4: w3, 5: w3; 6..9: F(2,3) on w4..w6            |
| 9  | 0..3, 4..7, 8..11: F(2,3) on w0..w2, w3..w5, w6..w8                     |
| 11 | as M=9, then 12: w9, 13: w9+w10, 14: w10                                |

Here "F(2,3) on wa..wc" means wa, (wa+wb+wc)/2, (wa-wb+wc)/2 and wc.

## Number format and exactness

Samples and taps are signed two's-complement integers: `DATA_W` and `COEF_W`
bits, both 16 by default. The halved factors (w0 + w1 + w2)/2 and
(w0 - w1 + w2)/2 need one fractional bit. So every factor is carried as a
signed `COEF_W+2`-bit number with one fractional bit. In other words, the
stored integer is 2·s. All products then carry one fractional bit.

That bit is always zero in each group's share, so it is dropped without
rounding:

* in the F(2,3) kernel, the doubled sums are even because the stored 2·s1
  and 2·s2 have the same parity, and 2·s0 and 2·s3 are even;
* in the pair and single-tap groups, every stored factor is even.

The results therefore equal the direct sums bit for bit. The outputs are
`DATA_W+COEF_W+4` bits wide, which is enough for up to 16 taps with no
overflow. There is no rounding and no saturation.

The uniform factor format makes the plain-tap multipliers two bits wider than
they strictly need to be. The factors are run-time values, so synthesis cannot
trim those bits.

## Hardware organisation

```
mf_top
 ├─ mf_channel #(M=3)  ── mf_coef_gen #(3)  ─► factor register ─► mf_alg3  ─► output register
 ├─ mf_channel #(M=5)  ── mf_coef_gen #(5)  ─► factor register ─► mf_alg5  (mf_alg3 + mf_pair)
 ├─ mf_channel #(M=7)  ── ...                                     mf_alg7  (mf_alg3 + 2 products + mf_alg3)
 ├─ mf_channel #(M=9)  ── ...                                     mf_alg9  (3 × mf_alg3)
 └─ mf_channel #(M=11) ── ...                                     mf_alg11 (3 × mf_alg3 + mf_pair)
```

* `mf_pkg`: default widths, the tap-group decomposition per M
  (`group_kind`) and the multiplier count (`num_mults`).
* `mf_alg3`, `mf_pair`: the two kernels, combinational.
* `mf_alg5`, `mf_alg7`, `mf_alg9`, `mf_alg11`: the datapaths for the larger
  filters, combinational. Each is built from the kernels as described above.
* `mf_coef_gen #(M)`: the adder network that turns taps into factors.
* `mf_channel #(M)`: one clocked unit. It holds a factor register and an
  output register around the datapath.
* `mf_top`: one unit of each size, side by side, each with its own ports.

### Interface of `mf_top`

For each M in {3, 5, 7, 9, 11} the top has the following ports. All are
synchronous to `clk`. `rst_n` is a synchronous, active-low reset.

| port         | dir | width                      | meaning                                   |
|--------------|-----|----------------------------|-------------------------------------------|
| `wM_load`    | in  | 1                          | store the taps `wM`                       |
| `wM`         | in  | `COEF_W` × M               | taps w0..w(M-1)                           |
| `xM_valid`   | in  | 1                          | `xM` holds a window this cycle            |
| `xM`         | in  | `DATA_W` × (M+1)           | window x0..xM                             |
| `yM_valid`   | out | 1                          | `yM` holds a new result                   |
| `yM`         | out | `DATA_W+COEF_W+4` × 2      | y0, y1                                    |

### Timing

* Each unit accepts one window per clock cycle.
* The results of that window appear on `yM` one cycle later, with
  `yM_valid` high. `yM` holds its value while no new window arrives.
* Taps loaded at one clock edge apply to windows sampled from the next edge
  on. A window presented in the same cycle as `wM_load` still uses the old
  taps.
* Reset clears the factor registers, so the unit computes zeros until taps
  are loaded. Reset also clears `yM_valid`.
* An assertion in `mf_channel` checks the one-cycle latency.

To run a whole 1-D convolution y_j = Σ w_i x_(i+j), present the windows
starting at j = 0, 2, 4, ... on consecutive cycles. Each window yields y_j and
y_(j+1). A stream of N samples takes (N − M + 1)/2 cycles.

## Where this departs from, or interprets, the source

* **Misprints resolved.** Some printed matrices do not match the data-flow
  graphs or the worked three-tap formulas. In every such case the graphs and
  the formulas were followed, and the result was checked against the direct
  sums:
  * the three-tap pre-addition matrix is printed with two columns;
  * the first pre-addition of M=5 is printed as x0 − x1 where the graph
    shows x0 − x2;
  * a post-addition row of M=7 and M=11 is printed shifted by one column;
  * the 7-tap input vector is named with 9 elements but has 8;
  * the 11-tap section calls its filter "9-tap" in one place.
* **Adder counts.** The multiplier counts match the publication's complexity
  table exactly: 4, 7, 10, 12 and 15. The adder counts in that table are not
  reproduced one for one. For example, it lists "5-input adders" for M=3,
  where the graph has none. Here each group's share is formed as in the
  graphs, and the shares are then added. The total is the same.
* **Added by this implementation.** The publication gives none of the
  following:
  * the word lengths;
  * the one-fractional-bit factor format;
  * full-precision outputs;
  * the factor and output registers;
  * the load/valid handshake;
  * the reset;
  * placing the five units side by side in one top.
* **Not included.** The direct (naive) form, which the publication uses only
  for comparison. Also anything beyond the basic operation: 2-D convolution,
  feeding of feature maps and accumulation across channels are not described
  there.

## Verification

Each testbench checks itself and ends with a line
`TB_RESULT checks=N failures=F`.

| testbench         | what it checks                                                              |
|-------------------|------------------------------------------------------------------------------|
| `tb_mf_alg3` … `tb_mf_alg11` | 4000 random windows and filters per size, extreme values included. Factors come from the tap formulas; y0 and y1 are compared with the direct sums. |
| `tb_mf_pair`      | the 2-tap kernel against wa x0 + wb x1 and wa x1 + wb x2                    |
| `tb_mf_coef_gen`  | every factor of all five sizes against the per-algorithm lists              |
| `tb_mf_top`       | all five units at default parameters for 3000 random cycles (see below)      |
| `tb_mf_conv1d`    | a complete convolution of a 64-sample stream for each size at full rate, including the cycle count |

`tb_mf_top` mixes tap loads, tap reloads during streaming, idle cycles, loads
in the same cycle as a window, and one mid-run reset. A reference model
predicts every output of the next clock edge. The testbench also counts each
of these events, and fails if one of them never happened.

`mf_tb_pkg` holds the reference models: the direct sum, the factor lists and
a random-value generator that favours extreme values.

To simulate with Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/mf_pkg.sv tb/mf_tb_pkg.sv tb/tb_mf_top.sv --top-module tb_mf_top
./obj_dir/Vtb_mf_top
```

Each testbench takes well under a second.

## Changing the design

* **Word lengths.** Set `DATA_W` and `COEF_W` on `mf_top`. Every internal
  width follows from them.
* **Output width.** `Y_GROWTH` in `mf_pkg` sets the output's extra bits. It
  must be at least ⌈log2 M⌉.
* **Another filter length.** Add its decomposition to `group_kind` in
  `mf_pkg`, and write a datapath from `mf_alg3`, `mf_pair` and single
  products. `mf_coef_gen` already works from the decomposition.
* **Pipelining.** For a faster clock, pipeline the datapaths, for example
  between the multipliers and the post-adders. The latency check in
  `mf_channel` and the expected cycle count in `tb_mf_conv1d` then need
  updating.
