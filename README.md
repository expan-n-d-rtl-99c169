# PoFx: posit-coded weights, fixed-point arithmetic

Neural network weights are small numbers clustered around zero. Posits put more
precision near zero than fixed point of the same width does. So a 6-bit posit
weight can stand in for an 8-bit fixed-point weight with little loss of
accuracy, and every weight moved or stored is 25 % smaller. Posit arithmetic
units are large, though. This design therefore keeps the posit format only for
storing and moving weights. Right before the multiplier, a small combinational
converter, **PoFx** (posit to fixed point), turns each weight into an ordinary
two's-complement fixed-point number. The multiply-accumulate datapath is a
plain fixed-point MAC, open to every fixed-point optimisation.

The RTL has three layers:

* `pofx`: the converter, in its *normalized* form. This is the centre of the
  design. The general form, `pofx_gen`, is included for completeness.
* `pofx_mac`: a MAC unit that converts the weight, multiplies it by an 8-bit
  activation, accumulates in 24 bits and applies ReLU.
* `expannd_fc_accel`: a weight-stationary accelerator for one fully-connected
  layer, y = ReLU(Wx + b), with stream interfaces. It defaults to a 64-input,
  10-neuron layer.

All RTL is in `rtl/` (SystemVerilog 2017, one unit per file). The
self-checking testbenches are in `tb/`.

## Normalized posits

A posit(N, ES) word has four fields:

* a sign;
* a *regime*: a run of equal bits ended by the opposite bit. A run of m zeros
  means k = -m; a run of m ones means k = m-1;
* up to ES exponent bits e;
* the remaining fraction bits f.

Its value is (-1)^s · 2^(2^ES·k) · 2^e · 1.f. Negative numbers are stored as the
two's complement of the whole word.

Trained weights rarely reach magnitude 1. Every posit with |v| < 1 starts with
`00` (positive) or `11` (negative): the sign bit equals the first regime bit.
A *normalized posit* Posit(N-1, ES) stores only the lower N-1 bits of such a
word, and the hardware replicates the top bit to get the word back. At the
default N = 7 and ES = 2, the stored weight is 6 bits. It covers magnitudes
from 2^-20 up to 0.75, with the finest steps near zero.

One pattern is awkward. The normalized code `100000` stands for -1. The
converter cannot produce it, because fixed point with one sign bit and M-1
fraction bits has no -1. `pofx` outputs -(1 - 2^-7) instead and raises
`neg_one_o`.

## The PoFx converter (`rtl/pofx.sv`)

Output format: FxP(M, F) with F = M-1. That is one sign bit and seven fraction
bits at the default M = 8, covering (-1, 1) in steps of 1/128. The converter is
a chain of small combinational stages with no priority encoder and no
left-shifter.

| Stage | Does |
|---|---|
| A1/A2 | Replicate the dropped bit. Take the sign s. If s = 1, two's-complement the remaining N-1 bits. |
| A3 | If the top remaining bit is 0 (the usual case), invert the bits so that the regime run becomes a run of **ones**. A chain `LZD[i] = LZD[i+1] & P[i]` then marks that run, with no leading-zero counter. |
| B1 | K = number of ones in LZD = the regime length. In a normalized posit the regime always starts with 0, so k = -K and only the magnitude K is carried. |
| B2 | `EXT[i] = !(LZD[i+1] \| LZD[i])` marks the bits after the regime terminator. Its edge `ST` (the "silhouette") is one-hot at the first of those bits. An AND-OR selector, `set_i = OR_j ST[N-4-i+j] & P[j]`, left-aligns them. The first ES become the exponent E; the rest are fraction bits, placed directly into the magnitude field MAG. |
| C | SHIFT = 2^ES·K + ~E. MAG holds the hidden 1 in its top bit (weight 1/2) rather than at weight 1, so one right shift is saved. Adding the one's complement of E (= -E-1) accounts for that and for the exponent in one adder: SHIFT = 2^ES·K - E - 1. |
| D | MAG >> SHIFT. Every normalized value is below 1, so the shift only goes right. If SHIFT ≥ F, every bit would fall out: the output is 0 and `of_o` (overflow of the shift, i.e. underflow of the value) is raised. |
| E | Sign-magnitude to two's complement. |

**Worked example** (Posit(6,2) code `010110`, M = 8):

1. Replicate the top bit: `0010110`; s = 0. The remaining bits are `010110`.
2. Invert: `101001`. LZD = `100000`, so K = 1 (regime `0`, terminator `1`).
3. The bits after the terminator are `0110`: E = `01` = 1 and fraction `10`.
4. The value is 16^-1 · 2^1 · 1.5 = 0.1875.
5. MAG = `1100000` (0.75). SHIFT = 4·1 + ~1 = 4 - 2 = 2.
6. MAG >> 2 = `0011000`, which is 24/128 = 0.1875, exact.

Code `001011` (value 1.5·2^-7) gives SHIFT = 6 and output 1/128: the low
fraction bit is truncated.

Choices the algorithm leaves open:

* **Rounding.** Bits shifted out are truncated (toward zero).
* **Zero.** Posit zero gives 0 without a flag.
* **The -1 code.** It saturates, as described above.
* **SHIFT width.** The shift amount passes through a ⌈log2 M⌉-bit register
  field. The overflow test uses the full sum.

`tb_pofx` checks every code of seven formats against a real-arithmetic posit
decoder: Posit(6,2), (3,0), (5,0), (7,3) and (4,2) at M = 8 or 4, plus (7,1)
and (11,2) at M = 16. It also checks the eight rows of the 4-bit example table
from the source (Posit(4,0) values 0, ±1/4, ±1/2, ±3/4 and -1, with their
normalized codes).

### The general converter (`rtl/pofx_gen.sv`)

The normalized converter is a simplification of a general one. The general
converter turns any Posit(N, ES) into FxP(M, F) with M-1-F integer bits:

* the regime can be a run of ones or zeros, so k is signed;
* SHIFT = 2^ES·k + E is signed;
* MAG carries the hidden 1 at weight 1 and is shifted left or right.

Values out of range saturate and raise `of_o`. Nonzero values below 2^-F flush
to 0 and raise `uf_o`. NaR gives the most negative code and raises `nar_o`.
Guard bits keep the fraction intact until after a left shift.

The accelerator does not use `pofx_gen`. It stands alone, as a reference for
the cost the normalized form avoids: the two-way shifter and the signed
regime. `tb_pofx_gen` checks five formats exhaustively.

## The MAC unit (`rtl/pofx_mac.sv`)

```
w (N-1) --PoFx--> FxP(M) --\
                            x --(2M)--> + --(3M)--> [acc] --(3M)--> ReLU --> act_o (M)
act_i (M) -----------------/            ^             |
                                        +-------------+
```

The datapath, one clock per product:

* An M×M signed multiplier produces a 2M-bit product.
* A 3M-bit adder and accumulator absorb the growth of long dot products: 64
  products of 2M bits cannot overflow 3M bits.
* The accumulator has a synchronous `rst` and a `clr`. When `en` and `clr` are
  both high, the accumulator loads the product alone, which starts a new dot
  product without a bubble.
* ReLU (`relu_act`) works on the registered sum. A negative sum gives 0.
  Otherwise the sum is shifted right by the F = 7 weight fraction bits,
  truncated, and saturated to 127 (`sat_o`).

With `CONVERT = 0`, the PoFx is left out and `w_i` is already fixed point. The
accelerator's "Move" mode uses this.

**Activation format.** The source keeps activations unspecified beyond "8-bit
fixed point", so this design picks FxP(8) with ACT_FRAC = 4 fraction bits
(range -8 … 7.9375). The product then has 11 fraction bits, and the ReLU shift
of 7 returns to 4 fraction bits. Change `ACT_FRAC` in `expannd_pkg` to rescale.

## The fully-connected accelerator (`rtl/expannd_fc_accel.sv`)

The accelerator is weight-stationary: a weight set is loaded once, and then any
number of input vectors stream through. Its parts:

* **`weight_mem`.** Word r holds weight r of every lane, so all lanes read in
  one access. There is a row per input plus a bias row. At the defaults this is
  65 words × 10 lanes × 6 bits.
* **`act_buf`.** Holds the 64 activations of the current vector.
* **10 `pofx_mac` lanes.** Lane j computes neuron j. The dot product runs
  serially, one input per clock.
* **The bias.** It is row 64. It multiplies an activation of exactly 1.0
  (`1 << ACT_FRAC`), so it rides through the same multiplier.
* **`fc_ctrl`.** Sequences loading, computing and draining. If OUT_DIM > LANES,
  the neurons are processed in groups of LANES, and each group has its own
  block of ROWS words in `weight_mem`.
* **The output register file.** Holds the 10 results while they leave on the
  output stream.

### Streams

All three ports use a valid/ready handshake with `tlast` (the AXI4-Stream
subset):

| Port | Beats | Content |
|---|---|---|
| `s_w_*` | OUT_DIM·(IN_DIM+1) = 650 | Weights, neuron by neuron: 64 weights, then the bias. The posit sits in the low N-1 bits of a byte. |
| `s_a_*` | IN_DIM = 64 | One input vector, FxP(8). |
| `m_a_*` | OUT_DIM = 10 | The output vector, FxP(8). |

The beat counts define the frames. A `tlast` that is missing or early sets the
sticky `protocol_err_o` but does not resynchronise anything. Weight beats take
priority over activation beats when the accelerator is idle. A new weight set
can be loaded between any two vectors.

Concurrent assertions in the top and in `fc_ctrl` check that the output data and `tlast` stay stable while
`m_a_tvalid` is high and `m_a_tready` is low.

### Timing

With no stalls, one vector takes:

* 64 clocks to load it;
* GROUPS·(ROWS+2) = 67 clocks to compute: 65 products, one clock for the
  memory read latency, and one to capture;
* 10 clocks to drain.

That is 141 clocks per vector, and all 10 neurons run in parallel during
compute. Back-pressure on `m_a_tready` holds the drain. Gaps in `s_a_tvalid`
stretch the load.

### Storage modes (`STORE` parameter)

* `STORE_POSIT` (default, "move and store"): weights stay 6-bit posits in
  `weight_mem`, and each lane has its own PoFx. This gives the smallest memory:
  65×10×6 = 3900 bits.
* `STORE_FXP` ("move"): weights still travel as posits, so the link saves the
  same 25 %. A single PoFx on the load path converts them, and `weight_mem`
  holds 8-bit fixed point: 5200 bits, but no converters in the lanes.

### Status flags

| Flag | Meaning |
|---|---|
| `weights_loaded_o` | A full weight set is loaded. |
| `busy_o` | A vector is in flight. |
| `pofx_of_seen_o` (sticky) | A weight below 2^-7 was flushed to zero. |
| `relu_sat_seen_o` (sticky) | An output saturated. |
| `protocol_err_o` (sticky) | A `tlast` was missing or misplaced. |

## Parameters

| Parameter | Default | Where it comes from |
|---|---|---|
| `N`, `ES` | 7, 2 (6-bit stored weight) | The best accuracy/efficiency point of the source evaluation. |
| `M` | 8 | Source: 8-bit fixed-point MAC. |
| `ACT_FRAC` | 4 | This design. |
| `NIN`, `NOUT` | 64, 10 | Source accelerator: a 64×10 matrix and 1×64 vectors. |
| `LANES` | 10 | This design: one MAC per neuron. |
| `USE_BIAS` | 1 | This design (the MAC input is "weights/biases"). |
| `STORE` | `STORE_POSIT` | Source: one of its two storage modes. |

Every module also compiles with other sizes: any N ≥ 4, M ≥ 3, any LANES
(groups are formed when LANES < NOUT), and with or without the bias row.

## Where this departs from the source evaluation

* The source built its accelerator with high-level synthesis and compared HLS
  variants: no unrolling, dot product unrolled, everything unrolled, and BRAM
  versus LUTRAM. This RTL is one fixed hand-written architecture, equivalent to
  unrolling across neurons with a serial dot product. `LANES = 1` gives the
  non-unrolled schedule (10 × 67 compute clocks per vector). Unrolling the dot
  product itself (several products per lane per clock) is not provided.
* The source's accelerator comparison uses Posit(6,0) weights (normalized
  5-bit) against 8-bit fixed point. The defaults here are the 6-bit, ES = 2
  weights that the same evaluation recommends for accuracy. Set `N = 6, ES = 0`
  for the comparison point; `tb_fc_accel_modes` runs it.
* The source gives no activation fraction width, rounding mode, bias
  handling, reset, stream framing, -1 handling or zero handling. All of these
  are this design's choices, listed above.
* The pure-posit MAC, the pure fixed-point MAC and the posit FMA that the
  source measured against are baselines and are not included.
* The processor, main memory and AXI interconnect that surround the
  accelerator in a Zynq-class system are not part of the RTL. The stream ports
  are where a DMA engine or interconnect would attach.

## Verification

Every testbench is self-checking and prints `TB_RESULT checks=… failures=…`.
Each also has a watchdog.

| Testbench | What it does | Checks |
|---|---|---|
| `tb_pofx` | All codes of 7 formats against a real-arithmetic decoder; flags; the 4-bit example table. | 2432 |
| `tb_pofx_gen` | All codes of 5 general formats; saturation, flush and NaR; coverage of left and right shifts. | 4703 |
| `tb_relu_act` | Corner and random sums: clamp, shift, saturation. | 4010 |
| `tb_pofx_mac` | Random dot products of random length, with and without the converter; back-to-back clr+en, idle cycles, lone clr, mid-run reset. | 13719 |
| `tb_pofx_mac_sweep` | The MAC for every Posit(N-1, ES) with N-1 = 4…7 and ES = 0…2 into 8 bits, and three formats into a 16-bit MAC; random dot products of up to 65 products. | 59877 |
| `tb_weight_mem`, `tb_act_buf` | Lane-wise writes, read latency, read enable. | 1320, 129 |
| `tb_fc_ctrl` | Small layer with 2 lanes in 3 groups; beat counts, write addresses, control timing, cycle count. | 150 |
| `tb_expannd_fc_accel` | The default top, unmodified. | 119 |
| `tb_fc_accel_modes` | Four instances: Move mode at 64×10 on 3 lanes (4 groups) with a tlast error; Posit(6,0) weights on a 16×6 layer with 4 lanes and no bias; Posit(6,0) at 64×10 on a single lane (the non-unrolled schedule); Posit(6,0) at 64×10 in Move mode. | 398 |
| `tb_fc_workload` | The default top on 1000 input vectors, the size of the source's power workload. | 11268 |

**`tb_expannd_fc_accel`** streams two weight sets and nine vectors. It compares
every output with a bit-exact reference model (`tb/fc_ref_pkg.sv`) and checks
the compute latency of each vector. It also counts and requires each of these
to happen at least once:

* bias use;
* flushed weights;
* the -1 weight;
* ReLU clamping and clipping;
* input bubbles;
* output stalls;
* a weight reload.

**`tb_fc_workload`**: 10,000 outputs are compared, and every latency is
checked.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/expannd_pkg.sv tb/pofx_ref_pkg.sv tb/fc_ref_pkg.sv \
    tb/tb_expannd_fc_accel.sv --top-module tb_expannd_fc_accel
./obj_dir/Vtb_expannd_fc_accel
```

Any other testbench runs the same way. Each simulates in about a second.

**Synthesis size.** Generic (technology-independent) synthesis of the default
top gives roughly 930 cells, 283 flip-flop bits and 4.5 kbit of memory. These
figures are not comparable to the source's FPGA numbers.

**Lint warnings.** Verilator lint reports only two kinds, both explained in the
file headers:

* the padding bits of the weight stream byte are unused;
* modules that use part of `expannd_pkg` leave the rest of its constants
  unused.
