# RAMAN: an approximate posit(8,2) vector MAC accelerator in SystemVerilog

DNN inference is dominated by multiply-accumulate (MAC) work. This design spends as
little hardware as possible on each MAC in three ways:

* **Compact numbers.** Operands are 8-bit **posits** with 2 exponent bits, posit(8,2).
  They are stored and moved as 8-bit words, yet cover 2^-24 … 2^24 with tapered precision.
* **An approximate multiplier.** The mantissa product uses a *logarithmic* multiplier.
  It adds the two fractions instead of multiplying them. The accumulation keeps a wider
  internal format and rounds to a 16-bit posit, posit(16,2).
* **Shared lanes.** Many copies of this MAC engine (the **REAP MAC**, Resource-Efficient
  Approximate Posit MAC) work side by side in a **Vector Execution Unit (VEU)**. By default
  there are 256 lanes. Each lane has its own ping-pong operand registers, and one control
  unit and one scheduler drive all lanes.

This RTL implements the accelerator as published in the RAMAN paper (Khan, Lokhande and
Vishvakarma): the REAP MAC pipeline, the VEU and the control around it. Where the
publication gives only a block's name or purpose, the RTL fills in the details. Each such
choice is listed below and in the header comment of the file it affects.

## 1. Number format in brief

A posit(n,2) word is read as follows:

* Take the two's complement if the sign bit is set.
* The bits after the sign start with a *regime*: a run of equal bits ended by the opposite
  bit. A run of r ones gives k = r−1. A run of r zeros gives k = −r.
* The next 2 bits are the exponent e. Bits cut off at the end of the word read as 0.
* The bits after that are the fraction f, below a hidden 1.
* The value is (−1)^s · 2^(4k+e) · 1.f. The design calls 4k+e the **scale**.

Two codes are special: 0x00…0 is zero and 0x80…0 is NaR ("not a real"). In posit(8,2) the
fraction has at most 3 bits. In posit(16,2) it has at most 11 bits.

A posit(8,2) word followed by eight zero bits is a posit(16,2) word of the same value.
The design uses this to widen 8-bit biases into 16-bit accumulators.

## 2. The REAP MAC (`reap_mac.sv`)

`out = acc + Σ_{i<VEC} a_i ⊗ b_i`, where ⊗ is the approximate product. Operands are
posit(8,2) and `acc`/`out` are posit(16,2). A new operation can enter on every clock. Six
register stages follow one another:

| stage | work | blocks |
|---|---|---|
| 1 DECODE | decode every a_i, b_i and acc; product sign s_i = s_a XOR s_b; product scale e_i = e_a + e_b | `posit_decoder` ×(2·VEC+1) |
| 2 MULTIPLY | approximate mantissa products; in parallel, e_max = the largest scale over the non-zero products and acc | `approx_mult` ×VEC |
| 3 ALIGNMENT | shift each mantissa right by e_max − e_i, then two's complement for negative terms | barrel shifters |
| 4 ACCUMULATION | recursive carry-save tree over the VEC+1 terms, final adder, cyclic-accumulation merge | `csa_tree` |
| 5 NORMALIZE | sign/magnitude, leading-zero count, scale re-adjustment, mantissa left shift | `lzc` |
| 6 ENCODE | pack into posit(16,2), round to nearest even | `posit_encoder` |

Operands sampled at clock edge *t* give a result on `out`/`out_valid` after edge *t+5*,
that is six register stages later.

### 2.1 The approximate multiplier (`approx_mult.sv`)

Posit mantissas are already normalised (1.f), so the logarithmic multiplier needs no
leading-one detector. The multiplier uses log2(1+x) ≈ x:

* If fa + fb < 1, the product is 1 + (fa + fb).
* Otherwise, the product is 2·(1 + (fa + fb − 1)) = 2·(fa + fb).

The whole multiplier is one 3-bit adder. The result has 2 integer bits and 3 fraction bits.
It is left unnormalised (in [1,4)), so the e_max found in stage 2 is still correct.

The error is never positive and at most about −11 %. For example, 1.5 × 1.5 gives 2.0
instead of 2.25. The parameter `TRUNC` (< 3) adds the operand truncation of the DR-ALM
family: keep TRUNC fraction bits and append a 1. For posit(8,2) the default keeps all three
bits, so the truncation does nothing. The published design names DR-ALM as its
multiplier. The bit-level form here is this implementation's own reading of it.

### 2.2 Alignment and the accumulation word

All terms are aligned to e_max in a W-bit two's-complement word, W = FW + 2 + ⌈log2(VEC+2)⌉ + 5,
with FW = 16 fraction bits. Bits shifted out below FW are dropped, not rounded. A result can
therefore differ from the exact sum of the approximate products by one or two ULPs of
posit(16,2).

### 2.3 Cyclic accumulation

A convolution lane must add one product per cycle onto the same sum. A result needs six
cycles to go round the pipeline, so it cannot simply be fed back into `acc`. Stage 4
instead keeps a **running-sum register**: the sum and its scale from the previous valid
operation. When an operation has `acc_fb = 1`:

* the `acc` input is ignored;
* the new partial sum (scale e_max) and the running sum (scale e_run) are both shifted to
  the larger of the two scales and added.

If the result comes within two bits of the top of the word, it is shifted right by one and
its scale goes up by one. The next addition can then never overflow.

A K-tap dot product therefore takes K back-to-back operations: the first with `acc_fb = 0`
(start from the bias), the rest with `acc_fb = 1`. Every operation yields a result. The
K-th result is the complete sum.

The publication says accumulation happens "every cycle" after the pipeline has filled
once. This running-sum register is how this RTL achieves that. The mechanism is this
design's own.

NaR on any input gives NaR. A NaR already in the running sum stays until an operation with
`acc_fb = 0` starts a new sum.

## 3. Vector Execution Unit and operand storage

`veu.sv` holds `N_MAC` (default 256) REAP MAC lanes with `VEC = 1`: one product per lane per
cycle. With this setting a 5×5 kernel takes 25 compute cycles, the count the publication
gives. All lanes share the issue strobe and the `acc_fb` flag.

Each lane has three 32 × 8-bit register files (`operand_buffer.sv`): ifmap, weight and
bias. Each file exists twice, as banks 0 and 1. One 256-bit beat fills all 32 entries of
one lane in one bank. A bank therefore loads in 3 beats per lane, 768 beats for 256 lanes.
While one bank is loaded, the other is read: in each cycle every lane reads entry `rd_idx`
of the executing bank. The bias file is read at the fixed entry `BIAS`.

Results (posit(16,2), one per lane) go out of the chip to an activation /
normalisation / pooling unit. That unit is **not** part of this RTL; the publication
places it off chip. Its answer comes back into `output_buffer.sv` and is read on the ofmap
port, 16 results per 256-bit beat.

## 4. Control: scheduler, control unit, host interface

```
 host (AXI4-Lite) ──> axi_host_if ──> registers ──> runtime_scheduler ──start──> control_unit
 ifmap beats  ──> operand_buffer (ifmap)  ─┐                                      │ rd_idx, valid, acc_fb
 weight beats ──> operand_buffer (weight) ─┼──────────────> veu (N_MAC × reap_mac) <┘
              └─> operand_buffer (bias)   ─┘                     │ af_data_o / af_valid_o
                                              off-chip AF/Norm/Pool unit
                                                                 │ af_data_i / af_valid_i
                                             output_buffer ──> ofmap beats
```

**Runtime scheduler** (`runtime_scheduler.sv`) manages the two banks:

* The host fills bank `fill_bank`, then *commits* it by writing CTRL bit 0.
* The committed bank is marked full, and filling moves to the other bank.
* When the control unit is idle and `exec_bank` is full, the scheduler starts a launch.
  When the launch is done, it frees that bank.
* If both banks are full, `ifmap_ready`/`weight_ready` go low (the feed stalls). A commit
  in that state is dropped and sets the sticky `commit_err` flag.

**Control unit** (`control_unit.sv`) holds the layer parameters. On each launch it:

1. issues KLEN steps on consecutive cycles. Step j reads entry j, step 0 has `acc_fb = 0`
   and the others have `acc_fb = 1`;
2. counts the results that come back. With the last one, it pulses `exec_done` and
   `af_valid_o`.

Counted from the edge that samples `start` to the edge after which `exec_done` is high, a
launch takes **KLEN + 5 cycles**: 30 for a 5×5 kernel, as in the publication's LeNet-5
example. The LAYER word (layer type, activation, pooling, stride; its encoding is up to the
user) only passes through to the activation unit on `af_cfg_o`.

**Register map** (AXI4-Lite, 8-bit byte address, 32-bit data):

| addr | name | access | meaning |
|---|---|---|---|
| 0x00 | CTRL | W | bit 0: commit the bank being filled; bit 1: chain (the bank's launch starts from each lane's previous result) |
| 0x04 | STATUS | R | b0 fill_ready, b1 fill_bank, b2 exec_bank, b3 running, b5:4 bank full flags, b6 commit_err, b7 output buffer holds unread results |
| 0x08 | KLEN | RW | MAC steps per launch, 1…32 (0 reads back as 1, larger values as 32) |
| 0x0C | BIAS | RW | bias entry used as the starting accumulator |
| 0x10 | LAYER | RW | word passed on to the activation/pooling unit |
| 0x14 | DONES | R | number of completed launches |

A typical layer runs as follows:

1. Write KLEN, BIAS and LAYER.
2. For each lane, send one ifmap beat, one weight beat and one bias beat (`weight_is_bias = 1`).
3. Commit.
4. Load the next bank while the first one computes.
5. Take each result vector at `af_valid_o`. Return the processed vector on `af_valid_i`.
   Read it with `ofmap_rd_en`/`ofmap_addr`.

The operands must already be in im2col order: entry j of lane l is the j-th tap of output
pixel l. Do not change KLEN while a launch is running; the control unit reads it live.

**Chained launches.** A dot product longer than 32 taps is split into pieces of up to
32 taps. The first piece is committed with CTRL = 1 and starts from the bias. Every
later piece is committed with CTRL = 3. Its first step then takes the lane's previous
posit(16,2) result as the accumulator, because each MAC holds its last output.
The chain bit is stored per bank when the commit is accepted. The sum therefore
never leaves the chip between pieces, and it is rounded to posit(16,2) only once per
piece. The publication's MAC adds each dot product to a high-precision previous
output. The chain bit is how this design exposes that across launches.

## 5. What follows the publication and what does not

From the publication:
* posit(8,2) operands;
* the six stages and the blocks in each (Decoder, XOR sign, exponent add, maximum exponent,
  approximate multiplier, alignment, two's complement, recursive CSA tree and adder, LZC,
  exponent adjustment, mantissa normalisation, encoder and rounding);
* a DR-ALM-style logarithmic multiplier;
* a VEU of 256 MACs;
* 32 × 8-bit ifmap/weight/bias registers per MAC with ping-pong feeding, three 256-bit
  beats per MAC;
* the 5 + 25-cycle timing of a 5×5 kernel;
* the block structure around the VEU: host AXI link, scheduler, control unit, input and
  weight buffers, output buffers, an off-chip activation/pooling unit and Exec_Done.

This design's own choices:
* posit(16,2) for `acc`/`out`;
* alignment width FW = 16, and truncation during alignment;
* the running-sum form of cyclic accumulation;
* the exact multiplier form and the `TRUNC` option;
* the recursive CSA tree written as a generate loop over its levels (same adder structure);
* round-to-nearest-even with saturation;
* one product per lane per cycle (`VEC = 1`) in the VEU. `reap_mac` alone defaults to a
  4-element dot product;
* AXI4-Lite for control, with separate 256-bit ifmap/weight feed ports;
* the register map, the bank/commit protocol, the output-buffer format and the reset
  values.
* the chain bit, which continues a sum from the previous launch.

The publication's text gives two different feed costs: "3 clock cycles per MAC unit" and
"3·N·256 clock cycles". The RTL follows the first.

Not built:
* the off-chip activation/normalisation/pooling unit, which is reached through ports;
* the host processor;
* the I/O pad ring of the fabricated test chip;
* im2col data rearrangement, which is left to whoever fills the buffers;

## 6. Fit of the evaluated workloads

* **LeNet-5 layer C1** (6 kernels of 5×5 on a 28×28 image; from the publication) fits.
  Each output needs 25 taps, within the 32-entry limit. Each kernel has 576 outputs, so
  one kernel takes ⌈576/256⌉ = 3 launches of 30 cycles, and the layer takes 18 launches.
  `tb/tb_lenet_c1.sv` runs one such kernel on the 256-lane default configuration, with a
  random image, and checks all 576 outputs.
* **The MNIST classifier** (two convolution layers, two fully connected layers) and
  **Tiny-YOLOv3** are evaluated in the publication for accuracy only, without layer sizes
  that fix the hardware cost. Every dot product of up to 32 taps runs in one launch.
  Longer ones run as chained launches. For example, a 3×3 convolution over 16 channels
  has 144 taps, which is 5 launches. Tiny-YOLOv3's deepest 3×3 layers have up to 4608
  taps, which is 144 launches, each of which refills the banks.

## 7. Files

* `rtl/raman_pkg.sv`: shared constants (widths, latency, register addresses).
* `rtl/posit_decoder.sv`, `rtl/approx_mult.sv`, `rtl/csa_tree.sv`, `rtl/lzc.sv`,
  `rtl/posit_encoder.sv`: the MAC's building blocks.
* `rtl/reap_mac.sv`: the six-stage MAC.
* `rtl/veu.sv`: the vector of MAC lanes.
* `rtl/operand_buffer.sv`, `rtl/output_buffer.sv`: storage.
* `rtl/axi_host_if.sv`, `rtl/runtime_scheduler.sv`, `rtl/control_unit.sv`: control.
* `rtl/raman_top.sv`: the accelerator.
* `tb/posit_ref_pkg.sv`: a reference model that uses real numbers. It decodes posits,
  finds the nearest posit(16,2) by search over the monotonic bit patterns, and gives the
  logarithmic product.
* `tb/tb_<block>.sv`: one self-checking testbench per block.
* `tb/tb_raman_top.sv`: 4 lanes, end to end. It runs ping-pong overlap, feed stall,
  dropped commit, bias start, chained start, cyclic accumulation and Exec_Done, and
  counts each.
* `tb/tb_raman_full.sv`: the default 256-lane configuration, two launches with every
  result checked.
* `tb/tb_lenet_c1.sv`: one LeNet-5 C1 feature map (28×28 image, 5×5 kernel) at the
  default size. The host model does the im2col rearrangement, and the map needs three
  launches.

## 8. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops on its own. It also has
a cycle watchdog. Example with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/raman_pkg.sv tb/posit_ref_pkg.sv tb/tb_reap_mac.sv --top-module tb_reap_mac
./obj_dir/Vtb_reap_mac
```

Replace `tb_reap_mac` with any other testbench. `tb_raman_full` builds all 256 lanes and
takes about a minute to compile. The results are compared within 1–3 ULP of posit(16,2).
This tolerance covers the alignment truncation and the accumulated truncation of long
cyclic chains. When products cancel and leave a small sum, a fixed number of ULPs is
too tight. Such a result also passes if it lies within the alignment bound: about
(terms + 1) · 2^-14 times the largest term of each step. Exact hand-worked values (for example 1.5 × 1.5 → 2.0) are checked with
no tolerance.

To change the size, set `N_MAC` on `raman_top` (any power of two, 16 or more keeps the
ofmap addressing exact). Set `VEC`, `FW` or `TRUNC` on `reap_mac` to change the MAC.
