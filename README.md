# E-HTC: deterministic bitstream addition for hybrid temporal computing

This RTL implements the multiply-accumulate (MAC) datapath of *enhanced hybrid
temporal computing* (E-HTC). The architecture was published by Sachdeva, Lu, Li and Tan
in "Enhanced Hybrid Temporal Computing Using Deterministic Summations for
Ultra-Low-Power Accelerators". The SystemVerilog here is an independent
implementation written from that description. It is not the authors' code.

In hybrid temporal computing (HTC), a number in [0,1] is a stream of 2^N bits.
The number is the fraction of those bits that are 1. Because a product of two
such streams needs only one gate per cycle, multipliers are almost free. Adding
streams is the hard part. Earlier HTC designs used a multiplexer driven by a random
select stream, and that adder is inaccurate. E-HTC replaces it with two
deterministic adders that give exact results:

* **EMBA** (exact multiple-input binary accumulator). It counts every product bit
  of every multiplier, every cycle, and keeps the count in a binary accumulator.
* **DTSA** (deterministic threshold-based scaled adder). It emits one output 1
  for every M input ones. So its output is again a bitstream, of the sum divided
  by M, and it can feed another HTC stage. A small residual register keeps the
  remainder, so the exact sum can still be recovered.

With 8-bit operands a dot product of 4 elements takes one pass of 256 clock
cycles. Its RMSE is 0.52 % in unipolar and about 2.1 % in bipolar coding. The
testbenches here reproduce both numbers.

## 1. How numbers travel as bitstreams

A pass is 2^NBITS cycles (256 at NBITS = 8). One free-running up-counter, shared
by the whole array, numbers the cycles of a pass: `count` = 0 … 255. Every
stream of the array is generated from this counter, so no random sources are needed.

| format | how an 8-bit code `v` is laid out over the pass | generator |
|---|---|---|
| TB, temporal bitstream | 1 while `count < v`, then 0: all ones first, one falling edge | `tb_gen`, one comparator |
| RB, regulated bitstream | the ones spread evenly: code bit *i* is shown in 2^i cycles | `rb_gen`, one multiplexer |
| GB, general bitstream | any pattern, e.g. the product of a TB and an RB | — |

**How the RB multiplexer works.** Say the counter value ends in exactly *k* ones
(…0, …01, …011, …). Then the multiplexer outputs code bit `NBITS-1-k`. So half
of all cycles (counts ending in 0) show the MSB, a quarter (ending in 01) show the
next bit, and so on. The single count that is all ones outputs 0. The stream
therefore holds exactly `v` ones, and they are spread as evenly as the binary
weights allow. This is what makes multiplication accurate. Take a TB with `x`
leading ones and AND it with an RB. The result counts the RB ones in the first `x`
cycles, which is close to `x·y/256`. The error of one product is at most about
one count per code bit.

**Unipolar and bipolar.**
* *Unipolar.* A code `v` means `v/256` in [0,1). The multiplier is an AND gate.
* *Bipolar.* A two's-complement code `x` means `x/128` in [-1,1). A stream whose
  fraction of ones is *p* stands for `2p-1`. So the generators are fed
  `x + 128`, which is `x` with its sign bit inverted. The multiplier is an XNOR
  gate. The deterministic RB and TB streams are correlated, so XNOR products are
  only approximate: about 2 % RMSE per 4-input dot product, against 0.5 % for
  unipolar.

The mode is a run-time input (`bipolar`). It is registered with the operands at the
start of each pass.

## 2. The two adders

Both adders first count the M product bits of a cycle with a *cycle sum adder*
(0 … M, `ceil(log2(M+1))` bits).

**EMBA** (`emba.sv`) adds the cycle sum to an accumulator of
`ceil(log2(M·2^N+1))` bits. That is 11 bits for M = 4, N = 8. The register can
never overflow. After the pass the accumulator holds the total number of product
ones, `ones`. The MAC value is `ones / 2^N`.

**DTSA** (`dtsa.sv`) adds the cycle sum to a residual register `Q_reg` of
`ceil(log2 M)` bits: `A = Q_reg + cycle_sum`. If `A ≥ M`, the output bit Y is 1
and `Q` becomes `A − M`. Otherwise Y is 0 and `Q` becomes `A`. Over a pass, Y
carries `floor(total/M)` ones and `Q` ends at `total mod M`. Here is the 8-cycle
example the testbench replays (3-bit operands 7/8, 4/8, 7/8, 6/8; the sum is 3):

| cycle | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 |
|---|---|---|---|---|---|---|---|---|
| cycle sum | 4 | 1 | 3 | 2 | 4 | 4 | 2 | 4 |
| Q_reg | 0 | 0 | 1 | 0 | 2 | 2 | 2 | 0 |
| A | 4 | 1 | 4 | 2 | 6 | 6 | 4 | 4 |
| Y | 1 | 0 | 1 | 0 | 1 | 1 | 1 | 1 |
| Q_next | 0 | 1 | 0 | 2 | 2 | 2 | 0 | 0 |

`bs2bin.sv` recovers the exact total as `#Y · M + Q_final`. In the example that
is 6·4 + 0 = 24, and 24/8 = 3. Its Y counter needs only
`ceil(log2(2^N+1))` bits.

Both adders therefore give the same, exact count of product ones. They differ in
what they can pass on:
* EMBA has only a binary result.
* DTSA also has the stream Y. `gb2tb.sv` turns Y back into a temporal bitstream
  for a following HTC multiplier stage.

## 3. GB→TB re-encoding

`gb2tb` uses two 2^N-bit shift registers. During a pass, the *collect* register
shifts in a 1 at its low end for every 1 of the GB input, so the ones pile up from
bit 0. On the last cycle of the pass the collect register is copied into the
*emit* register. During the next pass the emit register shifts right once per
cycle and outputs bit 0, so the ones come out first. The TB of pass *k* thus
appears during pass *k+1*, aligned with the shared counter. A downstream tile
can use it directly as a TB operand.

## 4. Pass control and timing

`pass_fsm` has two states, IDLE and RUN. It drives the counter's `en` and
synchronous `clr`, and sends every block a `pass_t` strobe bundle:

| strobe | when | meaning |
|---|---|---|
| `load` | the cycle in which a start is accepted | operands and mode are registered |
| `clr` | start accepted from IDLE | the counter goes to 0 |
| `en` | every RUN cycle | a bitstream cycle happens |
| `first` | the RUN cycle with count 0 | accumulators start from zero instead of their old value |
| `last` | the RUN cycle with count 2^N-1 | results are captured |

Timing of a pass:
1. Start is accepted on a clock edge.
2. The 256 bitstream cycles follow.
3. `done` rises on the 256th edge after the accepting edge. The results are then
   valid, and they hold until the next pass ends.
4. If `start` is high during the last cycle, the next pass follows with no gap.
   So the throughput is one dot product per 2^N cycles.

Every stateful block restarts on `first` rather than being cleared in a separate
cycle, so back-to-back passes need no extra cycle.

## 5. The tile and the engine

`ehtc_mac` is one M-input tile (a 4×4 MAC at M = 4). It contains:
* operand registers;
* M TB generators fed by `xb[i]` and M RB generators fed by `yb[i]`;
* M AND/XNOR multipliers;
* an adder, chosen by the `ADDER` parameter:
  * `ADDER_EMBA`: the `emba` block;
  * `ADDER_DTSA`: `dtsa` + `bs2bin` + `gb2tb`.

Outputs:
* `ones`: the exact count of product ones.
* `value`: a signed number with NBITS fractional bits. In unipolar mode it is
  `ones`. In bipolar mode it is `2·ones − M·2^N`.
* `gb`, `tb`: the DTSA stream and its TB form. They are 0 in an EMBA tile.

`ehtc_top` is the top level. It holds two tiles that share one `pass_fsm` and one
`up_counter`. An exact binary adder joins the two tile values into `value_sum`,
which gives a 2M-input (8-input) dot product. This is how an 8-point DCT output is
built from two 4-input MACs. By default tile 0 is EMBA and tile 1 is DTSA, so both
adders are present. Set `ADDER0` and `ADDER1` to the same value for an all-EMBA or
all-DTSA engine (chaining needs `ADDER1 = ADDER_DTSA`). Operands are packed arrays
`[M-1:0][NBITS-1:0]`.

**In-stream chaining.** The `chain` input is registered with the operands when a
pass starts. When it is high, lane 0 of tile 0 takes `tb1` as its temporal operand
instead of generating one from `xb0[0]`. `tb1` is the TB re-encoding of tile 1's
DTSA output from the previous pass, i.e. tile 1's dot product divided by M. The
next pass then computes a second multiply-accumulate on that intermediate result
without converting it to binary first, which is the in-stream operation that the
DTSA was designed to keep. Any lane of a tile can take an external stream (ports
`tb_ext`/`ext_sel` of `ehtc_mac`), but the top wires only this one link.

| parameter | default | meaning |
|---|---|---|
| `M` | 4 | multipliers per tile |
| `NBITS` | 8 | operand bits; a pass lasts 2^NBITS cycles |
| `ADDER0`, `ADDER1` | `ADDER_EMBA`, `ADDER_DTSA` | adder of each tile |

At the defaults, synthesis gives about 230 word-level cells and about 700 flip-flops.
512 of the flip-flops are the collect and emit shift registers of the one GB→TB
converter.

## 6. Accuracy measured on this RTL

| test | result |
|---|---|
| `tb_mac_rmse`: 2000 random 4-element dot products per mode | unipolar RMSE 0.52 %, bipolar 2.07 % (published: 0.52 %, 2.09 %) |
| `tb_fir6`: 6-tap Gaussian blur (coefficients 4 33 90 90 33 4 /256), generated 24×24 image | RMSE 1.05 grey levels against the exact filter |
| `tb_dct8`: 8-point DCT then IDCT, generated 16×16 image, bipolar | 20.8 dB PSNR with both transforms on the engine; 33.7 dB with the forward DCT on the engine and an exact inverse; 45.9 dB with exact arithmetic and the same quantisation |

The EMBA and DTSA tiles always give identical counts.

The published DCT/IDCT result for this engine is about 30.5 dB. That lies
between the two engine figures above. The publication does not give the data
scaling or say whether its inverse transform also ran on the engine. With both
transforms on the engine, this test keeps the DCT outputs for the inverse pass as
`X/4` in 8 bits, and that amplifies the bipolar product error by 4.

## 7. What follows the published description and what is this implementation's own

These parts follow the publication:
* the three stream formats;
* the RB multiplexer and the `Count < Y` TB comparator;
* the AND/XNOR multipliers;
* the cycle sum adder;
* the EMBA accumulator and all of its widths;
* the DTSA threshold, subtractor, residual register and widths, and its cycle table;
* the `#Y·M + Q` reconstruction;
* one shared up-counter with en/reset driven by an FSM;
* 256-cycle passes;
* two 4-input tiles per 8-point DCT output.

These are this implementation's own choices:
* **RB select for the last two counts.** The drawing is not legible on which of
  0111…1 and 1111…1 carries the LSB. Here 0111…1 carries it. The RMSE match
  above supports this ordering. A textual example in the publication
  (110₂ → 11101011) uses a different ordering with the same number of ones.
* **Which operand feeds which generator.** The publication's block diagram and its
  detail insets disagree on this. Here `xb` feeds TB and `yb` feeds RB. Products
  are symmetric, so the results are unchanged.
* **"Divide by 2^N".** It is a binary point, not a shift. A real right shift would
  throw away every fractional bit.
* **Run-time unipolar/bipolar mode.** It is a pin here. The publication evaluated
  separate builds.
* **Control details.** These are this implementation's own: the operand registers,
  the `pass_t` strobes, restarting on `first`, back-to-back passes, the timing of
  `done`, and the asynchronous active-low reset `rst_n`.
* **GB→TB structure.** The publication says only "shift registers". The
  collect/emit pair and its one-pass latency are this implementation's.
* **How two tiles are combined.** An exact adder of the two tile values is used.
* **Chaining.** The per-lane `ext_sel` select and the `chain` link from tile 1 to
  lane 0 of tile 0 are this implementation's. The publication says only that the
  TB re-encoding feeds later MAC stages.
* **Memories and sequencing are not provided.** Pixel and coefficient storage,
  line buffers and the scheduling of FIR/DCT work are not described in the
  publication. The workload testbenches play that role.
* **The baselines are not included.** The MUX-based HTC adder and the
  counter-based stochastic MAC were only comparison points.

## 8. Files and simulation

`rtl/` holds one module or package per file:
* `ehtc_pkg` (types, widths)
* `up_counter`, `pass_fsm`
* `tb_gen`, `rb_gen`, `htc_mult`
* `emba`, `dtsa`, `bs2bin`, `gb2tb`
* `ehtc_mac`, `ehtc_top`

`tb/` holds:
* one self-checking testbench per block, `tb_<module>.sv`;
* the workload tests `tb_mac_rmse`, `tb_fir6` and `tb_dct8`;
* `ehtc_ref_pkg`, the bit-level reference model of the encodings.

Each testbench prints `TB_RESULT checks=N failures=F`. `tb_ehtc_top` runs the
whole engine at its default parameters. It covers unipolar and bipolar passes,
passes from idle and back to back, DTSA threshold outputs and remainders, TB
re-encoding, and chained two-stage passes. It fails if any of these never happens.

Each testbench takes a few seconds with Verilator 5. For example:

```sh
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/ehtc_pkg.sv tb/ehtc_ref_pkg.sv tb/tb_ehtc_top.sv --top-module tb_ehtc_top
./obj_dir/Vtb_ehtc_top
```

Replace `tb_ehtc_top` with any other testbench name. Lint a module with
`verilator --lint-only -Wall -y rtl rtl/ehtc_pkg.sv rtl/<module>.sv`.
