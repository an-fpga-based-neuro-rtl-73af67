# Neuro-fuzzy driving-style classifier: a three-core ANFIS accelerator

Adaptive cruise control usually keeps one fixed time headway (THW, the
time gap to the car in front). Many drivers find that setting unnatural. This
design is the hardware half of a sensor that learns how closely a driver
likes to follow, so the headway can be personalised. Software on a host
processor watches a stretch of steady car following and turns it into three
numbers:

* **THW_rms**: the RMS time headway over the stretch;
* **TETH**: time-exposed THW, the time spent below a safety threshold;
* **TITH**: time-integrated THW, how far below that threshold, integrated over time.

Each number is normalised to [0, 1). The accelerator scores these three
features against three driving-style clusters: 1 is aggressive, 2 is
cautious, 3 is in between. Each cluster has its own small neuro-fuzzy
network (an ANFIS). The three networks run side by side and give three scores
near 0 or 1. Software reads the scores, takes the largest as the driver's
style, and computes the personalised headway. The classification and the
headway model stay in software. The RTL here is the fixed-latency inference
engine: 53 clock cycles from start to three results.

## The function each core computes

Each core is a zero-order Takagi–Sugeno fuzzy system with 3 inputs, 3
linguistic labels per input (LOW, MEDIUM, HIGH) and all 3³ = 27 rules.

* Membership of input x in a label is a generalised bell,
  `mu(x) = 1 / (1 + |(x - e)/a|^(2b))`, with centre e, width a and slope b.
* Rule j fires with strength `w_j = mu_THW(l1) * mu_TETH(l2) * mu_TITH(l3)`.
  The rules are numbered `j = 9*l1 + 3*l2 + l3`, with LOW = 0, MEDIUM = 1,
  HIGH = 2. So rule 1 is LOW/LOW/LOW, rule 2 changes only TITH, and rule 10
  is the first with THW MEDIUM.
* The output is the weighted mean of the rule constants c_j:
  `y = N / D`, where `N = sum w_j c_j` and `D = sum w_j`.

The three cores are identical except for their tables (a, b, e per label;
c_j per rule).

**The tables are placeholders.** The trained membership parameters and
consequents of the original networks are not published. `anfis_pkg` sets
every label to an evenly spaced bell: a = 0.25, b = 2, centres 0, 0.5 and 1.
It also gives each cluster a hand-made 0 / 0.3 / 0.5 / 1 consequent pattern
that follows the cluster's verbal description. For example, cluster 1
scores 1 where THW_rms is LOW and TETH or TITH is not LOW. With these tables
the reference operating point (THW_rms = 0, TETH = 0.5, TITH = 46/256)
scores 0.913 / 0.023 / 0.241 and is classified as cluster 1. This is the
same decision as the original, but the numbers differ from the original
0.958 / 0.017 / 0.31. To use trained networks, edit `mf_a`, `mf_b`, `mf_e`
and `CONSEQ` in `anfis_pkg.sv`. The ROMs are recomputed at elaboration, and
nothing else changes.

## Number formats

| quantity | width | format | note |
|---|---|---|---|
| features THW_rms, TETH, TITH | 8 | unsigned Q0.8 (code/256) | from the original design |
| membership degree mu | 16 | unsigned Q1.15, 1.0 = 32768 | rounded when the ROM is built |
| rule weight w | 16 | unsigned Q1.15 | each two-input product is truncated |
| consequent c | 16 | signed Q3.12 | |
| N, D | 38 | signed, scale 2^27 | D uses v = 1.0 in Q3.12, so N/D is y directly |
| output y | 32 | two's complement Q7.24 | 32 bits from the original design (one bus word) |

Only the 8-bit inputs and the 32-bit output come from the original. The
other widths and binary points are this design's choice. The testbenches
require every score to be within 2e-3 of a floating-point evaluation of the
same equations; the observed differences are a few 1e-4.

## Datapath, layer by layer

```
 THW_rms ─┬─► 3 MF ROMs ─┐
 TETH    ─┼─► 3 MF ROMs ─┼─► rule_activation ─► w[27] ─┬─► sop_accum N (v = c_j) ─┐
 TITH    ─┴─► 3 MF ROMs ─┘   (2-stage products)        └─► sop_accum D (v = 1.0) ─┴─► nd_divider ─► y, ready
   1 cycle                    2 cycles                      7 cycles                   43 cycles
```

### Membership ROMs (`mf_lut`)

Each label's bell is evaluated ahead of time for all 256 input codes. The
results sit in a 256 × 16 ROM (block RAM on an FPGA), so a membership is
one registered read. The nine ROMs of a core read every cycle, so the
features only have to be valid in the start cycle.

### Rule products (`rule_activation`)

This layer multiplies three degrees per rule, two at a time. Stage 1 forms
the nine THW × TETH products and delays the three TITH degrees alongside
them. Stage 2 multiplies each of those products by a TITH degree, giving
the 27 weights. Both stages advance only while `ce_mult` is high. Sharing
the nine stage-1 products makes 36 multipliers per core instead of 54.

### Sum of products with in-place folding (`sop_accum`)

This is the least conventional part. A multiplier bank feeding an adder
tree would need about 2K − 1 arithmetic units for K products. Here there
are K lanes, each with:

* a multiplier;
* a product register;
* a two-way multiplexer controlled by `is_prod`;
* an accumulator register.

Only the lower ⌈K/2⌉ lanes also have an adder. The accumulators serve as
the adder tree's registers and are reused for every level:

| cycle | is_prod | ce | action |
|---|---|---|---|
| 1 ("RES") | 1 | 0 | `prod[j] <= u_j * v_j`; all accumulators cleared |
| 2 | 1 | 1 | `acc[j] <= prod[j]` |
| 3 … ⌈log2 K⌉+2 | 0 | 1 | `acc[j] <= acc[2j] + acc[2j+1]` for j < ⌈K/2⌉, else 0 |

Each folding step halves the number of live registers: 27 → 14 → 7 → 4 →
2 → 1. After ⌈log2 27⌉ = 5 steps the full sum is in `acc[0]`, the output.
The latency is ⌈log2 K⌉ + 2 = 7 cycles, counted from the cycle the
operands are presented. With `ce` and `is_prod` low, the registers hold and
the sum stays readable.

Each core has two of these units, driven by the same `is_prod`/`ce`: N gets
the consequent ROM on its v inputs and D gets the constant 1.0. The
original shows the fold wiring only schematically. Pairing registers 2j
and 2j+1 is one wiring that gives the described halving, and it is the one
used here.

### Divider (`nd_divider`)

The divider computes `y = trunc(N · 2^24 / D)` and takes the sign from N.
It is a fully pipelined radix-2 restoring divider:

* one operand-capture stage;
* 31 stages of one quotient bit each;
* a delay line that pads the pipeline to the required 43 cycles.

A new division can start every cycle. `ready` pulses once with each result,
and `y` holds until the next one. A quotient that does not fit in 32 bits
saturates, and D = 0 gives 0. The original used a vendor's high-radix
divider core. Only its function and 43-cycle latency are reproduced here.

## Control sequence (`anfis_ctrl`)

The core has no sequencer of its own. Like the original, it is driven by
five control inputs: `rst`, `ce_mult`, `is_prod`, `ce` and `ce_div`. One
`anfis_ctrl` drives all three cores in lock step. Counting from the cycle
in which `start` is high and the features are applied (cycle 0):

| cycles | signal | what happens |
|---|---|---|
| 0 | start | membership ROMs read the features |
| 1–2 | ce_mult | two rule-product stages |
| 3 | is_prod | N/D products registered, accumulators cleared |
| 4 | is_prod, ce | accumulators loaded |
| 5–9 | ce | five folding steps |
| 10 | ce_div | divider takes N and D |
| 53 | done (cores' `ready`) | y of all three cores valid |

The latency adds up as 1 + 2 + 7 + 43 = 53 cycles, which is 530 ns at the
100 MHz bus clock. The order of the signals, and the two-cycle `is_prod` that
overlaps `ce` by one cycle, follow the original's timing diagram. The exact
cycle numbers follow from the per-layer latencies. A `start` while busy is
ignored, and the next inference can start in the cycle after `done`. `rst`
is synchronous and active high, and clears all pipeline and accumulator
registers.

## Register interface (`anfis_axi_regs`, `anfis_top`)

The top-level module `anfis_top` has a clock, a reset and a 32-bit
AXI4-Lite slave port with 5-bit byte addresses.

| address | name | access | content |
|---|---|---|---|
| 0x00 | CTRL / STATUS | W: bit 0 = 1 starts; R: bit 0 busy, bit 1 done | done is set when the results arrive and cleared by the next start |
| 0x04 | FEATURES | R/W, byte strobes | [7:0] THW_rms, [15:8] TETH, [23:16] TITH |
| 0x08 / 0x0C / 0x10 | Y1 / Y2 / Y3 | R | scores of clusters 1, 2, 3 (Q7.24) |

Other addresses read as 0, and every response is OKAY. The slave handles
one transaction at a time per direction and holds BVALID/RVALID until
accepted; assertions check this. A driver does the following:

1. Write FEATURES, then write 1 to CTRL.
2. Poll STATUS until done is set (about 60 bus cycles).
3. Read Y1 to Y3 and pick the largest.

FEATURES may be rewritten as soon as the start has been accepted. The
original states only that features go in and results come out over the
bus. The Lite protocol, this register map and the start/done flags are
this design's own.

## What is not here

The host-side functions run in software on the processing system, so they
have no RTL here:

* computing THW_rms, TETH and TITH from radar distance, relative speed and
  vehicle speed;
* choosing the cluster;
* the per-cluster plane model, which maps a driver's average THW_rms and
  TITH to a personalised headway and never goes below 1 s for cluster 1;
* the vehicle bus interfaces.

## Departures from the original, in one place

* The membership parameters and consequents are placeholders (see above).
  This is the main limit on trust: the structure, formats and timing are
  exercised, but the classification quality of the trained networks is not.
* The divider is a radix-2 restoring pipeline, not a high-radix vendor core.
  It has the same function and latency.
* The original's core also has an `is_first_op` input, which is never
  described and is held low in its simulation. It is left out. What the
  original calls `calc_prod` in its simulation is `is_prod` here.
* The sequencer, the fold wiring, all widths other than 8-bit in and 32-bit
  out, rounding, saturation, D = 0 handling, reset style and the register
  map are this design's choices.
* The original's timing diagram shows the features held through the
  rule-product cycles. Here they are needed only in the start cycle, which
  is a weaker requirement.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench | what it checks |
|---|---|
| `tb_mf_lut` | all 256 entries of two ROMs against the bell in floating point (±1 LSB); 1-cycle read |
| `tb_rule_activation` | 27 weights against truncated integer products; 2-cycle pipeline, hold, reset |
| `tb_sop_accum` | sums for K = 27 and K = 6; partial sums before the last fold; 7-cycle latency |
| `tb_nd_divider` | 200+ back-to-back divisions against 128-bit integer division; 43-cycle latency; saturation; D = 0 |
| `tb_anfis_core` | three cores driven by a hand-written control sequence against a floating-point ANFIS (`anfis_ref_pkg`); N/D; 53-cycle latency; each cluster wins at least once |
| `tb_anfis_ctrl` | the control schedule cycle by cycle; start while busy; back-to-back runs |
| `tb_anfis_axi_regs` | register map, strobes, start pulse, status, result capture |
| `tb_anfis_top` | end to end through AXI4-Lite at full size: 63 inferences, the reference point, scores and classification against the floating-point model, 53-cycle latency, starts while busy, delayed read acceptance |

`axi_lite_bfm.sv` is the bus master model that the two AXI testbenches share.

To run one with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/anfis_pkg.sv tb/anfis_ref_pkg.sv tb/tb_anfis_top.sv --top-module tb_anfis_top
./obj_dir/Vtb_anfis_top
```

Use the same command for the other testbenches, changing the last file and
the top module. The end-to-end run takes well under a second.
