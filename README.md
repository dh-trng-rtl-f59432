# DH-TRNG: a dynamic hybrid ring-oscillator random number generator

A true random number generator for FPGAs that delivers one raw random bit per
clock at 620–670 MHz while using only 8 slices (20 LUTs and 4 MUXes for the
noise source, 14 flip-flops and 3 LUTs for sampling). Its main idea is an
entropy cell that combines two physical noise sources. The first is the
**jitter** of a tiny ring oscillator. The second is **metastability**, which
that jitter triggers in a second ring. The ring is switched at random
between oscillating and holding, so it is often frozen in the middle of a
transition. Two further tricks let a handful of these cells reach full
entropy without any post-processing:

* **Coupling.** The cells are nested inside XOR rings. The XOR rings mix the
  noise of the cells on both sides.
* **Feedback.** The output bit is fed back into those XOR rings, which
  disturbs their phase every cycle.

This repository holds a SystemVerilog description of the whole generator:

* a synthesizable sampling array;
* a timing model of the ring-oscillator noise source, with LUT delays,
  jitter, glitch filtering and metastable capture;
* self-checking testbenches, including a one-million-bit statistical run.

The structure follows the published DH-TRNG design (Zhang, Zhong and
Zhang, "DH-TRNG: A Dynamic Hybrid TRNG with Ultra-High Throughput and
Area-Energy Efficiency"). The timing numbers, and the details that the
publication shows only as drawings, are this implementation's own choices.
They are listed under [Departures and own choices](#departures-and-own-choices).

## Block structure

```
             en                                   clk   rst_n
              |                                    |      |
   +----------v-----------------------------+   +--v------v------------------------+
   | dh_entropy_source                      |   | dh_sampling_array                |
   |  +--------------------+                |   |                                  |
   |  | dh_coupling_cell 0 |--6 ring nodes--+-->|  6 DFF -> XOR6 -> DFF --+        |
   |  +--------------------+                |   |                         XOR -----+--> out
   |  | dh_coupling_cell 1 |--6 ring nodes--+-->|  6 DFF -> XOR6 -> DFF --+        |  |
   |  +--------------------+                |   +----------------------------------+  |
   |         ^ fb (both cells)              |                                         |
   +---------|------------------------------+                                         |
             +------------------------- feedback line -------------------------------+
```

| module | what it is | kind |
|---|---|---|
| `dh_trng` | top: source + sampling array + feedback line | composition |
| `dh_entropy_source` | two identical coupling structures, 12 ring signals | timing model |
| `dh_coupling_cell` | two entropy units nested in two 2-XOR central rings | timing model |
| `dh_entropy_unit` | RO1 (jitter ring) + RO2 (switched ring) | timing model |
| `dh_delay_cell` | one LUT stage: delay, jitter, glitch rejection | timing model |
| `dh_sampling_array` | 14 flip-flops, two 6-input XORs, final XOR | synthesizable RTL |
| `dh_trng_pkg` | shared counts, clock periods, model timing, ring index enum | package |

The clock comes from an FPGA PLL in the original design. Here it is simply
the `clk` input.

## The dynamic hybrid entropy unit

This is the part that is hardest to picture. Each unit has two rings, and
both are enabled by `en`:

```
RO1 (jitter ring):    R1  = NAND(en, R1b)          R1b = BUF(R1)
RO2 (switched ring):  R2  = MUX(sel = R1b, in0 = N2, in1 = R2)
                      N2  = NAND(en, R2)
(every "=" is one LUT stage with its delay; R1 and R2 are sampled)
```

* **RO1** has one inverting stage gated by `en` and one buffer. It
  oscillates with a period of roughly four LUT delays. Its edges carry
  accumulated jitter. Sampling node R1 with the clock turns that jitter into
  bits.
* **RO2** is a MUX whose output is R2.
  * MUX input 0 is an `en`-gated inversion of R2. Through input 0 the ring
    is an inverter loop and R2 oscillates.
  * MUX input 1 is R2 itself. Through input 1 the loop holds its level.
  * RO1 drives the select. While R1 is 0, R2 oscillates. While R1 is 1, R2
    is frozen.

  Because R1's edges are jittery, RO2 freezes at a random point of its own
  oscillation. When the freeze arrives while a transition is passing through
  the MUX, the holding loop is left between the two levels and settles at
  random: this is metastability.

The two effects complement each other. The jitter sample (R1) is biased
when the clock edge lands far from an R1 transition. At exactly those
moments R2 is either frozen at a random level or oscillating fast. XORing
many such samples drives the bias towards zero, since for independent
inputs the bias of an XOR is the product of the input biases.

**How the model handles it** (`dh_entropy_unit`):

* Every gate is a logic expression followed by a `dh_delay_cell`.
* The holding loop is modelled as the latch it forms. When the select
  rises, the MUX output keeps the level it was passing.
* If MUX input 0 changed less than `META_WINDOW_PS` (40 ps) before that
  moment, the kept level is drawn at random instead. The counters `n_hold`
  and `n_meta` record how often each case happens.
* Whether a given unit ever sees metastable captures depends on the race
  between the RO1 half-period and the RO2 loop delay. In the default
  configuration about a third of all captures, summed over the four units,
  resolve at random.

## Central XOR rings and the coupling structure

A coupling structure (`dh_coupling_cell`) places two units, A and B,
mirrored on either side of two central rings. Each central ring is two XOR
gates in a loop:

```
upper ring:  cu0 = R2(A) ^ cu1 ^ fb      cu1 = R1(B) ^ cu0
lower ring:  cl0 = R1(A) ^ cl1           cl1 = R2(B) ^ cl0 ^ fb
```

A loop of XORs contains an inversion only when the XOR of its side inputs is
1. So a central ring **oscillates while the parity of its side inputs is odd
and holds while it is even**. The side inputs are the edge rings of both
units, which switch constantly, and the feedback bit. The central ring
therefore changes mode at irregular moments. It also carries the superposed
jitter of the edge rings on both of its sides.

The six signals of one structure are sampled:

* R1 and R2 of both units (the four "edge rings");
* one node of each central ring.

Two structures give the 12 ring signals. Gate counts per structure: 4
NAND-type LUTs, 2 buffers, 2 MUXes and 4 XORs. Over two structures that is
20 LUTs and 4 MUXes, the published count for the noise source.

Behaviour worth knowing when reading simulations:

* The central rings have no enable. With `en` low the edge rings stop
  (every R1 at 1, every R2 frozen), but a central ring whose side inputs
  have odd parity keeps oscillating.
* A ring whose parity turns even can be left with a pulse circulating in it.
  In the model such a pulse shrinks or grows under jitter until it is
  narrower than the glitch limit of a LUT. The LUT then swallows it and the
  ring comes to rest. Without that glitch filtering, a transport-delay model
  would keep such pulses alive forever.

## Feedback line

The output bit `out` drives the `fb` input of both structures. It enters one
XOR of every central ring. Each new output bit therefore flips the mode of
all four central rings with probability 1/2, and re-randomises their phase
for the bits that follow.

## Sampling array and output timing

`dh_sampling_array` is plain synthesizable RTL:

```
ring[11:0] --> 12 x DFF --> XOR of bits [5:0]  --> DFF --+
                        \-> XOR of bits [11:6] --> DFF --+--> XOR --> out
```

* The first-stage flip-flops sample signals that are asynchronous to `clk`,
  by design. A metastable sample there is part of the entropy.
* A ring level captured at clock edge *k* appears on `out` right after edge
  *k+1*.
* A new bit appears every cycle: 620 Mbit/s at 620 MHz (1613 ps, the
  Artix-7 figure) and 670 Mbit/s at 670 MHz (1493 ps, Virtex-6).
* `out` is a combinational XOR of two flip-flops. It feeds both the user and
  the feedback line.

## Interface of `dh_trng`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | sampling clock, one output bit per rising edge |
| `rst_n` | in | 1 | asynchronous active-low clear of the 14 flip-flops |
| `en` | in | 1 | enable of the edge rings; low stops them |
| `out` | out | 1 | raw random bit, no post-processing |

Parameters:

| parameter | default | meaning |
|---|---|---|
| `N_SETS` | 2 | number of coupling structures; 2 in the published design |
| `DELAY_PS` | 310 | nominal delay of one LUT stage in the model |
| `JITTER_PS` | 12 | jitter added per transition in the model |

To get random data, release `rst_n`, raise `en` and read `out` on every
clock from the third edge on. The restart test below reads the first 32
bits after enabling.

## The timing model (`dh_delay_cell`)

A two-state, zero-delay simulation cannot show a ring oscillator doing
anything useful. Every gate of the rings is therefore followed by a delay
cell, which works as follows:

* Each input change reaches the output after `DELAY_PS` plus a fresh random
  jitter of 0..`JITTER_PS`. The jitter has a triangular distribution.
* Several transitions can be in flight at once.
* An input pulse narrower than `REJECT_PS` (100 ps) is swallowed.
* A transition overtaken by a later one is dropped, so the output always
  ends at the current input level.
* Each gate adds a fixed per-instance offset of 0..60 ps to its delay
  (`dh_trng_pkg::skew_ps`). This stands in for placement mismatch, so no
  two rings share a frequency.

All of these numbers are assumptions for a 28 nm-class FPGA, not measured
values.

What this model can and cannot tell you:

* It shows that the structure works as described:
  * the rings oscillate, switch and hold;
  * the central rings follow their parity;
  * the feedback toggles their mode;
  * the sampling pipeline produces one bit per cycle;
  * with the assumed jitter, the raw stream is balanced and uncorrelated
    (see below).
* It cannot show that silicon has enough entropy. The randomness in
  simulation comes from the model's random delays. The published
  statistical results (NIST SP 800-22, SP 800-90B, AIS-31, behaviour across
  temperature and voltage) were measured on hardware.

## Taking it to an FPGA

* `dh_sampling_array` synthesizes as is.
* For the rings, replace each `dh_delay_cell` with a single LUT that the
  tools may not optimise away:
  * the gate expressions in front of the delay cells become the LUT
    functions;
  * the RO2 MUX maps onto a slice MUX.
* Keep the combinational loops, and allow them in the timing and DRC
  settings.
* The published implementation packs everything into 8 slices. It uses
  automatic placement and routing, with the gates constrained by type into
  a compact square of slices.
* The model's `$urandom`, fork/join and delay controls are for simulation
  only. Synthesis tools will not accept the timing-model files.

## Departures and own choices

The following follow the published design:

* the unit topology, and the MUX input numbering (0 = inverter loop,
  1 = holding loop);
* two units per structure, inserted in reverse into two 2-XOR central
  rings;
* two structures and 12 sampled rings;
* two registered 6-input XORs and a final XOR, 14 flip-flops in all;
* the output fed back into the central rings;
* one bit per clock at 620/670 MHz.

The following are choices made here:

* **Gate types of the enable stages.** They are NAND(en, loop). The
  publication draws them but names only "inverter loop" and "enabled by En".
* **Wiring the publication only draws:**
  * which edge-ring node drives which central XOR;
  * which central-ring node is sampled;
  * which XOR of each central ring receives the feedback (as drawn for the
    feedback strategy).
* **Output stage.** The publication's single-structure illustration of the
  feedback strategy shows XOR → flip-flop → output. The overall
  architecture shows two XOR → flip-flop stages and a final XOR. This RTL
  follows the overall architecture, which matches the stated 14 flip-flops
  and 3 sampling LUTs.
* **Feedback register.** The feedback strategy is described with an extra
  flip-flop that launches the output onto the feedback line, yet the total
  is given as 14 flip-flops (12 + 2). Here `out` goes to the feedback line
  straight from the two second-stage flip-flops through the final XOR, so
  no 15th flip-flop is added.
* **Reset.** `rst_n` clears the 14 flip-flops. The published design has no
  reset, only `En` and `Clk`.
* **Timing model.** All delays, jitter, glitch width, metastability window
  and mismatch offsets belong to the model.
* **Metastability in the sampling flip-flops** is not modelled separately.
  It is modelled where the design relies on it, in the RO2 holding loop.

## Simulating

All files are SystemVerilog 2017. One module, package or testbench per
file. Every file declares `timeunit 1ps`. The timing model needs Verilator's
`--timing`. To run a testbench:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb rtl/dh_trng_pkg.sv tb/tb_dh_trng.sv \
          --top-module tb_dh_trng -o sim
./obj_dir/sim
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself via
a watchdog if it hangs. Replace the testbench name to run the others:

| testbench | checks | run time |
|---|---|---|
| `tb_dh_delay_cell` | delay and jitter bounds, jitter spread and mean, a 150 ps pulse passes with both edges, a 50 ps glitch vanishes | < 1 s |
| `tb_dh_entropy_unit` | R1 at 1 and rings still when disabled; RO1 half-period bounds; R2 oscillates only while the select is 0 and never moves in the holding region; metastable captures resolve to both levels; Q1^Q2 sampled at 100 MHz is balanced | < 1 s |
| `tb_dh_coupling_cell` | with edge rings stopped, each central ring oscillates or rests exactly as the parity of R2(A)^R1(B)^fb (resp. R1(A)^R2(B)^fb) predicts, for both fb levels; held rings satisfy their XOR equations; with edge rings running and fb random all six signals move and both central rings switch mode | < 1 s |
| `tb_dh_entropy_source` | the same parity checks for all four central rings, edge rings still when disabled, all 12 signals move when enabled, the two structures do not run in lock step | < 1 s |
| `tb_dh_sampling_array` | output equals a reference pipeline for 4000 random cycles; exact two-edge latency from every input bit; reset, including mid-cycle asynchronous clear | < 1 s |
| `tb_dh_trng` | the whole design at default parameters (see below) | ~3 s |
| `tb_dh_trng_stats` | one million bits at 620 MHz: deviation, autocorrelation at lags 1..100, AIS-31 T1–T4 on 50 blocks of 20,000 bits | ~3 min |

`tb_dh_trng` runs the full-size design with no parameter changed. It does
the following:

* checks every output bit against the XOR of the twelve ring levels that
  the testbench itself observed two edges earlier;
* repeats the restart experiment six times (stop, reset, enable, read the
  first 32 bits; all six words must differ);
* checks bias and autocorrelation over 8192 bits at 620 MHz and again at
  670 MHz;
* checks that every mechanism actually occurred: RO1 edges, RO2 holding
  captures, random (metastable) resolutions, central-ring mode switches,
  toggles on the feedback line, and rings stopping when `en` falls.

Typical results of the model:

* Restart words differ every time, e.g. `0x027e54bd`, `0xd29b76e4`, ….
* Bias is 0.2 % over 8192 bits. Over one million bits it is 0.012 %. The
  hardware figure quoted in the publication is 0.0069–0.0075 %.
* The largest autocorrelation magnitude over lags 1..100 is 0.0034.
* All 50 AIS-31 T1–T4 blocks pass.

## Resource count, for reference

| part | published | in this description |
|---|---|---|
| noise source | 20 LUTs, 4 MUX | per unit: 2 NAND + 1 buffer + 1 MUX (×4 = 12 LUT + 4 MUX); per central ring 2 XOR (×4 = 8 LUT) |
| sampling | 14 DFF, 3 LUT | 12 + 2 flip-flops; two 6-input XORs and one 2-input XOR |
| total | 8 slices, 23 LUT, 4 MUX, 14 DFF | same netlist, once each delay cell becomes its LUT |
