# Ternary weights in a 2T2R RRAM array, read by a precharge sense amplifier

Binarized neural networks store each weight as one bit. A well-known way to
store such bits in resistive memory (RRAM) is to use two devices per bit: the
2T2R cell. One device sits on the bit line BL and the other on its complement
BLb. The pair is programmed in opposite states: low resistance (LRS) on one
side, high resistance (HRS) on the other. A precharge sense amplifier (PCSA)
compares the two devices, so no error-correcting code is needed.

This design reuses that array unchanged for *ternary* weights (+1, −1, 0).
The trick is timing. The PCSA resolves quickly when one of its two devices is
in LRS. When both are in HRS it resolves far more slowly, and this is
strongest at a near-threshold supply (0.6 V in a 130 nm process). So HRS/HRS
is used to store 0. A read is stopped after a fixed sense window of 70 ns,
and an XOR of the two PCSA outputs then says whether the amplifier has
resolved:

| pair (BL / BLb) | stored weight | PCSA within 70 ns | XOR | Q | read as |
|-----------------|---------------|-------------------|-----|---|---------|
| LRS / HRS       | +1            | resolves          | 1   | 1 | +1      |
| HRS / LRS       | −1            | resolves          | 1   | 0 | −1      |
| HRS / HRS       | 0             | still precharged  | 0   | – | 0       |
| LRS / LRS       | not used      |                   |     |   |         |

The only hardware this adds to a binary 2T2R array is the XOR and a capture
at the end of the window. The weights feed a ternary neuron
A = φ(Σ GXNOR(W, X) − T). GXNOR is the product of two trits, and φ maps its
input to +1 above Δ, to −1 below −Δ, and to 0 otherwise.

The RTL follows the paper *"Low Power In-Memory Implementation of Ternary
Neural Networks with Resistive RAM-Based Synapse"* (Laborieux et al.): the
array organisation, the PCSA read, the XOR rule, the 70 ns window, the GXNOR
table and the activation function. The clock, handshakes, encodings, the PCSA
timing model and how the neuron is attached are this implementation's own
choices. They are flagged below and in each file's header.

## Organisation

```
             rd_start, rd_row
                   |
           +----------------+  wl_drv, sl_drv   +-------------+  WL0..31, SL0..31
           |sense_controller|------------------>| row_decoder |------------------+
           +----------------+                   +-------------+                  |
              | sen      | sample                                                v
              |          |         prog_* ------------------------>+------------------------+
              |          |                                         | rram_2t2r_array 32x32  |
              |          |                                         | (behavioural model)    |
              |          |                                         +------------------------+
              |          |                                     R on BLc, BLbc |  (c = 0..31)
              v          |                                                    v
        +-----------+    |      Q, Qb      +-----------------+
        | pcsa  x32 |--------------------->| ternary_readout |---> row_weights[0..31]
        | (model)   |    +---------------->|   x32 (XOR)     |          |
        +-----------+          sample      +-----------------+          |
                                                                        +--> column_decoder --> rd_out
                                                          x_in[0..31] --+--> tnn_neuron ------> nrn_act
```

| module | what it is | source |
|--------|------------|--------|
| `tnn_pkg` | trit type and helpers | encoding is this design's |
| `rram_2t2r_array` | **behavioural model** of the 32×32 array of device pairs | organisation from the paper's array schematic |
| `row_decoder` | puts the WL/SL drive on the addressed row | named in the paper; one-hot decoder is this design's |
| `pcsa` | **behavioural model** of the precharge sense amplifier | behaviour from the paper; timing law fitted (see below) |
| `ternary_readout` | XOR of Q/Qb and end-of-window capture | rule from the paper |
| `sense_controller` | precharge / evaluate / capture sequencer | two phases and 70 ns from the paper; cycle counts are this design's |
| `column_decoder` | 32:1 output mux (`out0..out31` → `out`) | named in the paper |
| `gxnor` | ternary multiplier | truth table from the paper |
| `tnn_neuron` | adder tree, accumulator, φ | equation from the paper; circuit is this design's |
| `tnn_rram_macro` | top level | |

The array and the PCSA are analog parts. Their files are behavioural models
(real-valued resistances, `#` delays), not synthesizable logic. Everything
else is synthesizable.

## How a ternary value is stored

Each cell holds two resistances, `R_BL` and `R_BLb`, in ohms. The model takes
them from a programming port, because no programming circuit is described
for the chip. The paper's array has a second column decoder that connects
external BL/BLb lines to one column for programming. It is not built here;
the top's `prog_*` ports take its place. A write sets both devices of one
cell in one clock cycle:

* +1: `R_BL` in LRS, `R_BLb` in HRS
* −1: `R_BL` in HRS, `R_BLb` in LRS
* 0: both in HRS

In the source process, HRS is typically above 100 kΩ. The model accepts any
value, so intermediate and faulty pairs can be tested. Unprogrammed devices
start at 1 MΩ, which reads as 0.

Inside the design a trit is 2 bits in two's complement: `01` = +1,
`11` = −1, `00` = 0. The code `10` is never produced, and every consumer
treats it as 0.

## The read: precharge sense amplifier and the 70 ns window

This is the part of the design that needs the most care.

**Circuit being modelled.** The PCSA is a pair of cross-coupled inverters.
Their pull-down paths run through the BL and BLb devices of the selected cell
and share a discharge transistor to ground, gated by SEN. Precharge
transistors, also gated by SEN, tie both outputs to VDD.

* **SEN = 0 (precharge):** Q = Qb = VDD.
* **SEN = 1 (evaluate):** both branches discharge. The branch through the
  lower resistance falls first. Its inverter then drives the other output
  back up, and the outputs latch complementary. The BL branch drives Qb, so
  `R_BL < R_BLb` gives Q = 1, Qb = 0, which is weight +1.

While the amplifier has not resolved, Q and Qb are both still high, so
XOR(Q, Qb) = 0. It becomes 1 only once the outputs have separated.

**Timing model (`pcsa`).** The model is fitted to two switching times given
for the 130 nm process at 0.6 V:

* 50 ns for a 20 kΩ / 350 kΩ pair;
* 200 ns for a 320 kΩ / 350 kΩ pair.

The published switching-time map shows that the time depends mainly on the
*lower* of the two resistances. So the model uses a straight line through
those two points:

```
t_sw = T0_PS + K_PS_PER_KOHM * min(R_BL, R_BLb) / 1 kΩ      (ps)
     = 40 ns + 0.5 ns per kΩ of the lower device                (defaults)
```

This is the most invented part of the design. With a 70 ns window it puts
the boundary between "resolves" and "reads 0" at min(R) = 60 kΩ. That lies
below the 100 kΩ that typically marks HRS, so well-programmed HRS/HRS pairs
read 0 and LRS/x pairs read ±1. Further limits of the model:

* By default it has no noise or mismatch, so pairs near the boundary
  always read the same way. The measured chip sometimes converges there and
  sometimes does not. Setting `SPREAD_PCT` (top level: `PCSA_SPREAD_PCT`)
  to a non-zero value scales each read's `t_sw` by a random factor
  1 ± `SPREAD_PCT`/100. This reproduces the effect qualitatively, but no
  value for the spread is given for the chip.
* Exactly equal resistances never resolve.
* An open column (no row selected) never resolves.
* LRS/LRS pairs, which are never used, are outside the fit.
* The fit comes from circuit simulations, not from the measured chip. On
  the chip, with BLb at 100 kΩ, a 50 ns read converged as long as BL was
  "significantly lower than 100 kΩ". The model converges in 50 ns only for
  BL below 20 kΩ.
* If SEN falls before `t_sw`, the read is abandoned and the outputs stay
  precharged.
* Resistances must not change while SEN is high.

Refit `T0_PS` and `K_PS_PER_KOHM` to match another process or supply. For a
non-linear law, replace the function `t_switch_ps` in `pcsa.sv`.

**Capture (`ternary_readout`).** At the clock edge that ends the window, each
column's flip-flop stores ±1 (sign from Q) if XOR = 1, and 0 otherwise. In
simulation, a PCSA that resolves exactly on that edge is a race. Silicon
would need the usual care about sampling an asynchronous event; this RTL does
not model it.

## Read sequence and timing

The clock is assumed to be 10 ns, so that `SENSE_CYCLES = 7` gives the
70 ns window. To keep the window at 70 ns with another clock, change
`SENSE_CYCLES`.

| cycle after `rd_start` edge | state | WL/SL | SEN | sample | rd_done |
|-----------------------------|-------|-------|-----|--------|---------|
| 1 … 2                       | precharge (`PRECHARGE_CYCLES`) | 1 | 0 | 0 | 0 |
| 3 … 8                       | evaluate | 1 | 1 | 0 | 0 |
| 9                           | evaluate, last cycle | 1 | 1 | 1 | 0 |
| 10                          | idle | 0 | 0 | 0 | 1 |

SEN rises at the edge that starts cycle 3. The weights are captured at the
edge that ends cycle 9, exactly `SENSE_CYCLES` periods (70 ns) later. One
row read thus takes `PRECHARGE_CYCLES + SENSE_CYCLES + 1` = 10 cycles and
delivers all 32 weights of the row at once. `row_weights` holds them until
the next read completes. `rd_start` is ignored while `rd_busy` is high. The
2-cycle precharge length is an assumption: no precharge time is given for
the chip.

## The ternary neuron

`tnn_neuron` computes Σ GXNOR(wᵢ, xᵢ) over one row (32 inputs) with an adder
tree and adds it to a signed accumulator (`ACC_W` = 16 bits). At the top
level, the accumulation happens in the `rd_done` cycle of a read that was
started with `nrn_acc` high.

A neuron with more than 32 inputs is built up over several row reads:
`nrn_clear`, then one read per row with the matching `x_in`, then
`nrn_fire`. One cycle after `nrn_fire`, `nrn_act` (with `nrn_act_valid`)
holds φ(sum − `nrn_thresh`). The comparisons are strict: +1 if the result
is greater than `nrn_delta`, −1 if it is less than −`nrn_delta`.

The source network applies Δ = 0.05 after batch normalisation, in real
numbers. Here T and Δ are integers on the integer sum. Folding batch
normalisation into T and Δ is up to the user. The accumulator wraps on
overflow, which cannot happen below 32767 inputs.

## Top-level interface (`tnn_rram_macro`)

| port | dir | meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock (10 ns assumed), asynchronous active-low reset |
| `rd_start`, `rd_row[4:0]` | in | start reading a row |
| `rd_busy`, `rd_done` | out | read in progress; one-cycle pulse when `row_weights` is valid |
| `row_weights[32]` | out | trits of the last row read |
| `row_xor[31:0]` | out | live XOR of each PCSA (1 while resolved during SEN) |
| `rd_col[4:0]` → `rd_out` | in/out | column decoder: one weight of `row_weights` |
| `x_in[32]` | in | ternary inputs of the neuron |
| `nrn_acc`, `nrn_clear`, `nrn_fire` | in | neuron control |
| `nrn_thresh`, `nrn_delta` | in | T and Δ (16-bit) |
| `nrn_sum`, `nrn_act`, `nrn_act_valid` | out | accumulated sum, activation, valid |
| `prog_en`, `prog_row`, `prog_col`, `prog_r_bl`, `prog_r_blb` | in | behavioural programming of one cell (resistances in ohms) |

Parameters: `ROWS` = 32 and `COLS` = 32, the array size of the test chip
(a kilobit of synapses). The rest are `PRECHARGE_CYCLES` = 2,
`SENSE_CYCLES` = 7, `ACC_W` = 16 and `PCSA_SPREAD_PCT` = 0.

## What fits

One macro holds 1024 ternary synapses. That is enough for the device-level
experiments it was built to reproduce: one synapse swept through four
programming configurations, and 109 pairs programmed 14 times each. It is
far too small for the CIFAR-10 networks used to argue for ternary weights.
Those are six 3×3 convolutional layers of N, N, 2N, 2N, 4N, 4N filters plus a
512-unit hidden layer, about 6.1 M weights at N = 100 and 45.7 M at N = 350.
A system for them would tile many such arrays and schedule layers over them.
That is not designed here.

## Testbenches

Every testbench checks against values it computes itself, and prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| `tb_gxnor` | all 16 input codes against integer products |
| `tb_row_decoder` | every address × WL/SL drive |
| `tb_column_decoder` | random rows, every address |
| `tb_ternary_readout` | XOR, capture rule, hold without `sample`, reset |
| `tb_sense_controller` | phase lengths, 70 ns from SEN rise to capture, 10-cycle latency, start while busy |
| `tb_tnn_neuron` | random multi-row sums, φ including the ±Δ edges |
| `tb_rram_2t2r_array` | programming every cell, WL/SL gating, parallel rows |
| `tb_pcsa` | the 50 ns and 200 ns points, polarity, abandoned read, random pairs vs. formula, bounds of the optional spread |
| `tb_tnn_rram_macro` | full-size end to end: program all 1024 cells, read all rows, column decoder, a 32-input neuron per row, a 128-input neuron over four rows, reprogramming, live XOR timing (50 ns for a 20k/350k pair, none within 70 ns for 320k/350k); counts each mechanism |
| `tb_fig4_sweep` | single synapse, BLb = 100 kΩ, four BL values, 100 reads each with a 50 ns window; prints % converged; then a boundary pair with 20 % spread, which must converge in some reads only |
| `tb_fig5_scatter` | 109 pairs × 14 random programmings, 50 ns window; classifies every read and checks no sign errors |

To run one with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_tnn_rram_macro -y rtl -y tb +libext+.sv -Irtl \
  rtl/tnn_pkg.sv tb/tb_tnn_rram_macro.sv
./obj_dir/Vtb_tnn_rram_macro
```

`--timing` is needed for the PCSA model's delays. All testbenches run in
well under a second.

## Departures and open points

* **PCSA timing** is a two-parameter fit, not a circuit model (see above).
  It is the main thing to revisit before drawing energy or yield
  conclusions.
* **Variability:** the chip shows stochastic reads near the boundary and
  more Type-2 (0 ↔ ±1) than Type-1 (sign) errors. The optional switching-time
  spread produces Type-2 errors near the boundary only. No sign errors can
  occur, because the sign always follows the lower device. Device-to-device
  resistance spread is left to the testbench that programs the array.
* **Programming** is behavioural. The BL/BLb programming column decoder and
  the SET/RESET circuits are not designed.
* **Clock and handshakes** (10 ns, 2-cycle precharge, start/busy/done) are
  assumptions. The source gives only the 70 ns window and the two phases.
* **Near-threshold only:** the 1.2 V operating point is not modelled. There,
  the HRS/HRS zone above 70 ns is much smaller.
* **Neuron:** the equation is from the source; its circuit and its
  attachment to the read are this design's.
