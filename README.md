# FeBiM: a naive-Bayes classifier that computes in a FeFET crossbar

A naive-Bayes classifier picks the event `A` that maximises

    P(A) * P(B1|A) * P(B2|A) * ... * P(Bn|A)

for the observed evidence `B1..Bn`. That is a product of probabilities, not
the multiply-accumulate that most in-memory-computing arrays are built for.
In the log domain the product becomes a sum:

    log P(A) + log P(B1|A) + ... + log P(Bn|A)

Currents that meet on a wire add up, so the sum needs no adder. FeBiM stores
every (normalised, quantized) log-probability as the read current of one
multi-level ferroelectric FET (FeFET). Each event gets its own row. For an
observation the engine switches on exactly the cells that belong to it. Each
row's wordline then carries that event's log-posterior as a current, and a
winner-take-all (WTA) circuit marks the largest one. An inference takes one
clock cycle and needs no arithmetic logic.

This repository holds SystemVerilog for that engine, as described in the
paper "FeBiM: Efficient and Compact Bayesian Inference Engine
Empowered with Ferroelectric In-Memory Computing" (C. Li et al.). The control
logic (bitline drivers with the write sequencer, and the row driver) is
synthesizable RTL. The FeFET array and the WTA circuit are analog, so they
are written as behavioural models: integer currents, ideal devices. The top
level is therefore a simulation model of the whole engine, not a netlist for
a chip. Where the paper leaves a detail open, this code makes its own
choice, and the choice is marked as such below and in each file header.

## The array

```
                 prior  likelihood block 1        ...  likelihood block n
                 BL0    BL1,0 BL1,1 ... BL1,m-1        BLn,0 ... BLn,m-1
  WL1 / ScL1 ----[F]----[F]---[F]-- ... --[F]-- ... ---[F]-- ... --[F]---> I_WL1 --\
  WL2 / ScL2 ----[F]----[F]---[F]-- ... --[F]-- ... ---[F]-- ... --[F]---> I_WL2 ---+-> WTA -> one-hot
  ...                                                                                |
  WLk / ScLk ----[F]----[F]---[F]-- ... --[F]-- ... ---[F]-- ... --[F]---> I_WLk --/
```

* **Rows = events.** Row `a` holds everything about event `A=a`. All FeFET
  drains of the row are on its wordline (WL), and all sources are on its
  sourceline (ScL).
* **Columns = (evidence node, value) pairs.** Each of the `n` evidence nodes
  is quantized to `m` values and owns a block of `m` columns. Column `v` of
  block `i` holds `log P(Bi = v | A)` for every row. An optional first
  column holds the prior `log P(A)`. All gates of a column are on its bitline
  (BL).
* **Column index.** With `PRI = HAS_PRIOR ? 1 : 0`, the cell for evidence
  node `i` (from 0) and value `v` is in column `PRI + i*m + v`. Column 0 is
  the prior when there is one.

During an inference the prior BL and one BL per block, the one matching the
observed value, are raised to V_on = 0.5 V. All other BLs are at
V_off = -0.5 V, which cuts their FeFETs off. Each WL then sums exactly
`1 + n` cell currents (or `n` without a prior).

Default configuration: the iris classifier, with 3 events (classes) and
4 features. Each feature is quantized to 16 values (Q_f = 4 bit) and each
likelihood to 4 levels (Q_l = 2 bit). There is no prior column, because the
iris classes are equally likely and a uniform prior changes nothing. The
array is 3 x 64.

## From probabilities to cell currents

This mapping is done offline before programming and is not hardware. It is
described here because the stored numbers mean nothing without it.
`tb/febim_iris_tb.sv` contains a complete implementation in SystemVerilog.

1. **Truncate.** Probabilities below 0.1 are replaced by 0.1. This bounds
   the range of the logarithm.
2. **Log.** `L = ln P`, so `L` lies in `[ln 0.1, 0]`.
3. **Normalise per column.** Every cell of one column gets the same
   constant added, chosen so that the column maximum becomes 1:
   `P' = L + (1 - max over rows of L)`. Each WL sum then changes by the same
   amount for every row, so the arg-max is unchanged. The full quantization
   range is spent on the differences between events, which is what decides
   the winner. `P'` lies in `[1 + ln 0.1, 1] = [-1.30, 1]`.
4. **Quantize** `P'` uniformly into `NUM_LEVELS` level codes
   `q = 0 .. NUM_LEVELS-1`.
5. **Map linearly to current.** Code `q` becomes
   `I_DS = 0.1 uA * (1 + q*9/(NUM_LEVELS-1))`, spread evenly over 0.1 to
   1.0 uA. The code counts currents as integers in units of 0.1 uA. The
   mapping is linear, so the WL current is a linear function of the
   quantized log-posterior and the largest current is the most probable
   event.

With 4 levels the cells take 0.1, 0.4, 0.7 or 1.0 uA. With 10 levels they
take every 0.1 uA step.

## Writing a cell

The state of a FeFET is set by its gate voltage history. A negative pulse
fully erases the cell (high threshold voltage, no read current). Each
positive pulse of V_w = 4 V then switches part of the ferroelectric
polarisation and lowers the threshold voltage a little. The number of
positive pulses after an erase therefore selects the read current.
`write_input_buffer` programs one cell per write command:

```
target BL :  ERASE | 0V | PROG | 0V | PROG | 0V | ... | PROG | 0V |
             slot0  s1    s2     s3   s4     s5        s2N    s2N+1
other BLs :  0 V throughout
target row:  WL and ScL at 0 V
other rows:  WL and ScL at V_w/2   (their cells on the target BL see only V_w/2: no disturb)
```

Each slot lasts `PULSE_CYCLES` clock cycles, so a write takes
`2*(N+1)*PULSE_CYCLES` cycles. `N` is the number of program pulses for the
target current, looked up in `febim_pkg::pulses_for_units`. The only
device-specific number in the design is this table. The paper plots pulse
count against current, with log(I_DS) rising about linearly from the 0.1 uA
state to the 1.0 uA state over a span of roughly 40 to 70 pulses. It does
not list per-state counts. The table here is this design's own fit,
`pulses(u) = 40 + round(30*log10(u))` for `u` = 1..10 (0.1 uA units):
40, 49, 54, 58, 61, 63, 65, 67, 69, 70. Calibrate it to the real device
before using the design for anything else. The erase pulse's amplitude and
width, the pulse width, and the gap are not given by the paper and are
choices of this design.

## Inference timing

```
clk      _/‾\_/‾\_/‾\_/‾\_/‾\_
cmd      <E0 ><E1 ><E2 >            cmd_valid & cmd_ready, cmd_op = OP_INFER
BL / row       <E0 ><E1 ><E2 >      array evaluates; wta_en high
res_*                <R0 ><R1 ><R2 >  res_valid, res_onehot, res_class
```

A command taken on a rising edge sets the bitlines and rows for the next
cycle. In that cycle the WL currents settle and the WTA resolves; the paper
reports under 300 ps for the WTA. The result is registered at the end of
the cycle. One inference can be issued per cycle, and each result appears
one cycle after its command. Writes block the command port (`cmd_ready`
low) until `write_done`. A command that finds `cmd_ready` low must be held
(an assertion checks this).

## Sensing

A current mirror copies each WL current into one cell of the WTA circuit.
Once EN_WTA is raised the WTA cells compete, and only the cell with the
largest input keeps its output current. The result is a one-hot vector, enabled by
EN_WTA. `wta_circuit` models this as an enabled arg-max. On an exact tie
(possible with so few levels) the model gives the win to the lower row
index. A real circuit has no defined winner in that case, and the model's
rule exists only to keep the output one-hot. The mirrors are taken as ideal
1:1 copies and are not a separate model: the WL currents feed the WTA model
directly and are also output on the `iwl` port.

## Files

| file | kind | content |
|---|---|---|
| `rtl/febim_pkg.sv` | package | drive-level enums, level-to-current mapping, pulse table |
| `rtl/write_input_buffer.sv` | RTL | command port, inference BL decode, erase/pulse-train write sequencer |
| `rtl/row_driver.sv` | RTL | WL/ScL bias: target row grounded and others at V_w/2 during writes; all sensed during inference |
| `rtl/fefet_crossbar.sv` | behavioural | k x (prior + n*m) array of `fefet_cell`s, WL current sums |
| `rtl/fefet_cell.sv` | behavioural | one FeFET: counts program pulses since erase, gives read current |
| `rtl/wta_circuit.sv` | behavioural | enabled arg-max, one-hot output |
| `rtl/febim_top.sv` | top | wiring of the above plus the result register |

Parameters of `febim_top` (defaults = the iris configuration):

| parameter | default | meaning |
|---|---|---|
| `NUM_ROWS` | 3 | events k (rows) |
| `NUM_EVID` | 4 | evidence nodes n |
| `EVID_LEVELS` | 16 | values per evidence node m (Q_f = 4 bit) |
| `NUM_LEVELS` | 4 | stored probability levels (Q_l = 2 bit); at most 10 on the 0.1 uA grid |
| `HAS_PRIOR` | 0 | 1 adds the prior column 0 |
| `PULSE_CYCLES` | 1 | clock cycles per write pulse and per gap (own choice) |

## Where this departs from the paper, and how far to trust it

* **Analog behaviour is idealised.** Cell currents are exact multiples of
  0.1 uA. Write disturb, device-to-device variation, WL IR drop, mirror
  mismatch and WTA resolution limits are not modelled. The paper reports an
  accuracy drop of about 5 % at a threshold-voltage spread of 45 mV. None
  of this appears here.
* **Erased cells read 0.** The paper does not give the current of an
  erased cell. A cell that has not been programmed contributes nothing.
* **Prior column index.** The paper's text names the prior bitline BL1,
  while its array drawing labels it BL0 and numbers the likelihood columns
  from BL11. This code follows the drawing (column 0).
* **Own additions:** the command port with its valid/ready handshake, the
  reset, the idle state (all lines at 0 V), 0 V on unselected bitlines
  during a write, per-cell erase, the pulse/gap timing, the pulse-count
  table, the tie rule of the WTA, and the result register with its event
  index.
* **Not hardware here:** the clock generator (an input), the current
  mirrors (see Sensing), and the offline probability mapping (in the iris
  testbench).

## Simulating

All testbenches are self-checking and end with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert --top-module febim_iris_tb \
    -y rtl -y tb +libext+.sv -Irtl rtl/febim_pkg.sv tb/febim_iris_tb.sv
./obj_dir/Vfebim_iris_tb
```

Replace `febim_iris_tb` with another testbench name to run that one.

| testbench | what it shows |
|---|---|
| `febim_iris_tb` | full default engine (3 x 64). Builds the iris naive-Bayes model from the per-class feature means and spreads of the public iris data, maps it as above, programs all 192 cells over the command port and classifies 150 synthetic samples back to back. Every decision must equal an arg-max over the intended currents, and 150 inferences must take 151 cycles. Typical output: engine 145/150 correct, the same as the floating-point classifier on the same samples. |
| `febim_top_tb` | 4 x 9 array with prior and 10 levels. Checks every WL current and result, the write length, the stall of a waiting inference during a write, reprogramming (erase before program), back-to-back inferences, WTA ties, and cases where the prior changes the winner. Each of these must occur at least once. |
| `write_input_buffer_tb` | BL patterns for random evidence, and the exact erase/pulse/gap trace of writes at every level with 2-cycle pulses |
| `row_driver_tb` | row biases for every mode and row |
| `fefet_crossbar_tb` | programming through raw BL/row drives, half-bias retention, column sums, multi-cycle pulses counted once, under-programmed cells |
| `wta_circuit_tb` | random, close and tied inputs against a reference arg-max |
| `febim_scale_tb` | all-bitlines-on arrays of 2 x 256 and 32 x 32 cells, the largest sizes of the paper's scaling study |
| `febim_iris_sweep_tb` | the iris classifier at feature precision Q_f = 1..4 bit and likelihood precision Q_l = 1..3 bit, and at Q_f = 5 and 6 bit with Q_l = 2 bit: fourteen engines side by side on the same 150 samples (helper `febim_iris_run`). Takes about two minutes to build. Checks every decision and prints an accuracy table; at Q_f = 1 bit accuracy drops to roughly 55-65 %, from Q_f = 2 bit on it stays within a few samples of the floating-point classifier. With Q_l = 3 bit the eight levels land on 1, 2, 3, 4, 6, 7, 8 and 10 tenths of a microampere, since the 0.1 uA grid has only ten steps. One result does not follow the paper's own sweep: there, 1-bit likelihoods lose well over 10 % accuracy, while here Q_l = 1 bit stays close to the other columns for Q_f of 2 bit and up. The sample set is synthetic, and the testbench's truncation and rounding are its own, so this table checks the engine against its reference. It does not reproduce the paper's accuracy figures. |

## Sizes of other configurations

The paper also evaluates wine and breast-cancer classifiers, in software
only. The public wine data set has 3 classes and 13 features, and the
Wisconsin breast-cancer set has 2 classes and 30 features; the paper does not
restate these sizes. At Q_f = 4 bit they need
3 x 208 and 2 x 480 cells. They fit with `NUM_EVID` = 13 or 30 but not in the
default 3 x 64 array. Its scaling study runs 2 rows x up to 256 columns and
32 columns x up to 32 rows with every bitline active. Those sizes are
reached with `EVID_LEVELS = 1`: every column is then its own single-value
block, and all columns are on when every evidence code is 0.
