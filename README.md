# A memristor-based stochastic Bayesian machine in SystemVerilog

This is RTL for a small inference engine. It computes the posterior of a naive-Bayes model, a model in which the observations are independent once the class is known:

    p(Y=y | O_1..O_n)  ∝  p(Y=y) · p(O_1|Y=y) · p(O_2|Y=y) · … · p(O_n|Y=y)

The machine does this without a processor and without a shared memory. Every likelihood table p(O_n | Y=y) has its own small non-volatile memory. In the original chip this is a memristor array, and the arithmetic sits right next to it. A probability travels as a *stochastic bit stream*: a bit that is 1, on each clock cycle, with that probability. Multiplying two independent streams takes a single AND gate. Each class y therefore gets one row of memory blocks chained by AND gates. The density of ones at the end of the row is proportional to the posterior of y, and the class whose row gives the most ones (or the first one) is the answer.

The design is the one published as "A Memristor-Based Bayesian Machine" (Harabi, Hirtzlin, Turck et al.). That work describes a fabricated 4 × 4 demonstrator in a hybrid 130 nm CMOS/HfOx process and a scaled-up 6 × 4 design for gesture recognition. This RTL is a re-implementation from that description, not the authors' code. Where the description stops, the choices made here are named in each file's header and in the section "Departures and own choices" below.

## The grid

```
            column 0 (O_0)        column 1 (O_1)              column N-1
            obs[0]  rnd[0]        obs[1]  rnd[1]              obs  rnd
              │       │             │       │                  │     │
 prior[0] ─►[ L(0,0) ]──AND──────►[ L(0,1) ]──AND── … ──►[ L(0,N-1) ]──AND──► post[0]
 prior[1] ─►[ L(1,0) ]──AND──────►[ L(1,1) ]──AND── … ──►[ L(1,N-1) ]──AND──► post[1]
    …
```

* **Row y** holds the likelihood blocks of class y. **Column n** holds those of observation O_n.
* Two sets of *vertical* wires run down each column: the observation `obs[n]`, which is the address of the word to read in every block of the column, and the 8-bit random word `rnd[n]` from the column's LFSR. All rows share them. Each row does an independent computation, so sharing random numbers between rows is harmless.
* The *horizontal* wires are single bits. Block (y,n) ANDs its own stochastic bit with the stream from block (y,n-1) and passes the result on. Likelihoods are usually small, so these wires are almost always 0. Data movement is therefore minimal.
* `prior[y]` enters each row. Both machines in the publication use a uniform prior, so the inputs are tied high. No prior generator is built.
* The grid (`bm_core`) has **no clock**. Once the sense amplifiers have latched the likelihoods, `post` follows the LFSR words combinationally. Only the control unit is clocked.

On each cycle, with LFSR words that behave as uniform random numbers over the 255 non-zero values:

    P(post[y] = 1) ≈ prior[y] · Π_n  L_y,n(obs[n]) / 255

Here L_y,n(o) is the stored 8-bit integer.

## From a stored integer to a random bit: the Gupta circuit

Each block turns its 8-bit likelihood `proba` and the column word `rnd` into one bit, PSB (`gupta.sv`). The circuit is Gupta and Kumaresan's weighted binary generator:

* random bit i *selects* probability bit i when it is the highest set bit of `rnd`;
* PSB is the OR of the selected probability bits.

A word whose highest set bit is i occurs 2^i times among the 255 non-zero 8-bit values. An 8-bit maximal LFSR visits each non-zero value exactly once per 255-cycle period. So **over one full period, a block with chain input 1 outputs exactly `proba` ones**: the value FF gives a solid stream of ones, and 00 gives none. The testbench of `gupta` checks this for all 256 values, and `tb_likelihood_block` checks it through the memory.

Rows multiply several such streams, and the columns' LFSRs are not truly independent. The product is then exact only in expectation, and its error depends on the seeds. The publication reports that a poor choice of seeds biases the measured posteriors, and that well-chosen seeds make them follow Bayes' law closely. Its seed values are not published. Seeds are therefore plain inputs here, loaded once after power-up.

Likelihoods are normalised per column so that the largest entry of each column is FF. This does not change which class wins, but it makes the streams denser, so the inference converges in fewer cycles.

## Storing the likelihoods: 2T2R memristor cells

Each array (`memristor_array.sv`, a behavioural model) holds 2^ADDR_W words of 8 bits. The fabricated chip has 8 words (64 bit cells). A bit cell has two memristors, the *left* one on bit line BL and the *right* one on BLb. Each sits behind a select transistor gated by the word line, and the two share a source line.

| memristor state | how it is reached |
|---|---|
| UNFORMED | after fabrication |
| LRS (low resistance) | forming pulse, then any SET pulse |
| HRS (high resistance) | RESET pulse (opposite polarity) on a formed device |

A 1 is stored as left LRS / right HRS, and a 0 as left HRS / right LRS. The precharge sense amplifier (`pcsa.sv`) reads a cell by racing the two branches against each other:

* while SEN is low, both outputs are precharged high;
* when SEN rises, the side with the lower resistance wins and the latch holds the result as long as SEN stays high.

This differential, complementary scheme needs no error-correcting decoder. Before forming, both devices of a cell look alike and the amplifier resolves at random. An unprogrammed array therefore reads as noise, and so does a write attempted before forming (the models reproduce this).

In silicon, the operation of a pulse is set by the supply voltages and the pulse lasts 1 µs:

| operation | VDDC | VDDR |
|---|---|---|
| forming | 3.0 V | 3.0 V |
| SET | 3.5 V | 3.0 V |
| RESET | 4.5 V | 4.9 V |

Level shifters deliver these voltages to the lines. In the model the operation is simply an input (`prog_op`), and the level shifters are not represented.

`likelihood_block.sv` puts the following together:

* row decoder: observation → word line;
* column decoder: BL/BLb/SL selects for programming;
* the array;
* eight sense amplifiers;
* the Gupta circuit;
* the AND gate.

## The control unit and its commands

`digital_control_unit.sv` is the only clocked block. It holds one 8-bit LFSR per column (`lfsr.sv`, x^8+x^6+x^5+x^4+1, period 255). It executes one command at a time over a valid/ready handshake, and signals the end of each command with a one-cycle `done`.

| command | what it does | cycles from acceptance to `done` |
|---|---|---|
| seed load (`seed_we`, separate port) | loads `seed_data` into the LFSR of column `seed_col` | 1, any time |
| `CMD_FORM` row,col,addr | one forming pulse on each of the 16 memristors of the word, in the order bit 0 left, bit 0 right, bit 1 left, … | 16·(PULSE_CYCLES+2)+1 |
| `CMD_WRITE` row,col,addr,data | complementary programming, same order: for a 1, SET left and RESET right; for a 0, the reverse | 16·(PULSE_CYCLES+2)+1 |
| `CMD_READ` | latches `obs_in`, holds SEN low for one precharge cycle, raises SEN | 2 |
| `CMD_INFER` cycles,pc | steps the LFSRs for `cycles` cycles (0–255) with `infer_active` high; with `pc`=1 it stops after the first cycle on which any row outputs a 1 | cycles+1, fewer with pc |

Each programming pulse has the following timing:

* one set-up cycle;
* `PULSE_CYCLES` cycles with `prog_pulse` high;
* one hold cycle.

Block select, bit column and side stay constant throughout, which an assertion checks. During programming, the word address travels on the observation wires of the grid. SEN stays high after a read, so any number of inferences can follow one read. A new observation set needs a new `CMD_READ`.

The LFSRs run only during inference and are never reloaded by the machine. After a full 255-cycle inference they are back at their seeds. Consecutive full inferences therefore see the same random sequence, as in the measured chip, where each input set was run for one LFSR period.

Typical use:

1. After power-up, load the seeds.
2. Once per chip lifetime: `CMD_FORM` every word. Then `CMD_WRITE` the likelihood tables.
3. For each new input: `CMD_READ`, then `CMD_INFER`.

## Reading the answer

`decision_unit.sv` watches the row outputs during `infer_active` cycles and supports both strategies evaluated for gesture recognition.

* **Conventional**: `count[y]` is the number of ones of row y. `count[y]/cycles` estimates the (unnormalised) posterior, and `best_row` is the row with the most ones.
* **Power-conscious**: `first_row` is the first row to output a 1. With `cmd_pc`=1, the control unit also stops the inference on that cycle, which saves energy at some cost in accuracy.

Ties go to the lowest row index. The raw streams `post` are also outputs, as on the test chip, whose outputs were counted off chip.

## Parameters and the two configurations

| parameter | default (fabricated demonstrator) | gesture machine | meaning |
|---|---|---|---|
| `N_ROWS` | 4 | 4 | classes (values of Y) |
| `N_COLS` | 4 | 6 | observations |
| `ADDR_W` | 3 (8 words) | 9 (512 words, 4 kbit) | bits per observation |
| `PROB_W` | 8 | 8 | likelihood width |
| `PULSE_CYCLES` | 10 | any | programming pulse length, in clock cycles |

`PULSE_CYCLES` = 10 corresponds to 1 µs at an assumed 10 MHz clock.

Two observations that are not independent given Y can share one column. That column then stores their joint likelihood p(O_a, O_b | Y), addressed by the concatenation of the two observations, so `ADDR_W` is the sum of their widths.

The ports of `bayesian_machine` are a parallel interface for simulation and integration. They are not the pad list of the demonstrator, which has a single line of 25 probe pads whose assignment is not published.

The scaled-up arrays of the gesture design are 128 × 64 memristors, which is 4 kbit in 2T2R. This RTL models them as 512 words of 8 bits, with the observation as the word address. The publication does not give the physical row/column organisation behind that.

## Files

| file | content |
|---|---|
| `rtl/bm_pkg.sv` | memristor state, programming operation and command enums |
| `rtl/lfsr.sv` | column LFSR |
| `rtl/gupta.sv` | binary-to-stochastic converter |
| `rtl/row_decoder.sv`, `rtl/column_decoder.sv` | array decoders |
| `rtl/memristor_array.sv` | 2T2R array, **behavioural model** |
| `rtl/pcsa.sv` | precharge sense amplifier, **behavioural model** |
| `rtl/likelihood_block.sv` | one likelihood block |
| `rtl/bm_core.sv` | grid of likelihood blocks |
| `rtl/digital_control_unit.sv` | LFSRs, sequencing |
| `rtl/decision_unit.sv` | counters and decision |
| `rtl/bayesian_machine.sv` | top level |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_gesture_workload.sv` | the 6 × 4 × 512 gesture configuration end to end |

The two behavioural models use `always @(posedge …)` processes, and their non-logic behaviour (resistance states, a pseudo-random resolution of equal states) is only modelled. A synthesis flow should replace them with the real macro and sense amplifiers. Everything else is synthesizable.

## Simulating

Each testbench is self-checking. It prints `TB_RESULT checks=N failures=M` and ends with `$finish`. With Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/bm_pkg.sv tb/tb_bayesian_machine.sv \
              -y rtl --top-module tb_bayesian_machine -Mdir obj_tb
    ./obj_tb/Vtb_bayesian_machine

Replace the testbench name to run another. The testbenches compare against reference models written independently inside them: their own LFSR next-state function, and a Gupta function that looks for the highest set random bit.

* **`tb_bayesian_machine`** runs the whole default machine: seed loading, a read before forming, forming and programming all 16 arrays, then observation sets with full, short and power-conscious inferences, plus reprogramming. It predicts every row output bit and checks counts, winners and cycle counts exactly. It also counts each mechanism and fails if one never occurs. One array is loaded with the diagonal test pattern FE, FD, FB, F7, EF, DF, BF, 7F shown in the publication's measurements. At the end it resets the logic, as a power cycle would, and checks that the arrays still read back and infer correctly without reprogramming (the non-volatile, instant-on property). It also prints how far the 255-cycle output densities are from the exact product of the stored likelihoods: with random seeds, mean error about 0.01 and worst case about 0.06. The run takes well under a second.
* **`tb_gesture_workload`** builds the 6-column, 512-value machine and programs all 24 arrays (about 1.2 M cycles). It then classifies 24 synthetic gestures three ways (255 cycles, 50 cycles, power-conscious), then sweeps cycle budgets from 5 to 255 with both strategies. It checks every count exactly and prints how often each strategy agrees with exact Bayes and with the true class. These figures describe the synthetic model only, not the published accuracies. The published data set is not available, so the likelihood tables are synthetic Gaussians of the published shape: broadened by 1.3, normalised per column, and quantised with 0 standing for 1/256. The run takes about 20 s.

## Departures and own choices

Taken from the publication:

* the grid organisation and wiring;
* one 8-bit LFSR per column, period 255, with externally loaded seeds;
* the Gupta converter and the AND-gate multiplier;
* 8-bit likelihoods normalised to FF per column;
* 2T2R complementary storage read by precharge sense amplifiers;
* forming, SET and RESET, one pulse per memristor;
* a clock-free core;
* the three phases (seed load, read, inference up to 255 cycles);
* the two read-out strategies;
* the 4 × 4 × 8-word and 6 × 4 × 512-word sizes.

Chosen here, because the publication does not give them:

* the LFSR polynomial and reset value;
* the pairing of random and probability bits in the Gupta circuit;
* the whole command interface, pulse order and `PULSE_CYCLES`;
* SEN timing;
* doing the counting and the decision on chip (the test chip had it done by an external microcontroller), and the tie rules;
* the sense-amplifier output polarity;
* forming leaving the device in LRS;
* the word organisation of the 4-kbit arrays.

The publication's text literally says a 0 is stored as HRS on *both* memristors. That contradicts its own complementary scheme, and the design follows the complementary reading: left HRS, right LRS.

A further discrepancy concerns the stored scale. The Gupta circuit over one LFSR period realises p = value/255, which matches "the maximum likelihood is stored as FF". The gesture description instead maps 0 to 1/256 and 255 to 256/256. Only the quantisation in the gesture testbench follows the latter.

Not built:

* the prior generator, which is absent from both published machines and whose random source is unspecified;
* the level shifters and the power rings, which are analog;
* the probe pads;
* the optimal LFSR seeds, which are not published;
* the IMU feature-extraction front end.

Memristor variability, retention and read disturb are not modelled. The arrays are ideal.
