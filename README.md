# SID: a macro-instruction engine for sensor-based impostor detection

A phone that has been stolen is usually carried differently from how its owner
carries it. SID is a small hardware module that continuously runs a detection
model (an MLP, SVM, logistic regression, or an LSTM/GRU predictor followed by a
Kolmogorov-Smirnov test on its prediction errors) over the accelerometer and
gyroscope readings. It does this without waking the application processor.

The main idea is that all of these models reduce to a dozen vector and
matrix-vector primitives. SID executes each primitive as a single 128-bit *macro
instruction*. A hardware FSM unrolls the instruction into one iteration per
cycle over four parallel tracks, so a whole model is a short straight-line
program with no loops or branches. The same four tracks serve every operation:

- The look-up tables turn sigmoid, tanh and exp into a multiply-add.
- The adders double as a reduction tree and a comparator.
- A 64-entry local scratchpad holds the partial sums of a tiled matrix-vector
  product.

This repository holds synthesizable SystemVerilog for the module and
self-checking testbenches for every block and for the whole module.

## Structure

```
            imem_*                     mmu_*          sens_*
              |                          |               |
        +-----v------+             +-----v---------------v------+
        | Instr. RAM |             | port sharing (sid_mem_arb) |
        +-----+------+             +-----+---------------+------+
              |                          |write          | restart
  Fetch ------+--> Decode / FSM --read-->| Block RAM     |
   ^  PC              |  (lines of 4 words, 2 read ports, 1 write port)
   +-- start/restart  v                  |
                    EXE0 (4 LUTs, operand routing)
                      v
                    EXE1 (4 multipliers)
                      v
                    EXE2 (4 adders + local scratchpad)
                      v
                    WR  --------------------> Block RAM write
```

| block | file | role |
|---|---|---|
| shared types | `rtl/sid_pkg.sv` | instruction layout, modes, per-iteration control word |
| instruction RAM | `rtl/sid_inst_ram.sv` | 8192 x 128 bit (128 KB), synchronous read |
| Block RAM | `rtl/sid_data_ram.sv` | 458752 x 32 bit (1.75 MB) as lines of 4 words; 2 read ports, 1 lane-masked write port |
| Fetch | `rtl/sid_fetch.sv` | PC, program start and stop |
| Decode / FSM | `rtl/sid_decode.sv` | iteration FSM, operand addresses, pipeline interlock |
| EXE0 | `rtl/sid_exe0.sv`, `rtl/sid_lut.sv` | per-track slope/intercept LUT; chooses each track's multiplier and adder operands |
| EXE1 | `rtl/sid_exe1.sv` | per-track 32x32 multiply (Q16.16), absolute value |
| EXE2 | `rtl/sid_exe2.sv`, `rtl/sid_scratchpad.sv` | add, subtract, compare, reduce; partial sums in the scratchpad |
| WR | `rtl/sid_wr.sv` | result line and lane mask for the Block RAM |
| port sharing | `rtl/sid_mem_arb.sv` | splits the RAM ports between datapath, sensor and MMU; sensor restart |
| top | `rtl/sid_top.sv` | SID with the host memory-management unit and motion-sensor signals as ports |

All data are 32-bit two's complement with 16 fraction bits (Q16.16). "One" is
`32'h0001_0000`.

## Macro instructions

| bits | 127:124 | 123:110 | 109:96 | 95:64 | 63:32 | 31:0 |
|---|---|---|---|---|---|---|
| field | Mode | Length | Width | Addr_x | Addr_y | Addr_z |

Addresses are element (word) addresses in the Block RAM. The mode encoding is
this design's own:

| Mode | code | result |
|---|---|---|
| Vadd | 0 | z[i] = x[i] + y[i] |
| Vsub | 1 | z[i] = x[i] - y[i] |
| Vmul | 2 | z[i] = x[i] * y[i] |
| Vsgt | 3 | z[i] = 1.0 if x[i] >= y[i], else 0 |
| Vsig | 4 | z[i] = sigmoid(x[i]) |
| Vtanh | 5 | z[i] = tanh(x[i]) |
| Vexp | 6 | z[i] = exp(x[i]) |
| Mvmul | 7 | z[r] = sum_j W[r][j] * x[j] over Width rows and Length columns |
| VSsgt | 8 | z[i] = 1.0 if x[i] > s, else 0; s is the single element at Addr_y |
| Vmaxabs | 9 | z = max_i abs(x[i]) |
| Vsqnorm | 10 | z = sum_i x[i]^2 |
| END | 15 (also 11 to 14) | stop: `done` rises once the pipeline is empty |

Alignment rules:

- For the vector modes, Addr_x, Addr_y and Addr_z must be multiples of 4.
  Each iteration reads and writes whole lines.
- A reduction (Mvmul, Vmaxabs, Vsqnorm) may write to any address. Only the
  addressed lane is written.
- The VSsgt scalar may also sit at any address.
- Length is the number of elements (Mvmul: columns). Width is the number of
  Mvmul rows; it is 1 otherwise, and 0 is treated as 1.

The only functions needed for feature extraction in the KRR model are
argmax, min, second-largest, FFT and square root. They are not provided.

## The iteration FSM

Decode holds three registers:

- `reg_l`: elements still to cover in the current direction.
- `reg_w`: rows left in the current column slice.
- `reg_wc`: a copy of Width.

Decode issues one iteration per cycle. A *slice* is four consecutive columns
(or four vector elements).

- **FETCH.** An instruction is taken.
  - Width > 1: go to CONT.
  - Width = 1 and Length > 4: go to SWITCH.
  - Otherwise the single iteration completes the instruction, and FETCH takes
    the next one.
- **CONT** (continue in the slice). It issues the next row of the current
  slice.
  - When `reg_w` reaches 1: if the last slice is done, go back to FETCH;
    otherwise go to SWITCH and subtract 4 from `reg_l`.
- **SWITCH** (start the next slice). It issues row 0 of the next slice.
  - `reg_wc` > 1: go to CONT, reloading `reg_w`.
  - Otherwise (vectors, or single-row Mvmul): stay in SWITCH while slices
    remain, then go to FETCH.

The state diagram these rules come from labels the SWITCH-to-CONT arc
"Reg_L > N(Track) && Reg_Wcopy > 1". Taken literally, the rows of the last
slice would never be computed. The accompanying description says every slice
is swept down all rows, so this RTL takes that arc whenever `reg_wc` > 1.

Each issued iteration carries a control word (`ctl_t`) down the pipeline:

- the mode and the row;
- the number of valid lanes (`nval`, below 4 in the last slice of a vector
  whose length is not a multiple of 4);
- first/last-iteration and first/last-slice flags;
- the write address.

**Interlock.** The next instruction is taken only when the previous
instruction's last iteration has left the pipeline. An instruction's results
may therefore be read by the very next instruction, without hazards. The cost
is 4 idle cycles per instruction. A program of K instructions with I
iterations in total runs in I + 4K + 2 cycles from `start` to `done`; the
end-to-end test checks this count.

## Matrix-vector product with tiling

For a W x L matrix (W <= 64 rows per instruction), iteration (slice s, row r)
does the following:

- It multiplies the 4 weights W[r][4s .. 4s+3] by the input elements
  x[4s .. 4s+3].
- EXE2 adds the four products in a small tree and adds the partial sum for row
  r, taken from scratchpad entry r (zero in the first slice).
- It writes the new sum back to entry r, or, in the last slice, sends it to WR
  as output element z[r] = Addr_z + r.

The RAM access pattern has two parts:

- **Weight layout.** The weights are stored pre-tiled in the order they are
  used: slice 0 rows 0..W-1, then slice 1 rows 0..W-1, and so on. One line
  holds 4 weights, zero-padded in the last slice. Port B then simply walks
  Addr_y, Addr_y+4, Addr_y+8, ...
- **Input reuse.** The input slice is read on row 0 only. Port A's output
  register holds it for the remaining rows, and the VSsgt scalar is held the
  same way.

A layer with more than 64 rows is split into several Mvmul instructions.

## Look-up-table functions

For Vsig, Vtanh and Vexp each track's LUT returns a slope k and an intercept b
for its input x. EXE1 forms k*x and EXE2 adds b. No extra arithmetic is needed
beyond what the other modes already use. The table details are this design's
own:

- **Segments.** 64 chords of width 0.25 cover [-8, 8). The chord endpoints are
  computed at elaboration time in Q24 fixed point, from e^-0.25 and its powers.
  There is no data file and no floating point.
- **Outside the range.** Inputs below -8 give 0 (sigmoid), -1 (tanh) or 0
  (exp). Inputs at or above 8 give 1, 1 and e^8.
- **Accuracy.** The error is below 0.01 for sigmoid and tanh, and below 1%
  for exp, over the whole range.

## KS test on prediction errors

Comparing an observed prediction-error distribution with a reference one takes
five instructions per window. They use only VSsgt and Vmaxabs besides the
ordinary modes:

1. `VSsgt bins, err_k -> tmp` marks the reference bin boundaries that exceed
   the error.
2. `Vadd hist, tmp -> hist` accumulates the cumulative observed histogram.
   Steps 1 and 2 repeat once per error.
3. `Vsub hist, ref -> diff` subtracts the reference cumulative histogram.
4. `Vmaxabs diff -> D` gives the KS statistic.
5. `Vsgt T, D -> normal` gives 1.0 when D <= T.

The end-to-end test runs this with:

- bin boundaries 1.2, 1.6, 3.0, 4.3, 5.0;
- errors 4.5, 3.5, 9.5;
- reference histogram 0, 1, 2, 3, 4.

It checks the observed histogram 0, 0, 0, 1, 2, the statistic D = 2, and the
"normal" verdict for T = 3.

## Memory ports, sensor and host

The Block RAM has two read ports, one per operand, and one write port.
`sid_mem_arb` shares them:

- **Write port.** WR has priority, then a sensor element, then an MMU write.
  A sensor write that collides with WR waits (`sens_ready` low).
- **MMU reads.** They use read port A while the core is idle and return the
  data one cycle after the grant (`mmu_rvalid`).
- **MMU refusal.** While a program runs, MMU reads are refused (`mmu_gnt`
  low). MMU writes are granted whenever neither WR nor the sensor uses the
  write port.
- **Restart.** The sensor element marked `sens_last` completes a sample and
  restarts the program at `start_pc`. Any instruction in flight is flushed.

These handshakes are this design's own. The source describes only that the
sensor writes to memory and that a new sample resets the program counter.

## Model sizes against the 1.75 MB Block RAM

The model sizes below are computed from the layer formulas. They assume a
64-reading window of 6 sensor axes (384 MLP inputs) and 6-element RNN inputs.

| model | parameters (32-bit words) | fits |
|---|---|---|
| MLP-50 / -100 / -200 / -500 | 19352 / 38702 / 77402 / 193502 | yes |
| MLP-50-25 / 100-50 / 200-100 | 20577 / 43652 / 97302 | yes |
| LSTM-50 / 100 / 200 | 11706 / 43406 / 166806 | yes |
| LSTM-500 | 1017006 (4.07 MB) | **no** |
| GRU-200 | 125406 | yes |
| SVM, OCSVM | about 1340 KB, 240 KB of support vectors | yes |
| PED-LSTM/GRU-200 with OCSVM or vote | under 1% to 2% above the RNN alone | yes |
| KRR | small | no: needs the feature-extraction operations that are not provided |

## Running a model

Two further testbenches run complete detectors on the module at its default
size. Each checks every intermediate vector: sums exactly, and LUT functions
within 0.01.

- **`tb_sid_mlp`** runs one MLP-200-100 inference.
  - Model: 384 inputs, 200 and 100 sigmoid units, 2 outputs and the class
    decision.
  - Program: 15 instructions; layers wider than 64 rows are split into several
    Mvmul instructions.
  - Run time: 24465 cycles, or 0.21 ms at 115 MHz.
- **`tb_sid_lstm`** runs a prediction-error LSTM-200 detector for four sensor
  readings. Each reading restarts a 31-instruction program, which:
  - computes the squared error of the previous prediction;
  - updates the KS histogram and verdict;
  - advances the LSTM cell (800 gate rows over [h; x]);
  - predicts the next reading.

  One step takes 42686 cycles, or 0.37 ms at 115 MHz, far inside the 20 ms
  between readings at 50 Hz.
- **`tb_sid_gru`** runs the same detector with a GRU-200 cell.
  - Cell: r and z gates over [h; x], separate recurrent and input candidate
    terms, then h = n + z*(h - n).
  - Program: 35 instructions, 32252 cycles per step.

- **`tb_sid_svm`** runs one RBF-kernel SVM decision with 893 support vectors
  of 384 elements, about 1.3 MB of model.
  - For each support vector: `Vsub`, then `Vsqnorm` into consecutive words.
  - Then `Vmul` by -gamma, `Vexp`, a one-row `Mvmul` with the alpha weights,
    the bias, and `Vsgt` against 0.
  - Run time: 1791 instructions, 179296 cycles, or 1.56 ms at 115 MHz.

All of these times follow from the cycle formula above. The MLP, LSTM and SVM
times agree with the published execution times of the prototype.

## Departures and choices

- **SWITCH-to-CONT transition.** Taken on `reg_wc` > 1 alone (see the
  iteration FSM).
- **Number format.** Q16.16.
- **Comparisons.** Vsgt uses >=; VSsgt uses strict >, so a bin equal to the
  error counts as not greater.
- **Own choices, not from the source:**
  - the mode encoding;
  - the line alignment of vector operands;
  - the pre-tiled weight layout;
  - the one-instruction-at-a-time interlock;
  - the LUT segmentation;
  - the port arbitration and handshakes;
  - the synchronous active-low reset of control state (the RAMs are not
    reset).
- **Exponent limit.** Vexp saturates at e^8 (about 2981), well within Q16.16.
- **Arithmetic wrap-around.** Sums and products wrap on overflow; nothing
  saturates.

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog. For example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sid_pkg.sv tb/sid_tb_pkg.sv \
    tb/tb_sid_top.sv --top-module tb_sid_top -Mdir obj -o sim
obj/sim +verilator+rand+reset+2
```

| testbench | what it covers |
|---|---|
| `tb_sid_inst_ram`, `tb_sid_data_ram`, `tb_sid_scratchpad` | memories against a model, including the lane masks and read-enable hold |
| `tb_sid_fetch` | PC stepping, start, halt |
| `tb_sid_decode` | per-iteration fields against a loop model for random programs; one iteration per cycle; the 4-cycle drain; all FSM states; flush |
| `tb_sid_exe0` | operand routing and 3030 LUT points against real sigmoid/tanh/exp |
| `tb_sid_exe1`, `tb_sid_exe2`, `tb_sid_wr` | arithmetic per mode, reductions through the scratchpad, write masks |
| `tb_sid_mem_arb` | priorities, refusals, sensor stall and restart, MMU read latency |
| `tb_sid_top` | a complete program (below) with the Block RAM reduced to 8192 words |
| `tb_sid_top_full` | the same program with every parameter at its default |
| `tb_sid_mlp`, `tb_sid_lstm`, `tb_sid_gru`, `tb_sid_svm` | complete detectors at the default size (see *Running a model*) |

The end-to-end program uses every mode. It includes vectors with a partial
last slice, LUT inputs beyond ±8, Mvmul of 5x12, 1x12 and 6x3, and the KS
example. During the run it also:

- sends sensor writes that collide with WR;
- makes an MMU request that is refused;
- checks the cycle count.

A second run is then triggered by a sensor sample. The testbench counts
pipeline stalls, CONT and SWITCH cycles, partial slices, held operands, sensor
restarts, sensor stalls, MMU refusals and LUT saturations, and fails if any of
them never happened.
