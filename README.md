# Autonomous transient-fault emulator

A single-event upset (SEU) flips the value stored in one flip-flop. To
measure how well a circuit tolerates SEUs, you inject one bit-flip at a time
into an emulated copy of the circuit. For each flip you record what happens
to the error:

- it reaches an output (**failure**);
- it stays hidden in the state until the end of the testbench (**latent**);
- it disappears (**silent**).

Doing this for every flip-flop at every clock of a testbench is a large
campaign. Emulating the circuit on an FPGA is fast. But if a host computer
applies the stimuli, injects each fault and checks the outputs, the host link
becomes the bottleneck.

This design runs the whole campaign on the chip:

1. The host loads the input vectors.
2. The host starts the run.
3. At the end, the host reads one classification code per fault.

Nothing crosses the host link while the campaign runs.

The circuit's flip-flops are replaced by instrumented flip-flops, and its
combinational logic is kept. Three ways of instrumenting them are
implemented. One parameter chooses between them:

| `TECHNIQUE` | flip-flop instrument | how a fault is emulated | classes |
|---|---|---|---|
| `TECH_TIME_MUX` (default) | faulty copy, golden copy, mask, saved state | faulty and golden machine run side by side from the saved state at the injection cycle; stops as soon as the error vanishes | failure / latent / silent |
| `TECH_MASK_SCAN` | flip-flop + mask | re-run the testbench from reset, flipping the masked flip-flop at the chosen cycle; outputs checked against a stored golden run | failure / not failure |
| `TECH_STATE_SCAN` | flip-flop on a scan chain | shift a stored faulty state into the circuit and run the rest of the testbench; outputs checked against a stored golden run | failure / latent / silent |

The default sizes are those of the ITC'99 benchmark b14, the Viper
processor: 215 flip-flops, 32 inputs, 54 outputs and a 160-vector testbench.
That makes 215 x 160 = 34,400 single faults.

## Faults and their order

A fault is a pair (i, t): flip-flop *i* is inverted as it captures the state
at the end of testbench cycle *t*. Fault number `t*NFF + i` is also its
address in the classification memory. All three controllers walk the faults
with *t* in the outer loop and *i* in the inner loop.

When no fault is injected, the circuit starts from the all-zero state. If the
real circuit resets to something else, fold that into the combinational
logic, or use the first vectors to reset it.

## Time-multiplexed technique (default)

### The instrumented flip-flop (`tm_cell`)

| flip-flop | role |
|-----------|------|
| FAULTY | the bit in the faulty machine |
| GOLDEN | the same bit in the golden (fault-free) machine |
| MASK   | one bit of a scan chain; a 1 marks the flip-flop that the fault hits |
| STATE  | the golden value saved at the injection cycle |

All cells share one control bundle (`tm_ctrl_t` in `fault_emu_pkg`). On each
rising edge:

```
FAULTY <= EnaFaulty ? DataIn ^ (MaskQ & Inject)
        : LoadState ? StateQ : FaultyQ
GOLDEN <= EnaGolden ? DataIn
        : LoadState ? StateQ : GoldenQ
STATE  <= SaveState ? GoldenQ : StateQ
MASK   <= mask_shift ? scan_in : MaskQ          (scan_in = previous cell's MASK)

DataOut    = EnaFaulty ? FaultyQ : GoldenQ      (what the logic sees)
DetectadoN = (FaultyQ ^ GoldenQ) & EnaDetect    (active high: "differs")
```

`DataIn` is the next-state value that the combinational logic computes for
this flip-flop. The logic is shared. The faulty and the golden machine take
turns on it, one clock each. `tm_state_array` places `NFF` cells side by
side. It chains their MASK bits (cell 0 at the head) and ORs all
`DetectadoN` bits into `any_diff`.

### The campaign (`emulation_controller`)

```
for t = 0 .. NCYC-1                         STATE holds golden state at t
  for i = 0 .. NFF-1
    LOAD   FAULTY, GOLDEN <- STATE; shift mask (a 1 enters when i = 0);  k <- t
    loop over emulated cycles k = t, t+1, ...
      F    faulty phase:  if k > t and states equal  -> SILENT, next fault
                          FAULTY captures (bit-flip when k = t);
                          faulty outputs are registered
      G    golden phase:  GOLDEN captures;
                          outputs differ from the faulty ones -> FAILURE, next fault
                          after the last vector -> END
    END    states differ -> LATENT, else SILENT
  ADV      LoadState; one golden cycle with vector t; SaveState   (3 clocks)
```

Three points make this technique fast.

- **No stored expected outputs.** The golden machine produces the expected
  outputs on the fly.
- **Early stop.** Once the faulty state equals the golden state, the two stay
  equal. The fault is silent and is dropped at once.
- **No re-run from reset.** The saved state lets each fault start at its
  injection cycle instead of at reset.

The mask needs one shift per fault. Shifting in a 1 for i = 0 and a 0
otherwise moves the lone 1 from flip-flop to flip-flop.

Clock cost per fault:

- failing in the golden phase of cycle k: `1 + 2(k - t + 1)`;
- silent in the faulty phase of cycle k: `1 + 2(k - t) + 1`;
- running to the end: `1 + 2(NCYC - t) + 1`.

On top of that come 3 clocks per advance of the saved state.

## Mask-scan technique

`ms_state_array` gives each circuit flip-flop a mask flip-flop. The masks
form a scan chain. While the circuit runs, a flip-flop whose mask is set
captures the inverse of its next state when `inject` is raised. `clr`
returns the circuit to its reset state.

`ms_controller` works in two stages:

1. **Golden run.** It runs all vectors once from reset and writes the
   outputs into a golden-output memory.
2. **Fault runs.** For each fault it clears the circuit, shifts the mask one
   place, and runs from cycle 0. It raises `inject` at cycle *t* and compares
   the outputs every cycle with the stored ones. The first difference ends
   the fault as a failure. A fault that reaches the last vector is stored as
   `FC_NONE` ("not a failure").

This technique cannot tell latent from silent. `n_latent` and `n_silent`
stay 0.

Cost: `1 + NCYC` clocks for the golden run, then `k + 2` clocks for a fault
failing in cycle *k* and `NCYC + 1` for the others.

## State-scan technique

`ss_state_array` links the circuit flip-flops into one scan chain. A whole
state can be shifted in, tail bit first, in `NFF` clocks.

The host stores one faulty state per fault in the fault-state memory, at
address `t*NFF + i`. That state is the golden state after cycle *t* with
bit *i* inverted. The host gets these states from a plain golden simulation
of the circuit.

`ss_controller` works in two stages:

1. **Golden run.** It runs all vectors from reset, writes the outputs to the
   golden-output memory, and keeps the final state.
2. **Fault runs.** For each fault it:
   - fetches the stored state (1 clock);
   - shifts it in (`NFF` clocks);
   - runs cycles t+1 to `NCYC`-1, comparing the outputs with the stored ones.
     A difference means failure.
   - If the run reaches the end, compares the final state with the golden
     final state: latent if they differ, silent if not.

Cost: `NCYC + 2` clocks for the golden run. Each fault then takes
`1 + NFF` clocks of insertion, one clock per emulated cycle, and 1 more
clock if no failure occurred.

Insertion dominates when the testbench is shorter than the scan chain, as it
is for b14 (160 cycles against 215 flip-flops).

## Top level (`autonomous_emulator`)

The top holds, for the chosen technique:

- the instrumented flip-flops;
- the controller;
- the stimulus memory;
- the classification memory;
- for the two scan techniques, a golden-output memory;
- for state-scan, also a fault-state memory.

The circuit's combinational logic is **not** inside. To grade a circuit,
remove its flip-flops and connect its logic between these ports:

- `cut_state` (present state) and `cut_in` (primary inputs) go into the logic;
- `cut_next` (next state) and `cut_out` (primary outputs) come back.

| port | dir | width (defaults) | use |
|------|-----|------|-----|
| `clk`, `rst_n` | in | 1 | clock; active-low asynchronous reset of all flip-flops to 0 |
| `host_stim_we/addr/data` | in | 1 / 8 / 32 | load input vector `addr` |
| `host_fst_we/addr/data` | in | 1 / 16 / 215 | load faulty state of fault `addr` (state-scan only) |
| `start` | in | 1 | pulse in idle to start a campaign |
| `busy`, `done` | out | 1 | campaign running / finished (done holds until reset) |
| `host_res_addr` → `host_res_data` | in → out | 16 → 2 | code of fault `addr`, one clock later |
| `n_failure`, `n_latent`, `n_silent` | out | 16 | class totals |
| `cycles` | out | 32 | clocks spent in the campaign |
| `cut_in`, `cut_state` | out | 32, 215 | to the combinational logic |
| `cut_next`, `cut_out` | in | 215, 54 | from the combinational logic |

Codes (`fault_class_t`): 0 not graded (mask-scan: not a failure), 1 silent,
2 latent, 3 failure.

Parameters: `NFF` = 215, `NIN` = 32, `NOUT` = 54, `NCYC` = 160, and
`TECHNIQUE`. All widths follow from these. A second campaign needs `rst_n`
first. The memories are not cleared by reset. A campaign rewrites every
classification entry.

### Memories at the default sizes

| memory | time-mux | mask-scan | state-scan |
|---|---|---|---|
| stimulus, 160 x 32 | 5,120 bits | 5,120 bits | 5,120 bits |
| golden outputs, 160 x 54 | - | 8,640 bits | 8,640 bits |
| faulty states, 34,400 x 215 | - | - | 7,396,000 bits |
| classification, 34,400 x 2 | 68,800 bits | 68,800 bits | 68,800 bits |

The fault-state memory is far too large for on-chip RAM. On a board it
belongs in external memory. Here every memory is a plain array: the
stimulus and golden-output memories have a combinational read, the others a
registered read.

After generic synthesis the default (time-multiplexed) top has 1,038
flip-flops:

- 860 in the cells (4 x 215);
- the rest in the controller.

## Results on a test circuit

The testbenches use a synthetic circuit with the b14 sizes. Its flip-flops
fall into four groups:

- some are reloaded from the inputs every cycle;
- some copy or accumulate other groups;
- some drive the outputs.

As a result, all three classes occur. With the same random vectors, the
three techniques classify all 34,400 faults identically: 14,748 failures,
12,056 latent, 7,596 silent. Mask-scan reports the last two together as
not-failure. Their speed:

| technique | clocks / fault | us / fault at 25 MHz |
|---|---|---|
| time-multiplexed | 60.7 | 2.43 |
| mask-scan | 127.0 | 5.08 |
| state-scan | 262.1 | 10.48 |

For comparison, the b14 figures reported for the original FPGA system are
0.58, 4.1 and 11.2 us per fault at 25 MHz. Those three numbers come from
b14, not from this synthetic circuit. The order of the techniques is the
same. The time-multiplexed speed depends most on the circuit. This test
circuit has many long-lived latent faults, and they keep both machines
running to the end of the testbench.

## Files

| file | content |
|------|---------|
| `rtl/fault_emu_pkg.sv` | control bundle, classification codes, technique selector |
| `rtl/tm_cell.sv`, `rtl/tm_state_array.sv` | time-multiplexed flip-flop and its array |
| `rtl/emulation_controller.sv` | time-multiplexed campaign controller |
| `rtl/ms_state_array.sv`, `rtl/ms_controller.sv` | mask-scan flip-flops and controller |
| `rtl/ss_state_array.sv`, `rtl/ss_controller.sv` | state-scan flip-flops and controller |
| `rtl/stimulus_ram.sv` | vectors (also golden outputs) |
| `rtl/result_ram.sv` | classification codes (also faulty states) |
| `rtl/autonomous_emulator.sv` | top level |
| `tb/synth_cut_pkg.sv` | synthetic test circuit and reference fault grading |
| `tb/tb_*.sv` | self-checking testbenches |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with
`$finish`. With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb -Irtl rtl/fault_emu_pkg.sv \
          tb/tb_autonomous_emulator.sv --top-module tb_autonomous_emulator
./obj_dir/Vtb_autonomous_emulator
```

Substitute any other `tb/tb_<name>.sv` and top-module name. For the mask-scan
and state-scan testbenches, also list `tb/synth_cut_pkg.sv` after the
package in `rtl/`.

- `tb_autonomous_emulator` runs the full default campaign: time-multiplexed,
  34,400 faults, a few seconds. It checks every code, the totals and the
  exact clock count against a reference fault simulation. It also counts the
  mechanisms that must occur: failures, latent faults, early stops,
  saved-state advances and injections.
- `tb_ms_controller` and `tb_ss_controller` do the same at full size for the
  other two techniques. Their checks include the golden-output writes, the
  restarts from reset, and the scan clocks.
- `tb_emulation_controller` runs small campaigns of the time-multiplexed
  controller against a behavioural model of the cells.
- `tb_tm_cell`, `tb_tm_state_array`, `tb_ms_state_array` and
  `tb_ss_state_array` compare each instrument with a reference model, clock
  by clock, under directed and random controls.
- `tb_stimulus_ram` and `tb_result_ram` write and read back every word.

## Sources of the design and its own choices

Taken from the published description of the technique:

- the time-multiplexed cell: its four flip-flops, their names, the
  multiplexers with their select signals, and the mask scan chain;
- the idea of running the faulty and golden machines alternately, saving
  the golden state, and stopping early when the error vanishes;
- a mask flip-flop per flip-flop for mask-scan;
- a scan chain and stored faulty states for state-scan;
- the three classes and the b14 sizes;
- the split into controller, stimulus memory and classification memory.

The memory sizes reported for that system agree with this design:

- 160 x 86 bits of stimuli and outputs for mask-scan;
- 2 bits per fault for time-multiplexed;
- 215 + 2 bits per fault for state-scan.

They suggest one bit per fault for mask-scan. Here that technique uses the
same 2-bit codes as the others.

This design's own choices:

- **Gate functions inside the time-multiplexed cell.** The drawing shows the
  gates but does not name them. The flip is MaskQ AND Inject, XORed into
  DataIn. The comparison is FaultyQ XOR GoldenQ, ANDed with EnaDetect.
- **Polarity of DetectadoN.** It is active high here, despite the trailing N
  in its name.
- **The mask shift enable.**
- **Controller schedules.** The loop order, the two-clock emulated cycle of
  the time-multiplexed technique, and the exact classification rules are
  this design's choices.
- **Golden runs and final state.** The golden run inside the scan
  controllers and the parallel final-state comparison of state-scan are this
  design's choices.
- **Host-written faulty states.** The host computes and writes the faulty
  states for state-scan.
- **Reset, counters, codes.** The asynchronous all-zero reset, the counters,
  the code encoding and the memory addressing are this design's choices.

Known differences:

- **Flip-flop count of the state-scan circuit.** The original state-scan
  circuit had about two flip-flops per circuit flip-flop (433 for b14). What
  the second one was for is not described. Here the scan chain runs through
  the circuit flip-flops themselves: 215 flip-flops.
- **Stimulus memory of the time-multiplexed system.** The original reports
  5.3 kbit of on-chip memory for it. Storing the 160 x 32 input bits takes
  5.0 kbit.

Not included:

- **The b14 logic.** It is an external benchmark.
- **The host computer and its board link.** They are replaced by plain ports.
