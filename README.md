# FPGA logic for single-qubit control and readout

Superconducting qubits are controlled with microwave pulses a few tens of
nanoseconds long and read out by probing a resonator. The reflected signal
is down-converted, and the qubit state shows up as the phase of that
signal. Three things must happen on a fixed nanosecond grid: a pulse is
played, the readout is integrated, and a sequence is conditioned on the
measured state. So they are done in FPGA logic. The slower work happens on a
processor that reaches the logic through memory-mapped registers: changing
parameters between shots, collecting single shots, and post-processing.
That processor is the real-time core of a Zynq UltraScale+ RFSoC, running
user tasks under a small RTOS.

This repository holds the FPGA side of such a platform, for one qubit, in
synthesizable SystemVerilog:

- a **sequencer** that runs a small timed program and fires triggers on a
  4 ns grid,
- two **pulse generators**: one makes qubit manipulation pulses, the other
  makes readout pulses,
- a **recording module** that down-converts the ADC stream, integrates it
  to one I/Q point, decides the qubit state and reports it back to the
  sequencer,
- an **AXI4-Lite interconnect** that gives the processors register access
  to all four modules.

The processors, their software, the DDR4 memory, the RFSoC data converters
and the analog RF front end are not part of the RTL. They meet it at the
ports of `qc_platform_top`.

## Clocking and sample streams

All the logic runs in one clock domain, locked to the data converters. The
converters run at 4 GS/s, and their own decimation and interpolation
filters hand the fabric 1 GS/s per channel. The fabric clock is 250 MHz, so
every sample stream carries four samples per clock (`SPC = 4`, lane 0 first).
One clock is therefore one 4 ns scheduling step. Samples are 16-bit signed
(`qc_pkg::sample_t`).

```
              AXI4-Lite (from RPU/APU)
                     |
              axil_interconnect -- bits [19:16] of the address pick the module
      +-------------+---------------+------------------+
   sequencer   pulse_generator 0  pulse_generator 1  recording_module
      | trig_pg0 ------>|               |                  |
      | trig_pg1 ---------------------->|                  |
      | trig_rec ----------------------------------------->|
      |<------------------------------------ state report -|
                        v dac0          v dac1             ^ adc
```

## Register map

Byte addresses on the AXI4-Lite port. Each module owns a 64 KiB window.
Any other window answers with DECERR, and a read from it returns 0.

| Window    | Module                          |
|-----------|---------------------------------|
| 0x0_0000  | sequencer                       |
| 0x1_0000  | pulse generator 0 (manipulation) |
| 0x2_0000  | pulse generator 1 (readout)     |
| 0x3_0000  | recording module                |

Offsets inside a window:

| Module    | Offset        | Access | Meaning |
|-----------|---------------|--------|---------|
| sequencer | 0x0000        | W  | START: run the program from pc = data. Ignored while busy. |
|           | 0x0004        | R  | STATUS: bit0 busy, bit1 relaxed, bit2 last state, bit3 state pending |
|           | 0x0008        | RW | RELAX: relaxation delay in clocks, counted from END |
|           | 0x000C        | R  | PC |
|           | 0x0010        | R  | RUNS: completed runs |
|           | 0x8000 + 8*i  | RW | instruction i: low word, then high word at +4 |
| pulse gen | 0x0000        | RW | PHASE_INC: NCO step per sample; f = PHASE_INC / 2^32 x 1 GHz |
|           | 0x0004        | RW | PHASE_OFF |
|           | 0x0008        | R  | STATUS: bit0 busy |
|           | 0x000C        | R  | PULSES: pulses started |
|           | 0x8000 + 4*k  | W  | envelope sample k = {Q[31:16], I[15:0]} |
| recording | 0x0000        | W  | CTRL: bit0 clears the averages |
|           | 0x0004        | R  | STATUS: bit0 busy, bit1 last state |
|           | 0x0008/0x000C | RW | PHASE_INC / PHASE_OFF |
|           | 0x0010        | RW | RES_SHIFT: right shift applied to the window sums |
|           | 0x0014        | RW | DEC: clocks per trace point (25 gives 100 ns) |
|           | 0x0018        | RW | TRACE_SHIFT |
|           | 0x001C        | RW | THRESH: state = RES_I > THRESH (signed) |
|           | 0x0020/0x0024 | R  | RES_I / RES_Q: I/Q pair of the last shot |
|           | 0x0028..0x0034| R  | AVG_I, AVG_Q: 64-bit sums of RES_I/RES_Q, low word then high word |
|           | 0x0038/0x003C | R  | AVG_N (shots summed) / TRACE_LEN |
|           | 0x8000 + 4*m  | R  | trace point m = {Q[31:16], I[15:0]} |

## The sequencer program

The program memory holds `PROG_DEPTH` = 1024 instructions, 64 bits each.
Bits [63:60] are the opcode, bits [59:32] are field `a`, and bits [31:0] are
field `b` (`qc_pkg::instr_t`).

| Opcode | Name         | Effect |
|--------|--------------|--------|
| 0      | END          | Stop and clear busy. The relaxation timer starts counting down from RELAX. |
| 1      | WAIT b       | The next instruction issues `b` clocks after this one. `b = 0` counts as 1. |
| 2      | TRIG a, b    | Fire the triggers in mask `a[2:0]` = {recording, pg1, pg0}, with argument `b`. |
| 3      | WAIT_STATE   | Stall until a state report has arrived during this run. Latch it. |
| 4      | BRANCH_STATE a, b | If the latched state equals `a[0]`, continue at `b`. |
| 5      | JUMP b       | Continue at `b`. |

Every instruction except WAIT and WAIT_STATE takes one clock. This is what
makes the program's timing exact: a TRIG that issues in clock t is seen by
its target in clock t+1. So two TRIGs separated by `WAIT n` reach their
targets exactly n+1 clocks apart.

The meaning of a trigger's argument depends on its target:

- **Pulse generator.** The argument is {length in clocks [31:16], start row
  [15:0]} of envelope memory. A row holds four samples.
- **Recording module.** The argument holds the window length in clocks, in
  bits [15:0].

A readout usually needs two different arguments, so it is written as two
TRIGs one clock apart: first the readout generator, then the recording.
In that order the recording window opens one clock after the pulse
trigger.

A state report can arrive before the program reaches WAIT_STATE, for
example during a WAIT. It is kept, and WAIT_STATE then goes on without
stalling.

### Relaxation delay

After a run, the qubit must decay to its ground state before the next shot.
The RELAX register sets that delay. STATUS bit1 ("relaxed") goes high once
the delay has passed since the last END. Software polls this bit before it
writes START, and the processor can do so at about 300 ns per register
read. With this arrangement, the platform itself sets the shot rate, not
the software's timing.

### Example: single shot with active reset

This is the program the top-level testbench runs:

```
0: TRIG  a=1, b={4,0}        pi pulse on pg0 (4 clocks from row 0)
1: WAIT  8
2: TRIG  a=2, b={16,0}       readout pulse on pg1, 64 ns
3: TRIG  a=4, b=50           recording window, 200 ns
4: WAIT_STATE
5: BRANCH_STATE a=1, b=7     measured 1 -> reset the qubit
6: END
7: TRIG  a=1, b={4,0}        second pi pulse back to |0>
8: END
```

Starting at pc 2 instead of 0 leaves out the pi pulse. The processor loop
mirrors a basic single-shot task:

1. Wait until relaxed.
2. Write START.
3. Poll sequencer busy, then recording busy.
4. Read RES_I/RES_Q.

## Pulse generation

Each pulse generator stores a complex envelope, `ENV_DEPTH` = 4096 samples
(4.096 µs), in four banks. Sample k sits in bank k mod 4, so each clock reads
one row of four samples. An NCO mixes the envelope up to the output
frequency:

```
dac[n] = sat16( round( (I[n]*cos(phi[n]) - Q[n]*sin(phi[n])) / 2^15 ) )
phi[n] = 2*pi*(PHASE_INC*n + PHASE_OFF) / 2^32,   n = samples since reset
```

The NCO phase is not accumulated. It is computed in every clock from a
free-running count of samples since reset, as PHASE_INC*n + PHASE_OFF, and
the pulse generator adds its own pipeline depth to n so that the phase at
the DAC matches n. A pulse therefore never restarts the phase, and the
phase does not depend on when PHASE_INC was written. Two pulses at the same
frequency keep a fixed phase relation. The readout pulse and the recording
module's down-conversion stay locked whenever they share PHASE_INC,
whenever their triggers fall and whenever the registers were written.

The top 10 bits of the phase address a 1024-entry sine table
(`sincos_lut`). The table is computed during elaboration with a fixed-point
Taylor series, so no data file is needed, and every entry is within one LSB
of `round(32767*sin)`.

Latency: a trigger seen in clock t produces its first output samples in
clock t+4. Outside a pulse the output is 0. A new trigger replaces a running
pulse.

## Readout: the recording module

When it is triggered with window length L, the recording module works on the
ADC samples of clocks t+1 to t+L. It does three things with them.

1. **Down-conversion.** It mixes the samples by e^(-j·phi), where phi comes
   from its own NCO, which has the same form as the generators' NCO.
2. **Integration.** It adds up I and Q over the window.
   `RES = sum >>> RES_SHIFT`, and the result keeps 32 bits.
3. **State decision.** `state = RES_I > THRESH`. The separation axis can be
   rotated onto I by setting PHASE_OFF.

In clock t+L+4 the module updates the result registers and adds RES to the
64-bit averaging sums. In the same clock it sends a one-clock state report
to the sequencer.

In parallel, every DEC clocks of the window, the module writes one trace
point. It is the sum of I and Q over those DEC clocks, shifted right by
TRACE_SHIFT and saturated to 16 bits. Up to `TRACE_DEPTH` = 1024 points are
kept. With DEC = 25 the module produces one I/Q pair per 100 ns, which is
the reduced data format the processor uses for correlation measurements.

A trigger that arrives while the module is busy is ignored.

## AXI4-Lite access

`axil_regif` turns each module's slice of the bus into a simple register
port:

- **Write.** The write is accepted when AWVALID and WVALID are both high.
  The register changes in that clock, and BVALID follows one clock later.
- **Read.** The read data is captured when ARVALID is accepted, and RVALID
  follows one clock later.

One transaction per direction is in flight at a time. Assertions check that
BVALID and RVALID, once raised, hold until they are taken. The interconnect
routes by address and adds no latency. It holds a route from the first
AWVALID/ARVALID until the matching response handshake.

## Files

| File | Contents |
|------|----------|
| `rtl/qc_pkg.sv` | sample and AXI types, address map, trigger and state structs, instruction format |
| `rtl/qc_platform_top.sv` | top level, one qubit |
| `rtl/axil_interconnect.sv`, `rtl/axil_regif.sv` | register bus |
| `rtl/sequencer.sv` | sequencer |
| `rtl/pulse_generator.sv`, `rtl/sincos_lut.sv` | pulse generator and its sine table |
| `rtl/recording_module.sv` | recording module |
| `tb/tb_*.sv` | self-checking testbenches: one per module, the top, and two workload runs on the full platform |
| `tb/axil_tasks.svh` | AXI4-Lite master tasks included by the testbenches |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends. For example,
the full platform at its default sizes:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/qc_pkg.sv rtl/axil_regif.sv rtl/axil_interconnect.sv rtl/sincos_lut.sv \
  rtl/sequencer.sv rtl/pulse_generator.sv rtl/recording_module.sv \
  rtl/qc_platform_top.sv tb/tb_qc_platform_top.sv --top-module tb_qc_platform_top
./obj_dir/Vtb_qc_platform_top
```

The module testbenches compile the same way, each with its module and the
modules that module uses.

What each testbench checks:

- **`tb_pulse_generator`** compares every DAC sample with a floating-point
  reference and allows up to 2 LSB of difference.
- **`tb_recording_module`** checks the window sums, the trace points and the
  timing of the state report against a reference computed in the
  testbench.
- **`tb_sequencer`** checks the cycle spacing of the triggers and the branch
  behaviour.
- **`tb_workload_param_sweep`** runs the full platform through a sweep
  of 42 pulse phase settings, two shots each, with a 100 us relaxation
  wait between shots. The ADC sees the second DAC delayed by one clock.
  It checks that the measured I/Q points lie on a circle within 2% and
  that repeated shots agree.
- **`tb_workload_g2_trace`** records one 102.4 us window through the
  sequencer and reads back all 1024 I/Q trace pairs (one per 100 ns),
  checking each against sums computed in the testbench and the busy time
  of the recording module.
- **`tb_qc_platform_top`** closes the loop with a behavioural qubit and RF
  model. Each pi pulse flips the model qubit, and the ADC sees the readout
  pulse, inverted when the qubit is excited. The testbench then checks:
  - measured states,
  - conditional reset,
  - pulse spacing on the DAC ports,
  - averages,
  - that each mechanism occurred at least once: relaxation stall, branch
    taken, branch not taken, DECERR.

## What comes from the platform description and what is this design's choice

**Taken from the platform description:**

- the set of modules and how they are connected: two pulse generators on
  two DACs, a recording module on the ADC, a sequencer triggering all
  three, and the measured state fed back to the sequencer,
- AXI4-Lite register access to every module,
- one converter-locked clock domain,
- 1 GS/s per channel and 4 ns scheduling steps,
- pulse frequency, phase and shape settable at run time,
- down-conversion, averaging and state extraction in the recording module,
- sequencer start at a program counter, busy flags, and waiting for qubit
  relaxation,
- a reduced trace of 16-bit I/Q pairs, one per 100 ns, 1024 of them.

**This design's own choices:** the description says what these modules do,
not how they are built, so everything inside them was designed here:

- the instruction set and its encoding,
- all register maps and the address windows,
- the envelope-memory pulse format and its 4096-sample depth,
- the 32-bit NCO and the 1024-entry sine table,
- boxcar integration as the only readout filter,
- a threshold on I as the state decision,
- 64-bit averaging sums,
- the relaxation timer as a countdown,
- the AXI handshake timing,
- the trigger argument formats,
- active-low asynchronous reset.

A real readout chain may use matched filters or a rotated two-dimensional
discriminator, and there may be more than one recording channel. This
top-level has one, so a two-channel correlation measurement needs a second
`recording_module` instance.

## Limits

- The converters, the RF electronics and the processing system are outside
  the RTL. The top's ports stand where they connect.
- Parameters can be changed: `ENV_DEPTH`, `PROG_DEPTH` and `TRACE_DEPTH`
  (powers of two). Lane count and sample width are package constants.
  `SPC` must stay 4 for the 4 ns grid at 1 GS/s.
- A pulse has a whole number of clocks and starts on a 4-sample boundary.
  Finer timing would need sub-clock offsets, which are not provided.
- A recording window is at most 65535 clocks (262 µs).
