# Distributed-processor qubit controller with mid-circuit feed-forward

This is synthesizable SystemVerilog for the programmable-logic part of a control system for superconducting qubits. It is built so that a measurement result can change the rest of the circuit while the circuit runs: measure a qubit halfway through, and decide in hardware, within tens of nanoseconds, which pulses come next on that qubit or on another one.

The idea that shapes the whole design is a **distributed processor**. Each qubit gets its own small processor core. The core does not compute waveforms. It issues *timed pulse commands*: short descriptors naming a stored envelope, a carrier frequency, a phase and an amplitude, each due at a given clock of the core's own time counter. Signal generators next to the core turn a command into DAC samples. The core also has a small register file and ALU for loops and branches. Three extra paths make the cores work as one machine:

* a **function processor** that gives a core the discriminated state of any qubit, and holds the core until that result exists;
* a **sync barrier** that lets a group of cores meet and restart their time counters together;
* a **shared readout**: the readout-drive outputs of all qubits are added onto one DAC, and all the readout down-converters listen to one ADC.

Everything in the design runs on one 500 MHz DSP clock. The DACs run at 8 GS/s, so every clock carries 16 DAC samples per channel. The ADC runs at 2 GS/s, so every clock carries 4 ADC samples.

## Block map

```
 host (AXI4-Lite x3)                                   RF data converter (AXI4-Stream)
   |                                                     ^ DAC 0..NQ-1   ^ DAC NQ      | ADC 0, 1
   v                                                     | qubit drives  | readout     v
 axil_lb x3 --local bus--+                         +-------------------------------------+
   port 0 DSP registers  |                         | board_cfg: reset_sync, freq_counter, |
   port 1 DSP buffers    |                         | stream registers, underrun/gap count |
   port 2 configuration -+-> board_cfg, ptp_ts     +-------------------------------------+
                         |                              ^ qdrv_o[q]   ^ rdrv_o     | adc
                         v                              |             |            v
 dsp ---------------------------------------------------------------------------------------
 | per qubit q:                                                                             |
 |   proc_core q --cmd--> pulse_gen QDRV ----------------------------> qdrv_o[q]            |
 |        |       --cmd--> pulse_gen RDRV --+                                               |
 |        |       --cmd--> readout_conv <---|-- adc   --I,Q--> state_disc --> acc_buffer    |
 |        |                                 |                     |                         |
 | shared:|                                 v                     v                         |
 |   fproc <----- req/ack ------------ rdrv_combiner ---> rdrv_o   meas_state[q]            |
 |   sync_barrier <- req/release                                                            |
 |   acq_buffer (ADC 0 / mixed LO / readout DAC / ADC 1 samples)                           |
 |   tcount (global time counter feeding every DDS)                                         |
 -------------------------------------------------------------------------------------------
```

Each module has its own file in `rtl/`, named after it. Types and constants shared by the modules are in `rtl/qubic_pkg.sv`.

| module | role |
|---|---|
| `qubic_top` | the top: three bridges, board configuration, the DSP, and PTP timestamps |
| `dsp` | all real-time logic; register and buffer maps |
| `proc_core` | a processor core: sequencer, 16×32 register file, ALU, time counter `qclk` |
| `alu` | signed 32-bit add, sub, eq, ne, lt, ge |
| `pulse_gen` | up-converter: envelope × carrier × amplitude, 16 samples per clock |
| `dds` | parallel carrier generator (cos/sin for all samples of a clock) |
| `readout_conv` | down-converter: ADC × digital LO, integrated over a window to give I, Q |
| `state_disc` | shift and rotate of the IQ point; the sign gives \|0> or \|1> |
| `fproc` | function processor: serves measured states to the cores |
| `sync_barrier` | barrier between cores |
| `rdrv_combiner` | saturating sum of the readout drives |
| `acc_buffer` | per-qubit store of integrated I/Q results |
| `acq_buffer` | oscilloscope-style capture of raw samples |
| `lb_ram` | two-port RAM used for every command, envelope and frequency buffer |
| `axil_lb` | AXI4-Lite slave that becomes local-bus master |
| `board_cfg` | reset synchronisers, clock-frequency check, converter streams |
| `reset_sync`, `freq_counter` | parts of `board_cfg` |
| `ptp_ts` | send and receive timestamps for clock synchronisation between boards |

## Time: two counters and one phase rule

There are two notions of time, and telling them apart is the key to the design.

**`tcount`** is one free-running counter in `dsp`. It counts DSP clocks and is never reset while the design runs. Every DDS takes its phase from it. Sample *k* of clock *t* of a generator has carrier phase

```
theta = fword * (SPC*t + k) + (phase << 15)          (32-bit, wraps; one turn = 2^32)
```

Here `fword` is the phase step per sample from the frequency buffer, and `phase` is the command's 17-bit phase. So the phase of a carrier depends only on absolute time and never on when a pulse started. Two pulses at the same frequency are therefore coherent, wherever they fall. This is what lets a readout drive and the readout LO of the same qubit line up without any handshake. It also lets a stored X90 envelope be replayed at any time and still act on the same axis. Each generator feeds its DDS `tcount` plus its own pipeline latency, so that the phase belongs to the clock in which the sample actually leaves.

**`qclk`** is each core's own time reference. It counts clocks from the start of the program, and every `sync` resets it to zero. A pulse instruction carries a 32-bit time. The core waits until `qclk >= time` (a signed comparison of the difference, so wrap-around is harmless) and then sends the command. Programs are written in `qclk` time. `INC_QCLK` adds an ALU result to `qclk`; a negative value rewinds time for the next pass of a loop.

The carrier table is computed at elaboration: `COS_LUT[i] = round(32767 * cos(2*pi*i/1024))`, 1024 points in Q1.15. The sine is the cosine a quarter turn earlier. No data file is read.

## Processor core

### Instruction word (128 bits, `instr_t`)

| bits | field |
|---|---|
| 127:120 | opcode |
| 119:116 | rd |
| 115:112 | rs1 |
| 111:108 | rs2 |
| 107 | imm_sel: 1 = the second ALU operand is `imm` |
| 106:104 | ALU op: 0 add, 1 sub, 2 eq, 3 ne, 4 lt, 5 ge |
| 103:0 | body |

For `PULSE`, the body is `{cmd[71:0], time[31:0]}`. For every other opcode the body holds `imm = body[31:0]`, `addr = body[47:32]` and `func_id = body[55:48]`.

| opcode | effect |
|---|---|
| 00 NOP | none |
| 01 PULSE | wait until `qclk >= time`, then send `cmd` to the generator named by `cmd.elem` |
| 02 REG_ALU | `rd <= alu(rs1, rs2 or imm)` |
| 03 JUMP_I | `pc <= addr` |
| 04 JUMP_COND | if `alu(rs1, rs2 or imm) != 0`: `pc <= addr` |
| 05 JUMP_ALU | `pc <= alu(...)` (computed jump) |
| 06 INC_QCLK | `qclk <= qclk + alu(...)` |
| 07 IDLE | wait until `qclk >= imm` |
| 08 REG_FPROC | `rd <= fproc(func_id)`; stalls until the answer comes |
| 09 JUMP_FPROC | if `alu(fproc(func_id), rs2 or imm) != 0`: `pc <= addr` |
| 0A SYNC | wait until every core in the `imm` mask is waiting too, then `qclk <= 0` |
| 0B DONE | stop; `done` stays high until the next start |

The compare ops return 1 or 0. The ALU is combinational; its result is registered in EXEC.

### Timing

The sequencer has four states, FETCH, DECODE, EXEC and COMMIT. An instruction that does not wait takes exactly 4 clocks. That is also the shortest spacing of two pulse commands from one core: 8 ns, or 128 DAC samples. A pulse or `IDLE` instruction that arrives early holds in COMMIT until its time. The command then leaves on `cmd_valid` at `qclk == time + 1`. Function-processor and sync instructions take at least 5 clocks. Writing a one-clock `start` clears `pc`, `qclk` and the registers.

### Pulse command (72 bits, `pulse_cmd_t`)

| bits | field |
|---|---|
| 71:68 | spare |
| 67:66 | element: 0 qubit drive, 1 readout drive, 2 readout LO (down-converter) |
| 65:50 | amplitude, unsigned, 0xFFFF ≈ 1.0 |
| 49:33 | phase, in 2^-17 of a turn |
| 32:24 | frequency: index into that generator's frequency buffer |
| 23:12 | length in clocks (one envelope point per clock) |
| 11:0 | envelope start address |

The command carries a frequency *index*, not a frequency, so the command stays 72 bits wide. Amplitude, phase and frequency index are all in the command. One stored envelope therefore serves any rotation angle, axis or frequency.

`tb/qubic_asm_pkg.sv` has functions that build instructions and commands, for example `i_pulse(mkcmd(ELEM_QDRV, amp, phase, freq, len, addr), time)` and `i_jfproc(id, ALU_EQ, 1, target)`. They are the quickest way to write a program.

## Generators

**`pulse_gen`** (qubit drive and readout drive) computes

```
out_k = sat16( amp * (envI*cos(theta_k) - envQ*sin(theta_k)) >> 31 )
```

Envelope words are `{I[31:16], Q[15:0]}` in Q1.15. The first sample appears **8 clocks** after `cmd_valid`. A command of length L gives exactly L clocks of output. A command arriving while a pulse plays replaces it.

**`readout_conv`** opens its integration window **5 clocks** after its command, for `env_len` clocks. Its outputs are

```
I = sum(x * cos) >>> 15        Q = -sum(x * sin) >>> 15
```

summed over every ADC sample of the window, with 48-bit accumulators and 32-bit results. `iq_valid` comes 3 clocks after the last window clock. `busy` is high from the command until `iq_valid`.

**`state_disc`** computes `y = (I - i0)*sin_c + (Q - q0)*cos_c`, with `i0`, `q0`, `cos_c` and `sin_c` set per qubit from the host. It reports **|1> when y < 0** and |0> otherwise, one clock after `iq_valid`. In other words, the calibrated IQ blobs are shifted to the origin and rotated so that the X axis is the decision boundary.

## Feed-forward: the function processor

`fproc` keeps, for every qubit, its last discriminated state and whether it has ever been measured. A core asks for qubit `id` and keeps `req` high. The function processor answers with a one-clock `ack` and the state. It holds back while any of these is true:

* that qubit has never been measured;
* its down-converter is busy, meaning a readout has been commanded but not yet discriminated;
* a new result for it is arriving in this very clock.

So a core that asks right after commanding a readout always gets *that* readout's result, never an older one. For this to hold, the readout LO command must already have been issued: a core on another qubit should `IDLE` past the readout start before it asks. Ids at or above `NQ` answer 0 at once, leaving room for other sources such as a decoder. One request is served per core per clock, and all cores are served in parallel.

From the last ADC sample of a readout window, the state reaches the core after: 3 clocks (I/Q), 1 clock (discriminator), 1 clock (function processor), then one COMMIT clock in the core. The next instruction, for example a conditional pulse, is fetched right after and needs its own 4 clocks. The generator then needs 8 more clocks to the first sample.

## Sync

`sync_barrier` takes a request and a participant mask from each core. Core *c* is released when it waits and every core in its mask waits too. Release is registered, so cores that meet in the same clock leave in the same clock, and their `qclk` counters restart together. Cores started at different times line up exactly. The testbenches check this to the clock.

## Host interface

Three AXI4-Lite slaves each become a *local bus*: one-clock `wr`/`rd` strobes, a word address (the byte address divided by 4) and a response with `rvalid`. There is one outstanding transaction per port. A read that gets no answer within 16 clocks ends with SLVERR and data 0xDEADBEEF.

**Port 0, DSP registers** (word addresses):

| addr | meaning |
|---|---|
| 0x000 | W: bit q starts core q. R: [15:0] done, [31:16] running (one bit per core) |
| 0x001 | W: bit0 triggers the acquisition buffer, bits 2:1 pick the source (0 ADC channel 0, 1 mixed I of the qubit in bits 7:4, 2 readout DAC, 3 ADC channel 1). R: bit0 busy |
| 0x002 | W: bit q clears accumulation buffer q |
| 0x003 | R: `tcount` |
| 0x010+4q | discriminator q: +0 `i0`, +1 `q0`, +2 `{cos_c, sin_c}` |
| 0x100+q | R: number of entries in accumulation buffer q |

**Port 1, buffers**: `addr[23:20]` is the region, `addr[19:16]` the qubit and `addr[15:0]` the offset.

| region | contents |
|---|---|
| 0 | command buffer: instruction *i*, lane *l* at `4i + l` (lane 0 = bits 31:0) |
| 1 / 2 | qubit-drive / readout-drive envelope, `{I,Q}` per word |
| 3 / 4 / 5 | frequency buffer (32-bit `fword`) of qubit drive / readout drive / readout LO |
| 6 | accumulation buffer: entry n at `2n` (I) and `2n+1` (Q) |
| 7 | acquisition buffer (qubit field 0): one entry per clock of 16 samples (8 words, entry n at `8n`); ADC and mixed entries fill the first 4 samples |

The readout LO runs at ADC rate, so its `fword` is four times the readout drive's for the same frequency.

**Port 2, configuration**:

| addr | meaning |
|---|---|
| 0x00 | clock cycles counted per 1024 reference-clock cycles |
| 0x01 | DAC underruns: clocks where a DAC stream had `tvalid` but no `tready`. A write clears it |
| 0x02 | ADC gaps: clocks on which either ADC channel has no data. A write clears it |
| 0x10 / 0x11 | PTP time counter, low / high word. A write to 0x10 clears the stamp flags |
| 0x12 + 2i / 0x13 + 2i | stamp t(i+1), low / high |
| 0x1A | stamp-valid flags |

The converter streams never stall the DSP. Real-time samples cannot wait, so a word that is not accepted is lost and counted. ADC `tready` is held high.

## Multi-board time: PTP stamps

`ptp_ts` records the 64-bit local time of four events: a Sync message sent (t1) and received (t2), and a Delay_Req sent (t3) and received (t4). A board that sends both kinds of message records t1 and t4; the other board records t2 and t3. Software then works out

```
delay  = ((t4 - t1) - (t3 - t2)) / 2
offset = ((t2 - t1) - (t4 - t3)) / 2
```

The link that carries the messages, and the clock tree (jitter-cleaning PLLs, matched cables), are outside this RTL.

## Sizes

| parameter | default | note |
|---|---|---|
| NQ | 15 | qubits, and so cores. With one drive DAC per qubit and one shared readout DAC, this fills a 16-channel DAC. Up to 16 fits the address maps |
| DSPC / ASPC | 16 / 4 | samples per clock: 8 GS/s and 2 GS/s at 500 MHz |
| PROG_DEPTH | 1024 | instructions per core (128 bits each) |
| ENV_DEPTH | 4096 | envelope points per generator |
| FREQ_DEPTH | 512 | frequency entries per generator |
| ACC_DEPTH | 1024 | I/Q results per qubit before the host must read |
| ACQ_DEPTH | 1024 | clocks captured by the acquisition buffer |
| ADC channels | 2 | fixed in the top; channel 0 is the readout input, channel 1 feeds only the acquisition buffer |

At the defaults a coarse synthesis of `qubic_top` gives about 17.5k cells, 50k flip-flop bits and 7.8 Mbit of memory, almost all of it command and envelope buffers. Each core's buffers are independent, so NQ scales the design linearly.

## Where this departs from, or goes beyond, the published description

The published description gives the architecture, the 72-bit command, the register file and ALU, the function-processor and sync semantics, the cycle counts and the sample rates. Everything below is this implementation's own choice:

* **Encodings.** The instruction encoding, the split of fields inside the 72-bit command, and all register and address maps.
* **Envelopes** have one point per clock. The point is held for all 16 samples; there is no interpolation.
* **The carrier** comes from a 1024-point table with no dithering. Its spurs sit about 60 dB down.
* **The function processor** serves only measured states. The interface accepts other ids, which answer 0.
* **The local buses.** Three are built (DSP registers, buffers, configuration). A fourth local bus appears in the original block diagram without a stated purpose.
* **Blocks not built.**
  * "Pan zoom" appears in the same diagram without a description and is not built.
  * The DSP-to-board interface is plain wiring of typed sample arrays.
* **Converter streams** use "drop and count" rather than back-pressure.
* **The acquisition buffer** captures one window of 1024 clocks per trigger. It holds full clocks of samples (256 bits per entry).
* **The second ADC channel.** The converter has two ADC channels, but the readout chain uses only channel 0. Channel 1 has no stated use, so here it can only be captured by the acquisition buffer.

The processing system, AXI interconnect, RF data converter, clocking primitives, analog front end and PLL chips are outside this RTL; the top brings out their AXI and AXI4-Stream signals.

## Simulating

Every testbench in `tb/` checks itself and prints `TB_RESULT checks=N failures=M`. Each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_qubic_top -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/qubic_pkg.sv tb/qubic_asm_pkg.sv tb/tb_qubic_top.sv
obj_dir/Vtb_qubic_top +verilator+rand+reset+2
```

Swap the testbench name for any other `tb_<module>`. The simulator is two-state. `+verilator+rand+reset+2` starts unreset state at random values, which checks that everything that is read is reset.

| testbench | what it shows |
|---|---|
| `tb_qubic_top` | full size (no overrides), everything through AXI: a conditional bit flip on two qubits |
| `tb_dsp` | fast reset on one qubit, and its converse, at reduced size |
| `tb_proc_core` | every opcode; pulse timing, early and late; loop with a `qclk` rewind; stalls |
| `tb_pulse_gen`, `tb_dds`, `tb_readout_conv` | samples against a reference model; latencies; phase coherence |
| the rest | each block against a reference model or hand-computed values |

**`tb_qubic_top`** runs the conditional bit flip. Q0 gets an X90 and a mid-circuit measurement. If Q0 reads |1>, Q1's core plays two X90s. After a sync, both qubits are read out at the same time at two different readout frequencies on the shared DAC. A behavioural two-qubit model in the testbench turns drive pulses into rotations and readout pulses into random collapse. It answers on the ADC with a tone whose phase depends on the state. Every shot must end in |00> or |11>, and both must occur. The test also counts how often each mechanism fired, and fails if any never did:

* sync release;
* function-processor stall;
* the branch taken and not taken;
* idle wait;
* overlapping readouts.

It also checks the accumulation and acquisition buffers (including a capture of a fixed pattern on the second ADC channel), the underrun and gap counters, the clock-frequency count, the PTP stamps and the AXI timeout.

**`tb_dsp`** repeats the fast-reset loop: X90, measure, two X90s if the result is |1>, measure again. Every shot must end in |0>. It then runs the converse (flip on |0>), where every shot must end in |1>. It also checks that a core started 10 clocks late still pulses exactly on time after a sync. In one shot of each run it triggers the acquisition buffer, on the ADC in the first run and on the readout DAC in the second. The captured entries must equal the samples recorded by the testbench.

Builds take about 20 s at full size, and each simulation runs for seconds.

## How far to trust it

* **Tested.** Every block passes its own testbench, and every testbench fails against a copy of its block with one deliberate bug. Latencies quoted above are checked to the clock.
* **Lint and elaboration.** The design passes Verilator's lint (warnings only: unused bits of shared structs) and elaborates in a second, independent SystemVerilog front end.
* **Not checked.**
  * Timing closure at 500 MHz. The 16-lane DDS and multipliers would need pipelining work on a real FPGA.
  * The qubit and readout physics in the testbenches is an idealised model.
