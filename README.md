# A distributed real-time QEC controller in SystemVerilog

Quantum error correction (QEC) on superconducting qubits is a closed loop.
In every round, ancilla qubits are measured. The 0/1 outcomes (the
*syndrome*) go to a decoder, and the decoder's verdict on which data qubits
have errors must come back to the qubit controllers fast enough to steer the
next operations. That is well inside a microsecond. Once the qubits are
spread over several controller boards, the loop also crosses a network, and
every board must play its pulses on one common time line.

This RTL implements that loop as a tree of boards:

* **Leaf boards** each drive 14 qubits. Every qubit has its own controller
  core with two pulse generators (gate and readout) and a readout
  demodulator.
* **One root board** collects one syndrome frame per round from all leaves,
  hands it to a hardware decoder, and sends each leaf its slice of the
  error vector.
* **Fibre links** join the boards. They use a one-message-per-block
  64B/66B link. A small PTP exchange on the same links aligns the timers of
  all boards.

The design follows a published open-source prototype: three ZCU216 RFSoC
boards (one root, two leaves, the root having four transceivers), a Helios surface-code decoder at the root, and 446 ns measured from
"last syndrome bit known" to "error known at the leaf". Everything here is
written from that description. Several parts of the prototype are not logic
that could be written from it: the RISC-V processors, the RF data
converters, the transceivers, the decoder and the host software. These are
ports of the top module, and the testbenches model them.

```
 leaf board (x N_LEAF)                                   root board
 +-----------------------------------------------+      +-----------------------------------+
 | core 0 .. 13: TileLink regs -> timed FIFOs    |      |                                   |
 |   -> gate generator  --------------> DAC      |      |  net_core x N_LEAF                |
 |   -> readout generator -+                     |      |   -> root_syndrome_aggregator     |
 |   <- readout decoder <--|-- ADC (per group)   |      |        -> dec_frame_* (decoder)   |
 |                         +-> readout_drive_    | fibre|   <- root_error_distributor       |
 |                             combiner -> DAC   |<---->|        <- dec_err_*   (decoder)   |
 | leaf_syndrome_aggregator -> net_core -------->|      |  ptp_master x N_LEAF              |
 | leaf_error_distributor   <- net_core <--------|      |  global_timer (time master)       |
 | ptp_slave -> global_timer                     |      +-----------------------------------+
 +-----------------------------------------------+
```

## One time line for every board

The hardest property of the design is that it is deterministic, not that it
is fast. A processor cannot say "play this pulse now" and hope its
instruction timing is right. Instead it says "play this pulse at time T".
Everything that makes "time T" mean the same instant on every generator and
every board lives in four places.

**The global timer** (`global_timer`) is a 48-bit count of 500 MHz cycles.
All cores of a board read the same timer. It can be stepped by a signed
offset in one cycle.

**PTP alignment** (`ptp_master`, `ptp_slave`) sets the timers against each
other. All boards share one reference clock, so their timers tick together
and only their offsets differ. Each root link has a master. When
`ptp_start` is given, the master sends SYNC carrying its time t1. The leaf
notes the arrival time t2, answers with DELAY_REQ sent at t3, and the master
returns DELAY_RSP carrying the arrival time t4. The leaf then steps its timer
by `-((t2-t1) - (t4-t3))/2`. With equal delays both ways the timers agree
exactly. Any asymmetry leaves half of it as error. In simulation the
asynchronous FIFOs of the links add up to one cycle of asymmetry, so
alignment is to within one 2 ns cycle. The original system claims
sub-nanosecond alignment, which needs clock-phase adjustment that is not
described and not built.

**Timed FIFOs** (`timed_fifo`) hold (timestamp, value) pairs. The head
entry is released as a one-cycle strobe in the cycle the timer equals its
timestamp. An entry whose time has already passed is released at once and
flagged *late*, so a slow program shows up as a status bit rather than a
silently shifted pulse. Each core has eleven of them:

* frequency, phase, amplitude, envelope and duration for the gate
  generator;
* the same five for the readout generator;
* the window length of the readout decoder.

**Carrier phase from the timer.** A generator does not keep a free-running
phase accumulator. Its carrier for DAC sample n of cycle `now` is

```
theta = freq * (16*now + n) + phase        (32-bit turn, 16 samples/cycle = 8 GS/s)
```

The decoder's reference for ADC sample k is `freq*(4*now + k) + phase` at
2 GS/s. Two generators on different boards with the same frequency word
therefore stay phase-locked, as long as their timers agree. A decoder
programmed with four times a generator's frequency word is locked to that
generator. A fixed loop delay becomes a constant phase, which the decoder's
phase register removes.

Fixed latencies, in 500 MHz cycles:

| from | to | cycles |
|---|---|---|
| timer = timestamp | release strobe at the generator | 0 |
| release of Duration | first pulse sample at the DAC port | 3 |
| readout generator output | group's summed readout DAC | 1 |
| decoder window release at cycle t | ADC words integrated | t+1 .. t+dur |
| last integrated word | result readable | 3 |

A program therefore arms the decoder window 3 cycles after the readout pulse
timestamp when the ADC is looped straight back. A real line adds its own
delay.

## The controller core

`controller_core` is what one qubit's RISC-V processor sees. It is a
TileLink-UL slave with 32-bit Get and PutFullData. It answers in the cycle
after a request, and holds the answer until it is taken. A second TileLink
port per core leads to its private 8 KiB `local_memory`. The size comes
from 28 block RAMs per 14 cores in the prototype's resource table.

| address | register | access |
|---|---|---|
| 0x00 / 0x04 | TS_LO / TS_HI: timestamp attached to the next FIFO pushes | write |
| 0x10 + {0,4,8,C,10} | gate generator: frequency, phase, amplitude, envelope start, duration | write (timed) |
| 0x30 + {0,4,8,C,10} | readout generator: same layout | write (timed) |
| 0x50 / 0x54 | decoder frequency / phase | read, write |
| 0x58 | decoder window length in cycles | write (timed) |
| 0x5C | decoder result `{valid, bit}`; reading clears `valid` | read |
| 0x60 / 0x64 | timer low / high (reading low latches high) | read |
| 0x70 | syndrome bit for this round (bit 0) | write |
| 0x74 | decoded error `{valid, bit}`; reading acknowledges it | read |
| 0x78 | status: FIFO full flags [10:0], late flags [21:11] (cleared by reading) | read |

A pulse is written as: the timestamp, then the parameters. A Duration write
starts the pulse when released. Parameters that do not change need not be
rewritten.

A QEC round on an ancilla core runs as follows:

1. Write the readout pulse for time T.
2. Write the decoder window for T+delay.
3. Poll 0x5C for the result.
4. Write the result to 0x70.
5. Poll 0x74 for the decoded error.

Data-qubit cores skip step 4 and act on the error, for example with a
correction pulse.

## Pulses and readout

`rf_signal_generator` produces 16 signed 16-bit samples per cycle:

```
s[n] = ((env[n] * amp) >>> 16) * sin(theta_n) >>> 15
```

* The envelope memory holds ENV_DEPTH = 2048 words of 16 samples. It is
  written by the host through `env_wr_*`. The depth is 16 block RAMs per
  generator, from the prototype's resource table.
* The envelope register is the first word of the pulse. Duration is the
  number of words (cycles) to play.
* The sine comes from a 1024-entry ROM computed at elaboration.

`rf_signal_decoder` multiplies the four ADC samples of each cycle by cos and
sin of its reference and accumulates I and Q over the window. It reports
`I < 0` as the outcome. The phase register is set so that the two qubit
states fall on either side of the I axis. There is no separate threshold
register.

Readout lines are shared. The readout generators of a group of 7 cores are
summed, with saturation, by `readout_drive_combiner` onto one DAC. One ADC
per group brings the reflected signal back to all seven decoders. Each core
picks its own qubit out by frequency: tones that complete whole, different
numbers of periods in the window do not disturb each other's I and Q. A
leaf's converter ports are therefore:

* 16 DAC outputs: 14 gate lines, plus one readout line per group at index
  `g*8+7`;
* 2 ADC inputs.

## Messages and links

Every message is one 64-bit word and travels in one 66-bit block:

| bits | field |
|---|---|
| 63:60 | type: 1 SYNDROME, 2 ERROR, 3 PTP_SYNC, 4 PTP_DELAY_REQ, 5 PTP_DELAY_RSP |
| 59:56 | leaf node id |
| 55:48 | round number |
| 47:0 | payload: syndrome or error bits (bit c = core c), or a 48-bit time |

`net_core` sends messages as data blocks (sync header 01) scrambled with
the self-synchronising x^58+x^39+1 scrambler. When there is nothing to send
it fills the line with idle control blocks (header 10).

* **Lock:** the receiver locks after 64 blocks with valid headers. It drops
  lock after 16 bad headers in a 64-block window. While unlocked it asks the
  transceiver for a bit slip.
* **Clock crossing:** `async_fifo` crosses between the 500 MHz message side
  and the 156.25 MHz block side (10.3125 Gb/s line). It adds two to three
  cycles of the receiving clock, which is the main source of latency jitter.
* **Not built:** the error-correcting code of the original link is not
  specified, and this link has none.

## Syndrome up, errors down

**Leaf side.** `leaf_syndrome_aggregator` collects one bit per ancilla core.
The cores to wait for are set by `ancilla_mask`, and they may report in any
order and at any time. When the last masked core has reported, it emits one
SYNDROME message with the round number and restarts. If a round completes
while the previous message is still waiting, the newer one replaces it and
`synd_overflow` pulses.

**Root side.** `root_syndrome_aggregator` waits for one SYNDROME message
from each leaf enabled in `leaf_mask`. It then presents one frame to the
decoder, with leaf l's bits at `[l*14 +: 14]`. Messages from different
leaves may arrive in any order. If their round numbers disagree it raises
`round_mismatch`, which catches a leaf that missed a round.

**Decoder.** It answers with an error vector of the same layout.
`root_error_distributor` turns that vector into one ERROR message per enabled
leaf. It accepts the next vector only when every link has taken its message.

**Back at the leaf.** `leaf_error_distributor` takes only messages addressed
to its node id. It raises `valid` to every core with that core's bit, and
each core clears its own `valid` by reading it. On each link, ERROR messages
take priority over PTP traffic. At the leaf, SYNDROME messages take priority
over PTP replies.

The decoder is outside the design (`dec_*` ports of `qec_system`):

* `dec_frame_valid` / `dec_frame_ready` carry `dec_syndrome` (N_LEAF*14 bits)
  and `dec_round`.
* `dec_err_valid` / `dec_err_ready` return `dec_err_vec` and
  `dec_err_round`.

Any decoder with this handshake can be attached.

## Latency

The end-to-end testbench uses these models:

* 20 link blocks (128 ns) of fibre and transceiver delay per direction;
* a decoder stand-in with a fixed 28-cycle (56 ns) latency, the prototype's
  distance-3 figure.

It measures the following, from the last syndrome write to the error message
arriving at the last leaf's transceiver:

| stage | this RTL (simulated) | prototype (measured) |
|---|---|---|
| last syndrome write -> frame at decoder | 162-166 ns | 29 + 157 + 20 = 206 ns |
| decoder | 56 ns (model) | 56 ns |
| error vector -> error message at leaf | 154-156 ns | 25 + 155 + 9 = 189 ns |
| total | 372-378 ns | 446 ns |

The fibre model is the largest single term and is a guess. The RTL's own
share is a few cycles per stage plus the clock crossings.

## Sizes and configurations

| parameter | default | origin |
|---|---|---|
| N_LEAF | 4 | prototype root has four transceivers |
| N_CORES | 14 | qubits per leaf board |
| GROUP | 7 | cores per shared readout DAC/ADC |
| ENV_DEPTH | 2048 | 16 BRAM36 per generator (448 BRAMs / 28 generators) |
| MEM_BYTES | 8192 | 2 BRAM36 per core (28 BRAMs / 14 cores) |
| control clock | 500 MHz | |
| link clock | 156.25 MHz | |

**What fits:**

* The default top holds 56 qubits with a 56-bit syndrome frame. That covers
  the distance-3 experiment: 17 qubits and 8 syndrome bits, with two leaves
  and `leaf_mask = 4'b0011`. It also covers a distance-5 code (49 qubits,
  24 syndrome bits).
* A distance-7 code (97 qubits) needs `N_LEAF = 7`.
* The 4-bit node field addresses at most 16 leaves (224 qubits).

**What does not fit:** the larger configurations the prototype is
extrapolated to.

* A 34-link root with 476 qubits would need a wider node field.
* Up to distance 21 (881 qubits) would also need the router boards of a
  deeper tree, which are not built here.

## Where this departs from the original

* The processors are not included. The testbenches drive the TileLink ports
  with a bus model that runs the QEC program.
* The decoder, data converters, transceivers and fibres are not included.
  They are ports of the top module.
* The register addresses, message layout, status word and TileLink subset
  are this design's own choices.
* The link has no forward error correction. A corrupted block is delivered
  as is, or costs lock if its header is hit.
* Timer alignment is to one 2 ns cycle, not sub-nanosecond.
* Router nodes are not built, so the tree is one level deep.
* The evaluation loops summed gate outputs back to the ADCs. Here the shared
  readout line is looped back instead, which exercises the same timing with
  the readout path that exists in the RTL.

## Files

* `rtl/qec_pkg.sv`: shared types (`msg_t`, TileLink structs, sample types)
  and the register map.
* `rtl/qec_system.sv`: top module. It contains `leaf_node` x N_LEAF and one
  `root_node`.
* `rtl/leaf_node.sv`: 14 x (`controller_core` with two
  `rf_signal_generator`s, one `rf_signal_decoder` and eleven `timed_fifo`s,
  plus `local_memory`), `readout_drive_combiner` per group,
  `leaf_syndrome_aggregator`, `leaf_error_distributor`, `ptp_slave`,
  `global_timer` and `net_core`.
* `rtl/root_node.sv`: `root_syndrome_aggregator`, `root_error_distributor`,
  `global_timer`, and a `ptp_master` and a `net_core` per link.
* `tb/<block>_tb.sv`: one self-checking testbench per block. Each prints
  `TB_RESULT checks=N failures=M`.
* `tb/tl_host_bfm.sv`: the TileLink bus model.
* `tb/qec_system_tb.sv`: the whole system at default size, no parameter
  overrides. It runs three QEC rounds on all 56 qubits: PTP, timed readout
  pulses through the shared lines, demodulation, syndrome collection,
  decoding by the stand-in, error delivery and correction pulses. It counts
  each of these mechanisms and prints the latency above.
* `tb/qec_d3_tb.sv`: the distance-3 experiment on the same default system.
  The 17 qubits of a d=3 patch sit on two leaves (cores 0-8 and 0-7, with
  ancillas on the odd cores). The other two leaves are masked off at the
  root. It checks that only the two enabled links carry syndrome and error
  traffic, and prints the per-round latency.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
    --top-module qec_system_tb -y rtl -y tb +libext+.sv -Irtl \
    rtl/qec_pkg.sv tb/qec_system_tb.sv
./obj_dir/Vqec_system_tb
```

Any other testbench builds the same way; replace the top module and the
testbench file. The full system builds in well under a minute and simulates
its three rounds in under a second. The simulation is two-state, so every
testbench resets or initialises what it reads.
