# LILLIPUT: a look-up-table surface-code decoder in SystemVerilog

A surface-code memory experiment measures all stabilizers of the code once per
QEC cycle (about 1 µs on superconducting hardware). It then has to work out,
in real time, which data qubits most likely suffered an error. Matching
decoders such as MWPM are accurate, but they are too slow and too large to
sit next to the qubit controller.

LILLIPUT takes the other route. It computes the best correction for every
possible pattern of *detection events* ahead of time, in software, and
stores the answers in a table. At run time, decoding is a single table read.
For the small codes used in near-term experiments (distance 3 and 4) the
table is small enough for on-chip RAM. The logic around it is a handful of
XOR gates and registers. The decoder answers in a fixed number of clock
cycles: 7 at the default size, which is 28 ns at 250 MHz.

This RTL implements:

- the decoder for a rotated surface code of distance `D`, looking at a
  window of `M` syndrome rounds (default `[d=3, m=2]`);
- the handling of the experiment's first and last rounds;
- the logical-error check at the end of an experiment;
- optionally, the compressed table (CLUT) that shrinks each table from
  416 bytes to 140 bytes.

## Code geometry and bit conventions

`rtl/lilliput_pkg.sv` computes the geometry for any distance, so the rest of
the RTL never lists qubit numbers by hand.

- **Data qubits** are numbered row-major from the top-left, `q = row*D + col`.
  This gives 9 qubits for d=3.
- **Plaquettes.** A stabilizer plaquette sits at lattice corner `(i, j)`,
  with `i, j` from 0 to D. It is Z type when `i + j` is odd and X type when it
  is even.
  - Interior corners always hold one.
  - Only Z plaquettes sit on the left and right edges, and only X plaquettes
    on the top and bottom edges.
  - Corners of the lattice hold none.
  - The support of a plaquette is the up-to-four data qubits around its
    corner.
- **Stabilizer order.** Stabilizers of one type are numbered column by
  column, left to right, and top to bottom within a column. This is the
  left-to-right order in which syndromes are written as bit strings. Bit `k`
  of a syndrome is stabilizer `k`.

For d=3 this gives four stabilizers of each type:

| bit | Z stabilizer support | X stabilizer support |
|-----|----------------------|----------------------|
| 0   | {0,3}                | {0,1,3,4}            |
| 1   | {3,4,6,7}            | {6,7}                |
| 2   | {1,2,4,5}            | {1,2}                |
| 3   | {5,8}                | {4,5,7,8}            |

For d=4 the same rule gives 7 X and 8 Z stabilizers. These counts match the
decoder table widths of 14 and 16 address bits at m=2.

**Which error each stabilizer type detects.**

- Z stabilizers detect X errors. The channel fed by Z stabilizers is called
  `zstab`; its log holds X corrections.
- X stabilizers detect Z errors. That channel is `xstab`.

Channels are named after the stabilizers that feed them, not after the error
type. Block diagrams of this decoder often label the Z-stabilizer chain "Z
error decoding"; that is the same chain.

## Detection events and the sliding window

A *detection event* is a stabilizer whose outcome changed between two
consecutive rounds: `event[r] = syndrome[r] XOR syndrome[r-1]`. A data error
lights up the stabilizers around it once. A faulty measurement lights one
stabilizer in two consecutive rounds.

Each channel keeps the last `M+1` syndromes in `syndrome_fifo`, which yields
`M` layers of events. `event_detect` concatenates the layers into the table
address, oldest layer in the least-significant bits:

    addr = { event[newest], ..., event[oldest] XOR state }

The table holds the correction for the **oldest layer only**. The window then
slides by one round. Because the table sees `M` rounds, it can tell a
measurement error (the same stabilizer in two layers) from a data error.

The table also returns an **internal state** of one bit per stabilizer. The
state says which events in the next-oldest layer were already explained
(neutralised) or created by the correction just applied. For example, a
measurement error spanning the two layers that was matched in time leaves
one event that must not be matched again.

- The state is XORed into the oldest layer of the next request.
- The state register is **replaced** on every table read, not accumulated,
  because the layer it refers to is consumed by the next step.

The returned error assignment is XORed into the channel's **error log**. Two
corrections of the same qubit cancel.

### Table entry layout

For D data qubits squared (`N = D*D`) and `S` stabilizers:

    entry[N-1:0]     error assignment for the oldest round (bit q = data qubit q)
    entry[N+S-1:N]   next internal state (bit k = stabilizer k)

For d=3 this is a 13-bit entry. The address is `S*M` = 8 bits, so each table
is 256 x 13 bits (416 bytes). The contents come from an offline decoder. The
RTL provides a write port and does not compute them.

## Boundaries of an experiment

**First round.** The round before the first one is the syndrome implied by
the initial state. For the basis that was prepared, this is normally all
zeros. `start` loads it (`init_syn_x` / `init_syn_z`) into every slot of both
FIFOs. The first real round is therefore compared with it.

- Decoding begins once the window holds `M` real layers.
- With `M = 2` the first step happens at round 2.

**Last round.** The data qubits are measured transversally in the logical
basis (Z by default, X selectable with `basis`).

1. `lm_to_syndrome` computes the parity of each stabilizer of that basis
   from the data outcomes.
2. This *final syndrome* is pushed into that basis's channel as one more
   round. The channel compares it with the last measured round.
3. The controller then issues `M-1` padding steps. Each pad shifts in a copy
   of the newest syndrome, which gives an all-zero detection layer. In this
   way every real round becomes the oldest layer exactly once.
4. The other channel has no final syndrome. It only pads, and so consumes
   the rounds still in its window.

**Logical outcome.** When both channels are idle, `logical_error_unit` XORs
the error log of the channel that matches the measurement basis into the
data outcomes:

- Z basis: the `zstab` log (X corrections);
- X basis: the `xstab` log (Z corrections).

It then takes the XOR reduction over all data qubits and compares the result
with the prepared value (`expected`).

- For odd distance the product of all data qubits is a valid representative
  of the logical operator.
- For even distance that reduction is not a logical operator. The unit is
  built as specified and has been checked only at d=3 and d=5.

## Readout interface and latency

The readout electronics are assumed to overwrite a buffer once per round on a
slower clock. A bit next to the buffer toggles every time a new record is
written. `readout_poller` brings the toggle across with two flops and
detects the edge with a third. It then captures the buffer, which must stay
stable for four decoder clocks after the toggle.

| cycle after toggle | stage                                             |
|--------------------|---------------------------------------------------|
| 1–3                | synchronise, detect edge, capture record          |
| 4                  | push into FIFO, window complete                   |
| 5                  | detection events + state -> address register      |
| 6                  | table read                                        |
| 7                  | error log and internal state updated: `step_*` pulses, `assign_*` and `log_*` valid |

This gives 7 cycles, the latency the design targets. The CLUT adds one cycle
(8 in total).

- One step must finish before the next begins. The internal state feeds the
  next address.
- With rounds about 250 decoder clocks apart this never limits throughput.
- An assertion in `decode_channel` flags pushes closer than that.

## Compressed table (CLUT), `USE_CLUT = 1`, d=3 m=2 only

Measured decoders see mostly low-weight addresses. The CLUT stores only
those, in two steps.

### 1. Address translation (`clut_segment_addr`)

The 8-bit request is split into its upper nibble (the newest layer) and
lower nibble (the oldest layer). Each upper-nibble value owns a *data frame*
(DF).

| upper-nibble values (popcount) | segment | DF size                  | stored  |
|--------------------------------|---------|--------------------------|---------|
| 0, 1, 2, 4, 8 (0 or 1)         | A       | 16 entries (all lower nibbles) | 80 |
| 3, 5, 6, 9, A, C (2)           | B       | 10 entries (lower nibble 0–9)  | 60 |
| 7, B, D, E, F (3 or 4)         | –       | not stored               | 0       |

Flat entry index:

- Segment A: `df*16 + lo`;
- Segment B: `80 + df*10 + lo`.

DFs are numbered in ascending order of the upper nibble, so the index runs
from 0 to 139. A request that is not stored is a *decoder failure*.
`dec_fail` goes high and stays high until the next `start`. The step returns
a zero correction and a zero state.

### 2. Assignment compression (`clut_decompress`)

Four consecutive entries share one 16-bit word, so there are 35 words in all.

- **Encoding.** Each 9-bit assignment is cut into three 3-bit groups. A
  group may have at most one error, and is coded in 2 bits:
  `000→00, 100→01, 001→10, 010→11`. This gives 6 bits per assignment.
- **Slices.** The upper 3 code bits form slice A and the lower 3 form
  slice B.
- **Word layout.** The word stores each slice as a 3-bit base plus a 2-bit
  delta per entry:

      [15:14] mode   [13:11] base A   [10:8] base B   [7:6] d(entry 0) ... [1:0] d(entry 3)

  - `mode[1]` set: slice A of entry `i` is `base A + d(i)` (modulo 8);
    otherwise it is `base A`.
  - `mode[0]` does the same for slice B.
  - With mode `11` both slices add the same delta. This design defines that
    combination; the published scheme does not.
- **States.** The 4-bit internal states are stored uncompressed (140 x 4
  bits).

One CLUT is therefore 35 x 16 + 140 x 4 bits = 140 bytes. Reads take two
cycles: (1) segment address and word/state fetch, (2) decode.

### This scheme is lossy for general tables

An assignment with two errors in one 3-qubit group cannot be encoded, and
four entries whose deltas differ in both slices cannot share a word. The
scheme only works for tables shaped like the ones it was designed around.

The test table used here is a simple minimum-weight table. For that table,
40 and 56 of the 140 stored entries of the two channels do not survive
compression. The CLUT test therefore checks the hardware against
what the stored words decode to, and checks correct decoding only where the
entries are exact.

## Departures and open points

- **Segment B size.** The published text lists the Segment-B range as
  `0xA0`–`0xAA` (11 addresses). It also calls the DF 10 entries and gives
  140 entries in total. The RTL stores 10 entries per DF (lower nibble 0–9).
- **Compression modes.** Only mode `10` (slice A uses deltas) and mode `01`
  (slice B uses deltas) are described. Mode `00` and mode `11` are this
  design's reading.
- **d=4 stabilizer counts.** The geometry gives 7 X and 8 Z stabilizers.
  This matches the published table widths (14/16 address bits, 23/24 entry
  bits). It does not match a published qubit count that lists 8 X and 7 Z.
- **Handshakes.** The toggle handshake, the start/clear sequence, the
  one-pad-at-a-time flush and the two-cycle CLUT latency are this design's
  own choices.
- **Out of scope.**
  - The external SRAM/DRAM used for the `[4,3]` and `[5,2]` tables is not
    built. At those sizes the RTL would simply declare a 2^24-entry array.
  - There is no CLUT for d=4 or d=5: their compression scheme is not
    described.
  - The offline table generator is not part of this RTL.
  - Decoding several logical qubits by time-sharing one decoder is not
    designed.
- **Tested sizes.**
  - `D` and `M` are free parameters.
  - The default [3,2] is simulated end to end with both the plain table and
    the CLUT.
  - [3,3], [4,2], [4,3] and [5,2] are simulated end to end with plain
    tables. All of them answer in 7 clocks.
  - The two largest tables (2^24 entries) would normally be external
    memory. Their extra access time is not modelled.

## Files

| file | role |
|------|------|
| `rtl/lilliput_pkg.sv` | geometry functions, types |
| `rtl/readout_poller.sv` | toggle synchronizer + capture |
| `rtl/syndrome_fifo.sv` | last M+1 syndromes, init load, zero-layer padding |
| `rtl/event_detect.sv` | detection events + internal state -> table address |
| `rtl/lut_mem.sv` | plain decoder table (synchronous RAM) |
| `rtl/clut_segment_addr.sv`, `rtl/clut_decompress.sv`, `rtl/clut.sv` | compressed table |
| `rtl/internal_state.sv`, `rtl/error_log.sv` | per-channel state and log registers |
| `rtl/decode_channel.sv` | one complete channel (X or Z stabilizers) |
| `rtl/lm_to_syndrome.sv` | data outcomes -> final syndrome |
| `rtl/logical_error_unit.sv` | corrected logical outcome and error flag |
| `rtl/lilliput_ctrl.sv` | experiment sequencing: start, rounds, final syndrome, padding, result |
| `rtl/lilliput_top.sv` | the decoder |
| `tb/tb_<module>.sv` | self-checking testbench per module |
| `tb/tb_qec_pkg.sv` | d=3 reference model: syndromes, a minimum-weight table builder, CLUT compressor |
| `tb/tb_lilliput_top_clut.sv` | end-to-end test with `USE_CLUT = 1` |
| `tb/tb_lilliput_configs.sv`, `tb/tb_config_run.sv` | end-to-end tests of [3,3], [4,2], [4,3], [5,2] |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops. A
watchdog ends a run that hangs. For example, with Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl -y tb \
        rtl/lilliput_pkg.sv tb/tb_qec_pkg.sv tb/tb_lilliput_top.sv \
        --top-module tb_lilliput_top
    ./obj_dir/Vtb_lilliput_top

Testbenches that do not use `tb_qec_pkg` can leave it out.

### The end-to-end test (`tb_lilliput_top`)

The test runs the top at its default parameters.

- It programs both tables with a minimum-weight table built by the
  testbench. The builder enumerates at most two fault mechanisms in the
  window: a data error in either round, or a measurement error in either
  round.
- It runs 400 experiments. Most have 5 rounds. Every fifth experiment takes
  the next length of a sweep from 1 to 20 rounds. Both bases and both
  prepared values are used.
- Each experiment injects random data errors, measurement errors and flips
  of the final data readout.
- An independent round-level model of the decoder computes the expected
  results.

It checks:

- the 7-cycle latency of every step;
- every assignment, log and state;
- the logical outcome;
- that a single fault never causes a logical error.

It counts each mechanism and fails if one never occurs:

- decoding steps;
- steps with a non-zero internal state;
- padding steps;
- final syndromes routed to each channel;
- readout errors corrected by the final syndrome;
- logical errors from double faults;
- experiments of 1 round and of 16 or more rounds.

`tb_lilliput_top_clut` runs the same experiment through the CLUT. It also
counts decoder failures on unstored addresses.

### The larger configurations (`tb_lilliput_configs`)

`tb_config_run` is a self-contained harness for any `[D, M]`. It derives the
code geometry on its own, from the rule given under *Code geometry*.

**Decoding table.** It builds a minimum-weight table over an `M`-layer
window. Each error mechanism is one of:

- a data error in layer `l`;
- a measurement error in layer `l`, which flips layers `l` and `l+1` inside
  the window.

**Experiments.** It runs experiments of 1 to 8 rounds and checks:

- the latency of every step;
- the number of steps in each channel;
- both logs, against its own round-level model;
- the logical outputs.

For experiments with at most one error it also checks the corrected
outcomes:

- they must have a zero syndrome;
- they must carry the prepared value on a true logical operator: row 0 in
  the Z basis, column 0 in the X basis.

That check also holds for even distance, where the all-qubit reduction does
not. The 2^24-entry tables are loaded into the arrays directly rather than
one word per clock.

