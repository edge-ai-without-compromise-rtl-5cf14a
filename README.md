# A 48-core RRAM compute-in-memory inference chip in SystemVerilog

This chip runs neural-network inference inside the memory that holds the
weights. A weight matrix is stored as the conductances of resistive RAM
(RRAM) cells. A matrix-vector multiplication (MVM) is one analog step:
input voltages go onto one set of array wires, and the other set of wires
settles to the products. The chip has 48 identical cores. Each core has
a 256 x 256 array and 256 neurons, which turn the analog results into
digital words. Each core also has the registers, line drivers and
controller that sequence an MVM. Cores run in parallel and can be
powered down one by one; their weights stay in the non-volatile cells.

The RTL describes the digital parts of the chip as synthesizable
SystemVerilog: registers, line-driver logic, LFSR noise source, neuron
readout and activation logic, controller, serial interface and chip top.
Three analog parts are behavioural models with the real part's ports:
the RRAM array, the neuron capacitors and comparator, and the WL pulse
delay line. The models are exact and ideal, so the digital design can be
simulated end to end and checked against an integer reference.

## How one MVM works

### Voltage-mode sensing

Each input wire is driven to one of three levels: V_ref - V_read, V_ref
or V_ref + V_read. These are the inputs -1, 0 and +1. The output wires
float. While the word lines (WLs) are on, every floating wire settles to
the conductance-weighted average of the inputs:

    V_j = sum_i V_i G_ij / sum_i G_ij

This is a normalised dot product. The normalisation constant is known
from the weights, so the host removes it in software.

A core can run an MVM in three directions:

| direction | inputs on | outputs sensed on | result written to |
|-----------|-----------|-------------------|-------------------|
| forward   | BLs (rows)    | SLs (columns) | SL registers |
| backward  | SLs (columns) | BLs (rows)    | BL registers |
| recurrent | BLs           | SLs           | BL registers |

The backward direction computes the transposed product from the same
stored matrix, which is what RBM sampling needs. Forward MVMs turn on
only WLs 0..`in_len`, so a shorter input vector leaves the other rows
disconnected.

Signed weights use two cells per weight, on neighbouring rows. The host
writes x into one row's register and -x into the other's. The drivers
then apply opposite voltages to the pair. The hardware needs nothing
special for this.

### The transposable array (TNSA)

The 256 neurons sit in a 16 x 16 grid of "corelets". Each corelet holds
16 x 16 cells and one neuron. The neuron of corelet (i, j) can switch to
bit-line 16i+j or to source-line 16j+i. This way every BL and every SL
has exactly one neuron, and no row or column needs a neuron of its own
on the array edge. `tnsa.sv` holds this wiring: `sl_of(k) = (k mod 16) * 16 + k / 16`.

### Multi-bit inputs

Register words are sign-magnitude: bit 7 is the sign (1 = positive) and
bits 6:0 are the magnitude. An input with `in_mag_bits` = m is sent as m
pulses, most significant bit first. For magnitude bit b, each line
drives +1 or -1 (from the sign) if bit b is set, and 0 if not. After the
WL pulse, the neurons sample the settled lines and integrate them 2^b
times. So bit b carries weight 2^b in the integrated charge.

An n-bit signed input therefore takes n-1 pulses and 2^(n-1) - 1
sample/integrate cycles. The per-line 2-bit pulse code sits in the
`line_driver` and is reloaded before each pulse.

### The neuron and the output word

Each neuron has a sampling capacitor, an integrating capacitor, and one
amplifier that works as integrator or as comparator. After the input
phase:

1. **Sign.** The comparator latches the sign of the integrated charge
   (1 = positive).
2. **Magnitude.** A "charge decrement" step removes V_decr worth of
   charge: it subtracts for a positive charge and adds for a negative
   one. A counter counts the steps until the comparator flips. The
   count is the magnitude.
3. **Limits.** The phase ends after `n_max` steps at most (128 gives a
   7-bit magnitude, saturated at 127). It stops early as soon as every
   neuron has flipped.

V_decr sets the output scale and `n_max` the range. With `n_max` = 0
only the sign is produced, which is a binary stochastic neuron when
noise is added (below).

The activation function is part of this conversion (`neuron_readout.sv`):

| `act` | decrement | output word |
|-------|-----------|-------------|
| LINEAR | every neuron | {sign, steps} |
| RELU | only neurons with sign 1 | {1, steps}, or 0 for a negative sum |
| TANH | every neuron | {sign, y} |
| SIGMOID | every neuron | M + y for sign 1, M - y for sign 0 (unsigned) |

For TANH and SIGMOID, y counts slower as it grows. It advances once per
step up to 35, once per 2 steps up to 40, once per 3 steps up to 43, and
once per 4 steps beyond that. This gives a piecewise-linear curve that
saturates. M is the value y reaches after `n_max` steps. For SIGMOID the
word lies in 0..2M, and the host divides it by 2M.

Each neuron keeps a step counter, the count y and a 2-bit sub-step
counter, so no division is needed per neuron.

### Noise for probabilistic sampling

After the input cycles, `noise_cyc` extra sample/integrate cycles can be
added. During them each SL driver applies V_ref + V_LFSR or V_ref -
V_LFSR, chosen by a pseudorandom bit. The bits come from two LFSRs: a
17-bit one with taps 17 and 3, and an 18-bit one with taps 18 and 7.
Each feeds a 256-bit shift chain, and the two chains move in opposite
directions. Line k receives chain_a[k] XOR chain_b[k]. The LFSR shifts on
every cycle while the core is busy, so the chains are full by the time
noise is injected.

## The controller and its timing

`core_controller.sv` runs one command at a time, one phase per clock:

    INIT                                  1 cycle   lines to V_ref, capacitors cleared
    per magnitude bit b (MSB first):
      LOAD                                1         pulse codes into the drivers
      FIRE                                F         WL pulse, wait until settled
      (SAMPLE, INTEG) x 2^b               2^(b+1)
    (SAMPLE, INTEG) x noise_cyc           2 each    SL drivers at +/- V_LFSR
    CMP, OSTART                           2         latch sign, start counters
    (DECR_S, DECR_I, DECR_C) x S          3 each    until all neurons done or n_max
    final DECR_S, WB                      2         write words to output registers

In neuron-test mode, F = 1 + WL_WAIT. In MVM mode, F = max(1 + WL_WAIT, 2N + 2).
An MVM with m magnitude bits, c noise cycles and S decrement steps takes

    1 + m(1 + F) + 2(2^m - 1) + 2c + 2 + 3S + 2

cycles from the accepting clock edge to the end of write-back. The
testbenches check this count for every MVM.

The 2N term is a property of the array model, not of the chip. The
model evaluates the settled voltages one row per clock (N cycles), then
divides one SL per clock (N cycles). It raises `settling` while it
works, and the controller waits for it. A real array settles within
the WL pulse (1 to 10 ns, set by `wl_width_ns` through the delay-line
model `pulse_gen.sv`). Set F to the real settling time when you compare
latencies.

### Other modes

- **Neuron test.** WLs stay off. Each neuron reads its own driver level
  directly on the input side. This checks the neurons and the
  conversion without the array.
- **Programming.** The host clears both register files and writes 1 into
  one row register and one column register. A PROG command then applies
  one pulse to that cell: SET raises the conductance, RESET lowers it,
  READ returns it on `read_g`. The amplitude comes from `v_prog`.

Programming a weight is an incremental write-verify loop: READ, then SET
or RESET with a larger pulse, until the cell is in range. That loop runs
on the host, and the testbenches contain it. The device response in the
model is a simple stand-in: a SET of amplitude A (in 0.1 V) adds
max(0, A - 11) uS, and a RESET removes max(0, A - 14) uS, clamped to
0..63 uS.

## Chip level

`neurram_top.sv` instantiates 8 x 6 = 48 `cim_core`s and one `spi_slave`.

- **Commands.** One command port (`cmd`, `cmd_valid`) is broadcast to
  the cores set in `cmd_core_mask`. It is accepted (`cmd_ready`) when
  every selected core is idle, so several cores start the same
  operation in the same cycle. Each core reports `core_done`,
  `core_busy` and `core_clk_en`; the last is the enable of its clock
  gate.
- **Register access.** Registers are reached through the random-access
  port (`ra_valid`, `ra_core`, `ra_req`, combinational `rdata`) or
  through SPI. A request writes one word, clears a whole side, or reads
  one word.
- **SPI frame.** SPI is mode 0 with 32-bit frames, MSB first:

      [31] we  [30] clr  [29] side  [28:23] core  [22:15] addr  [14:7] wdata  [6:0] unused

  A frame with we = clr = 0 is a read. The word comes back on MISO in
  the first 8 bits of the next frame. An SPI request wins over a
  random-access request in the same cycle.
- **Power.** With `core_pwr_en[c]` low, core c is held off. It ignores
  commands, its register files are cleared (they are volatile), and its
  conductances are kept.
- **Analog levels.** V_read, V_decr, V_LFSR, V_prog and the WL pulse
  width come from the test board. They are chip inputs, given as codes.

## Departures and simplifications

These points are choices made here where the paper gives no detail:

- The 8-bit sign-magnitude register word, the command format, the SPI
  frame and the chip-level broadcast are this design's own encodings.
- The magnitude saturates at 127, although `n_max` may be up to 255.
- The tanh/sigmoid step schedule follows the published example up to
  count 43 and keeps 4 steps per count beyond that.
- The sigmoid's final division by 2M is left to the host.
- Programming: the array model acts on the lowest selected row only.
  READ reports the lowest selected column.
- The analog models are ideal. Charge is an exact integer, with no
  offsets, noise, IR drop or conductance relaxation. Divisions truncate
  towards zero. The line-voltage code is 10 bits and the charge
  accumulator 24 bits.
- The write-verify loop, the board, the power switches and the mapping
  of models onto cores are outside the RTL. So is the addition of
  partial sums when a matrix is split over several cores: each core
  returns its own output words and the host adds them.

## Files

| file | contents |
|------|----------|
| `rtl/neurram_pkg.sv` | shared types: driver selections, modes, activations, command, phase signals, bus request |
| `rtl/lfsr_prng.sv` | two LFSRs and counter-propagating chains |
| `rtl/reg_file.sv` | per-line registers of one side |
| `rtl/line_driver.sv` | pass-gate selection for every BL/WL or SL |
| `rtl/rram_array.sv` | behavioural array: settling and programming |
| `rtl/neuron_array.sv` | behavioural neurons: sample, integrate, compare, decrement |
| `rtl/neuron_readout.sv` | step counters, activation schedule, early stop, output words |
| `rtl/tnsa.sv` | array, neurons and readout with the transposed wiring |
| `rtl/pulse_gen.sv` | behavioural delay-line WL pulse generator |
| `rtl/core_controller.sv` | phase sequencer, clock/power gating |
| `rtl/cim_core.sv` | one core |
| `rtl/spi_slave.sv` | serial register access |
| `rtl/neurram_top.sv` | 48 cores, SPI, command broadcast |
| `tb/neurram_tb_pkg.sv` | integer reference model of an MVM and the cycle formula |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops.
Build one with verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
      --top-module tb_cim_core -y rtl -y tb +libext+.sv -Irtl -Itb \
      rtl/neurram_pkg.sv tb/tb_cim_core.sv
    ./obj_dir/Vtb_cim_core

- `tb_neurram_top`: the whole chip at full size (48 cores of 256 x 256).
  It programs a 12 x 8 weight block into three cores with the host
  write-verify loop, using both access ports. It runs forward,
  backward, recurrent and neuron-test MVMs on several cores at once,
  with every activation, and compares every output word and the cycle
  count with the reference model. It also runs noisy sign-only sampling,
  SPI read-back and power gating, and an MVM on all 48 cores. It counts
  every mechanism and fails if one never happens. It takes about 1.5
  minutes.
- `tb_cim_core`: one core reduced to 4 x 4 corelets (16 x 16 cells), so
  that every cell can be programmed. It runs 60 random MVMs and
  neuron tests.
- `tb_rram_array`, `tb_neuron_array`, `tb_neuron_readout`,
  `tb_line_driver`, `tb_reg_file`, `tb_lfsr_prng`, `tb_pulse_gen`,
  `tb_spi_slave`: one block each, with a reference computed in the
  testbench.

The reference in `neurram_tb_pkg.sv` recomputes everything from the
register words and the conductances: line voltages, charge, decrement
steps and the output word. It shares no code with the RTL.
