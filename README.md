# Stokes-parameter correlator for a dual circular polarisation receiver

A radio polarimeter splits the sky signal into its left- and right-hand
circular polarisations (LCP and RCP). Each one is mixed down to baseband as an
in-phase/quadrature pair, which gives four real signals. The polarisation
state of the radiation is described by the four Stokes parameters I, Q, U and
V. These are products of the two complex fields, averaged over time. This RTL
computes them in digital logic. Four 8-bit ADCs sample at 200 Ms/s. The logic
forms I, Q, U and V for every sample set, averages them over 2^16 periods of
20 ns, and gives one 16-bit value of each parameter every 1.31 ms to a host PC
on an 8-bit ISA bus.

The design targets a small FPGA with a 100 MHz clock. Most of what is unusual
in it comes from one problem: at that clock, an 8x8 multiply and the adds
after it do not settle in one 10 ns cycle. The logic therefore widens the data
path twice, so that every multiplier gets 20 ns.

## Signals and arithmetic

| ADC  | signal      | used as |
|------|-------------|---------|
| ADC1 | Re(E_LCP)   | a1      |
| ADC2 | Im(E_LCP)   | a2      |
| ADC3 | Re(E_RCP)   | a3      |
| ADC4 | Im(E_RCP)   | a4      |

For one set of four samples:

    I = a1^2 + a2^2 + a3^2 + a4^2          total power
    Q = 2 (a1 a3 + a2 a4)                  2 Re(E_RCP E_LCP*)
    U = 2 (a1 a4 - a2 a3)                  2 Im(E_RCP E_LCP*)
    V = a1^2 + a2^2 - a3^2 - a4^2          circular part

I and V share the four squares, so one set needs eight multipliers
(`stokes_unit`). Samples are 8-bit two's complement.

Widths along the path, with the exact range of each value:

| point                           | width       | range                          |
|---------------------------------|-------------|--------------------------------|
| ADC sample                      | 8 signed    | -128 .. 127                    |
| Stokes of one set               | 18 signed   | I 0..65536, Q -65024..65536, U +-65280, V +-32768 |
| sum of four sets (one period)   | 19 signed   | saturated to -262144..262143   |
| integrator input register       | 16 signed   | the 16 MSBs of the 19 bits     |
| accumulators                    | 24 signed   | sum of 256 16-bit values       |
| integrated result               | 16 signed   | the 16 MSBs of the 24 bits     |

The 19-bit period sum holds every value but one. When all 16 products of a
period equal +16384 (every sample at -128), I or Q would reach 262144. The
combiner then clips the sum to 262143. With signals at about half the ADC
range, as the receiver is set up to give, this never happens.

## Buying time: two interleaves

Each ADC already interleaves its output: on every 100 MHz cycle it gives two
samples, N0 (sample n-1) and N1 (sample n), on a 16-bit bus. The four ADCs
thus bring 64 bits per cycle, 6.4 Gb/s in all.

1. **Input ranks** (`input_sync`). A first register captures the 64 bits with
   `clk_skew`, a copy of the clock phase-shifted so that its rising edge is in
   the middle of the ADC data eye. A second register moves them to the main
   clock `clk`. From then on every sample is stable for a full cycle.

2. **Second interleave** (`deinterleave`). Consecutive 100 MHz cycles are
   grouped in pairs (T, T+1). In the first cycle of a pair the samples go into
   a hold register. At the end of the second cycle the held samples and the
   current ones are loaded together into the pair registers t1 (time T) and
   t2 (time T+1). There are four per ADC, e.g. `n0_t1[0]`, `n1_t1[0]`,
   `n0_t2[0]` and `n1_t2[0]` for ADC1. They then stay constant for 20 ns:

        cycle        0     1     2     3     4     5
        ADC1 N0      5     8     6     7    10     2
        ce20         0     1     0     1     0     1
        n0_t1[0]     -     -     5     5     6     6
        n0_t2[0]     -     -     8     8     7     7

   The scheme is described as registers on a 50 MHz clock, loaded on its
   rising and falling edges. Both edges of such a clock fall on rising edges
   of the 100 MHz clock. So here the same registers run on `clk` with a clock
   enable `ce20` that is high every other cycle. Everything stays in one
   clock domain.

3. **Stokes calculation** (four `stokes_unit`s and `stokes_combiner`). Four
   units work in parallel on N0(T), N1(T), N0(T+1) and N1(T+1), which is 32
   multipliers. The combiner adds the four results,

        S = S_N0(T) + S_N1(T) + S_N0(T+1) + S_N1(T+1)

   and registers S at the end of the next `ce20` cycle. The path from the
   pair registers through the multipliers to this register is therefore a
   **two-cycle path**. For synthesis it needs a multicycle constraint
   (setup 2, hold 1) from the pair registers to the combiner register. The
   constraint is not part of the RTL. Without it, a timing tool checks the
   path against 10 ns.

A sample reaches the combiner register four `clk` edges after the `clk_skew`
edge that captured it if it is a T+1 sample, and five if it is a T sample,
which waits one cycle in the hold register.

## Integration

Each parameter has its own `stokes_integrator`. In each one, three registers
and two accumulate-and-dump stages (`accum_stage`) are in cascade:

    S (19 bit, every 20 ns)
      -> REG: keep bits 18..3            16 bit
      -> accumulate 256 values           24 bit, counter M (8 bit)
      -> REG: keep bits 23..8            16 bit, every 20 ns x 2^8 = 5.12 us
      -> accumulate 256 values           24 bit, counter N (8 bit)
      -> REG: keep bits 23..8            16 bit, every 20 ns x 2^16 = 1.31 ms

In each stage, the sum goes back to the adder while the counter is below its
maximum. On the count that reaches the maximum, the sum of the last 256 inputs
goes to the output register and the accumulator starts again from zero. No
input is lost between two results. Taking the top 16 of 24 bits divides by
256, so each stage outputs the mean of its inputs. Both divisions round toward
minus infinity.

What the number means: a result is the mean over 65536 periods of S/8, so

    result ~ (1/2) x mean of the per-sample-set Stokes value

within the truncation of the two stages. A constant input with per-sample
I = 2000 gives a result of about 1000. The three bits dropped at the input
cost nothing useful. Before integration the signal is noise, and its
resolution only builds up with averaging.

The counter widths `CNT_M_W` and `CNT_N_W` (default 8 and 8) are parameters
of the integrator and of the top. Smaller values shorten the integration for
simulation.

## Reading the results over ISA

`isa_interface` is an 8-bit I/O read slave. Address lines A[11:4] are compared
with the base `BASE_ADDR` (default 0x30, which puts the window at I/O ports
0x300-0x30F). A[3:0] selects the byte:

| offset | byte      | offset | byte      |
|--------|-----------|--------|-----------|
| 0      | I [15:8]  | 4      | U [15:8]  |
| 1      | I [7:0]   | 5      | U [7:0]   |
| 2      | Q [15:8]  | 6      | V [15:8]  |
| 3      | Q [7:0]   | 7      | V [7:0]   |
| 8      | status    | 9-15   | 0x00      |

The data bus output `isa_d` and its enable `isa_d_oe` are combinational.
`isa_d_oe` is high while the window is addressed, /IORD is low and AEN is low
(AEN high marks a DMA cycle). An external tri-state pad drives D[7:0] from
them.

Status byte:

- bit 0 READY: a new I, Q, U, V set was latched since the last status read.
- bit 1 OVERRUN: a set was latched while READY was still set, so the host
  missed one.
- bits 7..2 read as 0.

Both flags are cleared at the end of an ISA read of the status byte. /IORD is
synchronised to `clk` first. The read is recognised at its start and the flags
are cleared only when /IORD rises, so the byte does not change while the host
samples it. If a new result arrives in the same cycle as the clear, READY
stays set.

A host polls the status byte. When READY is set, it reads offsets 0-7 and
joins each pair of bytes into a signed 16-bit value. A new set arrives every
1.31 ms, and eight ISA cycles take about 10 us, so the host has plenty of
margin. The data bytes read straight from the integrators' output registers.
A read that straddled a result update would mix two sets; there is no
snapshot register.

## Interface of the top, `gem_correlator`

| port           | dir | width | meaning |
|----------------|-----|-------|---------|
| `clk`          | in  | 1     | 100 MHz clock |
| `clk_skew`     | in  | 1     | `clk` phase-shifted to the centre of the ADC data eye (from a PLL or delay outside) |
| `rst_n`        | in  | 1     | asynchronous active-low reset, clears every register |
| `adc_n0`       | in  | 4x8   | sample N0 of ADC1..ADC4, element 0 = ADC1 |
| `adc_n1`       | in  | 4x8   | sample N1 of ADC1..ADC4 |
| `isa_a`        | in  | 12    | ISA A[11:0] |
| `isa_iord_n`   | in  | 1     | /IORD |
| `isa_aen`      | in  | 1     | AEN |
| `isa_d`        | out | 8     | byte for D[7:0] |
| `isa_d_oe`     | out | 1     | drive D[7:0] |
| `result`       | out | 4x16  | latest integrated I, Q, U, V (`stokes_int_t`) |
| `result_valid` | out | 1     | one-cycle strobe per result |
| `status`       | out | 8     | status byte |

Parameters: `CNT_M_W = 8` and `CNT_N_W = 8` set the integration lengths.
`BASE_ADDR = 8'h30` sets the ISA window.

Timing after reset: the first cycle after reset is T of the first pair. The
first result comes after 2^16 periods, 131072 cycles plus the pipeline, and
the next ones follow exactly 131072 cycles apart.

The ADCs, the receiver in front of them, the clock phase shifter and the PC
are not part of the RTL. Their signals are the ports above.

## Files

| file | contents |
|------|----------|
| `rtl/gem_pkg.sv` | widths, the sample and Stokes struct types, register map, saturation function |
| `rtl/input_sync.sv` | two-rank input register |
| `rtl/deinterleave.sv` | second interleave to 20 ns |
| `rtl/stokes_unit.sv` | Stokes of one sample set, 8 multipliers |
| `rtl/stokes_combiner.sv` | sum of four sets, saturation, 20 ns register |
| `rtl/accum_stage.sv` | accumulate-and-dump stage |
| `rtl/stokes_integrator.sv` | 16-MSB register and two stages |
| `rtl/isa_interface.sv` | ISA read slave and status register |
| `rtl/gem_correlator.sv` | top |
| `tb/gem_ref_pkg.sv` | integer reference models for the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, three for the whole chip |

## Simulation

Every testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. To build and run one with Verilator 5:

    verilator --binary --timing --assert --timescale 1ns/1ps \
        -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/gem_pkg.sv tb/gem_ref_pkg.sv tb/tb_gem_correlator.sv \
        --top-module tb_gem_correlator -o sim
    ./obj_dir/sim

What the testbenches check:

- `tb_stokes_unit`: all 81 combinations of -128, 0 and 127, plus 5000 random
  sets, against integer arithmetic.
- `tb_stokes_combiner`: random and extreme inputs, including the case that
  saturates, the `ce`/`in_valid` gating, and one result per two cycles.
- `tb_input_sync`: data that change 7 ns after the clock edge, captured 2 ns
  after it, come out unchanged two edges later.
- `tb_deinterleave`: the pairing of cycles into (T, T+1), the sequence
  5, 8, 6, 7, 10, 2, ... into the pairs (5,8) (6,7) (10,2), loads on every
  second cycle only, and stable pair registers in between.
- `tb_stokes_integrator`: full size, 3 x 65536 random inputs. Every
  first-stage dump and every result is checked against a model. Also checked:
  65536 inputs per result and a latency of 3 cycles after the last input.
- `tb_isa_interface`: the register map over the whole window, no drive for
  another base address, for AEN high or outside /IORD, and READY and OVERRUN
  set and cleared.
- `tb_gem_correlator`: the whole chip with 2^3 x 2^3 periods per result.
  Random samples with full-scale bursts feed an independent model of the
  whole path. Every result is compared on the port and over ISA, with
  exact result spacing (2 x 2^6 cycles). A host process polls the status byte, reads the
  bytes, lets two results pass unread to provoke OVERRUN, and makes reads the
  chip must ignore. Each of these mechanisms is counted and must occur.
- `tb_polarized_source`: the whole chip observing synthetic polarised
  signals. E_RCP = E_LCP exp(j phi) for six angles phi must give
  Q/I = cos phi, U/I = sin phi and V = 0, and LCP or RCP alone must give
  V/I = +1 or -1. The expected values come from the physics of the input, not
  from a model of the logic. The recovered ratios agree to within 0.005.
- `tb_gem_correlator_full`: the same test at the default parameters. Five
  results of 1.31 ms each take about 660,000 cycles, a few seconds of
  Verilator time.

## Where this RTL follows its source and where it chooses

Taken from the original design:

- the ADC-to-field mapping and the Stokes equations
- two samples per ADC per 100 MHz cycle
- the skewed-clock input register followed by the main-clock register
- the second interleave into T and T+1 pair registers, and the sum over
  N0/N1 at T and T+1
- the 19-bit input of the integrator, cut to 16 bits
- two cascaded 256-sample accumulate stages with 8-bit counters and 24-bit
  accumulators, and the 1.31 ms result rate
- the 8-bit ISA interface: A[11:4] comparator, A[3:0] multiplexer over
  I, Q, U, V and a status register, two byte cycles per parameter, /IORD and
  AEN control

Choices of this RTL, where the source says nothing or little:

- two's complement samples
- saturation of the one overflowing period sum
- the 50 MHz stage built as a clock enable on the 100 MHz clock, with a hold
  register so that t1 and t2 load on the same edge
- which cycles pair up after reset
- the dump-and-restart rule of the accumulators
- the asynchronous reset
- the register map and byte order, base address 0x300, and the contents and
  clearing of the status byte
- the /IORD synchroniser
- the output enable as "window addressed, /IORD low, AEN low"
- the `result`/`status` observation ports

The original was written in VHDL for an Altera Cyclone II (EP2C8). There it
used 32 of the 36 embedded 9-bit multipliers, the same count as the four
`stokes_unit`s here.

## Known limits

- Timing closure at 100 MHz depends on the two-cycle constraint on the Stokes
  path described above. No timing analysis comes with this RTL.
- The eight data bytes of one set are not frozen while the host reads them.
  A host that starts reading late, close to the next 1.31 ms update, can mix
  two sets. Reading right after READY avoids this.
- The sample encoding of the ADCs is taken as two's complement. For
  offset-binary ADCs, invert the MSB of every sample in front of
  `input_sync`.
- The skewed capture clock, the ADCs and the tri-state data pad are outside
  the RTL.
