# Logic for a cryogenic FPGA instrument

This design is the logic for an instrument that runs a commercial FPGA (a
Xilinx Artix-7 XC7A50T) at about 4 kelvin. The instrument sits beside the
quantum devices or detectors it serves, inside a dilution refrigerator. Putting
the electronics inside the cryostat cuts the wiring that has to cross from room
temperature. It also lets signals be processed close to the device, with low
latency. Only three coax lines come in from outside: a clock, a serial input
and a serial output. The FPGA board has five expansion slots for
"daughterboards" such as DACs. Two are high-speed slots with 32 differential
pairs each. Three are low-speed slots that share one 18-line bus.

When cooled, the FPGA's logic, block RAM, DSP slices and single-ended I/O all
still work. Its PLLs and LVDS outputs stop working. Everything here therefore
runs from the input clock directly, and any slower clock comes from a plain
counter.

The RTL covers three parts:

* **The DSP-block benchmark.** It found the highest clock rate at which the
  cooled FPGA still computes correctly. Thirty 16×16-bit multiply-accumulate
  (MAC) lanes each sum 1000 products of pseudo-random numbers into a 48-bit
  accumulator. Each sum is compared with its known answer. This repeats for
  32 runs, 960,000 MACs in all. A clock rate counts as error-free when the
  whole test passes with no mismatch.
* **The low-speed daughterboard bus.** It has a clock line, a sync line and
  16 data lines. Each packet is an address word, then a command word, then any
  number of 16-bit data words.
* **Host link and clocking.** A serial receiver and transmitter run on the
  two communication coax lines. A command decoder connects them to the
  benchmark and to the bus. A clock-divider block derives the serial bit
  timing and the bus clock.

The instrument's measured sizes are kept: 30 lanes, 16-bit operands, 48-bit
accumulators, 1000 products, 32 runs and 16 data lines. Many details are not
documented, for example the serial framing, the host command set and the
timing of the bus sync line. For these, this RTL makes its own choices, and
each module's header says which is which. Everything below marked *(own
choice)* is such a case.

## Block structure

```
            clk ──► clock_gen ──► ser_tick (16x bit rate) ──► uart_rx, uart_tx
                         └──────► ls_clk (bus clock line), ls_fall strobe ──► lsbus_tx
 ser_in ──► uart_rx ──► host_cmd ──► uart_tx ──► ser_out
                          │  ├── expected values, start ──► mac_benchmark ──► error count, MACs, sums
                          │  └── words, addr, cmd, len ───► lsbus_tx ──► ls_sync, ls_data[15:0]
                     (30 × operand_gen + mac_unit inside mac_benchmark)
```

| file | what it is |
|---|---|
| `rtl/cryo_pkg.sv` | shared sizes, host opcodes, the xorshift32 step and per-lane seeds |
| `rtl/mac_unit.sv` | one DSP-slice-style 16×16 → 48-bit multiply-accumulate lane |
| `rtl/operand_gen.sv` | restartable pseudo-random operand source for one lane |
| `rtl/mac_benchmark.sv` | 30 lanes, expected-value table, run sequencer, error counters |
| `rtl/clock_gen.sv` | counter dividers: serial tick, bus clock line, bus strobe |
| `rtl/uart_rx.sv`, `rtl/uart_tx.sv` | 8N1 serial receiver and transmitter *(own choice of format)* |
| `rtl/lsbus_tx.sv` | low-speed bus master with a 64-word packet buffer |
| `rtl/host_cmd.sv` | host command decoder *(own protocol)* |
| `rtl/cryo_fpga_top.sv` | the FPGA top level |

## The benchmark, cycle by cycle

Each lane has an `operand_gen` that holds a 32-bit xorshift32 state
(`x ^= x<<13; x ^= x>>17; x ^= x<<5`). Its upper 16 bits are operand A and its
lower 16 bits are operand B, both signed. Every run starts again from the
lane's seed:

    seed(lane) = 0x2545F491 ^ ((lane + 1) * 0x9E3779B9)   (32-bit arithmetic)

So every run of a lane gives the same sum, and the host can compute that sum
offline. The original test used "pre-generated random numbers" without saying
how. A generator stands in for a stored table *(own choice)*.

`mac_unit` is registered like a fully pipelined DSP48E1: input registers, then
a product register, then the accumulator. The effect of an operand pair shows
in the accumulator three clocks after the pair. A `first` flag loads the
product instead of adding it, which starts a new sum without a separate clear
cycle. The worst-case sum is 1000 × 2^30, which needs 41 bits, so the 48-bit
accumulator cannot overflow.

`mac_benchmark` runs each run as a fixed sequence of states:

| state | cycles | what happens |
|---|---|---|
| RESTART | 1 | every generator reloads its seed |
| ISSUE | 1000 | one operand pair per lane per clock; the first pair carries `first` |
| DRAIN | 2 | the last pair passes through the pipeline |
| COMPARE | 1 | all 30 sums are compared with the table at once |

A test therefore takes 32 × 1004 = 32,128 clocks, about 86 µs at 374 MHz. (That
is the fastest error-free clock measured at 4 K with a 1.0 V core.) Each
(run, lane) pair that mismatches adds one to `err_count`. It also sets the
lane's bit in `lane_err`. `mac_count` counts the MACs issued, 960,000 for a
full test. The host writes the expected sums into a 30-entry table before the
test *(own choice: where the original test compared its results is not
stated)*. An assertion checks that the table is never written during a test.
Another checks that the comparison only happens after every lane's final sum
has arrived.

On the real part, errors come from timing failures at too high a clock or too
low a core voltage. In simulation the logic is always right. The testbenches
show that the error counter works by writing a wrong expected value.

## The low-speed bus

The three low-speed slots share 18 lines: `ls_clk`, `ls_sync` and
`ls_data[15:0]`. The word framing follows the documented use of the bus: an
address word, a command word, then the data. The following are *(own
choice)*:

* The FPGA only drives the bus, since the documented use only sends words
  to the daughterboards. Nothing is read back over it.
* `ls_clk` runs all the time. Its period is 2 × `LS_HALF` system clocks, 8 by
  default.
* A word changes when `ls_clk` falls. The daughterboard samples it when
  `ls_clk` rises.
* `ls_sync` is high for every word of a packet and low between packets. A
  receiver can therefore see where a packet starts and ends from `ls_sync`
  alone, with no length field.
* Data words are first written into a 64-word buffer. The packet then goes out
  without gaps, one word per `ls_clk` period. A `len` larger than the number
  of buffered words is cut down to that number.

A packet with n data words keeps sync high for n + 2 bus clock periods.

## Host link

The serial lines use 8N1: one start bit, 8 data bits sent LSB first, one stop
bit. Each bit lasts 16 ticks of `ser_tick`. With `SER_DIV = 54` and a 100 MHz
clock that is 115,200 baud. The receiver synchronises its input and samples
each bit in the middle. A bad stop bit drops the byte and raises a sticky
framing-error flag.

Commands, with multi-byte fields sent big-endian *(own protocol)*:

| bytes sent | effect | reply |
|---|---|---|
| `10 lane e5..e0` | write a lane's 48-bit expected sum | none |
| `20` | run the benchmark | `A0 err_hi err_lo lanes_failed` when it ends |
| `30 ah al ch cl n d0h d0l ...` | send a bus packet with n data words (n ≤ 64) | `B0` once it is sent |
| `40` | status | `C0 m3 m2 m1 m0 flags` (MAC count; bit 0 = test done, bit 1 = framing error seen) |
| `50 lane` | read a lane's accumulator | `D0 a5..a0` |

Unknown opcodes are dropped. Bytes that arrive while a command is executing
are ignored.

## Top-level ports

`cryo_fpga_top` has these ports: `clk`, `rst_n` (an active-low synchronous
reset, *own choice*), `ser_in`, `ser_out`, `ls_clk`, `ls_sync` and
`ls_data[15:0]`. Its parameters default to the sizes above: `NUM_MAC = 30`,
`ACC_LEN = 1000`, `NUM_RUNS = 32`, `SER_DIV = 54`, `LS_HALF = 4` and
`MAX_WORDS = 64`.

## What is not here

* **High-speed slots.** They have 32 differential pairs each, but no protocol
  is documented for them, so they have no logic and no ports.
* **JTAG chain.** The chain runs from the FPGA through the three low-speed
  slots, and jumpers bypass empty slots. This is board wiring, not logic.
* **MicroBlaze soft processor.** It ran on the cooled FPGA and used about
  8.6k flip-flops, 7.2k LUTs and 1.5 Mb of block RAM. It is vendor IP and is
  not included.
* **Daughterboards.** Their logic (for example DAC data parsing on Spartan
  FPGAs) is not documented. A behavioural bus receiver is provided as a
  testbench model only.
* **Cold-specific analog parts.** The I/O buffers, the PLLs (which do not work
  cold), the on-die temperature diode and the power distribution have no logic
  and are not modelled.

## How far to trust it

The sizes and the benchmark's structure follow the instrument. Much else is
this design's own choice: the serial format, the host commands, the bus sync
timing and buffer, the generator in place of stored random numbers, the
on-chip comparison, the pipeline depth and the reset. A real daughterboard or
host program would have to match these choices. The design has been linted
with Verilator (`-Wall`, no lint errors) and elaborated with the yosys slang
front end. It has not been placed and routed for the XC7A50T, so 374 MHz is
the measured device limit, not a timing result for this RTL.

## Simulating

Every testbench checks itself and ends by printing
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/cryo_pkg.sv tb/tb_cryo_fpga_top.sv --top-module tb_cryo_fpga_top -o sim
./obj_dir/sim
```

| testbench | covers |
|---|---|
| `tb_mac_unit` | random products, restarts and gaps against a reference accumulator; 3-cycle latency |
| `tb_operand_gen` | the sequence against a separate xorshift32, restart and hold |
| `tb_mac_benchmark` | 4 lanes × 50 × 3 runs with 0, 1 and 2 wrong lanes; error count, lane mask, MAC count, sums and the exact test length |
| `tb_clock_gen` | tick period, bus clock period and duty cycle, strobe placement |
| `tb_uart` | receive with ±1 clock of bit-rate error, framing error, transmit bit timing |
| `tb_lsbus_tx` | packets of 0, 1, 5 and 8 words plus a clipped one, decoded by the daughterboard model; data stable at each sampling edge |
| `tb_host_cmd` | every command, with stand-ins for the benchmark and the bus |
| `tb_cryo_fpga_top` | the whole chip at its default sizes, driven only through its pins (see below) |

`tb_cryo_fpga_top` acts as the host over the serial lines. It:

1. writes the 30 expected sums it computed itself;
2. runs the full 960,000-MAC test and expects no errors;
3. reads the status and one accumulator;
4. writes one wrong sum and expects 32 errors in 1 lane;
5. sends a 3-word packet and an empty one, which the daughterboard model
   decodes;
6. sends a frame with a bad stop bit and expects the error flag.

It counts each of these mechanisms and fails if one never happens. It
simulates about 28 ms of chip time in a few seconds. `tb/lsbus_daughter_model.sv`
is the behavioural bus receiver that the bus and top-level testbenches share.

To change the size of the benchmark, override `NUM_MAC`, `ACC_LEN` and
`NUM_RUNS` on `cryo_fpga_top` or `mac_benchmark`. The host must then compute
its expected sums with the same seeds and length.
