# Programmable trigger logic unit: RAM-based trigger decisions

In triggered data acquisition, a fast logic unit decides from a set of detector
signals whether an event is worth recording. A fixed gate network is fast but
changing it means changing the hardware or the FPGA code. This design makes the
decision with look-up tables instead. The 16 trigger inputs address small
RAMs inside the FPGA, and the stored bits are the truth table of the trigger
condition. A VME master can rewrite those bits at any time. The FPGA code
stays the same, and the time from input to output does not depend on the
function stored.

The design follows the trigger logic module (TRILOMO) described by F. Karstens
and S. Trippel in "Programmable Trigger Logic Unit Based on FPGA Technology"
(University of Freiburg). That work describes a 6U VME board with 16 NIM trigger inputs
and one trigger output. The board has programmable delay lines on every
input, a Xilinx Spartan II FPGA and a CPLD that handles the VME bus. The
SystemVerilog here covers the board's digital logic: the LUT network, the
output pulse former, the delay-line loader and its decoder, the FPGA
registers, the CPLD's VME slave, and the CPLD's loader that configures the
FPGA over VME. Where the published description is
silent, this design makes its own choices. Each one is listed in
[Departures and own choices](#departures-and-own-choices).

## Signal flow

```
 NIM inputs 0..15 --> level conversion --> delay line x16 --> trig_in[15:0]
                                             ^  (10 ps steps,        |
                                             |   0..10.23 ns)        v
                                 dly_d[9:0], dly_len_n[15:0]   trigger_lut_logic --> trig_out_extra (LUT 0)
                                             |                       | trig_lut
                                    delay_decoder                    v
                                             ^                 pulse_shaper --> trig_out
                                    delay_programmer                 ^ width
                                             ^                       |
 VME bus --> bus drivers --> vme_cpld ==local bus==> trilomo_regs ---+--> LUT programming
            (A32/D32)        (A[31:16] = addr_sw)    (16-bit address, 32-bit data)
                              |
                              +-- fpga_config --> cfg_prog_n, cfg_cclk, cfg_din --> FPGA serial port
```

`trilomo_top` contains every box from `vme_cpld` to `pulse_shaper`. The delay
chips, level converters, bus drivers, oscillators, configuration PROM and
power supply are analog or bought parts. They sit outside the top, and their
signals are its ports.

## The LUT network

### Structure

There are five 16x1 RAMs, `lut_ram`. Each reads asynchronously, so a change
of address shows on the output without a clock.

* First stage: LUT *k* (k = 0..3) is addressed by `trig_in[4k+3:4k]`. It can
  hold any Boolean function of those four inputs.
* Second stage: LUT 4 is addressed by the four first-stage outputs. LUT *k*'s
  output is address bit *k*.
* LUT 0's output also leaves the board unshaped, as `trig_out_extra`.

Each LUT has a 2:1 multiplexer on each of its four address lines
(`input_mux`). In standard mode the multiplexers pass the trigger lines (or,
for LUT 4, the first-stage outputs). In write mode all five pass the same
4-bit address from the registers. The decision path is therefore
`trig_in` -> mux -> RAM -> mux -> RAM -> `trig_out`. The path is the same
length for every stored function, and it contains no clock.

### What the 80 bits can express

A function of all 16 inputs would need 2^16 bits. The 80 bits here give
exactly the functions of the form

    trig = g( f0(in0..in3), f1(in4..in7), f2(in8..in11), f3(in12..in15) )

with arbitrary 4-input functions f0..f3 and g. This form covers the usual
trigger conditions when related detectors sit in the same group of four. It
covers coincidences, majorities (m-of-4 per group) and vetoes, such as
"groups 0 and 1, unless group 3". A condition that mixes inputs across groups
inside one term only fits if it can be split this way. Plan the cabling so
that inputs which must be combined first share a group.

The truth tables are written as follows. Bit *i* of LUT *k* (k < 4) is
f_k evaluated at the four inputs `i[3:0]`, where `i[0]` is the group's lowest
input. Bit *i* of LUT 4 is g evaluated at (f0, f1, f2, f3) = `i[3:0]`.
Example: a "2 of 4" majority in a group is `bit i = (popcount(i) >= 2)`. The
combination "(f0 and f1) or (f2 and not f3)" is
`bit i = (i[0] & i[1]) | (i[2] & ~i[3])`.

### Programming sequence

All five LUTs are written through one register, `LUT_CTRL`. Its fields are
the five control lines of the LUT network: LUT address, select-MUX, a
write-enable per RAM, data, and a clock bit.

1. Write `LUT_CTRL` with select MUX = 1. From now on the LUTs no longer
   follow the inputs, and the trigger output is meaningless.
2. For each bit: write `LUT_CTRL` with the address, the RAM-select bit(s),
   the data bit and clock = 0. Then write the same value with clock = 1. The
   0->1 change of the clock bit produces a single one-clock write strobe. The
   bit is written into every selected LUT, and only in write mode. Several
   RAM-select bits may be set at once, to write the same bit into several
   LUTs.
3. Optionally read `LUT_READ` for each address. In write mode it returns the
   stored bit of all five LUTs at the current address.
4. Write `LUT_CTRL` with select MUX = 0 to return to standard mode.

A full reprogramming therefore takes 160 VME writes (2 per bit). At power-up
all LUTs hold zero, so the trigger output stays low.

## The output pulse

`pulse_shaper` sets the output flip-flop on the rising edge of the LUT
decision itself. The leading edge of `trig_out` therefore carries the timing
of the inputs and no clock jitter. In simulation it appears at the same
instant as the decision. The trailing edge is clocked. While the output is
high, a counter on `clk` counts the setting *w* (`PULSE_WIDTH`, clamped to
1..6). It then clears the flip-flop through its asynchronous reset for one
clock period. With the assumed 200 MHz clock:

| setting | pulse length        |
|---------|---------------------|
| 0, 1    | > 5 ns, <= 10 ns    |
| 3       | > 15 ns, <= 20 ns   |
| 6, 7    | > 30 ns, <= 35 ns   |

The length is between *w* and *w*+1 clock periods, depending on where the
trigger falls between clock edges. The pulse is not retriggerable: a second
decision while it is high is ignored. A decision during the one-period clear
is lost. The time to re-arm is therefore up to (w+2) x 5 ns after the leading
edge, which guarantees a rate of about 66 MHz at w = 1. Higher rates up to
100 MHz get through only when the trigger phase happens to suit the clock.

Because the flip-flop is edge-triggered, a glitch in the LUT decision also
fires it. A glitch occurs when inputs that belong together arrive at different
times. The per-input delay lines exist to prevent this. The end-to-end test
first cancels a random cable skew with them, and only then checks that each
input pattern gives exactly the expected number of pulses.

## Input delay lines

Each input passes through a programmable ECL delay chip (MC100EP195 type). Its
10-bit setting is in 10 ps steps, from 0 to 10.23 ns. The chips share a
10-bit data bus. Each chip has a latch enable that is transparent while low
and holds on its rising edge. `delay_decoder` turns a 4-bit chip address and
an enable into the 16 active-low latch enables.

`delay_programmer` stores the 16 settings. A write to `DELAY[i]` marks channel
*i* pending. When idle, the loader takes the lowest pending channel and runs
this sequence: 2 clocks with data and address driven, 2 clocks strobe, 2
clocks hold. One load takes 7 clocks. Back-to-back writes queue up. A channel
that is written again while it is being loaded is loaded a second time, so
every chip ends with the last value written. `DELAY_STATUS` shows whether the
loader is busy and which channels are still pending.

To align inputs with cable or detector skews s_i, program
`DELAY[i] = (max(s) - s_i) / 10 ps`. Add a common offset if you want to stay
away from setting 0.

## VME access

`vme_cpld` is a VME slave for single D32 transfers in A32 space, with address
modifier 0x09 or 0x0D, LWORD low and both data strobes low. A transfer is
taken when A[31:16] equals the 16 address-switch bits `addr_sw`. AS and DS
pass through two flip-flops. Address, data and WRITE are sampled once DS is
seen low. The slave issues one local-bus request (`lb_wr` or `lb_rd` for one
clock) and waits for `lb_ack`. It then drives DTACK low, and for a read also
drives the data (`vme_d_oe` is the bus drivers' direction control). It
releases DTACK when both data strobes are high again. If the FPGA does not
answer within 64 clocks (`LB_TIMEOUT`), as happens while it is unconfigured,
the slave drops the request. It gives no DTACK, so the master's bus timer
ends the cycle, and the slave returns to idle once the strobes are released.
Offsets 0xFF00-0xFF0C are not forwarded; they reach the configuration loader
inside the CPLD. Other transfers (other
boards, A16/A24, D16, block transfers) are not answered. Assertions check
that the local bus never carries a read and a write at once, and that DTACK
is only asserted while DS is.

### Register map (offsets from the board base, 32-bit registers)

| offset          | name         | access | contents |
|-----------------|--------------|--------|----------|
| 0x0000          | LUT_CTRL     | rw     | [3:0] LUT address, [4] select MUX (1 = write mode), [9:5] write enable of LUT 0..4, [10] data, [11] clock (0->1 writes) |
| 0x0004          | LUT_READ     | r      | [4:0] outputs of LUT 0..4 (in write mode: the stored bits at the LUT address) |
| 0x0008          | PULSE_WIDTH  | rw     | [2:0] output pulse width in clock periods, reset 4 |
| 0x000C          | DELAY_STATUS | r      | [0] loader busy, [31:16] channels pending |
| 0x0100 + 4*i    | DELAY[i]     | rw     | [9:0] delay of input i in 10 ps steps, reset 0 |
| 0xFF00 (CPLD)   | CFG_CTRL     | rw     | [0] 1 = hold the FPGA's PROGRAM pin low |
| 0xFF04 (CPLD)   | CFG_STATUS   | r      | [0] INIT, [1] DONE, [2] loader busy |
| 0xFF08 (CPLD)   | CFG_DATA     | w      | 32 configuration bits, MSB first; stalls while the previous word is being sent |

Other offsets read as zero, and writes to them are ignored. All are
acknowledged.

## Loading the FPGA over VME

The FPGA normally configures itself from its PROM at power-up. `fpga_config`,
part of the CPLD, lets a VME master load a different design instead. It
drives the FPGA's serial configuration port. The procedure:

1. Write `CFG_CTRL` = 1, then `CFG_CTRL` = 0. This pulses PROGRAM, which
   clears the FPGA.
2. Poll `CFG_STATUS` until INIT = 1.
3. Write the bitstream to `CFG_DATA`, 32 bits per write, first bit in bit 31.
4. Check DONE in `CFG_STATUS`.

Each bit takes 2 x `CCLK_HALF` clocks (a 50 MHz CCLK at 200 MHz), so one word
takes 128 clocks. A data write that arrives while the previous word is still
being shifted is held. The VME cycle's DTACK comes only when the shifter
takes the new word. The master can therefore write back to back without
polling. A design of about 1.3 Mbit takes roughly 41,000 writes and about
26 ms of shifting.

## Clocking and reset

A single clock `clk` runs the CPLD logic, the registers, the delay loader and
the pulse-width counter. It is assumed to be 200 MHz, so that one width step
is 5 ns. The board carries 50 MHz and 40 MHz oscillators; in the FPGA the
200 MHz clock would come from a clock multiplier, which is not part of this
RTL. `rst_n` is an asynchronous, active-low reset. The LUT RAMs have no reset:
they start at all zeros, as the FPGA configuration loads them. The decision
path and the leading edge of the output do not use the clock.

## Departures and own choices

Taken from the published design:

* 16 inputs, four first-stage LUTs of four inputs, one second-stage LUT, 80
  bits.
* 16x1 RAMs with asynchronous read and a write on a clock edge.
* 2:1 multiplexers that switch the LUT addresses between the trigger lines
  and the VME-supplied address, with one select line for all five.
* The five control lines (LUT address, select MUX, write RAM, clock, data).
* LUT 0's output as an additional trigger output.
* 10 ps x 10-bit delay settings for 16 inputs.
* The 5-30 ns output width.
* An A32/D32 VME slave that reaches the FPGA over a 16-bit address / 32-bit
  data bus.

This design's own choices, where the description says nothing:

* Which input drives which LUT address bit.
* The register addresses, bit positions and reset values. The `LUT_READ`
  read-back register.
* Writes are gated by write mode, and the clock bit is turned into a strobe
  on its rising edge.
* How the pulse width is produced: an edge-set flip-flop with a clocked clear,
  and the 200 MHz clock. The non-retriggering behaviour and the dead time.
* The delay bus (10 data lines, 4 address lines, strobe), the decoder and the
  load sequence.
* The accepted VME cycle types, the 16 address-switch bits, the local-bus
  handshake and its timeout, and one clock shared by CPLD and FPGA.
* How the FPGA is loaded over VME. The description states only that it can
  be. This design uses the FPGA's slave-serial pins, with its own register
  layout, stall behaviour and CCLK rate.

Not included: the GATE, SYNC, RESET and CLK inputs and outputs, and the option
to use eight inputs as outputs. The description names these but does not say
what the trigger logic does with them. Also left out are the LEDs and test
pins, and the other FPGA programs the board can load (counters, prescaler,
I/O register, the COMPASS veto system).

## Files

`rtl/` holds one module per file, plus `trilomo_pkg.sv` with the sizes, the
register map and the `LUT_CTRL` struct. `tb/` holds a self-checking testbench
per module (`<module>_tb.sv`). It also holds the models the tests need:
`vme_master.sv` (VME master), `mc100ep195_model.sv` (delay chip:
transparent latch and a transport delay of setting x 10 ps),
`cable_model.sv` (input skew) and `fpga_serial_model.sv` (the FPGA's serial
configuration port).

`trilomo_top_tb` runs the whole board at its default sizes, through VME
only. It first loads a 128-bit configuration into the FPGA model, writing
back to back so that the writes stall, and checks every bit. It then gives
each input a random skew of up to 8 ns and programs the delay
lines to cancel it. It checks in the chip models that every chip latched its
value, and that a common edge reaches all 16 FPGA inputs together. It then
writes the 80 LUT bits for "2-of-4 in each group; groups 0 and 1, or group 2
without group 3" and reads them back. Next it sends 240 random input patterns
at widths 0, 1, 3 and 6, checking the extra output, the presence or absence
of a pulse, its leading-edge time and its length. Finally it checks that a
second decision inside a pulse is ignored and that foreign VME cycles get no
answer. It counts each of these mechanisms and fails if one never occurs.

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/trilomo_pkg.sv tb/trilomo_top_tb.sv --top-module trilomo_top_tb
./obj_dir/Vtrilomo_top_tb
```

Every testbench ends with a line `TB_RESULT checks=N failures=M`. Replace
`trilomo_top_tb` with any other testbench name to run that block alone. The
testbenches use `$urandom`, and the Verilator flag
`+verilator+rand+reset+2` gives uninitialised state random values.

## Changing the design

* Pulse width range or clock: `pulse_shaper`'s `PW_MIN` and `PW_MAX`
  (clock periods), and `PW_W` together with `trilomo_pkg::PW_W`.
* Delay loading: the `T_SETUP`, `T_STROBE` and `T_HOLD` parameters of
  `delay_programmer`, to meet the chips' latch timing at another clock.
* Board base address: the width `SW_W` of `vme_cpld` (A[31:32-SW_W] is
  compared).
* `vme_cpld`'s `LB_TIMEOUT` (clocks to wait for the FPGA) and `CCLK_HALF`
  (configuration clock half-period in clocks; keep CCLK within the FPGA's
  limit).
* The LUT count and the 16-input width are tied to the 4-input RAM and are
  fixed in `trilomo_pkg`. A wider unit is built by cascading boards, as the
  original module allows. Feed `trig_out` of one board into an input of the
  next.
