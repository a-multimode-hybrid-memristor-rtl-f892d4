# Hybrid memristor/CMOS prototyping die: RTL and behavioural models

Memristors (resistive RAM) behave in ways that device models predict poorly.
They are noisy, they vary from one device to the next and from one cycle to
the next, and they wear out. A computing idea that uses them has to be tried
on silicon. This die is a prototyping platform for such ideas. It holds an
array of 8,192 hafnium-oxide memristors above a 130 nm CMOS periphery, and it
lets the same devices be used in two quite different ways:

* **Digital mode.** The array is an ordinary memory. Decoders select a
  device, and high-voltage level shifters form and program it. Each bit is
  stored in two devices with opposite states (a *complementary* 2T2R cell).
  Precharge sense amplifiers read a whole row and can XNOR each bit with an
  input bit as they read: this is "logic in memory", the core operation of a
  binarized neural network.
* **Analog mode.** The digital periphery is switched off. Every word line,
  bit line and source line is connected through a transmission gate to
  ground or to one of two analog pads. An external pulse generator and
  source-meter can then apply any waveform to chosen devices and measure
  their resistance directly.

A typical experiment uses both. For example, a device is programmed millions
of times through the digital mode, and its resistance is checked now and then
through the analog mode.

This repository gives synthesizable SystemVerilog for the digital periphery
of the die. It also gives behavioural models of the analog parts: the
memristor array, the level shifters, the sense amplifiers and the line
multiplexers. With these models the whole die can be simulated in Verilator,
from the pins down to device resistances.

## Block structure

```
                 mode_req ──► mode_ctrl ──► dig_active / ana_active
                                  ▲ busy
 command pins ──► digital_ctrl ───┤
                   │  │   ▲ sa_q
       row_decoder ◄┘  └► col_decoder
            │               │ bl_sel / sl_sel
   level_shifter x64   level_shifter x128 (BL) + x128 (SL)
            │               │
            ▼               ▼
   analog_mux_bank (WL)  analog_mux_bank (BL, SL) ◄── analog_config_sr x3 ◄── serial pins
            │               │      ▲                                  pad_v / pad_i
            ▼               ▼      │ line currents
                 rram_array_2t2r ──┘
                      │ bl_g (conductances)
                      ▼
                 pcsa x64 ──► sa_q
```

| file | kind | role |
|---|---|---|
| `mm_pkg.sv` | package | default sizes, `op_e`, `line_sel_e`, `mode_e` |
| `memristor_platform.sv` | top (simulation) | wires everything below |
| `digital_ctrl.sv` | RTL | digital-mode command sequencer |
| `row_decoder.sv`, `col_decoder.sv` | RTL | address decoding |
| `mode_ctrl.sv` | RTL | digital/analog switch-over |
| `analog_config_sr.sv` | RTL | per-line analog configuration chain |
| `level_shifter.sv` | behavioural | logic level to programming voltage |
| `analog_mux_bank.sv` | behavioural | transmission-gate line multiplexers |
| `pcsa.sv` | behavioural | precharge sense amplifier with XNOR |
| `rram_array_2t2r.sv` | behavioural | the 8,192 memristors and their access transistors |

The top has real-valued ports: the three high-voltage rails and the two
analog pads. Because the analog blocks inside it are models, the top is for
simulation only. The five RTL blocks synthesize on their own.

## The array and the complementary cell

Only the total of 8,192 devices is fixed. This design arranges them as 64
word lines by 64 *cell columns*. Each cell column holds two *device columns*,
left (even, `2c`) and right (odd, `2c+1`), so there are 128 device columns.
Each device column has its own bit line (BL) and its own source line (SL).
Each device is in series with an access transistor whose gate is the word
line (WL).

A bit is stored as a pair. **Bit 1** means the left device is in the
low-resistance state (LRS) and the right one in the high-resistance state
(HRS). Bit 0 is the reverse. The sense amplifier compares the two devices
with each other, not with a reference. A device whose window has narrowed a
lot is therefore still read correctly as long as it differs from its partner.
This is why the complementary scheme lowers the bit error rate.

Polarity, with bias = V(BL) − V(SL) across a selected device:

| action | WL | BL | SL |
|---|---|---|---|
| forming (first SET of a pristine device) | `v_wl` | `v_bl`, raised to the forming level | 0 |
| SET (to LRS) | `v_wl` | `v_bl` | 0 |
| RESET (toward HRS) | `v_wl` | 0 | `v_sl` |
| read (digital) | `v_wl` | sensed by the PCSA | 0 |

`v_wl`, `v_bl` and `v_sl` are top-level inputs: the supplies of the word-line,
bit-line and source-line level shifters. The level shifters only switch a
line between 0 V and its rail. The voltage of each operation is set by the
board, so programming conditions can be tuned without changing the die. The
word-line voltage matters as much as the others. The access transistor limits
the SET current, so a higher `v_wl` gives a lower LRS resistance.

## Digital mode

### Command interface

A command is held on `op, row, col, side, wdata, xnor_vec, pulse_cycles` and
`start` is raised for one cycle. The controller takes it only when it is idle
and the digital mode is active. `busy` covers the operation and `done` pulses
for one cycle at its end. `pw = max(pulse_cycles, 1)` is the programming
pulse width in clock cycles.

| `op` | what happens | `done` in cycle (after the accepting edge) |
|---|---|---|
| `OP_READ` | row `row`: 1 cycle precharge, 1 cycle evaluate; `rdata[c]` = bit(c) XNOR `xnor_vec[c]` | 3 |
| `OP_WRITE` | cell (`row`,`col`) ← `wdata`: SET pulse on the device that must be LRS, one idle cycle, RESET pulse on its partner | 2·pw + 2 |
| `OP_FORM` | cell (`row`,`col`): SET-polarity pulse on the left device, idle cycle, same on the right | 2·pw + 2 |
| `OP_SET` | one SET pulse on device `side` of cell (`row`,`col`) | pw + 1 |
| `OP_RESET` | one RESET pulse on device `side` of cell (`row`,`col`) | pw + 1 |

During a pulse, the selected word line and one bit line or one source line
are at their rails, and every other line is at 0 V. The controller never
drives both devices of a pair at once, nor a bit line and a source line
together. An assertion checks this. `OP_FORM` differs from `OP_WRITE` only in
polarity. The board raises `v_bl` to the forming voltage before a forming
sweep.

### Reading with XNOR

The precharge sense amplifier is a latch. It has two branches, one for each
device of the cell. While `sa_en` is low, both outputs are precharged high.
When `sa_en` rises, the branch through the more conductive device discharges
first and the latch resolves. The input bit swaps the two branches, so the
result is the stored bit XNOR the input. `xnor_vec` of all ones gives a
plain read. Any other vector gives 64 binary multiplications (±1 × ±1) in one
read. This is the operation a binarized neural network layer needs; a
popcount of `rdata` completes it off chip. When the two conductances differ
by less than the amplifier offset (`G_OFFSET`), the model resolves at random.
This is how a worn-out cell shows up as bit errors.

## Analog mode

### Configuration chains

There are three shift registers: one for the 64 word lines, one for the 128
bit lines and one for the 128 source lines. They share `sr_shift` and each
has its own serial input and output. Each line has a two-bit `line_sel_e`
code:

| code | line connects to |
|---|---|
| `00` | ground |
| `01` | analog pad A |
| `10` | analog pad B |
| `11` | ground |

One bit enters per clock while `sr_shift` is high, and the register moves
toward bit 0. After 2·N shifts, the first bit shifted in is the low bit of
line 0. **So shift line 0 first, low bit first.** The word-line chain is
shorter than the other two. When all three are loaded together (2·128
shifts), its 128 meaningful bits must be the last ones sent. The chain
outputs act on the lines directly; there is no shadow latch. Load the chains
while the chip is in the digital mode, or with both pads at 0 V. Reset sets
every line to ground.

### Measuring a device

To measure device (r, d), with d the device column:

1. Set WL r to pad B, BL d to pad A, and everything else to ground.
2. Switch to the analog mode.
3. Force the gate voltage on pad B and a small read voltage on pad A (0.1 V in
   the testbenches).
4. R = V(pad A) / I(pad A).

`pad_i` is the current flowing into the die at each pad: the sum of the
currents of every line connected to that pad. To apply RESET pulses instead,
put SL d on pad A and BL d on ground, and pulse pad A. This is how the
gradual-RESET experiment is run.

### Switching modes

`mode_req` (1 = analog) is synchronised with two flip-flops. A request waits
while the digital controller is busy. The switch-over then passes through a
state in which neither side is connected, for `BBM_CYCLES` cycles (break
before make), so a level shifter and a pad are never shorted through a line.
The change takes 3 + `BBM_CYCLES` cycles in each direction. In the analog
mode the decoders are disabled, the sense amplifiers stay in precharge, and
`start` is ignored.

## Device model

`rram_array_2t2r` keeps, for each device, a resistance, a formed flag and a
count of SET/RESET cycles. A device acts at the leading edge of each pulse,
that is, when its bias crosses a threshold while its word line is above
`VT_ACCESS`:

| event | condition | effect |
|---|---|---|
| forming | pristine, bias ≥ `V_FORM_TH` (2.5 V) | formed, R = `K_LRS`/(V_WL − `VT_ACCESS`) |
| SET | formed, bias ≥ `V_SET_TH` (1.0 V) | R = `K_LRS`/(V_WL − `VT_ACCESS`) |
| RESET | formed, −bias ≥ `V_RESET_TH` (0.8 V) | R += (`R_HRS` − R)·f, with f = ((−bias − 0.8)/(2.0 − 0.8))^5, capped at 1 |
| wear-out | `ENDURANCE` cycles reached | RESET has no effect; the device stays LRS |

A 2 V RESET pulse resets fully in one shot. A 1 V pulse moves the resistance
about 0.013 % of the way to `R_HRS`. 15,000 such pulses take a 5 kΩ device
to about 86 kΩ, a slow and gradual rise that can serve as a synaptic weight
update. The default `ENDURANCE` is 1e9 cycles. The silicon this models shows
endurance anywhere from 1e3 to 1e9 cycles, depending on programming
conditions.

**How far to trust it.** The thresholds, resistances and the RESET law are
plausible values for HfO2 devices, chosen for this model. They are not
measured data. The model only reproduces the *shape* of the behaviour: abrupt
SET with current compliance, gradual RESET, a complementary read, and
wear-out. It ignores:

* pulse width (a pulse acts once, whatever its length);
* read disturb;
* thermal and random telegraph noise;
* device-to-device and cycle-to-cycle variability;
* the on-resistance of the access transistors and transmission gates.

Anyone who needs quantitative results should refit the parameters of
`rram_array_2t2r` to measurements.

## Where this RTL departs from, or adds to, the source design

The published design gives the blocks and what they do, not their circuits or
timing. The following are choices made here:

* The 64 × 64-cell geometry, with a separate BL and SL per device column.
* The pin list. The command interface and the cycle timing of every
  operation. The write order (SET first, then RESET). The bit-1 = left-LRS
  encoding.
* One external rail per line type, instead of per-operation voltages chosen
  on chip.
* The two-bit line code, one chain per line group, the bit order, and no
  shadow latch in the chains.
* The synchroniser, the wait-while-busy rule and the break-before-make
  interval in the mode switch.
* The whole device model (see above), and the sense-amplifier offset.

The analog pads and the external microcontroller and instrument are not
modelled. The pads appear as the `pad_v` and `pad_i` ports, and the
testbenches play the part of the board.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with
a watchdog. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_memristor_platform -y rtl -y tb +libext+.sv \
  rtl/mm_pkg.sv tb/tb_memristor_platform.sv
obj_dir/Vtb_memristor_platform
```

| testbench | what it shows | run time |
|---|---|---|
| `tb_memristor_platform` | full-size die: forming 512 cells, random writes, plain and XNOR reads, single-device SET/RESET, a mode request held off by a busy controller, pad measurements of LRS and HRS, 3,000 weak RESET pulses, commands refused in analog mode; counts each mechanism | ~30 s |
| `tb_gradual_reset` | 15,000 pulses of 1 V through pad A, resistance checked against the law every 1,500 | ~20 s |
| `tb_endurance_study` | one cell written 1/0 for 300 cycles with `ENDURANCE` = 200; no errors and a wide window before, bit errors and a collapsed window after | seconds |
| `tb_<block>` | one per block, self-checking against values computed in the testbench | seconds |

Verilator is a two-state simulator. The array model and the sense amplifiers
initialise themselves; the RTL relies on its reset.

## Changing the design

* Array size: `ROWS`/`COLS` on `memristor_platform` (the defaults are
  `DEF_ROWS`/`DEF_COLS` in `mm_pkg`). The decoders, chains and mux banks
  follow. The configuration chains are 2·`ROWS` and 4·`COLS` bits long.
* Pulse width: per command, `pulse_cycles` (`PW_W` bits wide).
* Device behaviour: the parameters of `rram_array_2t2r`. Only `ENDURANCE` is
  passed through the top; set the others on the array instance.
* Mode switch gap: `BBM_CYCLES`.
