# Digital section of a vibrating-gyro conditioning chip

A vibrating MEMS gyroscope measures yaw rate in two steps. First, a primary
mode of the structure is kept oscillating at its mechanical resonance (about
15 kHz) with a fixed amplitude. Then, when the car turns, the Coriolis force
moves energy into a secondary mode at 90° to the first. The amplitude of that
secondary vibration, in phase with the primary motion, is proportional to the
angular rate. The electronics must therefore:

* find and track the resonance (a PLL whose "VCO" drives the primary electrodes),
* hold the drive amplitude constant (an AGC),
* demodulate the secondary pick-off with the PLL's reference. It must also
  remove offset and temperature drift, filter the result to the wanted
  bandwidth and, in closed-loop operation, cancel the secondary motion with a
  force-feedback drive, so that the size of that drive becomes the measure.

This RTL follows the architecture published in *Platform Based Design for
Automotive Sensor Conditioning* (Fanucci, Giambastiani, Iozzi, Marino,
Rocchi). That design keeps the analog front end to a minimum: ADCs, DAC pairs,
amplifiers and references. Nearly all processing is done by a hard-wired DSP
block. A small 8051 microcontroller only supervises: it reads the registers
spread along the chain (for example the PLL lock bit) and handles
communication. The analog cells are configured over JTAG chains. The paper
gives the block structure, bus widths, memory sizes and the list of
processing functions. It gives no internal algorithms, formats or register
maps, so all of those are this design's own and are described below.

## Block diagram

```
              adc_p  adc_s  temp                       dac_p   dac_s
                 │     │     │                           ▲       ▲
  ┌──────────────┼─────┼─────┼─── dsp ───────────────────┼───────┼──┐
  │              ▼     │     │                           │       │  │
  │  ┌─────┐  ┌──────────┐ Q (phase err) ┌──────────┐    │       │  │
  │  │ nco │◄─┤ iq_demod ├──────────────►│drive_pll ├─┐  │       │  │
  │  └──┬──┘  └────┬─────┘               └──────────┘ │  │       │  │
  │     │ sin/cos  │ 2·I (amplitude)     ┌─────┐      │  │       │  │
  │     │          └────────────────────►│ agc ├──────┼──┘       │  │
  │     │◄────────────── freq_word ──────┴─────┴──────┘          │  │
  │     └──────────────► rate_chain (demod, PI, comp, LPF, mod) ─┘  │
  │   register file (16-bit bus)      node mux ──► node_data        │
  └───────────────▲─────────────────────────────────────┬───────────┘
                  │                                     ▼
   8051 SFR bus ─┬┴► bridge ══ 16-bit bus ══╦═ spi_master ─► SPI EEPROM
   (ports)       │                          ╠═ timer16 ──► irq
                 └─► uart ─► RS232/RS485    ╠═ watchdog ─► reset request
                                            ╠═ sram_ctrl ◄─ node_data ─► ext. SRAM
   8051 code/data ─► prog_rom, data_ram     ╠═ dsp registers
   buses (ports)                            ╠═ jtag_master 0 ─► jtag_tap 0 ─► afe_cfg0
                                            ╚═ jtag_master 1 ─► jtag_tap 1 ─► afe_cfg1
```

`gyro_top` contains everything above. The 8051 core itself is not part of
this RTL, so its SFR bus and memory buses are ports of `gyro_top`. The analog
front end connects through the ADC/DAC code ports and the two 32-bit settings
words.

## The signal chain

### Sample rate and number formats

The whole DSP runs on a single sample strobe, `sample_en`: one clock in every
`FS_DIV`. The default is 100, which gives 200 kHz from the 20 MHz system
clock, about 13 samples per 15 kHz period. All arithmetic is signed
fixed-point:

| signal | format |
|---|---|
| ADC codes `adc_p`, `adc_s`, `temp` | 12-bit two's complement |
| demodulator input | ADC code × 16 (16-bit) |
| NCO `sin`/`cos` | Q1.15, ±32767 |
| demodulator outputs I, Q | 16-bit; a pick-off of amplitude A ADC counts gives 8·A |
| NCO frequency word | 24-bit phase step: f = word · fs / 2²⁴ (15 kHz → 1 258 291) |
| DAC codes `dac_p`, `dac_s` | 12-bit offset binary, mid-scale 2048 = no drive |
| DAC pair codes `dac_p_n`, `dac_s_n` | bitwise complement, 4095 − code, for the second DAC of each differential pair |

### NCO (`nco`)

A 24-bit phase accumulator adds the frequency word on every strobe. The sine
is computed without a table. Within each half period the top 15 phase bits
x ∈ [0,1) give the parabola y = 4x(1−x). One correction step,
y − 0.2266·y(1−y), brings it within 0.2 % of a true sine, and the top phase
bit sets the sign. The cosine is the same function a quarter turn ahead.

### Demodulator (`iq_demod`)

The input is multiplied by the sine and by the cosine reference. Each product
goes through two cascaded first-order low-pass stages, acc += in − acc/2^K,
with K = 6 (corner about 500 Hz at 200 kHz). These remove the 30 kHz
double-frequency term. For an input A·sin(ωt+φ), I settles at 8A·cos φ and Q
at 8A·sin φ.

### Drive loop: PLL and AGC (`drive_pll`, `agc`, `pi_ctrl`)

* **Phase.** Q of the primary demodulator is the phase error. A PI loop
  filter (`pi_ctrl`) turns it into the *VCO control* word, and the NCO step
  is `f_center + vco_ctrl`. With the default gains (kp = 2⁻¹, ki = 2⁻¹²) and
  a pick-off of 1000 ADC counts, the loop bandwidth is some tens of Hz. The
  loop filter is limited to ±2²¹ steps (±25 kHz).
* **Lock.** `locked` rises on the 1025th consecutive sample (LOCK_CNT + 1)
  with |phase error| ≤ `lock_th` (default 512). It falls at the first sample
  above the threshold. Software reads it in the DSP status register.
* **Amplitude.** 2·I is the measured amplitude. The AGC's PI controller
  (kp = 2⁻², ki = 2⁻¹⁰) compares it with the set-point (default 16000) and
  gives the *amplitude control* (0…32767). The primary DAC receives
  amplitude control × sin / 2¹⁵, cut to 12 bits.

The PI controller updates only on strobes. It clamps its output to given
limits, and it stops integrating while clamped in the direction of the error
(anti-windup). All gains are shifts that software can change at run time.

### Rate chain (`rate_chain`)

The sense pick-off is demodulated with the same references. The in-phase
part `raw_i` carries the rate; the quadrature part `raw_q` is reported for
trimming. There are two modes, selected by bit 0 of the DSP control register:

* **open loop**: the measure is `raw_i`, and the secondary DAC rests at
  mid-scale;
* **closed loop**: a PI controller driven by `raw_i` sets a force-feedback
  amplitude `fb`. The modulator sends fb·sin to the secondary DAC, which
  cancels the secondary motion, and the measure is `fb`. Leaving closed loop
  clears the controller.

The measure is then compensated:
`comp = ((measure − offset − tc·temp/256) · gain) / 256`, saturated to
16 bits. A first-order output filter `y += (comp − y)/2^k` sets the rate
bandwidth: k = 9 gives about 62 Hz, k = 10 about 31 Hz, covering the
25–75 Hz range of the target product.

### DSP register map (16-bit bus, peripheral 4)

| idx | name | access | meaning (reset value) |
|---|---|---|---|
| 0 | CTRL | rw | [0] closed-loop rate mode (0) |
| 1, 2 | FC_LO, FC_HI | rw | PLL centre word [15:0], [23:16] (1 258 291) |
| 3 | PLL_GAIN | rw | [4:0] kp shift (1), [12:8] ki shift (12) |
| 4 | AGC_SET | rw | amplitude set-point (16000) |
| 5 | AGC_GAIN | rw | [4:0] kp (2), [12:8] ki (10) |
| 6 | LOCK_TH | rw | lock threshold (512) |
| 7, 8, 9 | R_OFFS, R_TC, R_GAIN | rw | rate offset (0), temperature coefficient (0), gain ×1/256 (256) |
| 10 | R_GAIN2 | rw | closed-loop kp (2), ki (8) |
| 11 | R_LPF | rw | output filter shift (9) |
| 12 | NODE_SEL | rw | node sent to the SRAM capture (0) |
| 16 | STATUS | r | [0] PLL locked |
| 17…24 | PH_ERR, VCO, AMP_ERR, AMP_CTRL, AMP, RATE, RATE_RAW, QUAD | r | chain values (VCO = vco_ctrl[23:8]) |
| 25, 26 | FW_LO, FW_HI | r | current NCO frequency word |

Capture nodes (NODE_SEL): 0 adc_p, 1 adc_s, 2 phase error, 3 VCO control,
4 amplitude error, 5 amplitude control, 6 raw rate, 7 quadrature, 8 rate,
9 feedback, 10 NCO sine, 11 dac_p, 12 dac_s, 13 NCO phase, other values
measured amplitude.

## Supervisor side

### SFR bus and bridge

The 8051 reaches the UART directly on its 8-bit SFR bus. Everything else is
reached through the bridge, which uses four SFRs:

| SFR | name | use |
|---|---|---|
| 0xC1 | BADDR | [7:5] peripheral, [4:0] register |
| 0xC2, 0xC3 | BDL, BDH | write: data to send; read: last read result |
| 0xC4 | BCTRL | write 0x01: 16-bit write, 0x02: 16-bit read |

The request is on the 16-bit bus for exactly the one clock after the BCTRL
write. The selected peripheral answers in that same clock, and the bridge
latches the answer. Peripherals: 0 SPI, 1 timer, 2 watchdog, 3 SRAM
controller, 4 DSP, 5 and 6 JTAG chains 0 and 1. `sfr_hit` tells the core
that an external SFR answered. These addresses avoid the standard 8051 SFRs.

### Peripherals

* **UART** (SFRs 0x9A data, 0x9B status [0] tx busy, [1] rx full,
  [2] overrun, [3] framing error, 0x9C/0x9D baud divisor). Frames are 8N1,
  one bit lasts `div` clocks, and the default 174 gives 115200 baud at
  20 MHz. `tx_en` marks a frame in progress, for an RS485 driver.
* **SPI master** (0 data, 1 status, 2 control: [7:0] divider d, [8] chip
  select). Mode 0, MSB first. SCK = clk/(2(d+1)) and a byte takes 16(d+1)
  clocks. Chip select stays under software control so that multi-byte EEPROM
  commands can be framed.
* **Timer** (0 control: run, irq enable, [15:8] prescaler p; 1 reload;
  2 count; 3 flag, write 1 to clear). The flag period is (reload+1)(p+1)
  clocks.
* **Watchdog** (0 enable, which stays set until reset; 1 timeout; 2 kick,
  key 0x5A5A; 3 count). A tick is 256 clocks. Without a kick, `wdt_rst`
  pulses after timeout+1 ticks.
* **SRAM capture** (0 control: start/stop; 1 CPU address; 2 data, with
  auto-increment; 3 sample count; 4 status: capturing/done; 5 capture
  pointer). While capturing, every sample strobe writes the selected DSP
  node to the external 32 K × 16 (512 Kbit) asynchronous SRAM. A write takes
  three clocks: setup, write-enable low, hold. When idle, the controller
  reads the SRAM at the CPU address.

### JTAG to the analog front end

Each chain has a `jtag_master` on the 16-bit bus and a `jtag_tap` in the
front end, joined by the four wires TCK, TMS, TDI and TDO.

* **Master operations.** The master offers test-logic reset, IR scan and DR
  scan of 1–32 bits, each starting and ending in Run-Test/Idle. TCK =
  clk/(2(d+1)). A DR scan of n bits takes n+5 TCK periods.
* **TAP instructions.** The TAP follows IEEE 1149.1 and has a 4-bit IR with
  three instructions:
  * BYPASS (0xF);
  * IDCODE (0x1), selected after reset; chain 0 answers 0x1005A001 and
    chain 1 answers 0x1005A002;
  * CFG (0x2), a 32-bit settings word.
* **Settings word.** Capture-DR loads the current settings, so every write
  scan also reads back the old word. Update-DR applies the new one to
  `afe_cfg0`/`afe_cfg1`. The settings survive a TMS reset and are cleared
  only by `trst_n`. How the 32 bits map to the gain, bandwidth and
  resolution fields depends on the analog cells chosen, and is left to the
  integrator.

### Memories

`prog_rom` is the 16 Kbit (2048 × 8) program ROM of the ASIC configuration.
It reads synchronously and is loaded from a `$readmemh` file given by the
`ROM_INIT` parameter. Without a file it reads 0xFF. `data_ram` is a 1 KiB
synchronous RAM for the 8051's data.

## What follows the source and what does not

Taken from the source:

* the partitioning into analog front end, DSP and 8051 supervisor;
* the DSP's functions: PLL with VCO control, AGC, demodulators, filters,
  temperature and offset compensation, modulator for secondary drive, and
  open- and closed-loop rate sensing;
* readable registers along the chain, including the lock status;
* UART and cache on the 8-bit SFR bus, with SPI, timer, watchdog and SRAM
  controller behind a bridge on a 16-bit bus;
* JTAG chains of four wires to the front end, with read-back;
* the 16 Kb ROM, the 512 Kb capture SRAM, the 20 MHz clock and the ~15 kHz
  resonance;
* two JTAG chains, one on each side of the DSP, as the platform diagram
  draws them.

This design's own choices:

* all algorithms inside the blocks: NCO sine approximation, first-order IIR
  filters, PI controllers with shift gains, the lock rule and the
  compensation formula;
* the 200 kHz sample rate, 12-bit ADC/DAC widths and all register maps,
  addresses and codes;
* the UART frame, the SPI mode, and the timer and watchdog behaviour;
* the SRAM organisation and timing, the JTAG instruction set and the size of
  the data RAM.

"Kb" in the source is read as kilobit, so the ROM is 2048 bytes. This is
consistent with the 512 Kb SRAM being a standard 32 K × 16 part.

Not included:

* the 8051 core, which is third-party IP, and the cache controller, whose
  two-wire protocol is not published;
* the 1 Kb boot ROM and large program RAM of the prototype configuration;
* the SPI and RS485 download paths, which only need firmware and a line
  driver here;
* all analog circuits.

## Verification

Each module has a self-checking testbench in `tb/` that ends with a
`TB_RESULT checks=N failures=M` line. The DSP tests use `gyro_model`, a
behavioural sensor and front-end model:

* the pick-off amplitude follows the drive DAC amplitude;
* the pick-off runs at a fixed resonance of 0.075 cycles per sample;
* the sense signal is rate·2 counts per °/s, minus the demodulated force
  feedback, plus a quadrature term;
* it models neither drive phase nor mechanical Q.

`sram_model` is an asynchronous SRAM that also checks write-pulse timing.

Four modules also carry concurrent assertions that run in every simulation:
the bridge selects at most one peripheral, the UART line idles high, the
SRAM controller holds address and data steady while `we_n` is low, and the
JTAG master keeps TMS and TDI steady across each rising TCK edge.

| testbench | what it shows |
|---|---|
| tb_nco | sine/cosine within 80 LSB of ideal; phase step |
| tb_iq_demod | I/Q = 8A·cos φ, 8A·sin φ within 2 % |
| tb_pi_ctrl | cycle-exact match to a model, saturation, anti-windup, clear |
| tb_drive_pll | frequency word ramp, lock after exactly LOCK_CNT+1 samples, limits |
| tb_agc | error, clamp, DAC coding, settling on a plant |
| tb_rate_chain | open-loop rate and compensation, closed-loop null and modulator |
| tb_dsp | whole DSP with the gyro model at FS_DIV = 4: lock, frequency, amplitude, both rate modes, capture |
| tb_bridge, tb_uart, tb_spi_master, tb_timer16, tb_watchdog, tb_sram_ctrl | protocols and timing of each peripheral |
| tb_jtag_tap, tb_jtag_master | 1149.1 behaviour, IDCODE, CFG write/read-back, bypass, scan duration |
| tb_prog_rom, tb_data_ram | contents, latency |
| tb_gyro_top | whole chip at default parameters, driven over the SFR bus |

`tb_gyro_top` runs at the default parameters (200 kHz sampling). It programs
both front-end chains over JTAG and reads them back. It then waits for PLL
lock (about 3800 samples, 19 ms, with the model) and checks the locked
frequency to within 5 Hz and the amplitude to within 2 %. Next it checks the
open-loop and compensated rate, captures 400 samples of the NCO sine into
SRAM and reads them back, and switches to closed loop. Last it exercises
the timer, watchdog, UART loop-back, SPI loop-back and memories. It counts
each of these events and fails if one never happens. It runs in under half
a minute.

To run a testbench with Verilator from the project root (the ROM test reads
`tb/rom_test.hex` by a relative path):

```
verilator --binary --timing -Irtl -y rtl -y tb +libext+.sv \
    rtl/gyro_pkg.sv tb/tb_gyro_top.sv --top-module tb_gyro_top
./obj_dir/Vtb_gyro_top
```

### Known limits

* `sram_ctrl` needs at least three clocks between sample strobes, and drops
  a CPU write that arrives during a capture write.
* The JTAG TCK is a divided clock that drives the TAP flip-flops directly. In
  a single-chip build it must be treated as a generated clock.
* The external SRAM has one fixed chip enable (`sram_ce_n` is always low).
* The model is not a mechanical simulation. Loop gains that work with it must
  be re-tuned on a real sensor, which is why they are registers.
