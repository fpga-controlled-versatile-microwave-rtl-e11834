# FPGA controller for a DDS-based microwave source

This is the FPGA logic of a microwave source for cold-atom experiments. An
AD9954 direct digital synthesizer (DDS) makes a sine wave near 30 MHz. Outside
the FPGA, that wave is mixed with a fixed 1.7416 GHz carrier in a
single-sideband modulator. The sum, about 1.7716 GHz, drives the sodium
ground-state hyperfine transitions. The frequency, amplitude and phase of the
microwave are therefore set entirely by the words the FPGA writes into the
DDS.

The controller has two jobs:

* **Play timing sequences.** A host computer loads a table of
  (amplitude, frequency, phase) steps over a USB-serial link. The experiment's
  pulse card then sends TTL pulses. Each rising edge moves the DDS to the next
  step within 3.8 µs. That is within the 5 µs step resolution the source was
  specified for, and the table can be reloaded while the device runs.
* **Let a person test the chain by hand.** In manual mode, three push buttons
  and a 2x16 LCD form a small menu. It sets the frequency and the amplitude,
  and every change goes straight to the DDS.

The RTL is SystemVerilog-2017 and synthesizable. It targets a Terasic DE0-CV
board (Cyclone V, 50 MHz oscillator) wired to an AD9954 DDS board, an FTDI
USB-serial module and a Newhaven NHD-0216K3Z serial LCD. Nothing in it is
specific to that FPGA.

## Structure

```
                       +--------------------------- dds_driver ---------------------------+
 key_n[2:0], sw  ----->| input_conditioner --+--> menu / mode logic --> manual_freq ---+  |
 ttl_in          ----->|   (sync, debounce)  |                     \-> manual_amp  ---+  |
                       |                     |                                        v  |
 usb_rxd         ----->| usb_registers ----> seq_table ---> step pointer --> DDS request --> dds_write ---> dds_* (AD9954)
                       |  (uart_rx, 'L' parser)  (1024 x 60 bit)                register |
                       |                                       mode, menu, BCD ------------> lcd_write ---> lcd_txd
                       +-----------------------------------------------------------------+  (uart_tx)
```

| File | Role |
|---|---|
| `rtl/mw_pkg.sv` | Shared types and constants: the step word `dds_params_t`, the menu select enum, AD9954 register addresses, LCD command bytes |
| `rtl/dds_driver.sv` | Top: mode switching, the manual menu, table stepping, the DDS request register, power-up sequence |
| `rtl/input_conditioner.sv` | Synchronisers, button/switch debounce, TTL rising-edge detector |
| `rtl/usb_registers.sv` | Serial receiver plus the parser for sequence strings; writes the table |
| `rtl/seq_table.sv` | The timing-sequence table: simple dual-port RAM with a registered read |
| `rtl/manual_freq.sv`, `rtl/manual_amp.sv` | Manual-mode values: up/down with saturation, conversion to a DDS word and to BCD |
| `rtl/dds_write.sv` | AD9954 serial-port writer |
| `rtl/lcd_write.sv` | Composes and sends one LCD screen |
| `rtl/uart_rx.sv`, `rtl/uart_tx.sv`, `rtl/bin2bcd.sv` | Helpers |

## The step word

Every step of a sequence is one 60-bit `dds_params_t`. Its fields are in the
order the host sends them:

| Field | Bits | AD9954 register | Meaning |
|---|---|---|---|
| `asf` | 14 | ASF (0x02) | amplitude, 16383 = full scale |
| `ftw` | 32 | FTW0 (0x04) | f = ftw × 400 MHz / 2^32 (0.093 Hz steps) |
| `pow` | 14 | POW0 (0x05) | phase = pow × 360° / 2^14 |

The DDS runs from an external 400 MHz reference with its internal multiplier
bypassed, so the 400 MHz in the tuning-word formula is fixed by the hardware.
Example: 30 MHz gives `ftw = 0x13333333`.

## Loading a sequence

The host sends plain ASCII over the serial link. The default is 8N1 at
115200 baud. A sequence begins with the letter `L`. Then come the steps, each
as exactly 16 hexadecimal digits, most significant digit first:

```
L  3FFF 13333333 0000   0000 13333333 0000   ...  <LF>
   amp  frequency phase
```

Upper or lower case digits are accepted. Amplitude and phase take four digits
each, and only their low 14 bits are used. Any character that is not a hex
digit (CR, LF, space) ends the sequence.

The parser works one byte at a time:

* `L` resets the write address to 0, at any time, even in the middle of
  another sequence.
* Each completed group of 16 digits is written to the next table address.
* The terminating character sets `seq_len` to the number of complete steps.
  A trailing partial step is discarded.
* Steps beyond the table depth are dropped and raise `overflow`.
* Bytes that arrive outside a sequence are ignored.

The table is written while the device runs. The old `seq_len` stays in force
until the terminator arrives, so a reload takes effect as a whole: the first
trigger after it plays the new step 0. A trigger that arrives during the upload
itself reads whatever the table holds at that moment. To avoid that, hold off
triggers while uploading. Loading takes 1.4 ms per step at 115200 baud.

## Stepping and the DDS request register

In remote mode, each rising edge of `ttl_in` advances the step pointer. So
does a press of button 0. The pointer follows these rules:

* After a reset, a completed upload, or a switch into remote mode, the next
  trigger plays step 0.
* After the last step, the pointer wraps to step 0. An experiment that repeats
  the same sequence every shot therefore needs no reload.
* With an empty table, triggers are ignored.

The step word read from the table, or the manual values in manual mode, goes
to `dds_write` through a **one-deep request register**:

* If the writer is idle, the write starts on the next clock.
* If the writer is busy, the request is held and sent as soon as the writer
  finishes.
* A newer request replaces a held one.

The DDS therefore always ends up at the most recent setting. Triggers closer
together than one write (3.7 µs) still advance the pointer, but an
intermediate step may never reach the DDS. With the 5 µs minimum step of the
intended use this does not happen. The case is covered by the end-to-end test
all the same.

Latency from a TTL edge at the pin to the rising edge of `dds_io_update`, at
50 MHz:

| Stage | Clocks |
|---|---|
| two-flop synchroniser + edge detect | 3 |
| pointer/address, table read, issue to writer | 3 |
| serial write of ASF, FTW0, POW0 (88 bits at 25 MHz) + framing | 183 |
| **total** | **189 (3.78 µs)** |

## The AD9954 serial write

`dds_write` uses the chip's 3-wire serial port in its default configuration.
Data is sent MSB first on SDIO, changes while SCLK is low, and is sampled on
SCLK's rising edge. SCLK is the system clock divided by 2, which is 25 MHz,
the part's maximum. Each register is one instruction cycle:

* CS_N goes low.
* An instruction byte follows: bit 7 = 0 for a write, bits 4:0 = the address.
* The register data follows.
* CS_N goes high again.

One update writes ASF (16 bits), FTW0 (32) and POW0 (16), then raises
IO_UPDATE for 4 clocks. IO_UPDATE makes the three new values take effect in
the same instant, so amplitude, frequency and phase change together. The
first update after reset first writes CFR1 = 0x02000000. That value sets the
OSK-enable bit, without which the chip ignores the ASF register. After reset,
`dds_driver` also pulses the DDS `RESET` pin for 8 clocks before writing
anything.

Each register costs 2·(8 + bits) + 2 clocks. A CFR1 write adds 82 clocks to
the first update, which therefore takes 265 clocks in all.

## Manual mode and the front panel

| Control | Manual mode | Remote mode |
|---|---|---|
| `sw_remote` = 0 / 1 | selects manual | selects remote |
| button 0 (`key_n[0]`) | toggles between frequency and amplitude | steps the sequence, like a TTL edge |
| button 1 (`key_n[1]`) | selected value up | ignored |
| button 2 (`key_n[2]`) | selected value down | ignored |

The buttons are active low, as on the DE0-CV. They and the switch are
debounced for 10 ms. The TTL input is only synchronised, because a pulse card
drives it cleanly.

Manual values are:

* **Frequency:** kept in kHz. It starts at 30 000 kHz and moves in 100 kHz
  steps within 0–160 000 kHz. It is converted to
  `ftw = floor(f_kHz·2^32 / 400 000)`.
* **Amplitude:** kept in percent. It starts at 100 and moves in 1 % steps. It
  is converted to `asf = floor(pct·16383 / 100)`.

Phase is 0 in manual mode. Every change writes the DDS at once. Switching from
remote back to manual also rewrites the manual values, so the output never
keeps a sequence value while the menu shows something else.

The LCD is driven in its serial mode (8N1, 9600 baud). A screen is sent as
follows:

* clear (`FE 51`), then a 2 ms pause while the display clears;
* 16 characters of line 1;
* cursor to line 2 (`FE 45 40`);
* 16 characters of line 2.

That is 37 bytes, about 40 ms. The screens are:

```
REMOTE MODE          FREQUENCY            AMPLITUDE
                      30000 kHz           100 %
```

A refresh requested while a screen is going out is remembered. The screen is
sent once more afterwards with the values of that moment, so the display
never stays stale. `busy` stays high until then.

## How far this follows the source design

The published design fixes these points, and the RTL follows them:

* the module partition and names (`dds_driver`, `usb_registers`,
  `manual_freq`, `manual_amp`, `dds_write`, `lcd_write`);
* the two modes on a switch;
* three buttons for "switch parameter", "value up" and "value down";
* a menu for amplitude and frequency;
* immediate DDS and LCD updates in manual mode;
* "REMOTE MODE" on the LCD in remote mode;
* sequences that arrive as strings starting with `L` and are decoded into
  amplitude, frequency and phase;
* a table of such words;
* stepping on a rising TTL edge;
* the 400 MHz DDS clock;
* 5 µs step resolution and under 4 µs to a new DDS output.

Everything else is this implementation's own choice, made where the source is
silent:

* the 50 MHz clock and both baud rates;
* the hex string format and its terminator;
* the table depth (1024 steps);
* wrap-around at the end of a sequence, and the restart rules;
* button 0 as the step button in remote mode;
* the request register;
* the debounce time;
* the units, steps, limits and reset values of the manual settings;
* the LCD layout.

The AD9954 register usage and the LCD command set come from those parts' data
sheets.

One departure is deliberate. The source describes the received sequence as
stored in volatile memory on the FPGA board, and in another place as written
to the EPCS64 on the board. The EPCS64 is the FPGA's configuration flash. This
design keeps the table in on-chip RAM (`seq_table`) and does not touch the
flash. A sequence is therefore lost at power-off and must be reloaded by the
host.

Not included, because they are not logic:

* the DDS, USB-serial and LCD boards themselves;
* the level shifter and pull-down resistors;
* the RF chain (generator, mixer, 20 W amplifier, coupler, circulator, filter,
  stub tuner, antenna);
* the host software.

`tb/ad9954_model.sv` and `tb/lcd_model.sv` model the two serial peripherals
for simulation only.

## Resources

Synthesised generically, the top has about 930 word-level cells and 660
flip-flops, plus a 1024 × 60-bit memory (61 440 bits). The memory fits in
seven or eight Cyclone V M10K blocks. The two divisions by constants in
`manual_freq` and `manual_amp` are the largest pieces of combinational logic.
They only change on a button press, so they can be given multicycle timing
constraints if they limit Fmax.

## Simulation

All testbenches are self-checking. Each ends by printing
`TB_RESULT checks=N failures=M`. Each has a watchdog. They need Verilator 5
with `--timing`. For example, from the top of this tree:

```
verilator --binary --timing --assert -Irtl -Itb rtl/mw_pkg.sv \
          tb/tb_dds_driver.sv --top-module tb_dds_driver -Mdir obj_tb
./obj_tb/Vtb_dds_driver
```

Verilator finds the other modules through `-Irtl -Itb`, because every module
lives in a file of its own name.

| Testbench | What it checks |
|---|---|
| `tb_input_conditioner` | one pulse per bouncing press, none on release or glitches, debounce latency, switch level, 3-clock TTL edge latency |
| `tb_usb_registers` | decoding of mixed-case hex steps, addresses, `seq_len`, dropped partial step, restart on `L`, overflow, framing error |
| `tb_seq_table` | full 1024-word fill and random read-back, one-clock read latency, simultaneous read/write |
| `tb_manual_freq`, `tb_manual_amp` | random up/down walks against a reference model: saturation, `changed`, tuning word / ASF, BCD |
| `tb_dds_write` | the registers received by the AD9954 model, the one-time CFR1 write, exactly 183 / 265 clocks to IO_UPDATE, start-while-busy ignored |
| `tb_lcd_write` | text of every screen type, 37 bytes per screen, clear pause, screen duration, refresh during a screen |
| `tb_dds_driver` | end-to-end scenario with short serial-bit times and debounce and an 8-step table |
| `tb_dds_driver_full` | the same scenario with every parameter at its default (about 23 million clocks, under half a minute) |
| `tb_rabi_sequence` | a measurement-style sequence at default parameters: a low-power resonance scan with one trigger every 5 µs, then full-power π pulses on the σ−, π and σ+ transitions of sodium; checks each DDS frequency to half a tuning-word step, that no trigger is held back, and that each pulse lasts exactly its trigger interval |

The end-to-end scenario (`tb/dds_driver_scenario.svh`) goes through these
steps in order:

1. power-up in manual mode;
2. menu operations;
3. switch to remote mode, and a trigger with an empty table;
4. an upload, then stepping with wrap-around;
5. two triggers 30 clocks apart, which forces a held request;
6. a reload while running, and a button step;
7. an overflowing upload (small table only);
8. the return to manual mode.

It checks what the DDS and LCD models end up with, and checks that the
TTL-to-IO_UPDATE latency is 189 clocks. It also counts each mechanism
(manual write, select, mode changes, empty trigger, step, wrap, held request,
re-arm, button step, LCD re-send, overflow) and fails if one never occurred.

## Changing it

* **Clock or baud rates:** `dds_driver` parameters `CLK_HZ`, `USB_BAUD` and
  `LCD_BAUD`. The serial dividers are `CLK_HZ / baud`. The DDS SCLK is always
  `CLK_HZ / 2`: above a 50 MHz clock, set `SCLK_HALF` on the `dds_write`
  instance in `dds_driver` so that SCLK stays at or below 25 MHz.
  The latency figures above scale with the clock period.
* **Table depth:** `SEQ_DEPTH`, a power of two. `seq_len` is one bit wider
  than the address.
* **Manual ranges:** the parameters of `manual_freq` (`F_MAX_KHZ`,
  `F_STEP_KHZ`, `F_RESET_KHZ`) and `manual_amp`.
* **A different DDS:** only `dds_write` and the constants in `mw_pkg` know the
  AD9954 register map.
