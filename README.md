# LF-Monopix column-drain readout in SystemVerilog

LF-Monopix is a depleted monolithic active pixel sensor (DMAPS) prototype built in a 150 nm CMOS
process with a high-resistivity substrate. It was made as a demonstrator for the outer pixel layers
of the ATLAS Inner Tracker at the HL-LHC. Sensor and readout sit on the same die. A very deep
N-well is both the charge-collecting electrode and the well that holds each pixel's electronics.
Charge is collected by drift in a depleted volume, so it arrives within nanoseconds, fast enough
for the 25 ns bunch spacing. The matrix has 36 columns of 129 pixels of 250 um x 50 um.

This RTL covers the digital side of that chip and of its test system. Each pixel notes *when* its
discriminator output rose and *when* it fell, as two 8-bit time stamps. A token-based priority scan
then drains the stored hits out of the matrix one at a time. This is a "column drain" readout, of
the kind used in the FE-I3 hybrid pixel chip. Each hit leaves the chip as a 30-bit word on a
160 Mbit/s serial line. The logic that runs the scan, the *readout controller*, is not on the chip:
it sits in an FPGA. It is included here, together with a receiver and a configuration loader, so
the chain can be simulated end to end, from comparator outputs to decoded hits.

The analog parts (sensor, charge amplifier, comparator, trim and bias DACs, injection, sense
amplifiers, LVDS pad) are not modelled. Where they would connect, the RTL has ports:
- `hit[col][row]` is the comparator output of every pixel.
- `pix_cfg`/`glob_cfg` carry the codes that would drive the DACs and switches.
- `dout` is the bit that would drive the LVDS pad.

## How a hit lives in a pixel

This is the heart of the design (`pixel_ro_logic`). Each pixel has:

| item | meaning |
|---|---|
| `le_ram`, `te_ram` | 8-bit time stamps of the leading and trailing edge (Gray code, as seen on the column's time-stamp bus) |
| address ROM | the pixel's row number (8 bits), a parameter |
| `le_flag` | a leading edge was stored; waiting for the trailing edge |
| `hit_flag` | a complete hit is stored |
| `token` | the pixel takes part in the current scan |
| `sel` | the pixel is the one being read, latched when `read` rises |

The sequence, all in one clock domain (the 160 MHz bit clock):

1. **Leading edge.** `hit & en` goes high while the pixel is empty. In the next clock the time
   stamp goes into `le_ram` and `le_flag` is set.
2. **Trailing edge.** `hit` goes low. The time stamp goes into `te_ram` and `hit_flag` is set.
   From then on the edge detector ignores the input: a pixel holds one hit, and later hits are lost
   until it has been read (dead time).
3. **Joining the scan.** In the next clock in which `freeze` is low, `hit_flag` sets `token`.
   While `freeze` is high, a hit that has just finished stays in `hit_flag` and is not added to
   the set being drained. So a scan cannot be extended without end by new hits.
4. **Token chain.** `token_out = token_in | token`. Row 0 is at the head of the chain. A pixel
   with `token` set and `token_in` low is therefore the first holder in its column.
5. **Selection.** On the rising edge of the column's `read` line, each pixel latches
   `sel = token & ~token_in`. At most one pixel per column can latch it; an assertion checks this.
   `read_int = read & sel`.
6. **Driving the bus.** While `read_int` is high, the pixel puts `{row, le, te}` (24 bits) on the
   column bus. Every other pixel outputs zero, and the column ORs all the outputs.
7. **Clearing.** When `read` falls, the selected pixel clears all its flags. Its token drops, so
   the next holder down the chain becomes the first one.

## Priority across columns: the end-of-column chain

Each column ends in an `eoc` block. The 36 blocks form a second chain, with column 0 first:
`tok_out = tok_in | column token`. The last block's `tok_out` is the chip's `token_out`, which goes
to the FPGA.

The readout controller drives one `read` line for the whole chip. Each `eoc` latches on its rising
edge whether it is the first column holding a token. Only that column's read line is raised
(`col_read = read & sel`). So one `read` pulse reads exactly one pixel of the chip: the first pixel
of the first column with a token. Readout order is column-major, by ascending column and row.

Data move along the same chain. The selected `eoc` puts `{column, column bus}` on the chain, and
every other block passes on the word from its neighbour. The word at the end of the chain feeds the
serializer.

Each `eoc` also holds the time-stamp generator of its column (`ts_gray_gen`). This is an 8-bit
binary counter stepped by the 40 MHz time-stamp clock and sent up the column in Gray code. Gray
code ensures that a pixel latching the bus while the value changes is off by at most one count.
All counters share the reset and the strobe, so all columns show the same time.

## The readout sequence and its timing

`ro_controller` runs the scan. With the defaults (`READ_LEN = 4`, `WORD_LEN = 30`,
`FREEZE_WAIT = 2`), counting clocks from the rise of `read`:

| clock | event |
|---|---|
| before 0 | `token_out` is high; `freeze` goes high; after 2 clocks, if the token is still there, reading starts |
| 0 | `read` rises |
| 1 | the `eoc` of the first column with a token raises that column's read line |
| 2 | the first pixel of that column raises `read_int`; its word is at the serializer input |
| 3 | `load` is strobed; the serializer takes the word |
| 4 | `read` falls; the pixel clears in this clock |
| 4 … 33 | the 30 bits leave on `dout`, MSB first, one per clock |
| 34 | if `token_out` is still high, `read` rises again; otherwise `freeze` falls |

A hit therefore costs 34 clocks: 4.7 million hits per second at 160 MHz. The serializer is never
loaded while busy (an assertion checks this). `rx_start` goes to the receiver at the same moment as
`load`.

## Words and time stamps

The word on the serial line has 30 bits, MSB first:

```
[29:24] column (0..35)   [23:16] row (0..128)   [15:8] LE (Gray)   [7:0] TE (Gray)
```

`data_receiver` rebuilds the word and converts LE and TE to binary.
- The time of arrival is LE in 25 ns units.
- The time over threshold is `ToT = TE − LE mod 256`, in 25 ns units.
- ToT is correct across a wrap of the time stamp, up to 255 counts (6.4 us). Longer pulses alias.

The time-stamp clock is a strobe, `ts_en`, high once every `TS_DIV = 4` clocks. With a 160 MHz
clock this gives 40 MHz time stamps.

## Configuration

`config_reg` is one shift register with a shadow copy. Bits enter at bit 0 while `shift` is high,
and `ld` copies the whole register to the outputs. The register has
`LEN = 16 + 36·129·6 = 27880` bits:

- bits `[LEN-1 -: 16]`: global codes `{th_dac[7:0], inj_dac[7:0]}` (threshold, injection amplitude);
- bits `[p·6 +: 6]` for pixel `p = col·129 + row`: `{tdac[3:0], inj_en, en}`.

The register is sent MSB first, so the global block goes first and pixel 0 last. After reset every
pixel is disabled. `en` gates the pixel's comparator input. `tdac` and `inj_en` only go out as
ports. `serial_config` is the FPGA-side loader. It takes bytes from a valid/ready stream, shifts
them out MSB first (9 clocks per byte), drops the bits beyond `LEN` and pulses `ld`.

## What follows the published chip, and what is this design's own

From the chip's description:
- 36 × 129 pixels;
- 8-bit leading- and trailing-edge time stamps kept in each pixel, together with an address ROM;
- a 24-bit column data bus and an 8-bit column time-stamp bus;
- freeze, read and token lines, with the token passed through the pixels;
- end-of-column blocks that generate Gray time stamps from a 40 MHz clock and arbitrate and pass
  data between columns;
- a 4-bit trim DAC code per pixel, a global threshold and an injection circuit;
- serialisation at 160 Mbit/s;
- the readout controller, data receiver and configuration loader placed in an FPGA.

This design's own choices, none of them given for the chip:
- the gate-level logic of the pixel cell: which flag freeze acts on, when selection is latched and
  when the pixel clears;
- the synchronous single-clock implementation. The chip's pixel logic is asynchronous, and its
  time-stamp clock is a separate 40 MHz input rather than a strobe;
- priority order: row 0 and column 0 first;
- field order and widths of the 24- and 30-bit words;
- all cycle counts of the controller, and the `load` and `rx_start` strobes;
- the layout, widths and reset values of the configuration register;
- a Gray counter in every end-of-column block, rather than one shared counter.

Further departures:
- The chip has nine pixel flavours, four columns each. They differ in amplifier, comparator,
  token-gate style and where the logic sits, not in logic function, so every column here has the
  same logic. `lfm_pkg::flavour_of(col)` gives a column's flavour number.
- The "buffers" between the FPGA lines and the end-of-column logic are plain wires here.
- The sense amplifiers that read the in-pixel memories are replaced by a logic OR on the column bus.

## Files

| file | contents |
|---|---|
| `rtl/lfm_pkg.sv` | sizes, `pix_data_t`, `hit_word_t`, `pix_cfg_t`, `glob_cfg_t`, Gray conversion |
| `rtl/pixel_ro_logic.sv` | pixel readout cell |
| `rtl/pixel_column.sv` | 129 cells, token chain, column bus |
| `rtl/pixel_matrix.sv` | 36 columns |
| `rtl/ts_gray_gen.sv` | Gray time-stamp counter |
| `rtl/eoc.sv` | end of column: time stamp, arbitration, data chain |
| `rtl/config_reg.sv` | configuration shift/shadow register |
| `rtl/serializer.sv` | 30-bit serializer |
| `rtl/lf_monopix.sv` | chip digital top |
| `rtl/ro_controller.sv` | FPGA readout controller |
| `rtl/data_receiver.sv` | FPGA receiver and decoder |
| `rtl/serial_config.sv` | FPGA configuration loader |
| `rtl/lfm_system.sv` | chip + FPGA logic, top of the design |

Every module has a testbench `tb/tb_<module>.sv` that checks itself and ends with a line
`TB_RESULT checks=N failures=M`. The whole-system bench `tb_lfm_system` runs at full size:
- It loads the full configuration and checks every pixel's setting.
- It makes one pixel pile up, sends 80 hits with random timing (some on masked pixels, some wide
  enough to wrap the time stamp), and checks every decoded word against a reference computed from
  the clock count.
- It checks the 34-clock word spacing and the priority order.
- It counts how often each mechanism occurred: scans, scans with several hits or columns, hits held
  back by freeze, masked hits, pile-up and time-stamp wrap.

The chip-level bench `tb_lf_monopix` uses a 4 × 12 matrix and drives the readout by hand.
`tb_serial_config` adds a short 37-bit register to test a partial last byte. The other benches use
the default sizes.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/lfm_pkg.sv tb/tb_lfm_system.sv --top-module tb_lfm_system -Mdir obj_sys
./obj_sys/Vtb_lfm_system
```

Replace `tb_lfm_system` with any other bench. Building the full-size system takes a few minutes;
the run itself takes about 15 s. Verilator is a two-state simulator, so the benches reset
everything they read.

To change the size, set `COLS`/`ROWS` on `lfm_system`, `lf_monopix` or `pixel_matrix`; the
configuration length follows. The word format assumes at most 64 columns and 256 rows. To change
the readout timing, set `READ_LEN` (at least 3), `WORD_LEN` and `FREEZE_WAIT` on `ro_controller`.
