# FBCM quadrant readout logic

The Fast Beam Condition Monitor (FBCM) of CMS measures luminosity bunch by
bunch. It does this by counting particle hits in small silicon-pad sensors
close to the beam pipe. The front-end chip, FBCM23, does almost no
processing of its own. Each of its six channels amplifies the sensor signal
and compares it with a threshold. It then outputs a plain rectangular pulse
that stays high while the signal is above threshold. The pulse is not
synchronised to the LHC clock. An lpGBT transceiver samples the pulse every
0.78 ns, which gives 32 samples per 25 ns bunch crossing (BX), and sends the
samples over an optical link. All timing measurement happens afterwards, in
FPGA firmware:

* the **time of arrival (ToA)** is where the pulse's leading edge falls
  within the BX;
* the **time over threshold (ToT)** is how long the pulse stays high;
* a **histogram with one bin per BX of the LHC orbit**, summed over a
  *lumi word* of about one second, gives the per-bunch hit rate from which
  luminosity is derived.

This repository is synthesizable SystemVerilog for the logic parts of that
chain, for one *service quadrant*. A quadrant is the independent unit of the
detector: three FBCM23 chips, 18 channels, 18 eLinks. The RTL covers two
parts:

* the slow-control block of each FBCM23: an I2C slave and control
  registers, both triplicated against radiation-induced upsets;
* the back-end firmware: it turns the 18 sampled streams into ToA and ToT
  values and accumulates per-BX, ToA and ToT histograms for every lumi word.

The analog front end, the lpGBT, the optical link and the test boards are
not logic. They appear only as ports.

## The chain and where the RTL sits

```
 sensor ─► FBCM23 channel (analog: preamp, booster, discriminator) ─► binary pulse
              ▲ threshold code, cal. strobe enable                       │ (eLink)
              │                                                         ▼
        fbcm23_ctrl ◄── I2C                                   lpGBT: 32 samples / BX
   (i2c_slave x3 + tmr_regfile)                                          │ optical link
                                                                         ▼
                                                 fbcm_backend (per quadrant, 40 MHz)
                                       18 x elink_hit_extractor ─► bx_histogram
                                                                 ─► fine_histogram (ToA)
                                                                 ─► fine_histogram (ToT)
                                       bx_counter (BX id, lumi word), readout mux
```

`fbcm_quadrant` is the top. It holds three `fbcm23_ctrl` and one
`fbcm_backend`. The two halves run on separate clocks, as they do in the
real system: `ctrl_clk` for the chips' slow control and `bx_clk`, the 40 MHz
bunch clock, for the back end. They meet in one place. Each channel's output
enable is applied to that channel's sampled words. It crosses into `bx_clk`
through a two-flop synchroniser. ASIC *a*, channel *c* is eLink 6·*a*+*c*.
The synchroniser resets to "disabled", so the first two BX words after
`bx_rst_n` is released are dropped on every channel.

## From samples to ToA and ToT (`elink_hit_extractor`)

This is the part that needs the most care. Pulses ignore BX boundaries.

**Input.** Each channel delivers one 32-bit word per `bx_clk` cycle. Bit 0 is
the earliest sample. The word presented in a cycle belongs to the BX that
`bx_counter` shows in the same cycle.

**Edges.** A leading edge is a 0→1 step between consecutive samples. The last
sample of the previous word counts as the predecessor of bit 0, so an edge
exactly on a BX boundary is found. Trailing edges (1→0) are found the same
way.

**Hit and ToA.** The first leading edge in a word is *the hit* of that BX.
Its bit index (0–31) is the ToA, in units of 0.78125 ns from the start of
the BX. Any further pulse that starts later in the same word is ignored. It
is neither timed nor measured. The per-BX histogram counts at most one hit
per BX and channel.

**ToT.** The pulse of the hit is followed until its trailing edge, over as
many words as needed. Its width in samples is the ToT, which saturates at
255 samples (≈199 ns). ToT appears in the cycle of the word where the
pulse ends, on one of two outputs:

| output    | pulse                                        |
|-----------|----------------------------------------------|
| `tot_a_o` | started in an earlier word, ends in this one |
| `tot_b_o` | starts and ends in this word                 |

Both outputs can be valid in the same cycle. This happens when a long pulse
ends early in a word and a short new one starts and ends later in that same
word.

Example, with the previous word ending in 0:

```
word n   bits 0..31: 00000000001111111111111111111111   (rising at bit 10, still high)
word n+1 bits 0..31: 11111000000000000000111000000000   (falls at bit 5, new pulse 20..22)
```

* Word *n*: hit, ToA = 10. No ToT yet; 22 samples are counted so far.
* Word *n*+1: `tot_a_o` = 22 + 5 = 27. Hit, ToA = 20, and `tot_b_o` = 3.

All outputs are registered, with one cycle of latency. The core is
vector arithmetic: `rising = d & ~{d[30:0], last}`, and a lowest-set-bit
isolation (`v & -v`) followed by a one-hot encoder. An immediate assertion
checks that no new pulse can start in a word that the previous pulse
covers completely.

## Lumi words and the per-BX histogram

`bx_counter` produces:

* the BX identifier (0–3563);
* the orbit number within the lumi word (0–11244; 11245 orbits is 1.000 s
  at the LHC revolution frequency);
* a *first orbit* flag;
* a *last BX of the lumi word* flag;
* the lumi-word count.

The orbit marker `bc0_i` forces the next cycle to be BX 0, which keeps the
count aligned with the machine.

`bx_histogram` holds one counter per BX for each channel. It has two banks
of 3564 × 14-bit counters. One bank accumulates while the other holds the
previous lumi word for readout. The banks swap after the last BX of a lumi
word.

* **Memories.** Each bank is a simple dual-port memory: one synchronous read
  port and one write port. The read port serves the read-modify-write while
  the bank accumulates, and the readout while it is frozen.
* **Read-modify-write.** The counter is read in the cycle the hit arrives
  and written back in the next cycle. The BX identifier changes every
  cycle, so consecutive accesses never touch the same counter and no bypass
  is needed.
* **Clearing without dead time.** In the first orbit of a lumi word, the
  new value is the hit alone, not old value plus hit. Every counter is
  visited once per orbit, so the first orbit clears the bank.

The ToA histogram (32 bins, one per sample) and the ToT histogram (64 bins
of one sample, where the last bin takes everything ≥ 63) are
`fine_histogram` instances. Each has 32-bit saturating counters in
registers and a frozen copy. Both ToT outputs feed the ToT histogram in the
same cycle, and two entries in the same bin add 2.

### Readout timing

| event | cycle |
|---|---|
| last BX of lumi word *k* on `bx_o` | *L* |
| frozen BX bank complete | *L*+2 |
| `lw_done_o` high, `lw_num_o` = *k* | *L*+3 |
| read any bin: apply `rd_ch_i`, `rd_kind_i` (`HIST_BX`/`HIST_TOA`/`HIST_TOT`), `rd_addr_i` | any cycle from *L*+3 |
| `rd_data_o` valid | one cycle after the address |
| lumi word *k* data overwritten | after the end of lumi word *k*+1 |

A full readout of a quadrant takes 18 × (3564 + 32 + 64) = 65 880 cycles.
A lumi word lasts about 40 million cycles, so there is ample time.

A ToT value is counted in the lumi word in which its pulse *ends*. A hit
and its ToA are counted in the lumi word of the BX where the pulse starts.

## FBCM23 slow control (`fbcm23_ctrl`, `i2c_slave`, `tmr_regfile`)

**Protocol.** The I2C slave (device address 0x40 by default) uses a
register pointer:

```
write:  S  0x80  A  ptr  A  d0  A  d1  A ...  P          d0 -> reg[ptr], d1 -> reg[ptr+1], ...
read:   S  0x80  A  ptr  A  Sr 0x81 A  d0  A  d1 ... NA  P
```

The pointer auto-increments and wraps at 16. SCL and SDA are oversampled by
`ctrl_clk`, which must run at least about 8× faster than SCL. `sda_oe` high
means the slave pulls SDA low.

**Register map** (chosen for this RTL):

| reg  | content                                   | reset |
|------|-------------------------------------------|-------|
| 0–5  | threshold DAC code of channel 0–5         | 0x00  |
| 6    | channel output enable, bit *i* = channel *i* | 0x00 |
| 7    | calibration-strobe enable per channel     | 0x00  |
| 8–15 | spare, read/write                         | 0x00  |

All channels are disabled after reset. Software must set register 6 before
any data reaches the back end.

**Triple modular redundancy.** The registers and the bus logic are both
triplicated.

* `tmr_regfile` keeps three copies of every register. Each output bit is
  the majority of the three copies. Every cycle all copies are reloaded
  from the vote, so a single upset is repaired one cycle after it happens
  and cannot combine with a later upset in another copy. `corrected_o`
  reports each repair.
* Three `i2c_slave` instances run in parallel and their outputs are voted:
  the SDA pull-down, the write strobe, the address and the data. A copy
  whose state was upset resynchronises at the next START.

The `seu_*` inputs flip one chosen bit of one register copy. They exist to
exercise the voter and should be tied low in use.

## Parameters

| parameter | default | origin |
|---|---|---|
| channels per ASIC | 6 | FBCM23 |
| ASICs per quadrant, eLinks per quadrant | 3, 18 | detector layout |
| samples per BX | 32 | 0.78 ns lpGBT sampling, 25 ns BX |
| `NUM_BX` | 3564 | LHC orbit |
| `ORBITS_PER_LW` | 11245 | ≈1 s lumi word |
| BX-histogram counter | 14 bit | holds 11245 |
| ToA / ToT bins | 32 / 64 | design choice |
| ToT saturation | 255 samples | design choice |
| control registers | 16 × 8 bit | design choice |

Constants live in `fbcm_pkg`. `fbcm_quadrant` and `fbcm_backend` take
`NUM_BX` and `ORBITS_PER_LW` as parameters. A short orbit and lumi word make
simulations fast, and the logic does not depend on the values. At default
size one quadrant needs 18 × 2 × 3564 × 14 ≈ 1.8 Mbit of histogram memory
and about 57 k flip-flops (ToA/ToT histograms included).

## What is specified and what is chosen here

These parts follow the published description of the system:

* the channel counts;
* the 0.78 ns sampling;
* extraction of ToA and ToT in the back end;
* a histogram bin per BX identifier integrated over a lumi word of about a
  second;
* ToA and ToT histograms;
* I2C slow control;
* TMR protection of the control registers and the bus logic.

These are choices made for this RTL; the description does not give them:

* the word format and bit order of the sampled stream;
* a ToA histogram per channel over the whole orbit; the description says
  ToA serves the per-bunch luminosity and background measurement, but not
  how ToA and BX are combined;
* the one-hit-per-BX rule;
* the ToT width and saturation;
* the histogram sizes and counter widths;
* the double buffering and the readout port;
* the orbit-marker input;
* the I2C protocol, device address and register map;
* the per-cycle scrubbing;
* the channel-enable register and the way it gates the data;
* separate I2C buses per ASIC;
* the clock arrangement.

The LHC constants (3564 BX, 11245 orbits per second) are general knowledge,
not taken from the description.

Not modelled: the analog channel (preamplifier, booster, discriminator,
CR-RC³ shaping), the threshold DAC, calibration-strobe injection, the
analog multiplexer, the output drivers, the lpGBT and VTRx+, the link
decoding in the back-end FPGA, and the test boards. The threshold codes and
strobe enables stop at `thr_code_o` and `cal_en_o`. The sampled pulses
enter at `disc_i`.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Build and run one with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl +libext+.sv \
          rtl/fbcm_pkg.sv tb/fbcm_quadrant_tb.sv --top-module fbcm_quadrant_tb
./obj_dir/Vfbcm_quadrant_tb
```

| testbench | what it covers |
|---|---|
| `tmr_regfile_tb` | writes, 200 random single upsets, repair reporting, consecutive upsets of one bit |
| `i2c_slave_tb` | burst writes and repeated-start reads at random pointers, wrap, foreign address NACK |
| `fbcm23_ctrl_tb` | register map decoding over I2C, readback, upsets while outputs are watched |
| `elink_hit_extractor_tb` | 3000 words of random pulses against a sample-level reference: ToA, both ToT outputs, saturation |
| `bx_counter_tb` | BX/orbit/lumi-word sequence, orbit markers |
| `bx_histogram_tb` | several lumi words, both banks, readout starting with the last-written bin two cycles after the swap |
| `fine_histogram_tb` | two entries per cycle into the same bin, saturation, freeze while new data arrive |
| `fbcm_backend_tb` | 4 channels, short orbit: all histograms of three lumi words against a sample-level reference, `lw_done_o` timing |
| `fbcm_quadrant_tb` | whole quadrant, short orbit: I2C setup of 3 ASICs, upsets, 18 random streams, two disabled channels, orbit markers, bank reuse; counts each mechanism |
| `fbcm_quadrant_full_tb` | whole quadrant at default size: configures over I2C, then one full lumi word (11245 orbits × 3564 BX ≈ 40 M cycles) with a pulse per channel per orbit, then reads back every bin |

The full-size run takes about four minutes on one core. The others take
seconds.
`fbcm_stream_ref.svh` holds the random stream generator and the reference
histogram computation shared by the back-end and quadrant testbenches.
`i2c_master_bfm.svh` holds the bit-level I2C master tasks.
