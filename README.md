# Single-FPGA transmitter and eight-channel receiver for low-field MRI

An MRI spectrometer has two jobs. It sends an RF pulse at the Larmor
frequency to tip the proton spins. It then records the weak signal they give
back (the free induction decay, FID) and hands it to a computer that builds an
image. This RTL does both jobs in one FPGA with a single 125 MHz clock:

* **Transmit.** Two direct digital synthesizers (DDS) run in the FPGA. One
  makes a sinc envelope and the other a sine carrier. Their product goes to a
  14-bit DAC. With the default settings this is a 13.88 MHz carrier under a
  2.58 ms sinc envelope.
* **Receive.** An eight-lane serial ADC samples eight coil channels at
  65 MS/s. Each channel is mixed down to baseband I/Q with a local oscillator
  that is phase locked to the transmit carrier. A cascade of decimating
  filters then cuts the rate by 1024, to 63.5 kS/s per channel, which keeps a
  20 kHz wide MR signal.
* **Transfer.** The I/Q words are parked in external memory used as a ring
  buffer. They are then sent to the PC in raw Ethernet frames on a gigabit
  PHY's GMII port.

The one idea to hold on to is phase coherence. The carrier DDS and the
receive-LO DDS are cleared by the same `sync` command. Their tuning words are
programmed for the same physical frequency, even though they step at
different rates (125 MHz and 65 MS/s). So the demodulated I/Q phase of an
echo depends only on the spins, not on when the pulse or the acquisition
happened to start.

```
 host regs ──► reg_config ──► rf_pulse_gen ─────────────────────────► DAC (14 bit, 125 MS/s)
                  │             (env DDS × carrier DDS, am_modulator)
                  │ sync ─────────┐
 ADC lanes ─► adc_deser ─► mr_rx (LO DDS + 8 × ddc_channel) ─► storage_ctrl ◄──► external memory
 (8 × serial)  (bit clock→clk)                                    │
                adc_spi ◄── reg_config                            ▼
                                                      eth_tx ──► GMII (to PHY)
```

## Direct digital synthesis (`dds`)

A DDS has three stages:

1. A frequency register holds the 32-bit tuning word K.
2. A phase accumulator adds K on every enabled step.
3. A waveform table is read with the accumulator's top 14 bits plus a 14-bit
   phase offset.

The output frequency is `f = K · f_step / 2^32`. The table has 16384 entries
of 14 bits. The 14-bit output is scaled by a 14-bit amplitude word:
`out = (table · amp) >>> 14`.

The table is filled at elaboration with one of three shapes:

| Shape | Table entry for index k |
| --- | --- |
| Sine | `round(8191 sin(2πk/16384))` |
| Sinc | `round(8191 sinc(x))`, x spanning ±3 lobes (`SINC_LOBES`) |
| Gaussian | σ = 1/6 of the table |

A second read port looks a quarter turn ahead, so a sine table gives the
cosine as well. Both `wave_i` (cos) and `wave_q` (sin) are registered. They
appear 3 cycles after `en`, together with `out_valid`. `wrap` marks the step
whose addition carried out of the accumulator, which is the end of one table
period. `clear` sets the accumulator to zero.

## RF pulse (`rf_pulse_gen`, `am_modulator`)

The envelope DDS holds the sinc table and the carrier DDS the sine table.
Each has its own tuning word, phase offset and amplitude.

* **Start.** `start` clears the envelope accumulator.
* **Pulse length.** The pulse lasts exactly one envelope-table period,
  `2^32 / env_ftw` clock cycles. The default env_ftw = 13317 gives 2.5801 ms.
* **Carrier.** The carrier DDS runs all the time and is cleared only by
  `sync`. So a pulse starts at whatever carrier phase the locked oscillator
  has reached. This is what keeps the carrier phase locked to the receiver.
* **Modulation.** `am_modulator` computes `rf = sat((env · carrier) >>> 13)`.
  It forces `rf` to zero between pulses. The DAC gets offset binary (MSB
  inverted), so it idles at mid-scale.
* **Status.** `busy` covers the pulse. `done` is a one-cycle pulse after the
  last RF sample.

## ADC capture (`adc_deser`, `adc_spi`)

The converter sends each channel on its own serial lane, MSB first. A frame
signal rises with the MSB.

* **Capture.** In the bit-clock domain a 14-bit shift register per lane
  collects the bits. When the frame-aligned bit counter reaches the LSB, the
  eight words go as one entry into an 8-deep dual-clock FIFO with Gray-coded
  pointers (`async_fifo`). On the 125 MHz side each entry becomes one
  `valid` strobe. On average that is 65 strobes per 125 cycles, sometimes in
  consecutive cycles.
* **Configuration.** `adc_spi` writes the ADC's registers. It sends 24-bit
  3-wire SPI frames: R/W = 0, W1:W0 = 00, a 13-bit address and a data byte.
  SCLK is clk/16.

The real converter uses DDR LVDS lanes. The FPGA's input primitives would sit
in front of `adc_deser`, which captures one bit per rising edge.

## Digital down-conversion (`mr_rx`, `ddc_channel`)

One LO DDS (sine table, full amplitude) serves all eight channels. It steps
once per ADC sample. The samples are delayed by the DDS latency so that each
meets the oscillator value of its own instant. The LO word for 13.88 MHz at
65 MS/s is 917140708.

`quad_mixer` forms `I = (x·cos) >>> 12` and `Q = −(x·sin) >>> 12` as 16-bit
values. Mixing a real signal with its own carrier leaves half the baseband
amplitude, `z/2`, plus a component at twice the carrier that the filters
remove. Shifting by 12 rather than 13 bits (the LO peak is 8191) restores
unity gain. I and Q then pass through identical filter chains:

| Stage | Module | Taps / order | Decimation | Output rate |
| --- | --- | --- | --- | --- |
| CIC 1 | `cic_decim` | N=3, M=1 | 8 | 8.125 MS/s |
| CIC compensator 1 | `fir_decim` | 15 | 1 | 8.125 MS/s |
| CIC 2 | `cic_decim` | N=3, M=1 | 4 | 2.031 MS/s |
| CIC compensator 2 | `fir_decim` | 15 | 2 | 1.016 MS/s |
| Half-band 1..3 | `halfband_decim` | 11 | 2 each | 127 kS/s |
| Channel FIR | `fir_decim` | 31, cut-off 14 kHz | 2 | 63.48 kS/s |

### CIC stages

A CIC stage keeps `16 + N·log2(R)` bits inside. Its wrap-around integrators
are exact, and the gain `R^N` is removed by a shift.

### FIR, compensator and half-band stages

* **Coefficients.** All coefficients are signed fractions with 17 fractional
  bits (18-bit words). They sit in `mri_pkg` as parameter arrays.
* **Compensators.** They are least-squares fits to the inverse CIC droop.
* **Half-bands.** They add the symmetric sample pairs before multiplying, and
  skip the zero taps.
* **Channel FIR.** It is Hamming windowed.
* **Output arithmetic.** Each filter rounds, shifts and saturates back to
  16 bits.

### Gain and timing

Overall, a tone `A cos(ω_LO n + φ)` comes out as `I + jQ ≈ A e^{jφ}`: unity
gain. The chain is built for one input per 1.9 clocks. Every stage after the
first CIC sees strobes at least 2 cycles apart, which lets the FIR stages use
a two-cycle shift/compute schedule. `out_valid` of all 16 paths fires
together, once per 1024 ADC samples.

### Changing the filters

To change the response, replace the coefficient arrays in `mri_pkg`. The
tap counts are parameters of `fir_decim` and `halfband_decim`. A different
decimation split must keep the product at the wanted total, and every CIC
`R·M` a power of two.

## Storage and transfer (`storage_ctrl`, `eth_tx`)

An acquisition is a window of `acq_len` output sample sets. It starts on a
host command or, when `auto_acq` is set, with the `done` of each RF pulse.

`storage_ctrl` handles the data path to memory:

* **Words.** Each set is serialised into eight 32-bit words
  `{I[15:0], Q[15:0]}`, channel 0 first, into a 64-entry FIFO.
* **Memory port.** Words go to the memory port, a request/ready port with
  in-order read data that stands in for a DDR3 controller's user interface.
  The address space is a ring of `2^MEM_AW` words (2^26 by default).
* **Read-back.** Words are read back into a second FIFO whenever there is room
  for all reads in flight.
* **Stream.** The output stream marks `out_last` after every `FRAME_WORDS`
  (256) words and on the last word of an acquisition.
* **Overflow.** A set that arrives while the previous one is still being
  serialised is dropped and counted. The count is readable. At the design's
  rates this cannot happen (8 cycles of work against about 1970 cycles
  between sets).

`eth_tx` buffers one frame, then sends it on GMII at one byte per clock
(1 Gb/s). The frame is laid out as follows:

| Bytes | Content |
| --- | --- |
| 7 + 1 | preamble 0x55, SFD 0xD5 |
| 6 | destination MAC (default broadcast) |
| 6 | source MAC (default 02:00:00:00:4D:52, locally administered) |
| 2 | EtherType 0x88B5 (local experimental) |
| 2 | frame sequence number, counting from 0 after reset |
| 4·n | n data words, big-endian |
| 0..  | zero padding to the 60-byte minimum |
| 4 | CRC-32 FCS over destination MAC .. padding, LSB first |

After the frame come at least 12 idle cycles. A full 256-word frame carries
1024 data bytes.

## Host registers (`reg_config`)

Writes are synchronous (`host_wr_en`, `host_addr`, `host_wdata`). Reads are
combinational on `host_rdata`.

| Addr | Name | Bits | Reset |
| --- | --- | --- | --- |
| 0x00 | CTRL | 0: start pulse, 1: start acquisition, 2: sync phases (pulses); 3: auto_acq (held) | 0 |
| 0x01 | CAR_FTW | carrier tuning word (f = K·125 MHz/2^32) | 476913168 (13.88 MHz) |
| 0x02 | CAR_PHASE | 14-bit carrier phase offset | 0 |
| 0x03 | CAR_AMP | 14-bit carrier amplitude | 0x3FFF |
| 0x04 | ENV_FTW | envelope tuning word (pulse = 2^32/K cycles) | 13317 (2.58 ms) |
| 0x05 | ENV_PHASE | 14-bit envelope phase offset | 0 |
| 0x06 | ENV_AMP | 14-bit envelope amplitude | 0x3FFF |
| 0x07 | LO_FTW | receive LO word (f = K·65 MHz/2^32) | 917140708 (13.88 MHz) |
| 0x08 | LO_PHASE | 14-bit receive LO phase offset | 0 |
| 0x09 | ACQ_LEN | output sample sets per acquisition | 256 |
| 0x0A | ADC_SPI | [20:8] ADC register address, [7:0] data; writing sends it | 0 |
| 0x0B | STATUS | 0: pulse busy, 1: acquisition busy, 2: SPI busy (read only) | |
| 0x0C | OVF | dropped sample sets (read only) | 0 |

A typical shot follows these steps:

1. Write the ADC setup through ADC_SPI.
2. Write CTRL = 0x4 once, to lock the phases.
3. Write CTRL = 0x9 for each shot (pulse with auto-acquire).
4. Poll STATUS and read the frames on the PC.

The tuning word for a frequency f is `floor(f / f_clk · 2^32)`, with
f_clk = 125 MHz for the carrier and 65 MHz for the LO.

## How far it follows the original design, and where it departs

### Taken from the original design

* The DDS structure and widths: a 32-bit frequency word, a 14-bit phase and
  amplitude, and a 16384 × 14 table.
* Sinc/gaussian envelope tables multiplied with a carrier.
* The 14-bit 125 MS/s DAC and the 8-channel 14-bit 65 MS/s ADC.
* Quadrature mixing with an on-chip DDS.
* Filter stages of exactly these types and counts: two CIC, two CIC
  compensators, three half-band and one FIR.
* The 20 kHz signal bandwidth and the test pulse of 13.88 MHz and 2.58 ms.
* Intermediate storage in external DDR3 memory, and Ethernet transfer to the
  PC.

### This design's own choices

The original gives no filter coefficients, decimation factors, bit widths
inside the receive chain, register map, pulse-timing scheme, storage scheme
or frame format. These are this design's own:

* **Filter order.** The stage order CIC → compensator → CIC → compensator →
  3 × half-band → FIR is chosen here. One of the original's figures draws
  both CICs first, then both compensators. The interleaved order keeps each
  compensator next to the CIC it corrects.
* **Phase register width.** The original calls the phase register both
  14-bit and 32-bit. Here the accumulator is 32 bits and the added phase
  offset is 14 bits.
* **Coefficient loading.** Coefficients are fixed at build time; they are not
  loaded at run time from files.
* **Pulse timing.** A pulse is exactly one envelope-table period, started by
  a register write. The acquisition may open automatically at the pulse end.
  The original only says that the FID is recorded after the pulse.
* **Pulse amplitude.** The 317 mV pulse amplitude of the original is set by
  the DAC and analog chain. Here the digital side only offers the two 14-bit
  amplitude words.
* **Clocking.** One system clock at the DAC rate (125 MHz) runs all logic
  except the ADC lane capture.

### Not included

These parts are not logic, or are vendor blocks:

* the analog front end and RF amplifier
* the converters themselves
* the DDR3 controller and PHY
* the Ethernet PHY and RGMII output primitives
* clocks, resets and power
* pulse-sequence timing for imaging (gradients, repetition)

The memory and ADC appear in the testbenches as behavioural models
(`tb/mem_model.sv`, `tb/adc_model.sv`).

### Tool notes

* **Synthesis of the DDS table.** The waveform tables are computed with real
  arithmetic (`$sin`, `$exp`) in an `initial` loop. Simulators and the slang
  front end accept this. Yosys' coarse synthesis of a real-valued table
  initialiser does not, so it gives no size estimate for modules containing
  a DDS. An FPGA flow would load the same table from a memory-initialisation
  file.
* **Reset warnings.** The lint warning that `rst_n` is used both as an
  asynchronous reset and as a synchronous signal comes from the
  `disable iff (!rst_n)` clauses of the assertions. It is not a circuit
  issue.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`. The table lists what each one checks.

| Testbench | Checks |
| --- | --- |
| `tb_dds` | every output against a reference accumulator and sine for random tuning words, phases and amplitudes; quadrature, clear, wrap, latency, sinc table |
| `tb_am_modulator` | product, saturation, gating, offset-binary code |
| `tb_rf_pulse_gen` | pulse length, done timing, sinc envelope shape, carrier zero crossings, mid-scale idle, start ignored while busy, identical pulses after identical sync-to-start delays |
| `tb_adc_spi` | frame bits, SCLK period and idle level, busy, start ignored while busy |
| `tb_adc_deser` | random word sets at 65 MS/s through the serial model and the clock crossing: order, no loss or duplication, strobe rate |
| `tb_quad_mixer` | exact products against a reference, demodulation of a synthetic signal to zi/2, zq/2 |
| `tb_cic_decim`, `tb_cic_comp`, `tb_halfband`, `tb_fir` | random inputs (with full-scale values and input gaps) against a reference model of each filter, latency, DC gain, integrator wrap-around (CIC) |
| `tb_ddc_channel` | on-resonance signal to `A e^{jφ}` within 1 %, 5 kHz offset passed, 150 kHz offset rejected, one output per 1024 inputs |
| `tb_mr_rx` | eight channels with different amplitudes and phases, LO phase-offset rotation |
| `tb_reg_config` | reset values, read-back, command pulses, SPI fields, status |
| `tb_storage_ctrl` | lossless run through a ring that wraps, frame marks, overflow counting under a stopped reader |
| `tb_eth_tx` | full, short and padded frames; header, sequence, payload, CRC and gap |
| `tb_mri_top` | end to end at reduced sizes (16-word frames, 256-word ring, 4000-cycle pulse, 41 samples) |
| `tb_mri_full` | the same end-to-end test with every parameter and register at its default |

The end-to-end test counts these mechanisms:

* the SPI write
* the RF pulse length, peak and carrier frequency
* the acquisition opened by the pulse end
* coherent demodulation of all eight channels to `A_c e^{jφ_c}` within 2 %
* memory back-pressure
* ring wrap-around
* full and short Ethernet frames with valid CRC

`tb_mri_full` runs in about 10 s of wall time.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_mri_top \
  -y rtl -y tb +libext+.sv -Irtl rtl/mri_pkg.sv tb/tb_mri_top.sv
./obj_dir/Vtb_mri_top
```

The testbenches assume two-state simulation and use `$urandom` for stimulus.
