# DustNet implant: digital backend and chip model in SystemVerilog

DustNet is a network of sub-millimetre neural implants that share one external
ultrasound transducer. The transducer powers every implant, configures each one
over a downlink, and reads their neural samples back over an uplink. Each
implant receives a burst of ultrasound, harvests energy from it, and talks back
by changing how strongly its piezo crystal reflects the same burst
(backscatter). Several implants share one transducer by taking turns: time
division multiple access (TDMA), one implant per ultrasound pulse. Data rate
comes from multi-level amplitude modulation: an implant encodes up to 4 bits per
symbol by choosing one of 16 currents that load its piezo.

This repository holds synthesizable RTL for everything on the implant chip that
is digital logic: the protocol state machine, downlink demodulator, TDMA
scheduler, uplink symbol generator, sample FIFO, LFSR test source and sampling
clocks. It also holds behavioural (non-synthesizable) models of the four
mixed-signal parts the digital logic talks to directly: the envelope detector,
the ultrasound-on detector, the uplink current DAC and the 12-bit SAR ADC. With
those models, `dustnet_top` is one complete implant that can be simulated in a
network, with a testbench standing in for the interrogator.

## 1. One implant, block by block

```
             piezo
               |
  +------------+-------------------------------------------------------+
  |  rectifier + LDOs + references + POR + clock extraction + RC osc.  |  (not modelled:
  |  LNA/integrator (neural front end)                                  |   inputs/ports)
  +--+---------+-------------+-------------------+--------------+------+
     | env     | us_present  | clk_us (carrier)  | clk_lo 50kHz | v_afe
     v         v             |                   |              v
 envelope_   us_on_          |                   |          sar_adc (12 bit) <-- adc_sample
 detector    detector        |                   |              | d_out
     | env_bit | us_on       |                   |              |
  +--v---------v-------------v-------------------v--------------v------+
  | digital_backend                                                     |
  |   CLK_US domain                         |  CLK_LO domain            |
  |   dl_demod -> protocol_fsm -> config_regs  clk_gen (/8 -> 6.25 kHz) |
  |   symbol_clk_gen      |                 |  lfsr16                   |
  |   tdma_scheduler -> uplink_ctrl <------ async_fifo <- sample_select |
  +----------------------------+-----------------------------------------+
                               | ul_en, ul_data (I-DAC code), ul_fs
                               v
                         uplink_idac (15 unit sources, I_M = 4..40 uA)
```

Two clocks drive the logic, and their relation is the central difficulty of the
design:

* **CLK_US** is recovered from the ultrasound carrier (2 MHz). It exists *only
  while the interrogator is transmitting*. Everything that talks to the link
  runs on it: demodulation, the protocol state machine, the configuration
  registers, TDMA counting and the uplink modulator.
* **CLK_LO** is a 50 kHz on-chip RC oscillator that always runs after
  power-on. It is divided by 8 into the 6.25 kHz sampling clock. On every
  sample the FIFO is written with either a 9-bit slice of the ADC result or the
  low 9 bits of a 16-bit LFSR (used to measure bit-error rate).

The FIFO between the two domains is therefore fully asynchronous: Gray-coded
pointers, two-flop synchronisers, and a reader whose clock may stop for long
stretches. The two configuration bits used on the CLK_LO side (LFSR enable and
ADC slice) cross through plain two-flop synchronisers. This is safe because
they change only in Config Mode, long before uplink data matter.

Power-on reset (`por_n`) resets both domains asynchronously. It has to: when
the chip powers up there is no carrier clock yet.

## 2. Config Mode: addressing and configuring an implant

After power-up every implant is in Config Mode. A Config Mode pulse has four
parts:

| part        | content                                                   | who modulates |
|-------------|-----------------------------------------------------------|---------------|
| charge-up   | carrier at full amplitude                                 | nobody        |
| preamble    | `10` repeated 32 times, 2-level ASK, W carrier cycles each | interrogator  |
| header      | `11001100`                                                | interrogator  |
| data        | 48 bits, Manchester coded (`10` = 1, `01` = 0)            | interrogator  |
| uplink      | acknowledgement `0101` + received 8-bit ID, 2-level ASK   | addressed implant |

**Envelope detection.** The envelope detector compares the instantaneous
envelope with its own long-term average, so a symbol reads as 1 while the
carrier is above average. Manchester coding keeps that average fixed during the
data. The model uses two first-order recursive filters, updated once per
carrier cycle (coefficients 3/4 and 1/16), and a comparator clocked by CLK_US.

**Symbol width.** The interrogator chooses W, the number of carrier cycles per
downlink symbol, so the implant has to measure it. `dl_demod` works as
follows:

1. It waits for the first 1-to-0 transition. The first `1` of the preamble
   merges with the charge-up.
2. It skips 8 runs while the envelope average settles.
3. It adds up the lengths of the next 32 runs, of 1s and 0s alike, and shifts
   the sum right by 5 to get the average width.
4. It then re-aligns on every envelope transition. `symbol_clk_gen` places a
   sampling strobe (CLK_DL) at the middle of each symbol: after W/2 cycles
   following a transition, and after every further W cycles.
5. A shift register hunts for `11001100`. After it, the demodulator decodes
   symbol pairs into bits.
6. An invalid pair (`00` or `11`) raises `dl_error` and abandons the frame.
   The next pulse restarts the demodulator.

The testbenches exercise widths from 4 to 24 carrier cycles, with ±1 cycle of
jitter.

**Frame layout.** The 48 data bits are an 8-bit target ID followed by a 40-bit
configuration word, most significant bit first. Each chip has a 3-bit ID set
by pads. An implant accepts a frame when the target ID is not zero and its low
3 bits equal the pad ID. It then stores the word and, after a 16-cycle
charge-up pause, backscatters `0101` and the received ID. Target ID `0x00` is
reserved: every implant that receives it switches to Uplink Mode, and stays
there until the next power-on reset.

**Configuration word** (`dustnet_pkg::cfg_word_t`; bit 39 arrives first):

| bits  | field       | meaning                                     | range        |
|-------|-------------|---------------------------------------------|--------------|
| 39:36 | `idac_fs`   | I-DAC unit current, 4 µA × (code+1), capped at 40 µA | 4–40 µA |
| 35:32 | `nsamp_m1`  | samples per uplink packet − 1               | 1–16         |
| 31:30 | `m_m1`      | bits per symbol M − 1 (2, 4, 8, 16 levels)  | M = 1–4      |
| 29:27 | `nimp_m1`   | implants in the network − 1                 | 1–8          |
| 26:24 | `ulidx_m1`  | this implant's uplink slot − 1              | 1–8          |
| 23    | `lfsr_en`   | send PRBS instead of ADC data               | 0/1          |
| 22:20 | `ncps_code` | carrier cycles per uplink symbol = 4 + 2·code (code 7 → 16) | 4–16 |
| 19:18 | `adc_slice` | ADC bits stored: 0-8, 1-9, 2-10, 3-11       | 0–3          |
| 17:0  | reserved    | ignored                                     |              |

The set of parameters and their ranges are the published ones. The bit
positions, the encodings and the reset values are this design's own. The reset
values are: 1 implant, slot 1, 16-level ASK, 8 cycles per symbol, 12 samples,
bits 3-11, ADC data, 4 µA.

## 3. Uplink Mode: TDMA packets

Every pulse after the `0x00` frame is an Uplink Mode pulse. The US-on detector
raises `us_on` a few carrier cycles after the carrier appears. In hardware, the
carrier discharges a capacitor; the model rises on the third falling carrier
edge. It clears as soon as the carrier is gone.

`tdma_scheduler` counts the rising edges of `us_on` modulo the number of
implants. The first Uplink Mode pulse is slot 1. In its own slot the implant
sends one packet:

```
| charge-up 16 cyc | 1 0 1 0 | n4 n3 n2 n1 n0 | sample 0 ... sample n-1 |
                    \_____ 2-level, NCpS cycles each ____/ \_ 2^M-level _/
```

* `n` is the number of samples that follow:
  min(configured samples per packet, words in the FIFO), fixed when the packet
  starts. An empty FIFO gives a header with `n = 0`.
* For M = 1, 2 and 4, each sample is the upper 8 of the 9 stored bits, sent as
  8, 4 or 2 symbols. For M = 3 it is all 9 bits, sent as 3 symbols. Symbols go
  most significant first.
* An M-bit symbol value v becomes the I-DAC code v × 15, v × 5, v × 2 or v
  (M = 1, 2, 3, 4), so the 2^M levels span the DAC range evenly. Header
  symbols use codes 0 and 15.
* Each symbol lasts exactly NCpS carrier cycles. `uplink_ctrl` restarts the
  CLK_UL symbol timer when the header starts.
* While `ul_en` is high the I-DAC is connected and the rectifier's pass
  devices are off. The modelled I-DAC steers I_M × code into the half-cycle
  selected by `pos_half`.

The FIFO is read with first-word fall-through: a word is popped as its first
symbol is loaded. A write into a full FIFO is dropped and sets the sticky
`fifo_overflow` flag, so unread data is never overwritten.

## 4. Rate budget

Two inequalities decide whether a network configuration is lossless.

* **Rate:** f_s·N_bit ≤ f_c·M / (2·NCpS·N_imp). The factor 2 is the
  pulse-echo duty cycle.
* **FIFO:** depth ≥ N_imp·T_pulse·f_s.

The design runs at f_s = 6.25 kHz, f_c = 2 MHz and depth 16:

| configuration | needed | available | fits |
|---|---|---|---|
| 8 implants, 16-level ASK, NCpS 8, 8-bit samples, 237.5 µs pulses | 50 kb/s; 11.9 words | 62.5 kb/s; 16 words | yes |
| same with 8-level ASK, 9-bit samples | 56.3 kb/s | 46.9 kb/s | no (FIFO overflows) |
| 8-level ASK, 9-bit samples, 4 implants | 56.3 kb/s | 93.8 kb/s | yes |

In the published measurement, each of 4 active implants (8 configured) sends
24 symbols of 4 bits per 8 pulses of 1.9 ms. That is 12 samples per packet
against 11.9 produced, so it holds. Note the airtime it implies: with this
design's 16-cycle charge-up, a 12-sample packet takes 16 + 33 × 8 = 280
carrier cycles (140 µs).

## 5. Behavioural models

All four models are simulation-only: they use `real` ports and values. Each
says so in its first comment line.

| model | what it reproduces | what it leaves out |
|---|---|---|
| `envelope_detector` | fast and slow envelope filters, comparator clocked by CLK_US | filter corner frequencies (unpublished) |
| `us_on_detector` | carrier present → flag after 3 carrier edges; immediate clear | the current-source recharge time |
| `uplink_idac` | I_M = 4 µA·(fs+1) ≤ 40 µA, 15 unit sources, half-cycle steering, rectifier disable | device mismatch |
| `sar_adc` | 12-bit offset-binary binary search over ±1 V, sampled on the 6.25 kHz strobe | noise, chopping, conversion time |

The rectifier, LDOs, references, power-on reset, clock extraction, RC
oscillator and neural front end (LNA and integrator) have no logic function
here. They appear only as the top's ports: `por_n`, `clk_us`, `clk_lo`,
`us_present`, `env` and `v_afe`.

## 6. Departures from the published description, and own choices

* **ID width.** The downlink carries an 8-bit target ID, but the chip has
  3 ID pads. This design compares the low 3 bits of a non-zero target with the
  pads. An 8-bit value printed as a chip ID in the measured acknowledgement
  waveform suggests the real comparison may differ.
* **Header count.** The uplink header carries the number of *samples*, as the
  text says. The published timing diagram labels the field as a number of
  transmitted symbols. The field is 5 bits wide, to hold 0–16.
* **Own choices** (nothing published on them):
  * the uplink charge-up length (16 cycles);
  * sending the acknowledgement after the same charge-up pause;
  * dropping new words when the FIFO is full;
  * the Manchester polarity;
  * the symbol-width averaging window (8 skipped runs, 32 averaged);
  * the I-DAC code mapping of 2^M levels;
  * the configuration bit layout and reset values;
  * the envelope filter coefficients.
* **Digital supply control.** The published block diagram shows a control
  line from the digital backend to the reference block, and a digital supply
  of 0.8–1.1 V. The text gives the supply as 0.8 V and never says what the
  control does, so no such output exists here.
* **Uplink Mode is final** until power-on reset. A receiver that misses the
  `0x00` frame stays in Config Mode.
* **Sample timing.** The ADC converts on the sampling strobe. The word written
  to the FIFO on that strobe is the previous conversion, so the data lag by one
  sample period (160 µs).

## 7. Verification

Each block has a self-checking testbench `tb/tb_<block>.sv` that compares
against an independently computed model. Each ends by printing
`TB_RESULT checks=N failures=M`, and each has a watchdog. Highlights:

* **`tb_async_fifo`:** two unrelated clocks. First the reader is stopped
  while 18 words are written: 2 are dropped and the overflow flag is set.
  Then 2000 random words stream with random enables against a scoreboard.
* **`tb_dl_demod`:** widths 4–24 with jitter, a Manchester error, and
  recovery on the next pulse.
* **`tb_uplink_ctrl`:** 40 random packets for all M and NCpS, and the
  acknowledgement. Checks every symbol's code and its exact cycle count.
* **`tb_digital_backend`:** two backends on one digital link. Covers
  configuration, acknowledgement, the Uplink Mode switch, LFSR continuity
  across packets, ADC data against the driven values, and the 6.25 kHz sample
  rate.
* **`tb_dustnet_top`:** the end-to-end and full-size test. It runs four
  complete implants at default parameters (pad IDs 1–4, 8 configured) through
  a corrupted frame, four configurations with random symbol widths, a frame
  for an absent ID, the `0x00` switch, and 5 TDMA frames of 8 pulses of
  237.5 µs. It decodes every backscattered symbol from the DAC codes. It
  checks each implant's slot, packet format, LFSR data against a reference
  LFSR (lossless), ADC data against the driven voltages, the I-DAC currents,
  and that no two implants ever modulate together. It counts every mechanism:
  * downlink error
  * configuration write
  * acknowledgement
  * ignored frame
  * mode switch
  * TDMA slot
  * idle slot
  * FIFO overflow
  * full and partial packets
  * LFSR and ADC data
  * all four ASK orders
  * I-DAC modulation
  * symbol timing
  * sample rate

  A mechanism that never occurred is a failure. It simulates 15 ms in well
  under a second.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
          rtl/dustnet_pkg.sv tb/tb_dustnet_top.sv --top-module tb_dustnet_top
./obj_dir/Vtb_dustnet_top +verilator+rand+reset+2
```

Replace `tb_dustnet_top` with any other testbench name. Simulation is
two-state. Uninitialised variables start random, so everything that is read is
reset.

## 8. Files

* `rtl/dustnet_pkg.sv`: constants, the configuration word type, and helper
  functions (NCpS decoding, symbols per sample, ASK code mapping, ID match).
* `rtl/clk_gen.sv`, `lfsr16.sv`, `sample_select.sv`, `async_fifo.sv`: the
  sampling path.
* `rtl/dl_demod.sv`, `symbol_clk_gen.sv`, `protocol_fsm.sv`,
  `config_regs.sv`, `tdma_scheduler.sv`, `uplink_ctrl.sv`: the link.
* `rtl/digital_backend.sv`: both domains wired together; synthesizable top of
  the digital part.
* `rtl/envelope_detector.sv`, `us_on_detector.sv`, `uplink_idac.sv`,
  `sar_adc.sv`: behavioural models.
* `rtl/dustnet_top.sv`: one implant (digital backend and models).
* `tb/`: one testbench per module, named `tb_<module>.sv`.
