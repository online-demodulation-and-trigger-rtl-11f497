# Flux-ramp demodulator with online event trigger

This is SystemVerilog RTL for the digital back end of a multiplexed SQUID readout. Each sensor channel's SQUID is swept by a periodic sawtooth flux ramp. The SQUID response is periodic in flux, so every ramp period produces a few periods of a nearly sinusoidal signal. The sensor's own flux (the quantity of interest) appears only as a **phase shift** of that sinusoid. The design does two jobs:

1. It recovers that phase for every channel and every ramp: **flux-ramp demodulation**.
2. It watches the resulting slow phase stream for detector pulses and cuts them out as events. Each event is stored with some history from before the trigger, given a header and sent to a DMA engine: **online trigger**.

Only events leave the chip, not the continuous stream, so the data rate drops by orders of magnitude.

Everything runs in time-division multiplex (TDM): one clock carries one sample of one channel. The default build handles 32 channels on a 500 MHz clock, which is 15.625 MS/s per channel. With a 125 kHz flux ramp that gives N = 125 samples per ramp.

```
 I/Q TDM stream ─► frdemod ──── phase (1 per channel and ramp) ───► event_detect ──► m_axis (DMA clock)
  ramp sync    ─►  (cfg_*)        also on phase_* outputs            (AXI4-Lite regs)
```

## 1. What the demodulator computes

Take one channel's samples s(n) within ramp m, n = 0 … N−1. The carrier frequency f_r is the number of SQUID periods per ramp times the ramp rate. The phase is

    phi_m = atan2( Σ s(n)·cos(2π f_r/f_s · n),  Σ s(n)·sin(2π f_r/f_s · n) ),   n = o_beg … N−2−o_end

This is a single-bin DFT at the carrier, with the cosine sum as the numerator. The two skip counts o_beg and o_end leave out the samples disturbed by the flyback of the ramp. For a response s(n) = DC + A·cos(ωn + θ), the result is φ = θ + π/2. The constant π/2 and any fixed offset disappear in the baseline of the event detector.

The phase is output as a 16-bit two's-complement number, where 2^16 is one full turn (one flux quantum).

### Chain (`frdemod`)

| Stage | Module | What happens | Rate / latency |
|---|---|---|---|
| magnitude | `abs_cordic` | The microwave-SQUID input is a complex envelope I+jQ, and its magnitude is the SQUID response. A 16-stage pipelined vectoring CORDIC computes it, with the CORDIC gain removed by a constant multiply. | 1 sample/clock, 19 clocks |
| control | `demod_ctrl` | Counts channels (free-running from reset) and the sample number n within the ramp. It waits for `in_sync`, which must come with channel 0's sample. It marks the first, the accumulated (o_beg…N−2−o_end) and the last accumulated sample. | combinational |
| oscillator | `nco` | One 32-bit phase accumulator per channel is restarted on the ramp's first sample. It adds the channel's increment f_r/f_s·2^32. The top 16 bits address a quarter-wave sine table of 2^14 entries; the cosine reads the same table a quarter turn later. | 1 clock |
| window (option) | `window_ram` | Only with `USE_WINDOW=1`, the dc-SQUID variant: the real input `in_s` is multiplied by a coefficient w[n] (unsigned Q1.15), before the offset subtraction. | 1 clock |
| correlator | `correlator` | A pre-adder subtracts the channel's DC offset. The difference is multiplied by sin and by cos, and each product is added to a 48-bit accumulator. | 1 sample/clock |
| scaling | `truncation` | Finds the highest significant bit of the two sums. It shifts both right by the same amount so that they fit 24 bits; their ratio, and so the angle, is kept. | 1 clock |
| buffer | `sync_fifo` | All channels finish their window in the same frame, 32 results in 32 clocks. The FIFO lets the slow arctan unit catch up. | depth 32 |
| arctan | `atan_cordic` | Sequential vectoring CORDIC, 18 iterations, one per clock. It first pre-rotates by π into the right half-plane. | 20 clocks per result |

The phases of one ramp leave in channel order, one every 20 clocks. 32 × 20 = 640 clocks is far inside the 4000 clocks of a ramp.

### The accumulator ring

The awkward part of TDM is per-channel state. Each channel needs its sine sum, cosine sum and DC offset, and channel c's state is touched once every 32 clocks. The correlator keeps these three values for all channels in a **ring of 32 entries that shifts by one entry every sample**. The entry at the head is always the one for the channel now on the input. It is read, updated with the new product and pushed back in at the tail. No addressing is needed; alignment holds because the channels arrive strictly in order.

- A head-channel counter tracks which channel sits at the head. An assertion checks that it matches the incoming channel.
- An offset write for channel c goes straight into the ring entry now holding c. The position is (c − head) mod 32, corrected by one if the ring shifts in the same clock.

## 2. Event detection (`event_detect`)

The input is the phase stream: one 16-bit sample per channel and ramp, channels in order 0…31. The module is split into a signal-clock part and a DMA-clock part.

### Trigger filter

Two delay lines (`tdm_delay`, "FIFO stage 1" and "stage 2") each delay the stream by L = 4 frames. A frame is one sample of every channel. For every sample x[n] they supply x[n−4] and x[n−8]. `trigger_engine` keeps two recursive moving sums per channel:

    a1 += x[n] − x[n−4]        (newest 4 samples)
    a2 += x[n−4] − x[n−8]      (the 4 before them)
    t   = a1 − a2              (smoothed derivative, 19 bits)

A pulse's steep rising edge makes |t| grow and then fall again. A **3-point peak detector** fires for sample n−1 when

    |t[n−2]| < |t[n−1]| ≥ |t[n]|   and   |t[n−1]| > threshold

The trigger value t[n−1] is stored with the event. Using |t| means negative-going pulses trigger too.

### Pre-trigger buffer

The stage-2 output feeds a third `tdm_delay` of `pretrig_len` frames (1…256, set by register). When a trigger fires, the sample taken from this buffer is the first sample of the event. The event therefore starts 2·L + `pretrig_len` frames before the sample that completed the peak. This shows the baseline before the pulse.

All three delay lines are circular memories of 32 × (frames) words. They read out zero until they have been filled once, so a fresh start cannot trigger on uninitialised memory.

### Slots and descriptors

Event samples go into a memory of 8 slots × 512 samples (`event_bram`). The slots are owned through **descriptors**, each holding:

- slot number
- length
- channel
- 48-bit timestamp
- trigger value
- pile-up flag

The descriptors circulate between two 8-deep shift-register FIFOs (`desc_fifo`):

- **empty**: at reset it holds every slot number.
- **filled**: finished events waiting to be sent.

`storage_logic` keeps per-channel metadata (active, slot, sample count, pile-up flag, timestamp, trigger value) in arrays indexed by the channel. For each sample:

- **Idle channel, trigger fires.** It pops a free descriptor, latches the timestamp (`timestamp_counter`, clock cycles since reset) and the trigger value, and writes word 0 of the slot.
- **Idle channel, trigger fires, but no free descriptor.** Every slot is busy, so the event is **discarded** and the `discarded` counter increments.
- **Recording channel.** It writes the next word. A second trigger during the recording sets the **pile-up** flag. After `ev_len` samples the completed descriptor is pushed into the filled FIFO and `stored` increments.

Eight slots follow from an Erlang-B estimate. Events arrive independently (Poisson) and each holds a slot for its length. The offered load is E = 20 active channels × 20 events/s × 3.5 ms = 1.4 erlang. The Erlang-B blocking probability with 5 slots is B(5, 1.4) ≈ 1.1 %, so 5 slots already keep about 99 % of the events. That is rounded up to a power of two, 8. 512 samples cover 3.5 ms at the 8 µs ramp period (438 samples).

### Clock crossing and forwarding

The DMA side runs on its own clock `clk_dma`. The slot memory has its write port on `clk` and its read port on `clk_dma`. Descriptors cross in both directions through `cdc_handshake`:

- a toggle request/acknowledge pair with two-flop synchronisers;
- one word in flight at a time.

Filled descriptors go to the DMA side, and sent ones come back to the empty FIFO. `forwarding_fsm` takes a filled descriptor and sends one packet on the 32-bit stream port `m_axis_*` (valid/ready/last):

| word | content |
|---|---|
| 0 | `{pileup, 7'b0, channel[7:0], length[15:0]}` |
| 1 | timestamp[31:0] |
| 2 | `{16'b0, timestamp[47:32]}` |
| 3 | trigger value, sign-extended |
| 4 … 3+length | event samples, sign-extended, `tlast` on the last |

After the last word the descriptor returns to the empty FIFO. Back-pressure on `m_axis_tready` simply holds the state machine. Slots then stay occupied longer, and if they run out, new events are discarded.

## 3. Programming

### Demodulator configuration port (`cfg_we`, `cfg_sel`, `cfg_idx`, `cfg_data`, clk domain, one write per clock)

| `cfg_sel` | name | `cfg_idx` | `cfg_data` |
|---|---|---|---|
| 0 | phase increment | channel | round(f_r/f_s · 2^32) |
| 1 | DC offset | channel | signed, 17 bits, subtracted from the magnitude (or from the windowed sample) |
| 2 | sine table | 0 … 16383 | round(32767 · sin(2π(i+0.5)/65536)) |
| 3 | window | sample n (0 … 1023) | coefficient, 32768 = 1.0 |
| 4 | ramp length N | – | default 125 |
| 5 | o_beg | – | default 0 |
| 6 | o_end | – | default 0 |

The sine table must be loaded after reset (16384 writes). The half-sample offset in its formula makes the mirrored quarters exact.

### Event-detector registers (AXI4-Lite, `clk` domain, 8-bit byte addresses)

| addr | register | reset |
|---|---|---|
| 0x00 | enable (bit 0) | 0 |
| 0x04 | threshold on \|t\| | 256 |
| 0x08 | pre-trigger length, frames (1…256) | 32 |
| 0x0C | event length, samples (1…512) | 438 |
| 0x10 | discarded events (read only) | 0 |
| 0x14 | stored events (read only) | 0 |

Responses are always OKAY. These four constant response bits are the only idle outputs of the top.

## 4. Parameters and sizes

Shared constants live in `rtl/frd_pkg.sv`:

| name | default | meaning |
|---|---|---|
| `CHANNELS` | 32 | TDM channels |
| `NCO_ADDR_W` / `NCO_AMP_W` | 16 / 16 | DDS phase and amplitude bits |
| `CORR_ACC_W` | 48 | correlator accumulators |
| `TRUNC_W` | 24 | arctan input width |
| `PHASE_W` | 16 | output phase |
| `WIN_DEPTH` | 1024 | maximum windowed ramp length |
| `MAW_LEN` | 4 | moving-average length |
| `PRETRIG_MAX` | 256 | pre-trigger frames per channel |
| `SLOTS` | 8 | event slots |
| `SLOT_DEPTH` | 512 | samples per slot |
| `TS_W` | 48 | timestamp |

`frd_top` has two parameters: `CHANNELS` and `USE_WINDOW` (0 = microwave SQUID, complex input through the magnitude CORDIC; 1 = dc-SQUID, real input `in_s` with window).

The memories hold about 480 kbit at the defaults:

- pre-trigger delay: 131 kbit
- slots: 65 kbit
- window: 16 kbit
- sine table: 256 kbit (written as arrays; an FPGA flow maps them to block RAM)

## 5. What comes from the published design and what does not

The published design fixes:

- the block structure of both halves;
- the sum limits with o_beg/o_end;
- the 16-bit DDS;
- the accumulator-plus-offset ring that shifts per channel;
- the MSB-based truncation;
- the FIFO before a sequential arctan;
- the window option for dc-SQUIDs;
- the two MAWs built from FIFO stages, shift register, subtractor and accumulator;
- the 3-point trigger with threshold;
- the 256-sample variable pre-trigger FIFO;
- the timestamp;
- the metadata ring;
- the empty and filled descriptor shift-register FIFOs;
- the handshake clock crossing;
- the two-port slot memory;
- header-then-data forwarding;
- an AXI4-Lite register interface;
- the sizes: 32 channels at 500 MHz, a four-sample MAW, 8 slots and up to 1024 ramp samples.

This implementation's own choices:

- **CORDICs.** The original uses vendor CORDIC cores. Here both are plain radix-2 CORDICs with extra internal fraction bits: 3 in the magnitude unit and 8 in the arctan unit. They are accurate to a few LSB; the arctan tests allow ±8 LSB of 2^16 against floating point.
- **Widths.** 17-bit corrected signal, 48-bit sums, 24-bit arctan input, 16-bit phase, 19-bit trigger value.
- **Configuration.** The configuration port and loading the sine and window tables from outside are this design's own. The original does not describe how tables are loaded.
- **NCO restart.** The NCO restarts at phase 0 on each ramp's first sample.
- **Ramp sync.** Sync is assumed to arrive with channel 0. After the window the demodulator idles until the next sync.
- **Trigger comparisons.** The exact rule (strictly rising, then not rising) is this design's reading of "fires when |t| reaches its highest point above the threshold".
- **Pre-trigger length.** Read as 256 frames per channel, not 256 samples in total.
- **Event length.** Fixed per run by a register, up to 512.
- **Packet and registers.** The packet layout, the register map, the discard and stored counters, and the toggle handshake are all this design's own.
- **Timestamps.** The timestamp counts `clk` cycles. It is latched in the clock cycle of the trigger decision, a fixed number of clocks after the phase sample that completed the peak.

Not included: the ADC, channelizer and down-conversion that produce the I/Q stream; the ramp generator (its sync is an input); the DMA core and DDR memory (the stream port stands in for them); and the cryogenic multiplexer.

## 6. Verification

Every module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`. Each ends with a line `TB_RESULT checks=<n> failures=<m>` and has a watchdog. Expected values are computed independently inside the testbench: floating-point CORDIC and atan2 references, DFT sums, and reference models of the MAW, peak detector, slot allocation and packet format. Stimulus uses `$urandom`.

The whole-chain test `tb/tb_frd_top.sv` runs the top at its default parameters, with no overrides:

- loads the 16384-entry sine table, 32 phase increments and offsets, o_beg = o_end = 1;
- feeds 110 ramps of 32 channels, with 5 signal periods per ramp and a random envelope rotation per channel;
- gives each channel its own flux baseline, plus pulses: single events, a pile-up, a burst on ten channels at once (more than the 8 slots) and a negative pulse;
- applies random back-pressure on the stream.

It checks every one of the 3520 phases against floating point (±8 LSB). Every packet word is checked against a model driven by the observed phase stream, timestamp differences against the observed sample times, and the discarded/stored registers over AXI4-Lite. It also counts ramp syncs, triggers, pre-trigger samples, pile-ups, discards, stalls and descriptor returns across the clock crossing, and fails if any count is zero. It finishes in about ten seconds of simulation.

The window path (`USE_WINDOW = 1`) has its own test, `tb/tb_frdemod_window.sv`. It builds the dc-SQUID configuration: 4 channels and 1000-sample ramps. Each channel carries two flux-ramp responses, one with 40 periods per ramp and one with 44.4; the oscillator is tuned to the first. The test checks every phase against the windowed correlation. It then measures how much the second signal disturbs the measured phase of the first:

- rectangular window (all coefficients 1.0): about 670 LSB worst case, roughly 0.06 rad;
- Blackman window: about 10 LSB.

The test requires at least a factor of four improvement.

`tb/tb_event_detect_erlang.sv` tests the slot sizing under realistic traffic. Twenty channels receive Poisson pulses at 20 events/s each. The events are 438 samples long and the run lasts 400 000 frames (3.2 s of measurement time, 12.8 M clocks, about 20 s to simulate). Two detectors see the same stream, one with 5 slots and one with the default 8.

Over about 1300 pulses, roughly 100 of which pile up:

- the 5-slot detector lost 0.67 % of the events; Erlang-B predicts 1.1 %. The result is somewhat lower because a channel that is already recording cannot ask for a second slot.
- the 8-slot detector lost none.

The 5-slot discard count matches a cycle-level reference model exactly.

### Running a test with Verilator

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -y rtl -y tb +libext+.sv rtl/frd_pkg.sv tb/tb_frd_top.sv --top-module tb_frd_top
./obj_dir/Vtb_frd_top +verilator+rand+reset+2
```

Replace `tb_frd_top` with any other testbench. `+verilator+rand+reset+2` randomises uninitialised state, so a test only passes if reset really initialises everything it reads.
