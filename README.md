# Event-driven 49-channel neural recorder with on-chip PCA spike compression

Extracellular neural recordings are mostly noise: the spikes that matter occupy a few
percent of the samples. This design exploits that at two levels. First, the 49 electrode
channels share a single 8-bit ramp ADC, and a channel is only digitized when its signal
has crossed a primary threshold, or when it is already part of a spike. Second, every
detected spike is confirmed against a secondary threshold and then reduced to four 6-bit
principal components, computed on the fly from the samples as they come out of the ADC.
The chip sends 24 bits per spike instead of the 22 x 8 bits of the raw waveform. That is
about 330 times less than streaming the whole signal when neurons fire at about 20 Hz.

The RTL covers the complete digital part of the chip:
- the per-pixel digital front-ends;
- the shared ramp ADC logic (counter, thermometer decoder, address decoder, counter buffer);
- spike detection and compression with its channel and coefficient memories;
- the central controller (Manchester command input, register bank, packet builder, 16 Mbit/s serializer).

The analog parts are outside the RTL: the amplifiers, sample-and-hold circuits and
comparators, the capacitor DAC of the ramp, and the references. They connect through
ports of `neural_recorder_top`. A behavioural model of one analog pixel (`tb/afe_model.sv`)
lets the testbenches close the loop.

Everything runs on one 16 MHz clock. Each 50 us sampling period (20 kHz) is 800 cycles.

## Signal path

```
 pix_cmp[48:0] ──► digital_front_end x49 ──sample──► ramp_adc ──(addr, code)──► spike_compressor
 (comparators)     synchro + pixel FSM  ◄──clear───  ramp_generator              channel_memory
                        ▲                            address_decoder             pca_weight_memory
                        └───── clear_trigger ◄──────────────────────────────────────┘      │ spikes
 din ──► central_controller: deserializer ─► register_bank ─► cfg ─► everything         │
 dout ◄──                    serializer ◄── packet_builder ◄── raw samples / spikes ◄────┘
```

| File | Role |
|---|---|
| `nr_pkg.sv` | Sizes, context and record structs, register map, packet constants |
| `synchro.sv`, `reset_synchronizer.sv` | Two-flop synchronizers for the comparators and the reset pad |
| `pixel_state_machine.sv`, `digital_front_end.sv` | Per-pixel gating and trigger logic |
| `ramp_generator.sv`, `thermometer_decoder.sv` | Ramp counter, DAC code, period timing, delayed counter |
| `address_decoder.sv` | Request arbitration, ramp pause, counter buffer |
| `ramp_adc.sv` | The two blocks above, wired together |
| `channel_memory.sv`, `pca_weight_memory.sv`, `spike_compressor.sv` | Detection state machine and PCA accumulation |
| `deserializer.sv`, `register_bank.sv`, `packet_builder.sv`, `sync_fifo.sv`, `serializer.sv`, `central_controller.sv` | Command and data link |
| `neural_recorder_top.sv` | Digital top |

## The shared ramp ADC

This is the part with the most subtle timing, so it gets the most detail here.

### One ramp per sampling period

At the start of each 800-cycle period, `ramp_generator` releases the DAC reset. It then
steps an 8-bit counter from 0 to 255, one code per clock. The thermometer decoder turns
count *c* into a 256-bit unary word with bits 0..*c* set, for the unary capacitor DAC.
For the rest of the period the DAC is held in reset (`ramp_dac_rst`). In that idle window
`sh_sample` is high, so the sample-and-hold of every pixel tracks its amplifier.

A pixel's comparator trips when the ramp passes its held voltage. The digital code of the
pixel is the counter value at that moment. With signal level *v* (in ramp steps), the
comparator output is high for every code *c* >= *v*, and the code reported is *v*.

### The pipeline between comparator and counter

The comparator output is asynchronous. It passes through a two-flop synchronizer, and then
an edge-detect flop in the pixel state machine raises `sample`. A request therefore
reaches the address decoder `DELAY` = 3 cycles after the ramp code that caused it. The
generator keeps a 3-stage delay line of the counter (`count_delayed`), so the decoder can
give each request the code of the cycle it was caused in.

The per-ramp strobes to the pixels come from the same delay line, one stage earlier,
because the pixel evaluates them one cycle before its request appears:
- `ramp_start` marks the first code;
- `threshold` marks the code equal to threshold 1.

### Collisions and the counter buffer

Only one (address, code) pair can leave the ADC per clock. When several requests are
outstanding at once (a *collision*, several electrodes at the same voltage), the address
decoder does three things:
- it answers the lowest address first with a one-hot `clear` in the same cycle;
- it reports that address and its code on the next clock edge;
- it drops `ramp_enable` for as long as two or more requests are outstanding.

While `ramp_enable` is low, the counter holds and the DAC stays put. A collision of *k*
channels therefore stretches the ramp by *k* - 1 cycles, and every one of them gets the
same code. A whole ramp takes

    T_ramp = 256 + Σ over codes (n_code - 1)   cycles,   n_code = channels digitized at that code

which stays far below the 800-cycle period for 49 channels. The worst case is all 49 at
one code: 304 cycles.

A pause does not stop the requests that are already on their way. Comparator levels that
tripped in the 3 cycles before the pause are still inside the synchronizers. They show up
during the pause, and each carries a different code. A single counter-buffer register
would give them the collision's code, which is off by up to 3 LSB.

The counter buffer here is therefore a small queue of *batches*. A batch is the set of
requests that arrive in the same cycle, stored with `count_delayed` of that cycle.
- Batches are served oldest first, and lowest address first within a batch.
- After `DELAY` cycles of pause no new level can reach a comparator.
- So at most `DELAY` + 1 = 4 batches can be outstanding (`BATCHES` = 4).

An assertion checks that the queue never overflows. Both the end-to-end test and
`tb_ramp_adc` check every code exactly, including codes involved in collisions.

### Event-driven gating in the pixel

`pixel_state_machine` decides whether a comparator trip becomes a request:
- At the `threshold` strobe (ramp code = threshold 1 as seen through the pipeline), an
  untripped comparator means the signal is above threshold 1. Only then is the trip
  digitized.
- The first digitized sample makes the pixel *triggered*. A triggered pixel is digitized on
  every ramp, whatever its amplitude, until the compressor sends `clear_trigger` for that
  address. This way a spike is recorded over its whole width, including the part below
  threshold 1.
- In raw mode with detection off (`event_mode` = 0), every trip is digitized.
- Each pixel makes at most one request per ramp, and a disabled pixel makes none.

## Spike detection and compression

`spike_compressor` takes the interleaved (address, code) stream, at most one sample per
clock. It keeps a 51-bit context per channel in `channel_memory`:
- state: 2 bits;
- sample index *i*: 5 bits;
- four running sums: 11 bits each.

A sample at cycle *t* reads the context and the four coefficients of index *i*,
updates the context on the same edge, and produces its outputs at *t* + 1. There is
no stall: 16 million samples per second are sustained.

Detection states per channel:

| State | On a sample *x* |
|---|---|
| Standby | If *x* > thr1, start a spike: accumulate *x* with index 0. Go to Triggered if *x* > thr2, else to Armed. Samples at or below thr1 are ignored. |
| Armed | Accumulate. If *x* > thr2, go to Triggered. Otherwise, once N samples are in, discard the spike: clear the sums, return to Standby, send Clear trigger. |
| Triggered | Accumulate until the index reaches min(N + M, 22). Then emit the spike, return to Standby and send Clear trigger. |

With the default N = 3 and M = 19, a spike is 22 samples: 3 before confirmation and
19 after.

The arithmetic per component *p*:

    prod   = x (unsigned 8 bit) · W[p][i] (signed 9 bit)             17-bit signed
    S[p]  ← sat11( S[p] + (prod >>> PROD_SHIFT) )                    PROD_SHIFT = 9
    PC[p]  = S[p][10:5]                                              6-bit output

`sat11` clamps to [-1024, 1023]. The shift keeps a full 22-sample spike with large
coefficients inside the 11-bit range. The output keeps the 6 most significant bits.
All 49 channels share one coefficient table of 4 x 22 x 9 bits (792 bits). The host
computes it offline from recorded spikes and writes it over the command link.

## Command and data link

**Inbound.** The command input runs at 2 Mbit/s, Manchester coded, sampled with 8 clocks
per bit:
- a '1' is a rising edge at mid-bit and a '0' a falling one;
- the line idles low;
- a frame is a '1' start bit and 32 data bits `{op, addr, data[15:0]}`, MSB first;
- a frame ends after 1.5 quiet bit times.

The decoder ignores transitions for 3/4 of a bit after each mid-bit edge, so it follows
the sender's clock.

Op 0x01 writes and op 0x02 reads. A read returns a register packet.

| Addr | Register | Reset |
|---|---|---|
| 0x00 | CTRL: bit 0 run, bit 1 event mode, bit 2 compressed output | 0b110 |
| 0x01 / 0x02 | threshold 1 / threshold 2 (ADC codes) | 140 / 170 |
| 0x03 / 0x04 | N (pretrigger samples) / M (post-trigger samples) | 3 / 19 |
| 0x05 | sampling period in clocks | 800 |
| 0x06 | ASIC address (2 bits, sent in headers) | 0 |
| 0x07 | STATUS: bit 0 sticky output overflow, write 1 to clear | 0 |
| 0x08-0x0B | pixel enables, 16 per register | all on |
| 0x40 + 22·p + i | coefficient W[p][i], write only | 0 |

**Outbound.** Data leaves at 16 Mbit/s, one bit per clock, MSB first. The line is low
between bytes. Every packet starts with a 3-byte header: 0xA5, {ASIC address[1:0],
entry count[5:0]}, then the type.

| Type | Body | Entries |
|---|---|---|
| 0x01 raw | timestamp, then (address, code) per sample | 1-30 |
| 0x02 compressed | per spike: timestamp, address, {PC1, PC2, PC3, PC4} in 3 bytes | 1-12 |
| 0x03 register | address, data high, data low | 1 |

The timestamp is the 8-bit sampling-period count.

The packet builder queues the selected records in a 64-entry FIFO. At the end of each
period it queues a descriptor with the type, the timestamp and the count, and the emitter
turns each descriptor into as many packets as needed. The raw/compressed mode is applied
at period boundaries, so one period's records are all of one kind. If the FIFO is full,
the record is dropped and the STATUS overflow bit is set. Register replies are sent
between data packets.

## Throughput budget

One sampling period is 800 clock cycles and 800 output bits. The budget per period:

| Load | Needed | Available |
|---|---|---|
| ADC, 49 channels, worst-case collision | 256 + 48 = 304 cycles | 800 cycles |
| Compressor | 1 cycle per digitized sample | 1 sample per cycle |
| Compressed output, 49 ch × 20 spikes/s | 980 × (24 + 40) bit/s ≈ 63 kbit/s, worst case one packet per spike | 16 Mbit/s |
| Raw output with detection off, 49 ch | 49 × 16 + 2 × 32 = 848 bit | 800 bit: overflows |
| Raw output with detection, 20 Hz spikes | ≈ 980 × 22 × 16 ≈ 345 kbit/s | 16 Mbit/s |
| State memory | 49 × 51 + 792 = 3291 bit ≈ 0.4 kB | as built |

The compression ratio against the raw signal follows from the same numbers:

    raw        = 49 × 20 000 × 8 bit/s                 = 7.84 Mbit/s
    compressed = 49 × 20 spikes/s × 4 × 6 bit          = 23.5 kbit/s   → ratio ≈ 333

The ratio counts payload only, without packet headers.

Raw mode with detection off is meant for short calibration runs. It cannot carry all
49 channels continuously, and the overflow flag reports the loss.

## Where this design makes its own choices

The paper behind this design describes the architecture and gives the main sizes, but
leaves many details open. The following are decisions of this RTL:

- **Counter buffer queue.** Described above. The paper's drawings show a single buffer.
  The queue gives identical results whenever collisions are isolated.
- **Pipeline depth.** There are 2 synchronizer flops plus one edge-detect flop, and the
  delayed counter and the strobes are matched to that depth.
- **Threshold test.** Threshold 1 is tested by sampling the synchronized comparator at a
  strobe, and "above" means code > threshold 1. Threshold 2 is also a strict
  comparison (code > threshold 2), as the detector's state diagram draws it; one
  description of the detector says "meets or exceeds" instead, which would move the
  decision by one code.
- **Compressor details.** The first spike sample is accumulated with coefficient index 0.
  A sample already above threshold 2 goes straight to Triggered. Triggered ends at the
  total index N + M, because the context stores a single index. The fixed-point
  scaling (`PROD_SHIFT` = 9, saturation, top 6 bits) is this design's.
- **Command link.** The Manchester polarity, the framing, the command format, the
  register map and all reset values are this design's.
- **Packets.** The field order, the 2-bit ASIC address with 6-bit count, the 3-byte
  packing of the four components and the limits of 30 and 12 entries follow drawings
  of the packet formats. The start byte, the type codes, the register packet, the FIFO
  sizes and the drop-on-overflow policy are this design's.
- **`ramp_therm[0]`** is always 1 while the ramp runs: code *c* turns on cells 0..*c*.
  The DAC's own reset switch provides the level below code 0.

Not in the RTL: the amplifier, sample-and-hold and comparator of each pixel, the
capacitor DAC, the 600 mV reference, bias and bandgap circuits, and the I/O pad
drivers. None of them has a logic function. Their digital connections are top-level
ports.

## Parameters

The defaults are the paper's numbers wherever it gives them: 49 channels, an 8-bit ramp,
4 components × 22 coefficients × 9 bits, 11-bit sums, 6-bit outputs, N = 3, M = 19,
16 MHz, 20 kHz (800 cycles), 2 Mbit/s in and 16 Mbit/s out. Most sizes live in `nr_pkg`.
Module parameters (e.g. `DELAY`, `BATCHES`, `PROD_SHIFT`, `RAW_MAX`, `CMP_MAX`,
`FIFO_DEPTH`, `CLKS_PER_BIT`) default to the same values.

## Verification

Every module has a self-checking testbench in `tb/` that ends with a line
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. The testbenches compare against
models written independently of the RTL:

- **`tb_ramp_adc`.** Drives the ADC with 49 pixels and behavioural front-ends, using
  levels that collide on purpose. It checks for every ramp:
  - every channel is reported exactly once, with its exact level;
  - the ramp paused once per extra channel of each collision;
  - the ramp lasted 256 + pauses cycles.

  Two directed ramps follow. In the first, all 49 channels sit at one code, and
  the ramp must last 304 cycles. In the second, the channels are spread over five
  adjacent codes, so requests arrive during the pause and must still get their own
  codes.
- **`tb_address_decoder`.** Checks the batch queue against a reference queue.
- **`tb_spike_compressor`.** Runs 260k checks against an integer model across several
  N/M settings. It includes coefficients that drive the sums into both saturation
  limits.
- **Link testbenches** check the bit timing (one bit per clock out, 8 clocks per bit in),
  the packet splitting and the register side effects.
- **`tb_neural_recorder_top`.** Runs the whole chip at its default size, with 49 analog
  front-end models and a 16 MHz clock. It configures the chip only over the Manchester
  input and reads only the serial output. Phase 1 runs about 115 periods in compressed
  event-driven mode, with:
  - noise, small events that are discarded, and full spikes;
  - ten channels spiking together, for collisions.

  A reference model of the whole chain predicts every compressed spike with its
  timestamp and the exact number of digitized samples. Phase 2 switches to raw mode
  without detection; it checks every raw code, the 30-sample packet split, the FIFO
  overflow and the read-back of the overflow flag. Each mechanism is counted and must
  occur at least once: spikes, discards, ramp pauses, gated samples, triggered samples
  below threshold 1, full packets, overflow and register reads. The run takes a few
  seconds.

- **`tb_workload_compressed`.** Reproduces the evaluation conditions on the full-size
  chip for 4000 sampling periods (0.2 s of signal). It uses:
  - three 22-sample spike templates with random amplitude;
  - a spike rate of 20 Hz per channel (probability 1/1000 per period);
  - a noisy baseline with occasional threshold-1 crossings that are not spikes.

  Every predicted spike must arrive exactly, every noise event must be discarded, and
  the output must not overflow. It measures the compression ratio on the real serial
  output. A typical run has 190 spikes and 380 discarded events, with a ratio of about
  346 for the components alone and about 130 counting complete packets. Packet
  overhead dominates at this low rate, because most packets carry a single spike.
  A second phase runs 1000 periods in the calibration mode: raw samples with detection
  on. Exactly the samples the detection model digitizes must arrive, in order per
  channel and with their levels (about 1400 samples for 51 spikes plus noise
  crossings).

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
              rtl/nr_pkg.sv tb/tb_neural_recorder_top.sv --top-module tb_neural_recorder_top
    ./obj_dir/Vtb_neural_recorder_top

The design is two-state clean: every register is reset, and the testbenches pass with
random initial values (`+verilator+rand+reset+2`).
