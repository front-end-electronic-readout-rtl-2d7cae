# Waveform-sampling readout module for a Cherenkov time-of-propagation detector

A time-of-propagation (TOP) detector identifies particles by the arrival
time of single Cherenkov photons on multi-anode photomultipliers. Its
front end must keep every channel's analog waveform for several
microseconds, because the experiment's global trigger decision only arrives
about 5 µs after the collision. Only then are the few short pieces of waveform
that hold photons picked out, digitized and reduced to hit time, amplitude
and charge.

This repository holds synthesizable SystemVerilog for one readout module of
128 channels. The module has four carrier boards. Each carrier board has
four 8-channel waveform-sampling ASICs and an FPGA. A fifth board collects
the data of the four carriers, processes the waveforms and sends them on.
The analog half of the sampling ASIC is a behavioural model. Everything
digital is RTL: the ASIC's Wilkinson ADC counter and latches, the carrier
firmware, the links, and the collector board's firmware.

```
          vin[4][4][8][64]  (64 samples per channel per 23.6 ns window)
                 |
   +-------------v--------------+   x4 carrier_board
   | irsx_sca x4  wilkinson_adc x4 |
   | window_manager  roi_finder     |
   | readout_ctrl  trigger stream   |
   +---- ser_data ------ ser_trig ---+
           |                 |
   +-------v-----------------v-----------------------------+  scrod
   | link_rx x4 -> buffers -> event_builder                |
   |   -> feature_extractor -> packet_builder -> daq_*     |
   | link_rx x4 -> trigger_merger -----------------> trg_* |
   | gtrig fan-out + event numbering  -> gtrig to carriers |
   +-------------------------------------------------------+
```

Top level: `srm_top`. One clock, 127.216 MHz, runs the whole module.

## Time base: window slots

Sampling runs at 2.714 GSa/s. The ASIC stores samples in *windows* of 64
consecutive samples, which is 23.6 ns, or three system clocks. The model does
not step through single samples. Every three clocks the carrier's
`window_manager` issues a **slot** (`smp_strobe`). At that point the testbench,
or any other source, presents the 64 samples of every channel on `vin` all at
once. So a slot number is a 23.6 ns timestamp, and everything in the carrier
firmware is timed in slots:

| quantity | slots | time |
|---|---|---|
| one window | 1 | 23.6 ns |
| storage depth (`N_WIN`) | 512 | 12.07 µs |
| trigger latency (`LAT`) | 212 | 5.0 µs |
| coincidence range (`SEARCH`) | 4 | 94 ns |

Analog values are 16-bit integers in units of 0.1 mV. The amplifier's
baseline is 1.0 V (10000). The channel-trigger threshold is `thr` in the same
units.

## Window locking: how the buffer survives the trigger latency

This is the part that needs the most care.

The 512 windows form a ring that is overwritten all the time. The write pointer
chooses the window for each new slot. A window that holds a photon must
survive until it has been digitized. That can be long after the trigger
arrives, because a conversion takes 4096 clocks and conversions are done one
region at a time. So `window_manager` keeps a **lock count** per window:

* `lock_inc` from the ROI finder adds one reference.
* `lock_dec` from the readout controller removes one reference after the
  window has been digitized and sent.
* Counts are used, not flags, because two triggers close together can claim
  the same window.

On every slot the pointer advances to the next window whose count is zero,
skipping any locked windows. The slot is stored there (`slot_wr`, `wr_win`).
If all 512 windows are locked, the slot is not stored and `stall` pulses;
that segment of waveform is lost. Because of the skipping, a slot's window
cannot be computed from its slot number. This is why the ROI finder keeps a
history.

`roi_finder` keeps a ring with one entry per slot (`HIST` = 512 entries). Each
entry holds:

* whether the slot was stored;
* the window it went to;
* the 32 channel-trigger bits the carrier's four ASICs raised during that
  slot.

The global trigger `gtrig` is queued together with the current slot number
`T` and a local trigger number. When the trigger is served, the finder scans
the slots `T-LAT-SEARCH+1 .. T-LAT`. For every slot in that range that was
stored and has any channel-trigger bit set, it emits a **region of interest**
(ROI): `{is_end=0, window, mask32, trigger}`. It also locks that window. It
then emits an end marker `{is_end=1, trigger}`.

Channel triggers outside the range are not read out. Photons that
arrive with no matching global trigger are therefore thrown away. The ROI
queue between the finder and the readout controller is `ROIQ` deep.

The timing works only if a photon's window has not yet been overwritten
when its trigger arrives. The latency is 212 slots, and the ring is 512 windows with
no locks. The margin is 296 windows. Those windows can be locked by pending
readouts before the pointer comes back around to a window that has not yet
been claimed. Under heavy load that margin is used up and `stall` starts to
pulse.

## The Wilkinson conversion and its Gray-code value

`readout_ctrl` takes one ROI at a time. It puts the window on `rd_win` of all
four ASICs and pulses `ramp_start`. That pulse:

* starts the ramp in `irsx_sca`, which runs linearly from 0.5 V to 2.0 V over
  4096 clocks: `V(k) = 5000 + (k*15000)>>12`;
* starts the 11-bit Gray counter in `wilkinson_adc`, which is clocked at
  half the system clock.

Each of the 8×64 cells has a comparator. The comparator goes high once the
ramp passes the cell's stored voltage. On that first clock the cell's 12-bit
register latches `{gray[10:0], counter_clock_level}`. The counter-clock
level is the twelfth bit: it tells which half of a counter period the
comparator fired in. The Gray counter changes only one bit per step, so a
latch that lands on a transition can be off by at most one count, never by a
large jump.

Decoding is `raw_to_code(raw) = {gray2bin(raw[11:1]), raw[0]}` (in
`top_pkg`). It gives the number of the step `k` at which the ramp first
exceeded the voltage, that is, a 12-bit code with an LSB of about 0.37 mV.
Cells that never fire latch full scale. `done` pulses 4097 clocks after
`start`.

## Carrier packets and the link

After `done`, `readout_ctrl` sends one packet for each channel set in the ROI
mask. These are 18-bit link words `{type[1:0], data[15:0]}`:

```
HDR   trigger number
HDR   {asic[1:0], ch[2:0], window[8:0], 2'b00}
DATA  x64  {4'b0, code[11:0]}         (binary, already Gray-decoded)
```

Then it releases the lock (`lock_dec`). An end marker becomes a single
`END trigger` word.

`link_tx` sends each word as three 8-bit beats: a start beat
`{1, type, 00000}`, then `data[15:8]`, then `data[7:0]`. The idle line is
`8'h00`. `link_rx` looks for start beats. It raises `frame_err` on a start
beat with the wrong low bits. A lane moves 1 byte per clock, about 1 Gb/s.
The link has no backpressure; the collector board buffers the words
(`DFIFO` = 4096 words per carrier, `dovf` on overflow).

A packet takes 66 words, which is 198 clocks on the lane.

## Trigger stream

Apart from global triggers, each carrier sends a **trigger record** for
every slot in which any of its 32 comparators fired. It uses a second lane
(`ser_trig`). A record is three words: `HDR slot[15:0]`, `DATA mask[31:16]`,
`DATA mask[15:0]`. It passes through a `TRQ`-deep FIFO; if the FIFO is full,
the record is dropped and `tdrop` pulses.

On the collector board, `trigger_merger` rebuilds the records and keeps a
queue for each carrier. It outputs records sorted by slot. It always takes the
oldest head among the four queues. A head is released:

* at once, when all four queues hold a record (then nothing older can still
  arrive);
* or after `HOLD` = 64 clocks, which covers the link latency.

Its output `trg` is `{carrier, slot, mask32}`, for the trigger system's
transceiver.

## Collector board: events, pedestals and CFD timing

`scrod` passes `gtrig` on to the four carriers and numbers the triggers.
It queues the numbers (`EVQ` deep, `evq_lost` if the queue is full).
Because every carrier counts triggers from zero after reset, the carrier and
collector numbers agree. `event_builder` checks this on every packet header
and end word, and pulses `mismatch` if they differ.

`event_builder` takes one queued event at a time. It reads the buffer of
carrier 0 up to its END word, then carriers 1, 2 and 3. It emits a stream of
`START`, then for each packet a header and its samples, then `EOE`.

`feature_extractor` works on each waveform:

1. **Pedestal subtraction.** It subtracts a per-cell pedestal, read from a
   table of 4 M 12-bit entries. The table is indexed by
   `{carrier, asic, ch, window, sample}` and is loaded through `ped_we`,
   `ped_addr` and `ped_data`.
2. **Peak, position and charge.** It keeps the peak value and its position.
   The charge is the sum of the 64 pedestal-subtracted samples.
3. **Constant-fraction timing.** From the peak it walks back to the last
   sample at or below half the peak. It then interpolates linearly to the
   half-height crossing, which takes one division. The time is in samples
   with `FRAC` = 8 fractional bits; one LSB is 1.44 ps.
4. **Amplitude cut.** Waveforms whose peak is below `MIN_AMP` = 40 counts
   produce no hit.

`packet_builder` writes 32-bit DAQ words, with `daq_last` on the trailer:

```
header   {4'hA, 2'b00, module_addr[5:0], 4'h0, trigger[15:0]}
hit      {carrier[1:0], asic[1:0], ch[2:0], window[8:0], time[15:0]}
         {amplitude[12:0], charge[18:0]}
trailer  {4'hE, 12'h000, n_hits[15:0]}
```

All internal streams use valid/ready, so `daq_ready` backpressure propagates
back into the carrier buffers.

## Top-level ports (`srm_top`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | 127.216 MHz system clock; synchronous active-low reset |
| `gtrig` | in | global trigger, one pulse, about `LAT` slots after the photons |
| `thr` | in | channel-trigger threshold (0.1 mV units) |
| `vin[4][4][8][64]` | in | samples of the current slot: carrier, ASIC, channel, sample |
| `module_addr[5:0]` | in | module number written into each packet header |
| `ped_we`, `ped_addr[21:0]`, `ped_data[11:0]` | in | pedestal table write |
| `daq_valid/ready/data[31:0]/last` | out/in | packet words to the DAQ link |
| `trg_valid/ready`, `trg` | out/in | sorted trigger records |
| `stall[4]`, `trig_lost[4]`, `tdrop[4]` | out | per-carrier status pulses |
| `mismatch`, `dovf`, `tovf`, `evq_lost`, `frame_err` | out | collector status pulses |

Parameters `LAT` (212) and `SEARCH` (4) can be changed at the top. Buffer
depths can be changed on the submodules.

## Where this design departs from the real system

* **Conversion time.** The real ASIC converts in about 4 µs. Here the Gray
  counter runs at half the single system clock, so a conversion takes 32 µs.
  At one ROI per event that allows about 29 kHz, against the 30 kHz target.
  With more ROIs per event the rate is lower. A faster counter would need a
  second clock domain, which is not done here.
* **Waveform processing in logic.** In the real system, pedestal subtraction
  and CFD timing run as software on the collector FPGA's ARM core. Here they
  are logic, with a fraction of 1/2 and linear interpolation. The fraction,
  the interpolation and the charge definition are this design's choices.
* **Memory.** The pedestal table and the event buffers are on-chip arrays.
  The real board uses DDR memory.
* **Readout region.** "A set number of samples around each hit" is taken as
  the single 64-sample window in which the hit's comparator fired.
  `SEARCH` = 4 is this design's choice.
* **Shared write address.** All four ASICs of a carrier share one write
  address and are converted together.
* **Framing and formats.** The link framing, packet formats, trigger-record
  format and merger rule are this design's own. The real links are
  multi-gigabit serial transceivers.
* **Not modelled.** The sampling DLL, the preamplifiers, the threshold DAC,
  noise and cell-to-cell pedestal variation, slow control through the ARM
  cores, and the optical transceivers are not modelled.

## Simulation

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. For example, with
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Wno-fatal \
    rtl/top_pkg.sv rtl/*.sv tb/tb_srm_top.sv --top-module tb_srm_top
./obj_dir/Vtb_srm_top
```

`tb_srm_top` runs the module at its full default size. It:

* puts photon pulses on four channels in three carriers, plus one pulse with
  no trigger;
* fires two global triggers at the 5 µs latency;
* loads pedestals;
* throttles `daq_ready` at random.

It checks every DAQ word against a reference. The reference computes the
ideal Wilkinson codes, CFD time, peak and charge. It also checks:

* the trigger records;
* that the pulse without a global trigger gives no hit;
* that no status error occurs.

The testbench also counts that each mechanism actually happened:

* coincidence readout;
* the write pointer skipping locked windows;
* a trigger queued during a readout;
* records from all four carriers merged;
* backpressure.

It takes about a minute to build and 20 s to run.

Because Verilator randomizes initial values, all testbench monitors are gated
by `rst_n`.
