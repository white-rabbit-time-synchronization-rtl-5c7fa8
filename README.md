# Pixie-Net XL pulse processing with White Rabbit time stamps

A digital detector readout module must do two things at once. It must turn
each detector pulse into a small record: pulse height, arrival time, a few
shape sums and a short waveform. It must also place that record on a time
axis shared with every other module in the experiment. Here the shared axis
comes from White Rabbit (WR), the sub-nanosecond Ethernet timing protocol.
The module's 125 MHz clock is disciplined to the WR master, and every record
carries two time stamps:

- the local clock-cycle count;
- the WR date/time, latched at the trigger.

With WR time in every record, modules need no trigger cables. Each module
sends small metadata messages (channel, energy, time) to a central decision
maker. The decision maker answers with time ranges to keep. Each module then
forwards the full records in those ranges from its deep buffer and discards
older ones ("software triggering").

This repository holds SystemVerilog RTL for the firmware of one Kintex-7
FPGA in such a module. Each FPGA handles four ADC channels (14-bit,
125 MSPS), and the board has two identical FPGAs. The RTL covers:

- the per-channel pulse processing;
- the controller register bus to the board's Zynq processor;
- the deep output FIFO;
- the flow gate that applies the accept/discard decisions;
- the UDP packager that feeds the WR core's user-data port;
- a 4-bit link carrying pulse heights to the Zynq for histogramming.

The WR core, the ADC and clock daughter cards, the SDRAM chip, the Zynq and
the decision-maker software are not included. Where they connect, the top
level has ports.

```
 adc[0..3] ─► channel_proc ×4 ─► event_funnel ─► sync_fifo (4 Gbit) ─► flow_gate ─┬─► udp_packager ─► tx_* (WR core user data)
              │  fast_trigger        (whole records,     │                 ▲       └─► diagnostic readout (bus)
              │  energy_sums/recon    round robin)       │ metadata        │ acc_lo/acc_hi, mode
              │  psa_sums, cfd_timing                    ▼ queue           │
              │  trace_capture, timestamp_latch      ctrl_io ◄──── bus_* (Zynq) ──
              │  run_stats ─────────────────────────────►│
              └── ev_done/energy ─► mca_link ─► mca_data[3:0] (Zynq MCA histogram)
 wr_time (WR core: 40-bit TAI seconds, 28-bit 8 ns cycles) ─► every channel and ctrl_io
```

## Time base

Everything runs on one clock: the 125 MHz WR-disciplined main clock. ADC
samples are taken to be synchronous to it. On the board the ADC clock comes
from a PLL locked to the same oscillator, so the two do not drift apart. A
sample index is therefore also a clock-cycle count.

`wr_time_t` is the WR core's time: 40 bits of TAI seconds and a 28-bit count
of 8 ns cycles within the second (68 bits). `timestamp_latch` captures it at
the trigger together with a 48-bit local counter that starts at run start.
The record carries a compact 32-bit **WR time word**:

    wr_word = { tai_sec[4:0], cycles[27:1] }      (16 ns steps, wraps every 32 s)

This word is what the flow gate compares with the acceptance range. It is
also what the Zynq forwards to the decision maker. A comparison on one 32-bit
word is cheap, and 32 s of range is far longer than any decision latency.
Wrap-around is not handled: ranges spanning a 32 s boundary must be split by
software.

## Channel processing

`channel_proc` holds one instance of each sub-module. All of them start from
the same **trigger sample** T. T is the sample that made the fast filter
cross its threshold. In the clock cycle where `trig` is high, that sample is
the newest entry of every history buffer.

### Trigger (`fast_trigger`)

The fast filter is a trapezoid: the sum of the newest L samples minus the sum
of the L samples ending G samples earlier (L = `fast_len`, G = `fast_gap`,
both up to 31). It is kept as two running sums over a sample history, so it
costs two adders and a subtractor per channel at any length. The trigger
fires on the first sample where the filter is ≥ `threshold`. The filter must
then fall below the threshold before the trigger can fire again (re-arming).
This gives one trigger per rising edge, not one per sample above threshold.

### Energy (`energy_sums`, `energy_recon`)

An energy trapezoid of length L and gap G (`slow_len` ≤ 127,
`slow_gap` ≤ 63) is captured as three raw sums, latched L clocks after the
trigger:

- S1: the L samples after T;
- Sg: the G samples ending with T;
- S0: the L samples before those.

`energy_recon` subtracts the baseline B and applies the decay-corrected
Pixie formula:

    E = c0·(S0 − L·B) + cg·(Sg − G·B) + c1·(S1 − L·B)

Software computes c0, cg and c1 from the preamplifier decay constant τ. They
are written as signed Q1.30 numbers:

    b  = exp(−8 ns / τ)
    c1 = (1 − b) / (1 − b^L)
    cg = 1 − b
    c0 = −(1 − b) · b^L / (1 − b^L)

For an exponential pulse whose start lies inside the gap window, E equals the
pulse amplitude exactly. The decaying tail of an earlier pulse cancels out of
all three terms, so pile-up on a tail does not shift the energy. With
τ → ∞ the coefficients become c1 = 1/L, cg = 0 and c0 = −1/L. That is the
plain trapezoid (S1 − S0)/L and the register reset values. The result is
clamped to 0..65535 and is ready three clocks after the sums.

The trigger can lag the true pulse start by a sample or two. The gap must be
at least that long, or the leading sum sees part of the pulse.

### Short sums for pulse-shape analysis (`psa_sums`)

Three sums of programmable position and length are taken over the same
sample history:

- sum k runs over `psa_len[k]` (≤ 31) samples;
- it starts `psa_start[k]` samples from T, where the start is a signed byte,
  so the sum may lie before the edge;
- the sums are latched 64 clocks after the trigger, so the latest window
  (start + length ≤ 64) has been seen.

A typical setting is a baseline sum before the edge, a peak sum and a tail
sum. The tail-to-peak ratio separates neutrons from gammas in liquid
scintillators.

### Constant fraction timing (`cfd_timing`)

The fast filter output ff feeds a digital CFD:

    c[n] = 256 · ff[n − D] − w · ff[n]        (delay D = cfd_delay, fraction w/256)

On a rising edge, c is negative and crosses zero where the delayed filter
reaches the fraction w/256 of the current one. That point does not depend on
the pulse amplitude.

After a trigger the module searches c over 48 samples, starting 16 samples
before T. At the first crossing from negative to non-negative between
samples m−1 and m, it interpolates linearly:

    time − T = (m − 1 − T) + (−c[m−1]) / (c[m] − c[m−1])

The whole part is `cfd_int`, signed and relative to T. The fraction is
computed by a 16-clock restoring divider and stored as `cfd_frac`, in units
of 1/65536 sample. The 8 ns sample spacing is divided to about 0.1 ps in
the arithmetic; the real resolution is set by noise and by the clock.
`cfd_ok` is 0 if no crossing was found. The precise time of a pulse is
therefore:

    local_ts·8 ns + (cfd_int + cfd_frac/65536)·8 ns

### Waveform (`trace_capture`)

A 256-entry circular buffer records every sample while the channel is idle.
At the trigger it notes the address of sample T − `trace_pre`. The record
then reads 122 consecutive samples from there: about 1 µs, with up to 63
before the edge. Once the capture is complete, writing stops until the
record has been sent. A stalled output therefore never overwrites the
waveform it is waiting to send.

### Dead time and run statistics (`run_stats`)

A channel records one event at a time. It stays busy from the trigger it
takes until the record's last word leaves, which needs all of:

- the energy sums;
- the short sums;
- the CFD result;
- the waveform.

Triggers that arrive while it is busy still count as **input counts**.
Recorded events are **output counts**. Real time counts every clock of the
run; live time counts only the idle clocks. Software recovers the true input
rate as in_count / live_time. When the output buffer is full the channel
cannot send, so back-pressure turns directly into dead time.

## The event record

Each event is 69 32-bit words (276 bytes): 8 header words, then 61 words of
two samples each.

| word | bits | content |
|-----:|------|---------|
| 0 | 31:28 / 27:24 / 23:16 / 15:0 | header length (8) / channel / module id / record length (69) |
| 1 | 31:0 | local time stamp [31:0] (clock cycles since run start) |
| 2 | 31:16 / 15:0 | local time stamp [47:32] / energy |
| 3 | 31:0 | WR time word {tai_sec[4:0], cycles[27:1]} |
| 4 | 31:16 / 15:8 / 0 | CFD fraction / CFD whole samples (signed) / CFD found |
| 5–7 | 31:0 | short sums 0, 1, 2 |
| 8–68 | 31:16 / 15:0 | sample 2k+1 / sample 2k of the waveform (k = word − 8) |

Records are never split. The funnel grants one channel at a time, round
robin, and holds the grant until that channel's last word.

## Output path

### Deep buffer (`sync_fifo`)

On the board, a dedicated 4 Gbit SDRAM is run as a FIFO by a vendor
controller. Here that function is a synchronous first-word-fall-through FIFO
of 2^27 32-bit words, the same 4 Gbit. At 276 bytes per record it holds
about 1.9 million events. Assertions flag a write while full and a read while
empty. The funnel is held off while the buffer is full, so nothing is ever
dropped silently. The channels wait instead, and that waiting is accounted
as dead time.

### Flow gate (`flow_gate`)

The gate reads the 8 header words of the next record, decides, and then
passes or drops the rest. There are two modes, set in the CTRL register.

**Free flowing** (`gated` = 0): every record is forwarded. All decisions stay
inside the FPGA.

**Processor directed** (`gated` = 1): the Zynq writes an acceptance range
[ACC_LO, ACC_HI] of WR time words. Writing ACC_HI validates the range, and
writing ACC_CTRL invalidates it. For each record with time t:

| condition | action |
|-----------|--------|
| t < ACC_LO | discarded: older than any acceptance still to come |
| ACC_LO ≤ t ≤ ACC_HI | forwarded |
| t > ACC_HI, or no valid range | held; the gate waits for a new range and the FIFO fills behind it |

Decisions arrive in time order, so one range register is enough. Records
between two accepted ranges are discarded when the next range arrives.

In **diagnostic mode** (`diag` = 1), forwarded records go to the control bus
instead of the packager. The Zynq reads them word by word through DIAG_DATA
and can store them to its SD card.

### UDP packager (`udp_packager`)

Each forwarded record becomes one Ethernet II / IPv4 / UDP frame. The frame
is sent as a 16-bit big-endian stream (`tx_valid/tx_ready/tx_data/tx_sof/
tx_eof`) for the WR core's user-data fabric. It has a 21-half-word header:

- Ethernet: destination and source MAC, type 0x0800;
- IPv4: IHL 5, total length, a per-frame identification, DF, TTL 64, UDP,
  the header checksum (computed), source and destination IP;
- UDP: source and destination ports, length, checksum 0.

The record words follow, high half first. A frame is 42 + 276 = 318 bytes
before FCS and preamble, which the MAC adds. Each record carries its own WR
time, so reordered or lost packets can be recognised by the receiver. No
retransmission is done.

### Metadata for software triggering

As each record's first four words enter the buffer, the top level copies
four fields into a 1024-entry metadata queue:

- channel;
- energy;
- 48-bit local time;
- WR time word.

The Zynq reads them through META0..META3; reading META3 pops the entry. It
sends them to the decision maker and turns the answers into acceptance
ranges. A full queue drops entries and counts them. The full records are
unaffected.

### MCA link (`mca_link`)

Every recorded energy is also sent to the Zynq over a 4-bit link, where it is
histogrammed into a spectrum. Each word {channel[3:0], energy[15:0]} takes
five nibbles, most significant first. `mca_first` marks the channel nibble.
Each channel has one holding register, and a round-robin arbiter serves
them. The link carries up to 25 M words/s. An energy that arrives while its
channel's register is still full is dropped and counted, so a spectrum can be
corrected.

## Control bus (`ctrl_io`)

The bus is a simple synchronous single-word bus with a 12-bit word address.
A write takes effect on the clock edge with `bus_wr`. Read data appears on
`bus_rdata` one clock after `bus_rd`. The full map is in the header of
`rtl/ctrl_io.sv`. In outline:

| address | register |
|---------|----------|
| 0x000 | CTRL: run, gated, diag |
| 0x001 | module id |
| 0x002 | STATUS: buffer empty, metadata empty, gate waiting, range valid |
| 0x003 | buffer word count |
| 0x004–0x006 | WR time (reading 0x004 snapshots all 68 bits) |
| 0x008–0x00A | acceptance range |
| 0x010–0x016 | MAC, IP addresses and ports |
| 0x018–0x01B | metadata queue |
| 0x01C–0x01D | diagnostic record data and status |
| 0x020–0x024 | counters: forwarded, discarded, MCA drops, metadata drops, frames sent |
| 0x100 + 0x40·ch | per-channel parameters (+0x00..+0x12) and statistics (+0x20..+0x25) |

Statistics clear on the rising edge of run. Channels reset to disabled, with
a threshold of 200 and a plain 32/8 trapezoid. A minimal session:

1. Write enable = 1 for each channel.
2. Write the coefficients for the detector's τ.
3. Write CTRL = 1.

## Software-triggered operation, step by step

1. Write CTRL = run | gated. Records collect in the buffer, and the gate
   waits (STATUS bit 2).
2. The Zynq drains the metadata queue and sends the entries to the decision
   maker.
3. For an accepted time range, the Zynq writes ACC_LO and then ACC_HI.
   Records before the range are discarded. Records inside it go out as UDP
   frames. The gate stops at the first later record.
4. Repeat step 3 with each new range, in time order.

## Throughput at the default sizes

| mode | rate | what limits it |
|------|------|----------------|
| free flowing | 300 k events/s = 95 MB/s | below the 125 MB/s of gigabit Ethernet, which caps this record size at about 390 k/s; the fabric itself moves 4 bytes/clock into the buffer and 2 bytes/clock out |
| processor directed | 84 k events/s measured on the board | per accepted range, 6 bus accesses (~0.1 µs); the Zynq's software round trip dominates |
| diagnostic | 8.4 k events/s measured on the board | a record is 138 bus reads (~2.2 µs of bus time); the processor's software dominates |
| histogram only | up to 25 M energies/s on the link | per-channel dead time: about 141 clocks per event at the default filters, ~0.9 M/s per channel |

## How far to trust it, and where it departs from the original

The original paper gives this firmware's functions, not its insides. The
following are this design's own choices, made to be the simplest logic
giving the stated function:

- filter forms and lengths;
- the energy coefficient format;
- the CFD form and window;
- the record layout;
- the bus protocol and register map;
- the flow gate's wait rule;
- the frame format details;
- the MCA link framing.

Departures from the real board:

- **One clock domain.** The ADC clock, the WR helper clock and the
  Zynq-side bus clock of the real board are not modelled. A board
  implementation needs synchronisers at the bus and ADC boundaries.
- **The buffer is an on-chip array.** The real module uses an SDRAM with a
  FIFO controller. The FIFO's interface and depth are kept. Synthesising a
  4 Gbit array as logic is not practical, so for an implementation replace
  `sync_fifo` in the top level with an SDRAM FIFO of the same ports.
- **Single-rate ADC data path.** The 250 MSPS cards (8 × 12 bit and
  4 × 16 bit) would need two samples per clock per channel. Only the
  4-channel, 14-bit, 125 MSPS card is supported. Changing `ADC_W` in
  `pnxl_pkg` covers the 16-bit width but not the rate.
- **WR time in clock cycles.** The WR core's date/time is described as
  68 bits of seconds and nanoseconds. Here the sub-second part is the core's
  28-bit count of 8 ns cycles. Nanoseconds are cycles × 8.
- **Bus scope.** The control bus reaches one FPGA. The board shares one bus
  between two FPGAs, and selecting between them is left to the bus
  interface outside this design. The slow gain/offset controls of the ADC
  cards are not included either.
- **WR time word range.** The word wraps every 32 s, and the gate's
  comparison is unsigned.
- **Not included:** the WR core itself (its time output and user-data port
  are ports here), a 10G Ethernet alternative, UDP retransmission, the
  second FPGA (identical) and all software.

## Simulating

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself. Run any of them with plain
Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_channel_proc \
    -y rtl -y tb +libext+.sv rtl/pnxl_pkg.sv tb/tb_channel_proc.sv -o sim
./obj_dir/sim
```

The testbenches compute their expected values independently, from models of
the filters in the testbench.

- `tb_channel_proc` sends exponential pulses through one channel. It checks:
  - every record word: time stamps, energy within ±3 of the true amplitude,
    CFD against a reference, short sums, all 122 waveform samples;
  - the dead-time accounting;
  - random output stalls.
- `tb_pnxl_top` drives the whole FPGA through the bus with a 256-word
  buffer. It counts each mechanism and fails if one never occurred:
  - free-flowing frames from all channels;
  - MCA words and metadata reads;
  - a WR time read;
  - a discarded, a forwarded and a held record in processor-directed mode;
  - a diagnostic readout;
  - the buffer filling up and turning into dead time.
- `tb_pnxl_full` runs the top level at its default sizes, including the
  2^27-word buffer (512 MB of simulator memory). Four channels produce four
  frames, four MCA words and four metadata entries, and the buffer ends
  empty.

Simulation of the full-size buffer takes seconds but needs about 0.6 GB of
memory. Logic synthesis of it, as opposed to simulation or lint, needs more
memory than a 16 GB machine has.
