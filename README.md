# Continuous zero-suppressed readout of a LArTPC crate

A supernova in our galaxy would send a burst of neutrinos lasting some tens of
seconds. A liquid-argon time projection chamber (TPC) near the Earth's surface
sees only about ten such interactions, at a few MeV each. They drown in the
cosmic-ray background, so the detector cannot trigger on them itself. The way
around this is a *delayed* trigger. The detector is read out all the time, the
data sit on the DAQ servers' disks for a couple of days, and they are kept only
if another experiment's alert (SNEWS) says that a supernova happened.

That raises the problem this RTL solves. Reading every wire of the detector
without a break gives about 33 GB/s: 8256 wires × 2 MS/s × 2 bytes. Each of the
nine readout crates then carries about 3.7 GB/s, but its server can write only
about 50 MB/s to disk. The data must shrink about 80-fold, and most of that
must happen in the front-end FPGA. The method is *zero suppression*. A sample
is kept only if it lies outside a band around the channel's baseline, together
with a few samples before and after each run of such samples. The main
configuration described here uses a **static baseline** and an **individual
threshold for every channel**, both loaded at the start of a run.

The RTL models one readout crate. It has N_FEM front-end modules (FEMs) of 64
wires each. They share a backplane to a transmitter board with four optical
links. Each FEM also produces the normal *triggered* stream, which carries only
frames selected by a detector trigger. The two streams share the backplane, and
the triggered stream goes first.

## Data path of one FEM

```
 ADC 64 ch @16 MS/s ──► downsampler (÷8, mean) ──► rb_writer ──► SRAM 1M×36 ring (8 frames)
                                                                        │
                         channel order, 1 sample/clk  ◄── rb_reader ◄──┘
                                   │
                            stream_splitter
                   ┌───────────────┴───────────────┐
     zero_suppressor (keep_all=0)       zero_suppressor (keep_all=1)
     static baseline + channel thr      only frames marked by a trigger
                   │                               │
          stream_fifo (supernova)         stream_fifo (triggered)      ← one DRAM per stream on the board
                   └───────────► dataway_arbiter ◄─┘   (all FEMs of the crate)
                                        │
                                   xmit_router ──► links 0,1 triggered; links 2,3 supernova
```

| module | role |
|---|---|
| `fem_pkg` | sample and word types, word tags |
| `downsampler` | 16 MS/s → 2 MS/s for each of 64 channels, by averaging groups of 8 |
| `sram_1mx36` | the 1 M × 36-bit SRAM next to the FPGA (single port, 1-cycle read) |
| `rb_writer`, `rb_reader`, `ring_buffer` | time-order write / channel-order read of an 8-frame ring |
| `stream_splitter` | copies samples to the supernova path, and triggered frames to the triggered path too |
| `zero_suppressor` | threshold test, presample/postsample windows, output word formatting |
| `stream_fifo` | per-stream buffer standing in for the FEM's DRAMs |
| `fem` | one front-end module |
| `dataway_arbiter` | token passing on the crate backplane, triggered stream first |
| `xmit_router` | transmitter board: sends the frames of each stream to its two links |
| `tpc_crate` | top: N_FEM FEMs + backplane + transmitter |

Everything runs on one clock. It is nominally the SRAM's 128 MHz (see
*Rates* below).

## Frames and the SRAM ring buffer

Time is cut into **frames** of 1.6 ms, which is 3200 ticks of the 2 MHz sample
clock. The SRAM holds the last 8 frames (12.8 ms) as a ring. Samples arrive
*time-ordered*: each tick brings one sample from every channel. Zero
suppression wants them *channel-ordered*: all 3200 ticks of channel 0, then
channel 1, and so on. The ring buffer does this reordering, one frame at a
time.

Packing and addressing (this design's choice):

* One 36-bit word holds three consecutive ticks of one channel. Tick 3k sits in
  bits [11:0], 3k+1 in [23:12] and 3k+2 in [35:24].
* A channel needs 1067 words per frame. The last word holds ticks 3198 and
  3199, and its top slot is zero.
* `addr = slot·(1067·64) + word·64 + channel`. The writer fills the memory in
  time order. The reader walks `word` fastest for a fixed `channel`. 8 frames
  use 546,304 of the 1,048,576 words.

The writer collects three ticks, then writes the 64 finished words one per
clock. A new group must not finish while the last one is still being written.
This requires at least 64 clocks per three ticks; `collision` flags a violation.
The writer always owns the SRAM port in the cycles it writes. The reader uses
the free cycles and reads up to four words ahead into a small queue. This lets
its output deliver one sample per clock.

The reader starts a frame as soon as the frame has been fully written. Each
sample leaves as a `sample_t` that carries:

* frame number, channel and tick;
* flags for first and last sample of the channel and of the frame;
* the frame's trigger mark.

A `trigger` pulse marks the frame being written at that moment. That frame,
and only that frame, also goes to the triggered stream.

**Overrun.** Suppose the output side stalls long enough for the writer to come
back to a slot the reader has not finished. The writer then sets the sticky
`overrun` flag. Before each frame, the reader checks whether it has fallen 8 or
more frames behind. If so, it skips to the oldest frame that is still intact
and adds the skipped frames to `dropped`. A frame that is being read at the
moment it is overwritten is delivered with mixed contents. The reader does not
stop in the middle of a frame. The testbench therefore checks only the flags,
and not the contents, after a forced overrun.

## Zero suppression

The zero suppressor works on one channel of one frame at a time; a run of kept
samples never crosses a channel or a frame. For sample *t* of a channel:

* it **passes** if `|adc − baseline[ch]| > threshold[ch]`, a strict test, so
  samples on the band's edge are dropped;
* it is **saved** if any sample in `[t − NPOST, t + NPRE]` passes, with the
  window clipped to the channel. The samples just before a pulse are the
  *presamples*, the ones just after it the *postsamples*.

Saved samples keep their raw ADC code, so a later stage can still estimate the
local baseline from the presamples. The baseline used for the threshold test is
not sent.

The future half of the window is handled by a delay line NPRE samples deep.
Each entry holds a sample, its tick and its pass flag. When a sample leaves the
line, the flags of the NPRE samples after it are already inside the line. The
past half is handled by a counter, which each passing sample reloads with NPOST.
The sample leaving the line is saved if:

* any flag in the line is set, or
* the counter is nonzero.

After the last sample of a channel the input pauses for NPRE clocks to empty
the line. At the first sample of a channel the line is empty, so no decision
is due and there is room to emit the headers. In every cycle the unit emits 0
to 3 words into a 16-word output FIFO. It accepts input while at least 3
places are free.

With `keep_all` high every sample is saved. The triggered path uses this mode
to produce whole frames in the same word format.

Tables: `cfg_we` writes `cfg_data` into the baseline (`cfg_sel=0`) or the
threshold (`cfg_sel=1`) of channel `cfg_ch`. After reset all baselines are 0
and all thresholds 4095, so nothing passes until the tables are loaded.

### Word format (16 bits: tag[15:12], payload[11:0])

| tag | name | payload | when |
|---|---|---|---|
| 1 | FEM | module address | first word of a frame |
| 2 | FRAME | frame number (low 12 bits) | second word of a frame |
| 3 | CHANNEL | channel 0..63 | at every channel, even one with nothing saved |
| 4 | REGION | tick of the next saved sample | before each run of saved samples |
| 0 | SAMPLE | raw 12-bit ADC code | each saved sample |
| F | TRAILER | frame number | ends the frame |

Example with NPRE = NPOST = 2. Samples 10 and 11 of channel 5 pass, and nothing
else does. The channel's words are: `CHANNEL 5`, `REGION 8`, then SAMPLE words
for ticks 8 to 13.

## Sharing the backplane

All FEMs of a crate share one dataway, which carries one 16-bit word per clock.
Each stream has its own token, and the tokens travel round the FEMs in index
order. The FEM holding a token keeps it until it has sent a frame trailer. It
passes the token on at once if it has no word and is not inside a frame. Each
cycle the dataway takes:

1. a word from the triggered-token holder, if it has one;
2. otherwise a word from the supernova-token holder.

So frames of one stream never interleave, and supernova words use only the
cycles the triggered stream leaves free. Assertions check that a token does not
move while its holder is inside a frame.

The transmitter sends each word to a link of its stream, and whole frames
alternate between the two links. Each link gets a `frames_sent` counter. The
links themselves (serializers and optics) are outside the RTL, so the words
leave the top on the `link_*` ports.

## Rates and sizes

| quantity | value | source |
|---|---|---|
| channels per FEM | 64 | paper |
| ADC | 12 bit, 16 MS/s, downsampled to 2 MS/s | paper |
| SRAM | 1 M × 36 bit, 128 MHz | paper |
| ring | 8 frames × 1.6 ms (3200 ticks) | paper |
| optical links | 4 × 3.125 Gb/s, 2 per stream | paper |
| FEMs per crate | 14 | derived: (2·2400 + 3256) wires / 64 per FEM / 9 crates |
| presamples / postsamples | 7 / 7 | own choice (`NPRE`, `NPOST`) |
| stream buffer | 2^18 words per stream | own choice; holds one unsuppressed frame (204,931 words) |
| dataway | 16 bit per clock | own choice |

Throughput limits to keep in mind:

* **Zero suppression** takes one sample per clock plus NPRE clocks per channel.
  A frame therefore needs 64 × 3207 = 205,248 clocks. At 128 MHz a frame lasts
  only 204,800 clocks, so the suppressor is 0.2 % too slow at the SRAM's clock.
  It keeps up from about 128.3 MHz. The testbenches space the 16 MS/s strobes
  10 clocks apart, as if the clock were 160 MHz.
* **SRAM**: each frame needs 68,288 word writes and 68,288 word reads. That is
  two thirds of the port at 128 MHz.
* **Writer**: needs at least 64 clocks per three ticks, well inside 192.
* **Dataway**: one 16-bit word per clock is 256 MB/s at 128 MHz. The paper
  quotes up to 512 MB/s, which would need 32 bits. The suppressed stream, aimed
  at about 50 MB/s per crate, fits easily. A triggered frame from a full crate
  (about 5.7 MB) takes about 22 ms to send.

## What follows the source design and what does not

Taken from the published description:

* the chain ADC → 2 MS/s → SRAM ring of 8 × 1.6 ms in time order → channel-order
  readout → two streams;
* zero suppression against a static per-channel baseline, with per-channel
  thresholds, presamples and postsamples, keeping raw values;
* one buffer per stream on each FEM;
* a shared backplane on which the triggered stream wins, by token passing;
* two links per stream on the transmitter.

Own choices, where the description gives no detail:

* downsampling by averaging;
* word packing and addressing in the SRAM, and write-first port sharing;
* the read-ahead queue, overrun handling and frame skipping;
* the strict `>` threshold test;
* NPRE and NPOST;
* the 16-bit word format and headers;
* runs of saved samples cut at channel and frame boundaries;
* the token rules;
* frame-by-frame link alternation;
* the buffer depth;
* a trigger selects exactly one frame;
* a single clock;
* a 16-bit dataway. At 128 MHz that is half the backplane bandwidth quoted for
  the real system.

Known shortfall: at exactly 128 MHz, the zero suppressor falls 0.2 % short of
real time (see *Rates and sizes*). The triggered path is also limited by its
output format. It keeps every sample, and one 16-bit word per clock then
cannot quite carry a full frame in real time. Triggered frames are rare and
wait in their buffer.

Not in the RTL:

* **Lossless Huffman coding.** The real system applies it to both streams, but
  its code is not specified here. Words leave uncoded.
* **The real triggered-stream format.** Here the triggered stream is the
  zero-suppression format with every sample kept.
* **Dynamic-baseline and plane-wide-threshold variants.** They were tried
  earlier and replaced by the static-baseline, per-channel version built here.
  The dynamic baseline compared the mean and truncated variance of 64-sample
  blocks with those of the neighbouring blocks.
* **Analog and commercial parts.** These are the cold preamplifier ASIC, the
  warm amplifier, the ADC, the DRAM chips (modelled as FIFOs), the optical
  transceivers, the crate controller, the trigger board, the PCIe receiver
  cards, and the servers with their disk-cleanup policy. The policy deletes the
  oldest runs once a disk passes 80 % full, until it is below 70 %.
* **The PMT readout stream.**

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog stops it if it hangs. Packages must be read first. Example with
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv rtl/fem_pkg.sv tb/zs_ref_pkg.sv \
  tb/tb_tpc_crate.sv --top-module tb_tpc_crate
./obj_dir/Vtb_tpc_crate
```

| testbench | what it shows |
|---|---|
| `tb_downsampler` | averages and one output per 8 strobes, random strobe spacing |
| `tb_sram_1mx36` | data, 1-cycle latency, held output, both ends of the address range |
| `tb_ring_buffer` | channel-order readout, flags, trigger mark, then overrun, skipping and `dropped` |
| `tb_stream_splitter` | lock-step hand-off to both paths |
| `tb_zero_suppressor` | word-for-word against a reference model, suppressed and keep-all, cycles per frame |
| `tb_stream_fifo` | order, count, full, one word per clock |
| `tb_dataway_arbiter` | order, no interleaving, priority, one word per clock |
| `tb_xmit_router` | link choice and alternation under back-pressure |
| `tb_fem` | both streams of one FEM word-for-word |
| `tb_tpc_crate` | reduced crate: every mechanism, including forced overrun |
| `tb_tpc_crate_full` | default size (14 × 64 channels, 3200-tick frames), about 30 s |

The reference model `tb/zs_ref_pkg.sv` computes the expected words from the
raw samples. It evaluates the window directly, not with a delay line. Both
crate testbenches check each frame on the links word for word against that
model, on a link of the right stream. They also count how often each mechanism
fired:

* triggered frames;
* suppressed samples and runs of saved samples;
* token hand-overs;
* triggered words sent while supernova words waited;
* frames on every link;
* back-pressure.

A mechanism that never fired counts as a failure.

To change the design, note where the parameters live. The sizes are parameters
of `tpc_crate`: `N_FEM`, `N_CH`, `N_FRAMES`, `TICKS_PER_FRAME`, `NPRE`,
`NPOST` and `FIFO_DEPTH`. The word tags are in `fem_pkg`.
