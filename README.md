# An FPGA multiphase-sampling TDC front-end with trigger matching

This RTL describes the digital part of a front-end board that timestamps the edges of
discriminated detector signals. It gives 384 channels per board, with 96 per TDC-FPGA. It
keeps only the hits that belong to a trigger, and it sends them as event packages towards a
central readout FPGA.

The time measurement needs no delay line. Each input is sampled by eight flip-flops, and each
flip-flop is clocked by one phase of a 311.04 MHz clock. The phases are spaced by 1/8 of the
period, so the bin width (LSB) is 3.215 ns / 8 = 402 ps. A coarse counter that runs on the
sampling clock supplies the upper timestamp bits.

Hits are written without any selection into a per-channel circular buffer. When a trigger
arrives, a time window is placed on the buffer and the hits inside it are copied out. They then
pass through a tree of concentrators and are framed with the event labels of the trigger system.

The last part of the RTL is on the board's central FPGA. It starts up the optical uplink so that
its latency is the same after every power-up. It does this by aligning the incoming bit stream to
a fixed comma pair in the FPGA fabric, instead of using the transceiver's own aligner.

```
             clocks[7:0] (8 phases, 311.04 MHz)
                 |
 DATA_IN[95:0] --+--> 96 x tdc_channel -------------------------------+
                 |     tdc_register -> detect_encode -> hit_buffer_ram |
                 |                 trigger FIFO -> trigger_matcher     |
                 |                                  -> output FIFO    |
 clock_counter --+--> coarse_time                                     |
 trigger ------> trigger_time --(window, tag)--> all channels          |
                                                                     v
             12 x data_concentrator(8) -> data_concentrator(12) -> event_builder -> SCK/SDO/SFR
 config bus ---> config_master (edge mode, latency, gate, ...)
```

`aragorn_frontend` holds four `tdc_fpga` instances and the uplink receiver (`dec_8b10b` and
`comma_align`).

## Sampling with eight clock phases (`tdc_register`, `detect_encode`)

Flip-flop *i* samples the input on the rising edge of `clocks[i]`, and `clocks[i]` lags
`clocks[0]` by *i*·τ, with τ = T/8. The eight samples live in eight clock domains. They are
moved into the `clocks[0]` domain by a second rank of flip-flops, which gives one 8-bit snapshot
`q_sync` per period. Bit *i* of the snapshot is the input level at phase *i*.

`detect_encode` looks at the 9-bit window {`q_sync`, last bit of the previous snapshot}. An edge
lies in bin *k* when the sample at phase *k* differs from the sample just before it:

- a 0→1 change is a leading edge;
- a 1→0 change is a trailing edge.

The configured edge mode selects which kinds count:

| code | mode |
|------|------|
| 00 | off |
| 01 | leading only |
| 10 | trailing only |
| 11 | both |

The mode can be changed at run time. The bin number *k* is the 3-bit fine time, written together
with the current coarse counter.

At most one hit per channel is recorded per clock period (3.2 ns). When a period holds several
allowed edges, the earliest one wins. This matches the double-hit resolution of one sampling
period.

The sampling itself is only as good as the placement. The phase flip-flops must sit close
together with balanced clock routes. That is a matter for placement constraints, not for this
RTL.

## Timestamp format and counter rollover

The coarse counter has 14 bits. With the 3 fine bits, a hit-buffer timestamp has 17 bits:

```
hit buffer word (18 bits):  [17] trailing  [16:3] coarse[13:0]  [2:0] fine
output hit time  (16 bits):                 [15:3] coarse[12:0]  [2:0] fine
```

The usable range is 16 bits: 2^16 × 402 ps ≈ 26 µs. The counter's top bit is the *rollover
bit*. It is only needed inside the buffer, where it decides whether a stored hit was taken before
or after a counter wrap. It is dropped when a hit is copied to the output.

The 18th bit of the 2k×18 memory marks trailing edges, so leading and trailing hits can share one
buffer in "both" mode.

## Trigger matching (`trigger_time`, `hit_buffer_ram`, `trigger_matcher`)

This is the part that needs the most care.

### Windows

`trigger_time` stamps each trigger with the coarse counter *C*. It computes a window and hands it,
together with an 8-bit tag, to the trigger FIFO of every channel:

```
win_low  = C - latency
win_high = win_low + gate
```

Both are modulo 2^14. A hit with coarse time *t* belongs to the window when
`win_low <= t <= win_high`. Every comparison is done on the 14-bit difference, and the sign of
that difference (its top bit) decides "before" or "after". This stays correct across a counter
wrap, provided the latency plus the gate stay well below 2^13 periods (26 µs).

### Buffer pointers

The hit buffer is a circular 2048-entry memory with three pointers:

- **`wr_ptr`**, owned by `detect_encode`, is where the next hit goes.
- **`start_ptr`**, owned by the matcher, is the oldest hit that a future trigger could still
  want. Everything before it is free.
- **`rd_ptr`** is the matcher's scan position.

The buffer is *full* when one more write would make `wr_ptr` reach `start_ptr`. One slot is kept
free so that full and empty can be told apart. A hit arriving while the buffer is full is
dropped, and the channel reports it on its `lost` output.

### One trigger, step by step

1. The matcher pops a window from the trigger FIFO.
2. It waits until `coarse_time` has passed `win_high` by `MARGIN` (4) periods. Only then are all
   hits of the window in the buffer: a hit takes a few clocks to go from the pin to memory. This
   matters when the gate reaches past the trigger time.
3. It scans from `start_ptr`, one word every two clocks, because of the memory's read latency.
   - A word older than `win_low` is skipped.
   - A word inside the window is copied to the output FIFO.
   - The scan stops at the first word newer than `win_high`, or when `rd_ptr` meets `wr_ptr`.
4. `start_ptr` moves to the first word that was not older than the window. Words that were only
   skipped are thereby released. Hits inside the window stay available, because the next trigger
   may overlap this one.
5. For a real trigger, a trailer word with the tag is written. It marks the end of the event in
   this channel, so a channel with no hits still writes its trailer.

Windows must come in time order, and their lower limits must not decrease. This holds when
latency and gate are constant.

### Artificial triggers

If no trigger comes for a long time, `start_ptr` never moves, and the buffer fills with hits that
no one will ever want. `trigger_time` therefore issues an *artificial* trigger after `art_period`
clock periods without a real one. It follows the same path, but it only moves `start_ptr`: it
copies no hits and writes no trailer. Setting `art_period = 0` turns this off.

### Latency of the scan

The matcher works on one trigger at a time per channel. A trigger with *n* hits in its window, and
*s* older hits to skip, costs about 2(n+s)+6 clocks after the window has closed. Triggers that
arrive in the meantime wait in the 16-entry trigger FIFO. If that FIFO overflows, the window is
lost, and the `trig_overflow` flag is set.

## Readout chain and package format (`data_concentrator`, `event_builder`, `serial_tx`)

Each channel's output FIFO holds 25-bit words:

```
[24] trailer  [23:17] channel  [16] trailing  [15:0] time16   (hit)
[24] 1        [23:17] channel  [16] 0         [15:0] tag      (trailer)
```

A `data_concentrator` with *N* inputs serves its inputs event by event, in turn from 0 to *N*−1.
From each input it moves the hit words up to and including that input's trailer. It drops the
trailers of inputs 0 to *N*−2, and writes a single trailer after the last one. If the tags of the
*N* trailers disagree, it pulses `tag_error`.

Its output has the same format as its inputs, so concentrators cascade. Each TDC-FPGA uses 12
concentrators of 8 channels, working in parallel, followed by one concentrator of 12. Each stage
has a 64-word buffer.

The `event_builder` keeps the trigger-system labels of every real trigger in a 16-entry FIFO:

- event number (20 bits);
- spill number (11 bits);
- event type (5 bits);
- the 8-bit tag.

It sends each event as a package of 32-bit words:

| word | bits |
|------|------|
| H0 | `4'hA, 1'b0, type[4:0], spill[10:0], 3'b0, tag[7:0]` |
| H1 | `4'hB, 8'h00, event_no[19:0]` |
| D (per hit) | `4'h1, 3'b0, trailing, 1'b0, channel[6:0], time16[15:0]` |
| T | `4'hC, 3'b0, tag_error, 8'h00, hit_count[15:0]` |

If the tag in the labels disagrees with the event's trailer tag, `tag_error` in T is set.

`serial_tx` shifts the words out MSB first on a source-synchronous link:

- **SCK** is the forwarded clock, at half the system clock.
- **SDO** is the data. It changes after the falling edge of SCK, so the receiver samples on the
  rising edge.
- **SFR** is high for the whole package.

When the next word is not ready, SCK stops and SFR stays high. A receiver must therefore count
clock edges, not time.

## Configuration registers (`config_master`)

The configuration bus is a simple synchronous one: `cfg_we`/`cfg_re`, an 8-bit address and 32-bit
data. Read data appears one clock after `cfg_re`.

| addr | register | reset |
|------|----------|-------|
| 0 | edge mode [1:0] | 01 (leading) |
| 1 | latency [13:0], in clock periods | 100 |
| 2 | gate [13:0], in clock periods | 50 |
| 3 | artificial-trigger interval [15:0], 0 = off | 1024 |
| 4 | bit 0: hold the coarse counter in reset | 0 |
| 5 | status, sticky, write 1 to clear | 0 |
| other | reads 0xDEADBEEF | |

Status bits:

| bit | meaning |
|-----|---------|
| 0 | a hit was lost because a buffer was full |
| 1 | a trigger FIFO overflowed |
| 2 | concentrator tags did not match |
| 3 | the label FIFO overflowed |

The coarse counters of all four TDC-FPGAs are cleared together by `coarse_sync_rst`. This is the
start-of-run reset.

## Constant-latency uplink (`dec_8b10b`, `comma_align`)

A transceiver that aligns to commas by itself may choose a different bit offset after each reset.
This changes the link's latency by a fraction of a word, which is not acceptable when the same
link carries the reference clock and the trigger. Here the transceiver's own aligner and decoder
are bypassed, and `comma_align` looks at the raw 20-bit parallel word (two 10-bit symbols; bit 0
of a symbol is its first bit on the line):

1. It holds the receiver in reset until the jitter-cleaning PLL reports lock, then waits for the
   receiver's reset-done.
2. It searches for K28.1 in bits [9:0] followed by K28.5 in bits [19:10], in either running
   disparity, for `SEARCH_CYCLES` clocks.
3. If it does not find them, it pulses the receiver reset again and retries. Each retry lands on a
   new random bit offset, until the one offset that gives the fixed alignment comes up.
   `align_attempts` counts the retries.
4. When the pair is found, `link_up` rises and the reset of the transmitters towards the slave
   boards (`tx_reset`) is released.
5. Losing the PLL lock, or `ERR_LIMIT` code errors in a row from the decoder, drops the link and
   starts over.

`dec_8b10b` is a table-driven 8b/10b decoder with one register stage. It does not check running
disparity; it flags only code groups that do not exist.

## What is not in the RTL

- The MMCMs that make the phase clocks. `tb/mmcm_model.sv` is a behavioural model for
  simulation.
- The trigger-system receiver that decodes trigger and labels. Trigger and labels are ports.
- The multi-gigabit transceivers, the optical modules and the jitter-cleaning PLL.
- The central FPGA's merging of the four serial links, and of seven slave boards, into the output
  fibre. The four SCK/SDO/SFR links are outputs of the top.
- The soft processor and the multiboot logic for remote reconfiguration.
- The analog preamplifier and discriminator boards.

## Choices this RTL makes on its own

The description this design follows gives the overall structure. It does not give the following,
which are the RTL's own choices:

- The hit buffer uses one word per hit, with the edge type in the spare bit.
- One hit per channel per clock is kept; the earliest edge wins.
- The trigger tag is 8 bits. The trailer word per channel and event is added.
- The matcher waits `MARGIN` clocks after the window closes. It scans at one word per two clocks.
- Artificial triggers are counted from the last trigger.
- The FIFO depths are: trigger 16, output 64, concentrator 64, label 16.
- The concentrator tree is 8×12 and is read round-robin.
- The whole package format and the serial framing are this design's own.
- The register map and the reset values are this design's own.
- The comma pair sits at a fixed place in the word. The time-outs and the error limit are this
  design's own.

Everything after the sampling flip-flops runs on `clocks[0]`.

Timing closure at 311 MHz on the target FPGA has not been checked. The matcher's comparisons are
short (14-bit subtractions), but the concentrators' 25-bit multiplexers may need a pipeline stage.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. Using plain verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/tdc_pkg.sv tb/enc8b10b_tb_pkg.sv tb/<tb_name>.sv --top-module <tb_name>
./obj_dir/V<tb_name>
```

`tb_aragorn_frontend` runs the whole board at the default sizes: 4 × 96 channels and 2048-word
buffers. This takes about half a minute. It drives random hits on all 384 inputs, real triggers
with random labels, and quiet stretches that produce artificial triggers. It also drives a burst
that overflows a hit buffer, a change of edge mode, and an uplink that needs several alignment
attempts.

It decodes the four serial links with `tb/serial_rx_model.sv`. It checks every package against
hits predicted from the stimulus, which it works out independently of the RTL. It also counts how
often each mechanism happened.

`tb_rate_15mhz` drives one full-size channel with 100,000 random pulses at the typical rate of
15 MHz. Triggers arrive every 100 to 3000 clock periods, with the default window. Every output
word must match the prediction, and no hit or trigger may be lost.

The block testbenches override sizes to stay short:

- `tb_tdc_channel` uses a 64-word buffer.
- `tb_tdc_fpga` uses 16 channels and a 256-word buffer.
