# Near-chip event filter for a dynamic vision sensor

A dynamic vision sensor (DVS) reports brightness changes pixel by pixel, as a
stream of events, instead of sending frames. A busy 480 x 320 sensor produces
tens of megabits per second, far more than a low-power radio or a small
microcontroller can take, and most of those events are either noise or
redundant. This design sits next to the sensor and turns the raw event stream
into occasional small packets: each packet is a 60 x 40 binary picture of the
moving edges in the scene, in two versions (vertical and horizontal edge
evidence), Huffman-coded and protected by a checksum. A pedestrian detector
running on a microcontroller (a binary neural network, not part of this RTL)
consumes the packets over a UART.

The filter reduces bandwidth in four steps, each of which also makes the
picture cleaner for the detector:

1. **Coincidence detection** keeps a pixel only if a neighbouring pixel of the
   same polarity fired in the same short time window (tau = 3 ms). Isolated
   noise events disappear.
2. **Aggregation** ORs the surviving pixels of successive windows until the
   picture holds enough of them (more than 1000), so that edges reach a
   similar thickness whatever the speed of the object. A picture that does not
   get there within 5 windows is thrown away: nothing worth reporting happened.
3. **8 x 8 max pooling** shrinks each 480 x 320 picture to 60 x 40 bits.
4. **Huffman coding** with a 256-word dictionary compresses the mostly empty
   pooled pictures.

The whole design is synchronous to one clock (50 MHz in the reference
configuration) and uses valid/ready handshakes between all stages.

## Data path

```
 sensor G-AER words (32 bit)
        |
  event_parser:  sync_fifo (256 x 32)  ->  gaer_decoder  ->  (x, y, p) one per cycle
        |
  coincidence_detector:  two window memories (ping-pong), 480-pixel line buffer
        |   beats: WBEGIN | row segment {row, 8 columns, vertical mask, horizontal mask} | WEND
        +-----------------------------+
        |                             |
  aggregator (vertical)        aggregator (horizontal)      2400 x 64-bit block memory each
        |                             |
  maxpool_subsampler           maxpool_subsampler           one 64-bit word -> one pooled bit
        |                             |
  huffman_coder                huffman_coder                256-word table, packet buffer
        |                             |
        +-------- packet_arbiter -----+                     "SAIC" | H | V | Fletcher-32
                        |
                     uart_tx  ->  uart_txd (115200 baud, 8N1)
```

Files: `rtl/dvs_pkg.sv` holds the shared types (event, beat, polarity);
every other file in `rtl/` is one module of the diagram, plus two helpers:
`sync_fifo` (also used as the coder's packet buffer) and `coin_bank_ram` (one
window memory). The top is `dvs_filter_top`.

## Coordinates and the sensor interface

`x` is the pixel row (0..319) and `y` the column (0..479). Polarity travels as
two one-hot bits (`01` brighter, `10` darker), so a pixel that changed both
ways within a window simply has both bits set.

The sensor speaks group address-event representation (G-AER): instead of one
word per event, it sends a column address once and then row-group words, each
carrying an 8-bit mask of the pixels of 8 consecutive rows that fired with one
polarity. The word format assumed here is:

| bits 31:30 | meaning   | payload                                                  |
|------------|-----------|----------------------------------------------------------|
| `00`       | time stamp | ignored (windows are timed by the filter's own clock)  |
| `01`       | column    | `y` in bits 8:0, held in a column register               |
| `10`       | row group | polarity in bit 16 (0 on, 1 off), group in 13:8, mask in 7:0; `x = group*8 + bit` |
| `11`       | reserved  | ignored                                                  |

The exact bit positions are this design's; adapt `gaer_decoder` to the sensor
at hand. The decoder expands a group word into one event per set mask bit,
lowest row first, one event per cycle. The 256-word packet FIFO in front of it
absorbs bursts. `gaer_ready` falls when the FIFO is full; a sensor that cannot
wait loses that word, and `drop_count` counts such refused cycles.

## Windows and coincidences

`coincidence_detector` keeps two window memories of 480 x 320 x 2 bits,
organised as 19,200 words of 8 pixels x 2 polarities. The roles swap every
`TAU_CYCLES` cycles (150,000 = 3 ms at 50 MHz):

* the **collecting** memory sets one bit per incoming event (a read-modify-write
  of one word);
* the **draining** memory holds the window that just ended. It is read row by
  row, 60 words per row, and each word is cleared as it is read, so the memory
  is empty again when it next collects.

While draining, a line buffer of one row (60 words, 480 pixels x 2 polarities)
holds the row above, and a one-word carry holds the pixel to the left of the
current word. For every pixel

```
vertical   = (on & on_above) | (off & off_above)
horizontal = (on & on_left)  | (off & off_left)
```

so only two pixels of the same polarity make a coincidence, and the mark lands
on the lower (vertical) or right (horizontal) pixel of the pair. Pixels
outside the array count as inactive. Row segments of 8 columns with at least
one coincidence in either channel are sent as one beat carrying both 8-bit
masks; empty segments are not sent. Each window's beats are framed by a
`WBEGIN` and a `WEND` beat. A readout takes 19,200 cycles plus any
back-pressure, about 13% of a window. If it has not finished when the next
window ends, the swap waits (the window is stretched) and `overrun_count`
increments. After reset both memories are cleared by a sweep of 19,200 cycles
before the first window starts. `window_tick` pulses at every swap.

The one-window delay is inherent: events of window *n* reach the aggregators
during window *n+1*.

## Aggregation: when a picture is sent

This is where most of the design's behaviour is decided. There are two
identical `aggregator` instances, one per channel. Both see the same beat
stream, and a beat is consumed only when both are ready.

Each aggregator owns a frame memory in **block layout**: word
`b = (row/8)*60 + col/8` holds the 64 pixels of one 8 x 8 pooling area,
byte lane `row % 8`, bit `col % 8`. A row segment of 8 columns therefore lands
in one byte lane of one word, and it is ORed in by a read-modify-write. The
event counter adds the number of pixels that were newly set, so it always
equals the number of active pixels in the aggregated picture, whatever overlap
there is between windows.

The window counter advances at each `WBEGIN`. After each `WEND` the picture is
judged:

* **send**: the event count of this channel *or of the other channel* is above
  `THRESH` (strictly greater than 1000), both Huffman coders are free, and no
  refractory period is running. The memory is streamed out word by word to
  the subsampler and cleared as it goes (2,400 words). `frame_sent` pulses.
* **clear**: otherwise, if `MAX_WINDOWS` (5) windows have been aggregated, the
  memory is cleared without output (2,400 cycles). `frame_dropped` pulses.
* **keep**: otherwise aggregation simply continues with the next window.

Because a packet carries both channels, the two aggregators decide together:
each raises `over` while its own count is above the threshold and sees the
other's as `peer_over`. As both consume the same beats, they judge in the same
cycle and always send, or clear, together, so the two images of a packet cover
the same windows. A scene with strong vertical edges but few horizontal ones
still produces packets; its horizontal image is simply sparse.

A picture that has crossed the threshold while the coder is still busy with
the previous packet is therefore *held* and keeps growing until the coder is
free or the 5-window limit clears it. This matters in practice: at 115,200
baud an average packet (about 175 bytes) needs about 15 ms on the line, five
windows' worth. In effect the UART, not tau, sets the packet rate, and each
packet carries the most recent picture that was ready when the line became
free.

While a picture is streamed out or cleared, the aggregator does not take
beats; this stalls the coincidence readout for at most 2,400 cycles, and the
readout has ample slack within a window.

`REFRACTORY` (default 0, off) sets a minimum number of windows after a sent
picture before the next one may be sent. `REFRACTORY = 33` limits the output
to one packet per 100 ms, which brings the average output bandwidth down to a
few kilobits per second.

## Pooling and symbols

Because one memory word is one pooling area, 8 x 8 max pooling is a single
comparison against zero per word and per cycle (`maxpool_subsampler`). The 2,400
pooled bits of a channel leave in block order (block row by block row, 60
blocks per row) packed eight to a symbol, first block in bit 0: 300 symbols
per channel, the last one flagged.

## Coding and the output packet

`huffman_coder` looks each symbol up in a 256-entry table of
`{length (1..16), codeword}` and appends the codeword, most significant bit
first, to a bit accumulator; whole bytes go into a 1024-byte packet buffer.
After the last symbol the final byte is padded with zeros, the byte count is
latched and the coder reports a ready frame. It stays busy until the packet
has been sent.

The dictionary is meant to be computed off-line from the symbol statistics of
recorded data and loaded through the `cfg_*` port (`cfg_ch` selects the
vertical table, bit 0, and/or the horizontal table, bit 1). So that the filter
works without one, the table is filled after reset (256 cycles) with a simple
prefix code: symbol `0x00`, an empty stretch of eight pooling areas and by
far the most common symbol, is the single bit `0`; every other symbol `s` is
`1` followed by the 8 bits of `s`.

`packet_arbiter` waits until both coders hold a frame and sends:

| field      | bytes          | content                                             |
|------------|----------------|-----------------------------------------------------|
| preamble   | 4              | ASCII `SAIC` = `53 41 49 43`                        |
| horizontal | len_h          | coded horizontal frame, zero-padded to a byte       |
| vertical   | len_v          | coded vertical frame, zero-padded to a byte         |
| checksum   | 4              | Fletcher-32 of both payloads, `sum2` then `sum1`, MSB first |

There is no length field. A receiver finds the split by decoding: each channel
is exactly 300 symbols of a prefix code, after which the rest of that byte is
padding. Fletcher-32 is the usual one: the payload is read as 16-bit words,
first byte high, an odd last byte padded with a zero low byte; `sum1` adds the
words and `sum2` adds `sum1`, both modulo 65,535, starting at zero.

`uart_tx` sends the bytes 8N1, least significant bit first, with a bit time of
`round(CLK_HZ / BAUD)` cycles (434 at 50 MHz and 115,200 baud).

## Parameters of the top

| parameter       | default    | meaning                                           |
|-----------------|------------|---------------------------------------------------|
| `H`, `W`        | 320, 480   | sensor rows and columns (multiples of 8)          |
| `TAU_CYCLES`    | 150,000    | window length in clock cycles (3 ms at 50 MHz)    |
| `THRESH`        | 1000       | pixels a picture must exceed to be sent           |
| `MAX_WINDOWS`   | 5          | windows after which an unsent picture is cleared  |
| `REFRACTORY`    | 0          | windows after a sent picture before the next      |
| `FIFO_DEPTH`    | 256        | sensor packet FIFO entries                        |
| `PKT_BUF_DEPTH` | 1024       | bytes of packet buffer per channel                |
| `CLK_HZ`, `BAUD`| 50 M, 115,200 | UART bit timing                                |

Memory at the defaults: 614,400 bits of window memory, 307,200 bits of frame
memory, two 256 x 21-bit tables and two 1 KiB packet buffers. All memories are
plain arrays with one read and one write port per cycle, so they map onto
dual-port block RAM.

## What comes from the filter description and what is chosen here

Taken from the description of the filter: the stages and their order; the
256-entry packet FIFO; tau = 3 ms; two window memories of 480 x 320 x 2 bits
used as a ping-pong pair; the 480-pixel line buffer; the same-polarity AND
of vertical and horizontal neighbours giving two channels; window start/end
signalling; duplicated aggregators ORing windows together, with an event
counter, a window counter, the 1000-event threshold checked at each window
end and the 5-window limit; the block memory layout that makes pooling one
comparison with zero; 8 x 8 pooling to 2 x 60 x 40 bits; a 256-word
dictionary in block memory; a 32-bit `SAIC` preamble and a 32-bit Fletcher
checksum; a UART at 115,200 bit/s; the 50 MHz clock; a refractory period as
a way to lower the output rate.

Chosen here, where the description is silent: the G-AER word format; the
8-pixel memory word; which pixel of a pair carries the mark; the beat format;
counting newly set pixels as events and reading "above 1000" as "> 1000";
sending both channels together when either is above the threshold (the
description has the two aggregators work independently, yet puts both
channels in one packet);
holding a picture that is ready while the coder is busy; the window stretching
on overrun; the refractory period counted in windows; the packing of pooled
bits into symbols; codeword lengths up to 16 bits, MSB-first splicing and
zero padding; the default code table; one packet for both channels,
horizontal first, under one checksum (the block diagram draws a checksum unit
per channel, the packet format has one checksum field); the checksum byte
order; 8N1 framing; the status outputs. The paper's actual Huffman dictionary
is not published, so the compression ratio of a trained table (about 3.6x on
the authors' data) cannot be reproduced without training a new one.

Not included: the sensor itself, and the detector network, which runs as
software on the microcontroller at the far end of the UART.

## Verification

Every module has a self-checking testbench in `tb/` that compares against a
model written independently of the RTL and prints
`TB_RESULT checks=<n> failures=<n>`; each has a watchdog.
`tb/filter_model.svh` is a whole-frame reference model of the filter (G-AER
packing, coincidences, pooling, coding, packet and checksum) shared by the
two system-level testbenches:

* `tb_dvs_filter_top` runs a 32 x 64 sensor with short windows and a fast UART
  and decodes the serial line byte by byte. It makes each mechanism happen and
  counts it: a picture sent; a picture held while the coder was busy and sent
  later; a scene above the threshold in one channel only, sent with both
  channels; sparse pictures cleared at the 5-window limit (and absent from the
  next packet); a picture that only crosses the threshold by aggregating two
  windows; input FIFO overflow; loading a new dictionary. It also checks the
  window period.
* `tb_dvs_filter_full` runs the top with every parameter at its default
  (480 x 320, 3 ms, 1000 events, 115,200 baud): one scene of about 3,000
  events is sent in one window and the 350-byte packet is decoded off the
  serial line and compared with the model. About 1.7 million cycles.

* `tb_dvs_filter_stream` is a sustained workload at full size: two copies of
  the filter, one in the main configuration and one with `REFRACTORY = 33`,
  receive the same stream: 8 windows of isolated noise (no packet may come
  out), then 70 windows of an object outline moving sideways among noise,
  then silence. The serial output of each is parsed packet by packet
  (preamble, two 300-symbol channels, checksum), no pooled pixel may lie
  outside the rows of the object, and the refractory copy's packets must be
  at least 33 windows apart. With the built-in code the main configuration
  sent 13 packets of about 170 bytes in the 210 ms of motion, keeping the
  line 83% busy (about 85 kbit/s); the refractory copy sent 3.

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_dvs_filter_full \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/dvs_pkg.sv tb/tb_dvs_filter_full.sv
./obj_dir/Vtb_dvs_filter_full
```

Any other testbench builds the same way with its own name. Verilator has only
two signal states, so everything that is read is reset; memories that are not
reset are written before they are read (the window memories and frame
memories are cleared by their sweeps after reset, the code tables are filled).

## Limits

* The packet rate is bound by the UART: a scene that stays busy produces one
  packet per transmission time (about 15 ms for an average packet), not one
  per window.
* The sensor's event rate of up to 50 M events/s equals the decoder's peak of
  one event per cycle at 50 MHz; sustained overload is absorbed only by the
  256-word FIFO and is then visible in `drop_count`.
* With the built-in code, a busy picture can cost up to 9 bits per symbol
  (about 680 bytes per packet); the 1 KiB packet buffers hold the worst case
  of either code.
