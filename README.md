# Continuous time-stamp sorter

Event-recording systems often receive data frames from several channels
slightly out of order. Each frame carries a time stamp, and the analysis
downstream wants the frames in stamp order. The stream has no end, so it
cannot be collected first and sorted afterwards. This design sorts such a
stream on the fly with a fixed buffer of `N_KEYS` frames (128 by default).
Its running time per frame does not depend on how long the stream is.

The RTL implements the architecture published by R. Paul, S. Sau and
A. Chakrabarti, "Architecture for real time continuous sorting on large
width data volume for FPGA based applications". In their prototype a soft
processor on a Spartan-3E ran the sort as software, with frames typed in
over RS-232 and results shown on a terminal. Here the sort is a dedicated
datapath, and the chip keeps the serial interfaces of the prototype.

## The frame

A frame is 48 bits wide. Bits 23:16 hold an 8-bit time stamp; the other
40 bits are payload and travel with the stamp unchanged.

| bits 47:40 | 39:32 | 31:24 | **23:16: time stamp** | 15:8 | 7:0 |
|---|---|---|---|---|---|

On the serial line a frame is six bytes, most significant byte first.
Viewed as three 16-bit words, the stamp is the low byte of the middle
word. The width, stamp position and stamp width are parameters
(`FRAME_W`, `TS_LSB`, `TS_W`).

## Sorting one buffer: counting sort on the stamp

`counting_sort` orders the `N` frames of the key buffer by stamp. Its run
time depends only on `N` and on the stamp width, never on the data. It
uses one array of 2^`TS_W` counters. The array first holds counts and then
positions, and it goes through four phases:

| phase  | clocks      | work |
|--------|-------------|------|
| CLEAR  | 2^TS_W      | every counter to 0 |
| COUNT  | N + 1       | read frame i, add 1 to the counter of its stamp |
| PREFIX | 2^TS_W      | running sum: counter j becomes the number of frames with stamp <= j |
| PLACE  | N + 1       | read frame i, write it to position counter[stamp] - 1 of the sorted array, subtract 1 from that counter |

A sort therefore takes 2·2^TS_W + 2·N + 2 clocks: 770 clocks for 128
frames with 8-bit stamps, about 15 µs at 50 MHz. The counters are read
combinationally, as distributed RAM, and written at the clock edge. COUNT
and PLACE each handle one frame per clock, and frames with the same stamp
back to back need no forwarding.

PLACE walks the buffer from the first entry upward while the position
counter counts down. Frames with equal stamps therefore leave **one pass**
in the reverse of their buffer order. The published algorithm has the
same property, and its printed example shows it: of two frames with stamp
4A, the later one comes out first.

## Sorting an endless stream: two blocks

`continuous_sorter` applies that fixed-size sort to an unbounded stream.
Its key buffer of `N_KEYS` frames has two halves:

* **first block**, entries 0 .. N/2-1: the next N/2 frames from the input;
* **second block**, entries N/2 .. N-1: frames carried over from the
  previous sort. After reset this block holds all-zero frames.

Once the first block is full, the whole buffer is sorted. The lower half
of the result, the N/2 smallest stamps, goes to the output. The upper half
is written back into the second block, where it waits for the next batch.
Each batch of N/2 frames in thus gives one batch of N/2 frames out.

**Why the output is sorted.** A frame is never sent ahead of a frame
that has not yet arrived, provided one rule holds. Every stamp in batch
*i* must be larger than every stamp in batch *i−2*. Neighbouring batches
may overlap freely. The testbenches draw batch *b*'s stamps from
`1+5b … 8+5b`, which overlaps batch *b−1* and stays clear of batch *b−2*.
If the rule is broken, the output is still a valid set of frames but not
in order. The hardware does not detect this.

**What the output looks like.** The first N/2 frames out are the zero
frames of the initial second block, provided real stamps are above zero.
After that the output runs one batch behind the input. When the input
stops, the last N/2 frames stay in the second block until N/2 more frames
push them out. There is no flush input.

**Tie order in the stream.** A frame that is carried over is sorted
twice, and each pass reverses equal stamps. Two equal-stamp frames that
both passed through the second block therefore leave in arrival order;
frames sorted only once leave reversed. So equal stamps have no single
fixed relative order at the system output. Sorting the six printed
example frames as one batch gives the printed order exactly
(`tb_counting_sort`). Sending the same six frames through the running
chip swaps the two 4A frames (`tb_fig6_workload`).

### Phases and handshakes

After reset: INIT zeroes the second block (N/2 clocks). Then the sorter
repeats these phases:

* FILL: accept N/2 frames (`in_ready` high while there is room).
* SORT: 2·2^TS_W + 2·N + 4 clocks.
* BACK: write the upper half back, N/2 + 1 clocks; `batch_done` pulses
  at its end.

The input is stalled (`in_ready` low) in every phase except FILL. Both
ports are valid/ready: a frame moves when both are high. The output can
send one frame every two clocks, and holds a frame while `out_ready` is
low.

### Two sorted banks

The sorted array has **two banks**. A sort writes one bank. The write-back
then reads it, and its lower half is sent while the next batch fills and
is sorted into the other bank. A sort waits only if its bank is still
being sent. A finished bank that cannot be sent yet waits as "pending".

This matters for a serial link with no flow control. With a single sorted
array, the next sort would have to wait for the previous output to drain.
Output and input run at the same rate, so each batch would then add a
sort time of lag, and a sender that never pauses would eventually overrun
the receiver. With two banks the input is held up only during SORT and
BACK: 837 clocks at the default size. The frame assembler and the UART
byte register hide that. At 9600 bit/s a single byte takes 52,080 clocks.
The published design has one sorted array; the second bank is this
design's addition.

## The chip: `sort_system_top`

```
                     +-> frame_assembler --+                       +-> frame_serializer -+
uart_rxd -> uart_rx -+                     +-> continuous_sorter --+                     +-> uart_tx -> uart_txd
                     +-> hex_text_decoder -+                       +-> hex_text_encoder -+
                         (text_mode)                                    (text_mode)
```

The `text_mode` pin selects one byte format for both pins:

* **binary** (`text_mode` = 0): six bytes per frame, most significant
  first;
* **text** (`text_mode` = 1): a frame is typed on a terminal as twelve
  hexadecimal digits in any layout. Every non-digit is skipped, so
  `FF4B; FF4A; FF44;` is the frame FF4BFF4AFF44. Each sorted frame is
  printed as the 19-character line `FF41; FF41; FF5A;` plus CR LF. This
  is the listing format of the original prototype's terminal.

Change `text_mode` only during reset or while no frame is in flight. The
unselected path gets no valid and its outputs are ignored.

| port        | dir | meaning |
|-------------|-----|---------|
| clk         | in  | system clock, 50 MHz by default |
| rst         | in  | synchronous reset, active high |
| text_mode   | in  | 0: binary frames, 1: hexadecimal text lines, on both serial pins |
| uart_rxd    | in  | 8-N-1 serial input, idle high |
| uart_txd    | out | 8-N-1 serial output |
| rx_overrun  | out | one-clock pulse: a received byte was overwritten before it was taken |
| sorting     | out | the counting sort is running |
| batch_done  | out | one-clock pulse per sorted batch (end of write-back) |

The serial settings are 9600 bit/s, 8 data bits, no parity, 1 stop bit,
no flow control. `CLKS_PER_BIT` = 50 MHz / 9600 = 5208, rounded down.
The receiver samples in the middle of each bit. The transmitter takes its
next byte in the last clock of a stop bit, so it sends exactly as fast as
the receiver receives. In binary a frame is 60 bit times on the wire. A
batch of 64 frames then takes about 20 million clocks (0.4 s) at the
default settings. In text mode the output line is 19 characters. If the
sender types fewer characters per frame than that, the output is slower
than the input. The sorted banks then fill up, and the input is
eventually stalled for longer than the receive path can absorb.

## Files

| file | contents |
|------|----------|
| `rtl/sort_pkg.sv` | default sizes and rates |
| `rtl/sdp_ram.sv` | one-write, one-read synchronous RAM (block RAM) |
| `rtl/counting_sort.sv` | the counting-sort engine |
| `rtl/continuous_sorter.sv` | two-block stream sorter, key buffer, two sorted banks |
| `rtl/uart_rx.sv`, `rtl/uart_tx.sv` | serial receiver and transmitter |
| `rtl/frame_assembler.sv`, `rtl/frame_serializer.sv` | binary bytes to frames and back |
| `rtl/hex_text_decoder.sv`, `rtl/hex_text_encoder.sv` | terminal text to frames and back |
| `rtl/sort_system_top.sv` | the chip |
| `tb/tb_ref_pkg.sv` | reference sort and frame generator for the tests |
| `tb/tb_*.sv` | one self-checking testbench per module, plus system tests |
| `tb/tb_sys_body.svh` | body shared by the two end-to-end tests |

Each file opens with a comment on what it does, its interface and its
timing, and says which parts follow the published design.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself
through a watchdog. With Verilator 5, from the directory holding `rtl/`
and `tb/`:

```sh
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/sort_pkg.sv tb/tb_ref_pkg.sv tb/tb_continuous_sorter.sv \
    --top-module tb_continuous_sorter -o sim
./obj_dir/sim
```

Replace the testbench name to run another one:

| testbench | what it shows |
|-----------|---------------|
| `tb_counting_sort` | printed six-frame example sorted to the printed order; the algorithm's worked example A = [0,5,2,2,7,4] with its count and position arrays; 128-frame random sorts with heavy ties against the reference; exact sort time |
| `tb_continuous_sorter` | 12 batches at the default size against a model of the two blocks; zero first batch; sorted output; 770 sort clocks per batch; input stall, output back-pressure, pending bank and a sort waiting for a bank all occur; two final batches break the batch rule and must produce out-of-order output |
| `tb_sort_system_top` | whole chip over the serial pins, 16 frames held, 8 clocks per bit, 10 batches sent back to back, once in binary and once (after a reset) in text; checks every frame, every character of every text line, and that no byte is lost although the sorter stalls its input |
| `tb_sort_system_full` | whole chip with every parameter at its default (128 frames, 50 MHz, 9600 bit/s): 128 frames in, 64 zero frames and the first batch sorted out; about 60 million clocks, under a minute |
| `tb_fig6_workload` | the printed six-frame example typed as text into the running chip at default size (only the bit time shortened); checks the printed sorted lines |
| `tb_hex_text` | text encoder lines against independently formatted strings; decoder on the printed input lines and on random lower-case input |
| `tb_uart_rx`, `tb_uart_tx`, `tb_frame_assembler`, `tb_frame_serializer`, `tb_sdp_ram` | the pieces, with random handshakes |

The simulator has two states only. Every register that is read is reset,
and RAM contents are written before they are read: the second block in
INIT, the first block in FILL, and the sorted banks by PLACE, which
writes every entry.

## Changing the sizes

`N_KEYS` must be even, and is best a power of two (the RAMs use
$clog2(N_KEYS) address bits). The counters are $clog2(N_KEYS+1) bits
wide. `TS_W` sets the counter array to 2^TS_W entries, and the sort time
grows with it: a 16-bit stamp would take about 131,000 clocks per sort.
`TS_LSB` may place the stamp anywhere in the frame. `FRAME_W` must be a
multiple of 8 for the serial framing. At the top level the same
parameters are named `P_FRAME_W`, `P_TS_LSB`, `P_TS_W`, `P_N_KEYS` and
`P_CLKS_PER_BIT`.

A sort and write-back must end before the next frame fills the receive
path, which holds one frame plus one byte. That is (FRAME_W/8 + 1) byte
times. At the default rates this leaves a margin of about 400 to 1.

## How this differs from the published design

* **No processor.** The published system ran the sort in software on a
  soft processor, with program and data in block RAM, and reported 2550
  clock cycles at 50 MHz. Here the sort is hardware: 770 clocks for 128
  frames, plus 67 clocks of control and write-back.
* **Two sorted banks** instead of one array, so the sorter keeps up
  with a serial input that never pauses (see above).
* **Serial formats.** The prototype's software printed header lines (a
  title, the input list, the extracted stamps) around the sorted list.
  The chip prints only the sorted frames, one line each, in the same
  layout. It also offers a binary mode, which the prototype did not
  have.
* **One input.** The prototype also read data from board DIP switches,
  and the text describes a combiner with several input channels. Neither
  is described in enough detail to build, so the chip has one serial
  input.
* **Loop bound.** The published hardware version of the algorithm loops
  over 0..N in its placement step, and the base algorithm over 0..N-1.
  The RTL places exactly N frames.
* **Element width.** One passage gives the element width as 2^k−1 bits;
  the frame format elsewhere is 48 bits with an 8-bit stamp. The RTL
  uses the latter.
* **Not handled, as in the original:** stamp wrap-around (an 8-bit stamp
  restarting at 0), checking the batch-ordering rule, and flushing the
  last half-buffer at the end of a stream.
