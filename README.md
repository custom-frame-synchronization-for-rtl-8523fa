# Correlation-based frame synchronizer

A receiver gets a demodulated bit stream and has to find where each data
frame begins. This design does it with one marker and plain logic. Every frame
carries a known L-bit marker `b_l` ahead of its payload. The receiver compares
the marker with every L-bit slice of the recent stream at the same time. Each
comparison is a row of XNOR gates followed by a small adder tree. The slice
that matches best, if it matches well enough, gives the payload position. The
payload is then streamed out as it arrives. Frames can be any length, and the
circuit does not grow with the frame length.

The RTL follows the architecture in D. Nikolaidis, "Custom frame
synchronization for easy and rapid deployment". It uses that paper's FPGA
configuration as its defaults: a marker of L = 123 bits, guards of K = 23 bits
and a threshold of 89. Where the paper leaves a detail open, this code makes its
own choice. Those choices are listed below under *Departures and choices*.

## Frame format and bit order

The stream is sent as frames that follow one another:

```
time ->   c_k | b_l (marker, L bits) | a_k | payload (n*L bits) | c_k | b_l | ...
```

* `b_l` is the marker. It can be any fixed L-bit pattern, for example a random
  one.
* `c_k` is sent just before the marker. It is the bitwise inverse of the
  marker's first K bits.
* `a_k` is sent just after the marker. It is the inverse of the marker's last
  K bits.
* The guards require L > 2K. The paper recommends K of no more than about 20%
  of L.

The guards do not mark anything themselves. They make sure that the marker
shifted by one to K bits matches the stream badly. This keeps the correlation
peak sharp.

The receiver takes the stream L bits per clock. Bit 0 of an input word is the
earliest bit. Inside every register and vector here, a higher bit number means
a later bit. `MARKER[0]` is the first marker bit sent. The paper's small
example has L = 8, K = 3 and the marker `10001110` (written MSB first). So
`MARKER = 8'b10001110`, and with its guards the header in time order is
`c_k = 1,0,0`, then `0,1,1,1,0,0,0,1`, then `a_k = 1,1,0`.

## Why a 2L-bit window is enough

The input arrives as L-bit words, so a marker of L bits almost always
straddles two words. `fs_window` keeps the last two words in a 2L-bit register.
The new word goes into the upper half and the previous word into the lower
half. A marker that starts at bit m of the lower half (0 <= m <= L-1) is
therefore wholly inside the window. A start position in the upper half does not
need to be checked. One clock later the same bits are in the lower half. This
gives exactly L candidate start positions per clock, `m = 0 .. L-1`. Window bit
2L-1 is never needed.

## Correlation: L correlators, a selector and a delay line

`fs_parallel_adder_trees` has one correlator per candidate position i. It
XNORs `window[i+L-1:i]` with `MARKER` and counts the ones with `fs_adder_tree`.
The result `sum_i` is the number of agreeing bits: L for a clean marker, about
L/2 for unrelated data. Each tree has ceil(log2 L) levels. Each level adds
pairs, pads an odd count with a zero and is followed by a register. For L = 123
that is 7 levels, 7 clocks and 123 trees in parallel.

`fs_selector` is a tree of the same shape built from comparators. It passes the
larger value of each pair, together with its position, to the next level. After
another ceil(log2 L) clocks it gives the largest count `sum_m` and its position
`m`. When two counts are equal, the lower position wins.

The correlation result therefore lags the window by LAT = 2*ceil(log2 L)
clocks, which is 14 for L = 123. `fs_delay_buffer` delays the whole 2L-bit
window by the same 14 clocks. `fs_correlation` bundles the three blocks and
outputs `sum_m`, `m` and the window they belong to, all from the same clock.

Worked example, L = 8 and marker `10001110`. The window (bits 15..0) is
`0011100011100011`. The eight correlators give 3,0,3,5,8,5,3,0 for positions
0..7. The selector reports sum 8 at m = 4. The paper prints 6 for position 5,
but its own window bits give 5, and the testbench expects 5.

## Payload capture: the hardest part

`fs_payload_capture` only looks at the delayed window and the correlation
result of that same window.

**Detection.** While idle, a `sum_m` strictly above `threshold_i` starts a
frame. A marker at position m puts its first payload bit at window bit
L+K+m: after the L marker bits and the K bits of `a_k`.

**One re-check.** A marker can cross the threshold one clock too early. At that
point part of it has not yet arrived, or a noisy copy in front of it matches
well. So on the clock after a detection the unit compares once more. If the new
`sum_m` is smaller, the first detection stands. If the new sum is equal or
larger, the marker is taken to be at the new `m`, and the capture starts again.
After this clock, correlation results are ignored until the frame is complete.

**Where the payload begins.** Let q = K+m.

* If q < L, the first payload bit is already in the upper half of the window,
  at bit q of that half. Capture starts now with `cut = q`.
* Otherwise the first payload bit is in the next input word. The unit waits one
  clock and starts with `cut = q-L`. This value is 0 .. K-1.

**Beats.** All payload bits are taken from the upper (newest) half of the
window. An n-word payload leaves in n+1 beats, one per clock:

| `valid_o` | name | payload bits in `payload_o` |
|---|---|---|
| `2'b01` | HEAD | `L-1 .. cut` (the first L-cut bits) |
| `2'b10` | BODY | all L bits, n-1 times |
| `2'b11` | TAIL | `cut-1 .. 0` (the last cut bits; none if cut = 0) |
| `2'b00` | IDLE | none |

Bits that are not payload are zero. `cut_o` gives the split point. To rebuild
the payload, append the bits from `cut` to L-1 of the HEAD beat, then every BODY
beat, then bits 0 to cut-1 of the TAIL beat. A HEAD that arrives while a frame
is open means the re-check moved the marker: discard what was collected and
start again. The payload rate equals the input rate, L bits per clock.

**Timing.** A payload bit that arrives in input word w leaves in the beat
LAT+2 clocks after w is presented: 1 clock in the window, 14 in the
correlation and 1 in the output register. TAIL therefore comes n+15 clocks
after the word that holds the first payload bit, for L = 123.

**Power saving.** With `power_save_i` set, the correlators are switched off
while a payload is captured. Their XNOR outputs are held at zero, so the trees
stop toggling. The correlation runs 14 clocks ahead of the capture. The
correlators must therefore be switched on again at least LAT clocks before the
TAIL, or a frame that follows right behind would be missed. `corr_en_o` does
exactly that.

## Top level `frame_sync`

```
din_i[L-1:0] -> fs_window -> fs_correlation -> fs_payload_capture -> payload_o, valid_o, cut_o
                              (trees, selector,      ^ threshold_i, n_words_i, power_save_i
                               delay buffer)  <------ corr_en
```

| port | dir | width | meaning |
|---|---|---|---|
| `clk_i`, `rst_ni` | in | 1 | clock; asynchronous active-low reset |
| `din_i` | in | L | input word, one per clock, bit 0 earliest |
| `threshold_i` | in | ceil(log2(L+1)) | detection threshold (89 in the reference setup) |
| `n_words_i` | in | NW = 16 | payload length n in L-bit words, sampled at HEAD (0 acts as 1) |
| `power_save_i` | in | 1 | switch the correlators off during a capture |
| `payload_o` | out | L | payload beat |
| `valid_o` | out | 2 | beat code, `fs_pkg::beat_e` |
| `cut_o` | out | ceil(log2 L) | split point of HEAD/TAIL beats |
| `sum_o`, `pos_o` | out | | `sum_m` and `m`, for monitoring |

Parameters: `L` (123), `K` (23), `MARKER` (L bits), `NW` (16). The derived
widths `SW` and `PW` come from `fs_pkg`. The default `MARKER` for L = 123 is a
fixed pseudo-random value chosen here, because the reference gives none. Use
your own marker. A marker with small self-correlation at all shifts works best.

At the default size, synthesis gives about 31,600 word-level cells and 50,000
flip-flop bits. Nearly all of it is in the 123 adder trees.

## Files

| file | contents |
|---|---|
| `rtl/fs_pkg.sv` | tree depth and width functions, `beat_e` |
| `rtl/fs_window.sv` | 2L-bit window register |
| `rtl/fs_adder_tree.sv` | pipelined adder tree (population count) |
| `rtl/fs_parallel_adder_trees.sv` | L XNOR rows + trees |
| `rtl/fs_selector.sv` | pipelined maximum and position |
| `rtl/fs_delay_buffer.sv` | window delay line |
| `rtl/fs_correlation.sv` | correlation module |
| `rtl/fs_payload_capture.sv` | detection, re-check and capture control |
| `rtl/frame_sync.sv` | top level |
| `tb/fs_tb_pkg.sv` | stream generator and reference correlation for tests |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_frame_sync_fser` |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops by itself. It
also has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/fs_pkg.sv tb/fs_tb_pkg.sv tb/tb_frame_sync.sv --top-module tb_frame_sync
./obj_dir/Vtb_frame_sync
```

* **`tb_frame_sync`** runs the whole design at its default size. It sends 31
  frames with these cases:
  * random and chosen marker offsets, including offset 0 and the offsets around
    the "start now / wait one clock" boundary;
  * an offset that gives an empty TAIL;
  * marker bit errors;
  * back-to-back frames;
  * decoys that force the re-check to restart;
  * long frames with power saving on;
  * one 12,300-bit payload.

  Every payload is checked bit for bit, and every TAIL is checked to the clock.
  The test fails if any of these mechanisms never occurred.
* **`tb_frame_sync_fser`** sends 4,000 back-to-back frames with 100-word
  payloads at each of five bit error rates. The bit errors come from a binary
  symmetric channel. The test reports the frame synchronization error rate.
  Across several random seeds:

  | BER | frames missed of 4,000 |
  |---|---|
  | 2% | 0 |
  | 8% | 0 |
  | 12% | 0-1 |
  | 16% | 1-3 |
  | 20% | 91-113 |

  This channel is not the OFDM/16QAM-over-AWGN setup of the reference
  measurements, so its numbers cannot be compared with those directly. The test
  takes about a minute.
* The module tests (`tb_fs_*`) check the following against models written
  independently in the testbench:
  * exact latencies: 7 clocks for a tree, 7 for the selector, 14 for the
    correlation;
  * the L = 8 worked example;
  * tie rules;
  * the capture rules.

## Departures and choices

What follows the reference architecture:
* the 2L window and its shift structure;
* L XNOR correlators with zero-padded, fully pipelined adder trees;
* the pipelined comparator selector, which carries the position along;
* the 2*ceil(log2 L) latency and a delay buffer of equal depth;
* the threshold test;
* the single re-check on the next clock (restart unless the new sum is smaller);
* the payload position L+K+m and the one-clock wait;
* capture in n+1 beats from the upper half of the window;
* a 2-bit valid.

Choices made here, where the reference is silent:
* asynchronous active-low reset of every register;
* the marker is a parameter, with its own default for L = 123;
* ties in the selector go to the lower position;
* "above the threshold" is read as strictly greater;
* the meaning of each `valid_o` code, the extra `cut_o` output and the zeroing
  of non-payload bits;
* a TAIL beat is still sent when it holds no bits (cut = 0), so every frame has
  n+1 beats;
* the payload length is a run-time input, 16 bits wide;
* the output registers add one clock;
* power saving gates the XNOR outputs, and its switch-on point lets
  back-to-back frames through;
* `sum_o`/`pos_o` are brought out for monitoring.

Not covered:
* The demodulator that produces the input stream.
* The reference's FPGA figures: a 125 MHz clock, 15.375 Gb/s, and the LUT,
  flip-flop and power numbers. Timing closure was not attempted here.
* Its error-rate curve, which needs the OFDM channel.
