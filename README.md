# Long-syncword frame synchronizer

A receiver on a badly faded, noisy radio link must still find where each frame
begins in the demodulated bitstream. This design does it the oldest way, by
correlating the stream with a known syncword, but with a syncword far longer
than usual: hundreds of random bits instead of a few dozen. Each frame is a
K-bit syncword followed by an N-bit payload (N much larger than K). The
receiver counts, at every bit position, how many of the last K received bits
agree with the syncword. Where that count is above a threshold (70 % of K in
the configurations below), a frame starts.

Why length helps: the decision "syncword here / not here" collapses K channel
bits into one bit of information, a code of rate 1/K. For large K the count
at the true position stays above a 70 % threshold even when a quarter of the
bits are wrong. In random data the count is close to K/2, and the chance that
it reaches 70 % falls off exponentially with K. With 300 bits and 25 % bit
errors, about 2 % of frames are lost. With 500 bits and the same relative
threshold, fewer are lost. Random payload data practically never triggers a
false detection. The syncword is random and can be changed every so many
frames. Someone who does not know it cannot tell where frames start.

The hardware problem is throughput. The correlator must produce a K-bit
correlation for every bit position, at line rates of several Gbit/s. The
architecture tests M positions in parallel on every clock. It uses nothing but
XNOR gates, adders and comparators, arranged in pipelined binary trees.

## Datapath

```
                  in_bits (M per clock)
                        |
              +---------v----------+
              | bitstream register |  last K+M-1 bits
              +---------+----------+
     window 0 |  window 1 |  ...  | window M-1        (K bits each)
      +-------v-+ +-------v-+   +-v-------+
      | T0 (+)  | | T1 (+)  |...| T(M-1)  |   XNOR with syncword + adder tree
      +----+----+ +----+----+   +----+----+
           +-----------+------------+
                  +----v-----+
                  | Tc (max) |   comparator tree: largest count + its position
                  +----+-----+
                  +----v-----+
                  |  > thr   |   det, det_pos
                  +----+-----+
newest block of        |
bitstream register     |
   |                   |
+--v-------------+     |
| delay register |     |       DLAT stages, same latency as the decision path
+--+-------------+     |
   |   +---------------v---+
   +-->|  payload capture  |--> pl_bits (M per word), pl_valid, pl_first, pl_last
       +-------------------+     frame_start, det_dropped, busy
```

| File | Block |
|---|---|
| `rtl/fsync_pkg.sv` | default sizes and width helpers |
| `rtl/bitstream_register.sv` | the K+M-1 bit window buffer |
| `rtl/corr_adder_tree.sv` | one correlator: K XNORs and a pipelined adder tree |
| `rtl/comparator_tree.sv` | pipelined maximum of M values with index |
| `rtl/threshold_detector.sv` | strict comparison with the threshold |
| `rtl/delay_register.sv` | the bitstream delay line |
| `rtl/payload_capture.sv` | aligns and emits the payload |
| `rtl/frame_sync_top.sv` | the complete synchronizer |

## Bit positions: which window is which

This is the part that needs care when modifying the design.

Number the received bits 0, 1, 2, ... in arrival order. Blocks of M bits are
numbered by the valid clock that carries them: block t holds bits
tM .. tM+M-1, with bit tM on `in_bits[0]`. After block t has been shifted
in, the bitstream register `win` holds bits tM+M-(K+M-1) .. tM+M-1. The
oldest of these is at `win[0]` and the newest at `win[K+M-2]`. Bits before
the first received bit read as zero.

Adder tree i correlates `win[i +: K]`, the K bits that end at bit tM+i. The M
trees therefore test every syncword end position inside block t. Over
successive clocks they test every bit position of the stream exactly once,
with no gap and no overlap. Bit 0 of `syncword` is compared with the oldest
bit of each window, so `syncword[0]` is the first transmitted syncword bit.

If tree i wins and passes the threshold, the syncword ended at bit tM+i. The
payload then starts at bit tM+i+1, which is offset i+1 within block t. For
i = M-1 the offset is M, meaning the payload starts with block t+1. The
capture unit keeps the previous block. On each clock it takes M bits from the
2M-bit pair {current block, previous block}, starting at the stored offset.
Payload word j therefore holds payload bits jM .. jM+M-1. Word j leaves on
the clock after the block that holds its last bit has come out of the delay
register.

## Pipeline and timing

Every tree level is a register stage, and every register in the design
advances only on a clock where `in_valid` is high. A gap in the input stream
freezes the whole pipeline, so gaps change nothing but the wall-clock
timing. Outputs that pulse (`frame_start`, `pl_valid`, `det_dropped`) are
high only for one valid clock each. Counted in valid clocks:

* adder tree: ceil(log2 K) stages (9 for K = 300, 9 for K = 500)
* comparator tree: ceil(log2 M) stages (4 for M = 15, 5 for M = 20)
* threshold: 1 stage

The decision for block t therefore is ready DLAT = ceil(log2 K) + ceil(log2 M) + 1
valid clocks after block t entered the register: 14 at the default size.
The delay register taps the newest block of the bitstream register and is
exactly DLAT stages deep, so the capture unit sees block t together with the
decision about block t. With block t clocked in on valid clock t:

* `frame_start` pulses after valid clock t + DLAT + 1;
* payload word j pulses after valid clock b + DLAT + 1, where b is the block
  that holds the word's last bit;
* a frame of N bits occupies the output for N/M valid clocks, one word per
  clock, so the output keeps up with the input: M bits per clock sustained.

A detection that arrives while a capture is running is ignored, and
`det_dropped` pulses. With a long random syncword, such a detection can only
be a false one inside the payload. A detection on the clock that emits the
last word of a frame is also ignored. The next genuine syncword cannot end
that early, because it needs K > M more bits.

The comparison is strict: a window needs more than `threshold` matching bits.
If several windows in one block have the same highest count, the lowest
position wins.

## Interface (`frame_sync_top`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (all state to zero) |
| `in_valid` | in | 1 | `in_bits` carries the next block; low stalls everything |
| `in_bits` | in | M | next M stream bits, bit 0 earliest |
| `syncword` | in | K | syncword, bit 0 first transmitted; hold stable while receiving |
| `threshold` | in | ceil(log2(K+1)) | detection needs more matches than this |
| `frame_start` | out | 1 | a syncword was accepted; the payload follows |
| `pl_valid` | out | 1 | `pl_bits` holds a payload word |
| `pl_bits` | out | M | payload word, bit 0 earliest |
| `pl_first`, `pl_last` | out | 1 | first / last word of a frame's payload |
| `busy` | out | 1 | a capture is running |
| `det_dropped` | out | 1 | a detection was ignored because a capture was running |

## Sizes and configurations

| Parameter | Default | Meaning |
|---|---|---|
| `K` | 300 | syncword length |
| `M` | 15 | window positions tested, and stream bits accepted, per clock |
| `N` | 3000 | payload length; must be a multiple of M |

The two configurations evaluated for this scheme are a 300-bit syncword with
threshold 210 and a 500-bit syncword with threshold 350, both at 70 %. The
default build is the 300-bit one. The 500-bit one is `K=500, M=20`, with
`threshold` driven to 350.

M is not given by the source of the design. The reported line rates are
3.75 Gbit/s for the 300-bit version and 5 Gbit/s for the 500-bit version on an
FPGA. Both equal M × 250 MHz with M = 15 and M = 20. The reported flip-flop
counts support that reading:

| | reported FFs | this RTL, coarse synthesis |
|---|---|---|
| K=300, M=15 | 14429 | 14468 flip-flop bits |
| K=500, M=20 | 31009 | 31080 flip-flop bits |

A fully pipelined adder tree over 300 bits needs about 913 flip-flops (each
level only as wide as its largest possible sum), and 15 of them account for
almost all of the total; the same holds for twenty 500-bit trees. The
agreement within 0.5 % in both cases is the main evidence that the
original is also fully pipelined and accepts M = 15 resp. 20 bits per clock.
The payload length N is not given either: 3000 (ten times the syncword) is an
assumption. The clock frequency is not known, so
the RTL's line rate is only "M bits per clock".

Cost grows as M·K: M·K XNOR gates, about M·K adders, and about 3·M·K
pipeline flip-flops in the trees (level l of a tree has K/2^l nodes of l+1
bits). The bitstream register adds K+M-1 bits and the delay register M·DLAT
bits.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog. All of them
drive random enable gaps.

| Testbench | What it checks |
|---|---|
| `tb_bitstream_register` | window contents against a bit history, at the default size |
| `tb_corr_adder_tree` | K = 300 and K = 37 trees against a software match count, exact latency ceil(log2 K) |
| `tb_comparator_tree` | 15-, 5- and 1-input trees, with ties; lowest position must win; latency |
| `tb_threshold_detector` | below / equal / above the threshold |
| `tb_delay_register` | 14-stage and 0-stage lines |
| `tb_payload_capture` | payload words, offset M, flags, busy, dropped detections, against a bit-index model |
| `tb_frame_sync_top` | end to end at K=128, M=8, N=256, threshold 90 |
| `tb_frame_sync_full` | end to end at the default size (300/15/3000, threshold 210) |
| `tb_workload_ber` | both configurations, 200 frames each at 20 %, 25 % and 28 % random bit errors |

The end-to-end benches share `tb/fsync_env.sv`. It builds a stream of frames
with random noise gaps and random input stalls, and plants directed cases:

* a syncword with exactly threshold+1 matches, which must be found;
* one with exactly threshold matches, which must be missed;
* one far below the threshold;
* a copy of the syncword inside a payload, which must be ignored during the
  capture.

Its reference model does not use trees or pipelines. It correlates bit by
bit, applies the same per-block maximum and the same busy rule, and predicts
every payload word with its flags and the exact valid clock on which it must
appear. It also predicts every `frame_start` and counts the expected
`det_dropped` pulses. Each bench fails if any of its directed mechanisms never
occurred.

`tb_workload_ber` stands in for the radio channel with a binary symmetric
channel, which flips every bit independently. It is not the faded QPSK link
the scheme was evaluated on. It sweeps the bit error rate over three points,
much as the original evaluation sweeps the noise level. With the seeds in
the file, the frames missed out of 200 are:

| bit error rate | 20 % | 25 % | 28 % |
|---|---|---|---|
| 300-bit syncword, threshold 210 | 0 | 5 | 47 |
| 500-bit syncword, threshold 350 | 0 | 1 | 42 |
| binomial tail, 300 / 500 bits | 0 % / 0 % | 2.7 % / 0.6 % | 24 % / 17 % |

No false detections occurred, and every delivered payload matched bit for
bit. Both syncwords fall off a cliff near 30 % errors, where the expected
number of matches reaches the 70 % threshold. The longer syncword makes the
cliff steeper.

To simulate with Verilator (5.x), for example the full-size bench:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fsync_pkg.sv \
    tb/tb_frame_sync_full.sv --top-module tb_frame_sync_full -o sim
./obj_dir/sim
```

Replace the testbench name for the others. The package has to come first on
the command line. Every bench finishes in seconds.

## What follows the source, and what is this design's own

Taken from the source design:

* XNOR correlation with a long random syncword;
* a bitstream register feeding parallel adder trees T0..T(M-1), one per
  window position;
* a comparator tree "with the same topology as the adder tree" selecting the
  largest count;
* a comparison with a threshold;
* payload capture by means of a delay register;
* pipelining of the trees;
* the syncword sizes and thresholds (300/210, 500/350).

Choices made here where the source says nothing:

* M (bits per clock), N (payload length) and the clock;
* registering every tree level;
* the bit order;
* lowest position wins a tie; the threshold comparison is strict;
* threshold and syncword are run-time inputs, not constants;
* the `in_valid` stall, the asynchronous reset and the payload output format;
* ignoring detections while a capture is running.

The source design's own register-level details are published elsewhere and
may differ. In particular, it may pipeline the trees more sparsely, or not
re-arm until the payload has been consumed.

## Not included

The scheme places this synchronizer behind a QPSK modem. That modem has a
differential QPSK modulator, a channel, a root-raised-cosine receive filter,
symbol timing recovery (sign of maximum likelihood), a Costas loop and a
constellation/differential decoder. Those stages exist only as software
signal-processing blocks, with no hardware form given, and are not part of
this RTL. The synchronizer consumes the demodulated bitstream they would
produce. It does not depend on the modulation scheme.
