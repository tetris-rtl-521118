# Tetris: a multiplier-free CNN accelerator built on weight kneading and split-and-accumulate

In fixed-point CNN weights, about two thirds of all bits are zero. A multiplier
spends time and energy on those zero bits just as it does on the ones. This
accelerator never multiplies. It rewrites a dot product

    sum_i A_i * W_i  =  sum_b 2^b * ( sum_i A_i * W_i[b] )

so that for every bit position `b` it only has to *add up* the activations
whose weight has a 1 at that position. The scaling by `2^b` happens once per
output, not once per product. Two ideas make this fast:

* **Weight kneading** (done offline, before the weights reach the chip): the
  1-bits of KS consecutive weights are packed upwards, column by column, into
  fewer "kneaded" weights. Each 1-bit in a kneaded weight carries a small
  pointer saying which of the KS activations it belongs to. Zero weights and
  zero bits disappear, and the number of weights to process shrinks to the
  height of the fullest bit column.
* **Split-and-accumulate (SAC)**: each cycle a *splitter* takes one kneaded
  weight. For every 1-bit it forwards the activation named by that bit's
  pointer to the *segment adder* of the bit position. Each segment register
  S_b accumulates its activations over all lanes and cycles. When an output
  is complete, a *rear adder tree* computes `sum_b S_b << b` once.

This RTL implements the SAC datapath, the per-lane input buffering with the
"pass mark" synchronisation, the int8 mode, the ReLU output stage and the
16-PE array, all in synthesizable SystemVerilog.

## 1. What the hardware is fed: kneaded weights

Take KS weights `w_0..w_{KS-1}` that multiply the activation window
`A_0..A_{KS-1}`. Look at each bit column `b` separately and list, in weight
order, the indices `i` with `w_i[b] = 1`. The k-th kneaded weight gets bit
`b` = 1 with pointer `p_b = ` the k-th index of that list. If the list is
shorter than k, bit `b` stays 0 and its pointer is a don't-care. The number of
kneaded weights is the length of the longest list. A window whose weights are
all zero still produces one all-zero kneaded weight, so that its activations
get released.

Example with 8-bit weights (MSB first), KS = 6:

    w1 1000 1010     w'1 1111 1111   p = 1 2 2 4 1 2 1 2
    w2 1110 0101 ->  w'2 1111 1111   p = 2 4 3 6 3 6 3 3
    w3 0010 1011     w'3 1000 0001   p = 4 - - - - - - 6
    w4 1101 0000
    w5 0000 0000
    w6 0001 0101

Six multiply-accumulates become three SAC cycles. With 16-bit weights and
KS = 16, a pointer is 4 bits wide.

A lane's queue entry (see `throttle_buffer`) is

| field      | width      | meaning                                                    |
|------------|------------|------------------------------------------------------------|
| `w`        | 16         | kneaded weight bits                                        |
| `p`        | 16 x log2(KS) | pointer per bit into the current activation window      |
| `win_last` | 1          | last kneaded weight of this activation window              |
| `pass`     | 1          | pass mark: last kneaded weight of this lane for the output |

The kneading itself is not hardware here. The testbench package
`tb/tetris_tb_pkg.sv` (`knead()`) contains the reference algorithm used to
produce the stimulus.

## 2. The SAC datapath

One PE (processing element) contains 16 lanes. Each lane feeds one splitter,
so the splitter array has 16 splitters.

**Splitter** (`rtl/splitter.sv`). There is one slice per weight bit `b`. A
decoder picks `A[p_b]` out of the lane's KS-wide window. A zero-comparator
checks `w[b]`. A mux outputs either that activation or 0. The weights are
two's complement, so the most significant bit is worth `-2^15`. The activation
chosen by bit 15 is therefore negated. Outputs are 17 bits wide so that
`-(-32768)` is exact.

**Fully connected fabric.** Output `b` of every splitter goes to segment
adder `b`. In `sac_unit` this is only a re-indexing from [lane][segment] to
[segment][lane].

**Segment adders** (`rtl/segment_adder.sv`). Adder `b` adds its 16 inputs
(one per lane) and the feedback from register S_b, a 17-operand sum. When the
pass control bit is high, the mux sends S_b to the rear adder tree. The
feedback term is then 0, so the same cycle already starts the next output.
Outputs follow each other with no bubble.

**Rear adder tree** (`rtl/rear_adder_tree.sv`). It sums the lower eight
segments as `sum_j S_j << j` and the upper eight as `sum_j S_{8+j} << j`. The
last level adds them as `lower + (upper << 8)` in fp16 mode. This is the only
place where anything is shifted.

**Output function** (`rtl/relu.sv`). ReLU, registered. The 48-bit value is
passed on unchanged (no re-quantisation), so its sign bit is always 0.

## 3. Pass marks: keeping 16 lanes of different length in step

This is the subtle part. All 16 lanes contribute to the same output, but each
lane has its own number of kneaded weights for it, because kneading
compresses different weights differently. A lane that finishes early must not
start adding the next output into segment registers that still hold the
current one.

* The last entry of each lane's share of an output carries the **pass mark**.
* When a lane issues that entry, the **pass detector** (`rtl/pass_detector.sv`)
  sets the lane's *reached* flag. From the next cycle on the lane is held.
  Its queue keeps filling behind the mark.
* In the first cycle in which every flag is set, the detector raises the 16
  pass control bits. The segment registers hand their sums to the tree, and
  all flags clear. In that same cycle every lane may issue the first entry of
  the next output, which is accumulated onto a zeroed feedback.

Cycle by cycle, for an output whose lanes have `n_0..n_15` kneaded weights,
all data present:

    t0 .. t0+n_l-1   lane l issues (one kneaded weight per cycle)
    t0+max(n)        pass_ctrl high; next output's first entries issue
    t0+max(n)+1      psum valid (rear adder tree register)
    t0+max(n)+2      out_act valid (ReLU register)

An output therefore occupies the SAC unit for exactly `max_l n_l` cycles,
which is the length of its longest lane. This is the throughput the
testbenches check.

## 4. int8 mode

With `mode = MODE_INT8`, each 16-bit kneaded weight holds two 8-bit kneaded
weights. Bits [7:0] with pointers `p_0..p_7` form the lower one; bits [15:8]
with `p_8..p_15` form the upper one. Both refer to the same activation window.
The lower half drives segment adders 0..7 and the upper half drives 8..15.
Two changes make this work:

* the splitter also negates bit 7, which is the sign bit of the lower 8-bit
  weight;
* the last level of the rear adder tree adds the two halves without the
  8-bit shift, because both halves weigh `2^0..2^7`.

Nothing else changes. Since each entry now carries two kneaded weights, the
same lanes consume the KS weights of a window in about half the cycles. The
mode must only change while the PEs are idle.

## 5. Throttle buffer and the PE interface

The throttle buffer (`rtl/throttle_buffer.sv`) gives each lane two queues:

* the **activation-window queue**, `A_DEPTH` = 2 windows of KS x 16 bits.
  The whole head window is visible to the splitter's decoder. A window is
  released when the entry with `win_last` issues.
* the **kneaded-weight queue**, `W_DEPTH` = 24 entries.

A lane issues when both queues are non-empty and the pass detector is not
holding it. On the eDRAM side, each lane has two valid/ready push ports. One
takes a whole activation window per push, the other one kneaded-weight entry.
A push happens on a rising edge where both valid and ready are high. Ready
depends only on queue occupancy.

The sizes give 16 x (64 + 240) bytes = 4.75 KB per PE, inside the 5 KB the
area breakdown allots to the throttle buffer.

`tetris_pe` chains throttle buffer, SAC unit and ReLU. `tetris_top` puts 16
PEs side by side. They share clock, synchronous active-low reset `rst_n` and
`mode`. Every PE's per-lane push ports and its `out_valid`/`out_act` are top
ports, indexed `[pe][lane]`. The output has no ready signal: results must be
taken when valid.

## 6. Parameters

| parameter | default | from the paper? | where |
|-----------|---------|-----------------|-------|
| weight bits `WBITS` | 16 | yes (fp16, 16 splitters/segment adders) | `tetris_pkg` |
| kneading stride `KS` | 16 | yes (4-bit pointers) | module parameter |
| lanes per PE `NL` | 16 | yes | module parameter |
| PEs `NP` | 16 | yes | `tetris_top` |
| activation width `ABITS` | 16 | own choice | `tetris_pkg` |
| segment register `SEG_W` | 32 | own choice | `tetris_pkg` |
| partial sum `PSUM_W` | 48 | own choice (= SEG_W + 16) | `tetris_pkg` |
| `A_DEPTH`, `W_DEPTH` | 2, 24 | own choice within the 5 KB budget | module parameters |

`KS` can be set to any value of 2 or more; the pointer width follows as
`$clog2(KS)`. The paper explores KS from 10 to 32.

**Sizing check.** A segment register collects at most N activations of
magnitude at most 2^15 per output, where N is the reduction length of a layer
(kernel height x width x input channels). `SEG_W` = 32 covers N up to 65536.
The largest reductions in AlexNet, GoogLeNet, VGG-16/19 and NiN are at most
25088 (VGG fully-connected fc6) and at most 4608 for their convolutions. These
figures come from the public network definitions. The 48-bit partial sum is
then exact. There is no saturation logic.

## 7. What differs from the paper, and what is not here

* **Sign handling.** The negation of the sign bit's activation follows the
  "Neg" boxes in the splitter drawings. The text never explains it.
* **Segment adder width.** The general SAC description uses two-input adders
  (pair-wise SAC). The accelerator section has each segment adder take all 16
  splitters plus its register. The latter is built.
* **Weight kneading** is assumed done offline. The weights arrive in the
  throttle buffer already kneaded.
* **Not built:**
  * the on-chip eDRAM (20 KB of I/O RAM per PE in the paper; only its size is
    known) and the data-tiling step that fills it;
  * pooling, which is only named;
  * the "arbitrary weight length" mode, in which narrower weights leave upper
    segment adders idle. Sign-extended shorter weights do run correctly in
    fp16 mode, just without idling the adders.
* **Own choices:** activation width, accumulator widths, the queue depths and
  valid/ready handshakes, the `win_last` flag, the hold signal from pass
  detector to throttle buffer, register stages after the tree and the ReLU,
  synchronous active-low reset, a single global mode.

## 8. Verification and how to simulate

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_splitter` | every output bit against the definition, both modes, sign bits, -32768 |
| `tb_segment_adder` | accumulation and hand-over on random pass pulses |
| `tb_pass_detector` | pass timing and hold for random mark arrival |
| `tb_rear_adder_tree` | `sum S_b 2^b` in 64-bit arithmetic, both modes, latency |
| `tb_relu` | clipping and latency |
| `tb_throttle_buffer` | issue order, window release, hold, ready/full against a queue model |
| `tb_sac_unit` | partial sums from kneaded weights vs `sum A*W`; exact cycles per output; the six-weight example of section 1 (three cycles) |
| `tb_tetris_pe` | one PE end to end, both modes, throttled and unthrottled inputs |
| `tb_tetris_top` | all 16 PEs at default size, same checks, plus a count of every mechanism (pass events, held lanes, zero windows, slack bits, sign bits, ReLU clipping, mode switches, back-pressure, starvation) |
| `tb_workload_layers` | convolution layers of five networks on all 16 PEs, both modes (below) |

`tb_workload_layers` runs convolution layers of AlexNet, GoogLeNet,
VGG-16/19 and NiN on the full 16-PE array in both modes. A layer enters only
through its reduction length (kernel height x width x input channels). Each
output's n weights are cut into KS-wide windows and dealt round-robin to the
16 lanes. No trained weights are available, so the weights are random with
the bit statistics of trained fp16 weights: roughly half of the bits set, and
bits 3..5 almost never set. The cycle counts are therefore only indicative.
The table below compares SAC cycles per output with the n/16 cycles of an
array that does one multiply-accumulate per lane per cycle:

| layer (n) | fp16 | int8 | MAC array |
|-----------|------|------|-----------|
| VGG conv5, 3x3x512 (4608) | 207.5 | 107.0 | 288 |
| NiN conv4, 3x3x384 (3456) | 159.0 | 83.5 | 216 |
| AlexNet conv3, 3x3x256 (2304) | 104.5 | 53.0 | 144 |
| VGG conv1_2, 3x3x64 (576) | 32.5 | 17.5 | 36 |
| GoogLeNet 1x1x192 (192) | 13.5 | 6.5 | 12 |

On large layers kneading saves about 28 % of the cycles in fp16, and int8
roughly halves that again. Short reductions, with fewer windows than lanes,
leave lanes idle and gain nothing.

The reference for every check is the plain dot product of the *unkneaded*
weights. A kneading or routing error therefore shows up as a wrong number.

To run one with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/tetris_pkg.sv tb/tetris_tb_pkg.sv tb/tb_tetris_top.sv --top-module tb_tetris_top
    obj_dir/Vtb_tetris_top

Replace `tb_tetris_top` with any other testbench name. Building the full
16-PE test takes about two minutes and running it about a second.
