# A racetrack-memory bank that computes CNN layers in place

This is synthesizable SystemVerilog for one bank of an in-memory CNN
accelerator built from racetrack memory (RM). It follows the design in
"Hardware-software co-exploration with racetrack memory based in-memory
computing for CNN inference in embedded systems". The idea is to keep weights
and activations in dense racetrack storage and to add only a little logic
right next to the tracks. That logic is bit-serial adders, a bit-serial radix-4
Booth multiplier and a shift-based multiplier for power-of-two weights. Data
then never leaves the memory to be multiplied and accumulated.

Racetrack memory stores bits as magnetic domains along a nanowire. A domain
is read or written only when it sits under an access port, so a word is reached
by *shifting* the track. Shifting is cheap and writing is expensive. The design
leans on both facts:

* Words are stored **bit-serially** along a track. Shifting by one domain per
  cycle streams a word past the port LSB first, which is exactly what a
  bit-serial adder needs.
* A track has to be shifted back after every access (the **position reset**).
  Consecutive operations therefore go to different subarrays, so that one
  subarray's reset runs while another works.
* Multiplying by 2^d is a **delay** of the stream. The shift-based multiplier
  withholds a track's shifts for the right number of cycles instead of moving
  data.
* Even the logic's own input bits are set by shifting. Each input MTJ
  (magnetic tunnel junction) of an adder has a tiny 3-domain track holding a
  stored 1 and 0, and it is shifted to the needed value instead of being
  written (the **write-shift transformation**).

## Storage hierarchy

| level | contents | capacity |
|---|---|---|
| Macro Unit (MU) | 4 tracks x 64 domains; 4 ports per track, each serving a 16-domain segment; all 4 tracks shift together | 32 B |
| subarray | 16 x 4 MUs; one MU accessed at a time | 2 KB |
| activation mat | 4 subarrays (SAR0..SAR3) + 2 bit-serial adder units (ADD0 on SAR0/SAR1, ADD1 on SAR2/SAR3) | 8 KB |
| weight mat | bit-parallel weight words, read as a whole | 8 KB |
| mat group (MG) | 8 activation mats + 8 weight mats in two halves, one multiplier block per half, one MG adder | 128 KB |
| bank | 16 mat groups + a 4-level bit-serial adder tree (one input per MG) | 2 MB |

Because the four tracks of an MU move together, every access handles **four
words in parallel**, one per track. Each adder is therefore four lanes wide,
and lanes never mix: track i of one operand only meets track i of the other.
In a fully-connected layer there is no weight reuse, so only one lane is
enabled. The `lanes` field of a command does this.

A word of up to 16 bits lies inside one port's segment. It is addressed by MU
row, MU column, port and starting offset (`sa_addr_t`).

On mat capacity, the paper's organisation table lists 16 KB per mat and
256 KB per mat group. Its other numbers (4 subarrays of 2 KB, 16 groups per
2 MB bank) and its mat-group figure (128 kB) give 8 KB and 128 KB. This RTL uses
8 KB and 128 KB.

## The access protocol (`rt_subarray`)

An access has two phases:

1. **Access phase.** `start` selects an MU and a word. From the next cycle,
   `rd` shows the four bits under the port. Each `shift` moves on by one
   domain, and `wr` writes the bits under the port before the shift. `shift`
   may be held low; a held track keeps showing the same bit.
2. **Position reset.** After `stop`, the MU shifts back one domain per cycle,
   as many cycles as it moved. `busy` and `resetting` stay high meanwhile, and
   a new `start` is illegal (an assertion checks this).

The storage array stands for the domains, and a position register stands for
the shift of the accessed MU. The two are equivalent because only that MU
moves. With `zero_lead`, the access begins one domain early, on the single-0
separator between activations. This is what the shift-based multiplier needs
to shift zeros into the low bits. The separator is modelled, not stored.

## Bit-serial adder units

`rm_full_adder` is the 7-MTJ full adder (sum: A1, A2, A2, Cin; carry: A1, A2,
Cin), and `rm_half_adder` is the 4-MTJ half adder. Each input MTJ is a
`ws_input_cell`. When the cell loads a new bit, it issues a shift pulse only if
the bit differs from the one it holds. With `WRITE_SHIFT=0` it issues a write
on every load, which is the baseline the transformation replaces. The sense
amplifier is modelled by its logic function: XOR for the sum and majority for
the carry. Results appear one cycle after the load.

`bit_serial_adder` is one adder unit: four full adders whose carry is fed back
to the next bit. `first` marks the LSB, whose carry-in comes from `cin0`. Idle
cycles inside a word keep the carry. Latency is one cycle per bit, with no
further pipeline. With `INCREMENT=1` the lanes are half adders that add one
operand to the carry. The Booth multiplier uses this mode for its increment.
The paper says only that a bit-serial adder unit does the increment; choosing
the half adder is this design's own decision.

## Radix-4 Booth multiplier (`booth_multiplier`)

One 8-bit weight (the multiplier, read bit-parallel from a weight mat) times
four 8-bit signed activations (one per track, streamed LSB first). The weight,
with a 0 appended below it, is cut into four overlapping 3-bit blocks.
`booth_decoder` turns each block into four controls:

* ZERO = B2B1B0 + ~B2~B1~B0 (ZERO has priority over COMP);
* COMP = B2;
* INCR = COMP & ~ZERO;
* LS = B2~B1~B0 + ~B2B1B0.

The multiplication then runs in three stages:

| stage | cycles | what happens |
|---|---|---|
| generation | N = 8 | each activation bit is zeroed, passed or inverted for all four partial products at once; a bit-serial incrementer (half-adder lanes) with carry-in INCR completes the two's complement; partial product t goes to its own track (the multiplier block's four MUs) |
| alignment | N-1 = 7 | track t is shifted by 2t, plus 1 when LS (x2), with zeros behind |
| addition | 2N = 16 | all tracks stream into an adder tree; a track stops shifting once its MSB is under the port, so its sign bit is read again (sign extension) |

The block's adder tree reduces the four streams to two, `s0` and `s1`. The
final addition is done by ADD0 of the destination activation mat, whose input
mux has a Booth position for this. The product is the 16-bit sum s0 + s1.
Counted from `start`, the first product bit leaves the block after 2N + 2 = 18
cycles. The testbench checks this.

Partial products are N bits wide, and x2 is done by the alignment shift. So a
multiplicand of -128 under a negating block would overflow. Activations are
quantised symmetrically, so that value is not used; the testbenches avoid it.

## Shift-based multiplication (`shift_counter`, `OP_SHIFT`)

With logarithmically quantised weights (w = 2^d, d in -7..7, 4-bit codes),
a product is a shift. Two activations, in the two subarrays of an adder pair,
are accumulated as a0 * 2^d0 + a1 * 2^d1. Each subarray gets a decrementing
counter (`shift_counter`) loaded with its d. The counter steps once per cycle,
and the track shifts only while the two MSBs of the decremented count read
`10`. With a 5-bit counter that window is exactly 8 steps long, so:

* a track with a larger d starts moving later, and the zero separator under
  the port stands in for the low-order zeros;
* after 8 shifts its MSB stays under the port, which gives sign extension.

One multiply-add takes (8 - 7) pre-roll steps plus 8 + 2*7 = 22 read cycles.
The result stream is 22 bits wide and is aligned 7 bits below the activation
LSB (a shift of -7 lands at bit 0). The 7 bits below the activation LSB are
dropped, so the 15-bit result fits one port segment. The kept value is
floor(sum / 2^7) over the two shifted, sign-extended terms; the testbenches
check exactly this.

## Mat group sequencer and command set (`mat_group`, `rm_bank`)

The paper leaves sequencing to software, so the command interface is this
design's. A command (`mg_cmd_t`) names a half, a mat, source and destination
subarrays with word addresses, a length in bits, weight addresses and a lane
mask. The bank broadcasts it to the mat groups in `mg_mask`, which run in lock
step, and `done` pulses when all of them have finished.

| op | action | cycles, accept to `done` (bank) |
|---|---|---|
| `OP_WRITE` / `OP_READ` | host access to 4 words of `len` bits in one subarray | len + 4 |
| `OP_WWRITE` | one weight word into a weight mat | 4 |
| `OP_ADD` | ADD0 (SAR0+SAR1) or ADD1 (SAR2+SAR3) into another subarray | len + 5 |
| `OP_SUB` | the same adders with the second operand negated: SAR0-SAR1 or SAR2-SAR3 | len + 5 |
| `OP_BOOTH` | weight x 4 activations, 16-bit products into any subarray of a mat in the same half | 4N + 7 = 39 |
| `OP_SHIFT` | a0*2^d0 + a1*2^d1 over an adder pair, 15-bit result | 31 |
| `OP_TREE` | stream a word (optionally plus the same word of the other half, via the MG adder) into the bank adder tree; group `dst_mg` writes the sum back | len + 9 |

These counts assume the subarrays are idle. If an operation needs a subarray
that is still resetting, it waits, and `cnt_reset_wait` counts those cycles.
Resets of other subarrays during an operation are counted in
`cnt_reset_hidden`. Good scheduling keeps the first counter low and the second
high.

Departures and choices to be aware of:

* An adder's sum is written to a subarray **outside** the pair it reads. This
  is because the adder output lags its inputs by one cycle and a subarray has
  only one access at a time. The paper says both adders can write all four
  subarrays; same-pair write-back is not supported here.
* The MG adder appears in the paper's mat-group figure without a
  description. Here it feeds the bank tree with one stream per group and can
  add the other half's word.
* Pooling and batch normalisation have no hardware of their own. They are
  sequences of the operations above, as the paper describes them:
  * Average pooling is a chain of adds, then a read that starts two domains
    later, which divides by 4.
  * Batch normalisation is a `OP_SUB` of the channel mean, then a Booth
    multiply, then an add of beta.
  * Max pooling compares two activations with `OP_SUB`. The subtraction
    reuses the Booth path's negation: the odd subarray's bits are inverted
    and the first carry-in is 1. For activations in 0..127 (after ReLU), bit
    7 of the 8-bit difference is set exactly when the second one is larger.
    The host reads that bit and keeps the larger activation. The paper does
    not say how the sign drives the selection.
* ReLU has no datapath of its own here, and the paper describes none.
* Device physics and analog periphery (drivers, sense amplifiers, decoders)
  are abstracted into the subarray model.

## What fits

* LeNet-5 (61.7 k parameters, about 62 kB at 8 bits) and ResNet-20 (270 k,
  270 kB) fit in one bank's 1 MB of weight mats. Their largest activation maps
  (6x28x28 and 16x32x32 bytes) fit easily in its 1 MB of activation mats. The
  paper runs LeNet-5 on 8 mat groups and ResNet-20 on all 16.
* VGG-16 does not fit one bank. It needs 14.7 MB of convolution weights and
  6.42 MB for its largest activation layer. The paper evaluates it on 16
  replicated banks (32 MB) with external DRAM for the fully-connected weights.
  Only the single bank is built here. The paper does not describe how banks
  are connected.

## Verification

Each module has a self-checking testbench in `tb/`, named `tb_<module>`. Each
one prints `TB_RESULT checks=<n> failures=<m>` and has a watchdog. Reference
values are computed in the testbench with plain integer arithmetic. The
testbenches include:

* the Booth example 41 x 107 = 4387;
* exhaustive Booth-block and full-adder tables;
* the exact shift-enable window for every d;
* position-reset lengths;
* the cycle counts in the table above.

`tb_rm_bank` runs the bank at full size (16 groups, 2 MB) through a small
inference sequence:

1. per-group loads;
2. lock-step Booth products;
3. in-mat accumulation;
4. a tree reduction over 32 words with write-back;
5. shift-based multiply-adds;
6. a single-lane FC step, then a max-pooling comparison in all groups;
7. back-to-back accesses that must stall.

It fails if any mechanism never occurred: Booth, shift, add, tree, FC, reset
stall, hidden reset, tree write-back, broadcast or comparison.

To simulate, for example:

    verilator --binary --timing -Irtl -y rtl --top-module tb_rm_bank rtl/rm_pkg.sv tb/tb_rm_bank.sv
    ./obj_dir/Vtb_rm_bank

Building the full-size bank takes about a minute; the run itself is short.

Remaining lint warnings are explained in the header of the module that
raises them:

* unused bits (for example the duplicate A2 MTJ, which has no logic of its own);
* empty pin connections for unused adder outputs;
* reset used both for flops and to disable assertions.
