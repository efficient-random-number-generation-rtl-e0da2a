# Random bits from photon arrival times on a SPAD array

A single-photon avalanche diode (SPAD) under weak light fires at moments
that are as random as the photon stream itself. This RTL turns those
moments into unbiased random bits. It is built for LinoSPAD, an FPGA board
carrying a 4 x 64 CMOS SPAD line sensor, whose 64 FPGA time-to-digital
converters (TDCs) are shared by the four pixel banks. The main idea is
simple. Sample the detector with a clock much faster than the photon rate.
Treat the resulting string of mostly-zero samples as a biased but
independent bit source. Then remove the bias with an extractor that comes
close to the entropy of that source: the Peres algorithm, not a fixed
"which of two intervals was shorter" rule. Each pixel gives two such
sources:

* **Coarse path:** which 2.5 ns clock period a photon fell in. This is a
  sparse bit string, debiased with Peres.
* **Fine path:** where in the period it fell, as a 0..139 delay-line code.
  The codes are strongly non-uniform, so they are debiased with the
  Zhou-Bruck construction (binary split, then Peres per sequence).

The same sampling, hold-off and Peres chain also form a single-detector
generator at 100 MHz. That is the "Randy" configuration; it is exercised
by `tb/tb_randy_qrng.sv`.

All code is SystemVerilog-2017. It is synthesizable except the delay line,
which is a behavioural model of an FPGA carry chain.

## Data flow

```
 spad_out[4][64] --bank_sel--> line_in[64] --> (carry-chain delay line, off-module)
                                                      |
                                                taps[64][140]
                                                      v
  frame_timer --frame_start--> 64 x pixel_slice:
        tdc_channel ----hit(coarse,fine), tag----> frame_buffer (512 tags, 2 pages) -> readout
            |                                      | accept
            |                                holdoff_filter (80) -> peres_extractor (63 nodes)
            |                                                         -> bit_packer -> coarse word
            +--fine code (8 bit)--> zhou_bruck (255 sequences x Peres depth 4)
                                                         -> bit_packer -> fine word
  128 word streams --> output_arbiter (round robin) --> rng_word / rng_src
```

## From detector level to sample string

`edge_sampler` sees the SPAD output at each clock edge. It writes a 1 when
the output is high now and was low at the previous edge, and a 0 otherwise.
A detection therefore gives exactly one 1, whatever the pulse width. At low
light, a sample is 1 with probability close to the photon rate times the
clock period. The samples are independent, with entropy h(p) each.

Two detector effects break that independence:

* **Dead time:** after a detection the diode cannot fire again for some
  tens of ns.
* **Afterpulses:** after a detection the diode is more likely to fire
  spuriously for up to about 200 ns.

`holdoff_filter` deals with both by deleting the next `HOLDOFF` samples
after every 1. A 1 that falls inside the window is deleted too and
restarts the window, so the surviving samples are those of an ideal
detector with a longer dead time. The window is 18 samples at 100 MHz
(180 ns) for the single SPAD. For the array it is 80 samples at 400 MHz
(200 ns, the end of the measured afterpulse region).

## The streaming Peres extractor

This is the part that is least obvious from its code.

Von Neumann's rule looks at pairs: 01 gives 0, 10 gives 1, and 00 and 11
give nothing. Peres's improvement recycles what von Neumann throws away.
From the same pairs it builds two further strings:

* **U:** the XOR of every pair.
* **V:** the common bit of every 00 or 11 pair.

It applies the whole procedure to U and V again, recursively. For an
i.i.d. source the output rate tends to the entropy as the recursion
deepens.

`peres_extractor` builds a fixed-depth binary tree of such nodes, numbered
as a heap: node i feeds its U bits to node 2i+1 and its V bits to node
2i+2. Each node keeps a single pending bit. When the second bit of a pair
arrives, the node does the following, all in one combinational pass
(`peres_tree_step`):

* It emits the first bit if the two bits differ.
* It passes the XOR to its U child.
* If the two bits are equal, it passes the common bit to its V child.

So one input bit can ripple through at most DEPTH nodes, and the tree
accepts one bit per clock with no stall. The nodes at the last level do
plain von Neumann and drop their U/V bits.

On a finite string, the bits that come out are exactly those of block Peres
at the same depth. Only their order differs: they are interleaved by node
rather than concatenated. The testbench checks this node by node against a
block reference.

Depth is the knob between area and efficiency. With DEPTH = 6 (63 nodes)
and the single-SPAD statistics (p about 0.0024 after hold-off), the chain
delivers 0.0111 bits per sample against an entropy of 0.0207 bits per
sample, i.e. 56 %. A sparse string gets most of its entropy deep in the V
branch, so a deeper tree recovers more.

`bit_packer` collects the bits that the nodes emit in a cycle, in node
order, into 32-bit words. The first bit lands in bit 0. A word leaves
through a valid/ready handshake. Bits that arrive while the accumulator
is full are lost and set a sticky `overflow`.

## TDC and tags

Each channel's delay line has 35 carry elements of 4 taps: 140 taps,
together about one 2.5 ns clock period. A rising edge travels along it.
At the next clock edge, the number of taps already high tells how long
ago the edge entered.

`tdc_channel` registers the taps and detects a new hit on tap 0 with the
same rising-edge rule. It then encodes:

* `fine = 140 - (number of high taps)`, range 0..139. An early edge has
  gone far and gives a small code.
* `coarse`, the number of clock periods since the last frame start.
* `tag = coarse * 140 + fine`, a time in 2^28 bins of about 17.9 ps.

The code counts ones instead of looking for the thermometer edge, so
bubbles in the carry chain do not matter. Hits beyond the 2^28-bin range
are not tagged and raise `out_of_range`. With the default 320 us frame
that cannot happen. The hit leaves the channel two clock edges after the
edge that sampled it.

The taps are not equal in delay. The behavioural line uses 10, 24, 13 and
25 ps for the four taps of each carry element. As a result, the fine codes
are far from uniform, which is why the fine path needs its own extractor.

## Frames and the frame memory

`frame_timer` pulses `frame_start` every 128000 periods (320 us at
400 MHz). The first pulse comes right after reset. The pulse clears the
coarse counters and swaps the two pages of every `frame_buffer`.

A page holds up to 512 tags, the acquisition limit of the original
system. Further tags of that frame are refused and counted, and the
frame is marked saturated. During the next frame, the previous page can
be read at random: one pixel (`rd_pix`) and one address (`rd_addr`),
with data one cycle later, together with its tag count and saturation
flag.

## The coarse path

A frame becomes a sample string of one bit per clock period, 1 where a tag
was stored. The string runs through the 80-sample hold-off and a depth-6
Peres tree in real time, as the tags are produced. Periods in which the
pixel's memory is already full are not samples, so a saturated frame does
not feed the extractor with false zeros.

Neighbouring pixels of the sensor show correlated counts (cross-talk), so
only an uncorrelated subset should feed the coarse path; the measurements
kept 22 of 64. That subset depends on the sensor, so it is set at run time
with `coarse_enable`, one bit per channel. The fine path is not affected
by cross-talk and uses all 64.

## The fine path: Zhou-Bruck

Each 0..139 code is written with 8 bits, most significant first. Bit i is
sent to a sequence chosen by the i bits before it:

* The first bit goes to sequence 0.
* The second bit goes to sequence 1 or 2, depending on the first bit.
* And so on, down to 128 sequences for the last bit.

That is 255 sequences, heap-numbered `2^i - 1 + prefix`. Inside one
sequence the bits are independent with a fixed bias, so each sequence gets
its own Peres tree (depth 4, 15 nodes).

Only one sequence is touched per bit. `zhou_bruck` therefore keeps the 255
tree states in a memory and shares a single tree step. It handles one bit
per cycle, so a code takes 8 cycles, during which the extractor is busy.
The detector dead time (40 ns = 16 periods) keeps codes further apart than
that. A code that arrives while the extractor is busy is dropped and
reported on `drop`.

## Array top and output

`linospad_qrng` connects:

* the bank multiplexer (`line_in = spad_out[bank_sel]`);
* the frame timer;
* 64 pixel slices;
* the frame readout multiplexer;
* a round-robin `output_arbiter` over the 128 word streams.

`rng_src` tells a word's origin. A value below 64 is the coarse stream of
that pixel. A value of 64 or above is the fine stream of pixel
`rng_src - 64`. The output holds its word while `rng_ready` is low, and
an assertion checks this. The port is 32 bits per 400 MHz cycle, far
above the roughly 310 Mbit/s the array produces. One-cycle event vectors
(`ev_hit`, `ev_stored`, `ev_out_of_range`, `ev_holdoff_drop`,
`ev_zb_drop`) and the sticky `overflow` make the internal mechanisms
visible.

| Parameter | Default | Meaning |
|---|---|---|
| NPIX, BANKS | 64, 4 | TDC channels, pixel banks |
| FRAME_LEN | 128000 | frame period in clocks (320 us) |
| BUF_D | 512 | tags per pixel and frame |
| HOLDOFF | 80 | samples deleted after a 1 (200 ns) |
| PERES_DEPTH | 6 | coarse Peres tree depth |
| ZB_DEPTH | 4 | Peres depth per Zhou-Bruck sequence |

Package `qrng_pkg` holds the shared constants: 140 taps, 28-bit tags and
21-bit coarse counters.

## How far it follows the original system

These points follow the measured system:

* the sampling rule and the hold-off values;
* the Peres recursion and the Zhou-Bruck split;
* 140 taps, 400 MHz, 320 us frames, 512 tags, 2^28 bins;
* 64 TDCs shared by 4 banks of 64 pixels.

These are this design's own choices:

* **Real-time extraction.** The original system stored frames and ran the
  extraction offline on a host. Here the extractors run in real time next
  to each channel.
* **Fixed tree depths** (6 and 4). The published rates are asymptotic
  Peres rates, whereas a fixed-depth tree is below the entropy (56 % in
  the single-SPAD case).
* **Tree depth trade-off.** With the defaults, one pixel at about 400
  counts per frame yields 4.75 bits per fine code, 68 % of the code
  entropy in simulation. The offline extraction of the measured system
  reached about 93 %. Raising `ZB_DEPTH` to 6 gives 5.6 bits per code, and
  raising `PERES_DEPTH` to 8 lifts the coarse rate from 5.6 to 6.9 Mbit/s
  per pixel. Each extra level doubles the nodes of every tree, and for
  Zhou-Bruck the per-pixel state memory as well.
* **Sequence count.** The source text counts 2^i - 1 sequences for bit i
  and 2^8 in total. The binary split it describes needs 2^(i-1) and 255,
  and that is what is built.
* **Plumbing:** the fine-code orientation, the ones-count encoder, the
  double-buffered frame memory with its readout port, the treatment of
  saturated frames, the word packing, the arbitration and the
  per-channel coarse enable.
* **Cross-talk.** The choice of uncorrelated pixels is left to whoever
  drives `coarse_enable`.
* **Not modelled:** analog and clocking (sensor, PLL, host) are outside
  the RTL. The TDC dead time and the afterpulse statistics are modelled
  only as far as the testbenches inject them.

## Simulating

Every testbench is self-checking and ends with a
`TB_RESULT checks=N failures=M` line. Name the package and the testbench
and let verilator find the modules in `rtl/` by file name:

```
verilator --binary --timing -Wno-fatal --top-module tb_zhou_bruck -y rtl \
    rtl/qrng_pkg.sv tb/tb_ref_pkg.sv tb/tb_zhou_bruck.sv
./obj_dir/Vtb_zhou_bruck
```

(`tb_ref_pkg.sv` is needed by `tb_peres_extractor` and `tb_zhou_bruck`.)

* **One testbench per module.** Each checks its module against a reference
  computed in the testbench: a block Peres reference, independent
  delay-line arithmetic, frame-memory models and so on.
* **`tb_pixel_slice`.** Checks the stored tags and every coarse and fine word of one
  channel against reference models of the extractors.
* **`tb_linospad_qrng`.** Runs the array at 4 channels and short frames
  for five frames. It checks every read-back tag. It also makes each
  mechanism happen at least once: a bank switch, a saturated frame,
  hold-off deletions, a refused Zhou-Bruck code, a masked pixel and an
  overflow under a stalled output.
* **`tb_linospad_full`.** The same test at full size. It runs one frame
  of all 64 channels in about 3.5 minutes of simulation.
* **`tb_lino_workload`.** One full-size pixel at about 400 counts per
  frame for 100 frames. It gives about 5.6 Mbit/s coarse and 5.6 Mbit/s
  fine per pixel. The measured system reported 3.95 and 3.48 Mbit/s; its
  real pixels add cross-talk and TDC dead time that this source lacks.
* **`tb_randy_qrng`.** The single-SPAD chain at 100 MHz and 200 kcounts/s
  for 2 million samples, giving 1.11 Mbit/s. The asymptotic Peres bound
  there is 1.8 Mbit/s.
