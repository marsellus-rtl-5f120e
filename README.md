# A heterogeneous RISC-V cluster with a bit-serial convolution engine

This RTL models the compute cluster of a low-power AI/IoT system-on-chip.
Sixteen small RISC-V cores and a convolution accelerator share one 128 KiB
scratchpad. The accelerator handles convolutions of any precision from 2 to
8 bits on the same hardware: it reduces every multiplication to AND gates,
population counts and shifts. A closed-loop body-bias controller lets the
chip run faster than its sign-off frequency, or at a lower voltage. It
watches flip-flops that are close to a setup violation and strengthens the
transistors before a real error happens.

What is here:

* the accelerator (Reconfigurable Binary Engine, **RBE**): datapath, streamer
  and controller;
* the shared L1 memory with its two-branch interconnect;
* the cluster DMA and the L2 scratchpad;
* the event unit;
* the execution slice of the cores' MAC&LOAD instruction;
* the monitor flip-flops and the body-bias control loop.

Everything is tied together in `marsellus_top`. The cores themselves, the
SoC around the cluster and the analog parts are not included; their
connections are ports of the top (see *What lies outside*).

## 1. Arithmetic of the engine

Take an activation `x` with `I` bits and a weight `w` with `W` bits, both
unsigned. Write them as bit planes `x = Σ_i 2^i x_i` and `w = Σ_j 2^j w_j`.
A dot product over channels `c` is then

    Σ_c x[c]·w[c] = Σ_i Σ_j 2^(i+j) · popcount( x_i[0..31] AND w_j[0..31] )

so one 32-channel slice of a convolution costs one AND of two 32-bit words,
one popcount and one shift per pair of bit planes. Changing the precision
only changes how many plane pairs are visited. A layer with W=3, I=5, O=2
runs on the same gates as an 8-bit one.

Once all input channels and filter taps have been accumulated, each result
is normalised:

    y = clip( (scale · acc + bias) >>> S )

`scale` and `bias` are per output channel. With ReLU on, the result is
clipped to `[0, 2^O − 1]`; without it, to the signed O-bit range. The O bit
planes of `y` are written back to memory.

## 2. RBE hierarchy (`rbe_binconv`, `rbe_block`, `rbe_core`, `rbe_datapath`)

* **BinConv**: a 32-bit AND, a popcount, a register, and a shift by the
  bit-plane weight `i+j`.
* **Block**: four BinConvs fed with the same weight plane and four
  consecutive activation planes (a 4-bit input tile). BinConv `j` shifts by
  `shift + j`, and the Block adds the four results. BinConvs beyond `I` are
  switched off.
* **Core**: nine Blocks, their sum, and 32 accumulators of 32 bits, one per
  output channel of the current 32-channel tile. The quantiser (`rbe_quant`)
  normalises four accumulators per cycle in place. After that, the
  accumulators are read out as O bit planes of 32 channels.
* **Datapath**: nine Cores, one per pixel of a 3×3 output tile, plus an
  input buffer of 5×5 pixels × 4 bit planes × 32 channels. In total that is
  9 × 9 × 4 × 32 = 10368 AND gates.

The two modes differ only in how the input buffer and the weight word reach
the Blocks:

| | 3×3 mode | 1×1 mode |
|---|---|---|
| Block `b` of Core `c` reads pixel | `(c/3 + b/3, c%3 + b%3)`: Block = filter tap | `(c/3, c%3)`: the same pixel for all Blocks |
| weight word per beat | 9 words: one plane of all 9 taps of one output channel | W words: all planes of one output channel |
| weight bits | serial in time (W beats per output channel) | parallel over Blocks 0..W−1; Block 8 idle |
| COMPUTE beats per LOAD | 32 · W | 32 |

So in 3×3 mode a lower W runs faster. In 1×1 mode a lower W leaves Blocks
unused. W can be at most 8 in 1×1 mode, because only eight Blocks are
available there.

## 3. Memory layout and the job a core programs

All data sit in the TCDM as bit planes of 32 channels. Dimensions are listed
outermost first:

| tensor | layout |
|---|---|
| input activations | `(H, W, Kin/32, I, 32)`: one 32-bit word per plane |
| output activations | `(H, W, Kout/32, O, 32)` |
| 3×3 weights | `(Kout, Kin/32, W, 9, 32)` |
| 1×1 weights | `(Kout, Kin/32, W, 32)` |
| normalisation | one `(scale, bias)` pair of 32-bit words per output channel |

A core writes a job into the RBE's registers over the peripheral bus. The
byte offsets are relative to the RBE's slot, which is `periph_addr[9:8] = 0`
on the top:

| offset | register |
|---|---|
| 0x00 | TRIGGER: any write enqueues the staged job |
| 0x04 | STATUS: read `{busy, queued jobs}` |
| 0x08 | CFG: `[0]` mode (1 = 1×1), `[7:4]` W, `[11:8]` I, `[15:12]` O, `[20:16]` S, `[24]` ReLU |
| 0x0C | TILES: `{n_kout, n_kin, n_h, n_w}`, one byte each, counts of 32-channel tiles and 3×3 output tiles |
| 0x10, 0x14, 0x18 | input base, row stride, pixel stride (bytes) |
| 0x1C | weight base |
| 0x20 | normalisation base |
| 0x24, 0x28, 0x2C | output base, row stride, pixel stride |

Two jobs can be queued. A third trigger while both are pending is ignored.
Jobs run oldest first, and the end of each one raises the RBE event.

## 4. RBE control and streaming (`rbe_ctrl`, `rbe_streamer`, `rbe`)

The controller runs this loop nest:

    for kout tile, output row tile, output column tile:
        clear accumulators
        for kin tile, input-bit tile (bits 0-3, then 4-7 if I > 4):
            LOAD     25 (3×3) or 9 (1×1) beats of up to 4 words into the input buffer
            COMPUTE  32·W (3×3) or 32 (1×1) weight beats, one per cycle
        NORMQUANT    8 beats of 4 (scale, bias) pairs; each quantises 4 channels of all 9 Cores
        STREAMOUT    9 beats of O words, one per output pixel
    event

Each phase gives the streamer one command: a base address, up to three loop
counts and strides, and a word count. The streamer's address generator walks
the loops, innermost first, and issues one 288-bit access of up to 9
contiguous words per beat. Loads return through a two-entry buffer with a
ready/valid handshake. A beat consumed in the same cycle frees its slot at
once, so the streamer sustains one beat per cycle when the memory grants
every cycle. The testbench checks this: a COMPUTE phase may take at most
its beat count plus three cycles.

## 5. The shared L1 and its interconnect (`tcdm_bank`, `tcdm_lic`, `tcdm_interconnect`)

The 128 KiB are 32 banks of 1024 × 32 bit, interleaved by word: byte
address bits `[6:2]` pick the bank and bits `[16:7]` the row. Reads return
one cycle after the grant. Two branches compete for the banks:

* **LIC** (logarithmic interconnect): a combinational crossbar for 21
  single-word masters (16 cores, four 32-bit DMA ports, one SoC port), with
  a round-robin arbiter per bank.
* **RBE branch**: the 288-bit port always accesses 9 consecutive words,
  which fall into banks `(A+k) mod 32`, wrapping around the end of the bank
  array. It needs no per-bank arbitration among its own words.

A multiplexer in front of each bank chooses between the two branches. Each
bank keeps one priority bit that flips to the loser after every conflict.
The RBE is granted only if it wins all nine of its banks in the same cycle.
Otherwise it waits, and the banks it lost stay with the cores. Because of
the priority bits neither side starves. `conflict_o` marks banks that were
contested in a cycle. Peak bandwidth is 16·32 + 4·32 + 288 = 928 bits per
cycle.

## 6. Data movement (`cluster_dma`, `l2_memory`)

The DMA copies one contiguous block at a time, in either direction, between
L2 (64-bit port) and the TCDM. It writes the TCDM through two of its 32-bit
ports and reads it through the other two. Its registers:

* EXT_ADDR at 0x00
* LOC_ADDR at 0x04
* LEN at 0x08 (bytes, a multiple of 8)
* CMD at 0x0C (bit 0: 1 = TCDM→L2; writing CMD starts the transfer)
* STATUS at 0x10

A two-entry buffer with credits decouples the reading and writing sides, so
without stalls it moves one 64-bit beat per cycle. The end of each transfer
raises the DMA event.

L2 has two sections:

* 960 KiB in four banks, interleaved by 64-bit word, at `[0, 0xF0000)`;
* 64 KiB in two banks placed one after the other, at `[0xF0000, 0x100000)`.

Port 0 belongs to the SoC and port 1 to the DMA. When both want the same
bank, priority alternates between them.

## 7. Synchronisation (`event_unit`)

A mask register (0x00, reset: all 16 cores) selects who takes part in the
barrier. The barrier releases in the cycle the last masked core arrives.
Each core has a 3-bit event buffer: `{DMA, RBE, barrier}`. A core that
raises `core_wait` is put to sleep until an event enabled by the event mask
(0x04) is in its buffer. Cores clear their buffers with `evt_clr`.

## 8. MAC&LOAD (`xpulpnn_dotp`, `xpulpnn_nnrf`, `xpulpnn_macload`)

The cores' packed-SIMD dot-product unit works on 2×16, 4×8, 8×4 and 16×2-bit
elements. It has one multiplier island per element size, and the inputs of
the idle islands are held at zero. Both operands can be unsigned, the first
unsigned and the second signed, or both signed. There is also a
vector-scalar form. The MAC&LOAD slice reads both operands from a
six-register file:

* registers 0-3: weights;
* registers 4-5: activations.

It adds the dot product to an accumulator from the general register file. In
the same instruction it can load one register from memory, at the pointer
in `rs1`, and advance the pointer by 4. The 5-bit immediate decodes as:

* `[0]`: activation register;
* `[2:1]`: weight register;
* `[3]`: refresh the activation register;
* `[4]`: refresh the weight register.

The instruction stalls while the LSU withholds its grant, or while a
previous refresh is still outstanding. This encoding was reconstructed from
the immediates of the published matrix-multiplication listing. Treat it as
this design's reading, not a documented encoding.

## 9. Adaptive body biasing (`ocm`, `abb_ctrl`)

An on-chip monitor samples an endpoint together with a copy of its input
that has passed through an extra delay (the delay cell is analog and not
modelled; the top takes the delayed copy as `ocm_d_del_i`). If the two
samples differ, the path is close to failing, and the monitor flags a
pre-error.

`abb_ctrl` ORs all the flags. On a flag it raises a 6-bit body-bias code by
4, saturating at `max_code`, and then ignores further flags for `settle`
cycles while the wells charge. On silicon a transition takes about 0.66 µs,
roughly 310 cycles, so `settle` should be set near that value. After
`window` cycles without a flag it lowers the code by one, and keeps doing so
until the code reaches 0. The code is meant for the analog well drivers,
which are not part of this RTL.

## 10. What lies outside, and where this RTL departs from the chip

Not built, because the source describes them only by name or takes them from
existing designs:

* the 16 RI5CY cores and the SoC controller core;
* the shared FPUs and the instruction cache;
* the AXI crossbars and the dual-clock FIFOs between the SoC and the cluster;
* the I/O subsystem;
* clock generation;
* the analog well drivers.

The top brings out the cores' TCDM, event and MAC&LOAD signals, the SoC's L2
and TCDM ports, and the monitor inputs.

Design choices of this RTL that the published description leaves open or
states differently:

* The job register file and the accumulators are flip-flops; the chip uses
  latches. The whole model uses one clock.
* The register maps (RBE, DMA, event unit), the peripheral address decode
  and the normalisation-parameter layout are this design's own.
* In 1×1 mode only the 3×3 input pixels the Cores actually use are loaded.
* The LIC's per-bank round robin and the RBE's all-or-nothing grant are
  choices of this design. The source only asks that the bank multiplexers
  rotate priority.
* The DMA has no 2D transfers and no queue. The event unit offers barriers
  and events, but no other primitives.
* Quantisation truncates and saturates; scale and bias are 32-bit signed
  integers.

## 11. Verification

Each block has a self-checking testbench in `tb/`, ending with a
`TB_RESULT checks=… failures=…` line.

* `tb_rbe` runs five layers through the complete engine against an integer
  reference convolution (`tb_rbe_pkg`). The layers cover 3×3 and 1×1 modes,
  W/I/O from 2 to 8, split input bits, several channel tiles and spatial
  tiles, and random memory stalls. The testbench checks the beat counts
  above and the queuing of two jobs.
* `tb_marsellus_top` runs the whole cluster at its default size. The host
  loads two layers into L2. The DMA moves them in, the RBE runs them while
  all 16 core ports stress the TCDM, the DMA moves the results back, and the
  host checks them. The testbench also covers the barrier, sleeping on
  events, a stalled MAC&LOAD and a body-bias raise and relax. It counts
  every mechanism and fails if one never occurs. Once compiled, it runs in
  about a second.

To simulate, for example the top:

    verilator --binary --timing --assert -Irtl -Itb rtl/marsellus_pkg.sv tb/tb_rbe_pkg.sv \
        -y rtl -y tb tb/tb_marsellus_top.sv --top-module tb_marsellus_top
    ./obj_dir/Vtb_marsellus_top
