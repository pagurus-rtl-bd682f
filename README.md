# A DIFT shell for loosely coupled accelerators

Dynamic information flow tracking (DIFT) marks data that came from an
untrusted source with a *tag* and follows the tags as data moves through the
system. A policy then decides what tagged data may not be used for (for
instance, as a code pointer). Processors with DIFT support exist. A loosely
coupled accelerator, though, reads and writes main memory by DMA, out of
the processor's sight. Unless the accelerator takes part, tags are lost at
the accelerator's output and tainted data can be laundered through it.

This RTL implements the approach of *PAGURUS: Low-Overhead Dynamic
Information Flow Tracking on Loosely Coupled Accelerators* (Piccolboni,
Di Guglielmo, Carloni, IEEE TCAD 2018). A **shell** is placed around an
unmodified accelerator. The accelerator itself never sees a tag. The shell:

* keeps the tags in main memory **interleaved with the data**: one full
  64-bit tag word every *T* data words, with the first tag at a location
  the driver picks at random for every invocation;
* rewrites every DMA read burst of the accelerator so that it covers the
  interleaved tags, checks each tag against the expected input tag
  (`src_tag`), and passes only the data words on;
* rewrites every DMA write burst and inserts the output tag (`dst_tag`) at
  the tag positions, so the result carries the taint the processor chose;
* stops the accelerator the moment an input tag does not match. An attacker
  who overwrites the input in memory without knowing where the tags are
  will almost surely overwrite a tag as well.

This is coarse-grain DIFT: one tag value for the whole input and one for
the whole output. The processor's DIFT logic decides both values. The
shell's only knowledge of the accelerator is its number of configuration
registers, so one shell design fits any accelerator with the same DMA
interface.

Three example accelerators are included: GRAY (RGB to grayscale), MEAN
(column means of a matrix) and MULTS (a matrix times its transpose). The
paper uses these three for its evaluation, because they read their inputs in
very different patterns. The top level holds all three, each in its own shell.

## How the tags sit in memory

This part takes the most care to get right, and every other part depends on
it.

An accelerator addresses memory by **word index into its buffer**. The
buffer is the memory the driver allocated for one invocation, holding the
input and the output. The accelerator sees a *logical* buffer containing
only data. The *physical* buffer has tags inserted with two parameters,
both held in shell registers:

* `first_tag` = *F*: the number of data words before the first tag;
* `lg_off`: the tag offset is *T* = 2^`lg_off` data words between
  consecutive tags.

Physical layout: *F* data words, one tag, then repeated groups of *T* data
words each followed by one tag. With *F* = 2 and *T* = 4:

```
physical:  0  1  2  3  4  5  6  7  8  9 10 11 12 13 ...
content:   d0 d1 T  d2 d3 d4 d5 T  d6 d7 d8 d9 T  d10 ...
```

Logical word *i* is at physical index

```
phys(i) = i                                   if i < F
        = F + 1 + (i - F) + ((i - F) >> lg_off)   otherwise
```

A burst of *L* logical words starting at *i* becomes one physical burst.
It starts at phys(i) and ends at phys(i+L-1). If a tag directly follows the
last data word, the burst is extended by one word to include that tag.
(Word *i* ends a group when *i* = *F*-1, or when *i* ≥ *F* and
(*i*-*F*) mod *T* = *T*-1.) This rule makes contiguous bursts cover
every tag exactly once. With *T* = 1 every data word is followed by its
tag, so a 2-word request becomes a 4-word request: `d t d t`. The shell
also computes how many data words come before the next tag, and then counts
down as the burst streams.

The tag offset is restricted to powers of two. Every offset the paper
evaluates is a power of two (1, 64, 4096, and 2^11 to 2^24). With this
restriction the mapping is an add, a shift and a mask, and the request
path needs no divider. The same layout (same *F* and *T*) is used for input
and output, because both live in the same buffer.

The worst case for security is a first tag at the farthest place the offset
allows (*F* = *T*). The paper defines **information leakage** as the share
of the output written before the shell notices an overwritten input. It is
highest in this worst case.

## The shell (`dift_shell`)

`dift_shell` has three parts and exposes the accelerator's kind of
interface to the system:

* a configuration bus (`cfg_we`, `cfg_addr`, `cfg_wdata`, combinational
  `cfg_rdata`) and an interrupt `irq`;
* a DMA read channel and a DMA write channel. Each has a valid/ready request
  carrying `dma_req_t {index, length}` (32-bit word index and length),
  followed by valid/ready 64-bit data words.

On the accelerator side it drives the configuration register values
`acc_regs`, a start pulse `acc_conf_done` and a reset `acc_rst_n`. It takes
the accelerator's `acc_done` and its two DMA channels.

### Configuration shell (`config_shell`)

Register map for an accelerator with N configuration registers (word
addresses):

| address | register | notes |
|---|---|---|
| 0 .. N-1 | accelerator configuration registers | passed to the accelerator |
| N .. 2N-1 | one tag per configuration register | must equal `src_tag` to start |
| 2N | `src_tag` | expected tag of inputs and configuration registers |
| 2N+1 | `dst_tag` | tag written with the outputs |
| 2N+2 | `first_tag` | *F*, chosen at random by the driver |
| 2N+3 | `lg_off` | log2 of the tag offset |
| 2N+4 | command | write 1 to start |
| 2N+5 | status | bit0 done, bit1 input tag violation, bit2 register tag violation, bit3 busy |

The first 2N+2 registers and the first-tag register come from the paper.
The paper does not cover the tag offset register, the command and status
registers, or the rule that configuration writes are ignored while the
shell is busy. Those are this design's choices. Hiding the tag registers
from applications is left to the driver, as the paper has it.

Start sequence:

1. Writing 1 to the command register pulses `clear`, which resets the load
   shell's violation flag.
2. In the next cycle, all N register tags are compared with `src_tag` in
   parallel.
3. If they all match, `acc_conf_done` pulses and the shell runs until
   `acc_done`. If one differs, the invocation is refused: status bit 2 is
   set and `irq` pulses.
4. If the load shell reports a violation while the accelerator runs, the
   shell holds the accelerator in reset (`acc_rst_n` low) until the next
   start. This stops it at once and clears its state. Status bit 1 is set
   and `irq` pulses.

### Load shell (`load_shell`)

A request is accepted in one cycle and the rewritten request goes to memory
in the next. Words then flow at one per cycle. A tag word is consumed by
the shell, compared with `src_tag` and never forwarded. A data word is
forwarded under the accelerator's back-pressure. On a mismatch `violation`
rises and stays high until the next start. From then on nothing more is
forwarded, the rest of the memory burst is drained and discarded, and no
new request is accepted. If the driver starts the next invocation before a
cut-off burst has drained, the shell still drops the rest of that burst
without checking it. The new run's first request waits until the drain is
over, so it can never receive stale words.

### Store shell (`store_shell`)

The store shell rewrites write requests the same way as the load shell. At
each tag position it writes a `dst_tag` word, holding the accelerator off
for that cycle. After a violation no accelerator data reaches memory: a
burst in flight is finished with zero words so that the memory-side
transaction closes, and new requests are refused. The padding runs to the end of the burst even
if the next invocation has already started. `tags_written` counts
the tag words written.

**Cost of the tags.** Each burst costs one extra request cycle in each
shell, plus one cycle per tag word it covers. For offset *T* that is
about 1/*T* more memory traffic.

## The accelerators

All three follow the structure the paper gives for its accelerators: a
configuration, load, compute and store phase, and private local memories
(PLMs, module `plm`) that hold one burst. The phases run one after the
other; they are not overlapped. Every PLM is zeroed at the start of each
invocation (a one-word-per-cycle sweep), so nothing is carried from one
process's run to the next. Values are signed Q32.32 fixed point (64-bit).
`BURST` (default 1024 words = 8 KiB) is the PLM depth and the longest
burst.

Every accelerator has the same ports: `conf_done` (start), `conf[N]` (the
configuration registers), `done` (one-cycle completion pulse) and the two
DMA channels. Configuration registers 0 and 1 are always the input and
output word index in the buffer.

* **GRAY** (`gray_acc`, N = 3; register 2 = pixel count). A pixel is one
  word with R in bits 15:0, G in 31:16 and B in 47:32. The output word is
  (19595·R + 38470·G + 7471·B)·2^16, i.e. 0.299R + 0.587G + 0.114B in
  Q32.32, exact. One load burst gives one store burst of the same length.
  Per burst of L pixels: about L cycles to load, L+1 to compute and L to
  store.
* **MEAN** (`mean_acc`, N = 4; registers 2, 3 = rows R, columns C). It
  processes the columns in chunks of up to `BURST`. For each chunk it loads
  that part of every row (R load bursts), accumulates it in a PLM, then
  divides every sum by R with the sequential divider `seq_div` (64 cycles
  per column, truncating toward zero). One store burst writes the chunk's
  means.
* **MULTS** (`mults_acc`, N = 4; registers 2, 3 = R, C). Output (i, j) is
  the sum over k of A[i][k]·A[j][k], with each product truncated to Q32.32.
  The PLMs hold (chunks of) two rows, as in the paper. For each output
  element the accelerator loads row i and row j one chunk at a time and
  multiplies and accumulates one pair per cycle. If a whole row fits in a
  PLM, row i is loaded only once per output row. Results leave in store
  bursts of up to `BURST` words, so one output row depends on reading every
  input row.

The paper built its accelerators with high-level synthesis from SystemC
and gives only what they compute and how they use bursts. The insides
here are this design's own: the luminance weights, the pixel packing, the
fixed-point format, the loop orders and the register assignments.

## Top level (`pagurus_top`)

`pagurus_top` instantiates the three shelled accelerators as independent
tiles: 0 = GRAY, 1 = MEAN, 2 = MULTS. Every shell port is an array indexed
by tile. The rest of a system-on-chip connects to these ports: the
processor with DIFT support, the network or bus that carries tags, the
memory controller and DMA engine, and the driver that writes the registers.
The paper assumes all of those parts and does not design them. The tiles
share only the clock and reset. Each tile's `violation` and `tags_written`
are brought out for observation. The paper evaluates each accelerator in
its own system; putting all three side by side in one top is a choice of
this design.

## Information leakage with this RTL

`tb/pagurus_workload_tb.sv` measures the worst case at the default sizes
on a 512 × 512 input: the whole input, tags included, is overwritten, and
the first tag sits after 4096 data words. Results:

| accelerator | output written before the stop |
|---|---|
| GRAY | 3072 of 262144 words (1.17 %): exactly the 3 bursts whose loads finished before the first tag |
| MEAN | 0 of 512: its single column chunk reads every row before it stores anything |
| MULTS | 0 of 262144: its first output row needs every input row |

`tb/leakage_tb.sv` repeats the worst case on the 128 × 128 input over burst
sizes and tag offsets (first tag after *T* words):

| accelerator, burst | *T* = 1024 | *T* = 4096 | *T* = 32768 (no tag in the input) |
|---|---|---|---|
| GRAY, 128 B | 6.15 % | 24.90 % | 100 % |
| GRAY, 1 KiB | 5.47 % | 24.22 % | 100 % |
| GRAY, 8 KiB | 0 % | 18.75 % | 100 % |
| MEAN, 64 B | 93.75 % | 93.75 % | 100 % |
| MEAN, 128 B | 87.50 % | 87.50 % | 100 % |
| MEAN, 1 KiB | 0 % | 0 % | 100 % |

As in the paper, leakage falls as bursts grow and rises with the tag offset.
Once the offset exceeds the input, there is no tag to catch the attack. The
MEAN rows show how much the loop order matters. Its chunks cover a few
columns of every row, and with these offsets every tag sits after the last
column of a row. So only the chunk holding the last column ever meets a tag,
and every chunk before it leaks.

Part of this agrees with the paper: GRAY, which streams, leaks more than
MULTS, which needs the whole input before its first output row. MEAN does
not agree. The paper reports that MEAN's leakage falls off quickly because it
is a reduction. Here, with small bursts, MEAN leaks more than GRAY. The cause
is the column-chunk loop order chosen for this MEAN. A MEAN that read whole
rows would meet the first tag within the first few rows. The paper does not
publish its accelerators' loop orders, so these numbers are not expected to
reproduce its plots. For GRAY the leakage can be
predicted exactly: floor((F-1)/B)·B words for a first tag after F data
words and bursts of B words.

## Departures and open points

* The tag offset must be a power of two (see above). `first_tag` may be any
  value; the driver should keep it ≤ *T*.
* The paper says the first-tag location comes from a pseudo-random
  generator but does not say where it lives. Since the operating system
  writes the tags into memory, the value reaches the shell as a register
  written by the driver. No generator is included.
* Handshakes, register map, reset behaviour, the zero-padding of a store
  burst cut short by a violation, and a refused start on a bad register tag
  are not specified in the paper; they are choices documented in each
  module's header.
* The paper's FPGA case study extends a small RISC-V platform (PULPino)
  with DIFT. Its buses carry 4-bit tags alongside the data (a *coupled*
  scheme), and MEAN is attached through an AXI4 adapter. The core, the
  tagged buses and the adapter are not included; this RTL implements the
  interleaved scheme of the main design.
* The paper has the shell expose exactly the accelerator's interface. Here
  the accelerators take their configuration as a register array and a start
  pulse, and the memory-mapped bus is provided by the shell. The DMA
  channels on both sides of the shell have the same format.
* MEAN works through column chunks, reading that part of every row. With
  small bursts this makes it leak more than the paper reports for its MEAN
  (see the leakage section). A row-wise MEAN would need every column sum in
  its PLM, so it could not handle more than `BURST` columns.
* The accelerators' phases are sequential; the paper mentions that they can
  be pipelined with larger PLMs.
* PLMs are single-bank, one read and one write port.

## Simulation

All files are SystemVerilog-2017. `rtl/dift_pkg.sv` must be read first.
Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog ends a hung simulation as a failure.

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/dift_pkg.sv tb/pagurus_top_tb.sv --top-module pagurus_top_tb -o sim
./obj_dir/sim
```

| testbench | what it runs |
|---|---|
| `plm_tb` | write/read-back, zeroing sweep length and contents |
| `load_shell_tb` | request rewriting against an independent layout model for offsets 1, 4, 64; data order; one word per cycle; stop on a bad tag |
| `store_shell_tb` | tag insertion over contiguous random bursts with back-pressure; cut-off on violation |
| `config_shell_tb` | register map, start timing, write lock, refused start, stop and restart |
| `dift_shell_tb` | shell + GRAY: clean run and an attacked run |
| `gray_acc_tb`, `mean_acc_tb`, `mults_acc_tb` | each accelerator alone against reference models, including burst counts |
| `pagurus_top_tb` | all three tiles concurrently with 8-word bursts: clean runs, attacks, bad register tags, recovery; counts every mechanism |
| `pagurus_full_tb` | the top at default parameters, 128 × 128 inputs ("small" workload) on all three tiles, attacks and recovery (about 5 million cycles) |
| `leakage_tb` | worst-case leakage of GRAY (bursts of 16, 128, 1024 words) and MEAN (8, 16, 128 words) for tag offsets 2^10, 2^12, 2^15, against a prediction from the burst order |
| `pagurus_workload_tb` | default parameters: GRAY and MEAN on 512 × 512 and 2048 × 2048 inputs, and the worst-case leakage runs above |

`tb/leak_unit.sv` holds one shelled GRAY or MEAN with its own memory for
that sweep. `tb/dma_mem_model.sv` is a behavioural memory with DMA channels and optional
random stalls, used by the testbenches only.

MULTS on the 512 × 512 and 2048 × 2048 inputs is not simulated. With the
sequential phases it needs about R²·(2C + 20) cycles, which is 0.27 and 17
billion cycles.

To change the design: `BURST` on `pagurus_top` (or on each accelerator) sets
the PLM size and burst length. `N_REGS` on `dift_shell` must match the
accelerator's register count. A new accelerator only has to implement the
same DMA and configuration ports.
