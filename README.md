# A fixed-point matrix multiplier with stochastic rounding

Neural networks can be trained with 16-bit fixed-point numbers instead of
32-bit floats, provided each result is rounded *stochastically*. A value that
lies a fraction f of the way between two representable numbers is rounded up
with probability f and down otherwise. On average the rounding then loses
nothing, so small gradient updates survive even when each one is smaller than
the last bit. Training time goes mostly into matrix products (GEMM), so this
design accelerates one operation:

    C (l x m) = round( A (l x k) x B (k x m) )

Here A, B and C are 16-bit two's-complement fixed-point matrices. Every dot
product is accumulated exactly in 48 bits, and then rounded once,
stochastically, with saturation. The design targets an FPGA of the Kintex-7
class. There, a 28 x 28 grid of DSP multiply-accumulate slices forms a
wavefront systolic array, and 28 more DSP slices do the rounding, one per
column. All of this RTL is plain synthesizable SystemVerilog: the DSP slices
are written as `*` and `+`, and the block RAMs as arrays.

The block structure is the published one:

- a READ engine that fetches from DDR;
- an L2 cache in block RAM;
- an L2-to-array mover;
- the systolic array with its edge FIFOs and rounding units;
- a WRITE engine that writes back to DDR;
- a TOP controller that sequences the others.

The data widths and the array size also follow the published design. Where
that description stops, this design makes its own choices, and each choice is
marked as such below and in each file's header comment. These choices include
the flow control inside the array, the AXI interface, the memory layout and
the sizes of the buffers.

## 1. Number format and the rounding unit

An input word is `<IL,FL>` fixed point: 16 bits, of which FL are fraction
bits. A product of two inputs therefore has 2·FL fraction bits, and the 48-bit
accumulator holds the sum of up to 2^16 such products without overflow.

At the top of each array column sits a rounding unit (`dsp_round`). It
converts an accumulator value to 16 bits in three steps:

1. It adds a uniformly distributed random number of `RND_BITS` bits
   (default 14) to the accumulator. The number comes from a 32-bit Galois
   LFSR (`lfsr`), one per column, each seeded differently.
2. It drops the low `RND_BITS` bits of the sum. This rounds up exactly when
   the random number is at least 2^RND_BITS minus the dropped fraction, so the
   probability of rounding up equals that fraction.
3. It checks that the bits above the 16-bit result all equal its sign bit. An
   FPGA DSP slice does this test with its pattern detector. If the test fails,
   the result saturates to 0x7FFF or 0x8000.

The output format has `2·FL − RND_BITS` fraction bits. With the defaults,
`<2,14>` inputs give `<2,14>` outputs. If a layer wants another output
format, for example `<6,10>` from `<2,14>` inputs, set `RND_BITS = 18`. The
rounding happens once per result, after the full sum, so its cost is only the
28 extra DSP slices (784 + 28 = 812 in all).

The LFSR is a pseudo-random source. Its polynomial, its width and the seeds are
this design's choice. The tests check that the rounding is unbiased and that
neighbouring columns draw different numbers.

## 2. The wavefront array

`systolic_array` holds n × n `dsp_macc` nodes, with n = `N` = 28. Its edges
are:

- on the left, one input FIFO per row, holding a row of A;
- on top, one input FIFO per column, holding a column of B;
- above each column, an LFSR, a `dsp_round` unit and an output FIFO.

Each clock, one word is read from each FIFO. A words move one node to the
right per clock and B words move one node down per clock, so all wiring is
between neighbours.

**Skew.** A sequencer "fires" an element when the row-0 and column-0 FIFOs
both hold data. Each fire carries a tag `{valid, first, last}`. The tag runs
down a delay line, so the FIFO of row i is read i cycles after the fire and
the FIFO of column j is read j cycles after it. Node (i,j) therefore sees
matching A and B words at fire + i + j + 1. For an operation of inner length
k whose first element fires in cycle 0:

- node (0,0) finishes in cycle k;
- node (n−1,n−1) finishes in cycle k + 2n − 2.

The array testbench checks both numbers. Back-to-back operations follow each
other without a gap, one element per cycle.

**Result path.** When a node sees the `last` tag, it moves its finished sum
into its local register. The next product restarts the accumulator through
the `first` tag, so the node never stalls. The local registers of a column
form a shift register that runs up to the column's rounding unit. Results of
column j leave in row order 0 … n−1, the result of row i arriving 2i + j + 3
cycles after the last fire.

**Cascade rule.** Node i delivers its result into the shift chain while
results from below are shifting past it. This is safe only if the next
operation's results stay clear of the current ones. Results of consecutive
operations leave a node 2n − 1 cycles apart at the least. So the sequencer
holds back the *last* element of an operation until 2n − 1 cycles after the
previous operation's last element. This only costs time when k < 2n − 1, that
is k < 55. A node asserts if a delivery ever collides with a result passing
from below. This rule is this design's own; the published description only
says that the local registers are cascaded.

**Other flow control**, also this design's own:

- *Output credit.* An operation starts only when every output FIFO has room
  for its n results. The credit is returned as the last column is read out.
  A slow write-back therefore stalls the array instead of losing results.
- *`in_space`.* This output tells the L2-to-array mover that every input FIFO
  can take two more words. Two rather than one, because the cache read in
  flight lands a cycle later.

The `stat_*` outputs strobe once per event:

- an operation started;
- a spacing stall;
- a credit stall;
- a bubble (the row-0/column-0 FIFOs had no data to read);
- the number of saturated results this cycle.

## 3. Blocking, the L2 cache and double buffering

The matrices live in DDR; only blocks of them fit on chip. One *step* pairs:

- a *row block* of A: p·n rows, with p = `P` = 4 "sub-blocks" of n rows, each
  k words long;
- n columns of B.

Each sub-block times the n columns is one array operation, so a step is p
operations. The loop nest (`top_controller`) has two levels:

- the outer loop walks the row blocks of A;
- the inner loop walks the column blocks of B.

A row block of A is thus fetched once and reused against all of B. The last
row block may hold fewer than p sub-blocks.

**Cache layout.** The L2 cache (`l2_cache`) has two stores, and both are
double buffered:

- the A store holds 2 × p·n rows of up to `K_MAX` = 2048 words;
- the B store holds 2 × n columns of up to 2048 words.

Each store is split into n banks, one per array row or column. A single
address therefore reads one word for each of the 2n input FIFOs in one cycle.
Step s uses B half s mod 2, and A half (row block index) mod 2.

**Three engines.** The controller runs three engines concurrently. Each has
its own copy of the loop position, and it issues step s:

| to       | once                                | why                                  |
|----------|-------------------------------------|--------------------------------------|
| READ     | L2-to-SA has finished step s−2      | the L2 halves of step s are free      |
| L2-to-SA | READ has finished step s            | the data is in the cache              |
| WRITE    | L2-to-SA has accepted step s        | results arrive in step order          |

As a result, fetching step s+1 overlaps computing step s.

**Bus lanes.** The bus delivers `BW` words per beat, 16 by default. To accept
a whole beat each cycle, every bank is split into BW lanes by word address
mod BW. A write fills all the lanes of one bank at once. A read picks one
lane per bank, selected by a register, and has one cycle of latency.

**Memory budget.** At the defaults the cache needs:

- A store: 2·4·28·2048·2 B = 917 KB;
- B store: 2·28·2048·2 B = 229 KB;
- FIFOs: 84 × 512 × 2 B = 86 KB.

The total is about 1.2 MB, inside the roughly 2 MB of block RAM of the
target device. The A lanes (1024 × 16) map naturally to block RAM. The B
lanes (256 × 16) are small, and a synthesis tool may put them in distributed
RAM.

## 4. Memory interface and data layout

The design has one AXI4 master with a data bus of `BW` 16-bit words (256
bits) and byte addresses (`ADDR_W` = 33, for 8 GB). The DDR controller IP
and the DDR3 memory are outside the design. This interface is this design's
choice.

**Layout in DDR:**

- A is row-major: row r is k words at `a_base + 2·r·k`.
- B is stored column by column, i.e. as Bᵀ, m × k: column c is k words at
  `b_base + 2·c·k`.
- C is row-major, l × m, at `c_base`.

**READ** (`read_engine`) fetches the rows of A of a step (only when a new row
block starts) and then the n columns of B. Bursts are INCR, at most
`MAX_BURST` = 256 beats, never cross a 4 KB page, and one is outstanding at a
time. Every beat goes into the cache in the cycle it is accepted.

**WRITE** (`write_engine`) writes each result row of n words. A row usually
starts and ends inside a beat. Each beat covers the lanes from the current
address to the end of the beat or of the row. `wstrb` marks those lanes, and
the matching column FIFOs are popped together. The write response is checked
before the next burst.

**Descriptor restrictions.** `top_controller` refuses a descriptor with
`cfg_err` unless all of these hold:

- l and m are multiples of n;
- 1 ≤ k ≤ K_MAX;
- k is a multiple of BW;
- `a_base` and `b_base` are multiples of 2·BW bytes;
- `c_base` is even.

Software pads matrices with zeros to meet these rules; padding does not
change the products.

**Host interface.** A host (over PCIe in the original system) writes the
descriptor `cfg = {a_base, b_base, c_base, l, k, m}`, pulses `start` and
waits for `done`. An AXI error response raises `axi_err`. The `stat`
counters are cleared at each start and count:

- steps;
- A fetches;
- cycles in which READ overlapped L2-to-SA;
- spacing stalls;
- credit stalls;
- bubbles;
- saturations.

**Throughput.** A step computes p·n²·k multiply-adds in about p·k cycles. In
that time READ moves n·k words of B in n·k/BW ≈ 1.75·k beats, plus A once
per row block. When m/n is large, the array rather than the bus sets the
speed: 784 nodes × 2 ops at 166 MHz is 260 G-ops/s. With a 256-bit bus at
166 MHz the bus carries 5.3 GB/s, inside the 6.4 GB/s DDR3 bandwidth of the
original board.

## 5. Where this design departs from, or adds to, the published one

- **DSP width.** The DSP slices of the target accept 18-bit inputs; this
  design uses the 16-bit words directly.
- **Flow control and handshakes.** The cascade spacing rule, the output
  credit, `in_space` and all handshakes between the engines are this design's
  own. The published text gives only the block functions and the wavefront
  timing.
- **Bus and layout.** The bus width, the burst rules, the memory layout
  (B stored transposed) and the descriptor restrictions are this design's
  own.
- **Sizes.** p = 4, K_MAX = 2048, FIFO depth 512, BW = 16 and RND_BITS = 14
  are this design's choices. K_MAX = 2048 covers inner dimensions of
  5·5·64 = 1600, as in a convolution over 64 input maps with 5 × 5 filters.
- **Weight gradients of convolutions.** A weight-gradient GEMM whose inner
  dimension is positions × minibatch can exceed K_MAX. Splitting such a sum
  on the host would round the partial sums.
- **Not included.** The DDR memory controller, the DDR3 memory and the PCIe
  link to the host are not included. The top exposes the AXI4 master and
  plain start/cfg/done ports in their place.
- **Not checked.** Timing closure at 166 MHz and the FPGA resource counts are
  not verified here.

## 6. Files

`rtl/`, one module per file:

| file | block |
|------|-------|
| `gemm_pkg.sv` | shared constants and the types `cfg_t`, `step_t`, `tag_t`, `stat_t` |
| `gemm_accel.sv` | top level |
| `top_controller.sv` | loop nest and step issue |
| `read_engine.sv`, `write_engine.sv` | AXI4 read and write masters |
| `l2_cache.sv` | banked, laned, double-buffered block-RAM store |
| `l2_to_sa.sv` | cache-to-array mover |
| `systolic_array.sv` | array, edge FIFOs, sequencer, rounding, output FIFOs |
| `dsp_macc.sv` | one array node |
| `dsp_round.sv` | stochastic rounding and saturation |
| `lfsr.sv` | random source |
| `sync_fifo.sv` | show-ahead FIFO |

`tb/` holds one self-checking testbench per module (`tb_<module>.sv`) plus
these:

- `axi_mem_model.sv`, a behavioural AXI4 memory. It has random wait states,
  honours byte strobes and checks the protocol (burst lengths, 4 KB
  crossings).
- `tb_gemm_accel.sv`, which runs several GEMM shapes end to end on a reduced
  configuration: a 4 × 4 array, p = 2, a 4-word bus, shallow FIFOs. It checks
  every element of C against an exact model: a result must be ⌊z/2^R⌋ or
  that plus one, clipped. It also checks that memory around C is untouched,
  and it requires that every mechanism occurred at least once: A reuse,
  double-buffer overlap, 4 KB splits, spacing stalls, credit stalls,
  bubbles, saturation and a refused descriptor.
- `tb_gemm_accel_full.sv`, which runs the top with every parameter at its
  default: a 56 × 64 by 64 × 56 product on the 28 × 28 array.

- `tb_gemm_workloads.sv`, also at the defaults, which runs the matrix products
  of two training workloads at their full inner dimension. It checks every
  result, and that the mean rounding error over all unsaturated results lies
  within 0.05 LSB of zero; truncation would give −0.5 LSB. The two
  workloads:
  - a slice of the first layer of a 784-1000-1000-10 fully connected network:
    a minibatch of 100 images padded to 112 rows, k = 784, 56 output units;
  - a slice of a 5 × 5 × 64 convolution lowered to a GEMM: k = 1600, with 64
    filters padded to 84 columns.

  The measured mean rounding error is about 0.01 LSB.

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and has a
watchdog.

To simulate with Verilator 5, for example the array testbench:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/gemm_pkg.sv tb/tb_systolic_array.sv --top-module tb_systolic_array
    ./obj_dir/Vtb_systolic_array +verilator+rand+reset+2

The end-to-end testbenches build the same way; the full-size one compiles in
about a minute. To change the size, override the parameters of `gemm_accel`.
N, P, K_MAX, BW, the FIFO depths and RND_BITS are all free, subject to these
limits:

- BW must be a power of two that divides K_MAX;
- IN_DEPTH must exceed the latency of the mover, and is 16 or more in
  practice.
