# A partial-sum generator for constituent-code polar decoders

A successive-cancellation (SC) polar decoder walks a binary tree. Each
g-function needs the *partial sums* of the subtree to its left: the bits
already decided in that subtree, re-encoded with the polar transform. A
well-known way to keep these values is a shift register: N/2 one-bit
registers that take one decided bit per cycle and always hold the partial
sums the next g-function needs.

Fast decoders do not decide every bit on its own. They recognise
*constituent codes*, subtrees of length L = 2^s that can be solved at once:

* rate-0: every bit frozen;
* rate-1: every bit carries information;
* repetition: only the last bit carries information;
* single parity check: only the first bit is frozen.

Such a node delivers all L of its partial sums in one step. A
shift-register generator cannot take them, because it wants the bits one
at a time. This RTL implements a generator that takes a whole constituent
code in one clock cycle and leaves its registers exactly as the bit-serial
generator would have left them after the same L bits. Single bits are the
special case L = 1, so one datapath serves both.

The RTL is written in SystemVerilog. Its default size is a 1024-bit code.

## The update rule

Write c(i,k) for entry (i,k) of the generator matrix G = F^{(x)log2 N},
F = [1 0; 1 1]. c(i,k) is 1 exactly when every bit set in k is also set
in i. The bit-serial generator processes the decided bit u_i like this:

    R_0 <= u_i & c(i,0)
    R_k <= R_{k-1} ^ (u_i & c(i,k))        k = 1 .. N/2-1

Now let a constituent code of length L end at bit i, and let
beta_0 .. beta_{L-1} be its partial sums (its bits times G_L). Apply the
serial rule L times and group the registers into blocks of L. The result is:

    R_r      <= beta_{L-1-r}                                  first block, r < L
    R_{aL+r} <= R_{(a-1)L+r} ^ (beta_{L-1-r} & c(i, aL+r))    block a >= 1

Two facts of the Kronecker structure make this work:

* The cross terms between neighbouring blocks vanish because G_L is lower
  triangular.
* Inside a block, the columns of G met along a diagonal equal one column
  of G_L, scaled by the single entry c(i,k).

So a length-L update has three parts. Every register takes the value L
places below it (zero for the first block). On top of that it XORs one of
the L partial sums, in reversed order within each block. That partial sum
is gated by the matrix row of the code's last bit. In the first block the
gate is always open: i ends in log2 L ones, so c(i,k) = 1 for k < L.

The testbenches check this equivalence register by register against the
serial rule.

## Datapath

```
 PU outputs ──► mux_network ──► AND ◄── matrix_unit (row of c(i,·))
 (all stages)        ▲           │
                     │M          ▼
 stage ──► control_signal_gen   XOR ◄── psg_shifter ◄── R_0 .. R_{N/2-2}
                     │S          │          ▲
                     └───────────┼──────────┘
                                 ▼
                          R_0 .. R_{N/2-1}  ──► psum (to the PUs)
```

Each register k has one AND gate and, except R_0, one XOR gate.

### Multiplexing network (`mux_network`)

A node of length 2^s is solved by the processing units (PUs) of decoder
stage s. That stage has 2^s outputs, PU(s,0) .. PU(s,2^s-1), and PU(s,j)
carries beta_j. By the update rule, register k needs beta_{L-1-(k mod L)}.
So register k has exactly one possible source per stage:
PU(s, 2^s-1-(k mod 2^s)). For an 8-bit code this gives:

| register | stage 0 | stage 1 | stage 2 |
|----------|---------|---------|---------|
| R_0      | PU(0,0) | PU(1,1) | PU(2,3) |
| R_1      | PU(0,0) | PU(1,0) | PU(2,2) |
| R_2      | PU(0,0) | PU(1,1) | PU(2,1) |
| R_3      | PU(0,0) | PU(1,0) | PU(2,0) |

Every register has the same log2(N)-input multiplexer tree. All the trees
share one select M, which is the stage index in binary. The tree is
ceil(log2(log2 N)) multiplexers deep. It sits between the PUs and the
registers, so it adds that delay to the decoder's critical path:
mux tree + AND + XOR, where the bit-serial generator has AND + XOR.

In the RTL each tree indexes a candidate vector padded with zeros to a
power of two (16 entries for N = 1024). So an out-of-range stage index
writes zeros.

All PU outputs arrive on one flat bus, `pu_psum[N-2:0]`. Stage s occupies
bits 2^s-1 .. 2^(s+1)-2, and PU(s,j) is bit 2^s-1+j.

### The (2^m − 1) shifter (`psg_shifter`)

The "take the value L places below" part is done in two steps:

* The fixed wiring shifts by one: shifter output S_j feeds the XOR of
  R_{j+1}, as in the serial generator.
* The shifter adds the remaining 2^m − 1 positions, where L = 2^m.

The shifter is a logarithmic barrel shifter. It has N/2−1 data bits (the
outputs of R_0 .. R_{N/2-2}; R_{N/2-1} only shifts out) and log2(N)−1
rows of 2:1 multiplexers. All multiplexers in a row share one select. Row
r moves the data by 2^r and fills with zeros. A shift of 2^m − 1 uses rows
0 .. m−1. The shifter reads only the registers, never the PUs, so its
delay overlaps the PU computation and is not on the critical path. For
N = 1024 it has 9 rows of 511 multiplexers.

### Matrix unit (`matrix_unit`)

Each update needs the first N/2 entries of row i of G, where i is the last
bit of the node. Which rows are needed, and in what order, depends on how
the code splits into constituent codes, and that split depends on the code
itself. So the rows are stored, one per update, in decoding order, rather
than computed. This module is a writable memory of DEPTH rows by N/2 bits:

* A configuration port writes the rows for a code before decoding starts.
* The read port has one cycle of latency, like a block RAM.

A design fixed to one code could use a ROM with the same contents in its
place.

The row for an update is easy to compute:

    row[k] = ((k & ~i) == 0)        k = 0 .. N/2-1

The testbenches compute it this way.

DEPTH = 512 is a choice of this design. Update counts per frame:

* tb_psg_rates (1024-bit codes, rates 0.2 to 0.8): 64 to 70.
* Any frame: no more than the decoder's cycle count per frame, which is
  160 to 298 cycles for such codes.

An average-case memory of about N/5 rows would cover typical codes. 512
rows cover any frame with at least two bits per update on average.

### Control signal generator (`control_signal_gen`)

For each update the decoder gives the stage index s. The generator derives
the control signals from it:

* **M**, the multiplexer select: s itself.
* **S**, the shifter row selects: a k-to-2^k decoder makes s one-hot, and
  row r is on when the hot bit lies above r.
* **The matrix-unit address**: an update counter that restarts at each
  frame. The memory is read one update ahead: `frame_start` fetches row 0,
  and each update fetches the row for the next one.

## Interface and timing (`sr_cb_psg`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (clears registers and counter) |
| `cfg_we`, `cfg_addr`, `cfg_row` | in | 1, log2 DEPTH, N/2 | write one matrix row (bit k = c(i,k)) |
| `frame_start` | in | 1 | clears the registers and counter, fetches row 0 |
| `valid` | in | 1 | a node was solved this cycle |
| `stage` | in | ceil(log2(MAX_STAGE+1)) | log2 of its length (0 = single bit) |
| `pu_psum` | in | N−1 | partial sums from the PUs of all stages |
| `psum` | out | N/2 | R_0 .. R_{N/2-1} |
| `step_cnt` | out | log2(DEPTH+1) | updates done in the frame |

A frame runs like this:

1. Load the frame's rows, if they are not already loaded.
2. Pulse `frame_start`.
3. Leave one idle cycle while row 0 arrives.
4. Present `valid`, `stage` and `pu_psum` for each solved node, in
   decoding order. This can happen every cycle: one update per clock, with
   any number of idle cycles in between.
5. An update is written at the clock edge where `valid` is high, and
   `psum` shows it from the next cycle on.

Nodes must be aligned: a node of length L starts at a multiple of L, as it
does in the decoding tree. Its length is at most 2^MAX_STAGE, which is N/2
by default.

Assertions flag three misuses:

* `valid` together with `frame_start`;
* a stage index above `MAX_STAGE`;
* more updates in a frame than the matrix unit has rows.

## Parameters and size

| parameter | default | notes |
|-----------|---------|-------|
| `N` | 1024 | code length, a power of two, at least 8 |
| `DEPTH` | 512 | matrix-unit rows, i.e. updates per frame |
| `MAX_STAGE` | log2(N) − 1 = 9 | longest constituent code is 2^MAX_STAGE bits |

For N = 1024 the datapath has:

* 512 partial-sum flip-flops;
* 512 AND gates and 511 XOR gates;
* 512 multiplexer trees of 10 inputs each;
* 4599 shifter multiplexers;
* a 512 × 512-bit memory.

This matches the counts given for the architecture: n/2 flip-flops,
n/2 AND, n/2−1 XOR, and (n/2)(log n − 1) + (n/2 − 1)(log n − 1)
multiplexers. The one difference is that the zero-padded trees here may
synthesise to a few extra gates.

The default `MAX_STAGE` is the worst case: constituent codes of up to N/2
bits. When the longest node of the codes to be decoded is known to be
shorter, a smaller `MAX_STAGE` removes the unused stages from every
multiplexer tree and the unused rows from the shifter, which shortens the
select path and saves area; nothing else changes. The decoder must then
split longer nodes itself. For scale: the 1024-bit codes in
`tb_psg_rates` have nodes of up to 128 bits (rates 0.35 to 0.65) and
256 bits (rates 0.2 and 0.8).

## What follows the architecture and what is this implementation's own

These parts follow the described design:

* the update rule;
* the N/2-register chain with AND and XOR (R_0 has no XOR);
* the multiplexing network, its routing and its shared binary select;
* the (2^m − 1) barrel shifter with zero fill and shared row selects,
  driven through a k-to-2^k decoder;
* a stored table of matrix rows, one per node;
* the worst case of nodes up to N/2 bits as the default, and the remark
  that shorter maximum nodes allow a smaller network and shifter
  (`MAX_STAGE`).

These are choices of this implementation:

* the flat PU bus layout;
* zeros for an out-of-range stage;
* the order of the shifter rows (shortest distance first);
* the writable memory with a synchronous read, in place of a ROM;
* DEPTH = 512;
* the update counter with its one-ahead prefetch, and the `frame_start`
  pulse that clears the registers;
* the asynchronous reset;
* the assertions.

Two points in the source material are inconsistent, and this
implementation resolves them as follows:

* One intermediate form of the block rule sets a block to zero when its
  matrix entries are zero. The final form keeps R_{a-1} in that case, and
  the final form is implemented; only it agrees with the serial generator.
* One drawing labels the last register R_{n−1}, while the text and the
  resource count give n/2 registers. N/2 is implemented.

This block does not include:

* the processing units;
* the constituent-code decoders (rate-0, rate-1, repetition, parity);
* the controller that walks the tree.

They belong to the decoder around it and connect through `pu_psum`,
`valid`, `stage` and `frame_start`. Which register feeds which PU's
g-function is also left to that decoder; `psum` brings out all registers.

## Verification

Each testbench checks itself against a reference computed independently
of the RTL, and ends with `TB_RESULT checks=<n> failures=<n>`.

| testbench | what it checks |
|-----------|----------------|
| `tb_mux_network` | the 8-bit routing table above, written out literally; one-hot and random sweeps of every PU bit at N = 1024; zeros for out-of-range stages; a 64-bit instance trimmed to `MAX_STAGE` = 2 |
| `tb_psg_shifter` | every select pattern at N = 16, at N = 1024 and at N = 1024 trimmed to 4 rows, against the language's `<<` operator |
| `tb_matrix_unit` | write and read-back of all rows, the one-cycle latency, and that the output holds |
| `tb_control_signal_gen` | M, the shifter rows (2^s − 1), the update counter and the prefetch address |
| `tb_sr_cb_psg` | N = 64: 42 frames of random aligned splits (all-largest, all-single-bit, random), with and without idle cycles; all registers against the serial generator after every update; one update per cycle; every stage, single bits, the longest node, idle cycles and frame restarts must occur |
| `tb_sr_cb_psg_full` | the same at the default size (N = 1024, DEPTH = 512), 31 frames |
| `tb_sr_cb_psg_short` | the same on a 64-bit generator trimmed to nodes of at most 4 bits (`MAX_STAGE` = 2) |
| `tb_psg_rates` | real (1024, K) codes at rates 0.2, 0.35, 0.5, 0.65 and 0.8, split into rate-0, rate-1, repetition and parity nodes; 64 to 70 updates per frame; checked as above |

`tb/psg_ref_pkg.sv` holds the reference models:

* the generator-matrix entry;
* the constituent-code encoder;
* the bit-serial generator.

The codes in `tb_psg_rates` are built with the Bhattacharyya bound of a
binary erasure channel with erasure probability 0.5. This is a common
textbook construction, not necessarily the one used to evaluate the
architecture. Under this construction every length-2 node is special, so
that test never produces single-bit updates.

To build and run a test with Verilator 5:

```sh
verilator --binary --timing --assert -Irtl -Itb \
  rtl/psg_pkg.sv tb/psg_ref_pkg.sv \
  rtl/mux_network.sv rtl/psg_shifter.sv rtl/matrix_unit.sv \
  rtl/control_signal_gen.sv rtl/sr_cb_psg.sv \
  tb/tb_sr_cb_psg.sv --top-module tb_sr_cb_psg -Mdir obj -o sim
./obj/sim
```

Swap the last testbench file and `--top-module` for the other tests. The
unit tests need only `psg_pkg.sv`, their module and their testbench. At
N = 1024 the build takes under a minute and every run takes well under a
second.

Things these tests do not show:

* nothing is said here about timing closure or area;
* the generator has not been run inside a complete decoder; the PU side is
  modelled by encoding random decided bits;
* `stage` is only ever driven in range, so out-of-range handling is
  checked only in the multiplexing network.
