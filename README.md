# A tiled schoolbook multiplier for 65,536-bit integers

This RTL multiplies two N-bit unsigned integers (N = 65,536 by default) into a
2N-bit product. It follows the architecture of AIM ("Accelerating
Arbitrary-precision Integer Multiplication on Heterogeneous Reconfigurable
Computing Platform Versal ACAP", Yang et al.). AIM splits the work across a
2-D array of vector engines and a carry unit in programmable logic:

* The operands are cut into 31-bit digits.
* Every digit product of the schoolbook method is formed by 8-lane vector
  multiply-accumulate engines ("tiles"). Partial sums run from tile to tile
  along cascade links.
* The long carry chain is kept off the critical path. Each output stream is
  normalized on its own, and a single wide adder then ripples the few
  leftover carries between streams.

In AIM the tiles are AI Engine processors running a software kernel. Here
each tile is a fixed-function RTL engine with the same dataflow. The whole
design is plain synthesizable SystemVerilog.

The default configuration is the best 65,536-bit design point reported for
AIM:

* 3 independent multipliers (PEs);
* each PE is an 11 × 12 array of 132 tiles;
* each tile works on 200 digits (6,200 bits) of each operand.

## Number representation

| quantity | width | notes |
|---|---|---|
| digit (segment) | 31 bits | sent as a 32-bit word with the top bit zero, because the vector engines AIM uses multiply signed 32-bit values |
| digit product | 62 bits | 31 × 31 |
| accumulator lane | 80 bits | holds a full column sum: at most 2,115 products of 62 bits, below 2^74 |
| tile ↔ PL stream | 128 bits | 4 digits per beat |
| memory word | 512 bits | operands and product, little-endian word order |

An operand has NSEG = ceil(N/31) digits (2,115 for N = 65,536). Column `c` of
the product is the sum of all `a[i]·b[c−i]` and has weight 2^(31c).

## Tiling the product parallelogram

This is the part that takes most thought. All digit products `a[i]·b[j]`
form a parallelogram: one row per A digit, shifted one column per row.
AIM cuts it into square tiles of T × T digits, with T = 200 by default:

* **Rows.** A digits are grouped into R = ceil(NSEG/T) row groups. Row group
  `r` holds `a[rT … rT+T−1]`.
* **Column groups.** Row group `r` covers output columns `rT … rT+T−1+NSEG−1`,
  which is K = ceil((T+NSEG−1)/T) column groups of T columns each.
* **Tile (r,k).** It produces columns `(r+k)T … (r+k)T+T−1` from the A digits
  of row `r`. It needs the B digits `kT−T+1 … kT+T−1`. This B window depends
  on `k` only.

At the defaults, R = 11 and K = 12, so each PE has 132 tiles. The same
formulas reproduce every array size AIM lists for 65,536 bits: with tile
edges of 536 down to 136 digits they give 20, 30, 42, … 272 tiles. They also
give the 306- and 30-tile 8,192-bit points.

Three kinds of wiring follow from this (`aie_array`):

1. **A broadcast.** A stream `r` feeds all tiles of row `r`.
2. **B broadcast.** B stream `k` feeds all tiles with the same `k`. These
   tiles lie on one diagonal ("hypotenuse") of the parallelogram.
3. **Cascade chains.** All tiles with the same global column group
   `g = r+k` add into the same columns. They form a chain
   `(r−1,k+1) → (r,k)` over a link carrying 8 × 80 bits. The last tile of a
   chain, at row `min(R−1,g)`, sends its sums to the PL.

So a PE has R+K input streams and G = R+K−1 output streams, which matches
AIM's PLIO count `2·P_Intra0 + 2·P_Intra1 − 1`. In the small 2 × 3 example
(4 digits per operand, T = 2), tiles 1→3 and 2→4 are cascaded. That example
has 5 input streams and 4 output streams.

## The tile kernel (`aie_tile`)

A tile stores its T A digits and its window of 2T B digits: 2T−1 real digits
plus a zero pad. It then works output-stationary:

```
for w in 0 .. T/8-1:              # 8 output columns at a time
    acc[0..7] = cascade_in or 0
    for h in 0 .. T/8-1:          # 8 A digits at a time
        for i in 0 .. 7:          # one vector step per clock
            acc[j] += a[8h+i] * bw[8(w-h) + T-1 - i + j]   for all 8 lanes j
    cascade_out = acc
```

A chunk's final sum is written to a separate output register, and the next
chunk starts accumulating in the same clock. The transfer down the chain
therefore overlaps computation, as in AIM's kernel. A tile that is not
stalled is busy exactly T²/8 clocks per product: 5,000 at T = 200. This is
AIM's `AIE_cyc = S0·S1/(SIMD·Eff)` with SIMD = 8 and Eff = 1.

A tile stalls in two cases:

* at the start of a chunk, while its cascade input is empty;
* at the end of a chunk, while its output register is still full.

A tile further down a chain starts about T clocks after its predecessor. So
a PE's latency is about T²/8 + (R−1)·T clocks plus the carry step. The
full-size run takes 8,174 clocks from the first input word to the last
product word.

## Two-step carry propagation

Each output stream delivers T column sums of up to 80 bits. Chaining carries
through all 2·NSEG columns one by one would be slow. The design splits this
into two steps:

1. **`carry_adder` (one per output stream, all working at once).** It adds 4
   columns per clock (124 bits) into a 174-bit sum together with the running
   carry. It stores the low 124 bits as four normalized digits and keeps the
   upper 50 bits as the next carry. When the group is complete it raises
   `done` and holds the group's leftover carry, which has weight 2^(31T).
2. **`carry_merge` (one per PE).** It walks the groups in order; `sel` is the
   group multiplexer. It reads 8 digits (248 bits) per clock and adds the
   running carry with one 249-bit adder. At the end of group `g` it adds that
   group's leftover carry into the running carry, so it lands on group
   `g+1`. A final piece holds what is left. The 248-bit pieces are packed
   into 512-bit words, and exactly 2N/512 words are sent, flagged by
   `out_last`.

Step 2 needs G·T/8 clocks per product: 2,875 at the defaults, below the
tiles' 5,000. So it keeps pace with the array when products follow each
other.

## Senders

`aim_sender_lhs` and `aim_sender_rhs` take an operand as N/512 memory words.
A shared width converter (`seg_unpack`) cuts the words into 31-bit digits,
4 per clock, and stores them. The senders then drive all their streams in
parallel:

* The left sender sends T digits per row stream.
* The right sender sends the 2T-word window per column-group stream.

Digits outside the operand are sent as zero. A broadcast beat moves only when
every listening tile is ready.

## Top level and interfaces

`aim_top` holds P_INTER copies of `aim_pe` (default 3). Each PE has:

* `a_valid/a_ready/a_data[511:0]` and `b_valid/b_ready/b_data[511:0]`:
  operand words, least significant word first;
* `p_valid/p_ready/p_data[511:0]/p_last`: product words, least significant
  first, with `p_last` on word 2N/512−1;
* `busy`: high while any tile of the PE is computing.

All streams use valid/ready and move a word on a clock edge where both are
high. `rst_n` is an asynchronous, active-low reset of the control state. The
memory system and the host that issue tasks are outside the design. Each
stage holds one product, so a PE can accept the next operands while the
array is still working on the previous ones.

Parameters:

* `N` must be a multiple of 512.
* `T` must be a multiple of 8.
* The array shape follows from `N` and `T` through the functions in
  `aim_pkg`.

## Departures from the described accelerator

* **Tiles are RTL engines, not processors.** A tile does one 8-lane vector
  step per clock and reads its operands from register files. AIM's kernel
  runs on an AI Engine at 1 GHz and loads operands explicitly. Here the whole
  design runs on one clock.
* **Second carry step width.** AIM describes a 512-bit-granularity second
  step. Here it is 248 bits (8 digits). One group is 31·T bits, which is a
  multiple of 248 for every legal T but not of 512. The output words are
  still 512 bits.
* **First carry step width.** AIM describes it as working at 128-bit
  granularity. Here it is 4 digits = 124 bits.
* **Buffering.** Buffering and digit order are this design's own choices:
  single buffers, a zero pad word in each B window, and the lane indexing of
  the window.
* **Not built.** The physical placement of tiles on the device, the design
  space exploration and code generation flow, and the RSA and Mandelbrot
  application layers.

## Verification

Every module has a self-checking testbench in `tb/`. Each testbench checks
against models written independently of the RTL: 32-bit-limb schoolbook
products, direct column sums, or wide-vector arithmetic.

| testbench | what it checks |
|---|---|
| `tb_aie_tile` | lane sums with cascade input; exactly T²/8 busy clocks; random stalls |
| `tb_aie_array` | every column sum on every output stream; broadcast and cascade wiring |
| `tb_aim_sender_lhs`, `tb_aim_sender_rhs` | every digit of every stream beat |
| `tb_carry_adder` | digits and leftover carry, all-ones columns, hold until release; timing |
| `tb_carry_merge`, `tb_carry_propagation` | 512-bit product words from given column sums |
| `tb_aim_pe` | four back-to-back 1,024-bit products, compared with a reference |
| `tb_aim_top` | 2 PEs × 6 products at N = 512, with random gaps and back-pressure |
| `tb_aim_full` | the default configuration (3 PEs, 65,536 bits), one product per PE |

Besides the products, `tb_aim_top` counts these events and fails if any
never happened:

* cascade transfers;
* cascade waits;
* broadcast stalls;
* multi-bit group carries;
* product back-pressure.

`tb_aim_full` builds in about a minute and runs in a few seconds.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/aim_pkg.sv tb/tb_bigmul_pkg.sv \
    tb/tb_aim_full.sv --top-module tb_aim_full
./obj_dir/Vtb_aim_full
```

Each testbench prints `TB_RESULT checks=<n> failures=<m>`. Verilator has only
two signal states, so every register that is read is reset or loaded before
use.

## Changing the size

To build another design point, set `N`, `T` and `P_INTER` on `aim_top`. For
example, `N = 8192, T = 56, P_INTER = 7` is AIM's best 8,192-bit point.
`aim_pkg::rows`, `cols` and `groups` give the resulting array shape. Storage
grows with the tile size. Each tile keeps 3T 32-bit words, and each
`carry_adder` keeps T 31-bit digits.
