# Concurrent Processing Memory (CPM): RTL

A Concurrent Processing Memory is a random-access memory in which every word
is held by a very small processing element (PE). To a host CPU it looks like
an ordinary RAM on an address bus and a data bus. It also has a second address
space. Through it the host picks a *periodic* set of words (every k-th word
between two addresses) and broadcasts one instruction. Every selected word
executes that instruction in the same clock cycle, using its own value, the
values of its nearest neighbours and an operand from the data bus.

This finest-grain SIMD changes what array operations cost:

| operation | host CPU on a plain RAM | CPM |
|---|---|---|
| insert or delete an item | ~N word moves | a constant number of bus cycles |
| find every occurrence of a value or string | ~N reads | one instruction per word of the pattern |
| threshold or local extremum search | ~N | 1 to 3 instructions |
| filter with an F-point neighbourhood | ~N·F | ~F instructions |
| global max/min/sum | ~N | ~2√N bus cycles |

This repository gives synthesizable SystemVerilog for the device. The design
follows a published architecture. That source fixes the organisation: identical
PEs, nearest-neighbour links, a controller with an array decoder and a
priority encoder, and instructions taken from the address and data buses. It
also gives the algorithms. It gives no instruction set, word width, bus protocol
or array size. Those are this implementation's choices and are marked as such
below.

## Block map

```
          address bus                         data bus
              |                                  |
      +-------v---------------------------------v------+
      | cpm_controller                                 |
      |   bus decode, START/END/INCR registers         |
      |   array_decoder  -> active[N]                  |
      |   priority_encoder, parallel_counter <- S & active
      +--------------------+---------------------------+
        instr, operand,    |  A[N], S[N]
        active, wr_en, clr_s
      +--------------------v---------------------------+
      | pe_array: ROWS x COLS processing_element       |
      |   each PE: A (addressable), R (neighbouring),  |
      |   S (status), one-cycle ALU                    |
      +------------------------------------------------+
```

| file | what it is |
|---|---|
| `rtl/cpm_pkg.sv` | instruction word, operation and operand encodings, register map |
| `rtl/processing_element.sv` | one PE |
| `rtl/pe_array.sv` | the mesh and its neighbour wiring |
| `rtl/array_decoder.sv` | start/end/increment activation |
| `rtl/priority_encoder.sv` | lowest flagged PE |
| `rtl/parallel_counter.sv` | number of flagged PEs |
| `rtl/cpm_controller.sv` | bus interface, registers, instruction broadcast |
| `rtl/cpm_top.sv` | the device |

Default size: 8 × 8 = 64 PEs of 16 bits (`ROWS`, `COLS`, `W`), two addressable
registers per PE (`NCTX`) and a 20-bit address bus (`ABUS_W`). All of these
are parameters of `cpm_top`, as is `MEMBER`, the family member (see below).

## The processing element

Each PE has three pieces of state:

* **A, the addressable register.** This is the RAM word. The host reads and
  writes it at its element address, as in any memory.
* **R, the neighbouring register.** This is the only register a neighbour can
  see. A PE reads the R of four neighbours: left (address −1), right (+1),
  up (+COLS) and down (−COLS).
* **S, the status bit.** It holds the result of the last compare. The PE to the
  right can read it, which lets a match or an addition run across several
  words.

Neighbours can read R but not A. So an algorithm that needs a neighbour's
value starts with `R <= A` in every PE. Every operation takes one clock. Every
PE samples its neighbours' R before any R changes, so one instruction shifts the
whole array by one place.

### Instruction word

An instruction is 15 bits (`cpm_pkg::instr_t`). It is carried on the low
address bits of an instruction write, with its operand on the data bus.

| field | bits | meaning |
|---|---|---|
| `op` | 14:11 | `MOV ADD SUB MAX MIN ABS` write a register; `EQ LT GT SSET` write S |
| `dst` | 10 | result register: A or R |
| `srcx`, `srcy` | 9:7, 6:4 | `A R LEFT RIGHT UP DOWN DATA ZERO` (LEFT..DOWN are the neighbours' R) |
| `chain` | 3:2 | how a compare result c enters S: `S=c`, `S&=c`, `S\|=c`, `S=S_left&c` |
| `sgn` | 1 | signed compare/max/min |
| `carry` | 0 | ADD/SUB take carry-in (borrow-in) from the left PE's S and leave carry-out in S |

Only activated PEs execute. A RAM write to a PE takes priority over an
instruction to the same PE. The controller never issues both in one cycle.

## Activation: one instruction for one field of every item

An array stored contiguously is periodic. If each item takes `k` words, field
`f` of every item lies at `start+f`, `start+f+k`, `start+f+2k`, and so on. The
array decoder raises `active[i]` when `START <= i <= END` and `(i-START)` is a
multiple of `INCR`. One instruction therefore reaches that field of every item,
however large the items are. `INCR = 0` activates `START` alone. After reset
START=0, END=N−1 and INCR=1, so every PE is active.

The decoder is a comparison and a remainder per element, with no clock. It is
the largest part of the controller: about 1000 word-level cells at 64 PEs.

## Bus interface

The interface is synchronous with one transfer per clock: `bus_en` high, plus
`bus_we` for a write.

| `bus_addr[19:18]` | space | write | read |
|---|---|---|---|
| `0x` | RAM, PE `bus_addr[5:0]` | A ← data | A |
| `10` | controller register `bus_addr[3:0]` | see below | see below |
| `11` | instruction `bus_addr[14:0]` | broadcast, operand = data | — (illegal, asserted) |

Registers: 0 `START`, 1 `END`, 2 `INCR` (read/write); 3 `MATCH` (read:
bit 15 valid, low bits the lowest activated PE with S set); 4 `COUNT` (read:
number of activated PEs with S set); 5 `NEXT` (write: clear S of the PE
`MATCH` shows); 6 `CTX` (read/write: the context, see below).

A write takes effect at the clock edge of its transfer. An instruction written
in cycle t is therefore visible to a read in cycle t+1. Read data comes back
registered: `bus_rdata` is valid, with `bus_rvalid` high, in the cycle after the
read. Addresses past the last PE read as zero and ignore writes. Two assertions
in `cpm_controller` check the bus rules: the instruction space is write-only,
and at most one PE is written per cycle, never together with an instruction.

## Neighbour links and array boundaries

PE `i` sits at row `i / COLS`, column `i % COLS`.

* **Left and right** follow the element address. They run along a row and
  continue from the last PE of one row to the first PE of the next. This
  gives a 1-D chain through all N PEs, which the list algorithms use. For an
  image stored row by row, the same links are also the X neighbours.
* **Up and down** are ±COLS, the Y neighbours. They stop at the top and
  bottom rows, where they read zero. No link joins opposite edges.
* **The two ends of the chain** are ports: `chain_left_r`/`chain_left_s` are
  what PE 0 sees on its left, `chain_right_r` what PE N−1 sees on its right,
  and `chain_first_r`, `chain_last_r` and `chain_last_s` show those PEs'
  registers. Several devices can be chained this way. A single device ties the
  inputs to zero.

In an image algorithm, the left neighbour of a pixel in column 0 is the last
pixel of the row below. Results within a filter's width of the left and right
edges therefore mix two rows. Use only interior pixels, or pad the image.

## Context switch

Each PE holds `NCTX` addressable registers (default 2). The `CTX` register
selects which of them acts as A in every PE. That register is used for RAM
reads and writes and for instructions alike. The other registers keep their
contents, so the arrays of a second job can stay in place while the first
one runs. Switching takes one register write. R and S are shared by all
contexts.

## Programming the array

The recipes below are the ones `tb/tb_cpm_top.sv` runs and checks. "act(s,e,k)"
stands for writing START, END and INCR (three bus cycles). Cycle counts are
bus transfers.

**Insert `v` at position p of a list of length n:** `act(p, n, 1)`;
`R <= A`; `A <= LEFT`; write `v` to p. That is 6 cycles, whatever n is.
**Delete position p:** `act(p, n, 1)`; `R <= A`; `A <= RIGHT`. That is 5 cycles.

**Find a string of M words:** in all PEs run `S = (A == d0)`, then
`S = S_left & (A == d1)`, then `S = S_left & (A == d2)`, and so on. After M
instructions, S is set on the last word of every occurrence. Read `COUNT`
for the number of occurrences. To list them, repeatedly read `MATCH` and
write `NEXT`.

**Threshold:** `S = (A < d)` is one instruction, and `COUNT` gives how many
values are below d.
**Local maxima:** `R <= A`; `S = (A > LEFT)`; `S &= (A > RIGHT)`.

**Global max or sum, by sections (M words per section).** The reduction runs as a
wavefront inside every section, and all sections advance together:

1. Set END = N−1 and INCR = M.
2. For j = 0 .. M−1: write START = j, then broadcast `R <= A` for j = 0 or
   `R <= max(A, LEFT)` (or `R <= A + LEFT`) otherwise.
3. Write START = M−1 and broadcast `A <= R`. The last word of each section
   now holds that section's result.
4. Read the N/M section results and combine them on the host.

This takes 2M + N/M + 4 bus cycles, which is smallest near M = √N: 28 cycles
for 64 words, against 64 reads.

**Encryption by a neighbouring vector.** Mixing each word with its
neighbours through a secret vector is easy to undo once the vector is known,
but the vector is hard to recover from the output alone. With the vector
(1, 1), encryption is `R <= A`, then `A <= A + LEFT`, for
y[i] = x[i] + x[i−1]. That is 5 bus cycles for the whole array. Decryption
runs as a wave from the left, x[i] = y[i] − x[i−1]:

1. Set `INCR = 0` so that only the start address is active.
2. For each i, set `START = i` and run `R <= A − LEFT`.
3. Activate everything and run `A <= R`.

That costs 2N + 5 bus cycles. The vector is this design's example; the
source does not fix one.

**2-D sum by Mx × My sections.** Take the image stored row by row, with COLS
a multiple of Mx:

1. `R <= 0`, then Mx times `R <= LEFT + A`, then `A <= R`. Every PE now holds
   the sum of Mx pixels of its row, ending at itself.
2. `R <= 0`, then My times `R <= DOWN + A`, then `A <= R`.

The PE at the top-right corner of each section now holds that section's
total. All PEs work at once, so no wavefront activation is needed. Reading
the N/(Mx·My) corners costs Mx + My + N/(Mx·My) + 7 bus cycles. That is
smallest near Mx = My = ∛N: 19 cycles for an 8 × 8 image with 4 × 4
sections.

**Template match:** compute the neighbouring vector into R, then compare it
with the expected value from the bus. For example, `R <= A`, then
`R <= A − LEFT` (vector (−1,1,0)), then `S = (R == d)`. This finds every place
where a value rises by exactly d over its left neighbour.

**Histogram:** for each bin [lo, hi), run `S = (A > lo−1)`, then
`S &= (A < hi)`, then read `COUNT`. Each bin costs three bus cycles, whatever N
is.

**Sorted insertion:** activate the list; `S = (A > v)`; read `MATCH` (the
insertion point, or the end if no match is valid); then insert as above.
Loading values this way leaves a sorted list.
**Sortedness check:** `R <= A` on the list; then, from the second element on,
`S = (A < LEFT)`. The list is sorted when `COUNT` is 0.

**Sorting by exchanges:** the source states that a whole array sorts in ~N
instructions in the worst case, but gives no steps. One procedure that uses
only the operations above is odd–even transposition:

1. Check sortedness and stop if the list is sorted.
2. `R <= A`.
3. Activate the left members of the pairs (p, p+1), with p of the round's
   parity and INCR = 2, and run `A <= min(A, RIGHT)`.
4. Activate the right members and run `A <= max(A, LEFT)`.

Repeat from step 1. A list of n items is sorted after at most n rounds. A
nearly sorted list finishes earlier. The end-to-end test sorts 32 values this
way.

**Neighbouring vector (1,2,1):** `R <= A`; `R <= A + LEFT` (now (1,1,0));
`R <= R + RIGHT` (now (1,2,1)); `A <= R` to make the result readable.

**Neighbouring vector (1,2,4,2,1):** build (1,2,1) in R as above, then
`A <= A + A`, `A <= A + LEFT` and `A <= A + RIGHT`. The result is
2·a[i] + g[i−1] + g[i+1], where g is the (1,2,1) value. That equals
(1,2,4,2,1) in 6 instructions. PEs read only their neighbours' R, so a
footprint of M costs about M instructions. Near the ends of the chain the
missing neighbours count as zero. Because the (1,1,0) step lives in the right
neighbour's R, the last PE's (1,2,1) value lacks its own second copy.

**2-D neighbouring tensor (1,2,1) ⊗ (1,2,1):** run the 1-D filter along X
(`LEFT`/`RIGHT`) and write it back to A. Then run the same filter along Y
(`DOWN`/`UP`) and write that back to A. That is 7 instructions. The result
is exact away from the image border. At the border, the left/right links
reach the ends of neighbouring rows.

**Words wider than W:** keep the low word at the lower address. Clear S
everywhere (`S = (0 < 0)`). Then activate word 0 of every item with INCR = item
size and broadcast `ADD carry` with the low part of the addend. Repeat one
word up for each higher part. Each step adds one word and passes its carry
through S to the next word.

**Edge line along X, pixel length L:** `R <= A`; `A <= UP − DOWN` (top minus
bottom); `R <= 0`; then L+1 times `R <= LEFT + A`. This is a running sum that
walks right; each PE now holds the sum over itself and its L left neighbours.
Then `A <= R`. The sign gives the direction of the edge, and `ABS` gives its
strength.

**Edge messenger, slope My/Mx.** Every pixel owns an Mx × My area whose far
corner lies on the line of that slope through the pixel. A "messenger" value
starts at the far corner. It walks Mx + My unit steps back along the line to
the pixel, adding the pixels on one side of the line and subtracting those on
the other side. All pixels do this at once. One step is `R <= RIGHT ± A`
(a step in −X) or `R <= UP ± A` (a step in −Y). Each PE takes the messenger
from the neighbour it is coming from and adds or subtracts its own pixel. For
slope 3/4 over a 4 × 3 area, the walk from the corner (4,3) is: −X, −Y, −X,
−Y, −X, −Y, −X. The signs are −, +, −, +, −, + and none for the final step.
That adds the pixels at (1,0), (2,1), (3,2) and subtracts those at (1,1),
(2,2), (3,3). Eight instructions produce the line-segment value of every pixel
at once.

A full line detector repeats this for every (Mx, My) of a set that covers the
directions. For an angular resolution of about 2/D, the far corners are the
pixels near a circle of radius D. For D = 5 in the first quadrant they are
(5,1), (5,2), (4,3), (3,4), (2,5) and (1,5), and they are mirrored to negative
Mx for the other half-plane. A corner with negative Mx steps in +X, which is
`R <= LEFT ± A`. Negative My steps in +Y, which is `R <= DOWN ± A`. Only the
4 × 3 walk is given in full by the source design. For the other areas this
design uses a general rule:

* Let f(x, y) = My·x − Mx·y. It is zero on the line, positive on the side
  that is added, and negative on the side that is subtracted.
* Each step goes to whichever of the two candidate pixels has the smaller
  |f|. On a tie it steps in X.
* Pixels with f = 0 are skipped. They cost a plain `R <= RIGHT`-style move.

For the 4 × 3 area this rule gives exactly the walk above. Each area costs
|Mx| + |My| + 1 instructions, so the 12 areas of the D = 5 set cost 92. That
count does not depend on the image size.

**Marking each pixel with its best line.** Every pixel should end up with its
best line-segment value and the area that produced it. The second
addressable register (context 1, see *Context switch*) holds this mark as
|value| · 16 + area index. After each walk the messenger is still in R, and
nine bus cycles fold it in:

1. `R <= ABS R`.
2. Four times `R <= R + R`, which multiplies R by 16.
3. `R <= R + DATA`, with the area index as the operand.
4. Switch `CTX` to 1, run `A <= MAX(A, R)` unsigned, then switch `CTX` back to 0.

The image in context 0 is never touched. Four index bits allow 16 areas.
A magnitude of up to 2^12 fits in a 16-bit word.

## The CPM family and what is built

The architecture is a family, ordered by PE complexity:

* **Content movable memory:** move-only PEs and increment-1 activation.
* **Content searchable memory:** adds match and S.
* **Content value-comparable memory:** adds ordering compares and max/min.
* **Content computable memory:** adds add/subtract.

By default this RTL builds the last and largest member, which contains the
others. The `MEMBER` parameter (`cpm_pkg::member_e`) builds a smaller one.
The PE then lacks the operations above its level, which execute as no-ops
(`cpm_pkg::op_supported`). For `CMM` the controller also keeps `INCR` at 1 and
reports no matches: the movable memory has only increment-1 activation and no
priority encoder. Synthesis removes the logic an unused operation would need.
Which operations count as "value comparison" and which as "arithmetic" is
this implementation's reading of the member descriptions.

## Departures and choices

* **Neighbour reads.** The architecture's connectivity rule lets a PE read
  only its neighbours' R. Some algorithm descriptions read the left PE's A
  directly. Here the rule is kept, and such algorithms start with `R <= A`,
  which costs one more instruction.
* **Chosen here, not specified by the source.** The instruction set, the
  encoding, the register map, the bus protocol, W = 16, 8 × 8 PEs, the
  lowest-address-first priority, and the zero reset of every register.
* **Storage cells.** The architecture proposes building A and R from DRAM
  cells and refreshing them through R. Here they are flip-flops. The refresh
  pair `R <= A`, `A <= R` still exists as instructions.
* **Context switch.** The source offers several addressable registers per PE
  only as an option. The count of 2 and the single global `CTX` selection are
  choices made here.
* **Not built.**
  * Six-neighbour 3-D meshes.
  * DRAM cells, repeaters for the activation lines, and a host CPU. These
    are physical parts or outside parts.
  * Controller extras for histograms: memories and an ALU in the controller.
* **Scale.** The size estimates for a physical device (1 GB) are far beyond
  simulated RTL. The default is 1024 bits of PE storage.

## Simulating

Each block has a self-checking testbench in `tb/` that ends by printing
`TB_RESULT checks=N failures=M`. `tb_cpm_top` runs every recipe above on the
default-size device and counts how often each mechanism ran. It fails any
mechanism that never ran and any cycle count that differs from the figures
above. To run it with Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/cpm_pkg.sv \
    tb/tb_cpm_top.sv --top-module tb_cpm_top -Mdir obj_top
obj_top/Vtb_cpm_top
```

Replace `tb_cpm_top` with `tb_processing_element`, `tb_pe_array`,
`tb_cpm_controller`, `tb_array_decoder`, `tb_priority_encoder` or
`tb_parallel_counter` to test one block. `tb_cpm_family` runs a CMM, a CSM and a
CVM side by side and checks that each executes exactly its level's
operations. Every run takes well under a second.

To change the size, override `ROWS`, `COLS`, `W` and `ABUS_W` on `cpm_top`.
`ABUS_W` must be at least 17, so that the instruction word and the two
space-select bits fit. It must also exceed log2(N), so that every PE has a RAM
address. `W` must exceed log2(N) so that `MATCH` can report an index. The
controller stops elaboration with an error when either rule is broken.
