# AIDA: a fully connected DNN layer computed inside a CAM

AIDA evaluates one fully connected layer, `C = f(W x B)`, without moving the
weights out of memory. Every nonzero weight sits in its own row of a
content-addressable memory (CAM). That row also holds the activation the weight
must be multiplied by, the product, and a few bookkeeping bits. A row with its
bits is a *processing unit* (PU). The CAM has no adders or multipliers. It can
do only three things, and each acts on all rows at once:

* **compare**: match selected bit-columns of every row against a key, and latch
  the result of each row in that row's TAG flip-flop;
* **write**: write a key into selected bit-columns of every tagged row;
* **move**: shift the whole TAG vector up or down by 1 or by 16 rows.

Any Boolean function of a few bit-columns can be computed with these
operations. For every input combination of its truth table that changes the
output, compare for that combination, then write the output bits into the
matching rows. This method is called *perfect induction*. It takes one cycle
per table entry, and that cost is the same for 16 rows or 4 million rows. A
16x16-bit multiplication done bit by bit this way takes about 4000 cycles,
but it runs in every row in the same cycles. The design gains from
parallelism across rows, not from speed within a row.

This repository holds synthesizable SystemVerilog for the accelerator: the
CAM array, the key registers, the TAG logic with its move network, and the
controller that runs the layer algorithm. It also holds self-checking
testbenches for each block and for the whole design.

## Row layout

One CAM row at the default sizes is 124 bits. Column 0 is the least
significant bit of the row word:

| field   | bits | width | content |
|---------|------|-------|---------|
| T_AND   | 0    | 1     | temporary: AND of one weight bit and one activation bit |
| T_CARRY | 1    | 1     | temporary: carry of the bit-serial adder |
| FLAG    | 2-3  | 2     | row flag: bit 2 = first element of its matrix row, bit 3 = last |
| CI      | 4-17 | CIW=14 | column index of the weight |
| RI      | 18-31 | RIW=14 | position of the weight within its matrix row (0, 1, 2, ...) |
| W       | 32-47 | M=16 | weight, two's complement |
| B       | 48-79 | K=32 | activation (low N=16 bits), later the incoming partial sum |
| OI      | 80-91 | OIW=12 | output index of the matrix row (only read in the first element) |
| C       | 92-123 | K=32 | product, then partial sum, then the output activation |

The weights are stored in *associative CSR* form. The value and column index
are those of ordinary compressed-sparse-row storage. The row-pointer array is
replaced by the 2-bit flag stored in each row:

| flag | meaning |
|------|---------|
| 01   | first nonzero of a matrix row |
| 00   | a middle nonzero |
| 10   | last nonzero |
| 11   | the only nonzero of its matrix row (also: reduction of this row finished) |

The elements of one matrix row go in consecutive CAM rows, in any column
order. Each element's RI is its position in the group. CAM rows not used by
the matrix must hold all zeros. In particular they need RI = 0 and flag 00,
so that they never send data during the reduction.

## How a layer runs

`fc_controller` issues one CAM operation per cycle. An operation can be a
compare, a write, a compare and a write together, or a move. Operations go
through the key registers, so each one reaches the array one cycle after it
is issued. A truth table of E entries takes E+1 cycles. Entry k is compared
in the same cycle as entry k-1 is written. This overlap is safe because the
tables are ordered so that a row rewritten by one entry never matches a
later one.

**1. Clear** (2 cycles). An empty compare matches all rows. B, C and the two
temporary bits are then written to 0.

**2. Activation broadcast** (one cycle per activation, plus 1). Only the
nonzero input activations are streamed in. For each one, the controller
compares `CI == index` and, in the next cycle, writes the value into B of
every matching row. One activation therefore reaches every weight that needs
it in a single cycle. Rows whose activation is zero keep B = 0.

**3. Multiplication** (3953 cycles at the defaults). This is shift-and-add
over the bits j of B, in every row at once. For each output bit i+j < K:

* `T_AND = W[i] & B[j]`, with the 4-entry AND table, and
* `{T_CARRY, C[i+j]} = T_CARRY + C[i+j] + T_AND`, with the 4 entries of the
  full-adder table that change a row. These are, as (carry, C, T) -> (carry,
  C): 011->10, then 001->01, then 100->01, then 110->10.

The carry is cleared before each j. W is sign-extended by reusing W[M-1] above
bit M-1. The sign bit of B has negative weight. For it the table writes
`T = ~W & B[j]`, and the carry starts at B[j], which subtracts `W * 2^j`. C
ends up holding `W * B` modulo 2^K. The phase takes
`sum over j of (2 + [j = N-1] + 10 (K - j))` cycles.

**4. Soft reduction**, a binary-tree sum inside each matrix row. This is the
hardest part of the design. Level L pairs a *receiver* at position p with
the *sender* 2^L rows below it. Senders are the rows whose RI has bit L set
and all lower bits clear. A single masked compare on the RI field finds them.
A sender can never pair with a row of another matrix row: if p + 2^L is a
sender, then p lies in the same matrix row by construction. One level:

1. Clear B and the carry in all rows (2 cycles).
2. For each bit b of C (K times):
   * compare `sender AND C[b] = 1`;
   * move the tags up by 2^L (floor(2^L/16) long moves, then 2^L mod 16 short
     moves);
   * write `B[b] = 1` into the tagged rows, which are now the receivers.
   This takes 2 + moves cycles per bit.
3. Move the flag's *last* bit the same way, writing 1 into the receiver's
   flag bit 3. A first element that receives its row's last element becomes
   `11`.
4. `C = C + B` in all rows (5 cycles per bit). Every row that did not receive
   anything adds 0.
5. Compare `flag == 01`. If any row still matches, a matrix row has not
   collected its last element yet, and the next level runs (3 cycles,
   because the if_match line is read two cycles after the compare).

After `ceil(log2(longest matrix row))` levels (at least one), the first
element of each matrix row holds the dot product. A level costs
`2 + (K + 1)(2 + moves_L) + 5K + 3` cycles.

**5. RELU** (2 cycles, when `act_en` = 1). Compare `C[K-1] = 1`, then write
C = 0.

Total layer time, from the first cycle after `start` to `done` inclusive:
`2 + S + 1 + T_mult + sum over levels + 2*act_en + 1`. Here S is the number of
cycles spent in the broadcast state, equal to the number of activations when
the stream has no gaps. With about 3450 weights, 2000 nonzero activations and
matrix rows of up to 96 elements, a layer takes 8300 cycles at the defaults.

## Hardware blocks

| file | block |
|------|-------|
| `rtl/aida_top.sv` | top level: wires the four blocks, host ports |
| `rtl/fc_controller.sv` | the controller and its layer microprogram |
| `rtl/key_registers.sv` | COMPARE KEY, WRITE KEY and MASK registers, plus the operation bits |
| `rtl/cam_array.sv` | the CAM, stored and coded by bit-column |
| `rtl/tag_logic.sv` | TAG flip-flops, move network (+-1, +-16), if_match |
| `rtl/aida_pkg.sv` | row-flag codes and the AND / full-adder truth tables |
| `rtl/aida_layout.svh` | macro declaring the field positions of a row |

In `cam_array`, a compare computes, for every row, the AND of
`key[b] ? bitcol[b] : ~bitcol[b]` over the compared columns. An all-masked
compare therefore matches every row. A read returns the AND of all tagged
rows, as precharged bit-lines would. With exactly one row tagged, that is the
row itself.

## Using the design

1. Hold `rst_n` low for a cycle.
2. Load all `ROWS` rows through `ld_en`, `ld_addr` and `ld_data`, in the
   layout above. Leave B and C at any value, and write unused rows as zeros.
3. Pulse `start` with `act_en` set as wanted.
4. Stream the nonzero activations with `b_valid` / `b_ready`, setting `b_last`
   on the final one. The stream must hold at least one element, and `b_ready`
   is high only during the broadcast.
5. Wait for the one-cycle `done`.
6. For each output j, pulse `rd_req` with `rd_index = j`. Three cycles later
   `rd_valid` is high, with `rd_value` (K bits, two's complement) and
   `rd_hit`. `rd_hit = 0` means no weight belongs to that output, which is
   then 0.

`level_overflow` is set if the reduction stops at the depth limit of the RI
field. That cannot happen while every matrix row is shorter than 2^RIW.

To run a layer whose inputs come from a previous layer, read the outputs and
stream them back in. The controller does not yet move them internally.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `M`, `N` (weight, activation bits) | 16, 16 | the 16/16-bit quantisation of the design point |
| `LONG_STEP` | 16 | the long tag move of the design |
| `K` (output bits) | 32 | chosen: holds a full 16x16 product; sums wrap modulo 2^K |
| `CIW` | 14 | chosen: enough for 9216-input layers |
| `OIW` | 12 | chosen: enough for 4096-output layers |
| `RIW` | 14 | chosen: matrix rows of up to 16384 nonzeros |
| `ROWS` | 4096 | chosen: the CAM depth equals the number of nonzero weights to hold |

The benchmark layers of the original design point (AlexNet's FC layers and a
3-layer, 421-unit LSTM) need on the order of 10^5 to 10^6 rows after pruning.
They do not fit in 4096 rows, but `ROWS` is a free parameter. The arrays grow
linearly with it: one bit-column is `ROWS` bits wide. The controller does not
depend on `ROWS` at all.

For scale, here are three tiles that fill the default array, each with half
of its activations zero:

| tile | outputs | nonzero weights | cycles |
|------|---------|-----------------|--------|
| AlexNet FC6 | 4 | 3316 | 13,466 |
| AlexNet FC7 | 11 | 4048 | 9,566 |
| AlexNet FC8 | 4 | 4096 | 10,838 |

Three stages share the time. The broadcast takes one cycle per nonzero activation,
which is 4623 for the FC6 tile. The multiplication takes 3953 cycles. The
reduction of the 829-element FC6 rows takes ten levels and 4884 cycles, so
it costs as much as the multiplication. It is the stage that grows with the
length of the matrix rows.

## Departures and gaps

The architecture, the row layout, the flag codes, the truth tables and their
order, the four stages, and the long move of 16 all follow the AIDA paper
(L. Yavits, R. Kaplan, R. Ginosar, "AIDA: Associative DNN Inference
Accelerator"). The paper describes the algorithm in pseudo-code and gives no
register-transfer detail. The following are this implementation's own
choices.

* **The RI field.** The algorithm needs each row to know whether it is an
  "odd" or an "even" partial result within its matrix row. Here the host
  stores that information, as RI.
* **Clearing B before each reduction level.** The move step only writes ones,
  so B must start at zero.
* **Ending the reduction.** It stops when no flag `01` is left, meaning every
  first element has received its row's last element. This follows the
  paper's prose. Its pseudo-code tests for `10` instead, which does not work
  as a stop test: last elements keep their `10` after sending.
* **Flag `11`.** The paper's map figure lists `11` as reserved, but its
  algorithm uses it for single-element rows. The algorithm's meaning is used
  here.
* **Two's-complement arithmetic** for W and B, as described in step 3.
* **Separate compare and write masks**, so one cycle can compare some columns
  and write others.
* **Host-side ports**: the row-addressed load port, the activation stream, and
  the read by output index.

Not built:

* Broadcasting from the C field of a previous layer inside the same array,
  because the placement of a second layer's weights is not defined.
* Sigmoid and tanh. Only RELU, or no activation function, is available.
* The faster bit-parallel multiplication by table lookup for networks with
  few distinct weight values.
* The split calculation/buffer array that would overlap broadcast with
  computation.

The CAM cell itself (a 10-transistor NOR cell with a wired XOR onto the match
line) appears only as its logic behaviour inside `cam_array`.

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares the
block's outputs with values computed independently in the testbench, and
prints `TB_RESULT checks=<n> failures=<n>`.

| testbench | what it checks |
|-----------|----------------|
| `tb_cam_array` | random loads, masked compares and tagged writes against an array model; match lines, reads, final contents |
| `tb_key_registers` | one-cycle delay of every operation, keys held between uses, reset |
| `tb_tag_logic` | random compares and moves (both directions, both step sizes) against a bit model |
| `tb_fc_controller` | the controller against a behavioural CAM in the testbench: a complete layer checked against integer dot products, the exact cycle count, read latency, long moves |
| `tb_aida_top` | three layers at reduced sizes, with RELU on and off, empty and single-element matrix rows, rows longer than 16, negative activations, gaps in the stream. Counts each mechanism and fails if one never happens |
| `tb_aida_full` | one layer at the default sizes: 4096 rows, about 3450 nonzero weights, 120 outputs, 2000 nonzero activations, all outputs and the cycle count checked |
| `tb_aida_alexnet` | default sizes, tiles of AlexNet's compressed FC6, FC7 and FC8 (as many whole output rows as fit in 4096 rows, at 9%, 9% and 25% weight density); up to ten reduction levels |

Run one with Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_aida_full \
    rtl/aida_pkg.sv tb/tb_aida_full.sv -o sim && obj_dir/sim
```

Each testbench runs in about a second.
