# Universal address sequence generator (UASG) for memory BIST

A march test reads and writes every cell of a memory in some address order.
One run does not care which order it uses. Multi-run testing does: each run
should use a different order (shifted, reversed, bit-inverted, or a different
kind of order altogether) so that it catches coupling and pattern-sensitive
faults the previous runs missed. Address generators for memory built-in
self-test are usually a counter plus multiplexers that can produce a handful
of fixed orders. This generator can produce any order that is a linear image
of the Gray code, with one XOR per address. Which order it produces is chosen
by loading an m x m bit matrix.

This RTL implements the generator described in *Universal Address Sequence
Generator for Memory Built-in Self-test* (I. Mrozek, N. A. Shevchenko and
V. N. Yarmolik, 2022). The structure and the arithmetic are
the paper's. The interface details, reset behaviour and sequence markers are
choices made for this implementation, and are listed in
[Where this RTL departs from or adds to the paper](#where-this-rtl-departs-from-or-adds-to-the-paper).

## The recurrence

Addresses are m-bit vectors. A *generation matrix* V holds m *direction
numbers* v_1 .. v_m, each an m-bit vector. The generator computes

    A(0) = A
    A(n) = A(n-1) xor v_i,    i = T_m(B + n)

Here T_m(k) is the index of the bit that flips when the reflected Gray code
goes from k-1 to k. That is the position of the lowest set bit of k, counted
from 1, and it is m when k wraps to 0. For m = 4 and B = 0 the indices are
4,1,2,1,3,1,2,1,4,1,2,1,3,1,2,1. The first entry is the wrap step that closes
the cycle.

Every step flips one Gray-code bit, so the address is always the XOR of the
direction numbers whose Gray-code bits are set:

    A(n) = A xor G(B + n) xor G(B),   G(x) = XOR of v_i over the set bits i of gray(x)

This closed form explains all the properties below, and the testbenches use
it as their reference model.

* **Every address once.** If V has full rank over GF(2), x -> G(x) is a
  bijection, so one period of 2^m clocks visits every address exactly once.
  If V has rank r < m, only 2^r addresses occur, each 2^(m-r) times. The
  hardware does not check the rank.
* **Bit inversion (constant A).** A nonzero A(0) XORs the same mask into
  every address. The order is kept, and the bits set in A are inverted.
* **Shift (constant B).** Starting the counter at B = l and the adder at the
  unshifted sequence's A(l) gives the same sequence rotated by l positions.
* **Reverse order.** T_m(k) = T_m(-k), so running the Gray code backwards
  selects the same vectors in reverse order. Starting at the last address of
  the forward sequence, with the counter at 2^m - B, produces the forward
  sequence backwards. For B = 0 the counter setting is just 0 again. The
  paper states the rule with an unchanged counter start; that is only correct
  when B = 0.
* **Relation to the non-recursive form.** The same sequence comes from
  A(n) = XOR of v*_i over the set bits of the binary count, with
  v*_1 = v_1 and v*_i = v_(i-1) xor v_i. The recursive form needs one XOR
  per address instead of up to m.

### Choosing V

Rows are written v_1 first, as m-bit numbers with the leftmost bit as the
most significant address bit. Examples for m = 4 (constants A = B = 0 unless
noted):

| order | v_1 v_2 v_3 v_4 | first addresses |
|---|---|---|
| linear (counter) | 0001 0011 0111 1111 | 0000 0001 0010 0011 ... |
| 2^j, j = 2 (step 4) | 0100 1100 1101 1111 | 0000 0100 1000 1100 0001 ... |
| address complement | 1111 1110 1100 1000 | 0000 1111 0001 1110 0010 ... |
| limited (maximal) switching | 1111 1110 1101 1011 | 0000 1111 0001 1110 0011 ... |
| Gray code | 0001 0010 0100 1000 | 0000 0001 0011 0010 0110 ... |
| van der Corput, A = 1000 | 1000 1100 1110 1111 | 1000 0000 1100 0100 1010 ... |
| arbitrary example | 1011 1000 0101 1111 | 0000 1011 0011 1000 1101 ... |

The general rules behind these are:

* Linear: ones on and below the anti-diagonal.
* 2^j: a column permutation of the linear matrix that puts its all-ones
  column at position m-j.
* Complement: ones on and above the anti-diagonal.
* Limited switching: an all-ones column plus m-1 distinct columns whose rows,
  apart from the first, each contain a 0.
* Gray code: one 1 per row, in distinct columns. Any column permutation
  works, which gives m! variants.
* Quasi-random (Sobol-type): lower triangular with a unit diagonal. All ones
  gives van der Corput.

The m = 8 matrices exercised by the default-size testbench are, v_1 first:

| name | v_1 .. v_8 |
|---|---|
| Sobol, minimal Hamming distance | 10000000 01000000 00100000 00010000 00001000 00000100 00000010 00000001 |
| Sobol, maximal Hamming distance | 10000000 11000000 11100000 11110000 11111000 11111100 11111110 11111111 |
| Gray code 1 | 00000001 00000010 ... 10000000 |
| Gray code 2 | 11111111 11111110 11111100 ... 10000000 |
| Gray code 3 | 11111110 11111101 11111011 ... 01111111 |
| counter 1 | 11111111 00000011 00000101 00001001 00010001 00100001 01000001 10000001 |
| counter 2 (linear) | 00000001 00000011 00000111 ... 11111111 |

"Counter 1", as listed here, has rank 7: the XOR of its last seven rows equals
its first row. It therefore produces 128 distinct addresses, each twice per
period. Take it as an example of what a rank-deficient matrix does, not as a
usable order.

## Hardware

Three blocks form a chain, and each step of the recurrence costs one clock:

    b_init --> [ SSG: up-counter -> Gray code -> transition detector ] --one-hot sel--> 
           --> [ memory unit: m cells of m bits, read by sel ]        --v_i-->
           --> [ XOR adder: A <= A xor v_i ]                          --> result = A(n)

| module | role | cost at width m |
|---|---|---|
| `uasg_up_counter` | m-bit counter, synchronous load of B and +1 | m flip-flops |
| `uasg_gray_counter` | counter plus m-1 XOR gates, g_m = b_m, g_i = b_(i+1) xor b_i | m-1 XOR |
| `uasg_transition_gen` | m flip-flops keep the previous Gray code; m XOR gates compare it with the current one; the single differing bit is the one-hot select | m flip-flops, m XOR |
| `uasg_ssg` | switching sequence generator: the two blocks above | |
| `uasg_memory_unit` | register file for V; one-hot AND-OR read, indexed write | m*m bits |
| `uasg_xor_adder` | m flip-flops and m XOR gates; synchronous reset (A = 0) and set (A = a_init) | m flip-flops, m XOR |
| `uasg` | top: the chain, start/fill/run sequencing, count and marker outputs | |
| `uasg_pkg` | default width `UASG_M = 8` and the marker struct `uasg_sync_t` | |

The core (SSG, memory and adder) has the paper's cost: 2m flip-flops plus the
m-bit counter, 3m-1 two-input XOR gates, and m*m memory bits. The top adds an
m-bit count register, an m-bit position counter and a 2-bit state for the
output markers. At m = 8, synthesis gives 42 flip-flop bits and 64 memory
bits. The longest path is the counter's carry chain. Behind it come a Gray
XOR, the transition XOR, the AND-OR read of the memory and the adder XOR.
The generator therefore runs about as fast as a plain binary counter of the
same width.

### Interface of `uasg`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock, rising edge |
| `reset` | in | 1 | synchronous; A = 0, B = 0, matrix cleared, generator idle |
| `ce` | in | 1 | clock enable; when low, the counter, adder and markers hold |
| `start` | in | 1 | load A(0) = `a_init`, B(0) = `b_init`, start a sequence |
| `a_init`, `b_init` | in | M | the constants A and B |
| `matrix_load_valid` | in | 1 | write `matrix_load_direction_number` into cell `matrix_load_index` |
| `matrix_load_index` | in | clog2(M) | cell to write; cell 0 holds v_1 |
| `matrix_load_direction_number` | in | M | direction number, leftmost bit = address MSB |
| `result` | out | M | A(n) |
| `result_count` | out | M | the counter value B + n that belongs to A(n) |
| `result_sync` | out | struct | `sequence_valid`, `sequence_begin` (A(0)), `sequence_end` (A(2^m - 1)) |

The only parameter is `M`, the address width (default 8). The worked
examples above run at `M = 4`.

### Timing

    clock edge       1 (start)   2 (fill)   3         4         ...   2^m+1      2^m+2
    result after     A(0)        A(0)       A(1)      A(2)            A(2^m-1)   A(0)
    sequence_valid   0           1          1         1               1          1
    sequence_begin   0           1          0         0               0          1
    sequence_end     0           0          0         0               1          0

(The table counts enabled edges; a cycle with `ce` low does not count.)

On the `start` edge the counter takes B(0). The transition flip-flops take
the Gray code of B(0), and the adder takes A(0). The first enabled edge after
that is a fill edge. The select lines are all zero on it, so the adder keeps
A(0) while the counter moves on to B(0)+1. From then on, every enabled edge
produces the next address: one address per clock, with a latency of two
clocks from `start` to the first valid address. The sequence repeats with
period 2^m until the next `start` or `reset`. The matrix may be rewritten at
any time. A write takes effect for the next vector read from that cell, which
changes the order from that point on.

An assertion in `uasg` checks that exactly one direction number is selected
on every running step. Another, in `uasg_transition_gen`, checks that the
select lines are never more than one-hot.

### Using it for a march test

* Forward run: load V, `start` with A and B. Take `result` on each cycle
  where `sequence_valid` is high and `ce` was high on the previous edge.
  Stop after `sequence_end`.
* Reverse run of the same order: `start` with `a_init` equal to the last
  forward address and `b_init = 2^m - B` (0 when B = 0).
* A different order for the next run: load another V, or change A (inverted
  bits) or B (rotation).

## Where this RTL departs from or adds to the paper

* **Select lines.** They are one-hot, as in the paper's structural diagrams.
  The authors' FPGA build passed a binary index instead and used a block RAM
  for V. Here V is a register array with combinational read, which the paper
  names as the register-type option.
* **Priming of the transition flip-flops.** The paper draws plain D
  flip-flops. Here `start` and `reset` preset them with the Gray code of
  B(0). Without that, the first step after a load would XOR in an arbitrary
  vector. The preset is the reason for the fill cycle.
* **Reset and set of the adder.** They are synchronous, with separate
  `reset` and `set` strobes. The paper mentions the flip-flops' set and reset
  inputs without saying whether they are synchronous.
* **Clock enable, count and markers.** `ce`, `result_count` and the
  `sequence_begin/end/valid` markers follow the signal names of the authors'
  FPGA build. There the count and markers came from outside and were only
  delayed. Here the counter is internal, so the top generates the markers
  itself from a position counter.
* **Memory write port.** It is a binary index plus a data word plus a write
  strobe. Reset clears the matrix; the paper does not discuss either.
* **Reverse order with a shifted start.** This needs `b_init = 2^m - B`; see
  above.
* **Rank check.** The hardware does not check that V has full rank.

## Verification

Each module has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=N failures=F` and stops itself with a watchdog.
`uasg_tb_pkg` holds the reference model: the closed form above, Gray code,
T_m and GF(2) rank.

| testbench | what it checks |
|---|---|
| `tb_uasg_up_counter` | random load/increment against a model; a full 2^8 period |
| `tb_uasg_gray_counter` | the 16 printed Gray codes for m = 4; g = b xor (b >> 1) and one-bit steps at m = 8 |
| `tb_uasg_transition_gen` | the printed switching sequence 4,1,2,1,3,... (m = 4); lowest-set-bit rule (m = 8); preset and pause |
| `tb_uasg_ssg` | switching sequences for B = 0000 and B = 0011 (m = 4); random starts with random pauses at m = 8 |
| `tb_uasg_memory_unit` | random writes and one-hot reads against a shadow array; empty select; reset |
| `tb_uasg_xor_adder` | random reset/set/enable/data against a model |
| `tb_uasg` | default width m = 8, the seven matrices listed above, every address, count and marker against the model. Also closed forms for the linear, Gray and Sobol-min orders, 2^rank distinct addresses per period, inversion by A, shift by B, reverse order (B = 0 and shifted), pauses, wrap, reset during a run, matrix reload. It counts each of these and fails if one never happens. |
| `tb_uasg_wide` | m = 16: random full-rank quasi-random matrix, a whole period of 65536 addresses, each exactly once, then the wrap; m = 32: 20000 addresses with random A and B |
| `tb_uasg_paper_tables` | m = 4: the published example sequences (up, down, bit-inverted, two shifted columns, and the six standard orders of the table above), 187 addresses, one per clock |

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/uasg_pkg.sv tb/uasg_tb_pkg.sv tb/tb_uasg.sv --top-module tb_uasg
    obj_dir/Vtb_uasg

Replace `tb_uasg` with any other testbench name. All of them finish in well
under two seconds.

How far this can be trusted: every sequence the paper prints for m = 4 is
reproduced bit for bit. The m = 8 orders agree with an independent model and,
where known, with their textbook definitions. For each module, a deliberately
broken copy (a wrong increment, OR instead of XOR, a lost write-index bit, and
so on) makes its testbench fail. Not verified: timing or area on a real
technology, and widths above 32 bits, where the reference model stops. The
RTL itself has no width limit.
