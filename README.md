# Carry-complement adder and a column-counting multiplier

Adding two binary numbers is slow because a carry may have to travel the whole
width. This design removes the travel. It first adds every bit pair on its own
(a half adder per place). It then adds all the resulting carries at once,
using a triangle of wide AND gates. Each gate detects one carry running into a
string of 1s that ends at a 0, and complements that string. The carries never
get in each other's way, so one pass suffices. An N-bit addition takes two
clock ticks, whatever N is, at the cost of N(N+1)/2 such gates.

The same adder is the last step of a 64 x 64 multiplier. The 64 partial
products are first reduced to two numbers. Two stages count the 1s in every
bit column ("quantizers"). One 3-to-2 carry-save stage follows. A 128-bit
addition then ends the multiplication. A product comes out every cycle, eight
cycles after its operands.

The construction follows D. M. Krishna and D. Ravi, "Fast Parallel Integer
Adder in Binary Representation". The register placement, handshake and the
other details listed in section 6 are this implementation's own.

## 1. The SC_AND adder (`sc_and_adder`)

### Tick 1: half adders

For each place i = 0..N-1:

    s_i = a_i XOR b_i        c_i = a_i AND b_i        s_N = 0

The sum a + b now equals s + 2c. What is left is to add each carry c_i one
place above i, at place i+1.

### Tick 2: adding all carries at once

Adding 1 at place i+1 of s flips a run of bits. The 1s at places i+1, i+2, …
turn into 0s, and the first 0 above i, at some place j, turns into a 1. In
other words, bits i+1..j are complemented. For every pair i < j <= N, the
design has one gate:

    SC_AND(i, j) = c_i AND s_{i+1} AND ... AND s_{j-1} AND NOT s_j

It is true exactly when carry i exists and place j is where its run stops. A
true SC_AND(i, j) complements places i+1..j. Place N always holds 0, so every
carry finds exactly one stopping place j <= N.

Why one pass is enough: a place that produces a carry (c = 1) has s = 0,
because a single bit pair cannot give both a sum and a carry. So the run that
starts above carry i always stops at or below the next carry's place. The
places complemented for different carries never overlap, and no complemented
run creates a new carry. After the complement, s_N..s_0 is the sum, and s_N
is the carry out.

Example (N = 8):

    a        = 0110 1011
    b        = 0011 0110
    s = a^b  = 0101 1101     (s_8 = 0)
    c = a&b  = 0010 0010     carries at places 1 and 5
    carry 1: s_2 = 1, s_3 = 1, s_4 = 1, s_5 = 0  -> SC_AND(1,5): flip places 2..5
    carry 5: s_6 = 1, s_7 = 0                     -> SC_AND(5,7): flip places 6..7
    result   = 1010 0001, carry 0                 (107 + 54 = 161)

The example also shows that carry 1's run stops exactly at place 5, where the
next carry sits. This is the non-overlap rule.

### RTL structure

`rtl/sc_and_adder.sv` builds the gate triangle with generate loops, one row
per carry:

- `run[i][j]` is c_i AND s_{i+1..j}.
- `sc[i][j]` is SC_AND(i, j).
- `span[i][m]` is the OR of `sc[i][j]` over j >= m: the places flipped for
  carry i.
- `flip` is the OR of all rows, and the result is `{0, s} ^ flip`.

Two assertions check the argument above at run time:

- Each carry enables exactly one SC_AND.
- No place is claimed by two carries.

The registers sit after the half adders and after the complement stage. The
latency is therefore 2 cycles, and a new operand pair can enter every cycle.

Cost: the triangle has N(N+1)/2 SC_AND gates (2080 for N = 64). Gate
SC_AND(0, N) has N+1 inputs. A clock tick must therefore cover an N-input
AND, which synthesis builds as a tree of depth log N, plus an OR of up to N
terms. "Two ticks" counts register stages. It does not claim a gate delay
independent of N.

## 2. Adding or subtracting 2^i in one tick (`pow2_incrementer`)

This is the same complement-a-run idea for a single carry at an arbitrary
place. To add 2^pos, the unit finds the least place j >= pos whose bit is 0
and complements bits pos..j. A chain of AND gates, one per place, marks
"all bits from pos up to here are 1". To subtract, the same chain looks for
the first 1 instead (`dec = 1`). If the run reaches the top, bits pos..N-1 are
all complemented and `carry` reports the overflow or borrow. With `en = 0`
the word passes unchanged, so the unit also adds a single carry bit.

Latency is 1 cycle. Uses include two's complement negation, address and
pointer steps, and adding a very sparse number one 1-bit at a time.

## 3. Two N-bit adders make a 2N-bit adder in three ticks (`wide_adder`)

The two N-bit halves are added at the same time by two `sc_and_adder`s. In
the third tick, a `pow2_incrementer` (pos = 0) adds the low half's carry to
the high half's sum, while the low half waits one register.

If the high adder itself produced a carry, its sum is at most 2^N − 2. Adding
one more then cannot carry again, so the final carry is the OR of the two
carry sources (an assertion checks that both are never 1).

Cost for 128 bits: 2 × 2080 SC_AND gates plus 64 incrementer gates.

## 4. The multiplier (`fpa_multiplier`)

### Partial products

`partial_products` forms row i = (a AND b_i) << i, for i = 0..63. This gives
64 rows of 128 bits arranged as a staircase.

### Consolidation by counting columns

A column of m bits of equal weight 2^p can be replaced by the binary count of
its 1s, a number of only clog2(m+1) bits. Bit q of that count carries weight
2^(p+q). A stage puts one counter (a *quantizer*) under every column, and
writes bit q of the count of column p at place p+q of output row q. This
turns m rows into clog2(m+1) rows, again shaped as a staircase, with the same
sum.

| tick | stage                         | rows in → out | circuit per column                     |
|------|-------------------------------|---------------|----------------------------------------|
| 1-2  | `quantizer_stage` #1          | 64 → 7        | 63-bit to 6-bit quantizer; row 63 is left out and delayed |
| 3-4  | `quantizer_stage` #2          | 7 → 3         | 7-bit to 3-bit quantizer               |
| 5    | `csa_stage`                   | 3 → 2         | 3-bit to 2-bit table (full adder)      |
| 6-8  | `wide_adder`                  | 2 → product   | two 64-bit SC_AND adders + increment   |

Row 63 is left out of the first stage so that 63 rows give a 6-bit count. A
count of 64 would need 7 bits, and 8 rows after the stage instead of 7.

The stages keep the sum modulo 2^128. The product of two 64-bit numbers is
below 2^128, and every dropped bit has weight 2^128 or more. No 1 is ever
actually dropped, and the final adder never carries out (the end-to-end
testbench checks this).

For other N (8, 16, 32), the same rule applies: the first stage counts N−1
rows and leaves one out, and the second stage counts everything. An
elaboration-time check rejects an N for which stage 2 would not end with
exactly three rows.

### Inside a quantizer (`quantizer`)

A quantizer turns the level of a column, its number of 1s, into a binary
count:

1. **Tick 1.** A comparator ladder tests the level against every threshold
   t. The level lies in interval t when it reaches threshold t but not t+1.
   The AND of those two adjacent comparisons gives a one-hot interval line,
   which is latched. This register plays the part of the switching circuit.
2. **Tick 2.** The active line selects one word of an (m+1)-entry memory,
   whose entry t holds t in binary, and the word is latched as the count.
   The 63-input quantizer holds 64 six-bit entries.

In the original concept, the level is an analog quantity: the bits' voltages
are summed in series, or their currents in parallel, into one node. The
comparators then measure that node. Here the level is a plain digital count
of the column's 1s. Everything after the level (the comparator ladder, the
adjacent-level interval test, the latched selection and the code memory)
keeps the two-tick structure.

### The 3-to-2 stage (`csa_stage`, `consolidator_3to2`)

Each column's three bits address an 8-entry, 2-bit table holding the number
of 1s (the full-adder truth table). The low bit stays in place and the high
bit moves one place left. There are 128 tables, and the stage takes one tick.

## 5. Interfaces and timing

All sequential blocks share one convention:

- Operands are sampled with `in_valid` at a rising edge.
- Results appear with `out_valid` a fixed number of edges later.
- There is no back-pressure, and a new operation may enter every cycle.
- `rst_n` is synchronous and active low, and clears only the valid bits;
  data registers are not reset.

| module              | default size                 | latency | result ports                         |
|---------------------|------------------------------|---------|--------------------------------------|
| `sc_and_adder`      | N = 64                       | 2       | `sum[N-1:0]`, `carry`                |
| `pow2_incrementer`  | N = 64                       | 1       | `y[N-1:0]`, `carry` (overflow/borrow)|
| `wide_adder`        | N = 64 (128-bit operands)    | 3       | `sum[2N-1:0]`, `carry`, `low_carry`  |
| `quantizer`         | M = 63 inputs                | 2       | `count[clog2(M+1)-1:0]` (no valid)   |
| `quantizer_stage`   | 64 rows (63 counted), 128 b  | 2       | `rows_out[7]`                        |
| `csa_stage`         | 128 bits                     | 1       | `rows_out[2]` (sum row, carry row)   |
| `consolidator_3to2` | —                            | comb.   | `y[1:0]`                             |
| `partial_products`  | N = 64                       | comb.   | `rows[N]` of 2N bits                 |
| `fpa_multiplier`    | N = 64                       | 8       | `product[2N-1:0]`                    |

`fpa_pkg` holds the default width and `count_width(m) = clog2(m+1)`.

Size after generic (coarse, word-level) synthesis at the defaults: the SC_AND
adder is about 6,200 cells and 195 flip-flops. The 128-bit adder is about
12,400 cells and 520 flip-flops. The whole multiplier is about 101,000 cells
and 10,700 flip-flops, most of them in the two rows of 128 quantizers.

## 6. Where this RTL departs from the concept, or fills gaps

**Filled gaps.** These are this design's own choices:

- where the registers sit in each stage;
- the valid bits and the reset;
- the decrement rule, enable input and carry/borrow output of
  `pow2_incrementer`;
- the delay that keeps the left-out row aligned;
- truncation modulo 2^(2N);
- unsigned operands.

**The quantizers' analog front end** (series voltages, current summing,
ground resistor, reference levels) is replaced by a digital count of 1s. Its
size, speed and noise behaviour therefore do not carry over.

**Not included:**

- A cascade adder that merges blocks pairwise in log2 N ticks, with
  N·log2(N)/2 − 1 gates. It is the stepping stone to the SC_AND adder.
- An area-saving two-level (√N blocks) variant of the 2N-bit adder, about
  1000 gates instead of 2144 for 128 bits, at the same three ticks.
- A multiplier that uses only 3-to-2 stages (10 ticks of consolidation),
  which serves as the point of comparison.

## 7. Verification

Every block has a self-checking testbench in `tb/`. Each one:

- computes its expected values with the simulator's own arithmetic (`+`,
  `*`, `$countones`);
- checks the exact latency;
- has a watchdog;
- ends by printing `TB_RESULT checks=<n> failures=<n>`.

| testbench               | what it covers                                                        |
|-------------------------|-----------------------------------------------------------------------|
| `tb_sc_and_adder`       | longest carry runs, all single-carry positions, 3000 random pairs with gaps |
| `tb_pow2_incrementer`   | 4000 random words and pos values, increment/decrement, carry, borrow, pass-through |
| `tb_wide_adder`         | carry across halves, carry from the high adder, carry from the increment |
| `tb_partial_products`   | each row and the row sum against a*b                                  |
| `tb_quantizer`          | 63- and 7-input quantizers, every count value reached                 |
| `tb_quantizer_stage`    | 64→7 and 7→3 stages: count-bit placement, left-out row, row sums      |
| `tb_consolidator_3to2`  | all 8 inputs                                                          |
| `tb_csa_stage`          | XOR/majority rows and the row sum                                     |
| `tb_fpa_multiplier`     | about 1,850 products at full size (64 × 64)                           |

`tb_fpa_multiplier` also covers idle cycles, back-to-back products and a
reset that flushes products in flight. It counts each mechanism used: the
left-out row, the top count bits of both quantizer stages, the carry between
the adder halves, back-to-back products and the reset flush. It fails if any
of them never happened.

Running a testbench with plain Verilator, from the directory holding `rtl/`
and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/fpa_pkg.sv tb/tb_fpa_multiplier.sv --top-module tb_fpa_multiplier
    ./obj_dir/Vtb_fpa_multiplier

To change the size, edit the parameter defaults, or set `N` on
`fpa_multiplier` (8, 16, 32 or 64) and the matching `N` in the testbench.
