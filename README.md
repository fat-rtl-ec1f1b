# FAT: a ternary-weight accelerator built from computing STT-MRAM arrays

Ternary weight networks (TWNs) limit every weight to -1, 0 or +1. A
convolution then needs no multiplications. Each output point is a sum of some
activations minus a sum of others. Many terms also drop out, because in a
trained TWN a large share of the weights are zero.

This RTL describes an accelerator that does those sums inside the memory
that holds the activations. The memory is built from STT-MRAM arrays. Every
column of an array is a lane of a vector adder. Two key ideas keep that adder
fast:

* **Fast addition in the sense amplifier.** Two rows are read together. The
  sense amplifier of each column turns the combined read into AND, OR and
  XOR of the two bits. It forms the sum bit and keeps the carry in a latch.
  An N-bit addition therefore takes N read-compute-write steps, with no extra
  passes for carries.
* **Sparse addition control.** The 2-bit weights sit in registers next to the
  array controller, and they decide which rows take part. Zero weights are
  skipped and cost no time. The sequence is: add the +1 rows, add the -1 rows,
  then subtract the second sum from the first.

The design is parameterised. By default it has 4096 arrays of 512 x 256 bits
(64 MiB), with 32 weight registers per array (128K in all). It also has an
internal result bus with a cross-array adder, and a small digital unit that
applies ReLU and batch normalisation. Its output can be written back into an
array as the next layer's input.

## Structure

```
fat_top
 ├─ cma  x NUM_CMA            computing memory array
 │   ├─ memory_controller     instruction decode, bit-serial engine
 │   │   ├─ op_decoder        SA function -> enables/selectors
 │   │   ├─ sacu              weight registers, sparse dot-product sequencer
 │   │   └─ reduction_unit    bit-serial result -> column / column-group sums
 │   ├─ mrad                  row decoder (two word lines at once)
 │   ├─ mcad                  column decoder (bit-line enables)
 │   ├─ mram_array            behavioural STT-MRAM cell array
 │   └─ sense_amp             per-column comparators, gates, carry latch, selector
 ├─ cma_accumulator           result bus + cross-array adder
 ├─ dpu                       ReLU, batch normalisation, saturation
 └─ ofm_store                 write the output vector back into an array
```

`fat_pkg` holds the shared types, the instruction format and the default
sizes. Each source file starts with a comment that describes its interface
and timing, and says which parts follow the published design and which are
choices made here.

## Data layout: column-major, bit-serial

A value is stored **down a column**, one bit per row, with the LSB in the
lowest row. A row therefore holds bit k of 256 different values. Any
operation on two rows acts on all 256 lanes at once. An 8-bit activation
takes 8 rows of one column.

Two extra word lines sit after the last data row:

* row `ROWS` reads as all zeros;
* row `ROWS+1` reads as all ones.

The controller uses the ones row for NOT (x XOR 1). It uses the zero row
where an operation has only one real operand. These two rows are hard-wired
and cannot be written.

Operands of different widths can be mixed. In step k the controller reads
row `base + min(k, len-1)`, so a short operand repeats its top bit. That is
sign extension, at no cost.

## The sense amplifier

With one or two word lines raised, the current on a column's source line
shows how many of the raised cells hold a 1: none, one or two. Two
comparators read that current. The array model (`mram_array`) abstracts the
current to the two comparator outcomes `sl_ge1` ("at least one 1") and
`sl_ge2` ("two 1s").

From those two outcomes, each column of `sense_amp` forms the following:

| signal | value | how |
|---|---|---|
| OR  | a \| b | first comparator (also READ when one row is raised) |
| AND | a & b | second comparator |
| XOR | a ^ b | NOR of AND and NOR(a,b) |
| SUM | a ^ b ^ c | XOR with the carry latch |
| Cout | (a&b) \| ((a\|b)&c) | uses OR, not XOR, for propagation |

A 4-way selector picks the OUT value: AND = 00, OR = 01, XOR = 10,
SUM = 11. Three enables (`en_read`, `en_and`, `en_or`) switch the comparators
on. `op_decoder` holds the table that maps each function to enables and
selector:

* **READ, OR:** use the OR port.
* **NOT:** XOR with the ones row.
* **NAND:** switch off the OR/READ comparator. Its NOR output then becomes 0,
  so the XOR port gives NOT(AND).
* **ADD:** SUM port, with the carry latch enabled.
* **SUB:** done by the controller as NOT, then ADD with the first carry = 1.

The carry latch has two controls:

* **preset** (`carry_load`/`carry_init`): sets every lane to 0, or to 1;
* **load** (`carry_en`): stores each lane's carry-out.

## Bit-serial engine and instruction set

Each array's `memory_controller` takes one instruction at a time from a
valid/ready port. Instruction fields (`cma_cmd_t`): `cmd`, `op`, `wb`,
`row_a`, `row_b`, `row_d`, `nbits`, `cin`, `col_lo`, `col_hi`, `red_log2`.

| cmd | action | busy cycles |
|---|---|---|
| WRITE | row_d <= wdata on columns col_lo..col_hi | a few |
| READ | OUT <= row_a (port `out_row`) | a few |
| BOOL | OUT <= row_a op row_b; if `wb`, also written to row_d | a few |
| ADD | rows row_d.. <= row_a.. + row_b.. + cin, nbits bits | nbits + 3 |
| SUB | row_d.. <= NOT row_b..; then row_d.. <= row_a.. + row_d.. + 1 | 2·nbits + 3 |
| LOAD_W | SACU weight registers <= 32 ternary weights | a few |
| DOT | sparse ternary dot product in every column | see below |
| READOUT | read the last DOT result through the reduction unit | about PSUM_BITS + 3 |

Every multi-row instruction becomes one or more *vector operations* for a
single engine. A vector operation runs one step per clock cycle. In each step
the engine:

1. raises the two operand rows;
2. lets the SA compute;
3. writes OUT into `base_d + k`.

So one cycle covers the read, the sum and the write of one bit.

Two details keep back-to-back operations packed:

* the carry is preset in the cycle an operation is accepted;
* the next operation is accepted during the last step of the current one.

As a result, a chain of N-bit additions costs N cycles each. The three
cycles of overhead per instruction come from decoding the instruction and
reporting `done`. Timing inside a step (sensing, settling, write pulse) is
not modelled: one step is one clock.

## Sparse dot product (SACU)

This is the least obvious part of the design.

### Layout in the array (combined-stationary mapping)

An array holds MH = 32 activation slots. Slot i spans
`ACT_BITS + PSUM_BITS = 16` rows:

```
row 16*i      .. 16*i+7   activation i   (8 bits, one per lane)
row 16*i+8    .. 16*i+15  interval i     (reserved for running sums)
```

Each lane (column) holds one Img2Col column. For a filter of length
J = C·KH·KW, the host spreads J over J/32 arrays in the same columns. Every
array then computes a 32-term partial dot product in all 256 columns at
once, and the partial sums are added across arrays afterwards.

Running sums go into the interval **after the activation just added**, not
into one fixed row block. This spreads the write wear over half the array,
which matters for STT-MRAM endurance. It also means no extra rows are
needed.

### Sequencer

`LOAD_W` fills 32 two-bit registers. The encoding is {sign, data}:

* +1 = 01
* 0 = 00
* -1 = 11

Binary (±1) networks use the same registers. On `DOT` the sequencer runs
three stages:

1. **+1 stage.** A priority search finds the next register with data = 1 and
   sign = 0. The first such activation is used in place (no copy). Each
   further one is added to the running sum: `interval(i) <= prev + act(i)`.
   The result is P, stored in the interval of the last +1 weight.
2. **-1 stage.** The same search over the -1 weights gives Q, the sum of
   those activations.
3. **Subtract.** `interval(q) <= NOT Q`, then
   `interval(q) <= P + interval(q) + 1`, so the result is P - Q. This is the
   same NOT-then-add-with-carry-1 rule as SUB.

Special cases:

* If there are no +1 weights, P is the zero row.
* If there are no -1 weights, stages 2 and 3 are skipped.
* If all weights are zero, the result points at the zero row.

Zero weights never reach the engine, so they cost no cycles. With p
weights at +1 and n at -1, the engine runs

    V = max(p-1,0) + max(n-1,0) + (n>0 ? 2 : 0)

vector operations of PSUM_BITS steps each. The SACU adds 3 to 7 control
cycles on top. The time depends only on p and n, never on how many weights
are zero. For example, with 80% of the weights zero (about 6 of 32 non-zero)
a DOT takes about 50 cycles. A dense weight set takes about 260.

### Result width

The running sums are PSUM_BITS = 8 bits wide, the same height as one
operand, so they wrap modulo 256. The sum of 32 signed 8-bit activations can
need 13 bits. Exact results therefore need activations small enough, or
weights sparse enough, for the partial sum of one array to stay within
-128..127. PSUM_BITS is a parameter and can be raised. The slot stride grows
with it, so MH·(ACT_BITS+PSUM_BITS) must stay within ROWS (for example,
PSUM_BITS = 13 fits 24 slots in 512 rows).

### Reduction unit

`READOUT` streams the result rows through the SA into `reduction_unit`.
This unit rebuilds each column's signed value and outputs one of:

* the values column by column (`red_log2` = 0);
* sums over groups of 2^`red_log2` adjacent columns, placed in the first
  lanes, with the rest set to zero.

Grouping lets a mapping fold several columns into one output point. The
output width is PSUM_BITS + log2(COLS), so group sums never overflow.

## Between the arrays: result bus, DPU, write-back

`fat_top` connects all arrays to one host instruction bus. An instruction
goes to one array (`h_sel`), or to every array when `h_bcast` is set. The
usual sequence for a layer is:

1. Write the activations into each array (WRITE, one row at a time).
2. Load a filter's weights into each array (LOAD_W).
3. Broadcast DOT and then READOUT.
4. Start the collect port with `c_base` / `c_count`.

The collect port then runs three blocks in turn:

* **`cma_accumulator`** walks the result bus, one array per cycle. It adds
  the arrays' lane results into 32-bit accumulators, then passes them on.
  The accumulated vector is ready `c_count + 2` cycles after the start.
* **`dpu`** applies ReLU (optional) and then batch normalisation, as
  `((x - mean) * scale) >>> shift` saturated to a signed 8-bit activation.
  The host folds 1/sqrt(var + eps) into `scale` and `shift`. The DPU has one
  register stage and no weight quantiser.
* **`ofm_store`**, if `store_en` is set, writes the 256 outputs back into
  array `store_sel`, bit k into row `store_row + k`. It uses the shared
  instruction bus, so the host port is not ready while it runs.

`h_ready` is high when every array and the write-back are idle. `c_busy`
covers accumulation, DPU and write-back. READ and BOOL results of the last
array addressed come out on `rd_row` with `rd_valid`.

The host (instruction issue, Img2Col rearrangement, loop over filters and
tiles) is outside the design. Its signals are the top-level ports.

## Departures from the published design and choices made here

* **The STT-MRAM array is a behavioural model.** Cells are bits, and a read
  reports the two comparator outcomes directly. Currents, reference levels,
  the 45 nm SA circuit and its latency, power and area are not modelled.
* **Reference rows.** Two hard-wired rows hold all zeros and all ones. The
  published design uses a ones row for NOT but does not say where it lives.
* **Partial-sum width.** Running sums are 8 bits and wrap (see
  [Result width](#result-width)). Overflow handling is not specified in the
  source.
* **Instruction set, handshakes and timing.** The instruction encoding, the
  valid/ready handshakes, the one-step-per-cycle timing and the 3-cycle
  instruction overhead are this design's own.
* **Reduction-unit grouping.** Grouping by powers of two is an assumption.
  The source only says that adjacent column sums can be accumulated.
* **Cross-array adder and bus.** The bus protocol and the 32-bit
  accumulators are assumptions.
* **DPU.** The fixed-point BN form is an assumption. The source reuses an
  earlier DPU without describing it.
* **Reset.** All registers use an asynchronous active-low reset. The memory
  cells have none, as in a non-volatile array.

## Verification

Each block has a self-checking testbench in `tb/`, with a reference model
written independently of the RTL, random stimulus and a watchdog. Each ends
by printing `TB_RESULT checks=<n> failures=<m>`.

| testbench | what it checks |
|---|---|
| tb_op_decoder | the enable/selector table for all seven SA functions |
| tb_mrad, tb_mcad | one-/two-hot word lines, column ranges |
| tb_mram_array | masked writes, one- and two-row sensing, reference rows |
| tb_sense_amp | every function per lane, carry chain over random multi-bit adds |
| tb_sacu | sparse dot products against a behavioural engine; cycle bound from p and n; equal time for equal (p, n) whatever the zero count |
| tb_reduction_unit | signed column values and group sums for every group size |
| tb_memory_controller | row/port/carry sequences of ADD and SUB cycle by cycle, WRITE signals |
| tb_cma | memory, Boolean, ADD/SUB (nbits+3 and 2·nbits+3 cycles) and DOT/READOUT in one array |
| tb_cma_accumulator, tb_dpu, tb_ofm_store | sums and latency, ReLU/BN/saturation, row order of write-back |
| tb_fat_top | end to end (below) |

`tb_fat_top` runs the whole flow on 4 arrays of 128 x 16 bits with 4
weights each. Each trial does the following:

1. Writes activations in the slot layout and loads per-array weights. Some
   trials use all-zero or all-±1 weights.
2. Broadcasts DOT and checks the cycle count.
3. Broadcasts READOUT with a random group size.
4. Accumulates a two-array group and runs ReLU/BN.
5. Writes the result back, reads it again, then runs an in-memory ADD, SUB
   or XOR on it.

The testbench counts each mechanism it sees work. These are: broadcast,
zero skipping, the -1 stage, binary weights, column grouping, cross-array
accumulation, ReLU clamping, BN, write-back, ADD, SUB, Boolean and READ. It
reports a failure for any mechanism that never occurred.

**Sizes simulated.** The largest configuration simulated is 4 arrays of
128 x 16 bits. Single arrays were simulated at 64 x 16 bits. The default
configuration (4096 arrays of 512 x 256) passes lint and elaboration, but it
was not simulated: building a cycle-accurate model of 64 MiB of array logic
is far too slow for Verilator. Synthesis of the full top also does not
finish in reasonable time, for the same reason.

To simulate one block with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/fat_pkg.sv rtl/*.sv tb/tb_fat_top.sv --top-module tb_fat_top
./obj_dir/Vtb_fat_top
```

List `rtl/fat_pkg.sv` first. For a single-block testbench, passing only the
package and the modules that block uses is enough. Parameters such as
`NUM_CMA`, `ROWS`, `COLS`, `MH`, `ACT_BITS` and `PSUM_BITS` can be overridden
on `fat_top`, as the end-to-end testbench does.

## Fitting workloads

At the default size:

* **8-, 16- and 32-bit vector additions.** One array holds 256 lanes, and a
  32-bit addition takes 32 + 3 cycles.
* **ResNet-18 layer 10** (5 images of 128 x 28 x 28, 256 filters of 3 x 3,
  stride 2). J = 1152 splits over 36 arrays. The 980 output columns (14 x 14
  per image, assuming padding 1) need 4 groups of 256 lanes. That makes 144
  arrays per copy of the activations, so 28 copies (28 filters at a time)
  fit in 4096 arrays. The partial-sum range limit above applies.
