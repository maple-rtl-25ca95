# Maple: a multi-MAC processing element for row-wise sparse matrix multiplication

Sparse x sparse matrix multiplication (C = A x B) by Gustavson's row-wise product builds each
row of C from one row of A: every non-zero A[i,k] scales row k of B, and the scaled rows are
summed column by column.

    C^k[i,:] = A[i,k] * B[k,:]          (a partial row, one per non-zero of A's row i)
    C[i,j]   = sum over k of C^k[i,j]   (accumulation)

In accelerators built on this dataflow, a processing element usually has a single
multiply-accumulate unit. Its partial sums are sent out to a buffer higher in the memory
hierarchy, or merged over several passes. Maple puts several MAC units in one processing element
and gives each MAC a full row of accumulators. A whole row of C is therefore finished inside the
PE, and only the final row leaves it. The PE reads CSR data directly. It needs no decompression
and no index-matching logic at its ports: the CSR metadata (row pointers and column indices)
travel with the values and drive the control logic.

This repository has synthesizable SystemVerilog for that processing element, with a
self-checking testbench for each part. It follows the published description of Maple (Reshadi
and Gregg, "Maple: A Processing Element for Row-Wise Product Based Sparse Tensor Accelerators",
DAC 2023). The description gives the datapath and the buffer contents but no word widths,
handshakes or timing. Those are this design's own choices, and they are listed in the section
"Where this design goes beyond the description".

## Structure

```
maple_pe                       NUM_MAC independent MAC units (default 4)
 └─ maple_mac  [NUM_MAC]       one MAC unit: computes whole rows C[i,:]
     ├─ maple_multiply         "multiply logic"
     │   ├─ maple_arb          A row buffer (ARB), FIFO of A non-zeros
     │   ├─ maple_brb          B rows buffer (BRB), FIFO of B non-zeros
     │   └─ multiplier         A.value x B.value -> partial sum, column j'
     ├─ maple_ctrl             control logic: counts products with the row pointers
     └─ maple_accum            "accumulate logic": PSB[0..N-1], N adders, C row register
maple_pkg                      widths and the ARB / BRB entry types
```

With the defaults (four MAC units, four partial-sum registers each), this is the worked example
of the description: two 4x4 sparse matrices, with the rows of A spread over four MACs.

## What a MAC unit is fed: the two streams

Getting the input streams right is most of the work of using this PE. A MAC unit computes one
row of C at a time, and it must receive two streams in matching order.

**ARB stream.** These are the non-zeros of row i of A, in CSR order. Each entry is an
`arb_entry_t`:

| field     | meaning                                   |
|-----------|-------------------------------------------|
| `rp`      | row_ptr_A[i]                              |
| `rp_next` | row_ptr_A[i+1]                            |
| `i`       | the row index, which is also the output row index |
| `col_id`  | k', the column of this non-zero in A      |
| `value`   | A[i,k']                                   |

**BRB stream.** For every ARB entry, in the same order, the BRB stream holds the non-zeros of
row k' of B. Each entry is a `brb_entry_t`:

| field     | meaning                                   |
|-----------|-------------------------------------------|
| `rp`      | row_ptr_B[k']                             |
| `rp_next` | row_ptr_B[k'+1]                           |
| `i_brb`   | k', the B row this element belongs to     |
| `col_id`  | j', the column of the element, which selects the partial-sum register |
| `value`   | B[k',j']                                  |

A row of B that two A non-zeros select is sent twice, once for each.

**Empty rows.** An empty row is sent as a single marker entry whose `rp` and `rp_next` are
equal.
* An empty row of A is one ARB entry with no BRB entries. It produces an all-zero C row.
* An empty B row k' is one BRB entry. It retires its A non-zero without a product.

Example: take the 4x4 matrices below. A has non-zeros a00, a02, a13, a31 and a33. B has b00,
b02, b11, b12 and b22. The streams for row 0 of C are:

```
ARB: {rp 0, rp_next 2, i 0, col 0, a00}  {rp 0, rp_next 2, i 0, col 2, a02}
BRB: {rp 0, rp_next 2, k 0, col 0, b00}  {rp 0, rp_next 2, k 0, col 2, b02}   <- row 0 of B for a00
     {rp 4, rp_next 5, k 2, col 2, b22}                                       <- row 2 of B for a02
out: i 0, C = {a00*b00, 0, a00*b02 + a02*b22, 0}, nz = 0101
```

The two row-pointer fields exist so that the control logic can count. In CSR,
row_ptr[r+1] - row_ptr[r] is the number of non-zeros of row r. The control logic uses the A-row
difference to know how many A non-zeros make up the row. It uses the B-row difference to know
how many products each A non-zero needs. It never has to look at a neighbouring entry to find
these counts. If a BRB entry's `i_brb` is not the `col_id` of the A non-zero it is paired with,
the streams are out of step. The unit then sets its sticky `err` output, but it still computes.

Which MAC unit gets which row of A is up to whatever drives the PE. Rows are independent, so
any split works. The testbenches deal the rows out round-robin.

## Inside a MAC unit

**Multiply logic.** The heads of the ARB and the BRB feed one signed multiplier. The product
is the partial sum C^k'[i,j'] = A[i,k'] * B[k',j']. It goes out together with its column
j' = B.col_id.

**Control logic.** Each cycle, with both heads present and the accumulator ready, it fires the
multiplier and pops the BRB. It keeps two counters:
* the B elements used for the current A non-zero. When this count reaches that B row's
  pointer difference, it also pops the ARB.
* the A non-zeros used in the current row. When this count reaches the A row's pointer
  difference, it flags the end of the row.

**Accumulate logic.** The partial-sum buffer (PSB) has N registers, one per column of C. A
demultiplexer writes the product into PSB[j']. In the next cycle, the adder of column j' adds
PSB[j'] into C[j']. All N adders work in parallel. So a product can arrive every cycle, even
when back-to-back products go to the same column: the value in PSB is folded into C on the same
clock edge at which the next product replaces it. A mask bit per column records which columns
received a partial sum. When the row ends, the unit presents C[0..N-1] and the mask on the
output port. The mask is the column-index list of the new C row, ready to be written back in CSR
form.

### Timing

* A MAC unit takes one multiplier step per cycle. A step is one product, or one empty B row.
* A row costs two more cycles:
  * In the first, the last partial sums are folded into C.
  * In the second, the row waits on the output port. With `out_ready` high, it leaves in that
    same cycle.
* While a finished row waits, the unit accepts nothing new, so rows never mix.
* An empty A row costs one cycle plus the same two.
* A value written into an empty buffer can be used in the next cycle.

So, with inputs always offered and the output always taken, a batch of R rows with S multiplier
steps takes exactly S + 2R cycles from the first buffer write to the last row leaving.
`tb_maple_mac` checks this count. The MAC units in a PE run independently, so a PE with M units
reaches up to M steps per cycle. `tb_maple_pe` checks that four units need fewer cycles than the
single-unit bound.

## Interfaces

All handshakes are valid/ready: a transfer happens on a rising clock edge where both are high.
The reset `rst_n` is synchronous and active low. It empties the buffers and clears the
accumulators.

`maple_pe` ports, one of each per MAC unit `m`:

| port | dir | width | meaning |
|------|-----|-------|---------|
| `arb_in_valid[m]`, `arb_in_ready[m]`, `arb_in_data[m]` | in/out/in | 1, 1, `arb_entry_t` | ARB write |
| `brb_in_valid[m]`, `brb_in_ready[m]`, `brb_in_data[m]` | in/out/in | 1, 1, `brb_entry_t` | BRB write |
| `out_valid[m]`, `out_ready[m]` | out/in | 1, 1 | finished row |
| `out_i[m]` | out | `IDX_W` | row index i |
| `out_c[m][0..N-1]` | out | `ACC_W` each | C[i,0..N-1] |
| `out_nz[m]` | out | N | columns that received a partial sum |
| `err[m]` | out | 1 | sticky: ARB and BRB streams out of step |

## Parameters

| parameter | where | default | origin |
|-----------|-------|---------|--------|
| `NUM_MAC` | `maple_pe` | 4 | the four-MAC datapath example; the evaluated accelerator configurations use 2 and 16 |
| `N` | `maple_pe`, `maple_mac`, `maple_accum` | 4 | PSB registers, one per column of B; 4 in the 4x4 example |
| `BRB_DEPTH` | `maple_pe`, `maple_mac`, `maple_multiply`, `maple_brb` | 4 | four BRB entries, as drawn in the buffer organisation |
| `ARB_DEPTH` | `maple_pe`, `maple_mac`, `maple_multiply`, `maple_arb` | 4 | own choice (drawn as one entry) |
| `DATA_W` | `maple_pkg` | 16 | own choice: signed A and B values |
| `ACC_W` | `maple_pkg` | 32 | own choice: full-precision product, wrapping accumulation |
| `IDX_W` | `maple_pkg` | 20 | own choice: row and column indices (up to 1,048,575) |
| `PTR_W` | `maple_pkg` | 24 | own choice: CSR row pointers (up to 16.7M non-zeros) |

N must be at least the number of columns of B. The accumulate logic addresses PSB with the low
bits of j', and an assertion flags a column outside 0..N-1.

## How it maps to the evaluated accelerators

The description places Maple in two existing accelerators:
* a Matraptor-style design: four PEs of two MACs each, behind a simplified crossbar to DRAM.
* an Extensor-style design: eight PEs of sixteen MACs each, behind a network on chip and a
  last-level buffer.

Here, a PE of either configuration is `maple_pe` with `NUM_MAC` set to 2 or 16. The PE arrays,
the crossbar, the network on chip, the last-level buffer and DRAM belong to those host
accelerators. The description does not specify them, so they are not part of this RTL. Their
connection points are the ARB/BRB write ports and the row output ports.

The evaluated matrices are SuiteSparse matrices of 4K to 916K columns. A row of C for one of them
needs that many partial-sum registers. The description gives no scheme for splitting a row that
is wider than the PSB, for example into column tiles. So the default N = 4 covers the worked
example, not those matrices. The index and pointer widths are large enough for all of them.

`tb_maple_configs` runs PEs of both configurations, with N = 64, on random 64 x 64 matrices.
With random input gaps and back-pressure, the two-MAC PE sustains about 1.6 to 1.9 multiplier
steps per cycle at densities of 5% and above. The sixteen-MAC PE reaches about 10 to 13 steps per
cycle there. It falls short of 16 because the rows of C differ greatly in work, and each MAC
must finish its own rows.

## Where this design goes beyond the description

The following points are not stated in the description; they are choices made here:
* Word widths and integer arithmetic.
* Buffer depths (except the four BRB entries).
* The valid/ready handshakes and the reset.
* Storing both adjacent row pointers in each entry. The description draws one row-pointer field
  per entry.
* Storing j' once. The buffer drawing shows j' and B.col_id as two fields, but they hold the
  same number.
* The marker entries for empty rows.
* The `i_brb` consistency check and its `err` flag.
* The PSB valid bits and the output non-zero mask.
* The two-cycle gap between rows, and the one-step-per-cycle rate.

The description gives the control logic's job but not its circuit. The two-counter scheme above
is the simplest circuit that does that job.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>`, and each has a cycle watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_maple_arb`, `tb_maple_brb` | random traffic against a queue model; full and empty flags; read in the cycle after a write |
| `tb_maple_ctrl` | the exact sequence of fire / pop / row-end actions for random rows with empty A and B rows; nothing moves without ready; a mismatch raises `err` |
| `tb_maple_multiply` | heads, column and the exact signed product over the full 16-bit range |
| `tb_maple_accum` | row sums and masks with repeated and back-to-back columns; row appears two edges after its end; no input accepted while a row is pending |
| `tb_maple_mac` | random A x B (up to 12x12 by 12x4) against a dense reference, with gaps and back-pressure; then the exact S + 2R cycle count |
| `tb_maple_pe` | the full PE at default parameters: both worked 4x4 examples, 40 random C = A x A, 20 random rectangular products. It requires each of these to happen: multi-term accumulation, empty A and B rows, a full BRB stalling the loader, output back-pressure, rows finishing side by side, and a speed-up over one MAC |
| `tb_maple_configs` | a 2-MAC and a 16-MAC PE (the two evaluated configurations) with N = 64 on random 64 x 64 C = A x A, densities from 1.1% up to 25%; reports multiplier steps per cycle |

Run one with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl -y tb \
          rtl/maple_pkg.sv tb/tb_maple_pe.sv --top-module tb_maple_pe
./obj_dir/Vtb_maple_pe
```

Lint a module with `verilator --lint-only -Wall -Irtl -y rtl rtl/maple_pkg.sv rtl/maple_pe.sv`.
The only lint warnings are for `maple_ctrl`: it reads just the row pointers and index fields of
the buffer heads, and leaves the other fields unused.

To change the configuration, override `NUM_MAC`, `N` and the depths on `maple_pe`. To change
the number format, edit the widths in `maple_pkg`. The product is `ACC_W` bits wide, and the
adders wrap at that width.
