# Bulk-bitwise processing-in-memory for relational analytics

Analytical database queries ("sum the revenue of all orders from 1993 with a
discount of 1 to 3") read almost every record of a large table, do very
little arithmetic on each one, and return a handful of numbers. On a
conventional machine the run time is mostly the time spent moving the table
from DRAM to the CPU. This RTL implements the alternative described in
*Accelerating Relational Database Analytical Processing with Bulk-Bitwise
Processing-in-Memory* (B. Perach, R. Ronen, S. Kvatinsky). The table stays in
a memory whose cell arrays can compute. Each array row holds one record. Every
query step is a bitwise operation applied down whole columns of every array at
once. The host reads back only the final per-array results.

The source describes the system at the level of what each part does: how a
relation is laid out, which operations the memory supports, and what an
aggregation circuit in the array periphery computes. It does not give array
sizes, instruction encodings, algorithms, circuits or timing. Everything at
that level here is this design's own, and it is called out below and in each
file's header. The memory technology (memristive crossbars) is represented by
its logic function only.

## 1. The idea: records across, computation down

```
            attribute A     attribute B      free columns
          <-- 3 cols -->  <--- 4 cols --->  <---------------->
 row 0    a2 a1 a0        b3 b2 b1 b0       .  F  .  .  .  .      <- record 0
 row 1    a2 a1 a0        b3 b2 b1 b0       .  F  .  .  .  .      <- record 1
 ...                                           ^
                                               one result bit per record
```

A relation is stored with **one record per array row**. Each attribute
occupies a run of adjacent columns, least significant bit in the lowest
column. The memory can do one thing besides store bits: the **column
operation**. It takes one or two columns, applies a Boolean function
bit by bit, and writes the result into a third column. It does this for
every row of the array in one step. A page's arrays all receive the same
operation, so one step processes every record of the page.

Everything else is built from column operations:

* **Filter.** A condition such as `year = 1993 AND quantity < 25` is
  evaluated bit-serially. The result is one bit per record in a free
  column. The host could read that column instead of the attributes.
* **Mask.** Before an aggregation, the filter bit is ANDed into every bit of
  the attribute, writing a copy. Unselected records then hold 0, and a sum
  or max ignores them.
* **Aggregation.** A small conventional circuit beside each array reads the
  masked attribute one row at a time. It adds the values (or takes their min
  or max) and writes the single result back into the array. The host loads
  one number per array and combines them. An average is a sum and a count
  (the sum of the filter bit), divided on the host.
* **Update.** A masked multiplexer, `d = filter ? new : old`, rewrites the
  selected records without the host reading anything.
* **Join.** Joins are not computed. The fact table is stored already joined
  with its dimension tables, so a star-schema query is a filter plus an
  aggregation.
* **Group-by.** A group-by is one filter and one aggregation per group, or
  a filter followed by the host loading the selected records. Choosing
  between the two is host software and is not part of this RTL.

## 2. Module hierarchy

```
pim_module                  PAGES pages; routes requests by page number
 └─ pim_page  x PAGES       one huge page = NXB arrays + 1 controller
     ├─ pim_ctrl            instruction -> sequence of column operations
     └─ per array, x NXB:
         ├─ pim_xbar        ROWS x COLS bit array, bulk op + row port
         └─ pim_agg         sum / min / max circuit on the row port
pim_pkg                     types, truth tables, opcodes, instruction format
```

Default sizes (none are given in the source):

| parameter | default | meaning |
|-----------|---------|---------|
| `ROWS`    | 1024    | rows (records) per array |
| `COLS`    | 512     | columns (bits) per row |
| `NXB`     | 32      | arrays per page: 32 x 64 KiB = one 2 MiB huge page |
| `PAGES`   | 2       | pages in the module (65,536 records in total) |

A PIM instruction only ever touches one page. That restriction is what lets
software address PIM with ordinary virtual addresses: the page is translated
like any other, and the instruction is routed to it. A relation larger than
a page needs the same instruction sent to each of its pages.

## 3. The bulk operation (`pim_xbar`)

```
column-wise: for every row r:     mem[r][cd] = tt[{ mem[r][ca], use_k ? k : mem[r][cb] }]
row-wise:    for every column c:  mem[rd][c] = tt[{ mem[ra][c], mem[rb][c] }]
```

`tt` is a 4-bit truth table: bit `{x,y}` is f(x,y). So one port covers AND,
OR, NOR, NOT, XOR, copy, set-to-0 and set-to-1 (`pim_pkg` names them
`TT_*`). The constant `k` lets a controller apply an immediate operand's bit
without first writing it into the array. The database primitives use only
the column-wise form, which acts on every record at once. The row-wise form
combines two whole rows of an array; it is there because the source lists
both forms. One operation takes one cycle.

The array also has a plain row port. It does a masked write of any bits of
one row, or a read of a whole row (data one cycle later). Host loads and
stores and the aggregation circuit use this port. The array is not reset: a
column is defined once something has written it. A bulk operation and a row
write in the same cycle are illegal, and an assertion catches them once
`rst_n` is released.

## 4. Instructions and how they become column operations (`pim_ctrl`)

An instruction (`pim_instr_t`) names up to three attributes by start column:
`a`, `b` and destination `d`. It also gives a length `len` (1 to 64 bits),
an optional 64-bit immediate that replaces `b`, a filter/select column `f`,
and `t`, the first of four free scratch columns (T = t, G = t+1, C = t+2,
P = t+3). The controller walks the attribute bit by bit from the LSB and
issues one column operation per cycle. Below, `x OP y` means one column
operation. `b_j` is column `b+j`, or the immediate's bit `j`.

| op | per bit j (after the initial step) | initial step | cycles |
|----|------------------------------------|--------------|--------|
| AND OR XOR NOR | `d_j = a_j OP b_j` | - | L |
| NOT | `d_j = ~a_j` | - | L |
| MASK | `d_j = a_j & f` | - | L |
| MASKN | `d_j = a_j \| ~f` | - | L |
| MUX, immediate | `d_j = b_j ? (a_j \| f) : (a_j & ~f)` | - | L |
| MUX, attribute | `T = b_j & f`; `G = a_j & ~f`; `d_j = T \| G` | - | 3L |
| EQ / NE | `T = a_j XNOR b_j` (XOR); `d = d & T` (`d \| T`) | `d = 1` (0) | 1 + 2L |
| LT / LE | `T = a_j XNOR b_j`; `T = T & d`; `G = ~a_j & b_j`; `d = T \| G` | `d = 0` (LE: 1) | 1 + 4L |
| GT / GE | same, with `G = a_j & ~b_j` | `d = 0` (GE: 1) | 1 + 4L |
| ADD | `T = a^b`; `G = a&b`; `d_j = T^C`; `T = T&C`; `C = G\|T` | `C = 0` | 1 + 5L |
| MUL | see below | `d = 0` (L steps) | 2L + 3L(L+1) |
| RAND ROR RXOR RNOR RNOT | row `drow` = row `ra` OP row `rb`, all columns | - | 1 |

Comparisons are unsigned. They write a single bit, column `d`, so the
"less than so far" value needs no extra column. Starting it at 1 instead of 0
turns `<` into `<=` for free. ADD and the arithmetic results are modulo
2^L. `d` may equal `a` (in-place update), because bit j of the operands is
read before bit j of `d` is written.

**MUL** is shift-and-add. For each multiplier bit `i`, and each
`j < L - i`, it forms the partial-product bit `P = a_j & b_i`. It then adds
`P` into `d_{i+j}` with a ripple carry: `T = d^P`, `G = d&P`, `d = T^C`,
`T = T&C`, `C = G|T`. The carry is cleared at the start of each `i`. `d`
must not overlap `a` or `b`. With L = 32 this is 3232 cycles, which is why
the query in section 7 multiplies once and then reuses the product.

Why **MASKN**: the source says only that masking "nullifies" unselected
values. Zeroing them is correct for sum and max, but not for min. MASKN
forces unselected values to all ones, so a min ignores them.

**Aggregations** (`AGG_SUM`, `AGG_MIN`, `AGG_MAX`) pass the field, the
result row `drow` and the result column `d` to every array's `pim_agg`. The
controller waits for them. Such an instruction takes ROWS + 4 cycles.

Handshake: `instr_valid`/`instr_ready`, where ready means the controller is
idle. `done` pulses in the cycle after the last column operation has been
written, and a new instruction can be accepted in that same cycle.

## 5. The aggregation circuit (`pim_agg`)

On `start` the circuit reads rows 0 to ROWS-1, one per cycle. It extracts
the field `a .. a+len-1` and accumulates it in a 64-bit register: a wrapping
sum, or an unsigned min or max. It then writes the 64-bit result into row
`drow`, starting at column `d`. Bits that fall past the edge of the array
are dropped. It is busy for ROWS + 2 cycles. The array's cells are written
once per aggregation, not once per addition, which matters for memristive
endurance. The source compares against doing the reduction with bulk-bitwise
operations alone; that alternative is not built.

## 6. Pages, addressing and ordering (`pim_page`, `pim_module`)

Host loads and stores are 64-bit words. The address is `{page, offset}`,
and the offset within a 2 MiB page decodes as

```
offset[20:18] word within the row  (COLS/64 = 8 words)
offset[17:8]  row                   (ROWS = 1024)
offset[7:3]   array                 (NXB = 32)
offset[2:0]   byte (ignored: aligned words only)
```

The field widths follow the parameters. Consecutive words fall in the same
row position of successive arrays. A record's own bytes are therefore
scattered through the page. Software controls this layout, because the
offset bits are not changed by address translation. The source requires
such a fixed, software-visible mapping but does not give one. This field
order is this design's choice.

Routing and concurrency: an instruction goes to the page named by
`pim_page`, and each page has its own controller. Different pages therefore
run instructions at the same time. The host sends a relation's program to
each page in turn and does not wait in between.

Ordering: while a page executes an instruction, loads and stores to it are
held off (`req_ready` low). A page therefore applies host accesses and
instructions in the order it accepted them. The source leaves the ordering
rules, and the host-cache coherence they rely on, to other work. A load's
data appears on `resp_rdata` with `resp_valid`, one cycle after the load is
accepted.

## 7. A query, end to end

`tb/tb_q11_host.sv` is a behavioural host. It runs the shape of
Star-Schema-Benchmark query 1.1 on a fact table pre-joined with its date
dimension. Columns: year 0-15, quantity 16-23, discount 32-63 (a 32-bit
field, so that it can be a MUL operand), price 64-95, filter bits 128-130,
product 160, masked copies 192 and 224, scratch 250, results 320 and 384.

```
EQ   year, #1993 -> F
GE   disc, #1    -> F2 ; AND F,F2 -> F
LE   disc, #3    -> F2 ; AND F,F2 -> F
LT   qty,  #25   -> F2 ; AND F,F2 -> F
MUL  price, disc -> prod ; MASK prod, F -> m
AGG_SUM m   -> row 0, col 320     AGG_SUM F (len 1) -> row 0, col 384  (count)
MASKN price, F -> m2 ; AGG_MIN -> row 1      MASK price, F -> m2 ; AGG_MAX -> row 1
EQ   year, #1992 -> F3 ; MUX disc := F3 ? #0 : disc        (UPDATE)
ADD  price, disc -> prod ; MASK ; AGG_SUM -> row 2 ...
ROR  row 0, row 0 -> row 3                                  (row-wise copy)
```

The host then loads the per-array results and combines them: it adds the
sums and counts, and takes the min of the mins and the max of the maxes. It
checks everything against values it computed itself.

## 8. Timing summary

| action | cycles |
|--------|--------|
| store | 1 (accepted when the page is idle) |
| load | accepted when idle; data on the next cycle |
| column-op instruction | see the table in section 4 |
| aggregation instruction | ROWS + 4 |
| the query of section 7 up to the MAX (15 instructions), ROWS = 1024 | about 7,800 per page; pages overlap |

## 9. What comes from the source and what does not

From the source: one record per row and attributes across columns. Bitwise
operations between columns over all rows, or between rows. Filter results as one bit per
record in a common column. Instructions for comparison, logic and
arithmetic, with an attribute or an immediate operand, at several attribute
lengths. Masking by AND before aggregation. Sum, min and max computed per
array by a CMOS circuit that reads value by value and writes only the final
result. The host combining per-array results. The PIM MUX used for updates.
Operations confined to one huge page, routed by page, with the page-offset
mapping under software control.

This design's own choices: all sizes. The truth-table column port. The
bit-serial algorithms and their cycle counts. The scratch-column convention.
MASKN. The instruction format and handshakes. The address field order. The
"stall while busy" ordering rule. The 64-bit result width. One row per cycle
in the aggregation circuit.

Departures and omissions:

* There is no subtraction or signed arithmetic. `a - b` takes three
  instructions: NOT, ADD, then ADD #1. Only "equality, less-than" and
  "addition, multiplication" are named, as examples.
* The memristive cells, their initialisation before a logic step, and all
  analog circuitry are not modelled. Neither are energy and endurance.
* The host side is not hardware here: address translation, cache coherence,
  combining results, group-by planning and SQL compilation.
* The module is 2 pages by default. The benchmarks in the source (SSB and
  TPC-H; their scale factors are not given) would need about 184 pages per
  6 million records. Raising `PAGES` is the only change needed.

## 10. Simulating and changing it

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and ends.

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/pim_pkg.sv tb/tb_pim_module.sv --top tb_pim_module
./obj_dir/Vtb_pim_module
```

| testbench | what it checks |
|-----------|----------------|
| `tb_pim_xbar` | random column and row ops and masked row writes against a copy of the array (16 x 64) |
| `tb_pim_ctrl` | every column-op instruction at random lengths, with immediates and attributes, and every row-wise instruction; results, untouched sources, exact cycle counts (controller + one 16 x 128 array) |
| `tb_pim_agg` | sum/min/max over random fields, busy time, result placement (16 x 128) |
| `tb_pim_page` | address mapping (checked inside the arrays), loads, broadcast ADD to all arrays, stalled load, per-array MAX (4 arrays of 16 x 128) |
| `tb_pim_module` | the section 7 query on 2 pages x 4 arrays x 32 rows; also counts stalls, concurrent-page cycles and done pulses, and fails if any never happened |
| `tb_pim_module_full` | the same at the default size: 65,536 records, about a minute |

To change sizes, override `ROWS`, `COLS`, `NXB` and `PAGES` on `pim_module`.
Arrays of up to 1024 rows and 512 columns fit the index types in `pim_pkg`
(`ROW_W`, `COL_W`); widen those for larger arrays. `COLS` must be a multiple
of 64. To add an instruction, add an opcode to `pim_op_e`, and give it a
shape (initial steps, per-bit steps) and its column operations in the two
`always_comb` blocks of `pim_ctrl`.

Synthesis note: each array is a ROWS x COLS register file. Every bit can be
written by the column port, so a default-size module is tens of millions of
flip-flops with their muxes. It is a functional model of the array, not an
implementation of one. The controller and aggregation circuit are ordinary
synthesizable logic.
