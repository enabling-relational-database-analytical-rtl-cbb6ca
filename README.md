# A bulk-bitwise PIM memory rank with per-crossbar aggregation circuits

Analytical database queries mostly filter a large relation and then
aggregate an attribute of the surviving records, often per subgroup
(GROUP-BY). In a bulk-bitwise processing-in-memory (PIM) memory, the memory
crossbars themselves evaluate the filter: each record is stored in one
crossbar row, every attribute sits in the same columns of every row, and a
single in-array logic operation on a column acts on all 1024 records of the
crossbar at once. Filtering in memory is cheap; aggregating in memory with
bit-level logic is not, because an addition needs many logic steps and each
step wears the resistive cells.

The design here adds a small CMOS **aggregation circuit** under every
crossbar: an ALU (SUM, MIN, MAX) and a 64-bit register. The crossbar's PIM
controller reads the selected records' attribute out of the array row by
row, the circuit accumulates it, and the result is written back into the
array, where the host fetches it with an ordinary load. With this, a
GROUP-BY can hand its few large subgroups to PIM (one aggregation request
per subgroup, whose time does not depend on how many records are in the
subgroup) and leave the many small ones to the host, which reads the
filter bit-vector and the selected records. Joins are avoided by storing
the fact table already joined with its dimension tables, one joined record
per crossbar row; updates of such a relation are done in memory with a
MUX between an attribute and an immediate value.

The RTL describes the memory side of that system: the rank of PIM chips,
their per-page controllers, the crossbars with their read path and
aggregation circuits. The host processor, the query compiler and the
GROUP-BY planning model (which decides how many subgroups go to PIM) are
software and are not part of it.

## Organisation of the rank

| Quantity | Value | Where it comes from |
|---|---|---|
| Crossbar | 1024 rows x 512 columns | evaluated configuration |
| Crossbar read / write | 16 bits | evaluated configuration |
| Chips per rank | 8 | evaluated configuration |
| Huge page | 2 MB = 32 crossbars = 4 crossbars on each chip | derived |
| Host block | 64 bytes = one 16-bit word from each of a page's 32 crossbars | derived |
| Records per page | 32 x 1024 = 32768 | derived |
| Pages | 16384 in a 32 GB rank; **512 in the RTL default** | see "Sizes" |

Every page has its own PIM controller on every chip (`pim_controller`), so
pages compute independently of each other. A controller drives the 4
crossbar tiles of its page on its chip (`pim_page`) with one broadcast
command per cycle, so every operation runs on all crossbars of the page at
once; the 8 chips receive the same commands in lock-step, so a page-wide
operation touches all 32 crossbars, i.e. all 32768 records of the page.

Hierarchy:

```
pim_module            rank: address decode, 8 chips in lock-step
 └ pim_chip  x8       routes a command to the addressed page slice
    └ pim_page x NPAGES   one page's slice on this chip
       ├ pim_controller   sequences requests into crossbar commands
       └ pim_xb_tile x4   one crossbar with its peripherals
          ├ pim_crossbar      1024x512 array with in-array column/row logic
          ├ pim_read_circuit  16-bit word select and output register
          └ pim_agg_circuit   aggregation register + pim_agg_alu
```

`pim_pkg` holds the sizes, the enums and the request structures.

## Host interface and address map

`pim_module` takes one command per cycle on a valid/ready port:
`HC_READ` (load a 64-byte block), `HC_WRITE` (store a block) or `HC_PIM` (a
PIM request). A PIM request is shaped like a store: its address names the
page, its data (a `pim_req_t` in the low bits of the 512-bit store data)
names the work. Because a request never leaves its page, a program can
issue it with a virtual address that is translated like any store.

```
byte address:  [ page | row (10) | word (5) | byte (6) ]
                       bits 20:11  bits 10:6   ignored
block bit 16x+i  <->  bit i of the addressed word in crossbar x,
                      x = 4*chip + tile
```

Reading one record's word therefore returns the same word of 31 other
records, one from each of the page's other crossbars. Loads return data on
`rdata` with `rvalid` two cycles after the command is accepted. A command
to a page that is still running a PIM request waits (`req_ready` low);
commands to other pages do not wait for it. The per-chip routing is in
`pim_chip`, the decode in `pim_module`.

## PIM requests

| `op` | What it does in every crossbar of the page | Cycles |
|---|---|---|
| `PR_COL_LOGIC` | for all rows r: `cell[r][dst] = fn(cell[r][src_a], cell[r][src_b])` | 1 |
| `PR_ROW_LOGIC` | `row[dst] = fn(row[src_a], row[src_b])` over all 512 columns | 1 |
| `PR_MUX_IMM` | for the `width`-bit attribute at column `dst`: `v = sel ? imm : v`, with `sel` the bit in column `sel_col` | `width` |
| `PR_AGG` | aggregate (`agg_fn`) the `width`-bit attribute at column `dst` over records whose `sel_col` bit is 1; write the 64-bit result to (`res_row`, words `res_word`..`res_word+3`) | 1 + 1024(1+n) + 1 + 4 |

`fn` is NOR (the basic in-array gate), OR or AND-NOT. Filters are built by
the host from these operations; for example, the end-to-end test computes
`sel = k0 & ~k1 & ~k2 & ~k3` with two AND-NOTs and two NORs. The result of
a filter is one bit per record, which the host either reads (32 records'
bits per load) or passes as `sel_col` to `PR_MUX_IMM` or `PR_AGG`.

### The MUX with an immediate (UPDATE)

Replacing an attribute of the selected records by a constant needs no read
at all. For every bit i of the attribute the controller issues one column
operation:

```
if imm[i] == 1:  v_i <- v_i OR  sel     (selected records get a 1)
else:            v_i <- v_i AND NOT sel (selected records get a 0)
```

Unselected records keep their value because `x OR 0 = x` and
`x AND NOT 0 = x`. An 8-bit attribute is updated in 8 cycles in all 32768
records of the page.

### Aggregation: how the controller and the circuit cooperate

This is the part that departs most from plain bulk-bitwise PIM. An
attribute of `width` bits whose least significant bit is in column `dst`
covers `n = ((dst mod 16) + width - 1) / 16 + 1` consecutive 16-bit words
(1 to 5 for a 64-bit attribute). The controller walks the rows:

```
cycle 0          AC_CLEAR       register <- 0 (SUM, MAX) or all ones (MIN)
per row r:       read word sel_col/16       AC_SEL    latch the select bit
                 read word dst/16 + k       AC_SHIFT  store read k in the operand buffer
                 ... last read              AC_LAST   shift right by dst mod 16,
                                                      mask to width bits,
                                                      register <- ALU(register, operand)
                                                      if the select bit was 1
drain            one idle cycle (the last read is still in flight)
write-back       4 word writes of the register through the write control
```

The read circuit registers the word, so the aggregation command that
travels with a read is delayed by one cycle inside the tile to meet its
data. All 4 tiles (and all 32 crossbars of the page across the chips) do
this at the same time, each over its own 1024 records, each writing its own
partial result into its own crossbar; the host loads the 4 result words
(one load per word returns all 32 partial results) and combines them.

The time is `1 + 1024(1 + n) + 1 + 4` cycles however many records are
selected, which is what makes the split between PIM and host aggregation
predictable: each subgroup sent to PIM costs one such request.

MIN and MAX compare unsigned; SUM wraps at 2^64.

## Timing model

One clock cycle stands for one bulk-bitwise logic cycle (30 ns in the
evaluated module); a crossbar read or write also takes one cycle. This is a
functional, cycle-counting model: the real access times of an RRAM read
and write, and the electrical details of in-array logic (the output cells
of a MAGIC-style NOR must be initialised, voltages, endurance), are not
modelled. `pim_crossbar` is a synthesizable register array with the logic
function of the crossbar, not a model of the RRAM cells.

## Sizes

Every parameter defaults to the evaluated configuration except the page
count. A 32 GB rank has 16384 pages, i.e. 131072 page slices and 524288
crossbars; Verilator's lint needs about 14 MB per page of the rank, so the
full rank (about 220 GB) cannot be elaborated in 32 GB. `NPAGES`
(`N_PAGES_DFLT` in `pim_pkg`) defaults to 512 pages, a 1 GB rank, whose
lint takes about 7 GB and leaves room for other jobs on a 32 GB machine. All per-page
hardware is at full size, and pages are independent copies, so the
behaviour of a page does not depend on this number.

The SSB benchmark at scale factor 10, stored as one pre-joined relation of
about 60 million records (one per crossbar row), needs about 1831 pages; it
fits the 16384-page rank, while the 512-page default holds about 28% of it.

## Where the design goes beyond what is specified

These choices fill gaps and are not taken from a published design:

* the command port, the request encoding (`pim_req_t`) and the address map;
* one request at a time per page, with a stall for the next one;
* the select-bit read before each record's attribute reads (how unselected
  records are excluded from an aggregate is not specified);
* a 64-bit aggregation register, unsigned MIN/MAX, results written as four
  16-bit words;
* the in-array operation set limited to NOR, OR and AND-NOT; comparison
  filters are left to the host to compose;
* one cycle per operation and per read or write.

Not built: the host processor and the DRAM ranks beside the PIM rank, the
bank-level peripherals of the chip (only named), the GROUP-BY latency model
and the choice of subgroups (host software), and the vertically partitioned
("two crossbars per record") layout, which needs host-side transfers between
pages but no hardware of its own.

## Simulating

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
    rtl/pim_pkg.sv tb/tb_pim_module.sv --top-module tb_pim_module -o sim
./obj_dir/sim
```

| Testbench | Size | What it checks |
|---|---|---|
| `tb_pim_crossbar` | 1024x512 | word writes, column and row NOR/OR/AND-NOT against a reference array |
| `tb_pim_read_circuit` | 512 columns | word select, one-cycle latency, hold when idle |
| `tb_pim_agg_alu` | - | SUM/MIN/MAX with random offsets and widths |
| `tb_pim_agg_circuit` | - | select, multi-read operands, identity values |
| `tb_pim_xb_tile` | 16 rows | reads, writes, NOR, aggregation and write-back |
| `tb_pim_controller` | 8 rows | command sequences and cycle counts of every request |
| `tb_pim_page` | 64 rows | filter, MAX, UPDATE, SUM over an unaligned 20-bit attribute |
| `tb_pim_chip` | 4 pages, 16 rows | routing, stall of a busy page, other pages served |
| `tb_pim_module` | 8 pages, rest default | end to end: filter, host bit-vector reads, SUM/MIN/MAX on two pages at once, stall, UPDATE, row operation; counts each |

`tb_pim_module` runs the whole rank with 8 chips and full 1024x512
crossbars but only 8 pages (256 crossbars), in about a second after a
one-minute build. That is the largest size simulated: the default 512-page
rank holds 16384 crossbars (1 GB of state) and is too large to build for
simulation on an ordinary workstation.

To change the rank, override `NPAGES`, `NCHIPS`, `XBS`, `ROWS` or `COLS` on
`pim_module`; the field widths of the request (`row_t`, `word_t`, `col_t`)
are sized in `pim_pkg` for 1024x512 crossbars and must be changed there for
larger arrays.
