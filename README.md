# Diagonal-parity ECC for a MAGIC memristive crossbar

This appendix describes a SystemVerilog model of one memristive
processing-in-memory crossbar. The crossbar is protected by an error-correcting
code that keeps up with MAGIC in-memory logic. It follows the architecture of
"Efficient Error-Correcting-Code Mechanism for High-Throughput Memristive
Processing-in-Memory". The defaults match the area case study there:
`N = 1020` rows and columns, blocks of `M = 15` (M must be odd), and `K = 3`
processing crossbars.

## 1. The code

The n x n data crossbar (MEM) is divided into a grid of m x m blocks. Each
block stores one parity bit for each of its m wrap-around leading diagonals.
It also stores one for each of its m counter diagonals. Take the cell at local
position i = row mod m and j = column mod m:

- its leading diagonal is `(i + j) mod m`;
- its counter diagonal is `(j - i) mod m`.

A MAGIC gate applied to all rows writes one whole column of the MEM. Applied
to all columns, it writes one whole row. In either case, each block in that
column (or row) has exactly one changed cell on each of its diagonals. So a
diagonal's parity changes by the XOR of the old and new line bits that fall on
it. The code can be updated with the same row/column parallelism that the
logic uses, which a row or column code could not do.

A single error in a block flips one leading parity bit d1 and one counter
parity bit d2. Because m is odd, 2 has an inverse mod m, so the position is
unique:

    j = (d1 + d2) * (m + 1) / 2  mod m
    i = (d1 - j)                 mod m

A syndrome with exactly one set bit points to an error in a check-bit, and that
check-bit is corrected. Any other non-zero pattern is reported as
uncorrectable.

## 2. Blocks

| module | role |
|---|---|
| `ecc_pkg` | sizes, enums, command and event structs, processing-crossbar row map |
| `mem_crossbar` | n x n data array: in-row NOR, in-column NOR, row write, cell flip; row on `bitlines`, column on `wordlines` |
| `m_shifter` | reroutes m lines into diagonal order, using a one-hot select decoded from the line index mod m |
| `shifters` | n/m groups of four `m_shifter`s (bitline/wordline x leading/counter), regrouped into `d_i` vectors of n/m bits |
| `checkbit_crossbar` | (n/m) x (n/m) array; cell (a,b) is the parity of diagonal i of block (column a, row b); whole-line read and write, single-bit flip |
| `processing_crossbar` | 11 x n array computing XOR3 with eight NORs |
| `pc_controller` | FSM that issues the eight NOR steps |
| `connection_unit` | routes check-bit lines into a chosen processing crossbar and routes results back |
| `checking_crossbar` | 2 x n syndrome store, zero test per block, sensing of one block |
| `syndrome_decoder` | classifies a 2m-bit syndrome and locates the error |
| `ecc_controller` | MEM controller and check-memory controller in one state machine |
| `ecc_pim_top` | connects all of the above |

The top has m leading and m counter check-bit crossbars, and K processing
crossbar pairs (leading and counter) that share one controller per pair. These
counts give the memristor totals of the area table in the original work: n^2,
2m(n/m)^2, 22kn and 2n.

### Shifters

A MEM line is split into n/m groups of m bits, one group per block. The line's
index mod m is the shift amount. Each group is remapped so that output bit d is
the line bit on diagonal d:

- leading, any line: `out[d] = in[(d - s) mod m]`
- counter, row line: `out[d] = in[(d + s) mod m]`
- counter, column line: `out[d] = in[(s - d) mod m]`

The outputs go onto a bus as bit `d * n/m + block`. Vector `d_i` (n/m bits) then
lines up with row or column i of check-bit crossbar i. `en[1]` enables the
bitline side and `en[0]` the wordline side. A disabled side drives zeros, and
the top ORs the two sides onto one bus.

### XOR3 in a processing crossbar

The operands are transferred with MAGIC NOT, so rows 0-2 hold `~a`, `~b` and
`~c`. Eight in-column NORs follow:

    t1 = NOR(A,B)  t2 = NOR(A,t1)  t3 = NOR(B,t1)  x1 = NOR(t2,t3)
    t4 = NOR(x1,C) t5 = NOR(x1,t4) t6 = NOR(C,t4)  x2 = NOR(t5,t6)

Row 10 (`x2`) is `~(a ^ b ^ c)`. The NOT transfer back into a check-bit crossbar
then restores `a ^ b ^ c`. Three operand rows plus eight results give the 11
rows. In chained mode, operand C is read from row 10 instead of row 2, which
accumulates a running XOR in place.

## 3. Operation

Commands come in on a valid/ready port as `cmd_t`: opcode, critical flag,
direction, and line fields a, b and out. The line fields are 10 bits wide, so
n can be at most 1024.

- `CMD_ROW_NOR` applies `col[out] = NOR(col[a], col[b])` on every row.
  `CMD_COL_NOR` is the same with rows and columns swapped.
- `CMD_WRITE_ROW` writes `cmd_wdata`. `CMD_READ_ROW` returns a row on
  `rd_data`, one cycle after acceptance.
- `CMD_CHECK` checks one row (`dir = LINE_ROW`) or one column of blocks.

**Non-critical gate** (its output holds only intermediate values): one cycle,
no ECC work. The host marks the gates whose outputs are covered with the
`critical` bit.

**Critical gate**: three cycles on the command port.

1. **Cancel.** The old output line goes through the shifters into row A of a
   free processing crossbar. The matching line of every check-bit crossbar goes
   into row C.
2. **Perform.** The gate is applied to the MEM.
3. **Add.** The new output line goes into row B, and the processing crossbar
   starts its eight NORs.

The new check-bits are written back 11 cycles after the command was accepted.
Meanwhile the port takes further commands. Row writes follow the same rule:
one with the critical bit set updates the code in the same three steps.

**Stalls.** A critical gate is held in three cases:

- no processing crossbar is free (`stall_pc`);
- an update still in flight touches the same check-bits (`stall_hazard`). That
  means any update in the other direction, or one in the same direction on the
  same row/column of blocks.

A check is held until every update has been written back (`stall_drain`).

**Check.** The m lines of the row (or column) of blocks are copied two per pass
into processing crossbar 0. Each pass is a chained XOR3, and the first pass also
takes in the stored check-bits. After ceil(m/2) passes, the result is the
syndrome of every block in the row. It is moved into the checking crossbar and
zero-tested. Each flagged block is then sensed and decoded, one per cycle:

- a data error is corrected by flipping the MEM cell;
- a check-bit error is corrected by flipping the check-bit;
- anything else raises `uncorr`.

A check with no flagged blocks takes `11 * ceil(m/2) + 4` cycles from
acceptance, which is 92 for m = 15. Each flagged block adds one cycle.

The copies are spread over the passes: each pass reads two lines. From the
last copy until the corrections start, the MEM has nothing to do for the check.
In that window, which begins `11 * ceil(m/2) - 8` cycles after acceptance, the
port accepts non-critical gates and reads, and they run alongside the check.
Critical gates wait until the check ends. Non-critical outputs are not covered
by the code. A non-critical gate writes cells whose parity is then stale, so
the host should keep intermediates out of blocks it intends to check.

Every mechanism raises a one-cycle pulse in `ev` (`ecc_ev_t`). For a data
correction, the corrected cell appears on `ev_row`/`ev_col`. Test ports inject
soft errors: `inj_*` flips a MEM cell and `inj_cb_*` flips a check-bit.

## 4. Where this model departs from the original architecture

- The memristor arrays are functional models: one NOR per cycle, no output
  initialisation and no analog behaviour. Everything is cleared at reset,
  which is a consistent state.
- A check uses one processing crossbar with chained XOR3s. It does not use a
  parallel XOR3 tree over several crossbars. It is slower, but needs one
  crossbar.
- The original copies all m lines first and then frees the MEM for
  non-critical work during the XOR. Here the copies are spread over the
  passes, so the MEM is free only after the last copy, for about 14 cycles.
- Blocks that are reset as a whole have their check-bits recomputed through
  XOR3 like any other update. The shortcut of clearing them directly is not
  built.
- Overlapping updates stall instead of forwarding results between processing
  crossbars.
- Checks are started by the host. There is no periodic scrub timer and no
  per-function check policy.
- The cycle schedule, the command encoding and the event outputs are choices
  made for this model.
- The host that compiles logic into gate sequences and decides which gates are
  critical is not part of the design.

## 5. Testbenches and simulation

Each module has a self-checking testbench `tb/tb_<module>.sv` that compares it
against a reference model. Each prints
`TB_RESULT checks=<n> failures=<n>`.

- `tb_ecc_pim_top` runs the whole design at n = 45 and m = 15. It covers
  writes, critical and non-critical gates in both directions, reads (also
  while a check is running), all three kinds of stall, checks of block rows and columns, data-error and check-bit
  corrections, and a double error. It counts each mechanism and compares the
  whole MEM with a software model. It also checks the update and check
  latencies given above.
- `tb_ecc_pim_full` runs the same sequence, shortened, on the default
  1020 / 15 / 3 configuration without overriding any parameter. It passes
  (128 checks) and simulates in under a second. Verilator, however, writes
  about 140 MB of C++ for the full-size arrays and shifters, and compiling it
  takes roughly ten minutes on one core.

With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/ecc_pkg.sv \
        tb/tb_ecc_pim_top.sv --top-module tb_ecc_pim_top -o sim
    ./obj_dir/sim
