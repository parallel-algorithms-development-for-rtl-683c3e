# A systolic matrix multiplier for streamed matrices

This design multiplies a fixed matrix `A` (`N x M`, 11 x 11 by default) by a
matrix `B` (`M x k`) whose columns arrive one after another, for any `k`. `A`
stays inside the chip, one coefficient per cell of an `N x M` grid of
multiply-accumulate cells. The columns of `B` flow down through the grid.
Partial sums flow left to right. Each column of `B` that enters at the top
produces one column of `C = A x B` at the right-hand edge. The grid never
stores more than one column per cell, so its size depends only on `N` and
`M`, never on `k`.

The structure comes from deriving hardware step by step from a functional
specification of matrix multiplication:

```
mmult ass bss  = map (vmmult ass) bss          -- every column of B
vmmult ass bs  = map (scalarp bs) ass          -- every row of A
scalarp as bs  = sum (zipWith (*) as bs)       -- one scalar product
```

Each `map` becomes a pipeline, and so does the scalar product itself. Each
function application becomes a process that talks to its neighbours over
channels. The result is a 2D network of communicating processes: the
"multilevel pipelined" design. Its most efficient form is this systolic
grid. The RTL keeps that process structure: every process is a block with
handshaked channels, and a block acts only when all the channels it needs
are ready, just like a process blocked on a rendezvous.

## The cell

Cell `(i,j)` holds `a = A[i][j]`. It has four channels:

```
                 up (b, or EOT)
                     |
                     v
 left (partial) -> CELL(i,j) -> right = left + up * a
                     |
                     v
                 down (= up)
```

- **Value token on `up`:** the cell waits until it has both `up = b` and
  `left = l`. It also waits until both of its output registers are free (or
  being emptied in this cycle). Then it fires: `right <= l + b*a` and
  `down <= b`.
- **End-of-transmission (EOT) token on `up`:** the cell passes the EOT
  down. It does not read `left` and does not write `right`.
- **Arithmetic:** 16-bit two's complement. The product and the sum wrap
  modulo 2^16.
- **Throughput:** a cell can fire every cycle. Its outputs are registered,
  so a token moves one cell per cycle.

Every channel carries an `item_t` (`mm_pkg.sv`): a 16-bit value plus an
`eot` flag. A transfer happens in a cycle where `valid` and `ready` are both
high. A token that is offered stays offered, unchanged, until it is taken.
The cells and the bank reader check this rule with assertions.

## Why the grid needs no skew buffers

A classic systolic array feeds column `j` of `B` one cycle later than column
`j-1`, so that the partial sum and the `b` value meet in the right cell.
Here no input skew is needed, because each cell waits for both of its
operands.

- **All columns offered together:** cell `(0,0)` fires first. Cell `(i,j)`
  fires `i+j` cycles later. The `b` values and the partial sums line
  themselves up into the usual diagonal wavefront.
- **Columns offered out of step:** the handshakes stop the cells that are
  ahead until the late column catches up. The grid testbench feeds every
  column from its own randomly gapped queue to exercise this.

Timing with every input offered in cycle `t` and every output ready:

| event | cycle |
|---|---|
| cell `(i,j)` fires | `t + i + j` |
| row `i` result valid at the right edge | `t + i + M` |
| new column accepted, at best | one per cycle |

The results of one column reach the right edge at different times: row 0
first, row `N-1` last. A join gathers them into one vector (see below).

## End of a stream

A stream of columns ends with one EOT token on each column of the grid.

1. A cell passes its EOT down only after it has written its last result.
   So when the EOT leaves the bottom of the last column, every row has
   already produced all of its results.
2. The join then sends its own EOT to the bank writer, once the last
   result vector has gone.
3. The bank writer reports the end of the run.

After an EOT, every block is ready for a new stream. The network can
therefore be run again with the same or a newly loaded `A`.

## Around the grid

```
 bank 0 --> mm_coef_loader --(coefficients)--> mm_grid
 bank 1 --> mm_bank_reader --> mm_vec_fork --(M columns)--> mm_grid --(M bottoms)--> sinks
                                                              |
                                                        (N row results)
                                                              v
                                                  mm_css_join --> mm_bank_writer --> bank 2
```

| block | what it does | cycles |
|---|---|---|
| `mm_coef_loader` | reads `A[i][j]` from bank 0, word `i*M + j`, into cell `(i,j)` | `N*M+1` |
| `mm_bank_reader` | reads column `k` of `B` from bank 1 (word `k*M + j`), one word per cycle, and offers it as one vector; after `k_len` columns it offers an EOT | `M+2` per column |
| `mm_vec_fork` | splits each vector into `M` separately handshaked column channels; an EOT becomes an EOT on every column | no added latency |
| `mm_grid` | `N` rows (`mm_row`) of `M` cells; row 0 takes the columns, each row passes `b` down to the next | see the cell |
| sinks | take and discard everything that leaves the bottom (the bottom channels are always ready); `mm_top` counts the values they absorb | none |
| `mm_css_join` | offers one `N`-item vector when every row has a result; takes them all at once | no added latency |
| `mm_bank_writer` | writes item `i` of result vector `k` to bank 2, word `k*N + i` (sign-extended to 32 bits) | `N+1` per vector |

Other details:

- **Fetch overlap:** the reader starts fetching the next column while the
  current one waits to be taken.
- **Writer buffer:** the writer has a single vector buffer.
- **Banks:** each bank is a single-ported external SRAM with 32-bit words,
  a 21-bit word address and one cycle of read latency. The bank layouts
  above are this design's choice.
- **Control (`mm_top`):** `start` (with `k_len`) loads `A`, then streams
  `k_len` columns. `done` pulses when the writer has taken the final EOT.
  `busy` is high in between.

### Throughput

The grid could take a new column every cycle. The single-ported banks cannot
keep up with that:

- The reader needs `M+2 = 13` cycles per column.
- The writer needs `N+1 = 12` cycles per column.

A whole run therefore takes about `N*M + 2 + k*(M+2) + N + M` cycles. The
table below gives measured figures from the simulation. Across the whole of
Table 2, the cycles per column of `B` converge on `M+2 = 13`.

| k | cycles | k | cycles |
|---|---|---|---|
| 11 | 302 | 599 | 7 946 |
| 99 | 1 446 | 999 | 13 146 |
| 199 | 2 746 | 2999 | 39 146 |
| 299 | 4 046 | 6999 | 91 146 |
|  |  | 9999 | 130 146 |

Behaviour with a slow writer:

- **Back-pressure:** while the writer is busy, results wait in the output
  registers of the last cells. The cells behind them stall, column by
  column, back to the fork.
- **Skew cost:** the join has no skew buffers. Row 0 must hold its result
  until row `N-1` has one, so the grid by itself accepts a new column only
  about every `N` cycles. That is still faster than the banks.

These cycle counts are properties of this RTL. They are not the published
measurements. The original implementation was measured as a whole,
host-to-host, on an FPGA board; its clock rate and memory timing are not
available here.

## Parameters

| parameter | default | where | meaning |
|---|---|---|---|
| `N` | 11 | `mm_top`, `mm_grid`, `mm_coef_loader` | rows of `A`, rows of the grid |
| `M` | 11 | `mm_top`, `mm_grid`, `mm_row`, `mm_coef_loader` | columns of `A` = rows of `B` |
| `W` | 11 | `mm_vec_fork`, `mm_bank_reader`, `mm_bank_writer`, `mm_css_join` (`N`) | vector width at each block |
| `DATA_W` | 16 | `mm_pkg` | item width |
| `BANK_DW`, `BANK_AW` | 32, 21 | `mm_pkg` | SRAM word and address widths |
| `K_W` | 16 | `mm_pkg` | width of the run-time column count `k` |

The 11 x 11 size and the 16-bit items are those of the published 2D
implementation. `k` is given at run time, up to 65 535.

How the size affects the hardware:

- **Area:** grows with `N*M`. Each cell has one 16 x 16 multiplier, one
  adder and 52 flip-flops: the 16-bit coefficient plus two 17-bit output
  registers, each with a valid bit. At the default size the grid has 121
  multipliers. A generic synthesis run gives about 3 300 word-level cells
  and 6 200 flip-flop bits for the grid. The whole top adds only a few
  hundred flip-flops.
- **Timing:** the critical path is one 16 x 16 multiply plus one add inside
  a cell, whatever the size of the grid.
- **Padding:** a smaller `A` runs on a larger grid if its unused rows and
  columns are filled with zeros.

## Where this design departs from the published one

- **Only the 2D pipelined (systolic) design is built.** The same derivation
  also yields four other architectures, which serve as comparisons:
  - a fully data-parallel one;
  - one with streamed I/O;
  - two one-level pipelines.

  None of these is included.
- **EOT travels in the value channel.** The published design signals end of
  transmission on a separate channel. Here it is a flag in the value
  channel, which keeps values and EOT in order on one handshake.
- **Cells restart after an EOT.** In the process description, each row
  stage terminates after passing its EOT on. Here every block becomes ready
  for the next stream instead.
- **One EOT token per column of the grid.** This follows the per-cell
  process of the systolic network, which tests each `up` token for EOT. The
  published row stage differs: it takes a whole vector of `B` at once and
  forwards one EOT for all of it.
- **A cell moves both outputs in one step.** The processes order a cell's
  actions:
  - one form sends `down` before it reads `left`;
  - the other writes `right` first.

  Here a cell takes `up` and `left` in the same cycle. It also offers
  `right` and `down` in the same cycle. The products are the same. The
  columns stay loosely coupled, because every channel has its own
  handshake and output register.
- **Zero is produced per vector.** The zero that starts each row's sum comes
  from a source that is always ready, rather than from a process started
  once per vector.
- **The grid follows the systolic drawing.** The earlier, unoptimised 2D
  network lists its stages the other way round: the stage for the last row
  of `A` comes first, and it takes the elements of each vector from last to
  first. In the systolic form, the stage order only decides where a row sits
  in the grid. Each result still carries its own row index.
- **Indices start at 0 here.** The published notation starts them at 1.
- **Bits the publication leaves open are this design's own.** These are the
  handshakes, the output registers, the join, the bank address layouts, the
  SRAM timing, the load-then-stream sequencing and the synchronous
  active-low reset.
- **The outgoing `B` is discarded.** The published top level also writes
  the `B` that leaves the grid to bank 3. Here it goes to plain sinks, as in
  the network drawing, and is only counted. The other bank numbers follow
  the published program:
  - bank 0 holds `A`;
  - bank 1 holds `B`;
  - bank 2 receives `C`.
- **The board is outside the RTL.** The FPGA board's SRAM chips and its PCI
  host interface are not part of the RTL. Plain bank ports and
  `start`/`busy`/`done` pins stand where they would connect.

## Simulation

Every testbench is self-checking. Each one ends by printing
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. To build and run
one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/mm_pkg.sv tb/tb_mm_top.sv --top-module tb_mm_top -Mdir obj_top
obj_top/Vtb_mm_top
```

| testbench | what it checks |
|---|---|
| `tb_mm_cell` | random operands, EOTs and back-pressure; 1-cycle latency, one operation per cycle |
| `tb_mm_row` | scalar products against a reference, down streams, EOT, latency `M` |
| `tb_mm_grid` | full 11 x 11 grid with columns fed out of step; results, bottom streams and EOT per column; row `i` latency `i+M` |
| `tb_mm_vec_fork` | every lane gets every item once and in order; one vector per cycle when all lanes are ready |
| `tb_mm_css_join` | vectors assembled in order; EOT only after the last vector |
| `tb_mm_bank_reader` | bank contents, EOT, `k = 0`, `k*(M+2)+2` cycles to the EOT |
| `tb_mm_bank_writer` | bank contents, no overrun, done and count, restart at address 0, `N+1` cycles per vector |
| `tb_mm_coef_loader` | every coefficient written once with the right word, `N*M+1` cycles, ignored restart while busy |
| `tb_mm_top` | end to end at the default size: five runs (`k` = 1, 11, random, 0, 40), each with a new `A`; counts coefficient loads, stalls, EOTs at the sinks, join EOTs and restarts, and fails if any never happened |
| `tb_mm_table2` | end to end on 11 x 11 x `k` for `k` = 11, 99, 199, 299, 599, 999, 2999, 6999, 9999; every item of `C` is checked |

The banks are modelled by `tb/mm_sram_model.sv`, a behavioural single-port
SRAM with one cycle of read latency. The testbenches fill and inspect it
directly.
