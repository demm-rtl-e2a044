# DeMM: a decoupled sparse × dense matrix-multiplication engine

Pruned neural-network weight matrices are mostly zeros. With *relaxed
structured sparsity*, a row of such a matrix may hold at most N non-zeros in
every M consecutive elements, with M large (8:128, for example) rather than
the 1:4 or 2:4 of fine-grained schemes. A systolic array spreads its storage
over its processing elements and expects small, regular blocks, so it copes
poorly with this kind of sparsity.

DeMM takes the storage out of the array. The dense operand B (M rows × C
columns) sits in one ordinary multi-ported memory. The sparse operand A is
given row by row as a short list of `{value, col_idx}` pairs. Each `col_idx`
is used directly as a read address: it fetches row `B[col_idx, :]`, and that
row is scaled by `value`. The scaled rows are then summed. This computes

    C[i, :] = Σ_j A[i, j] · B[j, :]

one output row at a time. The zeros of A are never touched. The hardware is
a memory with N read ports, N × C multipliers, and C adder trees.

This repository holds synthesizable SystemVerilog for the engine in its
reference configuration DeMM(N=8, M=128, C=64, K=8). It also holds
self-checking testbenches for every block and for the whole engine.

## The configuration DeMM(N, M, C, K)

| parameter | default | meaning |
|---|---|---|
| `N` | 8 | read ports of the B memory = non-zeros consumed per cycle |
| `M` | 128 | rows of B = width of the sparsity block of A |
| `C` | 64 | columns of B = output elements produced per row of A |
| `K` | 8 | largest number of passes per row (densest pattern is K·N:M) |
| `DW` | 16 | width of values of A and words of B (signed integers) |
| `AW` | 32 | width of products, sums and accumulators |

By default there are N·C = 512 multipliers. The B memory holds 128 × 64 words
of 16 bits, so it is 128 Kbit. The package `demm_pkg` holds these defaults and
the types `data_t` (16 bits, signed) and `acc_t` (32 bits, signed).

## One row of A, step by step

Take a small engine with N = 2 and a B of 4 rows × 3 columns
`[a b c; d e f; g h i; j k l]`. The row of A is `[3 0 1 0]`. Packed, it
becomes the pairs `{3, col 0}` and `{1, col 2}`.

1. Pair 0 drives read port 0 with address 0, so the port returns `a b c`.
   Pair 1 drives read port 1 with address 2, so the port returns `g h i`.
2. Each port's words are multiplied by that port's value. This gives
   `3a 3b 3c` and `1g 1h 1i`.
3. Each column's products are added: `3a+g`, `3b+h`, `3c+i`. That is row 0
   of the product.

If a row has fewer non-zeros than ports, the spare pairs carry value 0. They
then add nothing, whatever their address is. The rows of A are packed
offline; packing is not part of this RTL. The testbenches do it in software.

## Denser rows: passes and the K:1 operand multiplexers

This is the one part of the engine that is not obvious from the block
diagram.

The memory always holds the same M rows of B, however dense A is. A row with
more than N non-zeros in its block of M is handled in time, not with more
hardware. The engine reads the same memory k times, N pairs per cycle, and
accumulates the results:

* A packed row holds K·N pairs, arranged as K groups of N pairs. Group g is
  pairs `g·N … g·N+N-1`. The row also carries `a_k`, the number of groups
  actually used (1 … K).
* Each read port has a K:1 multiplexer in front of it, one for the address
  and one for the value. In pass g, port n serves pair `g·N + n`.
* Each pass gives one partial sum per column. A per-column accumulator
  loads the sum of the first pass and adds the sums of later passes. After
  pass `a_k − 1` its register holds `C[i, c]`.

So N:M sparsity runs at one row of A per cycle. kN:M runs at one row every k
cycles. With the defaults:

| pattern of A | as seen by the engine | `a_k` | rows per cycle |
|---|---|---|---|
| 8:128 (relaxed) | 8:128 | 1 | 1 |
| 1:8 | 16:128 | 2 | 1/2 |
| 1:4 | 32:128 | 4 | 1/4 |
| 1:2 | 64:128 | 8 | 1/8 |

`a_k` is given with every row, so there is no global mode register. Rows of
different density can follow each other directly. A row of a relaxed matrix
that happens to exceed 8 non-zeros simply takes more passes.

## Pipeline and timing

```
cycle   t0        t0+1 … t0+k         +1              +1             +L            +1
        accept    pass 0 … k-1:       B row read      N×C products   adder tree    accumulate,
        row       addr → memory       (registered)    (registered)   (L levels)    c_valid
```

* The row buffer is loaded at the clock edge that ends the accept cycle t0.
  Passes are issued in cycles t0+1 … t0+k.
* The read data are registered, so they appear one cycle after the address.
  The values go through a matching register.
* The products are registered.
* The adder tree has L = ⌈log₂ N⌉ levels (3 by default), with a register
  after each level.
* The accumulator register is the last stage. `c_valid` goes high for one
  cycle when the last pass of a row has been added.

The latency from accepting a row to `c_valid` is **k + 3 + ⌈log₂ N⌉ cycles**.
That is k + 6 by default. The next row is accepted in the cycle in which the
previous row's last pass issues, so a stream of rows has no bubbles.

`demm_ctrl` does the timing work. It has a group counter and a shift
register of LAT = 2 + L stages. The shift register carries a `{valid, first,
last}` tag for every issued pass, and the tag reaches the accumulators in
the same cycle as that pass's column sums.

## Interface of `demm_engine`

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset of the control state |
| `b_wr_en`, `b_wr_addr`, `b_wr_data[C]` | in | 1, log₂M, C×16 | write one row of B per cycle |
| `a_valid`, `a_ready` | in/out | 1 | valid/ready handshake for one packed row |
| `a_k` | in | log₂(K+1) | passes for this row, 1 … K |
| `a_val[K·N]`, `a_idx[K·N]` | in | 16, log₂M | packed non-zeros and their column indexes |
| `c_valid`, `c_row[C]` | out | 1, C×32 | one finished output row |

Usage rules:

* Pre-load B before issuing rows that read it. The memory is not reset.
* Pairs beyond group `a_k − 1` are ignored.
* B can be rewritten while rows are in flight. A pass reads B as it is in
  the cycle the pass issues.
* `c_row` holds its value until the next row's first pass reaches the
  accumulators. There is no output back-pressure, so the consumer must take
  the row in the cycle `c_valid` is high.
* Assertions check that `a_k` is in range, that `a_valid` is held until
  accepted, and that all addresses lie inside B.

## Modules

| file | block |
|---|---|
| `rtl/demm_pkg.sv` | default configuration and data types |
| `rtl/demm_bmem.sv` | M × C flip-flop memory: 1 write port, N registered read ports |
| `rtl/demm_operand_select.sv` | row buffer of K·N pairs and N K:1 multiplexers |
| `rtl/demm_mult_array.sv` | N × C signed 16 × 16 → 32 multipliers, registered |
| `rtl/demm_reduce_tree.sv` | one N-to-1 pipelined adder tree (one per column) |
| `rtl/demm_accumulator.sv` | one 32-bit per-column accumulator (load on first pass) |
| `rtl/demm_ctrl.sv` | pass sequencer, input handshake, tag pipeline |
| `rtl/demm_engine.sv` | top level: the complete engine |

## How closely this follows the published design

These parts follow the published organisation:

* the decoupled multi-ported B memory (N read ports, 1 write port, M × C);
* the row-wise product with `col_idx` used as the read address;
* N × C multipliers;
* C pipelined N-to-1 adder trees of logarithmic depth;
* K:1 multiplexers per read port for the denser kN:M patterns;
* an adder with a fed-back register per output column;
* 16-bit operands and 32-bit accumulation;
* the DeMM(8, 128, 64, 8) configuration.

These are choices made here, because the published description does not
cover them:

* the place of each pipeline register (registered memory read, one
  multiplier stage, one register per tree level);
* the valid/ready input handshake, and the absence of output back-pressure;
* giving the pass count with each row, instead of a mode setting;
* which pair of which group feeds which multiplexer input;
* signed two's-complement arithmetic, with wrap-around on overflow;
* loading the accumulator on a row's first pass;
* the collision rule (a read in the cycle of a write returns the old row);
* no reset of the memory or of the data registers.

In the published figure, the adder tree and the accumulation adder appear
as one block. Here they are split into two, which gives the same sum.

Outside this RTL:

* packing A into pairs;
* tiling large layers into 128-row blocks of A and 128 × 64 tiles of B;
* the memory system that feeds the engine.

The published area and power figures come from a 28 nm standard-cell
implementation at 500 MHz. Nothing here reproduces them.

## Verification

Each module has a self-checking testbench in `tb/`. Each testbench compares
the module with an independent model and prints
`TB_RESULT checks=… failures=…`. Each has a watchdog that ends a stuck
simulation.

* `tb_demm_bmem` checks the following, on 3 ports × 16 rows × 4 columns:
  * random reads on all ports;
  * that read data hold while `rd_en` is low;
  * that a read in the same cycle as a write returns the old row.
* `tb_demm_operand_select` checks:
  * the group-to-port mapping;
  * the one-cycle value delay;
  * loading the next row during the last pass.
* `tb_demm_mult_array` checks signed extremes (−32768 × −32768, among
  others) and that products hold while the enable is low.
* `tb_demm_reduce_tree` checks N = 8 and N = 5: the sums, the wrap-around,
  and the exact L-cycle latency.
* `tb_demm_accumulator` checks load, add and hold over rows of 1 to 8 passes.
* `tb_demm_ctrl` checks, cycle by cycle against a reference sequencer:
  * the handshake, the group select and the tags;
  * back-to-back streaming.
* `tb_demm_engine` checks the whole engine at N=4, M=32, C=8, K=4, with
  300 random rows:
  * every output word;
  * the latency formula above;
  * the one-row-per-k-cycles input rate.

  It also counts the following events and fails if any never happens:
  * B pre-load;
  * each pass count 1 … K;
  * multi-pass rows;
  * back-to-back rows;
  * input back-pressure;
  * zero-padded rows;
  * full rows;
  * a rewrite of B between batches.
* `tb_demm_full` runs the same test on the engine at its default size,
  DeMM(8, 128, 64, 8), with no parameter overrides. It uses 120 rows with
  every pass count from 1 to 8.
* `tb_demm_example` runs small hand-worked cases with B = 1 … 12 (4 × 3):
  * a one-port engine on rows with one non-zero each;
  * a two-port engine on rows with two non-zeros each;
  * the same two-non-zero rows again on the one-port engine, in two passes
    per row.

  The expected rows are written out as constants.
* `tb_demm_workload` runs the default engine on rows drawn from the sparsity
  patterns used to evaluate the design: relaxed 8:128 (about 95 % zeros),
  1:8, 1:4 and 1:2. For each pattern it checks the results and that the
  cycle count equals the sum of the passes the rows need.

To run a testbench with Verilator 5, from the directory above `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/demm_pkg.sv tb/tb_demm_engine.sv --top-module tb_demm_engine
./obj_dir/Vtb_demm_engine
```

Replace the testbench name to run another one. The full-size engine takes a
few minutes to compile, and its testbenches then run in seconds.

To change the configuration, override the parameters of `demm_engine`
(`N`, `M`, `C`, `K`). Every width is derived from them. Non-power-of-two N
is supported: the tree pads with zeros.
