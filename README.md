# A multi-tenant weight-stationary systolic array

A weight-stationary systolic array normally runs one DNN layer at a time. When
several networks share one accelerator, a small layer leaves most of the array
idle. This design shares one array between several layers at once. It cuts the
array into **vertical partitions**: groups of adjacent columns, each spanning
every row. Each partition runs its own layer. The only change inside the
processing element (PE) is one control input, `mul_en`. It lets a PE let an
input vector from another partition pass through without multiplying it.

The RTL is SystemVerilog (IEEE 1800-2017). The defaults are the evaluated
configuration: 128 x 128 PEs and up to eight partitions (the narrowest
partition the evaluation uses is 128 x 16). Every block has a self-checking
testbench.

## Why only vertical partitions

The array is weight-stationary:

* Each PE keeps one weight in its load register (LR).
* Input vectors ("feed data") enter at the left edge and move one PE to the
  right per cycle.
* Partial sums move one PE down per cycle. The finished dot product of column
  `c` leaves the bottom row.

A partition must therefore own whole columns. If the array were cut
horizontally, the upper partition's partial sums would run into the lower
partition's columns. So a partition is a set of columns, with every row. Its
width is a number of columns, and its height is always `ROWS`.

Columns can be split, but rows cannot: every partition's input vectors travel
along the same row wires. The design **time-shares the rows**. In any cycle, the
left edge takes at most one vector, from one partition. The vector carries that
partition's id (a tag) as it moves right. The PE computes

```
mul_en = feed_valid & column_in_a_partition & (tag == partition_of_this_column)
```

and so multiplies only inside its own partition's columns. Everywhere else it
forwards the vector unchanged. A round-robin arbiter (`rr_arbiter`) picks which
partition sends a vector in each cycle. Weights and results never leave a
partition's columns, so loading and draining need no arbitration. One partition
can load new weights while the others compute.

## The processing element (`mt_pe`)

```
load = 1 :  LR <= RD ;  GD <= RD                       (weights shift down)
load = 0 :  GD <= RD + (mul_en ? LR * FD : 0)          (calculate)
always   :  FD_out <= FD                               (feed moves right)
```

`RD`/`GD` is the vertical link. It carries weights while loading and partial
sums while calculating. So a column loads in `ROWS` cycles, bottom row's weight
first, and only then computes. The published PE puts a tri-state buffer between
multiplier and adder. This RTL instead drives zero into the adder when
`mul_en = 0`, which gives the same sum without a floating net. Operands are
8-bit signed and partial sums 32-bit. These widths are this design's choice and
are enough for 128 products without overflow.

Note on the `load` polarity: the source describes it both ways. This RTL uses
`load = 1` to write LR, as in its dataflow description and its drawing of the
proposed PE.

## Three steps of a layer (`partition_ctrl`)

Each partition has its own sequencer. It runs a **job**, which is
`mt_sa_pkg::job_t`: `lb_base`, `fb_base`, `n_vec` and `db_base`.

1. **Load** (`PS_LOAD`, `ROWS` cycles). The partition's columns read the load
   buffer from `lb_base+ROWS-1` down to `lb_base`. The weights shift into the
   column, so the bottom row's weight goes first.
2. **Feed** (`PS_FEED`). The sequencer requests the shared rows. Each grant
   issues one vector, at feed-buffer address `fb_base + i`.
3. **Drain** (`PS_DRAIN`). Results go into the drain buffer as they appear. The
   step ends when the partition's rightmost column has produced `n_vec`
   results. That column is the last to finish each vector. `done` pulses in
   that cycle.

Latency of an uncontended job, counted from the clock edge that accepts the
dispatch: the `ROWS` load cycles, then `n_vec` feed cycles, then the last
vector reaches column `c` after `ROWS + c` further cycles. `done` follows one
cycle after the last result. For a partition ending at column `COLS-1`, this
totals `2*ROWS + n_vec + COLS + 1` cycles. The testbenches check this number.

## Buffers and data layout

All three buffers are banked so that partitions use them independently. A
partition's share of the load and drain buffers is its own columns. Its share of
the feed buffer is the address range in its job.

| buffer | bank per | word | default depth | host port |
|---|---|---|---|---|
| `load_buffer` (weights) | column | 8 bit | 256 | write one row (masked columns) per cycle |
| `feed_buffer` (inputs) | row | 8 bit | 1024 | write one vector per cycle |
| `drain_buffer` (results) | column | 32 bit | 1024 | read one address across all columns |

The table below shows the layout of a layer with weight matrix `W[k][j]`
(`k < ROWS`, `j < width`) on a partition whose first column is `b`. The layer
has input vectors `a_v` and results `o_v[j] = sum_k W[k][j] * a_v[k]`.

| data | where |
|---|---|
| `W[k][j]` | load buffer column `b+j`, address `lb_base + k` |
| `a_v[k]` | feed buffer row `k`, address `fb_base + v` |
| `o_v[j]` | drain buffer column `b+j`, address `db_base + v` |

The feed buffer skews vectors itself. A read command (enable, address, tag)
passes down a register chain, one stage per row, so row `k` reads its bank `k`
cycles after row 0. Each drain-buffer column has its own write pointer. The
pointer is set to `db_base` when a job starts on that column's partition.
Because of this, results that leave neighbouring columns one cycle apart need
no de-skewing.

The buffer depths are this design's own choice; the source gives no
capacities. Off-chip DRAM sits behind the buffers in a real system. It is not
part of this RTL: the host writes and reads the buffers directly.

## Partitioning and assignment

`partition_table` holds up to `MAXP` entries, each a first column, a width and a
valid bit. It answers three requests:

* **Reset.** One partition covers the whole array. The first layer of the first
  network runs on all PEs.
* **`calc_req` with `n` available layers.** Entries `0..n-1` get
  `floor(COLS/n)` columns each. Columns left over by the floor stay idle. The
  request is accepted only when no partition is busy.
* **`merge_req` with index `i`.** Entry `i` absorbs the partition that starts
  just after its last column, if both are idle. Partitions freed by short
  networks can thus be joined into a wider one for the remaining layers.

Each request answers with `cfg_ack` or `cfg_err` one cycle later.

`task_assign` is combinational. It computes the MAC count
`Opr = M*N*C*R*S*H*W` of each available layer (a `layer_shape_t`). It ranks the
layers from heaviest to lightest and the free partitions from widest to
narrowest. The layer of rank `r` gets the partition of rank `r`. Ties go to the
lower slot or index.

The host reads the result on `asg_valid`/`asg_part` first. It needs this to
know which columns will receive the layer's weights. It writes the buffers and
then raises `disp_req`. That starts every assigned layer on its partition in the
same cycle.

Left to the host, as software:

* the queue of networks and their arrival times;
* the decision when to repartition or merge.

## Top level (`mt_sa_top`)

`mt_sa_top` connects:

* `partition_table`;
* `task_assign`;
* `MAXP` instances of `partition_ctrl`;
* `rr_arbiter`;
* the three buffers;
* `pe_array` (`ROWS x COLS` instances of `mt_pe`).

The column-to-partition map from the table steers three things for each
column: the load-buffer reads, the drain-pointer resets and the `mul_en`
comparison. Parameters:

| parameter | default | meaning |
|---|---|---|
| `ROWS`, `COLS` | 128, 128 | PE array size (evaluated configuration) |
| `MAXP` | 8 | maximum number of partitions (narrowest evaluated partition 128 x 16) |
| `DATA_W`, `ACC_W` | 8, 32 | operand and partial-sum width (own choice) |
| `LB_DEPTH`, `FB_DEPTH`, `DB_DEPTH` | 256, 1024, 1024 | buffer depths (own choice) |

## Where this departs from, or adds to, the published description

* Drives zero instead of a tri-state buffer for `mul_en = 0`.
* Generates `mul_en` from a partition tag that travels with each feed word.
  The source only says `mul_en` is 1 where the data's partition is.
* Time-shares the feed rows between partitions with a round-robin arbiter.
* Reads weights bottom row first, so they shift down the shared vertical link.
  The load step therefore takes `ROWS` cycles per partition. The published
  loop nest writes the load as two spatial (parallel) loops, which describes
  where each weight ends up, not how many cycles it takes.
* Overlaps the drain step with the feed step. Results are written as they
  leave the array, and a PE with no vector of its own adds zero. The published
  description treats drain as a separate step with `mul_en = 1` everywhere.
* No accumulation across tiles. A layer whose `C*R*S` exceeds `ROWS`, or whose
  output channels exceed the partition width, runs as several jobs. The host
  adds the partial results.
* Per-column drain pointers, buffer depths and data widths.
* Accept and reject rules for repartition and merge. The form of the merge
  request (merge `i` with its right neighbour).
* Tie-breaking in task assignment.
* Host queue handling, DRAM and SRAM macros are not implemented.

## Simulating

The testbenches are in `tb/`. Each prints `TB_RESULT checks=N failures=M` and
checks its block against values it computes itself.

* `tb_mt_sa_top` runs the whole design at 8 x 8 with four partitions. It covers
  a single-layer run with its latency, a three-way split with feed contention
  and idle columns, a merge, rejected requests, and a layer started on a
  partition that frees up while another still runs.
* `tb_mt_sa_64` runs a 64 x 64 array with up to eight partitions and the
  default buffers. It runs one layer on the whole array, then two layers on two
  64 x 32 partitions.

64 x 64 is the largest size simulated. The 128 x 128 default passes lint and
elaboration, but building it with Verilator takes more than ten minutes (16384
PE instances).

To build and run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/mt_sa_pkg.sv tb/tb_mt_sa_top.sv --top-module tb_mt_sa_top
./obj_dir/Vtb_mt_sa_top
```

Replace the testbench name to run any other one (`tb_mt_pe`, `tb_pe_array`,
`tb_load_buffer`, `tb_feed_buffer`, `tb_drain_buffer`, `tb_partition_table`,
`tb_task_assign`, `tb_partition_ctrl`, `tb_mt_sa_64`).
