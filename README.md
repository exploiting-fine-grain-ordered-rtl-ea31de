# REVEL: a vector-stream accelerator for fine-grain ordered parallelism

Dense linear-algebra kernels such as Cholesky, QR, SVD and triangular solve are
hard to accelerate. Their loops are triangular: the inner trip count shrinks (or
grows) by a fixed amount from one outer iteration to the next. Their parallel
regions are also small and linked by fine-grain dependences. A plain SIMD or
CGRA accelerator loses most of its width to ragged loop ends and to synchronising
through memory.

REVEL attacks this with three ideas, all of which this RTL implements:

* **Inductive streams.** A memory stream describes a whole triangular loop nest in
  one command. Row *j* has `ceil(n_i + j*s)` elements, where the *stretch* `s`
  may be fractional or negative. Input ports can also re-present a vector several
  times, with a reuse count that itself changes by a stretch.
* **Implicit vector masking.** When a row ends part-way through a vector, the
  vector is padded and the unused lanes are predicated off. No software epilogue
  is needed.
* **A heterogeneous dataflow fabric.** Critical dataflows are mapped onto
  fully-pipelined *dedicated* tiles. Infrequent ones, such as a square root or
  division once per outer iteration, time-share *temporal* tiles that run
  triggered instructions. Up to four dataflows fire independently. They pass
  values to each other, and to other lanes, through *XFER* streams instead of
  memory.

The machine is eight identical lanes plus a shared scratchpad. A small in-order
control core (not part of this RTL) computes stream parameters and broadcasts
*vector-stream commands*. Each command carries a lane mask, and every lane offsets
its addresses by its own index.

```
                 commands (cmd_valid / cmd / cmd_ready)
                        |
          +-------------+-------------------------------+
          |                                             |
   shared-SPAD command queue                lane 0 .. lane 7 (broadcast)
   shared scratchpad 128 KB  <== 512-bit shared bus ==> private SPADs
                                 lanes <== 512-bit inter-lane XFER network ==> lanes
```

## Vector-stream commands

Commands are the `cmd_t` struct in `rtl/revel_pkg.sv`. Every address is a 64-bit
*word* address. In lane `L`, a command's `addr` becomes `addr + L*lane_stride`.

| op | meaning | fields used |
|---|---|---|
| `CMD_LOCAL_LD` | private scratchpad -> input port | addr, c_i, c_j, n_i, n_j, s_ji, port, n_c, s_c |
| `CMD_LOCAL_ST` | output port -> private scratchpad | addr, c_i, c_j, n_i, n_j, s_ji, port |
| `CMD_CONST` | value pattern -> input port | n_i, n_j, s_ji, val1, val2, port, n_c, s_c |
| `CMD_XFER` | output port -> input port of lane `(L + dlane) mod 8` | n_i (=n_p), n_j, s_ji (=s_p), port, port2, dlane, n_c, s_c |
| `CMD_CONFIG` | private scratchpad -> fabric configuration | addr, n_i (words) |
| `CMD_SHARED_LD` / `CMD_SHARED_ST` | shared <-> private, whole 512-bit lines | saddr, addr, c_i, c_j, n_i, n_j, lane_stride |
| `CMD_BARRIER_LD` / `CMD_BARRIER_ST` | younger commands wait for older loads / stores | - |

Field meanings:

* **Memory pattern.** Element `(j, i)` is at `addr + j*c_j + i*c_i`. Row `j` has
  `ceil(n_i + j*s_ji)` elements.
* **Fixed-point fields.** The stretch `s_ji` (also `s_p`, `s_c`) is signed fixed
  point with 8 fractional bits, so `-256` means -1 and `128` means +0.5.
* **Reuse count.** `n_c` is an integer from 1 to 255; 0 means 1. It is the
  initial number of times each vector of the destination port is consumed. After
  each vector, that number grows by `s_c`.
* **Const streams.** Row `j` of a Const stream is `ceil(n_i + j*s_ji) - 1` copies
  of `val1` followed by one `val2`. This is a convenient way to give the fabric an
  "end of inner loop" flag, for example to close an accumulation.
* **Wait.** The control core implements Wait by polling `lane_busy` and
  `shared_busy`.

Every port is used by at most one stream at a time. A command that needs a busy
port waits in its lane's command queue, but commands on different ports issue out
of order. Commands that only share scratchpad addresses are not ordered
automatically; barriers order them. `CMD_BARRIER_LD` holds every younger command
until these have finished:

* all older load and Configure streams of the lane;
* any shared-scratchpad transfer that writes into the lane.

`CMD_BARRIER_ST` does the same for stores and for shared transfers that read from
the lane.

## Inside a lane (`lane.sv`)

```
 cmd -> cmd_queue --+--> stream_ctrl <--> spad (128 x 512 b) <--> shared bus
                    |        |  push groups (<= 8 words + end-of-row tag)
                    |        v
                    |    in_port x6 (8,8,4,4,2,1 words, 4-vector FIFOs, reuse)
                    |        v
                    |    compute_fabric (5x5 tiles, df_firing)
                    |        v
                    |    out_port x6 --> stream_ctrl (stores)
                    +--> xfer_unit <--------+--> XFER network --> any lane's in_port
```

### Stream control (`stream_ctrl.sv`)

Stream control holds a table of 8 streams. Each cycle it picks one stream and
moves one group of up to 8 words, which is at most one scratchpad line. A group
never crosses the end of a row. For unit stride, a group never crosses a line
boundary. Any other stride moves one word per cycle. A group is also limited by
the room left in the destination port, or by the data present in the source
port.

The stream picked is the one that will stall its port soonest: the fewest
buffered vectors (`words >> log2(port width)`). For stores, it is the fewest free
vectors.

The last word of each row carries an *end-of-row* tag. That tag is the whole
masking mechanism. The input port cuts a vector short at a tagged word, zero-pads
it and marks the missing lanes off. Load data reaches the port one cycle after the
scratchpad read, and the port space for it is reserved when the read is issued.

### Vector ports (`in_port.sv`, `out_port.sv`, `word_fifo.sv`)

Each port is a FIFO of four vectors of its own width. An input port presents a
vector as soon as it has `W` words, or fewer words closed by an end-of-row tag.
With reuse, the same vector is presented `max(1, ceil(n_r))` times before it is
popped, and `n_r += s_r` after each pop. This is how a triangular solve can reuse
one pivot value for a shrinking number of elements without re-reading memory.

An output port keeps only the result words whose lanes were active. A stream that
drains it therefore sees a dense sequence.

### Compute fabric (`compute_fabric.sv`, `ded_tile.sv`, `temp_tile.sv`, `fu.sv`)

There are 25 tiles in a 5x5 grid (`+` adder, `x` multiplier, `S` sqrt/div). The
two rightmost sqrt/div tiles of the bottom row are the temporal tiles.

```
row 0:  +  x  x  x  x
row 1:  x  +  +  +  +
row 2:  x  +  +  +  +
row 3:  x  +  +  x  +
row 4:  x  +  S  S* S*        (* = temporal)
```

**Mesh.** The tiles sit in a 6x6 mesh of registered switches. Each switch has
five outputs: N, E, S, W and tile. Each output selects one of these, or nothing:

* the neighbouring switch output that faces it;
* the switch's upper-left tile;
* a word of an input port, which is injected when its dataflow fires.

Every link carries a valid bit, and the mesh has no back-pressure.

**Dedicated tiles** read their two operands from the tile outputs of their four
corner switches, their accumulator or a constant. They fire when their operands
are valid and send the result to their lower-right switch. Adders and multipliers
have a latency of one cycle. Sqrt/div has a latency of 12 cycles and accepts a new
operation every 5 cycles.

**Temporal tiles** hold 32 triggered instructions and four operand queues, each
fed from a chosen corner switch or from the other temporal tile. They also have
eight registers. The lowest-numbered instruction whose queues are non-empty
issues, one per cycle. Its result goes to the output link or to a register.
Registers have no ready bits, so producer/consumer spacing is the compiler's job.

**Dataflow firing (`df_firing.sv`).** Every input and output port is assigned to
one of four dataflows. A dataflow fires when two conditions hold. First, all its
input ports present a vector. Second, each of its output ports has room for one
more vector beyond those the dataflow's in-flight instances will deliver. An
instance counts as in flight for a configured number of cycles, which must be at
least the dataflow's pipeline depth. This reservation is what lets the mesh work
without flow control. Several dataflows can fire in the same cycle.

**Configuration.** The configuration is `NCFG = 177` 64-bit words, loaded by a
Configure stream. The word map is in `revel_pkg.sv`:

* 36 switch words;
* 25 tile words;
* 48 output-word selects;
* the firing map;
* the latencies;
* 64 temporal instructions;
* 2 queue-source words.

`tb/revel_tb_pkg.sv` builds a complete example image with three dataflows:

* a 4-wide vector add on four dedicated adders;
* a square root on a temporal tile;
* a pass-through.

### XFER (`xfer_unit.sv`, `xfer_net.sv`)

The XFER unit holds 8 streams. Each stream moves values from an output port to
an input port of any lane, in rows of `ceil(n_p + j*s_p)` values. Each row ends
with an end-of-row tag, so the consumer sees properly masked vectors.

The first group of a stream also carries the destination's reuse parameters. Each
lane drives one 512-bit request per cycle. The network routes each destination
lane's traffic from the lowest-numbered requesting lane. A group moves only if the
destination port has room and is not receiving a scratchpad group in that cycle.

### Shared scratchpad (`shared_spad_ctrl.sv`)

The shared scratchpad is 128 KB (2048 lines), with its own 8-entry command queue.
It moves one 512-bit line per cycle over the shared bus, lane by lane, through the
same `spad` memory model. Its busy flags feed the lanes' barriers.

## Departures from the paper, and limits

* **Arithmetic is integer.** The units compute:
  * 64-bit add, subtract and multiply;
  * unsigned divide and integer square root;
  * 4-way 16-bit subword add and subtract;
  * Q8.8 subword multiply.

  The floating-point modes the paper's benchmarks use are not built.
* **Fabric mix.** It follows the floor-plan drawing: 13 adders, 9 multipliers and
  3 sqrt/div. One summary table instead lists 14 adders.
* **Temporal region.** It has two tiles. The paper's sensitivity study favours a
  single tile, but its configuration and area tables list two.
* **Scratchpad sizes.** The private scratchpad is 8 KB and the shared one 128 KB.
  One table writes both in kilobits.
* **No cross-lane port reservation.** The paper's placeholder streams, and the
  8-bit command-synchronisation network that reserves a *remote* port, are not
  built. A remote XFER destination port is not scoreboarded, so software must not
  start a second stream into that port while the first is still running.
* **Sqrt/div spacing.** An operation offered to a busy sqrt/div unit is dropped
  and counted (`stat_dropped`). Configured dataflow latencies and spacing must
  avoid this.
* **Encodings are this design's own.** This covers the command format,
  configuration map, instruction format and switch encoding, as well as all
  timing details not fixed above.
* **No control core.** The RISC-V control core is not included. The top level
  exposes its command interface instead.

## Using the RTL

The top is `revel_top`, with parameters `LLINES = 128` and `SLINES = 2048`. Each
module is in `rtl/<name>.sv`. The shared types are in `rtl/revel_pkg.sv`.

To simulate a testbench:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/revel_pkg.sv tb/revel_tb_pkg.sv tb/tb_revel_top.sv --top-module tb_revel_top
./obj_dir/Vtb_revel_top
```

Every testbench prints `TB_RESULT checks=N failures=M`.

**End-to-end test.** `tb_revel_top` runs the whole machine at its default sizes.
It preloads the shared scratchpad with a configuration image and per-lane data,
then runs one program on all eight lanes:

1. Shared_Ld, barrier, Configure, barrier.
2. A triangular vector add with inductive rows of 8..1 words, using reuse of a
   constant vector.
3. A square root on the temporal tile, whose results are XFERed to the next lane.
4. Stores, a Wait, and Shared_St.

It checks every result in the shared scratchpad. It also fails if any of these
never happened:

* a masked partial vector;
* port reuse;
* a temporal issue;
* two dataflows firing in one cycle;
* a barrier stall;
* a remote XFER.

**Per-block tests.** Each block has a randomised, self-checking testbench
(`tb/tb_<module>.sv`) with its own reference model.

## Capacity for the target kernels

| Kernel | Fits? |
|---|---|
| Cholesky, QR, SVD, solver, n = 12..32 | A 32x32 matrix of 64-bit words is 8 KB, so it fits one private scratchpad. Triangular matrices need about half of that. |
| FFT | Up to 512 complex points fit privately. 1024 points need the shared scratchpad. |
| GEMM 48x16x64 | Too large for one lane's private scratchpad. It must be split across lanes or streamed from the shared scratchpad. |
