# SwitchBlade-style generic GNN accelerator

## Design idea

A GNN layer, whatever the model, is written as one three-phase template
program: a **ScatterPhase** for each destination interval, a
**GatherPhase** for each edge shard of that interval, and an
**ApplyPhase** for the interval again. The graph is cut into intervals of
destination vertices, and each interval into shards. A shard holds the
edges that point into the interval and their source vertices, and it is
sized to fit the on-chip buffers. The hardware runs the template with
shard-level multi-threading:

- one **interval thread** (iThread) runs Scatter and Apply;
- three **shard threads** (sThreads) each run the Gather program on a
  different shard at once.

The threads' instructions then keep the vector unit, the matrix unit and
the memory channel busy at the same time. A phase scheduler pauses and
resumes the threads. A small graph buffer holds one shard per sThread and
prefetches the next shard into a slot as soon as its shard is finished.

All sizes default to the evaluated configuration:

| Part | Default |
|---|---|
| Vector unit | 16 SIMD32 cores |
| Matrix unit | 32 x 128 systolic MAC array |
| DstBuffer | 8 MB |
| SrcEdgeBuffer | 1 MB |
| Weight buffer | 2 MB |
| Graph buffer | 3 shard slots |
| sThreads | 3 |

## Number format and instruction set (`rtl/sb_pkg.sv`)

- **Elements.** 16-bit signed fixed point with 8 fraction bits. A buffer
  row is 512 bits: 32 elements, or 64 bytes. Results wrap; they do not
  saturate.
- **Instruction word.** 64 bits, made of:
  - the opcode;
  - an item-count select: D = interval size, S = shard sources,
    E = shard edges, or a literal;
  - the output and input feature dimensions;
  - three memory symbols (D*n*, S*n*, E*n*, W*n*);
  - an off-chip tensor id.
- **Operators:**
  - ELW: ADD, SUB, MUL, MAX, RELU, LKRELU (slope 2^-6).
  - DMM: GEMM. GEMV is GEMM with one output column.
  - GTR: SCTR.F (edge gets its source), SCTR.B (edge gets its destination),
    G.SUM.F, G.MAX.F (destination reduces its edges).
  - Memory: LD.D, LD.S, LD.E, ST.D, ST.S, ST.E.
- **Broadcast.** An ELW whose input dimension is 1 broadcasts a per-item
  scalar, such as an edge weight.

The number format, the encoding and the row width are choices of this
design. The operator classes and the memory symbols follow the ISA
described for the accelerator.

## Controller (`sb_controller`)

The controller holds:

- one PC per thread;
- the instruction buffer (`sb_inst_buffer`, 1024 entries);
- the decoder (`sb_decoder`);
- three instruction queues (`sb_inst_queue`): memory, vector and matrix;
- the phase scheduler (`sb_phase_sched`).

**Fetch.** Each cycle a round-robin selector picks one thread that is
running and has nothing in flight. The instruction is read at that
thread's PC, decoded, and pushed into the queue of its unit. Each queue
issues when its unit is ready.

**Ordering.** A thread has at most one instruction in flight, so its
instructions finish in program order. Different threads overlap on
different units.

**Decoder.** It resolves the item count from the interval size or from
the metadata of the thread's shard slot. It turns symbols into buffer row
addresses through a host-written symbol table. S and E symbols also get
the base of the thread's private part of the SrcEdgeBuffer. Memory
instructions get their DRAM tensor base and their interval or shard
offset.

**Phase scheduler.** The scheduler's rules are:

- The iThread ending Scatter starts Gather.
- An idle sThread whose slot holds a current shard of this interval is
  jumped to the Gather start.
- An sThread ending a shard is paused, and its slot's update flag is set.
- When the last shard of the interval has finished and no sThread runs,
  the iThread resumes at Apply.
- After Apply comes the next interval, then the next program group, then
  `done`.

A program group is a set of Scatter, Gather and Apply start PCs plus an
end PC. Up to 8 groups can be run one after another, for example the two
layers of a model. The shard stream is rewound for each group.

**Configuration map.** The host writes over a 16-bit address, 64-bit data
port:

| Address | Contents |
|---|---|
| 0x0000 | instruction buffer |
| 0x1000 + {type, num} | symbol bases |
| 0x1100 + id | tensor bases |
| 0x1200 + 4g + {0..3} | PCs of group g |
| 0x1300 | number of groups |
| 0x1301 | vertex count |
| 0x1302 | interval size |
| 0x1303 | number of intervals |
| 0x1304 | shard stream base |
| 0x1305 | shard count |

## Functional units

**Vector unit (`sb_vector_unit`, `sb_vu_core`).** NC SIMD32 cores.

- Work split: for ELW each core takes one item. In scatter each core takes
  one edge; in gather each core takes one destination update.
- Edge look-up: the COO edge of each item is looked up in the issuing
  sThread's graph-buffer slot.
- Timing: each group of NC items takes two cycles (read, then execute and
  write).
- Conflicts: when edges in one group share a destination, the first core
  combines all their rows and the others do not write, so no update is
  lost.

**Matrix unit (`sb_matrix_unit`, `sb_mu_pe`).** An R x C output-stationary
systolic array. Per tile of R items it:

1. loads the activation tile;
2. streams weight rows down the columns, skewed by column, and activations
   across the rows, skewed by row;
3. drains `acc >>> 8` row by row.

Load, compute and drain do not overlap. This is a simplification of this
design.

**Weight buffer (`sb_weight_buffer`).** Rows of C 16-bit weights, one row
read per cycle, written by the host.

## Embedding buffers and crossbar (`sb_spm`, `sb_emb_xbar`)

- **DstBuffer** holds the interval data (symbol D). All threads share it.
- **SrcEdgeBuffer** holds shard sources and edges (symbols S and E). It is
  split into one part per sThread.
- **Ports.** Both buffers are `sb_spm`: 512-bit rows, a registered read,
  and one read and one write port for every unit port.
- **Crossbar.** It steers each unit request to either buffer by a select
  bit, so every unit reaches both buffers in parallel.

## Graph buffer and LSU (`sb_graph_buffer`, `sb_lsu`)

**Graph buffer.** One slot per sThread. Each slot holds:

- the metadata (source and edge counts, interval, last-shard mark, first
  global edge);
- the source list of global ids;
- the COO edge list of local source and destination indices;
- the 1-bit update flag.

**LSU prefetch.** Whenever a flag shows an outdated slot, the LSU loads
the next shard from DRAM into it and then clears the flag. A shard in DRAM
is one header word, then the source-id words (16 per word), then the edge
words (16 per word). Shards are stored back to back.

**LSU memory instructions.** The LSU moves item rows between a symbol and
DRAM tensor rows. LD.S gathers source rows through the shard's source ids.

**DRAM channel.** Valid/ready requests of 64-byte words, with in-order
read responses. The HBM controller itself is outside the design.

## Top (`switchblade_top`)

The top instantiates all the parts above. Its ports are:

- host configuration;
- weight-row writes;
- start and done;
- a status word;
- the DRAM channel.

## Verification

Every block has a self-checking testbench in `tb/`, which compares the
block against a reference model.

There are two end-to-end testbenches. Both partition a random graph on
the host side with the fine-grained rule
`sources*2 + edges*3 <= capacity`, program a one-layer
scatter/gather/apply program, and check every output row:

- `tb_switchblade_top` uses reduced sizes. It runs 40 vertices and 150
  edges in 5 intervals and 17 shards.
- `tb_switchblade_full` uses the default sizes. It runs 160 vertices and
  600 edges in 4 intervals and 15 shards.

They also count the design's mechanisms and fail if one never happens:

- two sThreads running at once;
- units busy together;
- shard prefetch;
- a shard waiting for the next interval;
- the gather conflict merge;
- the broadcast operand;
- a multi-tile GEMM;
- an interval switch;
- DRAM backpressure;
- queue occupancy.

`sb_dram_model` (testbench only) stands in for the memory.

### Running a test

```
verilator --binary --timing --assert -Irtl -Itb rtl/sb_pkg.sv tb/tb_switchblade_top.sv \
  --top-module tb_switchblade_top -Mdir obj && ./obj/Vtb_switchblade_top
```

Every testbench prints a single `TB_RESULT checks=N failures=M` line. The
full-size build takes about 5 minutes to compile and runs in about a
second. The other builds take under a minute.

## Where this design departs from the original architecture

- **Instruction order.** Each thread has at most one instruction in flight.
  This is simple and safe, but it serialises a thread's own instructions.
  The original gives no dependency scheme.
- **Matrix unit overlap.** The matrix unit does not overlap loading,
  computing and draining a tile.
- **Embedding transfers.** All of them go through the LSU. The block
  diagram also draws a direct link from the embedding buffers to the DRAM
  interface.
- **Arithmetic.** Fixed point with wrap-around. The original gives no
  number format.
- **Host tables.** The symbol tables, the tensor tables and the program
  groups are this design's mechanism for address resolution and
  multi-layer runs.

## Not included

- **EXP, DIV and softmax.** The vector unit lacks these operators, so GAT
  attention cannot run.
- **Host software.** The compiler and the partitioner are host software.
  The testbench contains a small partitioner and a hand-compiled program.
- **HBM interface.** The HBM controller and PHY are not part of the
  design.
