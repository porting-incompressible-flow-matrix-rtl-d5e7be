# Streamed matrix assembly for incompressible flow on an HBM2 FPGA card

Finite-element flow solvers spend much of each time step on *matrix assembly*. For every
element of the mesh, the solver does three things:

- **Gather.** It collects the velocities (`elvel`) and coordinates (`elcod`) of the element's
  nodes from global arrays, using an index table (`lnods`).
- **Compute.** It runs a fixed chain of double-precision computations over the element's Gauss
  points. This is about 7,000 floating-point operations for a 4-node tetrahedron in 3-D.
- **Scatter.** It adds the results back into global arrays through the same index table. The
  results are the right-hand side contribution `elrbu` (12 values), and `eldtrho` and `elmurho`
  (4 values each).

The compute step has a regular dataflow shape and suits an FPGA pipeline. The gather and scatter
are irregular, index-driven memory accesses, and they do not suit one.

This design therefore splits the work:

- **The host CPU** cuts the mesh into chunks. It gathers each chunk's `elvel`/`elcod` into plain
  per-element records in the card's HBM2 memory. Later it reads the per-element results back and
  accumulates them into the global arrays.
- **The FPGA** sees only long, contiguous AXI4 bursts.
  - One input block streams the element records into `NUM_ENGINES` matrix assembly engines,
    one element per cycle per engine.
  - Two output blocks pack the engines' results into 512-bit words and write them back to HBM2.
  - Each block has a start/ready/done/continue handshake (Vitis `ap_ctrl_chain` style). The host
    can therefore start the next chunk's blocks while the current ones are still busy.

```
              HBM2 (AXI4, 512 bit)                                     HBM2 (AXI4, 512 bit)
  4 read ports per engine                                              3 write ports
  +----------------+    elvel,elcod     +-------------------+  elrbu   +-------------------+
  | stream_in      | -----------------> | assembly_engine 0 | -------> | stream_out_writer | -> m_wr[0]
  | (4*NE readers, | -----------------> | assembly_engine 1 | -------> |   (elrbu)         |
  |  FIFOs, joins) |                    |       ...         |          +-------------------+
  +----------------+                    |                   | eldtrho  +-------------------+
                                        |                   | elmurho  | stream_dt_mass_out| -> m_wr[1], m_wr[2]
                                        +-------------------+ -------> | (2 writers)       |
                                          six compute stages           +-------------------+
                                          attach via eng_* ports
```

The top module is `alya_fpga_top`. All of the streaming, buffering, summation, packing, AXI4 and
control logic is RTL. The six computational stages inside each engine are not in this RTL, because
the source describes them only by name and operation count. Their streams are brought out as
`eng_*` ports of the top, with one set per engine. A testbench stand-in drives them; see
[What is not here](#what-is-not-here).

## Element records in HBM2

The input block needs the 12 values of `elvel` and the 12 of `elcod` for every element, every
cycle, for every engine. That is 24 doubles, or 1536 bits, per engine per cycle. One 512-bit AXI4
port delivers only 8 doubles per beat, so each variable is split across two ports and two HBM2
banks:

| read port | holds |
|---|---|
| `4k + 0` | engine k, `elvel` values 0..5 |
| `4k + 1` | engine k, `elvel` values 6..11 |
| `4k + 2` | engine k, `elcod` values 0..5 |
| `4k + 3` | engine k, `elcod` values 6..11 |

- Each element takes exactly one 64-byte beat on each port.
- Value `i` of a half sits at bits `[64i+63 : 64i]`. The remaining bits `[511:384]` are padding.
  This wastes memory, but every element is one beat on every port, so the reader needs no
  realignment.
- Within a variable, value `3*node + dim` is node `node`, coordinate `dim`. This is the
  `(dim, node)` order of the gather loop.
- Elements are dealt round-robin: element `e` of a chunk goes to engine `e mod NUM_ENGINES`. Each
  engine's four buffers therefore hold `ceil((n - k) / NUM_ENGINES)` beats.
- Each base address must be 4 KiB aligned, so that no burst crosses a 4 KiB boundary. Beyond that,
  the buffers may lie anywhere in a 64-bit address space.

On the way out there is one write port per variable. Results are packed densely in element order:

- `elrbu` takes 12 doubles per element, so two elements fill three beats.
- `eldtrho` and `elmurho` take 4 doubles per element, so two elements fill one beat.
- A chunk whose element count does not fill the last beat writes that beat zero-padded.
- Beat `j` of a region holds result doubles `8j .. 8j+7`, lowest at bit 0.

## Stream elvel and elcod in (`stream_in`)

`stream_in` has one `axi_burst_reader` per read port. The block works as follows:

1. **Start.** When started, every reader walks its buffer with INCR bursts.
   - A burst carries at most `MAX_BURST` beats, 64 by default.
   - Bursts never cross a 4 KiB boundary. An assertion checks this.
2. **Buffer.** Each reader feeds a 512-bit first-word-fall-through `stream_fifo` of depth
   `FIFO_DEPTH`.
3. **Join.** For each engine, the low and high halves of `elvel` are joined into one 12-double
   word when both FIFOs have data. The same happens for `elcod`.
4. **Stall handling.** A stalled HBM2 channel stalls only its own engine's stream. The FIFOs soak
   up the gap between bursts.
5. **Done.** `ap_done` rises once every reader has finished and every FIFO has drained.

`stream_in` then accepts the next chunk.

**Rate.** The paper's aim is one element per engine per cycle. `tb_stream_in` checks that a chunk
of `n` elements per engine arrives in `n` cycles plus a fixed start-up latency, once memory
delivers data without stalls.

## Matrix assembly engine (`assembly_engine`)

An engine is a dataflow region. Its stages run concurrently and hand each other per-element and
per-Gauss-point values through FIFOs. The stages, in order, are:

1. **Cartesian derivatives** of the element's shape functions.
2. **Gauss point values**, and **tau and tim**. These are two consumers of the derivative stream.
3. **Element matrices**.
4. **Convective term and RHS**, and **viscous term**.
5. **Add.** Each of these sums the per-Gauss-point contributions of one element.
6. **Send to RHS.** This adds the convective and viscous sums.

`assembly_engine` holds everything in that picture except the six computational stages:

- **Decoupling FIFOs.** Every stream passes through a FIFO, including the long ones that pass
  several stages. No stream skips a stage without buffering, so a slow consumer cannot deadlock
  a producer that writes its streams in a different order.
- **A replication stage (`stream_replicate`).** This copies the cartesian-derivative stream to its
  two consumers.
  - It accepts a word only when every output has taken it.
  - An output that is ready early takes its copy and then waits. Nothing is sent twice.
- **Two Add stages (`gauss_add`).** These are described in
  [Summing over Gauss points](#summing-over-gauss-points-gauss_add).
- **The RHS join (`rhs_combine`).** This is a lock-step join of the convective and viscous sums.
  - It accepts a pair only when both are present.
  - It adds the pair lane by lane in 12 pipelined adders and emits `elrbu` 7 cycles later.
  - Its pipeline only advances when the output can move, so backpressure propagates without
    losing data.
- **`eldtrho`/`elmurho` FIFOs.** These carry the two per-node results of the tau-and-tim stage
  out of the engine.

With all consumers ready, `elrbu` leaves 31 cycles after an element's last Gauss point
contribution enters. That is 1 (FIFO) + 22 (Add) + 7 (join) + 1 (FIFO). `tb_assembly_engine`
checks this figure.

### Summing over Gauss points (`gauss_add`)

In software, the convective and viscous routines accumulate into `elrbu` inside the Gauss-point
loop. A double-precision add takes 7 cycles. A loop-carried sum therefore runs one Gauss point
every 7 cycles.

The fix is to stream each Gauss point's 12 contributions out, and to sum them in a separate
stage:

- `gauss_add` collects the `PGAUS` vectors of one element, with `PGAUS` = 4 by default.
- It then sends them through a chain of `PGAUS-1` pipelined adders per lane:
  `((g0 + g1) + g2) + g3`.
  - This is the order of the original loop, so results match a sequential sum bit for bit.
  - The later operands travel down delay lines so that they meet the running sum at the right
    stage.
- There is no feedback, so a new Gauss point can enter every cycle. A full element is taken every
  `PGAUS` cycles.
- The sum appears `(PGAUS-1) × 7 + 1` = 22 cycles after the element's last vector entered.
- One `en` signal stalls the whole pipeline when the output is not accepted.

### The double-precision adder (`fp64_add`)

`fp64_add` is an IEEE 754 binary64 adder with a pipeline `LATENCY` cycles deep, 7 by default. It
is a single combinational add followed by a register pipe, so the latency is exact. Its behaviour:

- It rounds to nearest, ties to even.
- It handles subnormal inputs and outputs.
- It returns infinity on overflow, and infinities and NaNs propagate.
- Exact cancellation gives +0.
- It has one `en` input that freezes the whole pipe.

A synthesis flow would normally swap this adder for a vendor floating-point core of the same
latency. The 7-cycle figure is the one quoted for the FPGA adder in the source.

## Stream elrbu out and stream eldtrho and elmurho out

The output side takes results from all engines in the same cycle and writes them through a
single AXI4 channel per variable.

**`stream_out_writer`** is one such channel. Each step works as follows:

1. **Gather.** It waits until every engine that still owes an element has one ready. It takes
   them in engine order, which restores chunk element order. The last group of a chunk may be
   short, when `n` is not a multiple of `NUM_ENGINES`.
2. **Pack.** `beat_packer` appends the group's doubles to a small buffer of `IN_MAX + 8` doubles.
   It emits a 512-bit beat whenever 8 doubles are buffered. At the end of the chunk it flushes a
   partial beat, zero-padded.
3. **Write.** `axi_burst_writer` issues write bursts for the beats.
   - The number of beats is `ceil(n × VALS / 8)`.
   - The burst limits are the same as the reader's.
   - Addresses go out ahead of the data.
   - All write responses are counted before the block reports done.

**`stream_dt_mass_out`** is two such writers with `VALS = 4`, one for `eldtrho` and one for
`elmurho`. They sit under one start/done handshake. The block is done only when both writers are
done.

## Block control (`ap_ctrl_chain`)

Each of the three streaming blocks has its own control port set: `ap_start`, `ap_ready`,
`ap_idle`, `ap_done` and `ap_continue`. The top prefixes these `in_`, `rbu_` and `dtm_`. The
block also samples its per-chunk arguments (`n_elems`, base addresses) when it starts.

| state | `ap_idle` | `ap_ready` | `ap_done` | leaves when |
|---|---|---|---|---|
| IDLE | 1 | = `ap_start` | 0 | `ap_start`: arguments captured |
| RUN | 0 | 0 | 0 | all data moved, all write responses received |
| DONE | 0 | 0 | held 1 | `ap_continue` |

- The host may hold `ap_start` high for the next chunk before the current one has been
  acknowledged. The block takes it as soon as the acknowledgement lets it return to IDLE.
- The three blocks are independent. The input block can load chunk c+1 while the output blocks
  still drain chunk c. The top-level test makes this overlap happen and counts it.

## Sizes and throughput

All defaults are the configuration in which every stage of the engine runs on the FPGA.

| parameter | default | meaning |
|---|---|---|
| `NUM_ENGINES` | 2 | engines; the source fits two engines on the device |
| `FP_ADD_LATENCY` / `LATENCY` | 7 | adder pipeline depth (cycles) |
| `PGAUS` | 4 | Gauss points per element (4-node tetrahedra) |
| `LANES` | 12 | doubles per `elrbu` (4 nodes × 3 dimensions) |
| `FIFO_DEPTH` | 16 | depth of every decoupling FIFO (own choice) |
| `MAX_BURST` | 64 | beats per AXI4 burst (own choice) |
| `ADDR_W` | 64 | AXI4 address width (own choice) |
| `CARTD_W` | 832 | bits per cartesian-derivative record: 13 doubles (own guess) |

**Throughput.** The input block can deliver one element per engine per cycle. The engine's
convective and viscous streams carry one Gauss point per cycle, so its Add stages finish one
element every `PGAUS` = 4 cycles. That is the steady rate of an engine as built here.

- Two engines at 300 MHz therefore assemble 150 M elements/s.
- Chunking costs almost nothing. The input of the next chunk overlaps the output of the current
  one, so the pipelines never drain between chunks. Each run below is about 100 cycles over the
  bound, whether it has 1 chunk or 13, and those cycles are the fill and drain of the first and
  last chunk.
- The cycle counts come from `tb_workloads`, which runs with no memory stalls:

| mesh | elements | chunks of ≤ 8192 | cycles | lower bound n·4/2 |
|---|---|---|---|---|
| Cylinder 2D | 1,200 | 1 | 2,501 | 2,400 |
| Venturi 2D | 4,200 | 1 | 8,501 | 8,400 |
| Elbow | 26,410 | 4 | 52,921 | 52,820 |
| Sphere 100K | 100,000 | 13 | 200,101 | 200,000 |

Memory traffic per element is:

- 256 bytes in: four 64-byte beats.
- 160 bytes out: 96 bytes of `elrbu`, and 32 bytes each of `eldtrho` and `elmurho`.

**Mesh sizes.** The meshes used to evaluate the approach run from 1,200 to 32.7 million elements.

- The largest needs 8.4 GB of input records in total. That is more than the card's 8 GB of HBM2,
  so it has to be sent in chunks.
- If a chunk is kept small enough that its `elrbu` region fits one 256 MB bank, the chunk holds
  at most 2,796,202 elements. At that size the 32.7 M mesh is 12 chunks.
- `n_elems` is 32 bits wide. Any chunk the memory can hold is accepted.

## What is not here

- **The six computational stages of the engine.** These are cartesian derivatives, Gauss point
  values, tau and tim, element matrices, convective term and viscous term. The source names them
  and counts their floating-point operations, but gives no formulas. Without formulas they cannot
  be written faithfully. They are ports of `assembly_engine` and `alya_fpga_top`:
  - `cd_elvel`/`cd_elcod` out, `cartd` in.
  - `tau`/`gpv` out.
  - `conv_gp`/`visc_gp` in, one 12-double word per Gauss point.
  - `dt`/`mass` in (from tau and tim), 4 doubles each per element.

  Only the result streams have widths known from the source. The width of the derivative record,
  `CARTD_W`, is a guess.
- **The host side.** This covers the gather (`calculate_transients`), the result accumulation, the
  chunking, PCIe transfers and the run-time that sequences the blocks. The testbenches play this
  role.
- **HBM2 and its controllers.** These are vendor parts. `tb/hbm_model.sv` is a behavioural AXI4
  memory with latency and random stalls, used in the testbenches.

## Where this RTL departs from, or goes beyond, the source

- **Padding per bank.** The source says each half-record is padded by 64 bits per bank. Six
  doubles in a 512-bit beat leave 128 bits, so this layout pads 128 bits and keeps exactly six
  values per half.
- **Engine count.** The source's final configuration moves the cartesian-derivative stage to the
  host, and then streams its results into the engines. What that stream carries per element is
  not given. This design keeps the configuration where the stage is on the FPGA, with two
  engines. The input block still has two AXI4 ports per variable per engine, as in the
  multi-engine version.
- **Dealing elements to engines.** The element-to-engine assignment (`e mod NUM_ENGINES`), the
  record bit order, and the dense output packing are this design's choices. The source says only
  that engines process different elements and that the output is packed into 512-bit writes.
- **AXI4 subset and control.** The design uses only INCR bursts of at most `MAX_BURST` beats, all byte
  strobes set, a single AXI ID, and no error handling on `RRESP`/`BRESP`.
  `ap_ctrl_chain` is reduced to the behaviour in the table above.
- **Element rate of an engine.** The source widens the input so the engine can be fed one
  element per cycle. It also says the per-Gauss-point values are streamed out and summed in a
  later stage. It does not say how many Gauss points an engine handles per cycle. Here the Add
  stages take one per cycle, so an engine finishes an element every 4 cycles. A wider Add stage
  would take all four at once.
- **Summation order.** The Add stages sum in Gauss-point order. The source does not give the
  order.

## Verification

Each block has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=<n> failures=<m>`, and each has a cycle watchdog.

| testbench | block | what it checks |
|---|---|---|
| `tb_fp64_add` | `fp64_add` | 17,500 random and corner-case sums against an independent reference; exact 7-cycle latency; `en` hold |
| `tb_stream_fifo` | `stream_fifo` | order and loss under random valid/ready; full and empty flags against a queue model |
| `tb_stream_replicate` | `stream_replicate` | every output gets each word once, with outputs stalling independently |
| `tb_gauss_add` | `gauss_add` | sums against a sequential reference; 22-cycle latency; one Gauss point per cycle with no bubbles |
| `tb_rhs_combine` | `rhs_combine` | pairing under random skew and backpressure; 7-cycle latency |
| `tb_stream_in` | `stream_in` | three chunks (including 1 element) through a stalling memory; record contents per engine; full-rate timing |
| `tb_stream_out_writer` | `stream_out_writer` | short last groups, partial last beat, burst splitting, memory image |
| `tb_stream_dt_mass_out` | `stream_dt_mass_out` | both regions, and done only after both |
| `tb_assembly_engine` | `assembly_engine` | replicated copies, `elrbu` sums, `eldtrho`/`elmurho` pass-through, 31-cycle latency |
| `tb_alya_fpga_top` | `alya_fpga_top` | end to end at default parameters (details below) |
| `tb_workloads` | `alya_fpga_top` | the element and point counts of four evaluated meshes (1,200 to 100,000 elements), chunked; global results bit for bit, and run time against the Add-stage bound |

**`tb_alya_fpga_top`** runs a random mesh of 700 points and 531 elements through the whole chip,
in five chunks of 301, 150, 77, 2 and 1 elements.

- The testbench does the host's gather into HBM2.
- A stand-in for the computational stages (`tb/engine_stage_model.sv`) uses simple exact
  formulas.
- The testbench reads the results back, scatters them into global arrays, and compares these
  with an independent model of the same per-element arithmetic.
- It counts each mechanism, and fails if any count stays at zero:
  - memory stalls
  - full-length bursts
  - input backpressure
  - Add-stage backpressure
  - a replicate output taking its copy early
  - a short last group
  - a zero-padded last beat
  - `ap_done` held while waiting for `ap_continue`
  - two chunks overlapping in flight

**Running a testbench with Verilator** (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Irtl -Itb rtl/alya_pkg.sv tb/tb_alya_fpga_top.sv \
          --top-module tb_alya_fpga_top -o sim
./obj_dir/sim
```

- Replace the module name to run any other testbench.
- The simulator is two-state. The designs reset everything they read, so random initial values
  (`+verilator+rand+reset+2`) are a useful extra test.
- The end-to-end run takes well under a minute after a build of about half a minute.

## Files

- `rtl/alya_pkg.sv`: shared constants and types. These cover the element geometry, the beat
  format and the control state enum.
- `rtl/alya_fpga_top.sv`: the top.
- `rtl/stream_in.sv`: the input block.
- `rtl/stream_out_writer.sv`, `rtl/stream_dt_mass_out.sv`: the output blocks.
- `rtl/assembly_engine.sv`: one engine.
- `rtl/gauss_add.sv`, `rtl/rhs_combine.sv`, `rtl/fp64_add.sv`: the arithmetic.
- `rtl/stream_fifo.sv`, `rtl/stream_replicate.sv`: stream plumbing.
- `rtl/axi_burst_reader.sv`, `rtl/axi_burst_writer.sv`, `rtl/beat_packer.sv`: AXI4 and packing
  helpers.
- `tb/`: the testbenches, plus the behavioural `hbm_model` and `engine_stage_model`.
