# NeuroTrainer logic die: a programmable training engine inside a memory cube

Training a deep network moves far more data than inference. Every layer runs three
times (feedforward, backpropagation, weight update). Weights and their gradients are
both read and written. Activations of a whole minibatch must be kept. NeuroTrainer
puts the arithmetic where the data is: on the logic die of a 3D-stacked memory with
16 vaults (the Hybrid Memory Cube organisation).

This RTL describes that logic die:

- 15 processing elements (PEs), each paired with its own ("independent") vault;
- a programmable address generator (PMAG) in front of every vault;
- a pipelined bus that links the 16th vault, the common data vault, to all PEs;
- an instruction buffer that runs a whole network layer by layer without the host.

The main idea is that the hardware is the same for every kind of layer; only the
**data flow** is programmed. Data used by only one PE stream from that PE's own vault.
Data needed by all PEs are either copied once into every PE (small common data, such as
convolution kernels) or read once from the common vault and **broadcast** (large common
data, such as the input matrix of a fully connected layer). Results go back either to
each PE's own vault or are **merged** over the bus into the common vault.

```
            host: iBuffer writes, LUT writes, start
                          |
                     +---------+   layer program (PMAG x2, PE)
                     | ibuffer |-------------------------------+
                     +---------+                               |
   vault 0 <-> PMAG 0 <-> PE 0 --+                              |
   vault 1 <-> PMAG 1 <-> PE 1 --+-- bus_if (broadcast / merge) |
     ...                         |          |                   |
   vault 14<-> PMAG 14<-> PE 14--+          |                   |
   vault 15 (common) <-> PMAG 15 <----------+                   |
```

The vault controllers and DRAM dies are not part of the design. Each vault appears at
the top level as a plain port: request/grant, then reads that return in order after any
latency.

## Files

| file | contents |
|---|---|
| `rtl/nt_pkg.sv` | constants, the PMAG and PE program structs, the layer program, enums |
| `rtl/nested_counter.sv` | nested loop counters used by the PMAG (7 levels) and the PE (CNT2) |
| `rtl/pmag.sv` | address generator: counters, g()/f() address datapath, range comparators, LUT, stream FIFO |
| `rtl/lut_unit.sv` | f(x) and f'(x) look-up tables on the read path |
| `rtl/sr_mac.sv` | 32-bit / dual 16-bit fixed-point MAC with low-overhead stochastic rounding |
| `rtl/max_cmp.sv` | max comparator that keeps the position of the maximum |
| `rtl/pe.sv` | processing element: three buffers, K MACs, K comparators, tile sequencing |
| `rtl/bus_if.sv` | 4-stage broadcast/merge bus with REQ-ACK-SEND arbitration |
| `rtl/ibuffer.sv` | 16 KB program store and layer sequencer |
| `rtl/neurotrainer_top.sv` | the logic die |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus end-to-end ones |
| `tb/tb_nt_core.sv`, `tb/vault_mem.sv` | shared end-to-end test body, behavioural vault |

## Programming model: one layer program per step

The whole accelerator is controlled by a **layer program** (`nt_pkg::layer_prog_t`). Each
program has three parts:

- `com`: a PMAG program for the common vault;
- `ind`: one PMAG program shared by all independent vaults;
- `pe`: one PE program shared by all PEs.

The host writes a list of programs into the iBuffer and the LUT contents into the
PMAGs. It then pulses `h_start` with the number of programs.

For each program the iBuffer:

1. copies the program's 31 words into a register, one word per cycle;
2. pulses `go`, which starts every PMAG and PE together;
3. waits until the fabric is idle, that is all PEs `done`, all PMAGs idle and the bus empty.

`done` rises after the last program. A program is 972 bits, stored least-significant
word first at `layer * 31`.

Programs are shared because the PEs work on different parts of the same tensor. They
differ only in the vault they read. Where the parts are laid out differently per vault,
the PMAG's range window shifts by the vault index (see below).

## PMAG: turning loop nests into memory streams

A PMAG is a small stream engine. It has seven nested 16-bit counters `r1..r7` (`r1`
outermost; a count of 0 or 1 runs once) and a constant register `r0`. From the counter
values it computes a word address in two steps. Both follow the structure of the PMAG
block diagram:

```
p = s*stride + t,  q = u*stride + v        s,t,u,v each chosen among r0..r7
addr = base + a*st_a + b*st_b + c*st_c + d*st_d
                                           a,b,c,d each chosen among r1..r7, p, q, r0, 0, 1
```

`p` and `q` map output coordinates plus kernel offsets to input coordinates, as a
convolution needs. `f()` is linear with programmed strides; this is a choice of this
design, because the diagram names f but does not give its formula.

Two strict range comparators test `hmin < h < hmax` and `kmin < k < kmax`. Each of `h`
and `k` is either `r2` or `r3`. The `h` window moves by `vault_index * win_step`.
A step whose coordinates fall outside the window is out of range.

**Read mode (`PM_RD`).** Each counter step is one element of the outgoing stream.

- An in-range step reads the vault.
- An out-of-range step emits a zero (zero padding) or is skipped (dropping a boundary).
- The stream always ends with an END-MARK word, `0xFFFFFFFF`. In 16-bit mode this is two
  16-bit END-MARKs side by side.
- Read data pass through the LUT when `lut` selects f(x) or f'(x). The LUT is indexed by
  the top 8 bits of the value with the sign bit inverted, per 32-bit word or per 16-bit
  lane.
- Words arriving on the incoming stream (PE results, or merged words on the common
  vault) are written at `wbase, wbase+1, ...`.

**Write mode (`PM_WR`).** Each incoming word takes one counter step. It is written at
the computed address, or dropped if out of range. This is how merging, partitioning and
removing padding store their data.

Writes have priority over reads. Reads are issued only while the 8-word output FIFO has
room for every read in flight. A consumer that stalls therefore never loses a word, and
a zero or END-MARK never overtakes a pending read.

## PE: tiles, double buffering and the drain

A PE has three buffers of 16 KB each:

- BUF Input1: 4096 words, one operand word `a` per cycle;
- BUF Input2: 128 rows of K = 32 words, one row `x` per cycle;
- BUF Output: 128 rows of K partial sums.

It also has K `sr_mac` units and K `max_cmp` units. Every lane gets the same `a` and its
own element of `x`. This is how K output pixels, or K samples of a minibatch, are
processed in parallel (SIMD).

Work is organised in **tiles**:

- A BUF Input1 tile is `n2o*n2i` words.
- A BUF Input2 tile is `n1` rows.
- Both input buffers are split into halves, so one half fills while the other is consumed.
- A tile is computed once both current halves are full. For MAX only BUF Input2 is needed.
- A tile takes exactly `n2o*n2i` cycles.

During a tile, CNT2 walks `o < n2o` (outer) and `i < n2i` (inner):

- BUF Input1 is read at `o*n2i+i` (normal), `i*n2o+o` (transposed) or from the end
  (reversed, for a flipped kernel). The transposed sweep gives `W^T` for
  backpropagation with no data reshaping.
- CNT1 steps through the BUF Input2 rows and wraps at `n1`.
- Products go into output row `o`, or all into row 0 with `one_row` (convolution: every
  kernel tap adds to the same K output pixels).

After `acc_tiles` tiles the output rows are **drained**: K words per row, to the own
vault or over the bus. Computing stops while the drain runs, and the `stall` output shows
each cycle in which a full tile waits for it.

Other options:

- With `keep1`, BUF Input1 is loaded once and reused. This is for kernels shared by
  every tile.
- With `src2_bus`, BUF Input2 takes the broadcast stream and BUF Input1 the vault
  stream.
- Without `src2_bus`, the vault stream alternates: one BUF Input1 tile, then one BUF
  Input2 tile.

When every used input has delivered its END-MARK, the PE drains the partial sums that
are left and raises `done`. Words of a tile that was never completed are dropped.

The MAX operation writes `{id, max}` words. `id` is the BUF Input2 row, within the tile,
that held the maximum; ties keep the first. Backpropagation through max pooling needs
this position.

The MOVE operation streams words unchanged from the vault or bus to the vault or bus. It
carries the merge and partition steps that prepare data between convolution and fully
connected layers.

## Arithmetic: fixed point with cheap stochastic rounding

Each MAC computes `y = a*x + y`:

- **32-bit mode:** one Q4.28 operand pair. Use it for backpropagation and weight update.
- **16-bit mode:** two independent Q4.12 pairs in the two halves of each word. Use it for
  feedforward.

Results saturate.

In 32-bit mode, with `sr_en`, the 64-bit sum gets a random 28-bit value added below the
point where it is cropped. The product therefore rounds up with a probability equal to
its discarded fraction (stochastic rounding). The random bits are cheap:

- one 8-bit LFSR per MAC (x^8+x^6+x^5+x^4+1, seeded differently for every lane and PE);
- it shifts one bit per cycle into a 32-bit register;
- that register is masked to 28 bits.

Small gradients then survive on average instead of being truncated to zero.

## Bus: broadcast first, merge by REQ-ACK-SEND

The bus is 32 bits wide with 4 pipeline stages, so a word takes 4 cycles from the common
vault to any PE.

**Broadcast.** A broadcast word leaves the last stage only in a cycle in which every PE
can take it. All PEs therefore receive the same word in the same cycle.

**Merge.** A PE raises REQ. The bus ACKs one requester at a time, lowest index first,
and holds the ACK while REQ is high. The PE then SENDs its words.

Broadcasting has priority: no request is granted in a cycle that moves a broadcast
word. If a broadcast is **blocked** because a PE is not ready, requests are granted. A
PE whose input buffers are full can only become ready again by draining its results
over the bus. Giving the broadcast absolute priority would deadlock, and this exception
prevents it. The two directions have separate 4-stage pipelines behind a shared entry
slot, so merged words never wait behind a stuck broadcast word.

## Example layer programs

`tb/tb_nt_core.sv` contains six complete layer programs that can serve as templates:

- **Fully connected (32 bit).** Each PE reads its rows of W from its own vault. The
  common PMAG reads X, applies f(x) through the LUT and broadcasts it. Partial sums are
  kept over two tiles, and the results are merged into the common vault.
- **Convolution (16 bit).** The kernel is kept in BUF Input1 (`keep1`, `one_row`). The
  common PMAG builds the shifted input rows with `p = r1*K + r2` and broadcasts them.
  Results go to each PE's own vault.
- **Max pooling.** Windows come from the own vault, and the range comparator pads the
  last window element with zero.
- **Partition.** The common vault broadcasts a tensor. Each PE moves it to its PMAG in
  write mode, which keeps only the block whose index equals its vault index (`win_step`
  = 1) and drops the others.
- **Matrix product with a transposed weight sweep.**
- **Weight update `W - eta*dW`, 32 bit with stochastic rounding.** The two
  coefficients `1` and `-eta` are kept in BUF Input1 (`keep1`, `n2o` = 1, `n2i` = 2).
  Each BUF Input2 tile holds a row of W and the matching row of dW, so every lane
  computes `1*W + (-eta)*dW`. The test accepts only the truncated result or one LSB
  above it, and requires some round-ups.

## Verification

Every module has a self-checking testbench that compares against models written
independently in the testbench:

| testbench | what it establishes |
|---|---|
| `tb_nested_counter` | loop order, wrap and `last` for mixed counts, clear |
| `tb_sr_mac` | exact truncated results in both modes, LFSR sequence, round-up rate of SR |
| `tb_max_cmp` | max and first position over random windows, with many ties |
| `tb_lut_unit` | both tables, 32-bit and 16-bit lane indexing, bypass |
| `tb_pmag` | convolution addressing with stride 2, zero padding with LUT, skipping with a shifted window, write mode with drops, sequential write-back; random vault and consumer stalls |
| `tb_pe` | matrix products (normal, transposed, 16 bit, SR bounds), convolution with kept kernel and reversed sweep, max with ID, all four MOVE paths, unfinished tiles, exactly `n2o*n2i` cycles per tile, stall |
| `tb_bus_if` | 4-cycle latency, broadcast held until all PEs are ready, priority order, no grant while broadcasting, merge passing a blocked broadcast |
| `tb_ibuffer` | bit-exact programs at every `go`, waiting for idle, `go` spacing of 32 and 34 cycles, zero-layer start |
| `tb_neurotrainer_top` | the six example layers end to end with 3 PEs and K = 4 |
| `tb_neurotrainer_full` | the same six layers with the default parameters: 15 PEs, K = 32, 16 KB buffers |

The end-to-end tests use a vault model that grants reads in 80% and writes in 30% of the
cycles, with a 3-cycle read latency. They count, and require at least once, each of the
following:

- a broadcast;
- a merge;
- several PEs requesting the bus together;
- a PE stall;
- a 32/16-bit switch;
- a LUT look-up;
- zero padding;
- a dropped write;
- a transposed sweep;
- a MAX;
- a MOVE;
- a stochastic round-up.

They also check the number of computing cycles of PE 0.

To run any testbench with Verilator 5 (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb rtl/nt_pkg.sv \
    tb/tb_pe.sv --top-module tb_pe -Mdir obj_pe
obj_pe/Vtb_pe +verilator+rand+reset+2
```

Each prints `TB_RESULT checks=N failures=M`. The full-size end-to-end test takes about
two minutes to build and well under a second to run.

At the default size, a flattened coarse synthesis of the top gives about:

- 34,000 word-level cells;
- 26,000 flip-flop bits;
- 6.3 Mbit of memory (the 45 PE buffers plus the iBuffer and the LUTs).

## Where this design departs from the paper, and its limits

- **Program size.** The paper counts 22 bytes per layer program (186 layers in 16 KB).
  Here every field is kept at full width: 972 bits, 31 words, so 132 programs fit in
  16 KB. The paper's bit-level program encoding is not published.
- **Address function.** The paper names `f(a,b,c,d)`, `g(s,t)` and `g(u,v)` and their
  inputs but gives no formula. `g = s*stride + t` and a linear `f` with four strides are
  this design's choice, as are the extra decoder inputs `0`, `1` and `r0` for `a..d`.
- **Range windows.** The shift by vault index (`win_step`) and the choice between
  skipping and zero-filling are additions. They let one shared program partition, pad
  and unpad.
- **Number formats.** Q4.28 / Q4.12 (4 integer bits) and saturation are assumptions. In
  16-bit mode there is no stochastic rounding. The LFSR polynomial is this design's own.
- **LUT.** The number of entries (256) and the indexing by the top bits are
  assumptions; no interpolation is done.
- **Buffers.** The PE buffers are sized 16 KB each. The tile bookkeeping (`n2o`, `n2i`,
  `n1`, `acc_tiles`, `keep1`, `one_row`, the sweeps) is this design's interpretation of
  "CNT2 / CNT1 address generators". The paper mentions refilling part of BUF Input2
  during a convolution (sliding rows); this design reloads whole tiles instead.
- **Sharing and MOVE.** All PEs run the same PE program in every layer. MOVE, a PE
  operation used for merge and partition, is this design's way of routing data
  preparation through the PEs.
- **Bus.** The bus grants requests while a broadcast is blocked, as described above.
  Priority is fixed, lowest index first.
- **Not built.** The vault controllers and DRAM, the external (AXI/serial link)
  interface and the host are not built. The layer sequencer has no loops over repeated
  programs, so a long unrolled recurrent network (the paper's GRU with T = 100) needs the
  host to reload the iBuffer in parts. For the same reason, very deep networks such as
  ResNet-152 and Inception V3 exceed one iBuffer load at the full-width program size.
- **Clock.** The clock target of 2.5 GHz in a 15 nm FinFET process is not something this
  RTL can show. The multipliers and the 7-term address datapath are written as single
  combinational stages, and meeting such a clock would need pipelining them.
- **Assertion warnings.** Assertions in `pmag`, `pe` and `bus_if` use
  `disable iff (!rst_n)` together with asynchronous-reset flip-flops. Lint tools warn
  that the reset net is used both synchronously and asynchronously; this concerns only
  the assertions, not the logic.
